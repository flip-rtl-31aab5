// tb_flip_router -- random traffic through one router. Five input queues
// (N, E, S, W buffers and L_in) hold random packets; downstream buffers
// return credits at random; the ALUin and memory buffers accept at random.
// Checks for every granted packet: YX order (y first, then x), direction
// bits, hop decrement, arrival when both hop counts are zero, the slice
// comparison that splits L_out into ALUin and memory buffer, at most one
// packet per cycle, no send without credit, and that every packet leaves
// exactly once. Also checks that a stalled head is reported.
module tb_flip_router;
  import flip_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  logic [4:0] in_valid, in_pop;
  pkt_t in_pkt [5];
  logic [3:0] out_valid, credit_in;
  pkt_t out_pkt [4];
  logic [7:0] slice_id;
  logic aluin_ready, membuf_ready, lout_valid, lout_hit, stall;
  pkt_t lout_pkt;
  int checks = 0, failures = 0;

  flip_router #(.BUF_DEPTH(DEPTH)) dut (.*);

  pkt_t q [5][$];
  int credits [4], pending [4];
  int sent = 0, received = 0, n_stall = 0;
  logic [4:0] popped;

  function automatic pkt_t rand_pkt();
    pkt_t p;
    p = pkt_t'($urandom);
    p.slice = ($urandom % 4 == 0) ? 8'd9 : 8'd3;
    if ($urandom % 3 == 0) p.y_off.hops = '0;
    if ($urandom % 3 == 0) p.x_off.hops = '0;
    return p;
  endfunction

  always_comb for (int i = 0; i < 5; i++) begin
    in_valid[i] = q[i].size() > 0;
    in_pkt[i]   = in_valid[i] ? q[i][0] : '0;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    slice_id = 8'd3; credit_in = 0; aluin_ready = 1; membuf_ready = 1;
    for (int d = 0; d < 4; d++) begin credits[d] = DEPTH; pending[d] = 0; end
    rst_n = 1; #1 rst_n = 0; #20 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // new packets
      for (int i = 0; i < 5; i++) if (t < 2000 && q[i].size() < 6 && ($urandom % 4 == 0)) begin
        q[i].push_back(rand_pkt()); sent++;
      end
      // downstream drains
      for (int d = 0; d < 4; d++) begin
        credit_in[d] = (pending[d] > 0) && ($urandom % 3 == 0);
      end
      aluin_ready  = ($urandom % 4 != 0);
      membuf_ready = ($urandom % 2 != 0);
      #1;
      // check the grant of this cycle
      checks++;
      if ($countones(in_pop) > 1 || $countones({out_valid, lout_valid}) != $countones(in_pop)) begin
        failures++; $display("grant count wrong: pop %b out %b l %b", in_pop, out_valid, lout_valid);
      end
      if (stall) n_stall++;
      for (int i = 0; i < 5; i++) if (in_pop[i]) begin
        pkt_t p, e;
        int dir;
        p = q[i][0];
        e = p;
        if (p.y_off.hops != 0) begin dir = p.y_off.dir ? 0 : 2; e.y_off.hops = p.y_off.hops - 1; end
        else if (p.x_off.hops != 0) begin dir = p.x_off.dir ? 1 : 3; e.x_off.hops = p.x_off.hops - 1; end
        else dir = 4;
        checks++;
        if (dir == 4) begin
          if (!lout_valid || lout_pkt != e || lout_hit != (p.slice == slice_id) ||
              !(lout_hit ? aluin_ready : membuf_ready)) begin
            failures++; $display("local delivery wrong for %h", p);
          end
        end else begin
          if (!out_valid[dir] || out_pkt[dir] != e || credits[dir] == 0) begin
            failures++; $display("packet %h should leave on %0d with credit %0d", p, dir, credits[dir]);
          end
        end
        received++;
      end
      popped = in_pop;
      @(posedge clk);
      #1;
      for (int i = 0; i < 5; i++) if (popped[i]) void'(q[i].pop_front());
      for (int d = 0; d < 4; d++) begin
        if (credit_in[d]) begin credits[d]++; pending[d]--; end
      end
    end
    // count sends: sampled before the pops above, so count from out_valid separately
    checks++;
    if (received != sent) begin
      failures++; $display("sent %0d, delivered %0d", sent, received);
      for (int i = 0; i < 5; i++) if (q[i].size() > 0) $display("q%0d head %h dest %0d elig %b", i, q[i][0], dut.dest[i], dut.eligible);
      for (int d = 0; d < 4; d++) $display("model credits %0d pending %0d", credits[d], pending[d]);
    end
    checks++;
    if (n_stall == 0) begin failures++; $display("no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // credit model: a packet sent uses one downstream slot
  always @(posedge clk) if (rst_n) for (int d = 0; d < 4; d++) if (out_valid[d]) begin
    credits[d]--; pending[d]++;
  end
endmodule
