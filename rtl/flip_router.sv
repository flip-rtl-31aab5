// flip_router -- dynamic YX dimension-ordered router of one PE.
//
// Five inputs compete each cycle: the heads of the N, E, S, W input buffers
// and the local input L_in (packets packed from the ALUout buffer). For
// every head the route is computed at once: a packet with y hops left goes
// north (y dir = 1) or south (y dir = 0), else one with x hops left goes
// east (x dir = 1) or west (x dir = 0), else it has arrived and leaves on
// L_out. A packet for L_out is compared with the Slice ID Register: on a
// match it is bound for the ALUin buffer, otherwise for the memory buffer.
// A head is eligible when its output can take it: a credit is left for a
// mesh output, or the buffer it is bound for has room. A round-robin
// arbiter grants one eligible head per cycle (one packet crosses the
// crossbar per cycle); the granted packet leaves with the hop count of the
// dimension it moves in decremented by one. The credit counter of a mesh
// output starts at the neighbour's input buffer depth.
//
// From the paper: YX dimension-ordered routing, 4-bit offsets with a
// direction bit, decrement per hop, arrival when both hop counts are zero,
// one packet selected per cycle by an arbiter, credit counters. Own
// choices: round-robin arbitration, 1 = north/east as positive direction,
// a combinational path from buffer head to the neighbour's buffer input
// (one cycle per hop).
module flip_router
  import flip_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  // inputs: index 0..3 = N, E, S, W input buffer heads, 4 = L_in
  input  logic [4:0] in_valid,
  input  pkt_t       in_pkt [5],
  output logic [4:0] in_pop,
  // mesh outputs 0..3 = N, E, S, W
  output logic [3:0] out_valid,
  output pkt_t       out_pkt [4],
  input  logic [3:0] credit_in,
  // local output L_out, split by the slice comparison
  input  logic [SLICE_W-1:0] slice_id,   // Slice ID Register
  input  logic       aluin_ready,  // ALUin buffer has room
  input  logic       membuf_ready, // memory buffer has room
  output logic       lout_valid,
  output pkt_t       lout_pkt,
  output logic       lout_hit,     // slice loaded: packet goes to ALUin
  // status
  output logic       stall        // some head waited for its output
);
  port_e      dest [5];
  pkt_t       next_pkt [5];
  logic [4:0] eligible;
  logic [4:0] slice_hit;
  logic [3:0] has_credit;
  logic [2:0] rr;          // first input to consider
  logic [2:0] gnt;
  logic       gnt_valid;

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      next_pkt[i] = in_pkt[i];
      if (in_pkt[i].y_off.hops != '0) begin
        dest[i] = in_pkt[i].y_off.dir ? PORT_N : PORT_S;
        next_pkt[i].y_off.hops = in_pkt[i].y_off.hops - 1'b1;
      end else if (in_pkt[i].x_off.hops != '0) begin
        dest[i] = in_pkt[i].x_off.dir ? PORT_E : PORT_W;
        next_pkt[i].x_off.hops = in_pkt[i].x_off.hops - 1'b1;
      end else begin
        dest[i] = PORT_L;
      end
      slice_hit[i] = (in_pkt[i].slice == slice_id);
      eligible[i] = in_valid[i] &&
                    ((dest[i] == PORT_L) ? (slice_hit[i] ? aluin_ready : membuf_ready)
                                         : has_credit[dest[i][1:0]]);
    end
  end

  // round-robin arbiter
  always_comb begin
    gnt       = '0;
    gnt_valid = 1'b0;
    for (int k = 0; k < 5; k++) begin
      logic [3:0] c;
      c = {1'b0, rr} + 4'(k);
      if (c >= 4'd5) c = c - 4'd5;
      if (!gnt_valid && eligible[c[2:0]]) begin
        gnt       = c[2:0];
        gnt_valid = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (gnt_valid) rr <= (gnt == 3'd4) ? 3'd0 : gnt + 1'b1;
  end

  always_comb begin
    in_pop     = '0;
    out_valid  = '0;
    lout_valid = 1'b0;
    lout_pkt   = next_pkt[gnt];
    lout_hit   = slice_hit[gnt];
    for (int d = 0; d < 4; d++) out_pkt[d] = next_pkt[gnt];
    if (gnt_valid) begin
      in_pop[gnt] = 1'b1;
      if (dest[gnt] == PORT_L) lout_valid = 1'b1;
      else                     out_valid[dest[gnt][1:0]] = 1'b1;
    end
  end

  assign stall = |(in_valid & ~eligible);

  for (genvar d = 0; d < 4; d++) begin : g_credit
    flip_credit_counter #(.DEPTH(BUF_DEPTH)) u_cc (
      .clk, .rst_n, .send(out_valid[d]), .credit_in(credit_in[d]),
      .has_credit(has_credit[d]), .credits()
    );
  end

  always_ff @(posedge clk) if (rst_n) a_one_hot_out: assert ($onehot0({out_valid, lout_valid}));
endmodule
