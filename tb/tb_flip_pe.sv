// tb_flip_pe -- one PE with the testbench as its four neighbours.
//
// Vertices 10..13 live in DRF registers 0..3 and run SSSP. Out-edges:
// 10 -> (east PE, 1 hop), 10 -> 11 (w 2), 10 -> 12 (w 5), 11 -> 13 (w 1),
// 12 -> (2 hops north); 13 has none. Incoming from a remote vertex 77:
// 77 -> 12 (w 1). The test starts vertex 10, waits for the PE to go idle
// and checks the DRF, the packets on the mesh outputs (offsets already
// decremented for the first hop) and the credit handshake. It then injects
// a packet from the east neighbour for vertex 12, and a packet for a slice
// that is not loaded, which must come out on the memory bus and keep the PE
// busy while the bus is not ready. The first packet must leave one cycle
// after the start command.
module tb_flip_pe;
  import flip_pkg::*;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic [1:0] rd_idx;
  drf_entry_t rd_data;
  logic [3:0] in_valid, credit_out, out_valid, credit_in;
  pkt_t in_pkt [4], out_pkt [4];
  logic mem_valid, mem_ready, busy, stall, prog_start, prog_exit;
  pkt_t mem_pkt;
  int checks = 0, failures = 0;

  flip_pe #(.XI(2), .YI(1)) dut (.*);

  pkt_t outq [4][$];
  int credits_back [4];
  longint cycle = 0;
  longint first_out = -1;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int d = 0; d < 4; d++) if (rst_n && out_valid[d]) begin
      outq[d].push_back(out_pkt[d]);
      if (first_out < 0) first_out = cycle;
    end
  end
  // neighbours return every credit two cycles later
  logic [3:0] ret1, ret2;
  always @(posedge clk) begin
    ret1 <= out_valid; ret2 <= ret1;
  end
  assign credit_in = ret2;

  task automatic wr(cfg_tgt_e tgt, int addr, logic [31:0] data);
    @(negedge clk);
    cfg.we = 1; cfg.x = 3'd2; cfg.y = 3'd1; cfg.tgt = tgt; cfg.addr = 5'(addr); cfg.data = data;
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic logic [31:0] ins(opcode_e op, int rd, int ra, int rb, int imm);
    instr_t i;
    i = '0; i.op = op; i.rd = 3'(rd); i.ra = 3'(ra); i.rb = 3'(rb); i.imm = 8'(imm);
    return 32'(i);
  endfunction

  function automatic logic [31:0] inter(int src, bit xd, int xh, bit yd, int yh, int nxt);
    inter_entry_t e;
    e = '{valid: 1'b1, src_id: 8'(src), x_off: '{xd, 3'(xh)}, y_off: '{yd, 3'(yh)}, slice: 8'd0, next: 5'(nxt)};
    return 32'(e);
  endfunction

  function automatic logic [31:0] intra(int src, int r, int w, int nxt);
    intra_entry_t e;
    e = '{valid: 1'b1, src_id: 8'(src), reg_idx: 2'(r), weight: 8'(w), next: 5'(nxt)};
    return 32'(e);
  endfunction

  task automatic wait_idle();
    int quiet = 0;
    while (quiet < 3) begin @(posedge clk); quiet = busy ? 0 : quiet + 1; end
  endtask

  task automatic expect_attr(int r, int v);
    rd_idx = 2'(r);
    #1 checks++;
    if (rd_data.attr != 8'(v)) begin failures++; $display("reg %0d attr %0d expected %0d", r, rd_data.attr, v); end
  endtask

  task automatic expect_out(int d, int id, int attr, int xh, int yh);
    checks++;
    if (outq[d].size() == 0) begin failures++; $display("no packet on port %0d", d); return; end
    if (outq[d][0].id != 8'(id) || outq[d][0].attr != 8'(attr) ||
        outq[d][0].x_off.hops != 3'(xh) || outq[d][0].y_off.hops != 3'(yh)) begin
      failures++; $display("port %0d packet %h", d, outq[d][0]);
    end
    void'(outq[d].pop_front());
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_start;
    cfg = '0; rd_idx = 0; in_valid = 0; mem_ready = 0;
    for (int d = 0; d < 4; d++) in_pkt[d] = '0;
    rst_n = 1; #1 rst_n = 0; #20 rst_n = 1;
    // SSSP program
    wr(CFG_IM, 0, ins(OP_ADD, 3, 0, 1, 0)); wr(CFG_IM, 1, ins(OP_MIN, 3, 3, 2, 0));
    wr(CFG_IM, 2, ins(OP_XEQ, 0, 3, 2, 0)); wr(CFG_IM, 3, ins(OP_ST, 0, 3, 0, 0));
    wr(CFG_IM, 4, ins(OP_SCAT, 0, 3, 0, 0));
    for (int r = 0; r < 4; r++) wr(CFG_DRF, r, 32'({8'(10 + r), 8'hFF}));
    wr(CFG_SLICE, 0, 32'd0);
    // Inter-Table: heads 0..3, list of 10 = east (farthest first), 11, 12
    wr(CFG_INTER, 0, inter(10, 1, 1, 1, 0, 4));
    wr(CFG_INTER, 4, inter(10, 1, 0, 1, 0, 5));
    wr(CFG_INTER, 5, inter(10, 1, 0, 1, 0, 0));
    wr(CFG_INTER, 1, inter(11, 1, 0, 1, 0, 0));
    wr(CFG_INTER, 2, inter(12, 1, 0, 1, 2, 0));
    // Intra-Table: 10 % 8 = 2 -> reg1 (w2), reg2 (w5); 11 % 8 = 3 -> reg3 (w1);
    // 77 % 8 = 5 -> reg2 (w1)
    wr(CFG_INTRA, 2, intra(10, 1, 2, 8));
    wr(CFG_INTRA, 8, intra(10, 2, 5, 0));
    wr(CFG_INTRA, 3, intra(11, 3, 1, 0));
    wr(CFG_INTRA, 5, intra(77, 2, 1, 0));

    // start vertex 10 with distance 0
    @(negedge clk);
    cfg.we = 1; cfg.x = 3'd2; cfg.y = 3'd1; cfg.tgt = CFG_START; cfg.addr = 5'd0; cfg.data = 32'd0;
    t_start = cycle;
    @(negedge clk) cfg.we = 0;
    wait_idle();
    checks++;
    if (first_out - t_start != 1) begin failures++; $display("first packet after %0d cycles", first_out - t_start); end
    expect_attr(0, 0); expect_attr(1, 2); expect_attr(2, 5); expect_attr(3, 3);
    expect_out(1, 10, 0, 0, 0);   // east, last hop
    expect_out(0, 12, 5, 0, 1);   // north, one more hop
    checks++;
    if (outq[2].size() + outq[3].size() + outq[0].size() + outq[1].size() != 0) begin
      failures++; $display("extra packets");
    end

    // packet from vertex 77 arriving from the east neighbour
    @(negedge clk);
    in_valid[1] = 1; in_pkt[1] = '{id: 8'd77, x_off: '{1'b0, 3'd0}, y_off: '{1'b1, 3'd0}, attr: 8'd1, slice: 8'd0};
    @(negedge clk) in_valid[1] = 0;
    begin
      int got_credit = 0;
      for (int k = 0; k < 5; k++) begin @(posedge clk); if (credit_out[1]) got_credit++; end
      checks++;
      if (got_credit != 1) begin failures++; $display("credit_out pulses %0d", got_credit); end
    end
    wait_idle();
    expect_attr(2, 2);
    expect_out(0, 12, 2, 0, 1);

    // packet for a slice that is not loaded: memory buffer
    @(negedge clk);
    in_valid[2] = 1; in_pkt[2] = '{id: 8'd99, x_off: '{1'b1, 3'd0}, y_off: '{1'b1, 3'd0}, attr: 8'd4, slice: 8'd7};
    @(negedge clk) in_valid[2] = 0;
    repeat (4) @(posedge clk);
    #1 checks += 2;
    if (!mem_valid || mem_pkt.id != 8'd99 || mem_pkt.slice != 8'd7) begin failures++; $display("memory bus packet missing"); end
    if (!busy) begin failures++; $display("PE idle with a packet in the memory buffer"); end
    @(negedge clk) mem_ready = 1;
    @(negedge clk) mem_ready = 0;
    #1 checks += 2;
    if (mem_valid) begin failures++; $display("memory buffer not drained"); end
    expect_attr(2, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
