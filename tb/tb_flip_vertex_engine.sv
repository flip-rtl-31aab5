// tb_flip_vertex_engine -- runs the SSSP vertex program on packets taken
// from an ALUin queue, with the Intra-Table, Instruction Memory and DRF
// attached. Checks the DRF attributes and every scatter against a model of
// vdist(v) = min(vdist(v), vdist(u) + w), that one packet reaching two vertices
// of the PE runs the program twice, and the cycle count per packet: one
// cycle per list entry, 5 more cycles for a run that updates and
// scatters, 3 for a run that exits early. A full ALUout buffer must hold
// the program start back.
module tb_flip_vertex_engine;
  import flip_pkg::*;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ALUin queue model
  logic aluin_valid, aluin_pop;
  pkt_t aluin_head;
  // Intra-Table
  logic it_req, it_advance, it_hit, it_last, it_we;
  logic [7:0] it_src_id, it_weight;
  logic [1:0] it_reg_idx;
  logic [4:0] it_addr;
  intra_entry_t it_data;
  // IM
  logic [4:0] pc, im_addr;
  logic [31:0] instr_word, im_data;
  logic im_we;
  // DRF
  logic [1:0] drf_idx, st_idx, rb_idx;
  drf_entry_t drf_data, rb_data, drf_cfg;
  logic st_we, drf_we;
  logic [2:0] drf_cfg_idx;
  logic [7:0] st_data;
  // ALUout
  logic aluout_push, aluout_full, busy, prog_start, prog_exit;
  aluout_t aluout_data;

  flip_vertex_engine dut (.*);
  flip_intra_table u_it (.clk, .rst_n, .cfg_we(it_we), .cfg_addr(it_addr), .cfg_data(it_data),
    .req(it_req), .src_id(it_src_id), .advance(it_advance), .hit(it_hit), .last(it_last),
    .reg_idx(it_reg_idx), .weight(it_weight));
  flip_imem u_im (.clk, .we(im_we), .waddr(im_addr), .wdata(im_data), .raddr(pc), .rdata(instr_word));
  flip_drf u_drf (.clk, .rst_n, .cfg_we(drf_we), .cfg_idx(drf_cfg_idx[1:0]), .cfg_data(drf_cfg),
    .attr_we(1'b0), .attr_idx(2'd0), .attr_data(8'd0), .st_we, .st_idx, .st_data,
    .ra_idx(drf_idx), .ra_data(drf_data), .rb_idx, .rb_data);

  function automatic logic [31:0] ins(opcode_e op, int rd, int ra, int rb, int imm);
    instr_t i;
    i = '0; i.op = op; i.rd = 3'(rd); i.ra = 3'(ra); i.rb = 3'(rb); i.imm = 8'(imm);
    return 32'(i);
  endfunction

  int vdist [4];
  int vid [4] = '{20, 21, 22, 23};
  aluout_t exp_scat [$];
  int n_scat = 0;

  always @(posedge clk) if (rst_n && aluout_push) begin
    checks++;
    if (exp_scat.size() == 0 || aluout_data != exp_scat[0]) begin
      failures++; $display("scatter %h unexpected", aluout_data);
    end
    if (exp_scat.size() > 0) void'(exp_scat.pop_front());
    n_scat++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // intra entries: src 5 -> reg0 w3, reg2 w10 ; src 13 -> reg1 w1 ; src 6 -> reg3 w2
  intra_entry_t tbl [32];
  initial begin
    int srcs [4] = '{5, 13, 6, 9};
    aluin_valid = 0; aluin_head = '0; aluout_full = 0; it_we = 0; im_we = 0; drf_we = 0;
    it_addr = 0; it_data = '0; im_addr = 0; im_data = 0; drf_cfg = '0; drf_cfg_idx = 0; rb_idx = 0;
    rst_n = 1; #1 rst_n = 0; #20 rst_n = 1;
    for (int i = 0; i < 32; i++) tbl[i] = '0;
    tbl[5]  = '{1'b1, 8'd5, 2'd0, 8'd3, 5'd8};
    tbl[8]  = '{1'b1, 8'd13, 2'd1, 8'd1, 5'd9};
    tbl[9]  = '{1'b1, 8'd5, 2'd2, 8'd10, 5'd0};
    tbl[6]  = '{1'b1, 8'd6, 2'd3, 8'd2, 5'd0};
    for (int i = 0; i < 32; i++) begin @(negedge clk); it_we = 1; it_addr = 5'(i); it_data = tbl[i]; end
    @(negedge clk) it_we = 0;
    begin
      logic [31:0] p [5];
      p[0] = ins(OP_ADD, 3, 0, 1, 0); p[1] = ins(OP_MIN, 3, 3, 2, 0);
      p[2] = ins(OP_XEQ, 0, 3, 2, 0); p[3] = ins(OP_ST, 0, 3, 0, 0); p[4] = ins(OP_SCAT, 0, 3, 0, 0);
      for (int a = 0; a < 5; a++) begin @(negedge clk); im_we = 1; im_addr = 5'(a); im_data = p[a]; end
      @(negedge clk) im_we = 0;
    end
    vdist = '{100, 50, 255, 7};
    for (int r = 0; r < 4; r++) begin
      @(negedge clk); drf_we = 1; drf_cfg_idx = 3'(r); drf_cfg = '{vid: 8'(vid[r]), attr: 8'(vdist[r])};
    end
    @(negedge clk) drf_we = 0;

    // ALUout full holds the start back
    aluout_full = 1; aluin_valid = 1; aluin_head = '{id: 8'd6, x_off: '0, y_off: '0, attr: 8'd1, slice: '0};
    repeat (6) begin
      #1 checks++;
      if (prog_start) begin failures++; $display("program started with ALUout full"); end
      @(negedge clk);
    end
    aluin_valid = 0; aluout_full = 0;

    for (int q = 0; q < 150; q++) begin
      int s, a, exp_cyc, cyc, idx;
      s = srcs[$urandom % 4];
      a = $urandom % 120;
      // model: walk the list of bucket s % 8
      exp_cyc = 0;
      idx = s % 8;
      while (1) begin
        if (tbl[idx].valid && tbl[idx].src_id == s) begin
          int r, nd;
          r = tbl[idx].reg_idx;
          nd = a + tbl[idx].weight; if (nd > 255) nd = 255;
          if (nd < vdist[r]) begin
            vdist[r] = nd; exp_cyc += 1 + 5;
            exp_scat.push_back('{reg_idx: 2'(r), vid: 8'(vid[r]), attr: 8'(nd)});
          end else exp_cyc += 1 + 3;
        end else exp_cyc += 1;
        if (!tbl[idx].valid || tbl[idx].next == 0) break;
        idx = tbl[idx].next;
      end
      aluin_valid = 1; aluin_head = '{id: 8'(s), x_off: '0, y_off: '0, attr: 8'(a), slice: '0};
      cyc = 0;
      while (1) begin
        #1 cyc++;
        if (aluin_pop) break;
        @(negedge clk);
      end
      @(negedge clk) aluin_valid = 0;
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("src %0d: %0d cycles, expected %0d", s, cyc, exp_cyc); end
      for (int r = 0; r < 4; r++) begin
        rb_idx = 2'(r);
        #1 checks++;
        if (rb_data.attr != 8'(vdist[r])) begin failures++; $display("vdist[%0d]=%0d exp %0d", r, rb_data.attr, vdist[r]); end
      end
      // lower the distances now and then so that updates keep happening
      if (q % 10 == 9) begin
        for (int r = 0; r < 4; r++) begin
          @(negedge clk); drf_we = 1; drf_cfg_idx = 3'(r); vdist[r] = 150 + $urandom % 100;
          drf_cfg = '{vid: 8'(vid[r]), attr: 8'(vdist[r])};
        end
        @(negedge clk) drf_we = 0;
      end
    end
    checks++;
    if (exp_scat.size() != 0 || n_scat == 0) begin failures++; $display("scatters missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
