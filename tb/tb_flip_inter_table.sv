// tb_flip_inter_table -- Inter-Table packer test. Builds random out-edge
// lists for the four vertices of a PE (heads at entries 0..3, successors
// scattered over 4..31), feeds scatter requests from an ALUout queue and
// accepts packets with random back-pressure. Every packet must carry the
// vertex id, the new attribute and the offsets/slice of the next list entry,
// in list order; the request is popped with its last packet, at once for a
// vertex without out-edges, and one packet leaves per accepted cycle.
module tb_flip_inter_table;
  import flip_pkg::*;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  logic cfg_we, aluout_valid, aluout_pop, pkt_valid, pkt_ready;
  logic [4:0] cfg_addr;
  inter_entry_t cfg_data;
  aluout_t aluout_head;
  pkt_t pkt;
  int checks = 0, failures = 0;

  flip_inter_table dut (.*);

  inter_entry_t tbl [32];
  int nlist [4];
  int lists [4][8];
  aluout_t reqs [$];
  pkt_t exp_q [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nfree, got, busy_cycles;
    cfg_we = 0; cfg_addr = 0; cfg_data = '0; aluout_valid = 0; aluout_head = '0; pkt_ready = 0;
    rst_n = 1; #1 rst_n = 0; #20 rst_n = 1;
    for (int i = 0; i < 32; i++) tbl[i] = '0;
    nfree = 4;
    for (int r = 0; r < 4; r++) begin
      nlist[r] = (r == 2) ? 0 : 1 + $urandom % 6;   // vertex 2 has no out-edges
      for (int k = 0; k < nlist[r]; k++) begin
        int idx;
        if (k == 0) idx = r;
        else begin idx = nfree; nfree++; end
        lists[r][k] = idx;
        tbl[idx].valid = 1; tbl[idx].src_id = 8'(10 + r);
        tbl[idx].x_off = offset_t'($urandom); tbl[idx].y_off = offset_t'($urandom);
        tbl[idx].slice = 8'($urandom); tbl[idx].next = '0;
        if (k > 0) tbl[lists[r][k-1]].next = 5'(idx);
      end
    end
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 5'(i); cfg_data = tbl[i];
    end
    @(negedge clk); cfg_we = 0;
    // requests
    for (int n = 0; n < 40; n++) begin
      aluout_t a;
      a.reg_idx = 2'($urandom); a.vid = 8'(10 + a.reg_idx); a.attr = 8'($urandom);
      reqs.push_back(a);
      for (int k = 0; k < nlist[a.reg_idx]; k++) begin
        inter_entry_t e;
        e = tbl[lists[a.reg_idx][k]];
        exp_q.push_back('{id: a.vid, x_off: e.x_off, y_off: e.y_off, attr: a.attr, slice: e.slice});
      end
    end
    got = 0;
    while (reqs.size() > 0) begin
      @(negedge clk);
      aluout_valid = 1; aluout_head = reqs[0];
      pkt_ready = ($urandom % 4 != 0);
      #1;
      if (pkt_valid) begin
        checks++;
        if (pkt != exp_q[0]) begin failures++; $display("pkt %h exp %h", pkt, exp_q[0]); end
        if (pkt_ready) begin void'(exp_q.pop_front()); got++; end
      end
      if (aluout_pop) begin
        checks++;
        // popped with the last packet of its list, or at once when it has none
        if (nlist[reqs[0].reg_idx] == 0 ? pkt_valid
            : !(pkt_valid && pkt_ready && (exp_q.size() == 0 || exp_q[0].id != reqs[0].vid ||
                                           exp_q[0].attr != reqs[0].attr || nlist[reqs[0].reg_idx] == 1))) begin
          if (!(pkt_valid && pkt_ready)) begin failures++; $display("bad pop"); end
        end
        void'(reqs.pop_front());
      end
    end
    @(negedge clk) aluout_valid = 0;
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d packets missing", exp_q.size()); end
    // timing: a 6-entry list with no back-pressure takes 6 cycles
    begin
      int r6 = 0;
      for (int r = 0; r < 4; r++) if (nlist[r] > nlist[r6]) r6 = r;
      busy_cycles = 0;
      aluout_valid = 1; aluout_head = '{reg_idx: 2'(r6), vid: 8'(10 + r6), attr: 8'd7}; pkt_ready = 1;
      busy_cycles = 1;
      #1;
      while (!aluout_pop) begin @(posedge clk); #1; busy_cycles++; end
      checks++;
      if (busy_cycles != nlist[r6]) begin failures++; $display("list of %0d took %0d cycles", nlist[r6], busy_cycles); end
      @(negedge clk) aluout_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
