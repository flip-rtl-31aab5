// tb_flip_intra_table -- Intra-Table search test. Fills the table with
// random incoming edges: each bucket list starts at entry (src_id % 8) and
// continues in entries 8..31; a source vertex may reach several DRF
// registers. Each query walks the list with `advance` held high and must
// report exactly the matching entries (register index and weight), in list
// order, and take one cycle per list entry; sources without an edge give no
// hit.
module tb_flip_intra_table;
  import flip_pkg::*;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  logic cfg_we, req, advance, hit, last;
  logic [4:0] cfg_addr;
  intra_entry_t cfg_data;
  logic [7:0] src_id, weight;
  logic [1:0] reg_idx;
  int checks = 0, failures = 0;

  flip_intra_table dut (.*);

  intra_entry_t tbl [32];
  int tail [8];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nfree;
    cfg_we = 0; cfg_addr = 0; cfg_data = '0; req = 0; advance = 0; src_id = 0;
    rst_n = 1; #1 rst_n = 0; #20 rst_n = 1;
    for (int i = 0; i < 32; i++) tbl[i] = '0;
    for (int h = 0; h < 8; h++) tail[h] = -1;
    nfree = 8;
    while (nfree < 30) begin
      int s, h, idx, n;
      s = $urandom % 64;   // few distinct ids, so lists share buckets
      h = s % 8;
      n = 1 + ($urandom % 2);
      for (int k = 0; k < n; k++) begin
        if (tail[h] < 0) idx = h;
        else begin idx = nfree; nfree++; tbl[tail[h]].next = 5'(idx); end
        tbl[idx] = '{valid: 1'b1, src_id: 8'(s), reg_idx: 2'($urandom), weight: 8'($urandom), next: 5'd0};
        tail[h] = idx;
      end
    end
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 5'(i); cfg_data = tbl[i];
    end
    @(negedge clk); cfg_we = 0;
    for (int q = 0; q < 200; q++) begin
      int idx, len, cyc, nhit;
      int exp_reg [$], exp_w [$];
      src_id = 8'($urandom % 80);
      // model: walk the bucket list
      idx = src_id % 8; len = 0;
      exp_reg.delete(); exp_w.delete();
      while (1) begin
        len++;
        if (tbl[idx].valid && tbl[idx].src_id == src_id) begin
          exp_reg.push_back(tbl[idx].reg_idx); exp_w.push_back(tbl[idx].weight);
        end
        if (!tbl[idx].valid || tbl[idx].next == 0) break;
        idx = tbl[idx].next;
      end
      req = 1; advance = 1; cyc = 0; nhit = 0;
      while (1) begin
        #1;
        cyc++;
        if (hit) begin
          checks++;
          if (nhit >= exp_reg.size() || reg_idx != 2'(exp_reg[nhit]) || weight != 8'(exp_w[nhit])) begin
            failures++; $display("src %0d: unexpected hit reg %0d w %0d", src_id, reg_idx, weight);
          end
          nhit++;
        end
        if (last) break;
        @(negedge clk);
      end
      @(negedge clk);
      req = 0; advance = 0;
      checks += 2;
      if (nhit != exp_reg.size()) begin failures++; $display("src %0d: %0d hits, expected %0d", src_id, nhit, exp_reg.size()); end
      if (cyc != len) begin failures++; $display("src %0d: %0d cycles for a list of %0d", src_id, cyc, len); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
