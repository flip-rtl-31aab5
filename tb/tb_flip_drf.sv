// tb_flip_drf -- random writes from the three write ports (host, start,
// program store), including collisions on one register, against a model
// that applies the priority host > start > store; checks both read ports
// and the reset value (attribute = 255).
module tb_flip_drf;
  import flip_pkg::*;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  logic cfg_we, attr_we, st_we;
  logic [1:0] cfg_idx, attr_idx, st_idx, ra_idx, rb_idx;
  drf_entry_t cfg_data, ra_data, rb_data;
  logic [7:0] attr_data, st_data;
  drf_entry_t model [4];
  int checks = 0, failures = 0;

  flip_drf dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; attr_we = 0; st_we = 0; cfg_idx = 0; attr_idx = 0; st_idx = 0;
    ra_idx = 0; rb_idx = 0; cfg_data = '0; attr_data = 0; st_data = 0;
    rst_n = 1; #1 rst_n = 0; #20 rst_n = 1;
    for (int i = 0; i < 4; i++) model[i] = '{vid: 0, attr: 8'hFF};
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        ra_idx = 2'(i); rb_idx = 2'(3 - i);
        #1 checks += 2;
        if (ra_data != model[i]) begin failures++; $display("ra %0d %p exp %p", i, ra_data, model[i]); end
        if (rb_data != model[3-i]) begin failures++; $display("rb %0d", 3 - i); end
      end
      cfg_we = ($urandom % 4 == 0); cfg_idx = 2'($urandom); cfg_data = 16'($urandom);
      attr_we = ($urandom % 3 == 0); attr_idx = 2'($urandom); attr_data = 8'($urandom);
      st_we = ($urandom % 2 == 0); st_idx = 2'($urandom); st_data = 8'($urandom);
      @(posedge clk);
      for (int i = 0; i < 4; i++) begin
        if (cfg_we && cfg_idx == i) model[i] = cfg_data;
        else if (attr_we && attr_idx == i) model[i].attr = attr_data;
        else if (st_we && st_idx == i) model[i].attr = st_data;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
