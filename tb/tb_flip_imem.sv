// tb_flip_imem -- fills the instruction memory with random words and reads
// every entry back in random order, including a rewrite of some entries.
module tb_flip_imem;
  localparam int DEPTH = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [4:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  flip_imem dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < DEPTH; a++) begin
        if (pass == 1 && a % 3 != 0) continue;
        @(negedge clk);
        we = 1; waddr = 5'(a); wdata = $urandom; model[a] = wdata;
      end
      @(negedge clk) we = 0;
      for (int k = 0; k < 100; k++) begin
        raddr = 5'($urandom % DEPTH);
        #1 checks++;
        if (rdata != model[raddr]) begin failures++; $display("IM[%0d]=%h exp %h", raddr, rdata, model[raddr]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
