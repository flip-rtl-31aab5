// tb_flip_spm -- random reads and writes on all eight banks at once against
// a memory model; checks one-cycle read latency and bank independence
// (the same row address in different banks holds different data).
module tb_flip_spm;
  localparam int BANKS = 8, WORDS = 512;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [BANKS-1:0] en, we;
  logic [8:0] addr [BANKS];
  logic [31:0] wdata [BANKS], rdata [BANKS];
  logic [31:0] model [BANKS][WORDS];
  bit written [BANKS][WORDS];
  int checks = 0, failures = 0;

  flip_spm dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [BANKS-1:0] rd_pend;
    logic [31:0] exp_d [BANKS];
    en = 0; we = 0;
    for (int b = 0; b < BANKS; b++) begin addr[b] = 0; wdata[b] = 0; end
    for (int b = 0; b < BANKS; b++) for (int w = 0; w < WORDS; w++) written[b][w] = 0;
    rd_pend = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      for (int b = 0; b < BANKS; b++) if (rd_pend[b]) begin
        checks++;
        if (rdata[b] != exp_d[b]) begin failures++; $display("bank %0d read %h exp %h", b, rdata[b], exp_d[b]); end
      end
      rd_pend = 0;
      for (int b = 0; b < BANKS; b++) begin
        en[b] = ($urandom % 4 != 0);
        addr[b] = 9'($urandom % 64);
        we[b] = !written[b][addr[b]] || ($urandom % 2);
        wdata[b] = $urandom;
        if (en[b] && we[b]) begin model[b][addr[b]] = wdata[b]; written[b][addr[b]] = 1; end
        else if (en[b]) begin rd_pend[b] = 1; exp_d[b] = model[b][addr[b]]; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
