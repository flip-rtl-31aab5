// tb_flip_credit_counter -- random send/credit-return sequence against a
// counter model; checks the reset value (buffer depth) and has_credit.
module tb_flip_credit_counter;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  logic send, credit_in, has_credit;
  logic [$clog2(DEPTH+1)-1:0] credits;
  int checks = 0, failures = 0, model;

  flip_credit_counter #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    send = 0; credit_in = 0;
    rst_n = 1; #1 rst_n = 0; #20 rst_n = 1;
    model = DEPTH;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      checks++;
      if (credits != model || has_credit != (model > 0)) begin
        failures++; $display("credits %0d expected %0d", credits, model);
      end
      send      = (model > 0) && ($urandom % 2);
      credit_in = (model - (send ? 1 : 0) < DEPTH) && ($urandom % 2);
      @(posedge clk);
      #1 model = model - (send ? 1 : 0) + (credit_in ? 1 : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
