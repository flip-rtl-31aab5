// tb_flip_fifo -- random push/pop test of the FIFO queue against a queue
// model: data order, empty/full/count flags, simultaneous push and pop.
module tb_flip_fifo;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  logic push, pop, empty, full;
  logic [15:0] din, dout;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;

  flip_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);

  logic [15:0] q [$];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = 0;
    rst_n = 1; #1 rst_n = 0; #20 rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      // compare state
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == DEPTH) || count != q.size()) begin
        failures++; $display("flag mismatch size=%0d count=%0d", q.size(), count);
      end
      if (q.size() > 0) begin
        checks++;
        if (dout != q[0]) begin failures++; $display("data %h expected %h", dout, q[0]); end
      end
      push = ($urandom % 3 != 0) && (q.size() < DEPTH);
      pop  = ($urandom % 2 == 0) && q.size() > 0;
      if (q.size() == DEPTH && ($urandom % 2)) begin pop = 1; push = 1; end
      din  = 16'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
