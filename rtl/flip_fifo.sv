// flip_fifo -- synchronous FIFO queue, the storage of every Flip buffer.
//
// The paper states that all buffers of a PE are FIFO queues: the four input
// buffers, the ALUin buffer, the ALUout buffer and the memory buffer. This
// is a plain circular buffer with registered storage. Push and pop may
// happen in the same cycle, also when the FIFO is full. A push into a full
// FIFO without a pop, or a pop from an empty one, is ignored and flagged by
// an assertion. The head is visible combinationally (first-word
// fall-through), so a consumer sees a pushed word one cycle after the push.
// The paper gives no depths; each buffer of the PE sets its own DEPTH (see
// flip_pe), and the default of 4 here is only a placeholder.
module flip_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     dout,
  output logic empty,
  output logic full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign do_push = push && (!full || pop);
  assign do_pop  = pop && !empty;
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= incr(wr_ptr);
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      if (do_push && !do_pop)      count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  // A producer must not push into a full queue; a consumer must not pop an
  // empty one.
  always_ff @(posedge clk) if (rst_n) a_no_overflow: assert (!(push && full && !pop));
  always_ff @(posedge clk) if (rst_n) a_no_underflow: assert (!(pop && empty));
endmodule
