// flip_credit_counter -- credit counter of one router output port.
//
// Flip uses credit-based flow control between neighbouring PEs. The counter
// starts at the depth of the downstream input buffer, is decremented when a
// packet is sent on the port and incremented when the 1-bit credit returns
// (the downstream PE popped a packet from that input buffer). has_credit
// tells the arbiter that a packet may be sent this cycle. Both events in
// one cycle leave the count unchanged. The credit counter and the 1-bit
// credit wires are from the paper (Fig. 6); the width and the reset value
// equal to the buffer depth are this design's choice.
module flip_credit_counter #(
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic send,       // a packet leaves on this port
  input  logic credit_in,  // downstream freed one slot
  output logic has_credit,
  output logic [$clog2(DEPTH+1)-1:0] credits
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credits <= DEPTH[$clog2(DEPTH+1)-1:0];
    else if (send && !credit_in) credits <= credits - 1'b1;
    else if (credit_in && !send) credits <= credits + 1'b1;
  end
  assign has_credit = (credits != 0);

  always_ff @(posedge clk) if (rst_n) a_no_send_without_credit: assert (!(send && credits == 0));
  always_ff @(posedge clk) if (rst_n) a_no_excess_credit: assert (!(credit_in && !send && credits == DEPTH[$clog2(DEPTH+1)-1:0]));
endmodule
