// flip_imem -- Instruction Memory (IM) of one PE.
//
// A register file of DEPTH instructions holding the vertex-centric program,
// which is identical for all PEs. Written by the host over the
// configuration bus, read combinationally at the PE's own program counter
// (in data-centric mode every PE has an independent PC). 32 entries follow
// the paper; the 32-bit width follows the "Ctrl 32" label of Fig. 6.
module flip_imem #(
  parameter int unsigned DEPTH = flip_pkg::IM_DEPTH,
  parameter int unsigned WIDTH = flip_pkg::INSTR_W
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
