// flip_spm -- on-chip scratchpad memory (SPM), 16 KB in 8 banks.
//
// Each bank is a single-port synchronous RAM of WORDS 32-bit words with its
// own port, so the eight banks together give the 256-bit wide access of
// Fig. 6 (8 x 32 bits). A read returns data on the cycle after the request
// (registered output); a write stores at the clock edge. Size and bank count
// follow the paper; the word width, one port per bank and the read latency
// are this design's choices. In the data-centric mode the SPM caches the
// packets whose destination slice is not on chip (see flip_top).
module flip_spm #(
  parameter int unsigned BANKS = 8,
  parameter int unsigned BYTES = 16384,
  localparam int unsigned WORDS = BYTES / (4 * BANKS),
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic [BANKS-1:0]  en,
  input  logic [BANKS-1:0]  we,
  input  logic [AW-1:0]     addr  [BANKS],
  input  logic [31:0]       wdata [BANKS],
  output logic [31:0]       rdata [BANKS]
);
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [31:0] mem [WORDS];
    always_ff @(posedge clk) begin
      if (en[b]) begin
        if (we[b]) mem[addr[b]] <= wdata[b];
        else       rdata[b] <= mem[addr[b]];
      end
    end
  end
endmodule
