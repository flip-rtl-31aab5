// flip_swap_ctrl -- slice-swap request logic for the 2x2 PE clusters.
//
// Packets whose destination slice is not loaded are cached in the SPM log
// (see flip_top). This block watches the packets going into the log and,
// for each cluster of 2x2 PEs, remembers the slice of the earliest packet
// cached for that cluster since its last swap. When every PE of a cluster
// is idle and the cluster has such a pending slice, the block requests a
// swap: swap_valid with swap_cluster (cluster index cy*(X/2)+cx) and
// swap_slice. The host, which moves the data, answers with swap_ack in a
// cycle where swap_valid is high; the cluster's pending slice is then
// cleared and later cached packets pick its next slice. Several clusters
// waiting at once are served round-robin. A log entry that arrives in the
// cycle of the ack is taken as the cluster's new earliest packet.
//
// From the paper: non-overlapping 2x2 PE clusters are the unit of
// swapping; swapping starts once a cluster is idle and loads "the slice
// with the earliest pending task (cached packet)" among the slices mapped
// to that cluster. Own choices: the cluster numbering, the request/ack
// handshake and round-robin service. The
// data movement itself (tables, registers, re-injecting the cached packets)
// is done by the host.
module flip_swap_ctrl
  import flip_pkg::*;
#(
  parameter int unsigned X = 8,
  parameter int unsigned Y = 8,
  localparam int unsigned NC = (X / 2) * (Y / 2),
  localparam int unsigned CW = (NC > 1) ? $clog2(NC) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [X*Y-1:0]     pe_busy,     // bit y*X+x
  input  logic               log_valid,   // a packet is written to the log
  input  logic [2:0]         log_pe_x,
  input  logic [2:0]         log_pe_y,
  input  logic [SLICE_W-1:0] log_slice,
  output logic               swap_valid,
  output logic [CW-1:0]      swap_cluster,
  output logic [SLICE_W-1:0] swap_slice,
  input  logic               swap_ack
);
  logic [NC-1:0]      pend;
  logic [SLICE_W-1:0] pend_slice [NC];
  logic [NC-1:0]      idle, ready;
  logic [CW-1:0]      rr, log_c;

  // cluster idle = its four PEs idle
  for (genvar c = 0; c < NC; c++) begin : g_cl
    localparam int unsigned CX = 2 * (c % (X / 2));
    localparam int unsigned CY = 2 * (c / (X / 2));
    assign idle[c] = !(pe_busy[CY*X+CX] || pe_busy[CY*X+CX+1] ||
                       pe_busy[(CY+1)*X+CX] || pe_busy[(CY+1)*X+CX+1]);
  end
  assign ready   = pend & idle;
  assign log_c   = CW'((32'(log_pe_y) >> 1) * (X / 2) + (32'(log_pe_x) >> 1));

  // round-robin pick among the ready clusters
  always_comb begin
    swap_valid   = 1'b0;
    swap_cluster = '0;
    for (int k = 0; k < NC; k++) begin
      logic [CW:0] c;
      c = {1'b0, rr} + (CW+1)'(k);
      if (c >= (CW+1)'(NC)) c = c - (CW+1)'(NC);
      if (!swap_valid && ready[c[CW-1:0]]) begin
        swap_valid   = 1'b1;
        swap_cluster = c[CW-1:0];
      end
    end
  end
  assign swap_slice = pend_slice[swap_cluster];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0;
      rr   <= '0;
      for (int c = 0; c < NC; c++) pend_slice[c] <= '0;
    end else begin
      if (swap_valid && swap_ack) begin
        pend[swap_cluster] <= 1'b0;
        rr <= (swap_cluster == CW'(NC - 1)) ? '0 : swap_cluster + 1'b1;
      end
      if (log_valid && (!pend[log_c] || (swap_valid && swap_ack && swap_cluster == log_c))) begin
        pend[log_c]       <= 1'b1;
        pend_slice[log_c] <= log_slice;
      end
    end
  end

  always_ff @(posedge clk) if (rst_n) a_ack_with_request: assert (!swap_ack || swap_valid);
endmodule
