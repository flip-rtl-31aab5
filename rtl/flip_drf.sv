// flip_drf -- Data Register File (DRF) of one PE.
//
// Holds the properties of the (at most four) graph vertices mapped on the
// PE: each register keeps the vertex id and its attribute (BFS level,
// distance or component label). Three write sources: the host writes a
// whole register; the host's start command and the vertex program's store
// instruction write only the attribute. Host writes take priority, then the
// start command, then the program store. Two combinational read ports: one
// for the vertex engine, one for host read-back. Four registers follow the
// paper; keeping the id beside the attribute is this design's choice (the
// paper lists "vertex index" among the DRF properties).
module flip_drf
  import flip_pkg::*;
#(
  parameter int unsigned N_REGS = flip_pkg::N_DRF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_we,
  input  logic [$clog2(N_REGS)-1:0] cfg_idx,
  input  drf_entry_t                cfg_data,
  input  logic                      attr_we,
  input  logic [$clog2(N_REGS)-1:0] attr_idx,
  input  logic [ATTR_W-1:0]         attr_data,
  input  logic                      st_we,
  input  logic [$clog2(N_REGS)-1:0] st_idx,
  input  logic [ATTR_W-1:0]         st_data,
  input  logic [$clog2(N_REGS)-1:0] ra_idx,
  output drf_entry_t                ra_data,
  input  logic [$clog2(N_REGS)-1:0] rb_idx,
  output drf_entry_t                rb_data
);
  drf_entry_t regs [N_REGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_REGS; i++) regs[i] <= '{vid: '0, attr: ATTR_INF};
    end else begin
      for (int i = 0; i < N_REGS; i++) begin
        if (cfg_we && cfg_idx == i[$clog2(N_REGS)-1:0]) regs[i] <= cfg_data;
        else if (attr_we && attr_idx == i[$clog2(N_REGS)-1:0]) regs[i].attr <= attr_data;
        else if (st_we && st_idx == i[$clog2(N_REGS)-1:0]) regs[i].attr <= st_data;
      end
    end
  end

  assign ra_data = regs[ra_idx];
  assign rb_data = regs[rb_idx];
endmodule
