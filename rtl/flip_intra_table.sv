// flip_intra_table -- Intra-Table of one PE with its hashed list search.
//
// For a packet that reached its destination PE, the Intra-Table tells which
// DRF register(s) hold the destination vertex (vertices) and the weight of
// the edge. Entries hold {src_id, register index, edge weight, next}; all
// entries whose src_id has the same hash (src_id % 8) form one linked list
// whose head is entry (src_id % 8), so the eight heads fill the front of the
// table.
//
// Search: while `req` is high the module presents the current entry of the
// list of `src_id`: `hit` when it belongs to src_id, `last` when the list
// ends after it. The consumer raises `advance` when it is done with the
// entry; the search then moves to `next` (one cycle per entry) or, after
// the last entry, returns to the head for the next request. One source
// vertex may hit several entries (edges to several vertices of this PE).
//
// From the paper: fields, 8-bit src_id, hash src_id % 8, 8 heads at the
// front, sequential list search. Own choices: 32 entries, valid bit,
// NULL = 0, a list continues past entries of other source vertices.
module flip_intra_table
  import flip_pkg::*;
#(
  parameter int unsigned DEPTH = flip_pkg::TBL_DEPTH,
  parameter int unsigned HEADS = flip_pkg::INTRA_HEADS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [$clog2(DEPTH)-1:0] cfg_addr,
  input  intra_entry_t             cfg_data,
  input  logic                     req,
  input  logic [VID_W-1:0]         src_id,
  input  logic                     advance,
  output logic                     hit,
  output logic                     last,
  output logic [REG_W-1:0]         reg_idx,
  output logic [ATTR_W-1:0]        weight
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned HW = $clog2(HEADS);

  intra_entry_t tbl [DEPTH];
  logic          searching;
  logic [AW-1:0] idx_q, cur_idx;
  intra_entry_t  cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) tbl[i] <= '0;
    end else if (cfg_we) begin
      tbl[cfg_addr] <= cfg_data;
    end
  end

  assign cur_idx = searching ? idx_q : AW'(src_id[HW-1:0]);   // hash
  assign cur     = tbl[cur_idx];
  assign hit     = req && cur.valid && (cur.src_id == src_id);
  assign last    = !cur.valid || (cur.next == '0);
  assign reg_idx = cur.reg_idx;
  assign weight  = cur.weight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      searching <= 1'b0;
      idx_q     <= '0;
    end else if (req && advance) begin
      searching <= !last;
      idx_q     <= AW'(cur.next);
    end
  end
endmodule
