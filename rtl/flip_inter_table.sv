// flip_inter_table -- Inter-Table of one PE and the packet packer behind the
// ALUout buffer.
//
// The Inter-Table holds, for every vertex of the PE, the routes to the PEs
// that own its out-neighbours: source vertex id, x offset, y offset and the
// slice id of the destination vertex, chained as a linked list through the
// `next` field (0 = NULL). Entry r (r = 0..3) is the list head of the vertex
// in DRF register r, so a scatter finds its head without searching; further
// entries of the same vertex sit anywhere after the four heads.
//
// Packer: when the ALUout buffer holds (vertex, new attribute), the list of
// that vertex is walked one entry per accepted packet and each entry yields
// one NoC packet {id, x_off, y_off, attr, slice} on the local router input.
// The ALUout entry is popped together with the last packet (or at once when
// the head entry is not valid or belongs to another vertex: the vertex has
// no out-edges). Entry order is the order packets leave, so a compiler can
// place the farthest destination first. The packet's id and attribute are
// the ALUout head's own fields, passed through without a register.
//
// From the paper: fields, offset encoding, linked lists, the four head
// entries at the front. Own choices: 32 entries, valid bit, NULL = 0 (entry
// 0 is a head and never a successor), one entry walked per cycle.
module flip_inter_table
  import flip_pkg::*;
#(
  parameter int unsigned DEPTH = flip_pkg::TBL_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host write port
  input  logic                     cfg_we,
  input  logic [$clog2(DEPTH)-1:0] cfg_addr,
  input  inter_entry_t             cfg_data,
  // ALUout buffer head
  input  logic                     aluout_valid,
  input  aluout_t                  aluout_head,
  output logic                     aluout_pop,
  // packet towards the router's local input L_in
  output logic                     pkt_valid,
  output pkt_t                     pkt,
  input  logic                     pkt_ready
);
  localparam int unsigned AW = $clog2(DEPTH);

  inter_entry_t tbl [DEPTH];
  logic         walking;
  logic [AW-1:0] idx_q, cur_idx;
  inter_entry_t cur;
  logic         hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) tbl[i] <= '0;
    end else if (cfg_we) begin
      tbl[cfg_addr] <= cfg_data;
    end
  end

  assign cur_idx = walking ? idx_q : AW'(aluout_head.reg_idx);
  assign cur     = tbl[cur_idx];
  assign hit     = aluout_valid && cur.valid && (cur.src_id == aluout_head.vid);

  assign pkt_valid = hit;
  assign pkt = '{id: aluout_head.vid, x_off: cur.x_off, y_off: cur.y_off,
                 attr: aluout_head.attr, slice: cur.slice};

  // Pop with the last packet of the list, or immediately on a miss.
  assign aluout_pop = aluout_valid &&
                      (hit ? (pkt_ready && cur.next == '0) : 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      walking <= 1'b0;
      idx_q   <= '0;
    end else if (aluout_pop) begin
      walking <= 1'b0;
    end else if (hit && pkt_ready) begin
      walking <= 1'b1;
      idx_q   <= AW'(cur.next);
    end
  end
endmodule
