// flip_pkg -- types and constants shared by the Flip data-centric CGRA.
//
// Flip maps graph vertices (not operations) onto an 8x8 PE mesh. A vertex
// that changes its attribute sends packets along its out-edges; a packet
// reaching the destination PE triggers the short vertex program there.
//
// From the paper: 8-bit attributes (DRF/ALU links), 8-bit slice id, 4-bit
// x/y offsets (1 direction bit, 1 = positive, + 3 hop bits), 8-bit source
// vertex id in the Intra-Table, 4 DRF registers per PE, 32-entry instruction
// memory with 32-bit words, 8 hash heads in the Intra-Table, YX routing.
// Own choices: the packet carries all four fields the text lists
// (id, offset, attribute, slice id) and is therefore 32 bits, where Fig. 6
// labels the link 24; table depth 32 entries; the instruction encoding,
// the configuration bus and the DRF entry holding the vertex id next to the
// attribute.
package flip_pkg;

  localparam int unsigned ATTR_W   = 8;   // vertex / edge attribute width
  localparam int unsigned VID_W    = 8;   // vertex id width
  localparam int unsigned SLICE_W  = 8;   // slice id width
  localparam int unsigned HOP_W    = 3;   // hop count per dimension (max 7)
  localparam int unsigned N_DRF    = 4;   // vertices per PE
  localparam int unsigned REG_W    = 2;   // DRF register index width
  localparam int unsigned IM_DEPTH = 32;  // instruction memory entries
  localparam int unsigned INSTR_W  = 32;  // instruction width
  localparam int unsigned TBL_DEPTH = 32; // Inter-/Intra-Table entries
  localparam int unsigned PTR_W    = 5;   // table pointer; 0 means NULL
  localparam int unsigned INTRA_HEADS = 8; // hash = src_id % 8
  localparam logic [ATTR_W-1:0] ATTR_INF = '1; // saturating "infinity"

  // x/y offset: dir = 1 positive, 0 negative; hops = remaining hops.
  typedef struct packed {
    logic             dir;
    logic [HOP_W-1:0] hops;
  } offset_t;

  // NoC packet (id_u, offset_v, attribute_u, slice_id_v).
  typedef struct packed {
    logic [VID_W-1:0]   id;
    offset_t            x_off;
    offset_t            y_off;
    logic [ATTR_W-1:0]  attr;
    logic [SLICE_W-1:0] slice;
  } pkt_t;


  // ALUout buffer entry (id_u, attribute_u) plus the DRF register that
  // holds u, which selects the Inter-Table head entry.
  typedef struct packed {
    logic [REG_W-1:0]  reg_idx;
    logic [VID_W-1:0]  vid;
    logic [ATTR_W-1:0] attr;
  } aluout_t;

  // Inter-Table entry (Fig. 7: src_id, x_offset, y_offset, slice_id, next).
  typedef struct packed {
    logic               valid;
    logic [VID_W-1:0]   src_id;
    offset_t            x_off;
    offset_t            y_off;
    logic [SLICE_W-1:0] slice;
    logic [PTR_W-1:0]   next;
  } inter_entry_t;

  // Intra-Table entry (Fig. 7: src_id, register index, edge weight, next).
  typedef struct packed {
    logic              valid;
    logic [VID_W-1:0]  src_id;
    logic [REG_W-1:0]  reg_idx;
    logic [ATTR_W-1:0] weight;
    logic [PTR_W-1:0]  next;
  } intra_entry_t;

  // DRF register: vertex id and its attribute.
  typedef struct packed {
    logic [VID_W-1:0]  vid;
    logic [ATTR_W-1:0] attr;
  } drf_entry_t;

  // Vertex-program instruction set. Working registers:
  // r0 = u.attr (packet), r1 = w(u,v) (Intra-Table), r2 = v.attr (DRF),
  // r3..r7 temporaries.
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_ADD  = 4'd1,  // rd = sat(ra + rb)
    OP_ADDI = 4'd2,  // rd = sat(ra + imm)
    OP_SUB  = 4'd3,  // rd = sat0(ra - rb)
    OP_MIN  = 4'd4,  // rd = min(ra, rb)
    OP_MAX  = 4'd5,  // rd = max(ra, rb)
    OP_MOV  = 4'd6,  // rd = ra
    OP_XEQ  = 4'd7,  // exit program if ra == rb
    OP_XGE  = 4'd8,  // exit program if ra >= rb
    OP_ST   = 4'd9,  // v.attr (DRF) = ra
    OP_SCAT = 4'd10, // scatter ra as u's new attribute, then exit
    OP_END  = 4'd11  // exit program
  } opcode_e;

  typedef struct packed {
    opcode_e           op;    // [31:28]
    logic [2:0]        rd;    // [27:25]
    logic [2:0]        ra;    // [24:22]
    logic [2:0]        rb;    // [21:19]
    logic [10:0]       rsvd;  // [18:8]
    logic [ATTR_W-1:0] imm;   // [7:0]
  } instr_t;

  // Mesh ports.
  typedef enum logic [2:0] {
    PORT_N = 3'd0, PORT_E = 3'd1, PORT_S = 3'd2, PORT_W = 3'd3, PORT_L = 3'd4
  } port_e;

  // Host configuration bus.
  typedef enum logic [2:0] {
    CFG_IM    = 3'd0, // IM[addr] = data
    CFG_DRF   = 3'd1, // DRF[addr] = data[15:0] as {vid, attr}
    CFG_INTER = 3'd2, // Inter-Table[addr] = data as inter_entry_t
    CFG_INTRA = 3'd3, // Intra-Table[addr] = data as intra_entry_t
    CFG_SLICE = 3'd4, // Slice ID Register = data[7:0]
    CFG_START = 3'd5  // DRF[addr].attr = data[7:0] and scatter it
  } cfg_tgt_e;

  typedef struct packed {
    logic             we;
    logic [2:0]       x;
    logic [2:0]       y;
    cfg_tgt_e         tgt;
    logic [PTR_W-1:0] addr;
    logic [31:0]      data;
  } cfg_t;

  function automatic logic [ATTR_W-1:0] sat_add(input logic [ATTR_W-1:0] a,
                                                input logic [ATTR_W-1:0] b);
    logic [ATTR_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[ATTR_W] ? ATTR_INF : s[ATTR_W-1:0];
  endfunction

endpackage
