// flip_pe -- one processing element of the Flip array in data-centric mode.
//
// Packets from the four neighbours land in one input buffer per port and
// return a 1-bit credit upstream when they leave it. The router moves one
// packet per cycle from an input buffer, or from the Inter-Table packer
// (L_in), to a neighbour or to the local output L_out. A packet that
// arrives here is checked against the Slice ID Register: if its slice id
// matches, the destination slice is loaded and the packet enters the ALUin
// buffer; otherwise it enters the memory buffer, which drains onto the
// memory bus towards the SPM. The vertex engine takes ALUin packets, finds
// the destination vertex register(s) and edge weights in the Intra-Table
// and runs the vertex program from the Instruction Memory on the DRF; a
// scatter goes through the ALUout buffer to the packer, which emits one
// packet per Inter-Table entry of the vertex.
//
// The host configures the PE through a broadcast bus (cfg.x/cfg.y select
// the PE): IM, DRF, both tables, the Slice ID Register, and a start command
// that sets a vertex attribute and scatters it (the source vertex of a
// query). Host writes are meant for an idle array. `rd_idx`/`rd_data` read
// a DRF register back. `busy` is high while any buffer holds a packet or a
// program runs.
//
// Structure and buffer set follow the paper (Fig. 6, Sec. 4.1). Own
// choices: buffer depths, configuration bus, start command, read-back.
// The depths (input 8, ALUin 8, memory 4) are estimates from the relative
// buffer areas the paper reports; ALUout is 16 deep. The buffers are finite
// and a PE's ALUin -> program -> ALUout -> own ALUin path forms a cycle, so
// a graph with much more traffic than these depths absorb can deadlock.
module flip_pe
  import flip_pkg::*;
#(
  parameter int unsigned XI        = 0,   // column of this PE
  parameter int unsigned YI        = 0,   // row of this PE
  parameter int unsigned IN_DEPTH     = 8,   // each input buffer
  parameter int unsigned ALUIN_DEPTH  = 8,   // ALUin buffer
  parameter int unsigned ALUOUT_DEPTH = 16,  // ALUout buffer
  parameter int unsigned MEM_DEPTH    = 4    // memory buffer
) (
  input  logic             clk,
  input  logic             rst_n,
  // host configuration bus
  input  cfg_t             cfg,
  input  logic [REG_W-1:0] rd_idx,
  output drf_entry_t       rd_data,
  // mesh links, index 0..3 = N, E, S, W
  input  logic [3:0]       in_valid,
  input  pkt_t             in_pkt [4],
  output logic [3:0]       credit_out,
  output logic [3:0]       out_valid,
  output pkt_t             out_pkt [4],
  input  logic [3:0]       credit_in,
  // memory bus (memory buffer head)
  output logic             mem_valid,
  output pkt_t             mem_pkt,
  input  logic             mem_ready,
  // status
  output logic             busy,
  output logic             stall,
  output logic             prog_start,
  output logic             prog_exit
);
  logic sel;
  assign sel = cfg.we && (cfg.x == 3'(XI)) && (cfg.y == 3'(YI));

  // ---------------- Slice ID Register ----------------
  logic [SLICE_W-1:0] slice_id;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) slice_id <= '0;
    else if (sel && cfg.tgt == CFG_SLICE) slice_id <= cfg.data[SLICE_W-1:0];
  end

  // ---------------- input buffers ----------------
  logic [4:0] r_valid, r_pop;
  pkt_t       r_pkt [5];
  logic [3:0] ib_empty;
  for (genvar d = 0; d < 4; d++) begin : g_in
    flip_fifo #(.T(pkt_t), .DEPTH(IN_DEPTH)) u_ib (
      .clk, .rst_n, .push(in_valid[d]), .din(in_pkt[d]), .pop(r_pop[d]),
      .dout(r_pkt[d]), .empty(ib_empty[d]), .full(), .count()
    );
    assign r_valid[d]    = !ib_empty[d];
    assign credit_out[d] = r_pop[d];
  end

  // ---------------- ALUout buffer and Inter-Table packer ----------------
  logic    ao_push, ao_pop, ao_empty, ao_full;
  aluout_t ao_din, ao_head;
  logic    eng_push;
  aluout_t eng_data;
  logic    start_cmd;
  drf_entry_t drf_a;
  drf_entry_t rd_data_start;
  assign start_cmd = sel && (cfg.tgt == CFG_START);
  assign ao_push = eng_push || start_cmd;
  assign ao_din  = start_cmd ? '{reg_idx: REG_W'(cfg.addr), vid: rd_data_start.vid,
                                 attr: cfg.data[ATTR_W-1:0]} : eng_data;

  flip_fifo #(.T(aluout_t), .DEPTH(ALUOUT_DEPTH)) u_aluout (
    .clk, .rst_n, .push(ao_push), .din(ao_din), .pop(ao_pop),
    .dout(ao_head), .empty(ao_empty), .full(ao_full), .count()
  );

  flip_inter_table u_inter (
    .clk, .rst_n,
    .cfg_we(sel && cfg.tgt == CFG_INTER), .cfg_addr(cfg.addr),
    .cfg_data(inter_entry_t'(cfg.data[$bits(inter_entry_t)-1:0])),
    .aluout_valid(!ao_empty), .aluout_head(ao_head), .aluout_pop(ao_pop),
    .pkt_valid(r_valid[4]), .pkt(r_pkt[4]), .pkt_ready(r_pop[4])
  );

  // ---------------- router ----------------
  logic lout_valid, slice_hit;
  logic ai_full, mb_full;
  pkt_t lout_pkt;
  flip_router #(.BUF_DEPTH(IN_DEPTH)) u_router (
    .clk, .rst_n, .in_valid(r_valid), .in_pkt(r_pkt), .in_pop(r_pop),
    .out_valid, .out_pkt, .credit_in,
    .slice_id, .aluin_ready(!ai_full), .membuf_ready(!mb_full),
    .lout_valid, .lout_pkt, .lout_hit(slice_hit), .stall
  );

  // ---------------- memory buffer ----------------
  logic mb_empty;
  flip_fifo #(.T(pkt_t), .DEPTH(MEM_DEPTH)) u_membuf (
    .clk, .rst_n, .push(lout_valid && !slice_hit), .din(lout_pkt),
    .pop(mem_ready && !mb_empty), .dout(mem_pkt), .empty(mb_empty),
    .full(mb_full), .count()
  );
  assign mem_valid = !mb_empty;

  // ---------------- ALUin buffer ----------------
  logic ai_empty, ai_pop;
  pkt_t ai_head;
  flip_fifo #(.T(pkt_t), .DEPTH(ALUIN_DEPTH)) u_aluin (
    .clk, .rst_n, .push(lout_valid && slice_hit), .din(lout_pkt), .pop(ai_pop),
    .dout(ai_head), .empty(ai_empty), .full(ai_full), .count()
  );

  // ---------------- Intra-Table ----------------
  logic              it_req, it_adv, it_hit, it_last;
  logic [VID_W-1:0]  it_src;
  logic [REG_W-1:0]  it_reg;
  logic [ATTR_W-1:0] it_w;
  flip_intra_table u_intra (
    .clk, .rst_n,
    .cfg_we(sel && cfg.tgt == CFG_INTRA), .cfg_addr(cfg.addr),
    .cfg_data(intra_entry_t'(cfg.data[$bits(intra_entry_t)-1:0])),
    .req(it_req), .src_id(it_src), .advance(it_adv),
    .hit(it_hit), .last(it_last), .reg_idx(it_reg), .weight(it_w)
  );

  // ---------------- Instruction Memory ----------------
  logic [$clog2(IM_DEPTH)-1:0] pc;
  logic [INSTR_W-1:0]          instr_word;
  flip_imem u_im (
    .clk, .we(sel && cfg.tgt == CFG_IM), .waddr(cfg.addr),
    .wdata(cfg.data), .raddr(pc), .rdata(instr_word)
  );

  // ---------------- DRF ----------------
  logic [REG_W-1:0]  drf_idx, st_idx;
  logic              st_we;
  logic [ATTR_W-1:0] st_data;
  flip_drf u_drf (
    .clk, .rst_n,
    .cfg_we(sel && cfg.tgt == CFG_DRF), .cfg_idx(REG_W'(cfg.addr)),
    .cfg_data(drf_entry_t'(cfg.data[$bits(drf_entry_t)-1:0])),
    .attr_we(start_cmd), .attr_idx(REG_W'(cfg.addr)), .attr_data(cfg.data[ATTR_W-1:0]),
    .st_we, .st_idx, .st_data,
    .ra_idx(drf_idx), .ra_data(drf_a),
    .rb_idx(start_cmd ? REG_W'(cfg.addr) : rd_idx), .rb_data(rd_data_start)
  );
  assign rd_data = rd_data_start;

  // ---------------- vertex engine ----------------
  logic eng_busy;
  flip_vertex_engine u_eng (
    .clk, .rst_n,
    .aluin_valid(!ai_empty), .aluin_head(ai_head), .aluin_pop(ai_pop),
    .it_req, .it_src_id(it_src), .it_advance(it_adv),
    .it_hit, .it_last, .it_reg_idx(it_reg), .it_weight(it_w),
    .pc, .instr_word,
    .drf_idx, .drf_data(drf_a), .st_we, .st_idx, .st_data,
    .aluout_push(eng_push), .aluout_data(eng_data), .aluout_full(ao_full),
    .busy(eng_busy), .prog_start, .prog_exit
  );

  assign busy = eng_busy || !ao_empty || !mb_empty || !(&ib_empty);

  always_ff @(posedge clk) if (rst_n) a_start_when_idle: assert (!(start_cmd && eng_push));
endmodule
