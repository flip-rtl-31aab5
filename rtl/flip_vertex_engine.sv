// flip_vertex_engine -- per-PE controller that turns packets into vertex
// program runs.
//
// The head packet of the ALUin buffer carries (id_u, attr_u). The engine
// walks the Intra-Table list of id_u; for every entry that matches it runs
// the vertex program once, with working registers r0 = u.attr (packet),
// r1 = w(u,v) (entry weight), r2 = v.attr (DRF register named by the entry),
// r3..r7 = 0. The program is fetched from the Instruction Memory at the
// PE's own program counter, one instruction per cycle, and ends on END,
// SCAT, a taken exit (XEQ/XGE) or the last IM entry. ST writes v.attr back
// into the DRF; SCAT pushes (register, id_v, value) into the ALUout buffer,
// from where the Inter-Table packer sends it to v's out-neighbours. After
// the last list entry the packet is popped from the ALUin buffer.
//
// Timing: one cycle per Intra-Table entry visited (a matching entry loads
// r0..r2 in that cycle), then one cycle per executed instruction: with the
// SSSP program 1 + 5 cycles for an update, 1 + 3 for an early exit. A
// program is started only when the ALUout buffer has room, so a SCAT never
// stalls. The Intra-Table search key is the ALUin head's id, wired straight
// through, as is the start condition from the Intra-Table hit.
//
// From the paper: the sequence receive -> Apply -> Scatter, independent PC
// per PE in data-centric mode, edge attribute applied before the ALU,
// sequential processing of several vertices of one PE that an incoming
// edge reaches. Own choices: the instruction set, the register roles and
// the cycle-level schedule.
module flip_vertex_engine
  import flip_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // ALUin buffer
  input  logic                        aluin_valid,
  input  pkt_t                        aluin_head,
  output logic                        aluin_pop,
  // Intra-Table search
  output logic                        it_req,
  output logic [VID_W-1:0]            it_src_id,
  output logic                        it_advance,
  input  logic                        it_hit,
  input  logic                        it_last,
  input  logic [REG_W-1:0]            it_reg_idx,
  input  logic [ATTR_W-1:0]           it_weight,
  // Instruction Memory
  output logic [$clog2(IM_DEPTH)-1:0] pc,
  input  logic [INSTR_W-1:0]          instr_word,
  // DRF
  output logic [REG_W-1:0]            drf_idx,
  input  drf_entry_t                  drf_data,
  output logic                        st_we,
  output logic [REG_W-1:0]            st_idx,
  output logic [ATTR_W-1:0]           st_data,
  // ALUout buffer
  output logic                        aluout_push,
  output aluout_t                     aluout_data,
  input  logic                        aluout_full,
  // status
  output logic                        busy,
  output logic                        prog_start,  // a program run begins
  output logic                        prog_exit    // a program ends without SCAT
);
  typedef enum logic { S_SEARCH, S_EXEC } state_e;

  state_e            state;
  logic [ATTR_W-1:0] r [8];
  logic [REG_W-1:0]  cur_reg;
  instr_t            ins;
  logic [ATTR_W-1:0] alu_res;
  logic              alu_cond;
  logic              finish;

  assign ins = instr_t'(instr_word);

  flip_alu u_alu (
    .op(ins.op), .i1(r[ins.ra]), .i2(r[ins.rb]), .imm(ins.imm),
    .result(alu_res), .cond(alu_cond)
  );

  assign it_req    = aluin_valid;
  assign it_src_id = aluin_head.id;
  assign drf_idx   = (state == S_EXEC) ? cur_reg : it_reg_idx;

  always_comb begin
    finish = 1'b0;
    if (state == S_EXEC) begin
      finish = (ins.op == OP_END) || (ins.op == OP_SCAT) ||
               (((ins.op == OP_XEQ) || (ins.op == OP_XGE)) && alu_cond) ||
               (pc == $clog2(IM_DEPTH)'(IM_DEPTH - 1));
    end
  end

  logic start_prog;
  assign start_prog = (state == S_SEARCH) && aluin_valid && it_hit && !aluout_full;

  always_comb begin
    it_advance = 1'b0;
    aluin_pop  = 1'b0;
    if (state == S_SEARCH && aluin_valid && !it_hit) begin
      it_advance = 1'b1;
      aluin_pop  = it_last;
    end else if (finish) begin
      it_advance = 1'b1;
      aluin_pop  = it_last;
    end
  end

  assign st_we       = (state == S_EXEC) && (ins.op == OP_ST);
  assign st_idx      = cur_reg;
  assign st_data     = r[ins.ra];
  assign aluout_push = (state == S_EXEC) && (ins.op == OP_SCAT);
  assign aluout_data = '{reg_idx: cur_reg, vid: drf_data.vid, attr: r[ins.ra]};

  assign busy       = aluin_valid || (state == S_EXEC);
  assign prog_start = start_prog;
  assign prog_exit  = finish && (ins.op != OP_SCAT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_SEARCH;
      pc      <= '0;
      cur_reg <= '0;
      for (int i = 0; i < 8; i++) r[i] <= '0;
    end else if (start_prog) begin
      state   <= S_EXEC;
      pc      <= '0;
      cur_reg <= it_reg_idx;
      r[0]    <= aluin_head.attr;
      r[1]    <= it_weight;
      r[2]    <= drf_data.attr;
      for (int i = 3; i < 8; i++) r[i] <= '0;
    end else if (state == S_EXEC) begin
      unique case (ins.op)
        OP_ADD, OP_ADDI, OP_SUB, OP_MIN, OP_MAX, OP_MOV: r[ins.rd] <= alu_res;
        default: ;
      endcase
      if (finish) state <= S_SEARCH;
      else        pc <= pc + 1'b1;
    end
  end

  always_ff @(posedge clk) if (rst_n) a_aluout_room: assert (!(aluout_push && aluout_full));
endmodule
