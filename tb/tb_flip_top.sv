// tb_flip_top -- end-to-end test of the Flip array at its default size.
//
// Builds a road-network-like graph of 2X x 2Y vertices (a grid with some
// street segments removed, short diagonal links and a few long links), maps
// each 2x2 block of vertices onto one PE, and fills the Inter- and
// Intra-Tables the way the mapping compiler would: head entries first,
// linked lists after them, YX offsets, hashed Intra-Table lists. Edges that
// would overflow a table are left out of the graph. It then runs BFS, SSSP
// and WCC with vertex programs of 5, 5 and 4 instructions and compares every
// vertex attribute with a Bellman-Ford reference computed here. A last BFS
// run loads a different slice id in one PE, so that packets for it go to
// the memory buffer and out on the memory bus; the test checks those
// packets and the result on the rest of the graph.
//
// Mechanisms counted (each must occur): router stalls (no credit or full
// sink), arbitration between several heads, multi-hop routes, local (zero
// hop) delivery, Inter-Table lists longer than one entry, several
// Intra-Table hits for one packet, programs ending without scatter, memory
// buffer diversion.
module tb_flip_top;
  import flip_pkg::*;

  localparam int X = 8, Y = 8;
  localparam int GW = 2 * X, GH = 2 * Y, NV = GW * GH;
  localparam int EMAX = 4096;

  logic clk = 0, rst_n;
  always #5 clk = ~clk;

  cfg_t       cfg;
  logic [2:0] rd_x, rd_y;
  logic [REG_W-1:0] rd_idx;
  drf_entry_t rd_data;
  logic       mem_valid, mem_ready, busy;
  pkt_t       mem_pkt;
  logic [2:0] mem_pe_x, mem_pe_y;
  logic       spm_en, spm_we, log_clear;
  logic [11:0] spm_addr;
  logic [31:0] spm_wdata, spm_rdata;
  logic [12:0] log_count;
  logic       swap_valid, swap_ack;
  logic [3:0] swap_cluster;
  logic [7:0] swap_slice;

  flip_top dut (
    .clk, .rst_n, .cfg, .rd_x, .rd_y, .rd_idx, .rd_data,
    .mem_valid, .mem_pkt, .mem_pe_x, .mem_pe_y, .mem_ready,
    .spm_en, .spm_we, .spm_addr, .spm_wdata, .spm_rdata, .log_clear, .log_count,
    .swap_valid, .swap_cluster, .swap_slice, .swap_ack, .busy
  );

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- graph ----------------
  int eu [EMAX], ev [EMAX], ew [EMAX];
  int ne = 0;
  inter_entry_t inter_t [X][Y][TBL_DEPTH];
  intra_entry_t intra_t [X][Y][TBL_DEPTH];
  int inter_free [X][Y], intra_free [X][Y];
  int inter_tail [X][Y][N_DRF], intra_tail [X][Y][INTRA_HEADS];
  int list_len [NV];
  int hits_in_pe [X][Y][NV];

  function automatic int vx(int v); return (v % GW) / 2; endfunction
  function automatic int vy(int v); return (v / GW) / 2; endfunction
  function automatic int vreg(int v); return (v % 2) + 2 * ((v / GW) % 2); endfunction

  function automatic bit can_add(int u, int v);
    int px = vx(u), py = vy(u), qx = vx(v), qy = vy(v);
    bit ok_inter = (inter_tail[px][py][vreg(u)] < 0) || (inter_free[px][py] < TBL_DEPTH);
    bit ok_intra = (intra_tail[qx][qy][u % 8] < 0) || (intra_free[qx][qy] < TBL_DEPTH);
    if (qx - px > 7 || px - qx > 7 || qy - py > 7 || py - qy > 7) return 0;
    if (u == v) return 0;
    // two directions may share a table: be conservative
    if (inter_free[px][py] >= TBL_DEPTH - 1 || intra_free[qx][qy] >= TBL_DEPTH - 1) return 0;
    return ok_inter && ok_intra;
  endfunction

  function automatic void add_edge(int u, int v, int w);
    int px = vx(u), py = vy(u), qx = vx(v), qy = vy(v), r = vreg(u), h = u % 8, idx;
    int dx = qx - px, dy = qy - py;
    inter_entry_t ie;
    intra_entry_t ia;
    ie.valid = 1; ie.src_id = VID_W'(u); ie.slice = '0; ie.next = '0;
    ie.x_off.dir = (dx >= 0); ie.x_off.hops = HOP_W'(dx >= 0 ? dx : -dx);
    ie.y_off.dir = (dy >= 0); ie.y_off.hops = HOP_W'(dy >= 0 ? dy : -dy);
    if (inter_tail[px][py][r] < 0) idx = r;
    else begin
      idx = inter_free[px][py]++;
      inter_t[px][py][inter_tail[px][py][r]].next = PTR_W'(idx);
    end
    inter_t[px][py][idx] = ie;
    inter_tail[px][py][r] = idx;
    ia.valid = 1; ia.src_id = VID_W'(u); ia.reg_idx = REG_W'(vreg(v));
    ia.weight = ATTR_W'(w); ia.next = '0;
    if (intra_tail[qx][qy][h] < 0) idx = h;
    else begin
      idx = intra_free[qx][qy]++;
      intra_t[qx][qy][intra_tail[qx][qy][h]].next = PTR_W'(idx);
    end
    intra_t[qx][qy][idx] = ia;
    intra_tail[qx][qy][h] = idx;
    eu[ne] = u; ev[ne] = v; ew[ne] = w; ne++;
    list_len[u]++;
    hits_in_pe[qx][qy][u]++;
  endfunction

  function automatic void add_undirected(int u, int v);
    int w = 1 + ($urandom % 4);
    bit dup = 0;
    for (int e = 0; e < ne; e++) if (eu[e] == u && ev[e] == v) dup = 1;
    if (dup) return;
    if (can_add(u, v) && can_add(v, u)) begin
      add_edge(u, v, w);
      add_edge(v, u, w);
    end
  endfunction

  task automatic build_graph();
    for (int x = 0; x < X; x++) for (int y = 0; y < Y; y++) begin
      inter_free[x][y] = N_DRF; intra_free[x][y] = INTRA_HEADS;
      for (int i = 0; i < TBL_DEPTH; i++) begin inter_t[x][y][i] = '0; intra_t[x][y][i] = '0; end
      for (int i = 0; i < N_DRF; i++) inter_tail[x][y][i] = -1;
      for (int i = 0; i < INTRA_HEADS; i++) intra_tail[x][y][i] = -1;
      for (int v = 0; v < NV; v++) hits_in_pe[x][y][v] = 0;
    end
    for (int v = 0; v < NV; v++) list_len[v] = 0;
    // streets: grid links, 85% kept
    for (int j = 0; j < GH; j++) for (int i = 0; i < GW; i++) begin
      if (i + 1 < GW && ($urandom % 100) < 85) add_undirected(j*GW+i, j*GW+i+1);
      if (j + 1 < GH && ($urandom % 100) < 85) add_undirected(j*GW+i, (j+1)*GW+i);
    end
    // diagonal links
    for (int k = 0; k < 60; k++) begin
      int i = $urandom % (GW - 1), j = $urandom % (GH - 1);
      add_undirected(j*GW+i, (j+1)*GW+i+1);
    end
    // a few long links (highways)
    for (int k = 0; k < 12; k++) add_undirected($urandom % NV, $urandom % NV);
  endtask

  // ---------------- reference ----------------
  int ref_attr [NV];
  bit removed_pe_en = 0;
  int removed_x = 3, removed_y = 2;

  function automatic int satadd(int a, int b); return (a + b > 255) ? 255 : a + b; endfunction

  // alg: 0 BFS, 1 SSSP, 2 WCC
  function automatic void reference(int alg, int src);
    bit changed = 1;
    for (int v = 0; v < NV; v++) ref_attr[v] = (alg == 2) ? v : 255;
    if (alg != 2) ref_attr[src] = 0;
    while (changed) begin
      changed = 0;
      for (int e = 0; e < ne; e++) begin
        int u = eu[e], v = ev[e], c;
        if (removed_pe_en && vx(v) == removed_x && vy(v) == removed_y) continue;
        if (alg != 2 && ref_attr[u] == 255) continue;
        c = (alg == 0) ? satadd(ref_attr[u], 1) : (alg == 1) ? satadd(ref_attr[u], ew[e]) : ref_attr[u];
        if (c < ref_attr[v]) begin ref_attr[v] = c; changed = 1; end
      end
    end
  endfunction

  // ---------------- host bus ----------------
  task automatic wr(int x, int y, cfg_tgt_e tgt, int addr, logic [31:0] data);
    @(negedge clk);
    cfg.we = 1; cfg.x = 3'(x); cfg.y = 3'(y); cfg.tgt = tgt; cfg.addr = PTR_W'(addr); cfg.data = data;
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic logic [31:0] ins(opcode_e op, int rd, int ra, int rb, int imm);
    instr_t i;
    i = '0; i.op = op; i.rd = 3'(rd); i.ra = 3'(ra); i.rb = 3'(rb); i.imm = ATTR_W'(imm);
    return 32'(i);
  endfunction

  task automatic load_program(int alg);
    logic [31:0] p [5];
    int n;
    if (alg == 0) begin       // BFS: level = min(v, u+1)
      p[0] = ins(OP_ADDI, 3, 0, 0, 1); p[1] = ins(OP_MIN, 3, 3, 2, 0);
      p[2] = ins(OP_XEQ, 0, 3, 2, 0);  p[3] = ins(OP_ST, 0, 3, 0, 0);
      p[4] = ins(OP_SCAT, 0, 3, 0, 0); n = 5;
    end else if (alg == 1) begin  // SSSP: dist = min(v, u+w)
      p[0] = ins(OP_ADD, 3, 0, 1, 0);  p[1] = ins(OP_MIN, 3, 3, 2, 0);
      p[2] = ins(OP_XEQ, 0, 3, 2, 0);  p[3] = ins(OP_ST, 0, 3, 0, 0);
      p[4] = ins(OP_SCAT, 0, 3, 0, 0); n = 5;
    end else begin            // WCC: label = min(v, u)
      p[0] = ins(OP_MIN, 3, 0, 2, 0);  p[1] = ins(OP_XEQ, 0, 3, 2, 0);
      p[2] = ins(OP_ST, 0, 3, 0, 0);   p[3] = ins(OP_SCAT, 0, 3, 0, 0); n = 4;
    end
    for (int x = 0; x < X; x++) for (int y = 0; y < Y; y++)
      for (int a = 0; a < n; a++) wr(x, y, CFG_IM, a, p[a]);
  endtask

  task automatic load_tables();
    for (int x = 0; x < X; x++) for (int y = 0; y < Y; y++) begin
      for (int a = 0; a < TBL_DEPTH; a++) begin
        if (inter_t[x][y][a].valid) wr(x, y, CFG_INTER, a, 32'(inter_t[x][y][a]));
        if (intra_t[x][y][a].valid) wr(x, y, CFG_INTRA, a, 32'(intra_t[x][y][a]));
      end
    end
  endtask

  task automatic init_attrs(int alg);
    for (int v = 0; v < NV; v++) begin
      drf_entry_t d;
      d.vid = VID_W'(v); d.attr = (alg == 2) ? ATTR_W'(v) : ATTR_INF;
      wr(vx(v), vy(v), CFG_DRF, vreg(v), 32'(d));
    end
  endtask

  task automatic wait_idle(output longint cycles);
    longint t0 = cycle;
    int quiet = 0;
    while (quiet < 3) begin
      @(posedge clk);
      quiet = busy ? 0 : quiet + 1;
    end
    cycles = cycle - t0;
  endtask

  task automatic check_result(string name);
    int bad = 0;
    for (int v = 0; v < NV; v++) begin
      rd_x = 3'(vx(v)); rd_y = 3'(vy(v)); rd_idx = REG_W'(vreg(v));
      #1;
      checks++;
      if (rd_data.attr != ATTR_W'(ref_attr[v]) || rd_data.vid != VID_W'(v)) begin
        failures++;
        if (bad++ < 5) $display("%s: vertex %0d got %0d expected %0d", name, v, rd_data.attr, ref_attr[v]);
      end
    end
  endtask

  // ---------------- mechanism counters ----------------
  longint n_stall = 0, n_arb = 0, n_multihop = 0, n_local = 0, n_prog = 0, n_exit = 0;
  longint n_mem = 0;
  event dump_ev;
  for (genvar x = 0; x < X; x++) begin : g_cx
    for (genvar y = 0; y < Y; y++) begin : g_cy
      always @(posedge clk) begin
        if (dut.g_x[x].g_y[y].u_pe.stall) n_stall++;
        if ($countones(dut.g_x[x].g_y[y].u_pe.u_router.in_valid) > 1) n_arb++;
        if (dut.g_x[x].g_y[y].u_pe.u_router.in_pop[4] &&
            !dut.g_x[x].g_y[y].u_pe.u_router.lout_valid) n_multihop++;
        if (dut.g_x[x].g_y[y].u_pe.u_router.in_pop[4] &&
            dut.g_x[x].g_y[y].u_pe.u_router.lout_valid) n_local++;
        if (dut.g_x[x].g_y[y].u_pe.prog_start) n_prog++;
        if (dut.g_x[x].g_y[y].u_pe.prog_exit) n_exit++;
      end
      always @(dump_ev) if (dut.g_x[x].g_y[y].u_pe.busy)
        $display("PE %0d,%0d busy: ib_empty=%b ai_empty=%b ao_empty=%b mb_empty=%b eng=%0d ao_full=%b ai_head=%p r_valid=%b",
          x, y, dut.g_x[x].g_y[y].u_pe.ib_empty, dut.g_x[x].g_y[y].u_pe.ai_empty,
          dut.g_x[x].g_y[y].u_pe.ao_empty, dut.g_x[x].g_y[y].u_pe.mb_empty,
          dut.g_x[x].g_y[y].u_pe.u_eng.state, dut.g_x[x].g_y[y].u_pe.ao_full,
          dut.g_x[x].g_y[y].u_pe.ai_head, dut.g_x[x].g_y[y].u_pe.r_valid);
      always @(dump_ev) if (dut.g_x[x].g_y[y].u_pe.busy) begin
        for (int i = 0; i < 5; i++) if (dut.g_x[x].g_y[y].u_pe.r_valid[i])
          $display("   in%0d: %p dest=%0d", i, dut.g_x[x].g_y[y].u_pe.r_pkt[i], dut.g_x[x].g_y[y].u_pe.u_router.dest[i]);
        $display("   credits %0d %0d %0d %0d", dut.g_x[x].g_y[y].u_pe.u_router.g_credit[0].u_cc.credits,
          dut.g_x[x].g_y[y].u_pe.u_router.g_credit[1].u_cc.credits, dut.g_x[x].g_y[y].u_pe.u_router.g_credit[2].u_cc.credits,
          dut.g_x[x].g_y[y].u_pe.u_router.g_credit[3].u_cc.credits);
      end
    end
  end

  // memory bus sink: every accepted packet is expected in the SPM log
  logic [31:0] log_exp [$];
  bit host_noise = 0;
  longint n_bank_wait = 0, n_swap = 0;
  always @(posedge clk) begin
    if (rst_n && mem_valid && !mem_ready && spm_en) n_bank_wait++;
    if (rst_n && mem_valid && mem_ready) begin
      n_mem++;
      log_exp.push_back({mem_pkt.id, 1'b0, mem_pe_x, 1'b0, mem_pe_y, mem_pkt.attr, mem_pkt.slice});
      checks++;
      if (!(removed_pe_en && mem_pe_x == 3'(removed_x) && mem_pe_y == 3'(removed_y) &&
            mem_pkt.slice == '0 && mem_pkt.x_off.hops == '0 && mem_pkt.y_off.hops == '0)) begin
        failures++;
        $display("unexpected memory bus packet from PE %0d,%0d: %p at %0d", mem_pe_x, mem_pe_y, mem_pkt, cycle);
      end
    end
  end

  // host reads at random SPM words while the log is being written
  always @(negedge clk) begin
    if (host_noise) begin
      spm_en   <= ($urandom % 2 == 0);
      spm_we   <= 1'b0;
      spm_addr <= ($urandom % 2 == 1) ? 12'(log_count) : 12'($urandom);
    end
  end

  task automatic require(string what, longint n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", what); end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    ->dump_ev;
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- main ----------------
  initial begin
    longint cyc;
    int src, multi_list, multi_hit;
    cfg = '0; rd_x = 0; rd_y = 0; rd_idx = 0;
    spm_en = 0; spm_we = 0; spm_addr = 0; spm_wdata = 0; log_clear = 0; swap_ack = 0;
    rst_n = 1;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    build_graph();
    multi_list = 0; multi_hit = 0;
    for (int v = 0; v < NV; v++) if (list_len[v] > 1) multi_list++;
    for (int x = 0; x < X; x++) for (int y = 0; y < Y; y++)
      for (int v = 0; v < NV; v++) if (hits_in_pe[x][y][v] > 1) multi_hit++;
    $display("graph: %0d vertices, %0d directed edges, %0d multi-entry lists, %0d multi-hit pairs",
             NV, ne, multi_list, multi_hit);
    require("Inter-Table list longer than one entry", longint'(multi_list));
    require("several Intra-Table hits for one packet", longint'(multi_hit));
    load_tables();

    for (int alg = 0; alg < 3; alg++) begin
      load_program(alg);
      init_attrs(alg);
      src = $urandom % NV;
      reference(alg, src);
      if (alg != 2) begin
        wr(vx(src), vy(src), CFG_START, vreg(src), 32'd0);
        wait_idle(cyc);
      end else begin
        // every vertex starts active with its own id as label; descending
        // order, so a start never overwrites a label already lowered
        cyc = 0;
        for (int v = NV - 1; v >= 0; v--) begin
          longint c;
          wr(vx(v), vy(v), CFG_START, vreg(v), 32'(v));
          wait_idle(c);
          cyc += c;
        end
      end
      $display("%s from %0d: %0d cycles", alg == 0 ? "BFS" : alg == 1 ? "SSSP" : "WCC", src, cyc);
      check_result(alg == 0 ? "BFS" : alg == 1 ? "SSSP" : "WCC");
    end

    // slice miss: PE (3,2) holds another slice
    removed_pe_en = 1;
    wr(removed_x, removed_y, CFG_SLICE, 0, 32'd1);
    load_program(0);
    init_attrs(0);
    do src = $urandom % NV; while (vx(src) == removed_x && vy(src) == removed_y);
    reference(0, src);
    host_noise = 1;
    wr(vx(src), vy(src), CFG_START, vreg(src), 32'd0);
    wait_idle(cyc);
    host_noise = 0;
    @(negedge clk);
    @(negedge clk);
    spm_en = 0;
    // the cluster of the PE with the other slice asks for slice 0
    checks++;
    if (!swap_valid || swap_cluster != 4'((removed_y / 2) * 4 + removed_x / 2) || swap_slice != 8'd0) begin
      failures++;
      $display("swap request %0d cluster %0d slice %0d", swap_valid, swap_cluster, swap_slice);
    end else n_swap++;
    swap_ack = 1;
    @(negedge clk);
    swap_ack = 0;
    checks++;
    if (swap_valid) begin failures++; $display("swap request not cleared by the ack"); end
    // read the packet log back through the host port
    checks++;
    if (log_count != 13'(log_exp.size())) begin
      failures++;
      $display("log_count %0d, expected %0d", log_count, log_exp.size());
    end
    for (int i = 0; i < log_exp.size(); i++) begin
      @(negedge clk);
      spm_en = 1; spm_we = 0; spm_addr = 12'(i);
      @(negedge clk);
      spm_en = 0;
      checks++;
      if (spm_rdata != log_exp[i]) begin
        failures++;
        $display("log word %0d = %h, expected %h", i, spm_rdata, log_exp[i]);
      end
    end
    // host write/read of an SPM word, then log_clear
    @(negedge clk);
    spm_en = 1; spm_we = 1; spm_addr = 12'd4000; spm_wdata = 32'hCAFE_0123;
    @(negedge clk);
    spm_we = 0;
    @(negedge clk);
    spm_en = 0; log_clear = 1;
    checks++;
    if (spm_rdata != 32'hCAFE_0123) begin failures++; $display("SPM host write/read failed: %h", spm_rdata); end
    @(negedge clk);
    log_clear = 0;
    checks++;
    if (log_count != 0) begin failures++; $display("log_clear failed"); end
    $display("BFS with slice miss: %0d cycles, %0d packets to memory bus", cyc, n_mem);
    check_result("BFS-slice");

    require("router stall", n_stall);
    require("arbitration between heads", n_arb);
    require("multi-hop packet", n_multihop);
    require("local delivery", n_local);
    require("program without scatter", n_exit);
    require("memory buffer diversion", n_mem);
    require("memory bus waiting for a host SPM access", n_bank_wait);
    require("slice-swap request from an idle cluster", n_swap);
    $display("stalls=%0d arb=%0d injected_remote=%0d injected_local=%0d programs=%0d early_exits=%0d mem=%0d",
             n_stall, n_arb, n_multihop, n_local, n_prog, n_exit, n_mem);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
