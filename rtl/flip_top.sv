// flip_top -- the Flip fabric: an X-by-Y mesh of data-centric PEs.
//
// Every PE connects to its north (y+1), east (x+1), south (y-1) and west
// (x-1) neighbour with a packet link and a 1-bit credit wire in each
// direction; links at the array edge are tied off. The host reaches all PEs
// through one broadcast configuration bus (each PE picks the writes that
// carry its own x/y) and reads vertex attributes back with rd_x/rd_y/rd_idx.
// A query starts with a CFG_START write on the PE holding the source vertex
// and has finished when `busy` stays low (no packet in any buffer, no
// program running; a link moves a packet into the neighbour's input buffer
// in the same cycle it leaves the router, so nothing is in flight outside
// the buffers).
//
// Packets whose destination slice is not loaded leave their PE's memory
// buffer onto the memory bus. A round-robin arbiter picks one PE per cycle
// (mem_valid/mem_pkt/mem_pe_x/mem_pe_y show the candidate, mem_ready the
// cycle it is taken) and appends it to a packet log in the SPM: one 32-bit
// word per packet, consecutive words in consecutive banks. As the packet has
// arrived, its two offset fields are zero and are replaced by the PE
// coordinates: word = {id, 0, pe_x, 0, pe_y, attr, slice}. log_count tells
// the host how many words are stored; log_clear empties the log. The host
// reads or writes any SPM word through spm_en/spm_we/spm_addr/spm_wdata,
// with the data on spm_rdata one cycle after a read. A host access has
// priority: the memory bus waits while the host uses the bank the next log
// word goes to, and while the log is full.
//
// From the paper: 8x8 PE mesh, dynamic routing between PEs, per-PE memory
// buffers feeding a 16 KB, 8-bank SPM, configuration distributed from the
// host. Own choices: the broadcast bus, the memory bus arbiter, the packet
// log format in the SPM, the host port and the busy signal.
//
// Data swapping: flip_swap_ctrl watches the log writes and the PEs' busy
// flags and requests, for an idle 2x2 cluster with cached packets, the
// slice of its earliest cached packet (swap_valid/swap_cluster/swap_slice,
// acknowledged by the host with swap_ack). The host moves the data.
module flip_top
  import flip_pkg::*;
#(
  parameter int unsigned X = 8,
  parameter int unsigned Y = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic [2:0]       rd_x,
  input  logic [2:0]       rd_y,
  input  logic [REG_W-1:0] rd_idx,
  output drf_entry_t       rd_data,
  output logic             mem_valid,
  output pkt_t             mem_pkt,
  output logic [2:0]       mem_pe_x,
  output logic [2:0]       mem_pe_y,
  output logic             mem_ready,
  input  logic             spm_en,
  input  logic             spm_we,
  input  logic [11:0]      spm_addr,
  input  logic [31:0]      spm_wdata,
  output logic [31:0]      spm_rdata,
  input  logic             log_clear,
  output logic [12:0]      log_count,
  output logic             swap_valid,
  output logic [3:0]       swap_cluster,
  output logic [SLICE_W-1:0] swap_slice,
  input  logic             swap_ack,
  output logic             busy
);
  localparam int unsigned N = X * Y;

  logic [3:0]  ov [X][Y];
  pkt_t        op [X][Y][4];
  logic [3:0]  iv [X][Y];
  pkt_t        ip [X][Y][4];
  logic [3:0]  co [X][Y];
  logic [3:0]  ci [X][Y];
  drf_entry_t  rdd [X][Y];
  logic [N-1:0] pe_busy, m_valid, m_ready;
  pkt_t        m_pkt [N];

  for (genvar x = 0; x < X; x++) begin : g_x
    for (genvar y = 0; y < Y; y++) begin : g_y
      // inputs: N from (x,y+1) S output, E from (x+1,y) W output, ...
      if (y + 1 < Y) begin : g_n
        assign iv[x][y][0] = ov[x][y+1][2];
        assign ip[x][y][0] = op[x][y+1][2];
        assign ci[x][y][0] = co[x][y+1][2];
      end else begin : g_n_edge
        assign iv[x][y][0] = 1'b0;
        assign ip[x][y][0] = '0;
        assign ci[x][y][0] = 1'b0;
      end
      if (x + 1 < X) begin : g_e
        assign iv[x][y][1] = ov[x+1][y][3];
        assign ip[x][y][1] = op[x+1][y][3];
        assign ci[x][y][1] = co[x+1][y][3];
      end else begin : g_e_edge
        assign iv[x][y][1] = 1'b0;
        assign ip[x][y][1] = '0;
        assign ci[x][y][1] = 1'b0;
      end
      if (y > 0) begin : g_s
        assign iv[x][y][2] = ov[x][y-1][0];
        assign ip[x][y][2] = op[x][y-1][0];
        assign ci[x][y][2] = co[x][y-1][0];
      end else begin : g_s_edge
        assign iv[x][y][2] = 1'b0;
        assign ip[x][y][2] = '0;
        assign ci[x][y][2] = 1'b0;
      end
      if (x > 0) begin : g_w
        assign iv[x][y][3] = ov[x-1][y][1];
        assign ip[x][y][3] = op[x-1][y][1];
        assign ci[x][y][3] = co[x-1][y][1];
      end else begin : g_w_edge
        assign iv[x][y][3] = 1'b0;
        assign ip[x][y][3] = '0;
        assign ci[x][y][3] = 1'b0;
      end

      flip_pe #(.XI(x), .YI(y)) u_pe (
        .clk, .rst_n, .cfg, .rd_idx, .rd_data(rdd[x][y]),
        .in_valid(iv[x][y]), .in_pkt(ip[x][y]), .credit_out(co[x][y]),
        .out_valid(ov[x][y]), .out_pkt(op[x][y]), .credit_in(ci[x][y]),
        .mem_valid(m_valid[y*X+x]), .mem_pkt(m_pkt[y*X+x]), .mem_ready(m_ready[y*X+x]),
        .busy(pe_busy[y*X+x]), .stall(), .prog_start(), .prog_exit()
      );
    end
  end

  assign rd_data = rdd[rd_x][rd_y];
  assign busy    = |pe_busy;

  // ---------------- memory bus: round-robin over the memory buffers ----------------
  localparam int unsigned NW = $clog2(N);
  logic [NW-1:0] rr, sel;
  logic          sel_valid;
  always_comb begin
    sel       = '0;
    sel_valid = 1'b0;
    for (int k = 0; k < N; k++) begin
      logic [NW:0] c;
      c = {1'b0, rr} + (NW+1)'(k);
      if (c >= (NW+1)'(N)) c = c - (NW+1)'(N);
      if (!sel_valid && m_valid[c[NW-1:0]]) begin
        sel       = c[NW-1:0];
        sel_valid = 1'b1;
      end
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (sel_valid && mem_ready) rr <= (sel == NW'(N - 1)) ? '0 : sel + 1'b1;
  end
  assign mem_valid = sel_valid;
  assign mem_pkt   = m_pkt[sel];
  assign mem_pe_x  = 3'(sel % NW'(X));
  assign mem_pe_y  = 3'(sel / NW'(X));
  always_comb begin
    m_ready = '0;
    m_ready[sel] = mem_ready;
  end

  // ---------------- SPM with the packet log ----------------
  logic [7:0]  b_en, b_we;
  logic [8:0]  b_addr  [8];
  logic [31:0] b_wdata [8];
  logic [31:0] b_rdata [8];
  logic [2:0]  rd_bank_q;
  logic [11:0] wp;
  logic        log_full;

  assign log_full  = log_count[12];
  assign mem_ready = sel_valid && !log_full && !(spm_en && spm_addr[2:0] == wp[2:0]);

  always_comb begin
    b_en = '0;
    b_we = '0;
    for (int b = 0; b < 8; b++) begin
      b_addr[b]  = spm_addr[11:3];
      b_wdata[b] = spm_wdata;
    end
    if (mem_ready) begin
      b_en[wp[2:0]]    = 1'b1;
      b_we[wp[2:0]]    = 1'b1;
      b_addr[wp[2:0]]  = wp[11:3];
      b_wdata[wp[2:0]] = {mem_pkt.id, 1'b0, mem_pe_x, 1'b0, mem_pe_y, mem_pkt.attr, mem_pkt.slice};
    end
    if (spm_en) begin
      b_en[spm_addr[2:0]] = 1'b1;
      b_we[spm_addr[2:0]] = spm_we;
    end
  end

  flip_spm u_spm (.clk, .en(b_en), .we(b_we), .addr(b_addr), .wdata(b_wdata), .rdata(b_rdata));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      log_count <= '0;
      rd_bank_q <= '0;
    end else begin
      if (spm_en) rd_bank_q <= spm_addr[2:0];
      if (log_clear) begin
        wp        <= '0;
        log_count <= '0;
      end else if (mem_ready) begin
        wp        <= wp + 1'b1;
        log_count <= log_count + 1'b1;
      end
    end
  end
  assign spm_rdata = b_rdata[rd_bank_q];

  // ---------------- slice-swap requests ----------------
  flip_swap_ctrl #(.X(X), .Y(Y)) u_swap (
    .clk, .rst_n, .pe_busy,
    .log_valid(mem_ready), .log_pe_x(mem_pe_x), .log_pe_y(mem_pe_y), .log_slice(mem_pkt.slice),
    .swap_valid, .swap_cluster, .swap_slice, .swap_ack
  );

  always_ff @(posedge clk) if (rst_n) a_log_bound: assert (log_count <= 13'd4096);
endmodule
