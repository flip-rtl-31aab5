// tb_flip_swap_ctrl -- random busy patterns, cached packets and host acks on
// an 8x8 array (16 clusters). A model keeps, per cluster, the slice of the
// earliest packet cached since the last swap and serves idle clusters
// round-robin; every cycle the request, its cluster and its slice are
// compared with the model.
module tb_flip_swap_ctrl;
  import flip_pkg::*;
  localparam int X = 8, Y = 8, NC = 16;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  logic [X*Y-1:0] pe_busy;
  logic log_valid, swap_valid, swap_ack;
  logic [2:0] log_pe_x, log_pe_y;
  logic [7:0] log_slice, swap_slice;
  logic [3:0] swap_cluster;
  int checks = 0, failures = 0, n_swaps = 0, n_keep = 0;
  bit m_pend [NC];
  int m_slice [NC];
  int m_rr;

  flip_swap_ctrl dut (.*);

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit cl_idle(int c);
    int cx, cy;
    cx = 2 * (c % 4);
    cy = 2 * (c / 4);
    return !(pe_busy[cy*X+cx] || pe_busy[cy*X+cx+1] || pe_busy[(cy+1)*X+cx] || pe_busy[(cy+1)*X+cx+1]);
  endfunction

  initial begin
    int exp_c, lc;
    bit exp_v;
    pe_busy = '0; log_valid = 0; log_pe_x = 0; log_pe_y = 0; log_slice = 0; swap_ack = 0;
    for (int c = 0; c < NC; c++) begin m_pend[c] = 0; m_slice[c] = 0; end
    m_rr = 0;
    rst_n = 1; #1 rst_n = 0; #20 rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      // busy: mostly busy in the first half, mostly idle later
      for (int i = 0; i < X * Y; i++) pe_busy[i] = ($urandom % 8) < ((t < 10000) ? 6 : 1);
      log_valid = ($urandom % 3 == 0);
      log_pe_x  = 3'($urandom);
      log_pe_y  = 3'($urandom);
      log_slice = 8'($urandom % 5);
      #1;
      exp_v = 0; exp_c = 0;
      for (int k = 0; k < NC; k++) begin
        int c;
        c = (m_rr + k) % NC;
        if (!exp_v && m_pend[c] && cl_idle(c)) begin exp_v = 1; exp_c = c; end
      end
      checks++;
      if (swap_valid != exp_v || (exp_v && (swap_cluster != 4'(exp_c) || swap_slice != 8'(m_slice[exp_c])))) begin
        failures++;
        $display("t=%0d swap %0d/%0d/%0d, expected %0d/%0d/%0d", t, swap_valid, swap_cluster, swap_slice, exp_v, exp_c, m_slice[exp_c]);
      end
      swap_ack = swap_valid && ($urandom % 2 == 1);
      // model update at the clock edge
      lc = (int'(log_pe_y) / 2) * 4 + int'(log_pe_x) / 2;
      if (exp_v && swap_ack) begin
        m_pend[exp_c] = 0;
        m_rr = (exp_c + 1) % NC;
        n_swaps++;
      end
      if (log_valid) begin
        if (!m_pend[lc]) begin m_pend[lc] = 1; m_slice[lc] = int'(log_slice); end
        else n_keep++;
      end
    end
    checks++;
    if (n_swaps < 100 || n_keep < 100) begin failures++; $display("too few swaps (%0d) or kept slices (%0d)", n_swaps, n_keep); end
    $display("swaps=%0d later packets behind an earlier one=%0d", n_swaps, n_keep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
