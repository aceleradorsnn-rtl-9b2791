// tb_window_gen: streams two random 7 x 5 frames through window_gen with
// random valid/ready gaps and compares every tap of every window with a
// mirrored-border reference computed from the frame held here.
module tb_window_gen;
  localparam int W = 7, H = 5, K = 2, DW = 8, N = 2 * K + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [DW-1:0] s_tdata; logic s_tvalid, s_tready, s_tlast, s_tuser;
  logic [N-1:0][N-1:0][DW-1:0] m_win; logic [15:0] m_row, m_col;
  logic m_tvalid, m_tready, m_tlast, m_tuser;
  window_gen #(.W(W), .H(H), .K(K), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] img [2][H][W];
  int in_f = 0, in_r = 0, in_c = 0, out_f = 0, out_n = 0;

  function automatic int mir(int v, int n);
    if (v < 0) return -v;
    if (v > n - 1) return 2 * (n - 1) - v;
    return v;
  endfunction

  initial begin
    for (int f = 0; f < 2; f++) for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) img[f][r][c] = 8'($urandom);
    s_tvalid = 0; m_tready = 0; s_tdata = 0; s_tlast = 0; s_tuser = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  // driver
  always @(posedge clk) if (rst_n) begin
    if (s_tvalid && s_tready) begin
      if (in_c == W - 1) begin in_c = 0; if (in_r == H - 1) begin in_r = 0; in_f++; end else in_r++; end
      else in_c++;
    end
    if (in_f < 2 && (!s_tvalid || s_tready)) begin
      s_tvalid <= ($urandom % 4) != 0;
      s_tdata  <= img[in_f][in_r][in_c];
      s_tlast  <= (in_c == W - 1);
      s_tuser  <= (in_r == 0 && in_c == 0);
    end else if (in_f >= 2 && s_tready) s_tvalid <= 0;
    m_tready <= ($urandom % 3) != 0;
  end

  // monitor
  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    int r, c, bad;
    r = out_n / W; c = out_n % W; bad = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
      if (m_win[i][j] !== img[out_f][mir(r + i - K, H)][mir(c + j - K, W)]) bad++;
    checks++;
    if (bad != 0 || m_row != 16'(r) || m_col != 16'(c) || m_tlast != (c == W - 1) || m_tuser != (out_n == 0)) begin
      failures++;
      $display("window mismatch frame %0d r %0d c %0d (%0d taps)", out_f, r, c, bad);
    end
    out_n++;
    if (out_n == W * H) begin out_n = 0; out_f++; end
    if (out_f == 2) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
