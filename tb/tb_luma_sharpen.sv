// tb_luma_sharpen: luma sharpening against a 3x3 Laplacian reference on Y with Cb/Cr passed through; frame 0 at amount 8, frame 1 at 0.
// Two random 9 x 5 frames are streamed through with random valid and
// ready gaps; every output pixel is compared with a reference computed
// here from the stored frame.
module tb_luma_sharpen;
  import isp_pkg::*;
  localparam int W = 9, H = 5, NF = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [24-1:0] s_tdata; logic s_tvalid, s_tready, s_tlast, s_tuser;
  logic [24-1:0] m_tdata; logic m_tvalid, m_tready, m_tlast, m_tuser;
  int checks = 0, failures = 0;
  logic [24-1:0] img [NF][H][W];
  int in_f = 0, in_r = 0, in_c = 0, out_f = 0, out_n = 0, cyc = 0, first_out = -1;
  logic [3:0] amount;
  luma_sharpen #(.W(W), .H(H)) dut (.*);
  always_comb amount = (out_f == 0) ? 4'd8 : 4'd0;
  function automatic int mir(int v, int n);
    if (v < 0) return -v;
    if (v > n - 1) return 2 * (n - 1) - v;
    return v;
  endfunction
  function automatic int px(int f, int r, int c);
    return int'(img[f][mir(r, H)][mir(c, W)]);
  endfunction
  function automatic int ly(int f, int r, int c);
    logic [23:0] p;
    p = img[f][mir(r, H)][mir(c, W)];
    return int'(p[23:16]);
  endfunction
  function automatic logic [23:0] ref_pix(int f, int r, int c);
    int am, s, y;
    logic [23:0] p;
    am = (f == 0) ? 8 : 0;
    s = 0;
    for (int i = -1; i <= 1; i++) for (int j = -1; j <= 1; j++) if (i != 0 || j != 0) s += ly(f, r+i, c+j);
    y = ly(f, r, c) + int'($floor(real'(am * (8 * ly(f, r, c) - s)) / 64.0));
    p = img[f][r][c];
    p[23:16] = 8'(y < 0 ? 0 : (y > 255 ? 255 : y));
    return p;
  endfunction
  initial begin
    for (int f = 0; f < NF; f++) for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) img[f][r][c] = 24'($urandom);

    s_tvalid = 0; m_tready = 0; s_tdata = 0; s_tlast = 0; s_tuser = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (s_tvalid && s_tready) begin
      if (in_c == W - 1) begin in_c = 0; if (in_r == H - 1) begin in_r = 0; in_f++; end else in_r++; end
      else in_c++;
    end
    if (in_f < NF && (!s_tvalid || s_tready)) begin
      s_tvalid <= (1) ? ($urandom % 4) != 0 : 1'b1;
      s_tdata  <= img[in_f][in_r][in_c];
      s_tlast  <= (in_c == W - 1);
      s_tuser  <= (in_r == 0 && in_c == 0);
    end else if (in_f >= NF && s_tready) s_tvalid <= 0;
    m_tready <= (1) ? ($urandom % 3) != 0 : 1'b1;
  end

  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    int r, c;
    logic [24-1:0] exp_v;
    r = out_n / W; c = out_n % W;
    exp_v = ref_pix(out_f, r, c);
    if (first_out < 0) first_out = cyc;
    checks++;
    if (m_tdata !== exp_v || m_tlast != (c == W - 1) || m_tuser != (out_n == 0)) begin
      failures++;
      if (failures < 6) $display("frame %0d r %0d c %0d: got %h want %h", out_f, r, c, m_tdata, exp_v);
    end
    out_n++;
    if (out_n == W * H) begin out_n = 0; out_f++; end
    if (out_f == NF) begin

      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
