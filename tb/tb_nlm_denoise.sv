// tb_nlm_denoise: non-local means against a reference that computes patch distances, base-2 exponential weights and the rounded weighted mean; frame 0 runs at strength 3, frame 1 bypassed.
// Two random 10 x 6 frames are streamed through with random valid and
// ready gaps; every output pixel is compared with a reference computed
// here from the stored frame.
module tb_nlm_denoise;
  import isp_pkg::*;
  localparam int W = 10, H = 6, NF = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [24-1:0] s_tdata; logic s_tvalid, s_tready, s_tlast, s_tuser;
  logic [24-1:0] m_tdata; logic m_tvalid, m_tready, m_tlast, m_tuser;
  int checks = 0, failures = 0;
  logic [24-1:0] img [NF][H][W];
  int in_f = 0, in_r = 0, in_c = 0, out_f = 0, out_n = 0, cyc = 0, first_out = -1;
  logic [3:0] strength;
  nlm_denoise #(.W(W), .H(H)) dut (.*);
  always_comb strength = (out_f == 0) ? 4'd3 : 4'd0;
  function automatic int mir(int v, int n);
    if (v < 0) return -v;
    if (v > n - 1) return 2 * (n - 1) - v;
    return v;
  endfunction
  function automatic int px(int f, int r, int c);
    return int'(img[f][mir(r, H)][mir(c, W)]);
  endfunction
  function automatic int inten(int f, int r, int c);
    logic [23:0] p;
    p = img[f][mir(r, H)][mir(c, W)];
    return (int'(p[23:16]) + 2 * int'(p[15:8]) + int'(p[7:0])) / 4;
  endfunction
  function automatic logic [23:0] ref_pix(int f, int r, int c);
    int st, ws, acc [3], w, d;
    logic [23:0] p;
    st = (f == 0) ? 3 : 0;
    if (st == 0) return img[f][r][c];
    ws = 0; acc = '{0, 0, 0};
    for (int oy = -1; oy <= 1; oy++) for (int ox = -1; ox <= 1; ox++) begin
      d = 0;
      for (int qy = -1; qy <= 1; qy++) for (int qx = -1; qx <= 1; qx++)
        d += (inten(f, r+qy, c+qx) - inten(f, r+oy+qy, c+ox+qx)) ** 2;
      d = (d / 8) / (1 << (st - 1));
      w = (d > 8) ? 0 : 256 / (1 << d);
      p = img[f][mir(r+oy, H)][mir(c+ox, W)];
      ws += w;
      for (int k = 0; k < 3; k++) acc[k] += w * int'(p[8*(2-k) +: 8]);
    end
    for (int k = 0; k < 3; k++) p[8*(2-k) +: 8] = 8'((acc[k] + ws / 2) / ws);
    return p;
  endfunction
  initial begin
    for (int f = 0; f < NF; f++) for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) img[f][r][c] = {8'(80 + $urandom % 40), 8'(80 + $urandom % 40), 8'(80 + $urandom % 40)};

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
