// tb_wb_gain: white balance against a real-valued reference of per-colour and global gains; the gains change between frames and must switch exactly at the frame start.
// Two random 10 x 6 frames are streamed through with random valid and
// ready gaps; every output pixel is compared with a reference computed
// here from the stored frame.
module tb_wb_gain;
  import isp_pkg::*;
  localparam int W = 10, H = 6, NF = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [8-1:0] s_tdata; logic s_tvalid, s_tready, s_tlast, s_tuser;
  logic [8-1:0] m_tdata; logic m_tvalid, m_tready, m_tlast, m_tuser;
  int checks = 0, failures = 0;
  logic [8-1:0] img [NF][H][W];
  int in_f = 0, in_r = 0, in_c = 0, out_f = 0, out_n = 0, cyc = 0, first_out = -1;
  logic [11:0] gain_r, gain_g, gain_b, dgain;
  wb_gain dut (.*);
  // new gains are presented while frame 0 is still streaming in
  always_comb begin
    gain_r = (in_f == 0) ? 12'd300 : 12'd512;
    gain_g = (in_f == 0) ? 12'd256 : 12'd200;
    gain_b = (in_f == 0) ? 12'd420 : 12'd256;
    dgain  = (in_f == 0) ? 12'd256 : 12'd384;
  end
  function automatic int mir(int v, int n);
    if (v < 0) return -v;
    if (v > n - 1) return 2 * (n - 1) - v;
    return v;
  endfunction
  function automatic int px(int f, int r, int c);
    return int'(img[f][mir(r, H)][mir(c, W)]);
  endfunction
  function automatic logic [7:0] ref_pix(int f, int r, int c);
    real g, v;
    if (r % 2 == 0 && c % 2 == 0) g = (f == 0) ? 300 : 512;
    else if (r % 2 == 1 && c % 2 == 1) g = (f == 0) ? 420 : 256;
    else g = (f == 0) ? 256 : 200;
    v = real'(px(f, r, c)) * (g / 256.0) * (((f == 0) ? 256.0 : 384.0) / 256.0);
    v = $floor(v + 0.5);
    return 8'((v > 255.0) ? 255 : int'(v));
  endfunction
  initial begin
    for (int f = 0; f < NF; f++) for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) img[f][r][c] = 8'($urandom);

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
    logic [8-1:0] exp_v;
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
