// tb_dpc: defective pixel correction against a reference of the all-eight-neighbours test and directional-mean fill; frames hold planted hot and dead pixels.
// Two random 10 x 6 frames are streamed through with random valid and
// ready gaps; every output pixel is compared with a reference computed
// here from the stored frame.
module tb_dpc;
  import isp_pkg::*;
  localparam int W = 10, H = 6, NF = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [8-1:0] s_tdata; logic s_tvalid, s_tready, s_tlast, s_tuser;
  logic [8-1:0] m_tdata; logic m_tvalid, m_tready, m_tlast, m_tuser;
  int checks = 0, failures = 0;
  logic [8-1:0] img [NF][H][W];
  int in_f = 0, in_r = 0, in_c = 0, out_f = 0, out_n = 0, cyc = 0, first_out = -1;
  logic [7:0] th; logic m_defect; int ndef = 0;
  dpc #(.W(W), .H(H)) dut (.*);
  always @(posedge clk) if (m_tvalid && m_tready && m_defect) ndef++;
  function automatic int mir(int v, int n);
    if (v < 0) return -v;
    if (v > n - 1) return 2 * (n - 1) - v;
    return v;
  endfunction
  function automatic int px(int f, int r, int c);
    return int'(img[f][mir(r, H)][mir(c, W)]);
  endfunction
  function automatic logic [7:0] ref_pix(int f, int r, int c);
    int ce, nb [8], hot, dead, best, bg;
    int dr [8] = '{0, 0, -2, 2, -2, 2, -2, 2};
    int dc [8] = '{-2, 2, 0, 0, -2, 2, 2, -2};
    ce = px(f, r, c); hot = 1; dead = 1;
    for (int k = 0; k < 8; k++) begin
      nb[k] = px(f, r + dr[k], c + dc[k]);
      if (!(ce - nb[k] > int'(th))) hot = 0;
      if (!(nb[k] - ce > int'(th))) dead = 0;
    end
    if (!(hot || dead)) return 8'(ce);
    best = 0; bg = 1000;
    for (int k = 0; k < 4; k++) begin
      int g;
      g = nb[2*k] - nb[2*k+1]; if (g < 0) g = -g;
      if (g < bg) begin bg = g; best = k; end
    end
    return 8'((nb[2*best] + nb[2*best+1]) / 2);
  endfunction
  initial begin
    for (int f = 0; f < NF; f++) for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) img[f][r][c] = (($urandom % 23) == 0) ? (($urandom % 2) ? 8'd250 : 8'd3) : 8'(100 + $urandom % 30);
    th = 8'd40;
    img[0][2][4] = 8'd250; img[0][4][7] = 8'd2; img[1][3][5] = 8'd3; img[1][0][0] = 8'd255;
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
      checks++; $display("defects corrected: %0d", ndef); if (ndef == 0) begin failures++; $display("no defect corrected"); end
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
