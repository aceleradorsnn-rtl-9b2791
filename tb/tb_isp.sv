// tb_isp: the whole Cognitive ISP on 12 x 8 frames. A frame-level model
// here (defect correction, white balance, Malvar-He-Cutler demosaicing,
// non-local means, gamma, BT.601 conversion, luma sharpening, each with
// mirrored borders) predicts every output pixel. Parameters are written
// over the control interface while the previous frame is still streaming
// and must apply from the next frame exactly: frame 0 runs with manual
// gains, NLM strength 2, sharpening 4 and the gamma-1/2 curve; frame 1
// with other gains, NLM off, no sharpening and the linear curve. Frame 2
// switches AWB on, whose gains (from frame 1's statistics) must then reach
// the white-balance stage. Random gaps on both stream sides exercise
// back-pressure; frame tags and ROI flags are checked too.
module tb_isp;
  import isp_pkg::*;
  localparam int W = 12, H = 8, NF = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [9:0] cfg_addr; logic [31:0] cfg_data; logic cfg_valid, cfg_ready;
  logic [7:0] s_tdata; logic s_tvalid, s_tready, s_tlast, s_tuser;
  ycc_t m_tdata; logic m_tvalid, m_tready, m_tlast, m_tuser, m_roi;
  logic [15:0] frame_tag, exposure; logic [31:0] commits, defects;
  int checks = 0, failures = 0, stalls = 0;
  isp #(.W(W), .H(H)) dut (.*);

  int raw [NF][H][W];
  int exp_y [NF][H][W], exp_cb [NF][H][W], exp_cr [NF][H][W];
  int gr [NF] = '{300, 200, 256}, gg [NF] = '{256, 256, 256}, gb [NF] = '{350, 400, 256}, dg [NF] = '{256, 300, 256};
  int nlm_s [NF] = '{2, 0, 0}, shp [NF] = '{4, 0, 0}, bank [NF] = '{0, 1, 1};

  function automatic int mir(int v, int n);
    if (v < 0) return -v;
    if (v > n - 1) return 2 * (n - 1) - v;
    return v;
  endfunction
  function automatic int cl(int v); return v < 0 ? 0 : (v > 255 ? 255 : v); endfunction

  task automatic model(int f);
    int a [H][W], b [H][W], rgb [3][H][W], n [3][H][W], yy [H][W], cb [H][W], cr [H][W];
    // DPC, threshold 40
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      int ce, nb [8], hot, dead, best, bg;
      int dr [8] = '{0, 0, -2, 2, -2, 2, -2, 2};
      int dc [8] = '{-2, 2, 0, 0, -2, 2, 2, -2};
      ce = raw[f][r][c]; hot = 1; dead = 1;
      for (int k = 0; k < 8; k++) begin
        nb[k] = raw[f][mir(r + dr[k], H)][mir(c + dc[k], W)];
        if (!(ce - nb[k] > 40)) hot = 0;
        if (!(nb[k] - ce > 40)) dead = 0;
      end
      a[r][c] = ce;
      if (hot || dead) begin
        best = 0; bg = 1000;
        for (int k = 0; k < 4; k++) begin
          int g; g = nb[2*k] - nb[2*k+1]; if (g < 0) g = -g;
          if (g < bg) begin bg = g; best = k; end
        end
        a[r][c] = (nb[2*best] + nb[2*best+1]) / 2;
      end
    end
    // white balance
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      longint g;
      g = (r % 2 == 0 && c % 2 == 0) ? gr[f] : ((r % 2 == 1 && c % 2 == 1) ? gb[f] : gg[f]);
      b[r][c] = cl(int'((longint'(a[r][c]) * g * longint'(dg[f]) + 32768) >> 16));
    end
    // demosaic
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      int cc, n1, s1, w1, e1, n2, s2, w2, e2, d, gk, hk, vk, dk;
      cc = b[r][c];
      n1 = b[mir(r-1,H)][c]; s1 = b[mir(r+1,H)][c]; w1 = b[r][mir(c-1,W)]; e1 = b[r][mir(c+1,W)];
      n2 = b[mir(r-2,H)][c]; s2 = b[mir(r+2,H)][c]; w2 = b[r][mir(c-2,W)]; e2 = b[r][mir(c+2,W)];
      d = b[mir(r-1,H)][mir(c-1,W)] + b[mir(r-1,H)][mir(c+1,W)] + b[mir(r+1,H)][mir(c-1,W)] + b[mir(r+1,H)][mir(c+1,W)];
      gk = cl((8*cc + 4*(n1+s1+w1+e1) - 2*(n2+s2+w2+e2) + 8) >>> 4);
      hk = cl((10*cc + 8*(w1+e1) - 2*(w2+e2) - 2*d + (n2+s2) + 8) >>> 4);
      vk = cl((10*cc + 8*(n1+s1) - 2*(n2+s2) - 2*d + (w2+e2) + 8) >>> 4);
      dk = cl((12*cc + 4*d - 3*(n2+s2+w2+e2) + 8) >>> 4);
      if (r % 2 == 0 && c % 2 == 0) begin rgb[0][r][c] = cc; rgb[1][r][c] = gk; rgb[2][r][c] = dk; end
      else if (r % 2 == 0) begin rgb[0][r][c] = hk; rgb[1][r][c] = cc; rgb[2][r][c] = vk; end
      else if (c % 2 == 0) begin rgb[0][r][c] = vk; rgb[1][r][c] = cc; rgb[2][r][c] = hk; end
      else begin rgb[0][r][c] = dk; rgb[1][r][c] = gk; rgb[2][r][c] = cc; end
    end
    // NLM
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      int ws, acc [3];
      if (nlm_s[f] == 0) for (int k = 0; k < 3; k++) n[k][r][c] = rgb[k][r][c];
      else begin
        ws = 0; acc = '{0, 0, 0};
        for (int oy = -1; oy <= 1; oy++) for (int ox = -1; ox <= 1; ox++) begin
          int d, w;
          d = 0;
          for (int qy = -1; qy <= 1; qy++) for (int qx = -1; qx <= 1; qx++) begin
            int r1, c1, r2, c2, i1, i2;
            r1 = mir(r+qy, H); c1 = mir(c+qx, W); r2 = mir(r+oy+qy, H); c2 = mir(c+ox+qx, W);
            // the window stage mirrors about the centre pixel, so an offset
            // tap two steps out is mirrored relative to the window, as here
            i1 = (rgb[0][r1][c1] + 2 * rgb[1][r1][c1] + rgb[2][r1][c1]) / 4;
            i2 = (rgb[0][r2][c2] + 2 * rgb[1][r2][c2] + rgb[2][r2][c2]) / 4;
            d += (i1 - i2) * (i1 - i2);
          end
          d = (d / 8) >> (nlm_s[f] - 1);
          w = (d > 8) ? 0 : (256 >> d);
          ws += w;
          for (int k = 0; k < 3; k++) acc[k] += w * rgb[k][mir(r+oy,H)][mir(c+ox,W)];
        end
        for (int k = 0; k < 3; k++) n[k][r][c] = (acc[k] + ws / 2) / ws;
      end
    end
    // gamma, CSC
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      int g [3];
      for (int k = 0; k < 3; k++) g[k] = (bank[f] == 0) ? int'($floor($sqrt(255.0 * n[k][r][c]) + 0.5)) : n[k][r][c];
      yy[r][c] = cl((77*g[0] + 150*g[1] + 29*g[2] + 128) >>> 8);
      cb[r][c] = cl(((-43*g[0] - 85*g[1] + 128*g[2] + 128) >>> 8) + 128);
      cr[r][c] = cl(((128*g[0] - 107*g[1] - 21*g[2] + 128) >>> 8) + 128);
    end
    // sharpen
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) begin
      int s;
      s = 0;
      for (int i = -1; i <= 1; i++) for (int j = -1; j <= 1; j++) if (i != 0 || j != 0) s += yy[mir(r+i,H)][mir(c+j,W)];
      exp_y[f][r][c] = cl(yy[r][c] + ((shp[f] * (8 * yy[r][c] - s)) >>> 6));
      exp_cb[f][r][c] = cb[r][c]; exp_cr[f][r][c] = cr[r][c];
    end
  endtask

  task automatic wr(logic [9:0] a, logic [31:0] d);
    @(negedge clk); cfg_addr = a; cfg_data = d; cfg_valid = 1;
    @(negedge clk); cfg_valid = 0;
  endtask

  // stream driver
  int in_f = 0, in_r = 0, in_c = 0;
  logic go = 0;
  int awb_done = 0, awb_r1 = 0;
  always @(posedge clk) if (dut.u_awb.gains_valid) begin
    awb_done++;
    $display("awb result %0d at in_f %0d: r %0d b %0d", awb_done, in_f, dut.u_awb.gain_r, dut.u_awb.gain_b);
    if (awb_done == 1) awb_r1 = -1;
    if (awb_done == 2) awb_r1 = int'(dut.u_awb.gain_r);
  end
  // each frame waits until the statistics of the one before are in (these
  // frames are shorter than the ~200 clocks the gain division takes)
  always @(posedge clk) if (rst_n && go) begin
    if (s_tvalid && s_tready) begin
      if (in_c == W - 1) begin in_c = 0; if (in_r == H - 1) begin in_r = 0; in_f++; end else in_r++; end
      else in_c++;
    end
    if (s_tvalid && !s_tready) stalls++;
    if (!s_tvalid || s_tready) begin
      if (in_f < NF && (in_f == 0 || awb_done >= in_f)) begin
        s_tvalid <= ($urandom % 5) != 0;
        s_tdata  <= 8'(raw[in_f][in_r][in_c]);
        s_tlast  <= (in_c == W - 1);
        s_tuser  <= (in_r == 0 && in_c == 0);
      end else s_tvalid <= 1'b0;
    end
    m_tready <= ($urandom % 4) != 0;
  end

  // output checker
  int out_f = 0, out_n = 0, awb_applied = 0;
  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    int r, c;
    r = out_n / W; c = out_n % W;
    if (out_f < 2) begin
      checks++;
      if (int'(m_tdata.y) != exp_y[out_f][r][c] || int'(m_tdata.cb) != exp_cb[out_f][r][c] || int'(m_tdata.cr) != exp_cr[out_f][r][c]) begin
        failures++;
        if (failures < 8) $display("frame %0d (%0d,%0d): got %0d %0d %0d want %0d %0d %0d", out_f, r, c,
          m_tdata.y, m_tdata.cb, m_tdata.cr, exp_y[out_f][r][c], exp_cb[out_f][r][c], exp_cr[out_f][r][c]);
      end
    end
    checks++;
    if (m_roi != ((out_f == 0) ? 1'b1 : (c >= 3 && c <= 8 && r >= 2 && r <= 5))) begin failures++; $display("roi at %0d %0d %0d", out_f, r, c); end
    if (out_n == 0) begin
      checks++;
      if (frame_tag != 16'(out_f + 1)) begin failures++; $display("frame %0d tag %0d", out_f, frame_tag); end
    end
    out_n++;
    if (out_n == W * H) begin out_n = 0; out_f++; end
  end

  initial begin
    cfg_addr = 0; cfg_data = 0; cfg_valid = 0; s_tvalid = 0; s_tdata = 0; s_tlast = 0; s_tuser = 0; m_tready = 0;
    for (int f = 0; f < NF; f++) for (int r = 0; r < H; r++) for (int c = 0; c < W; c++)
      raw[f][r][c] = ($urandom % 29 == 0) ? 250 : 60 + ((r + c) * 9 + $urandom % 20) % 120;
    raw[0][3][4] = 255; raw[1][4][6] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // frame 0 setting (in place before the stream starts)
    wr(REG_CTRL, 32'h0); wr(REG_GAIN_R, 32'd300); wr(REG_GAIN_B, 32'd350); wr(REG_COMMIT, 32'd1);
    go = 1;
    for (int f = 0; f < 2; f++) model(f);
    // frame 1 setting, written while frame 0 streams
    while (in_f == 0 && in_r < 2) @(posedge clk);
    wr(REG_CTRL, 32'h2); wr(REG_GAIN_R, 32'd200); wr(REG_GAIN_B, 32'd400); wr(REG_DGAIN, 32'd300);
    wr(REG_NLM, 32'd0); wr(REG_SHARPEN, 32'd0);
    wr(REG_ROI_X, {4'd0, 12'd8, 4'd0, 12'd3}); wr(REG_ROI_Y, {4'd0, 12'd5, 4'd0, 12'd2});
    wr(REG_COMMIT, 32'd2);
    // frame 2: AWB on
    while (in_f < 1 || (in_f == 1 && in_r < 2)) @(posedge clk);
    wr(REG_CTRL, 32'h3); wr(REG_DGAIN, 32'd256); wr(REG_COMMIT, 32'd3);
    while (out_f < NF) @(posedge clk);
    checks++;
    if (int'(dut.u_wb.g_r) != awb_r1 || awb_r1 == 256) begin
      failures++; $display("AWB gains not applied: wb %0d awb %0d", dut.u_wb.g_r, awb_r1);
    end
    checks++;
    if (defects == 0 || commits != 32'd3 || stalls == 0) begin failures++; $display("defects %0d commits %0d stalls %0d", defects, commits, stalls); end
    $display("defects corrected %0d, input stalls %0d, commits %0d", defects, stalls, commits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
