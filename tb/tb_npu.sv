// tb_npu: runs the whole NPU at a small size (16 x 12 sensor, 2 bins,
// 2 -> 3 -> 4 channels, cells of 2) on three windows of events: a moving
// bright blob, darkening background noise, and an empty window. A complete
// software model here (voxel grid, two strided spiking convolutions with
// LIF neurons, cell counts, controller rules) predicts the detection and
// the six control writes of every window, which are compared with what the
// NPU emits on its control interface.
module tb_npu;
  import npu_pkg::*;
  import isp_pkg::*;
  localparam int SW = 16, SH = 12, T = 2, BIN = 100, C1 = 3, C2 = 4, CELL = 2;
  localparam int IMW = 64, IMH = 48;
  localparam int W1 = (SW - 1) / 2 + 1, H1 = (SH - 1) / 2 + 1, W2 = (W1 - 1) / 2 + 1, H2 = (H1 - 1) / 2 + 1;
  localparam int GW = (W2 + CELL - 1) / CELL, GH = (H2 + CELL - 1) / CELL;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  dvs_event_t ev; logic ev_valid, ev_ready;
  logic w_we, w_layer; logic [7:0] w_co, w_ci; logic [3:0] w_k; logic signed [7:0] w_data;
  logic signed [15:0] l1_vth, l2_vth; logic [3:0] l1_leak, l2_leak; logic [15:0] obj_th;
  logic [9:0] cfg_addr; logic [31:0] cfg_data; logic cfg_valid, cfg_ready;
  detection_t det; logic [31:0] windows, l1_spikes, l2_spikes;
  int checks = 0, failures = 0;
  npu #(.SENSOR_W(SW), .SENSOR_H(SH), .T_BINS(T), .BIN_US(BIN), .C1(C1), .C2(C2), .CELL(CELL),
        .IMG_W(IMW), .IMG_H(IMH)) dut (.*);

  int w1 [C1][2][9], w2 [C2][C1][9];
  logic vox [3][T][2][SH][SW];
  int on_n [3], off_n [3];
  dvs_event_t evs [$];
  logic [9:0] got_a [$]; logic [31:0] got_d [$];

  int max_l1 = 0;
  always @(posedge clk) if (rst_n) begin
    if (int'(l1_spikes) > max_l1) max_l1 = int'(l1_spikes);
    if (ev_valid && ev_ready) void'(evs.pop_front());
    ev_valid <= evs.size() > 0;
    ev <= (evs.size() > 0) ? evs[0] : '0;
    if (cfg_valid && cfg_ready) begin got_a.push_back(cfg_addr); got_d.push_back(cfg_data); end
    cfg_ready <= ($urandom % 4) != 0;
  end

  // one strided 3x3 spiking convolution with LIF, on maps of the given size
  function automatic void conv_lif(input int cin, input int cout, input int iw, input int ih,
                                   input logic in_s [T][8][SH][SW], input int wsel,
                                   input int vth, input int leak, output logic out_s [T][8][SH][SW]);
    int ow, oh, u [8][SH][SW];
    ow = (iw - 1) / 2 + 1; oh = (ih - 1) / 2 + 1;
    for (int t = 0; t < T; t++) for (int co = 0; co < cout; co++) for (int oy = 0; oy < oh; oy++) for (int ox = 0; ox < ow; ox++) begin
      int cur, v;
      cur = 0;
      for (int ci = 0; ci < cin; ci++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        int y, x;
        y = 2 * oy + ky - 1; x = 2 * ox + kx - 1;
        if (y >= 0 && y < ih && x >= 0 && x < iw && in_s[t][ci][y][x])
          cur += (wsel == 0) ? w1[co][ci][ky*3+kx] : w2[co][ci][ky*3+kx];
      end
      v = (t == 0) ? 0 : u[co][oy][ox];
      if (leak != 0) v = v - int'($floor(real'(v) / real'(1 << leak)));
      v += cur;
      out_s[t][co][oy][ox] = (v >= vth);
      u[co][oy][ox] = out_s[t][co][oy][ox] ? 0 : v;
    end
  endfunction

  int dg_model = 256;
  int bank_model = 0;
  task automatic expect_window(int w);
    logic a [T][8][SH][SW], b [T][8][SH][SW], c [T][8][SH][SW];
    int cnt [GH][GW], n, x0, y0, x1, y1, nlm, tot;
    logic bright, dark;
    logic [9:0] ea [6]; logic [31:0] ed [6];
    for (int t = 0; t < T; t++) for (int ch = 0; ch < 8; ch++) for (int y = 0; y < SH; y++) for (int x = 0; x < SW; x++)
      a[t][ch][y][x] = (ch < 2) ? vox[w][t][ch][y][x] : 1'b0;
    conv_lif(2, C1, SW, SH, a, 0, int'(l1_vth), int'(l1_leak), b);
    conv_lif(C1, C2, W1, H1, b, 1, int'(l2_vth), int'(l2_leak), c);
    for (int i = 0; i < GH; i++) for (int j = 0; j < GW; j++) cnt[i][j] = 0;
    for (int t = 0; t < T; t++) for (int ch = 0; ch < C2; ch++) for (int y = 0; y < H2; y++) for (int x = 0; x < W2; x++)
      if (c[t][ch][y][x]) cnt[y / CELL][x / CELL]++;
    n = 0; x0 = 255; y0 = 255; x1 = 0; y1 = 0;
    for (int i = 0; i < GH; i++) for (int j = 0; j < GW; j++) if (cnt[i][j] >= int'(obj_th)) begin
      n++; if (j < x0) x0 = j; if (j > x1) x1 = j; if (i < y0) y0 = i; if (i > y1) y1 = i;
    end
    tot = on_n[w] + off_n[w];
    bright = tot >= 64 && on_n[w] > 2 * off_n[w];
    dark   = tot >= 64 && off_n[w] > 2 * on_n[w];
    if (bright) begin bank_model = 1; dg_model = (dg_model - 32 < 128) ? 128 : dg_model - 32; end
    else if (dark) begin bank_model = 0; dg_model = (dg_model + 32 > 1024) ? 1024 : dg_model + 32; end
    nlm = (tot > 20000) ? 1 : 3;
    ea = '{REG_CTRL, REG_DGAIN, REG_NLM, REG_ROI_X, REG_ROI_Y, REG_COMMIT};
    if (n > 0)
      ed = '{32'(bank_model * 2 + 1), 32'(dg_model), 32'(nlm),
             32'((((x1 + 1) * ((IMW + GW - 1) / GW) - 1 > IMW - 1) ? IMW - 1 : (x1 + 1) * ((IMW + GW - 1) / GW) - 1) * 65536 + x0 * ((IMW + GW - 1) / GW)),
             32'((((y1 + 1) * ((IMH + GH - 1) / GH) - 1 > IMH - 1) ? IMH - 1 : (y1 + 1) * ((IMH + GH - 1) / GH) - 1) * 65536 + y0 * ((IMH + GH - 1) / GH)),
             32'(w)};
    else
      ed = '{32'(bank_model * 2 + 1), 32'(dg_model), 32'(nlm), 32'((IMW - 1) * 65536), 32'((IMH - 1) * 65536), 32'(w)};
    while (got_a.size() < 6) @(posedge clk);
    $display("window %0d: %0d events, %0d occupied cells (model), det.n_cells %0d", w, tot, n, det.n_cells);
    checks++;
    if (det.found != (n > 0) || det.n_cells != 8'(n)) begin failures++; $display("detection differs"); end
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (got_a[0] != ea[i] || got_d[0] != ed[i]) begin
        failures++; $display("window %0d write %0d: %h=%h want %h=%h", w, i, got_a[0], got_d[0], ea[i], ed[i]);
      end
      void'(got_a.pop_front()); void'(got_d.pop_front());
    end
  endtask

  initial begin
    int t;
    ev_valid = 0; ev = '0; w_we = 0; w_layer = 0; w_co = 0; w_ci = 0; w_k = 0; w_data = 0; cfg_ready = 0;
    l1_vth = 16'sd6; l1_leak = 4'd1; l2_vth = 16'sd8; l2_leak = 4'd1; obj_th = 16'd2;
    for (int w = 0; w < 3; w++) begin
      on_n[w] = 0; off_n[w] = 0;
      for (int b = 0; b < T; b++) for (int p = 0; p < 2; p++) for (int y = 0; y < SH; y++) for (int x = 0; x < SW; x++) vox[w][b][p][y][x] = 0;
    end
    // events: window 0 a bright blob near (10,4) moving right; window 1 scattered OFF events
    t = 0;
    for (int w = 0; w < 2; w++) for (int k = 0; k < 300; k++) begin
      dvs_event_t e;
      t = w * T * BIN + (k * T * BIN) / 300;
      if (w == 0) begin e.x = 9'(8 + k / 60 + $urandom % 4); e.y = 8'(3 + $urandom % 4); e.p = ($urandom % 6) != 0; end
      else begin e.x = 9'($urandom % SW); e.y = 8'($urandom % SH); e.p = ($urandom % 8) == 0; end
      e.t = 32'(t);
      vox[w][(t - w * T * BIN) / BIN][e.p][e.y][e.x] = 1;
      if (e.p) on_n[w]++; else off_n[w]++;
      evs.push_back(e);
    end
    begin dvs_event_t e; e = '0; e.t = 32'(3 * T * BIN + 1); evs.push_back(e); end   // closes windows 1 and 2 (empty)
    repeat (3) @(posedge clk); rst_n = 1;
    // weights: L1 sums a 3x3 neighbourhood of both polarities, L2 a mix
    for (int co = 0; co < C1; co++) for (int ci = 0; ci < 2; ci++) for (int k = 0; k < 9; k++) begin
      w1[co][ci][k] = (co == 0) ? 2 : ((co == 1) ? ((ci == 1) ? 3 : -1) : ((k % 2 == 0) ? 2 : 0));
      @(negedge clk); w_we = 1; w_layer = 0; w_co = 8'(co); w_ci = 8'(ci); w_k = 4'(k); w_data = 8'(w1[co][ci][k]);
    end
    for (int co = 0; co < C2; co++) for (int ci = 0; ci < C1; ci++) for (int k = 0; k < 9; k++) begin
      w2[co][ci][k] = ((co + ci + k) % 3 == 0) ? -1 : 3;
      @(negedge clk); w_we = 1; w_layer = 1; w_co = 8'(co); w_ci = 8'(ci); w_k = 4'(k); w_data = 8'(w2[co][ci][k]);
    end
    @(negedge clk); w_we = 0;
    for (int w = 0; w < 3; w++) expect_window(w);
    checks++;
    if (windows < 3 || max_l1 == 0) begin failures++; $display("windows %0d l1 spikes %0d", windows, max_l1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
