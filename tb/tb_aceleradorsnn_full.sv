// tb_aceleradorsnn_full: end-to-end run of the whole system at its default size (304 x 240 DVS sensor, 5 bins of 10 ms, 8 and 16 SNN channels, 1280 x 720 RGB frames).
//
// The bench loads SNN weights, lets a host load a gamma curve through the
// shared control port, then plays DVS events (a bright blob moving across
// the sensor, followed by a darkening scene) while RGB frames stream
// through the ISP continuously with random gaps on both sides. It checks
// that every output frame is complete and correctly framed, that each NPU
// decision reaches the ISP intact (committed gains, strengths, gamma bank
// and ROI equal what the controller chose) and applies from a frame start
// with the window's tag, and that the ROI flag marks exactly the chosen
// box. Each mechanism must occur at least once: windows processed, SNN
// spikes, detections, ISP commits, gamma bank switch, host/NPU contention
// on the control port, defect corrections, AWB results, ISP input stalls
// and DVS event back-pressure.
module tb_aceleradorsnn_full;
  import npu_pkg::*;
  import isp_pkg::*;
  localparam int SW = 304, SH = 240, T = 5, BIN = 10000, C1 = 8, C2 = 16, CELL = 4;
  localparam int IMW = 1280, IMH = 720, NWIN = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  dvs_event_t ev; logic ev_valid, ev_ready;
  logic w_we, w_layer; logic [7:0] w_co, w_ci; logic [3:0] w_k; logic signed [7:0] w_data;
  logic signed [15:0] l1_vth, l2_vth; logic [3:0] l1_leak, l2_leak; logic [15:0] obj_th;
  logic [9:0] host_cfg_addr; logic [31:0] host_cfg_data; logic host_cfg_valid, host_cfg_ready;
  logic [7:0] s_tdata; logic s_tvalid, s_tready, s_tlast, s_tuser;
  ycc_t m_tdata; logic m_tvalid, m_tready, m_tlast, m_tuser, m_roi;
  logic [15:0] frame_tag, exposure;
  detection_t det; logic [31:0] windows, commits;
  int checks = 0, failures = 0;
  aceleradorsnn_top  dut (.*);

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- mechanism counters ----
  int n_detect = 0, n_contend = 0, n_awb = 0, n_stall = 0, n_evstall = 0, n_bank = 0, n_roi = 0;
  int max_l1 = 0, max_l2 = 0;
  logic last_bank = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_npu.h_done && det.found) n_detect++;
    if (host_cfg_valid && dut.u_npu.cfg_valid) n_contend++;
    if (dut.u_isp.awb_valid) n_awb++;
    if (s_tvalid && !s_tready) n_stall++;
    if (ev_valid && !ev_ready) n_evstall++;
    if (dut.u_isp.cfg.gamma_bank != last_bank) n_bank++;
    last_bank <= dut.u_isp.cfg.gamma_bank;
    if (int'(dut.u_npu.l1_spikes) > max_l1) max_l1 = int'(dut.u_npu.l1_spikes);
    if (int'(dut.u_npu.l2_spikes) > max_l2) max_l2 = int'(dut.u_npu.l2_spikes);
  end

  // ---- DVS events ----
  dvs_event_t evs [$];
  always @(posedge clk) if (rst_n) begin
    if (ev_valid && ev_ready) void'(evs.pop_front());
    ev_valid <= evs.size() > 0;
    ev <= (evs.size() > 0) ? evs[0] : '0;
  end

  // ---- RGB camera: frames until told to stop ----
  logic cam_on = 0;
  int in_r = 0, in_c = 0, in_f = 0;
  always @(posedge clk) if (rst_n && cam_on) begin
    if (s_tvalid && s_tready) begin
      if (in_c == IMW - 1) begin in_c = 0; if (in_r == IMH - 1) begin in_r = 0; in_f++; end else in_r++; end
      else in_c++;
    end
    if (!s_tvalid || s_tready) begin
      s_tvalid <= ($urandom % 6) != 0;
      s_tdata  <= ((in_r * 7 + in_c * 3) % 97 == 5) ? 8'd255 : 8'(40 + ((in_r + in_c) * 5 + (in_c % 2) * 30 + $urandom % 8) % 180);
      s_tlast  <= (in_c == IMW - 1);
      s_tuser  <= (in_r == 0 && in_c == 0);
    end
  end
  always @(posedge clk) m_tready <= ($urandom % 5) != 0;

  // ---- output frame checker ----
  int out_n = 0, out_f = 0, roi_n = 0, roi_exp = 0, bad_frame = 0;
  logic [11:0] bx0, bx1, by0, by1;
  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    int r, c;
    r = out_n / IMW; c = out_n % IMW;
    if (out_n == 0) begin
      bx0 = dut.u_isp.cfg.roi_x0; bx1 = dut.u_isp.cfg.roi_x1; by0 = dut.u_isp.cfg.roi_y0; by1 = dut.u_isp.cfg.roi_y1;
      roi_n = 0;
      roi_exp = ((int'(bx1) > IMW - 1 ? IMW - 1 : int'(bx1)) - int'(bx0) + 1) * ((int'(by1) > IMH - 1 ? IMH - 1 : int'(by1)) - int'(by0) + 1);
    end
    if (m_tuser != (out_n == 0) || m_tlast != (c == IMW - 1)) bad_frame++;
    if (m_roi) begin roi_n++; n_roi++; end
    if (m_roi != (c >= int'(bx0) && c <= int'(bx1) && r >= int'(by0) && r <= int'(by1))) bad_frame++;
    out_n++;
    if (out_n == IMW * IMH) begin
      out_n = 0; out_f++;
      checks += 2;
      if (bad_frame != 0) begin failures++; $display("frame %0d: %0d framing/ROI errors", out_f, bad_frame); end
      if (roi_n != roi_exp) begin failures++; $display("frame %0d: %0d ROI pixels, want %0d", out_f, roi_n, roi_exp); end
      bad_frame = 0;
    end
  end

  // ---- every NPU decision must reach the ISP at a frame start ----
  int decisions = 0, superseded = 0;
  always @(posedge clk) if (rst_n && dut.u_npu.u_cc.cfg_valid && dut.u_npu.u_cc.cfg_ready && dut.u_npu.u_cc.idx == 3'd5) begin
    automatic logic [11:0] dg, x0, x1, y0, y1; automatic logic bk; automatic logic [3:0] nl;
    automatic logic [15:0] tg; automatic int seq;
    dg = dut.u_npu.u_cc.dgain; bk = dut.u_npu.u_cc.bank; nl = dut.u_npu.u_cc.nlm; tg = dut.u_npu.u_cc.tag;
    x0 = dut.u_npu.u_cc.rx0; x1 = dut.u_npu.u_cc.rx1; y0 = dut.u_npu.u_cc.ry0; y1 = dut.u_npu.u_cc.ry1;
    decisions++; seq = decisions;
    fork begin
      // wait for the frame start that commits it
      @(posedge clk);
      while (!(s_tvalid && s_tready && s_tuser)) @(posedge clk);
      @(posedge clk);
      if (seq != decisions) superseded++;  // a newer decision replaced it before this frame
      else begin
      chk(dut.u_isp.cfg.dgain == dg && dut.u_isp.cfg.gamma_bank == bk && dut.u_isp.cfg.nlm_strength == nl &&
          dut.u_isp.cfg.roi_x0 == x0 && dut.u_isp.cfg.roi_x1 == x1 && dut.u_isp.cfg.roi_y0 == y0 &&
          dut.u_isp.cfg.roi_y1 == y1 && frame_tag == tg, $sformatf("decision for window %0d committed", tg));
      if (!(dut.u_isp.cfg.dgain == dg && frame_tag == tg && dut.u_isp.cfg.roi_x0 == x0 && dut.u_isp.cfg.roi_y0 == y0))
        $display("  ISP has dgain %0d tag %0d roi %0d,%0d; decision roi %0d,%0d", dut.u_isp.cfg.dgain, frame_tag,
                 dut.u_isp.cfg.roi_x0, dut.u_isp.cfg.roi_y0, x0, y0);
      $display("window %0d decision (dgain %0d, bank %0d, nlm %0d) committed at frame %0d, commits %0d", tg, dg, bk, nl, in_f, commits);
      end
    end join_none
  end

  initial begin
    int t;
    ev_valid = 0; ev = '0; w_we = 0; w_layer = 0; w_co = 0; w_ci = 0; w_k = 0; w_data = 0;
    host_cfg_addr = 0; host_cfg_data = 0; host_cfg_valid = 0; s_tvalid = 0; s_tdata = 0; s_tlast = 0; s_tuser = 0;
    l1_vth = 16'sd6; l1_leak = 4'd1; l2_vth = 16'sd8; l2_leak = 4'd1; obj_th = 16'd2;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int co = 0; co < C1; co++) for (int ci = 0; ci < 2; ci++) for (int k = 0; k < 9; k++) begin
      @(negedge clk); w_we = 1; w_layer = 0; w_co = 8'(co); w_ci = 8'(ci); w_k = 4'(k);
      w_data = (co == 0) ? 8'sd2 : ((ci == 1) ? 8'sd3 : -8'sd1);
    end
    for (int co = 0; co < C2; co++) for (int ci = 0; ci < C1; ci++) for (int k = 0; k < 9; k++) begin
      @(negedge clk); w_we = 1; w_layer = 1; w_co = 8'(co); w_ci = 8'(ci); w_k = 4'(k);
      w_data = ((co + ci + k) % 3 == 0) ? -8'sd1 : 8'sd3;
    end
    @(negedge clk); w_we = 0;
    cam_on = 1;
    // DVS: window 0 bright blob moving right, window 1 darkening noise, window 2 blob again
    for (int w = 0; w < NWIN; w++) for (int k = 0; k < 6000; k++) begin
      dvs_event_t e;
      e.t = 32'(w * T * BIN + (k * T * BIN) / 6000);
      if (w != 1) begin
        e.x = 9'((SW / 2) + (k * (SW / 4)) / 6000 + $urandom % 4); e.y = 8'(SH / 3 + $urandom % 4);
        e.p = ($urandom % 6) != 0;
      end else begin
        e.x = 9'($urandom % SW); e.y = 8'($urandom % SH); e.p = ($urandom % 8) == 0;
      end
      evs.push_back(e);
    end
    begin dvs_event_t e; e = '0; e.t = 32'(NWIN * T * BIN + 1); evs.push_back(e); end
    // host loads an inverted curve into gamma bank 1 while the NPU sends its
    // second decision
    while (decisions < 1) @(posedge clk);
    while (!dut.u_npu.u_cc.cfg_valid) @(posedge clk);
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); host_cfg_addr = 10'h300 | 10'(i); host_cfg_data = 32'(255 - i); host_cfg_valid = 1;
    end
    @(negedge clk); host_cfg_valid = 0;
    chk(dut.u_isp.u_gam.lut[1][10] == 8'd245, "host gamma write");
    while (windows < NWIN || out_f < in_f + 0 || in_f < 4) @(posedge clk);
    while (dut.u_isp.u_sync.pending) @(posedge clk);
    cam_on = 0;
    @(negedge clk); s_tvalid = 0;
    while (out_n != 0 || out_f < in_f) @(posedge clk);
    repeat (5) @(posedge clk);
    $display("windows %0d, frames %0d, detections %0d, L1/L2 spikes %0d/%0d, commits %0d, bank switches %0d",
             windows, out_f, n_detect, max_l1, max_l2, commits, n_bank);
    $display("ROI pixels %0d, contention %0d, defects %0d, AWB results %0d, ISP stalls %0d, event stalls %0d",
             n_roi, n_contend, dut.u_isp.defects, n_awb, n_stall, n_evstall);
    chk(windows == NWIN, "all windows processed");
    chk(decisions == NWIN, "one decision per window");
    $display("decisions %0d, superseded before a frame start %0d", decisions, superseded);
    chk(max_l1 > 0 && max_l2 > 0, "SNN spikes");
    chk(n_detect > 0, "object detected");
    chk(commits > 0, "ISP commits");
    chk(n_bank > 0, "gamma bank switch");
    chk(n_contend > 0, "host/NPU contention");
    chk(dut.u_isp.defects > 0, "defect correction");
    chk(n_awb > 0, "AWB result");
    chk(n_stall > 0, "ISP input stall");
    chk(n_evstall > 0, "event back-pressure");
    chk(n_roi > 0, "ROI flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
