// isp: the Cognitive Image Signal Processor, a streaming pipeline from raw
// Bayer pixels to sharpened YCbCr.
//
//   s_* (Bayer) -> dpc -> wb_gain -> demosaic_mhc -> nlm_denoise (RGB)
//               -> gamma_lut -> csc_ycbcr -> luma_sharpen -> m_* (YCbCr)
//
// awb_stats watches the stream between dpc and wb_gain and computes gray-
// world gains once per frame. isp_sync_ctrl owns the control interface:
// parameter updates from the NPU are held in shadow registers and take
// effect at the next frame start, and every output frame carries the tag of
// the DVS window it was configured from (frame_tag) and an ROI flag per pixel
// (m_roi). Every stage is an AXI4-Stream slave/master pair (tuser = start of
// frame, tlast = end of line), so back-pressure at m_tready stalls the whole
// pipeline without loss. No frame is stored: the spatial stages hold only
// line buffers (4 lines each for DPC, demosaic and NLM, 2 for sharpening).
// The stage parameters used by the three window stages are sampled when the
// stage emits the first pixel of a frame, so a frame is processed with one
// parameter set end to end.
// Timing: one pixel per clock in steady state; after each frame the window
// stages spend K*W+K clocks pushing out their last rows, during which the
// input is held off (s_tready low), i.e. the sensor needs that much
// blanking. The stage order and the AXI4-Stream coupling are the paper's;
// everything else is documented in the stage modules.
module isp #(
  parameter int W = 1280,
  parameter int H = 720
) (
  input  logic               clk,
  input  logic               rst_n,
  // control interface
  input  logic [9:0]         cfg_addr,
  input  logic [31:0]        cfg_data,
  input  logic               cfg_valid,
  output logic               cfg_ready,
  // raw Bayer input
  input  logic [7:0]         s_tdata,
  input  logic               s_tvalid,
  output logic               s_tready,
  input  logic               s_tlast,
  input  logic               s_tuser,
  // YCbCr output
  output isp_pkg::ycc_t      m_tdata,
  output logic               m_tvalid,
  input  logic               m_tready,
  output logic               m_tlast,
  output logic               m_tuser,
  output logic               m_roi,
  output logic [15:0]        frame_tag,
  // to the camera
  output logic [15:0]        exposure,
  // status
  output logic [31:0]        commits,
  output logic [31:0]        defects
);
  import isp_pkg::*;
  isp_cfg_t cfg;
  logic [11:0] wbr, wbg, wbb, ag_r, ag_g, ag_b;
  logic awb_valid, awb_busy;
  logic lut_we, lut_bank;
  logic [7:0] lut_addr, lut_data;

  // stage links
  logic [7:0] d_data;  logic d_valid, d_ready, d_last, d_user, d_defect;
  logic [7:0] w_data;  logic w_valid, w_ready, w_last, w_user;
  rgb_t       m1_data; logic m1_valid, m1_ready, m1_last, m1_user;
  rgb_t       n_data;  logic n_valid, n_ready, n_last, n_user;
  rgb_t       g_data;  logic g_valid, g_ready, g_last, g_user;
  ycc_t       c_data;  logic c_valid, c_ready, c_last, c_user;

  // per-frame parameters of the window stages
  logic [7:0] th_q, th_use;
  logic [3:0] nlm_q, nlm_use, shp_q, shp_use;
  assign th_use  = d_user  ? cfg.dpc_th       : th_q;
  assign nlm_use = n_user  ? cfg.nlm_strength : nlm_q;
  assign shp_use = m_tuser ? cfg.sharpen      : shp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      th_q <= CFG_RESET.dpc_th; nlm_q <= CFG_RESET.nlm_strength; shp_q <= CFG_RESET.sharpen;
      defects <= '0;
    end else begin
      if (d_valid && d_ready) begin
        th_q <= th_use;
        if (d_defect) defects <= defects + 32'd1;
      end
      if (n_valid && n_ready) nlm_q <= nlm_use;
      if (m_tvalid && m_tready) shp_q <= shp_use;
    end
  end

  isp_sync_ctrl u_sync (
    .clk, .rst_n, .cfg_addr, .cfg_data, .cfg_valid, .cfg_ready,
    .sof(s_tvalid && s_tready && s_tuser),
    .awb_gain_r(ag_r), .awb_gain_g(ag_g), .awb_gain_b(ag_b), .awb_valid,
    .cfg, .wb_gain_r(wbr), .wb_gain_g(wbg), .wb_gain_b(wbb), .frame_tag, .commits,
    .lut_we, .lut_bank, .lut_addr, .lut_data,
    .out_beat(m_tvalid && m_tready), .out_tlast(m_tlast), .out_tuser(m_tuser), .roi(m_roi));

  dpc #(.W(W), .H(H)) u_dpc (
    .clk, .rst_n, .th(th_use),
    .s_tdata, .s_tvalid, .s_tready, .s_tlast, .s_tuser,
    .m_tdata(d_data), .m_tvalid(d_valid), .m_tready(d_ready), .m_tlast(d_last), .m_tuser(d_user),
    .m_defect(d_defect));

  awb_stats #(.W(W), .H(H)) u_awb (
    .clk, .rst_n, .lo(8'd16), .hi(8'd240),
    .tdata(d_data), .tvalid(d_valid), .tready(d_ready), .tlast(d_last), .tuser(d_user),
    .gain_r(ag_r), .gain_g(ag_g), .gain_b(ag_b), .gains_valid(awb_valid), .busy(awb_busy));

  wb_gain u_wb (
    .clk, .rst_n, .gain_r(wbr), .gain_g(wbg), .gain_b(wbb), .dgain(cfg.dgain),
    .s_tdata(d_data), .s_tvalid(d_valid), .s_tready(d_ready), .s_tlast(d_last), .s_tuser(d_user),
    .m_tdata(w_data), .m_tvalid(w_valid), .m_tready(w_ready), .m_tlast(w_last), .m_tuser(w_user));

  demosaic_mhc #(.W(W), .H(H)) u_dem (
    .clk, .rst_n,
    .s_tdata(w_data), .s_tvalid(w_valid), .s_tready(w_ready), .s_tlast(w_last), .s_tuser(w_user),
    .m_tdata(m1_data), .m_tvalid(m1_valid), .m_tready(m1_ready), .m_tlast(m1_last), .m_tuser(m1_user));

  nlm_denoise #(.W(W), .H(H)) u_nlm (
    .clk, .rst_n, .strength(nlm_use),
    .s_tdata(m1_data), .s_tvalid(m1_valid), .s_tready(m1_ready), .s_tlast(m1_last), .s_tuser(m1_user),
    .m_tdata(n_data), .m_tvalid(n_valid), .m_tready(n_ready), .m_tlast(n_last), .m_tuser(n_user));

  gamma_lut #(.BANKS(2)) u_gam (
    .clk, .rst_n, .bank_sel(cfg.gamma_bank),
    .lut_we, .lut_bank, .lut_addr, .lut_data,
    .s_tdata(n_data), .s_tvalid(n_valid), .s_tready(n_ready), .s_tlast(n_last), .s_tuser(n_user),
    .m_tdata(g_data), .m_tvalid(g_valid), .m_tready(g_ready), .m_tlast(g_last), .m_tuser(g_user));

  csc_ycbcr u_csc (
    .clk, .rst_n, .coef(cfg.csc),
    .s_tdata(g_data), .s_tvalid(g_valid), .s_tready(g_ready), .s_tlast(g_last), .s_tuser(g_user),
    .m_tdata(c_data), .m_tvalid(c_valid), .m_tready(c_ready), .m_tlast(c_last), .m_tuser(c_user));

  luma_sharpen #(.W(W), .H(H)) u_shp (
    .clk, .rst_n, .amount(shp_use),
    .s_tdata(c_data), .s_tvalid(c_valid), .s_tready(c_ready), .s_tlast(c_last), .s_tuser(c_user),
    .m_tdata, .m_tvalid, .m_tready, .m_tlast, .m_tuser);

  assign exposure = cfg.exposure;

  logic unused;
  assign unused = awb_busy;
endmodule
