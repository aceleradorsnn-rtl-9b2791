// csc_ycbcr: configurable fixed-point RGB -> YCbCr colour-space conversion.
//
// out_k = clip(((c[3k] R + c[3k+1] G + c[3k+2] B + 128) >>> 8) + off_k),
// with signed Q2.8 coefficients c[0..8] taken from the control registers
// (reset value: BT.601 full range) and offsets 0 for Y and 128 for Cb, Cr.
// Coefficients are sampled at the first pixel of each frame.
// Timing: one register stage, one pixel per clock.
// A configurable fixed-point RGB-to-YCbCr module is the paper's; the
// coefficient format and reset matrix are this design's.
module csc_ycbcr (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [isp_pkg::NCSC-1:0][9:0]   coef,
  input  isp_pkg::rgb_t                   s_tdata,
  input  logic                            s_tvalid,
  output logic                            s_tready,
  input  logic                            s_tlast,
  input  logic                            s_tuser,
  output isp_pkg::ycc_t                   m_tdata,
  output logic                            m_tvalid,
  input  logic                            m_tready,
  output logic                            m_tlast,
  output logic                            m_tuser
);
  import isp_pkg::*;
  logic [NCSC-1:0][9:0] cf, cf_use;
  ycc_t res;

  assign s_tready = !m_tvalid || m_tready;
  assign cf_use   = s_tuser ? coef : cf;

  always_comb begin
    int acc [3];
    for (int k = 0; k < 3; k++)
      acc[k] = ((int'($signed(cf_use[3*k])) * int'(s_tdata.r) +
                 int'($signed(cf_use[3*k+1])) * int'(s_tdata.g) +
                 int'($signed(cf_use[3*k+2])) * int'(s_tdata.b) + 128) >>> 8);
    res.y  = clip8(acc[0]);
    res.cb = clip8(acc[1] + 128);
    res.cr = clip8(acc[2] + 128);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_tvalid <= 1'b0; m_tdata <= '0; m_tlast <= 1'b0; m_tuser <= 1'b0;
      cf <= CSC_BT601;
    end else if (s_tready) begin
      m_tvalid <= s_tvalid;
      if (s_tvalid) begin
        m_tdata <= res; m_tlast <= s_tlast; m_tuser <= s_tuser; cf <= cf_use;
      end
    end
  end
endmodule
