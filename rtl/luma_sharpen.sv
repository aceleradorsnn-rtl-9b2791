// luma_sharpen: sharpening of the luminance channel only.
//
// A window_gen (K = 1) gives the 3x3 neighbourhood of each YCbCr pixel.
// With L = 8 Y - (sum of the 8 neighbouring Y) (a Laplacian, i.e. the pixel
// minus a local mean, scaled), the output is
//   Y' = clip(Y + ((amount * L) >>> 6)),  Cb, Cr unchanged,
// so amount = 0 passes the image through and each step adds 1/64 of the
// high-pass. amount comes from the control registers.
// Timing: one line and one pixel of latency, one pixel per clock.
// Sharpening luminance independently after the YCbCr conversion is the
// paper's; the Laplacian kernel and the scaling are this design's.
module luma_sharpen #(
  parameter int W = 1280,
  parameter int H = 720
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        amount,
  input  isp_pkg::ycc_t     s_tdata,
  input  logic              s_tvalid,
  output logic              s_tready,
  input  logic              s_tlast,
  input  logic              s_tuser,
  output isp_pkg::ycc_t     m_tdata,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic              m_tlast,
  output logic              m_tuser
);
  import isp_pkg::*;
  logic [2:0][2:0][23:0] win;
  logic [15:0] row, col;

  window_gen #(.W(W), .H(H), .K(1), .DW(24)) u_win (
    .clk, .rst_n, .s_tdata, .s_tvalid, .s_tready, .s_tlast, .s_tuser,
    .m_win(win), .m_row(row), .m_col(col),
    .m_tvalid, .m_tready, .m_tlast, .m_tuser);

  always_comb begin
    ycc_t c, p;
    int nsum, lap;
    c = ycc_t'(win[1][1]);
    nsum = 0;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        if (i != 1 || j != 1) begin
          p = ycc_t'(win[i][j]);
          nsum += int'(p.y);
        end
    lap = 8 * int'(c.y) - nsum;
    m_tdata.y  = clip8(int'(c.y) + ((int'(amount) * lap) >>> 6));
    m_tdata.cb = c.cb;
    m_tdata.cr = c.cr;
  end

  logic unused;
  assign unused = ^{row, col};
endmodule
