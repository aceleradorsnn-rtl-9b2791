// demosaic_mhc: Malvar-He-Cutler demosaicing, RGGB Bayer in, RGB out.
//
// Every missing colour at a pixel is a fixed 5x5 linear filter of the
// mosaic: the bilinear estimate plus a correction from the Laplacian of the
// channel that is present, which keeps edges sharp. With the filters scaled
// by 16 (the published ones are /8 with some half coefficients), and C the
// centre, N1/S1/W1/E1 its direct neighbours, N2/S2/W2/E2 the pixels two
// steps away and D the four diagonal neighbours:
//   G at R or B            : 8C + 4(N1+S1+W1+E1) - 2(N2+S2+W2+E2)
//   R/B at G, same row     : 10C + 8(W1+E1) - 2(W2+E2) - 2D + (N2+S2)
//   R/B at G, same column  : 10C + 8(N1+S1) - 2(N2+S2) - 2D + (W2+E2)
//   B at R or R at B       : 12C + 4D - 3(N2+S2+W2+E2)
// Each result is rounded ((x + 8) >> 4) and clipped to 0..255.
// Timing: a window_gen (K = 2) in front; two lines and two pixels of
// latency; one pixel per clock.
// The Malvar-He-Cutler method is the paper's; the RGGB order is this
// design's choice.
module demosaic_mhc #(
  parameter int W = 1280,
  parameter int H = 720
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        s_tdata,
  input  logic              s_tvalid,
  output logic              s_tready,
  input  logic              s_tlast,
  input  logic              s_tuser,
  output isp_pkg::rgb_t     m_tdata,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic              m_tlast,
  output logic              m_tuser
);
  import isp_pkg::*;
  logic [4:0][4:0][7:0] win;
  logic [15:0] row, col;

  window_gen #(.W(W), .H(H), .K(2), .DW(8)) u_win (
    .clk, .rst_n, .s_tdata, .s_tvalid, .s_tready, .s_tlast, .s_tuser,
    .m_win(win), .m_row(row), .m_col(col),
    .m_tvalid, .m_tready, .m_tlast, .m_tuser);

  always_comb begin
    int c, n1, s1, w1, e1, n2, s2, w2, e2, dg;
    int g_at_rb, rb_row, rb_col, rb_diag;
    c  = int'(win[2][2]);
    n1 = int'(win[1][2]); s1 = int'(win[3][2]); w1 = int'(win[2][1]); e1 = int'(win[2][3]);
    n2 = int'(win[0][2]); s2 = int'(win[4][2]); w2 = int'(win[2][0]); e2 = int'(win[2][4]);
    dg = int'(win[1][1]) + int'(win[1][3]) + int'(win[3][1]) + int'(win[3][3]);
    g_at_rb = 8 * c + 4 * (n1 + s1 + w1 + e1) - 2 * (n2 + s2 + w2 + e2);
    rb_row  = 10 * c + 8 * (w1 + e1) - 2 * (w2 + e2) - 2 * dg + (n2 + s2);
    rb_col  = 10 * c + 8 * (n1 + s1) - 2 * (n2 + s2) - 2 * dg + (w2 + e2);
    rb_diag = 12 * c + 4 * dg - 3 * (n2 + s2 + w2 + e2);
    unique case (cfa_at(row[0], col[0]))
      CFA_R: begin
        m_tdata.r = win[2][2];
        m_tdata.g = clip8((g_at_rb + 8) >>> 4);
        m_tdata.b = clip8((rb_diag + 8) >>> 4);
      end
      CFA_GR: begin  // red neighbours left/right, blue above/below
        m_tdata.r = clip8((rb_row + 8) >>> 4);
        m_tdata.g = win[2][2];
        m_tdata.b = clip8((rb_col + 8) >>> 4);
      end
      CFA_GB: begin  // blue neighbours left/right, red above/below
        m_tdata.r = clip8((rb_col + 8) >>> 4);
        m_tdata.g = win[2][2];
        m_tdata.b = clip8((rb_row + 8) >>> 4);
      end
      default: begin // CFA_B
        m_tdata.r = clip8((rb_diag + 8) >>> 4);
        m_tdata.g = clip8((g_at_rb + 8) >>> 4);
        m_tdata.b = win[2][2];
      end
    endcase
  end
endmodule
