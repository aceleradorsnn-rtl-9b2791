// nlm_denoise: non-local means denoising of the RGB stream.
//
// For every pixel the 3x3 patch around it (the reference) is compared with
// the 3x3 patches around each of the 9 pixels of a 3x3 search window. The
// distance of two patches is the sum of squared differences of their
// intensity, I = (R + 2G + B) / 4. Writing s = (distance / 8) >> (strength-1),
// a candidate's weight is 256 >> s (0 once s > 8), an exponential fall-off
// in base 2, so similar patches count much more than dissimilar ones. Each
// output channel is the weighted mean of the 9 candidates,
// (sum(w * p) + sum(w)/2) / sum(w). The reference itself always has weight
// 256, so the divisor is never zero. strength = 0 bypasses the filter; a
// larger strength smooths more. The strength comes from the control
// registers (written by the NPU) and may change between frames.
// Timing: a window_gen (K = 2, 24-bit pixels) in front; the weights and
// divisions are combinational after the window register; one pixel per
// clock.
// Patch-distance weighting inside a search window is the paper's NLM; the
// window sizes, the intensity used for the distance and the base-2
// weight curve are this design's choices for a small, fully pipelined stage.
module nlm_denoise #(
  parameter int W = 1280,
  parameter int H = 720
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        strength,
  input  isp_pkg::rgb_t     s_tdata,
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
  logic [4:0][4:0][23:0] win;
  logic [15:0] row, col;

  window_gen #(.W(W), .H(H), .K(2), .DW(24)) u_win (
    .clk, .rst_n, .s_tdata, .s_tvalid, .s_tready, .s_tlast, .s_tuser,
    .m_win(win), .m_row(row), .m_col(col),
    .m_tvalid, .m_tready, .m_tlast, .m_tuser);

  always_comb begin
    int inten [5][5];
    int pdist, s, wgt, wsum, acc_r, acc_g, acc_b;
    rgb_t p;
    for (int i = 0; i < 5; i++)
      for (int j = 0; j < 5; j++) begin
        p = rgb_t'(win[i][j]);
        inten[i][j] = (int'(p.r) + 2 * int'(p.g) + int'(p.b)) >> 2;
      end
    wsum = 0; acc_r = 0; acc_g = 0; acc_b = 0;
    for (int oy = -1; oy <= 1; oy++)
      for (int ox = -1; ox <= 1; ox++) begin
        pdist = 0;
        for (int qy = -1; qy <= 1; qy++)
          for (int qx = -1; qx <= 1; qx++) begin
            int dd;
            // reference patch centred at (2,2), candidate at (2+oy,2+ox);
            // both stay inside the 5x5 window
            dd = inten[2+qy][2+qx] - inten[2+oy+qy][2+ox+qx];
            pdist += dd * dd;
          end
        s = (strength == 4'd0) ? 0 : ((pdist >> 3) >> (int'(strength) - 1));
        wgt = (s > 8) ? 0 : (256 >> s);
        p = rgb_t'(win[2+oy][2+ox]);
        wsum  += wgt;
        acc_r += wgt * int'(p.r);
        acc_g += wgt * int'(p.g);
        acc_b += wgt * int'(p.b);
      end
    if (strength == 4'd0) begin
      m_tdata = rgb_t'(win[2][2]);
    end else begin
      m_tdata.r = 8'((acc_r + wsum / 2) / wsum);
      m_tdata.g = 8'((acc_g + wsum / 2) / wsum);
      m_tdata.b = 8'((acc_b + wsum / 2) / wsum);
    end
  end

  logic unused;
  assign unused = ^{row, col};
endmodule
