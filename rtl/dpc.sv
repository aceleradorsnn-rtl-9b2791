// dpc: dynamic defective pixel correction on the raw Bayer stream.
//
// A window_gen supplies the 5x5 neighbourhood of each pixel. The eight
// nearest pixels of the same colour sit two steps away (N, S, E, W and the
// four diagonals). The centre is declared defective when it differs from all
// eight in the same direction (all brighter: hot pixel, all darker: dead
// pixel) by more than the threshold th. A defective pixel is replaced by the
// mean of the opposite pair of neighbours (horizontal, vertical or one of
// the diagonals) with the smallest gradient |a - b|, so the fill follows
// edges. Other pixels pass unchanged. m_defect marks corrected pixels.
// Timing: the output trails the input by two lines and two pixels; one
// pixel per clock when neither side stalls.
// The 5x5 window, the line buffers and detection by deviation across several
// directional gradients follow the paper; the exact test (all eight
// neighbours beyond a threshold) and the directional-mean replacement are
// this design's reading of the cited algorithm.
module dpc #(
  parameter int W = 1280,
  parameter int H = 720
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] th,
  input  logic [7:0] s_tdata,
  input  logic       s_tvalid,
  output logic       s_tready,
  input  logic       s_tlast,
  input  logic       s_tuser,
  output logic [7:0] m_tdata,
  output logic       m_tvalid,
  input  logic       m_tready,
  output logic       m_tlast,
  output logic       m_tuser,
  output logic       m_defect
);
  logic [4:0][4:0][7:0] win;
  logic [15:0] row, col;

  window_gen #(.W(W), .H(H), .K(2), .DW(8)) u_win (
    .clk, .rst_n, .s_tdata, .s_tvalid, .s_tready, .s_tlast, .s_tuser,
    .m_win(win), .m_row(row), .m_col(col),
    .m_tvalid, .m_tready, .m_tlast, .m_tuser);

  // opposite pairs: horizontal, vertical, main diagonal, anti-diagonal
  int pa [4], pb [4];
  always_comb begin
    int c, d, g, best, bestg;
    logic hot, dead;
    c = int'(win[2][2]);
    pa[0] = int'(win[2][0]); pb[0] = int'(win[2][4]);
    pa[1] = int'(win[0][2]); pb[1] = int'(win[4][2]);
    pa[2] = int'(win[0][0]); pb[2] = int'(win[4][4]);
    pa[3] = int'(win[0][4]); pb[3] = int'(win[4][0]);
    hot = 1'b1; dead = 1'b1;
    for (int k = 0; k < 4; k++) begin
      d = c - pa[k];
      if (d <= int'(th)) hot = 1'b0;
      if (-d <= int'(th)) dead = 1'b0;
      d = c - pb[k];
      if (d <= int'(th)) hot = 1'b0;
      if (-d <= int'(th)) dead = 1'b0;
    end
    best = 0; bestg = 1 << 30;
    for (int k = 0; k < 4; k++) begin
      g = (pa[k] > pb[k]) ? pa[k] - pb[k] : pb[k] - pa[k];
      if (g < bestg) begin bestg = g; best = k; end
    end
    m_defect = hot || dead;
    m_tdata  = m_defect ? 8'((pa[best] + pb[best]) >> 1) : win[2][2];
  end

  logic unused;
  assign unused = ^{row, col};
endmodule
