// window_gen: line buffers and a sliding (2K+1) x (2K+1) window over a pixel
// stream, the common front of every spatial ISP stage.
//
// Pixels arrive in raster order on an AXI4-Stream slave (tuser = first pixel
// of a frame, tlast = last pixel of a line). 2K line buffers of W words hold
// the previous rows, so no frame is ever stored. Each accepted pixel shifts
// one new column into the window; the window centre trails the input by K
// rows and K columns. After the last pixel of a frame the generator feeds
// itself K*W+K dummy pixels (s_tready is low meanwhile) to push out the last
// rows, so every frame gives exactly W*H windows. Out-of-frame taps are
// replaced by their mirror image about the centre row/column of the border
// pixel (-1 -> 1, W -> W-2), which keeps the Bayer colour of every tap.
// The output (window, centre coordinates, tlast/tuser) is a register stage
// that holds while m_tready is low.
// The paper states that line buffers cache incoming rows for the 5x5 DPC
// window; the flush, mirroring and handshake details are this design's own.
module window_gen #(
  parameter int W  = 1280,
  parameter int H  = 720,
  parameter int K  = 2,
  parameter int DW = 8
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic [DW-1:0]                          s_tdata,
  input  logic                                   s_tvalid,
  output logic                                   s_tready,
  input  logic                                   s_tlast,
  input  logic                                   s_tuser,
  output logic [2*K:0][2*K:0][DW-1:0]            m_win,   // [row][col], centre at [K][K]
  output logic [15:0]                            m_row,
  output logic [15:0]                            m_col,
  output logic                                   m_tvalid,
  input  logic                                   m_tready,
  output logic                                   m_tlast,
  output logic                                   m_tuser
);
  localparam int N  = 2 * K + 1;
  localparam int NPIX = W * H;
  localparam int NTOT = NPIX + K * W + K;

  logic [DW-1:0] lb [2*K][W];
  logic [N-1:0][N-1:0][DW-1:0] win;
  logic [31:0] ptr;
  logic [15:0] col;        // column of position ptr
  logic [15:0] cr, cc;     // centre coordinates of the window in win
  logic        in_phase;
  logic        adv;
  logic [DW-1:0] din;
  logic [N-1:0][DW-1:0] newcol;

  assign in_phase = (ptr < 32'(NPIX));
  assign s_tready = in_phase && (!m_tvalid || m_tready);
  assign adv      = (in_phase ? s_tvalid : 1'b1) && (!m_tvalid || m_tready);
  assign din      = in_phase ? s_tdata : '0;

  always_comb begin
    newcol[N-1] = din;
    for (int k = 0; k < 2 * K; k++) newcol[N-2-k] = lb[k][col];
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      lb[0][col] <= din;
      for (int k = 1; k < 2 * K; k++) lb[k][col] <= lb[k-1][col];
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N - 1; j++) win[i][j] <= win[i][j+1];
        win[i][N-1] <= newcol[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr      <= '0;
      col      <= '0;
      cr       <= '0;
      cc       <= '0;
      m_tvalid <= 1'b0;
    end else begin
      if (m_tvalid && m_tready) begin
        // advance the centre coordinates once the window was taken
        if (cc == 16'(W - 1)) begin
          cc <= '0;
          cr <= (cr == 16'(H - 1)) ? '0 : cr + 16'd1;
        end else begin
          cc <= cc + 16'd1;
        end
      end
      if (adv) begin
        ptr      <= (ptr == 32'(NTOT - 1)) ? '0 : ptr + 32'd1;
        col      <= (col == 16'(W - 1) || ptr == 32'(NTOT - 1)) ? '0 : col + 16'd1;
        m_tvalid <= (ptr >= 32'(K * W + K));
      end else if (m_tready) begin
        m_tvalid <= 1'b0;
      end
    end
  end

  // Mirror out-of-frame taps back into the frame.
  int ri [N];
  int cj [N];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      int y, x;
      y = int'(cr) + i - K;
      if (y < 0) y = -y;
      else if (y > H - 1) y = 2 * (H - 1) - y;
      ri[i] = y - int'(cr) + K;
      x = int'(cc) + i - K;
      if (x < 0) x = -x;
      else if (x > W - 1) x = 2 * (W - 1) - x;
      cj[i] = x - int'(cc) + K;
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        m_win[i][j] = win[ri[i]][cj[j]];
  end

  assign m_row   = cr;
  assign m_col   = cc;
  assign m_tlast = (cc == 16'(W - 1));
  assign m_tuser = (cr == 16'd0) && (cc == 16'd0);

  // A frame must start exactly where the generator expects it.
  a_sof_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (s_tvalid && s_tready && s_tuser) |-> (ptr == 32'd0));
  a_eol_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (s_tvalid && s_tready) |-> (s_tlast == (col == 16'(W - 1))));
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_row) && $stable(m_col)));
endmodule
