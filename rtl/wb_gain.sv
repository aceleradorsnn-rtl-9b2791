// wb_gain: white balance on the raw Bayer stream.
//
// Each pixel is multiplied by the gain of its Bayer colour (R, G or B, all
// unsigned Q4.8) and by a global digital gain (Q4.8), rounded and clipped to
// 8 bits: out = clip((pix * gain_c * dgain + 2^15) >> 16). The gains come
// from the AWB statistics or from the NPU through the ISP control registers
// and are sampled at the first pixel of each frame, so a frame never mixes
// two gain sets. Row and column are tracked from tuser/tlast to find the
// Bayer colour (RGGB).
// Timing: one register stage, one pixel per clock, back-pressure passes
// through (s_tready = !m_tvalid || m_tready).
// Applying per-channel corrective gains follows the paper; the global gain,
// the number formats and the frame-boundary sampling are this design's.
module wb_gain (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [11:0] gain_r,
  input  logic [11:0] gain_g,
  input  logic [11:0] gain_b,
  input  logic [11:0] dgain,
  input  logic [7:0]  s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  input  logic        s_tlast,
  input  logic        s_tuser,
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  input  logic        m_tready,
  output logic        m_tlast,
  output logic        m_tuser
);
  import isp_pkg::*;
  logic row_odd, col_odd;          // position of the next input pixel
  logic [11:0] g_r, g_g, g_b, g_d; // gains of the current frame
  logic [11:0] gr_use, gg_use, gb_use, gd_use;
  logic r_odd, c_odd;
  logic [11:0] gc;
  logic [31:0] prod;

  assign s_tready = !m_tvalid || m_tready;

  always_comb begin
    // at the first pixel of a frame the new gains already apply
    gr_use = s_tuser ? gain_r : g_r;
    gg_use = s_tuser ? gain_g : g_g;
    gb_use = s_tuser ? gain_b : g_b;
    gd_use = s_tuser ? dgain  : g_d;
    r_odd  = s_tuser ? 1'b0 : row_odd;
    c_odd  = s_tuser ? 1'b0 : col_odd;
    unique case (cfa_at(r_odd, c_odd))
      CFA_R:   gc = gr_use;
      CFA_B:   gc = gb_use;
      default: gc = gg_use;
    endcase
    prod = 32'(s_tdata) * 32'(gc) * 32'(gd_use) + 32'h8000;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tlast  <= 1'b0;
      m_tuser  <= 1'b0;
      row_odd  <= 1'b0;
      col_odd  <= 1'b0;
      g_r <= 12'd256; g_g <= 12'd256; g_b <= 12'd256; g_d <= 12'd256;
    end else if (s_tready) begin
      m_tvalid <= s_tvalid;
      if (s_tvalid) begin
        m_tdata <= (prod[31:16] > 16'd255) ? 8'd255 : prod[23:16];
        m_tlast <= s_tlast;
        m_tuser <= s_tuser;
        g_r <= gr_use; g_g <= gg_use; g_b <= gb_use; g_d <= gd_use;
        col_odd <= s_tlast ? 1'b0 : ~c_odd;
        row_odd <= s_tlast ? ~r_odd : r_odd;
      end
    end
  end
endmodule
