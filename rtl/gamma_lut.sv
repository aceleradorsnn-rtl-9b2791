// gamma_lut: gamma correction of the RGB stream through a look-up table.
//
// Two banks of 256 x 8-bit entries; bank_sel picks the bank in use and is
// sampled at the first pixel of each frame, so a frame never mixes curves.
// The same curve is applied to R, G and B. Entries are written through
// lut_we/lut_bank/lut_addr/lut_data (from the ISP control interface), which
// lets the NPU or a host load a new curve into the idle bank and then switch.
// After reset an initialiser fills bank 0 with a gamma-1/2 curve,
// round(sqrt(255 * x)), and bank 1 with the identity; the stream is held
// (s_tready low) for those 256 clocks.
// Timing: one register stage, one pixel per clock.
// Custom gamma LUTs that the NPU can tweak are the paper's; the two-bank
// organisation, the shared curve and the reset curves are this design's.
module gamma_lut #(
  parameter int BANKS = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(BANKS)-1:0] bank_sel,
  input  logic                     lut_we,
  input  logic [$clog2(BANKS)-1:0] lut_bank,
  input  logic [7:0]               lut_addr,
  input  logic [7:0]               lut_data,
  input  isp_pkg::rgb_t            s_tdata,
  input  logic                     s_tvalid,
  output logic                     s_tready,
  input  logic                     s_tlast,
  input  logic                     s_tuser,
  output isp_pkg::rgb_t            m_tdata,
  output logic                     m_tvalid,
  input  logic                     m_tready,
  output logic                     m_tlast,
  output logic                     m_tuser
);
  import isp_pkg::*;
  logic [7:0] lut [BANKS][256];
  logic [$clog2(BANKS)-1:0] bank, bank_use;
  logic       init_busy;
  logic [8:0] init_idx;
  logic [7:0] init_sqrt;

  // integer square root of 255 * x, rounded, by restoring bit search
  function automatic logic [7:0] gamma_half(input logic [7:0] x);
    int v, r;
    v = 255 * int'(x);
    r = 0;
    for (int b = 7; b >= 0; b--)
      if ((r + (1 << b)) * (r + (1 << b)) <= v) r += (1 << b);
    if (v - r * r > r && r < 255) r += 1;  // round to nearest
    return 8'(r);
  endfunction

  assign init_sqrt = gamma_half(init_idx[7:0]);
  assign s_tready  = !init_busy && (!m_tvalid || m_tready);
  assign bank_use  = s_tuser ? bank_sel : bank;

  always_ff @(posedge clk) begin
    if (init_busy) begin
      lut[0][init_idx[7:0]] <= init_sqrt;
      for (int b = 1; b < BANKS; b++) lut[b][init_idx[7:0]] <= init_idx[7:0];
    end else if (lut_we) begin
      lut[lut_bank][lut_addr] <= lut_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_idx  <= '0;
      bank      <= '0;
      m_tvalid  <= 1'b0;
      m_tdata   <= '0;
      m_tlast   <= 1'b0;
      m_tuser   <= 1'b0;
    end else begin
      if (init_busy) begin
        init_idx <= init_idx + 9'd1;
        if (init_idx == 9'd255) init_busy <= 1'b0;
      end
      if (s_tready) begin
        m_tvalid <= s_tvalid;
        if (s_tvalid) begin
          m_tdata.r <= lut[bank_use][s_tdata.r];
          m_tdata.g <= lut[bank_use][s_tdata.g];
          m_tdata.b <= lut[bank_use][s_tdata.b];
          m_tlast   <= s_tlast;
          m_tuser   <= s_tuser;
          bank      <= bank_use;
        end
      end
    end
  end
endmodule
