// awb_stats: automatic white balance statistics and gain calculation.
//
// The module watches the raw Bayer stream (it only observes a handshake, it
// never stalls it). For every pixel whose value lies inside [lo, hi] it adds
// the value to the sum of its Bayer colour and counts it; pixels outside the
// range (under- or over-exposed) are discarded. After the last pixel of a
// frame a state machine divides, with one shared serial divider, to get the
// channel means in Q.8 and then the gray-world gains
//   gain_r = mean_g / mean_r,  gain_b = mean_g / mean_b  (Q4.8, gain_g = 1.0)
// clipped to 15.99; a channel without valid pixels keeps gain 1.0. The new
// gains appear on gain_* with a one-clock gains_valid pulse about 200 clocks
// after the frame ended and are held until the next frame's result.
// The state machine, the exposure-based discarding and the computing of RGB
// gains are the paper's; the gray-world rule and the fixed-point formats are
// this design's choice.
module awb_stats #(
  parameter int W = 1280,
  parameter int H = 720
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  lo,
  input  logic [7:0]  hi,
  input  logic [7:0]  tdata,
  input  logic        tvalid,
  input  logic        tready,
  input  logic        tlast,
  input  logic        tuser,
  output logic [11:0] gain_r,
  output logic [11:0] gain_g,
  output logic [11:0] gain_b,
  output logic        gains_valid,
  output logic        busy
);
  import isp_pkg::*;
  typedef enum logic [2:0] {S_ACC, S_MEAN_R, S_MEAN_G, S_MEAN_B, S_GAIN_R, S_GAIN_B} state_e;
  state_e state;

  logic [31:0] sum [3];
  logic [31:0] cnt [3];
  logic [31:0] fsum [3];  // frozen at frame end
  logic [31:0] fcnt [3];
  logic [23:0] mean [3];  // Q.8
  logic [15:0] row, col;
  logic row_odd, col_odd, beat, last_pix;
  int ch;

  logic        d_start, d_busy, d_done;
  logic [39:0] d_num, d_quo;
  logic [31:0] d_den, d_rem;
  logic        issued;

  seq_div #(.NW(40), .DW(32)) u_div (
    .clk, .rst_n, .start(d_start), .num(d_num), .den(d_den),
    .busy(d_busy), .done(d_done), .quo(d_quo), .rem(d_rem));

  assign beat     = tvalid && tready;
  assign row_odd  = tuser ? 1'b0 : row[0];
  assign col_odd  = tuser ? 1'b0 : col[0];
  assign last_pix = beat && tlast && (row == 16'(H - 1));
  assign busy     = (state != S_ACC);

  always_comb begin
    unique case (cfa_at(row_odd, col_odd))
      CFA_R:   ch = 0;
      CFA_B:   ch = 2;
      default: ch = 1;
    endcase
  end

  // divider operands for the current state
  always_comb begin
    d_num = '0; d_den = 32'd1;
    unique case (state)
      S_MEAN_R: begin d_num = {fsum[0], 8'd0}; d_den = fcnt[0]; end
      S_MEAN_G: begin d_num = {fsum[1], 8'd0}; d_den = fcnt[1]; end
      S_MEAN_B: begin d_num = {fsum[2], 8'd0}; d_den = fcnt[2]; end
      S_GAIN_R: begin d_num = {8'd0, mean[1], 8'd0}; d_den = {8'd0, mean[0]}; end
      S_GAIN_B: begin d_num = {8'd0, mean[1], 8'd0}; d_den = {8'd0, mean[2]}; end
      default: ;
    endcase
    d_start = (state != S_ACC) && !issued;
  end

  function automatic logic [11:0] sat_gain(input logic [39:0] q, input logic den_zero);
    if (den_zero) return 12'd256;
    if (q > 40'd4095) return 12'd4095;
    return q[11:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_ACC; issued <= 1'b0; gains_valid <= 1'b0;
      row <= '0; col <= '0;
      for (int i = 0; i < 3; i++) begin
        sum[i] <= '0; cnt[i] <= '0; fsum[i] <= '0; fcnt[i] <= '0; mean[i] <= '0;
      end
      gain_r <= 12'd256; gain_g <= 12'd256; gain_b <= 12'd256;
    end else begin
      gains_valid <= 1'b0;
      // ---- statistics, always running ----
      if (beat) begin
        if (tuser) begin
          for (int i = 0; i < 3; i++) begin sum[i] <= '0; cnt[i] <= '0; end
        end
        if (tdata >= lo && tdata <= hi) begin
          sum[ch] <= (tuser ? 32'd0 : sum[ch]) + 32'(tdata);
          cnt[ch] <= (tuser ? 32'd0 : cnt[ch]) + 32'd1;
        end
        if (tlast) begin
          col <= '0;
          row <= tuser ? 16'd1 : row + 16'd1;
        end else begin
          col <= tuser ? 16'd1 : col + 16'd1;
          if (tuser) row <= '0;
        end
      end
      // ---- gain calculation ----
      if (d_start) issued <= 1'b1;
      unique case (state)
        S_ACC: if (last_pix) begin
          for (int i = 0; i < 3; i++) begin
            fsum[i] <= sum[i] + ((tdata >= lo && tdata <= hi && ch == i) ? 32'(tdata) : 32'd0);
            fcnt[i] <= cnt[i] + ((tdata >= lo && tdata <= hi && ch == i) ? 32'd1 : 32'd0);
          end
          state <= S_MEAN_R; issued <= 1'b0;
        end
        S_MEAN_R: if (d_done) begin mean[0] <= (fcnt[0] == 0) ? 24'd0 : d_quo[23:0]; state <= S_MEAN_G; issued <= 1'b0; end
        S_MEAN_G: if (d_done) begin mean[1] <= (fcnt[1] == 0) ? 24'd0 : d_quo[23:0]; state <= S_MEAN_B; issued <= 1'b0; end
        S_MEAN_B: if (d_done) begin mean[2] <= (fcnt[2] == 0) ? 24'd0 : d_quo[23:0]; state <= S_GAIN_R; issued <= 1'b0; end
        S_GAIN_R: if (d_done) begin
          gain_r <= sat_gain(d_quo, mean[0] == 24'd0 || mean[1] == 24'd0);
          state <= S_GAIN_B; issued <= 1'b0;
        end
        S_GAIN_B: if (d_done) begin
          gain_b <= sat_gain(d_quo, mean[2] == 24'd0 || mean[1] == 24'd0);
          gain_g <= 12'd256;
          gains_valid <= 1'b1;
          state <= S_ACC; issued <= 1'b0;
        end
        default: state <= S_ACC;
      endcase
    end
  end

  logic unused;
  assign unused = ^{d_rem, d_busy};
endmodule
