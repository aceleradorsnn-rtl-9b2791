// spiking_conv_layer: one spiking convolutional layer with LIF neurons.
//
// Input: binary spike maps, CIN channels of IN_H x IN_W per time bin, read
// one row word at a time from the previous stage (1-clock read latency).
// Output: COUT spike maps of OUT_H x OUT_W per time bin, kept in this
// layer's spike buffer and read the same way by the next stage.
// The layer is a 3x3 convolution with zero padding 1 and stride STRIDE.
// Because inputs are spikes (0/1), the synaptic current of a neuron is the
// sum of the int8 weights whose input bit is 1: no multipliers. For each
// time bin and each output row the engine first loads the 3 input rows of
// every input channel (3*CIN clocks), then sweeps the output columns, one
// per clock, updating all COUT neurons of that position in parallel through
// COUT lif_neuron units and a membrane memory that holds one U_W-bit
// potential per neuron. Membranes start at 0 in the first bin of every
// window. The row of output spikes is written to the buffer at the end of
// the row (one clock). spikes counts all output spikes of the run (the
// complement of the layer's sparsity).
// Control: start (one clock, while idle) runs a whole window of T_BINS bins;
// done pulses at the end. Clocks per window, start to done:
//   T_BINS * OUT_H * (3*CIN + OUT_W + 2).
// Weights (w_*) and the LIF constants are loaded from outside; they come
// from surrogate-gradient training done offline.
// Spiking convolutional layers of LIF neurons are the paper's; the kernel
// size, stride, weight and membrane widths, the row-serial schedule and the
// parallelism are this design's.
module spiking_conv_layer #(
  parameter int CIN    = 2,
  parameter int COUT   = 8,
  parameter int IN_W   = 304,
  parameter int IN_H   = 240,
  parameter int STRIDE = 2,
  parameter int T_BINS = 5,
  parameter int WGT_W  = 8,
  parameter int U_W    = 16,
  localparam int OUT_W = (IN_W - 1) / STRIDE + 1,
  localparam int OUT_H = (IN_H - 1) / STRIDE + 1,
  localparam int CIB   = (CIN  > 1) ? $clog2(CIN)  : 1,
  localparam int COB   = (COUT > 1) ? $clog2(COUT) : 1,
  localparam int TB    = (T_BINS > 1) ? $clog2(T_BINS) : 1,
  localparam int IYB   = $clog2(IN_H),
  localparam int OYB   = $clog2(OUT_H)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  input  logic [3:0]              leak_shift,
  input  logic signed [U_W-1:0]   v_th,
  // weight load
  input  logic                    w_we,
  input  logic [COB-1:0]          w_co,
  input  logic [CIB-1:0]          w_ci,
  input  logic [3:0]              w_k,      // ky*3 + kx
  input  logic signed [WGT_W-1:0] w_data,
  // input spike rows
  output logic                    in_rd_en,
  output logic [TB-1:0]           in_rd_t,
  output logic [CIB-1:0]          in_rd_c,
  output logic [IYB-1:0]          in_rd_y,
  input  logic [IN_W-1:0]         in_rd_data,
  // output spike rows
  input  logic                    out_rd_en,
  input  logic [TB-1:0]           out_rd_t,
  input  logic [COB-1:0]          out_rd_c,
  input  logic [OYB-1:0]          out_rd_y,
  output logic [OUT_W-1:0]        out_rd_data,
  output logic [31:0]             spikes
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_LWAIT, S_COMP, S_WROW} state_e;
  state_e state;

  logic signed [WGT_W-1:0] wgt [COUT][CIN][9];
  logic [COUT-1:0][U_W-1:0] umem [OUT_H*OUT_W];
  logic [COUT-1:0][OUT_W-1:0] spk [T_BINS*OUT_H];
  logic [IN_W-1:0] rows [CIN][3];
  logic [COUT-1:0][OUT_W-1:0] row_spk;

  logic [TB-1:0]  t;
  logic [OYB-1:0] oy;
  logic [15:0]    ox;
  logic [7:0]     ld_idx;
  logic           cap_v, cap_zero;
  logic [CIB-1:0] cap_ci;
  logic [1:0]     cap_ky;
  int             pos;

  logic signed [U_W-1:0] cur  [COUT];
  logic signed [U_W-1:0] u_in [COUT];
  logic signed [U_W-1:0] u_nx [COUT];
  logic [COUT-1:0]       fire;

  assign busy = (state != S_IDLE);
  assign pos  = int'(oy) * OUT_W + int'(ox);

  // read request for load step ld_idx: channel ld_idx/3, kernel row ld_idx%3
  always_comb begin
    int y;
    y = int'(oy) * STRIDE + int'(ld_idx) % 3 - 1;
    in_rd_en = (state == S_LOAD) && y >= 0 && y < IN_H;
    in_rd_t  = t;
    in_rd_c  = CIB'(int'(ld_idx) / 3);
    in_rd_y  = IYB'(y < 0 ? 0 : y);
  end

  // synaptic currents of the COUT neurons at column ox
  always_comb begin
    for (int co = 0; co < COUT; co++) begin
      int acc;
      acc = 0;
      for (int ci = 0; ci < CIN; ci++)
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++) begin
            int ix;
            ix = int'(ox) * STRIDE + kx - 1;
            if (ix >= 0 && ix < IN_W && rows[ci][ky][ix])
              acc += int'(wgt[co][ci][ky*3+kx]);
          end
      cur[co]  = U_W'(acc);
      u_in[co] = (t == '0) ? '0 : $signed(umem[pos][co]);
    end
  end

  for (genvar co = 0; co < COUT; co++) begin : g_lif
    lif_neuron #(.U_W(U_W)) u_lif (
      .u_in(u_in[co]), .i_in(cur[co]), .leak_shift, .v_th,
      .u_out(u_nx[co]), .spike(fire[co]));
  end

  always_ff @(posedge clk) begin
    if (w_we) wgt[w_co][w_ci][w_k] <= w_data;
    if (state == S_COMP)
      for (int co = 0; co < COUT; co++) umem[pos][co] <= u_nx[co];
    if (state == S_WROW) spk[int'(t) * OUT_H + int'(oy)] <= row_spk;
    if (out_rd_en) out_rd_data <= spk[int'(out_rd_t) * OUT_H + int'(out_rd_y)][out_rd_c];
    if (cap_v) rows[cap_ci][cap_ky] <= cap_zero ? '0 : in_rd_data;
    if (state == S_COMP)
      for (int co = 0; co < COUT; co++) row_spk[co][ox] <= fire[co];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; t <= '0; oy <= '0; ox <= '0; ld_idx <= '0;
      cap_v <= 1'b0; cap_zero <= 1'b0; cap_ci <= '0; cap_ky <= '0;
      done <= 1'b0; spikes <= '0;
    end else begin
      done  <= 1'b0;
      cap_v <= (state == S_LOAD);
      cap_ci <= CIB'(int'(ld_idx) / 3);
      cap_ky <= 2'(int'(ld_idx) % 3);
      cap_zero <= !in_rd_en;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD; t <= '0; oy <= '0; ld_idx <= '0; spikes <= '0;
        end
        S_LOAD: begin
          if (ld_idx == 8'(3 * CIN - 1)) state <= S_LWAIT;
          else ld_idx <= ld_idx + 8'd1;
        end
        S_LWAIT: begin state <= S_COMP; ox <= '0; end
        S_COMP: begin
          spikes <= spikes + 32'($countones(fire));
          if (ox == 16'(OUT_W - 1)) state <= S_WROW;
          else ox <= ox + 16'd1;
        end
        S_WROW: begin
          ld_idx <= '0;
          if (oy == OYB'(OUT_H - 1)) begin
            oy <= '0;
            if (t == TB'(T_BINS - 1)) begin
              state <= S_IDLE; done <= 1'b1;
            end else begin
              t <= t + 1'b1; state <= S_LOAD;
            end
          end else begin
            oy <= oy + 1'b1; state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
