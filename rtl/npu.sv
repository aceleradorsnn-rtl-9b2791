// npu: the Neuromorphic Processing Unit, from DVS events to ISP parameter
// writes.
//
//   DVS events -> event_encoder (voxel grid, ping-pong)
//              -> spiking_conv_layer L1 (2 -> C1 channels, stride 2)
//              -> spiking_conv_layer L2 (C1 -> C2 channels, stride 2)
//              -> detection_head (spike-count objectness grid)
//              -> cognitive_controller -> control interface (cfg_*)
//
// A sequencer runs one window at a time: when the encoder holds a finished
// window it starts L1, which reads the voxel grid; when L1 is done the grid
// is released (the encoder clears it and can refill it) and L2 runs on
// L1's spike buffer, then the head on L2's, and the controller sends the
// resulting register writes. Event intake continues into the other grid
// meanwhile, so events are only held off when two windows wait.
// With the default sizes (304 x 240 sensor, 5 bins, C1 = 8, C2 = 16) one
// window takes about 96 k (L1) + 31 k (L2) + 5 k (head) clocks.
// Weights of both layers and the LIF constants are loaded through w_* and
// the *_vth / *_leak inputs.
// The chain encoder -> spiking convolutions of LIF neurons -> detection ->
// parameter instructions is the paper's; the network depth and widths are
// this design's, since the paper evaluates its backbones (Spiking-VGG,
// -DenseNet, -MobileNet, Spiking YOLO) without giving their layers.
module npu #(
  parameter int SENSOR_W = 304,
  parameter int SENSOR_H = 240,
  parameter int T_BINS   = 5,
  parameter int BIN_US   = 10000,
  parameter int C1       = 8,
  parameter int C2       = 16,
  parameter int CELL     = 4,
  parameter int IMG_W    = 1280,
  parameter int IMG_H    = 720,
  localparam int L1_W = (SENSOR_W - 1) / 2 + 1,
  localparam int L1_H = (SENSOR_H - 1) / 2 + 1,
  localparam int L2_W = (L1_W - 1) / 2 + 1,
  localparam int L2_H = (L1_H - 1) / 2 + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  npu_pkg::dvs_event_t  ev,
  input  logic                 ev_valid,
  output logic                 ev_ready,
  // weight and constant loading
  input  logic                 w_we,
  input  logic                 w_layer,     // 0: L1, 1: L2
  input  logic [7:0]           w_co,
  input  logic [7:0]           w_ci,
  input  logic [3:0]           w_k,
  input  logic signed [7:0]    w_data,
  input  logic signed [15:0]   l1_vth,
  input  logic [3:0]           l1_leak,
  input  logic signed [15:0]   l2_vth,
  input  logic [3:0]           l2_leak,
  input  logic [15:0]          obj_th,
  // control interface to the ISP
  output logic [9:0]           cfg_addr,
  output logic [31:0]          cfg_data,
  output logic                 cfg_valid,
  input  logic                 cfg_ready,
  // status
  output npu_pkg::detection_t  det,
  output logic [31:0]          windows,
  output logic [31:0]          l1_spikes,
  output logic [31:0]          l2_spikes
);
  import npu_pkg::*;
  localparam int TB  = (T_BINS > 1) ? $clog2(T_BINS) : 1;
  localparam int C1B = (C1 > 1) ? $clog2(C1) : 1;
  localparam int C2B = (C2 > 1) ? $clog2(C2) : 1;

  typedef enum logic [2:0] {Q_IDLE, Q_L1, Q_L2, Q_HEAD, Q_SEND} seq_e;
  seq_e seq;

  logic win_valid, win_release;
  logic [15:0] win_id, id_q;
  logic [31:0] win_on, win_off, on_q, off_q;

  logic e_rd_en; logic [TB-1:0] e_rd_t; logic [0:0] e_rd_c; logic [$clog2(SENSOR_H)-1:0] e_rd_y;
  logic [SENSOR_W-1:0] e_rd_data;
  logic a_rd_en; logic [TB-1:0] a_rd_t; logic [C1B-1:0] a_rd_c; logic [$clog2(L1_H)-1:0] a_rd_y;
  logic [L1_W-1:0] a_rd_data;
  logic b_rd_en; logic [TB-1:0] b_rd_t; logic [C2B-1:0] b_rd_c; logic [$clog2(L2_H)-1:0] b_rd_y;
  logic [L2_W-1:0] b_rd_data;

  logic l1_start, l1_busy, l1_done, l2_start, l2_busy, l2_done, h_start, h_busy, h_done;
  logic det_valid, cc_busy;
  logic [31:0] cc_updates;

  event_encoder #(.SENSOR_W(SENSOR_W), .SENSOR_H(SENSOR_H), .T_BINS(T_BINS), .BIN_US(BIN_US)) u_enc (
    .clk, .rst_n, .ev, .ev_valid, .ev_ready,
    .win_valid, .win_release, .win_id, .win_on, .win_off,
    .rd_en(e_rd_en), .rd_t(e_rd_t), .rd_p(e_rd_c[0]), .rd_y(e_rd_y), .rd_data(e_rd_data));

  spiking_conv_layer #(.CIN(2), .COUT(C1), .IN_W(SENSOR_W), .IN_H(SENSOR_H), .STRIDE(2), .T_BINS(T_BINS)) u_l1 (
    .clk, .rst_n, .start(l1_start), .busy(l1_busy), .done(l1_done),
    .leak_shift(l1_leak), .v_th(l1_vth),
    .w_we(w_we && !w_layer), .w_co(C1B'(w_co)), .w_ci(1'(w_ci)), .w_k, .w_data,
    .in_rd_en(e_rd_en), .in_rd_t(e_rd_t), .in_rd_c(e_rd_c), .in_rd_y(e_rd_y), .in_rd_data(e_rd_data),
    .out_rd_en(a_rd_en), .out_rd_t(a_rd_t), .out_rd_c(a_rd_c), .out_rd_y(a_rd_y), .out_rd_data(a_rd_data),
    .spikes(l1_spikes));

  spiking_conv_layer #(.CIN(C1), .COUT(C2), .IN_W(L1_W), .IN_H(L1_H), .STRIDE(2), .T_BINS(T_BINS)) u_l2 (
    .clk, .rst_n, .start(l2_start), .busy(l2_busy), .done(l2_done),
    .leak_shift(l2_leak), .v_th(l2_vth),
    .w_we(w_we && w_layer), .w_co(C2B'(w_co)), .w_ci(C1B'(w_ci)), .w_k, .w_data,
    .in_rd_en(a_rd_en), .in_rd_t(a_rd_t), .in_rd_c(a_rd_c), .in_rd_y(a_rd_y), .in_rd_data(a_rd_data),
    .out_rd_en(b_rd_en), .out_rd_t(b_rd_t), .out_rd_c(b_rd_c), .out_rd_y(b_rd_y), .out_rd_data(b_rd_data),
    .spikes(l2_spikes));

  detection_head #(.C(C2), .IN_W(L2_W), .IN_H(L2_H), .T_BINS(T_BINS), .CELL(CELL)) u_head (
    .clk, .rst_n, .start(h_start), .busy(h_busy), .done(h_done), .obj_th,
    .rd_en(b_rd_en), .rd_t(b_rd_t), .rd_c(b_rd_c), .rd_y(b_rd_y), .rd_data(b_rd_data), .det);

  cognitive_controller #(.IMG_W(IMG_W), .IMG_H(IMG_H),
                         .GRID_W((L2_W + CELL - 1) / CELL), .GRID_H((L2_H + CELL - 1) / CELL)) u_cc (
    .clk, .rst_n, .det_valid, .det, .win_id(id_q), .n_on(on_q), .n_off(off_q),
    .cfg_addr, .cfg_data, .cfg_valid, .cfg_ready, .busy(cc_busy), .updates(cc_updates));

  assign l1_start    = (seq == Q_IDLE) && win_valid;
  assign win_release = (seq == Q_L1) && l1_done;
  assign l2_start    = win_release;
  assign h_start     = (seq == Q_L2) && l2_done;
  assign det_valid   = (seq == Q_SEND) && !cc_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq <= Q_IDLE; id_q <= '0; on_q <= '0; off_q <= '0; windows <= '0;
    end else begin
      unique case (seq)
        Q_IDLE: if (win_valid) begin
          seq <= Q_L1; id_q <= win_id; on_q <= win_on; off_q <= win_off;
        end
        Q_L1:   if (l1_done) seq <= Q_L2;
        Q_L2:   if (l2_done) seq <= Q_HEAD;
        Q_HEAD: if (h_done) seq <= Q_SEND;
        Q_SEND: if (!cc_busy) begin seq <= Q_IDLE; windows <= windows + 32'd1; end
        default: seq <= Q_IDLE;
      endcase
    end
  end

  logic unused;
  assign unused = ^{l1_busy, l2_busy, h_busy, cc_updates, e_rd_c};
endmodule
