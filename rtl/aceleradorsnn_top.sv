// aceleradorsnn_top: the complete cognitive vision system, an NPU and a
// Cognitive ISP closed into one loop.
//
// The NPU takes the event stream of a dynamic vision sensor (DVS), runs it
// through a spiking neural network window by window and, from what it
// detects and from the scene's lighting and motion profile, writes new
// parameters into the ISP over the control interface. The ISP processes the
// RGB camera's Bayer stream in real time and applies each parameter set
// from the next frame on, tagging the frame with the DVS window it came
// from and flagging the pixels of the detected object's region.
// A host port (host_cfg_*) shares the control interface, for loading gamma
// curves, colour matrices or manual gains; it has priority over the NPU
// (one write per clock, both are always accepted eventually).
// The DVS and the RGB camera are outside this design: their streams enter
// as ports, and the camera's exposure register value leaves as a port.
module aceleradorsnn_top #(
  parameter int SENSOR_W = 304,
  parameter int SENSOR_H = 240,
  parameter int T_BINS   = 5,
  parameter int BIN_US   = 10000,
  parameter int C1       = 8,
  parameter int C2       = 16,
  parameter int CELL     = 4,
  parameter int IMG_W    = 1280,
  parameter int IMG_H    = 720
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // DVS events
  input  npu_pkg::dvs_event_t  ev,
  input  logic                 ev_valid,
  output logic                 ev_ready,
  // SNN weights and constants
  input  logic                 w_we,
  input  logic                 w_layer,
  input  logic [7:0]           w_co,
  input  logic [7:0]           w_ci,
  input  logic [3:0]           w_k,
  input  logic signed [7:0]    w_data,
  input  logic signed [15:0]   l1_vth,
  input  logic [3:0]           l1_leak,
  input  logic signed [15:0]   l2_vth,
  input  logic [3:0]           l2_leak,
  input  logic [15:0]          obj_th,
  // host access to the ISP control interface
  input  logic [9:0]           host_cfg_addr,
  input  logic [31:0]          host_cfg_data,
  input  logic                 host_cfg_valid,
  output logic                 host_cfg_ready,
  // RGB camera, raw Bayer AXI4-Stream
  input  logic [7:0]           s_tdata,
  input  logic                 s_tvalid,
  output logic                 s_tready,
  input  logic                 s_tlast,
  input  logic                 s_tuser,
  // processed YCbCr AXI4-Stream
  output isp_pkg::ycc_t        m_tdata,
  output logic                 m_tvalid,
  input  logic                 m_tready,
  output logic                 m_tlast,
  output logic                 m_tuser,
  output logic                 m_roi,
  output logic [15:0]          frame_tag,
  output logic [15:0]          exposure,
  // status
  output npu_pkg::detection_t  det,
  output logic [31:0]          windows,
  output logic [31:0]          commits
);
  logic [9:0]  n_addr, c_addr;
  logic [31:0] n_data, c_data;
  logic        n_valid, n_ready, c_valid, c_ready;
  logic [31:0] l1_spikes, l2_spikes, defects;

  npu #(.SENSOR_W(SENSOR_W), .SENSOR_H(SENSOR_H), .T_BINS(T_BINS), .BIN_US(BIN_US),
        .C1(C1), .C2(C2), .CELL(CELL), .IMG_W(IMG_W), .IMG_H(IMG_H)) u_npu (
    .clk, .rst_n, .ev, .ev_valid, .ev_ready,
    .w_we, .w_layer, .w_co, .w_ci, .w_k, .w_data, .l1_vth, .l1_leak, .l2_vth, .l2_leak, .obj_th,
    .cfg_addr(n_addr), .cfg_data(n_data), .cfg_valid(n_valid), .cfg_ready(n_ready),
    .det, .windows, .l1_spikes, .l2_spikes);

  // control interface arbitration: host first
  assign c_valid        = host_cfg_valid || n_valid;
  assign c_addr         = host_cfg_valid ? host_cfg_addr : n_addr;
  assign c_data         = host_cfg_valid ? host_cfg_data : n_data;
  assign host_cfg_ready = c_ready;
  assign n_ready        = c_ready && !host_cfg_valid;

  isp #(.W(IMG_W), .H(IMG_H)) u_isp (
    .clk, .rst_n, .cfg_addr(c_addr), .cfg_data(c_data), .cfg_valid(c_valid), .cfg_ready(c_ready),
    .s_tdata, .s_tvalid, .s_tready, .s_tlast, .s_tuser,
    .m_tdata, .m_tvalid, .m_tready, .m_tlast, .m_tuser, .m_roi, .frame_tag, .exposure,
    .commits, .defects);

  logic unused;
  assign unused = ^{l1_spikes, l2_spikes, defects};
endmodule
