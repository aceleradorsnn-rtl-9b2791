// cognitive_controller: the NPU's decision stage that turns what the SNN saw
// in a DVS window into ISP parameter updates.
//
// On det_valid it takes the detection result and the window's ON/OFF event
// counts and issues six register writes on the ISP control interface
// (valid/ready, one write per accepted clock), always in this order:
//   REG_CTRL    AWB on, gamma bank: 0 (gamma 1/2, lifts shadows) when the
//               scene is darkening, 1 (linear) when it is brightening,
//               unchanged otherwise
//   REG_DGAIN   digital gain, stepped by DG_STEP down when brightening and
//               up when darkening, kept in [DG_MIN, DG_MAX]
//   REG_NLM     denoise strength NLM_FAST when the window held more than
//               ACT_HI events (fast motion: keep detail), NLM_SLOW otherwise
//   REG_ROI_X,
//   REG_ROI_Y   the detected bounding box scaled from grid cells to RGB
//               pixels, or the whole frame when nothing was detected
//   REG_COMMIT  the window number, which makes the set take effect at the
//               next RGB frame and tags that frame
// "Brightening" means ON events outnumber OFF events by more than 2:1 (and
// there are at least MIN_EV events), "darkening" the reverse.
// The paper says the NPU generates adjustment instructions for exposure,
// white balance, gamma and denoising from the scene's lighting and motion
// profile and from detected objects; the concrete rules and constants
// above are this design's, as the paper gives none.
module cognitive_controller #(
  parameter int IMG_W   = 1280,
  parameter int IMG_H   = 720,
  parameter int GRID_W  = 19,
  parameter int GRID_H  = 15,
  parameter int ACT_HI  = 20000,
  parameter int MIN_EV  = 64,
  parameter int DG_STEP = 32,
  parameter int DG_MIN  = 128,
  parameter int DG_MAX  = 1024,
  parameter int NLM_FAST = 1,
  parameter int NLM_SLOW = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 det_valid,
  input  npu_pkg::detection_t  det,
  input  logic [15:0]          win_id,
  input  logic [31:0]          n_on,
  input  logic [31:0]          n_off,
  output logic [9:0]           cfg_addr,
  output logic [31:0]          cfg_data,
  output logic                 cfg_valid,
  input  logic                 cfg_ready,
  output logic                 busy,
  output logic [31:0]          updates
);
  import isp_pkg::*;
  localparam int PX_X = (IMG_W + GRID_W - 1) / GRID_W;  // RGB pixels per cell
  localparam int PX_Y = (IMG_H + GRID_H - 1) / GRID_H;

  logic [2:0]  idx;
  logic [11:0] dgain;
  logic        bank;
  logic [3:0]  nlm;
  logic [11:0] rx0, rx1, ry0, ry1;
  logic [15:0] tag;

  function automatic logic [11:0] scale_hi(input int cidx, input int px, input int lim);
    int v;
    v = (cidx + 1) * px - 1;
    return 12'((v > lim - 1) ? lim - 1 : v);
  endfunction

  logic brighten, darken;
  assign busy     = cfg_valid;
  assign brighten = (n_on + n_off >= 32'(MIN_EV)) && (n_on > 2 * n_off);
  assign darken   = (n_on + n_off >= 32'(MIN_EV)) && (n_off > 2 * n_on);

  always_comb begin
    cfg_addr = REG_CTRL; cfg_data = '0;
    unique case (idx)
      3'd0: begin cfg_addr = REG_CTRL;   cfg_data = {30'd0, bank, 1'b1}; end
      3'd1: begin cfg_addr = REG_DGAIN;  cfg_data = {20'd0, dgain}; end
      3'd2: begin cfg_addr = REG_NLM;    cfg_data = {28'd0, nlm}; end
      3'd3: begin cfg_addr = REG_ROI_X;  cfg_data = {4'd0, rx1, 4'd0, rx0}; end
      3'd4: begin cfg_addr = REG_ROI_Y;  cfg_data = {4'd0, ry1, 4'd0, ry0}; end
      default: begin cfg_addr = REG_COMMIT; cfg_data = {16'd0, tag}; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0; cfg_valid <= 1'b0; dgain <= 12'd256; bank <= 1'b0; nlm <= 4'(NLM_SLOW);
      rx0 <= '0; rx1 <= 12'(IMG_W - 1); ry0 <= '0; ry1 <= 12'(IMG_H - 1); tag <= '0;
      updates <= '0;
    end else begin
      if (det_valid && !cfg_valid) begin
        if (brighten) begin
          bank  <= 1'b1;
          dgain <= (int'(dgain) - DG_STEP < DG_MIN) ? 12'(DG_MIN) : dgain - 12'(DG_STEP);
        end else if (darken) begin
          bank  <= 1'b0;
          dgain <= (int'(dgain) + DG_STEP > DG_MAX) ? 12'(DG_MAX) : dgain + 12'(DG_STEP);
        end
        nlm <= (n_on + n_off > 32'(ACT_HI)) ? 4'(NLM_FAST) : 4'(NLM_SLOW);
        if (det.found) begin
          rx0 <= 12'(int'(det.x0) * PX_X); rx1 <= scale_hi(int'(det.x1), PX_X, IMG_W);
          ry0 <= 12'(int'(det.y0) * PX_Y); ry1 <= scale_hi(int'(det.y1), PX_Y, IMG_H);
        end else begin
          rx0 <= '0; rx1 <= 12'(IMG_W - 1); ry0 <= '0; ry1 <= 12'(IMG_H - 1);
        end
        tag <= win_id;
        idx <= '0;
        cfg_valid <= 1'b1;
      end else if (cfg_valid && cfg_ready) begin
        if (idx == 3'd5) begin
          cfg_valid <= 1'b0;
          updates <= updates + 32'd1;
        end
        idx <= idx + 3'd1;
      end
    end
  end
endmodule
