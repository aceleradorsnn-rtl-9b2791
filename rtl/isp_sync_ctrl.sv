// isp_sync_ctrl: the ISP's control interface and synchronisation controller.
//
// Writes arrive on a simple valid/ready bus (cfg_addr, cfg_data; always
// ready, one write per clock) from the NPU or a host. Register writes land
// in a shadow copy of the isp_cfg_t register set (map in isp_pkg). A write
// to REG_COMMIT copies the shadow set into a staged set and marks it
// pending together with a 16-bit tag, the number of the DVS window whose
// analysis produced it; writes of a later update that has not been
// committed yet therefore never leak into the staged one. At the first pixel
// of the next RGB frame (sof: tuser beat at the ISP input) the pending set
// becomes active and the tag becomes frame_tag, so every RGB frame carries
// the DVS window it was configured from: this is how the DVS and RGB
// streams are aligned. Several commits before one frame start: the last wins. Gamma LUT writes (address bit 9 set) go straight to
// the LUT write port; by convention they target the bank not in use.
// The white-balance gains sent to the pipeline are the AWB result when
// awb_auto is set and the manual gains otherwise; an AWB result is also
// taken over only at a frame start. The module also counts the output
// raster (tlast/tuser beats at the ISP output) and raises roi for pixels
// inside the region of interest, marking the detected object in the output;
// the ROI of a frame is sampled when its first pixel leaves the ISP.
// Frame-boundary commit, tag alignment and the ROI flag are this design's
// reading of the paper's "synchronization controller" that applies the
// NPU's updates on the fly.
module isp_sync_ctrl (
  input  logic               clk,
  input  logic               rst_n,
  // control interface
  input  logic [9:0]         cfg_addr,
  input  logic [31:0]        cfg_data,
  input  logic               cfg_valid,
  output logic               cfg_ready,
  // frame start at the ISP input
  input  logic               sof,
  // AWB result
  input  logic [11:0]        awb_gain_r,
  input  logic [11:0]        awb_gain_g,
  input  logic [11:0]        awb_gain_b,
  input  logic               awb_valid,
  // active configuration
  output isp_pkg::isp_cfg_t  cfg,
  output logic [11:0]        wb_gain_r,
  output logic [11:0]        wb_gain_g,
  output logic [11:0]        wb_gain_b,
  output logic [15:0]        frame_tag,
  output logic [31:0]        commits,
  // gamma LUT write port
  output logic               lut_we,
  output logic               lut_bank,
  output logic [7:0]         lut_addr,
  output logic [7:0]         lut_data,
  // output raster and ROI flag
  input  logic               out_beat,
  input  logic               out_tlast,
  input  logic               out_tuser,
  output logic               roi
);
  import isp_pkg::*;
  isp_cfg_t shadow, staged;
  logic        pending;
  logic [15:0] pending_tag;
  logic [11:0] awb_r, awb_g, awb_b;   // latest AWB result
  logic [15:0] ox, oy;                // coordinates of the next output pixel
  logic [15:0] px, py;
  logic [11:0] rx0, rx1, ry0, ry1;    // ROI of the frame being output
  logic [11:0] ux0, ux1, uy0, uy1;
  logic        wr;

  assign cfg_ready = 1'b1;
  assign wr        = cfg_valid && cfg_ready;
  assign lut_we    = wr && cfg_addr[9];
  assign lut_bank  = cfg_addr[8];
  assign lut_addr  = cfg_addr[7:0];
  assign lut_data  = cfg_data[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shadow <= CFG_RESET; staged <= CFG_RESET; cfg <= CFG_RESET;
      pending <= 1'b0; pending_tag <= '0; frame_tag <= '0; commits <= '0;
      awb_r <= 12'd256; awb_g <= 12'd256; awb_b <= 12'd256;
      wb_gain_r <= 12'd256; wb_gain_g <= 12'd256; wb_gain_b <= 12'd256;
    end else begin
      if (awb_valid) begin awb_r <= awb_gain_r; awb_g <= awb_gain_g; awb_b <= awb_gain_b; end
      if (wr && !cfg_addr[9]) begin
        unique case (cfg_addr)
          REG_CTRL:     begin shadow.awb_auto <= cfg_data[0]; shadow.gamma_bank <= cfg_data[1]; end
          REG_GAIN_R:   shadow.gain_r <= cfg_data[11:0];
          REG_GAIN_G:   shadow.gain_g <= cfg_data[11:0];
          REG_GAIN_B:   shadow.gain_b <= cfg_data[11:0];
          REG_DGAIN:    shadow.dgain <= cfg_data[11:0];
          REG_NLM:      shadow.nlm_strength <= cfg_data[3:0];
          REG_SHARPEN:  shadow.sharpen <= cfg_data[3:0];
          REG_DPC_TH:   shadow.dpc_th <= cfg_data[7:0];
          REG_ROI_X:    begin shadow.roi_x0 <= cfg_data[11:0]; shadow.roi_x1 <= cfg_data[27:16]; end
          REG_ROI_Y:    begin shadow.roi_y0 <= cfg_data[11:0]; shadow.roi_y1 <= cfg_data[27:16]; end
          REG_EXPOSURE: shadow.exposure <= cfg_data[15:0];
          REG_COMMIT:   begin staged <= shadow; pending <= 1'b1; pending_tag <= cfg_data[15:0]; end
          default: if (cfg_addr >= REG_CSC0 && cfg_addr < REG_CSC0 + 10'(NCSC))
                     shadow.csc[cfg_addr - REG_CSC0] <= cfg_data[9:0];
        endcase
      end
      if (sof) begin
        if (pending && !(wr && cfg_addr == REG_COMMIT)) begin
          cfg       <= staged;
          frame_tag <= pending_tag;
          pending   <= 1'b0;
          commits   <= commits + 32'd1;
        end
        if ((pending ? staged.awb_auto : cfg.awb_auto)) begin
          wb_gain_r <= awb_r; wb_gain_g <= awb_g; wb_gain_b <= awb_b;
        end else begin
          wb_gain_r <= pending ? staged.gain_r : cfg.gain_r;
          wb_gain_g <= pending ? staged.gain_g : cfg.gain_g;
          wb_gain_b <= pending ? staged.gain_b : cfg.gain_b;
        end
      end
    end
  end

  // output raster position and ROI flag
  assign px  = out_tuser ? 16'd0 : ox;
  assign py  = out_tuser ? 16'd0 : oy;
  // the ROI of a frame is taken when that frame's first pixel leaves
  assign ux0 = out_tuser ? cfg.roi_x0 : rx0;
  assign ux1 = out_tuser ? cfg.roi_x1 : rx1;
  assign uy0 = out_tuser ? cfg.roi_y0 : ry0;
  assign uy1 = out_tuser ? cfg.roi_y1 : ry1;
  assign roi = (px >= 16'(ux0)) && (px <= 16'(ux1)) && (py >= 16'(uy0)) && (py <= 16'(uy1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ox <= '0; oy <= '0;
      rx0 <= CFG_RESET.roi_x0; rx1 <= CFG_RESET.roi_x1; ry0 <= CFG_RESET.roi_y0; ry1 <= CFG_RESET.roi_y1;
    end else if (out_beat) begin
      rx0 <= ux0; rx1 <= ux1; ry0 <= uy0; ry1 <= uy1;
      if (out_tlast) begin ox <= '0; oy <= py + 16'd1; end
      else           begin ox <= px + 16'd1; oy <= py; end
    end
  end
endmodule
