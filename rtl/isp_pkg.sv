// isp_pkg: types, register map and reset values shared by the Cognitive ISP.
//
// The ISP works on 8-bit pixels. Raw sensor data is a Bayer mosaic in RGGB
// order (R on even rows and even columns); after demosaicing a pixel is an
// rgb_t, after colour conversion a ycc_t. Gains are unsigned Q4.8 (256 = 1.0),
// colour-conversion coefficients signed Q2.8. The register map is what the
// NPU (and a host) write over the control interface; isp_sync_ctrl holds it.
// Pixel width, Bayer order, number formats and the map are this design's
// choices: the paper names the stages and the control path but gives none of
// these details.
package isp_pkg;

  typedef struct packed {
    logic [7:0] r;
    logic [7:0] g;
    logic [7:0] b;
  } rgb_t;

  typedef struct packed {
    logic [7:0] y;
    logic [7:0] cb;
    logic [7:0] cr;
  } ycc_t;

  // Colour of a Bayer site in RGGB order.
  typedef enum logic [1:0] {CFA_R = 2'd0, CFA_GR = 2'd1, CFA_GB = 2'd2, CFA_B = 2'd3} cfa_e;

  function automatic cfa_e cfa_at(input logic row_odd, input logic col_odd);
    return cfa_e'({row_odd, col_odd});
  endfunction

  function automatic logic [7:0] clip8(input int v);
    if (v < 0) return 8'd0;
    if (v > 255) return 8'd255;
    return v[7:0];
  endfunction

  // ---- control interface register map (word addresses, 10 bits) ----------
  // Addresses with bit 9 set write a gamma LUT entry: bank = addr[8],
  // index = addr[7:0], value = data[7:0].
  localparam logic [9:0] REG_CTRL     = 10'h000; // [0] awb_auto, [1] gamma bank
  localparam logic [9:0] REG_GAIN_R   = 10'h001; // Q4.8 manual gain
  localparam logic [9:0] REG_GAIN_G   = 10'h002;
  localparam logic [9:0] REG_GAIN_B   = 10'h003;
  localparam logic [9:0] REG_DGAIN    = 10'h004; // Q4.8 global digital gain
  localparam logic [9:0] REG_NLM      = 10'h005; // [3:0] denoise strength, 0 = off
  localparam logic [9:0] REG_SHARPEN  = 10'h006; // [3:0] luma sharpening amount
  localparam logic [9:0] REG_DPC_TH   = 10'h007; // [7:0] defect threshold
  localparam logic [9:0] REG_ROI_X    = 10'h008; // [11:0] x0, [27:16] x1
  localparam logic [9:0] REG_ROI_Y    = 10'h009; // [11:0] y0, [27:16] y1
  localparam logic [9:0] REG_EXPOSURE = 10'h00A; // [15:0] to the camera
  localparam logic [9:0] REG_CSC0     = 10'h010; // 0x10..0x18: 9 coefficients
  localparam logic [9:0] REG_COMMIT   = 10'h01F; // [15:0] NPU window tag

  localparam int NCSC = 9;

  typedef struct packed {
    logic                       awb_auto;
    logic                       gamma_bank;
    logic [11:0]                gain_r;
    logic [11:0]                gain_g;
    logic [11:0]                gain_b;
    logic [11:0]                dgain;
    logic [3:0]                 nlm_strength;
    logic [3:0]                 sharpen;
    logic [7:0]                 dpc_th;
    logic [11:0]                roi_x0;
    logic [11:0]                roi_x1;
    logic [11:0]                roi_y0;
    logic [11:0]                roi_y1;
    logic [15:0]                exposure;
    logic [NCSC-1:0][9:0]       csc;     // row-major 3x3, signed Q2.8
  } isp_cfg_t;

  // BT.601 full-range RGB -> YCbCr, scaled by 256.
  localparam logic [NCSC-1:0][9:0] CSC_BT601 = {
    10'(-21), 10'(-107), 10'(128),   // Cr: 0.5 R - 0.4187 G - 0.0813 B
    10'(128), 10'(-85),  10'(-43),   // Cb: -0.1687 R - 0.3313 G + 0.5 B
    10'(29),  10'(150),  10'(77)     // Y : 0.299 R + 0.587 G + 0.114 B
  };

  localparam isp_cfg_t CFG_RESET = '{
    awb_auto: 1'b1, gamma_bank: 1'b0,
    gain_r: 12'd256, gain_g: 12'd256, gain_b: 12'd256, dgain: 12'd256,
    nlm_strength: 4'd2, sharpen: 4'd4, dpc_th: 8'd40,
    roi_x0: 12'd0, roi_x1: 12'hFFF, roi_y0: 12'd0, roi_y1: 12'hFFF,
    exposure: 16'h1000, csc: CSC_BT601
  };

endpackage
