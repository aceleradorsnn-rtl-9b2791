// tb_isp_sync_ctrl: writes a parameter set over the control interface and
// checks that nothing changes before the next frame start, that the whole
// set and its window tag take effect exactly there, that AWB or manual
// gains are routed as selected, that gamma writes reach the LUT port and
// that the ROI flag follows the output raster.
module tb_isp_sync_ctrl;
  import isp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [9:0] cfg_addr; logic [31:0] cfg_data; logic cfg_valid, cfg_ready;
  logic sof, awb_valid, lut_we, lut_bank, out_beat, out_tlast, out_tuser, roi;
  logic [11:0] awb_gain_r, awb_gain_g, awb_gain_b, wb_gain_r, wb_gain_g, wb_gain_b;
  isp_cfg_t cfg;
  logic [15:0] frame_tag; logic [31:0] commits;
  logic [7:0] lut_addr, lut_data;
  int checks = 0, failures = 0, lut_seen = 0;
  isp_sync_ctrl dut (.*);

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(logic [9:0] a, logic [31:0] d);
    @(negedge clk); cfg_addr = a; cfg_data = d; cfg_valid = 1;
    @(negedge clk); cfg_valid = 0;
  endtask
  task automatic frame_start();
    @(negedge clk); sof = 1; @(negedge clk); sof = 0;
  endtask

  always @(posedge clk) if (lut_we) begin
    lut_seen++;
    if (lut_bank != 1'b1 || lut_addr != 8'h12 || lut_data != 8'h9A) begin failures++; $display("bad LUT write"); end
  end

  initial begin
    cfg_addr = 0; cfg_data = 0; cfg_valid = 0; sof = 0; awb_valid = 0;
    awb_gain_r = 0; awb_gain_g = 0; awb_gain_b = 0; out_beat = 0; out_tlast = 0; out_tuser = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    chk(cfg == CFG_RESET, "reset configuration");
    // AWB result arrives; with awb_auto it is used from the next frame on
    @(negedge clk); awb_gain_r = 12'd500; awb_gain_g = 12'd256; awb_gain_b = 12'd300; awb_valid = 1;
    @(negedge clk); awb_valid = 0;
    chk(wb_gain_r == 12'd256, "AWB gain waits for frame start");
    frame_start();
    chk(wb_gain_r == 12'd500 && wb_gain_b == 12'd300, "AWB gains applied at frame start");
    // NPU update: manual gains, new strengths, ROI, commit with tag 7
    wr(REG_CTRL, 32'h2);           // awb off, gamma bank 1
    wr(REG_GAIN_R, 32'd111); wr(REG_GAIN_G, 32'd222); wr(REG_GAIN_B, 32'd333);
    wr(REG_NLM, 32'd5); wr(REG_SHARPEN, 32'd9); wr(REG_DPC_TH, 32'd77); wr(REG_DGAIN, 32'd400);
    wr(REG_ROI_X, {4'd0, 12'd5, 4'd0, 12'd2}); wr(REG_ROI_Y, {4'd0, 12'd3, 4'd0, 12'd1});
    wr(REG_EXPOSURE, 32'h1234); wr(REG_CSC0 + 10'd4, 32'h0AB);
    wr(10'h200 | 10'h100 | 10'h012, 32'h9A);   // gamma bank 1, entry 0x12
    wr(REG_COMMIT, 32'd7);
    repeat (3) @(negedge clk);
    chk(cfg.nlm_strength == CFG_RESET.nlm_strength && frame_tag == 16'd0 && commits == 0, "no change before frame start");
    frame_start();
    chk(cfg.nlm_strength == 4'd5 && cfg.sharpen == 4'd9 && cfg.dpc_th == 8'd77 && cfg.dgain == 12'd400, "strengths committed");
    chk(cfg.gamma_bank == 1'b1 && cfg.awb_auto == 1'b0 && cfg.exposure == 16'h1234, "ctrl committed");
    chk(cfg.csc[4] == 10'h0AB && cfg.csc[0] == CSC_BT601[0], "csc committed");
    chk(frame_tag == 16'd7 && commits == 32'd1, "tag and commit count");
    chk(wb_gain_r == 12'd111 && wb_gain_g == 12'd222 && wb_gain_b == 12'd333, "manual gains routed");
    chk(lut_seen == 1, "one LUT write");
    // without a new commit the next frame changes nothing
    wr(REG_NLM, 32'd1);
    frame_start();
    chk(cfg.nlm_strength == 4'd5 && commits == 32'd1, "uncommitted write held back");
    // a committed update followed by part of the next one: only the committed part applies
    wr(REG_NLM, 32'd6); wr(REG_COMMIT, 32'd8); wr(REG_NLM, 32'd2); wr(REG_DPC_TH, 32'd9);
    frame_start();
    chk(cfg.nlm_strength == 4'd6 && cfg.dpc_th == 8'd77 && frame_tag == 16'd8 && commits == 32'd2, "later uncommitted writes stay out");
    // ROI flag over an 8 x 6 raster: x in 2..5, y in 1..3
    for (int r = 0; r < 6; r++)
      for (int c = 0; c < 8; c++) begin
        @(negedge clk); out_beat = 1; out_tlast = (c == 7); out_tuser = (r == 0 && c == 0);
        #1 chk(roi == (c >= 2 && c <= 5 && r >= 1 && r <= 3), $sformatf("roi at %0d,%0d", r, c));
      end
    @(negedge clk); out_beat = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
