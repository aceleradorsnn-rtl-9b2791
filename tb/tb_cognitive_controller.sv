// tb_cognitive_controller: presents detections and event statistics for a
// brightening, a darkening and a quiet window, with a stalling control bus,
// and checks each six-write sequence (addresses, gamma bank, digital-gain
// steps and limits, denoise strength, ROI scaled from cells to pixels,
// commit tag) against values worked out here.
module tb_cognitive_controller;
  import npu_pkg::*;
  import isp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic det_valid, cfg_valid, cfg_ready, busy;
  detection_t det;
  logic [15:0] win_id; logic [31:0] n_on, n_off, updates;
  logic [9:0] cfg_addr; logic [31:0] cfg_data;
  int checks = 0, failures = 0;
  cognitive_controller #(.IMG_W(1280), .IMG_H(720), .GRID_W(19), .GRID_H(15)) dut (.*);

  logic [9:0] got_a [$]; logic [31:0] got_d [$];
  always @(posedge clk) begin
    if (cfg_valid && cfg_ready) begin got_a.push_back(cfg_addr); got_d.push_back(cfg_data); end
    cfg_ready <= ($urandom % 3) != 0;
  end

  task automatic window(logic found, int x0, int y0, int x1, int y1, int on, int off, int id,
                        int e_bank, int e_dg, int e_nlm, int ex0, int ex1, int ey0, int ey1);
    logic [9:0] ea [6]; logic [31:0] ed [6];
    got_a.delete(); got_d.delete();
    @(negedge clk);
    det = '{found: found, n_cells: 8'(found), x0: 8'(x0), y0: 8'(y0), x1: 8'(x1), y1: 8'(y1)};
    n_on = 32'(on); n_off = 32'(off); win_id = 16'(id); det_valid = 1;
    @(negedge clk); det_valid = 0;
    while (busy) @(negedge clk);
    ea = '{REG_CTRL, REG_DGAIN, REG_NLM, REG_ROI_X, REG_ROI_Y, REG_COMMIT};
    ed = '{32'(e_bank * 2 + 1), 32'(e_dg), 32'(e_nlm), 32'(ex1 * 65536 + ex0), 32'(ey1 * 65536 + ey0), 32'(id)};
    checks++;
    if (got_a.size() != 6) begin failures++; $display("%0d writes", got_a.size()); end
    else for (int i = 0; i < 6; i++) begin
      checks++;
      if (got_a[i] != ea[i] || got_d[i] != ed[i]) begin
        failures++; $display("win %0d write %0d: %h=%h want %h=%h", id, i, got_a[i], got_d[i], ea[i], ed[i]);
      end
    end
  endtask

  initial begin
    det_valid = 0; det = '0; n_on = 0; n_off = 0; win_id = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // 1280/19 -> 68 px per cell, 720/15 -> 48 px per cell
    window(1, 2, 3, 4, 5, 3000, 1000, 1, 1, 224, 3, 136, 339, 144, 287);  // brightening
    window(1, 18, 0, 18, 14, 500, 25000, 2, 0, 256, 1, 1224, 1279, 0, 719); // darkening, fast
    window(0, 0, 0, 0, 0, 10, 20, 3, 0, 256, 3, 0, 1279, 0, 719);          // quiet: too few events
    for (int i = 0; i < 30; i++) window(0, 0, 0, 0, 0, 0, 500, 4 + i, 0, (256 + 32 * (i + 1) > 1024) ? 1024 : 256 + 32 * (i + 1), 3, 0, 1279, 0, 719);
    checks++;
    if (updates != 32'd33) begin failures++; $display("updates %0d", updates); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
