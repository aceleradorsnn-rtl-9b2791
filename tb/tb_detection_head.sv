// tb_detection_head: fills a small spike buffer model (4 channels, 10 x 7,
// 2 bins, cells of 3) with sparse background spikes and one dense blob,
// and checks the occupied-cell count and bounding box against counts made
// here, for two thresholds, plus the run time T*C*IN_H + GRID cells.
module tb_detection_head;
  import npu_pkg::*;
  localparam int C = 4, IW = 10, IH = 7, T = 2, CELL = 3;
  localparam int GW = (IW + CELL - 1) / CELL, GH = (IH + CELL - 1) / CELL;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, rd_en;
  logic [15:0] obj_th;
  logic [0:0] rd_t; logic [1:0] rd_c; logic [2:0] rd_y;
  logic [IW-1:0] rd_data;
  detection_t det;
  int checks = 0, failures = 0;
  detection_head #(.C(C), .IN_W(IW), .IN_H(IH), .T_BINS(T), .CELL(CELL)) dut (.*);

  logic [IW-1:0] buf_s [T][C][IH];
  always @(posedge clk) if (rd_en) rd_data <= buf_s[rd_t][rd_c][rd_y];

  task automatic run(int th);
    int cnt [GH][GW], n, x0, y0, x1, y1, cyc;
    for (int i = 0; i < GH; i++) for (int j = 0; j < GW; j++) cnt[i][j] = 0;
    for (int t = 0; t < T; t++) for (int c = 0; c < C; c++) for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++) if (buf_s[t][c][y][x]) cnt[y / CELL][x / CELL]++;
    n = 0; x0 = 255; y0 = 255; x1 = 0; y1 = 0;
    for (int i = 0; i < GH; i++) for (int j = 0; j < GW; j++) if (cnt[i][j] >= th) begin
      n++; if (j < x0) x0 = j; if (j > x1) x1 = j; if (i < y0) y0 = i; if (i > y1) y1 = i;
    end
    obj_th = 16'(th);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    @(negedge clk);
    checks += 3;
    if (det.found != (n > 0) || det.n_cells != 8'(n)) begin failures++; $display("th %0d: found %b n %0d want %0d", th, det.found, det.n_cells, n); end
    if (n > 0 && (det.x0 != 8'(x0) || det.y0 != 8'(y0) || det.x1 != 8'(x1) || det.y1 != 8'(y1))) begin
      failures++; $display("th %0d: box %0d,%0d-%0d,%0d want %0d,%0d-%0d,%0d", th, det.x0, det.y0, det.x1, det.y1, x0, y0, x1, y1);
    end
    if (cyc > T * C * IH + GW * GH + 6) begin failures++; $display("slow: %0d clocks", cyc); end
  endtask

  initial begin
    start = 0; obj_th = 0;
    for (int t = 0; t < T; t++) for (int c = 0; c < C; c++) for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++) buf_s[t][c][y][x] = ($urandom % 20 == 0) || (x >= 4 && x <= 7 && y >= 3 && y <= 5 && $urandom % 3 != 0);
    repeat (3) @(posedge clk); rst_n = 1;
    run(12);
    run(4);
    run(1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
