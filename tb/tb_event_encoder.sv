// tb_event_encoder: sends random time-ordered events over five windows and,
// for every finished window, reads the whole voxel grid back through the
// row port and compares it bit by bit with a grid built here from the same
// events (bin = (t - window start) / BIN_US). Also checks ON/OFF counts and
// window numbers, and that the encoder holds events off while both grids
// are occupied (the reader releases late on purpose).
module tb_event_encoder;
  import npu_pkg::*;
  localparam int SW = 16, SH = 8, T = 3, BIN = 100, NWIN = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  dvs_event_t ev; logic ev_valid, ev_ready;
  logic win_valid, win_release; logic [15:0] win_id; logic [31:0] win_on, win_off;
  logic rd_en; logic [1:0] rd_t; logic rd_p; logic [2:0] rd_y; logic [SW-1:0] rd_data;
  int checks = 0, failures = 0, stalls = 0;
  event_encoder #(.SENSOR_W(SW), .SENSOR_H(SH), .T_BINS(T), .BIN_US(BIN)) dut (.*);

  logic [SW-1:0] grid [NWIN+1][T][2][SH];
  int on_n [NWIN+1], off_n [NWIN+1];
  dvs_event_t evs [$];
  int t0;

  // producer: events from t0 = 1000 over NWIN windows, then one late event
  initial begin
    int t, w, b;
    t0 = 1000; t = t0;
    for (int i = 0; i <= NWIN; i++) begin
      on_n[i] = 0; off_n[i] = 0;
      for (int j = 0; j < T; j++) for (int p = 0; p < 2; p++) for (int y = 0; y < SH; y++) grid[i][j][p][y] = '0;
    end
    while (t < t0 + NWIN * T * BIN) begin
      dvs_event_t e;
      e.t = 32'(t); e.x = 9'($urandom % SW); e.y = 8'($urandom % SH); e.p = 1'($urandom);
      w = (t - t0) / (T * BIN); b = ((t - t0) % (T * BIN)) / BIN;
      grid[w][b][e.p][e.y][e.x] = 1'b1;
      if (e.p) on_n[w]++; else off_n[w]++;
      evs.push_back(e);
      t += $urandom % 7;
      if ($urandom % 40 == 0) t += 2 * BIN;   // gaps skip whole bins
    end
    begin dvs_event_t e; e = '0; e.t = 32'(t0 + NWIN * T * BIN + 5); evs.push_back(e); end
  end

  always @(posedge clk) if (rst_n) begin
    if (ev_valid && ev_ready) void'(evs.pop_front());
    if (ev_valid && !ev_ready && dut.full[0] && dut.full[1]) stalls++;
    ev_valid <= evs.size() > 0 && ($urandom % 5 != 0);
    ev <= (evs.size() > 0) ? evs[0] : '0;
  end

  initial begin
    ev_valid = 0; ev = '0; win_release = 0; rd_en = 0; rd_t = 0; rd_p = 0; rd_y = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int w = 0; w < NWIN; w++) begin
      int bad;
      while (!win_valid) @(posedge clk);
      if (w == 1) repeat (400) @(posedge clk);   // slow reader: encoder must stall
      bad = 0;
      for (int j = 0; j < T; j++) for (int p = 0; p < 2; p++) for (int y = 0; y < SH; y++) begin
        @(negedge clk); rd_en = 1; rd_t = 2'(j); rd_p = 1'(p); rd_y = 3'(y);
        @(negedge clk); rd_en = 0;
        checks++;
        if (rd_data !== grid[w][j][p][y]) begin
          bad++; failures++;
          if (bad < 3) $display("win %0d bin %0d p %0d y %0d: got %h want %h", w, j, p, y, rd_data, grid[w][j][p][y]);
        end
      end
      checks++;
      if (win_id != 16'(w) || win_on != 32'(on_n[w]) || win_off != 32'(off_n[w])) begin
        failures++; $display("win %0d: id %0d on %0d/%0d off %0d/%0d", w, win_id, win_on, on_n[w], win_off, off_n[w]);
      end
      @(negedge clk); win_release = 1; @(negedge clk); win_release = 0;
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
