// tb_awb_stats: streams Bayer frames with different colour casts and some
// clipped pixels, and checks the gray-world gains against real-valued means
// of the in-range pixels (to within one Q4.8 step), that clipped pixels are
// ignored, that a channel with no valid pixel keeps gain 1.0, and that the
// result arrives within 300 clocks of the frame end.
module tb_awb_stats;
  localparam int W = 8, H = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] lo, hi, tdata;
  logic tvalid, tready, tlast, tuser;
  logic [11:0] gain_r, gain_g, gain_b;
  logic gains_valid, busy;
  int checks = 0, failures = 0;
  awb_stats #(.W(W), .H(H)) dut (.*);

  function automatic real fabs(real x); return x < 0 ? -x : x; endfunction

  task automatic run_frame(int base_r, int base_g, int base_b, logic blue_clipped);
    real s [3], n [3], er, eb;
    int v, ch, t0, waited;
    s = '{0.0, 0.0, 0.0}; n = '{0.0, 0.0, 0.0};
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) begin
        ch = (r % 2 == 0 && c % 2 == 0) ? 0 : ((r % 2 == 1 && c % 2 == 1) ? 2 : 1);
        v = (ch == 0) ? base_r : ((ch == 1) ? base_g : base_b);
        v += $urandom % 9;
        if (ch == 2 && blue_clipped) v = 250;
        if ((r * W + c) % 11 == 5) v = ($urandom % 2) ? 255 : 2;   // clipped: ignored
        if (v >= 16 && v <= 240) begin s[ch] += v; n[ch] += 1; end
        tdata <= 8'(v); tvalid <= 1'b1; tlast <= (c == W - 1); tuser <= (r == 0 && c == 0);
        @(posedge clk);
        // a gap now and then
        if ($urandom % 4 == 0) begin tvalid <= 1'b0; @(posedge clk); end
      end
    tvalid <= 1'b0;
    t0 = 0; waited = 0;
    while (!gains_valid && waited < 1000) begin @(posedge clk); waited++; end
    er = (s[1] / n[1]) / (s[0] / n[0]) * 256.0;
    eb = (n[2] == 0) ? 256.0 : (s[1] / n[1]) / (s[2] / n[2]) * 256.0;
    if (er > 4095) er = 4095;
    if (eb > 4095) eb = 4095;
    checks += 4;
    if (waited >= 300) begin failures++; $display("gains late: %0d clocks", waited); end
    if (fabs(real'(gain_r) - er) > 1.5) begin failures++; $display("gain_r %0d want %f", gain_r, er); end
    if (fabs(real'(gain_b) - eb) > 1.5) begin failures++; $display("gain_b %0d want %f", gain_b, eb); end
    if (gain_g != 12'd256) begin failures++; $display("gain_g %0d", gain_g); end
  endtask

  initial begin
    lo = 8'd16; hi = 8'd240; tvalid = 0; tdata = 0; tlast = 0; tuser = 0; tready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(60, 120, 90, 1'b0);    // reddish deficit -> gain_r about 2
    run_frame(150, 100, 40, 1'b0);   // strong red, weak blue
    run_frame(100, 100, 100, 1'b1);  // every blue pixel clipped -> gain_b 1.0
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
