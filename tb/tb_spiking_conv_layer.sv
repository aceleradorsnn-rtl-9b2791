// tb_spiking_conv_layer: a small layer (2 -> 3 channels, 9 x 7 input, 3 time
// bins, stride 2) is run on random input spikes with random weights. A
// reference here evaluates the strided zero-padded 3x3 convolution and the
// LIF recurrence (leak by 1/2^leak, threshold, reset to 0) for every neuron
// and bin; every output spike row is read back and compared. The run time
// must be T * OUT_H * (3*CIN + OUT_W + 2) clocks from start to done
// (plus the two clocks of handshake this bench counts).
// Two windows are run to show that membranes restart from 0.
module tb_spiking_conv_layer;
  localparam int CIN = 2, COUT = 3, IW = 9, IH = 7, T = 3, S = 2;
  localparam int OW = (IW - 1) / S + 1, OH = (IH - 1) / S + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, w_we, in_rd_en, out_rd_en;
  logic [3:0] leak_shift, w_k;
  logic signed [15:0] v_th;
  logic [1:0] w_co; logic [0:0] w_ci; logic signed [7:0] w_data;
  logic [1:0] in_rd_t, out_rd_t; logic [0:0] in_rd_c; logic [2:0] in_rd_y;
  logic [IW-1:0] in_rd_data;
  logic [1:0] out_rd_c; logic [1:0] out_rd_y; logic [OW-1:0] out_rd_data;
  logic [31:0] spikes;
  int checks = 0, failures = 0;
  spiking_conv_layer #(.CIN(CIN), .COUT(COUT), .IN_W(IW), .IN_H(IH), .STRIDE(S), .T_BINS(T)) dut (.*);

  logic [IW-1:0] inp [T][CIN][IH];
  int wt [COUT][CIN][9];
  logic exp_s [T][COUT][OH][OW];
  int n_exp;

  // input spike memory, 1-clock read latency
  always @(posedge clk) if (in_rd_en) in_rd_data <= inp[in_rd_t][in_rd_c][in_rd_y];

  task automatic reference();
    int u [COUT][OH][OW];
    n_exp = 0;
    for (int t = 0; t < T; t++)
      for (int co = 0; co < COUT; co++)
        for (int oy = 0; oy < OH; oy++)
          for (int ox = 0; ox < OW; ox++) begin
            int cur, v;
            cur = 0;
            for (int ci = 0; ci < CIN; ci++)
              for (int ky = 0; ky < 3; ky++)
                for (int kx = 0; kx < 3; kx++) begin
                  int y, x;
                  y = oy * S + ky - 1; x = ox * S + kx - 1;
                  if (y >= 0 && y < IH && x >= 0 && x < IW && inp[t][ci][y][x]) cur += wt[co][ci][ky*3+kx];
                end
            v = (t == 0) ? 0 : u[co][oy][ox];
            if (leak_shift != 0) v = v - int'($floor(real'(v) / real'(1 << leak_shift)));
            v = v + cur;
            exp_s[t][co][oy][ox] = (v >= int'(v_th));
            if (exp_s[t][co][oy][ox]) begin v = 0; n_exp++; end
            u[co][oy][ox] = v;
          end
  endtask

  task automatic run_window(int density);
    int cyc, bad;
    for (int t = 0; t < T; t++) for (int c = 0; c < CIN; c++) for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++) inp[t][c][y][x] = ($urandom % 100) < density;
    reference();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != T * OH * (3 * CIN + OW + 2) + 2) begin failures++; $display("run took %0d clocks", cyc); end
    bad = 0;
    for (int t = 0; t < T; t++) for (int co = 0; co < COUT; co++) for (int oy = 0; oy < OH; oy++) begin
      @(negedge clk); out_rd_en = 1; out_rd_t = 2'(t); out_rd_c = 2'(co); out_rd_y = 2'(oy);
      @(negedge clk); out_rd_en = 0;
      for (int ox = 0; ox < OW; ox++) begin
        checks++;
        if (out_rd_data[ox] !== exp_s[t][co][oy][ox]) begin
          failures++; bad++;
          if (bad < 4) $display("t %0d co %0d (%0d,%0d): got %b", t, co, oy, ox, out_rd_data[ox]);
        end
      end
    end
    checks++;
    if (spikes != 32'(n_exp) || n_exp == 0) begin failures++; $display("spike count %0d want %0d", spikes, n_exp); end
  endtask

  initial begin
    start = 0; w_we = 0; out_rd_en = 0; out_rd_t = 0; out_rd_c = 0; out_rd_y = 0;
    w_co = 0; w_ci = 0; w_k = 0; w_data = 0; leak_shift = 4'd2; v_th = 16'sd40;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int co = 0; co < COUT; co++) for (int ci = 0; ci < CIN; ci++) for (int k = 0; k < 9; k++) begin
      wt[co][ci][k] = int'($urandom % 61) - 20;
      @(negedge clk); w_we = 1; w_co = 2'(co); w_ci = 1'(ci); w_k = 4'(k); w_data = 8'(wt[co][ci][k]);
    end
    @(negedge clk); w_we = 0;
    run_window(40);
    leak_shift = 4'd0; v_th = 16'sd70;
    run_window(25);
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
