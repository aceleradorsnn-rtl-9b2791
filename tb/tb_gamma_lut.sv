// tb_gamma_lut: checks the reset curves (bank 0: round(sqrt(255 x)),
// computed here in real arithmetic; bank 1: identity), a bank switch that
// must take effect exactly at a frame start, LUT writes into the idle bank,
// and that the input is held during the reset fill.
module tb_gamma_lut;
  import isp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bank_sel, lut_we, lut_bank;
  logic [7:0] lut_addr, lut_data;
  rgb_t s_tdata, m_tdata;
  logic s_tvalid, s_tready, s_tlast, s_tuser, m_tvalid, m_tready, m_tlast, m_tuser;
  int checks = 0, failures = 0;
  gamma_lut #(.BANKS(2)) dut (.*);

  logic [7:0] exp_lut [2][256];
  rgb_t exp_q [$];
  logic exp_u [$];

  task automatic send(rgb_t d, logic u);
    s_tdata <= d; s_tuser <= u; s_tlast <= 1'b0; s_tvalid <= 1'b1;
    @(posedge clk);
    while (!s_tready) @(posedge clk);
    exp_q.push_back(d); exp_u.push_back(u);
  endtask

  int bank_of_frame = 0;
  rgb_t d_in [$]; int b_in [$];
  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    rgb_t e; int b;
    e = d_in.pop_front(); b = b_in.pop_front();
    checks++;
    if (m_tdata.r !== exp_lut[b][e.r] || m_tdata.g !== exp_lut[b][e.g] || m_tdata.b !== exp_lut[b][e.b]) begin
      failures++;
      if (failures < 6) $display("bank %0d in %h got %h", b, e, m_tdata);
    end
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      exp_lut[0][i] = 8'(int'($floor($sqrt(255.0 * i) + 0.5)));
      exp_lut[1][i] = 8'(i);
    end
    s_tvalid = 0; m_tready = 1; lut_we = 0; lut_bank = 0; lut_addr = 0; lut_data = 0; bank_sel = 0;
    s_tdata = '0; s_tlast = 0; s_tuser = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++;
    if (s_tready) begin failures++; $display("input not held during LUT fill"); end
    // frame on bank 0: every value
    for (int i = 0; i < 256; i++) begin
      d_in.push_back(rgb_t'({8'(i), 8'(255 - i), 8'(i * 7)})); b_in.push_back(0);
      send(rgb_t'({8'(i), 8'(255 - i), 8'(i * 7)}), i == 0);
    end
    s_tvalid <= 1'b0;
    // select bank 1 mid-frame: must wait for the next frame start
    bank_sel = 1;
    for (int i = 0; i < 20; i++) begin
      d_in.push_back(rgb_t'({8'(i * 3), 8'(i), 8'(200 - i)})); b_in.push_back(0);
      send(rgb_t'({8'(i * 3), 8'(i), 8'(200 - i)}), 1'b0);
    end
    for (int i = 0; i < 20; i++) begin
      d_in.push_back(rgb_t'({8'(i * 3), 8'(i), 8'(200 - i)})); b_in.push_back(1);
      send(rgb_t'({8'(i * 3), 8'(i), 8'(200 - i)}), i == 0);
    end
    s_tvalid <= 1'b0;
    // load an inverting curve into bank 0 while bank 1 is used, then switch
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); lut_we = 1; lut_bank = 0; lut_addr = 8'(i); lut_data = 8'(255 - i);
      exp_lut[0][i] = 8'(255 - i);
    end
    @(negedge clk); lut_we = 0; bank_sel = 0;
    for (int i = 0; i < 30; i++) begin
      d_in.push_back(rgb_t'({8'(i * 5), 8'(i + 9), 8'(i)})); b_in.push_back(0);
      send(rgb_t'({8'(i * 5), 8'(i + 9), 8'(i)}), i == 0);
    end
    s_tvalid <= 1'b0;
    repeat (3) @(posedge clk);
    if (checks < 300) failures++;
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
