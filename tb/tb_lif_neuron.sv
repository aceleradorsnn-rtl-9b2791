// tb_lif_neuron: drives the LIF update with random potentials, currents,
// leaks and thresholds and compares with a reference written from the
// equation u' = u - u/2^leak + I (saturated), spike and reset at threshold.
// A quarter of the cases land exactly on the threshold or one below it.
module tb_lif_neuron;
  logic signed [15:0] u_in, i_in, v_th, u_out;
  logic [3:0] leak_shift;
  logic spike;
  int checks = 0, failures = 0, fired = 0;
  lif_neuron #(.U_W(16)) dut (.*);

  initial begin
    for (int n = 0; n < 4000; n++) begin
      longint u, s, e_u;
      logic e_s;
      u_in = 16'($urandom); i_in = 16'($signed(12'($urandom)));
      if (n % 3 == 0) u_in = 16'($urandom % 2000);
      leak_shift = 4'($urandom % 9); v_th = 16'(100 + $urandom % 3000);
      // every fourth case lands exactly on the threshold or one below it
      if (n % 4 == 1) begin
        leak_shift = 4'd0; u_in = 16'($urandom % 100);
        i_in = v_th - u_in - 16'((n % 8 == 1) ? 0 : 1);
      end
      #1;
      u = longint'(u_in);
      s = u + longint'(i_in);
      if (leak_shift != 0) s = s - $floor(real'(u) / real'(longint'(1) << leak_shift));
      if (s > 32767) s = 32767;
      if (s < -32768) s = -32768;
      e_s = (s >= longint'(v_th));
      e_u = e_s ? 0 : s;
      checks++;
      if (spike) fired++;
      if (spike !== e_s || longint'(u_out) != e_u) begin
        failures++;
        if (failures < 5) $display("u=%0d i=%0d leak=%0d th=%0d: got %0d/%0b want %0d/%0b", u_in, i_in, leak_shift, v_th, u_out, spike, e_u, e_s);
      end
    end
    if (fired == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
