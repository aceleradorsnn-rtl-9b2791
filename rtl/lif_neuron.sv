// lif_neuron: one discrete-time leaky integrate-and-fire update.
//
// Eq. (1) of the LIF model, tau du/dt = u_rest - u + R I, stepped once per
// time bin with u_rest = 0 and 1/tau = 2^-leak_shift, becomes
//   u' = u - (u >>> leak_shift) + i_in      (leak_shift = 0: no leak)
// computed with saturation to U_W bits. If u' >= v_th the neuron spikes and
// u' is reset to 0 (hard reset); otherwise u' is kept. Purely
// combinational; the caller holds u in its membrane memory.
// Leak, integration, threshold and reset follow the paper; the power-of-two
// leak, the zero rest/reset potential and the widths are this design's.
module lif_neuron #(
  parameter int U_W = 16
) (
  input  logic signed [U_W-1:0] u_in,
  input  logic signed [U_W-1:0] i_in,
  input  logic        [3:0]     leak_shift,
  input  logic signed [U_W-1:0] v_th,
  output logic signed [U_W-1:0] u_out,
  output logic                  spike
);
  localparam int MAXV = (1 << (U_W - 1)) - 1;
  localparam int MINV = -(1 << (U_W - 1));
  always_comb begin
    int u, leak, s;
    u    = int'(u_in);
    leak = (leak_shift == 4'd0) ? 0 : (u >>> leak_shift);
    s    = u - leak + int'(i_in);
    if (s > MAXV) s = MAXV;
    if (s < MINV) s = MINV;
    spike = (s >= int'(v_th));
    u_out = spike ? '0 : U_W'(s);
  end
endmodule
