// surrogate_grad: surrogate derivative of the spiking non-linearity.
//
// The step function of the neuron has no useful derivative, so learning uses
// the derivative of a fast sigmoid, 1/(1+|x|)^2, normalized to 1 at x = 0,
// evaluated at x = (M - theta_m) / 2^shift, where M is the stored (quantized)
// membrane potential and theta_m the threshold in the same units.
// Implementation: |x| is clamped to 0..63 (in units of 1/8) and looked up in a
// 64-entry constant table sg[k] = floor(255*64 / (8+k)^2), i.e.
// 255 / (1 + k/8)^2, so the output is in 0..255 with 255 = 1.0.
// Combinational. Table size, resolution and the 1/8 step are choices of this
// design.
module surrogate_grad
  import snn_pkg::*;
#(
  parameter int unsigned MW = M_W,
  parameter int unsigned SW = SG_W
) (
  input  logic signed [MW-1:0] m,
  input  logic signed [MW-1:0] theta_m,
  input  logic [3:0]           shift,
  output logic [SW-1:0]        sg
);
  logic [SW-1:0] lut [64];
  for (genvar k = 0; k < 64; k++) begin : g_lut
    assign lut[k] = SW'((255 * 64) / ((8 + k) * (8 + k)));
  end

  logic signed [MW:0] x;
  logic [MW:0]        ax, sx;
  logic [5:0]         idx;
  always_comb begin
    x   = (MW+1)'(m) - (MW+1)'(theta_m);
    ax  = x[MW] ? (MW+1)'(-x) : (MW+1)'(x);
    sx  = ax >> shift;
    idx = (sx > 63) ? 6'd63 : sx[5:0];
    sg  = lut[idx];
  end
endmodule
