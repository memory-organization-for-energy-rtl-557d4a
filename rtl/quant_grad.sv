// quant_grad: Q_G, weight-gradient computation and stochastic rounding.
//
// For a synapse (j,i) the gradient is g = delta_i * P_j, where delta_i is the
// quantized error of the postsynaptic neuron times its surrogate gradient and
// P_j the presynaptic trace used in the forward pass. The gradient is scaled by
// the learning rate 2^-shift and rounded to the weight LSB:
//   stochastic (sr_en=1): gq = floor((g + r) / 2^shift), r uniform in [0, 2^shift)
//   nearest    (sr_en=0): gq = floor((g + 2^(shift-1)) / 2^shift)
// then saturated to G_W signed bits. Stochastic rounding keeps small gradients
// alive on average over many updates. r comes from a 32-bit Galois LFSR
// (polynomial x^32+x^22+x^2+x+1) that advances on every valid cycle.
// Combinational result; the LFSR is the only state. Power-of-two learning rate,
// LFSR and widths are choices of this design.
module quant_grad
  import snn_pkg::*;
#(
  parameter int unsigned DW = DL_W,
  parameter int unsigned PW = TR_W,
  parameter int unsigned GW = G_W,
  parameter logic [31:0] SEED = 32'h1ACE_B00C
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid,
  input  logic signed [DW-1:0] delta,
  input  logic [PW-1:0]        p,
  input  logic [4:0]           shift,
  input  logic                 sr_en,
  output logic signed [GW-1:0] gq
);
  localparam int unsigned XW = DW + PW + 2;
  localparam logic signed [XW-1:0] GMAX = XW'((1 << (GW - 1)) - 1);

  logic [31:0] lfsr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     lfsr <= SEED;
    else if (valid) lfsr <= lfsr[0] ? ((lfsr >> 1) ^ 32'h8020_0003) : (lfsr >> 1);
  end

  logic signed [XW-1:0] g, rnd, s;
  logic [31:0]          mask;
  always_comb begin
    g    = XW'(delta) * $signed(XW'({1'b0, p}));
    mask = (32'd1 << shift) - 32'd1;
    if (sr_en)           rnd = XW'(lfsr & mask);
    else if (shift != 0) rnd = XW'(32'd1 << (shift - 5'd1));
    else                 rnd = '0;
    s = (g + rnd) >>> shift;
    if (s > GMAX)       gq = GW'(GMAX);
    else if (s < -GMAX) gq = GW'(-GMAX);
    else                gq = s[GW-1:0];
  end
endmodule
