// lif_neuron: membrane computation of one postsynaptic neuron.
//
// Given the accumulated synaptic input acc = sum_j W_ij * P_j (from the forward
// MAC) and the neuron's refractory state R, computes
//   U      = acc - delta * R
//   S      = Theta(U - theta)      (1 when U >= theta)
//   R_next = gamma * R + S
// Purely combinational; the layer controller applies it once per neuron and
// time step. Number format (own choice): acc and U signed, in units of weight
// LSB times trace LSB; R unsigned with TR_FRAC fractional bits (a spike adds
// 1.0); delta is the refractory magnitude in U units per 1.0 of R, so
// delta*R is shifted right by TR_FRAC; gamma a fraction of 2^DECAY_FRAC.
// Theta(0) = 1 is taken here; the paper's text states S = 1 at U = 0 for the
// step function.
module lif_neuron
  import snn_pkg::*;
#(
  parameter int unsigned AW = ACC_W,
  parameter int unsigned W  = TR_W,
  parameter int unsigned FR = TR_FRAC,
  parameter int unsigned DF = DECAY_FRAC
) (
  input  logic signed [AW-1:0] acc,
  input  logic [W-1:0]         r,
  input  logic [15:0]          delta,
  input  logic signed [AW-1:0] theta,
  input  logic [DF-1:0]        gamma,
  output logic signed [AW-1:0] u,
  output logic                 spike,
  output logic [W-1:0]         r_next
);
  localparam logic [W:0] ONE  = (W+1)'(1) << FR;
  localparam logic [W:0] MAXV = {1'b0, {W{1'b1}}};

  logic [W+15:0]   dr;
  logic [W+DF-1:0] rg;
  logic [W:0]      rs;
  always_comb begin
    dr     = (W+16)'(delta) * (W+16)'(r);
    u      = acc - $signed(AW'(dr >> FR));
    spike  = (u >= theta);
    rg     = (W+DF)'(r) * (W+DF)'(gamma);
    rs     = (W+1)'(rg >> DF) + (spike ? ONE : '0);
    r_next = (rs > MAXV) ? W'(MAXV) : rs[W-1:0];
  end
endmodule
