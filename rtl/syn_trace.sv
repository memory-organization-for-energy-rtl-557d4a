// syn_trace: synaptic and membrane trace update of one presynaptic neuron.
//
// Implements the two first-order (single-tap) filters of the neuron model:
//   Q[n+1] = alpha * Q[n] + S[n]
//   P[n+1] = beta  * P[n] + Q[n]
// where S is the neuron's input spike of this time step and P is the trace the
// layer's weights multiply. Purely combinational; the layer controller reads Q
// and P from the trace memory, applies this unit and writes the result back.
// With bin set the unit turns the neuron into a plain binary unit: Q is held at
// 0 and P[n+1] = S[n], so the weights multiply the previous step's spike (the
// reduction to a binary network the model allows: alpha = 0, P[n] replaced by
// S[n-1], Q dropped). Doing it with a mode bit rather than with constants is
// this design's choice: zero decay constants alone would give P[n] = S[n-2].
// Number format (own choice): Q, P unsigned with TR_FRAC fractional bits
// (a spike adds 1.0 = 2^TR_FRAC), alpha/beta unsigned fractions of 2^DECAY_FRAC,
// products truncated, sums saturated to the trace width.
module syn_trace
  import snn_pkg::*;
#(
  parameter int unsigned W  = TR_W,
  parameter int unsigned FR = TR_FRAC,
  parameter int unsigned DF = DECAY_FRAC
) (
  input  logic [W-1:0]  q,
  input  logic [W-1:0]  p,
  input  logic          spike,
  input  logic          bin,
  input  logic [DF-1:0] alpha,
  input  logic [DF-1:0] beta,
  output logic [W-1:0]  q_next,
  output logic [W-1:0]  p_next
);
  localparam logic [W:0] ONE  = (W+1)'(1) << FR;
  localparam logic [W:0] MAXV = {1'b0, {W{1'b1}}};

  logic [W+DF-1:0] qa, pb;
  logic [W:0]      qs, ps;
  always_comb begin
    qa = (W+DF)'(q) * (W+DF)'(alpha);
    pb = (W+DF)'(p) * (W+DF)'(beta);
    qs = (W+1)'(qa >> DF) + (spike ? ONE : '0);
    ps = (W+1)'(pb >> DF) + {1'b0, q};
    if (bin) begin
      q_next = '0;
      p_next = spike ? W'(ONE) : '0;
    end else begin
      q_next = (qs > MAXV) ? W'(MAXV) : qs[W-1:0];
      p_next = (ps > MAXV) ? W'(MAXV) : ps[W-1:0];
    end
  end
endmodule
