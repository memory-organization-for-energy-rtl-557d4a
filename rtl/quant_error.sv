// quant_error: Q_E, normalization and quantization of the backward error.
//
// The error arriving from the loss (or the next layer) is first normalized by
// the greatest absolute error of the layer, then clipped and quantized to EQ_W
// signed bits. Two parts:
//   tracking  : every error written into the layer (trk_valid) updates a
//               running maximum of |e|; clr restarts it for a new time step.
//   quantizing: combinational, eq = clip(e * 2^(EQ_W-2-L)), where L is the
//               position of the leading one of the maximum. The largest error
//               thus lands in [2^(EQ_W-2), 2^(EQ_W-1)-1] and all others keep
//               their ratio to it (floored). Output range +/-(2^(EQ_W-1)-1).
// Normalizing by a power of two (a shift) instead of a true division is a choice
// of this design, as are the widths.
// Timing: the maximum is registered; quantize only after all errors of the
// step have been tracked.
module quant_error
  import snn_pkg::*;
#(
  parameter int unsigned EW = E_W,
  parameter int unsigned QW = EQ_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 trk_valid,
  input  logic signed [EW-1:0] trk_e,
  input  logic signed [EW-1:0] e,
  output logic signed [QW-1:0] eq,
  output logic [EW-1:0]        max_abs
);
  localparam int T = QW - 2;
  localparam logic signed [EW+QW-1:0] QMAX = (EW+QW)'((1 << (QW - 1)) - 1);

  logic [EW-1:0] a_trk;
  assign a_trk = trk_e[EW-1] ? EW'(-trk_e) : EW'(trk_e);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                             max_abs <= '0;
    else if (clr)                           max_abs <= '0;
    else if (trk_valid && a_trk > max_abs)  max_abs <= a_trk;
  end

  int                      lead;
  logic signed [EW+QW-1:0] ex, sh;
  always_comb begin
    lead = 0;
    for (int b = 0; b < EW; b++) if (max_abs[b]) lead = b;
    ex = (EW+QW)'(e);
    if (lead >= T) sh = ex >>> (lead - T);
    else           sh = ex <<< (T - lead);
    if (max_abs == '0)   eq = '0;
    else if (sh > QMAX)  eq = QW'(QMAX);
    else if (sh < -QMAX) eq = QW'(-QMAX);
    else                 eq = sh[QW-1:0];
  end
endmodule
