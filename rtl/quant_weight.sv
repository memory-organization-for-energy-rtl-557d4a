// quant_weight: Q_W, clipping of a weight to its b_w-bit range.
//
// Weights are restricted to the range [-1 + sigma, +1 - sigma] with
// sigma = 2^(1-b_w), i.e. in integer units of the weight LSB (sigma) to
// +/-(2^(b_w-1)-1): the most negative two's-complement code is never used, so
// the range is symmetric. Used on the updated weight before it is written back.
// Combinational; the input is a wider signed value (old weight minus gradient).
module quant_weight
  import snn_pkg::*;
#(
  parameter int unsigned BW = W_BITS,    // weight bits b_w
  parameter int unsigned IW = W_BITS + 10
) (
  input  logic signed [IW-1:0] x,
  output logic signed [BW-1:0] w
);
  localparam logic signed [IW-1:0] WMAX = IW'((1 << (BW - 1)) - 1);
  always_comb begin
    if (x > WMAX)       w = BW'(WMAX);
    else if (x < -WMAX) w = BW'(-WMAX);
    else                w = x[BW-1:0];
  end
endmodule
