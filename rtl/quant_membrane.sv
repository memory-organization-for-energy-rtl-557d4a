// quant_membrane: Q_M, quantization of the membrane potential for storage.
//
// The membrane potential U of every neuron is needed again in the backward pass
// (to evaluate the surrogate gradient), so it is stored; to keep that memory
// small it is quantized first: M = saturate(U >>> shift) to M_W signed bits.
// Combinational. The arithmetic right shift by a run-time shift and saturation
// to the symmetric range +/-(2^(M_W-1)-1) are choices of this design.
module quant_membrane
  import snn_pkg::*;
#(
  parameter int unsigned AW = ACC_W,
  parameter int unsigned MW = M_W
) (
  input  logic signed [AW-1:0] u,
  input  logic [4:0]           shift,
  output logic signed [MW-1:0] m
);
  localparam logic signed [AW-1:0] MAXM = AW'((1 << (MW - 1)) - 1);
  logic signed [AW-1:0] s;
  always_comb begin
    s = u >>> shift;
    if (s > MAXM)       m = MW'(MAXM);
    else if (s < -MAXM) m = MW'(-MAXM);
    else                m = s[MW-1:0];
  end
endmodule
