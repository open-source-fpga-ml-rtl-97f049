// multithreshold: quantized activation as used after batch-norm folding.
//
// A batch-norm followed by a uniform quantizer is monotonic in the
// accumulator, so it can be replaced by a sorted list of NT = 2^ABITS - 1
// integer thresholds per output channel: the activation is the number of
// thresholds that the accumulator reaches (acc >= T[i]). Following the paper,
// this is how folded BN + ReLU + quantization is realised in the FINN-style
// layers; the comparison "greater or equal" and unsigned outputs are this
// design's choice. Purely combinational: out is valid in the same cycle as acc
// and thr.
module multithreshold #(
  parameter int unsigned ACC_W = 24,
  parameter int unsigned ABITS = 3,
  parameter int unsigned NT    = (1 << ABITS) - 1
) (
  input  logic signed [ACC_W-1:0] acc,
  input  logic signed [ACC_W-1:0] thr [NT],
  output logic        [ABITS-1:0] out
);
  always_comb begin
    logic [ABITS:0] n;
    n = '0;
    for (int i = 0; i < int'(NT); i++) begin
      if (acc >= thr[i]) n = n + 1'b1;
    end
    out = n[ABITS-1:0];
  end
endmodule
