// vector_mul: one dot product of the graph convolution's linear layer.
//
// y = bias + sum_i (w_i - W_ZP) * x_i
// Weights are kept unsigned with a zero point W_ZP (asymmetric
// quantisation) and inputs are unsigned with zero point 0: the inputs are
// ReLU outputs, neighbour averages or PN values, none of them negative.
// Batch normalisation is folded into w and bias beforehand. The published
// design runs four of these per layer in parallel (two edges times two
// output elements); each here does a whole row in one combinational step.
// The zero points and the signed accumulator width ACC_W are this design's
// choice.
module vector_mul #(
  parameter int unsigned N      = 66,
  parameter int unsigned X_W    = 8,
  parameter int unsigned W_W    = 8,
  parameter int unsigned W_ZP   = 128,
  parameter int unsigned BIAS_W = 32,
  parameter int unsigned ACC_W  = 40
) (
  input  logic        [N-1:0][W_W-1:0] w,
  input  logic        [N-1:0][X_W-1:0] x,
  input  logic signed [BIAS_W-1:0]     bias,
  output logic signed [ACC_W-1:0]      y
);
  always_comb begin
    logic signed [ACC_W-1:0] acc;
    acc = ACC_W'(bias);
    for (int i = 0; i < N; i++) begin
      acc += (ACC_W'(signed'({1'b0, w[i]})) - ACC_W'(W_ZP)) * ACC_W'(signed'({1'b0, x[i]}));
    end
    y = acc;
  end
endmodule
