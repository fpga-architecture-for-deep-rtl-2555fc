// Weight-change generator: dW_i = g * O_i for every input i of a neuron, d(bias) = g.
//
// g is the learning factor times the neuron's delta (C * delta), formed by the
// caller; O_i is the value that fed weight i in the feed-forward of (s_t, a_t):
// the input x_i for a first-layer neuron, the hidden output for the output neuron.
// The bias behaves as a weight on a constant input of one. All N products are formed
// in parallel (Q7.8, truncated, saturated). Combinational.
module dw_gen
  import ql_pkg::*;
#(
  parameter int unsigned N = 20
) (
  input  fx_t g,
  input  fx_t o  [N],
  output fx_t dw [N],
  output fx_t db
);
  always_comb begin
    for (int i = 0; i < N; i++) dw[i] = fx_mul(g, o[i]);
    db = g;
  end
endmodule
