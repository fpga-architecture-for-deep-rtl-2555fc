// Delta generator: delta = f'(net) * err.
//
// Used for the output neuron with err = Q_error, and for a hidden neuron with err =
// the back-propagated sum of the next layer's deltas times the connecting weights.
// net is the neuron's net saved during the feed-forward of (s_t, a_t); it goes
// through the address translation block into the sigmoid-derivative ROM, and the
// ROM value is multiplied by err (Q7.8, truncated, saturated). Combinational.
module delta_gen
  import ql_pkg::*;
(
  input  fx_t net,
  input  fx_t err,
  output fx_t fprime,
  output fx_t delta,
  output logic clipped   // net lies outside the derivative table
);
  logic [LUT_AW-1:0] addr;

  addr_translate    u_at  (.net(acc_t'(net)), .addr(addr), .clipped(clipped));
  sigmoid_deriv_rom u_rom (.addr(addr), .data(fprime));

  assign delta = fx_mul(fprime, err);
endmodule
