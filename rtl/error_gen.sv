// Error generation: Q_error = alpha * (r + gamma * max_a' Q(s_t+1, a') - Q(s_t, a_t)).
//
// The present-state and next-state Q buffers are read out in parallel, one entry per
// cycle, while scan_en is high; scan_idx is the action index of the entries shown.
// The block keeps a running maximum of the next-state values (reset by the entry of
// index 0) and captures the present-state value of the chosen action a_sel. After the
// last entry, q_err is available combinationally from those registers, the reward and
// the configuration: the maximum is multiplied by the discount factor, the reward is
// added, Q(s_t, a_t) is subtracted and the difference is scaled by alpha. The
// structure (parallel read-out, max calculation, multiply by the discount factor, a
// three-input adder) follows the paper; alpha is applied last, as its Q-error
// equation writes it. Arithmetic is saturating Q7.8.
module error_gen
  import ql_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  scan_en,
  input  aidx_t scan_idx,
  input  fx_t   q_cur,
  input  fx_t   q_next,
  input  aidx_t a_sel,
  input  fx_t   reward,
  input  fx_t   alpha,
  input  fx_t   gamma,
  output fx_t   max_next,
  output fx_t   q_sa,
  output fx_t   target,
  output fx_t   q_err
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_next <= '0;
      q_sa     <= '0;
    end else if (scan_en) begin
      if (scan_idx == '0 || q_next > max_next) max_next <= q_next;
      if (scan_idx == a_sel)                   q_sa     <= q_cur;
    end
  end

  always_comb begin
    target = fx_add(reward, fx_mul(gamma, max_next));
    q_err  = fx_mul(alpha, fx_sub(target, q_sa));
  end
endmodule
