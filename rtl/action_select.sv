// Action selection policy.
//
// While the feed-forward produces the Q-values of the present state, one per cycle
// flagged by valid (with its action index idx), this block keeps the index and value
// of the largest one seen since clr (a strictly larger value replaces it, so the
// lowest index wins a tie). The chosen action a_sel is that greedy arg-max, unless
// explore_en is high, in which case explore_action is taken instead; a host can
// thereby run an epsilon-greedy or any other exploring policy. The paper leaves the
// policy open ("one of the action selection policies"); greedy with an external
// override is this design's choice. a_sel is combinational from the registers and
// the two explore inputs.
module action_select
  import ql_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  valid,
  input  aidx_t idx,
  input  fx_t   q,
  input  logic  explore_en,
  input  aidx_t explore_action,
  output aidx_t best_idx,
  output fx_t   best_q,
  output aidx_t a_sel
);
  logic have;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have     <= 1'b0;
      best_idx <= '0;
      best_q   <= '0;
    end else if (clr) begin
      have     <= 1'b0;
      best_idx <= '0;
      best_q   <= '0;
    end else if (valid && (!have || q > best_q)) begin
      have     <= 1'b1;
      best_idx <= idx;
      best_q   <= q;
    end
  end

  assign a_sel = explore_en ? explore_action : best_idx;
endmodule
