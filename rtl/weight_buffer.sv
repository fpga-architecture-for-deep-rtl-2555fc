// Weight and bias store of one neuron, with one update adder per weight.
//
// The N weights and the bias are held in registers and are all visible at once on
// w and b, so every multiplier of the neuron gets its weight in the same cycle.
// A back-propagation update (upd_en) adds dw[i] to every weight and db to the bias
// in one cycle, with saturation (W_new = W_prev + dW). The host initialises the
// store through the wr_* port: index 0..N-1 selects a weight, index N the bias;
// a host write takes precedence over an update in the same cycle. Reset clears
// everything to zero. The paper reads weights from a buffer, updates them with one
// adder per weight and writes them back; keeping them in a register array instead
// of a shifting FIFO is this design's choice.
module weight_buffer
  import ql_pkg::*;
#(
  parameter int unsigned N = 20
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_en,
  input  aidx_t wr_idx,
  input  fx_t   wr_data,
  input  logic  upd_en,
  input  fx_t   dw [N],
  input  fx_t   db,
  output fx_t   w [N],
  output fx_t   b
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) w[i] <= '0;
      b <= '0;
    end else if (wr_en) begin
      for (int i = 0; i < N; i++)
        if (wr_idx == aidx_t'(i)) w[i] <= wr_data;
      if (wr_idx == aidx_t'(N)) b <= wr_data;
    end else if (upd_en) begin
      for (int i = 0; i < N; i++) w[i] <= fx_add(w[i], dw[i]);
      b <= fx_add(b, db);
    end
  end
endmodule
