// Feed-forward neuron: net = sum_i x_i * w_i + bias, y = f(net).
//
// N multipliers work in parallel, one per input, each fed by its own weight; their
// products are summed together with the bias by the accumulator, and the sum goes
// through the address translation block into the sigmoid ROM. One evaluation takes
// three clock cycles, each started by a strobe from the controller:
//   mul_en : the N full-precision products are registered;
//   acc_en : net = (sum of products >>> 8) + bias is registered (Q23.8);
//   act_en : the ROM output y_act, valid combinationally during this cycle, is
//            registered into y together with the saturated net.
// y_act and net_fx are valid during the act_en cycle, so a consumer can store them
// in that same cycle. Multipliers, accumulator and sigmoid ROM follow the paper's
// feed-forward schematic; the three-stage split and the fixed-point format are this
// design's choices.
module neuron
  import ql_pkg::*;
#(
  parameter int unsigned N = 20
) (
  input  logic clk,
  input  logic rst_n,
  input  logic mul_en,
  input  logic acc_en,
  input  logic act_en,
  input  fx_t  x [N],
  input  fx_t  w [N],
  input  fx_t  bias,
  output fx_t  y_act,    // activation of the registered net (combinational)
  output fx_t  net_fx,   // registered net saturated to Q7.8 (combinational)
  output fx_t  y,        // activation registered at act_en
  output acc_t net,      // accumulator register
  output logic clipped   // net lies outside the sigmoid table
);
  logic signed [2*DW-1:0] prod [N];
  logic signed [47:0]     sum;
  logic [LUT_AW-1:0]      addr;

  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++) sum += 48'(prod[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) prod[i] <= '0;
      net <= '0;
      y   <= '0;
    end else begin
      if (mul_en)
        for (int i = 0; i < N; i++) prod[i] <= x[i] * w[i];
      if (acc_en) net <= acc_t'((sum >>> FW) + 48'(bias));
      if (act_en) y <= y_act;
    end
  end

  addr_translate u_at (.net(net), .addr(addr), .clipped(clipped));
  sigmoid_rom    u_rom (.addr(addr), .data(y_act));

  assign net_fx = fx_sat(64'(net));
endmodule
