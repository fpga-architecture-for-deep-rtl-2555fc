// Feed-forward of the multilayer perceptron: N_IN inputs, H hidden neurons, one
// output neuron whose activation is the Q-value.
//
// The H hidden neurons ("layer 1-2") evaluate in parallel, each with N_IN parallel
// multipliers; their outputs and nets are then copied into the layer buffer, which
// feeds the output neuron ("layer 2-3", H multipliers) and is kept for
// back-propagation. One evaluation takes seven cycles, each started by a strobe:
//   l1_mul, l1_acc, l1_act : hidden layer multiply, accumulate, sigmoid ROM;
//   buf_en                 : layer buffer <= hidden outputs and saturated nets;
//   l2_mul, l2_acc, l2_act : output neuron multiply, accumulate, sigmoid ROM.
// q_act and net_o are valid combinationally in the l2_act cycle. The layer structure,
// the parallel neurons and the buffer between layers follow the paper; the one-cycle
// buffer stage is this design's choice.
module mlp_ff
  import ql_pkg::*;
#(
  parameter int unsigned N_IN = 20,
  parameter int unsigned H    = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic l1_mul,
  input  logic l1_acc,
  input  logic l1_act,
  input  logic buf_en,
  input  logic l2_mul,
  input  logic l2_acc,
  input  logic l2_act,
  input  fx_t  x  [N_IN],
  input  fx_t  w1 [H][N_IN],
  input  fx_t  b1 [H],
  input  fx_t  w2 [H],
  input  fx_t  b2,
  output fx_t  h_out [H],   // layer buffer: hidden activations
  output fx_t  h_net [H],   // layer buffer: hidden nets (saturated)
  output fx_t  q_act,       // output activation (combinational, l2_act cycle)
  output fx_t  net_o,       // output net (saturated)
  output logic clipped      // some net of this evaluation lies outside the table
);
  fx_t  hy [H];
  fx_t  hy_act [H];
  fx_t  hn [H];
  acc_t hacc [H];
  logic hclip [H];
  fx_t  oy;
  acc_t oacc;
  logic oclip;
  logic any_hclip;

  for (genvar h = 0; h < H; h++) begin : g_hidden
    neuron #(.N(N_IN)) u_n (
      .clk, .rst_n, .mul_en(l1_mul), .acc_en(l1_acc), .act_en(l1_act),
      .x, .w(w1[h]), .bias(b1[h]),
      .y_act(hy_act[h]), .net_fx(hn[h]), .y(hy[h]), .net(hacc[h]), .clipped(hclip[h])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < H; h++) begin
        h_out[h] <= '0;
        h_net[h] <= '0;
      end
    end else if (buf_en) begin
      h_out <= hy;
      h_net <= hn;
    end
  end

  neuron #(.N(H)) u_out (
    .clk, .rst_n, .mul_en(l2_mul), .acc_en(l2_acc), .act_en(l2_act),
    .x(h_out), .w(w2), .bias(b2),
    .y_act(q_act), .net_fx(net_o), .y(oy), .net(oacc), .clipped(oclip)
  );

  always_comb begin
    any_hclip = 1'b0;
    for (int h = 0; h < H; h++) any_hclip |= hclip[h];
  end
  assign clipped = (l1_act && any_hclip) || (l2_act && oclip);
endmodule
