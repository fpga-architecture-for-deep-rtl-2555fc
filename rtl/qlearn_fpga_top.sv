// Q-learning accelerator chip: a single-neuron core and a multilayer-perceptron core.
//
// Both cores learn a neural approximation of the Q-function on line: for every
// Q-value update the host (the rover's controller) presents the state s_t, receives
// the action a_t that the core selects, applies it, and presents the state s_t+1 it
// reached; the core then performs the temporal-difference error and back-propagation
// and writes its weights back. The single-neuron core needs 7A+1 clock cycles per
// update and the MLP core 15A+7, A being the number of actions per state.
//
// The two cores share the run-time configuration (A, alpha, gamma, C), the table of
// action vectors and the reward-table write port (rewards are written into both
// cores' tables); each has its own update handshake (sn_* and mlp_*) and weight
// port, so they run independently and at the same time. Parameters default to the
// larger of the two environments the cores were sized for: 20 network inputs
// (16 state + 4 action values), up to 40 actions per state, 4 hidden neurons and
// 1800 states. A smaller environment uses a subset, with unused inputs at zero.
module qlearn_fpga_top
  import ql_pkg::*;
#(
  parameter int unsigned S_LEN      = 16,
  parameter int unsigned AV_LEN     = 4,
  parameter int unsigned H          = 4,
  parameter int unsigned A_MAX      = 40,
  parameter int unsigned NUM_STATES = 1800,
  localparam int unsigned N_IN = S_LEN + AV_LEN,
  localparam int unsigned SW   = $clog2(NUM_STATES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  ql_cfg_t       cfg,
  input  fx_t           action_tab [A_MAX][AV_LEN],
  input  logic          rw_en,
  input  logic [SW-1:0] rw_addr,
  input  fx_t           rw_data,
  // single-neuron core
  input  logic          sn_start,
  input  fx_t           sn_state_vec [S_LEN],
  output logic          sn_action_valid,
  output aidx_t         sn_action,
  input  logic          sn_explore_en,
  input  aidx_t         sn_explore_action,
  input  logic          sn_next_valid,
  input  fx_t           sn_next_vec [S_LEN],
  input  logic [SW-1:0] sn_next_id,
  output logic          sn_busy,
  output logic          sn_done,
  output fx_t           sn_q_err,
  output fx_t           sn_max_next,
  output fx_t           sn_q_sa,
  output logic          sn_lut_clip,
  input  logic          sn_ww_en,
  input  aidx_t         sn_ww_idx,
  input  fx_t           sn_ww_data,
  output fx_t           sn_w_out [N_IN],
  output fx_t           sn_b_out,
  // multilayer-perceptron core
  input  logic          mlp_start,
  input  fx_t           mlp_state_vec [S_LEN],
  output logic          mlp_action_valid,
  output aidx_t         mlp_action,
  input  logic          mlp_explore_en,
  input  aidx_t         mlp_explore_action,
  input  logic          mlp_next_valid,
  input  fx_t           mlp_next_vec [S_LEN],
  input  logic [SW-1:0] mlp_next_id,
  output logic          mlp_busy,
  output logic          mlp_done,
  output fx_t           mlp_q_err,
  output fx_t           mlp_max_next,
  output fx_t           mlp_q_sa,
  output logic          mlp_lut_clip,
  input  logic          mlp_ww_en,
  input  aidx_t         mlp_ww_neuron,
  input  aidx_t         mlp_ww_idx,
  input  fx_t           mlp_ww_data,
  output fx_t           mlp_w1_out [H][N_IN],
  output fx_t           mlp_b1_out [H],
  output fx_t           mlp_w2_out [H],
  output fx_t           mlp_b2_out
);
  qlearn_perceptron #(
    .S_LEN(S_LEN), .AV_LEN(AV_LEN), .A_MAX(A_MAX), .NUM_STATES(NUM_STATES)
  ) u_sn (
    .clk, .rst_n, .cfg, .action_tab,
    .start(sn_start), .state_vec(sn_state_vec),
    .action_valid(sn_action_valid), .action(sn_action),
    .explore_en(sn_explore_en), .explore_action(sn_explore_action),
    .next_valid(sn_next_valid), .next_vec(sn_next_vec), .next_id(sn_next_id),
    .busy(sn_busy), .done(sn_done), .q_err(sn_q_err), .max_next(sn_max_next),
    .q_sa(sn_q_sa), .lut_clip(sn_lut_clip),
    .rw_en, .rw_addr, .rw_data,
    .ww_en(sn_ww_en), .ww_idx(sn_ww_idx), .ww_data(sn_ww_data),
    .w_out(sn_w_out), .b_out(sn_b_out)
  );

  qlearn_mlp #(
    .S_LEN(S_LEN), .AV_LEN(AV_LEN), .H(H), .A_MAX(A_MAX), .NUM_STATES(NUM_STATES)
  ) u_mlp (
    .clk, .rst_n, .cfg, .action_tab,
    .start(mlp_start), .state_vec(mlp_state_vec),
    .action_valid(mlp_action_valid), .action(mlp_action),
    .explore_en(mlp_explore_en), .explore_action(mlp_explore_action),
    .next_valid(mlp_next_valid), .next_vec(mlp_next_vec), .next_id(mlp_next_id),
    .busy(mlp_busy), .done(mlp_done), .q_err(mlp_q_err), .max_next(mlp_max_next),
    .q_sa(mlp_q_sa), .lut_clip(mlp_lut_clip),
    .rw_en, .rw_addr, .rw_data,
    .ww_en(mlp_ww_en), .ww_neuron(mlp_ww_neuron), .ww_idx(mlp_ww_idx), .ww_data(mlp_ww_data),
    .w1_out(mlp_w1_out), .b1_out(mlp_b1_out), .w2_out(mlp_w2_out), .b2_out(mlp_b2_out)
  );
endmodule
