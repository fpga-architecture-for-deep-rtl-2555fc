// Single-neuron Q-learning accelerator.
//
// The Q-function is approximated by one sigmoid neuron whose input is the state
// vector followed by the action vector of the action being valued:
// Q(s, a) = f(w . [s, act(a)] + b). One Q-value update runs the paper's state flow:
//   1. feed-forward of all A actions of s_t, 3 cycles each (multiply, accumulate,
//      sigmoid ROM); each Q-value and its net go into the present-state buffer and
//      the action selector tracks the best one;
//   2. the chosen action a_t is offered on `action` with action_valid; the host
//      applies it and answers with next_valid, the next state vector and its id;
//   3. feed-forward of all A actions of s_t+1 into the next-state buffer;
//   4. both buffers are read out in parallel (A cycles): the error generator finds
//      max Q(s_t+1, .) and picks Q(s_t, a_t) and its net;
//   5. in one cycle: Q_error = alpha (r + gamma max - Q), delta = f'(net) Q_error,
//      dW_i = C delta x_i, d(bias) = C delta, and all weights are written back.
// The core is busy for 3A + 3A + A + 1 = 7A+1 cycles per update, the cycle count the
// paper gives for its fixed-point single-neuron design; step 5 is one long
// combinational path (derivative ROM and three multipliers in series) so that the
// count holds. The reward of s_t+1 comes from a host-loaded table indexed by next_id.
//
// Interface: the host loads weights (ww_*, index S_LEN+AV_LEN is the bias) and
// rewards (rw_*), sets cfg and action_tab (one AV_LEN-element vector per action), then
// for every update pulses start with state_vec, waits for action_valid, and then
// pulses next_valid for one cycle with next_vec/next_id (it is sampled while
// action_valid is high; explore_en/explore_action are taken in the same cycle). done
// pulses once the weights are written; q_err, max_next and q_sa then show the values
// used. Inputs unused by a smaller environment are held at zero: a zero input never
// contributes to Q nor changes its weight.
module qlearn_perceptron
  import ql_pkg::*;
#(
  parameter int unsigned S_LEN      = 16,
  parameter int unsigned AV_LEN     = 4,
  parameter int unsigned A_MAX      = 40,
  parameter int unsigned NUM_STATES = 1800,
  localparam int unsigned N_IN = S_LEN + AV_LEN,
  localparam int unsigned SW   = $clog2(NUM_STATES),
  localparam int unsigned TW   = (A_MAX > 1) ? $clog2(A_MAX) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  ql_cfg_t       cfg,
  input  fx_t           action_tab [A_MAX][AV_LEN],
  // update handshake
  input  logic          start,
  input  fx_t           state_vec [S_LEN],
  output logic          action_valid,
  output aidx_t         action,
  input  logic          explore_en,
  input  aidx_t         explore_action,
  input  logic          next_valid,
  input  fx_t           next_vec [S_LEN],
  input  logic [SW-1:0] next_id,
  output logic          busy,
  output logic          done,
  output fx_t           q_err,
  output fx_t           max_next,
  output fx_t           q_sa,
  output logic          lut_clip,     // a feed-forward net fell outside the sigmoid table
  // host access
  input  logic          rw_en,
  input  logic [SW-1:0] rw_addr,
  input  fx_t           rw_data,
  input  logic          ww_en,
  input  aidx_t         ww_idx,
  input  fx_t           ww_data,
  output fx_t           w_out [N_IN],
  output fx_t           b_out
);
  phase_e     phase;
  logic [2:0] stage;
  aidx_t      aidx, n_act, a_sel, a_t, best_idx, act_idx;
  logic       latch_cur, latch_next;

  fx_t           cur_r [S_LEN];
  fx_t           nxt_r [S_LEN];
  logic [SW-1:0] nid_r;
  fx_t           net_sa;

  fx_t  x [N_IN];
  fx_t  y_act, net_fx, y_q, best_q, reward, target, q_err_c, fprime, delta, g, db;
  fx_t  dw [N_IN];
  acc_t net;
  logic clip_ff, clip_bp;
  logic ff, mul_en, acc_en, act_en, push_cur, push_next, scan, bp;

  logic [2*DW-1:0] cur_dout;
  logic [DW-1:0]   next_dout;
  logic [$clog2(A_MAX+1)-1:0] cnt_cur, cnt_next;
  logic e_cur, f_cur, e_next, f_next;

  ql_ctrl #(.A_MAX(A_MAX), .FF_STAGES(3), .BP_STAGES(1)) u_ctrl (
    .clk, .rst_n, .start, .next_valid, .num_actions(cfg.num_actions),
    .phase, .stage, .aidx, .n_act, .latch_cur, .latch_next,
    .action_valid, .busy, .done
  );

  assign ff        = (phase == PH_FF_CUR) || (phase == PH_FF_NEXT);
  assign mul_en    = ff && (stage == 3'd0);
  assign acc_en    = ff && (stage == 3'd1);
  assign act_en    = ff && (stage == 3'd2);
  assign push_cur  = act_en && (phase == PH_FF_CUR);
  assign push_next = act_en && (phase == PH_FF_NEXT);
  assign scan      = (phase == PH_SCAN);
  assign bp        = (phase == PH_BP);

  // Input vector: state followed by the action vector of the action in hand.
  assign act_idx = bp ? a_t : aidx;
  always_comb begin
    for (int i = 0; i < S_LEN; i++)
      x[i] = (phase == PH_FF_NEXT) ? nxt_r[i] : cur_r[i];
    for (int i = 0; i < AV_LEN; i++)
      x[S_LEN+i] = action_tab[act_idx[TW-1:0]][i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < S_LEN; i++) begin
        cur_r[i] <= '0;
        nxt_r[i] <= '0;
      end
      nid_r    <= '0;
      a_t      <= '0;
      net_sa   <= '0;
      q_err    <= '0;
      lut_clip <= 1'b0;
    end else begin
      lut_clip <= act_en && clip_ff;
      if (latch_cur) cur_r <= state_vec;
      if (latch_next) begin
        nxt_r <= next_vec;
        nid_r <= next_id;
        a_t   <= a_sel;
      end
      if (scan && aidx == a_t) net_sa <= fx_t'(cur_dout[2*DW-1:DW]);
      if (bp) q_err <= q_err_c;
    end
  end

  weight_buffer #(.N(N_IN)) u_wbuf (
    .clk, .rst_n, .wr_en(ww_en), .wr_idx(ww_idx), .wr_data(ww_data),
    .upd_en(bp), .dw, .db, .w(w_out), .b(b_out)
  );

  neuron #(.N(N_IN)) u_neuron (
    .clk, .rst_n, .mul_en, .acc_en, .act_en, .x, .w(w_out), .bias(b_out),
    .y_act, .net_fx, .y(y_q), .net, .clipped(clip_ff)
  );

  q_fifo #(.DEPTH(A_MAX), .WIDTH(2*DW)) u_qcur (
    .clk, .rst_n, .flush(latch_cur), .push(push_cur), .din({net_fx, y_act}),
    .pop(scan), .dout(cur_dout), .count(cnt_cur), .empty(e_cur), .full(f_cur)
  );

  q_fifo #(.DEPTH(A_MAX), .WIDTH(DW)) u_qnext (
    .clk, .rst_n, .flush(latch_cur), .push(push_next), .din(y_act),
    .pop(scan), .dout(next_dout), .count(cnt_next), .empty(e_next), .full(f_next)
  );

  action_select u_sel (
    .clk, .rst_n, .clr(latch_cur), .valid(push_cur), .idx(aidx), .q(y_act),
    .explore_en, .explore_action, .best_idx, .best_q, .a_sel
  );
  assign action = a_sel;

  reward_rom #(.NUM_STATES(NUM_STATES)) u_reward (
    .clk, .wr_en(rw_en), .wr_addr(rw_addr), .wr_data(rw_data),
    .rd_addr(nid_r), .rd_data(reward)
  );

  error_gen u_err (
    .clk, .rst_n, .scan_en(scan), .scan_idx(aidx),
    .q_cur(fx_t'(cur_dout[DW-1:0])), .q_next(fx_t'(next_dout)), .a_sel(a_t),
    .reward, .alpha(cfg.alpha), .gamma(cfg.gamma),
    .max_next, .q_sa, .target, .q_err(q_err_c)
  );

  // Back-propagation: delta = f'(net) Q_error, g = C delta, dW = g x.
  delta_gen u_delta (.net(net_sa), .err(q_err_c), .fprime, .delta, .clipped(clip_bp));
  assign g = fx_mul(cfg.c_lr, delta);
  dw_gen #(.N(N_IN)) u_dw (.g, .o(x), .dw, .db);
endmodule
