// Multilayer-perceptron Q-learning accelerator (N_IN inputs, H hidden neurons, one
// output neuron giving Q(s, a)).
//
// It runs the same state flow as the single-neuron core, with the MLP feed-forward
// (mlp_ff, 7 cycles per action) and a back-propagation unit that has a delta
// generator per neuron and a weight-change generator per neuron working in parallel:
//   BP0  Q_error = alpha (r + gamma max_a' Q(s_t+1, a') - Q(s_t, a_t))  (registered)
//   BP1  output delta      d_o   = f'(net_o) Q_error
//   BP2  back-propagated   e_h   = d_o W2[h]                   for every hidden h
//   BP3  hidden deltas     d_h   = f'(net_h) e_h
//   BP4  scaled deltas     g     = C d
//   BP5  weight changes    dW2[h] = g_o O_h, dW1[h][i] = g_h x_i, d(bias) = g
//   BP6  every weight and bias is written back (W += dW)
// All steps use the weights as they were before the update. The present-state buffer
// keeps, for every action, Q, the output net and the hidden outputs and nets, so the
// values of (s_t, a_t) are at hand without a second feed-forward. One update keeps the
// core busy for 7A + 7A + A + 7 = 15A+7 cycles.
//
// The handshake is that of qlearn_perceptron. Host weight writes select the neuron
// with ww_neuron (0..H-1 hidden, H the output neuron) and the weight with ww_idx
// (the last index is the bias). w1_out/b1_out/w2_out/b2_out show the weights.
module qlearn_mlp
  import ql_pkg::*;
#(
  parameter int unsigned S_LEN      = 16,
  parameter int unsigned AV_LEN     = 4,
  parameter int unsigned H          = 4,
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
  output logic          lut_clip,
  input  logic          rw_en,
  input  logic [SW-1:0] rw_addr,
  input  fx_t           rw_data,
  input  logic          ww_en,
  input  aidx_t         ww_neuron,
  input  aidx_t         ww_idx,
  input  fx_t           ww_data,
  output fx_t           w1_out [H][N_IN],
  output fx_t           b1_out [H],
  output fx_t           w2_out [H],
  output fx_t           b2_out
);
  // Context kept per action of s_t in the present-state buffer.
  typedef struct packed {
    fx_t [H-1:0] h_out;
    fx_t [H-1:0] h_net;
    fx_t         net_o;
    fx_t         q;
  } ctx_t;

  phase_e     phase;
  logic [2:0] stage;
  aidx_t      aidx, n_act, a_sel, a_t, best_idx, act_idx;
  logic       latch_cur, latch_next;

  fx_t           cur_r [S_LEN];
  fx_t           nxt_r [S_LEN];
  logic [SW-1:0] nid_r;
  ctx_t          ctx_in, ctx_sa, cur_dout;
  fx_t           next_dout;

  fx_t  x [N_IN];
  fx_t  h_out [H];
  fx_t  h_net [H];
  fx_t  q_act, net_o, best_q, reward, target, q_err_c;
  logic clip_ff;
  logic ff, st [7], push_cur, push_next, scan, bp;

  // back-propagation pipeline
  fx_t  d_o_c, fp_o, d_o, g_o, db2_c, db2;
  fx_t  e_h [H];
  fx_t  d_h_c [H];
  fx_t  fp_h [H];
  fx_t  d_h [H];
  fx_t  g_h [H];
  fx_t  o_sa [H];
  fx_t  dw2_c [H];
  fx_t  dw2 [H];
  fx_t  dw1_c [H][N_IN];
  fx_t  dw1 [H][N_IN];
  fx_t  db1_c [H];
  fx_t  db1 [H];
  logic clip_o, clip_h [H];

  logic [$clog2(A_MAX+1)-1:0] cnt_cur, cnt_next;
  logic e_cur, f_cur, e_next, f_next;

  ql_ctrl #(.A_MAX(A_MAX), .FF_STAGES(7), .BP_STAGES(7)) u_ctrl (
    .clk, .rst_n, .start, .next_valid, .num_actions(cfg.num_actions),
    .phase, .stage, .aidx, .n_act, .latch_cur, .latch_next,
    .action_valid, .busy, .done
  );

  assign ff = (phase == PH_FF_CUR) || (phase == PH_FF_NEXT);
  always_comb for (int s = 0; s < 7; s++) st[s] = ff && (stage == 3'(s));
  assign push_cur  = st[6] && (phase == PH_FF_CUR);
  assign push_next = st[6] && (phase == PH_FF_NEXT);
  assign scan      = (phase == PH_SCAN);
  assign bp        = (phase == PH_BP);

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
      ctx_sa   <= '0;
      lut_clip <= 1'b0;
    end else begin
      lut_clip <= clip_ff;
      if (latch_cur) cur_r <= state_vec;
      if (latch_next) begin
        nxt_r <= next_vec;
        nid_r <= next_id;
        a_t   <= a_sel;
      end
      if (scan && aidx == a_t) ctx_sa <= cur_dout;
    end
  end

  // ---------------------------------------------------------------- weights
  for (genvar h = 0; h < H; h++) begin : g_w1
    weight_buffer #(.N(N_IN)) u_wb (
      .clk, .rst_n,
      .wr_en(ww_en && ww_neuron == aidx_t'(h)), .wr_idx(ww_idx), .wr_data(ww_data),
      .upd_en(bp && stage == 3'd6), .dw(dw1[h]), .db(db1[h]),
      .w(w1_out[h]), .b(b1_out[h])
    );
  end
  weight_buffer #(.N(H)) u_w2 (
    .clk, .rst_n,
    .wr_en(ww_en && ww_neuron == aidx_t'(H)), .wr_idx(ww_idx), .wr_data(ww_data),
    .upd_en(bp && stage == 3'd6), .dw(dw2), .db(db2),
    .w(w2_out), .b(b2_out)
  );

  // ---------------------------------------------------------------- feed-forward
  mlp_ff #(.N_IN(N_IN), .H(H)) u_ff (
    .clk, .rst_n,
    .l1_mul(st[0]), .l1_acc(st[1]), .l1_act(st[2]), .buf_en(st[3]),
    .l2_mul(st[4]), .l2_acc(st[5]), .l2_act(st[6]),
    .x, .w1(w1_out), .b1(b1_out), .w2(w2_out), .b2(b2_out),
    .h_out, .h_net, .q_act, .net_o, .clipped(clip_ff)
  );

  always_comb begin
    for (int h = 0; h < H; h++) begin
      ctx_in.h_out[h] = h_out[h];
      ctx_in.h_net[h] = h_net[h];
    end
    ctx_in.net_o = net_o;
    ctx_in.q     = q_act;
  end

  q_fifo #(.DEPTH(A_MAX), .WIDTH($bits(ctx_t))) u_qcur (
    .clk, .rst_n, .flush(latch_cur), .push(push_cur), .din(ctx_in),
    .pop(scan), .dout(cur_dout), .count(cnt_cur), .empty(e_cur), .full(f_cur)
  );

  q_fifo #(.DEPTH(A_MAX), .WIDTH(DW)) u_qnext (
    .clk, .rst_n, .flush(latch_cur), .push(push_next), .din(q_act),
    .pop(scan), .dout(next_dout), .count(cnt_next), .empty(e_next), .full(f_next)
  );

  action_select u_sel (
    .clk, .rst_n, .clr(latch_cur), .valid(push_cur), .idx(aidx), .q(q_act),
    .explore_en, .explore_action, .best_idx, .best_q, .a_sel
  );
  assign action = a_sel;

  reward_rom #(.NUM_STATES(NUM_STATES)) u_reward (
    .clk, .wr_en(rw_en), .wr_addr(rw_addr), .wr_data(rw_data),
    .rd_addr(nid_r), .rd_data(reward)
  );

  error_gen u_err (
    .clk, .rst_n, .scan_en(scan), .scan_idx(aidx),
    .q_cur(cur_dout.q), .q_next(next_dout), .a_sel(a_t),
    .reward, .alpha(cfg.alpha), .gamma(cfg.gamma),
    .max_next, .q_sa, .target, .q_err(q_err_c)
  );

  // ---------------------------------------------------------------- back-propagation
  delta_gen u_dout (.net(ctx_sa.net_o), .err(q_err), .fprime(fp_o), .delta(d_o_c), .clipped(clip_o));
  dw_gen #(.N(H)) u_dw2 (.g(g_o), .o(o_sa), .dw(dw2_c), .db(db2_c));
  for (genvar h = 0; h < H; h++) begin : g_bp
    assign o_sa[h] = ctx_sa.h_out[h];
    delta_gen u_dh (.net(ctx_sa.h_net[h]), .err(e_h[h]), .fprime(fp_h[h]), .delta(d_h_c[h]),
                    .clipped(clip_h[h]));
    dw_gen #(.N(N_IN)) u_dw1 (.g(g_h[h]), .o(x), .dw(dw1_c[h]), .db(db1_c[h]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_err <= '0;
      d_o   <= '0;
      g_o   <= '0;
      db2   <= '0;
      for (int h = 0; h < H; h++) begin
        e_h[h] <= '0;
        d_h[h] <= '0;
        g_h[h] <= '0;
        dw2[h] <= '0;
        db1[h] <= '0;
        for (int i = 0; i < N_IN; i++) dw1[h][i] <= '0;
      end
    end else if (bp) begin
      unique case (stage)
        3'd0: q_err <= q_err_c;
        3'd1: d_o <= d_o_c;
        3'd2: for (int h = 0; h < H; h++) e_h[h] <= fx_mul(d_o, w2_out[h]);
        3'd3: d_h <= d_h_c;
        3'd4: begin
          g_o <= fx_mul(cfg.c_lr, d_o);
          for (int h = 0; h < H; h++) g_h[h] <= fx_mul(cfg.c_lr, d_h[h]);
        end
        3'd5: begin
          dw2 <= dw2_c;
          db2 <= db2_c;
          dw1 <= dw1_c;
          db1 <= db1_c;
        end
        default: ;
      endcase
    end
  end
endmodule
