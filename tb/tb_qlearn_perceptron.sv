// End-to-end test of the single-neuron accelerator at its default size (20 inputs,
// up to 40 actions, 1800 states). Loads random weights and rewards, then runs
// Q-value updates with A = 9, 40 and random values, greedy and exploring actions and
// random environment delays. After every update it checks the offered action,
// Q(s_t,a_t), max Q(s_t+1,.), Q_error and every weight against the reference model,
// and that the core was busy exactly 7A+1 cycles.
module tb_qlearn_perceptron;
  import ql_pkg::*;
  import ql_ref_pkg::*;
  localparam int S_LEN = 16, AV_LEN = 4, A_MAX = 40, NS = 1800, N = S_LEN + AV_LEN;

  logic clk = 0, rst_n = 0;
  ql_cfg_t cfg;
  fx_t action_tab [A_MAX][AV_LEN];
  logic start = 0, next_valid = 0, explore_en = 0, rw_en = 0, ww_en = 0;
  fx_t state_vec [S_LEN];
  fx_t next_vec [S_LEN];
  aidx_t explore_action, action, ww_idx;
  logic [10:0] next_id, rw_addr;
  fx_t rw_data, ww_data, q_err, max_next, q_sa, b_out;
  fx_t w_out [N];
  logic action_valid, busy, done, lut_clip;
  int checks = 0, failures = 0;

  qlearn_perceptron dut (
    .clk, .rst_n, .cfg, .action_tab, .start, .state_vec, .action_valid, .action,
    .explore_en, .explore_action, .next_valid, .next_vec, .next_id, .busy, .done,
    .q_err, .max_next, .q_sa, .lut_clip, .rw_en, .rw_addr, .rw_data, .ww_en, .ww_idx,
    .ww_data, .w_out, .b_out);

  always #5 clk = ~clk;

  int busy_cnt = 0;
  always @(posedge clk) if (busy) busy_cnt++;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d @%0t", what, got, exp, $time);
    end
  endtask

  int mw [];
  int rewards [NS];
  int acts [];

  initial begin
    int cur [], nxt [], na, ex, a_t, qe, mx, qa, nid, dly;
    mw = new[N + 1];
    acts = new[A_MAX * AV_LEN];
    cur = new[S_LEN]; nxt = new[S_LEN];
    cfg.alpha = 16'sd128; cfg.gamma = 16'sd230; cfg.c_lr = 16'sd64; cfg.num_actions = 9;
    for (int a = 0; a < A_MAX; a++)
      for (int i = 0; i < AV_LEN; i++) begin
        acts[a * AV_LEN + i] = int'($urandom_range(512)) - 256;
        action_tab[a][i] = fx_t'(acts[a * AV_LEN + i]);
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i <= N; i++) begin
      @(negedge clk);
      mw[i] = int'($urandom_range(1024)) - 512;
      ww_en = 1; ww_idx = aidx_t'(i); ww_data = fx_t'(mw[i]);
    end
    for (int s = 0; s < NS; s++) begin
      @(negedge clk);
      ww_en = 0;
      rewards[s] = int'($urandom_range(512)) - 256;
      rw_en = 1; rw_addr = 11'(s); rw_data = fx_t'(rewards[s]);
    end
    @(negedge clk) rw_en = 0;
    for (int i = 0; i < S_LEN; i++) cur[i] = int'($urandom_range(512)) - 256;

    for (int t = 0; t < 30; t++) begin
      na = (t == 0) ? 9 : (t == 1) ? 40 : (t == 2) ? 1 : 1 + $urandom_range(39);
      ex = ($urandom_range(2) == 0) ? int'($urandom_range(na - 1)) : -1;
      nid = $urandom_range(NS - 1);
      for (int i = 0; i < S_LEN; i++) nxt[i] = int'($urandom_range(512)) - 256;
      cfg.num_actions = aidx_t'(na);
      for (int i = 0; i < S_LEN; i++) begin
        state_vec[i] = fx_t'(cur[i]);
        next_vec[i] = fx_t'(nxt[i]);
      end
      rpcpt_update(mw, cur, nxt, acts, AV_LEN, na, rewards[nid], int'(cfg.alpha),
                   int'(cfg.gamma), int'(cfg.c_lr), ex, a_t, qe, mx, qa);
      busy_cnt = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!action_valid) @(negedge clk);
      explore_en = (ex >= 0);
      explore_action = aidx_t'(ex < 0 ? 0 : ex);
      #1 chk("action", action, a_t);
      dly = $urandom_range(5);
      repeat (dly) @(negedge clk);
      next_valid = 1; next_id = 11'(nid);
      @(negedge clk) next_valid = 0;
      explore_en = 0;
      while (!done) @(negedge clk);
      chk("busy cycles 7A+1", busy_cnt, 7 * na + 1);
      chk("q_sa", q_sa, qa);
      chk("max_next", max_next, mx);
      chk("q_err", q_err, qe);
      for (int i = 0; i < N; i++) chk("w", w_out[i], mw[i]);
      chk("b", b_out, mw[N]);
      cur = nxt;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
