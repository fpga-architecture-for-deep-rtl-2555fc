// End-to-end test of the accelerator chip at its default parameters.
//
// Part 1, simple environment: a rover on a 30 x 60 grid (1800 states) must reach a
// goal cell and avoid hazard cells. State vector: x, y and the offset to the goal
// (4 values, the remaining 12 state inputs stay zero); 9 actions, each a 2-element
// move vector (dx, dy) in {-1, 0, 1}^2. Reward: +1 at the goal, -0.5 on a hazard,
// -1/64 elsewhere. Both cores learn at the same time, each taking its own
// epsilon-greedy trajectory (exploration drawn here and passed through explore_*).
// Part 2, complex-sized run: 40 actions and all 20 inputs with random vectors and
// larger weights, so nets run past the activation tables' range.
// Every update of both cores is checked against the reference model: chosen action,
// Q(s_t,a_t), max Q(s_t+1,.), Q_error, every weight, and the busy cycle counts 7A+1
// and 15A+7. The test also counts the mechanisms it must have exercised (greedy and
// exploring selections, waits for the environment, both cores busy at once, weight
// changes, table clipping) and fails if one never occurred.
module tb_qlearn_fpga_top;
  import ql_pkg::*;
  import ql_ref_pkg::*;
  localparam int S_LEN = 16, AV_LEN = 4, H = 4, A_MAX = 40, NS = 1800, N = S_LEN + AV_LEN;
  localparam int GW = 30, GH = 60;

  logic clk = 0, rst_n = 0;
  ql_cfg_t cfg;
  fx_t action_tab [A_MAX][AV_LEN];
  logic rw_en = 0;
  logic [10:0] rw_addr;
  fx_t rw_data;

  logic sn_start = 0, sn_next_valid = 0, sn_explore_en = 0, sn_ww_en = 0;
  fx_t sn_state_vec [S_LEN];
  fx_t sn_next_vec [S_LEN];
  aidx_t sn_explore_action, sn_action, sn_ww_idx;
  logic [10:0] sn_next_id;
  logic sn_action_valid, sn_busy, sn_done, sn_lut_clip;
  fx_t sn_q_err, sn_max_next, sn_q_sa, sn_ww_data, sn_b_out;
  fx_t sn_w_out [N];

  logic mlp_start = 0, mlp_next_valid = 0, mlp_explore_en = 0, mlp_ww_en = 0;
  fx_t mlp_state_vec [S_LEN];
  fx_t mlp_next_vec [S_LEN];
  aidx_t mlp_explore_action, mlp_action, mlp_ww_idx, mlp_ww_neuron;
  logic [10:0] mlp_next_id;
  logic mlp_action_valid, mlp_busy, mlp_done, mlp_lut_clip;
  fx_t mlp_q_err, mlp_max_next, mlp_q_sa, mlp_ww_data, mlp_b2_out;
  fx_t mlp_w1_out [H][N];
  fx_t mlp_b1_out [H];
  fx_t mlp_w2_out [H];

  qlearn_fpga_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d @%0t", what, got, exp, $time);
    end
  endtask

  // mechanism counters
  int n_greedy = 0, n_explore = 0, n_wait = 0, n_both_busy = 0, n_wchange = 0, n_clip = 0;
  int n_updates = 0, n_goal = 0;
  int sn_busy_cnt = 0, mlp_busy_cnt = 0;
  always @(posedge clk) begin
    if (sn_busy) sn_busy_cnt++;
    if (mlp_busy) mlp_busy_cnt++;
    if (sn_busy && mlp_busy) n_both_busy++;
    if (sn_lut_clip || mlp_lut_clip) n_clip++;
  end

  // reference state
  int rewards [NS];
  int acts [];
  int sw [];
  int mw1 [];
  int mw2 [];

  function automatic int gid(input int x, input int y);
    return y * GW + x;
  endfunction

  // grid state vector in Q7.8: x/8, y/8, (goal-x)/8, (goal-y)/8
  function automatic void gvec(input int x, input int y, output int v[]);
    v = new[S_LEN];
    foreach (v[i]) v[i] = 0;
    v[0] = x * 32; v[1] = y * 32; v[2] = (20 - x) * 32; v[3] = (45 - y) * 32;
  endfunction

  function automatic void gmove(input int x, input int y, input int a, output int nx, output int ny);
    nx = x + (a % 3) - 1; ny = y + (a / 3) - 1;
    if (nx < 0) nx = 0;
    if (nx >= GW) nx = GW - 1;
    if (ny < 0) ny = 0;
    if (ny >= GH) ny = GH - 1;
  endfunction

  // One update of the single-neuron core from cell (x,y); returns the cell reached.
  task automatic sn_step(inout int x, inout int y, input int eps, input int na,
                         input int cur[], input int nxt_rand[], input int use_grid);
    int cv[], nv[], ex, a_t, qe, mx, qa, nid, nx, ny, dly, old[];
    cv = cur;
    ex = (int'($urandom_range(99)) < eps) ? int'($urandom_range(na - 1)) : -1;
    foreach (cv[i]) sn_state_vec[i] = fx_t'(cv[i]);
    sn_busy_cnt = 0;
    @(negedge clk) sn_start = 1;
    @(negedge clk) sn_start = 0;
    while (!sn_action_valid) @(negedge clk);
    sn_explore_en = (ex >= 0);
    sn_explore_action = aidx_t'(ex < 0 ? 0 : ex);
    #1;
    if (use_grid) begin
      gmove(x, y, int'(sn_action), nx, ny);
      gvec(nx, ny, nv);
      nid = gid(nx, ny);
    end else begin
      nv = nxt_rand;
      nid = $urandom_range(NS - 1);
    end
    old = sw;
    rpcpt_update(sw, cv, nv, acts, AV_LEN, na, rewards[nid], int'(cfg.alpha), int'(cfg.gamma),
                 int'(cfg.c_lr), ex, a_t, qe, mx, qa);
    chk("sn action", sn_action, a_t);
    if (ex >= 0) n_explore++; else n_greedy++;
    dly = $urandom_range(3);
    if (dly > 0) n_wait++;
    repeat (dly) @(negedge clk);
    foreach (nv[i]) sn_next_vec[i] = fx_t'(nv[i]);
    sn_next_valid = 1; sn_next_id = 11'(nid);
    @(negedge clk) sn_next_valid = 0;
    sn_explore_en = 0;
    while (!sn_done) @(negedge clk);
    chk("sn busy 7A+1", sn_busy_cnt, 7 * na + 1);
    chk("sn q_sa", sn_q_sa, qa);
    chk("sn max_next", sn_max_next, mx);
    chk("sn q_err", sn_q_err, qe);
    for (int i = 0; i < N; i++) chk("sn w", sn_w_out[i], sw[i]);
    chk("sn b", sn_b_out, sw[N]);
    if (old != sw) n_wchange++;
    n_updates++;
    if (use_grid) begin
      x = nx; y = ny;
    end
  endtask

  task automatic mlp_step(inout int x, inout int y, input int eps, input int na,
                          input int cur[], input int nxt_rand[], input int use_grid);
    int cv[], nv[], ex, a_t, qe, mx, qa, nid, nx, ny, dly, old[];
    cv = cur;
    ex = (int'($urandom_range(99)) < eps) ? int'($urandom_range(na - 1)) : -1;
    foreach (cv[i]) mlp_state_vec[i] = fx_t'(cv[i]);
    mlp_busy_cnt = 0;
    @(negedge clk) mlp_start = 1;
    @(negedge clk) mlp_start = 0;
    while (!mlp_action_valid) @(negedge clk);
    mlp_explore_en = (ex >= 0);
    mlp_explore_action = aidx_t'(ex < 0 ? 0 : ex);
    #1;
    if (use_grid) begin
      gmove(x, y, int'(mlp_action), nx, ny);
      gvec(nx, ny, nv);
      nid = gid(nx, ny);
    end else begin
      nv = nxt_rand;
      nid = $urandom_range(NS - 1);
    end
    old = mw2;
    rmlp_update(mw1, mw2, H, cv, nv, acts, AV_LEN, na, rewards[nid], int'(cfg.alpha),
                int'(cfg.gamma), int'(cfg.c_lr), ex, a_t, qe, mx, qa);
    chk("mlp action", mlp_action, a_t);
    if (ex >= 0) n_explore++; else n_greedy++;
    dly = $urandom_range(3);
    if (dly > 0) n_wait++;
    repeat (dly) @(negedge clk);
    foreach (nv[i]) mlp_next_vec[i] = fx_t'(nv[i]);
    mlp_next_valid = 1; mlp_next_id = 11'(nid);
    @(negedge clk) mlp_next_valid = 0;
    mlp_explore_en = 0;
    while (!mlp_done) @(negedge clk);
    chk("mlp busy 15A+7", mlp_busy_cnt, 15 * na + 7);
    chk("mlp q_sa", mlp_q_sa, qa);
    chk("mlp max_next", mlp_max_next, mx);
    chk("mlp q_err", mlp_q_err, qe);
    for (int h = 0; h < H; h++) begin
      for (int i = 0; i < N; i++) chk("mlp w1", mlp_w1_out[h][i], mw1[h * (N + 1) + i]);
      chk("mlp b1", mlp_b1_out[h], mw1[h * (N + 1) + N]);
      chk("mlp w2", mlp_w2_out[h], mw2[h]);
    end
    chk("mlp b2", mlp_b2_out, mw2[H]);
    if (old != mw2) n_wchange++;
    n_updates++;
    if (use_grid) begin
      x = nx; y = ny;
    end
  endtask

  task automatic load_weights(input int sc);
    for (int i = 0; i <= N; i++) begin
      @(negedge clk);
      sw[i] = int'($urandom_range(2 * sc)) - sc;
      sn_ww_en = 1; sn_ww_idx = aidx_t'(i); sn_ww_data = fx_t'(sw[i]);
    end
    @(negedge clk) sn_ww_en = 0;
    for (int h = 0; h <= H; h++)
      for (int i = 0; i <= ((h == H) ? H : N); i++) begin
        @(negedge clk);
        mlp_ww_en = 1; mlp_ww_neuron = aidx_t'(h); mlp_ww_idx = aidx_t'(i);
        if (h < H) begin
          mw1[h * (N + 1) + i] = int'($urandom_range(2 * sc)) - sc;
          mlp_ww_data = fx_t'(mw1[h * (N + 1) + i]);
        end else begin
          mw2[i] = int'($urandom_range(8 * sc)) - 4 * sc;
          mlp_ww_data = fx_t'(mw2[i]);
        end
      end
    @(negedge clk) mlp_ww_en = 0;
  endtask

  initial begin
    int sx, sy, mx_, my_, cv[], nv[], dummy[];
    sw = new[N + 1];
    mw1 = new[H * (N + 1)];
    mw2 = new[H + 1];
    acts = new[A_MAX * AV_LEN];
    foreach (acts[k]) acts[k] = 0;
    // 9 grid moves: action a moves by ((a % 3) - 1, (a / 3) - 1)
    for (int a = 0; a < 9; a++) begin
      acts[a * AV_LEN + 0] = ((a % 3) - 1) * 256;
      acts[a * AV_LEN + 1] = ((a / 3) - 1) * 256;
    end
    for (int a = 0; a < A_MAX; a++)
      for (int i = 0; i < AV_LEN; i++) action_tab[a][i] = fx_t'(acts[a * AV_LEN + i]);
    cfg.alpha = 16'sd128;    // 0.5
    cfg.gamma = 16'sd230;    // 0.9
    cfg.c_lr  = 16'sd128;    // 0.5
    cfg.num_actions = 9;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NS; s++) begin
      @(negedge clk);
      rewards[s] = -4;
      if (s == gid(20, 45)) rewards[s] = 256;
      else if ((s % 7) == 3 && (s / GW) > 5) rewards[s] = -128;
      rw_en = 1; rw_addr = 11'(s); rw_data = fx_t'(rewards[s]);
    end
    @(negedge clk) rw_en = 0;
    load_weights(32);

    // Part 1: simple environment, both cores learning concurrently.
    for (int ep = 0; ep < 4; ep++) begin
      sx = 2 + ep; sy = 3; mx_ = 4; my_ = 2 + ep;
      for (int st = 0; st < 15; st++) begin
        fork
          begin
            gvec(sx, sy, cv);
            sn_step(sx, sy, 30, 9, cv, dummy, 1);
          end
          begin
            gvec(mx_, my_, nv);
            mlp_step(mx_, my_, 30, 9, nv, dummy, 1);
          end
        join
        if (gid(sx, sy) == gid(20, 45) || gid(mx_, my_) == gid(20, 45)) n_goal++;
      end
    end

    // Part 2: complex-sized updates, 40 actions, all 20 inputs, larger weights.
    for (int a = 0; a < A_MAX; a++)
      for (int i = 0; i < AV_LEN; i++) begin
        acts[a * AV_LEN + i] = int'($urandom_range(512)) - 256;
        action_tab[a][i] = fx_t'(acts[a * AV_LEN + i]);
      end
    cfg.num_actions = 40;
    load_weights(384);
    cv = new[S_LEN]; nv = new[S_LEN];
    for (int t = 0; t < 6; t++) begin
      foreach (cv[i]) cv[i] = int'($urandom_range(512)) - 256;
      foreach (nv[i]) nv[i] = int'($urandom_range(512)) - 256;
      fork
        sn_step(sx, sy, 30, 40, cv, nv, 0);
        mlp_step(mx_, my_, 30, 40, cv, nv, 0);
      join
    end

    $display("updates=%0d greedy=%0d explore=%0d env_waits=%0d both_busy_cycles=%0d weight_changes=%0d lut_clips=%0d goal_visits=%0d",
             n_updates, n_greedy, n_explore, n_wait, n_both_busy, n_wchange, n_clip, n_goal);
    chk("greedy selection seen", n_greedy > 0, 1);
    chk("explore selection seen", n_explore > 0, 1);
    chk("environment wait seen", n_wait > 0, 1);
    chk("cores busy together", n_both_busy > 0, 1);
    chk("weight change seen", n_wchange > 0, 1);
    chk("table clipping seen", n_clip > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
