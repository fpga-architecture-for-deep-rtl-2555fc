// Walks the controller through updates with random A and environment delays and
// checks the phase/stage/action sequence cycle by cycle, the busy cycle count
// 2*A*FF + A + BP (7A+1 and 15A+7 configurations), the handshakes and done.
module tb_ql_ctrl;
  import ql_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d @%0t", what, got, exp, $time);
    end
  endtask

  // one controller per configuration
  logic   s1 = 0, n1 = 0, s2 = 0, n2 = 0;
  aidx_t  na;
  phase_e ph1, ph2;
  logic [2:0] st1, st2;
  aidx_t  ai1, ai2, nact1, nact2;
  logic lc1, ln1, av1, b1, d1, lc2, ln2, av2, b2, d2;

  ql_ctrl #(.A_MAX(40), .FF_STAGES(3), .BP_STAGES(1)) dut1 (
    .clk, .rst_n, .start(s1), .next_valid(n1), .num_actions(na), .phase(ph1), .stage(st1),
    .aidx(ai1), .n_act(nact1), .latch_cur(lc1), .latch_next(ln1), .action_valid(av1),
    .busy(b1), .done(d1));
  ql_ctrl #(.A_MAX(40), .FF_STAGES(7), .BP_STAGES(7)) dut2 (
    .clk, .rst_n, .start(s2), .next_valid(n2), .num_actions(na), .phase(ph2), .stage(st2),
    .aidx(ai2), .n_act(nact2), .latch_cur(lc2), .latch_next(ln2), .action_valid(av2),
    .busy(b2), .done(d2));

  // Runs one update on controller k and checks the sequence it walks through.
  task automatic run(input int k, input int a, input int ffs, input int bps, input int delay);
    int busy_cnt;
    phase_e ph; logic [2:0] st; aidx_t ai; logic b, av, d;
    busy_cnt = 0;
    @(negedge clk);
    if (k == 1) s1 = 1; else s2 = 1;
    @(negedge clk);
    s1 = 0; s2 = 0;
    for (int p = 0; p < 2; p++) begin
      for (int ac = 0; ac < a; ac++)
        for (int s = 0; s < ffs; s++) begin
          ph = (k == 1) ? ph1 : ph2; st = (k == 1) ? st1 : st2; ai = (k == 1) ? ai1 : ai2;
          b = (k == 1) ? b1 : b2;
          chk("ff phase", ph, p == 0 ? PH_FF_CUR : PH_FF_NEXT);
          chk("ff stage", st, s);
          chk("ff aidx", ai, ac);
          if (b) busy_cnt++;
          @(negedge clk);
        end
      if (p == 0) begin
        for (int w = 0; w <= delay; w++) begin
          ph = (k == 1) ? ph1 : ph2; av = (k == 1) ? av1 : av2; b = (k == 1) ? b1 : b2;
          chk("wait", ph, PH_WAIT);
          chk("action_valid", av, 1);
          chk("not busy", b, 0);
          if (w == delay) begin if (k == 1) n1 = 1; else n2 = 1; end
          @(negedge clk);
          n1 = 0; n2 = 0;
        end
      end
    end
    for (int ac = 0; ac < a; ac++) begin
      ph = (k == 1) ? ph1 : ph2; ai = (k == 1) ? ai1 : ai2; b = (k == 1) ? b1 : b2;
      chk("scan", ph, PH_SCAN);
      chk("scan aidx", ai, ac);
      if (b) busy_cnt++;
      @(negedge clk);
    end
    for (int s = 0; s < bps; s++) begin
      ph = (k == 1) ? ph1 : ph2; st = (k == 1) ? st1 : st2; b = (k == 1) ? b1 : b2;
      chk("bp", ph, PH_BP);
      chk("bp stage", st, s);
      if (b) busy_cnt++;
      @(negedge clk);
    end
    ph = (k == 1) ? ph1 : ph2; d = (k == 1) ? d1 : d2;
    chk("idle", ph, PH_IDLE);
    chk("done", d, 1);
    chk("busy cycles", busy_cnt, 2 * a * ffs + a + bps);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      na = aidx_t'((t == 0) ? 9 : (t == 1) ? 40 : (t == 2) ? 1 : 1 + $urandom_range(39));
      run(1, int'(na), 3, 1, $urandom_range(4));
      run(2, int'(na), 7, 7, $urandom_range(4));
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
