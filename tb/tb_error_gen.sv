// Scans random present/next Q-value lists through the error generator and checks the
// running maximum, the captured Q(s_t, a_t) and Q_error = alpha (r + gamma max - Q)
// against the reference arithmetic, including saturating cases.
module tb_error_gen;
  import ql_pkg::*;
  import ql_ref_pkg::*;
  logic clk = 0, rst_n = 0, scan_en = 0;
  aidx_t scan_idx, a_sel;
  fx_t q_cur, q_next, reward, alpha, gamma, max_next, q_sa, target, q_err;
  int checks = 0, failures = 0;

  error_gen dut (.clk, .rst_n, .scan_en, .scan_idx, .q_cur, .q_next, .a_sel, .reward,
                 .alpha, .gamma, .max_next, .q_sa, .target, .q_err);
  always #5 clk = ~clk;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    int n, qc [40], qn [40], mx, qa, tg, big;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      big = (t % 5 == 0) ? 30000 : 256;
      n = 1 + $urandom_range(39);
      a_sel = aidx_t'($urandom_range(n - 1));
      reward = fx_t'(int'($urandom_range(2 * big)) - big);
      alpha = fx_t'($urandom_range(256));
      gamma = fx_t'($urandom_range(256));
      for (int a = 0; a < n; a++) begin
        qc[a] = int'($urandom_range(2 * big)) - big;
        qn[a] = int'($urandom_range(2 * big)) - big;
      end
      mx = qn[0];
      for (int a = 1; a < n; a++) if (qn[a] > mx) mx = qn[a];
      qa = qc[a_sel];
      for (int a = 0; a < n; a++) begin
        @(negedge clk);
        scan_en = 1; scan_idx = aidx_t'(a); q_cur = fx_t'(qc[a]); q_next = fx_t'(qn[a]);
      end
      @(negedge clk) scan_en = 0;
      tg = radd(int'(reward), rmul(int'(gamma), mx));
      chk("max", max_next, mx);
      chk("q_sa", q_sa, qa);
      chk("target", target, tg);
      chk("q_err", q_err, rmul(int'(alpha), rsat(longint'(tg) - qa)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
