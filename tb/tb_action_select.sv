// Streams random Q-values (with deliberate ties) into the selector and checks the
// greedy arg-max (lowest index on ties), the explore override and clear.
module tb_action_select;
  import ql_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, valid = 0, explore_en = 0;
  aidx_t idx, explore_action, best_idx, a_sel;
  fx_t q, best_q;
  int checks = 0, failures = 0;

  action_select dut (.clk, .rst_n, .clr, .valid, .idx, .q, .explore_en, .explore_action,
                     .best_idx, .best_q, .a_sel);
  always #5 clk = ~clk;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    int n, mi, mv, v;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      n = 1 + $urandom_range(39);
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      mi = 0; mv = 0;
      for (int a = 0; a < n; a++) begin
        v = (t % 2) ? int'($urandom_range(7)) : int'($urandom_range(600)) - 300;
        if (a == 0 || v > mv) begin mi = a; mv = v; end
        valid = 1; idx = aidx_t'(a); q = fx_t'(v);
        @(negedge clk);
        valid = ($urandom_range(1) == 1) ? 0 : 0;
      end
      valid = 0;
      explore_en = 0;
      #1;
      chk("best_idx", best_idx, mi);
      chk("best_q", best_q, mv);
      chk("a_sel greedy", a_sel, mi);
      explore_en = 1; explore_action = aidx_t'($urandom_range(n - 1));
      #1;
      chk("a_sel explore", a_sel, explore_action);
      explore_en = 0;
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
