// Host writes of every weight and the bias, then random parallel updates (with
// saturation) compared with a model; a host write wins over a same-cycle update.
module tb_weight_buffer;
  import ql_pkg::*;
  import ql_ref_pkg::*;
  localparam int N = 20;
  logic clk = 0, rst_n = 0, wr_en = 0, upd_en = 0;
  aidx_t wr_idx;
  fx_t wr_data, db, b;
  fx_t dw [N];
  fx_t w [N];
  int mw [N+1];
  int checks = 0, failures = 0;

  weight_buffer #(.N(N)) dut (.clk, .rst_n, .wr_en, .wr_idx, .wr_data, .upd_en, .dw, .db, .w, .b);
  always #5 clk = ~clk;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  task automatic compare();
    for (int i = 0; i < N; i++) chk("w", w[i], mw[i]);
    chk("b", b, mw[N]);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i <= N; i++) mw[i] = 0;
    @(negedge clk) compare();
    for (int i = 0; i <= N; i++) begin
      mw[i] = int'($urandom_range(60000)) - 30000;
      wr_en = 1; wr_idx = aidx_t'(i); wr_data = fx_t'(mw[i]);
      @(negedge clk);
    end
    wr_en = 0;
    compare();
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) dw[i] = fx_t'(int'($urandom_range(8000)) - 4000);
      db = fx_t'(int'($urandom_range(8000)) - 4000);
      upd_en = 1;
      wr_en = (t % 17 == 3);
      wr_idx = aidx_t'($urandom_range(N));
      wr_data = fx_t'(int'($urandom_range(200)) - 100);
      @(negedge clk);
      if (wr_en) mw[wr_idx] = int'(wr_data);
      else begin
        for (int i = 0; i < N; i++) mw[i] = radd(mw[i], int'(dw[i]));
        mw[N] = radd(mw[N], int'(db));
      end
      upd_en = 0; wr_en = 0;
      compare();
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
