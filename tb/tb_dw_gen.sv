// Checks dW_i = g * O_i (saturating) and d(bias) = g for random g and inputs.
module tb_dw_gen;
  import ql_pkg::*;
  import ql_ref_pkg::*;
  localparam int N = 20;
  fx_t g, db;
  fx_t o [N];
  fx_t dw [N];
  int checks = 0, failures = 0;

  dw_gen #(.N(N)) dut (.g, .o, .dw, .db);

  initial begin
    for (int t = 0; t < 500; t++) begin
      g = fx_t'(int'($urandom_range(65535)) - 32768);
      if (t % 2 == 0) g = fx_t'(int'($urandom_range(512)) - 256);
      for (int i = 0; i < N; i++) o[i] = fx_t'(int'($urandom_range(65535)) - 32768);
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(dw[i]) != rmul(int'(g), int'(o[i]))) begin
          failures++;
          $display("FAIL dw[%0d] got=%0d exp=%0d", i, dw[i], rmul(int'(g), int'(o[i])));
        end
      end
      checks++;
      if (db != g) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
