// Checks delta = f'(net) * err over the whole net range and random errors.
module tb_delta_gen;
  import ql_pkg::*;
  import ql_ref_pkg::*;
  fx_t net, err, fprime, delta;
  logic clipped;
  int checks = 0, failures = 0;

  delta_gen dut (.net, .err, .fprime, .delta, .clipped);

  initial begin
    int n, e;
    for (int t = 0; t < 3000; t++) begin
      n = (t < 2200) ? (t - 1100) * 2 : int'($urandom_range(65535)) - 32768;
      e = int'($urandom_range(65535)) - 32768;
      net = fx_t'(n); err = fx_t'(e);
      #1;
      checks += 2;
      if (int'(fprime) != rdsig(raddr(n))) begin
        failures++;
        $display("FAIL fprime net=%0d got=%0d exp=%0d", n, fprime, rdsig(raddr(n)));
      end
      if (int'(delta) != rmul(rdsig(raddr(n)), e)) begin
        failures++;
        $display("FAIL delta net=%0d err=%0d got=%0d", n, e, delta);
      end
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
