// Compares every entry of sigmoid_rom with the value recomputed from exp() at the centre of
// its 1/16-wide net bin, rounded to Q7.8.
module tb_sigmoid_rom;
  import ql_pkg::*;
  import ql_ref_pkg::*;
  logic [7:0] addr;
  fx_t data;
  int checks = 0, failures = 0;

  sigmoid_rom dut (.addr, .data);

  initial begin
    for (int i = 0; i < 256; i++) begin
      addr = 8'(i);
      #1;
      checks++;
      if (int'(data) != rsig(i)) begin
        failures++;
        $display("FAIL addr=%0d data=%0d exp=%0d", i, data, rsig(i));
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
