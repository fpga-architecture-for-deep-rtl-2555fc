// Checks the net-to-table-address mapping over the table range, its edges and far
// beyond it, against floor(net/16) clamped to [-128,127] plus 128.
module tb_addr_translate;
  import ql_pkg::*;
  import ql_ref_pkg::*;
  acc_t net;
  logic [7:0] addr;
  logic clipped;
  int checks = 0, failures = 0;

  addr_translate dut (.net, .addr, .clipped);

  task automatic check(input longint v);
    net = acc_t'(v);
    #1;
    checks++;
    if (int'(addr) != raddr(v) || clipped != (v >= 2048 || v < -2048)) begin
      failures++;
      $display("FAIL net=%0d addr=%0d exp=%0d clipped=%0b", v, addr, raddr(v), clipped);
    end
  endtask

  initial begin
    for (longint v = -2100; v <= 2100; v += 7) check(v);
    check(-2048); check(-2049); check(2047); check(2048); check(-1); check(0); check(15); check(16);
    check(-17); check(2147483647); check(-64'sd2147483648);
    repeat (200) check(longint'(int'($urandom)));
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
