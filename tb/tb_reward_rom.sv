// Writes every state's reward, reads them back in random order, and checks that an
// out-of-range address reads zero and is not written.
module tb_reward_rom;
  import ql_pkg::*;
  localparam int NS = 1800;
  logic clk = 0, wr_en = 0;
  logic [10:0] wr_addr, rd_addr;
  fx_t wr_data, rd_data;
  int model [NS];
  int checks = 0, failures = 0;

  reward_rom #(.NUM_STATES(NS)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);
  always #5 clk = ~clk;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    for (int s = 0; s < NS; s++) begin
      @(negedge clk);
      model[s] = int'($urandom_range(65535)) - 32768;
      wr_en = 1; wr_addr = 11'(s); wr_data = fx_t'(model[s]);
    end
    @(negedge clk);
    wr_addr = 11'(1900); wr_data = 16'sh1234;
    @(negedge clk) wr_en = 0;
    for (int k = 0; k < 3000; k++) begin
      rd_addr = 11'($urandom_range(NS - 1));
      #1 chk("read", rd_data, model[rd_addr]);
    end
    rd_addr = 11'(1900);
    #1 chk("out of range", rd_data, 0);
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
