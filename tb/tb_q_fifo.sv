// Random push/pop traffic against a queue model: order, fall-through head, count,
// full/empty, simultaneous push and pop, filling to DEPTH and flush.
module tb_q_fifo;
  localparam int DEPTH = 9, WIDTH = 16;
  logic clk = 0, rst_n = 0, flush = 0, push = 0, pop = 0;
  logic [WIDTH-1:0] din, dout;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic empty, full;
  logic [WIDTH-1:0] model [$];
  int checks = 0, failures = 0, nfull = 0;

  q_fifo #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .rst_n, .flush, .push, .din, .pop,
                                             .dout, .count, .empty, .full);
  always #5 clk = ~clk;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      chk("count", count, model.size());
      chk("empty", empty, model.size() == 0);
      chk("full", full, model.size() == DEPTH);
      if (full) nfull++;
      if (model.size() > 0) chk("head", dout, model[0]);
      flush = (t % 500 == 499);
      push = ($urandom_range(99) < ((t / 250) % 2 ? 70 : 35)) && (model.size() < DEPTH || pop);
      pop  = ($urandom_range(99) < 50) && (model.size() > 0);
      if (push && model.size() == DEPTH && !pop) push = 0;
      din = WIDTH'($urandom);
      @(posedge clk);
      if (flush) model.delete();
      else begin
        if (pop) void'(model.pop_front());
        if (push) model.push_back(din);
      end
    end
    @(negedge clk);
    push = 0; pop = 0; flush = 0;
    chk("full reached", nfull > 0, 1);
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
