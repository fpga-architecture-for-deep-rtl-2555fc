// Drives random inputs, weights and biases through the three-stage neuron and checks
// net, activation and the clip flag against the reference arithmetic; also checks that
// each stage only moves on its own strobe.
module tb_neuron;
  import ql_pkg::*;
  import ql_ref_pkg::*;
  localparam int N = 20;
  logic clk = 0, rst_n = 0, mul_en = 0, acc_en = 0, act_en = 0;
  fx_t x [N];
  fx_t w [N];
  fx_t bias;
  fx_t y_act, net_fx, y;
  acc_t net;
  logic clipped;
  int checks = 0, failures = 0, nclip = 0;

  neuron #(.N(N)) dut (.clk, .rst_n, .mul_en, .acc_en, .act_en, .x, .w, .bias,
                       .y_act, .net_fx, .y, .net, .clipped);

  always #5 clk = ~clk;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    int xi [], wi [];
    int scale;
    longint en;
    xi = new[N];
    wi = new[N];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      scale = (t % 3 == 0) ? 32767 : ((t % 3 == 1) ? 512 : 64);
      for (int i = 0; i < N; i++) begin
        xi[i] = int'($urandom_range(2 * scale)) - scale;
        wi[i] = int'($urandom_range(2 * scale)) - scale;
        x[i] = fx_t'(xi[i]);
        w[i] = fx_t'(wi[i]);
      end
      bias = fx_t'(int'($urandom_range(1024)) - 512);
      en = rnet(xi, wi, int'(bias));
      @(negedge clk) mul_en = 1;
      @(negedge clk) begin mul_en = 0; acc_en = 1; end
      @(negedge clk) begin acc_en = 0; act_en = 1; end
      chk("net", longint'(net), longint'(int'(en)));
      chk("net_fx", net_fx, rsat(en));
      chk("y_act", y_act, rsig(raddr(en)));
      chk("clip", clipped, (en >= 2048 || en < -2048));
      if (clipped) nclip++;
      @(negedge clk) act_en = 0;
      chk("y", y, rsig(raddr(en)));
      // no strobe: nothing moves even if inputs change
      for (int i = 0; i < N; i++) x[i] = ~x[i];
      @(negedge clk);
      chk("hold", net, longint'(int'(en)));
    end
    chk("clip seen", nclip > 0, 1);
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
