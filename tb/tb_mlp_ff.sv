// Runs the seven-stage MLP feed-forward on random inputs and weights and checks the
// layer buffer (hidden outputs and nets), the output net and Q against the reference.
module tb_mlp_ff;
  import ql_pkg::*;
  import ql_ref_pkg::*;
  localparam int N = 20, H = 4;
  logic clk = 0, rst_n = 0;
  logic st [7];
  fx_t x [N];
  fx_t w1 [H][N];
  fx_t b1 [H];
  fx_t w2 [H];
  fx_t b2, q_act, net_o;
  fx_t h_out [H];
  fx_t h_net [H];
  logic clipped;
  int checks = 0, failures = 0;

  mlp_ff #(.N_IN(N), .H(H)) dut (
    .clk, .rst_n, .l1_mul(st[0]), .l1_acc(st[1]), .l1_act(st[2]), .buf_en(st[3]),
    .l2_mul(st[4]), .l2_acc(st[5]), .l2_act(st[6]), .x, .w1, .b1, .w2, .b2,
    .h_out, .h_net, .q_act, .net_o, .clipped);

  always #5 clk = ~clk;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    int xi [], w1f [], w2f [], hy [], hn [], no, q, sc;
    xi = new[N]; w1f = new[H * (N + 1)]; w2f = new[H + 1];
    foreach (st[s]) st[s] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      sc = (t % 2) ? 256 : 2048;
      foreach (xi[i]) begin xi[i] = int'($urandom_range(512)) - 256; x[i] = fx_t'(xi[i]); end
      for (int h = 0; h < H; h++) begin
        for (int i = 0; i <= N; i++) w1f[h * (N + 1) + i] = int'($urandom_range(2 * sc)) - sc;
        for (int i = 0; i < N; i++) w1[h][i] = fx_t'(w1f[h * (N + 1) + i]);
        b1[h] = fx_t'(w1f[h * (N + 1) + N]);
      end
      foreach (w2f[k]) w2f[k] = int'($urandom_range(2 * sc)) - sc;
      for (int h = 0; h < H; h++) w2[h] = fx_t'(w2f[h]);
      b2 = fx_t'(w2f[H]);
      q = rmlp_q(w1f, w2f, H, xi, hy, hn, no);
      for (int s = 0; s < 7; s++) begin
        @(negedge clk);
        foreach (st[k]) st[k] = (k == s);
      end
      #1;
      for (int h = 0; h < H; h++) begin
        chk("h_out", h_out[h], hy[h]);
        chk("h_net", h_net[h], hn[h]);
      end
      chk("net_o", net_o, no);
      chk("q", q_act, q);
      @(negedge clk) foreach (st[k]) st[k] = 0;
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
