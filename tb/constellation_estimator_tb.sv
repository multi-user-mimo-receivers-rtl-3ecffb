// Self-checking testbench of constellation_estimator. Feeds random per-tone
// minima for the four hypotheses over spans of N tones, in the tone-outer,
// hypothesis-inner order the receiver uses and in hypothesis-outer order,
// and compares the four totals (sum + N * bias) and the decided minimum with
// a model. Spans are built so that each hypothesis wins at least once, and a
// tie checks that the smaller constellation wins. Runs with the default
// biases and with the 0, 2N, 4N, 8N biases of the architecture figure.
module constellation_estimator_tb;
  import mumimo_pkg::*;

  localparam int N = 12;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  acc_en = 0, acc_first = 0, acc_last = 0, decide = 0;
  mod_e  acc_hyp = MOD_NONE;
  dist_t acc_dist = '0;
  logic  est_valid [2];
  mod_e  mi_hat [2];
  logic [31:0] metric [2][NUM_HYP];

  int unsigned bias [2][4] = '{'{0, 355, 710, 1065}, '{0, 512, 1024, 2048}};
  int checks = 0, failures = 0;
  int wins [4] = '{0, 0, 0, 0};

  constellation_estimator #(.N_TONES(N)) dut0 (
    .clk, .rst_n, .acc_en, .acc_first, .acc_last, .acc_hyp, .acc_dist, .decide,
    .est_valid(est_valid[0]), .mi_hat(mi_hat[0]), .metric(metric[0]));
  constellation_estimator #(.N_TONES(N), .BIAS_PER_TONE('{0, 512, 1024, 2048})) dut1 (
    .clk, .rst_n, .acc_en, .acc_first, .acc_last, .acc_hyp, .acc_dist, .decide,
    .est_valid(est_valid[1]), .mi_hat(mi_hat[1]), .metric(metric[1]));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic feed(int t, int h, int unsigned d);
    @(negedge clk);
    acc_en = 1; acc_first = (t == 0); acc_last = (t == N - 1);
    acc_hyp = mod_e'(h); acc_dist = dist_t'(d);
    @(negedge clk);
    acc_en = 0; acc_first = 0; acc_last = 0;
  endtask

  // one span; d[t][h] are the per-tone minima
  task automatic span(int unsigned d [N][4], bit hyp_outer);
    longint unsigned tot [2][4];
    int best;
    for (int b = 0; b < 2; b++)
      for (int h = 0; h < 4; h++) tot[b][h] = N * bias[b][h];
    for (int t = 0; t < N; t++)
      for (int h = 0; h < 4; h++)
        for (int b = 0; b < 2; b++) tot[b][h] += d[t][h];
    if (hyp_outer) begin
      for (int h = 0; h < 4; h++) for (int t = 0; t < N; t++) feed(t, h, d[t][h]);
    end else begin
      for (int t = 0; t < N; t++) for (int h = 0; h < 4; h++) feed(t, h, d[t][h]);
    end
    @(negedge clk);
    decide = 1;
    @(negedge clk);
    decide = 0;
    for (int b = 0; b < 2; b++) begin
      best = 0;
      for (int h = 1; h < 4; h++) if (tot[b][h] < tot[b][best]) best = h;
      for (int h = 0; h < 4; h++)
        chk(metric[b][h] == 32'(tot[b][h]), $sformatf("bias set %0d metric[%0d] %0d vs %0d", b, h, metric[b][h], tot[b][h]));
      chk(est_valid[b] == 1'b1, "est_valid one clock after decide");
      chk(mi_hat[b] == mod_e'(best), $sformatf("bias set %0d mi_hat %0d vs %0d", b, mi_hat[b], best));
      if (b == 0) wins[best]++;
    end
    @(negedge clk);
    chk(est_valid[0] == 1'b0, "est_valid is a pulse");
  endtask

  initial begin
    int unsigned d [N][4];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 24; r++) begin
      int w;
      w = r % 4;
      for (int t = 0; t < N; t++)
        for (int h = 0; h < 4; h++)
          d[t][h] = (h == w) ? $urandom_range(2000) : 1500 + $urandom_range(3000);
      span(d, r[0]);
    end
    // tie: every hypothesis with equal totals in the figure's bias set 1 is
    // impossible, so make set 0 tie between 16-QAM and 64-QAM
    for (int t = 0; t < N; t++) begin
      d[t][0] = 9000; d[t][1] = 9000; d[t][2] = 1000 + 355; d[t][3] = 1000;
    end
    span(d, 1'b0);
    chk(mi_hat[0] == MOD_QAM16, "tie goes to the smaller constellation");
    for (int h = 0; h < 4; h++) chk(wins[h] > 0, $sformatf("hypothesis %0d never won", h));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
