// End-to-end testbench of mumimo_receiver at its default parameters
// (N = 12 tones per classification span, 64-entry distance buffers).
//
// For every desired constellation (4-, 16-, 64-QAM) and every true interferer
// state (absent, 4-, 16-, 64-QAM) it runs a classification span of N tones and
// then detection-mode tones; it also runs detection before any
// classification and a span interrupted by a detection tone. A reference
// model (exhaustive search, separate from the RTL) predicts the four span
// totals, the estimate, every LLR vector and the hard decisions; latencies are
// checked against the cycle counts the receiver documents, and the number of
// distances computed per tone must be |M_S| in detection mode and 4 |M_S| in
// classification mode. The mechanisms the
// design has are counted and each must occur: a finished classification span,
// switches between the two modes, an interrupted span, a tone held back by
// tone_ready, LLRs from both modes, and each of the four estimates.
module mumimo_receiver_tb;
  import mumimo_pkg::*;
  import mumimo_ref_pkg::*;

  localparam int N = 12;
  localparam int unsigned BIAS [4] = '{0, 355, 710, 1065};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        tone_valid = 1'b0, tone_ready;
  tone_t       tone = '0;
  rx_mode_e    tone_mode = MODE_DETECT;
  mod_e        ms = MOD_QAM4;
  logic        llr_valid, mi_hat_valid;
  llr_t        llr [MAX_BITS];
  sym_idx_t    x1_hat, x2_hat;
  mod_e        llr_mi, mi_hat;
  logic [31:0] metric [NUM_HYP];

  mumimo_receiver dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  // distance computations: list entries the detector produces
  int n_dist = 0;
  always @(posedge clk) if (dut.u_det.out_valid) n_dist++;

  // mechanism counters
  int n_span = 0, n_to_detect = 0, n_to_classify = 0, n_interrupt = 0;
  int n_stall = 0, n_llr_cls = 0, n_llr_det = 0, n_correct = 0;
  int n_est [4] = '{0, 0, 0, 0};

  typedef struct {
    tone_t       t;
    mod_e        ms;
    mod_e        mi;
    int unsigned dl [64];
    longint      accepted;
    int          latency;
    bit          cls;
  } exp_t;
  exp_t expq [$];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL @%0d: %s", cycle, what); end
  endtask

  // present a tone; returns the cycle of the edge that took it
  task automatic send(tone_t t, rx_mode_e m, mod_e s, output longint taken);
    @(negedge clk);
    tone = t; tone_mode = m; ms = s; tone_valid = 1'b1;
    if (!tone_ready) n_stall++;
    while (!tone_ready) @(negedge clk);
    @(negedge clk);
    taken = cycle;  // number of the edge that took the tone
    n_dist = 0;     // the previous tone is complete once a tone is taken
    tone_valid = 1'b0;
  endtask

  // wait until the receiver takes tones again; returns the edge count
  task automatic wait_ready(longint taken, output int edges);
    while (!tone_ready) @(negedge clk);
    edges = int'(cycle - taken);
  endtask

  // LLR monitor
  always @(negedge clk) if (llr_valid) begin
    exp_t e;
    int mn, p;
    if (expq.size() == 0) chk(1'b0, "unexpected llr_valid");
    else begin
      e = expq.pop_front();
      p = 1 << ref_bits(e.ms);
      chk(int'(cycle - e.accepted) == e.latency,
          $sformatf("LLR latency %0d, expected %0d", cycle - e.accepted, e.latency));
      chk(llr_mi == e.mi, $sformatf("LLR hypothesis %s, expected %s", llr_mi.name(), e.mi.name()));
      for (int j = 0; j < MAX_BITS; j++)
        if (j < ref_bits(e.ms))
          chk(int'(llr[j]) == ref_llr(e.dl, e.ms, j),
              $sformatf("%s/%s LLR bit %0d: %0d vs %0d", e.ms.name(), e.mi.name(), j, llr[j], ref_llr(e.dl, e.ms, j)));
        else chk(llr[j] == '0, "unused LLR bit not 0");
      mn = int'(e.dl[0]);
      for (int k = 1; k < p; k++) if (int'(e.dl[k]) < mn) mn = int'(e.dl[k]);
      chk(int'(x1_hat) < p && int'(e.dl[x1_hat]) == mn, "hard decision x1 not of minimum distance");
      chk(int'(ref_pair(e.t, e.ms, int'(x1_hat), e.mi, int'(x2_hat))) == mn, "hard decision x2 does not attain it");
      if (e.cls) n_llr_cls++; else n_llr_det++;
    end
  end

  rx_mode_e last_mode = MODE_DETECT;
  mod_e     mi_model  = MOD_NONE;
  longint unsigned acc_model [4];
  int       span_cnt  = 0;

  function automatic void note_mode(rx_mode_e m);
    if (last_mode == MODE_CLASSIFY && m == MODE_DETECT) n_to_detect++;
    if (last_mode == MODE_DETECT && m == MODE_CLASSIFY) n_to_classify++;
    last_mode = m;
  endfunction

  task automatic detect_tone(mod_e s, mod_e mi_true, bit no_wait = 1'b0);
    exp_t e;
    longint tk;
    int edges, p;
    p = 1 << ref_bits(s);
    e.t  = gen_tone(s, mi_true, int'($urandom_range(p - 1)), int'($urandom_range(63)), 200, 25600);
    e.ms = s; e.mi = mi_model; e.cls = 1'b0;
    for (int k = 0; k < 64; k++) e.dl[k] = (k < p) ? ref_min_x2(e.t, s, k, mi_model) : 0;
    if (span_cnt != 0) n_interrupt++;
    span_cnt = 0;
    note_mode(MODE_DETECT);
    send(e.t, MODE_DETECT, s, tk);
    e.accepted = tk; e.latency = 2 * p + 5;
    expq.push_back(e);
    if (no_wait) return;  // the next tone is presented at once and waits
    wait_ready(tk, edges);
    chk(n_dist == p, $sformatf("detection tone computed %0d distances, expected |M_S| = %0d", n_dist, p));
    chk(edges == 2 * p + 6, $sformatf("detection tone took %0d edges, expected %0d", edges, 2 * p + 6));
  endtask

  task automatic classify_tone(mod_e s, mod_e mi_true);
    exp_t e;
    longint tk;
    int edges, p, best;
    int unsigned dl [4][64];
    longint unsigned tot [4];
    p = 1 << ref_bits(s);
    e.t = gen_tone(s, mi_true, int'($urandom_range(p - 1)), int'($urandom_range(63)), 200, 25600);
    for (int h = 0; h < 4; h++) begin
      int unsigned mn;
      mn = 32'hFFFFFFFF;
      for (int k = 0; k < 64; k++) begin
        dl[h][k] = (k < p) ? ref_min_x2(e.t, s, k, mod_e'(h)) : 0;
        if (k < p && dl[h][k] < mn) mn = dl[h][k];
      end
      acc_model[h] = (span_cnt == 0 ? 0 : acc_model[h]) + mn;
    end
    note_mode(MODE_CLASSIFY);
    send(e.t, MODE_CLASSIFY, s, tk);
    if (span_cnt == N - 1) begin
      best = 0;
      for (int h = 0; h < 4; h++) tot[h] = acc_model[h] + N * BIAS[h];
      for (int h = 1; h < 4; h++) if (tot[h] < tot[best]) best = h;
      mi_model = mod_e'(best);
      e.ms = s; e.mi = mi_model; e.cls = 1'b1; e.dl = dl[best];
      e.accepted = tk; e.latency = 5 * p + 16;
      expq.push_back(e);
      while (!mi_hat_valid) @(negedge clk);
      chk(int'(cycle - tk) == 4 * p + 13, $sformatf("estimate after %0d edges", cycle - tk));
      for (int h = 0; h < 4; h++)
        chk(metric[h] == 32'(tot[h]), $sformatf("span total %0d: %0d vs %0d", h, metric[h], tot[h]));
      chk(mi_hat == mi_model, $sformatf("estimate %s, model %s (totals %0d %0d %0d %0d)", mi_hat.name(),
          mi_model.name(), tot[0], tot[1], tot[2], tot[3]));
      n_span++;
      n_est[best]++;
      if (mi_model == mi_true) n_correct++;
      wait_ready(tk, edges);
      chk(edges == 5 * p + 17, $sformatf("span-ending tone took %0d edges", edges));
      chk(n_dist == 4 * p, $sformatf("classification tone computed %0d distances", n_dist));
      span_cnt = 0;
    end else begin
      wait_ready(tk, edges);
      chk(edges == 4 * p + 12, $sformatf("classification tone took %0d edges", edges));
      chk(n_dist == 4 * p, $sformatf("classification tone computed %0d distances", n_dist));
      span_cnt++;
    end
  endtask

  initial begin
    mod_e s, mt;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // detection before any classification: single-user ML
    detect_tone(MOD_QAM16, MOD_NONE);
    // an interrupted span
    for (int i = 0; i < 5; i++) classify_tone(MOD_QAM4, MOD_QAM16);
    detect_tone(MOD_QAM4, MOD_QAM16);
    for (int si = 1; si < 4; si++)
      for (int mi = 0; mi < 4; mi++) begin
        s  = mod_e'(si);
        mt = mod_e'(mi);
        for (int i = 0; i < N; i++) classify_tone(s, mt);
        for (int i = 0; i < 2; i++) detect_tone(s, mt, i == 0);
      end
    repeat (400) @(negedge clk);
    chk(expq.size() == 0, "LLR vectors missing");
    $display("spans=%0d correct=%0d estimates none/4/16/64=%0d/%0d/%0d/%0d", n_span, n_correct,
             n_est[0], n_est[1], n_est[2], n_est[3]);
    $display("mode switches to detect=%0d to classify=%0d interrupted spans=%0d stalls=%0d llr cls/det=%0d/%0d",
             n_to_detect, n_to_classify, n_interrupt, n_stall, n_llr_cls, n_llr_det);
    chk(n_span > 0, "no classification span finished");
    chk(n_to_detect > 0 && n_to_classify > 0, "a mode switch never happened");
    chk(n_interrupt > 0, "no span was interrupted");
    chk(n_stall > 0, "tone_ready never held a tone back");
    chk(n_llr_cls > 0 && n_llr_det > 0, "LLRs missing from a mode");
    for (int h = 0; h < 4; h++) chk(n_est[h] > 0, $sformatf("estimate %0d never made", h));
    chk(n_correct == n_span, "classification at low noise picked a wrong constellation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
