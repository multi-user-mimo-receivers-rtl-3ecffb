// Testbench helper: one receiver built with span length N, driven with
// classification spans over random Rayleigh channels (i.i.d. tone to tone,
// entries CN(0,1)), both users at equal power (SIR 0 dB), Gaussian noise of
// per-antenna SNR 1/sigma^2. For every span the receiver's estimate and span
// totals are compared with the reference model, and the rate of correct
// classification is reported per (M_S, M_I, SNR). Runs when `go` rises and
// raises `done` with its check counts.
module classify_run
  import mumimo_pkg::*;
  import mumimo_ref_pkg::*;
#(
  parameter int unsigned N = 12,
  parameter int unsigned SPANS = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned BIAS [4] = '{0, 355, 710, 1065};

  logic        tone_valid = 1'b0, tone_ready, llr_valid, mi_hat_valid;
  tone_t       tone = '0;
  mod_e        ms = MOD_QAM4, llr_mi, mi_hat;
  llr_t        llr [MAX_BITS];
  sym_idx_t    x1_hat, x2_hat;
  logic [31:0] metric [NUM_HYP];

  mumimo_receiver #(.N_TONES(N)) dut (
    .clk, .rst_n, .tone_valid, .tone_ready, .tone, .tone_mode(MODE_CLASSIFY), .ms,
    .llr_valid, .llr, .x1_hat, .x2_hat, .llr_mi, .mi_hat_valid, .mi_hat, .metric);

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(32'hFFFFFFFE)) + 1.0) / 4294967296.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic sample_t q12(real v);
    real s = v * 4096.0;
    if (s > 32767.0) s = 32767.0;
    if (s < -32768.0) s = -32768.0;
    return sample_t'($rtoi(s >= 0.0 ? s + 0.5 : s - 0.5));
  endfunction

  // random tone at the given SNR (dB); symbols of ms and of mi_true
  function automatic tone_t rayleigh_tone(mod_e s, mod_e mi_true, real snr_db);
    tone_t t;
    real sig2, h1r[2], h1i[2], h2r[2], h2i[2], yr, yi;
    int x1r, x1i, x2r, x2i, inv;
    sig2 = 10.0 ** (-snr_db / 10.0);
    ref_point(s, int'($urandom_range((1 << ref_bits(s)) - 1)), x1r, x1i);
    if (mi_true == MOD_NONE) begin x2r = 0; x2i = 0; end
    else ref_point(mi_true, int'($urandom_range((1 << ref_bits(mi_true)) - 1)), x2r, x2i);
    for (int a = 0; a < 2; a++) begin
      h1r[a] = gauss() * 0.7071067811865476; h1i[a] = gauss() * 0.7071067811865476;
      h2r[a] = gauss() * 0.7071067811865476; h2i[a] = gauss() * 0.7071067811865476;
      t.h1[a].re = q12(h1r[a]); t.h1[a].im = q12(h1i[a]);
      t.h2[a].re = q12(h2r[a]); t.h2[a].im = q12(h2i[a]);
      yr = (h1r[a] * x1r - h1i[a] * x1i + h2r[a] * x2r - h2i[a] * x2i) / 4096.0
         + gauss() * $sqrt(sig2 / 2.0);
      yi = (h1r[a] * x1i + h1i[a] * x1r + h2r[a] * x2i + h2i[a] * x2r) / 4096.0
         + gauss() * $sqrt(sig2 / 2.0);
      t.y[a].re = q12(yr); t.y[a].im = q12(yi);
    end
    inv = $rtoi(256.0 / sig2 + 0.5);
    t.inv_nv = 16'((inv > 65535) ? 65535 : inv);
    return t;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL (N=%0d): %s", N, what); end
  endtask

  initial begin
    real snrs [3] = '{0.0, 10.0, 20.0};
    mod_e mss [2] = '{MOD_QAM4, MOD_QAM64};
    checks = 0; failures = 0; done = 1'b0;
    @(posedge go);
    foreach (mss[si]) for (int mi = 1; mi < 4; mi++) foreach (snrs[qi]) begin
      automatic int correct = 0;
      automatic mod_e mi_e = mod_e'(mi);
      for (int sp = 0; sp < SPANS; sp++) begin
        automatic longint unsigned acc [4];
        automatic int best;
        for (int h = 0; h < 4; h++) acc[h] = N * BIAS[h];
        for (int t = 0; t < N; t++) begin
          automatic tone_t tt;
          tt = rayleigh_tone(mss[si], mod_e'(mi), snrs[qi]);
          for (int h = 0; h < 4; h++) begin
            automatic int unsigned mn = 32'hFFFFFFFF;
            for (int k = 0; k < (1 << ref_bits(mss[si])); k++) begin
              automatic int unsigned d = ref_min_x2(tt, mss[si], k, mod_e'(h));
              if (d < mn) mn = d;
            end
            acc[h] += mn;
          end
          @(negedge clk);
          tone = tt; ms = mss[si]; tone_valid = 1'b1;
          while (!tone_ready) @(negedge clk);
          @(negedge clk);
          tone_valid = 1'b0;
        end
        while (!mi_hat_valid) @(negedge clk);
        best = 0;
        for (int h = 1; h < 4; h++) if (acc[h] < acc[best]) best = h;
        for (int h = 0; h < 4; h++) chk(metric[h] == 32'(acc[h]), "span total differs from the model");
        chk(mi_hat == mod_e'(best), $sformatf("estimate %s, model %0d", mi_hat.name(), best));
        if (mi_hat == mod_e'(mi)) correct++;
      end
      $display("N=%0d M_S=%s M_I=%s SNR=%0.0f dB: correct %0d of %0d", N, mss[si].name(),
               mi_e.name(), snrs[qi], correct, SPANS);
    end
    done = 1'b1;
  end
endmodule
