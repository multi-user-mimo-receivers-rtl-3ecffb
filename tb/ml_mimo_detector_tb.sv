// Self-checking testbench of ml_mimo_detector. Random tones for every
// combination of desired constellation and interferer hypothesis; every list
// entry is compared with an exhaustive search over the interferer's symbols,
// the reported x2 must attain that distance, the list minimum is checked, and
// the entries must come one per clock, |M_S| of them, the first at the clock
// edge after the one that samples start.
module ml_mimo_detector_tb;
  import mumimo_pkg::*;
  import mumimo_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     start = 1'b0, ready;
  tone_t    tone = '0;
  mod_e     ms = MOD_QAM4, mi = MOD_NONE;
  logic     out_valid, out_last, list_done;
  sym_idx_t out_x1, out_x2;
  dist_t    out_dist, list_min;

  int checks = 0, failures = 0;

  ml_mimo_detector dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic run_list(tone_t t, mod_e s, mod_e h);
    int n, got, t0, mn;
    int unsigned ref_d;
    n = 1 << ref_bits(s);
    @(negedge clk);
    tone = t; ms = s; mi = h; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = 0; got = 0; mn = -1;
    while (got < n && t0 < 200) begin
      if (out_valid) begin
        ref_d = ref_min_x2(t, s, int'(out_x1), h);
        check(out_x1 == sym_idx_t'(got), $sformatf("entry order %0d vs %0d", out_x1, got));
        check(int'(out_dist) == int'(ref_d),
              $sformatf("ms=%s mi=%s x1=%0d dist %0d ref %0d", s.name(), h.name(), out_x1, out_dist, ref_d));
        check(int'(ref_pair(t, s, int'(out_x1), h, int'(out_x2))) == int'(out_dist),
              $sformatf("x2=%0d does not attain the distance", out_x2));
        check(out_last == (got == n - 1), "out_last position");
        check(t0 == got + 1, $sformatf("entry %0d at clock %0d", got, t0));
        if (mn < 0 || int'(out_dist) < mn) mn = int'(out_dist);
        got++;
      end
      @(negedge clk);
      t0++;
    end
    check(got == n, "list length");
    check(list_done && int'(list_min) == mn, $sformatf("list_min %0d ref %0d", list_min, mn));
  endtask

  initial begin
    mod_e s, h, ht;
    tone_t t;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int si = 1; si < 4; si++)
      for (int hi = 0; hi < 4; hi++)
        for (int r = 0; r < 3; r++) begin
          s  = mod_e'(si);
          h  = mod_e'(hi);
          ht = mod_e'($urandom_range(3));
          t = gen_tone(s, ht, int'($urandom_range((1 << ref_bits(s)) - 1)),
                       int'($urandom_range(63)), 300, 1024);
          run_list(t, s, h);
        end
    // large noise and a large 1/sigma^2 drive the metric into saturation
    t = gen_tone(MOD_QAM16, MOD_QAM64, 5, 9, 12000, 65535);
    run_list(t, MOD_QAM16, MOD_QAM4);
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
