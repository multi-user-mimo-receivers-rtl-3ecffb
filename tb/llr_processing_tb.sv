// Self-checking testbench of llr_processing. A testbench memory answers the
// block's reads one clock later, like a distance buffer. Random distance
// lists (with repeated values, to exercise ties) are processed for 4-, 16- and
// 64-QAM; the LLRs are compared with a direct max-log evaluation, unused bit
// positions must be 0, the hard decision must be a list entry of minimum
// distance, and llr_valid must come |M_S| + 1 clock edges after the edge that
// samples start.
module llr_processing_tb;
  import mumimo_pkg::*;
  import mumimo_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0, ready, rd_en, llr_valid;
  mod_e        ms = MOD_QAM4;
  sym_idx_t    rd_addr, x1_hat, x2_hat;
  dist_entry_t rd_data;
  llr_t        llr [MAX_BITS];

  dist_entry_t mem [64];
  int checks = 0, failures = 0;

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  llr_processing dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    int unsigned dl [64];
    int n, lat, q, mn;
    mod_e s;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 30; r++) begin
      s = mod_e'(1 + r % 3);
      q = ref_bits(s);
      n = 1 << q;
      for (int k = 0; k < 64; k++) begin
        dl[k] = (r % 2) ? $urandom_range(40) : $urandom_range(24'hFFFFFF);
        mem[k].dmin = dist_t'(dl[k]);
        mem[k].x2   = 6'($urandom);
      end
      @(negedge clk);
      ms = s; start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!llr_valid && lat < 200) begin @(negedge clk); lat++; end
      chk(lat == n + 2, $sformatf("latency %0d, expected %0d", lat, n + 2));
      for (int j = 0; j < MAX_BITS; j++)
        if (j < q) chk(int'(llr[j]) == ref_llr(dl, s, j),
                       $sformatf("%s bit %0d llr %0d ref %0d", s.name(), j, llr[j], ref_llr(dl, s, j)));
        else chk(llr[j] == '0, "unused bit LLR is 0");
      mn = int'(dl[0]);
      for (int k = 1; k < n; k++) if (int'(dl[k]) < mn) mn = int'(dl[k]);
      chk(int'(x1_hat) < n && int'(dl[x1_hat]) == mn, "hard decision has minimum distance");
      chk(x2_hat == mem[x1_hat].x2, "x2 of the hard decision");
      chk(ready, "ready after llr_valid");
    end
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
