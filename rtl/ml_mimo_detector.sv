// 2x2 ML MIMO detector core of the MU-MIMO receiver.
//
// For one tone (received vector y, channel columns h1 and h2, inverse noise
// variance) and one hypothesis M_I about the co-scheduled user's constellation,
// the detector produces the list, over every desired-user symbol x1 of M_S, of
//     d(x1) = min over x2 in M_I of |y - h1 x1 - h2 x2|^2 / sigma^2
// together with the x2 that attains it, and the minimum of that list. These are
// the Euclidean distances that both the interferer classification and the
// max-log-MAP LLRs are built from. For M_I = "absent" the metric is simply
// |y - h1 x1|^2 / sigma^2 and x2 is reported as 0.
//
// How it works: the candidates x1 are swept one per clock. For each x1 the
// residual r = y - h1 x1 is formed and the inner minimisation over x2 is done
// by slicing, not by search: |r - h2 x2|^2 = |r|^2 - 2 Re(x2* z) + P |x2|^2 with
// z = h2^H r and P = |h2|^2, which separates into the in-phase and quadrature
// levels of x2. The nearest level in each dimension is found by comparing z
// against P times the decision boundaries between neighbouring levels, so no
// division is needed and the result is the exact minimum over the quantised
// constellation. The distance of the sliced x2 is then computed exactly (24
// fraction bits on the residual, 48 on the squared norm), scaled by 1/sigma^2
// and saturated to the 24-bit metric with 8 fraction bits.
//
// The detection function follows the paper (metric d(x) with R = sigma^2 I and
// one list entry per x1 of M_S); the serial sweep, the slicing method, the
// number formats and the handshake are this design's choices.
//
// Interface and timing: `start` is accepted when `ready` is high and latches
// tone, ms and mi. One list entry leaves on out_* per clock, the first one
// clock after start, |M_S| entries in all, the last flagged by out_last.
// `list_done` pulses one clock after the last entry with `list_min` valid.
// `ready` rises again in the clock of the last entry; a start taken then gives
// its first entry two clocks later, so back-to-back lists cost |M_S| + 1 clocks.
module ml_mimo_detector
  import mumimo_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  output logic     ready,
  input  tone_t    tone,
  input  mod_e     ms,        // desired user constellation (not MOD_NONE)
  input  mod_e     mi,        // interferer hypothesis
  output logic     out_valid,
  output sym_idx_t out_x1,
  output dist_t    out_dist,
  output sym_idx_t out_x2,
  output logic     out_last,
  output logic     list_done,
  output dist_t    list_min
);

  localparam int R_W = 36;  // residual, 24 fraction bits
  localparam int Z_W = 56;  // h2^H r, 36 fraction bits
  localparam int E_W = 80;  // squared norm, 48 fraction bits

  typedef logic signed [R_W-1:0] res_t;

  logic     busy;
  tone_t    t_q;
  mod_e     ms_q, mi_q;
  sym_idx_t k_q;
  sym_idx_t k_last;

  assign ready  = !busy;
  assign k_last = sym_idx_t'(mod_points(ms_q) - 1);

  // ---------------------------------------------------------------- candidate
  dist_t    cand_dist;
  sym_idx_t cand_x2;

  always_comb begin
    cplx_t                  x1, x2;
    res_t                   r_re [2], r_im [2];
    res_t                   e_re [2], e_im [2];
    logic signed [Z_W-1:0]  z_re, z_im;
    logic signed [Z_W-1:0]  pwr;
    logic signed [Z_W-1:0]  bnd;
    logic [E_W-1:0]         e2;
    logic [E_W+INVNV_W-1:0] scaled;
    int                     pam, sc, cnt_re, cnt_im, odd_re, odd_im, kk;

    x1 = mod_point(ms_q, k_q);
    for (int a = 0; a < 2; a++) begin
      r_re[a] = (res_t'(t_q.y[a].re) <<< SAMPLE_F)
              - (res_t'(t_q.h1[a].re) * res_t'(x1.re) - res_t'(t_q.h1[a].im) * res_t'(x1.im));
      r_im[a] = (res_t'(t_q.y[a].im) <<< SAMPLE_F)
              - (res_t'(t_q.h1[a].re) * res_t'(x1.im) + res_t'(t_q.h1[a].im) * res_t'(x1.re));
    end

    // z = h2^H r and P = |h2|^2
    z_re = '0;
    z_im = '0;
    pwr  = '0;
    for (int a = 0; a < 2; a++) begin
      z_re += Z_W'(t_q.h2[a].re) * Z_W'(r_re[a]) + Z_W'(t_q.h2[a].im) * Z_W'(r_im[a]);
      z_im += Z_W'(t_q.h2[a].re) * Z_W'(r_im[a]) - Z_W'(t_q.h2[a].im) * Z_W'(r_re[a]);
      pwr  += Z_W'(t_q.h2[a].re) * Z_W'(t_q.h2[a].re) + Z_W'(t_q.h2[a].im) * Z_W'(t_q.h2[a].im);
    end

    // Slice each dimension: the boundary between odd levels kk-1 and kk+1 is
    // at z = P * scale * kk (both sides carry 36 fraction bits).
    pam    = int'(mod_pam(mi_q));
    sc     = mod_scale(mi_q);
    cnt_re = 0;
    cnt_im = 0;
    for (int t = 0; t < 7; t++) begin
      kk  = 2 * t - 6;
      bnd = pwr * Z_W'(sc) * Z_W'(kk);
      if (kk >= 2 - pam && kk <= pam - 2) begin
        if (z_re > bnd) cnt_re++;
        if (z_im > bnd) cnt_im++;
      end
    end
    odd_re  = 2 * cnt_re + 1 - pam;
    odd_im  = 2 * cnt_im + 1 - pam;
    cand_x2 = mod_index(mi_q, odd_re, odd_im);
    x2      = mod_point(mi_q, cand_x2);

    e2 = '0;
    for (int a = 0; a < 2; a++) begin
      e_re[a] = r_re[a] - (res_t'(t_q.h2[a].re) * res_t'(x2.re) - res_t'(t_q.h2[a].im) * res_t'(x2.im));
      e_im[a] = r_im[a] - (res_t'(t_q.h2[a].re) * res_t'(x2.im) + res_t'(t_q.h2[a].im) * res_t'(x2.re));
      e2 += E_W'(unsigned'(E_W'(e_re[a]) * E_W'(e_re[a])))
          + E_W'(unsigned'(E_W'(e_im[a]) * E_W'(e_im[a])));
    end

    // d = |e|^2 / sigma^2, from 48+8 fraction bits down to DIST_F
    scaled = (E_W+INVNV_W)'(e2) * (E_W+INVNV_W)'(t_q.inv_nv);
    scaled = scaled >> (2 * 2 * SAMPLE_F + INVNV_F - DIST_F);
    if (|scaled[E_W+INVNV_W-1:DIST_W]) cand_dist = '1;
    else                               cand_dist = scaled[DIST_W-1:0];
  end

  // ------------------------------------------------------------------- sweep
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      k_q       <= '0;
      t_q       <= '0;
      ms_q      <= MOD_QAM4;
      mi_q      <= MOD_NONE;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_x1    <= '0;
      out_x2    <= '0;
      out_dist  <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (busy) begin
        out_valid <= 1'b1;
        out_x1    <= k_q;
        out_x2    <= cand_x2;
        out_dist  <= cand_dist;
        if (k_q == k_last) begin
          out_last <= 1'b1;
          busy     <= 1'b0;
        end
        k_q <= k_q + 1'b1;
      end
      if (start && ready) begin
        busy <= 1'b1;
        k_q  <= '0;
        t_q  <= tone;
        ms_q <= ms;
        mi_q <= mi;
      end
    end
  end

  // -------------------------------------------------------- minimum of list
  dist_t run_min, run_next;
  assign run_next = (out_x1 == '0 || out_dist < run_min) ? out_dist : run_min;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_min   <= '0;
      list_min  <= '0;
      list_done <= 1'b0;
    end else begin
      list_done <= 1'b0;
      if (out_valid) begin
        run_min <= run_next;
        if (out_last) begin
          list_min  <= run_next;
          list_done <= 1'b1;
        end
      end
    end
  end

  // A start while busy would be lost; the desired user always has symbols.
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> ready)
    else $error("start while the detector is busy");
  a_ms_valid: assert property (@(posedge clk) disable iff (!rst_n) start |-> ms != MOD_NONE)
    else $error("desired user constellation must not be MOD_NONE");

endmodule
