// Interferer constellation estimator (maximum-likelihood classification with
// the max-log-MAP approximation).
//
// For each hypothesis M_I in {absent, 4-QAM, 16-QAM, 64-QAM} it forms
//     T(M_I) = N ln|M_I| + sum over the N tones of min over x of d(x)
// and returns the hypothesis with the smallest T as the estimate M_I-hat.
// The per-tone minima arrive from the detector, one hypothesis at a time
// (acc_hyp), in any order of hypotheses and tones.
//
// How it works, following the paper's architecture figure: one adder adds the
// incoming tone minimum to the running sum of its hypothesis; at the last tone
// of the span a second adder adds the bias term of that hypothesis, chosen by
// a multiplexer from four constants, and the result is stored in that
// hypothesis' total register. A `decide` pulse then takes the minimum of the
// four totals. The figure draws a single register in the accumulator loop; as
// the four hypotheses of a tone are interleaved here, that register is a word
// per hypothesis, addressed by acc_hyp.
//
// The bias constants are N * BIAS_PER_TONE[h] in the distance format (8
// fraction bits). BIAS_PER_TONE defaults to round(256 * ln|M_I|), i.e. the
// N ln|M_I| of the classification rule. The architecture figure instead prints
// the bias inputs 0, 2N, 4N, 8N; those can be had with
// BIAS_PER_TONE = '{0, 512, 1024, 2048}. Ties go to the smaller constellation.
//
// Interface and timing: acc_en with acc_first (first tone of the span: the sum
// restarts) and acc_last (last tone: the total is written). The totals are
// visible on `metric` the clock after the acc_last write; mi_hat and the
// est_valid pulse appear one clock after `decide`.
module constellation_estimator
  import mumimo_pkg::*;
#(
  parameter int unsigned N_TONES = 12,
  parameter int unsigned BIAS_PER_TONE [NUM_HYP] = '{0, 355, 710, 1065},
  parameter int unsigned ACC_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             acc_en,
  input  logic             acc_first,
  input  logic             acc_last,
  input  mod_e             acc_hyp,
  input  dist_t            acc_dist,
  input  logic             decide,
  output logic             est_valid,
  output mod_e             mi_hat,
  output logic [ACC_W-1:0] metric [NUM_HYP]
);

  typedef logic [ACC_W-1:0] acc_t;

  acc_t acc [NUM_HYP];
  acc_t sum, bias;

  // accumulator adder
  assign sum = (acc_first ? acc_t'(0) : acc[acc_hyp]) + acc_t'(acc_dist);

  // bias-term multiplexer
  always_comb begin
    bias = '0;
    for (int h = 0; h < NUM_HYP; h++)
      if (acc_hyp == mod_e'(h)) bias = acc_t'(N_TONES * BIAS_PER_TONE[h]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < NUM_HYP; h++) begin
        acc[h]    <= '0;
        metric[h] <= '0;
      end
    end else if (acc_en) begin
      acc[acc_hyp] <= sum;
      if (acc_last) metric[acc_hyp] <= sum + bias;
    end
  end

  // minimum of the four totals
  mod_e best;
  always_comb begin
    best = MOD_NONE;
    for (int h = 1; h < NUM_HYP; h++)
      if (metric[h] < metric[best]) best = mod_e'(h);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est_valid <= 1'b0;
      mi_hat    <= MOD_NONE;
    end else begin
      est_valid <= decide;
      if (decide) mi_hat <= best;
    end
  end

endmodule
