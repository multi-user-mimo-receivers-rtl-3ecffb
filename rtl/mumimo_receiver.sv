// 2x2 MU-MIMO receiver with joint interferer-constellation classification and
// max-log-MAP detection.
//
// Two users share each tone; the receiver knows both users' channels but not
// the constellation of the co-scheduled (interfering) user. It decides that
// constellation among {absent, 4-QAM, 16-QAM, 64-QAM} by maximum likelihood
// over a span of N tones, and computes the desired user's bit LLRs with the
// interferer's symbols jointly detected. Classification and detection use the
// same Euclidean distances, so one ML detector core serves both.
//
// Blocks: ml_mimo_detector (distance lists), distance_buffer_bank (one list
// buffer per hypothesis, write demultiplexer and read multiplexer),
// constellation_estimator (accumulate, add bias, minimum) and llr_processing.
// The controller here sequences two modes, chosen per tone by tone_mode:
//   * MODE_CLASSIFY: the detector runs all four hypotheses on the tone; each
//     list goes to its buffer and its minimum to the estimator. After the N-th
//     consecutive classification tone the estimate M_I-hat is decided, latched,
//     and the LLRs of that tone are produced from the buffer of M_I-hat. The
//     earlier N-1 tones of a span produce no LLRs, as the buffers hold a single
//     tone (|M_S| entries each); a system re-runs them in detection mode.
//   * MODE_DETECT: normal ML detection. The detector runs only the latched
//     M_I-hat hypothesis and LLRs follow for every tone. A detection tone also
//     restarts the count of a classification span. Before any classification
//     the latched estimate is "absent" (single-user ML detection).
// The set of modes, the buffers, the accumulation and the selection follow the
// paper; the tone-by-tone sequencing, the handshake and the reset values are
// this design's choices.
//
// Interface: a tone is taken when tone_valid and tone_ready are both high
// (tone, tone_mode and ms sampled then; tone_valid must hold until taken).
// One LLR vector leaves per detected tone with llr_valid (a one-clock pulse,
// no back-pressure), together with the hard decisions and the hypothesis used.
// mi_hat_valid pulses when a classification span ends; metric holds its four
// totals. Timing per tone with P = |M_S| points, from the clock edge that
// takes the tone: in detection mode llr_valid after 2P + 5 edges and
// tone_ready again after 2P + 6; in classification mode tone_ready again after
// 4P + 12, except on the tone that ends a span, whose mi_hat_valid comes after
// 4P + 13, llr_valid after 5P + 16 and tone_ready after 5P + 17. mi_hat holds
// the latest estimate from the mi_hat_valid pulse on.
module mumimo_receiver
  import mumimo_pkg::*;
#(
  parameter int unsigned N_TONES = 12,
  parameter int unsigned BIAS_PER_TONE [NUM_HYP] = '{0, 355, 710, 1065},
  parameter int unsigned ACC_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  // tone input
  input  logic             tone_valid,
  output logic             tone_ready,
  input  tone_t            tone,
  input  rx_mode_e         tone_mode,
  input  mod_e             ms,
  // LLR output
  output logic             llr_valid,
  output llr_t             llr [MAX_BITS],
  output sym_idx_t         x1_hat,
  output sym_idx_t         x2_hat,
  output mod_e             llr_mi,
  // classification result
  output logic             mi_hat_valid,
  output mod_e             mi_hat,
  output logic [ACC_W-1:0] metric [NUM_HYP]
);

  typedef enum logic [2:0] {
    S_IDLE, S_RUN, S_WAIT, S_DECIDE, S_WAIT_EST, S_LLR_START, S_LLR_WAIT
  } state_e;

  localparam int CNT_W = $clog2(N_TONES + 1);

  state_e           state;
  tone_t            tone_q;
  rx_mode_e         mode_q;
  mod_e             ms_q;
  mod_e             hyp_q;      // hypothesis the detector runs (M_I)
  mod_e             sel_q;      // hypothesis forwarded to LLR processing
  mod_e             mi_q;       // latched estimate M_I-hat
  logic [CNT_W-1:0] cls_cnt;

  // detector
  logic     det_start, det_ready, det_valid, det_last, det_done;
  sym_idx_t det_x1, det_x2;
  dist_t    det_dist, det_min;

  // estimator
  logic est_acc, est_first, est_last, est_decide, est_valid;
  mod_e est_mi;

  // LLR processing and buffers
  logic        llr_start, llr_ready, rd_en;
  sym_idx_t    rd_addr;
  dist_entry_t rd_data;

  assign tone_ready = (state == S_IDLE);
  assign det_start  = (state == S_RUN);
  assign llr_start  = (state == S_LLR_START);
  assign est_decide = (state == S_DECIDE);
  assign est_acc    = (state == S_WAIT) && det_done && (mode_q == MODE_CLASSIFY);
  assign est_first  = (cls_cnt == '0);
  assign est_last   = (cls_cnt == CNT_W'(N_TONES - 1));

  ml_mimo_detector u_det (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (det_start),
    .ready     (det_ready),
    .tone      (tone_q),
    .ms        (ms_q),
    .mi        (hyp_q),
    .out_valid (det_valid),
    .out_x1    (det_x1),
    .out_dist  (det_dist),
    .out_x2    (det_x2),
    .out_last  (det_last),
    .list_done (det_done),
    .list_min  (det_min)
  );

  distance_buffer_bank #(.ENTRIES(MAX_POINTS)) u_bufs (
    .clk     (clk),
    .wr_en   (det_valid),
    .wr_sel  (hyp_q),
    .wr_addr (det_x1),
    .wr_data ('{dmin: det_dist, x2: det_x2}),
    .rd_en   (rd_en),
    .rd_sel  (sel_q),
    .rd_addr (rd_addr),
    .rd_data (rd_data)
  );

  constellation_estimator #(
    .N_TONES       (N_TONES),
    .BIAS_PER_TONE (BIAS_PER_TONE),
    .ACC_W         (ACC_W)
  ) u_est (
    .clk       (clk),
    .rst_n     (rst_n),
    .acc_en    (est_acc),
    .acc_first (est_first),
    .acc_last  (est_last),
    .acc_hyp   (hyp_q),
    .acc_dist  (det_min),
    .decide    (est_decide),
    .est_valid (est_valid),
    .mi_hat    (est_mi),
    .metric    (metric)
  );

  llr_processing u_llr (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (llr_start),
    .ms        (ms_q),
    .ready     (llr_ready),
    .rd_en     (rd_en),
    .rd_addr   (rd_addr),
    .rd_data   (rd_data),
    .llr_valid (llr_valid),
    .llr       (llr),
    .x1_hat    (x1_hat),
    .x2_hat    (x2_hat)
  );

  assign llr_mi       = sel_q;
  assign mi_hat       = est_mi;
  assign mi_hat_valid = est_valid;

  // ---------------------------------------------------------- mode control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      tone_q  <= '0;
      mode_q  <= MODE_DETECT;
      ms_q    <= MOD_QAM4;
      hyp_q   <= MOD_NONE;
      sel_q   <= MOD_NONE;
      mi_q    <= MOD_NONE;
      cls_cnt <= '0;
    end else begin
      case (state)
        S_IDLE: if (tone_valid) begin
          tone_q <= tone;
          mode_q <= tone_mode;
          ms_q   <= ms;
          if (tone_mode == MODE_CLASSIFY) begin
            hyp_q <= MOD_NONE;
          end else begin
            hyp_q   <= mi_q;
            cls_cnt <= '0;
          end
          state <= S_RUN;
        end
        S_RUN:  state <= S_WAIT;
        S_WAIT: if (det_done) begin
          if (mode_q == MODE_DETECT) begin
            sel_q <= hyp_q;
            state <= S_LLR_START;
          end else if (hyp_q != MOD_QAM64) begin
            hyp_q <= mod_e'(hyp_q + 1'b1);
            state <= S_RUN;
          end else if (est_last) begin
            state <= S_DECIDE;
          end else begin
            cls_cnt <= cls_cnt + 1'b1;
            state   <= S_IDLE;
          end
        end
        S_DECIDE: state <= S_WAIT_EST;
        S_WAIT_EST: if (est_valid) begin
          mi_q    <= est_mi;
          sel_q   <= est_mi;
          cls_cnt <= '0;
          state   <= S_LLR_START;
        end
        S_LLR_START: state <= S_LLR_WAIT;
        S_LLR_WAIT:  if (llr_valid) state <= S_IDLE;
        default:     state <= S_IDLE;
      endcase
    end
  end

  a_det_ready: assert property (@(posedge clk) disable iff (!rst_n) det_start |-> det_ready)
    else $error("detector started while busy");
  a_llr_ready: assert property (@(posedge clk) disable iff (!rst_n) llr_start |-> llr_ready)
    else $error("LLR processing started while busy");
  a_list_done: assert property (@(posedge clk) disable iff (!rst_n) det_last |=> det_done)
    else $error("detector list end without list_done");
  a_tone_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                tone_valid && !tone_ready |=> tone_valid)
    else $error("tone_valid dropped before the tone was taken");

endmodule
