// Max-log-MAP LLR processing of the desired user's symbol.
//
// From the distance list of the selected interferer hypothesis (one minimum
// distance d(x1) per desired-user symbol x1, already minimised over the
// interferer's symbols) it computes, for every bit b_j of x1,
//     LLR(b_j) = min{d : b_j = -1} - min{d : b_j = +1},
// so that a positive LLR favours b_j = +1 (bit value 0). It also returns the
// hard decision: the x1 with the smallest distance and its associated x2.
//
// How it works: after `start` it reads the list from the distance buffer, one
// address per clock (rd_en/rd_addr, data one clock later), and keeps for each
// of the six bit positions a running minimum for bit value 0 and for bit value
// 1. The LLR formula is the paper's; the serial read and the formats are this
// design's choices. LLRs of bits above log2|M_S| are output as 0.
//
// Timing: a list of |M_S| entries gives llr_valid |M_S| + 1 clock edges after
// the edge that samples start. `ready` is low from start to llr_valid.
module llr_processing
  import mumimo_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  mod_e        ms,
  output logic        ready,
  output logic        rd_en,
  output sym_idx_t    rd_addr,
  input  dist_entry_t rd_data,
  output logic        llr_valid,
  output llr_t        llr [MAX_BITS],
  output sym_idx_t    x1_hat,
  output sym_idx_t    x2_hat
);

  mod_e     ms_q;
  logic     busy;
  logic     rd_q, last_q;
  sym_idx_t addr_q;
  dist_t    min0 [MAX_BITS];
  dist_t    min1 [MAX_BITS];
  dist_t    best_d;

  sym_idx_t rd_k;
  dist_t    nmin0 [MAX_BITS];
  dist_t    nmin1 [MAX_BITS];

  assign ready   = !busy;
  assign rd_k    = addr_q - 1'b1;  // address whose data is on rd_data

  // running minima including the entry now on rd_data; the first address
  // with bit j = 0 is 0, the first with bit j = 1 is 2^j
  always_comb begin
    for (int j = 0; j < MAX_BITS; j++) begin
      nmin0[j] = min0[j];
      nmin1[j] = min1[j];
      if (!rd_k[j]) begin
        if (rd_k == '0 || rd_data.dmin < min0[j]) nmin0[j] = rd_data.dmin;
      end else begin
        if (rd_k == sym_idx_t'(1 << j) || rd_data.dmin < min1[j]) nmin1[j] = rd_data.dmin;
      end
    end
  end
  assign rd_en   = busy && !last_q;
  assign rd_addr = addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      ms_q      <= MOD_QAM4;
      rd_q      <= 1'b0;
      last_q    <= 1'b0;
      addr_q    <= '0;
      llr_valid <= 1'b0;
      best_d    <= '0;
      x1_hat    <= '0;
      x2_hat    <= '0;
      for (int j = 0; j < MAX_BITS; j++) begin
        min0[j] <= '0;
        min1[j] <= '0;
        llr[j]  <= '0;
      end
    end else begin
      llr_valid <= 1'b0;
      rd_q      <= rd_en;
      if (rd_en) begin
        addr_q <= addr_q + 1'b1;
        if (addr_q == sym_idx_t'(mod_points(ms_q) - 1)) last_q <= 1'b1;
      end

      // data of the address read in the previous clock
      if (rd_q) begin
        for (int j = 0; j < MAX_BITS; j++) begin
          min0[j] <= nmin0[j];
          min1[j] <= nmin1[j];
        end
        if (rd_k == '0 || rd_data.dmin < best_d) begin
          best_d <= rd_data.dmin;
          x1_hat <= rd_k;
          x2_hat <= rd_data.x2;
        end
        if (last_q) begin
          busy      <= 1'b0;
          last_q    <= 1'b0;
          llr_valid <= 1'b1;
          for (int j = 0; j < MAX_BITS; j++)
            llr[j] <= (j < int'(mod_bits(ms_q))) ? llr_t'(nmin1[j]) - llr_t'(nmin0[j]) : '0;
        end
      end

      if (start && ready) begin
        busy   <= 1'b1;
        ms_q   <= ms;
        addr_q <= '0;
        last_q <= 1'b0;
      end
    end
  end
endmodule
