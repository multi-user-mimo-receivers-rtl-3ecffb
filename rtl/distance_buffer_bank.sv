// Bank of the four distance buffers, one per interferer hypothesis (absent,
// 4-QAM, 16-QAM, 64-QAM), each of |M_S| = ENTRIES entries, with the
// demultiplexer in front and the multiplexer behind them.
//
// The detector's list for hypothesis wr_sel is steered by the demultiplexer
// into buffer wr_sel (address = desired-user symbol index x1). The
// multiplexer forwards the buffer chosen by rd_sel, in the receiver the
// estimated interferer constellation, to LLR processing. Keeping all four
// lists of a tone means that once the classification has decided, the
// distances of the winning hypothesis are already there and need not be
// recomputed.
//
// Timing: writes take effect at the clock edge; reads are synchronous with
// rd_data valid one clock after rd_en (rd_sel is sampled with rd_en). The four
// buffers and the two selectors follow the paper's architecture figure; the
// port timing is this design's choice.
module distance_buffer_bank
  import mumimo_pkg::*;
#(
  parameter int unsigned ENTRIES = MAX_POINTS
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  mod_e                       wr_sel,
  input  logic [$clog2(ENTRIES)-1:0] wr_addr,
  input  dist_entry_t                wr_data,
  input  logic                       rd_en,
  input  mod_e                       rd_sel,
  input  logic [$clog2(ENTRIES)-1:0] rd_addr,
  output dist_entry_t                rd_data
);

  dist_entry_t buf_rd [NUM_HYP];
  mod_e        rd_sel_q;

  for (genvar h = 0; h < NUM_HYP; h++) begin : g_buf
    distance_buffer #(.ENTRIES(ENTRIES)) u_buf (
      .clk     (clk),
      .wr_en   (wr_en && wr_sel == mod_e'(h)),
      .wr_addr (wr_addr),
      .wr_data (wr_data),
      .rd_en   (rd_en && rd_sel == mod_e'(h)),
      .rd_addr (rd_addr),
      .rd_data (buf_rd[h])
    );
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_sel_q <= rd_sel;
  end

  assign rd_data = buf_rd[rd_sel_q];

endmodule
