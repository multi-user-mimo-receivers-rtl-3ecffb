// One distance buffer: a simple dual-port memory of ENTRIES words holding, for
// every desired-user symbol x1 (the address), the minimum distance d(x1) of
// one interferer hypothesis and the co-scheduled symbol x2 that attains it.
// Written as an array so that synthesis can map it to a register file or a
// small SRAM. Write: one word per clock when wr_en. Read: synchronous, data
// one clock after rd_en. A read and a write of the same address in one clock
// return the old word. The buffer of |M_S| entries is the paper's; the port
// arrangement is this design's choice.
module distance_buffer
  import mumimo_pkg::*;
#(
  parameter int unsigned ENTRIES = MAX_POINTS
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_addr,
  input  dist_entry_t                wr_data,
  input  logic                       rd_en,
  input  logic [$clog2(ENTRIES)-1:0] rd_addr,
  output dist_entry_t                rd_data
);

  dist_entry_t mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
