// Self-checking testbench of distance_buffer_bank. Fills all four buffers
// through the write demultiplexer with distinct random words, reads every
// address of every buffer back through the output multiplexer (data one
// clock after rd_en), overwrites one buffer and checks that the other three
// kept their contents, and checks read-before-write on a same-address clash.
module distance_buffer_bank_tb;
  import mumimo_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        wr_en = 1'b0, rd_en = 1'b0;
  mod_e        wr_sel = MOD_NONE, rd_sel = MOD_NONE;
  logic [5:0]  wr_addr = '0, rd_addr = '0;
  dist_entry_t wr_data = '0, rd_data;

  dist_entry_t model [4][64];
  int checks = 0, failures = 0;

  distance_buffer_bank dut (.*);

  task automatic write(int h, int a, dist_entry_t d);
    @(negedge clk);
    wr_en = 1'b1; wr_sel = mod_e'(h); wr_addr = 6'(a); wr_data = d;
    model[h][a] = d;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic read_check(int h, int a);
    @(negedge clk);
    rd_en = 1'b1; rd_sel = mod_e'(h); rd_addr = 6'(a);
    @(negedge clk);
    rd_en = 1'b0; rd_sel = mod_e'((h + 1) % 4);  // data must follow the sampled select
    checks++;
    if (rd_data !== model[h][a]) begin
      failures++;
      if (failures < 10) $display("FAIL buf %0d addr %0d: %h vs %h", h, a, rd_data, model[h][a]);
    end
  endtask

  initial begin
    dist_entry_t d, old;
    for (int h = 0; h < 4; h++)
      for (int a = 0; a < 64; a++) begin
        d.dmin = 24'($urandom); d.x2 = 6'($urandom);
        write(h, a, d);
      end
    for (int h = 0; h < 4; h++)
      for (int a = 0; a < 64; a++) read_check(h, a);
    for (int a = 0; a < 64; a++) begin
      d.dmin = 24'($urandom); d.x2 = 6'($urandom);
      write(2, a, d);
    end
    for (int h = 0; h < 4; h++)
      for (int a = 0; a < 64; a += 3) read_check(h, a);
    // simultaneous read and write of one address returns the old word
    @(negedge clk);
    old = model[1][7];
    d.dmin = 24'h123456; d.x2 = 6'h2a;
    wr_en = 1'b1; wr_sel = MOD_QAM4; wr_addr = 6'd7; wr_data = d;
    rd_en = 1'b1; rd_sel = MOD_QAM4; rd_addr = 6'd7;
    @(negedge clk);
    wr_en = 1'b0; rd_en = 1'b0;
    checks++;
    if (rd_data !== old) begin failures++; $display("FAIL read-before-write"); end
    model[1][7] = d;
    read_check(1, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
