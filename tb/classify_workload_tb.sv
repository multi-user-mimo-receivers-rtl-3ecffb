// Workload testbench: interferer-constellation classification as evaluated
// for the architecture, with spans of N = 1, 12 and 24 tones side by side
// (three receivers, only N differs), desired user 4-QAM or 64-QAM, interferer
// 4-, 16- or 64-QAM, SNR 0, 10 and 20 dB. Each receiver's estimates and span
// totals are checked against the reference model; the rates of correct
// classification are printed.
module classify_workload_tb;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic go = 1'b0;
  always #5 clk = ~clk;

  logic done [3];
  int   c [3], f [3];

  classify_run #(.N(1),  .SPANS(40)) u_n1  (.clk, .rst_n, .go, .done(done[0]), .checks(c[0]), .failures(f[0]));
  classify_run #(.N(12), .SPANS(12)) u_n12 (.clk, .rst_n, .go, .done(done[1]), .checks(c[1]), .failures(f[1]));
  classify_run #(.N(24), .SPANS(12)) u_n24 (.clk, .rst_n, .go, .done(done[2]), .checks(c[2]), .failures(f[2]));

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    go = 1'b1;
    wait (done[0] && done[1] && done[2]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2]);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2] + 1);
    $finish;
  end
endmodule
