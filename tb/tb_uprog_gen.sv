// tb_uprog_gen: self-checking test of the digit uProgram sequencer for
// radix 4, 8 and 10 (n = 2, 4, 5: single rotation cycles, two cycles and
// prime n), every k, increment and decrement, random digits, flags and
// masks, executed on the subarray model. Also checks the command count of
// each uProgram (7n + 7 for a unit increment).
module tb_uprog_gen;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;
  logic fin2, fin4, fin5;
  int c2, c4, c5, f2, f4, f5;
  int checks, failures;

  uprog_harness #(.N_BITS(2)) h2 (.clk, .rst_n, .go, .finished(fin2), .checks(c2), .failures(f2));
  uprog_harness #(.N_BITS(4)) h4 (.clk, .rst_n, .go, .finished(fin4), .checks(c4), .failures(f4));
  uprog_harness #(.N_BITS(5)) h5 (.clk, .rst_n, .go, .finished(fin5), .checks(c5), .failures(f5));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    go = 1;
    wait (fin2 && fin4 && fin5);
    checks   = c2 + c4 + c5;
    failures = f2 + f4 + f5;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c4 + c5, f2 + f4 + f5 + 1);
    $finish;
  end
endmodule
