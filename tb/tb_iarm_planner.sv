// tb_iarm_planner: runs the planner the way the control unit does, against
// a shadow of COLS column counters with random masks. Each column keeps, per
// digit, "digit value + 2n * flag" as an integer. The test checks that
//   - no column digit ever exceeds 4n-1 (no carry is lost),
//   - the planner's bound covers every column,
//   - a ripple always finds room in the next digit,
//   - every column's value equals the masked sum of its inputs (mod capacity),
// for radix 10 (n=5, 5 digits) and increments drawn 0..99. It also replays
// the paper's example of repeated +9 on 9999 and counts ripples.
module tb_iarm_planner;
  localparam int N = 5, R = 10, D = 5, CAP = 4 * N - 1, COLS = 32;
  localparam int DIW = 3, HW = $clog2(4 * N + R);
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr = 0, relax = 0, rip_fire = 0, add_fire = 0;
  logic [DIW-1:0] rip_digit = '0, add_digit = '0, q_digit = '0;
  logic [3:0] add_amt = '0, q_amt = '0;
  logic q_need_ripple, f_pending;
  logic [DIW-1:0] q_ripple_digit, f_ripple_digit;
  logic [HW-1:0] bound [D];
  assign bound = dut.h;   // internal bounds, observed hierarchically

  iarm_planner #(.N_BITS(N), .DIGITS(D)) dut (.*);

  int col [COLS][D];
  longint unsigned truth [COLS];
  int ripples = 0;

  function automatic longint unsigned col_value(input int c);
    longint unsigned v, w;
    v = 0; w = 1;
    for (int d = 0; d < D; d++) begin
      v += longint'(col[c][d]) * w;
      w *= R;
    end
    return v % (R ** D);
  endfunction

  task automatic do_ripple(input int j);
    checks++;
    if (j + 1 < D && int'(bound[j+1]) + 1 > CAP) begin
      failures++;
      $display("ripple of %0d without room above", j);
    end
    for (int c = 0; c < COLS; c++)
      if (col[c][j] >= R) begin
        col[c][j] -= R;
        if (j + 1 < D) col[c][j+1] += 1;
      end
    @(negedge clk);
    rip_fire = 1; rip_digit = DIW'(j);
    @(negedge clk);
    rip_fire = 0;
    ripples++;
  endtask

  task automatic accumulate(input int value, input logic [COLS-1:0] m);
    int v;
    v = value;
    for (int d = 0; d < D && v != 0; d++) begin
      int x;
      x = v % R;
      v = v / R;
      if (x != 0) begin
        @(negedge clk);
        q_digit = DIW'(d); q_amt = 4'(x);
        #1;
        while (q_need_ripple) begin
          do_ripple(int'(q_ripple_digit));
          #1;
        end
        for (int c = 0; c < COLS; c++) if (m[c]) col[c][d] += x;
        @(negedge clk);
        add_fire = 1; add_digit = DIW'(d); add_amt = 4'(x);
        @(negedge clk);
        add_fire = 0;
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (col[c][d] > CAP || col[c][d] > int'(bound[d])) begin
            failures++;
            if (failures < 10) $display("col %0d digit %0d = %0d bound %0d", c, d, col[c][d], bound[d]);
          end
        end
      end
    end
    for (int c = 0; c < COLS; c++) if (m[c]) truth[c] += longint'(value);
  endtask

  task automatic flush();
    @(negedge clk);
    #1;
    while (f_pending) begin
      do_ripple(int'(f_ripple_digit));
      #1;
    end
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (col_value(c) != truth[c] % (R ** D)) failures++;
      for (int d = 0; d < D; d++) begin
        checks++;
        if (col[c][d] >= R) failures++;   // no pending flag after a flush
      end
    end
  endtask

  initial begin
    for (int c = 0; c < COLS; c++) begin
      truth[c] = 0;
      for (int d = 0; d < D; d++) col[c][d] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // the paper's example: counters at 9999, repeated +9 on every column
    for (int c = 0; c < COLS; c++) begin
      truth[c] = 9999;
      for (int d = 0; d < 4; d++) col[c][d] = 9;
    end
    // bound of a digit holding 9 everywhere: add 9 to digits 0..3 once
    for (int d = 0; d < 4; d++) begin
      @(negedge clk);
      add_fire = 1; add_digit = DIW'(d); add_amt = 4'd9;
      @(negedge clk);
      add_fire = 0;
    end
    ripples = 0;
    for (int s = 0; s < 13; s++) accumulate(9, '1);
    checks++;
    // As in the paper's example: twelve ripples out of the units digit
    // (steps 2..13) and one out of the tens digit (step 13), where rippling
    // every digit after every add would take 13 x 5.
    if (ripples != 13) failures++;
    $display("IARM example: 13 x (+9) on 9999 needed %0d ripples", ripples);
    flush();
    // random masked accumulation
    for (int t = 0; t < 400; t++) begin
      logic [COLS-1:0] m;
      m = {$urandom, $urandom};
      accumulate(int'($urandom_range(99)), m);
      if (t % 100 == 99) flush();
    end
    flush();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
