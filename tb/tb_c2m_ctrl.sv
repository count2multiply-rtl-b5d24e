// tb_c2m_ctrl: end-to-end test of the control unit driving the subarray
// model, at reduced size (radix 4, 8 digits, 64 columns, 128 rows).
// Workloads: integer-vector x binary-matrix (random signed 8-bit X, random
// mask rows, some zero inputs), bit-sliced integer matrix (power-of-two
// scaled, signed slices), and a long same-sign run that exercises IARM
// ripples. After each phase it flushes, reads the counters back through the
// host port and compares every column with the masked sum. It checks the
// 7n+7-command cost of a unit increment and counts each mechanism:
// ripples, direction switches, skipped zero inputs/digits, long (k > n) and
// short flag programs, clears, flushes with pending flags. A last phase adds
// random counter arrays stored in the subarray to the counters (counter
// addition), including on top of pending flags and after a decrement, then
// shift-left (copy + self-addition) and ReLU on mixed-sign counters.
module tb_c2m_ctrl;
  import c2m_pkg::*;
  import jc_ref_pkg::*;

  localparam int N_BITS = 2, DIGITS = 8, COLS = 64, ROWS = 128;
  localparam int CNT_BASE = 2, MASK_BASE = 40, MASK_ROWS = 16, ADDC_BASE = 60;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_neg = 0, busy, cmd_valid, cmd_ready;
  req_op_e req_op = REQ_CLEAR;
  logic signed [7:0] req_x = '0;
  logic [2:0] req_shift = '0;
  logic [ROW_IW-1:0] req_mask = '0;
  cim_cmd_t cmd;
  dir_e cur_dir;
  logic [31:0] st_cmds, st_adds, st_ripples, st_skipped, st_switches;
  logic wr_en = 0;
  logic [ROW_IW-1:0] wr_row = '0, rd_row = '0;
  logic [COLS-1:0] wr_data = '0, rd_data;
  int unsigned err_count, maj_count;

  c2m_ctrl #(.N_BITS(N_BITS), .DIGITS(DIGITS), .ROWS(ROWS), .CNT_BASE(CNT_BASE)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_op, .req_x, .req_shift, .req_neg,
    .req_mask, .cmd_valid, .cmd_ready, .cmd, .busy, .cur_dir,
    .st_cmds, .st_adds, .st_ripples, .st_skipped, .st_switches
  );

  ambit_subarray_model #(.ROWS(ROWS), .COLS(COLS)) mem (
    .clk, .cmd_valid, .cmd_ready, .cmd, .wr_en, .wr_row, .wr_data, .rd_row, .rd_data,
    .flip_en(1'b0), .flip_col(0), .err_count, .maj_count
  );

  `include "c2m_drive.svh"

  // mechanism counters seen on the command stream
  int n_long_flag = 0, n_flush_pending = 0, n_clear = 0, n_addc_ripples = 0;
  always @(posedge clk)
    if (cmd_valid && cmd_ready && cmd.op == CIM_AP && cmd.src.grp == GRP_B && cmd.src.idx == B13)
      n_long_flag++;   // B13 is only opened by the k > n flag programs

  initial begin
    int c0, r0, s0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < MASK_ROWS; i++) begin
      masks[i] = {$urandom, $urandom};
      host_write(MASK_BASE + i, masks[i]);
    end
    clear_all(); n_clear++;

    // unit increment on cleared counters: 7n + 7 commands
    c0 = int'(st_cmds);
    acc(1, 0, 0, 0);
    checks++;
    if (int'(st_cmds) - c0 != 7 * N_BITS + 7) begin
      failures++;
      $display("unit increment took %0d commands", int'(st_cmds) - c0);
    end
    flush_and_check();

    // phase 1: integer vector x binary matrix, signed inputs
    for (int i = 0; i < 60; i++) begin
      int x;
      x = (i % 7 == 3) ? 0 : int'($urandom_range(255)) - 128;
      acc(x, 0, 0, int'($urandom_range(MASK_ROWS - 1)));
    end
    flush_and_check();

    // phase 2: bit-sliced integer matrix: slices of weight +-2**s
    for (int i = 0; i < 40; i++)
      acc(int'($urandom_range(255)) - 128, int'($urandom_range(7)), bit'($urandom_range(1)),
          int'($urandom_range(MASK_ROWS - 1)));
    flush_and_check();

    // phase 3: long positive run, IARM defers ripples
    clear_all(); n_clear++;
    r0 = int'(st_ripples);
    s0 = int'(st_adds);
    for (int i = 0; i < 80; i++) acc(int'($urandom_range(127)), 0, 0, int'($urandom_range(MASK_ROWS - 1)));
    checks++;
    if (int'(st_ripples) - r0 >= int'(st_adds) - s0) failures++;   // fewer ripples than digit adds
    $display("IARM run: %0d digit uPrograms, %0d ripples", int'(st_adds) - s0, int'(st_ripples) - r0);
    r0 = int'(st_ripples);
    flush_and_check();
    if (int'(st_ripples) > r0) n_flush_pending++;

    // phase 4: wrap below zero (radix-complement result)
    clear_all(); n_clear++;
    acc(-5, 0, 0, 1);
    acc(3, 0, 0, 1);
    flush_and_check();

    // phase 5: counter-to-counter addition, twice in a row (second one on
    // counters with pending flags), then after a decrement (direction switch)
    r0 = int'(st_ripples);
    add_counters(ADDC_BASE);
    add_counters(ADDC_BASE);
    flush_and_check();
    acc(-77, 0, 0, 2);
    add_counters(ADDC_BASE);
    flush_and_check();
    n_addc_ripples = int'(st_ripples) - r0;

    // phase 6: shift-left by self-addition and ReLU on mixed-sign counters
    clear_all(); n_clear++;
    for (int i = 0; i < 12; i++) acc(int'($urandom_range(255)) - 128, 0, 0, int'($urandom_range(MASK_ROWS - 1)));
    shift_left1(ADDC_BASE);
    shift_left1(ADDC_BASE);
    flush_and_check();
    begin
      int npos, nneg;
      npos = 0; nneg = 0;
      for (int c = 0; c < COLS; c++) if (exp_cnt[c] >= 32768) nneg++; else if (exp_cnt[c] > 0) npos++;
      relu();
      flush_and_check();
      checks++;
      if (nneg == 0 || npos == 0) begin failures++; $display("ReLU saw no mix of signs"); end
      $display("ReLU: %0d negative and %0d positive counters", nneg, npos);
    end

    checks++;
    if (err_count != 0) begin failures++; $display("illegal commands: %0d", err_count); end
    $display("mechanisms: ripples=%0d switches=%0d skipped=%0d long_flag=%0d clears=%0d flush_with_pending=%0d addc_ripples=%0d cmds=%0d",
             st_ripples, st_switches, st_skipped, n_long_flag, n_clear, n_flush_pending, n_addc_ripples, st_cmds);
    checks += 7;
    if (n_addc_ripples == 0)  begin failures++; $display("no ripple during counter addition"); end
    if (st_ripples == 0)      begin failures++; $display("no ripple happened"); end
    if (st_switches == 0)     begin failures++; $display("no direction switch happened"); end
    if (st_skipped == 0)      begin failures++; $display("no zero skipped"); end
    if (n_long_flag == 0)     begin failures++; $display("no k > n update happened"); end
    if (n_clear == 0)         failures++;
    if (n_flush_pending == 0) begin failures++; $display("no flush had pending flags"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
