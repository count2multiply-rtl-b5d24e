// tb_c2m_full: the control unit at its default size (radix 4, 32 digits =
// 64-bit capacity, 8-bit signed inputs, 1024-row subarray) driving a
// subarray model with 8192 columns (a 1 kB row). One complete operation:
// clear, a signed integer-vector x binary-matrix product over 24 mask rows
// (including bit-sliced, negative and zero inputs), flush, and a check of
// every one of the 8192 column counters; then the addition of a second
// counter array stored in the subarray, then ReLU, checking after each.
module tb_c2m_full;
  import c2m_pkg::*;
  import jc_ref_pkg::*;

  localparam int N_BITS = 2, DIGITS = 32, COLS = 8192, ROWS = 1024;
  localparam int CNT_BASE = 2, MASK_BASE = 200, MASK_ROWS = 24, ADDC_BASE = 400;

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

  c2m_ctrl dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_op, .req_x, .req_shift, .req_neg,
    .req_mask, .cmd_valid, .cmd_ready, .cmd, .busy, .cur_dir,
    .st_cmds, .st_adds, .st_ripples, .st_skipped, .st_switches
  );

  ambit_subarray_model #(.ROWS(ROWS), .COLS(COLS)) mem (
    .clk, .cmd_valid, .cmd_ready, .cmd, .wr_en, .wr_row, .wr_data, .rd_row, .rd_data,
    .flip_en(1'b0), .flip_col(0), .err_count, .maj_count
  );

  `include "c2m_drive.svh"

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < MASK_ROWS; i++) begin
      for (int w = 0; w < COLS / 32; w++) masks[i][w*32 +: 32] = $urandom;
      host_write(MASK_BASE + i, masks[i]);
    end
    clear_all();
    for (int i = 0; i < MASK_ROWS; i++) begin
      int x;
      x = (i == 5) ? 0 : int'($urandom_range(255)) - 128;
      acc(x, (i % 4 == 3) ? int'($urandom_range(7)) : 0, bit'(i % 6 == 1), i);
    end
    flush_and_check();
    add_counters(ADDC_BASE);
    flush_and_check();
    relu();
    flush_and_check();
    checks++;
    if (err_count != 0) failures++;
    $display("full size: %0d commands, %0d ripples, %0d direction switches", st_cmds, st_ripples, st_switches);
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
