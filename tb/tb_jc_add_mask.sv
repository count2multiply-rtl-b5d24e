// tb_jc_add_mask: checks the mask rows of counter addition against the
// subarray model for radix 4, 8 and 10. For random JC digits in 64 columns
// it runs all 2n steps and checks, per step, the mask computed here from the
// digit value v (step s < n reads bit n-1-s: 1 when v >= n or v > n-1-s;
// step s >= n: 1 when v - n > s - n),
// that across the 2n steps each column's mask was 1 exactly v times, and
// that every step takes four commands.
module tb_jc_add_mask;
  import c2m_pkg::*;
  import jc_ref_pkg::*;

  localparam int COLS = 64, ROWS = 64, BASE = 10, TMP = 1;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0;
  logic [ROW_IW-1:0] wr_row = '0, rd_row = '0;
  logic [COLS-1:0] wr_data = '0, rd_data;
  int unsigned err_count, maj_count;
  logic start_valid = 0, start_ready, cmd_valid, cmd_ready, done;
  logic [3:0] step = '0;
  cim_cmd_t cmd;
  int n_bits = 2;

  // one mask generator per radix; the active one drives the model
  logic [2:0] sr, cv, dn;
  cim_cmd_t c [3];
  jc_add_mask #(.N_BITS(2)) g2 (.clk, .rst_n, .start_valid(start_valid && n_bits == 2), .start_ready(sr[0]),
    .src_base(ROW_IW'(BASE)), .step(2'(step)), .tmp(ROW_IW'(TMP)), .cmd_valid(cv[0]), .cmd_ready, .cmd(c[0]), .done(dn[0]));
  jc_add_mask #(.N_BITS(4)) g4 (.clk, .rst_n, .start_valid(start_valid && n_bits == 4), .start_ready(sr[1]),
    .src_base(ROW_IW'(BASE)), .step(3'(step)), .tmp(ROW_IW'(TMP)), .cmd_valid(cv[1]), .cmd_ready, .cmd(c[1]), .done(dn[1]));
  jc_add_mask #(.N_BITS(5)) g5 (.clk, .rst_n, .start_valid(start_valid && n_bits == 5), .start_ready(sr[2]),
    .src_base(ROW_IW'(BASE)), .step(4'(step)), .tmp(ROW_IW'(TMP)), .cmd_valid(cv[2]), .cmd_ready, .cmd(c[2]), .done(dn[2]));

  always_comb begin
    unique case (n_bits)
      2: begin cmd_valid = cv[0]; cmd = c[0]; done = dn[0]; start_ready = sr[0]; end
      4: begin cmd_valid = cv[1]; cmd = c[1]; done = dn[1]; start_ready = sr[1]; end
      default: begin cmd_valid = cv[2]; cmd = c[2]; done = dn[2]; start_ready = sr[2]; end
    endcase
  end

  ambit_subarray_model #(.ROWS(ROWS), .COLS(COLS)) mem (
    .clk, .cmd_valid, .cmd_ready, .cmd, .wr_en, .wr_row, .wr_data, .rd_row, .rd_data,
    .flip_en(1'b0), .flip_col(0), .err_count, .maj_count
  );

  int ncmd = 0;
  always @(posedge clk) if (cmd_valid && cmd_ready) ncmd++;

  task automatic run_radix(input int n);
    int v [COLS];
    int ones [COLS];
    logic [COLS-1:0] rows [16];
    n_bits = n;
    for (int i = 0; i < n; i++) rows[i] = '0;
    for (int col = 0; col < COLS; col++) begin
      logic [15:0] b;
      v[col] = int'($urandom_range(2 * n - 1));
      ones[col] = 0;
      b = jc_enc(n, v[col]);
      for (int i = 0; i < n; i++) rows[i][col] = b[i];
    end
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_en = 1; wr_row = ROW_IW'(BASE + i); wr_data = rows[i];
    end
    @(negedge clk);
    wr_en = 0;
    for (int s = 0; s < 2 * n; s++) begin
      int c0;
      c0 = ncmd;
      @(negedge clk);
      while (!start_ready) @(negedge clk);
      start_valid = 1; step = 4'(s);
      @(negedge clk);
      start_valid = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      checks++;
      if (ncmd - c0 != 4) failures++;
      rd_row = ROW_IW'(TMP);
      #1;
      for (int col = 0; col < COLS; col++) begin
        bit e;
        e = (s < n) ? (v[col] >= n || v[col] > n - 1 - s) : (v[col] - n > s - n);
        checks++;
        if (rd_data[col] != e) begin
          failures++;
          if (failures < 10) $display("n=%0d step %0d col %0d v=%0d mask %0b", n, s, col, v[col], rd_data[col]);
        end
        ones[col] += int'(rd_data[col]);
      end
    end
    for (int col = 0; col < COLS; col++) begin
      checks++;
      if (ones[col] != v[col]) failures++;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      run_radix(2);
      run_radix(4);
      run_radix(5);
    end
    checks++;
    if (err_count != 0) failures++;
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
