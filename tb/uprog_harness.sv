// uprog_harness: drives one uprog_gen of radix 2n against the subarray model.
// For every k in 1..2n-1 and both directions it loads random JC digits,
// flags and a random mask into COLS columns, runs one uProgram and checks
// every column against jc_ref_pkg, plus the number of commands issued.
module uprog_harness #(
  parameter int unsigned N_BITS = 5,
  parameter int unsigned COLS   = 64,
  parameter int unsigned ROUNDS = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures
);
  import c2m_pkg::*;
  import jc_ref_pkg::*;

  localparam int unsigned BASE = 2;            // b_0 row
  localparam int unsigned MROW = 40;           // mask row
  localparam int unsigned DW   = $clog2(2 * N_BITS);

  logic              start_valid, start_ready, cmd_valid, done;
  logic [DW-1:0]     k;
  dir_e              dir;
  cim_cmd_t          cmd;
  logic              wr_en;
  logic [ROW_IW-1:0] wr_row, rd_row;
  logic [COLS-1:0]   wr_data, rd_data;
  int unsigned       err_count, maj_count;
  int                ncmd;

  uprog_gen #(.N_BITS(N_BITS)) dut (
    .clk, .rst_n, .start_valid, .start_ready,
    .dig_base(ROW_IW'(BASE)), .k, .dir, .mask(d_row(ROW_IW'(MROW))),
    .cmd_valid, .cmd_ready(1'b1), .cmd, .done
  );

  ambit_subarray_model #(.ROWS(64), .COLS(COLS)) mem (
    .clk, .cmd_valid, .cmd_ready(), .cmd,
    .wr_en, .wr_row, .wr_data, .rd_row, .rd_data,
    .flip_en(1'b0), .flip_col(0), .err_count, .maj_count
  );

  always @(posedge clk) if (cmd_valid) ncmd++;

  task automatic wr(input int row, input logic [COLS-1:0] d);
    @(negedge clk);
    wr_en = 1; wr_row = ROW_IW'(row); wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  int v0 [COLS];
  bit f0 [COLS];
  logic [COLS-1:0] m;

  initial begin
    finished = 0; checks = 0; failures = 0;
    wr_en = 0; start_valid = 0; k = '0; dir = DIR_INC; rd_row = '0;
    wr_row = '0; wr_data = '0; ncmd = 0;
    wait (go);
    for (int rnd = 0; rnd < int'(ROUNDS); rnd++)
    for (int dd = 0; dd < 2; dd++)
    for (int kk = 1; kk < 2 * int'(N_BITS); kk++) begin
      logic [COLS-1:0] rows [N_BITS+1];
      for (int i = 0; i <= int'(N_BITS); i++) rows[i] = '0;
      for (int c = 0; c < int'(COLS); c++) begin
        logic [15:0] b;
        v0[c] = int'($urandom_range(2 * N_BITS - 1));
        f0[c] = bit'($urandom_range(1));
        m[c]  = (rnd == 0 && c < 2) ? 1'b1 : 1'($urandom_range(1));
        if (rnd == 0 && c == 0) v0[c] = 2 * N_BITS - 1;
        if (rnd == 0 && c == 1) v0[c] = 0;
        if (rnd == 0 && c < 2) f0[c] = 0;
        b = jc_enc(N_BITS, v0[c]);
        for (int i = 0; i < int'(N_BITS); i++) rows[i][c] = b[i];
        rows[N_BITS][c] = f0[c];
      end
      for (int i = 0; i <= int'(N_BITS); i++) wr(BASE + i, rows[i]);
      wr(MROW, m);
      @(negedge clk);
      k = DW'(kk); dir = dd ? DIR_DEC : DIR_INC;
      start_valid = 1;
      ncmd = 0;
      @(negedge clk);
      start_valid = 0;
      while (!done) @(negedge clk);
      checks++;
      if (ncmd != cmd_count(N_BITS, kk, dd)) begin
        failures++;
        $display("n=%0d k=%0d dec=%0d: %0d commands, expected %0d", N_BITS, kk, dd, ncmd, cmd_count(N_BITS, kk, dd));
      end
      // read back and compare
      for (int i = 0; i <= int'(N_BITS); i++) begin
        rd_row = ROW_IW'(BASE + i);
        #1 rows[i] = rd_data;
      end
      for (int c = 0; c < int'(COLS); c++) begin
        logic [15:0] b;
        int ev, got; bit ef, cy;
        b = '0;
        for (int i = 0; i < int'(N_BITS); i++) b[i] = rows[i][c];
        got = jc_dec(N_BITS, b);
        if (m[c]) begin
          if (!dd) begin ev = (v0[c] + kk) % (2 * N_BITS); cy = (v0[c] + kk) >= 2 * N_BITS; end
          else     begin ev = (v0[c] - kk + 2 * N_BITS) % (2 * N_BITS); cy = v0[c] < kk; end
          ef = f0[c] | cy;
        end else begin
          ev = v0[c]; ef = f0[c];
        end
        checks++;
        if (got != ev || rows[N_BITS][c] != ef) begin
          failures++;
          if (failures < 10)
            $display("n=%0d k=%0d dec=%0d col %0d m=%0d: v %0d->%0d (exp %0d) flag %0d->%0d (exp %0d)",
                     N_BITS, kk, dd, c, m[c], v0[c], got, ev, f0[c], rows[N_BITS][c], ef);
        end
      end
      checks++;
      if (err_count != 0) failures++;
    end
    finished = 1;
  end
endmodule
