// ambit_subarray_model: behavioural model of an Ambit-style DRAM compute
// subarray (not synthesizable intent: it stands for analog DRAM cells and
// sense amplifiers).
//
// Rows: four compute rows T0..T3, two dual-contact rows DCC0/DCC1 (each with
// a true and a negated wordline), constant rows C0 (zeros) and C1 (ones), and
// ROWS-10 data rows (D-group). Commands arrive one per clock on a valid/ready
// port (ready is always high here; DRAM timing belongs to the memory
// controller):
//   AP  a    : open address a. Three rows open -> the sense amplifiers take
//              the bitwise majority and every opened row is overwritten.
//   AAP a, b : as AP a, then open b: every row of b takes the sensed value.
// A row opened through a negated wordline reads and stores the complement.
// B-group decode follows Ambit, with B11 = {T0, T1, DCC0}.
// Host port: one data row can be written (wr_en) and one read (rd_row,
// combinational rd_data), standing for ordinary RD/WR through the row buffer.
// flip_en/flip_col inject one bit fault into the next majority result.
// err_count counts illegal commands (two-row AP source, writes to C-group).
module ambit_subarray_model #(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 8192
) (
  input  logic                         clk,
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  c2m_pkg::cim_cmd_t            cmd,
  input  logic                         wr_en,
  input  logic [c2m_pkg::ROW_IW-1:0]   wr_row,
  input  logic [COLS-1:0]              wr_data,
  input  logic [c2m_pkg::ROW_IW-1:0]   rd_row,
  output logic [COLS-1:0]              rd_data,
  input  logic                         flip_en,
  input  int unsigned                  flip_col,
  output int unsigned                  err_count,
  output int unsigned                  maj_count
);
  import c2m_pkg::*;

  localparam int unsigned NPHYS = ROWS;      // 8 B-rows + 2 C-rows + data
  localparam int unsigned DBASE = 8;         // physical index of D0

  logic [COLS-1:0] arr [NPHYS];

  assign cmd_ready = 1'b1;
  assign rd_data   = arr[DBASE + rd_row];

  initial begin
    for (int i = 0; i < NPHYS; i++) arr[i] = '0;
    arr[7]   = '1;   // C1
    err_count = 0;
    maj_count = 0;
  end

  // Decode an address into up to three (physical row, negated) pairs.
  task automatic decode(input row_addr_t a, output int n, output int p [3], output bit ng [3]);
    n = 1; p = '{0, 0, 0}; ng = '{0, 0, 0};
    unique case (a.grp)
      GRP_C: p[0] = 6 + int'(a.idx[0]);
      GRP_D: p[0] = DBASE + int'(a.idx);
      default: begin
        unique case (int'(a.idx))
          0:  p[0] = 0;
          1:  p[0] = 1;
          2:  p[0] = 2;
          3:  p[0] = 3;
          4:  p[0] = 4;
          5:  begin p[0] = 4; ng[0] = 1; end
          6:  p[0] = 5;
          7:  begin p[0] = 5; ng[0] = 1; end
          8:  begin n = 2; p[0] = 4; ng[0] = 1; p[1] = 0; end
          9:  begin n = 2; p[0] = 5; ng[0] = 1; p[1] = 1; end
          10: begin n = 2; p[0] = 2; p[1] = 3; end
          11: begin n = 3; p = '{0, 1, 4}; end
          12: begin n = 3; p = '{0, 1, 2}; end
          13: begin n = 3; p = '{1, 2, 3}; end
          14: begin n = 3; p = '{4, 1, 2}; end
          default: begin n = 3; p = '{5, 0, 3}; end
        endcase
      end
    endcase
  endtask

  task automatic activate(input row_addr_t a, output logic [COLS-1:0] v);
    int n; int p [3]; bit ng [3];
    logic [COLS-1:0] r [3];
    decode(a, n, p, ng);
    for (int i = 0; i < 3; i++) r[i] = ng[i] ? ~arr[p[i]] : arr[p[i]];
    if (n == 1) begin
      v = r[0];
    end else if (n == 3) begin
      v = (r[0] & r[1]) | (r[1] & r[2]) | (r[0] & r[2]);
      maj_count++;
      if (flip_en && flip_col < COLS) v[flip_col] = ~v[flip_col];
      for (int i = 0; i < 3; i++) arr[p[i]] = ng[i] ? ~v : v;
    end else begin
      v = r[0];
      err_count++;
    end
  endtask

  task automatic store(input row_addr_t a, input logic [COLS-1:0] v);
    int n; int p [3]; bit ng [3];
    decode(a, n, p, ng);
    if (a.grp == GRP_C) err_count++;
    else for (int i = 0; i < n; i++) arr[p[i]] = ng[i] ? ~v : v;
  endtask

  always @(posedge clk) begin
    logic [COLS-1:0] v;
    if (wr_en) arr[DBASE + wr_row] = wr_data;
    if (cmd_valid) begin
      activate(cmd.src, v);
      if (cmd.op == CIM_AAP) store(cmd.dst, v);
    end
  end

endmodule
