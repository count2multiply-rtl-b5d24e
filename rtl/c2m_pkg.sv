// c2m_pkg: types and constants shared by the Count2Multiply control unit.
//
// The control unit talks to an Ambit-style compute subarray through two
// commands: AAP (activate-activate-precharge: copy the value sensed on the
// first address into every row opened by the second) and AP
// (activate-precharge: open one address; when it names three rows the sense
// amplifiers settle to their bitwise majority and all three are overwritten).
//
// A row address names one of three groups, as in Ambit:
//   B-group: 16 addresses B0..B15 that open 1, 2 or 3 of the eight compute
//            rows T0..T3, DCC0, DCC1 (DCCx has a true and a negated wordline).
//   C-group: C0 (all zeros) and C1 (all ones).
//   D-group: ordinary data rows (counters, masks, temporaries).
// B-address numbering follows Ambit; B11 opens {T0, T1, DCC0} instead of
// Ambit's {T0, T3}, a remapping this design needs for its inverted-feedback
// step (Ambit left B11 unused by its own operations).
//
// Every module reads this package, and not every module uses every
// constant, so a linter lists the unused ones per module; that is expected.
package c2m_pkg;

  typedef enum logic [1:0] {
    GRP_B = 2'd0,
    GRP_C = 2'd1,
    GRP_D = 2'd2
  } row_grp_e;

  localparam int unsigned ROW_IW = 10;  // index width inside a group

  typedef struct packed {
    row_grp_e           grp;
    logic [ROW_IW-1:0]  idx;
  } row_addr_t;

  typedef enum logic {
    CIM_AP  = 1'b0,
    CIM_AAP = 1'b1
  } cim_op_e;

  typedef struct packed {
    cim_op_e   op;
    row_addr_t src;   // AP: the address opened; AAP: the source address
    row_addr_t dst;   // AAP only
  } cim_cmd_t;

  // Direction of a counting operation.
  typedef enum logic {
    DIR_INC = 1'b0,
    DIR_DEC = 1'b1
  } dir_e;

  // Requests accepted by the control unit.
  typedef enum logic [2:0] {
    REQ_CLEAR = 3'd0,   // zero every counter row and O_next flag
    REQ_ACC   = 3'd1,   // counters += sign * (x << shift), masked by a row
    REQ_FLUSH = 3'd2,   // resolve every pending O_next flag
    REQ_ADDC  = 3'd3,   // counters += the flushed counter array at row mask
    REQ_COPY  = 3'd4,   // flush, then copy the counter rows to row mask on
    REQ_RELU  = 3'd5    // flush, then zero every negative counter
  } req_op_e;

  // B-group addresses used by the uPrograms (B4 = DCC0, B6 = DCC1 and
  // B10 = {T2, T3} exist in the subarray but are not needed here).
  localparam logic [ROW_IW-1:0] B0  = 'd0;   // T0
  localparam logic [ROW_IW-1:0] B1  = 'd1;   // T1
  localparam logic [ROW_IW-1:0] B2  = 'd2;   // T2
  localparam logic [ROW_IW-1:0] B3  = 'd3;   // T3
  localparam logic [ROW_IW-1:0] B5  = 'd5;   // DCC0 negated wordline
  localparam logic [ROW_IW-1:0] B7  = 'd7;   // DCC1 negated wordline
  localparam logic [ROW_IW-1:0] B8  = 'd8;   // DCC0-n, T0
  localparam logic [ROW_IW-1:0] B9  = 'd9;   // DCC1-n, T1
  localparam logic [ROW_IW-1:0] B11 = 'd11;  // T0, T1, DCC0 (remapped)
  localparam logic [ROW_IW-1:0] B12 = 'd12;  // T0, T1, T2
  localparam logic [ROW_IW-1:0] B13 = 'd13;  // T1, T2, T3
  localparam logic [ROW_IW-1:0] B14 = 'd14;  // DCC0, T1, T2
  localparam logic [ROW_IW-1:0] B15 = 'd15;  // DCC1, T0, T3

  function automatic row_addr_t b_row(input logic [ROW_IW-1:0] i);
    return '{grp: GRP_B, idx: i};
  endfunction

  function automatic row_addr_t d_row(input logic [ROW_IW-1:0] i);
    return '{grp: GRP_D, idx: i};
  endfunction

  localparam row_addr_t ROW_C0 = '{grp: GRP_C, idx: '0};
  localparam row_addr_t ROW_C1 = '{grp: GRP_C, idx: 'd1};

  function automatic cim_cmd_t aap(input row_addr_t s, input row_addr_t d);
    return '{op: CIM_AAP, src: s, dst: d};
  endfunction

  function automatic cim_cmd_t ap(input row_addr_t s);
    return '{op: CIM_AP, src: s, dst: s};
  endfunction

  // Number of base-(2n) digits needed for values below 2**bits.
  function automatic int unsigned digits_for(input int unsigned bits,
                                             input int unsigned n);
    longint unsigned cap;
    int unsigned d;
    cap = 1;
    d = 0;
    while (cap < (64'd1 << bits)) begin
      cap = cap * (2 * n);
      d++;
    end
    return (d == 0) ? 1 : d;
  endfunction

  // gcd(n, b) for a small constant n: the largest divisor of n that also
  // divides b (gcd(n, 0) = n). The loop is bounded by n so it unrolls.
  function automatic int unsigned gcd_n(input int unsigned n, input int unsigned b);
    int unsigned g;
    g = 1;
    for (int unsigned c = 1; c <= n; c++)
      if ((n % c == 0) && (b % c == 0)) g = c;
    return g;
  endfunction

endpackage
