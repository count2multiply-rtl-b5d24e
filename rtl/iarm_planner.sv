// iarm_planner: Input-Aware Rippling Minimization (IARM) bookkeeping.
//
// Each JC digit of a counter has an extra flag row, O_next, that holds one
// pending carry (or borrow). With the flag a digit position can absorb values
// up to 4n-1 before it must pass a carry on, so carries need not be rippled
// after every increment. The control unit cannot see the counters (they sit in
// memory, each column updated under its own mask), so it keeps, per digit
// position, a bound h[d] on "digit value + 2n * flag" valid for every column.
// Before adding an amount x to digit d it asks whether h[d] + x could exceed
// 4n-1; if so the flag of d must first be rippled into d+1, and if d+1 is
// itself full, d+1 first, and so on upward. The planner answers with the
// digit to ripple next (the top of that chain of full digits).
//
// Bound updates: an add of x raises h[d] by x; a ripple of d leaves every
// column of d at most 2n-1 (columns with the flag set lose 2n, the others
// were below 2n already) and raises h[d+1] by one. A ripple out of the top
// digit is dropped: counters are modulo (2n)**D. In decrement mode the same
// numbers bound the pending borrow from below (h = 2n-1 - lowest value),
// so the rules are identical. Switching direction (after a flush) sets every
// h to 2n-1; clearing the counters sets them to 0.
//
// Departure from the paper: the paper's virtual counter is incremented with
// every input and reduced by 2n on a ripple, i.e. it tracks the all-ones-mask
// column. A column whose mask skipped earlier inputs can then hold more than
// that virtual digit (its flag was clear when the ripple passed), and could
// overflow twice. Clamping to 2n-1 on a ripple keeps the bound safe for
// every mask; it costs a ripple earlier in a few cases.
//
// Timing: all answers are combinational from the state; updates take effect
// on the next clock edge.
module iarm_planner #(
  parameter int unsigned N_BITS = 2,    // bits per JC digit (radix 2n)
  parameter int unsigned DIGITS = 32,   // digits per counter
  localparam int unsigned RADIX = 2 * N_BITS,
  localparam int unsigned CAP   = 4 * N_BITS - 1,
  localparam int unsigned HW    = $clog2(4 * N_BITS + RADIX),
  localparam int unsigned DIW   = (DIGITS > 1) ? $clog2(DIGITS) : 1,
  localparam int unsigned DW    = $clog2(RADIX)
) (
  input  logic            clk,
  input  logic            rst_n,
  // state changes
  input  logic            clr,        // counters were zeroed
  input  logic            relax,      // direction switch after a flush
  input  logic            rip_fire,   // a ripple of rip_digit was issued
  input  logic [DIW-1:0]  rip_digit,
  input  logic            add_fire,   // an add of add_amt to add_digit was issued
  input  logic [DIW-1:0]  add_digit,
  input  logic [DW-1:0]   add_amt,
  // query for an add
  input  logic [DIW-1:0]  q_digit,
  input  logic [DW-1:0]   q_amt,
  output logic            q_need_ripple,
  output logic [DIW-1:0]  q_ripple_digit,
  // query for a flush
  output logic            f_pending,
  output logic [DIW-1:0]  f_ripple_digit
);

  logic [HW-1:0] h [DIGITS];   // bound per digit

  // Top of the chain of full digits above d: the digit to ripple first so
  // that a ripple of d finds room in d+1.
  function automatic logic [DIW-1:0] chain_top(input logic [DIW-1:0] d,
                                               input logic [HW-1:0] hh [DIGITS]);
    logic [DIW-1:0] j;
    logic go;
    j  = d;
    go = 1'b1;
    for (int unsigned i = 0; i < DIGITS; i++) begin
      if (go && (int'(i) > int'(d))) begin
        if (hh[i] >= HW'(CAP)) j = DIW'(i);
        else go = 1'b0;
      end
    end
    return j;
  endfunction

  always_comb begin
    q_need_ripple  = (32'(h[q_digit]) + 32'(q_amt)) > CAP;
    q_ripple_digit = chain_top(q_digit, h);
  end

  always_comb begin
    logic [DIW-1:0] low;
    f_pending = 1'b0;
    low       = '0;
    for (int i = DIGITS - 1; i >= 0; i--) begin
      if (h[i] > HW'(RADIX - 1)) begin
        f_pending = 1'b1;
        low       = DIW'(i);
      end
    end
    f_ripple_digit = chain_top(low, h);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DIGITS; i++) h[i] <= '0;
    end else if (clr) begin
      for (int i = 0; i < DIGITS; i++) h[i] <= '0;
    end else if (relax) begin
      for (int i = 0; i < DIGITS; i++) h[i] <= HW'(RADIX - 1);
    end else begin
      if (rip_fire) begin
        if (h[rip_digit] > HW'(RADIX - 1)) h[rip_digit] <= HW'(RADIX - 1);
        if (32'(rip_digit) + 1 < DIGITS) h[rip_digit + 1'b1] <= h[rip_digit + 1'b1] + 1'b1;
      end
      if (add_fire) h[add_digit] <= h[add_digit] + HW'(add_amt);
    end
  end

endmodule
