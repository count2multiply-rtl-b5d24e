// c2m_ctrl: Count2Multiply control unit (top level).
//
// Count2Multiply multiplies an integer vector X by a binary matrix Z that is
// stored in a DRAM subarray, one mask row per Z row, by broadcast and
// accumulate: for every element X_i the controller issues the memory commands
// that add X_i to all column counters of Y whose bit in mask row Z_i is 1.
// The counters are multi-digit Johnson counters (radix 2n) held column-wise
// in the subarray; bulk bitwise operations (RowClone copies, triple-row
// majority, NOT through dual-contact cells) update a whole row of counters at
// once. This unit is the part of the memory controller that turns requests
// into those commands:
//   1. radix_converter splits sign * (x << shift) into base-2n digits;
//   2. for each non-zero digit, iarm_planner says whether a pending carry
//      must first be rippled upward (Input-Aware Rippling Minimization);
//   3. uprog_gen emits the masked k-ary increment/decrement uProgram of the
//      digit (or the unit increment of a ripple, masked by the lower digit's
//      O_next row), after which the controller clears that O_next row.
//   4. for counter addition, jc_add_mask emits the mask-building commands.
// Zero inputs and zero digits issue nothing.
//
// Requests (valid/ready): REQ_CLEAR zeroes every counter row and flag;
// REQ_ACC adds sign*(x << shift) masked by D-group row req_mask (shift and neg
// serve bit-sliced integer matrices: each slice's mask row has a power-of-two
// weight and a sign); REQ_FLUSH resolves all pending flags so the counters
// can be read as plain digits; REQ_COPY flushes and copies the counter rows
// to rows req_mask on (with REQ_ADDC this doubles the counters: the paper's
// shift-left by repeated self-addition); REQ_RELU flushes and zeroes every
// counter whose top digit's MSB is set (negative in radix complement; this
// replaces the paper's sign row O_sign); REQ_ADDC adds a second, flushed counter array
// stored in the same layout from row req_mask (counter addition: for every
// digit, jc_add_mask builds 2n mask rows from that array's digit in theta1
// and each drives a unit increment of the counters' digit, planned by IARM
// like any other add). Switching between adding and subtracting flushes
// first, as the paper requires for a design without a sign row.
// Counters are modulo (2n)**DIGITS; a negative total reads as its radix
// complement.
//
// D-group row map (this design's choice): row THETA0_ROW and THETA1_ROW are
// temporaries; digit d occupies rows CNT_BASE + d*(n+1) + i for bits
// i = 0 (LSB) .. n-1 (MSB) and + n for its O_next flag. Mask rows are
// anywhere else in the D-group.
//
// Commands (valid/ready, one per cycle at most) are AAP/AP on Ambit-style
// addresses (see c2m_pkg); translating them to ACT/PRE with DRAM timing is
// left to the memory controller's scheduler. Statistics count what the
// mechanisms did.
//
// Timing: a request is taken in S_IDLE; req_ready is low until its commands
// have all been accepted. An ACC of m non-zero digits costs about
// m*(7n+7) commands plus the ripples IARM asks for; a CLEAR costs one copy
// per counter row; an ADDC costs DIGITS * 2n * (4 + 7n+7) commands plus
// ripples (3200 + ripples at the defaults). The controller adds one idle
// cycle per digit (PREP state) and one per finished uProgram.
//
// Follows the paper: JC digits with an O_next row, the seven-command bit
// step, the k-ary update of Algorithm 1, IARM, flushing before a direction
// change, skipping of zero digits, counter addition. Own choices: the row map, the command
// order of the k-ary rotation and of the flag programs, the safer IARM bound
// (see iarm_planner), handshakes and reset.
//
// The two assertions at the end are disabled during reset; that synchronous
// use of rst_n next to the asynchronous reset of the state registers is the
// only reason a linter reports rst_n as both, and it does not reach logic.
module c2m_ctrl #(
  parameter int unsigned N_BITS     = 2,     // radix 4 counters
  parameter int unsigned DIGITS     = 32,    // 4**32 = 2**64 capacity
  parameter int unsigned XW         = 8,     // signed 8-bit inputs
  parameter int unsigned MAX_SHIFT  = 7,
  parameter int unsigned ROWS       = 1024,  // rows per subarray
  parameter int unsigned THETA0_ROW = 0,
  parameter int unsigned THETA1_ROW = 1,
  parameter int unsigned CNT_BASE   = 2,
  localparam int unsigned RADIX  = 2 * N_BITS,
  localparam int unsigned DW     = $clog2(RADIX),
  localparam int unsigned IN_DIG = c2m_pkg::digits_for(XW + MAX_SHIFT, N_BITS),
  localparam int unsigned USE_DIG = (IN_DIG < DIGITS) ? IN_DIG : DIGITS,
  localparam int unsigned DIW    = (DIGITS > 1) ? $clog2(DIGITS) : 1,
  localparam int unsigned DQW    = $clog2(USE_DIG + 1),
  localparam int unsigned SHW    = (MAX_SHIFT > 0) ? $clog2(MAX_SHIFT + 1) : 1,
  localparam int unsigned NCROWS = DIGITS * (N_BITS + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // requests from the host
  input  logic                          req_valid,
  output logic                          req_ready,
  input  c2m_pkg::req_op_e              req_op,
  input  logic signed [XW-1:0]          req_x,
  input  logic [SHW-1:0]                req_shift,
  input  logic                          req_neg,
  input  logic [c2m_pkg::ROW_IW-1:0]    req_mask,
  // CIM commands to the subarray (through the DRAM scheduler)
  output logic                          cmd_valid,
  input  logic                          cmd_ready,
  output c2m_pkg::cim_cmd_t             cmd,
  // status
  output logic                          busy,
  output c2m_pkg::dir_e                 cur_dir,
  output logic [31:0]                   st_cmds,       // commands issued
  output logic [31:0]                   st_adds,       // digit uPrograms
  output logic [31:0]                   st_ripples,    // carry ripples
  output logic [31:0]                   st_skipped,    // zero digits / inputs skipped
  output logic [31:0]                   st_switches    // direction switches
);
  import c2m_pkg::*;

  initial begin
    assert (CNT_BASE + NCROWS <= ROWS - 10)
      else $error("counters do not fit in the D-group");
    assert (N_BITS >= 2) else $error("N_BITS must be at least 2");
  end

  typedef enum logic [3:0] {
    S_IDLE, S_CLR, S_FLUSH, S_PREP, S_ADD, S_RIP, S_RIP_WAIT, S_RIP_CLR,
    S_APREP, S_AMASK, S_AADD, S_ROWOP
  } state_e;
  state_e state;

  // latched request
  logic signed [XW-1:0] x_q;
  logic [SHW-1:0]       sh_q;
  logic                 neg_q;
  logic [ROW_IW-1:0]    mask_q;
  logic                 flush_sw;    // flushing before a direction switch
  logic                 rip_ret_fl;  // ripple returns to S_FLUSH
  logic [DQW-1:0]       d_q;         // digit being added (reaches USE_DIG)
  logic [DIW-1:0]       d_cur;       // d_q as a digit index
  logic [DIW-1:0]       rip_j;       // digit whose flag is resolved
  logic [$clog2(NCROWS+1)-1:0] clr_q;
  logic                 addc_q;      // request is a counter addition
  logic                 copy_q;      // request is a copy (else ReLU) after flush
  logic                 rowop_q;     // request ends in a row sweep (COPY, RELU)
  logic [1:0]           sub_q;       // ReLU: command within a row
  logic [ROW_IW-1:0]    sweep_row;   // row of the sweep
  logic [DIW:0]         ad_d;        // counter addition: digit (reaches DIGITS)
  logic [DW-1:0]        ad_s;        // counter addition: mask step 0..2n-1
  logic [DIW-1:0]       ad_dig;      // ad_d as a digit index

  // radix conversion of the latched request
  dir_e            acc_dir;
  logic [DW-1:0]   digit [IN_DIG];
  logic [IN_DIG-1:0] nz;
  logic            is_zero;

  radix_converter #(.N_BITS(N_BITS), .XW(XW), .MAX_SHIFT(MAX_SHIFT)) u_conv (
    .x(x_q), .shift(sh_q), .neg(neg_q),
    .dir(acc_dir), .digit(digit), .nz(nz), .is_zero(is_zero)
  );

  // IARM planner
  logic            q_need_ripple, f_pending;
  logic [DIW-1:0]  q_ripple_digit, f_ripple_digit;
  logic            pl_clr, pl_relax, rip_fire, add_fire;
  logic [DW-1:0]   cur_digit;

  logic            cur_nz;
  logic [DIW-1:0]  pl_digit;
  logic [DW-1:0]   pl_amt;
  assign d_cur    = DIW'(d_q);
  assign ad_dig   = DIW'(ad_d);
  assign pl_digit = addc_q ? ad_dig : d_cur;
  assign pl_amt   = addc_q ? DW'(1) : cur_digit;
  always_comb begin
    cur_digit = '0;
    cur_nz    = 1'b0;
    for (int i = 0; i < int'(USE_DIG); i++) begin
      if (d_q == DQW'(i)) begin
        cur_digit = digit[i];
        cur_nz    = nz[i];
      end
    end
  end

  iarm_planner #(.N_BITS(N_BITS), .DIGITS(DIGITS)) u_iarm (
    .clk, .rst_n,
    .clr(pl_clr), .relax(pl_relax),
    .rip_fire, .rip_digit(rip_j),
    .add_fire, .add_digit(pl_digit), .add_amt(pl_amt),
    .q_digit(pl_digit), .q_amt(pl_amt),
    .q_need_ripple, .q_ripple_digit,
    .f_pending, .f_ripple_digit
  );

  // uProgram generator
  logic            ug_start, ug_ready, ug_done, ug_cmd_valid;
  logic [ROW_IW-1:0] ug_base;
  logic [DW-1:0]   ug_k;
  row_addr_t       ug_mask;
  cim_cmd_t        ug_cmd;

  function automatic logic [ROW_IW-1:0] digit_base(input logic [DIW-1:0] d);
    return ROW_IW'(CNT_BASE + int'(d) * (N_BITS + 1));
  endfunction

  uprog_gen #(.N_BITS(N_BITS), .THETA0_ROW(THETA0_ROW), .THETA1_ROW(THETA1_ROW)) u_ug (
    .clk, .rst_n,
    .start_valid(ug_start), .start_ready(ug_ready),
    .dig_base(ug_base), .k(ug_k), .dir(cur_dir), .mask(ug_mask),
    .cmd_valid(ug_cmd_valid), .cmd_ready(cmd_ready && (state inside {S_ADD, S_RIP_WAIT, S_AADD})),
    .cmd(ug_cmd), .done(ug_done)
  );

  // mask rows for counter addition, built in theta1 (a unit increment only
  // uses theta0, so theta1 is free while the mask is in use)
  logic            am_start, am_ready, am_done, am_cmd_valid;
  cim_cmd_t        am_cmd;

  jc_add_mask #(.N_BITS(N_BITS)) u_am (
    .clk, .rst_n,
    .start_valid(am_start), .start_ready(am_ready),
    .src_base(ROW_IW'(int'(mask_q) + int'(ad_dig) * (N_BITS + 1))),
    .step(ad_s), .tmp(ROW_IW'(THETA1_ROW)),
    .cmd_valid(am_cmd_valid), .cmd_ready(cmd_ready && (state == S_AMASK)),
    .cmd(am_cmd), .done(am_done)
  );
  assign am_start = (state == S_APREP) && (32'(ad_d) < DIGITS) && !q_need_ripple && am_ready;

  // Next action decisions
  always_comb begin
    ug_start = 1'b0;
    ug_base  = digit_base(d_cur);
    ug_k     = cur_digit;
    ug_mask  = d_row(ROW_IW'(mask_q));
    if (state == S_PREP && 32'(d_q) < USE_DIG && cur_nz && !q_need_ripple)
      ug_start = 1'b1;
    if (state == S_AMASK && am_done) begin
      ug_start = 1'b1;
      ug_base  = digit_base(ad_dig);
      ug_k     = DW'(1);
      ug_mask  = d_row(ROW_IW'(THETA1_ROW));
    end
    if (state == S_RIP && 32'(rip_j) + 1 < DIGITS) begin
      ug_start = 1'b1;
      ug_base  = digit_base(rip_j + 1'b1);
      ug_k     = DW'(1);
      ug_mask  = d_row(ROW_IW'(int'(digit_base(rip_j)) + N_BITS));
    end
  end

  // Row sweeps. COPY: counter row r -> row mask_q + r. RELU: after a flush
  // a counter is negative when the MSB of its top digit is set (value at
  // least half the capacity, radix complement), so every counter row is
  // ANDed with the complement of that row: AAP r,B0; AAP s,B5; AAP C0,B1;
  // AAP B11,r. The sign row itself is visited last.
  localparam int unsigned SIGN_OFF = (DIGITS - 1) * (N_BITS + 1) + N_BITS - 1;
  logic [ROW_IW-1:0] sign_row;
  assign sign_row = ROW_IW'(CNT_BASE + SIGN_OFF);
  always_comb begin
    int unsigned off;
    off = copy_q ? int'(clr_q) : (int'(clr_q) + SIGN_OFF + 1) % NCROWS;
    sweep_row = ROW_IW'(CNT_BASE + off);
  end

  // Command port
  always_comb begin
    cmd_valid = 1'b0;
    cmd       = ug_cmd;
    unique case (state)
      S_CLR: begin
        cmd_valid = 1'b1;
        cmd       = aap(ROW_C0, d_row(ROW_IW'(CNT_BASE + int'(clr_q))));
      end
      S_RIP_CLR: begin
        cmd_valid = 1'b1;
        cmd       = aap(ROW_C0, d_row(ROW_IW'(int'(digit_base(rip_j)) + N_BITS)));
      end
      S_ADD, S_RIP_WAIT, S_AADD: cmd_valid = ug_cmd_valid;
      S_AMASK: begin
        cmd_valid = am_cmd_valid;
        cmd       = am_cmd;
      end
      S_ROWOP: begin
        cmd_valid = 1'b1;
        if (copy_q) cmd = aap(d_row(sweep_row), d_row(ROW_IW'(mask_q) + ROW_IW'(clr_q)));
        else begin
          unique case (sub_q)
            2'd0:    cmd = aap(d_row(sweep_row), b_row(B0));
            2'd1:    cmd = aap(d_row(sign_row), b_row(B5));
            2'd2:    cmd = aap(ROW_C0, b_row(B1));
            default: cmd = aap(b_row(B11), d_row(sweep_row));
          endcase
        end
      end
      default: ;
    endcase
  end

  assign req_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);
  assign rip_fire  = (state == S_RIP_CLR) && cmd_ready;
  assign add_fire  = (state inside {S_ADD, S_AADD}) && ug_done;
  assign pl_clr    = (state == S_CLR) && cmd_ready && (32'(clr_q) == NCROWS - 1);
  assign pl_relax  = (state == S_FLUSH) && flush_sw && !is_zero && (acc_dir != cur_dir) && !f_pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      x_q         <= '0;
      sh_q        <= '0;
      neg_q       <= 1'b0;
      mask_q      <= '0;
      flush_sw    <= 1'b0;
      rip_ret_fl  <= 1'b0;
      d_q         <= '0;
      rip_j       <= '0;
      clr_q       <= '0;
      addc_q      <= 1'b0;
      copy_q      <= 1'b0;
      rowop_q     <= 1'b0;
      sub_q       <= '0;
      ad_d        <= '0;
      ad_s        <= '0;
      cur_dir     <= DIR_INC;
      st_cmds     <= '0;
      st_adds     <= '0;
      st_ripples  <= '0;
      st_skipped  <= '0;
      st_switches <= '0;
    end else begin
      if (cmd_valid && cmd_ready) st_cmds <= st_cmds + 1'b1;
      unique case (state)
        S_IDLE: if (req_valid) begin
          x_q    <= req_x;
          sh_q   <= req_shift;
          neg_q  <= req_neg;
          mask_q <= req_mask;
          d_q    <= '0;
          addc_q  <= (req_op == REQ_ADDC);
          copy_q  <= (req_op == REQ_COPY);
          rowop_q <= (req_op == REQ_COPY) || (req_op == REQ_RELU);
          clr_q   <= '0;
          sub_q   <= '0;
          ad_d   <= '0;
          ad_s   <= '0;
          unique case (req_op)
            REQ_CLEAR: begin
              clr_q <= '0;
              state <= S_CLR;
            end
            REQ_FLUSH, REQ_COPY, REQ_RELU: begin
              flush_sw <= 1'b0;
              state    <= S_FLUSH;
            end
            REQ_ADDC: begin
              // counter addition increments: x = +1 selects that direction
              x_q      <= XW'(1);
              sh_q     <= '0;
              neg_q    <= 1'b0;
              flush_sw <= 1'b1;
              state    <= S_FLUSH;
            end
            default: begin
              // direction is decided once the request is latched
              flush_sw <= 1'b1;
              state    <= S_FLUSH;
            end
          endcase
        end
        S_CLR: if (cmd_ready) begin
          clr_q <= clr_q + 1'b1;
          if (32'(clr_q) == NCROWS - 1) begin
            cur_dir <= DIR_INC;
            state   <= S_IDLE;
          end
        end
        S_FLUSH: begin
          if (flush_sw && (is_zero || acc_dir == cur_dir)) begin
            // accumulate request: no switch needed, go straight to digits
            if (is_zero) begin
              st_skipped <= st_skipped + 1'b1;
              state      <= S_IDLE;
            end else begin
              state      <= addc_q ? S_APREP : S_PREP;
            end
          end else if (f_pending) begin
            rip_j      <= f_ripple_digit;
            rip_ret_fl <= 1'b1;
            state      <= S_RIP;
          end else if (flush_sw) begin
            cur_dir     <= acc_dir;
            st_switches <= st_switches + 1'b1;
            state       <= addc_q ? S_APREP : S_PREP;
          end else begin
            state <= rowop_q ? S_ROWOP : S_IDLE;
          end
        end
        S_ROWOP: if (cmd_ready) begin
          sub_q <= sub_q + 1'b1;
          if (copy_q || sub_q == 2'd3) begin
            clr_q <= clr_q + 1'b1;
            if (32'(clr_q) == NCROWS - 1) state <= S_IDLE;
          end
        end
        S_PREP: begin
          if (32'(d_q) >= USE_DIG) begin
            state <= S_IDLE;
          end else if (!cur_nz) begin
            st_skipped <= st_skipped + 1'b1;
            d_q        <= d_q + 1'b1;
          end else if (q_need_ripple) begin
            rip_j      <= q_ripple_digit;
            rip_ret_fl <= 1'b0;
            state      <= S_RIP;
          end else if (ug_ready) begin
            state <= S_ADD;
          end
        end
        S_ADD: if (ug_done) begin
          st_adds <= st_adds + 1'b1;
          d_q     <= d_q + 1'b1;
          state   <= S_PREP;
        end
        S_RIP: begin
          if (32'(rip_j) + 1 < DIGITS) state <= S_RIP_WAIT;
          else                          state <= S_RIP_CLR;
        end
        S_RIP_WAIT: if (ug_done) state <= S_RIP_CLR;
        S_RIP_CLR: if (cmd_ready) begin
          st_ripples <= st_ripples + 1'b1;
          state      <= rip_ret_fl ? S_FLUSH : (addc_q ? S_APREP : S_PREP);
        end
        S_APREP: begin
          if (32'(ad_d) >= DIGITS) begin
            state <= S_IDLE;
          end else if (q_need_ripple) begin
            rip_j      <= q_ripple_digit;
            rip_ret_fl <= 1'b0;
            state      <= S_RIP;
          end else if (am_ready) begin
            state <= S_AMASK;
          end
        end
        S_AMASK: if (am_done) state <= S_AADD;   // uprog_gen starts with done
        S_AADD: if (ug_done) begin
          st_adds <= st_adds + 1'b1;
          if (32'(ad_s) == RADIX - 1) begin
            ad_s <= '0;
            ad_d <= ad_d + 1'b1;
          end else begin
            ad_s <= ad_s + 1'b1;
          end
          state <= S_APREP;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rules: a command or request held up by ready stays unchanged.
  property p_cmd_stable;
    @(posedge clk) disable iff (!rst_n)
      (cmd_valid && !cmd_ready) |=> (cmd_valid && $stable(cmd));
  endproperty
  a_cmd_stable: assert property (p_cmd_stable);

  // Commands never write the constant rows.
  a_no_c_write: assert property (@(posedge clk) disable iff (!rst_n)
      (cmd_valid && cmd.op == CIM_AAP) |-> (cmd.dst.grp != GRP_C));

endmodule
