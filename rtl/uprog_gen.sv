// uprog_gen: uProgram sequencer for one masked k-ary JC digit update.
//
// A digit of an in-memory counter is an n-bit Johnson counter stored
// column-wise: row b_i (i = 0 LSB .. n-1 MSB) holds bit i of every column's
// counter, row O holds each column's pending carry/borrow flag. Adding k
// (1 <= k <= 2n-1) to a JC is a rotation of its 2n-state ring: bit i takes
// bit i-k (mod n), inverted where the rotation wraps past the MSB. A masked
// update does this only in the columns whose mask row bit is 1:
//     b'_i = (~m & b_i) | (m & f(b_src))        f = identity or NOT
// Decrementing by k is the same rotation as incrementing by 2n-k; only the
// flag logic differs (a borrow instead of a carry).
//
// Each bit update is one of the two seven-command templates of the paper's
// majority-inverter uProgram (AAP/AP on Ambit's B-group rows):
//   forward shift  (source taken as is):
//     AAP m,B8; AAP C0,B9; AAP src,B2; AP B12; AAP dst,B2; AAP B14,B3; AAP B15,dst
//   inverted feedback (source negated through DCC0's negated wordline):
//     AAP dst,B2; AAP m,B8; AAP C0,B9; AAP B14,B3; AAP src,B5; AP B11; AAP B15,dst
// The flag is updated after all bits (old MSB saved in temporary row theta0):
//   increment, k <= n : O |= MSB & ~MSB'              (6 commands)
//   increment, k >  n : O |= (MSB | ~MSB') & m        (10 commands)
//   decrement, k <= n : O |= ~MSB & MSB'              (6 commands)
//   decrement, k >  n : O |= (~MSB | MSB') & m        (10 commands)
// A unit increment therefore costs 1 + 7n + 6 = 7n + 7 commands, as in the
// paper.
//
// Ordering: bits are updated in place, so each bit must be read before it is
// overwritten. The rotation splits the n positions into g = gcd(n, shift)
// cycles of length n/g; each cycle is walked from its top position downward
// (dest j takes src j-shift), the first position saved beforehand in a
// temporary row (theta0 for the cycle through the MSB, theta1 for others)
// and used for the last step. For k = 1 this is exactly the paper's program
// (save MSB, shift MSB..LSB+1, feed back to LSB). For other k the paper gives
// only the logic (its Algorithm 1), not the command order; the saves for the
// extra cycles (g-1 commands, none when cycles have length one) are this
// design's choice. The flag programs for k <= n follow the paper's overflow
// MIG; those for k > n and for decrements, and the exact command lists of
// all flag programs, are this design's own.
//
// Interface: a start handshake (start_valid/start_ready) loads one job; the
// commands leave on a valid/ready port, one per cycle while cmd_ready is
// high; done pulses for one cycle after the last command is accepted.
module uprog_gen #(
  parameter int unsigned N_BITS     = 2,
  parameter int unsigned THETA0_ROW = 0,   // D-group temporary rows
  parameter int unsigned THETA1_ROW = 1,
  localparam int unsigned RADIX = 2 * N_BITS,
  localparam int unsigned DW    = $clog2(RADIX),
  localparam int unsigned BW    = (N_BITS > 1) ? $clog2(N_BITS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start_valid,
  output logic                          start_ready,
  input  logic [c2m_pkg::ROW_IW-1:0]    dig_base,  // D-group row of the digit's b_0
  input  logic [DW-1:0]                 k,         // 1 .. 2n-1
  input  c2m_pkg::dir_e                 dir,
  input  c2m_pkg::row_addr_t            mask,
  output logic                          cmd_valid,
  input  logic                          cmd_ready,
  output c2m_pkg::cim_cmd_t             cmd,
  output logic                          done
);
  import c2m_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_SAVE, S_STEP, S_FLAG} state_e;
  state_e state;

  // job registers
  logic [ROW_IW-1:0] base_q;
  row_addr_t         mask_q;
  logic [BW:0]       sh_q;      // rotation distance inside the n bits
  logic              rle_q;     // rotation r <= n (wrap bits are the low ones)
  logic              flag_long; // 10-command flag program
  logic              flag_swap; // decrement: roles of old and new MSB swapped
  logic [BW:0]       ncyc_q;    // number of cycles
  logic [BW:0]       clen_q;    // cycle length

  // walk registers
  logic [BW:0]       c_q;       // current cycle
  logic [BW:0]       t_q;       // step inside the cycle
  logic [BW:0]       j_q;       // current destination bit
  logic [3:0]        sub_q;     // command inside a template

  // current step's operands
  logic [BW:0]  src_bit;
  logic         last_in_cyc;
  logic         inv;
  row_addr_t    dst_row, src_row, th_row, msb_row, o_row, th0_row;
  logic [3:0]   n_sub;

  function automatic logic [BW:0] sub_mod(input logic [BW:0] a, input logic [BW:0] b);
    int v;
    v = int'(a) - int'(b);
    if (v < 0) v += N_BITS;
    return (BW+1)'(v);
  endfunction

  always_comb begin
    last_in_cyc = (t_q == clen_q - 1'b1);
    src_bit     = last_in_cyc ? ((BW+1)'(N_BITS - 1) - c_q) : sub_mod(j_q, sh_q);
    inv         = rle_q ? (j_q < sh_q) || (sh_q == '0) : (j_q >= sh_q);
    th0_row     = d_row(ROW_IW'(THETA0_ROW));
    th_row      = (c_q == '0) ? th0_row : d_row(ROW_IW'(THETA1_ROW));
    dst_row     = '{grp: GRP_D, idx: base_q + ROW_IW'(j_q)};
    if (last_in_cyc && clen_q > 1) src_row = th_row;
    else                           src_row = '{grp: GRP_D, idx: base_q + ROW_IW'(src_bit)};
    msb_row     = '{grp: GRP_D, idx: base_q + ROW_IW'(N_BITS - 1)};
    o_row       = '{grp: GRP_D, idx: base_q + ROW_IW'(N_BITS)};
    n_sub       = flag_long ? 4'd10 : 4'd6;
  end

  // Command for the current state
  always_comb begin
    row_addr_t fx, fy;
    cmd = aap(ROW_C0, ROW_C0);
    fx  = flag_swap ? msb_row : th0_row;
    fy  = flag_swap ? th0_row : msb_row;
    unique case (state)
      S_SAVE: cmd = aap('{grp: GRP_D, idx: base_q + ROW_IW'((BW+1)'(N_BITS - 1) - c_q)}, th_row);
      S_STEP: begin
        if (!inv) begin
          unique case (sub_q)
            4'd0:    cmd = aap(mask_q, b_row(B8));
            4'd1:    cmd = aap(ROW_C0, b_row(B9));
            4'd2:    cmd = aap(src_row, b_row(B2));
            4'd3:    cmd = ap(b_row(B12));
            4'd4:    cmd = aap(dst_row, b_row(B2));
            4'd5:    cmd = aap(b_row(B14), b_row(B3));
            default: cmd = aap(b_row(B15), dst_row);
          endcase
        end else begin
          unique case (sub_q)
            4'd0:    cmd = aap(dst_row, b_row(B2));
            4'd1:    cmd = aap(mask_q, b_row(B8));
            4'd2:    cmd = aap(ROW_C0, b_row(B9));
            4'd3:    cmd = aap(b_row(B14), b_row(B3));
            4'd4:    cmd = aap(src_row, b_row(B5));
            4'd5:    cmd = ap(b_row(B11));
            default: cmd = aap(b_row(B15), dst_row);
          endcase
        end
      end
      S_FLAG: begin
        if (!flag_long) begin
          unique case (sub_q)
            4'd0:    cmd = aap(ROW_C0, b_row(B9));   // T1 <- 0, DCC1 <- 1
            4'd1:    cmd = aap(fx, b_row(B0));       // T0 <- x
            4'd2:    cmd = aap(fy, b_row(B5));       // DCC0 <- ~y
            4'd3:    cmd = ap(b_row(B11));           // x & ~y
            4'd4:    cmd = aap(o_row, b_row(B3));    // T3 <- O
            default: cmd = aap(b_row(B15), o_row);   // O <- T0 | T3
          endcase
        end else begin
          unique case (sub_q)
            4'd0:    cmd = aap(fx, b_row(B0));       // T0 <- x
            4'd1:    cmd = aap(fy, b_row(B5));       // DCC0 <- ~y
            4'd2:    cmd = aap(ROW_C1, b_row(B1));   // T1 <- 1
            4'd3:    cmd = ap(b_row(B11));           // x | ~y
            4'd4:    cmd = aap(mask_q, b_row(B2));   // T2 <- m
            4'd5:    cmd = aap(ROW_C0, b_row(B3));   // T3 <- 0
            4'd6:    cmd = ap(b_row(B13));           // (x | ~y) & m
            4'd7:    cmd = aap(o_row, b_row(B0));    // T0 <- O
            4'd8:    cmd = aap(ROW_C0, b_row(B7));   // DCC1 <- 1
            default: cmd = aap(b_row(B15), o_row);   // O <- T0 | T3
          endcase
        end
      end
      default: ;
    endcase
  end

  assign start_ready = (state == S_IDLE);
  assign cmd_valid   = (state != S_IDLE);

  // Setup of a job
  logic [DW:0]  r_in;
  logic [BW:0]  sh_in;
  logic         rle_in;
  int unsigned  g_in;
  always_comb begin
    r_in   = (dir == DIR_INC) ? (DW+1)'(k) : (DW+1)'(RADIX) - (DW+1)'(k);
    rle_in = (r_in <= (DW+1)'(N_BITS));
    sh_in  = rle_in ? (BW+1)'(r_in % (DW+1)'(N_BITS)) : (BW+1)'(r_in - (DW+1)'(N_BITS));
    g_in   = gcd_n(N_BITS, int'(sh_in));
  end

  // The cycle through the MSB is always saved (the flag needs the old MSB);
  // other cycles only when longer than one step.
  function automatic logic need_save(input logic [BW:0] c, input logic [BW:0] len);
    return (c == '0) || (len > 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      base_q    <= '0;
      mask_q    <= ROW_C0;
      sh_q      <= '0;
      rle_q     <= 1'b1;
      flag_long <= 1'b0;
      flag_swap <= 1'b0;
      ncyc_q    <= '0;
      clen_q    <= '0;
      c_q       <= '0;
      t_q       <= '0;
      j_q       <= '0;
      sub_q     <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start_valid) begin
          base_q    <= dig_base;
          mask_q    <= mask;
          sh_q      <= sh_in;
          rle_q     <= rle_in;
          flag_long <= (k > DW'(N_BITS));
          flag_swap <= (dir == DIR_DEC);
          ncyc_q    <= (BW+1)'(g_in);
          clen_q    <= (BW+1)'(N_BITS / g_in);
          c_q       <= '0;
          t_q       <= '0;
          j_q       <= (BW+1)'(N_BITS - 1);
          sub_q     <= '0;
          state     <= S_SAVE;   // cycle 0 is always saved
        end
        S_SAVE: if (cmd_ready) begin
          state <= S_STEP;
          sub_q <= '0;
        end
        S_STEP: if (cmd_ready) begin
          if (sub_q != 4'd6) begin
            sub_q <= sub_q + 1'b1;
          end else begin
            sub_q <= '0;
            if (!last_in_cyc) begin
              t_q <= t_q + 1'b1;
              j_q <= src_bit;
            end else if (c_q + 1'b1 < ncyc_q) begin
              c_q <= c_q + 1'b1;
              t_q <= '0;
              j_q <= (BW+1)'(N_BITS - 1) - (c_q + 1'b1);
              if (need_save(c_q + 1'b1, clen_q)) state <= S_SAVE;
            end else begin
              state <= S_FLAG;
            end
          end
        end
        S_FLAG: if (cmd_ready) begin
          if (sub_q + 1'b1 == n_sub) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            sub_q <= sub_q + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
