// jc_add_mask: mask rows for adding one in-memory counter to another.
//
// Counter addition C1 <- C1 + C2 keeps both counters in the subarray and
// uses the JC bits of a C2 digit, one after another, as masks for unit
// increments of the matching C1 digit. A JC digit of value v in 0..2n-1 has
// its low v bits set when v <= n, and its low v-n bits clear with the rest
// set when v > n. With MSB the digit's top bit, the 2n masks
//     steps s = 0..n-1  (bit b = b_{n-1-s}, MSB down to LSB):  b | MSB
//     steps s = n..2n-1 (bit b = b_{s-n},   LSB up to MSB):    ~b & MSB
// are 1 in a column exactly v times, so 2n masked unit increments add v.
// This block emits the four commands that compute the mask of step s into a
// temporary D-group row:
//     b | MSB  : AAP b,B0; AAP MSB,B1; AAP C1,B2; AAP B12,tmp
//     ~b & MSB : AAP b,B5; AAP MSB,B0; AAP C0,B1; AAP B11,tmp
// (AAP on a three-row address takes the majority and copies it; B5 stores
// the complement into DCC0, which B11 opens with T0 and T1.)
//
// Follows the paper: the two passes over the bits (OR with a running term
// from MSB to LSB, then AND with the negated bits from LSB to MSB). The
// paper's listing sets the term of the second pass to the last mask of the
// first pass (LSB | MSB); that would add n instead of v for 0 < v < n, so
// the MSB is used in both passes here. The command lists are this design's.
//
// Every command is an AAP, so the op field of cmd is constant and synthesis
// ties it off.
//
// Interface: start_valid/start_ready loads (src_base = row of the C2 digit's
// b_0, step, tmp row); the four commands leave on cmd_valid/cmd_ready, one
// per cycle while ready is high; done pulses one cycle after the last one.
module jc_add_mask #(
  parameter int unsigned N_BITS = 2,
  localparam int unsigned SW    = $clog2(2 * N_BITS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start_valid,
  output logic                        start_ready,
  input  logic [c2m_pkg::ROW_IW-1:0]  src_base,
  input  logic [SW-1:0]               step,      // 0 .. 2n-1
  input  logic [c2m_pkg::ROW_IW-1:0]  tmp,
  output logic                        cmd_valid,
  input  logic                        cmd_ready,
  output c2m_pkg::cim_cmd_t           cmd,
  output logic                        done
);
  import c2m_pkg::*;

  logic              busy_q;
  logic [1:0]        idx_q;
  logic              and_q;      // second pass: ~b & MSB
  logic [ROW_IW-1:0] b_q, msb_q, tmp_q;

  assign start_ready = !busy_q;
  assign cmd_valid   = busy_q;

  always_comb begin
    row_addr_t b, msb, t;
    b   = d_row(b_q);
    msb = d_row(msb_q);
    t   = d_row(tmp_q);
    unique case ({and_q, idx_q})
      3'b000:  cmd = aap(b, b_row(B0));
      3'b001:  cmd = aap(msb, b_row(B1));
      3'b010:  cmd = aap(ROW_C1, b_row(B2));
      3'b011:  cmd = aap(b_row(B12), t);
      3'b100:  cmd = aap(b, b_row(B5));
      3'b101:  cmd = aap(msb, b_row(B0));
      3'b110:  cmd = aap(ROW_C0, b_row(B1));
      default: cmd = aap(b_row(B11), t);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      idx_q  <= '0;
      and_q  <= 1'b0;
      b_q    <= '0;
      msb_q  <= '0;
      tmp_q  <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy_q) begin
        if (start_valid) begin
          busy_q <= 1'b1;
          idx_q  <= '0;
          and_q  <= (32'(step) >= N_BITS);
          b_q    <= (32'(step) < N_BITS)
                    ? src_base + ROW_IW'(N_BITS - 1) - ROW_IW'(step)
                    : src_base + ROW_IW'(step) - ROW_IW'(N_BITS);
          msb_q  <= src_base + ROW_IW'(N_BITS - 1);
          tmp_q  <= tmp;
        end
      end else if (cmd_ready) begin
        idx_q <= idx_q + 1'b1;
        if (idx_q == 2'd3) begin
          busy_q <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

endmodule
