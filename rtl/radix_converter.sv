// radix_converter: binary input to the counters' radix.
//
// Count2Multiply adds a value to in-memory counters digit by digit, one
// Johnson-counter (JC) digit of radix 2n at a time, so every binary input is
// first rewritten in base 2n. This block takes a signed XW-bit input x, an
// optional power-of-two scale (the weight of a bit slice of an integer
// matrix, Z in its canonical-signed-digit form) and the slice's sign, and
// returns the direction of the update (increment or decrement), the
// magnitude's base-2n digits, least significant first, and a mask of the
// non-zero digits. Zero digits are skipped by the sequencer, which is how
// small and sparse inputs cost fewer memory commands.
//
// Purely combinational: a chain of constant divisions by 2n. The paper says
// only that inputs are unpacked into counter-radix digits; the divider chain
// and the scale/sign inputs for bit slices are this design's own choices.
//
// IN_DIG digits cover XW + MAX_SHIFT bits; when that is not a multiple of
// log2(2n) the top bit of the last digit can never be set (at the defaults
// 15 bits in 8 radix-4 digits) and synthesis ties it to 0.
module radix_converter #(
  parameter int unsigned N_BITS    = 2,   // bits per JC digit (radix 2n)
  parameter int unsigned XW        = 8,   // input width (signed)
  parameter int unsigned MAX_SHIFT = 7,   // largest bit-slice scale 2**shift
  localparam int unsigned RADIX    = 2 * N_BITS,
  localparam int unsigned DW       = $clog2(RADIX),
  localparam int unsigned MW       = XW + MAX_SHIFT,
  localparam int unsigned IN_DIG   = c2m_pkg::digits_for(MW, N_BITS),
  localparam int unsigned SHW      = (MAX_SHIFT > 0) ? $clog2(MAX_SHIFT + 1) : 1
) (
  input  logic signed [XW-1:0]  x,
  input  logic [SHW-1:0]        shift,     // must not exceed MAX_SHIFT
  input  logic                  neg,       // negative bit slice
  output c2m_pkg::dir_e         dir,
  output logic [DW-1:0]         digit [IN_DIG],
  output logic [IN_DIG-1:0]     nz,
  output logic                  is_zero
);
  import c2m_pkg::*;

  logic [MW-1:0] mag;
  logic [XW-1:0] absx;

  always_comb begin
    absx = x[XW-1] ? XW'(-x) : XW'(x);
    mag  = MW'(absx) << shift;
    dir  = (x[XW-1] ^ neg) ? DIR_DEC : DIR_INC;
    is_zero = (x == '0);
  end

  // Digit chain: rem[i] = mag / RADIX**i
  logic [MW-1:0] rem [IN_DIG+1];
  assign rem[0] = mag;
  for (genvar i = 0; i < IN_DIG; i++) begin : g_dig
    assign digit[i]  = DW'(rem[i] % MW'(RADIX));
    assign rem[i+1]  = rem[i] / MW'(RADIX);
    assign nz[i]     = (digit[i] != '0);
  end

endmodule
