// uf_of_predictor: the underflow/overflow predictor (E1) of the takum
// postencoder.
//
// Takum encoding saturates ("sticky" arithmetic): a non-zero real never
// rounds to 0 and never rounds to NaR. This block tells the rounder, from
// the encoder inputs alone and early in the cycle, whether the
// round-down candidate would be 0 (round_down_underflows) or the
// round-up candidate would wrap to NaR/0 (round_up_overflows).
//
// N >= 12: the rounding boundary lies in the mantissa, after the fixed
// 12-bit prefix S D RRR CCCCCCC with regime 7. Overflow needs c = 254 and
// the N-11 leading mantissa bits (the N-12 kept bits plus the first
// rounding bit) all one, as in the paper. Underflow needs c = -255 and the
// N-12 kept mantissa bits all zero. The paper also includes the first
// rounding bit in the underflow test; this design leaves it out, because
// with that bit set and nothing below it the rounder's ties-to-even rule
// would pick the all-zero (even) candidate and the result would be 0,
// which saturation forbids. For N = 12 the test is c = -255 alone.
// N < 12: the boundary lies inside the regime/characteristic bits and both
// tests are comparisons of c against the bounds of the paper's rounding
// table (takum_pkg::underflow_bound); the mantissa is not looked at.
//
// The six lowest mantissa bits lie below the first rounding bit and do
// not affect either flag, so they are left unread.
//
// Interface: characteristic[8:0] (two's complement, -255..254) and
// mantissa_bits[MW-1:0] in; round_up_overflows, round_down_underflows out.
// Timing: combinational, two 9-bit comparisons and one N-bit AND/NOR tree.
module uf_of_predictor
  import takum_pkg::*;
#(
  parameter int unsigned N = 64,
  localparam int unsigned MW = mant_width(N)
) (
  input  logic [8:0]    characteristic,
  input  logic [MW-1:0] mantissa_bits,
  output logic          round_up_overflows,
  output logic          round_down_underflows
);

  localparam logic signed [8:0] UF_BOUND = 9'(underflow_bound(N));
  localparam logic signed [8:0] OF_BOUND = ~UF_BOUND;

  generate
    if (N > FULL_N) begin : g_wide
      logic is_max, is_min;
      assign is_max = (characteristic == CHAR_MAX);
      assign is_min = (characteristic == CHAR_MIN);
      assign round_up_overflows    = is_max & (&mantissa_bits[MW-1 -: N-11]);
      assign round_down_underflows = is_min & ~(|mantissa_bits[MW-1 -: N-12]);
    end else if (N == FULL_N) begin : g_twelve
      assign round_up_overflows    = (characteristic == CHAR_MAX) & mantissa_bits[MW-1];
      assign round_down_underflows = (characteristic == CHAR_MIN);
    end else begin : g_narrow
      assign round_up_overflows    = ($signed(characteristic) >= OF_BOUND);
      assign round_down_underflows = ($signed(characteristic) <= UF_BOUND);
    end
  endgenerate

endmodule
