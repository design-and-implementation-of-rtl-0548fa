// rounder: the rounder (E4) of the takum postencoder.
//
// Rounds the (W+7)-bit extended takum to N bits, round to nearest, ties to
// even, with saturation. Both candidates are formed at once: the
// round-down candidate is the top N bits, the round-up candidate is that
// plus one. The choice is made in parallel with the increment rather than
// by adding a computed rounding bit, which keeps the incrementer off the
// decision path. Round up when
//   round_down_underflows, or
//   not round_up_overflows, and the first dropped bit is 1, and
//   (some lower dropped bit is 1, or the round-down candidate is odd).
// For N >= 12 the first dropped bit is bit 6 and the sticky bits are 5..0,
// as in the paper; for N < 12 there are more dropped bits (the ghost
// bits) and all of them below the first feed the sticky OR.
//
// Interface: extended_takum[W+6:0], round_up_overflows,
// round_down_underflows in; takum_rounded[N-1:0] out. Timing:
// combinational, one N-bit incrementer and a 2:1 multiplexer.
module rounder
  import takum_pkg::*;
#(
  parameter int unsigned N = 64,
  localparam int unsigned W = work_width(N)
) (
  input  logic [W+6:0] extended_takum,
  input  logic         round_up_overflows,
  input  logic         round_down_underflows,
  output logic [N-1:0] takum_rounded
);

  logic [N-1:0] takum_rounded_down;
  logic [N-1:0] takum_rounded_up;
  logic         rounding_bit;
  logic         sticky;
  logic         round_up;

  always_comb begin
    takum_rounded_down = extended_takum[W+6 -: N];
    takum_rounded_up   = takum_rounded_down + 1'b1;
    rounding_bit       = extended_takum[W+6-N];
    sticky             = |extended_takum[W+5-N:0];
    round_up           = round_down_underflows |
                         (~round_up_overflows & rounding_bit &
                          (sticky | takum_rounded_down[0]));
    takum_rounded      = round_up ? takum_rounded_up : takum_rounded_down;
  end

endmodule
