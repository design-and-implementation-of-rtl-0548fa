// extended_takum_generator: the extended takum generator (E3) of the takum
// postencoder.
//
// Builds the unrounded "extended takum" of W + 7 bits (W = max(N, 12)):
// sign, direction, three regime bits, the r characteristic bits and all
// W - 5 mantissa bits. Seven extra bits are exactly what a mantissa of
// full length W - 5 needs when r = 7, so nothing is lost before the
// separate rounder, and carries from mantissa rounding into the
// characteristic and regime are handled there in one place.
//   - regime bits: r when D = 1, ~r when D = 0;
//   - characteristic bits: the low 7 bits of the precursor, complemented
//     when D = 0 (the deferred half of the precursor trick); only the low
//     r of them are real;
//   - {those 7 bits, mantissa, 7 zero bits} is shifted right by r, which
//     puts the r characteristic bits directly below the regime and pushes
//     the 7 - r unused bits into the discarded top 7 positions.
// The shift distance is at most 7 for every N.
//
// Precursor bit 7 (set only for r = 7, where it is the leading one) and
// the top 7 bits of the shifted vector are discarded by construction.
//
// For N < 12 the mantissa port is padded with zero ghost bits to W - 5.
//
// Interface: sign_bit, direction_bit, regime[2:0],
// characteristic_precursor[7:0], mantissa_bits[MW-1:0] in;
// extended_takum[W+6:0] out. Timing: combinational, one 3-level shifter.
module extended_takum_generator
  import takum_pkg::*;
#(
  parameter int unsigned N = 64,
  localparam int unsigned W  = work_width(N),
  localparam int unsigned MW = mant_width(N)
) (
  input  logic          sign_bit,
  input  logic          direction_bit,
  input  logic [2:0]    regime,
  input  logic [7:0]    characteristic_precursor,
  input  logic [MW-1:0] mantissa_bits,
  output logic [W+6:0]  extended_takum
);

  logic [W-6:0] mantissa_padded;
  logic [2:0]   regime_bits;
  logic [6:0]   characteristic_bits;
  logic [W+8:0] unshifted;
  logic [W+8:0] shifted;

  generate
    if (N > 5) begin : g_mantissa
      assign mantissa_padded = (W-5)'(mantissa_bits) << (W - N);
    end else begin : g_no_mantissa
      assign mantissa_padded = '0;
    end
  endgenerate

  always_comb begin
    regime_bits         = direction_bit ? regime : ~regime;
    characteristic_bits = direction_bit ? characteristic_precursor[6:0]
                                        : ~characteristic_precursor[6:0];
    unshifted           = {characteristic_bits, mantissa_padded, 7'b0};
    shifted             = unshifted >> regime;
    extended_takum      = {sign_bit, direction_bit, regime_bits, shifted[W+1:0]};
  end

endmodule
