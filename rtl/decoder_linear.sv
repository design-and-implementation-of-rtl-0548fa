// decoder_linear: decodes an N-bit linear takum into the two's complement
// floating-point representation (S, e, f) with value ((1 - 3S) + f) * 2^e.
//
// The exponent is e = (-1)^S (c + S), which is c for S = 0 and the bitwise
// complement of c for S = 1. The predecoder is built with OUTPUT_EXPONENT
// set, which folds that complement into the conditional inversion it
// already performs, so the exponent costs no extra logic. The fraction
// bits are the left-aligned mantissa bits; they grow with f for either
// sign, so no negation is needed.
//
// Interface: takum[N-1:0] in; sign_bit, exponent[8:0], fraction_bits
// [MW-1:0], precision, is_zero, is_nar out. Timing: combinational.
module decoder_linear
  import takum_pkg::*;
#(
  parameter int unsigned N = 64,
  localparam int unsigned MW = mant_width(N),
  localparam int unsigned PW = prec_width(N)
) (
  input  logic [N-1:0]  takum,
  output logic          sign_bit,
  output logic [8:0]    exponent,
  output logic [MW-1:0] fraction_bits,
  output logic [PW-1:0] precision,
  output logic          is_zero,
  output logic          is_nar
);

  predecoder #(
    .N               (N),
    .OUTPUT_EXPONENT (1'b1)
  ) u_predecoder (
    .takum                      (takum),
    .sign_bit                   (sign_bit),
    .characteristic_or_exponent (exponent),
    .mantissa_bits              (fraction_bits),
    .precision                  (precision),
    .is_zero                    (is_zero),
    .is_nar                     (is_nar)
  );

endmodule
