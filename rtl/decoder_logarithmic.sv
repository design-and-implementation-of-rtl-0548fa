// decoder_logarithmic: decodes an N-bit (logarithmic) takum into the
// barred logarithmic representation (S, lbar).
//
// The value of a non-zero, non-NaR takum is (-1)^S * sqrt(e)^l with
// l = (-1)^S (c + m). Instead of l, this decoder outputs
// lbar = c + m = (-1)^S l, which grows with the mantissa bits for either
// sign, so no two's complement negation is needed. lbar is a fixed-point
// number: the 9-bit two's complement characteristic c from the predecoder
// concatenated with the N-5 left-aligned mantissa bits (N+4 bits in all,
// with N-5 fraction bits). For N <= 5 the single fraction bit is zero.
//
// Interface: takum[N-1:0] in; sign_bit, barred_logarithmic_value[LW-1:0]
// (LW = 9 + MW), precision, is_zero, is_nar out. Timing: combinational,
// the predecoder's delay.
module decoder_logarithmic
  import takum_pkg::*;
#(
  parameter int unsigned N = 64,
  localparam int unsigned MW = mant_width(N),
  localparam int unsigned PW = prec_width(N),
  localparam int unsigned LW = CHAR_W + MW
) (
  input  logic [N-1:0]  takum,
  output logic          sign_bit,
  output logic [LW-1:0] barred_logarithmic_value,
  output logic [PW-1:0] precision,
  output logic          is_zero,
  output logic          is_nar
);

  logic [8:0]    characteristic;
  logic [MW-1:0] mantissa_bits;

  predecoder #(
    .N               (N),
    .OUTPUT_EXPONENT (1'b0)
  ) u_predecoder (
    .takum                      (takum),
    .sign_bit                   (sign_bit),
    .characteristic_or_exponent (characteristic),
    .mantissa_bits              (mantissa_bits),
    .precision                  (precision),
    .is_zero                    (is_zero),
    .is_nar                     (is_nar)
  );

  assign barred_logarithmic_value = {characteristic, mantissa_bits};

endmodule
