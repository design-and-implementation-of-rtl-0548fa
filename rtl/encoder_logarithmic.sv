// encoder_logarithmic: encodes the barred logarithmic representation
// (S, lbar) into an N-bit (logarithmic) takum.
//
// lbar = c + m is a fixed-point number whose top 9 bits are the two's
// complement characteristic c and whose low MW = N - 5 bits are the
// mantissa m. Because lbar (not l = (-1)^S lbar) is the input, no
// negation is needed: the two fields go straight into the postencoder,
// which rounds to nearest (ties to even) and saturates at the smallest and
// largest magnitudes instead of returning 0 or NaR.
//
// Interface: sign_bit, barred_logarithmic_value[LW-1:0] (LW = 9 + MW,
// integer part must lie in -255..254), is_zero, is_nar in; takum[N-1:0]
// out. Timing: combinational, the postencoder's delay.
module encoder_logarithmic
  import takum_pkg::*;
#(
  parameter int unsigned N = 64,
  localparam int unsigned MW = mant_width(N),
  localparam int unsigned LW = CHAR_W + MW
) (
  input  logic          sign_bit,
  input  logic [LW-1:0] barred_logarithmic_value,
  input  logic          is_zero,
  input  logic          is_nar,
  output logic [N-1:0]  takum
);

  postencoder #(
    .N (N)
  ) u_postencoder (
    .sign_bit       (sign_bit),
    .characteristic (barred_logarithmic_value[LW-1 -: CHAR_W]),
    .mantissa_bits  (barred_logarithmic_value[MW-1:0]),
    .is_zero        (is_zero),
    .is_nar         (is_nar),
    .takum          (takum)
  );

endmodule
