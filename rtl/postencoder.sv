// postencoder: turns a sign, a characteristic and mantissa bits into a
// correctly rounded, saturating N-bit takum.
//
// It is the common back end of both takum encoders and is made of five
// stages, as in the paper:
//   E1 uf_of_predictor              will rounding down give 0 / rounding
//                                   up give NaR?
//   E2 char_precursor_determinator  2^r + (D ? C : ~C) via one increment,
//      lod8                         regime r = position of its leading one,
//   E3 extended_takum_generator     unrounded (W+7)-bit takum,
//   E4 rounder                      ties-to-even rounding to N bits,
//   E5 output_driver                0 / NaR override.
// The direction bit is the complement of the characteristic's sign bit.
// E1 works on the inputs directly and so runs in parallel with E2/E3.
//
// Interface: sign_bit, characteristic[8:0] (two's complement, must lie in
// -255..254), mantissa_bits[MW-1:0] (the fraction, MSB first, MW = N - 5),
// is_zero, is_nar in; takum[N-1:0] out. When neither flag is set the
// inputs describe a non-zero real and the output is never 0 or NaR.
// Timing: combinational.
module postencoder
  import takum_pkg::*;
#(
  parameter int unsigned N = 64,
  localparam int unsigned W  = work_width(N),
  localparam int unsigned MW = mant_width(N)
) (
  input  logic          sign_bit,
  input  logic [8:0]    characteristic,
  input  logic [MW-1:0] mantissa_bits,
  input  logic          is_zero,
  input  logic          is_nar,
  output logic [N-1:0]  takum
);

  logic          direction_bit;
  logic          round_up_overflows;
  logic          round_down_underflows;
  logic [7:0]    characteristic_precursor;
  logic [2:0]    regime;
  logic [W+6:0]  extended_takum;
  logic [N-1:0]  takum_rounded;

  assign direction_bit = ~characteristic[8];

  uf_of_predictor #(
    .N (N)
  ) u_predictor (
    .characteristic        (characteristic),
    .mantissa_bits         (mantissa_bits),
    .round_up_overflows    (round_up_overflows),
    .round_down_underflows (round_down_underflows)
  );

  char_precursor_determinator u_precursor (
    .direction_bit            (direction_bit),
    .characteristic           (characteristic[7:0]),
    .characteristic_precursor (characteristic_precursor)
  );

  lod8 u_lod8 (
    .value    (characteristic_precursor),
    .position (regime)
  );

  extended_takum_generator #(
    .N (N)
  ) u_generator (
    .sign_bit                 (sign_bit),
    .direction_bit            (direction_bit),
    .regime                   (regime),
    .characteristic_precursor (characteristic_precursor),
    .mantissa_bits            (mantissa_bits),
    .extended_takum           (extended_takum)
  );

  rounder #(
    .N (N)
  ) u_rounder (
    .extended_takum        (extended_takum),
    .round_up_overflows    (round_up_overflows),
    .round_down_underflows (round_down_underflows),
    .takum_rounded         (takum_rounded)
  );

  output_driver #(
    .N (N)
  ) u_output (
    .takum_rounded (takum_rounded),
    .is_zero       (is_zero),
    .is_nar        (is_nar),
    .takum         (takum)
  );

endmodule
