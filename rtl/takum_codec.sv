// takum_codec: the complete takum codec: decoders and encoders for both
// logarithmic takums and linear takums, all of width N.
//
// The four converters are independent combinational paths that share no
// logic; an arithmetic unit would use the decoders as its input stage and
// the encoders as its output stage:
//   log_dec_*  decoder_logarithmic  takum -> (S, lbar)
//   lin_dec_*  decoder_linear       linear takum -> (S, e, f)
//   log_enc_*  encoder_logarithmic  (S, lbar) -> takum, rounded, saturating
//   lin_enc_*  encoder_linear       (S, e, f) -> linear takum, rounded,
//                                   saturating
// Zero and NaR travel as separate flags beside the internal
// representations. Decoding a takum and encoding the result gives back
// the same bits, in either format.
//
// Parameters: N, the takum width (2 or more). The default 64 is the
// largest width the codec was evaluated at; 8, 16 and 32 were the others.
// Timing: purely combinational, no clock or reset; register the ports as
// the surrounding pipeline requires.
module takum_codec
  import takum_pkg::*;
#(
  parameter int unsigned N = 64,
  localparam int unsigned MW = mant_width(N),
  localparam int unsigned PW = prec_width(N),
  localparam int unsigned LW = CHAR_W + MW
) (
  // logarithmic decoder
  input  logic [N-1:0]  log_dec_takum,
  output logic          log_dec_sign_bit,
  output logic [LW-1:0] log_dec_barred_logarithmic_value,
  output logic [PW-1:0] log_dec_precision,
  output logic          log_dec_is_zero,
  output logic          log_dec_is_nar,
  // linear decoder
  input  logic [N-1:0]  lin_dec_takum,
  output logic          lin_dec_sign_bit,
  output logic [8:0]    lin_dec_exponent,
  output logic [MW-1:0] lin_dec_fraction_bits,
  output logic [PW-1:0] lin_dec_precision,
  output logic          lin_dec_is_zero,
  output logic          lin_dec_is_nar,
  // logarithmic encoder
  input  logic          log_enc_sign_bit,
  input  logic [LW-1:0] log_enc_barred_logarithmic_value,
  input  logic          log_enc_is_zero,
  input  logic          log_enc_is_nar,
  output logic [N-1:0]  log_enc_takum,
  // linear encoder
  input  logic          lin_enc_sign_bit,
  input  logic [8:0]    lin_enc_exponent,
  input  logic [MW-1:0] lin_enc_fraction_bits,
  input  logic          lin_enc_is_zero,
  input  logic          lin_enc_is_nar,
  output logic [N-1:0]  lin_enc_takum
);

  decoder_logarithmic #(
    .N (N)
  ) u_log_dec (
    .takum                    (log_dec_takum),
    .sign_bit                 (log_dec_sign_bit),
    .barred_logarithmic_value (log_dec_barred_logarithmic_value),
    .precision                (log_dec_precision),
    .is_zero                  (log_dec_is_zero),
    .is_nar                   (log_dec_is_nar)
  );

  decoder_linear #(
    .N (N)
  ) u_lin_dec (
    .takum         (lin_dec_takum),
    .sign_bit      (lin_dec_sign_bit),
    .exponent      (lin_dec_exponent),
    .fraction_bits (lin_dec_fraction_bits),
    .precision     (lin_dec_precision),
    .is_zero       (lin_dec_is_zero),
    .is_nar        (lin_dec_is_nar)
  );

  encoder_logarithmic #(
    .N (N)
  ) u_log_enc (
    .sign_bit                 (log_enc_sign_bit),
    .barred_logarithmic_value (log_enc_barred_logarithmic_value),
    .is_zero                  (log_enc_is_zero),
    .is_nar                   (log_enc_is_nar),
    .takum                    (log_enc_takum)
  );

  encoder_linear #(
    .N (N)
  ) u_lin_enc (
    .sign_bit      (lin_enc_sign_bit),
    .exponent      (lin_enc_exponent),
    .fraction_bits (lin_enc_fraction_bits),
    .is_zero       (lin_enc_is_zero),
    .is_nar        (lin_enc_is_nar),
    .takum         (lin_enc_takum)
  );

endmodule
