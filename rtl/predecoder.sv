// predecoder: splits an N-bit takum into sign, characteristic (or linear
// exponent), left-aligned mantissa bits, precision and the 0/NaR flags.
//
// It is the common front end of both takum decoders. The word is first
// padded with zero ghost bits to W = max(N, 12) bits, so that the sign,
// direction, regime and the 7-bit raw characteristic always sit at fixed
// positions (bits W-1, W-2, W-3..W-5 and W-6..W-12). Three stages follow,
// as in the paper:
//   E1 regime_determinator     regime r and antiregime 7 - r,
//   E2 char_exp_determinator   characteristic c, or exponent if
//                              OUTPUT_EXPONENT is set,
//   E3 special_case_detector   is_zero / is_nar.
// The W-5 bits below the regime are shifted left by r, which drops the r
// characteristic bits and leaves the p = N - r - 5 mantissa bits
// left-aligned; the shifter needs only 3 control bits for any N. The
// precision output is p = N - 5 - r. For N < 12 and large r this would be
// negative (all mantissa bits are ghost bits); this design then reports 0.
//
// Interface: takum[N-1:0] in; sign_bit, characteristic_or_exponent[8:0],
// mantissa_bits[MW-1:0] (MW = N - 5, one always-zero bit when N <= 5),
// precision[PW-1:0] (PW = clog2(N)), is_zero, is_nar out.
// Timing: combinational. The outputs are meaningless when is_zero or
// is_nar is set.
module predecoder
  import takum_pkg::*;
#(
  parameter int unsigned N               = 64,
  parameter bit          OUTPUT_EXPONENT = 1'b0,
  localparam int unsigned W  = work_width(N),
  localparam int unsigned MW = mant_width(N),
  localparam int unsigned PW = prec_width(N)
) (
  input  logic [N-1:0]  takum,
  output logic          sign_bit,
  output logic [8:0]    characteristic_or_exponent,
  output logic [MW-1:0] mantissa_bits,
  output logic [PW-1:0] precision,
  output logic          is_zero,
  output logic          is_nar
);

  logic [W-1:0] takum_padded;
  logic         direction_bit;
  logic [2:0]   regime_bits;
  logic [6:0]   characteristic_raw_bits;
  logic [2:0]   regime;
  logic [2:0]   antiregime;
  logic [W-6:0] mantissa_shifted;

  always_comb begin
    takum_padded = W'(takum) << (W - N);
  end

  assign sign_bit                = takum_padded[W-1];
  assign direction_bit           = takum_padded[W-2];
  assign regime_bits             = takum_padded[W-3:W-5];
  assign characteristic_raw_bits = takum_padded[W-6:W-12];

  regime_determinator u_regime (
    .direction_bit (direction_bit),
    .regime_bits   (regime_bits),
    .regime        (regime),
    .antiregime    (antiregime)
  );

  char_exp_determinator #(
    .OUTPUT_EXPONENT (OUTPUT_EXPONENT)
  ) u_char_exp (
    .direction_bit              (direction_bit),
    .sign_bit                   (sign_bit),
    .antiregime                 (antiregime),
    .characteristic_raw_bits    (characteristic_raw_bits),
    .characteristic_or_exponent (characteristic_or_exponent)
  );

  special_case_detector #(
    .N (N)
  ) u_special (
    .takum   (takum),
    .is_zero (is_zero),
    .is_nar  (is_nar)
  );

  always_comb begin
    mantissa_shifted = takum_padded[W-6:0] << regime;
  end

  generate
    if (N > 5) begin : g_mantissa
      assign mantissa_bits = mantissa_shifted[W-6 -: MW];
    end else begin : g_no_mantissa
      assign mantissa_bits = '0;
    end
  endgenerate

  always_comb begin
    if (N >= FULL_N || int'(regime) <= int'(N) - 5) begin
      precision = PW'(int'(N) - 5 - int'(regime));
    end else begin
      precision = '0;
    end
  end

endmodule
