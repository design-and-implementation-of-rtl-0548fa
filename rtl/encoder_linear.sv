// encoder_linear: encodes the two's complement floating-point
// representation (S, e, f), value ((1 - 3S) + f) * 2^e, into an N-bit
// linear takum.
//
// The characteristic is recovered from the exponent by the same
// conditional complement the linear decoder uses: c = e for S = 0 and
// c = ~e (= -e - 1) for S = 1. The fraction bits are the mantissa bits.
// The postencoder then builds, rounds and saturates the takum.
//
// Interface: sign_bit, exponent[8:0] (two's complement, -255..254),
// fraction_bits[MW-1:0], is_zero, is_nar in; takum[N-1:0] out.
// Timing: combinational; the complement adds one XOR level.
module encoder_linear
  import takum_pkg::*;
#(
  parameter int unsigned N = 64,
  localparam int unsigned MW = mant_width(N)
) (
  input  logic          sign_bit,
  input  logic [8:0]    exponent,
  input  logic [MW-1:0] fraction_bits,
  input  logic          is_zero,
  input  logic          is_nar,
  output logic [N-1:0]  takum
);

  logic [8:0] characteristic;

  assign characteristic = sign_bit ? ~exponent : exponent;

  postencoder #(
    .N (N)
  ) u_postencoder (
    .sign_bit       (sign_bit),
    .characteristic (characteristic),
    .mantissa_bits  (fraction_bits),
    .is_zero        (is_zero),
    .is_nar         (is_nar),
    .takum          (takum)
  );

endmodule
