// char_exp_determinator: the characteristic/exponent determinator (E2) of
// the takum predecoder.
//
// Input is the 7-bit raw characteristic: the seven bits that follow the
// regime in the (ghost-padded) word, holding the r characteristic bits
// left-aligned followed by 7 - r unused bits. The circuit uses only an
// increment, never a decrement:
//   1. invert the raw bits when the direction bit is 1,
//   2. prepend 2'b10 and shift arithmetically right by the antiregime,
//      which ORs the bias -2^(r+1) onto the r characteristic bits,
//   3. increment the low 8 bits and put a 1 back on top (bit 8 of the
//      biased value is always 1 and the increment never carries into it),
//   4. invert the 9-bit result when the direction bit is 1 to get c.
// With OUTPUT_EXPONENT set, the last inversion is additionally toggled by
// the sign bit, which turns c into the linear-takum exponent
// e = (-1)^S (c + S) at no cost (for S = 1, e = -c - 1 = ~c). This is a
// build-time parameter, as in the paper.
//
// Bit 8 of the shifted value is always 1 and is re-created as the
// constant 1 above the incremented byte, so it is left unread.
//
// Interface: direction_bit, sign_bit, antiregime[2:0] and
// characteristic_raw_bits[6:0] in; 9-bit two's complement
// characteristic_or_exponent out. Timing: combinational; the 8-bit
// incrementer is the longest path.
module char_exp_determinator #(
  parameter bit OUTPUT_EXPONENT = 1'b0
) (
  input  logic       direction_bit,
  input  logic       sign_bit,
  input  logic [2:0] antiregime,
  input  logic [6:0] characteristic_raw_bits,
  output logic [8:0] characteristic_or_exponent
);

  logic [6:0]        raw_normalised;
  logic signed [8:0] biased;
  logic [7:0]        incremented;
  logic              negate;

  always_comb begin
    raw_normalised = direction_bit ? ~characteristic_raw_bits : characteristic_raw_bits;
    biased         = $signed({2'b10, raw_normalised}) >>> antiregime;
    incremented    = biased[7:0] + 8'd1;
    negate         = direction_bit ^ (OUTPUT_EXPONENT & sign_bit);
    characteristic_or_exponent = negate ? ~{1'b1, incremented} : {1'b1, incremented};
  end

endmodule
