// char_precursor_determinator: the characteristic precursor determinator
// (E2) of the takum postencoder.
//
// For a characteristic c with regime r, the 8-bit value
//   (D ? c : -c - 1) + 1  =  2^r + (D ? C : ~C)
// has its leading one at bit r and the (possibly complemented)
// characteristic bits below it. -c - 1 is the bitwise complement of c,
// and bit 8 of the selected value is always 0, so only the low 8 bits are
// muxed and fed to an 8-bit incrementer built from half adders. This
// avoids the decrement the takum definition would otherwise call for.
//
// Interface: direction_bit (1 when c >= 0) and characteristic[7:0] in,
// characteristic_precursor[7:0] out (1..255). Timing: combinational.
module char_precursor_determinator (
  input  logic       direction_bit,
  input  logic [7:0] characteristic,
  output logic [7:0] characteristic_precursor
);

  always_comb begin
    characteristic_precursor =
      (direction_bit ? characteristic : ~characteristic) + 8'd1;
  end

endmodule
