// regime_determinator: the regime/antiregime stage (E1) of the takum
// predecoder.
//
// The regime r is the value of the three regime bits R when the direction
// bit D is 1 and of their complement when D is 0. The antiregime is 7 - r,
// which for a 3-bit number is simply the complement of r, so both outputs
// are the same pair of multiplexers with swapped inputs, as in the paper's
// predecoder circuit.
//
// Interface: direction_bit and regime_bits in, regime and antiregime out.
// Timing: purely combinational, two 2:1 multiplexer levels at most.
module regime_determinator (
  input  logic       direction_bit,
  input  logic [2:0] regime_bits,
  output logic [2:0] regime,
  output logic [2:0] antiregime
);

  always_comb begin
    regime     = direction_bit ? regime_bits : ~regime_bits;
    antiregime = direction_bit ? ~regime_bits : regime_bits;
  end

endmodule
