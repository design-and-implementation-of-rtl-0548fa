// output_driver: the output driver (E5) of the takum postencoder.
//
// Replaces the rounded takum by the special encodings when the input is a
// special case: 0 is all zero bits, NaR is a one followed by zeros.
// NaR wins if both flags are set.
//
// Interface: takum_rounded[N-1:0], is_zero, is_nar in; takum[N-1:0] out.
// Timing: combinational, an OR gate and a 2:1 multiplexer.
module output_driver #(
  parameter int unsigned N = 64
) (
  input  logic [N-1:0] takum_rounded,
  input  logic         is_zero,
  input  logic         is_nar,
  output logic [N-1:0] takum
);

  always_comb begin
    takum = (is_zero | is_nar) ? {is_nar, {(N-1){1'b0}}} : takum_rounded;
  end

endmodule
