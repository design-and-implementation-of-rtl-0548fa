// special_case_detector: the special case stage (E3) of the takum
// predecoder.
//
// A takum whose bits below the sign bit are all zero is 0 (sign 0) or NaR,
// "not a real" (sign 1). One (N-1)-input NOR and two AND gates.
//
// Interface: the N-bit takum in, is_zero and is_nar out. Timing:
// combinational.
module special_case_detector #(
  parameter int unsigned N = 64
) (
  input  logic [N-1:0] takum,
  output logic         is_zero,
  output logic         is_nar
);

  logic rest_zero;

  always_comb begin
    rest_zero = ~|takum[N-2:0];
    is_zero   = ~takum[N-1] & rest_zero;
    is_nar    = takum[N-1] & rest_zero;
  end

endmodule
