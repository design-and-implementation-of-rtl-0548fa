// lod8: 8-bit leading one detector returning the position (0..7) of the
// most significant set bit; applied to the characteristic precursor this
// is the takum regime r.
//
// The byte is split into two nibbles. Each nibble goes through a 16-entry
// lookup table giving the offset of its leading one. If the high nibble
// is non-zero its result plus 4 is returned (the +4 is just a constant
// top bit), otherwise the low nibble's result. An all-zero input returns
// 0; the precursor is never zero.
//
// Interface: value[7:0] in, position[2:0] out. Timing: combinational, one
// table lookup and one 2:1 multiplexer.
module lod8 (
  input  logic [7:0] value,
  output logic [2:0] position
);

  function automatic logic [1:0] lod4(input logic [3:0] nibble);
    unique casez (nibble)
      4'b1???: return 2'd3;
      4'b01??: return 2'd2;
      4'b001?: return 2'd1;
      default: return 2'd0;
    endcase
  endfunction

  logic [1:0] high_pos, low_pos;
  logic       high_any;

  always_comb begin
    high_pos = lod4(value[7:4]);
    low_pos  = lod4(value[3:0]);
    high_any = |value[7:4];
    position = high_any ? {1'b1, high_pos} : {1'b0, low_pos};
  end

endmodule
