// takum_pkg: constants and small helper functions shared by the takum
// decoder and encoder modules.
//
// A takum is an n-bit word (S, D, R[2:0], C[r-1:0], M[p-1:0]): sign bit,
// direction bit, three regime bits giving the regime r in 0..7, r
// characteristic bits and p = n - r - 5 mantissa bits. The characteristic c
// lies in -255..254 and is carried as a 9-bit two's complement number.
// Words shorter than 12 bits are read as if padded with zero "ghost" bits
// up to 12 bits, so the datapath works internally on max(n, 12) bits.
//
// Everything here is combinational and elaboration-time only.
package takum_pkg;

  // Width of the two's complement characteristic / exponent.
  localparam int unsigned CHAR_W = 9;
  // Shortest takum that carries every regime and characteristic bit.
  localparam int unsigned FULL_N = 12;
  // Largest characteristic (D=1, R=111, C=1111111) and smallest (all zero).
  localparam logic signed [CHAR_W-1:0] CHAR_MAX = 9'sd254;
  localparam logic signed [CHAR_W-1:0] CHAR_MIN = -9'sd255;

  // Internal working width: the word padded with ghost bits to 12 bits.
  function automatic int work_width(int n);
    return (n > FULL_N) ? n : FULL_N;
  endfunction

  // Width of the mantissa/fraction ports, n - 5. Words of 5 bits or less
  // have no mantissa; their ports keep one bit, which is always zero.
  function automatic int mant_width(int n);
    return (n > 5) ? n - 5 : 1;
  endfunction

  // Width of the precision output, enough for the largest value n - 5.
  function automatic int prec_width(int n);
    return (n > 2) ? $clog2(n) : 1;
  endfunction

  // For words shorter than 12 bits: the largest characteristic whose
  // rounded-down encoding is all zero after the sign bit (so it would
  // underflow to zero). The overflow bound is its bitwise complement,
  // -bound - 1. The values are those of the bit patterns
  // X 0 000.. 0 | 1..1 where the gap is the rounding boundary after n bits.
  function automatic int underflow_bound(int n);
    case (n)
      2:       return -1;
      3:       return -16;
      4:       return -64;
      5:       return -128;
      6:       return -192;
      7:       return -224;
      8:       return -240;
      9:       return -248;
      10:      return -252;
      11:      return -254;
      default: return -255;
    endcase
  endfunction

endpackage
