// takum_ref_pkg: behavioural reference model of takum decoding and
// encoding, used by the testbenches to work out expected values.
//
// It follows the arithmetic definition of the format directly (regime,
// characteristic c = -2^(r+1) + 1 + C or 2^r - 1 + C, mantissa, rounding
// of the exact bit string to n bits with ties to even and saturation) and
// shares no structure with the RTL: no precursor, no leading one
// detector, no biased shift. Words of up to 64 bits are held in 128-bit
// vectors; the width n is an argument, so one model serves every width.
package takum_ref_pkg;

  typedef logic [127:0] word_t;

  typedef struct {
    bit    sign_bit;
    bit    is_zero;
    bit    is_nar;
    int    regime;
    int    characteristic;  // c, -255..254
    int    exponent;        // (-1)^S (c + S)
    word_t mantissa_bits;   // n-5 bits, left-aligned mantissa (0 if n <= 5)
    int    precision;       // max(n - 5 - r, 0)
  } decoded_t;

  function automatic int max_int(int a, int b);
    return (a > b) ? a : b;
  endfunction

  function automatic word_t mask(int bits);
    word_t one = 128'd1;
    if (bits <= 0) return '0;
    return (one << bits) - one;
  endfunction

  // Decode an n-bit takum t (in the low n bits).
  function automatic decoded_t decode(int n, word_t t);
    decoded_t d;
    int    w = max_int(n, 12);
    word_t tp = (t & mask(n)) << (w - n);
    int    r, rfield, cbits, mlen;
    word_t mval;
    d.sign_bit = tp[w-1];
    d.is_zero  = ((t & mask(n)) == 0);
    d.is_nar   = ((t & mask(n)) == (word_t'(1) << (n - 1)));
    rfield     = int'((tp >> (w - 5)) & mask(3));
    r          = tp[w-2] ? rfield : 7 - rfield;
    cbits      = int'((tp >> (w - 5 - r)) & mask(r));
    if (tp[w-2]) d.characteristic = (1 << r) - 1 + cbits;
    else         d.characteristic = -(1 << (r + 1)) + 1 + cbits;
    d.regime   = r;
    d.exponent = d.sign_bit ? -d.characteristic - 1 : d.characteristic;
    mlen       = w - 5 - r;
    mval       = tp & mask(mlen);
    // left-align in w-5 bits, then keep the top n-5
    d.mantissa_bits = (n > 5) ? ((mval << r) >> (w - n)) : '0;
    d.precision = max_int(n - 5 - r, 0);
    return d;
  endfunction

  // Regime r of a characteristic c and its r characteristic bits C.
  function automatic int regime_of(int c);
    int r = 0;
    if (c >= 0) while ((1 << (r + 1)) <= c + 1) r++;
    else        while ((1 << (r + 1)) <= -c) r++;
    return r;
  endfunction

  function automatic int cbits_of(int c);
    int r = regime_of(c);
    return (c >= 0) ? c - ((1 << r) - 1) : c + (1 << (r + 1)) - 1;
  endfunction

  // Random characteristic in -255..254, one time in two within 3 of an end.
  function automatic int random_characteristic();
    int sel = $urandom_range(0, 3);
    if (sel == 0) return -255 + int'($urandom_range(0, 3));
    if (sel == 1) return 254 - int'($urandom_range(0, 3));
    return int'($urandom_range(0, 509)) - 255;
  endfunction

  // Random mantissa of mlen bits: random, all zero, all one, or nearly so,
  // or a rounding tie pattern.
  function automatic word_t random_mantissa(int mlen);
    word_t full = {$urandom, $urandom, $urandom, $urandom};
    case ($urandom_range(0, 5))
      0:       return '0;
      1:       return mask(mlen);
      2:       return full & mask(mlen) & mask($urandom_range(0, 7));
      3:       return mask(mlen) & ~(word_t'(1) << $urandom_range(0, 7));
      4:       return (word_t'(1) << $urandom_range(0, 13)) & mask(mlen);
      default: return full & mask(mlen);
    endcase
  endfunction

  // Exact (unrounded) bit string S D R C M of sign s, characteristic c
  // (-255..254) and the n-5 mantissa bits m; len receives its length,
  // 5 + r + max(n - 5, 0).
  function automatic word_t exact_pattern(int n, bit s, int c, word_t m, output int len);
    bit    dir;
    int    r, cbits, rfield, mlen;
    word_t exact;
    dir = (c >= 0);
    r = 0;
    if (dir) begin
      while ((1 << (r + 1)) <= c + 1) r++;
      cbits = c - ((1 << r) - 1);
    end else begin
      while ((1 << (r + 1)) <= -c) r++;
      cbits = c + (1 << (r + 1)) - 1;
    end
    rfield = dir ? r : 7 - r;
    mlen   = (n > 5) ? n - 5 : 0;
    exact  = word_t'(s);
    exact  = (exact << 1) | word_t'(dir);
    exact  = (exact << 3) | word_t'(rfield);
    exact  = (exact << r) | word_t'(cbits);
    exact  = (exact << mlen) | (m & mask(mlen));
    len    = 5 + r + mlen;
    return exact;
  endfunction

  // Round-down candidate (top n bits of the exact string), first dropped
  // bit rb and OR of the remaining dropped bits.
  function automatic word_t candidate(int n, bit s, int c, word_t m, output bit rb, output bit sticky);
    int    len, drop;
    word_t exact;
    exact  = exact_pattern(n, s, c, m, len);
    drop   = len - n;
    rb     = (drop > 0) ? exact[drop-1] : 1'b0;
    sticky = (drop > 1) ? ((exact & mask(drop - 1)) != 0) : 1'b0;
    return exact >> drop;
  endfunction

  // Encode sign s, characteristic c (-255..254) and the n-5 mantissa bits
  // m into an n-bit takum, rounding to nearest with ties to even and never
  // rounding a non-zero real to 0 or NaR.
  function automatic word_t encode(int n, bit s, int c, word_t m, bit is_zero, bit is_nar);
    word_t down, body;
    bit    rb, sticky, up;
    if (is_nar)  return word_t'(1) << (n - 1);
    if (is_zero) return '0;
    down = candidate(n, s, c, m, rb, sticky);
    up   = rb & (sticky | down[0]);
    body = down & mask(n - 1);
    if (body == 0)                      down = down + 1;
    else if (up && body != mask(n - 1)) down = down + 1;
    return down & mask(n);
  endfunction

endpackage
