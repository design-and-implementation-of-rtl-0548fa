// tb_takum_codec: end-to-end test of the complete codec at its default
// width (N = 64, no parameter overrides).
//
// Phase 1, decode and round trip: 40000 takums (0 and NaR every 250
// words, the extreme words, every regime in both directions, random words) go through both
// decoders; their outputs are compared with the reference model and fed
// straight back into the matching encoder, which must return the original
// word. Phase 2, rounding: 40000 random internal values with 59-bit
// mantissas (most of them needing rounding, many exact ties, many at the
// ends of the characteristic range) go through both encoders and are
// compared with the reference encoder.
// Every mechanism of the codec is counted: 0 and NaR, each regime r in
// both directions, negative words, rounding up, rounding down, ties to
// even in both directions, a rounding carry that changes the regime,
// underflow and overflow saturation, and both formats. A mechanism that
// never occurred counts as a failure. Each vector is applied for 1 ns.
module tb_takum_codec;
  import takum_ref_pkg::*;
  import takum_pkg::*;

  localparam int N  = 64;
  localparam int MW = N - 5;
  localparam int PW = prec_width(N);
  localparam int LW = CHAR_W + MW;

  logic [N-1:0]  log_dec_takum, lin_dec_takum, log_enc_takum, lin_enc_takum;
  logic          log_dec_sign_bit, log_dec_is_zero, log_dec_is_nar;
  logic [LW-1:0] log_dec_barred_logarithmic_value, log_enc_barred_logarithmic_value;
  logic [PW-1:0] log_dec_precision, lin_dec_precision;
  logic          lin_dec_sign_bit, lin_dec_is_zero, lin_dec_is_nar;
  logic [8:0]    lin_dec_exponent, lin_enc_exponent;
  logic [MW-1:0] lin_dec_fraction_bits, lin_enc_fraction_bits;
  logic          log_enc_sign_bit, log_enc_is_zero, log_enc_is_nar;
  logic          lin_enc_sign_bit, lin_enc_is_zero, lin_enc_is_nar;

  takum_codec dut (.*);

  int checks = 0, failures = 0;

  typedef enum int {
    M_ZERO, M_NAR, M_NEGATIVE, M_DIR0, M_DIR1, M_ROUND_UP, M_ROUND_DOWN,
    M_TIE_DOWN, M_TIE_UP, M_CARRY_REGIME, M_UNDERFLOW, M_OVERFLOW,
    M_LOG_FORMAT, M_LIN_FORMAT, M_COUNT
  } mech_t;
  int mech [M_COUNT];
  int regime_seen [2][8];

  task automatic fail(input string msg);
    failures++;
    if (failures < 15) $display("FAIL %s", msg);
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    decoded_t d;
    word_t    t, m, down, exp_t, body;
    bit       s, rb, sticky;
    int       c, r;
    string    names [M_COUNT];
    names = '{"zero", "NaR", "negative", "direction 0", "direction 1", "round up",
              "round down", "tie to even down", "tie to even up", "carry into regime",
              "underflow saturation", "overflow saturation", "logarithmic path",
              "linear path"};
    foreach (mech[i]) mech[i] = 0;
    foreach (regime_seen[i, j]) regime_seen[i][j] = 0;

    // Phase 1: decode, compare, re-encode
    for (int i = 0; i < 40000; i++) begin
      case (i)
        0:       t = '0;
        1:       t = word_t'(1) << (N - 1);
        2:       t = word_t'(1);
        3:       t = mask(N - 1);
        4:       t = mask(N);
        5:       t = (word_t'(1) << (N - 1)) | 1;
        default: begin
          // every 500th word is 0 or NaR; otherwise choose a regime and direction explicitly one time in two
          t = word_t'({$urandom, $urandom});
          if (i % 2 == 0) begin
            t[N-2]     = i[1];
            t[N-3-:3]  = 3'(i >> 2);
          end
          if (i % 500 == 100) t = '0;
          if (i % 500 == 300) t = word_t'(1) << (N - 1);
        end
      endcase
      log_dec_takum = N'(t);
      lin_dec_takum = N'(t);
      #1;
      d = decode(N, t);
      checks++;
      if (log_dec_is_zero != d.is_zero || log_dec_is_nar != d.is_nar ||
          lin_dec_is_zero != d.is_zero || lin_dec_is_nar != d.is_nar ||
          log_dec_sign_bit != d.sign_bit || lin_dec_sign_bit != d.sign_bit)
        fail($sformatf("flags of %h", t));
      if (!d.is_zero && !d.is_nar) begin
        checks++;
        if (word_t'(log_dec_barred_logarithmic_value) !=
              (((word_t'(d.characteristic) & mask(9)) << MW) | d.mantissa_bits) ||
            int'($signed(lin_dec_exponent)) != d.exponent ||
            word_t'(lin_dec_fraction_bits) != d.mantissa_bits ||
            int'(log_dec_precision) != d.precision || int'(lin_dec_precision) != d.precision)
          fail($sformatf("decode of %h", t));
        regime_seen[t[N-2]][d.regime]++;
        if (d.sign_bit) mech[M_NEGATIVE]++;
        if (t[N-2]) mech[M_DIR1]++; else mech[M_DIR0]++;
      end
      if (d.is_zero) mech[M_ZERO]++;
      if (d.is_nar)  mech[M_NAR]++;
      // feed the decoded values back
      log_enc_sign_bit = log_dec_sign_bit;
      log_enc_barred_logarithmic_value = log_dec_barred_logarithmic_value;
      log_enc_is_zero  = log_dec_is_zero;
      log_enc_is_nar   = log_dec_is_nar;
      lin_enc_sign_bit = lin_dec_sign_bit;
      lin_enc_exponent = lin_dec_exponent;
      lin_enc_fraction_bits = lin_dec_fraction_bits;
      lin_enc_is_zero  = lin_dec_is_zero;
      lin_enc_is_nar   = lin_dec_is_nar;
      #1;
      checks++;
      if (word_t'(log_enc_takum) != t) fail($sformatf("log round trip %h -> %h", t, log_enc_takum));
      else mech[M_LOG_FORMAT]++;
      checks++;
      if (word_t'(lin_enc_takum) != t) fail($sformatf("lin round trip %h -> %h", t, lin_enc_takum));
      else mech[M_LIN_FORMAT]++;
    end

    // Phase 2: rounding of values with more precision than the word holds
    for (int i = 0; i < 40000; i++) begin
      s = 1'($urandom);
      c = random_characteristic();
      m = random_mantissa(MW);
      // at r >= 1 the last r mantissa bits are dropped: make some exact ties
      if (i % 5 == 0) begin
        r = regime_of(c);
        if (r > 0) m = (m & ~mask(r)) | (word_t'(1) << (r - 1));
      end
      log_enc_sign_bit = s;
      log_enc_barred_logarithmic_value = {9'(c), MW'(m)};
      log_enc_is_zero = 1'b0;
      log_enc_is_nar  = 1'b0;
      lin_enc_sign_bit = s;
      lin_enc_exponent = 9'(s ? -c - 1 : c);
      lin_enc_fraction_bits = MW'(m);
      lin_enc_is_zero = 1'b0;
      lin_enc_is_nar  = 1'b0;
      #1;
      exp_t = encode(N, s, c, m, 1'b0, 1'b0);
      down  = candidate(N, s, c, m, rb, sticky);
      body  = down & mask(N - 1);
      checks++;
      if (word_t'(log_enc_takum) != exp_t || word_t'(lin_enc_takum) != exp_t)
        fail($sformatf("encode s=%0d c=%0d m=%h: %h %h expected %h", s, c, m, log_enc_takum,
                       lin_enc_takum, exp_t));
      if (body == 0) mech[M_UNDERFLOW]++;
      else if (body == mask(N - 1) && rb) mech[M_OVERFLOW]++;
      else if (rb && !sticky) begin
        if (exp_t == down) mech[M_TIE_DOWN]++; else mech[M_TIE_UP]++;
      end
      if (exp_t != down) begin
        mech[M_ROUND_UP]++;
        if (decode(N, exp_t).regime != regime_of(c)) mech[M_CARRY_REGIME]++;
      end else if (rb || sticky) mech[M_ROUND_DOWN]++;
    end

    for (int i = 0; i < M_COUNT; i++) begin
      $display("mechanism %-22s %0d", names[i], mech[i]);
      checks++;
      if (mech[i] == 0) fail($sformatf("mechanism %s never occurred", names[i]));
    end
    for (int dir = 0; dir < 2; dir++)
      for (int rr = 0; rr < 8; rr++) begin
        checks++;
        if (regime_seen[dir][rr] == 0) fail($sformatf("regime %0d direction %0d never decoded", rr, dir));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
