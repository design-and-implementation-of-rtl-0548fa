// tb_predecoder: checks predecoder against the reference decoder in takum_ref_pkg
// (the takum definition evaluated field by field) at the widths
// 2, 5, 8, 11, 12, 16 and 64. Widths up to 16 are checked exhaustively,
// 64 with 30000 random words plus the 0/NaR/extreme words. Each word is
// applied for 1 ns; the per-width checkers run in parallel and the
// result line is printed when all have finished.
module tb_predecoder;
  import takum_ref_pkg::*;
  import takum_pkg::*;

  localparam int NW = 7;
  localparam int WIDTHS [NW] = '{2, 5, 8, 11, 12, 16, 64};

  int checks = 0, failures = 0, finished = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NW; g++) begin : g_width
    localparam int N  = WIDTHS[g];
    localparam int MW = mant_width(N);
    localparam int PW = prec_width(N);
    logic [N-1:0]  takum;
    logic          s0, s1, z0, z1, n0, n1;
    logic [8:0]    c0, e1;
    logic [MW-1:0] m0, m1;
    logic [PW-1:0] p0, p1;

    predecoder #(.N(N), .OUTPUT_EXPONENT(1'b0)) dut_c (
      .takum, .sign_bit(s0), .characteristic_or_exponent(c0), .mantissa_bits(m0),
      .precision(p0), .is_zero(z0), .is_nar(n0));
    predecoder #(.N(N), .OUTPUT_EXPONENT(1'b1)) dut_e (
      .takum, .sign_bit(s1), .characteristic_or_exponent(e1), .mantissa_bits(m1),
      .precision(p1), .is_zero(z1), .is_nar(n1));

    initial begin
      int count;
      word_t t;
      decoded_t d;
      count = (N <= 16) ? (1 << N) : 30000;
      for (int i = 0; i < count; i++) begin
        if (N <= 16)     t = word_t'(i);
        else if (i < 8)  t = word_t'(N'({8{i[7:0]}} << (N - 8)));
        else             t = word_t'({$urandom, $urandom}) & mask(N);
        takum = N'(t);
        #1;
        d = decode(N, t);
        checks++;
        if (s0 != d.sign_bit || z0 != d.is_zero || n0 != d.is_nar ||
            s1 != d.sign_bit || z1 != d.is_zero || n1 != d.is_nar ||
            (!d.is_zero && !d.is_nar &&
             (int'($signed(c0)) != d.characteristic || int'($signed(e1)) != d.exponent ||
              word_t'(m0) != d.mantissa_bits || word_t'(m1) != d.mantissa_bits ||
              int'(p0) != d.precision || int'(p1) != d.precision))) begin
          failures++;
          if (failures < 10)
            $display("FAIL N=%0d takum=%h: c=%0d e=%0d m=%h p=%0d, expected c=%0d e=%0d m=%h p=%0d",
                     N, takum, $signed(c0), $signed(e1), m0, p0, d.characteristic, d.exponent,
                     d.mantissa_bits, d.precision);
        end
      end
      finished++;
    end
  end

  initial begin
    wait (finished == NW);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
