// tb_decoder_logarithmic: checks decoder_logarithmic against the reference decoder in takum_ref_pkg
// (the takum definition evaluated field by field) at the widths
// 2, 5, 8, 11, 12, 16 and 64. Widths up to 16 are checked exhaustively,
// 64 with 30000 random words plus the 0/NaR/extreme words. Each word is
// applied for 1 ns; the per-width checkers run in parallel and the
// result line is printed when all have finished.
module tb_decoder_logarithmic;
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
    localparam int LW = CHAR_W + MW;
    logic [N-1:0]  takum;
    logic          sign_bit, is_zero, is_nar;
    logic [LW-1:0] barred_logarithmic_value;
    logic [PW-1:0] precision;

    decoder_logarithmic #(.N(N)) dut (.*);

    initial begin
      word_t expected;
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
        expected = ((word_t'(d.characteristic) & mask(9)) << MW) | d.mantissa_bits;
        checks++;
        if (sign_bit != d.sign_bit || is_zero != d.is_zero || is_nar != d.is_nar ||
            (!d.is_zero && !d.is_nar &&
             (word_t'(barred_logarithmic_value) != expected || int'(precision) != d.precision))) begin
          failures++;
          if (failures < 10)
            $display("FAIL N=%0d takum=%h: lbar=%h p=%0d, expected %h %0d", N, takum,
                     barred_logarithmic_value, precision, expected, d.precision);
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
