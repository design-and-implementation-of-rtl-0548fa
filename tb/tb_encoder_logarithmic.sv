// tb_encoder_logarithmic: checks the logarithmic encoder at widths 2, 3, 4, 5, 6, 8, 11, 12, 13,
// 16, 32 and 64: every input combination for N <= 12, then 4000 random
// inputs per width (many near the ends of the
// characteristic range, many rounding ties, some 0/NaR flags) against the
// reference encoder (exact bit string, ties to even, saturation), then a
// round trip in which every word (N <= 16) or 20000 random words are
// decoded by the reference model and must encode back to themselves.
module tb_encoder_logarithmic;
  import takum_ref_pkg::*;
  import takum_pkg::*;

  localparam int NW = 12;
  localparam int WIDTHS [NW] = '{2, 3, 4, 5, 6, 8, 11, 12, 13, 16, 32, 64};

  int checks = 0, failures = 0, finished = 0;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NW; g++) begin : g_width
    localparam int N  = WIDTHS[g];
    localparam int W  = work_width(N);
    localparam int MW = mant_width(N);
    localparam int ML = (N > 5) ? N - 5 : 0;
    localparam int LW = CHAR_W + MW;
    logic          sign_bit, is_zero, is_nar;
    logic [LW-1:0] barred_logarithmic_value;
    logic [N-1:0]  takum;

    encoder_logarithmic #(.N(N)) dut (.*);

    initial begin
      bit    s, z, n;
      int    c;
      word_t m, expected;
      // every sign, characteristic and mantissa (N <= 12), then random
      for (int i = 0; i < ((N <= 12) ? 2 * 510 * (1 << ML) : 0); i++) begin
        s = 1'(i / (510 * (1 << ML)));
        c = (i / (1 << ML)) % 510 - 255;
        m = word_t'(i % (1 << ML));
        z = 1'b0;
        n = 1'b0;
        sign_bit = s; is_zero = z; is_nar = n;
        barred_logarithmic_value = {9'(c), MW'(m)};
        #1;
        expected = encode(N, s, c, m, z, n);
        checks++;
        if (word_t'(takum) != expected) begin
          failures++;
          if (failures < 10)
            $display("FAIL N=%0d s=%0d c=%0d m=%h: %h expected %h", N, s, c, m, takum, expected);
        end
      end
      for (int i = 0; i < 4000; i++) begin
        s = 1'($urandom);
        c = random_characteristic();
        m = random_mantissa(ML);
        z = (i % 97 == 5);
        n = (i % 89 == 7);
        sign_bit = s; is_zero = z; is_nar = n;
        barred_logarithmic_value = {9'(c), MW'(m)};
        #1;
        expected = encode(N, s, c, m, z, n);
        checks++;
        if (word_t'(takum) != expected) begin
          failures++;
          if (failures < 10)
            $display("FAIL N=%0d s=%0d c=%0d m=%h z=%0d n=%0d: %h expected %h", N, s, c, m, z, n,
                     takum, expected);
        end
      end
      // round trip: every word (N <= 16) or random words decode and
      // re-encode to themselves
      for (int i = 0; i < ((N <= 16) ? (1 << N) : 20000); i++) begin
        decoded_t d;
        word_t    t = (N <= 16) ? word_t'(i) : (word_t'({$urandom, $urandom}) & mask(N));
        d = decode(N, t);
        sign_bit = d.sign_bit; is_zero = d.is_zero; is_nar = d.is_nar;
        barred_logarithmic_value = {9'(d.characteristic), MW'(d.mantissa_bits)};
        #1;
        checks++;
        if (word_t'(takum) != t) begin
          failures++;
          if (failures < 10) $display("FAIL N=%0d round trip %h -> %h", N, t, takum);
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
