// tb_extended_takum_generator: checks the extended takum generator at widths 2, 5, 8, 11, 12,
// 16 and 64 with 4000 random inputs each. The regime and precursor it is
// fed are computed by the testbench from the takum definition; the
// expected output is the reference model's exact bit string S D R C M,
// left-aligned in W + 7 bits.
module tb_extended_takum_generator;
  import takum_ref_pkg::*;
  import takum_pkg::*;

  localparam int NW = 7;
  localparam int WIDTHS [NW] = '{2, 5, 8, 11, 12, 16, 64};

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
    logic          sign_bit, direction_bit;
    logic [2:0]    regime;
    logic [7:0]    characteristic_precursor;
    logic [MW-1:0] mantissa_bits;
    logic [W+6:0]  extended_takum;

    extended_takum_generator #(.N(N)) dut (.*);

    initial begin
      bit    s;
      int    c, r, cb, len;
      word_t m, expected;
      for (int i = 0; i < 4000; i++) begin
        s = 1'($urandom);
        c = random_characteristic();
        m = random_mantissa(ML);
        r  = regime_of(c);
        cb = cbits_of(c);
        sign_bit                 = s;
        direction_bit            = (c >= 0);
        regime                   = 3'(r);
        characteristic_precursor = 8'((1 << r) + ((c >= 0) ? cb : ((1 << r) - 1 - cb)));
        mantissa_bits            = MW'(m);
        #1;
        expected = exact_pattern(N, s, c, m, len);
        expected = (expected << (W + 7 - len)) & mask(W + 7);
        checks++;
        if (word_t'(extended_takum) != expected) begin
          failures++;
          if (failures < 10)
            $display("FAIL N=%0d c=%0d m=%h: %h expected %h", N, c, m, extended_takum, expected);
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
