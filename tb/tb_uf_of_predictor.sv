// tb_uf_of_predictor: checks the underflow/overflow predictor at every width from 2 to 13
// and at 16 and 64 with 4000 random characteristics (half of them near
// -255 or 254) and mantissas (random, all zero, all one, tie patterns).
// Expected flags come from the reference model's exact bit string:
// underflow when the round-down candidate is zero below the sign bit,
// overflow when it is all ones (for N >= 12 only when the first dropped
// bit is also set).
module tb_uf_of_predictor;
  import takum_ref_pkg::*;
  import takum_pkg::*;

  localparam int NW = 14;
  localparam int WIDTHS [NW] = '{2, 3, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 16, 64};

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
    logic [8:0]    characteristic;
    logic [MW-1:0] mantissa_bits;
    logic          round_up_overflows, round_down_underflows;

    uf_of_predictor #(.N(N)) dut (.*);

    initial begin
      bit    s, rb, sticky, exp_uf, exp_of;
      int    c;
      word_t m, down, body;
      for (int i = 0; i < 4000; i++) begin
        s = 1'($urandom);
        c = random_characteristic();
        m = random_mantissa(ML);
        characteristic = 9'(c);
        mantissa_bits  = MW'(m);
        #1;
        down   = candidate(N, s, c, m, rb, sticky);
        body   = down & mask(N - 1);
        exp_uf = (body == 0);
        exp_of = (body == mask(N - 1)) && (N < 12 || rb);
        checks++;
        if (round_down_underflows != exp_uf || round_up_overflows != exp_of) begin
          failures++;
          if (failures < 10)
            $display("FAIL N=%0d c=%0d m=%h: uf %b of %b, expected %b %b", N, c, m,
                     round_down_underflows, round_up_overflows, exp_uf, exp_of);
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
