// tb_rounder: checks the rounder at widths 2, 5, 8, 11, 12, 16 and 64. The
// extended takum is the reference model's exact bit string for 4000
// random sign/characteristic/mantissa triples (many of them ties or near
// the ends of the range); the flags are derived from the reference
// round-down candidate. The output must equal the reference encoding.
// Also counts how often each rounding case occurred and fails a width
// where round-up, round-down, a tie, underflow or overflow never did.
module tb_rounder;
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
    logic [W+6:0] extended_takum;
    logic         round_up_overflows, round_down_underflows;
    logic [N-1:0] takum_rounded;

    rounder #(.N(N)) dut (.*);

    initial begin
      bit    s, rb, sticky;
      int    c, len, n_uf, n_of, n_tie, n_up, n_down;
      word_t m, down, body, expected;
      n_uf = 0; n_of = 0; n_tie = 0; n_up = 0; n_down = 0;
      for (int i = 0; i < 4000; i++) begin
        s = 1'($urandom);
        c = random_characteristic();
        m = random_mantissa(ML);
        down = candidate(N, s, c, m, rb, sticky);
        body = down & mask(N - 1);
        round_down_underflows = (body == 0);
        round_up_overflows    = (body == mask(N - 1)) && (N < 12 || rb);
        extended_takum = (W + 7)'(exact_pattern(N, s, c, m, len) << (W + 7 - len));
        #1;
        expected = encode(N, s, c, m, 1'b0, 1'b0);
        if (round_down_underflows) n_uf++;
        if (round_up_overflows && rb) n_of++;
        if (rb && !sticky) n_tie++;
        if (expected != down) n_up++; else n_down++;
        checks++;
        if (word_t'(takum_rounded) != expected) begin
          failures++;
          if (failures < 10)
            $display("FAIL N=%0d c=%0d m=%h: %h expected %h", N, c, m, takum_rounded, expected);
        end
      end
      checks++;
      if (n_uf == 0 || n_of == 0 || n_tie == 0 || n_up == 0 || n_down == 0) begin
        failures++;
        $display("FAIL N=%0d: a rounding case never occurred (uf %0d of %0d tie %0d up %0d down %0d)",
                 N, n_uf, n_of, n_tie, n_up, n_down);
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
