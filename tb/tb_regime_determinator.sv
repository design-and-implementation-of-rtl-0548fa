// tb_regime_determinator: exhaustive check of the regime/antiregime stage
// against the takum definition r = D ? uint(R) : uint(~R), antiregime
// 7 - r. All 16 input combinations; each is applied for 1 ns.
module tb_regime_determinator;

  logic       direction_bit;
  logic [2:0] regime_bits, regime, antiregime;
  int         checks = 0, failures = 0;

  regime_determinator dut (.*);

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_r;
    for (int d = 0; d < 2; d++) begin
      for (int r = 0; r < 8; r++) begin
        direction_bit = d[0];
        regime_bits   = r[2:0];
        #1;
        exp_r = d ? r : 7 - r;
        checks++;
        if (int'(regime) != exp_r || int'(antiregime) != 7 - exp_r) begin
          failures++;
          $display("FAIL D=%0d R=%0d: regime %0d antiregime %0d, expected %0d", d, r,
                   regime, antiregime, exp_r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
