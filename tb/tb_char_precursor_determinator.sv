// tb_char_precursor_determinator: exhaustive check over every
// characteristic c in -255..254 that the precursor equals c + 1 for c >= 0
// and -c for c < 0 (both equal 2^r + the coded characteristic bits), and
// that its leading one sits at the regime r of the takum definition.
module tb_char_precursor_determinator;
  import takum_ref_pkg::*;

  logic       direction_bit;
  logic [7:0] characteristic, characteristic_precursor;
  int         checks = 0, failures = 0;

  char_precursor_determinator dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expected;
    for (int c = -255; c <= 254; c++) begin
      direction_bit  = (c >= 0);
      characteristic = 8'(c);
      #1;
      expected = (c >= 0) ? c + 1 : -c;
      checks++;
      if (int'(characteristic_precursor) != expected ||
          (int'(characteristic_precursor) >> regime_of(c)) != 1) begin
        failures++;
        $display("FAIL c=%0d: precursor %0d expected %0d", c, characteristic_precursor, expected);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
