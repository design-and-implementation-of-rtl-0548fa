// tb_char_exp_determinator: exhaustive check of the characteristic /
// exponent determinator, built both without and with OUTPUT_EXPONENT.
// For every direction bit, sign bit, regime r and 7-bit raw field the
// expected characteristic is computed from the takum definition
// (c = 2^r - 1 + C for D = 1, -2^(r+1) + 1 + C for D = 0, C the top r raw
// bits) and the exponent as (-1)^S (c + S).
module tb_char_exp_determinator;

  logic       direction_bit, sign_bit;
  logic [2:0] antiregime;
  logic [6:0] characteristic_raw_bits;
  logic [8:0] characteristic, exponent;
  int         checks = 0, failures = 0;

  char_exp_determinator #(.OUTPUT_EXPONENT(1'b0)) dut_c (
    .direction_bit, .sign_bit, .antiregime, .characteristic_raw_bits,
    .characteristic_or_exponent (characteristic)
  );
  char_exp_determinator #(.OUTPUT_EXPONENT(1'b1)) dut_e (
    .direction_bit, .sign_bit, .antiregime, .characteristic_raw_bits,
    .characteristic_or_exponent (exponent)
  );

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cbits, c, e;
    for (int d = 0; d < 2; d++)
      for (int s = 0; s < 2; s++)
        for (int r = 0; r < 8; r++)
          for (int raw = 0; raw < 128; raw++) begin
            direction_bit           = d[0];
            sign_bit                = s[0];
            antiregime              = 3'(7 - r);
            characteristic_raw_bits = raw[6:0];
            #1;
            cbits = raw >> (7 - r);
            c = d ? (1 << r) - 1 + cbits : -(1 << (r + 1)) + 1 + cbits;
            e = s ? -c - 1 : c;
            checks++;
            if (int'($signed(characteristic)) != c || int'($signed(exponent)) != e) begin
              failures++;
              if (failures < 10)
                $display("FAIL D=%0d S=%0d r=%0d raw=%b: c=%0d e=%0d, expected %0d %0d", d, s, r,
                         raw[6:0], $signed(characteristic), $signed(exponent), c, e);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
