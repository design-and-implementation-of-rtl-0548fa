// tb_lod8: exhaustive check of the 8-bit leading one detector against a
// bit-by-bit scan from the most significant bit (0 for an all-zero input).
module tb_lod8;

  logic [7:0] value;
  logic [2:0] position;
  int         checks = 0, failures = 0;

  lod8 dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expected;
    for (int v = 0; v < 256; v++) begin
      value = v[7:0];
      #1;
      expected = 0;
      for (int b = 7; b >= 0; b--) if (v[b] && expected == 0 && (v >> (b + 1)) == 0) expected = b;
      checks++;
      if (int'(position) != expected) begin
        failures++;
        $display("FAIL value=%b: position %0d expected %0d", value, position, expected);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
