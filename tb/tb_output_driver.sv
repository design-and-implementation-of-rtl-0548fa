// tb_output_driver: checks the 0/NaR override at N = 8 exhaustively and
// at N = 64 with random words: the rounded takum passes unless a flag is
// set, zero gives all zero bits and NaR gives 1 followed by zeros.
module tb_output_driver;

  logic [7:0]  r8, t8;
  logic [63:0] r64, t64;
  logic        is_zero, is_nar;
  int          checks = 0, failures = 0;

  output_driver #(.N(8))  dut8  (.takum_rounded(r8),  .is_zero, .is_nar, .takum(t8));
  output_driver #(.N(64)) dut64 (.takum_rounded(r64), .is_zero, .is_nar, .takum(t64));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0]  e8;
    logic [63:0] e64;
    for (int i = 0; i < 1024; i++) begin
      r8      = i[7:0];
      r64     = {$urandom, $urandom};
      is_zero = i[8];
      is_nar  = i[9];
      #1;
      e8  = is_nar ? 8'h80 : (is_zero ? 8'h00 : r8);
      e64 = is_nar ? 64'h8000_0000_0000_0000 : (is_zero ? 64'h0 : r64);
      checks++;
      if (t8 != e8 || t64 != e64) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d: %h %h expected %h %h", i, t8, t64, e8, e64);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
