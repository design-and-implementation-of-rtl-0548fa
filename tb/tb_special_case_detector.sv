// tb_special_case_detector: checks the 0/NaR flags exhaustively at N = 8
// and with edge and random words at N = 64. Expected: is_zero exactly for
// the all-zero word, is_nar exactly for a one followed by zeros.
module tb_special_case_detector;

  logic [7:0]  t8;
  logic [63:0] t64;
  logic        z8, n8, z64, n64;
  int          checks = 0, failures = 0;

  special_case_detector #(.N(8))  dut8  (.takum(t8),  .is_zero(z8),  .is_nar(n8));
  special_case_detector #(.N(64)) dut64 (.takum(t64), .is_zero(z64), .is_nar(n64));

  task automatic check(input bit got_z, got_n, exp_z, exp_n, input logic [63:0] word);
    checks++;
    if (got_z != exp_z || got_n != exp_n) begin
      failures++;
      $display("FAIL word %h: zero %b nar %b", word, got_z, got_n);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      t8 = i[7:0];
      #1;
      check(z8, n8, i == 0, i == 128, 64'(i));
    end
    for (int i = 0; i < 2000; i++) begin
      case (i)
        0:       t64 = '0;
        1:       t64 = 64'h8000_0000_0000_0000;
        2:       t64 = 64'h1;
        3:       t64 = 64'h8000_0000_0000_0001;
        4:       t64 = 64'h4000_0000_0000_0000;
        5:       t64 = 64'hC000_0000_0000_0000;
        default: t64 = {$urandom, $urandom} >> (i % 64);
      endcase
      #1;
      check(z64, n64, t64 == 0, t64 == 64'h8000_0000_0000_0000, t64);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
