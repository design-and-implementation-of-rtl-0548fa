// tb_takum_codec_widths: runs the complete codec at the other evaluated
// widths, N = 8, 16 and 32 (the default-width run is tb_takum_codec).
//
// For each width it repeats the two validation procedures of the codec:
// both decoders are compared with the reference decoder, and both
// encoders are checked by a round trip with the codec's own decoder as the
// first stage (decoder outputs wired back to encoder inputs) that must
// return the original word. N = 8 and 16 are exhaustive (every word), 32
// uses 60000 random words. Each word takes 2 ns: 1 ns to decode, 1 ns to
// re-encode.
module tb_takum_codec_widths;
  import takum_ref_pkg::*;
  import takum_pkg::*;

  localparam int NW = 3;
  localparam int WIDTHS [NW] = '{8, 16, 32};

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
    localparam int MW = mant_width(N);
    localparam int PW = prec_width(N);
    localparam int LW = CHAR_W + MW;

    logic [N-1:0]  log_dec_takum, lin_dec_takum, log_enc_takum, lin_enc_takum;
    logic          log_dec_sign_bit, log_dec_is_zero, log_dec_is_nar;
    logic [LW-1:0] log_dec_barred_logarithmic_value, log_enc_barred_logarithmic_value;
    logic [PW-1:0] log_dec_precision, lin_dec_precision;
    logic          lin_dec_sign_bit, lin_dec_is_zero, lin_dec_is_nar;
    logic [8:0]    lin_dec_exponent, lin_enc_exponent;
    logic [MW-1:0] lin_dec_fraction_bits, lin_enc_fraction_bits;
    logic          log_enc_sign_bit, log_enc_is_zero, log_enc_is_nar;
    logic          lin_enc_sign_bit, lin_enc_is_zero, lin_enc_is_nar;

    takum_codec #(.N(N)) dut (.*);

    initial begin
      decoded_t d;
      word_t    t;
      int       count;
      count = (N <= 16) ? (1 << N) : 60000;
      for (int i = 0; i < count; i++) begin
        t = (N <= 16) ? word_t'(i) : (word_t'({$urandom, $urandom}) & mask(N));
        log_dec_takum = N'(t);
        lin_dec_takum = N'(t);
        #1;
        d = decode(N, t);
        checks++;
        if (log_dec_is_zero != d.is_zero || log_dec_is_nar != d.is_nar ||
            lin_dec_is_zero != d.is_zero || lin_dec_is_nar != d.is_nar ||
            log_dec_sign_bit != d.sign_bit || lin_dec_sign_bit != d.sign_bit ||
            (!d.is_zero && !d.is_nar &&
             (word_t'(log_dec_barred_logarithmic_value) !=
                (((word_t'(d.characteristic) & mask(9)) << MW) | d.mantissa_bits) ||
              int'($signed(lin_dec_exponent)) != d.exponent ||
              word_t'(lin_dec_fraction_bits) != d.mantissa_bits ||
              int'(log_dec_precision) != d.precision ||
              int'(lin_dec_precision) != d.precision))) begin
          failures++;
          if (failures < 10) $display("FAIL N=%0d decode of %h", N, t);
        end
        log_enc_sign_bit                 = log_dec_sign_bit;
        log_enc_barred_logarithmic_value = log_dec_barred_logarithmic_value;
        log_enc_is_zero                  = log_dec_is_zero;
        log_enc_is_nar                   = log_dec_is_nar;
        lin_enc_sign_bit                 = lin_dec_sign_bit;
        lin_enc_exponent                 = lin_dec_exponent;
        lin_enc_fraction_bits            = lin_dec_fraction_bits;
        lin_enc_is_zero                  = lin_dec_is_zero;
        lin_enc_is_nar                   = lin_dec_is_nar;
        #1;
        checks++;
        if (word_t'(log_enc_takum) != t || word_t'(lin_enc_takum) != t) begin
          failures++;
          if (failures < 10)
            $display("FAIL N=%0d round trip %h -> %h / %h", N, t, log_enc_takum, lin_enc_takum);
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
