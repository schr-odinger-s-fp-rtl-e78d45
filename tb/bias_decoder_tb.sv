// bias_decoder_tb: checks that every exponent code decodes to the exponent the
// reference assigns it, with sign and mantissa unchanged.
module bias_decoder_tb;
  import sfp_ref_pkg::*;
  logic [7:0][31:0] row_in, row_out;
  int checks = 0, failures = 0;

  bias_decoder dut (.row_in, .row_out);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 64; r++) begin
      for (int i = 0; i < 8; i++) row_in[i] = {1'($urandom), 8'(r * 4 + (i % 4)), 23'($urandom)};
      if (r >= 32) for (int i = 0; i < 8; i++) row_in[i][30:23] = 8'($urandom);
      #1;
      for (int i = 0; i < 8; i++) begin
        automatic int e = ref_exp_of_code(int'(row_in[i][30:23]));
        checks++;
        if (row_out[i] != {row_in[i][31], 8'(e), row_in[i][22:0]}) begin
          failures++;
          $display("FAIL code=%0d got=%h exp_e=%0d", row_in[i][30:23], row_out[i], e);
        end
      end
    end
    // the reference inverse really inverts the reference code
    for (int e = 0; e < 256; e++) begin
      checks++;
      if (ref_exp_of_code(ref_code_of_exp(e)) != e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
