// bias_encoder_tb: drives every exponent value and random rows through the
// bias encoder and compares codes and re-assembled values with the reference.
module bias_encoder_tb;
  import sfp_ref_pkg::*;
  logic [7:0][31:0] row_in, row_out;
  logic [7:0][7:0]  exps;
  int checks = 0, failures = 0;

  bias_encoder dut (.row_in, .row_out, .exps);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_row();
    #1;
    for (int i = 0; i < 8; i++) begin
      int z = ref_code_of_exp(int'(row_in[i][30:23]));
      checks++;
      if (int'(exps[i]) != z || row_out[i] != {row_in[i][31], 8'(z), row_in[i][22:0]}) begin
        failures++;
        $display("FAIL lane %0d in=%h code=%0d exp=%0d out=%h", i, row_in[i], exps[i], z, row_out[i]);
      end
    end
  endtask

  initial begin
    for (int e = 0; e < 256; e += 8) begin
      for (int i = 0; i < 8; i++) row_in[i] = {1'($urandom), 8'(e + i), 23'($urandom)};
      check_row();
    end
    repeat (200) begin
      for (int i = 0; i < 8; i++) row_in[i] = ref_rand_fp(20);
      check_row();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
