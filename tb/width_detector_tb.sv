// width_detector_tb: rows of exponent codes with a chosen largest value; the
// expected width code is the bit count of the largest code (7 and 8 -> 7).
module width_detector_tb;
  import sfp_ref_pkg::*;
  logic [7:0][7:0] exps;
  logic [2:0]      w;
  int checks = 0, failures = 0;

  width_detector dut (.exps, .w);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n <= 8; n++) begin
      repeat (40) begin
        automatic int mx = 0, expw;
        for (int i = 0; i < 8; i++) exps[i] = (n == 0) ? 8'd0 : 8'($urandom_range((1 << n) - 1));
        exps[$urandom_range(7)] = (n == 0) ? 8'd0 : 8'(1 << (n - 1)) | 8'($urandom_range((1 << (n - 1)) - 1));
        for (int i = 0; i < 8; i++) if (int'(exps[i]) > mx) mx = int'(exps[i]);
        expw = ref_bits_needed(mx);
        if (expw >= 7) expw = 7;
        #1;
        checks++;
        if (int'(w) != expw) begin
          failures++;
          $display("FAIL n=%0d exps=%h w=%0d exp=%0d", n, exps, w, expw);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
