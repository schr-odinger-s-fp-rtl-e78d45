// decompressor_tb: tensors are compressed by the reference (per-column bit
// queues, zero-padded last row) and streamed into the decompressor with
// random gaps on the data, metadata and output sides. Every output row must
// equal the reference round trip of the original row (mantissa truncated to
// man_width, sign dropped when sign_en is low, exponent exact). Between
// tensors clear drops the padding. One phase without stalls checks the rate
// of one row per cycle.
module decompressor_tb;
  import sfp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear, in_valid, in_ready, w_valid, w_ready, sign_en, out_valid, out_ready;
  logic [7:0][31:0] data_in, data_out;
  logic [2:0] exp_width;
  logic [4:0] man_width;
  int checks = 0, failures = 0, stalls = 0, rows = 0;

  decompressor dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tensor(int nrows, int mw, bit sgn, int spread, bit no_stall);
    bit q[8][$];
    logic [7:0][31:0] orig[$], comp[$];
    int codes[$];
    int got = 0, cyc = 0;
    for (int r = 0; r < nrows; r++) begin
      logic [7:0][31:0] row;
      int code;
      for (int i = 0; i < 8; i++) row[i] = ref_rand_fp(spread);
      code = ref_row_code(row);
      for (int i = 0; i < 8; i++) ref_push_value(q[i], row[i], code, mw, sgn);
      orig.push_back(row); codes.push_back(code);
    end
    while (q[0].size() > 0) begin
      logic [7:0][31:0] cr;
      for (int i = 0; i < 8; i++) cr[i] = ref_pop_word(q[i]);
      comp.push_back(cr);
    end
    man_width = 5'(mw); sign_en = sgn;
    while (got < nrows) begin
      @(negedge clk);
      cyc++;
      if (cyc > 20000) begin failures++; $display("FAIL hung"); return; end
      in_valid  = (comp.size() > 0) && (no_stall || $urandom_range(3) != 0);
      data_in   = comp.size() > 0 ? comp[0] : '0;
      w_valid   = (codes.size() > 0) && (no_stall || $urandom_range(3) != 0);
      exp_width = codes.size() > 0 ? 3'(codes[0]) : 3'd0;
      out_ready = no_stall || ($urandom_range(3) != 0);
      #4;
      if (w_valid && !w_ready) stalls++;
      if (out_valid && out_ready) begin
        logic [7:0][31:0] e;
        for (int i = 0; i < 8; i++) e[i] = ref_roundtrip(orig[0][i], mw, sgn);
        checks++;
        if (data_out !== e) begin
          failures++;
          $display("FAIL row %0d got %h exp %h", got, data_out, e);
        end
        void'(orig.pop_front());
        got++; rows++;
      end
      if (in_valid && in_ready) void'(comp.pop_front());
      if (w_valid && w_ready) void'(codes.pop_front());
    end
    @(negedge clk);
    in_valid = 0; w_valid = 0; clear = 1;
    @(negedge clk);
    clear = 0;
    if (no_stall) begin
      checks++;
      if (cyc > nrows + 1) begin
        failures++;
        $display("FAIL rate: %0d rows in %0d cycles", nrows, cyc);
      end
    end
  endtask

  initial begin
    clear = 0; in_valid = 0; w_valid = 0; out_ready = 1; data_in = '0;
    exp_width = 0; man_width = 0; sign_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tensor(64, 3, 0, 4, 1);
    run_tensor(30, 23, 1, 200, 1);
    run_tensor(20, 0, 0, 0, 0);
    for (int t = 0; t < 30; t++)
      run_tensor(1 + $urandom_range(60), $urandom_range(31), 1'($urandom), $urandom_range(130), 0);
    $display("decompressor_tb: %0d rows, %0d metadata stalls", rows, stalls);
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
