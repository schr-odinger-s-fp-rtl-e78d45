// compressor_tb: tensors of random rows with different mantissa widths, sign
// settings and exponent spreads, random stalls on both outputs and a flush at
// the end of every tensor. Compressed rows are compared with per-column
// reference bit queues and widths with the reference row code. One phase runs
// with no stalls and checks the rate of one row accepted per cycle.
module compressor_tb;
  import sfp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, sign_en, flush, flush_ack;
  logic out_valid, out_ready, w_valid, w_ready;
  logic [7:0][31:0] data_in, data_out;
  logic [4:0] man_width;
  logic [2:0] w;
  int checks = 0, failures = 0, rows_out = 0, rows_in = 0, stalls = 0;
  bit q[8][$];
  logic [7:0][31:0] exp_rows[$];
  int exp_w[$];

  compressor dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tensor(int nrows, int mw, bit sgn, int spread, bit no_stall);
    int sent = 0, cyc = 0, busy_cycles = 0;
    bit flushed = 0;
    man_width = 5'(mw);
    sign_en   = sgn;
    while (!flushed || exp_rows.size() > 0 || exp_w.size() > 0) begin
      @(negedge clk);
      cyc++;
      if (cyc > 20000) begin failures++; $display("FAIL tensor hung"); return; end
      in_valid  = (sent < nrows) && (no_stall || $urandom_range(3) != 0);
      flush     = (sent == nrows) && !flushed;
      out_ready = no_stall || ($urandom_range(3) != 0);
      w_ready   = no_stall || ($urandom_range(3) != 0);
      for (int i = 0; i < 8; i++) data_in[i] = ref_rand_fp(spread);
      #4;
      if (no_stall && in_valid && !in_ready) busy_cycles++;
      if (in_valid && !in_ready) stalls++;
      // outputs leaving this edge
      if (out_valid && out_ready) begin
        checks++;
        rows_out++;
        if (exp_rows.size() == 0 || data_out !== exp_rows[0]) begin
          failures++;
          $display("FAIL row got %h exp %h", data_out, exp_rows.size() > 0 ? exp_rows[0] : '0);
        end
        if (exp_rows.size() > 0) void'(exp_rows.pop_front());
      end
      if (w_valid && w_ready) begin
        checks++;
        if (exp_w.size() == 0 || int'(w) != exp_w[0]) begin
          failures++;
          $display("FAIL w got %0d exp %0d", w, exp_w.size() > 0 ? exp_w[0] : -1);
        end
        if (exp_w.size() > 0) void'(exp_w.pop_front());
      end
      // inputs taken at this edge
      if (in_valid && in_ready) begin
        int code = ref_row_code(data_in);
        sent++; rows_in++;
        exp_w.push_back(code);
        for (int i = 0; i < 8; i++) ref_push_value(q[i], data_in[i], code, mw, sgn);
        while (q[0].size() >= 32) begin
          logic [7:0][31:0] r;
          for (int i = 0; i < 8; i++) r[i] = ref_pop_word(q[i]);
          exp_rows.push_back(r);
        end
      end
      if (flush && flush_ack) begin
        logic [7:0][31:0] r;
        flushed = 1;
        if (q[0].size() > 0) begin
          for (int i = 0; i < 8; i++) begin r[i] = ref_pop_word(q[i]); q[i].delete(); end
          exp_rows.push_back(r);
        end
      end
    end
    @(negedge clk);
    in_valid = 0; flush = 0;
    if (no_stall) begin
      checks++;
      if (busy_cycles != 0 || cyc > nrows + 4) begin
        failures++;
        $display("FAIL rate: %0d rows took %0d cycles, %0d refused", nrows, cyc, busy_cycles);
      end
    end
  endtask

  initial begin
    in_valid = 0; flush = 0; out_ready = 1; w_ready = 1; data_in = '0;
    man_width = 0; sign_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tensor(50, 2, 0, 3, 1);    // no stalls: rate check
    run_tensor(40, 23, 1, 200, 1); // full-width values, 32b each
    run_tensor(37, 0, 0, 0, 0);    // exponents at the bias, no mantissa: 0-bit values
    for (int t = 0; t < 30; t++)
      run_tensor(1 + $urandom_range(60), $urandom_range(31), 1'($urandom),
                 $urandom_range(130), 0);
    $display("compressor_tb: %0d rows in, %0d rows out, %0d input stalls", rows_in, rows_out, stalls);
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
