// unpacker_tb: a reference packs random values (widths changing per value)
// into a 32b word stream; the unpacker is driven like the decompressor drives
// it (load a word in the cycle it reports need_word) and every value it
// returns must equal the reference round trip of the original, with the
// exponent still in code form. A clear in the middle starts a new stream.
module unpacker_tb;
  import sfp_ref_pkg::*;
  logic        clk = 0, rst_n = 0;
  logic        clear, load, take, sign_en, need_word;
  logic [31:0] word_in, data_out;
  logic [2:0]  exp_width;
  logic [4:0]  man_width;
  int checks = 0, failures = 0, loads = 0;

  unpacker dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_stream(int n);
    bit q[$];
    logic [31:0] words[$];
    logic [31:0] vals[$];
    int codes[$], mws[$];
    bit sgns[$];
    for (int k = 0; k < n; k++) begin
      logic [31:0] v = ref_rand_fp(100);
      int code = $urandom_range(7), mw = $urandom_range(31);
      bit s = 1'($urandom);
      if (ref_bits_needed(ref_code_of_exp(int'(v[30:23]))) > ref_exp_bits(code)) code = 7;
      ref_push_value(q, v, code, mw, s);
      vals.push_back(v); codes.push_back(code); mws.push_back(mw); sgns.push_back(s);
    end
    while (q.size() > 0) words.push_back(ref_pop_word(q));
    for (int k = 0; k < n; k++) begin
      logic [31:0] expv;
      @(negedge clk);
      exp_width = 3'(codes[k]); man_width = 5'(mws[k]); sign_en = sgns[k];
      take = 1; clear = 0;
      #1;
      load = need_word;
      if (load) begin word_in = words.pop_front(); loads++; end
      #1;
      expv = ref_roundtrip(vals[k], mws[k], sgns[k]);
      expv[30:23] = 8'(ref_code_of_exp(int'(vals[k][30:23])));
      checks++;
      if (data_out !== expv) begin
        failures++;
        $display("FAIL k=%0d got %h exp %h (code %0d mw %0d s %0d)", k, data_out, expv, codes[k], mws[k], sgns[k]);
      end
    end
    @(negedge clk);
    take = 0; load = 0; clear = 1;
    @(negedge clk);
    clear = 0;
  endtask

  initial begin
    clear = 0; load = 0; take = 0; sign_en = 0; word_in = '0; exp_width = 0; man_width = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) run_stream(300);
    $display("unpacker_tb: %0d words loaded", loads);
    if (loads < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
