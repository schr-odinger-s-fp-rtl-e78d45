// packer_tb: random values with widths that change every cycle, random idle
// cycles and occasional flushes. Each word the packer completes is compared
// with the next 32 bits of a reference bit queue; a flush must return exactly
// the bits still queued, zero padded.
module packer_tb;
  import sfp_ref_pkg::*;
  logic        clk = 0, rst_n = 0;
  logic        valid, flush, sign_en, word_valid;
  logic [31:0] data_in, word;
  logic [2:0]  exp_width;
  logic [4:0]  man_width;
  int checks = 0, failures = 0, words = 0, flushes = 0;
  bit q[$];

  packer dut (.clk, .rst_n, .valid, .flush, .data_in, .exp_width, .man_width,
              .sign_en, .word_valid, .word);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = 0; flush = 0; sign_en = 0; data_in = '0; exp_width = '0; man_width = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      logic [31:0] v;
      @(negedge clk);
      v         = ref_rand_fp(100);
      valid     = ($urandom_range(9) != 0);
      flush     = ($urandom_range(99) == 0);
      exp_width = 3'($urandom);
      man_width = 5'($urandom_range(31));
      sign_en   = 1'($urandom);
      if (c % 500 < 20) begin exp_width = 3'd7; man_width = 5'd23; sign_en = 1; end // full 32b
      if (c % 500 >= 20 && c % 500 < 40) begin exp_width = 0; man_width = 0; sign_en = 0; end // 0b
      data_in   = {v[31], 8'(ref_code_of_exp(int'(v[30:23]))), v[22:0]};
      #1;
      if (flush) begin
        logic [31:0] exp_w;
        automatic bit exp_v = (q.size() > 0);
        exp_w = ref_pop_word(q);
        q.delete();
        flushes++;
        checks++;
        if (word_valid !== exp_v || (exp_v && word !== exp_w)) begin
          failures++;
          $display("FAIL flush c=%0d valid=%0d/%0d word=%h exp=%h", c, word_valid, exp_v, word, exp_w);
        end
      end else begin
        if (valid) ref_push_value(q, v, int'(exp_width), int'(man_width), sign_en);
        checks++;
        if (q.size() >= 32) begin
          automatic logic [31:0] exp_w = ref_pop_word(q);
          words++;
          if (!word_valid || word !== exp_w) begin
            failures++;
            $display("FAIL c=%0d valid=%0d word=%h exp=%h", c, word_valid, word, exp_w);
          end
        end else if (word_valid) begin
          failures++;
          $display("FAIL c=%0d unexpected word %h", c, word);
        end
      end
    end
    $display("packer_tb: %0d words, %0d flushes", words, flushes);
    if (words < 100 || flushes < 5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
