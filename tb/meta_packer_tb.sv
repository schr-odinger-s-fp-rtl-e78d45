// meta_packer_tb: random 3b widths with random gaps and output stalls, and
// flushes after random counts. Each metadata word must hold the widths in
// order, entry k in bits [3k+2:3k], with unused entries of a flushed word zero.
module meta_packer_tb;
  localparam int WORD_W = 256, ENTRIES = 85;
  logic clk = 0, rst_n = 0;
  logic w_valid, w_ready, flush, flush_ack, out_valid, out_ready;
  logic [2:0] w;
  logic [WORD_W-1:0] out_data;
  int checks = 0, failures = 0, full_words = 0, part_words = 0;
  int pend[$];
  logic [WORD_W-1:0] exp_words[$];

  meta_packer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WORD_W-1:0] build(int n);
    logic [WORD_W-1:0] r = '0;
    for (int k = 0; k < n; k++) r[3*k +: 3] = 3'(pend[k]);
    return r;
  endfunction

  initial begin
    w_valid = 0; flush = 0; out_ready = 1; w = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      automatic int n = $urandom_range(1, 300), sent = 0;
      automatic bit done = 0;
      while (!done || exp_words.size() > 0) begin
        @(negedge clk);
        w_valid   = (sent < n) && ($urandom_range(3) != 0);
        w         = 3'($urandom);
        flush     = (sent == n) && !done;
        out_ready = ($urandom_range(2) != 0);
        #4;
        if (out_valid && out_ready) begin
          checks++;
          if (exp_words.size() == 0 || out_data !== exp_words[0]) begin
            failures++;
            $display("FAIL word %h exp %h", out_data, exp_words.size() > 0 ? exp_words[0] : '0);
          end
          if (exp_words.size() > 0) void'(exp_words.pop_front());
        end
        if (w_valid && w_ready) begin
          sent++;
          pend.push_back(int'(w));
          if (pend.size() == ENTRIES) begin
            exp_words.push_back(build(ENTRIES)); pend.delete(); full_words++;
          end
        end
        if (flush && flush_ack) begin
          done = 1;
          if (pend.size() > 0) begin
            exp_words.push_back(build(pend.size())); pend.delete(); part_words++;
          end
        end
      end
    end
    @(negedge clk); w_valid = 0; flush = 0;
    $display("meta_packer_tb: %0d full words, %0d flushed words", full_words, part_words);
    if (full_words == 0 || part_words == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
