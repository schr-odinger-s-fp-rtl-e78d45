// meta_unpacker_tb: metadata words of random widths are fed with random gaps
// and the widths are taken with random stalls; they must come out in order.
// A clear after a random number of widths drops the rest of the word. One
// phase without stalls checks that a width is delivered every cycle, also
// across word boundaries.
module meta_unpacker_tb;
  localparam int WORD_W = 256, ENTRIES = 85;
  logic clk = 0, rst_n = 0;
  logic clear, in_valid, in_ready, w_valid, w_ready;
  logic [WORD_W-1:0] in_data;
  logic [2:0] w;
  int checks = 0, failures = 0;

  meta_unpacker dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int nwords, int ntake, bit no_stall);
    logic [WORD_W-1:0] words[$];
    int exp[$];
    int got = 0, cyc = 0;
    for (int i = 0; i < nwords; i++) begin
      logic [WORD_W-1:0] d;
      for (int k = 0; k < WORD_W / 32; k++) d[32*k +: 32] = $urandom;
      words.push_back(d);
      for (int k = 0; k < ENTRIES; k++) exp.push_back(int'(d[3*k +: 3]));
    end
    while (got < ntake) begin
      @(negedge clk);
      cyc++;
      in_valid = (words.size() > 0) && (no_stall || $urandom_range(2) != 0);
      in_data  = words.size() > 0 ? words[0] : '0;
      w_ready  = no_stall || ($urandom_range(2) != 0);
      #4;
      if (in_valid && in_ready) void'(words.pop_front());
      if (w_valid && w_ready) begin
        checks++;
        if (int'(w) != exp[got]) begin
          failures++;
          $display("FAIL entry %0d got %0d exp %0d", got, w, exp[got]);
        end
        got++;
      end
    end
    @(negedge clk); in_valid = 0; w_ready = 0; clear = 1;
    @(negedge clk); clear = 0;
    if (no_stall) begin
      checks++;
      if (cyc > ntake + 1) begin failures++; $display("FAIL rate %0d in %0d cycles", ntake, cyc); end
    end
  endtask

  initial begin
    clear = 0; in_valid = 0; w_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(3, 3 * ENTRIES, 1);
    for (int t = 0; t < 10; t++) begin
      automatic int n = $urandom_range(1, 4);
      run(n, $urandom_range(1, n * ENTRIES), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
