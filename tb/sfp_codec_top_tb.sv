// sfp_codec_top_tb: end-to-end test of the codec layer at its default size
// (8 channels x 2 units). Every unit, concurrently, stores tensors through its
// write path into a modelled memory (one queue of compressed rows and one of
// metadata words), ends each with a flush, then reads them back through its
// read path and compares every returned FP32 row with the reference round
// trip. The memory side stalls at random. The compressed rows are also
// checked against the reference packing. The test counts the mechanisms of
// the design and fails if any never occurred: input and output stalls,
// flushes that emit a partial data row and a partial metadata word, full
// metadata words, 0-bit and full 8-bit exponent rows, dropped signs, values
// straddling two 32b words, and clears on the read path.
module sfp_codec_top_tb;
  import sfp_ref_pkg::*;
  localparam int NU = 16, META_W = 256, ENTRIES = 85;

  logic clk = 0, rst_n = 0;
  logic [NU-1:0]                 wr_in_valid, wr_in_ready, wr_sign_en, wr_flush, wr_flush_busy, wr_flush_done;
  logic [NU-1:0][7:0][31:0]      wr_in_data, wr_data, rd_data, rd_out_data;
  logic [NU-1:0][4:0]            wr_man_width, rd_man_width;
  logic [NU-1:0]                 wr_data_valid, wr_data_ready, wr_meta_valid, wr_meta_ready;
  logic [NU-1:0][META_W-1:0]     wr_meta, rd_meta;
  logic [NU-1:0]                 rd_data_valid, rd_data_ready, rd_meta_valid, rd_meta_ready;
  logic [NU-1:0]                 rd_sign_en, rd_clear, rd_out_valid, rd_out_ready;

  sfp_codec_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_wr_stall = 0, n_rd_stall = 0, n_mem_stall = 0, n_part_row = 0, n_part_meta = 0;
  int n_full_meta = 0, n_code0 = 0, n_code7 = 0, n_nosign = 0, n_straddle = 0, n_clear = 0;
  int n_flush_done = 0, rows_total = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic store_tensor(int u, int nrows, int mw, bit sgn, int spread,
                              ref logic [7:0][31:0] orig[$], ref logic [7:0][31:0] mem[$],
                              ref logic [META_W-1:0] meta[$]);
    bit q[8][$];
    logic [7:0][31:0] exp_rows[$];
    int codes[$];
    int sent = 0, cyc = 0, post = 0;
    bit flush_req = 0, done = 0;
    wr_man_width[u] = 5'(mw);
    wr_sign_en[u]   = sgn;
    // the last metadata word leaves one cycle after wr_flush_done
    while (!done || post < 2 || exp_rows.size() > 0 || wr_meta_valid[u] || wr_data_valid[u]) begin
      @(negedge clk);
      cyc++;
      if (done) post++;
      if (cyc > 50000) begin failures++; $display("FAIL unit %0d store hung", u); return; end
      wr_in_valid[u]   = (sent < nrows) && ($urandom_range(4) != 0);
      for (int i = 0; i < 8; i++) wr_in_data[u][i] = ref_rand_fp(spread);
      if (spread == 0 && sent % 2 == 0) wr_in_data[u][3][30:23] = 8'd0; // code 7 rows
      wr_flush[u]      = (sent == nrows) && !flush_req;
      wr_data_ready[u] = ($urandom_range(3) != 0);
      wr_meta_ready[u] = ($urandom_range(3) != 0);
      #4;
      if (wr_in_valid[u] && !wr_in_ready[u]) n_wr_stall++;
      if ((wr_data_valid[u] && !wr_data_ready[u]) || (wr_meta_valid[u] && !wr_meta_ready[u])) n_mem_stall++;
      if (wr_data_valid[u] && wr_data_ready[u]) begin
        checks++;
        if (exp_rows.size() == 0 || wr_data[u] !== exp_rows[0]) begin
          failures++;
          $display("FAIL unit %0d compressed row %h", u, wr_data[u]);
        end
        if (exp_rows.size() > 0) void'(exp_rows.pop_front());
        mem.push_back(wr_data[u]);
      end
      if (wr_meta_valid[u] && wr_meta_ready[u]) meta.push_back(wr_meta[u]);
      if (wr_flush_done[u]) begin done = 1; n_flush_done++; end
      if (wr_flush[u] && !wr_flush_busy[u]) begin
        flush_req = 1;
        if (q[0].size() > 0) begin
          logic [7:0][31:0] r;
          for (int i = 0; i < 8; i++) begin r[i] = ref_pop_word(q[i]); q[i].delete(); end
          exp_rows.push_back(r);
          n_part_row++;
        end
        if (codes.size() % ENTRIES != 0) n_part_meta++;
        n_full_meta += codes.size() / ENTRIES;
      end
      if (wr_in_valid[u] && wr_in_ready[u]) begin
        int code = ref_row_code(wr_in_data[u]);
        int vb = (sgn ? 1 : 0) + ref_exp_bits(code) + ref_man_bits(mw);
        codes.push_back(code);
        if (code == 0) n_code0++;
        if (code == 7) n_code7++;
        if (!sgn) n_nosign++;
        if (vb > 0 && (q[0].size() % 32) + vb > 32) n_straddle++;
        for (int i = 0; i < 8; i++) ref_push_value(q[i], wr_in_data[u][i], code, mw, sgn);
        while (q[0].size() >= 32) begin
          logic [7:0][31:0] r;
          for (int i = 0; i < 8; i++) r[i] = ref_pop_word(q[i]);
          exp_rows.push_back(r);
        end
        orig.push_back(wr_in_data[u]);
        sent++;
      end
    end
    @(negedge clk);
    wr_in_valid[u] = 0; wr_flush[u] = 0;
  endtask

  task automatic load_tensor(int u, int mw, bit sgn, ref logic [7:0][31:0] orig[$],
                             ref logic [7:0][31:0] mem[$], ref logic [META_W-1:0] meta[$]);
    int cyc = 0;
    rd_man_width[u] = 5'(mw);
    rd_sign_en[u]   = sgn;
    while (orig.size() > 0) begin
      @(negedge clk);
      cyc++;
      if (cyc > 50000) begin failures++; $display("FAIL unit %0d load hung", u); return; end
      rd_data_valid[u] = (mem.size() > 0) && ($urandom_range(4) != 0);
      rd_data[u]       = mem.size() > 0 ? mem[0] : '0;
      rd_meta_valid[u] = (meta.size() > 0) && ($urandom_range(4) != 0);
      rd_meta[u]       = meta.size() > 0 ? meta[0] : '0;
      rd_out_ready[u]  = ($urandom_range(3) != 0);
      #4;
      if (rd_out_valid[u] && !rd_out_ready[u]) n_rd_stall++;
      if (rd_data_valid[u] && rd_data_ready[u]) void'(mem.pop_front());
      if (rd_meta_valid[u] && rd_meta_ready[u]) void'(meta.pop_front());
      if (rd_out_valid[u] && rd_out_ready[u]) begin
        logic [7:0][31:0] e;
        for (int i = 0; i < 8; i++) e[i] = ref_roundtrip(orig[0][i], mw, sgn);
        checks++;
        rows_total++;
        if (rd_out_data[u] !== e) begin
          failures++;
          $display("FAIL unit %0d row got %h exp %h", u, rd_out_data[u], e);
        end
        void'(orig.pop_front());
      end
    end
    // the padding left in memory belongs to no row; clear before the next tensor
    @(negedge clk);
    rd_data_valid[u] = 0; rd_meta_valid[u] = 0; rd_clear[u] = 1;
    n_clear++;
    @(negedge clk);
    rd_clear[u] = 0;
  endtask

  task automatic unit_run(int u);
    for (int t = 0; t < 4; t++) begin
      logic [7:0][31:0] orig[$], mem[$];
      logic [META_W-1:0] meta[$];
      int nrows  = (t == 0) ? 100 + $urandom_range(100) : $urandom_range(1, 60);
      int mw     = (t == 1) ? 23 : $urandom_range(0, 8);
      bit sgn    = (t == 1) ? 1'b1 : 1'($urandom);
      int spread = (t == 2) ? 0 : $urandom_range(1, 60);
      store_tensor(u, nrows, mw, sgn, spread, orig, mem, meta);
      load_tensor(u, mw, sgn, orig, mem, meta);
      checks++;
      if (mem.size() > 1 || meta.size() > 0) begin
        failures++;
        $display("FAIL unit %0d left %0d rows %0d meta words", u, mem.size(), meta.size());
      end
    end
  endtask

  initial begin
    wr_in_valid = '0; wr_in_data = '0; wr_man_width = '0; wr_sign_en = '0; wr_flush = '0;
    wr_data_ready = '0; wr_meta_ready = '0;
    rd_data_valid = '0; rd_data = '0; rd_meta_valid = '0; rd_meta = '0;
    rd_man_width = '0; rd_sign_en = '0; rd_clear = '0; rd_out_ready = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < NU; u++) begin
      fork
        automatic int uu = u;
        unit_run(uu);
      join_none
    end
    wait fork;
    $display("sfp_codec_top_tb: %0d rows round-tripped", rows_total);
    $display("  stalls: write-in %0d, memory-side %0d, read-out %0d", n_wr_stall, n_mem_stall, n_rd_stall);
    $display("  flushes done %0d, partial rows %0d, partial meta words %0d, full meta words %0d",
             n_flush_done, n_part_row, n_part_meta, n_full_meta);
    $display("  rows with 0-bit exponents %0d, 8-bit exponents %0d, without sign %0d, straddles %0d, clears %0d",
             n_code0, n_code7, n_nosign, n_straddle, n_clear);
    if (n_wr_stall == 0) begin failures++; $display("FAIL never: write-in stall"); end
    if (n_mem_stall == 0) begin failures++; $display("FAIL never: memory stall"); end
    if (n_rd_stall == 0) begin failures++; $display("FAIL never: read-out stall"); end
    if (n_part_row == 0) begin failures++; $display("FAIL never: partial row flush"); end
    if (n_part_meta == 0) begin failures++; $display("FAIL never: partial meta flush"); end
    if (n_full_meta == 0) begin failures++; $display("FAIL never: full meta word"); end
    if (n_code0 == 0) begin failures++; $display("FAIL never: 0-bit exponent row"); end
    if (n_code7 == 0) begin failures++; $display("FAIL never: 8-bit exponent row"); end
    if (n_nosign == 0) begin failures++; $display("FAIL never: sign dropped"); end
    if (n_straddle == 0) begin failures++; $display("FAIL never: straddling value"); end
    if (n_clear == 0) begin failures++; $display("FAIL never: read clear"); end
    if (n_flush_done != 4 * NU) begin failures++; $display("FAIL flush_done count %0d", n_flush_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
