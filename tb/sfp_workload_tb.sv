// sfp_workload_tb: streams tensors shaped like the ones the codec is meant for
// through unit 0 of the default top and measures the DRAM traffic. Each case
// fixes a mantissa width and sign setting at an operating point reported for
// ResNet18 training (learned mantissas of about 2 bits for activations, a
// network-wide 3-bit mantissa for weights) plus an uncompressible FP32 case.
// Exponents are drawn around a centre with a small spread; these value
// distributions are synthetic, so the ratios printed here illustrate the
// mechanism and are not the source's measured results.
//
// Checked per case: every row comes back equal to the reference round trip;
// the number of compressed rows and metadata words written equals the count
// the reference packing predicts; every width code in the metadata words
// equals the reference code of its row; with the memory always ready the
// write path takes one row per cycle. Printed per case: the footprint
// reduction of the whole tensor and the exponent compression ratio (stored
// exponent bits over 8), the measure used for the exponent encoding alone.
module sfp_workload_tb;
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

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] sample(int centre, int spread, bit signed_vals);
    // sum of two uniforms: values concentrated at the centre exponent
    int e = centre + int'($urandom_range(spread)) - int'($urandom_range(spread));
    return {signed_vals ? 1'($urandom) : 1'b0, 8'(e), 23'($urandom)};
  endfunction

  task automatic run_case(string name, int nrows, int mw, bit sgn, int centre, int spread);
    logic [7:0][31:0] orig[$], mem[$], back[$];
    logic [META_W-1:0] meta[$];
    bit q[8][$];
    int codes[$];
    int exp_data = 0, exp_meta, cyc_in = 0, sent = 0, got = 0, ebits = 0;
    real ratio;
    for (int r = 0; r < nrows; r++) begin
      logic [7:0][31:0] row;
      int code;
      for (int i = 0; i < 8; i++) row[i] = sample(centre, spread, sgn);
      code = ref_row_code(row);
      codes.push_back(code);
      for (int i = 0; i < 8; i++) ref_push_value(q[i], row[i], code, mw, sgn);
      orig.push_back(row);
    end
    exp_data = (q[0].size() + 31) / 32;
    exp_meta = (nrows + ENTRIES - 1) / ENTRIES;
    // store
    wr_man_width[0] = 5'(mw); wr_sign_en[0] = sgn;
    wr_data_ready[0] = 1; wr_meta_ready[0] = 1;
    while (sent < nrows) begin
      @(negedge clk);
      wr_in_valid[0] = 1;
      wr_in_data[0]  = orig[sent];
      cyc_in++;
      #4;
      if (wr_data_valid[0]) mem.push_back(wr_data[0]);
      if (wr_meta_valid[0]) meta.push_back(wr_meta[0]);
      if (wr_in_ready[0]) sent++;
    end
    @(negedge clk);
    wr_in_valid[0] = 0; wr_flush[0] = 1;
    #4;
    if (wr_data_valid[0]) mem.push_back(wr_data[0]);
    if (wr_meta_valid[0]) meta.push_back(wr_meta[0]);
    @(negedge clk);
    wr_flush[0] = 0;
    repeat (6) begin
      #4;
      if (wr_data_valid[0]) mem.push_back(wr_data[0]);
      if (wr_meta_valid[0]) meta.push_back(wr_meta[0]);
      @(negedge clk);
    end
    checks++;
    if (mem.size() != exp_data || meta.size() != exp_meta || cyc_in != nrows) begin
      failures++;
      $display("FAIL %s: %0d data rows (exp %0d), %0d meta words (exp %0d), %0d cycles for %0d rows",
               name, mem.size(), exp_data, meta.size(), exp_meta, cyc_in, nrows);
    end
    for (int r = 0; r < nrows && r / ENTRIES < meta.size(); r++) begin
      int got_code = int'(meta[r / ENTRIES][3 * (r % ENTRIES) +: 3]);
      checks++;
      if (got_code != codes[r]) begin
        failures++;
        if (failures < 5) $display("FAIL %s row %0d width code %0d exp %0d", name, r, got_code, codes[r]);
      end
      ebits += ref_exp_bits(got_code);
    end
    ratio = real'(nrows) / real'(mem.size() + meta.size());
    $display("%-28s man=%0d sign=%0d: %0d rows -> %0d data + %0d metadata rows, footprint reduction %.2fx, exponent ratio %.2f",
             name, mw, sgn, nrows, mem.size(), meta.size(), ratio, real'(ebits) / real'(8 * nrows));
    // load
    rd_man_width[0] = 5'(mw); rd_sign_en[0] = sgn; rd_out_ready[0] = 1;
    while (got < nrows) begin
      @(negedge clk);
      rd_data_valid[0] = (mem.size() > 0);
      rd_data[0]       = (mem.size() > 0) ? mem[0] : '0;
      rd_meta_valid[0] = (meta.size() > 0);
      rd_meta[0]       = (meta.size() > 0) ? meta[0] : '0;
      #4;
      if (rd_data_valid[0] && rd_data_ready[0]) void'(mem.pop_front());
      if (rd_meta_valid[0] && rd_meta_ready[0]) void'(meta.pop_front());
      if (rd_out_valid[0]) begin
        logic [7:0][31:0] e;
        for (int i = 0; i < 8; i++) e[i] = ref_roundtrip(orig[got][i], mw, sgn);
        checks++;
        if (rd_out_data[0] !== e) begin
          failures++;
          if (failures < 5) $display("FAIL %s row %0d got %h exp %h", name, got, rd_out_data[0], e);
        end
        got++;
      end
    end
    @(negedge clk);
    rd_data_valid[0] = 0; rd_meta_valid[0] = 0; rd_clear[0] = 1;
    @(negedge clk);
    rd_clear[0] = 0;
  endtask

  initial begin
    wr_in_valid = '0; wr_in_data = '0; wr_man_width = '0; wr_sign_en = '0; wr_flush = '0;
    wr_data_ready = '1; wr_meta_ready = '1;
    rd_data_valid = '0; rd_data = '0; rd_meta_valid = '0; rd_meta = '0;
    rd_man_width = '0; rd_sign_en = '0; rd_clear = '0; rd_out_ready = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_case("activations, 2b mantissa",   4000, 2,  0, 125, 2);
    run_case("weights, 3b mantissa",       4000, 3,  1, 120, 2);
    run_case("weights, 1b mantissa",       4000, 1,  1, 121, 3);
    run_case("FP32, no reduction",         1000, 23, 1, 127, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
