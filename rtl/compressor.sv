// compressor: packs rows of 8 FP32 values into variable-length containers.
//
// One row of LANES FP32 values is accepted per cycle. The bias encoder turns
// each exponent into a short unsigned code; the width detector ORs the LANES
// codes and finds the leading one, giving the row's 3b exponent width w; the
// LANES packers, each owning one 32b column of the output, keep of every value
// the optional sign, w exponent bits and man_width mantissa bits. All values
// of a row have the same width, so the packers complete their words in the
// same cycle, and the compressor then emits a full 8x32b row (Word7..Word0,
// Word i in bits [32i+31:32i]). The per-row width w leaves on its own stream,
// to be stored as metadata apart from the data.
//
// Handshakes are valid/ready. A row is taken when in_valid && in_ready; w for
// that row and, if a word filled, the compressed row appear on the registered
// outputs one cycle later. in_ready is high when both output registers can
// take a new value and no flush is requested. flush (end of tensor) emits the
// partly filled words, padded with zeros, and restarts the packers; flush_ack
// marks the cycle it happens. Reset: synchronous, active low.
//
// Block structure, widths and the one-row-per-cycle rate follow the paper;
// handshakes, flush and output registers are this design's choices.
module compressor
  import sfp_pkg::*;
#(
  parameter int unsigned LANES = 8,
  parameter int unsigned BIAS  = DEFAULT_BIAS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // uncompressed rows
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [LANES-1:0][FP_W-1:0]  data_in,
  input  logic [MWID_W-1:0]           man_width,
  input  logic                        sign_en,
  input  logic                        flush,
  output logic                        flush_ack,
  // compressed rows
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [LANES-1:0][FP_W-1:0]  data_out,
  // per-row exponent width (metadata)
  output logic                        w_valid,
  input  logic                        w_ready,
  output logic [WCODE_W-1:0]          w
);
  logic [LANES-1:0][FP_W-1:0]  enc_row;
  logic [LANES-1:0][EXP_W-1:0] enc_exps;
  logic [WCODE_W-1:0]          row_w;
  logic [LANES-1:0]            pk_valid;
  logic [LANES-1:0][FP_W-1:0]  pk_word;
  logic                        out_free, accept;

  bias_encoder #(.LANES(LANES), .BIAS(BIAS)) u_bias (
    .row_in (data_in), .row_out(enc_row), .exps(enc_exps));

  width_detector #(.LANES(LANES)) u_width (.exps(enc_exps), .w(row_w));

  assign out_free  = !out_valid || out_ready;
  assign in_ready  = out_free && (!w_valid || w_ready) && !flush;
  assign accept    = in_valid && in_ready;
  assign flush_ack = flush && out_free;

  for (genvar i = 0; i < LANES; i++) begin : g_pack
    packer u_packer (
      .clk, .rst_n,
      .valid     (accept),
      .flush     (flush_ack),
      .data_in   (enc_row[i]),
      .exp_width (row_w),
      .man_width (man_width),
      .sign_en   (sign_en),
      .word_valid(pk_valid[i]),
      .word      (pk_word[i]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      data_out  <= '0;
      w_valid   <= 1'b0;
      w         <= '0;
    end else begin
      if (out_free) begin
        out_valid <= pk_valid[0];
        if (pk_valid[0]) data_out <= pk_word;
      end
      if (!w_valid || w_ready) begin
        w_valid <= accept;
        if (accept) w <= row_w;
      end
    end
  end

  // the packers share every width, so they complete words together
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               pk_valid == '0 || pk_valid == '1);
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(data_out));
endmodule
