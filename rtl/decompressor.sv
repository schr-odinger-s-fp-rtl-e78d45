// decompressor: expands compressed 8x32b rows back into rows of FP32 values.
//
// Column i (bits [32i+31:32i]) of every compressed row goes to unpacker i.
// For each output row the decompressor takes one 3b exponent width from the
// metadata stream; with the tensor's man_width and sign_en this fixes the
// width of every value of the row, so the LANES unpackers consume bits in
// lock step. When the bits buffered in the unpackers do not hold a whole
// value, the next compressed row is loaded in the same cycle. The expanded
// values are captured in the Word7..Word0 register and the bias decoder
// restores their exponents on the way out.
//
// Timing: one output row per cycle while metadata and (when needed) data are
// available and the output is not stalled; a row appears on data_out one
// cycle after its metadata entry is accepted (w_valid && w_ready). The inputs
// use valid/ready handshakes; in_ready is high only in cycles in which a row
// is consumed. clear drops the leftover bits of the previous tensor (the
// padding of its last word). Reset: synchronous, active low.
//
// The unpacker array, the 3b/5b width inputs, Word register and bias decoder
// follow the paper; handshakes, clear and the one-cycle output register are
// this design's choices.
module decompressor
  import sfp_pkg::*;
#(
  parameter int unsigned LANES = 8,
  parameter int unsigned BIAS  = DEFAULT_BIAS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  // compressed rows
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [LANES-1:0][FP_W-1:0]  data_in,
  // per-row exponent width and tensor format
  input  logic                        w_valid,
  output logic                        w_ready,
  input  logic [WCODE_W-1:0]          exp_width,
  input  logic [MWID_W-1:0]           man_width,
  input  logic                        sign_en,
  // FP32 rows
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [LANES-1:0][FP_W-1:0]  data_out
);
  logic [LANES-1:0]            need;
  logic [LANES-1:0][FP_W-1:0]  up_data;
  logic [LANES-1:0][FP_W-1:0]  word_q;
  logic                        can_go, fire, load;

  assign can_go   = w_valid && (!out_valid || out_ready) && !clear;
  assign fire     = can_go && (!need[0] || in_valid);
  assign load     = fire && need[0];
  assign in_ready = can_go && need[0];
  assign w_ready  = fire;

  for (genvar i = 0; i < LANES; i++) begin : g_unpack
    unpacker u_unpacker (
      .clk, .rst_n,
      .clear     (clear),
      .load      (load),
      .word_in   (data_in[i]),
      .take      (fire),
      .exp_width (exp_width),
      .man_width (man_width),
      .sign_en   (sign_en),
      .need_word (need[i]),
      .data_out  (up_data[i]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      word_q    <= '0;
    end else if (fire) begin
      out_valid <= 1'b1;
      word_q    <= up_data;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  bias_decoder #(.LANES(LANES), .BIAS(BIAS)) u_bias (.row_in(word_q), .row_out(data_out));

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               need == '0 || need == '1);
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(word_q));
endmodule
