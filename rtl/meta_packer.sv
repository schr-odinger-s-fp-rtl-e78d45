// meta_packer: gathers per-row exponent widths into metadata words.
//
// The compressor produces one 3b exponent width per row of 8 values. These are
// written to memory as a stream of their own, kept apart from the data, so
// that one memory access brings the widths of many rows. The packer places
// entry k of a word in bits [3k+2:3k]; when ENTRIES entries are in, the word
// goes to the registered output. flush emits a partly filled word (unused
// entries zero) and flush_ack marks the cycle it is taken.
//
// Interface: valid/ready on both sides; w_ready is high whenever the output
// register is free and no flush is requested. A word appears one cycle after
// its last entry is accepted. Reset: synchronous, active low.
//
// A separate, sequential metadata stream is the paper's; the word width and
// the number of entries per word are this design's choices.
module meta_packer
  import sfp_pkg::*;
#(
  parameter int unsigned WORD_W  = 256,
  parameter int unsigned ENTRIES = WORD_W / WCODE_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                w_valid,
  output logic                w_ready,
  input  logic [WCODE_W-1:0]  w,
  input  logic                flush,
  output logic                flush_ack,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [WORD_W-1:0]   out_data
);
  localparam int unsigned CNT_W = $clog2(ENTRIES + 1);

  logic [WORD_W-1:0] acc_q, acc_new;
  logic [CNT_W-1:0]  cnt_q;
  logic              out_free, take;

  assign out_free  = !out_valid || out_ready;
  assign w_ready   = out_free && !flush;
  assign take      = w_valid && w_ready;
  assign flush_ack = flush && out_free;

  always_comb begin
    acc_new = acc_q;
    acc_new[cnt_q * WCODE_W +: WCODE_W] = w;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q     <= '0;
      cnt_q     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_free) out_valid <= 1'b0;
      if (flush_ack) begin
        if (cnt_q != '0) begin
          out_valid <= 1'b1;
          out_data  <= acc_q;
        end
        acc_q <= '0;
        cnt_q <= '0;
      end else if (take) begin
        if (cnt_q == CNT_W'(ENTRIES - 1)) begin
          out_valid <= 1'b1;
          out_data  <= acc_new;
          acc_q     <= '0;
          cnt_q     <= '0;
        end else begin
          acc_q <= acc_new;
          cnt_q <= cnt_q + 1'b1;
        end
      end
    end
  end
endmodule
