// meta_unpacker: hands out per-row exponent widths from metadata words.
//
// Mirror of meta_packer. A metadata word is held in a register and its entries
// (entry k in bits [3k+2:3k]) are offered one at a time on w/w_valid. When the
// last of ENTRIES entries is taken, the next word may be loaded in that same
// cycle, so one width per cycle can be delivered without gaps. clear (start of
// a tensor) drops the rest of the current word, which holds only padding.
//
// Interface: valid/ready on both sides. Reset: synchronous, active low.
//
// Reading the separate metadata stream is implied by the paper; the word
// layout is this design's choice and matches meta_packer.
module meta_unpacker
  import sfp_pkg::*;
#(
  parameter int unsigned WORD_W  = 256,
  parameter int unsigned ENTRIES = WORD_W / WCODE_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [WORD_W-1:0]   in_data,
  output logic                w_valid,
  input  logic                w_ready,
  output logic [WCODE_W-1:0]  w
);
  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [WORD_W-1:0] word_q;
  logic [IDX_W-1:0]  idx_q;
  logic              have_q, last;

  assign w_valid  = have_q && !clear;
  assign w        = word_q[idx_q * WCODE_W +: WCODE_W];
  assign last     = (idx_q == IDX_W'(ENTRIES - 1));
  assign in_ready = !clear && (!have_q || (w_ready && last));

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      word_q <= '0;
      idx_q  <= '0;
      have_q <= 1'b0;
    end else begin
      if (w_valid && w_ready) begin
        if (last) have_q <= 1'b0;
        else      idx_q  <= idx_q + 1'b1;
      end
      if (in_valid && in_ready) begin
        word_q <= in_data;
        idx_q  <= '0;
        have_q <= 1'b1;
      end
    end
  end
endmodule
