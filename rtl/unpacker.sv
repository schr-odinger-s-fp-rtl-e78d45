// unpacker: recovers the values of one column from consecutive 32b words.
//
// A 64b register holds the not yet used packed bits, left aligned, and a
// counter says how many there are. When `load` is high the combine-and-shift
// stage ORs word_in in right behind those bits. The leftmost value_bits
// (sign_en + exp_bits(exp_width) + man_width) bits of the combined register
// are the next value: mask-and-extend splits them into sign, exponent code
// (zero extended to 8 bits) and mantissa (trimmed low bits put back as zeros)
// and drives data_out combinationally. When `take` is high the register is
// shifted left by the value width at the clock edge. need_word tells the
// decompressor that the buffered bits do not hold a whole value, so a word must
// be loaded in the same cycle as the take. clear drops all buffered bits.
// Reset: synchronous, active low.
//
// The 64b register, combine-and-shift and mask-and-extend stages and the 32b
// ports are the paper's; the fill counter and the load/take controls are this
// design's choices.
module unpacker
  import sfp_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               load,
  input  logic [FP_W-1:0]    word_in,
  input  logic               take,
  input  logic [WCODE_W-1:0] exp_width,
  input  logic [MWID_W-1:0]  man_width,
  input  logic               sign_en,
  output logic               need_word,
  output logic [FP_W-1:0]    data_out
);
  logic [63:0] reg_q, reg_d, combined;
  logic [6:0]  cnt_q, cnt_d, cnt_c;

  logic [5:0]  vbits;
  logic [3:0]  eb;
  logic [4:0]  mb;
  logic [31:0] val;
  logic [22:0] man;
  logic [7:0]  expc;
  logic        sgn;

  always_comb begin
    eb    = exp_bits(exp_width);
    mb    = man_bits(man_width);
    vbits = value_bits(exp_width, man_width, sign_en);
    need_word = (cnt_q < 7'(vbits));

    // combine and shift
    combined = load ? (reg_q | ({word_in, 32'd0} >> cnt_q)) : reg_q;
    cnt_c    = load ? cnt_q + 7'd32 : cnt_q;

    // mask and extend
    val  = (vbits == 6'd0) ? 32'd0 : (combined[63:32] >> (6'd32 - vbits));
    man  = 23'((val & ((32'd1 << mb) - 32'd1)) << (MAN_W - 32'(mb)));
    expc = 8'((val >> mb) & ((32'd1 << eb) - 32'd1));
    sgn  = sign_en & val[32'(eb) + 32'(mb)];
    data_out = {sgn, expc, man};

    reg_d = combined;
    cnt_d = cnt_c;
    if (take) begin
      reg_d = combined << vbits;
      cnt_d = cnt_c - 7'(vbits);
    end
    if (clear) begin
      reg_d = '0;
      cnt_d = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      reg_q <= '0;
      cnt_q <= '0;
    end else begin
      reg_q <= reg_d;
      cnt_q <= cnt_d;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  load |-> cnt_q < 7'd32);
  a_enough_bits: assert property (@(posedge clk) disable iff (!rst_n || clear)
                                  take |-> cnt_c >= 7'(vbits));
endmodule
