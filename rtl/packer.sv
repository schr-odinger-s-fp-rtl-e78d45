// packer: packs the values of one column into consecutive 32b words.
//
// Every valid cycle one value arrives, already bias-encoded by the compressor.
// The mask-and-shift stage keeps its sign bit (when sign_en), the low
// exp_bits(exp_width) bits of its exponent code and the top man_width bits of
// its mantissa, left-aligns the kept bits and rotates them to the fill
// position given by the 6b rotation counter. Registers L (ring bits 63:32) and
// R (ring bits 31:0) form a 64b ring that is filled MSB first, so a value may
// straddle L and R. The rotation counter then advances by the value's width,
// modulo 64. When L or R becomes full the MUX puts it on `word` with
// word_valid high in that same cycle (combinational output) and the register
// is cleared for reuse. All packers of a row see the same widths, so they fill
// in lock step. A flush outputs a partially filled register (unused low bits
// zero) and restarts at bit 0; a flush ignores `valid` in the same cycle.
//
// Interface: valid/data_in/exp_width/man_width/sign_en are sampled at the
// clock edge; word/word_valid show the word completed by the current inputs.
// Reset is synchronous, active low, and empties the ring.
//
// The mask-and-shift / rotation counter / L,R / MUX structure and the 3b, 5b,
// 6b, 32b and 64b widths are the paper's. MSB-first order, the optional sign
// bit and flush are this design's choices.
module packer
  import sfp_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid,
  input  logic                 flush,
  input  logic [FP_W-1:0]      data_in,
  input  logic [WCODE_W-1:0]   exp_width,
  input  logic [MWID_W-1:0]    man_width,
  input  logic                 sign_en,
  output logic                 word_valid,
  output logic [FP_W-1:0]      word
);
  logic [63:0]      ring_q, ring_d;    // {L, R}
  logic [ROT_W-1:0] rot_q, rot_d;      // rotation counter: next free ring bit

  logic [5:0]  vbits;
  logic [3:0]  eb;
  logic [4:0]  mb;
  logic [31:0] v;
  logic [63:0] aligned, placed, filled;
  logic [6:0]  fill_end;

  always_comb begin
    eb    = exp_bits(exp_width);
    mb    = man_bits(man_width);
    vbits = value_bits(exp_width, man_width, sign_en);

    // mask-and-shift: compact value, right aligned, then left aligned in 64b
    v = (32'(data_in[MAN_W-1:0]) >> (MAN_W - 32'(mb)))
      | ((32'(data_in[FP_W-2 -: EXP_W]) & ((32'd1 << eb) - 32'd1)) << mb)
      | (32'(sign_en & data_in[FP_W-1]) << (32'(eb) + 32'(mb)));
    aligned = (vbits == 6'd0) ? 64'd0 : ({v, 32'd0} << (7'd32 - 7'(vbits)));
    placed  = (aligned >> rot_q) | ((rot_q == '0) ? 64'd0 : (aligned << (7'd64 - 7'(rot_q))));
    filled  = ring_q | placed;
    fill_end = 7'(rot_q) + 7'(vbits);

    ring_d     = ring_q;
    rot_d      = rot_q;
    word_valid = 1'b0;
    word       = filled[63:32];

    if (flush) begin
      word       = rot_q[5] ? ring_q[31:0] : ring_q[63:32];
      word_valid = (rot_q[4:0] != '0);
      ring_d     = '0;
      rot_d      = '0;
    end else if (valid) begin
      ring_d = filled;
      rot_d  = fill_end[5:0];
      if (!rot_q[5] && fill_end >= 7'd32) begin        // L is full
        word_valid     = 1'b1;
        word           = filled[63:32];
        ring_d[63:32]  = '0;
      end else if (rot_q[5] && fill_end >= 7'd64) begin // R is full
        word_valid     = 1'b1;
        word           = filled[31:0];
        ring_d[31:0]   = '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ring_q <= '0;
      rot_q  <= '0;
    end else begin
      ring_q <= ring_d;
      rot_q  <= rot_d;
    end
  end

endmodule
