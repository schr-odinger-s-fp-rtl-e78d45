// sfp_pkg: constants and helper functions shared by the FP32 container
// compressor and decompressor.
//
// An FP32 value is {sign, 8b exponent, 23b mantissa}. In memory each value of
// a row of 8 keeps an optional sign bit, the low EB bits of its exponent code
// and the top man_width bits of its mantissa. The exponent code is the
// bias-removed exponent folded to an unsigned number (see exp_encode); EB comes
// from a 3b width code shared by the row (see exp_bits).
//
// Following the source: FP32 values, rows of 8, a fixed bias of 127, a 3b
// exponent width and a 5b mantissa width. This design's own choices: the
// zig-zag fold of the exponent difference, code 7 meaning 8 bits, and the
// optional sign bit. Linting a single module reports the constants it does
// not use (for example ROT_W outside the packer) as unused parameters; each
// constant is used somewhere in the design.
package sfp_pkg;

  localparam int unsigned FP_W    = 32;  // container width of one value
  localparam int unsigned EXP_W   = 8;   // FP32 exponent field
  localparam int unsigned MAN_W   = 23;  // FP32 mantissa field
  localparam int unsigned ROW_LANES = 8; // values per row
  localparam int unsigned WCODE_W = 3;   // per-row exponent width code
  localparam int unsigned MWID_W  = 5;   // mantissa width input
  localparam int unsigned ROT_W   = 6;   // packer rotation counter (64b ring)
  localparam int unsigned DEFAULT_BIAS = 127;

  typedef logic [FP_W-1:0]               fp32_t;
  typedef logic [ROW_LANES-1:0][FP_W-1:0] row_t;
  typedef logic [EXP_W-1:0]              exp_t;
  typedef logic [WCODE_W-1:0]            wcode_t;
  typedef logic [MWID_W-1:0]             mwidth_t;

  // Exponent code: d = (E - bias) mod 256 read as a signed byte, folded as
  // (d << 1) ^ (d >>> 7). 0,-1,+1,-2,+2,... map to 0,1,2,3,4,... so exponents
  // near the bias get short codes whatever their sign. The map is a bijection
  // on 8 bits, which keeps the encoding lossless.
  function automatic exp_t exp_encode(input exp_t e, input exp_t bias);
    exp_t d;
    d = e - bias;
    return {d[EXP_W-2:0], 1'b0} ^ {EXP_W{d[EXP_W-1]}};
  endfunction

  function automatic exp_t exp_decode(input exp_t z, input exp_t bias);
    exp_t d;
    d = {1'b0, z[EXP_W-1:1]} ^ {EXP_W{z[0]}};
    return d + bias;
  endfunction

  // Stored exponent bits for a width code: codes 0..6 are literal, code 7
  // stands for the full 8 bits (a 3b code cannot name all of 0..8).
  function automatic logic [3:0] exp_bits(input wcode_t code);
    return (code == 3'd7) ? 4'd8 : {1'b0, code};
  endfunction

  // Mantissa bits kept: man_width saturated at the FP32 field width.
  function automatic logic [4:0] man_bits(input mwidth_t mw);
    return (mw > mwidth_t'(MAN_W)) ? 5'(MAN_W) : mw;
  endfunction

  // Width of one packed value: sign (optional) + exponent + mantissa, <= 32.
  function automatic logic [5:0] value_bits(input wcode_t code, input mwidth_t mw,
                                            input logic sign_en);
    return 6'(sign_en) + 6'(exp_bits(code)) + 6'(man_bits(mw));
  endfunction

endpackage
