// bias_encoder: first stage of the compressor.
//
// For each of the LANES values of a row it removes the fixed exponent bias and
// folds the signed difference into an unsigned exponent code
// (sfp_pkg::exp_encode), so that exponents close to the bias need few bits.
// The values leave with their exponent field replaced by that code; the codes
// are also given out side by side (LANES x 8 bits, 64 bits for 8 lanes) for
// the width detector. Purely combinational.
//
// Subtracting a fixed bias of 127 follows the paper. The zig-zag fold of the
// difference is this design's choice: the paper does not say how exponents
// below the bias are kept short.
module bias_encoder
  import sfp_pkg::*;
#(
  parameter int unsigned LANES = 8,
  parameter int unsigned BIAS  = DEFAULT_BIAS
) (
  input  logic [LANES-1:0][FP_W-1:0]  row_in,
  output logic [LANES-1:0][FP_W-1:0]  row_out,
  output logic [LANES-1:0][EXP_W-1:0] exps
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      exps[i]    = exp_encode(row_in[i][FP_W-2 -: EXP_W], exp_t'(BIAS));
      row_out[i] = {row_in[i][FP_W-1], exps[i], row_in[i][MAN_W-1:0]};
    end
  end
endmodule
