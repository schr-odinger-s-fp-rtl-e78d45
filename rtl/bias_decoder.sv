// bias_decoder: last stage of the decompressor.
//
// Turns the exponent code of each of the LANES values of a row back into the
// biased FP32 exponent (sfp_pkg::exp_decode, the exact inverse of the bias
// encoder). Sign and mantissa pass through. Purely combinational.
//
// The paper names this block; its function follows from the bias encoder,
// whose zig-zag fold is this design's choice.
module bias_decoder
  import sfp_pkg::*;
#(
  parameter int unsigned LANES = 8,
  parameter int unsigned BIAS  = DEFAULT_BIAS
) (
  input  logic [LANES-1:0][FP_W-1:0] row_in,
  output logic [LANES-1:0][FP_W-1:0] row_out
);
  always_comb begin
    for (int i = 0; i < LANES; i++)
      row_out[i] = {row_in[i][FP_W-1],
                    exp_decode(row_in[i][FP_W-2 -: EXP_W], exp_t'(BIAS)),
                    row_in[i][MAN_W-1:0]};
  end
endmodule
