// width_detector: finds how many exponent bits a row needs.
//
// ORs the LANES exponent codes of a row together and locates the leading one:
// the position of that one plus one is the bit count every code of the row
// fits in. The count is returned as a 3b width code (sfp_pkg::exp_bits):
// 0..6 bits as themselves, 7 or 8 bits as code 7 (meaning 8 stored bits).
// Purely combinational; input LANES x 8 bits (64 for 8 lanes), output 3 bits.
//
// The OR and leading-one structure and the 3b output are the paper's; the
// mapping of 7 and 8 bits onto code 7 is this design's choice.
module width_detector
  import sfp_pkg::*;
#(
  parameter int unsigned LANES = 8
) (
  input  logic [LANES-1:0][EXP_W-1:0] exps,
  output logic [WCODE_W-1:0]          w
);
  logic [EXP_W-1:0] any;
  logic [3:0]       nbits;

  always_comb begin
    any = '0;
    for (int i = 0; i < LANES; i++) any |= exps[i];
    nbits = '0;
    for (int b = 0; b < EXP_W; b++)
      if (any[b]) nbits = 4'(b + 1);
    w = (nbits >= 4'd7) ? 3'd7 : nbits[2:0];
  end
endmodule
