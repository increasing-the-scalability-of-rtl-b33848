// requant: brings a wide signed dot-product accumulator back to an 8-bit
// feature. q = sat8((acc * mult + 2^(shift-1)) >>> shift), rounding half up,
// no rounding term when shift = 0.
//
// The paper requantises every output element with a DSP multiplier after the
// multiplication; the multiplier/shift form, the rounding mode and the
// saturation bounds [-128, 127] are this design's choices.
// Purely combinational; the caller registers the result.
module requant
  import gcn_pkg::*;
#(
  parameter int unsigned ACC_W = 20
) (
  input  logic signed [ACC_W-1:0] acc,
  input  logic [MULT_W-1:0]       mult,
  input  logic [SHIFT_W-1:0]      shift,
  output feat_t                   q
);
  localparam int unsigned PROD_W = ACC_W + MULT_W + 1;

  logic signed [PROD_W-1:0] prod, rnd, shifted;

  always_comb begin
    prod    = PROD_W'(acc) * $signed({1'b0, mult});
    rnd     = (shift == '0) ? '0 : (PROD_W'(1) <<< (shift - 1'b1));
    shifted = (prod + rnd) >>> shift;
    if (shifted > PROD_W'(FEAT_MAX))      q = FEAT_MAX;
    else if (shifted < PROD_W'(FEAT_MIN)) q = FEAT_MIN;
    else                                  q = feat_t'(shifted);
  end
endmodule
