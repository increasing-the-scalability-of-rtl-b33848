// vec_mul: vector multiplication unit ("X" of the two-step method). Each
// clock it takes an IN_DIM feature vector and one weight column and, two
// cycles later, gives one requantised output feature element.
//   stage 1: IN_DIM signed 8x8 products summed into an accumulator register
//   stage 2: requant (multiply, round, shift, saturate) into the output register
// Several of these run in parallel when one is too slow for the required TC
// rate (the paper's "parallel multipliers"). The two-stage pipeline and the
// run-time weight inputs are this design's choices.
module vec_mul
  import gcn_pkg::*;
#(
  parameter int unsigned IN_DIM = 16
) (
  input  logic                       clk,
  input  logic                       en,      // advance the pipeline
  input  logic [IN_DIM*FEAT_W-1:0]   feat,    // element i at [i*8 +: 8]
  input  logic [IN_DIM*WGT_W-1:0]    wcol,    // weight i at [i*8 +: 8]
  input  logic [MULT_W-1:0]          rq_mult,
  input  logic [SHIFT_W-1:0]         rq_shift,
  output feat_t                      q
);
  localparam int unsigned ACC_W = FEAT_W + WGT_W + $clog2(IN_DIM);

  logic signed [ACC_W-1:0] dot, acc_q;
  feat_t rq;

  always_comb begin
    dot = '0;
    for (int i = 0; i < int'(IN_DIM); i++)
      begin
        logic signed [FEAT_W+WGT_W-1:0] prod;
        prod = $signed(feat[i*FEAT_W +: FEAT_W]) * $signed(wcol[i*WGT_W +: WGT_W]);
        dot += ACC_W'(prod);
      end
  end

  requant #(.ACC_W(ACC_W)) u_rq (.acc(acc_q), .mult(rq_mult), .shift(rq_shift), .q(rq));

  always_ff @(posedge clk) begin
    if (en) begin
      acc_q <= dot;
      q     <= rq;
    end
  end
endmodule
