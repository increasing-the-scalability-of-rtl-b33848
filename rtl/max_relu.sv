// max_relu: the element-wise max() over all candidates of a vertex followed by
// ReLU. Candidates arrive N_PORT per cycle, each with an enable (edge present
// and inside the array). `first` marks the first group of a vertex (the
// running maximum restarts), `last` the final group; one cycle after `last`
// out_valid pulses with
//   out_feat[k] = min(127, max(0, max over enabled candidates c of c[k])).
// A vertex with no enabled candidate gives zeros. The clamp to 127, which
// keeps the output a signed 8-bit feature, is this design's choice.
module max_relu
  import gcn_pkg::*;
#(
  parameter int unsigned OUT_DIM = 64
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 in_valid,
  input  logic                                 first,
  input  logic                                 last,
  input  logic [N_PORT-1:0][OUT_DIM*SUM_W-1:0] cand,
  input  logic [N_PORT-1:0]                    cand_en,
  output logic                                 out_valid,
  output logic [OUT_DIM*FEAT_W-1:0]            out_feat
);
  localparam sum_t SUM_LOW = {1'b1, {(SUM_W-1){1'b0}}};   // most negative

  logic [OUT_DIM*SUM_W-1:0] run_q, run_d;

  always_comb begin
    for (int k = 0; k < int'(OUT_DIM); k++) begin
      sum_t m;
      m = first ? SUM_LOW : sum_t'(run_q[k*SUM_W +: SUM_W]);
      for (int p = 0; p < int'(N_PORT); p++)
        if (cand_en[p] && $signed(cand[p][k*SUM_W +: SUM_W]) > m)
          m = sum_t'(cand[p][k*SUM_W +: SUM_W]);
      run_d[k*SUM_W +: SUM_W] = m;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      run_q     <= '0;
      out_feat  <= '0;
    end else begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        run_q <= run_d;
        if (last)
          for (int k = 0; k < int'(OUT_DIM); k++) begin
            sum_t m;
            m = sum_t'(run_d[k*SUM_W +: SUM_W]);
            if (m < 0)                  out_feat[k*FEAT_W +: FEAT_W] <= '0;
            else if (m > SUM_W'(FEAT_MAX)) out_feat[k*FEAT_W +: FEAT_W] <= FEAT_MAX;
            else                        out_feat[k*FEAT_W +: FEAT_W] <= feat_t'(m);
          end
      end
    end
  end
endmodule
