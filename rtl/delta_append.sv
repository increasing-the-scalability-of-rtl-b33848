// delta_append: the "append [dx, dy, dt]" step of the two-step method. Since
// the position differences of an edge can only be -1, 0 or 1, the product of
// (dx, dy, dt) with its weight rows is a per-layer constant vector; it is kept
// in a look-up table and added to each requantised feature vector read from
// the buffers. N_PORT vectors are handled per cycle (4: two dual-port
// buffers).
// LUT: N_LUT = 18 entries of OUT_DIM signed 8-bit elements; entry n is the
// current-TC neighbour n (dt = 0), entry 9+n the previous-TC neighbour n
// (dt = -1); see gcn_pkg for n. Entry 4 is the self-loop (dx,dy,dt) = 0 and is
// normally zero, or the layer bias if one is folded in. Entries are loaded
// through lut_we/lut_addr/lut_wdata (this design's choice). Lookup and add are
// combinational; the sums are 9 bits wide so no information is lost before
// the max.
module delta_append
  import gcn_pkg::*;
#(
  parameter int unsigned OUT_DIM = 64
) (
  input  logic                                clk,
  input  logic                                lut_we,
  input  logic [$clog2(N_LUT)-1:0]            lut_addr,
  input  logic [OUT_DIM*FEAT_W-1:0]           lut_wdata,
  input  logic [N_PORT-1:0][OUT_DIM*FEAT_W-1:0] feat,
  input  logic [N_PORT-1:0][$clog2(N_LUT)-1:0]  idx,
  output logic [N_PORT-1:0][OUT_DIM*SUM_W-1:0]  sum
);
  logic [OUT_DIM*FEAT_W-1:0] lut [N_LUT];

  always_ff @(posedge clk)
    if (lut_we && int'(lut_addr) < int'(N_LUT)) lut[lut_addr] <= lut_wdata;

  always_comb begin
    for (int p = 0; p < int'(N_PORT); p++)
      for (int k = 0; k < int'(OUT_DIM); k++)
        sum[p][k*SUM_W +: SUM_W] =
            SUM_W'($signed(feat[p][k*FEAT_W +: FEAT_W])) +
            SUM_W'($signed(lut[idx[p]][k*FEAT_W +: FEAT_W]));
  end
endmodule
