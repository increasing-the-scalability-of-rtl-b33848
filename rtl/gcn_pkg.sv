// gcn_pkg: types, constants and arithmetic helpers shared by the two-step
// graph convolution layer.
//
// Features are signed 8-bit integers (symmetric quantisation, no zero point).
// A vertex word in a temporal channel (TC) holds a valid bit, a 17-bit edge
// mask and IN_DIM features. Edge-mask bit order (this design's choice):
//   bits 0..7  : neighbours in the current TC, neighbour index n = 0,1,2,3,5,6,7,8
//   bits 8..16 : neighbours in the previous TC, n = 0..8
// where neighbour n sits at dx = n%3-1, dy = n/3-1 from the vertex, n = 4 being
// the vertex itself (self-loop, never stored as an edge).
// A position address is y*SIZE + x.
package gcn_pkg;

  localparam int unsigned FEAT_W   = 8;   // feature width ("an 8-bit value")
  localparam int unsigned WGT_W    = 8;   // weight width
  localparam int unsigned SUM_W    = FEAT_W + 1;  // feature + position term
  localparam int unsigned N_EDGE   = 17;  // 8 current + 9 previous candidates
  localparam int unsigned N_NBR    = 9;   // 3x3 candidates per TC
  localparam int unsigned N_PORT   = 4;   // 2 dual-port buffers
  localparam int unsigned N_CYC2   = 5;   // step-2 cycles per vertex: ceil(18/4)
  localparam int unsigned N_LUT    = 18;  // (dx,dy) x (dt = 0, dt = -1)
  localparam int unsigned MULT_W   = 16;  // requantisation multiplier width
  localparam int unsigned SHIFT_W  = 5;   // requantisation shift width

  localparam logic signed [FEAT_W-1:0] FEAT_MAX = 8'sd127;
  localparam logic signed [FEAT_W-1:0] FEAT_MIN = -8'sd128;

  typedef logic signed [FEAT_W-1:0] feat_t;
  typedef logic signed [SUM_W-1:0]  sum_t;
  typedef logic [N_EDGE-1:0]        edges_t;

  // Valid bit and edge mask of a vertex (the features follow in the RAM word).
  typedef struct packed {
    logic   valid;
    edges_t edges;
  } vhdr_t;

  // Edge-mask bit that enables neighbour n of the current TC (n != 4).
  function automatic int unsigned cur_edge_bit(input int unsigned n);
    return (n < 4) ? n : n - 1;
  endfunction

  // Edge-mask bit that enables neighbour n of the previous TC.
  function automatic int unsigned prv_edge_bit(input int unsigned n);
    return 8 + n;
  endfunction

  // LUT entry for neighbour n with dt = 0 (prev = 0) or dt = -1 (prev = 1).
  function automatic int unsigned lut_index(input int unsigned n, input logic prev);
    return (prev ? N_NBR : 0) + n;
  endfunction

endpackage
