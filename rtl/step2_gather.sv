// step2_gather: second step of the two-step graph convolution. For every
// position of the TC it reads the self-loop results of the vertex and of its
// 17 possible neighbours (8 in the current TC, 9 in the previous one) from the
// two dual-port feature buffers, adds the position-difference term from the
// look-up table (delta_append) and reduces them with the element-wise max and
// ReLU (max_relu).
//
// Read schedule, 4 reads per cycle, 5 cycles per vertex: in cycle c = 0..4
// port A of both buffers reads neighbour n = 2c and port B neighbour n = 2c+1
// (n = 9 does not exist), neighbour n lying at dx = n%3-1, dy = n/3-1. A
// candidate counts if it lies inside the SIZE x SIZE array and either is the
// vertex itself (current TC, n = 4) or its edge bit is set; nothing counts for
// an empty position. The valid bit and edge mask of the vertex are read from
// the input TC memory in cycle 0. Pipeline: issue, buffer read / LUT add / max,
// ReLU register; `done` and the last output come 5*SIZE*SIZE + 1 cycles
// after the clock edge that takes `start`.
// Output: one word per position in raster order (address y*SIZE + x) with
// out_vertex = vertex present, its edge mask passed on, and the features.
// The read schedule and output format are this design's choices; the count of
// 5 cycles for 18 reads from two dual-port buffers is the paper's.
module step2_gather
  import gcn_pkg::*;
#(
  parameter int unsigned SIZE    = 64,
  parameter int unsigned OUT_DIM = 64,
  localparam int unsigned AW     = $clog2(SIZE*SIZE),
  localparam int unsigned LW     = $clog2(SIZE),
  localparam int unsigned VW     = OUT_DIM*FEAT_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // vertex header from the input TC memory (1 cycle latency)
  output logic                 v_rd_en,
  output logic [AW-1:0]        v_addr,
  input  vhdr_t                v_hdr,
  // buffer read ports (1 cycle latency): current TC and previous TC
  output logic                 rd_en,
  output logic [AW-1:0]        a_addr,
  output logic [AW-1:0]        b_addr,
  input  logic [VW-1:0]        cur_a_rdata,
  input  logic [VW-1:0]        cur_b_rdata,
  input  logic [VW-1:0]        prv_a_rdata,
  input  logic [VW-1:0]        prv_b_rdata,
  // position-difference LUT load
  input  logic                 lut_we,
  input  logic [$clog2(N_LUT)-1:0] lut_addr,
  input  logic [VW-1:0]        lut_wdata,
  // output vertex stream
  output logic                 out_valid,
  output logic [AW-1:0]        out_addr,
  output logic                 out_vertex,
  output edges_t               out_edges,
  output logic [VW-1:0]        out_feat
);
  localparam int unsigned NPOS = SIZE * SIZE;

  typedef struct packed {
    logic          valid;
    logic [AW-1:0] v;
    logic [2:0]    c;
    logic [1:0]    inr;   // neighbour of port A / B inside the array and existing
  } tag_t;

  logic          run;
  logic [AW-1:0] v_cnt;
  logic [2:0]    c_cnt;
  tag_t          t1;
  vhdr_t         hdr_q, hdr;
  logic [AW-1:0] meta_v;
  vhdr_t         meta_hdr;

  // ---------------- issue stage ----------------
  logic [1:0]    inr;
  logic [AW-1:0] addr_p [2];

  always_comb begin
    int x, y, n, nx, ny;
    x = int'(v_cnt[LW-1:0]);
    y = int'(v_cnt[AW-1:LW]);
    for (int p = 0; p < 2; p++) begin
      n  = 2 * int'(c_cnt) + p;
      nx = x + (n % 3) - 1;
      ny = y + (n / 3) - 1;
      inr[p]    = (n <= 8) && nx >= 0 && nx < int'(SIZE) && ny >= 0 && ny < int'(SIZE);
      addr_p[p] = inr[p] ? AW'(ny * int'(SIZE) + nx) : '0;
    end
  end

  assign rd_en   = run;
  assign a_addr  = addr_p[0];
  assign b_addr  = addr_p[1];
  assign v_rd_en = run && (c_cnt == 3'd0);
  assign v_addr  = v_cnt;
  logic out_valid_pre;
  assign busy    = run | t1.valid | out_valid_pre;
  assign out_valid_pre = t1.valid && (t1.c == 3'(N_CYC2 - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run   <= 1'b0;
      v_cnt <= '0;
      c_cnt <= '0;
      t1    <= '0;
    end else begin
      t1 <= '{valid: run, v: v_cnt, c: c_cnt, inr: inr};
      if (!busy && start) begin
        run   <= 1'b1;
        v_cnt <= '0;
        c_cnt <= '0;
      end else if (run) begin
        if (c_cnt == 3'(N_CYC2 - 1)) begin
          c_cnt <= '0;
          v_cnt <= v_cnt + 1'b1;
          if (v_cnt == AW'(NPOS - 1)) run <= 1'b0;
        end else begin
          c_cnt <= c_cnt + 1'b1;
        end
      end
    end
  end

  // ---------------- data stage ----------------
  assign hdr = (t1.c == 3'd0) ? v_hdr : hdr_q;

  always_ff @(posedge clk)
    if (t1.valid) hdr_q <= hdr;

  logic [N_PORT-1:0][VW-1:0]              feat;
  logic [N_PORT-1:0][$clog2(N_LUT)-1:0]   idx;
  logic [N_PORT-1:0]                      cen;
  logic [N_PORT-1:0][OUT_DIM*SUM_W-1:0]   sum;

  always_comb begin
    int n0, n1;
    n0 = 2 * int'(t1.c);
    n1 = n0 + 1;
    feat[0] = cur_a_rdata;
    feat[1] = cur_b_rdata;
    feat[2] = prv_a_rdata;
    feat[3] = prv_b_rdata;
    idx[0]  = 5'(lut_index(n0, 1'b0));
    idx[1]  = (n1 <= 8) ? 5'(lut_index(n1, 1'b0)) : '0;
    idx[2]  = 5'(lut_index(n0, 1'b1));
    idx[3]  = (n1 <= 8) ? 5'(lut_index(n1, 1'b1)) : '0;
    cen[0]  = hdr.valid && t1.inr[0] && ((n0 == 4) || hdr.edges[cur_edge_bit(n0)]);
    cen[1]  = hdr.valid && t1.inr[1] && (n1 <= 8) && ((n1 == 4) || hdr.edges[cur_edge_bit(n1)]);
    cen[2]  = hdr.valid && t1.inr[0] && hdr.edges[prv_edge_bit(n0)];
    cen[3]  = hdr.valid && t1.inr[1] && (n1 <= 8) && hdr.edges[prv_edge_bit(n1 <= 8 ? n1 : 0)];
  end

  delta_append #(.OUT_DIM(OUT_DIM)) u_append (
    .clk, .lut_we, .lut_addr, .lut_wdata, .feat, .idx, .sum
  );

  max_relu #(.OUT_DIM(OUT_DIM)) u_max (
    .clk, .rst_n,
    .in_valid (t1.valid),
    .first    (t1.c == 3'd0),
    .last     (t1.c == 3'(N_CYC2 - 1)),
    .cand     (sum),
    .cand_en  (cen),
    .out_valid(out_valid),
    .out_feat (out_feat)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      meta_v   <= '0;
      meta_hdr <= '0;
      done     <= 1'b0;
    end else begin
      done <= out_valid_pre && (t1.v == AW'(NPOS - 1));
      if (out_valid_pre) begin
        meta_v   <= t1.v;
        meta_hdr <= hdr;
      end
    end
  end

  assign out_addr   = meta_v;
  assign out_vertex = meta_hdr.valid;
  assign out_edges  = meta_hdr.edges;
endmodule
