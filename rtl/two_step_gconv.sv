// two_step_gconv: one synchronous PointNetConv graph-convolution layer of an
// event-camera GCNN, computed in two steps to avoid multiplying the same
// input vector once per edge.
//
//   step 1 (step1_self): phi(x_j) = requant(W x_j) for all SIZE x SIZE
//           positions of the incoming temporal channel (TC), written to the
//           feature buffer of the current TC.
//   step 2 (step2_gather): for each vertex i, out_i = ReLU(max over j of
//           (phi(x_j) + LUT[p_j - p_i])), j running over the vertex itself and
//           its neighbours with an edge, 8 in the current TC and 9 in the
//           previous TC, read from the current and previous buffers.
//
// Two fmap_buffer instances alternate as current / previous buffer: the
// buffer written for TC k is the previous buffer while TC k+1 is processed.
// The input TC memory (tc_input_ram) has two banks: the upstream layer writes
// the next TC through in_we/in_addr/in_data into the free bank at any time
// and hands it over with tc_valid; it is accepted (tc_valid && tc_ready) when
// the layer is idle, otherwise the upstream is stalled. tc_valid must stay
// high until accepted. A TC takes
//   SIZE*SIZE*(OUT_DIM/N_MUL) + 5*SIZE*SIZE + 8 cycles
// from acceptance to tc_done, against the paper's SIZE*SIZE*(OUT_DIM+5) for
// one multiplier. The output is a raster stream, one word per position
// (out_valid, out_addr = y*SIZE + x, out_vertex, out_edges, out_feat).
// in_data layout: [WORD_W-1] valid, [WORD_W-2 -: 17] edge mask (see gcn_pkg),
// [IN_DIM*8-1:0] features, element i at [i*8 +: 8].
// Layer parameters: weight columns (wgt_*), the 18-entry position LUT
// (lut_*) and the requantisation multiplier/shift (rq_*), loaded while idle.
// The previous-TC buffer holds no valid data before the first TC, so the
// first TC after reset must carry no previous-TC edges.
// The two-step structure, the buffers, the 5-cycle gather and the LUT follow
// the paper; the hand-over protocol, bank scheme and encodings are this
// design's own.
module two_step_gconv
  import gcn_pkg::*;
#(
  parameter int unsigned  SIZE           = 64,
  parameter int unsigned  IN_DIM         = 16,
  parameter int unsigned  OUT_DIM        = 64,
  parameter int unsigned  N_MUL          = 2,
  parameter longint unsigned TIME_WINDOW_NS = 50_000_000,
  parameter int unsigned  NS_PER_CLK     = 5,
  localparam int unsigned AW             = $clog2(SIZE*SIZE),
  localparam int unsigned KW             = (OUT_DIM > 1) ? $clog2(OUT_DIM) : 1,
  localparam int unsigned WORD_W         = 1 + N_EDGE + IN_DIM*FEAT_W,
  localparam int unsigned VW             = OUT_DIM*FEAT_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // TC input from the upstream layer
  input  logic                      in_we,
  input  logic [AW-1:0]             in_addr,
  input  logic [WORD_W-1:0]         in_data,
  input  logic                      tc_valid,
  output logic                      tc_ready,
  // layer parameters
  input  logic                      wgt_we,
  input  logic [KW-1:0]             wgt_addr,
  input  logic [IN_DIM*WGT_W-1:0]   wgt_wdata,
  input  logic                      lut_we,
  input  logic [$clog2(N_LUT)-1:0]  lut_addr,
  input  logic [VW-1:0]             lut_wdata,
  input  logic [MULT_W-1:0]         rq_mult,
  input  logic [SHIFT_W-1:0]        rq_shift,
  // output TC stream
  output logic                      out_valid,
  output logic [AW-1:0]             out_addr,
  output logic                      out_vertex,
  output edges_t                    out_edges,
  output logic [VW-1:0]             out_feat,
  output logic                      tc_done
);
  // cycles per TC: required (paper Eq. 3) and spent by this layer
  localparam longint unsigned T_CC = TIME_WINDOW_NS / (longint'(SIZE) * NS_PER_CLK);
  localparam int unsigned     PER_POS = OUT_DIM / N_MUL + N_CYC2;
  localparam longint unsigned N_CC = longint'(SIZE) * longint'(SIZE) * longint'(PER_POS) + 64'd8;

  initial begin
    if (N_CC > T_CC)
      $warning("two_step_gconv: %0d cycles per TC exceed the %0d available; raise N_MUL", N_CC, T_CC);
  end

  typedef enum logic [1:0] {S_IDLE, S_STEP1, S_STEP2} state_t;
  state_t state;
  logic   proc_bank;   // input bank being processed
  logic   cur_sel;     // feature buffer holding the current TC
  logic   start1, start2;

  // ---------------- controller ----------------
  logic s1_busy, s1_done, s2_busy, s2_done;

  assign tc_ready = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      proc_bank <= 1'b1;
      cur_sel   <= 1'b1;
      start1    <= 1'b0;
      start2    <= 1'b0;
      tc_done   <= 1'b0;
    end else begin
      start1  <= 1'b0;
      start2  <= 1'b0;
      tc_done <= 1'b0;
      unique case (state)
        S_IDLE:  if (tc_valid) begin
                   proc_bank <= ~proc_bank;
                   cur_sel   <= ~cur_sel;
                   start1    <= 1'b1;
                   state     <= S_STEP1;
                 end
        S_STEP1: if (s1_done) begin
                   start2 <= 1'b1;
                   state  <= S_STEP2;
                 end
        S_STEP2: if (s2_done) begin
                   tc_done <= 1'b1;
                   state   <= S_IDLE;
                 end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- input TC memory ----------------
  logic              ram_rd_en;
  logic [AW-1:0]     ram_rd_addr;
  logic [WORD_W-1:0] ram_rd_data;
  logic              s1_rd_en, s2_rd_en;
  logic [AW-1:0]     s1_rd_addr, s2_rd_addr;

  assign ram_rd_en   = (state == S_STEP1) ? s1_rd_en   : s2_rd_en;
  assign ram_rd_addr = (state == S_STEP1) ? s1_rd_addr : s2_rd_addr;

  tc_input_ram #(.SIZE(SIZE), .WORD_W(WORD_W)) u_in_ram (
    .clk,
    .wr_en  (in_we),
    .wr_bank(~proc_bank),
    .wr_addr(in_addr),
    .wr_data(in_data),
    .rd_en  (ram_rd_en),
    .rd_bank(proc_bank),
    .rd_addr(ram_rd_addr),
    .rd_data(ram_rd_data)
  );

  // ---------------- step 1 ----------------
  logic          s1_we;
  logic [AW-1:0] s1_waddr;
  logic [VW-1:0] s1_wdata;

  step1_self #(.SIZE(SIZE), .IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM), .N_MUL(N_MUL)) u_step1 (
    .clk, .rst_n,
    .start    (start1),
    .busy     (s1_busy),
    .done     (s1_done),
    .rd_en    (s1_rd_en),
    .rd_addr  (s1_rd_addr),
    .rd_feat  (ram_rd_data[IN_DIM*FEAT_W-1:0]),
    .wgt_we, .wgt_addr, .wgt_wdata, .rq_mult, .rq_shift,
    .buf_we   (s1_we),
    .buf_addr (s1_waddr),
    .buf_wdata(s1_wdata)
  );

  // ---------------- feature buffers ----------------
  logic          s2_buf_en;
  logic [AW-1:0] s2_a_addr, s2_b_addr;
  logic [VW-1:0] a_rdata [2];
  logic [VW-1:0] b_rdata [2];

  for (genvar i = 0; i < 2; i++) begin : g_buf
    logic is_wr;
    assign is_wr = (state == S_STEP1) && (cur_sel == 1'(i));
    fmap_buffer #(.SIZE(SIZE), .WORD_W(VW)) u_buf (
      .clk,
      .a_en   (is_wr ? s1_we    : s2_buf_en),
      .a_we   (is_wr && s1_we),
      .a_addr (is_wr ? s1_waddr : s2_a_addr),
      .a_wdata(s1_wdata),
      .a_rdata(a_rdata[i]),
      .b_en   (s2_buf_en),
      .b_addr (s2_b_addr),
      .b_rdata(b_rdata[i])
    );
  end

  // ---------------- step 2 ----------------
  step2_gather #(.SIZE(SIZE), .OUT_DIM(OUT_DIM)) u_step2 (
    .clk, .rst_n,
    .start      (start2),
    .busy       (s2_busy),
    .done       (s2_done),
    .v_rd_en    (s2_rd_en),
    .v_addr     (s2_rd_addr),
    .v_hdr      (vhdr_t'(ram_rd_data[WORD_W-1 -: 1+N_EDGE])),
    .rd_en      (s2_buf_en),
    .a_addr     (s2_a_addr),
    .b_addr     (s2_b_addr),
    .cur_a_rdata(a_rdata[cur_sel]),
    .cur_b_rdata(b_rdata[cur_sel]),
    .prv_a_rdata(a_rdata[~cur_sel]),
    .prv_b_rdata(b_rdata[~cur_sel]),
    .lut_we, .lut_addr, .lut_wdata,
    .out_valid, .out_addr, .out_vertex, .out_edges, .out_feat
  );

  // ---------------- protocol checks ----------------
  a_tc_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              tc_valid && !tc_ready |=> tc_valid)
    else $error("tc_valid dropped before it was accepted");
  a_one_step: assert property (@(posedge clk) disable iff (!rst_n)
                               !(s1_busy && s2_busy))
    else $error("step 1 and step 2 active together");
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               (wgt_we || lut_we) |-> state == S_IDLE)
    else $error("layer parameters written while a TC is processed");
endmodule
