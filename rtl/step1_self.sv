// step1_self: first step of the two-step graph convolution. For every one of
// the SIZE x SIZE positions of the input TC it computes the linear layer on
// the vertex's own features only (the self-loop, without the position
// difference), requantises it, and writes the OUT_DIM-element vector into the
// current feature buffer.
//
// N_MUL vec_mul units work in parallel; a vertex takes G = OUT_DIM/N_MUL
// cycles, lane l producing element g*N_MUL + l in cycle g. The input RAM is
// read every cycle (the same vertex G times), so a TC takes SIZE*SIZE*G
// cycles plus the pipeline (issue, RAM read, accumulate, requantise,
// registered buffer write): `done` comes SIZE*SIZE*G + 3 cycles after the
// clock edge that takes `start`. Empty positions are computed too, which
// keeps the cycle count fixed, as in the paper's cycle formula.
// Weight columns are loaded through wgt_we/wgt_addr/wgt_wdata (column k is
// output element k); `start` is accepted when not busy, `done` pulses with
// the last buffer write. The lane split and the weight loading are this
// design's choices.
module step1_self
  import gcn_pkg::*;
#(
  parameter int unsigned SIZE    = 64,
  parameter int unsigned IN_DIM  = 16,
  parameter int unsigned OUT_DIM = 64,
  parameter int unsigned N_MUL   = 2,
  localparam int unsigned AW     = $clog2(SIZE*SIZE),
  localparam int unsigned KW     = (OUT_DIM > 1) ? $clog2(OUT_DIM) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // input TC read port (1 cycle latency)
  output logic                       rd_en,
  output logic [AW-1:0]              rd_addr,
  input  logic [IN_DIM*FEAT_W-1:0]   rd_feat,
  // weight load
  input  logic                       wgt_we,
  input  logic [KW-1:0]              wgt_addr,
  input  logic [IN_DIM*WGT_W-1:0]    wgt_wdata,
  input  logic [MULT_W-1:0]          rq_mult,
  input  logic [SHIFT_W-1:0]         rq_shift,
  // current feature buffer write port
  output logic                       buf_we,
  output logic [AW-1:0]              buf_addr,
  output logic [OUT_DIM*FEAT_W-1:0]  buf_wdata
);
  localparam int unsigned G    = OUT_DIM / N_MUL;
  localparam int unsigned GW   = (G > 1) ? $clog2(G) : 1;
  localparam int unsigned NPOS = SIZE * SIZE;

  typedef struct packed {
    logic          valid;
    logic [AW-1:0] v;
    logic [GW-1:0] g;
  } tag_t;

  logic [IN_DIM*WGT_W-1:0] wmem [OUT_DIM];
  logic [IN_DIM*WGT_W-1:0] wsel [N_MUL];
  logic                    run;
  logic [AW-1:0]           v_cnt;
  logic [GW-1:0]           g_cnt;
  tag_t                    t1, t2, t3;
  feat_t                   q [N_MUL];
  logic [OUT_DIM*FEAT_W-1:0] vec_q, vec_d;

  initial begin
    assert (OUT_DIM % N_MUL == 0) else $error("OUT_DIM must be a multiple of N_MUL");
  end

  always_ff @(posedge clk)
    if (wgt_we) wmem[wgt_addr] <= wgt_wdata;

  assign busy    = run | t1.valid | t2.valid | t3.valid | buf_we;
  assign rd_en   = run;
  assign rd_addr = v_cnt;

  // issue stage: sequence positions and weight groups
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run   <= 1'b0;
      v_cnt <= '0;
      g_cnt <= '0;
      t1    <= '0;
    end else begin
      t1 <= '{valid: run, v: v_cnt, g: g_cnt};
      if (!busy && start) begin
        run   <= 1'b1;
        v_cnt <= '0;
        g_cnt <= '0;
      end else if (run) begin
        if (g_cnt == GW'(G - 1)) begin
          g_cnt <= '0;
          v_cnt <= v_cnt + 1'b1;
          if (v_cnt == AW'(NPOS - 1)) run <= 1'b0;
        end else begin
          g_cnt <= g_cnt + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk)
    for (int l = 0; l < int'(N_MUL); l++)
      wsel[l] <= wmem[int'(g_cnt) * int'(N_MUL) + l];

  for (genvar l = 0; l < int'(N_MUL); l++) begin : g_lane
    vec_mul #(.IN_DIM(IN_DIM)) u_mul (
      .clk, .en(1'b1), .feat(rd_feat), .wcol(wsel[l]),
      .rq_mult, .rq_shift, .q(q[l])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      t2 <= '0;
      t3 <= '0;
    end else begin
      t2 <= t1;
      t3 <= t2;
    end
  end

  // assemble the output vector from the lanes
  always_comb begin
    vec_d = vec_q;
    for (int l = 0; l < int'(N_MUL); l++)
      vec_d[(int'(t3.g) * int'(N_MUL) + l) * FEAT_W +: FEAT_W] = q[l];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vec_q     <= '0;
      buf_we    <= 1'b0;
      buf_addr  <= '0;
      buf_wdata <= '0;
      done      <= 1'b0;
    end else begin
      buf_we <= t3.valid && (t3.g == GW'(G - 1));
      done   <= t3.valid && (t3.g == GW'(G - 1)) && (t3.v == AW'(NPOS - 1));
      if (t3.valid) begin
        vec_q     <= vec_d;
        buf_addr  <= t3.v;
        buf_wdata <= vec_d;
      end
    end
  end
endmodule
