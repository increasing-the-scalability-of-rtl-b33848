// tb_two_step_gconv: end-to-end test of the two-step graph convolution layer
// at its default size (64x64 positions, 16 -> 64 features, two multiplier
// lanes). Three temporal channels (TCs) of random vertices are streamed in;
// each TC is written into the free input bank while the previous one is being
// processed and is then offered with tc_valid, so the hand-over stalls until
// the layer is idle. Every output word is compared with a reference computed
// here from the PointNetConv definition:
//   phi_j = requant(W x_j)
//   out_i = ReLU(max over j in {i} + N(i) of (phi_j + LUT[p_j - p_i]))
// with neighbours in the current and the previous TC. The cycle count per TC
// is checked against SIZE*SIZE*(OUT_DIM/N_MUL + 5) + 8 and against the
// 50 ms / 64 / 5 ns = 156250-cycle budget of one TC. Counted mechanisms, each
// of which must occur: stalled hand-over, input writes during processing,
// previous-TC neighbours, border edges that must be ignored, empty positions,
// negative maxima clamped by ReLU, maxima clamped at 127, saturated
// requantisation.
module tb_two_step_gconv;
  import gcn_pkg::*;
  import gcn_ref_pkg::*;

  localparam int SIZE = 64, IN_DIM = 16, OUT_DIM = 64, N_MUL = 2;
  localparam int NPOS = SIZE*SIZE, AW = $clog2(NPOS), KW = $clog2(OUT_DIM);
  localparam int VW = OUT_DIM*FEAT_W, WORD_W = 1 + N_EDGE + IN_DIM*FEAT_W;
  localparam int N_TC = 3;
  localparam int MULT = 180, SHIFT = 16;
  localparam int T_BUDGET = 50_000_000 / (SIZE * 5);
  localparam int N_CYC = NPOS * (OUT_DIM / N_MUL + 5) + 8;

  logic clk = 0, rst_n = 0;
  logic in_we = 0;
  logic [AW-1:0] in_addr = 0;
  logic [WORD_W-1:0] in_data = 0;
  logic tc_valid = 0, tc_ready;
  logic wgt_we = 0;
  logic [KW-1:0] wgt_addr = 0;
  logic [IN_DIM*WGT_W-1:0] wgt_wdata = 0;
  logic lut_we = 0;
  logic [$clog2(N_LUT)-1:0] lut_addr = 0;
  logic [VW-1:0] lut_wdata = 0;
  logic [MULT_W-1:0] rq_mult = MULT;
  logic [SHIFT_W-1:0] rq_shift = SHIFT;
  logic out_valid, out_vertex, tc_done;
  logic [AW-1:0] out_addr;
  edges_t out_edges;
  logic [VW-1:0] out_feat;

  two_step_gconv dut (.*);

  int w_m [OUT_DIM][IN_DIM];
  int lut_m [N_LUT][OUT_DIM];
  bit vld_m [N_TC][NPOS];
  edges_t edg_m [N_TC][NPOS];
  byte feat_m [N_TC][NPOS][IN_DIM];
  byte phi_m [N_TC][NPOS][OUT_DIM];
  longint t_accept [N_TC];
  longint cyc = 0;
  int checks = 0, failures = 0;
  int out_tc = 0, n_out = 0, n_done = 0;
  int c_stall = 0, c_overlap = 0, c_prev = 0, c_border = 0, c_empty = 0;
  int c_relu_neg = 0, c_clamp = 0, c_rq_sat = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL %s", s);
  endtask

  // random TC k: vertices, features, edge masks consistent with the vertices
  task automatic gen_tc(input int k);
    for (int a = 0; a < NPOS; a++) begin
      vld_m[k][a] = ($urandom_range(99) < 45);
      for (int i = 0; i < IN_DIM; i++) feat_m[k][a][i] = vld_m[k][a] ? byte'(rnd_s8()) : 8'sd0;
    end
    for (int a = 0; a < NPOS; a++) begin
      int x, y;
      x = a % SIZE; y = a / SIZE;
      edg_m[k][a] = '0;
      if (!vld_m[k][a]) continue;
      for (int n = 0; n < 9; n++) begin
        int nx, ny, b;
        nx = x + n % 3 - 1; ny = y + n / 3 - 1;
        if (nx < 0 || nx >= SIZE || ny < 0 || ny >= SIZE) continue;
        b = ny * SIZE + nx;
        if (n != 4 && vld_m[k][b] && $urandom_range(9) < 7) edg_m[k][a][n < 4 ? n : n - 1] = 1'b1;
        if (k > 0 && vld_m[k-1][b] && $urandom_range(9) < 7) edg_m[k][a][8 + n] = 1'b1;
      end
      // a few border vertices carry edges that point outside the array
      if ((x == 0 || y == SIZE - 1) && $urandom_range(3) == 0) begin
        edg_m[k][a] = edg_m[k][a] | ((k > 0) ? 17'h1ffff : 17'h000ff);
        c_border++;
      end
    end
    for (int a = 0; a < NPOS; a++)
      for (int o = 0; o < OUT_DIM; o++) begin
        longint acc;
        int r;
        acc = 0;
        for (int i = 0; i < IN_DIM; i++) acc += int'(feat_m[k][a][i]) * w_m[o][i];
        r = ref_requant(acc, MULT, SHIFT);
        if (r == 127 || r == -128) c_rq_sat++;
        phi_m[k][a][o] = byte'(r);
      end
  endtask

  task automatic write_tc(input int k);
    for (int a = 0; a < NPOS; a++) begin
      logic [WORD_W-1:0] w;
      w[WORD_W-1] = vld_m[k][a];
      w[WORD_W-2 -: N_EDGE] = edg_m[k][a];
      for (int i = 0; i < IN_DIM; i++) w[i*8 +: 8] = feat_m[k][a][i];
      @(negedge clk);
      in_we = 1; in_addr = AW'(a); in_data = w;
      if (!tc_ready) c_overlap++;
    end
    @(negedge clk) in_we = 0;
  endtask

  task automatic offer_tc(input int k);
    @(negedge clk) tc_valid = 1;
    @(posedge clk);
    while (!tc_ready) begin c_stall++; @(posedge clk); end
    #1 t_accept[k] = cyc;
    @(negedge clk) tc_valid = 0;
  endtask

  function automatic int expect_elem(input int k, input int a, input int o);
    int x, y, mx;
    x = a % SIZE; y = a / SIZE;
    mx = -1000;
    for (int pr = 0; pr < 2; pr++)
      for (int n = 0; n < 9; n++) begin
        int nx, ny, v;
        bit use_it;
        nx = x + n % 3 - 1; ny = y + n / 3 - 1;
        if (nx < 0 || nx >= SIZE || ny < 0 || ny >= SIZE) continue;
        use_it = (pr == 0) ? (n == 4 || edg_m[k][a][n < 4 ? n : n - 1]) : edg_m[k][a][8 + n];
        if (!use_it) continue;
        v = int'(phi_m[pr == 0 ? k : k - 1][ny*SIZE + nx][o]) + lut_m[pr*9 + n][o];
        if (mx < v) mx = v;
      end
    if (o == 0 && mx < 0) c_relu_neg++;
    if (o == 0 && mx > 127) c_clamp++;
    return ref_relu(mx);
  endfunction

  // output monitor
  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks += 2;
      if (int'(out_addr) != n_out) fail($sformatf("order TC %0d: %0d vs %0d", out_tc, out_addr, n_out));
      if (out_vertex != vld_m[out_tc][n_out] || out_edges != edg_m[out_tc][n_out])
        fail($sformatf("vertex/edges TC %0d pos %0d", out_tc, n_out));
      if (!vld_m[out_tc][n_out]) begin
        c_empty++;
        checks++;
        if (out_feat != '0) fail($sformatf("empty pos %0d not zero", n_out));
      end else begin
        if (out_tc > 0 && edg_m[out_tc][n_out][16:8] != '0) c_prev++;
        for (int o = 0; o < OUT_DIM; o++) begin
          int e;
          e = expect_elem(out_tc, n_out, o);
          checks++;
          if (int'(out_feat[o*8 +: 8]) != e)
            fail($sformatf("TC %0d pos %0d elem %0d got %0d exp %0d", out_tc, n_out, o,
                           out_feat[o*8 +: 8], e));
        end
      end
      n_out++;
    end
    if (rst_n && tc_done) begin
      longint took;
      took = cyc - t_accept[out_tc];
      checks += 3;
      if (took != N_CYC) fail($sformatf("TC %0d took %0d cycles, expected %0d", out_tc, took, N_CYC));
      if (took > T_BUDGET) fail($sformatf("TC %0d over the %0d-cycle budget", out_tc, T_BUDGET));
      if (n_out != NPOS) fail($sformatf("TC %0d gave %0d outputs", out_tc, n_out));
      $display("TC %0d done in %0d cycles (budget %0d)", out_tc, took, T_BUDGET);
      out_tc++;
      n_out = 0;
      n_done++;
    end
  end

  initial begin
    repeat (N_TC * (N_CYC + 3 * NPOS) + 50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < OUT_DIM; o++) begin
      @(negedge clk);
      wgt_we = 1; wgt_addr = KW'(o);
      for (int i = 0; i < IN_DIM; i++) begin
        w_m[o][i] = rnd_s8();
        wgt_wdata[i*8 +: 8] = 8'(w_m[o][i]);
      end
    end
    @(negedge clk) wgt_we = 0;
    for (int e = 0; e < N_LUT; e++) begin
      @(negedge clk);
      lut_we = 1; lut_addr = 5'(e);
      for (int o = 0; o < OUT_DIM; o++) begin
        lut_m[e][o] = (e == 4) ? 0 : int'($urandom_range(128)) - 64;
        lut_wdata[o*8 +: 8] = 8'(lut_m[e][o]);
      end
    end
    @(negedge clk) lut_we = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < N_TC; k++) begin
      gen_tc(k);
      write_tc(k);
      offer_tc(k);
    end
    while (n_done < N_TC) @(posedge clk);
    repeat (5) @(posedge clk);
    checks += 8;
    if (c_stall == 0)    fail("no stalled hand-over");
    if (c_overlap == 0)  fail("no input write during processing");
    if (c_prev == 0)     fail("no previous-TC neighbour");
    if (c_border == 0)   fail("no border edge");
    if (c_empty == 0)    fail("no empty position");
    if (c_relu_neg == 0) fail("no negative maximum");
    if (c_clamp == 0)    fail("no maximum above 127");
    if (c_rq_sat == 0)   fail("no saturated requantisation");
    $display("stall cycles %0d, overlapped writes %0d, prev-TC vertices %0d, border vertices %0d,",
             c_stall, c_overlap, c_prev, c_border);
    $display("empty positions %0d, ReLU-clamped %0d, 127-clamped %0d, saturated phi %0d",
             c_empty, c_relu_neg, c_clamp, c_rq_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
