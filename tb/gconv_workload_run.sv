// gconv_workload_run: testbench building block that runs N_TC random temporal
// channels through one two_step_gconv instance of a given configuration and
// checks every output word against the PointNetConv reference, the cycle
// count SIZE*SIZE*(OUT_DIM/N_MUL + 5) + 8 per TC and the per-TC budget
// TIME_WINDOW_NS / (SIZE * 5 ns). Reports through finished/checks/failures;
// the instantiating testbench prints the result.
module gconv_workload_run
  import gcn_pkg::*;
  import gcn_ref_pkg::*;
#(
  parameter int     SIZE = 32,
  parameter int     IN_DIM = 16,
  parameter int     OUT_DIM = 32,
  parameter int     N_MUL = 1,
  parameter longint TIME_WINDOW_NS = 100_000_000,
  parameter int     N_TC = 2,
  parameter string  NAME = "workload"
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int NPOS = SIZE*SIZE, AW = $clog2(NPOS), KW = $clog2(OUT_DIM);
  localparam int VW = OUT_DIM*FEAT_W, WORD_W = 1 + N_EDGE + IN_DIM*FEAT_W;
  localparam int MULT = 180, SHIFT = 16;
  localparam longint T_BUDGET = TIME_WINDOW_NS / (SIZE * 5);
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

  two_step_gconv #(.SIZE(SIZE), .IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM), .N_MUL(N_MUL),
                   .TIME_WINDOW_NS(TIME_WINDOW_NS)) dut (.*);

  int w_m [OUT_DIM][IN_DIM];
  int lut_m [N_LUT][OUT_DIM];
  bit vld_m [N_TC][NPOS];
  edges_t edg_m [N_TC][NPOS];
  byte feat_m [N_TC][NPOS][IN_DIM];
  byte phi_m [N_TC][NPOS][OUT_DIM];
  longint t_accept [N_TC];
  longint cyc = 0;
  int out_tc = 0, n_out = 0, n_done = 0;

  initial begin finished = 0; checks = 0; failures = 0; end

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic fail(input string s);
    failures++;
    if (failures < 10) $display("FAIL %s: %s", NAME, s);
  endtask

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
    end
    for (int a = 0; a < NPOS; a++)
      for (int o = 0; o < OUT_DIM; o++) begin
        longint acc;
        acc = 0;
        for (int i = 0; i < IN_DIM; i++) acc += int'(feat_m[k][a][i]) * w_m[o][i];
        phi_m[k][a][o] = byte'(ref_requant(acc, MULT, SHIFT));
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
    end
    @(negedge clk) in_we = 0;
  endtask

  task automatic offer_tc(input int k);
    @(negedge clk) tc_valid = 1;
    @(posedge clk);
    while (!tc_ready) @(posedge clk);
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
    return ref_relu(mx);
  endfunction

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      if (int'(out_addr) != n_out || out_vertex != vld_m[out_tc][n_out])
        fail($sformatf("order/vertex TC %0d pos %0d", out_tc, n_out));
      for (int o = 0; o < OUT_DIM; o++) begin
        int e;
        e = vld_m[out_tc][n_out] ? expect_elem(out_tc, n_out, o) : 0;
        checks++;
        if (int'(out_feat[o*8 +: 8]) != e)
          fail($sformatf("TC %0d pos %0d elem %0d got %0d exp %0d", out_tc, n_out, o,
                         out_feat[o*8 +: 8], e));
      end
      n_out++;
    end
    if (rst_n && tc_done) begin
      longint took;
      took = cyc - t_accept[out_tc];
      checks += 3;
      if (took != N_CYC) fail($sformatf("TC %0d took %0d cycles, expected %0d", out_tc, took, N_CYC));
      if (took > T_BUDGET) fail($sformatf("TC %0d took %0d cycles, over the %0d budget", out_tc, took, T_BUDGET));
      if (n_out != NPOS) fail($sformatf("TC %0d gave %0d outputs", out_tc, n_out));
      $display("%s: TC %0d done in %0d cycles, budget %0d", NAME, out_tc, took, T_BUDGET);
      out_tc++;
      n_out = 0;
      n_done++;
    end
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
    repeat (3) @(posedge clk);
    finished = 1;
  end
endmodule
