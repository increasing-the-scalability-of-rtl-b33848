// tb_step2_gather: step 2 on a small TC (8x8 positions, 8 output features).
// The testbench plays the input TC memory (valid bit and edge mask) and the
// current and previous feature buffers, all with one-cycle read latency,
// loads a random position LUT and checks every output word against
//   ReLU(max over self and neighbours with an edge of (phi_j + LUT[dj]))
// computed directly from the 3x3x2 neighbourhood. Edge bits pointing outside
// the array are set on purpose at the border and must be ignored. Also checks
// the raster order of the outputs and the 5*SIZE*SIZE + 1 cycle count.
module tb_step2_gather;
  import gcn_pkg::*;
  import gcn_ref_pkg::*;

  localparam int SIZE = 8, OUT_DIM = 8, NPOS = SIZE*SIZE;
  localparam int AW = $clog2(NPOS), VW = OUT_DIM*FEAT_W;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic v_rd_en;
  logic [AW-1:0] v_addr;
  vhdr_t v_hdr;
  logic rd_en;
  logic [AW-1:0] a_addr, b_addr;
  logic [VW-1:0] cur_a_rdata, cur_b_rdata, prv_a_rdata, prv_b_rdata;
  logic lut_we = 0;
  logic [$clog2(N_LUT)-1:0] lut_addr = 0;
  logic [VW-1:0] lut_wdata = 0;
  logic out_valid, out_vertex;
  logic [AW-1:0] out_addr;
  edges_t out_edges;
  logic [VW-1:0] out_feat;

  int cur_m [NPOS][OUT_DIM];
  int prv_m [NPOS][OUT_DIM];
  int lut_m [N_LUT][OUT_DIM];
  bit vld_m [NPOS];
  edges_t edg_m [NPOS];
  int checks = 0, failures = 0, n_out = 0, n_border = 0;

  step2_gather #(.SIZE(SIZE), .OUT_DIM(OUT_DIM)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [VW-1:0] pack(input int m [OUT_DIM]);
    logic [VW-1:0] r;
    for (int k = 0; k < OUT_DIM; k++) r[k*8 +: 8] = 8'(m[k]);
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (v_rd_en) v_hdr <= '{valid: vld_m[v_addr], edges: edg_m[v_addr]};
    if (rd_en) begin
      cur_a_rdata <= pack(cur_m[a_addr]);
      cur_b_rdata <= pack(cur_m[b_addr]);
      prv_a_rdata <= pack(prv_m[a_addr]);
      prv_b_rdata <= pack(prv_m[b_addr]);
    end
  end

  // expected output of position a
  function automatic void expect_pos(input int a, output int e [OUT_DIM]);
    int x, y;
    x = a % SIZE; y = a / SIZE;
    for (int k = 0; k < OUT_DIM; k++) begin
      int mx;
      bit any;
      mx = -1000; any = 0;
      if (vld_m[a])
        for (int pr = 0; pr < 2; pr++)
          for (int dy = -1; dy <= 1; dy++)
            for (int dx = -1; dx <= 1; dx++) begin
              int nx, ny, n, bitn, val;
              bit use_it;
              nx = x + dx; ny = y + dy; n = (dy + 1) * 3 + (dx + 1);
              if (nx < 0 || nx >= SIZE || ny < 0 || ny >= SIZE) continue;
              if (pr == 0 && n == 4) use_it = 1;
              else begin
                bitn = (pr == 1) ? 8 + n : (n < 4 ? n : n - 1);
                use_it = edg_m[a][bitn];
              end
              if (!use_it) continue;
              val = ((pr == 0) ? cur_m[ny*SIZE+nx][k] : prv_m[ny*SIZE+nx][k]) + lut_m[pr*9+n][k];
              any = 1;
              if (val > mx) mx = val;
            end
      e[k] = any ? ref_relu(mx) : 0;
    end
  endfunction

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      int e [OUT_DIM];
      checks += 3;
      if (int'(out_addr) != n_out) begin failures++; $display("FAIL order %0d vs %0d", out_addr, n_out); end
      if (out_vertex != vld_m[n_out]) begin failures++; $display("FAIL vertex flag %0d", n_out); end
      if (out_edges != edg_m[n_out]) begin failures++; $display("FAIL edges %0d", n_out); end
      expect_pos(n_out, e);
      for (int k = 0; k < OUT_DIM; k++) begin
        checks++;
        if (int'(out_feat[k*8 +: 8]) != e[k]) begin
          failures++;
          if (failures < 10) $display("FAIL pos %0d k %0d got %0d exp %0d", n_out, k, out_feat[k*8 +: 8], e[k]);
        end
      end
      n_out++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < N_LUT; e++) begin
      @(negedge clk);
      lut_we = 1; lut_addr = 5'(e);
      for (int k = 0; k < OUT_DIM; k++) begin
        lut_m[e][k] = (e == 4) ? 0 : rnd_s8();
        lut_wdata[k*8 +: 8] = 8'(lut_m[e][k]);
      end
    end
    @(negedge clk) lut_we = 0;
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      int cyc;
      n_out = 0;
      for (int a = 0; a < NPOS; a++) begin
        int x, y;
        x = a % SIZE; y = a / SIZE;
        vld_m[a] = ($urandom_range(3) != 0);
        edg_m[a] = N_EDGE'($urandom);
        if (x == 0 || y == SIZE-1) begin edg_m[a] = '1; n_border++; end
        for (int k = 0; k < OUT_DIM; k++) begin
          cur_m[a][k] = rnd_s8() + ((run == 1) ? 60 : 0);
          if (cur_m[a][k] > 127) cur_m[a][k] = 127;
          prv_m[a][k] = rnd_s8();
        end
      end
      @(negedge clk) start = 1;
      @(posedge clk);
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); #1; if (!done) cyc++; end
      checks += 2;
      if (cyc != 5*NPOS + 1) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, 5*NPOS+1); end
      if (n_out != NPOS) begin failures++; $display("FAIL outputs %0d", n_out); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
