// tb_step1_self: step 1 on a small TC (8x8 positions, 4 -> 8 features, two
// lanes). The testbench plays the input TC memory (one-cycle read latency)
// and the feature buffer, loads random weights, runs step 1 twice and checks
// every buffer word against requant(W x), that every position is written
// exactly once, and the cycle count SIZE*SIZE*OUT_DIM/N_MUL + 3.
module tb_step1_self;
  import gcn_pkg::*;
  import gcn_ref_pkg::*;

  localparam int SIZE = 8, IN_DIM = 4, OUT_DIM = 8, N_MUL = 2;
  localparam int AW = $clog2(SIZE*SIZE), KW = $clog2(OUT_DIM), NPOS = SIZE*SIZE;
  localparam int MULT = 300, SHIFT = 9;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic rd_en;
  logic [AW-1:0] rd_addr;
  logic [IN_DIM*FEAT_W-1:0] rd_feat;
  logic wgt_we = 0;
  logic [KW-1:0] wgt_addr = 0;
  logic [IN_DIM*WGT_W-1:0] wgt_wdata = 0;
  logic [MULT_W-1:0] rq_mult = MULT;
  logic [SHIFT_W-1:0] rq_shift = SHIFT;
  logic buf_we;
  logic [AW-1:0] buf_addr;
  logic [OUT_DIM*FEAT_W-1:0] buf_wdata;

  int feat_m [NPOS][IN_DIM];
  int w_m [OUT_DIM][IN_DIM];
  logic [OUT_DIM*FEAT_W-1:0] bufm [NPOS];
  int nwr [NPOS];
  int checks = 0, failures = 0;

  step1_self #(.SIZE(SIZE), .IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM), .N_MUL(N_MUL)) dut (.*);

  always #5 clk = ~clk;

  // input TC memory model
  always_ff @(posedge clk)
    if (rd_en)
      for (int i = 0; i < IN_DIM; i++) rd_feat[i*8 +: 8] <= 8'(feat_m[rd_addr][i]);

  // feature buffer model
  always_ff @(posedge clk)
    if (buf_we) begin
      bufm[buf_addr] <= buf_wdata;
      nwr[buf_addr]  <= nwr[buf_addr] + 1;
    end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < OUT_DIM; k++) begin
      @(negedge clk);
      wgt_we = 1; wgt_addr = KW'(k);
      for (int i = 0; i < IN_DIM; i++) begin
        w_m[k][i] = rnd_s8();
        wgt_wdata[i*8 +: 8] = 8'(w_m[k][i]);
      end
    end
    @(negedge clk) wgt_we = 0;
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      int cyc;
      for (int a = 0; a < NPOS; a++) begin
        nwr[a] = 0;
        for (int i = 0; i < IN_DIM; i++) feat_m[a][i] = rnd_s8();
      end
      @(negedge clk) start = 1;
      @(posedge clk);
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); #1; if (!done) cyc++; end
      checks++;
      if (cyc != NPOS*OUT_DIM/N_MUL + 3) begin
        failures++;
        $display("FAIL cycles %0d exp %0d", cyc, NPOS*OUT_DIM/N_MUL + 3);
      end
      @(posedge clk); #1;
      for (int a = 0; a < NPOS; a++) begin
        checks++;
        if (nwr[a] != 1) begin failures++; $display("FAIL addr %0d written %0d times", a, nwr[a]); end
        for (int k = 0; k < OUT_DIM; k++) begin
          longint acc;
          int e;
          acc = 0;
          for (int i = 0; i < IN_DIM; i++) acc += feat_m[a][i] * w_m[k][i];
          e = ref_requant(acc, MULT, SHIFT);
          checks++;
          if (int'($signed(bufm[a][k*8 +: 8])) != e) begin
            failures++;
            if (failures < 10) $display("FAIL run %0d addr %0d k %0d got %0d exp %0d",
                                        run, a, k, $signed(bufm[a][k*8 +: 8]), e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
