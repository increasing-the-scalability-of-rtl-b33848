// tb_max_relu: feeds vertices of five candidate groups (as step 2 does) with
// random enables, back to back, and checks the clamped ReLU of the
// element-wise maximum one cycle after the last group. Covers negative
// maxima, values above 127 and vertices with no enabled candidate.
module tb_max_relu;
  import gcn_pkg::*;
  import gcn_ref_pkg::*;

  localparam int OUT_DIM = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, last = 0;
  logic [N_PORT-1:0][OUT_DIM*SUM_W-1:0] cand;
  logic [N_PORT-1:0] cand_en;
  logic out_valid;
  logic [OUT_DIM*FEAT_W-1:0] out_feat;
  int checks = 0, failures = 0, n_out = 0;
  int expq [$][OUT_DIM];

  max_relu #(.OUT_DIM(OUT_DIM)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      n_out++;
      for (int k = 0; k < OUT_DIM; k++) begin
        checks++;
        if (int'(out_feat[k*8 +: 8]) != expq[0][k]) begin
          failures++;
          $display("FAIL k=%0d got %0d exp %0d", k, out_feat[k*8 +: 8], expq[0][k]);
        end
      end
      void'(expq.pop_front());
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 300; v++) begin
      int mx [OUT_DIM];
      int e  [OUT_DIM];
      bit any;
      any = 0;
      for (int k = 0; k < OUT_DIM; k++) mx[k] = -100000;
      for (int c = 0; c < 5; c++) begin
        @(negedge clk);
        in_valid = 1; first = (c == 0); last = (c == 4);
        for (int p = 0; p < N_PORT; p++) begin
          cand_en[p] = (v % 7 == 3) ? 1'b0 : 1'($urandom_range(1));
          for (int k = 0; k < OUT_DIM; k++) begin
            int val;
            val = int'($urandom_range(511)) - 256;
            if (v % 5 == 1) val = -int'($urandom_range(200)) - 1;
            cand[p][k*SUM_W +: SUM_W] = 9'(val);
            if (cand_en[p] && val > mx[k]) mx[k] = val;
          end
          if (cand_en[p]) any = 1;
        end
      end
      for (int k = 0; k < OUT_DIM; k++) e[k] = any ? ref_relu(mx[k]) : 0;
      expq.push_back(e);
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (n_out != 300) begin failures++; $display("FAIL %0d outputs", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
