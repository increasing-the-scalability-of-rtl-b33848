// tb_delta_append: loads a random position LUT, then applies random feature
// vectors and LUT indices on all four ports and checks every 9-bit sum.
module tb_delta_append;
  import gcn_pkg::*;
  import gcn_ref_pkg::*;

  localparam int OUT_DIM = 8;
  logic clk = 0;
  logic lut_we = 0;
  logic [$clog2(N_LUT)-1:0] lut_addr = 0;
  logic [OUT_DIM*FEAT_W-1:0] lut_wdata = 0;
  logic [N_PORT-1:0][OUT_DIM*FEAT_W-1:0] feat;
  logic [N_PORT-1:0][$clog2(N_LUT)-1:0]  idx;
  logic [N_PORT-1:0][OUT_DIM*SUM_W-1:0]  sum;
  int lut_m [N_LUT][OUT_DIM];
  int checks = 0, failures = 0;

  delta_append #(.OUT_DIM(OUT_DIM)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < N_LUT; e++) begin
      @(negedge clk);
      lut_we = 1; lut_addr = 5'(e);
      for (int k = 0; k < OUT_DIM; k++) begin
        lut_m[e][k] = rnd_s8();
        lut_wdata[k*8 +: 8] = 8'(lut_m[e][k]);
      end
    end
    @(negedge clk) lut_we = 0;
    for (int t = 0; t < 300; t++) begin
      int fm [N_PORT][OUT_DIM];
      int ix [N_PORT];
      for (int p = 0; p < N_PORT; p++) begin
        ix[p] = int'($urandom_range(N_LUT-1));
        idx[p] = 5'(ix[p]);
        for (int k = 0; k < OUT_DIM; k++) begin
          fm[p][k] = (t < 4) ? 127 : rnd_s8();
          feat[p][k*8 +: 8] = 8'(fm[p][k]);
        end
      end
      #1;
      for (int p = 0; p < N_PORT; p++)
        for (int k = 0; k < OUT_DIM; k++) begin
          checks++;
          if (int'($signed(sum[p][k*SUM_W +: SUM_W])) != fm[p][k] + lut_m[ix[p]][k]) begin
            failures++;
            $display("FAIL t=%0d p=%0d k=%0d", t, p, k);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
