// tb_vec_mul: streams a new random feature vector and weight column into the
// vector multiplication unit every cycle and checks that each result appears
// exactly after the second clock edge and equals the requantised dot product.
module tb_vec_mul;
  import gcn_pkg::*;
  import gcn_ref_pkg::*;

  localparam int IN_DIM = 16;
  logic clk = 0;
  logic [IN_DIM*FEAT_W-1:0] feat;
  logic [IN_DIM*WGT_W-1:0]  wcol;
  logic [MULT_W-1:0]        rq_mult;
  logic [SHIFT_W-1:0]       rq_shift;
  feat_t q;
  int checks = 0, failures = 0;
  int expq [$];

  vec_mul #(.IN_DIM(IN_DIM)) dut (.clk, .en(1'b1), .feat, .wcol, .rq_mult, .rq_shift, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rq_mult  = 16'd181;
    rq_shift = 5'd15;
    for (int t = 0; t < 1000; t++) begin
      longint acc;
      acc = 0;
      for (int i = 0; i < IN_DIM; i++) begin
        int f, w;
        f = rnd_s8(); w = rnd_s8();
        if (t < 10) begin f = -128; w = -128; end   // largest accumulator
        feat[i*8 +: 8] = 8'(f);
        wcol[i*8 +: 8] = 8'(w);
        acc += f * w;
      end
      expq.push_back(ref_requant(acc, 181, 15));
      @(posedge clk);
      #1;
      if (t >= 1) begin
        checks++;
        if (int'(q) != expq[0]) begin
          failures++;
          $display("FAIL t=%0d q=%0d exp=%0d", t, q, expq[0]);
        end
        void'(expq.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
