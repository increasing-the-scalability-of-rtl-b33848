// tb_requant: checks the requantiser against integer arithmetic for directed
// corner cases (rounding at half, zero shift, both saturation limits) and
// random accumulators, multipliers and shifts.
module tb_requant;
  import gcn_pkg::*;
  import gcn_ref_pkg::*;

  localparam int ACC_W = 20;
  logic signed [ACC_W-1:0] acc;
  logic [MULT_W-1:0]       mult;
  logic [SHIFT_W-1:0]      shift;
  feat_t                   q;
  int checks = 0, failures = 0;

  requant #(.ACC_W(ACC_W)) dut (.acc, .mult, .shift, .q);

  task automatic check(input int a, input int m, input int s);
    int exp;
    acc = ACC_W'(a); mult = MULT_W'(m); shift = SHIFT_W'(s);
    #1;
    exp = ref_requant(a, m, s);
    checks++;
    if (int'(q) != exp) begin
      failures++;
      $display("FAIL acc=%0d mult=%0d shift=%0d q=%0d exp=%0d", a, m, s, q, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(3, 1, 1);        // 1.5 -> 2
    check(-3, 1, 1);       // -1.5 -> -1
    check(5, 1, 0);
    check(100000, 65535, 4);   // saturate high
    check(-100000, 65535, 4);  // saturate low
    check(127, 1, 0);
    check(-128, 1, 0);
    check(255, 1, 1);      // 127.5 -> 128 -> 127
    check(-257, 1, 1);     // -128.5 -> -128
    for (int i = 0; i < 2000; i++)
      check(int'($urandom_range(2**ACC_W - 1)) - 2**(ACC_W-1), int'($urandom_range(65535)),
            int'($urandom_range(31)));
    for (int i = 0; i < 2000; i++)
      check(int'($urandom_range(8191)) - 4096, int'($urandom_range(1023)), 8 + int'($urandom_range(6)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
