// tb_gconv_workloads: runs the layer in the configurations of the
// multiplier-count table (time window, graph size after pooling, output
// dimension) with the number of parallel vector multipliers that table gives
// for the two-step method, 16 input features each, two TCs per configuration,
// all side by side. Each run checks every output word, the exact cycle count
// and that a TC finishes within the time available for it
// (TIME_WINDOW / SIZE at 200 MHz), i.e. that the multiplier counts suffice.
module tb_gconv_workloads;
  localparam int N = 5;
  logic [N-1:0] fin;
  int ch [N];
  int fl [N];
  int checks, failures;

  // 50 ms, SIZE 64, 16 -> 32: 1 multiplier
  gconv_workload_run #(.SIZE(64), .OUT_DIM(32), .N_MUL(1), .TIME_WINDOW_NS(50_000_000),
                       .NAME("50ms/64/OUT32/x1")) w0 (.finished(fin[0]), .checks(ch[0]), .failures(fl[0]));
  // 30 ms, SIZE 64, OUT 64: 4 multipliers
  gconv_workload_run #(.SIZE(64), .OUT_DIM(64), .N_MUL(4), .TIME_WINDOW_NS(30_000_000),
                       .NAME("30ms/64/OUT64/x4")) w1 (.finished(fin[1]), .checks(ch[1]), .failures(fl[1]));
  // 100 ms, SIZE 32, OUT 128: 1 multiplier
  gconv_workload_run #(.SIZE(32), .OUT_DIM(128), .N_MUL(1), .TIME_WINDOW_NS(100_000_000),
                       .NAME("100ms/32/OUT128/x1")) w2 (.finished(fin[2]), .checks(ch[2]), .failures(fl[2]));
  // 100 ms, SIZE 64, OUT 128: 2 multipliers
  gconv_workload_run #(.SIZE(64), .OUT_DIM(128), .N_MUL(2), .TIME_WINDOW_NS(100_000_000),
                       .NAME("100ms/64/OUT128/x2")) w3 (.finished(fin[3]), .checks(ch[3]), .failures(fl[3]));
  // 100 ms, SIZE 128, OUT 32: 8 multipliers
  gconv_workload_run #(.SIZE(128), .OUT_DIM(32), .N_MUL(8), .TIME_WINDOW_NS(100_000_000),
                       .NAME("100ms/128/OUT32/x8")) w4 (.finished(fin[4]), .checks(ch[4]), .failures(fl[4]));

  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (1_200_000) @(posedge clk);
    checks = 0; failures = 1;
    for (int i = 0; i < N; i++) begin checks += ch[i]; failures += fl[i]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (&fin);
    checks = 0; failures = 0;
    for (int i = 0; i < N; i++) begin checks += ch[i]; failures += fl[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
