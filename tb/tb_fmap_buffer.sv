// tb_fmap_buffer: writes random vectors through port A, then reads two
// addresses per cycle through ports A and B and checks one-cycle latency,
// and that a port-A write returns the old word (read-first).
module tb_fmap_buffer;
  localparam int SIZE = 8, WORD_W = 64, AW = $clog2(SIZE*SIZE), N = SIZE*SIZE;
  logic clk = 0;
  logic a_en = 0, a_we = 0, b_en = 0;
  logic [AW-1:0] a_addr = 0, b_addr = 0;
  logic [WORD_W-1:0] a_wdata = 0, a_rdata, b_rdata;
  logic [WORD_W-1:0] model [N];
  int checks = 0, failures = 0;

  fmap_buffer #(.SIZE(SIZE), .WORD_W(WORD_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < N; a++) begin
      model[a] = {$urandom, $urandom};
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = AW'(a); a_wdata = model[a];
    end
    @(negedge clk) a_we = 0;
    for (int i = 0; i < 200; i++) begin
      int x, y;
      x = int'($urandom_range(N-1)); y = int'($urandom_range(N-1));
      @(negedge clk);
      a_en = 1; b_en = 1; a_addr = AW'(x); b_addr = AW'(y);
      @(posedge clk); #1;
      checks += 2;
      if (a_rdata !== model[x]) begin failures++; $display("FAIL A %0d", x); end
      if (b_rdata !== model[y]) begin failures++; $display("FAIL B %0d", y); end
    end
    // read-first write on port A, new data visible on port B afterwards
    @(negedge clk);
    a_en = 1; a_we = 1; a_addr = 5; a_wdata = 64'h0123_4567_89ab_cdef; b_en = 0;
    @(posedge clk); #1;
    checks++;
    if (a_rdata !== model[5]) begin failures++; $display("FAIL read-first"); end
    @(negedge clk) a_we = 0; a_en = 0; b_en = 1; b_addr = 5;
    @(posedge clk); #1;
    checks++;
    if (b_rdata !== 64'h0123_4567_89ab_cdef) begin failures++; $display("FAIL write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
