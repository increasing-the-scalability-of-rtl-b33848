// tb_tc_input_ram: fills both banks of a small input TC memory with random
// words, then reads every address of both banks and checks one-cycle read
// latency, that the banks do not alias, and that rd_en=0 holds the output.
module tb_tc_input_ram;
  localparam int SIZE = 8, WORD_W = 40, AW = $clog2(SIZE*SIZE);
  logic clk = 0;
  logic wr_en = 0, wr_bank = 0, rd_en = 0, rd_bank = 0;
  logic [AW-1:0] wr_addr = 0, rd_addr = 0;
  logic [WORD_W-1:0] wr_data = 0, rd_data;
  logic [WORD_W-1:0] model [2][SIZE*SIZE];
  int checks = 0, failures = 0;

  tc_input_ram #(.SIZE(SIZE), .WORD_W(WORD_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < SIZE*SIZE; a++) begin
        model[b][a] = {$urandom, $urandom};
        @(negedge clk);
        wr_en = 1; wr_bank = 1'(b); wr_addr = AW'(a); wr_data = model[b][a];
      end
    @(negedge clk) wr_en = 0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < SIZE*SIZE; a++) begin
        @(negedge clk);
        rd_en = 1; rd_bank = 1'(b); rd_addr = AW'(a);
        @(posedge clk); #1;
        checks++;
        if (rd_data !== model[b][a]) begin
          failures++;
          $display("FAIL bank %0d addr %0d: %h exp %h", b, a, rd_data, model[b][a]);
        end
      end
    // rd_en low holds the last word while the address moves
    @(negedge clk) rd_en = 0; rd_bank = 0; rd_addr = 0;
    @(posedge clk); #1;
    checks++;
    if (rd_data !== model[1][SIZE*SIZE-1]) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
