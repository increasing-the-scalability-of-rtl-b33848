// tc_input_ram: input temporal-channel (TC) memory of the layer. Each of the
// SIZE x SIZE positions of a TC holds one vertex word {valid, 17-bit edge
// mask, IN_DIM features}. Two banks: the upstream layer writes the next TC
// into one bank while the convolution reads the other.
// One write port and one read port (simple dual-port BRAM), read data
// registered, one cycle latency. The TC array itself follows the paper; the
// second bank is this design's choice so that loading overlaps processing.
module tc_input_ram #(
  parameter int unsigned SIZE   = 64,
  parameter int unsigned WORD_W = 146,
  localparam int unsigned AW    = $clog2(SIZE*SIZE)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic              wr_bank,
  input  logic [AW-1:0]     wr_addr,
  input  logic [WORD_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic              rd_bank,
  input  logic [AW-1:0]     rd_addr,
  output logic [WORD_W-1:0] rd_data
);
  logic [WORD_W-1:0] mem [2*SIZE*SIZE];

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_bank, wr_addr}] <= wr_data;
    if (rd_en) rd_data <= mem[{rd_bank, rd_addr}];
  end
endmodule
