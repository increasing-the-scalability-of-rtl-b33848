// fmap_buffer: dual-port BRAM buffer for the step-1 (self-loop) results of
// one TC: SIZE x SIZE words, each a whole OUT_DIM-element feature vector, so
// one read yields one candidate for the max. Port A reads or writes, port B
// reads; both have registered read data (one cycle latency). A write on port
// A returns the old word (read-first). The layer uses two of these, swapping
// the roles "current TC" and "previous TC" every TC, as the paper describes.
module fmap_buffer #(
  parameter int unsigned SIZE   = 64,
  parameter int unsigned WORD_W = 512,
  localparam int unsigned AW    = $clog2(SIZE*SIZE)
) (
  input  logic              clk,
  input  logic              a_en,
  input  logic              a_we,
  input  logic [AW-1:0]     a_addr,
  input  logic [WORD_W-1:0] a_wdata,
  output logic [WORD_W-1:0] a_rdata,
  input  logic              b_en,
  input  logic [AW-1:0]     b_addr,
  output logic [WORD_W-1:0] b_rdata
);
  logic [WORD_W-1:0] mem [SIZE*SIZE];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) b_rdata <= mem[b_addr];
  end
endmodule
