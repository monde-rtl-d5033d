// scratchpad: the NDP core's on-chip SRAM, written as a synchronous array with
// one write and one read port; a read returns its word on the next cycle. The
// default 512 words of 4096 bits make 256 KB, which with the 8 KB of operand
// buffers in the NDP units gives the paper's 264 KB of buffers; the paper does
// not give the split, the width or the port count. It holds the input
// activation tile (up to 4 token rows of K <= 16384 bf16, twice, so that the
// next tile can be loaded while the current one is in use).
module scratchpad #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned W     = 4096
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
