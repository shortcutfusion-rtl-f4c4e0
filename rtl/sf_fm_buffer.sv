// sf_fm_buffer: one of the three interchangeable physical buffers (buffer 0,
// 1 and 2). Depending on the group instruction a buffer holds the input, the
// output or the shortcut feature map of a layer, or (buffer 1, row reuse) the
// whole weight set of the layer.
//
// A simple dual-port RAM of DEPTH 512-bit words (64 lanes x 8 bits, one bank
// per lane). Read: re/raddr in cycle t, rdata valid in cycle t+1 and held
// until the next read. Write: we/waddr/wdata in one cycle. The paper does not
// give the depth of each buffer; 16384 words (1 MiB) is this design's choice.
module sf_fm_buffer
  import sf_pkg::*;
#(
  parameter int DEPTH = 16384,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output word_t         rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata
);
  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
