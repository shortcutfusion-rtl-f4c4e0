// sf_out_buffer: the partial-sum buffer ("out buffer") behind the CONV
// kernels. One entry holds the 32-bit partial sums of all 64 output lanes of
// one output pixel. In row reuse one output row is kept (address = x); in
// frame reuse the whole output frame of one channel group
// (address = y * width + x), which is why it must hold out_w * out_h entries.
//
// Read: re/raddr in cycle t, rdata in t+1 (held). Write: one cycle.
// DEPTH = 4096 (a 64x64 frame) is this design's choice; the paper gives only
// the sizing rule out_w * out_h * To * 4 bytes.
module sf_out_buffer
  import sf_pkg::*;
#(
  parameter int DEPTH = 4096,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output psum_word_t    rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  psum_word_t    wdata
);
  psum_word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
