// sf_row_buffer: the wide circular row buffer that feeds the sliding windows.
//
// It has ROW_SLOTS = 6 row slots (up to five rows for a 5x5 kernel plus one
// for prefetching); input row iy lives in slot iy mod 6. A slot holds one
// input row of all the channel groups being processed, ROW_WORDS 512-bit
// words addressed (channel group) * width + x.
// Write: we with slot/addr/data. Read: rslot[k] for k = 0..K_MAX-1 and one
// common address; each slot bank is read at that address every cycle with
// re, and in cycle t+1 rdata[k] holds the word of slot rslot[k], so a whole
// window column (up to five rows) comes out per cycle.
// ROW_WORDS = 1024 is this design's choice (the paper sizes the buffer as
// 6 x width x input channels).
module sf_row_buffer
  import sf_pkg::*;
#(
  parameter int ROW_WORDS = 1024,
  localparam int AW = $clog2(ROW_WORDS)
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [2:0]            wslot,
  input  logic [AW-1:0]         waddr,
  input  word_t                 wdata,
  input  logic                  re,
  input  logic [K_MAX-1:0][2:0] rslot,
  input  logic [AW-1:0]         raddr,
  output word_t [K_MAX-1:0]     rdata
);
  word_t             bank_q [ROW_SLOTS];
  logic [K_MAX-1:0][2:0] rslot_q;

  for (genvar b = 0; b < ROW_SLOTS; b++) begin : g_bank
    word_t mem [ROW_WORDS];
    always_ff @(posedge clk) begin
      if (we && wslot == 3'(b)) mem[waddr] <= wdata;
      if (re) bank_q[b] <= mem[raddr];
    end
  end

  always_ff @(posedge clk) if (re) rslot_q <= rslot;

  always_comb
    for (int k = 0; k < K_MAX; k++)
      rdata[k] = (rslot_q[k] < 3'(ROW_SLOTS)) ? bank_q[rslot_q[k]] : '0;
endmodule
