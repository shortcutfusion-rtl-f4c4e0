// sf_input_reg: the input register buffer, a K_MAX x K_MAX window of 512-bit
// words (one word = 64 input channels at one pixel) presented in parallel to
// the CONV kernels.
//
// The window is filled one column per cycle from the row buffer: col_we
// writes column col_idx with the K_MAX words of col_data; rows whose bit in
// row_ok is 0, and the whole column when col_ok is 0, are written as zero,
// which implements zero padding at the frame borders. clr zeroes the window.
// win[r][c] is the word at window row r, column c (registered outputs).
module sf_input_reg
  import sf_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic                          col_we,
  input  logic [2:0]                    col_idx,
  input  logic                          col_ok,
  input  logic [K_MAX-1:0]              row_ok,
  input  word_t [K_MAX-1:0]             col_data,
  output word_t [K_MAX-1:0][K_MAX-1:0]  win          // [row][col]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) win <= '0;
    else if (clr) win <= '0;
    else if (col_we) begin
      for (int r = 0; r < K_MAX; r++)
        for (int c = 0; c < K_MAX; c++)
          if (3'(c) == col_idx) win[r][c] <= (col_ok && row_ok[r]) ? col_data[r] : '0;
    end
  end
endmodule
