// sf_operand_sel: forms the CONV kernel operands from the input register
// buffer window (combinational).
//
// Normal convolution: in_vec is the 64-channel word at window position
// (k_row, k_col), each byte read as a 9-bit signed value (the input may be
// signed or unsigned 8-bit).
// Depthwise convolution: dw_win[c][t] is tap t = r * K + c' of channel c,
// for r, c' < K (the layout of Fig. 8(a): a 3x3 kernel uses taps 0..8 of
// the 32-MAC array, a 5x5 kernel taps 0..24); unused taps are zero.
module sf_operand_sel
  import sf_pkg::*;
(
  input  word_t [K_MAX-1:0][K_MAX-1:0]      win,
  input  logic [2:0]                        k_row,
  input  logic [2:0]                        k_col,
  input  logic [2:0]                        k_size,
  input  logic                              in_signed,
  output op9_t [LANES-1:0]                  in_vec,
  output op9_t [LANES-1:0][ARRAY_MAC-1:0]   dw_win
);
  word_t cur;

  always_comb begin
    cur = (k_row < 3'(K_MAX) && k_col < 3'(K_MAX)) ? win[k_row][k_col] : '0;
    for (int l = 0; l < LANES; l++) in_vec[l] = ext9(cur[8*l +: 8], in_signed);
    dw_win = '0;
    for (int r = 0; r < K_MAX; r++)
      for (int c = 0; c < K_MAX; c++)
        if (r < int'(k_size) && c < int'(k_size))
          for (int l = 0; l < LANES; l++)
            dw_win[l][r * int'(k_size) + c] = ext9(win[r][c][8*l +: 8], in_signed);
  end
endmodule
