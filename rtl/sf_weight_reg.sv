// sf_weight_reg: the double weight block buffer. Each of the two banks holds
// one tiled weight block of a 3x3 convolution, 3 x 3 x Ti x To weights, so a
// lane has depth 2 x 3 x 3 = 18 as in the paper; while the kernels read one
// bank the other can be loaded.
//
// Entry [bank][pos][oc] is the 64-input-channel weight vector (9-bit signed,
// zero point already removed) of output channel oc at kernel position pos.
// Write: we with bank/pos/oc/wdata. Read is combinational: w_mat is the
// 64 x 64 block of bank rbank at position rpos. For a depthwise kernel the
// up-to-25 taps of channel c are kept in entry [bank][0][c], taps 0..24 in
// the first lanes; dw_w[c] gives the first 32 of them.
module sf_weight_reg
  import sf_pkg::*;
(
  input  logic                         clk,
  input  logic                         we,
  input  logic                         wbank,
  input  logic [3:0]                   wpos,
  input  logic [5:0]                   woc,
  input  op9_t [LANES-1:0]             wdata,
  input  logic                         rbank,
  input  logic [3:0]                   rpos,
  output op9_t [LANES-1:0][LANES-1:0]  w_mat,    // [out ch][in ch]
  output op9_t [LANES-1:0][ARRAY_MAC-1:0] dw_w   // [ch][tap]
);
  op9_t [LANES-1:0] mem [2][9][LANES];

  always_ff @(posedge clk)
    if (we && wpos < 4'd9) mem[wbank][wpos][woc] <= wdata;

  always_comb begin
    for (int oc = 0; oc < LANES; oc++) begin
      w_mat[oc] = (rpos < 4'd9) ? mem[rbank][rpos][oc] : '0;
      dw_w[oc]  = mem[rbank][0][oc][ARRAY_MAC-1:0];
    end
  end
endmodule
