// sf_conv_engine: the NKER = 32 parallel CONV kernels (2048 shared MACs).
//
// Normal convolution: each cycle with acc_en the engine multiplies one input
// word (64 channels at one kernel position) by a 64x64 weight block slice and
// accumulates, per output channel, into the kernels' accumulators: 4096
// multiplications per cycle. Kernel k owns output channels 2k and 2k+1.
// Depthwise convolution: each cycle every output channel c computes its whole
// KxK window (up to 32 taps, window dw_win[c], weights dw_w[c]): 2048
// multiplications per cycle.
// The psum output is valid the cycle after acc_en.
module sf_conv_engine
  import sf_pkg::*;
(
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  dw_en,
  input  logic                                  acc_en,
  input  logic                                  first,
  input  psum_word_t                            preset,
  input  op9_t [LANES-1:0]                      in_vec,              // input channels
  input  op9_t [LANES-1:0][LANES-1:0]           w_mat,               // [out ch][in ch]
  input  op9_t [LANES-1:0][ARRAY_MAC-1:0]       dw_win,              // [ch][tap]
  input  op9_t [LANES-1:0][ARRAY_MAC-1:0]       dw_w,                // [ch][tap]
  output psum_word_t                            psum
);
  for (genvar k = 0; k < NKER; k++) begin : g_ker
    sf_conv_kernel u_ker (
      .clk(clk), .rst_n(rst_n), .dw_en(dw_en), .acc_en(acc_en), .first(first),
      .preset0(preset[(2*k)*PSUM_W +: PSUM_W]), .preset1(preset[(2*k+1)*PSUM_W +: PSUM_W]),
      .i(in_vec), .w0(w_mat[2*k]), .w1(w_mat[2*k+1]),
      .i_dw0(dw_win[2*k]), .w_dw0(dw_w[2*k]), .i_dw1(dw_win[2*k+1]), .w_dw1(dw_w[2*k+1]),
      .ch0(psum[(2*k)*PSUM_W +: PSUM_W]), .ch1(psum[(2*k+1)*PSUM_W +: PSUM_W])
    );
  end
endmodule
