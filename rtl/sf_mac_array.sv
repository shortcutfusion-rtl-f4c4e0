// sf_mac_array: a shared MAC array of ARRAY_MAC (32) shared MACs with two
// 32-input adder trees (Fig. 8).
//
// Normal convolution: every MAC m multiplies input channel i[m] by the weights
// of two output channels, w0[m] and w1[m]; tree OUT0 sums the 32 products for
// output channel 0 and tree OUT1 those for output channel 1.
// Depthwise convolution: MAC m multiplies tap m of one channel's window,
// i_dw[m] * w_dw[m]; a 3x3 window uses taps 0..8 and a 5x5 window taps 0..24,
// the unused taps are zero. OUT0 is then the whole depthwise kernel result.
// Combinational.
module sf_mac_array
  import sf_pkg::*;
(
  input  logic                        dw_en,
  input  op9_t [ARRAY_MAC-1:0]        i,
  input  op9_t [ARRAY_MAC-1:0]        w0,
  input  op9_t [ARRAY_MAC-1:0]        w1,
  input  op9_t [ARRAY_MAC-1:0]        i_dw,
  input  op9_t [ARRAY_MAC-1:0]        w_dw,
  output logic signed [22:0]          out0,
  output logic signed [22:0]          out1
);
  logic signed [ARRAY_MAC-1:0][17:0] m0, m1;

  for (genvar m = 0; m < ARRAY_MAC; m++) begin : g_mac
    sf_shared_mac u_mac (
      .dw_en(dw_en), .i(i[m]), .i_dw(i_dw[m]), .w0(w0[m]), .w_dw(w_dw[m]), .w1(w1[m]),
      .mult0(m0[m]), .mult1(m1[m])
    );
  end

  sf_adder_tree #(.N(ARRAY_MAC), .IN_W(18)) u_tree0 (.din(m0), .sum(out0));
  sf_adder_tree #(.N(ARRAY_MAC), .IN_W(18)) u_tree1 (.din(m1), .sum(out1));
endmodule
