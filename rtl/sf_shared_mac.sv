// sf_shared_mac: one "shared MAC", i.e. one DSP48E2 slice used for two 9x9
// signed multiplications that share an operand (Fig. 7 of the design).
//
// Normal convolution (dw_en = 0): the two weights are packed into the 27-bit
// A operand as W1 * 2^18 + W0 (pre-adder result, laid out W1 | 9'b0 | W0 with
// W1 starting at bit 18), the shared input I goes to D, and one 27x18
// multiplication gives P = I*W1*2^18 + I*W0. Mult0 = P[17:0]; because the low
// product is signed it borrows from the upper half, so
// Mult1 = P[35:18] - {18{P[17]}} (the correction logic of Fig. 7(a)).
// Depthwise convolution (dw_en = 1): the input muxes select I_DW[0] and
// W_DW[0], W1 is forced to 0, and only Mult0 = I_DW*W_DW is meaningful.
//
// Operands are 9-bit signed values in -255..255 (8-bit signed or unsigned
// feature maps, weights after zero-point subtraction); the packing is exact
// in that range. The block is purely combinational; the surrounding adder
// trees and accumulators register the result.
module sf_shared_mac
  import sf_pkg::*;
(
  input  logic dw_en,
  input  op9_t i,
  input  op9_t i_dw,
  input  op9_t w0,
  input  op9_t w_dw,
  input  op9_t w1,
  output logic signed [17:0] mult0,
  output logic signed [17:0] mult1
);
  op9_t                 in_d, wa0, wa1;
  logic signed [26:0]   a_op;   // DSP A port (27 bits)
  logic signed [17:0]   d_op;   // DSP D/B port (18 bits)
  logic signed [44:0]   p;      // DSP P output

  always_comb begin
    in_d = dw_en ? i_dw : i;
    wa0  = dw_en ? w_dw : w0;
    wa1  = dw_en ? op9_t'(0) : w1;
    a_op = (27'(wa1) <<< 18) + 27'(wa0);
    d_op = 18'(in_d);
    p    = 45'(a_op) * 45'(d_op);
    mult0 = p[17:0];
    mult1 = p[35:18] - {18{p[17]}};
  end
endmodule
