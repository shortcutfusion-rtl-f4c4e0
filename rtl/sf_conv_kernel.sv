// sf_conv_kernel: one of the parallel CONV kernels (Fig. 6, Fig. 8(b)).
//
// Two shared MAC arrays of 32 MACs produce two output channels. For a normal
// convolution the 64 input channels are split over the arrays (top array
// I[31:0], bottom array I[63:32]); CH0 = top.OUT0 + bottom.OUT0 and
// CH1 = top.OUT1 + bottom.OUT1 are accumulated in the accumulation
// registers. The first accumulation of an output pixel starts from the preset
// value (a partial sum read back from the out buffer, or 0), the following
// ones add to the register. For a depthwise convolution each array computes a
// whole KxK kernel of its own channel in one cycle (DW0 = top.OUT0,
// DW1 = bottom.OUT0) and the Depthwise_en mux forwards that result directly
// instead of the accumulator.
//
// Timing: acc_en registers one step; the result is on ch0/ch1 the cycle after.
module sf_conv_kernel
  import sf_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         dw_en,
  input  logic                         acc_en,   // take one step this cycle
  input  logic                         first,    // start from the preset value
  input  logic signed [PSUM_W-1:0]     preset0,
  input  logic signed [PSUM_W-1:0]     preset1,
  input  op9_t [2*ARRAY_MAC-1:0]       i,        // shared input channels
  input  op9_t [2*ARRAY_MAC-1:0]       w0,       // weights of output channel 0
  input  op9_t [2*ARRAY_MAC-1:0]       w1,       // weights of output channel 1
  input  op9_t [ARRAY_MAC-1:0]         i_dw0,    // depthwise window, channel 0
  input  op9_t [ARRAY_MAC-1:0]         w_dw0,
  input  op9_t [ARRAY_MAC-1:0]         i_dw1,    // depthwise window, channel 1
  input  op9_t [ARRAY_MAC-1:0]         w_dw1,
  output logic signed [PSUM_W-1:0]     ch0,
  output logic signed [PSUM_W-1:0]     ch1
);
  logic signed [22:0] t_out0, t_out1, b_out0, b_out1;
  logic signed [PSUM_W-1:0] sum0, sum1, acc0, acc1, dw0_q, dw1_q;

  sf_mac_array u_top (
    .dw_en(dw_en), .i(i[ARRAY_MAC-1:0]), .w0(w0[ARRAY_MAC-1:0]), .w1(w1[ARRAY_MAC-1:0]),
    .i_dw(i_dw0), .w_dw(w_dw0), .out0(t_out0), .out1(t_out1)
  );
  sf_mac_array u_bot (
    .dw_en(dw_en), .i(i[2*ARRAY_MAC-1:ARRAY_MAC]), .w0(w0[2*ARRAY_MAC-1:ARRAY_MAC]),
    .w1(w1[2*ARRAY_MAC-1:ARRAY_MAC]), .i_dw(i_dw1), .w_dw(w_dw1), .out0(b_out0), .out1(b_out1)
  );

  assign sum0 = PSUM_W'(t_out0) + PSUM_W'(b_out0);
  assign sum1 = PSUM_W'(t_out1) + PSUM_W'(b_out1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc0 <= '0; acc1 <= '0; dw0_q <= '0; dw1_q <= '0;
    end else if (acc_en) begin
      if (dw_en) begin
        dw0_q <= PSUM_W'(t_out0);
        dw1_q <= PSUM_W'(b_out0);
      end else begin
        acc0 <= (first ? preset0 : acc0) + sum0;
        acc1 <= (first ? preset1 : acc1) + sum1;
      end
    end
  end

  assign ch0 = dw_en ? dw0_q : acc0;
  assign ch1 = dw_en ? dw1_q : acc1;
endmodule
