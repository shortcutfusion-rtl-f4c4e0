// sf_adder_tree: N-input binary adder tree (N a power of two).
//
// Each CONV kernel reduces the 32 products of a shared-MAC array with such a
// tree (four 32-input trees per kernel). Level l adds pairs of the sums of
// level l-1, so the tree has log2(N) adder levels. Inputs are IN_W-bit signed
// values and the output is IN_W + log2(N) bits, wide enough to never
// overflow. Combinational; the consumer registers the result.
module sf_adder_tree #(
  parameter int N    = 32,
  parameter int IN_W = 18,
  localparam int LV    = $clog2(N),
  localparam int OUT_W = IN_W + LV
) (
  input  logic signed [N-1:0][IN_W-1:0] din,
  output logic signed [OUT_W-1:0]       sum
);
  // One row per tree level; row 0 holds the sign-extended inputs.
  logic signed [OUT_W-1:0] lvl [LV+1][N];

  always_comb begin
    for (int k = 0; k < N; k++) lvl[0][k] = OUT_W'(signed'(din[k]));
    for (int l = 1; l <= LV; l++)
      for (int k = 0; k < N; k++)
        lvl[l][k] = (k < (N >> l)) ? lvl[l-1][2*k] + lvl[l-1][2*k+1] : '0;
    sum = lvl[LV][0];
  end
endmodule
