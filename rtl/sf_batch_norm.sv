// sf_batch_norm: per-channel batch normalisation of the partial sums leaving
// the CONV kernels, y = acc * scale + bias for each of the 64 lanes.
//
// The parameters of every output channel group are kept in a small RAM,
// loaded before the group runs: six 512-bit words per channel group, words 0
// and 1 hold the 16-bit signed scales of lanes 0..31 and 32..63, words 2..5
// the 32-bit signed biases of lanes 16*j-32 .. 16*j-17. The paper shows the
// Batch Norm unit in each kernel but gives no format; this format is this
// design's choice.
// Stream: valid/ready with the output-channel group og and pixel x, y as
// side band; one pipeline register (result one cycle after acceptance).
module sf_batch_norm
  import sf_pkg::*;
#(
  parameter int OG_MAX = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // parameter load
  input  logic                          pwe,
  input  logic [$clog2(OG_MAX)-1:0]     pog,
  input  logic [2:0]                    pidx,
  input  word_t                         pdata,
  // input stream
  input  logic                          in_valid,
  output logic                          in_ready,
  input  psum_word_t                    in_psum,
  input  logic [7:0]                    in_og,
  input  logic [15:0]                   in_x,
  input  logic [15:0]                   in_y,
  // output stream
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic signed [LANES-1:0][47:0] out_val,
  output logic [7:0]                    out_og,
  output logic [15:0]                   out_x,
  output logic [15:0]                   out_y
);
  logic signed [LANES-1:0][15:0] scale_mem [OG_MAX];
  logic signed [LANES-1:0][31:0] bias_mem  [OG_MAX];

  always_ff @(posedge clk) begin
    if (pwe) begin
      if (pidx < 3'd2) begin
        for (int l = 0; l < 32; l++) scale_mem[pog][32*int'(pidx) + l] <= pdata[16*l +: 16];
      end else begin
        for (int l = 0; l < 16; l++) bias_mem[pog][16*(int'(pidx) - 2) + l] <= pdata[32*l +: 32];
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) begin
      for (int l = 0; l < LANES; l++)
        out_val[l] <= 48'(signed'(in_psum[l*PSUM_W +: PSUM_W])) * 48'(signed'(scale_mem[in_og[$clog2(OG_MAX)-1:0]][l]))
                      + 48'(signed'(bias_mem[in_og[$clog2(OG_MAX)-1:0]][l]));
      out_og <= in_og;
      out_x  <= in_x;
      out_y  <= in_y;
    end
  end
endmodule
