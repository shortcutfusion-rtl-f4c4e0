// sf_avepool: global average pooling on the output stream (used for the
// squeeze step of Squeeze-and-Excitation blocks).
//
// For every output channel group a 32-bit-per-lane sum is kept in a small
// RAM. The word at (0,0) starts the sum, each following word adds to it, and
// the word at (in_w-1, in_h-1) closes it: one word
// sat8((sum * avg_mult + 2^15) >> 16) is sent out at (0,0), where
// avg_mult = round(65536 / (in_w * in_h)) comes from the group instruction.
// Sums of different groups may be interleaved. When en is low words pass
// through unchanged. Stream: valid/ready, one pipeline register.
module sf_avepool
  import sf_pkg::*;
#(
  parameter int OG_MAX = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        uns,
  input  logic [15:0] in_w,
  input  logic [15:0] in_h,
  input  logic [15:0] avg_mult,
  input  logic        in_valid,
  output logic        in_ready,
  input  beat_t       in_beat,
  output logic        out_valid,
  input  logic        out_ready,
  output beat_t       out_beat
);
  logic signed [LANES-1:0][31:0] sum_mem [OG_MAX];
  logic signed [LANES-1:0][31:0] nsum;
  logic is_first, is_last;
  logic [$clog2(OG_MAX)-1:0] og_i;

  always_comb begin
    og_i     = in_beat.og[$clog2(OG_MAX)-1:0];
    is_first = (in_beat.x == 16'd0) && (in_beat.y == 16'd0);
    is_last  = (in_beat.x == in_w - 16'd1) && (in_beat.y == in_h - 16'd1);
    for (int l = 0; l < LANES; l++)
      nsum[l] = (is_first ? 32'sd0 : sum_mem[og_i][l])
              + (uns ? 32'(in_beat.data[8*l +: 8]) : 32'(signed'(in_beat.data[8*l +: 8])));
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid && (!en || is_last);
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) begin
      if (!en) out_beat <= in_beat;
      else begin
        sum_mem[og_i] <= nsum;
        if (is_last) begin
          for (int l = 0; l < LANES; l++)
            out_beat.data[8*l +: 8] <= sat8((48'(signed'(nsum[l])) * signed'(48'(avg_mult)) + 48'sd32768) >>> 16, uns);
          out_beat.og <= in_beat.og;
          out_beat.x  <= 16'd0;
          out_beat.y  <= 16'd0;
        end
      end
    end
  end
endmodule
