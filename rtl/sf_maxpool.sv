// sf_maxpool: fused 2x2, stride-2 max pooling on the output stream.
//
// Words of one output channel group arrive in raster order (x fastest); the
// groups may be interleaved row by row (row reuse) or come one whole frame
// after the other (frame reuse). For an even row the maximum of each
// horizontal pair is parked in a line memory indexed og * (in_w/2) + x/2; on
// the odd row it is combined with the new pair and one pooled word is sent
// out at (x/2, y/2). A trailing odd row or column is dropped (floor). Lane
// comparisons are signed or unsigned according to uns. When en is low words
// pass through unchanged. Stream: valid/ready, one pipeline register.
module sf_maxpool
  import sf_pkg::*;
#(
  parameter int LINE_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        uns,
  input  logic [15:0] in_w,
  input  logic [15:0] in_h,
  input  logic        in_valid,
  output logic        in_ready,
  input  beat_t       in_beat,
  output logic        out_valid,
  input  logic        out_ready,
  output beat_t       out_beat
);
  localparam int LAW = $clog2(LINE_DEPTH);
  word_t line [LINE_DEPTH];
  word_t pair_q;                       // max of the current horizontal pair
  logic [LAW-1:0] laddr;
  logic       x_odd, y_odd, in_win;
  word_t      m_in_pair, m_vert;

  function automatic word_t vmax(input word_t a, input word_t b, input logic u);
    word_t r;
    for (int l = 0; l < LANES; l++) begin
      logic a_gt;
      a_gt = u ? (a[8*l +: 8] > b[8*l +: 8]) : (signed'(a[8*l +: 8]) > signed'(b[8*l +: 8]));
      r[8*l +: 8] = a_gt ? a[8*l +: 8] : b[8*l +: 8];
    end
    return r;
  endfunction

  always_comb begin
    x_odd  = in_beat.x[0];
    y_odd  = in_beat.y[0];
    in_win = (in_beat.x < {in_w[15:1], 1'b0}) && (in_beat.y < {in_h[15:1], 1'b0});
    laddr  = LAW'(32'(in_beat.og) * 32'(in_w[15:1]) + 32'(in_beat.x[15:1]));
    m_in_pair = vmax(pair_q, in_beat.data, uns);
    m_vert    = vmax(line[laddr], m_in_pair, uns);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid && (!en || (in_win && x_odd && y_odd));
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) begin
      if (!en) begin
        out_beat <= in_beat;
      end else if (in_win) begin
        if (!x_odd) pair_q <= in_beat.data;
        else if (!y_odd) line[laddr] <= m_in_pair;
        else begin
          out_beat.data <= m_vert;
          out_beat.og   <= in_beat.og;
          out_beat.x    <= {1'b0, in_beat.x[15:1]};
          out_beat.y    <= {1'b0, in_beat.y[15:1]};
        end
      end
    end
  end
endmodule
