// sf_upsample: 2x nearest-neighbour up-sampling on the output stream.
//
// Each incoming word at (x, y) is sent out four times, at (2x, 2y),
// (2x+1, 2y), (2x, 2y+1) and (2x+1, 2y+1); the writer turns the coordinates
// into addresses, so the up-sampled map is written directly without a
// separate layer. The stage stalls its input for the three extra beats. When
// en is low words pass through with one register of latency.
module sf_upsample
  import sf_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  in_valid,
  output logic  in_ready,
  input  beat_t in_beat,
  output logic  out_valid,
  input  logic  out_ready,
  output beat_t out_beat
);
  beat_t      hold;
  logic       hold_v;
  logic [1:0] sub;
  logic       last_sub;

  assign last_sub  = !en || (sub == 2'd3);
  assign in_ready  = !hold_v || (out_ready && last_sub);
  assign out_valid = hold_v;

  always_comb begin
    out_beat = hold;
    if (en) begin
      out_beat.x = {hold.x[14:0], sub[0]};
      out_beat.y = {hold.y[14:0], sub[1]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_v <= 1'b0;
      sub    <= 2'd0;
    end else if (in_ready) begin
      hold_v <= in_valid;
      sub    <= 2'd0;
      if (in_valid) hold <= in_beat;
    end else if (out_ready) begin
      sub <= sub + 2'd1;
    end
  end
endmodule
