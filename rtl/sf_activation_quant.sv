// sf_activation_quant: dynamic fixed point requantisation and activation.
//
// Each lane's batch-normalised value is shifted right by the group's q_shift
// with round-to-nearest and saturated to 8 bits (signed, or unsigned when
// uns is set), which lets each layer use its own fixed point format. Then the
// activation is applied: none, ReLU, or sigmoid / swish through an 8-bit
// look-up table indexed by the 8-bit code. As in the paper, the two tables of
// a lane share one 512-entry memory (one 18 Kb block RAM per lane, To = 64 of
// them) and, because the tables are fixed, sigmoid and swish only work for a
// single fixed point format. The table contents are written through the lut_*
// port (broadcast to all lanes) by whoever configures the accelerator.
// Stream: valid/ready, one pipeline register.
module sf_activation_quant
  import sf_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  act_e                          act,
  input  logic [7:0]                    q_shift,
  input  logic                          uns,
  // table load: lut_sel 0 = sigmoid, 1 = swish
  input  logic                          lut_we,
  input  logic                          lut_sel,
  input  logic [7:0]                    lut_addr,
  input  logic [7:0]                    lut_data,
  // input stream
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic signed [LANES-1:0][47:0] in_val,
  input  logic [7:0]                    in_og,
  input  logic [15:0]                   in_x,
  input  logic [15:0]                   in_y,
  // output stream
  output logic                          out_valid,
  input  logic                          out_ready,
  output beat_t                         out_beat
);
  logic [LANES-1:0][7:0] q;

  // requantisation (combinational)
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [47:0] r;
      r = signed'(in_val[l]);
      if (q_shift != 8'd0) r = (r + (48'sd1 <<< (q_shift - 8'd1))) >>> q_shift;
      q[l] = sat8(r, uns);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [7:0] lut [512];   // [0..255] sigmoid, [256..511] swish
    always_ff @(posedge clk) begin
      if (lut_we) lut[{lut_sel, lut_addr}] <= lut_data;
      if (in_ready && in_valid) begin
        unique case (act)
          ACT_NONE:    out_beat.data[8*l +: 8] <= q[l];
          ACT_RELU:    out_beat.data[8*l +: 8] <= (!uns && q[l][7]) ? 8'd0 : q[l];
          ACT_SIGMOID: out_beat.data[8*l +: 8] <= lut[{1'b0, q[l]}];
          ACT_SWISH:   out_beat.data[8*l +: 8] <= lut[{1'b1, q[l]}];
          default:     out_beat.data[8*l +: 8] <= q[l];
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) begin
      out_beat.og <= in_og;
      out_beat.x  <= in_x;
      out_beat.y  <= in_y;
    end
  end
endmodule
