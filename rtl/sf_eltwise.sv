// sf_eltwise: fused element-wise (shortcut) addition.
//
// When a word of the first operand arrives from the kernels, the matching
// word of the shortcut tensor is fetched at once, from one of the on-chip
// buffers or from DRAM (whichever the read port is wired to), at address
// sc_base + (og * h + y) * w + x; the two words are added lane by lane with
// 8-bit saturation (signed or unsigned by uns). This is what lets a CONV and
// the following shortcut layer run as one group: the CONV output never makes
// a round trip through memory.
// One word is in flight at a time (IDLE -> REQ -> WAIT -> OUT). When en is
// low words pass through with one register of latency.
// Read port: rd_valid/rd_ready request, rsp_valid/rsp_data response.
module sf_eltwise
  import sf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        uns,
  input  logic [31:0] sc_base,
  input  logic [15:0] w,
  input  logic [15:0] h,
  input  logic        in_valid,
  output logic        in_ready,
  input  beat_t       in_beat,
  output logic        rd_valid,
  input  logic        rd_ready,
  output logic [31:0] rd_addr,
  input  logic        rsp_valid,
  input  word_t       rsp_data,
  output logic        out_valid,
  input  logic        out_ready,
  output beat_t       out_beat
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_OUT} state_e;
  state_e state;
  beat_t  hold;
  logic   out_free;

  function automatic word_t vadd(input word_t a, input word_t b, input logic u);
    word_t r;
    for (int l = 0; l < LANES; l++)
      r[8*l +: 8] = sat8(48'(ext9(a[8*l +: 8], !u)) + 48'(ext9(b[8*l +: 8], !u)), u);
    return r;
  endfunction

  assign out_free = !out_valid || out_ready;
  assign in_ready = (state == S_IDLE) && out_free;
  assign rd_valid = (state == S_REQ);
  assign rd_addr  = sc_base + (32'(hold.og) * 32'(h) + 32'(hold.y)) * 32'(w) + 32'(hold.x);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid && out_free) begin
          if (!en) begin
            out_beat  <= in_beat;
            out_valid <= 1'b1;
          end else begin
            hold  <= in_beat;
            state <= S_REQ;
          end
        end
        S_REQ:  if (rd_ready) state <= S_WAIT;
        S_WAIT: if (rsp_valid) begin
          hold.data <= vadd(hold.data, rsp_data, uns);
          state     <= S_OUT;
        end
        S_OUT:  if (out_free) begin
          out_beat  <= hold;
          out_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
