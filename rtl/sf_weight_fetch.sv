// sf_weight_fetch: reads parameters (weights, batch-norm parameters) from
// DRAM, or weights preloaded into buffer 1, and streams them out.
//
// One command reads `count` consecutive words from `base`; each returned word
// is presented for one cycle on out_valid with its index out_idx within the
// command, as raw bytes (out_raw, for batch-norm parameters and for copying
// weights into buffer 1) and as 64 nine-bit signed weights out_w9 = q - zero:
// weights use 8-bit non-zero (asymmetric) quantisation, so after removing the
// zero point a weight needs 9 bits, which is why the MACs are 9x9.
// The consumer must accept every word (no back-pressure). busy is high until
// the last word has been delivered.
module sf_weight_fetch
  import sf_pkg::*;
#(
  parameter int BUF_AW = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  loc_e              cmd_src,
  input  logic [31:0]       cmd_base,
  input  logic [23:0]       cmd_count,
  input  logic [7:0]        zero,
  output logic              m_valid,
  input  logic              m_ready,
  output mem_req_t          m_req,
  input  logic              rsp_valid,
  input  word_t             rsp_data,
  output logic              xb_re,
  output loc_e              xb_sel,
  output logic [BUF_AW-1:0] xb_addr,
  input  logic              xb_rvalid,
  input  word_t             xb_rdata,
  output logic              out_valid,
  output logic [23:0]       out_idx,
  output word_t             out_raw,
  output op9_t [LANES-1:0]  out_w9,
  output logic              busy
);
  loc_e        src;
  logic [31:0] base;
  logic [23:0] count, issued, recvd;
  logic        issuing;

  assign cmd_ready = !busy;
  assign issuing   = busy && (issued != count);
  assign m_valid   = issuing && (src == LOC_DRAM);
  assign m_req.we    = 1'b0;
  assign m_req.addr  = base + 32'(issued);
  assign m_req.wdata = '0;
  assign xb_re     = issuing && (src != LOC_DRAM);
  assign xb_sel    = src;
  assign xb_addr   = BUF_AW'(base + 32'(issued));

  assign out_valid = busy && ((src == LOC_DRAM) ? rsp_valid : xb_rvalid);
  assign out_idx   = recvd;
  assign out_raw   = (src == LOC_DRAM) ? rsp_data : xb_rdata;
  always_comb
    for (int l = 0; l < LANES; l++)
      out_w9[l] = op9_t'({1'b0, out_raw[8*l +: 8]}) - op9_t'({1'b0, zero});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; issued <= '0; recvd <= '0; count <= '0; src <= LOC_DRAM; base <= '0;
    end else if (!busy) begin
      if (cmd_valid) begin
        busy <= (cmd_count != 24'd0);
        src <= cmd_src; base <= cmd_base; count <= cmd_count;
        issued <= '0; recvd <= '0;
      end
    end else begin
      if ((m_valid && m_ready) || xb_re) issued <= issued + 24'd1;
      if (out_valid) begin
        recvd <= recvd + 24'd1;
        if (recvd + 24'd1 == count) busy <= 1'b0;
      end
    end
  end
endmodule
