// sf_input_fetch: loads input feature-map rows into the row buffer.
//
// One command moves `count` consecutive 512-bit words starting at `base`
// into row-buffer slot `slot` starting at word `off`. The source is DRAM
// (row reuse: inputs are read from off-chip exactly once, row by row) or one
// of the on-chip buffers through the crossbar (frame reuse). Requests are
// issued back to back as the source accepts them; the data is written into
// the row buffer as it returns (DRAM responses in order, buffer reads one
// cycle later). busy stays high until the last word has been written; a new
// command is accepted only when idle.
module sf_input_fetch
  import sf_pkg::*;
#(
  parameter int RB_AW  = 10,
  parameter int BUF_AW = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  loc_e              cmd_src,
  input  logic [31:0]       cmd_base,
  input  logic [15:0]       cmd_count,
  input  logic [2:0]        cmd_slot,
  input  logic [RB_AW-1:0]  cmd_off,
  // DRAM
  output logic              m_valid,
  input  logic              m_ready,
  output mem_req_t          m_req,
  input  logic              rsp_valid,
  input  word_t             rsp_data,
  // on-chip buffer through the crossbar
  output logic              xb_re,
  output loc_e              xb_sel,
  output logic [BUF_AW-1:0] xb_addr,
  input  logic              xb_rvalid,
  input  word_t             xb_rdata,
  // row buffer
  output logic              rb_we,
  output logic [2:0]        rb_slot,
  output logic [RB_AW-1:0]  rb_addr,
  output word_t             rb_data,
  output logic              busy
);
  loc_e        src;
  logic [31:0] base;
  logic [15:0] count, issued, recvd;
  logic [2:0]  slot;
  logic [RB_AW-1:0] off;
  logic        issuing, got;

  assign cmd_ready = !busy;
  assign issuing   = busy && (issued != count);
  assign m_valid   = issuing && (src == LOC_DRAM);
  assign m_req.we    = 1'b0;
  assign m_req.addr  = base + 32'(issued);
  assign m_req.wdata = '0;
  assign xb_re     = issuing && (src != LOC_DRAM);
  assign xb_sel    = src;
  assign xb_addr   = BUF_AW'(base + 32'(issued));
  assign got       = (src == LOC_DRAM) ? rsp_valid : xb_rvalid;

  assign rb_we   = busy && got;
  assign rb_slot = slot;
  assign rb_addr = off + RB_AW'(recvd);
  assign rb_data = (src == LOC_DRAM) ? rsp_data : xb_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; issued <= '0; recvd <= '0; count <= '0;
      src <= LOC_DRAM; base <= '0; slot <= '0; off <= '0;
    end else if (!busy) begin
      if (cmd_valid) begin
        busy <= (cmd_count != 16'd0);
        src <= cmd_src; base <= cmd_base; count <= cmd_count;
        slot <= cmd_slot; off <= cmd_off; issued <= '0; recvd <= '0;
      end
    end else begin
      if ((m_valid && m_ready) || xb_re) issued <= issued + 16'd1;
      if (got) begin
        recvd <= recvd + 16'd1;
        if (recvd + 16'd1 == count) busy <= 1'b0;
      end
    end
  end
endmodule
