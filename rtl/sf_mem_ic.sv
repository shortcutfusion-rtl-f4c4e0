// sf_mem_ic: interconnect that shares the single 512-bit DRAM port among the
// units that access off-chip memory (instruction fetch, input fetch, weight
// fetch, shortcut read, DMA write).
//
// Requests (valid/ready, one word each) are granted round-robin, one per
// cycle when the memory side is ready. For each granted read the requester
// number is queued; read responses come back in order from the memory side
// and are steered to the requester at the head of that queue
// (rsp_valid[n] with the shared rsp_data). Reads are held back while the
// queue is full. Writes need no response.
// The card uses an AXI interconnect; this is a simplified request/response
// protocol with the same 512-bit width, not AXI itself.
module sf_mem_ic
  import sf_pkg::*;
#(
  parameter int NREQ = 5,
  parameter int QDEPTH = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic     [NREQ-1:0]   req_valid,
  output logic     [NREQ-1:0]   req_ready,
  input  mem_req_t [NREQ-1:0]   req,
  output logic     [NREQ-1:0]   rsp_valid,
  output word_t                 rsp_data,
  output logic                  m_valid,
  input  logic                  m_ready,
  output mem_req_t              m_req,
  input  logic                  m_rvalid,
  input  word_t                 m_rdata
);
  localparam int IW = $clog2(NREQ);
  localparam int QW = $clog2(QDEPTH);
  logic [IW-1:0] last, gnt;
  logic          gnt_ok;
  logic [NREQ-1:0] elig;
  logic [IW-1:0] q_mem [QDEPTH];
  logic [QW:0]   q_cnt;
  logic [QW-1:0] q_rd, q_wr;
  logic          q_full, q_push, q_pop;

  assign q_full = (q_cnt == (QW+1)'(QDEPTH));

  always_comb begin
    for (int n = 0; n < NREQ; n++) elig[n] = req_valid[n] && (req[n].we || !q_full);
    gnt_ok = 1'b0;
    gnt    = '0;
    for (int k = 1; k <= NREQ; k++) begin
      int n;
      n = (int'(last) + k) % NREQ;
      if (!gnt_ok && elig[n]) begin
        gnt_ok = 1'b1;
        gnt    = IW'(n);
      end
    end
    m_valid   = gnt_ok;
    m_req     = req[gnt];
    req_ready = '0;
    if (gnt_ok && m_ready) req_ready[gnt] = 1'b1;
  end

  assign q_push = m_valid && m_ready && !m_req.we;
  assign q_pop  = m_rvalid;

  always_comb begin
    rsp_valid = '0;
    if (m_rvalid) rsp_valid[q_mem[q_rd]] = 1'b1;
  end
  assign rsp_data = m_rdata;

  always_ff @(posedge clk) if (q_push) q_mem[q_wr] <= gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= IW'(NREQ - 1); q_cnt <= '0; q_rd <= '0; q_wr <= '0;
    end else begin
      if (m_valid && m_ready) last <= gnt;
      if (q_push) q_wr <= q_wr + 1'b1;
      if (q_pop)  q_rd <= q_rd + 1'b1;
      q_cnt <= q_cnt + (QW+1)'(q_push) - (QW+1)'(q_pop);
    end
  end

  a_no_orphan: assert property (@(posedge clk) disable iff (!rst_n) m_rvalid |-> q_cnt != '0);
endmodule
