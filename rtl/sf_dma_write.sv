// sf_dma_write: end of the output chain. Turns each output word's channel
// group and coordinates into an address, out_base + (og * fin_h + y) * fin_w
// + x, and writes it either into one of the on-chip buffers (through the
// crossbar, one word per cycle, never stalls) or into DRAM. DRAM writes go
// through the write buffer, a FIFO of WB_DEPTH words drained one word per
// accepted request on the memory port; the input stalls only when it is full.
// idle is high when nothing is left to write.
// WB_DEPTH = 1024 is this design's choice; the paper sizes the write buffer
// as one output row of To channels (row reuse) or a whole final output map.
module sf_dma_write
  import sf_pkg::*;
#(
  parameter int WB_DEPTH = 1024,
  parameter int BUF_AW   = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  input  loc_e              out_loc,
  input  logic [31:0]       out_base,
  input  logic [15:0]       fin_w,
  input  logic [15:0]       fin_h,
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_beat,
  // on-chip buffer write (through the crossbar)
  output logic              bw_en,
  output loc_e              bw_sel,
  output logic [BUF_AW-1:0] bw_addr,
  output word_t             bw_data,
  // DRAM write requests
  output logic              m_valid,
  input  logic              m_ready,
  output mem_req_t          m_req,
  output logic              idle
);
  localparam int FAW = $clog2(WB_DEPTH);
  logic [31:0]    addr;
  logic [31:0]    fa_mem [WB_DEPTH];
  word_t          fd_mem [WB_DEPTH];
  logic [FAW:0]   count;
  logic [FAW-1:0] rd_ptr, wr_ptr;
  logic           push, pop, full;

  assign addr     = out_base + (32'(in_beat.og) * 32'(fin_h) + 32'(in_beat.y)) * 32'(fin_w) + 32'(in_beat.x);
  assign full     = (count == (FAW+1)'(WB_DEPTH));
  assign in_ready = (out_loc != LOC_DRAM) || !full;
  assign push     = in_valid && in_ready && (out_loc == LOC_DRAM);
  assign pop      = m_valid && m_ready;

  assign bw_en   = in_valid && (out_loc != LOC_DRAM);
  assign bw_sel  = out_loc;
  assign bw_addr = addr[BUF_AW-1:0];
  assign bw_data = in_beat.data;

  assign m_valid     = (count != '0);
  assign m_req.we    = 1'b1;
  assign m_req.addr  = fa_mem[rd_ptr];
  assign m_req.wdata = fd_mem[rd_ptr];
  assign idle        = (count == '0);

  always_ff @(posedge clk) begin
    if (push) begin
      fa_mem[wr_ptr] <= addr;
      fd_mem[wr_ptr] <= in_beat.data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0; rd_ptr <= '0; wr_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + (FAW+1)'(push) - (FAW+1)'(pop);
    end
  end
endmodule
