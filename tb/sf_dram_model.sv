// sf_dram_model: behavioural model of the off-chip DRAM behind the
// accelerator's 512-bit memory port (testbench only, not synthesizable).
//
// Sparse word memory (unwritten words read as zero). A request is accepted
// when m_ready is high; m_ready is dropped pseudo-randomly STALL_PCT percent
// of the cycles to exercise back-pressure. Writes take effect on acceptance;
// read data returns in order LAT cycles after acceptance on m_rvalid/m_rdata.
module sf_dram_model
  import sf_pkg::*;
#(
  parameter int LAT       = 6,
  parameter int STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     m_valid,
  output logic     m_ready,
  input  mem_req_t m_req,
  output logic     m_rvalid,
  output word_t    m_rdata
);
  word_t mem [int unsigned];
  word_t pipe_d [LAT];
  logic  pipe_v [LAT];
  int    reads, writes;

  initial begin
    reads = 0; writes = 0;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  always_ff @(posedge clk) begin
    m_ready <= ($urandom_range(99) >= STALL_PCT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe_v[i] <= 1'b0;
    end else begin
      for (int i = LAT - 1; i > 0; i--) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      pipe_v[0] <= 1'b0;
      if (m_valid && m_ready) begin
        if (m_req.we) begin
          mem[m_req.addr] = m_req.wdata;
          writes++;
        end else begin
          pipe_v[0] <= 1'b1;
          pipe_d[0] <= mem.exists(m_req.addr) ? mem[m_req.addr] : '0;
          reads++;
        end
      end
    end
  end

  assign m_rvalid = pipe_v[LAT-1];
  assign m_rdata  = pipe_d[LAT-1];
endmodule
