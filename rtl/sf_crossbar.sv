// sf_crossbar: connects the accelerator's buffer ports to the three physical
// buffers, so that any buffer can serve as input, output, shortcut or weight
// store of a layer (the alloc_input / alloc_output / alloc_shortcut
// assignment of the static memory allocation).
//
// Read ports: 0 = input fetch, 1 = shortcut (element-wise), 2 = weight fetch.
// Write ports: 0 = output writer, 1 = weight preload.
// Each port carries a buffer select (LOC_B0..LOC_B2; LOC_DRAM = not used).
// A read issued in cycle t returns rdata with rvalid in cycle t+1. If two
// ports address the same buffer in one cycle the lower-numbered port wins;
// the memory allocation never does that, and assertions flag it.
module sf_crossbar
  import sf_pkg::*;
#(
  parameter int AW = 14
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [2:0]           rp_re,
  input  loc_e  [2:0]          rp_sel,
  input  logic [2:0][AW-1:0]   rp_addr,
  output word_t [2:0]          rp_rdata,
  output logic [2:0]           rp_rvalid,
  input  logic [1:0]           wp_we,
  input  loc_e  [1:0]          wp_sel,
  input  logic [1:0][AW-1:0]   wp_addr,
  input  word_t [1:0]          wp_wdata,
  // to the buffers
  output logic [2:0]           b_re,
  output logic [2:0][AW-1:0]   b_raddr,
  input  word_t [2:0]          b_rdata,
  output logic [2:0]           b_we,
  output logic [2:0][AW-1:0]   b_waddr,
  output word_t [2:0]          b_wdata
);
  loc_e [2:0] sel_q;
  logic [2:0] rv_q;

  always_comb begin
    b_re = '0; b_raddr = '0; b_we = '0; b_waddr = '0; b_wdata = '0;
    for (int b = 0; b < 3; b++) begin
      for (int p = 2; p >= 0; p--)
        if (rp_re[p] && rp_sel[p] == loc_e'(b)) begin
          b_re[b] = 1'b1; b_raddr[b] = rp_addr[p];
        end
      for (int p = 1; p >= 0; p--)
        if (wp_we[p] && wp_sel[p] == loc_e'(b)) begin
          b_we[b] = 1'b1; b_waddr[b] = wp_addr[p]; b_wdata[b] = wp_wdata[p];
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rv_q <= '0; sel_q <= {3{LOC_DRAM}};
    end else begin
      for (int p = 0; p < 3; p++) begin
        rv_q[p] <= rp_re[p] && rp_sel[p] != LOC_DRAM;
        if (rp_re[p]) sel_q[p] <= rp_sel[p];
      end
    end
  end

  always_comb
    for (int p = 0; p < 3; p++) begin
      rp_rvalid[p] = rv_q[p];
      rp_rdata[p]  = (sel_q[p] != LOC_DRAM) ? b_rdata[sel_q[p]] : '0;
    end

  // The static allocation gives each buffer at most one reader and one writer.
  a_rd01: assert property (@(posedge clk) disable iff (!rst_n)
    !(rp_re[0] && rp_re[1] && rp_sel[0] == rp_sel[1] && rp_sel[0] != LOC_DRAM));
  a_rd02: assert property (@(posedge clk) disable iff (!rst_n)
    !(rp_re[0] && rp_re[2] && rp_sel[0] == rp_sel[2] && rp_sel[0] != LOC_DRAM));
  a_rd12: assert property (@(posedge clk) disable iff (!rst_n)
    !(rp_re[1] && rp_re[2] && rp_sel[1] == rp_sel[2] && rp_sel[1] != LOC_DRAM));
  a_wr01: assert property (@(posedge clk) disable iff (!rst_n)
    !(wp_we[0] && wp_we[1] && wp_sel[0] == wp_sel[1] && wp_sel[0] != LOC_DRAM));
endmodule
