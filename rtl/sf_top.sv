// sf_top: the CNN accelerator. It executes a CNN as a sequence of node
// groups (a convolution plus fused batch norm, activation, pooling,
// element-wise shortcut addition and up-sampling), each described by an
// 11-word instruction in DRAM, and switches per group between row-based and
// frame-based weight reuse so that weights are read from DRAM exactly once
// and, for deep layers, feature maps and shortcut data never leave the chip.
//
// Structure (left to right as data flows):
//   sf_cnn_ctrl        reads the instruction stream, starts each group
//   sf_dataflow_ctrl   sequences one group (row or frame reuse)
//   sf_input_fetch     input rows from DRAM or a buffer -> row buffer
//   sf_weight_fetch    weights / BN parameters from DRAM or buffer 1
//   sf_fm_buffer x3    physical buffers 0, 1, 2 behind sf_crossbar
//   sf_row_buffer      6-row circular row buffer
//   sf_input_reg       K x K window register (input register buffer)
//   sf_weight_reg      double weight block buffer (weight register buffer)
//   sf_conv_engine     32 CONV kernels, 2048 shared MACs (4096 mults/cycle)
//   sf_out_buffer      32-bit partial sums
//   sf_batch_norm -> sf_activation_quant -> sf_maxpool -> sf_avepool ->
//   sf_eltwise -> sf_upsample -> sf_dma_write     post-processing chain
//   sf_mem_ic          shares the 512-bit DRAM port
//
// Interface: start with instr_base (DRAM word address of the instruction
// stream) starts a run; done pulses at its end. The DRAM port is a simple
// 512-bit request/response port (m_valid/m_ready/m_req, read data returned in
// order on m_rvalid/m_rdata). The sigmoid/swish tables are written through
// lut_*. The host side (PCIe DMA) that fills DRAM is outside this module.
module sf_top
  import sf_pkg::*;
#(
  parameter int BUF_DEPTH  = 16384,
  parameter int ROW_WORDS  = 1024,
  parameter int PSUM_DEPTH = 4096,
  parameter int OG_MAX     = 32,
  parameter int WB_DEPTH   = 1024,
  parameter int LINE_DEPTH = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] instr_base,
  output logic        busy,
  output logic        done,
  output logic [31:0] cfg_flag,
  output logic [31:0] groups_done,
  input  logic        lut_we,
  input  logic        lut_sel,
  input  logic [7:0]  lut_addr,
  input  logic [7:0]  lut_data,
  output logic        m_valid,
  input  logic        m_ready,
  output mem_req_t    m_req,
  input  logic        m_rvalid,
  input  word_t       m_rdata
);
  localparam int BUF_AW = $clog2(BUF_DEPTH);
  localparam int RB_AW  = $clog2(ROW_WORDS);
  localparam int OB_AW  = $clog2(PSUM_DEPTH);
  localparam int NREQ   = 5;   // 0 instr, 1 input, 2 weights, 3 shortcut, 4 write

  // ---------------- memory interconnect
  logic     [NREQ-1:0] ic_valid, ic_ready, ic_rsp;
  mem_req_t [NREQ-1:0] ic_req;
  word_t               ic_rdata;

  sf_mem_ic #(.NREQ(NREQ)) u_ic (
    .clk, .rst_n, .req_valid(ic_valid), .req_ready(ic_ready), .req(ic_req),
    .rsp_valid(ic_rsp), .rsp_data(ic_rdata),
    .m_valid, .m_ready, .m_req, .m_rvalid, .m_rdata
  );

  // ---------------- controllers
  logic   g_start, g_done, g_busy;
  instr_t g_instr;

  sf_cnn_ctrl u_cnn_ctrl (
    .clk, .rst_n, .start, .base(instr_base), .busy, .done, .cfg_flag, .groups_done,
    .m_valid(ic_valid[0]), .m_ready(ic_ready[0]), .m_req(ic_req[0]),
    .rsp_valid(ic_rsp[0]), .rsp_data(ic_rdata),
    .g_start, .g_instr, .g_done
  );

  logic                  if_cmd_valid, if_cmd_ready, if_busy;
  loc_e                  if_cmd_src;
  logic [31:0]           if_cmd_base;
  logic [15:0]           if_cmd_count;
  logic [2:0]            if_cmd_slot;
  logic [RB_AW-1:0]      if_cmd_off;
  logic                  wf_cmd_valid, wf_cmd_ready, wf_busy, wf_out_valid;
  loc_e                  wf_cmd_src;
  logic [31:0]           wf_cmd_base;
  logic [23:0]           wf_cmd_count;
  logic [23:0]           wf_out_idx;
  word_t                 wf_out_raw;
  op9_t [LANES-1:0]      wf_out_w9;
  logic                  wr_we, wr_wbank, wr_rbank;
  logic [3:0]            wr_wpos, wr_rpos;
  logic [5:0]            wr_woc;
  logic                  bn_pwe;
  logic [$clog2(OG_MAX)-1:0] bn_pog;
  logic [2:0]            bn_pidx;
  logic                  pl_we;
  logic [BUF_AW-1:0]     pl_addr;
  word_t                 pl_data;
  logic                  rb_re;
  logic [K_MAX-1:0][2:0] rb_rslot;
  logic [RB_AW-1:0]      rb_raddr;
  logic                  ir_clr, ir_col_we, ir_col_ok;
  logic [2:0]            ir_col_idx;
  logic [K_MAX-1:0]      ir_row_ok;
  logic                  dw_en, in_signed, acc_en, acc_first, use_preset;
  logic [2:0]            k_row, k_col, k_size;
  logic                  ob_re, ob_we;
  logic [OB_AW-1:0]      ob_raddr, ob_waddr;
  logic                  ch_valid, ch_ready, chain_idle;
  logic [7:0]            ch_og;
  logic [15:0]           ch_x, ch_y;
  chain_cfg_t            cfg;

  sf_dataflow_ctrl #(.RB_AW(RB_AW), .BUF_AW(BUF_AW), .OB_AW(OB_AW), .OG_MAX(OG_MAX)) u_dfc (
    .clk, .rst_n, .start(g_start), .instr(g_instr), .busy(g_busy), .done(g_done),
    .if_cmd_valid, .if_cmd_ready, .if_cmd_src, .if_cmd_base, .if_cmd_count, .if_cmd_slot,
    .if_cmd_off, .if_busy,
    .wf_cmd_valid, .wf_cmd_ready, .wf_cmd_src, .wf_cmd_base, .wf_cmd_count, .wf_busy,
    .wf_out_valid, .wf_out_raw,
    .wr_we, .wr_wbank, .wr_wpos, .wr_woc, .wr_rbank, .wr_rpos,
    .bn_pwe, .bn_pog, .bn_pidx, .pl_we, .pl_addr, .pl_data,
    .rb_re, .rb_rslot, .rb_raddr, .ir_clr, .ir_col_we, .ir_col_idx, .ir_col_ok, .ir_row_ok,
    .dw_en, .in_signed, .acc_en, .acc_first, .use_preset, .k_row, .k_col, .k_size,
    .ob_re, .ob_raddr, .ob_we, .ob_waddr,
    .ch_valid, .ch_ready, .ch_og, .ch_x, .ch_y, .ch_cfg(cfg), .chain_idle
  );

  // ---------------- buffers and crossbar
  logic [2:0]              xr_re, xr_rvalid;
  loc_e [2:0]              xr_sel;
  logic [2:0][BUF_AW-1:0]  xr_addr;
  word_t [2:0]             xr_rdata;
  logic [1:0]              xw_we;
  loc_e [1:0]              xw_sel;
  logic [1:0][BUF_AW-1:0]  xw_addr;
  word_t [1:0]             xw_wdata;
  logic [2:0]              b_re, b_we;
  logic [2:0][BUF_AW-1:0]  b_raddr, b_waddr;
  word_t [2:0]             b_rdata, b_wdata;

  sf_crossbar #(.AW(BUF_AW)) u_xbar (
    .clk, .rst_n,
    .rp_re(xr_re), .rp_sel(xr_sel), .rp_addr(xr_addr), .rp_rdata(xr_rdata), .rp_rvalid(xr_rvalid),
    .wp_we(xw_we), .wp_sel(xw_sel), .wp_addr(xw_addr), .wp_wdata(xw_wdata),
    .b_re, .b_raddr, .b_rdata, .b_we, .b_waddr, .b_wdata
  );

  for (genvar b = 0; b < 3; b++) begin : g_buf
    sf_fm_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
      .clk, .re(b_re[b]), .raddr(b_raddr[b]), .rdata(b_rdata[b]),
      .we(b_we[b]), .waddr(b_waddr[b]), .wdata(b_wdata[b])
    );
  end

  // ---------------- fetch units
  logic              rbw_we;
  logic [2:0]        rbw_slot;
  logic [RB_AW-1:0]  rbw_addr;
  word_t             rbw_data;

  sf_input_fetch #(.RB_AW(RB_AW), .BUF_AW(BUF_AW)) u_ifetch (
    .clk, .rst_n, .cmd_valid(if_cmd_valid), .cmd_ready(if_cmd_ready), .cmd_src(if_cmd_src),
    .cmd_base(if_cmd_base), .cmd_count(if_cmd_count), .cmd_slot(if_cmd_slot), .cmd_off(if_cmd_off),
    .m_valid(ic_valid[1]), .m_ready(ic_ready[1]), .m_req(ic_req[1]),
    .rsp_valid(ic_rsp[1]), .rsp_data(ic_rdata),
    .xb_re(xr_re[0]), .xb_sel(xr_sel[0]), .xb_addr(xr_addr[0]),
    .xb_rvalid(xr_rvalid[0]), .xb_rdata(xr_rdata[0]),
    .rb_we(rbw_we), .rb_slot(rbw_slot), .rb_addr(rbw_addr), .rb_data(rbw_data), .busy(if_busy)
  );

  sf_weight_fetch #(.BUF_AW(BUF_AW)) u_wfetch (
    .clk, .rst_n, .cmd_valid(wf_cmd_valid), .cmd_ready(wf_cmd_ready), .cmd_src(wf_cmd_src),
    .cmd_base(wf_cmd_base), .cmd_count(wf_cmd_count), .zero(g_instr.w_zero),
    .m_valid(ic_valid[2]), .m_ready(ic_ready[2]), .m_req(ic_req[2]),
    .rsp_valid(ic_rsp[2]), .rsp_data(ic_rdata),
    .xb_re(xr_re[2]), .xb_sel(xr_sel[2]), .xb_addr(xr_addr[2]),
    .xb_rvalid(xr_rvalid[2]), .xb_rdata(xr_rdata[2]),
    .out_valid(wf_out_valid), .out_idx(wf_out_idx), .out_raw(wf_out_raw), .out_w9(wf_out_w9),
    .busy(wf_busy)
  );

  // weight preload into buffer 1 uses crossbar write port 1
  assign xw_we[1]    = pl_we;
  assign xw_sel[1]   = LOC_B1;
  assign xw_addr[1]  = pl_addr;
  assign xw_wdata[1] = pl_data;

  // ---------------- row buffer, window and weight registers
  word_t [K_MAX-1:0]            rb_rdata;
  word_t [K_MAX-1:0][K_MAX-1:0] win;
  op9_t [LANES-1:0][LANES-1:0]  w_mat;
  op9_t [LANES-1:0][ARRAY_MAC-1:0] dw_w, dw_win;
  op9_t [LANES-1:0]             in_vec;

  sf_row_buffer #(.ROW_WORDS(ROW_WORDS)) u_rowbuf (
    .clk, .we(rbw_we), .wslot(rbw_slot), .waddr(rbw_addr), .wdata(rbw_data),
    .re(rb_re), .rslot(rb_rslot), .raddr(rb_raddr), .rdata(rb_rdata)
  );

  sf_input_reg u_inreg (
    .clk, .rst_n, .clr(ir_clr), .col_we(ir_col_we), .col_idx(ir_col_idx), .col_ok(ir_col_ok),
    .row_ok(ir_row_ok), .col_data(rb_rdata), .win
  );

  sf_weight_reg u_wreg (
    .clk, .we(wr_we), .wbank(wr_wbank), .wpos(wr_wpos), .woc(wr_woc), .wdata(wf_out_w9),
    .rbank(wr_rbank), .rpos(wr_rpos), .w_mat, .dw_w
  );

  sf_operand_sel u_opsel (
    .win, .k_row, .k_col, .k_size, .in_signed, .in_vec, .dw_win
  );

  // ---------------- CONV kernels and partial sums
  psum_word_t psum, ob_rdata, preset;

  assign preset = use_preset ? ob_rdata : '0;

  sf_conv_engine u_engine (
    .clk, .rst_n, .dw_en, .acc_en, .first(acc_first), .preset,
    .in_vec, .w_mat, .dw_win, .dw_w, .psum
  );

  sf_out_buffer #(.DEPTH(PSUM_DEPTH)) u_obuf (
    .clk, .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata),
    .we(ob_we), .waddr(ob_waddr), .wdata(psum)
  );

  // ---------------- post-processing chain
  logic                          bn_ov, bn_or, aq_ov, aq_or, mp_ov, mp_or, ap_ov, ap_or;
  logic                          ew_ov, ew_or, ew_ir, us_ov, us_or, dma_idle;
  logic signed [LANES-1:0][47:0] bn_val;
  logic [7:0]                    bn_og;
  logic [15:0]                   bn_x, bn_y;
  beat_t                         aq_beat, mp_beat, ap_beat, ew_beat, us_beat;
  logic                          ew_rd_valid, ew_rd_ready, ew_rsp_valid;
  logic [31:0]                   ew_rd_addr;
  word_t                         ew_rsp_data;
  logic                          sc_dram;

  sf_batch_norm #(.OG_MAX(OG_MAX)) u_bn (
    .clk, .rst_n, .pwe(bn_pwe), .pog(bn_pog), .pidx(bn_pidx), .pdata(wf_out_raw),
    .in_valid(ch_valid), .in_ready(ch_ready), .in_psum(psum), .in_og(ch_og), .in_x(ch_x), .in_y(ch_y),
    .out_valid(bn_ov), .out_ready(bn_or), .out_val(bn_val), .out_og(bn_og), .out_x(bn_x), .out_y(bn_y)
  );

  sf_activation_quant u_act (
    .clk, .rst_n, .act(cfg.act), .q_shift(cfg.q_shift), .uns(cfg.uns),
    .lut_we, .lut_sel, .lut_addr, .lut_data,
    .in_valid(bn_ov), .in_ready(bn_or), .in_val(bn_val), .in_og(bn_og), .in_x(bn_x), .in_y(bn_y),
    .out_valid(aq_ov), .out_ready(aq_or), .out_beat(aq_beat)
  );

  sf_maxpool #(.LINE_DEPTH(LINE_DEPTH)) u_maxpool (
    .clk, .rst_n, .en(cfg.mp_en), .uns(cfg.uns), .in_w(cfg.conv_w), .in_h(cfg.conv_h),
    .in_valid(aq_ov), .in_ready(aq_or), .in_beat(aq_beat),
    .out_valid(mp_ov), .out_ready(mp_or), .out_beat(mp_beat)
  );

  sf_avepool #(.OG_MAX(OG_MAX)) u_avepool (
    .clk, .rst_n, .en(cfg.ap_en), .uns(cfg.uns),
    .in_w(cfg.mp_en ? cfg.conv_w >> 1 : cfg.conv_w), .in_h(cfg.mp_en ? cfg.conv_h >> 1 : cfg.conv_h),
    .avg_mult(cfg.avg_mult),
    .in_valid(mp_ov), .in_ready(mp_or), .in_beat(mp_beat),
    .out_valid(ap_ov), .out_ready(ap_or), .out_beat(ap_beat)
  );

  sf_eltwise u_eltwise (
    .clk, .rst_n, .en(cfg.ew_en), .uns(cfg.uns), .sc_base(cfg.sc_base), .w(cfg.ew_w), .h(cfg.ew_h),
    .in_valid(ap_ov), .in_ready(ap_or), .in_beat(ap_beat),
    .rd_valid(ew_rd_valid), .rd_ready(ew_rd_ready), .rd_addr(ew_rd_addr),
    .rsp_valid(ew_rsp_valid), .rsp_data(ew_rsp_data),
    .out_valid(ew_ov), .out_ready(ew_or), .out_beat(ew_beat)
  );
  assign ew_ir = ap_or;   // eltwise holds no word when it can accept one

  // shortcut operand: DRAM (row reuse) or a physical buffer (frame reuse)
  assign sc_dram          = (cfg.sc_loc == LOC_DRAM);
  assign ic_valid[3]      = ew_rd_valid && sc_dram;
  assign ic_req[3].we     = 1'b0;
  assign ic_req[3].addr   = ew_rd_addr;
  assign ic_req[3].wdata  = '0;
  assign xr_re[1]         = ew_rd_valid && !sc_dram;
  assign xr_sel[1]        = cfg.sc_loc;
  assign xr_addr[1]       = ew_rd_addr[BUF_AW-1:0];
  assign ew_rd_ready      = sc_dram ? ic_ready[3] : 1'b1;
  assign ew_rsp_valid     = sc_dram ? ic_rsp[3] : xr_rvalid[1];
  assign ew_rsp_data      = sc_dram ? ic_rdata : xr_rdata[1];

  sf_upsample u_upsample (
    .clk, .rst_n, .en(cfg.us_en),
    .in_valid(ew_ov), .in_ready(ew_or), .in_beat(ew_beat),
    .out_valid(us_ov), .out_ready(us_or), .out_beat(us_beat)
  );

  sf_dma_write #(.WB_DEPTH(WB_DEPTH), .BUF_AW(BUF_AW)) u_dma_wr (
    .clk, .rst_n, .out_loc(cfg.out_loc), .out_base(cfg.out_base), .fin_w(cfg.fin_w), .fin_h(cfg.fin_h),
    .in_valid(us_ov), .in_ready(us_or), .in_beat(us_beat),
    .bw_en(xw_we[0]), .bw_sel(xw_sel[0]), .bw_addr(xw_addr[0]), .bw_data(xw_wdata[0]),
    .m_valid(ic_valid[4]), .m_ready(ic_ready[4]), .m_req(ic_req[4]), .idle(dma_idle)
  );

  assign chain_idle = !ch_valid && !bn_ov && !aq_ov && !mp_ov && !ap_ov && !ew_ov && ew_ir
                      && !us_ov && dma_idle;
endmodule
