// sf_dataflow_ctrl: the group-wise dataflow controller. It runs one group
// instruction (one CONV layer with its fused post-processing) at a time and
// switches between the two weight-reuse schemes per group.
//
// Row-based weight reuse (reuse_sel = REUSE_ROW, shallow layers):
//   1. the whole weight set of the layer is copied from DRAM into buffer 1
//      (weights are read from DRAM exactly once),
//   2. for every output row oy: the input rows it needs are read from DRAM
//      into the circular row buffer (each input row once), then for every
//      output channel group og and input channel group ig the weight block
//      (og, ig) is loaded from buffer 1 and swept along the row. Partial
//      sums of one row are kept in the out buffer (address x).
// Frame-based weight reuse (REUSE_FRAME, deep layers):
//   for every (og, ig) the weight block is read from DRAM once and swept over
//   the whole frame; the input channel group is streamed from its on-chip
//   buffer through the row buffer, and partial sums of the whole frame are
//   kept in the out buffer (address y * out_w + x).
// Batch-norm parameters of all channel groups are loaded first in both cases.
//
// For one output pixel the controller reads the K x K window into the input
// register buffer one column per cycle (K cycles + 1), then steps the CONV
// kernels through the K*K kernel positions (normal convolution; 64 x 64
// multiply-accumulates per step) or one step (depthwise; the whole window at
// once), then either writes the partial sum back (more input groups to come)
// or sends it down the post-processing chain. A normal KxK pixel step thus
// takes K + 1 + K*K + 1 cycles, a depthwise one K + 3; fetches and chain
// stalls add to that. Loads are not overlapped with computation in this
// design (the paper hides them behind computation; see the design notes).
//
// Depthwise layers use in_channels = out_channels; channel group og of the
// input feeds output group og.
// Handshake: start (one cycle, with instr valid) begins a group; done pulses
// for one cycle when its last output word has left the write unit.
module sf_dataflow_ctrl
  import sf_pkg::*;
#(
  parameter int RB_AW  = 10,
  parameter int BUF_AW = 14,
  parameter int OB_AW  = 12,
  parameter int OG_MAX = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  instr_t                instr,
  output logic                  busy,
  output logic                  done,
  // input fetch
  output logic                  if_cmd_valid,
  input  logic                  if_cmd_ready,
  output loc_e                  if_cmd_src,
  output logic [31:0]           if_cmd_base,
  output logic [15:0]           if_cmd_count,
  output logic [2:0]            if_cmd_slot,
  output logic [RB_AW-1:0]      if_cmd_off,
  input  logic                  if_busy,
  // weight fetch
  output logic                  wf_cmd_valid,
  input  logic                  wf_cmd_ready,
  output loc_e                  wf_cmd_src,
  output logic [31:0]           wf_cmd_base,
  output logic [23:0]           wf_cmd_count,
  input  logic                  wf_busy,
  input  logic                  wf_out_valid,
  input  word_t                 wf_out_raw,
  // weight register buffer
  output logic                  wr_we,
  output logic                  wr_wbank,
  output logic [3:0]            wr_wpos,
  output logic [5:0]            wr_woc,
  output logic                  wr_rbank,
  output logic [3:0]            wr_rpos,
  // batch-norm parameter load
  output logic                  bn_pwe,
  output logic [$clog2(OG_MAX)-1:0] bn_pog,
  output logic [2:0]            bn_pidx,
  // weight preload into buffer 1 (row reuse)
  output logic                  pl_we,
  output logic [BUF_AW-1:0]     pl_addr,
  output word_t                 pl_data,
  // row buffer read and input register buffer fill
  output logic                  rb_re,
  output logic [K_MAX-1:0][2:0] rb_rslot,
  output logic [RB_AW-1:0]      rb_raddr,
  output logic                  ir_clr,
  output logic                  ir_col_we,
  output logic [2:0]            ir_col_idx,
  output logic                  ir_col_ok,
  output logic [K_MAX-1:0]      ir_row_ok,
  // CONV kernels
  output logic                  dw_en,
  output logic                  in_signed,
  output logic                  acc_en,
  output logic                  acc_first,
  output logic                  use_preset,
  output logic [2:0]            k_row,
  output logic [2:0]            k_col,
  output logic [2:0]            k_size,
  // out buffer (partial sums)
  output logic                  ob_re,
  output logic [OB_AW-1:0]      ob_raddr,
  output logic                  ob_we,
  output logic [OB_AW-1:0]      ob_waddr,
  // post-processing chain
  output logic                  ch_valid,
  input  logic                  ch_ready,
  output logic [7:0]            ch_og,
  output logic [15:0]           ch_x,
  output logic [15:0]           ch_y,
  output chain_cfg_t            ch_cfg,
  input  logic                  chain_idle
);
  typedef enum logic [3:0] {
    S_IDLE, S_DECODE, S_PRELOAD, S_PRELOAD_W, S_BN, S_BN_W, S_FILL,
    S_WLOAD, S_WLOAD_W, S_WIN, S_MAC, S_OUT, S_NEXT, S_DRAIN
  } state_e;
  state_e state;

  instr_t      ins;
  logic [2:0]  K;
  logic [1:0]  S;
  logic [1:0]  P;
  logic [15:0] W, H, OW, OH;
  logic [7:0]  IG, OG, og, ig, cur_cg, cg_lo, cg_hi, fill_cg;
  logic [4:0]  KK;
  logic [15:0] ox, oy;
  logic        row_mode, wload_pending;
  logic signed [17:0] fill_row, need_hi, iy0, ix0;
  logic [2:0]  fill_slot, slot0;
  logic [2:0]  wc;                    // window column counter
  logic [2:0]  kr, kc;
  logic        col_we_q;
  logic [2:0]  col_idx_q;
  logic        col_ok_q;
  logic [K_MAX-1:0] row_ok_q;
  logic [23:0] blk_words;
  logic [31:0] blk_off;
  logic        wbank;               // bank being read
  logic [5:0]  ld_oc;
  logic [3:0]  ld_pos;
  logic [7:0]  ld_og;
  logic [2:0]  ld_j;
  logic        last_ig;
  logic [23:0] ld_cnt;

  // --------------------------------------------------------------------
  // derived values
  always_comb begin
    cur_cg  = ins.dw_en ? og : ig;
    cg_lo   = row_mode ? 8'd0 : cur_cg;
    cg_hi   = row_mode ? IG - 8'd1 : cur_cg;
    last_ig = ins.dw_en || (ig == IG - 8'd1);
    iy0     = 18'(signed'({2'b0, oy})) * 18'(S) - 18'(P);
    ix0     = 18'(signed'({2'b0, ox})) * 18'(S) - 18'(P);
    need_hi = iy0 + 18'(K) - 18'sd1;
    if (need_hi > 18'(signed'({2'b0, H})) - 18'sd1) need_hi = 18'(signed'({2'b0, H})) - 18'sd1;
    blk_words = ins.dw_en ? 24'd64 : 24'(KK) * 24'd64;
    blk_off   = ins.dw_en ? 32'(og) * 32'd64
                          : (32'(og) * 32'(IG) + 32'(ig)) * 32'(blk_words);
  end

  // --------------------------------------------------------------------
  // command and data-path outputs
  always_comb begin
    if_cmd_valid = 1'b0;
    if_cmd_src   = ins.alloc_in;
    if_cmd_base  = ins.in_base + (32'(fill_cg) * 32'(H) + 32'(fill_row[15:0])) * 32'(W);
    if_cmd_count = W;
    if_cmd_slot  = fill_slot;
    if_cmd_off   = RB_AW'(32'(fill_cg - cg_lo) * 32'(W));
    wf_cmd_valid = 1'b0;
    wf_cmd_src   = LOC_DRAM;
    wf_cmd_base  = ins.w_base;
    wf_cmd_count = blk_words;
    unique case (state)
      S_PRELOAD: begin
        wf_cmd_valid = 1'b1;
        wf_cmd_count = ins.dw_en ? 24'(OG) * 24'd64 : 24'(OG) * 24'(IG) * 24'(blk_words);
      end
      S_BN: begin
        wf_cmd_valid = 1'b1;
        wf_cmd_base  = ins.bn_base;
        wf_cmd_count = 24'(OG) * 24'd6;
      end
      S_WLOAD: begin
        wf_cmd_valid = 1'b1;
        wf_cmd_src   = row_mode ? LOC_B1 : LOC_DRAM;
        wf_cmd_base  = (row_mode ? ins.wbuf_base : ins.w_base) + blk_off;
      end
      S_FILL: if_cmd_valid = (fill_row <= need_hi) && if_cmd_ready;
      default: ;
    endcase

    wr_we    = (state == S_WLOAD_W) && wf_out_valid;
    wr_wbank = !wbank;
    wr_wpos  = ld_pos;
    wr_woc   = ld_oc;
    wr_rbank = wbank;
    wr_rpos  = ins.dw_en ? 4'd0 : 4'(kr * K + kc);

    bn_pwe  = (state == S_BN_W) && wf_out_valid;
    bn_pog  = ld_og[$clog2(OG_MAX)-1:0];
    bn_pidx = ld_j;

    pl_we   = (state == S_PRELOAD_W) && wf_out_valid;
    pl_addr = BUF_AW'(ins.wbuf_base + 32'(ld_cnt));
    pl_data = wf_out_raw;

    rb_re    = (state == S_WIN) && (wc < K);
    for (int r = 0; r < K_MAX; r++) begin
      logic [3:0] sl;
      sl = 4'(slot0) + 4'(r);
      rb_rslot[r] = (sl >= 4'd6) ? 3'(sl - 4'd6) : sl[2:0];
    end
    rb_raddr = RB_AW'(32'(cur_cg - cg_lo) * 32'(W) + 32'(ix0[15:0] + 16'(wc)));
    ir_clr     = (state == S_DECODE);
    ir_col_we  = col_we_q;
    ir_col_idx = col_idx_q;
    ir_col_ok  = col_ok_q;
    ir_row_ok  = row_ok_q;

    dw_en      = ins.dw_en;
    in_signed  = ins.in_signed;
    acc_en     = (state == S_MAC);
    acc_first  = (kr == 3'd0) && (kc == 3'd0);
    use_preset = !ins.dw_en && (ig != 8'd0);
    k_row      = kr;
    k_col      = kc;
    k_size     = K;

    ob_re    = (state == S_WIN) && (wc == 3'd0);
    ob_raddr = row_mode ? OB_AW'(ox) : OB_AW'(32'(oy) * 32'(OW) + 32'(ox));
    ob_we    = (state == S_OUT) && !last_ig;
    ob_waddr = ob_raddr;

    ch_valid = (state == S_OUT) && last_ig;
    ch_og    = og;
    ch_x     = ox;
    ch_y     = oy;
  end

  // --------------------------------------------------------------------
  // sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ins <= '0; done <= 1'b0;
      K <= 3'd1; S <= 2'd1; P <= '0; W <= '0; H <= '0; OW <= '0; OH <= '0; IG <= '0; OG <= '0;
      KK <= '0; og <= '0; ig <= '0; ox <= '0; oy <= '0; row_mode <= 1'b0; wload_pending <= 1'b0;
      fill_row <= '0; fill_cg <= '0; fill_slot <= '0; slot0 <= '0; wc <= '0; kr <= '0; kc <= '0;
      col_we_q <= 1'b0; col_idx_q <= '0; col_ok_q <= 1'b0; row_ok_q <= '0; wbank <= 1'b0;
      ld_oc <= '0; ld_pos <= '0; ld_og <= '0; ld_j <= '0; ld_cnt <= '0; ch_cfg <= '0;
    end else begin
      done     <= 1'b0;
      col_we_q <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ins   <= instr;
          state <= S_DECODE;
        end
        S_DECODE: begin
          logic [15:0] ow, oh, mw, mh, ew, eh;
          K  <= ins.kernel;
          S  <= ins.stride;
          P  <= ins.pad;
          W  <= ins.in_width;
          H  <= ins.in_height;
          KK <= 5'(ins.kernel * ins.kernel);
          IG <= groups(ins.in_channels);
          OG <= groups(ins.out_channels);
          ow = ((ins.in_width  + 16'(2 * ins.pad) - 16'(ins.kernel)) >> (ins.stride - 2'd1)) + 16'd1;
          oh = ((ins.in_height + 16'(2 * ins.pad) - 16'(ins.kernel)) >> (ins.stride - 2'd1)) + 16'd1;
          OW <= ow;
          OH <= oh;
          mw = ins.maxpool_en ? ow >> 1 : ow;
          mh = ins.maxpool_en ? oh >> 1 : oh;
          ew = ins.avepool_en ? 16'd1 : mw;
          eh = ins.avepool_en ? 16'd1 : mh;
          ch_cfg.act      <= ins.act;
          ch_cfg.q_shift  <= ins.q_shift;
          ch_cfg.uns      <= ins.out_unsigned;
          ch_cfg.mp_en    <= ins.maxpool_en;
          ch_cfg.ap_en    <= ins.avepool_en;
          ch_cfg.ew_en    <= ins.fuse_eltwise;
          ch_cfg.us_en    <= ins.upsample_en;
          ch_cfg.conv_w   <= ow;
          ch_cfg.conv_h   <= oh;
          ch_cfg.ew_w     <= ew;
          ch_cfg.ew_h     <= eh;
          ch_cfg.fin_w    <= ins.upsample_en ? ew << 1 : ew;
          ch_cfg.fin_h    <= ins.upsample_en ? eh << 1 : eh;
          ch_cfg.avg_mult <= ins.avg_mult;
          ch_cfg.sc_loc   <= ins.alloc_sc;
          ch_cfg.sc_base  <= ins.sc_base;
          ch_cfg.out_loc  <= ins.alloc_out;
          ch_cfg.out_base <= ins.out_base;
          row_mode <= (ins.reuse_sel == REUSE_ROW);
          og <= '0; ig <= '0; ox <= '0; oy <= '0;
          fill_row <= '0; fill_slot <= '0;
          fill_cg  <= '0;
          slot0 <= (ins.pad == 2'd0) ? 3'd0 : 3'(3'd6 - 3'(ins.pad));
          wload_pending <= 1'b1;
          state <= (ins.reuse_sel == REUSE_ROW) ? S_PRELOAD : S_BN;
        end
        S_PRELOAD: if (wf_cmd_ready) begin
          ld_cnt <= '0;
          state  <= S_PRELOAD_W;
        end
        S_PRELOAD_W: begin
          if (wf_out_valid) ld_cnt <= ld_cnt + 24'd1;
          if (!wf_busy) state <= S_BN;
        end
        S_BN: if (wf_cmd_ready) begin
          ld_og <= '0; ld_j <= '0;
          state <= S_BN_W;
        end
        S_BN_W: begin
          if (wf_out_valid) begin
            if (ld_j == 3'd5) begin
              ld_j  <= '0;
              ld_og <= ld_og + 8'd1;
            end else ld_j <= ld_j + 3'd1;
          end
          if (!wf_busy) begin
            fill_cg <= cg_lo;
            state   <= S_FILL;
          end
        end
        S_FILL: begin
          if (fill_row <= need_hi) begin
            if (if_cmd_ready) begin
              if (fill_cg == cg_hi) begin
                fill_cg   <= cg_lo;
                fill_row  <= fill_row + 18'sd1;
                fill_slot <= (fill_slot == 3'd5) ? 3'd0 : fill_slot + 3'd1;
              end else fill_cg <= fill_cg + 8'd1;
            end
          end else if (!if_busy) begin
            wc    <= '0;
            state <= wload_pending ? S_WLOAD : S_WIN;
          end
        end
        S_WLOAD: if (wf_cmd_ready) begin
          ld_oc <= '0; ld_pos <= '0;
          state <= S_WLOAD_W;
        end
        S_WLOAD_W: begin
          if (wf_out_valid) begin
            ld_oc <= ld_oc + 6'd1;
            if (ld_oc == 6'd63) ld_pos <= ld_pos + 4'd1;
          end
          if (!wf_busy) begin
            wbank         <= !wbank;
            wload_pending <= 1'b0;
            wc            <= '0;
            state         <= S_WIN;
          end
        end
        S_WIN: begin
          if (wc < K) begin
            logic signed [17:0] ix;
            ix = ix0 + 18'(wc);
            col_we_q  <= 1'b1;
            col_idx_q <= wc;
            col_ok_q  <= (ix >= 0) && (ix < 18'(signed'({2'b0, W})));
            for (int r = 0; r < K_MAX; r++)
              row_ok_q[r] <= (r < int'(K)) && (iy0 + 18'(r) >= 0) && (iy0 + 18'(r) < 18'(signed'({2'b0, H})));
            wc <= wc + 3'd1;
          end else begin
            kr <= '0; kc <= '0;
            state <= S_MAC;
          end
        end
        S_MAC: begin
          if (ins.dw_en || (kr == K - 3'd1 && kc == K - 3'd1)) begin
            state <= S_OUT;
          end else if (kc == K - 3'd1) begin
            kc <= '0; kr <= kr + 3'd1;
          end else kc <= kc + 3'd1;
        end
        S_OUT: if (!last_ig || ch_ready) state <= S_NEXT;
        S_NEXT: begin
          state <= S_FILL;
          wc    <= '0;
          if (ox != OW - 16'd1) begin
            ox <= ox + 16'd1;
          end else begin
            ox <= '0;
            if (row_mode) begin
              if (!ins.dw_en && ig != IG - 8'd1) begin
                ig <= ig + 8'd1; wload_pending <= 1'b1;
              end else if (og != OG - 8'd1) begin
                ig <= '0; og <= og + 8'd1; wload_pending <= 1'b1;
              end else if (oy != OH - 16'd1) begin
                ig <= '0; og <= '0; oy <= oy + 16'd1; wload_pending <= 1'b1;
                slot0 <= 3'((4'(slot0) + 4'(S)) % 4'd6);
              end else state <= S_DRAIN;
            end else begin
              if (oy != OH - 16'd1) begin
                oy <= oy + 16'd1;
                slot0 <= 3'((4'(slot0) + 4'(S)) % 4'd6);
              end else begin
                oy <= '0;
                fill_row  <= '0;
                fill_slot <= '0;
                slot0 <= (P == 2'd0) ? 3'd0 : 3'(3'd6 - 3'(P));
                wload_pending <= 1'b1;
                if (!ins.dw_en && ig != IG - 8'd1) begin
                  ig <= ig + 8'd1; fill_cg <= ig + 8'd1;
                end else if (og != OG - 8'd1) begin
                  ig <= '0; og <= og + 8'd1;
                  fill_cg <= ins.dw_en ? og + 8'd1 : 8'd0;
                end else state <= S_DRAIN;
              end
            end
          end
        end
        S_DRAIN: if (chain_idle && !if_busy && !wf_busy) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // Frame reuse keeps a whole output frame of partial sums in the out buffer.
  a_ob_fits: assert property (@(posedge clk) disable iff (!rst_n)
    ob_we |-> (32'(oy) * 32'(OW) + 32'(ox) < 32'(1 << OB_AW)) || row_mode);
endmodule
