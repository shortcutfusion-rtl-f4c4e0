// tb_sf_top: end-to-end test of the accelerator at its default sizes.
//
// A small seven-group network is placed in the DRAM model together with its
// weights, batch-norm parameters, input image and instruction stream:
//   G0 row reuse   3x3/1 conv 64->128 on an 8x8 unsigned image, ReLU,
//                  fused 2x2 max pooling, output to DRAM            (4x4x128)
//   G1 frame reuse 3x3/1 conv 128->64 (two input groups: partial sums go
//                  through the out buffer), output to buffer 0      (4x4x64)
//   G2 frame reuse 5x5 depthwise on buffer 0, swish, to buffer 1
//   G3 frame reuse 1x1 conv on buffer 1 + shortcut from buffer 0 (on-chip
//                  shortcut reuse), ReLU, 2x up-sampling, to DRAM   (8x8x64)
//   G4 row reuse   3x3/2 depthwise on that map, sigmoid, global average
//                  pooling, + shortcut read from DRAM, to DRAM      (1x1x64)
//   G5 row reuse   3x3/2 normal conv on the G3 map, to buffer 2     (4x4x64)
//   G6 frame reuse 1x1 conv on buffer 2 + shortcut from DRAM, to DRAM
// An independent reference model (behavioural SystemVerilog over sparse
// memories) computes every group; all words the reference writes to DRAM and
// to the three buffers are compared with the design's. The DRAM model stalls
// randomly. The test also counts how often each mechanism of the design was
// exercised and fails if one never was.
module tb_sf_top;
  import sf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start, busy, done, lut_we, lut_sel;
  logic [31:0] cfg_flag, groups_done;
  logic [7:0]  lut_addr, lut_data;
  logic        m_valid, m_ready, m_rvalid;
  mem_req_t    m_req;
  word_t       m_rdata;

  sf_top dut (
    .clk, .rst_n, .start, .instr_base(32'h0000_0100), .busy, .done, .cfg_flag, .groups_done,
    .lut_we, .lut_sel, .lut_addr, .lut_data, .m_valid, .m_ready, .m_req, .m_rvalid, .m_rdata
  );

  sf_dram_model #(.LAT(6), .STALL_PCT(20)) u_dram (
    .clk, .rst_n, .m_valid, .m_ready, .m_req, .m_rvalid, .m_rdata
  );

  int checks = 0, failures = 0;

  // ------------------------------------------------------------------
  // reference memories and tables
  word_t      ref_dram [int unsigned];
  word_t      ref_buf  [3][int unsigned];
  bit         dram_written [int unsigned];
  bit         buf_written [3][int unsigned];
  logic [7:0] lut_tab [2][256];
  localparam int BUF_DEPTH = 16384;

  function automatic word_t rd_loc(loc_e l, int unsigned a);
    if (l == LOC_DRAM) return ref_dram.exists(a) ? ref_dram[a] : '0;
    a = a % BUF_DEPTH;
    return ref_buf[l].exists(a) ? ref_buf[l][a] : '0;
  endfunction

  function automatic void wr_loc(loc_e l, int unsigned a, word_t d);
    if (l == LOC_DRAM) begin ref_dram[a] = d; dram_written[a] = 1; end
    else begin a = a % BUF_DEPTH; ref_buf[l][a] = d; buf_written[l][a] = 1; end
  endfunction

  function automatic int sx(logic [7:0] v, bit sgn);
    return sgn ? int'(signed'(v)) : int'(v);
  endfunction

  function automatic logic [7:0] rsat8(longint v, bit uns);
    if (uns) return (v < 0) ? 8'd0 : (v > 255) ? 8'd255 : 8'(v);
    return (v < -128) ? 8'h80 : (v > 127) ? 8'h7f : 8'(v);
  endfunction

  // Behavioural model of one group.
  function automatic void ref_group(instr_t g);
    int K = g.kernel, S = g.stride, P = g.pad, W = g.in_width, H = g.in_height;
    int IG = (g.in_channels + 63) / 64, OG = (g.out_channels + 63) / 64;
    int OW = (W + 2 * P - K) / S + 1, OH = (H + 2 * P - K) / S + 1;
    int MW, MH, EW, EH;
    logic [7:0] a [][][];   // [channel][y][x] after activation
    logic [7:0] m [][][];
    logic [7:0] e [][][];
    bit uns = g.out_unsigned;
    a = new[OG * 64];
    foreach (a[c]) begin
      a[c] = new[OH];
      foreach (a[c][y]) a[c][y] = new[OW];
    end
    for (int og = 0; og < OG; og++) begin
      word_t sw0 = rd_loc(LOC_DRAM, g.bn_base + og * 6);
      word_t sw1 = rd_loc(LOC_DRAM, g.bn_base + og * 6 + 1);
      for (int oc = 0; oc < 64; oc++) begin
        longint scale, bias;
        word_t bw = rd_loc(LOC_DRAM, g.bn_base + og * 6 + 2 + oc / 16);
        scale = (oc < 32) ? longint'(signed'(sw0[16*oc +: 16])) : longint'(signed'(sw1[16*(oc-32) +: 16]));
        bias  = longint'(signed'(bw[32*(oc%16) +: 32]));
        for (int oy = 0; oy < OH; oy++)
          for (int ox = 0; ox < OW; ox++) begin
            longint acc = 0, y, r;
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++) begin
                int iy = oy * S - P + ky, ix = ox * S - P + kx;
                if (iy < 0 || iy >= H || ix < 0 || ix >= W) continue;
                if (g.dw_en) begin
                  word_t iw = rd_loc(g.alloc_in, g.in_base + (og * H + iy) * W + ix);
                  word_t ww = rd_loc(LOC_DRAM, g.w_base + og * 64 + oc);
                  acc += sx(iw[8*oc +: 8], g.in_signed) * (int'(ww[8*(ky*K+kx) +: 8]) - int'(g.w_zero));
                end else begin
                  for (int ig = 0; ig < IG; ig++) begin
                    word_t iw = rd_loc(g.alloc_in, g.in_base + (ig * H + iy) * W + ix);
                    word_t ww = rd_loc(LOC_DRAM, g.w_base + ((og * IG + ig) * K * K + ky * K + kx) * 64 + oc);
                    for (int ic = 0; ic < 64; ic++)
                      acc += sx(iw[8*ic +: 8], g.in_signed) * (int'(ww[8*ic +: 8]) - int'(g.w_zero));
                  end
                end
              end
            y = acc * scale + bias;
            r = (g.q_shift == 0) ? y : (y + (64'sd1 <<< (g.q_shift - 1))) >>> g.q_shift;
            begin
              logic [7:0] q = rsat8(r, uns);
              logic [7:0] o;
              case (g.act)
                ACT_NONE:    o = q;
                ACT_RELU:    o = (!uns && q[7]) ? 8'd0 : q;
                ACT_SIGMOID: o = lut_tab[0][q];
                default:     o = lut_tab[1][q];
              endcase
              a[og*64+oc][oy][ox] = o;
            end
          end
      end
    end
    // max pooling
    MW = g.maxpool_en ? OW / 2 : OW;
    MH = g.maxpool_en ? OH / 2 : OH;
    m = new[OG * 64];
    foreach (m[c]) begin
      m[c] = new[MH];
      foreach (m[c][y]) begin
        m[c][y] = new[MW];
        foreach (m[c][y][x]) begin
          if (!g.maxpool_en) m[c][y][x] = a[c][y][x];
          else begin
            int best = -1000;
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++)
                if (sx(a[c][2*y+dy][2*x+dx], !uns) > best) best = sx(a[c][2*y+dy][2*x+dx], !uns);
            m[c][y][x] = 8'(best);
          end
        end
      end
    end
    // global average pooling
    EW = g.avepool_en ? 1 : MW;
    EH = g.avepool_en ? 1 : MH;
    e = new[OG * 64];
    foreach (e[c]) begin
      e[c] = new[EH];
      foreach (e[c][y]) begin
        e[c][y] = new[EW];
        if (!g.avepool_en) e[c][y] = m[c][y];
        else begin
          longint s = 0;
          for (int yy = 0; yy < MH; yy++)
            for (int xx = 0; xx < MW; xx++) s += sx(m[c][yy][xx], !uns);
          e[c][0][0] = rsat8((s * longint'(g.avg_mult) + 32768) >>> 16, uns);
        end
      end
    end
    // shortcut addition, up-sampling and write
    for (int og = 0; og < OG; og++)
      for (int y = 0; y < EH; y++)
        for (int x = 0; x < EW; x++) begin
          word_t o;
          word_t s = g.fuse_eltwise ? rd_loc(g.alloc_sc, g.sc_base + (og * EH + y) * EW + x) : '0;
          for (int l = 0; l < 64; l++) begin
            logic [7:0] v = e[og*64+l][y][x];
            if (g.fuse_eltwise) v = rsat8(sx(v, !uns) + sx(s[8*l +: 8], !uns), uns);
            o[8*l +: 8] = v;
          end
          if (g.upsample_en) begin
            for (int d = 0; d < 4; d++)
              wr_loc(g.alloc_out, g.out_base + (og * 2 * EH + 2 * y + d / 2) * 2 * EW + 2 * x + d % 2, o);
          end else wr_loc(g.alloc_out, g.out_base + (og * EH + y) * EW + x, o);
        end
  endfunction

  // ------------------------------------------------------------------
  // network construction
  instr_t grp [7];
  int     ngroups = 7;

  function automatic word_t rnd_word(int lo, int hi);
    word_t w;
    for (int l = 0; l < 64; l++) w[8*l +: 8] = 8'($urandom_range(hi - lo) + lo);
    return w;
  endfunction

  function automatic void put(int unsigned a, word_t d);
    ref_dram[a] = d;
    u_dram.mem[a] = d;
  endfunction

  // random weights (zero point 128, values spread +-40) and BN parameters
  function automatic void make_params(instr_t g);
    int IG = (g.in_channels + 63) / 64, OG = (g.out_channels + 63) / 64;
    int nw = g.dw_en ? OG * 64 : OG * IG * g.kernel * g.kernel * 64;
    for (int i = 0; i < nw; i++) put(g.w_base + i, rnd_word(88, 168));
    for (int og = 0; og < OG; og++)
      for (int j = 0; j < 6; j++) begin
        word_t w;
        if (j < 2) for (int l = 0; l < 32; l++) w[16*l +: 16] = 16'($urandom_range(60) + 4);
        else       for (int l = 0; l < 16; l++) w[32*l +: 32] = 32'($urandom_range(200000)) - 32'd100000;
        put(g.bn_base + og * 6 + j, w);
      end
  endfunction

  function automatic instr_t base_instr();
    instr_t g = '0;
    g.layer_start = 1'b1;
    g.kernel = 3'd3; g.stride = 2'd1; g.pad = 2'd1;
    g.alloc_in = LOC_DRAM; g.alloc_out = LOC_DRAM; g.alloc_sc = LOC_DRAM;
    g.act = ACT_NONE; g.in_signed = 1'b1; g.w_zero = 8'd128;
    g.wbuf_base = 32'd8192;
    return g;
  endfunction

  initial begin
    instr_t g;
    // lookup tables: input code v read as signed with 4 fraction bits
    for (int v = 0; v < 256; v++) begin
      real x, sg;
      x  = real'(int'(signed'(8'(v)))) / 16.0;
      sg = 1.0 / (1.0 + $exp(-x));
      lut_tab[0][v] = 8'(int'(sg * 127.0));
      lut_tab[1][v] = 8'(int'(x * sg * 16.0));
    end

    // G0: row reuse 3x3 64->128, unsigned 8x8 input, ReLU, max pool, to DRAM
    g = base_instr();
    g.reuse_sel = REUSE_ROW; g.in_width = 16'd8; g.in_height = 16'd8;
    g.in_channels = 16'd64; g.out_channels = 16'd128; g.in_signed = 1'b0;
    g.act = ACT_RELU; g.maxpool_en = 1'b1; g.q_shift = 8'd20;
    g.in_base = 32'h1000; g.out_base = 32'h2000; g.w_base = 32'h10000; g.bn_base = 32'h8000;
    grp[0] = g;
    // G1: frame reuse 3x3 128->64 from DRAM to buffer 0
    g = base_instr();
    g.reuse_sel = REUSE_FRAME; g.in_width = 16'd4; g.in_height = 16'd4;
    g.in_channels = 16'd128; g.out_channels = 16'd64; g.q_shift = 8'd20;
    g.in_base = 32'h2000; g.alloc_out = LOC_B0; g.out_base = 32'd0;
    g.w_base = 32'h20000; g.bn_base = 32'h8100;
    grp[1] = g;
    // G2: frame reuse 5x5 depthwise B0 -> B1, swish
    g = base_instr();
    g.reuse_sel = REUSE_FRAME; g.dw_en = 1'b1; g.kernel = 3'd5; g.pad = 2'd2;
    g.in_width = 16'd4; g.in_height = 16'd4; g.in_channels = 16'd64; g.out_channels = 16'd64;
    g.alloc_in = LOC_B0; g.in_base = 32'd0; g.alloc_out = LOC_B1; g.out_base = 32'd64;
    g.act = ACT_SWISH; g.q_shift = 8'd16;
    g.w_base = 32'h30000; g.bn_base = 32'h8200;
    grp[2] = g;
    // G3: frame reuse 1x1 B1 + shortcut B0, ReLU, upsample, to DRAM
    g = base_instr();
    g.reuse_sel = REUSE_FRAME; g.kernel = 3'd1; g.pad = 2'd0;
    g.in_width = 16'd4; g.in_height = 16'd4; g.in_channels = 16'd64; g.out_channels = 16'd64;
    g.alloc_in = LOC_B1; g.in_base = 32'd64; g.fuse_eltwise = 1'b1; g.alloc_sc = LOC_B0;
    g.sc_base = 32'd0; g.act = ACT_RELU; g.upsample_en = 1'b1; g.q_shift = 8'd17;
    g.out_base = 32'h3000; g.w_base = 32'h40000; g.bn_base = 32'h8300;
    grp[3] = g;
    // G4: row reuse 3x3/2 depthwise on the 8x8 map, sigmoid, average pool,
    //     + shortcut from DRAM
    g = base_instr();
    g.reuse_sel = REUSE_ROW; g.dw_en = 1'b1; g.stride = 2'd2;
    g.in_width = 16'd8; g.in_height = 16'd8; g.in_channels = 16'd64; g.out_channels = 16'd64;
    g.in_base = 32'h3000; g.act = ACT_SIGMOID; g.out_unsigned = 1'b1; g.avepool_en = 1'b1;
    g.avg_mult = 16'd4096; g.fuse_eltwise = 1'b1; g.alloc_sc = LOC_DRAM; g.sc_base = 32'h5000;
    g.q_shift = 8'd16; g.out_base = 32'h4000; g.w_base = 32'h50000; g.bn_base = 32'h8400;
    grp[4] = g;
    // G5: row reuse 3x3/2 normal conv on the 8x8 map, to buffer 2
    g = base_instr();
    g.reuse_sel = REUSE_ROW; g.stride = 2'd2;
    g.in_width = 16'd8; g.in_height = 16'd8; g.in_channels = 16'd64; g.out_channels = 16'd64;
    g.in_base = 32'h3000; g.alloc_out = LOC_B2; g.out_base = 32'd100; g.q_shift = 8'd19;
    g.w_base = 32'h60000; g.bn_base = 32'h8500;
    grp[5] = g;
    // G6: frame reuse 1x1 on buffer 2 + shortcut from DRAM, to DRAM (short
    //     pixels, so the shortcut reads back-pressure the chain)
    g = base_instr();
    g.reuse_sel = REUSE_FRAME; g.kernel = 3'd1; g.pad = 2'd0;
    g.in_width = 16'd4; g.in_height = 16'd4; g.in_channels = 16'd64; g.out_channels = 16'd64;
    g.alloc_in = LOC_B2; g.in_base = 32'd100; g.fuse_eltwise = 1'b1; g.alloc_sc = LOC_DRAM;
    g.sc_base = 32'h2000; g.q_shift = 8'd17; g.out_base = 32'h6000;
    g.w_base = 32'h70000; g.bn_base = 32'h8600;
    grp[6] = g;
  end

  // ------------------------------------------------------------------
  // mechanism counters
  int n_row_grp, n_frame_grp, n_preload, n_preset, n_dw_mac, n_norm_mac, n_sc_dram, n_sc_buf;
  int n_pool_out, n_avg_out, n_up_extra, n_chain_stall, n_mem_stall, n_ic_contend, n_buf_wr;
  int n_wr_dram, n_sig, n_swish, n_relu, n_pad, n_k5, n_k1, n_stride2, cycles;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.u_dfc.state == dut.u_dfc.S_DECODE) begin
      if (dut.u_dfc.ins.reuse_sel == REUSE_ROW) n_row_grp++; else n_frame_grp++;
      case (dut.u_dfc.ins.act)
        ACT_SIGMOID: n_sig++;
        ACT_SWISH:   n_swish++;
        ACT_RELU:    n_relu++;
        default: ;
      endcase
      if (dut.u_dfc.ins.kernel == 3'd5) n_k5++;
      if (dut.u_dfc.ins.kernel == 3'd1) n_k1++;
      if (dut.u_dfc.ins.stride == 2'd2) n_stride2++;
    end
    if (dut.pl_we) n_preload++;
    if (dut.acc_en && dut.acc_first && dut.use_preset) n_preset++;
    if (dut.acc_en && dut.dw_en) n_dw_mac++;
    if (dut.acc_en && !dut.dw_en) n_norm_mac++;
    if (dut.ic_valid[3] && dut.ic_ready[3]) n_sc_dram++;
    if (dut.xr_re[1]) n_sc_buf++;
    if (dut.mp_ov && dut.mp_or && dut.cfg.mp_en) n_pool_out++;
    if (dut.ap_ov && dut.ap_or && dut.cfg.ap_en) n_avg_out++;
    if (dut.us_ov && dut.us_or && dut.cfg.us_en) n_up_extra++;
    if ((dut.ch_valid && !dut.ch_ready) || (dut.bn_ov && !dut.bn_or) || (dut.aq_ov && !dut.aq_or)
        || (dut.mp_ov && !dut.mp_or) || (dut.ap_ov && !dut.ap_or)) n_chain_stall++;
    if (m_valid && !m_ready) n_mem_stall++;
    if ($countones(dut.ic_valid) > 1) n_ic_contend++;
    if (dut.xw_we[0]) n_buf_wr++;
    if (dut.ic_valid[4] && dut.ic_ready[4]) n_wr_dram++;
    if (dut.ir_col_we && (!dut.ir_col_ok || dut.ir_row_ok != 5'b11111)) n_pad++;
  end

  task automatic expect_seen(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end else $display("  %-34s %0d", what, n);
  endtask

  // ------------------------------------------------------------------
  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  initial begin
    word_t hdr;
    start = 1'b0; lut_we = 1'b0; lut_sel = 1'b0; lut_addr = '0; lut_data = '0;
    n_row_grp = 0; n_frame_grp = 0; n_preload = 0; n_preset = 0; n_dw_mac = 0; n_norm_mac = 0;
    n_sc_dram = 0; n_sc_buf = 0; n_pool_out = 0; n_avg_out = 0; n_up_extra = 0;
    n_chain_stall = 0; n_mem_stall = 0; n_ic_contend = 0; n_buf_wr = 0; n_wr_dram = 0;
    n_sig = 0; n_swish = 0; n_relu = 0; n_pad = 0; n_k5 = 0; n_k1 = 0; n_stride2 = 0; cycles = 0;
    #1;
    // DRAM contents: input image, DRAM shortcut of G4, parameters, instructions
    for (int i = 0; i < 64; i++) put(32'h1000 + i, rnd_word(0, 255));
    put(32'h5000, rnd_word(0, 100));
    for (int k = 0; k < ngroups; k++) make_params(grp[k]);
    begin
      logic [31:0] words [$];
      words.push_back(32'h1);            // CFG FLAG: run
      words.push_back(32'(ngroups));
      for (int k = 0; k < ngroups; k++) begin
        logic [INSTR_WORDS-1:0][31:0] iw;
        iw = grp[k];
        for (int j = INSTR_WORDS - 1; j >= 0; j--) words.push_back(iw[j]);
      end
      for (int a = 0; a * 16 < words.size(); a++) begin
        hdr = '0;
        for (int l = 0; l < 16 && a * 16 + l < words.size(); l++) hdr[32*l +: 32] = words[a*16+l];
        u_dram.mem[32'h100 + a] = hdr;
      end
    end
    // reference run
    for (int k = 0; k < ngroups; k++) ref_group(grp[k]);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // activation tables
    for (int t = 0; t < 2; t++)
      for (int v = 0; v < 256; v++) begin
        @(negedge clk);
        lut_we = 1'b1; lut_sel = t[0]; lut_addr = 8'(v); lut_data = lut_tab[t][v];
      end
    @(negedge clk) lut_we = 1'b0;
    start = 1'b1;
    @(negedge clk) start = 1'b0;
    wait (done);
    repeat (5) @(posedge clk);
    $display("run finished after %0d cycles, %0d groups", cycles, groups_done);
    checks++;
    if (groups_done != 32'(ngroups)) begin
      failures++; $display("FAIL groups_done=%0d", groups_done);
    end

    // compare every word the reference wrote
    foreach (dram_written[a]) begin
      word_t got;
      got = u_dram.mem.exists(a) ? u_dram.mem[a] : '0;
      checks++;
      if (got !== ref_dram[a]) begin
        failures++;
        if (failures < 10) $display("FAIL DRAM[%h] got %h exp %h", a, got[63:0], ref_dram[a][63:0]);
      end
    end
    for (int b = 0; b < 3; b++)
      foreach (buf_written[b][a]) begin
        word_t got;
        case (b)
          0: got = dut.g_buf[0].u_buf.mem[a];
          1: got = dut.g_buf[1].u_buf.mem[a];
          default: got = dut.g_buf[2].u_buf.mem[a];
        endcase
        checks++;
        if (got !== ref_buf[b][a]) begin
          failures++;
          if (failures < 10) $display("FAIL B%0d[%0d] got %h exp %h", b, a, got[63:0], ref_buf[b][a][63:0]);
        end
      end

    $display("mechanisms:");
    expect_seen("row-reuse groups", n_row_grp);
    expect_seen("frame-reuse groups", n_frame_grp);
    expect_seen("weight preload words into buffer 1", n_preload);
    expect_seen("partial-sum preset from out buffer", n_preset);
    expect_seen("depthwise MAC cycles", n_dw_mac);
    expect_seen("normal-conv MAC cycles", n_norm_mac);
    expect_seen("shortcut reads from DRAM", n_sc_dram);
    expect_seen("shortcut reads from on-chip buffer", n_sc_buf);
    expect_seen("max-pool outputs", n_pool_out);
    expect_seen("average-pool outputs", n_avg_out);
    expect_seen("up-sampled output beats", n_up_extra);
    expect_seen("chain back-pressure cycles", n_chain_stall);
    expect_seen("DRAM back-pressure cycles", n_mem_stall);
    expect_seen("interconnect contention cycles", n_ic_contend);
    expect_seen("output words to on-chip buffers", n_buf_wr);
    expect_seen("output words to DRAM", n_wr_dram);
    expect_seen("sigmoid groups", n_sig);
    expect_seen("swish groups", n_swish);
    expect_seen("ReLU groups", n_relu);
    expect_seen("zero-padded window columns", n_pad);
    expect_seen("5x5 kernels", n_k5);
    expect_seen("1x1 kernels", n_k1);
    expect_seen("stride-2 groups", n_stride2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
