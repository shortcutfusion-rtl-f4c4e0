// sf_pkg: constants and types shared by the accelerator.
//
// The datapath is organised around a 512-bit word that carries one 8-bit
// feature-map value for each of LANES = 64 channels (the input and output
// parallelism Ti = To of the design). Every buffer bank, the row buffer, the
// DRAM port and the output stream use that word. Partial sums are 32 bits per
// lane (the 4-byte partial sums of the out buffer).
//
// A layer ("node group") is described by an 11-word instruction. The paper
// gives the count (11 x 32-bit words) and names some fields (layer_start,
// in_width, in_height, stride, in_channels, out_channels, data reuse_sel,
// avepool_en, fuse_eltwise, upsample_en); the bit layout below, and the other
// fields, are this design's own encoding.
package sf_pkg;

  // Parallelism: Ti = To = 64 lanes, 32 CONV kernels of two output channels.
  localparam int LANES     = 64;
  localparam int NKER      = LANES / 2;
  localparam int ARRAY_MAC = 32;           // shared MACs per MAC array
  localparam int K_MAX     = 5;            // largest kernel (1x1/3x3/5x5)
  localparam int KK_MAX    = K_MAX * K_MAX;
  localparam int WORD_W    = LANES * 8;    // 512-bit data word
  localparam int PSUM_W    = 32;           // partial-sum width per lane
  localparam int ROW_SLOTS = 6;            // rows in the circular row buffer
  localparam int INSTR_WORDS = 11;

  typedef logic [WORD_W-1:0]       word_t;
  typedef logic [LANES*PSUM_W-1:0] psum_word_t;
  typedef logic signed [8:0]       op9_t;   // 9-bit signed MAC operand

  // Where a tensor lives: one of the three physical buffers or DRAM.
  typedef enum logic [1:0] {LOC_B0 = 2'd0, LOC_B1 = 2'd1, LOC_B2 = 2'd2, LOC_DRAM = 2'd3} loc_e;

  typedef enum logic [1:0] {ACT_NONE = 2'd0, ACT_RELU = 2'd1, ACT_SIGMOID = 2'd2, ACT_SWISH = 2'd3} act_e;

  // Weight reuse scheme of a group (Fig. 3): row-based or frame-based.
  typedef enum logic {REUSE_ROW = 1'b0, REUSE_FRAME = 1'b1} reuse_e;

  // 11 x 32-bit group instruction, word 0 in the most significant bits.
  typedef struct packed {
    // word 0: control flags
    logic        layer_start;
    logic        dw_en;        // depthwise convolution
    reuse_e      reuse_sel;
    logic [2:0]  kernel;       // 1, 3 or 5
    logic [1:0]  stride;       // 1 or 2
    logic [1:0]  pad;          // 0..2
    loc_e        alloc_in;
    loc_e        alloc_out;
    loc_e        alloc_sc;
    logic        fuse_eltwise;
    logic        maxpool_en;   // fused 2x2/2 max pooling
    logic        avepool_en;   // global average pooling
    logic        upsample_en;  // 2x nearest up-sampling
    act_e        act;
    logic        in_signed;    // input feature map is signed (else unsigned)
    logic        out_unsigned; // output feature map saturates to 0..255
    logic [7:0]  rsv0;
    // word 1
    logic [15:0] in_width;
    logic [15:0] in_height;
    // word 2
    logic [15:0] in_channels;
    logic [15:0] out_channels;
    // word 3
    logic [7:0]  q_shift;      // dynamic fixed point: right shift after BN
    logic [7:0]  w_zero;       // weight zero point (non-zero quantisation)
    logic [15:0] avg_mult;     // 65536 / (H*W) for global average pooling
    // words 4..9: base addresses (512-bit word addresses)
    logic [31:0] in_base;
    logic [31:0] out_base;
    logic [31:0] sc_base;
    logic [31:0] w_base;       // weights in DRAM
    logic [31:0] bn_base;      // batch-norm parameters in DRAM
    logic [31:0] wbuf_base;    // weight area in buffer 1 (row reuse)
    // word 10
    logic [31:0] rsv10;
  } instr_t;

  // One output word travelling down the post-processing chain.
  typedef struct packed {
    word_t       data;
    logic [7:0]  og;   // output channel group
    logic [15:0] x;
    logic [15:0] y;
  } beat_t;

  // Simple memory request (DRAM side of the fetch and write units). One
  // 512-bit word per request; read data returns in request order.
  typedef struct packed {
    logic        we;
    logic [31:0] addr;
    word_t       wdata;
  } mem_req_t;

  // Configuration of the post-processing chain for the current group.
  typedef struct packed {
    act_e        act;
    logic [7:0]  q_shift;
    logic        uns;        // output values are unsigned
    logic        mp_en;
    logic        ap_en;
    logic        ew_en;
    logic        us_en;
    logic [15:0] conv_w;     // size of the convolution output
    logic [15:0] conv_h;
    logic [15:0] ew_w;       // size after the pooling stages
    logic [15:0] ew_h;
    logic [15:0] fin_w;      // size written out
    logic [15:0] fin_h;
    logic [15:0] avg_mult;
    loc_e        sc_loc;
    logic [31:0] sc_base;
    loc_e        out_loc;
    logic [31:0] out_base;
  } chain_cfg_t;

  // Saturate a signed value to 8 bits, signed or unsigned range.
  function automatic logic [7:0] sat8(input logic signed [47:0] v, input logic uns);
    if (uns) begin
      if (v < 0)        return 8'd0;
      else if (v > 255) return 8'd255;
      else              return v[7:0];
    end else begin
      if (v < -128)     return 8'h80;
      else if (v > 127) return 8'h7f;
      else              return v[7:0];
    end
  endfunction

  // Read an 8-bit value as a 9-bit signed number.
  function automatic op9_t ext9(input logic [7:0] v, input logic sgn);
    return sgn ? op9_t'({v[7], v}) : op9_t'({1'b0, v});
  endfunction

  // Number of 64-channel groups for a channel count.
  function automatic logic [7:0] groups(input logic [15:0] ch);
    logic [15:0] g;
    g = (ch + 16'(LANES - 1)) / 16'(LANES);
    return g[7:0];
  endfunction

endpackage
