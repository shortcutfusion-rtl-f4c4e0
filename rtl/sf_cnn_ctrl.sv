// sf_cnn_ctrl: top-level CNN controller. It reads the instruction stream that
// the host packed into DRAM and runs the node groups one after the other.
//
// Stream layout (32-bit words, 16 per 512-bit DRAM word, word j at DRAM word
// base + j/16, bits 32*(j%16) and up): word 0 is the CFG FLAG, word 1 the
// number of groups, then 11 words per group. Bit 0 of the CFG FLAG must be
// set for the stream to be run (the meaning of the flag is not given in the
// paper; this is this design's choice, the other bits are reported on
// cfg_flag). For each group the 11 words are gathered into an instr_t
// (word 0 in the top bits), the dataflow controller is started with it, and
// the next group is fetched when the controller signals done.
// start begins the stream; done pulses after the last group (or at once for
// an empty or disabled stream); busy is high in between.
module sf_cnn_ctrl
  import sf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] base,
  output logic        busy,
  output logic        done,
  output logic [31:0] cfg_flag,
  output logic [31:0] groups_done,
  // DRAM read port
  output logic        m_valid,
  input  logic        m_ready,
  output mem_req_t    m_req,
  input  logic        rsp_valid,
  input  word_t       rsp_data,
  // dataflow controller
  output logic        g_start,
  output instr_t      g_instr,
  input  logic        g_done
);
  typedef enum logic [2:0] {S_IDLE, S_REQ, S_RSP, S_LAUNCH, S_RUN} state_e;
  state_e      state;
  logic [31:0] j, ngroups, k;
  logic [31:0] word;
  logic [INSTR_WORDS-1:0][31:0] words;   // words[INSTR_WORDS-1] = instruction word 0

  assign busy        = (state != S_IDLE);
  assign m_valid     = (state == S_REQ);
  assign m_req.we    = 1'b0;
  assign m_req.addr  = base + (j >> 4);
  assign m_req.wdata = '0;
  assign word        = rsp_data[32*j[3:0] +: 32];
  assign g_start     = (state == S_LAUNCH);
  assign g_instr     = instr_t'(words);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; j <= '0; k <= '0; ngroups <= '0; cfg_flag <= '0;
      groups_done <= '0; done <= 1'b0; words <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          j <= '0; k <= '0; groups_done <= '0;
          state <= S_REQ;
        end
        S_REQ: if (m_ready) state <= S_RSP;
        S_RSP: if (rsp_valid) begin
          j <= j + 32'd1;
          if (j == 32'd0) begin
            cfg_flag <= word;
            state    <= S_REQ;
          end else if (j == 32'd1) begin
            ngroups <= word;
            if (!cfg_flag[0] || word == 32'd0) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else state <= S_REQ;
          end else begin
            words[INSTR_WORDS-1 - int'(k)] <= word;
            if (k == 32'(INSTR_WORDS - 1)) begin
              k     <= '0;
              state <= S_LAUNCH;
            end else begin
              k     <= k + 32'd1;
              state <= S_REQ;
            end
          end
        end
        S_LAUNCH: state <= S_RUN;
        S_RUN: if (g_done) begin
          groups_done <= groups_done + 32'd1;
          if (groups_done + 32'd1 == ngroups) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else state <= S_REQ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
