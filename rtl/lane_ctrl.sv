// lane_ctrl: controller of one IMAX lane.
//
// The host packs everything a kernel needs - PE configuration, register
// values, operand vectors - densely into one DMA buffer. AXI DMA READ streams
// that buffer in; this controller walks it. Each item starts with a 64-bit
// header (imax_pkg::hdr_t) whose tag selects the phase:
//   CONF   configure PE <id>: op, LMM base address, accumulator store address.
//   REGV   the next stream word is PE <id>'s register value.
//   LOAD   RANGE: LMM <id>, start address, length; then LOAD: the next <len>
//          stream words are written into that LMM through its DMA port.
//   EXEC   clear the accumulators, inject <len> tokens (word indices
//          0..len-1, thread = index mod 4, the last one marked) into PE 0 one
//          per cycle, then wait until the array is idle. <len> must be a whole
//          number of 16-element bursts (4 words); the host computes residual
//          elements itself.
//   DRAIN  RANGE: LMM <id>, start address, length; then DRAIN: send those
//          words out to AXI DMA WRITE, m_last on the final one.
//   END    pulse done: the buffer has been processed.
// A cycle counter per phase (IDLE, CONF, REGV, RANGE, LOAD, EXEC, DRAIN) gives
// the execution-time breakdown.
//
// Interfaces: s_* (valid/ready stream in), m_* (valid/ready stream out, one
// word per cycle when m_ready stays high), PE configuration and register
// writes, the token into PE 0, the DMA port of the LMMs (lb_*, read data
// returned one cycle after the read) and array_busy from the PE array.
// The token's operand fields (a, b, c, d) leave here as zero: the PEs fill
// them, so those output bits are constant by design.
//
// Following the paper: the phase names, the burst of 16 FP16 elements and the
// split of residuals to the host. This design's choice: the header format and
// the order in which phases run (as the stream dictates). REFILL, also named
// in the paper's breakdown, is not implemented.
module lane_ctrl
  import imax_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // stream from AXI DMA READ
  input  logic [DATA_W-1:0] s_data,
  input  logic              s_valid,
  output logic              s_ready,
  // stream to AXI DMA WRITE
  output logic [DATA_W-1:0] m_data,
  output logic              m_valid,
  input  logic              m_ready,
  output logic              m_last,
  // PE configuration
  output logic              cfg_we,
  output logic [ID_W-1:0]   cfg_sel,
  output pe_cfg_t           cfg_data,
  output logic              regv_we,
  output logic [DATA_W-1:0] regv_data,
  // execution
  output logic              exec_start,
  output token_t            tok,
  input  logic              array_busy,
  // LMM DMA port
  output logic              lb_en,
  output logic              lb_we,
  output logic [ID_W-1:0]   lb_sel,
  output logic [LMM_AW-1:0] lb_addr,
  output logic [DATA_W-1:0] lb_wdata,
  input  logic [DATA_W-1:0] lb_rdata,
  // status
  output logic              exec_done,
  output logic              done,
  output phase_e            phase,
  output logic [31:0]       phase_cycles [NUM_PHASES]
);

  typedef enum logic [3:0] {
    S_HDR, S_CONF, S_REGV, S_RANGE, S_LOAD,
    S_EXEC_START, S_EXEC, S_EXEC_WAIT, S_DRAIN, S_END
  } state_e;

  state_e           state;
  hdr_t             hdr;
  logic [LEN_W-1:0] cnt;       // words loaded / tokens issued / reads issued
  logic [LEN_W-1:0] out_cnt;   // drain words sent

  hdr_t s_hdr;
  assign s_hdr = hdr_t'(s_data);

  // drain read pipeline: one pending read and a 2-entry output FIFO
  logic              rd_pend;
  logic [DATA_W-1:0] fifo [2];
  logic [1:0]        fifo_cnt;
  logic              fifo_last [2];
  logic              rd_pend_last;
  logic              pop, rd_issue;

  assign pop      = m_valid && m_ready;
  assign rd_issue = (state == S_DRAIN) && (cnt < hdr.len) &&
                    ((2'(fifo_cnt) + 2'(rd_pend) - 2'(pop)) < 2'd2);

  // ---------------- state machine -----------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_HDR;
      hdr          <= '0;
      cnt          <= '0;
      out_cnt      <= '0;
      rd_pend      <= 1'b0;
      rd_pend_last <= 1'b0;
      fifo_cnt     <= '0;
      fifo[0]      <= '0;
      fifo[1]      <= '0;
      fifo_last[0] <= 1'b0;
      fifo_last[1] <= 1'b0;
    end else begin
      unique case (state)
        S_HDR: if (s_valid) begin
          hdr <= s_hdr;
          cnt <= '0;
          out_cnt <= '0;
          unique case (s_hdr.tag)
            TAG_CONF:  state <= S_CONF;
            TAG_REGV:  state <= S_REGV;
            TAG_LOAD,
            TAG_DRAIN: state <= S_RANGE;
            TAG_EXEC:  state <= S_EXEC_START;
            TAG_END:   state <= S_END;
            default:   state <= S_HDR;   // unknown tags are skipped
          endcase
        end
        S_CONF:  state <= S_HDR;
        S_REGV:  if (s_valid) state <= S_HDR;
        S_RANGE: begin
          if (hdr.len == '0)              state <= S_HDR;
          else if (hdr.tag == TAG_LOAD)   state <= S_LOAD;
          else                            state <= S_DRAIN;
        end
        S_LOAD: if (s_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == hdr.len - 1'b1) state <= S_HDR;
        end
        S_EXEC_START: state <= (hdr.len == '0) ? S_EXEC_WAIT : S_EXEC;
        S_EXEC: begin
          cnt <= cnt + 1'b1;
          if (cnt == hdr.len - 1'b1) state <= S_EXEC_WAIT;
        end
        S_EXEC_WAIT: if (!array_busy) state <= S_HDR;
        S_DRAIN: begin
          if (rd_issue) cnt <= cnt + 1'b1;
          if (pop) begin
            out_cnt <= out_cnt + 1'b1;
            if (out_cnt == hdr.len - 1'b1) state <= S_HDR;
          end
        end
        S_END:   state <= S_HDR;
        default: state <= S_HDR;
      endcase

      // drain FIFO
      rd_pend      <= rd_issue;
      rd_pend_last <= rd_issue && (cnt == hdr.len - 1'b1);
      if (pop) begin
        fifo[0]      <= fifo[1];
        fifo_last[0] <= fifo_last[1];
      end
      if (rd_pend) begin
        fifo[1'(fifo_cnt - 2'(pop))]      <= lb_rdata;
        fifo_last[1'(fifo_cnt - 2'(pop))] <= rd_pend_last;
      end
      fifo_cnt <= fifo_cnt + 2'(rd_pend) - 2'(pop);
    end
  end

  // ---------------- outputs -----------------------------------------------
  assign s_ready = (state == S_HDR) || (state == S_REGV) || (state == S_LOAD);

  assign m_valid = (fifo_cnt != 2'd0);
  assign m_data  = fifo[0];
  assign m_last  = fifo_last[0];

  assign cfg_we   = (state == S_CONF);
  assign cfg_sel  = hdr.id;
  assign cfg_data = '{op: hdr.aux_op, base: hdr.addr, st_addr: hdr.aux_addr};

  assign regv_we   = (state == S_REGV) && s_valid;
  assign regv_data = s_data;

  assign exec_start = (state == S_EXEC_START);
  assign exec_done  = (state == S_EXEC_WAIT) && !array_busy;
  assign done       = (state == S_END);

  always_comb begin
    tok       = '0;
    tok.valid = (state == S_EXEC);
    tok.last  = (state == S_EXEC) && (cnt == hdr.len - 1'b1);
    tok.idx   = LMM_AW'(cnt);
    tok.tid   = TID_W'(cnt);
  end

  always_comb begin
    lb_sel   = hdr.id;
    lb_en    = ((state == S_LOAD) && s_valid) || rd_issue;
    lb_we    = (state == S_LOAD);
    lb_addr  = hdr.addr + LMM_AW'(cnt);
    lb_wdata = s_data;
  end

  always_comb begin
    unique case (state)
      S_CONF:                            phase = PH_CONF;
      S_REGV:                            phase = PH_REGV;
      S_RANGE:                           phase = PH_RANGE;
      S_LOAD:                            phase = PH_LOAD;
      S_EXEC_START, S_EXEC, S_EXEC_WAIT: phase = PH_EXEC;
      S_DRAIN:                           phase = PH_DRAIN;
      default:                           phase = PH_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NUM_PHASES); i++) phase_cycles[i] <= '0;
    end else begin
      phase_cycles[phase] <= phase_cycles[phase] + 1'b1;
    end
  end

  // An EXEC burst sequence must be a whole number of 16-element bursts.
  // Reserved header bits must be zero.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      // nothing to check in reset
    end else begin
      if (state != S_HDR)
        assert (hdr.rsvd == '0) else $error("lane_ctrl: reserved header bits set");
      if (state == S_EXEC_START)
        assert (hdr.len % LEN_W'(BURST_WORDS) == '0)
          else $error("lane_ctrl: EXEC length %0d is not a multiple of %0d words",
                      hdr.len, BURST_WORDS);
    end
  end

  // The output stream must hold its word while stalled.
  logic              m_stall_q;
  logic [DATA_W-1:0] m_data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_stall_q <= 1'b0;
      m_data_q  <= '0;
    end else begin
      m_stall_q <= m_valid && !m_ready;
      m_data_q  <= m_data;
      if (m_stall_q) assert (m_valid && m_data == m_data_q)
        else $error("lane_ctrl: output changed while stalled");
    end
  end

endmodule
