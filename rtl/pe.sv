// pe: one processing element of the IMAX linear array.
//
// A token (see imax_pkg::token_t) enters from the previous PE every cycle and
// leaves to the next PE one cycle later, so the whole lane is a pipeline one
// PE deep per stage. What the PE does to the token is set by its configuration
// register, written in the CONF phase:
//   OP_NOP     pass the token on.
//   OP_LDA/LDB read word base+idx of the PE's own LMM into operand a / b.
//   OP_CVT_LO  c,d <= the low two FP16 values of a,b widened to FP32.
//   OP_CVT_HI  c,d <= the high two FP16 values of a,b widened to FP32.
//   OP_FMA     issue acc[tid] += c*d on the 2x32-bit SIMD FPU (fma_simd_mt).
//              After the token marked last, and once the FPU has drained,
//              the THREADS accumulators are written to LMM words
//              st_addr .. st_addr+THREADS-1 (one per cycle) for DRAIN to send.
// The REGV register (written in the REGV phase) is loaded into accumulator 0
// at exec_start, so a long vector split over several offloads can carry its
// running sum.
//
// Interface: tin/tout tokens; LMM port A (la_*); busy is high while the FPU or
// the accumulator store is still working, so the controller can end EXEC.
// Timing: tout = tin one cycle later; a load's LMM read is issued in the cycle
// the token arrives and its data is merged into tout the next cycle.
//
// Following the paper: a PE is a pipelined ALU with its own LMM, FP16 to FP32
// conversion is done in the PE, the FPU is 2x32-bit SIMD with four threads.
// This design's choice: the operation set, the token format, the store of the
// accumulators into the LMM.
module pe
  import imax_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  pe_cfg_t           cfg_in,
  input  logic              regv_we,
  input  logic [DATA_W-1:0] regv_in,
  input  logic              exec_start,
  input  token_t            tin,
  output token_t            tout,
  // LMM port A
  output logic              la_en,
  output logic              la_we,
  output logic [LMM_AW-1:0] la_addr,
  output logic [DATA_W-1:0] la_wdata,
  input  logic [DATA_W-1:0] la_rdata,
  output logic              busy
);

  pe_cfg_t           cfg;
  logic [DATA_W-1:0] regv;
  token_t            t_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg  <= '{op: OP_NOP, base: '0, st_addr: '0};
      regv <= '0;
    end else begin
      if (cfg_we)  cfg  <= cfg_in;
      if (regv_we) regv <= regv_in;
    end
  end

  // ---------------- FP16 -> FP32 widening (bit manipulation) --------------
  logic [15:0] ha0, ha1, hb0, hb1;
  logic [31:0] fa0, fa1, fb0, fb1;
  logic        hi_sel;

  assign hi_sel = (cfg.op == OP_CVT_HI);
  assign ha0 = hi_sel ? tin.a[47:32] : tin.a[15:0];
  assign ha1 = hi_sel ? tin.a[63:48] : tin.a[31:16];
  assign hb0 = hi_sel ? tin.b[47:32] : tin.b[15:0];
  assign hb1 = hi_sel ? tin.b[63:48] : tin.b[31:16];

  fp16_to_fp32 u_cva0 (.h(ha0), .f(fa0));
  fp16_to_fp32 u_cva1 (.h(ha1), .f(fa1));
  fp16_to_fp32 u_cvb0 (.h(hb0), .f(fb0));
  fp16_to_fp32 u_cvb1 (.h(hb1), .f(fb1));

  // ---------------- token register ----------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q <= '0;
    end else begin
      t_q <= tin;
      if (cfg.op == OP_CVT_LO || cfg.op == OP_CVT_HI) begin
        t_q.c <= {fa1, fa0};
        t_q.d <= {fb1, fb0};
      end
    end
  end

  always_comb begin
    tout = t_q;
    if (cfg.op == OP_LDA) tout.a = la_rdata;
    if (cfg.op == OP_LDB) tout.b = la_rdata;
  end

  // ---------------- FPU ----------------------------------------------------
  logic              fma_issue, fma_busy;
  logic [TID_W-1:0]  rd_tid;
  logic [DATA_W-1:0] rd_acc;

  assign fma_issue = (cfg.op == OP_FMA) && tin.valid;

  fma_simd_mt u_fpu (
    .clk, .rst_n,
    .clear(exec_start), .init(regv),
    .issue(fma_issue), .tid(tin.tid), .x(tin.c), .y(tin.d),
    .rd_tid, .rd_acc, .busy(fma_busy)
  );

  // ---------------- accumulator store after the last token ----------------
  typedef enum logic [1:0] {ST_IDLE, ST_WAIT, ST_WRITE} st_state_e;
  st_state_e        st_state;
  logic [TID_W-1:0] st_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_state <= ST_IDLE;
      st_cnt   <= '0;
    end else begin
      unique case (st_state)
        ST_IDLE:  if (fma_issue && tin.last) st_state <= ST_WAIT;
        ST_WAIT:  if (!fma_busy) begin
                    st_state <= ST_WRITE;
                    st_cnt   <= '0;
                  end
        ST_WRITE: begin
                    st_cnt <= st_cnt + 1'b1;
                    if (st_cnt == TID_W'(THREADS - 1)) st_state <= ST_IDLE;
                  end
        default:  st_state <= ST_IDLE;
      endcase
    end
  end

  assign rd_tid = st_cnt;

  // ---------------- LMM port A ----------------------------------------------
  always_comb begin
    la_en    = 1'b0;
    la_we    = 1'b0;
    la_addr  = cfg.base + tin.idx;
    la_wdata = rd_acc;
    if ((cfg.op == OP_LDA || cfg.op == OP_LDB) && tin.valid) begin
      la_en = 1'b1;
    end else if (st_state == ST_WRITE) begin
      la_en   = 1'b1;
      la_we   = 1'b1;
      la_addr = cfg.st_addr + LMM_AW'(st_cnt);
    end
  end

  assign busy = fma_busy || (st_state != ST_IDLE) || fma_issue;

endmodule
