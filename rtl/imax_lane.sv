// imax_lane: one lane of the IMAX coarse-grained linear array.
//
// NUM_PE processing elements are chained into one line (drawn as 8 columns of
// 8 in the original figure, the path snaking from the bottom of one column to
// the top of the next). Each PE has its own LMM. Two data paths run through
// the lane:
//   execution path - tokens from the controller enter PE 0 and advance one PE
//                    per cycle; each PE reads its LMM, widens or multiplies
//                    as configured.
//   memory path    - the AXI DMA READ stream is broadcast to all LMMs (one
//                    selected per LOAD), and any LMM can be read out to the
//                    AXI DMA WRITE stream (DRAIN).
// Because every PE only talks to its neighbour and its own memory, the
// array's length adds latency, not wiring.
//
// Interface: s_* stream in from AXI DMA READ, m_* stream out to AXI DMA WRITE,
// exec_done and done pulses, the current phase and per-phase cycle counters.
// Timing: see lane_ctrl; an EXEC of n words takes n + NUM_PE + a few cycles.
//
// Following the paper: 64 PEs with one 32 KB LMM each, interleaved in a
// linear array, DMA read and write on the memory path. This design's choice:
// the memory path is a bus with a select rather than a chain through the
// LMMs. The wrap-around from the last PE back to the first drawn in the
// paper's lane figure is not built.
module imax_lane
  import imax_pkg::*;
#(
  parameter int unsigned N_PE = NUM_PE
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] s_data,
  input  logic              s_valid,
  output logic              s_ready,
  output logic [DATA_W-1:0] m_data,
  output logic              m_valid,
  input  logic              m_ready,
  output logic              m_last,
  output logic              exec_done,
  output logic              done,
  output phase_e            phase,
  output logic [31:0]       phase_cycles [NUM_PHASES]
);

  logic              cfg_we, regv_we, exec_start, array_busy;
  logic [ID_W-1:0]   cfg_sel;
  pe_cfg_t           cfg_data;
  logic [DATA_W-1:0] regv_data;
  token_t            tok;
  logic              lb_en, lb_we;
  logic [ID_W-1:0]   lb_sel;
  logic [LMM_AW-1:0] lb_addr;
  logic [DATA_W-1:0] lb_wdata, lb_rdata;

  token_t            tin  [N_PE];
  token_t            tout [N_PE];
  logic [N_PE-1:0]   pe_busy, tok_valid;
  logic [DATA_W-1:0] b_rdata [N_PE];

  lane_ctrl u_ctrl (
    .clk, .rst_n,
    .s_data, .s_valid, .s_ready,
    .m_data, .m_valid, .m_ready, .m_last,
    .cfg_we, .cfg_sel, .cfg_data, .regv_we, .regv_data,
    .exec_start, .tok, .array_busy,
    .lb_en, .lb_we, .lb_sel, .lb_addr, .lb_wdata, .lb_rdata,
    .exec_done, .done, .phase, .phase_cycles
  );

  for (genvar i = 0; i < int'(N_PE); i++) begin : g_pe
    logic              la_en, la_we;
    logic [LMM_AW-1:0] la_addr;
    logic [DATA_W-1:0] la_wdata, la_rdata;

    if (i == 0) begin : g_first
      assign tin[i] = tok;
    end else begin : g_next
      assign tin[i] = tout[i-1];
    end

    pe u_pe (
      .clk, .rst_n,
      .cfg_we(cfg_we && cfg_sel == ID_W'(i)), .cfg_in(cfg_data),
      .regv_we(regv_we && cfg_sel == ID_W'(i)), .regv_in(regv_data),
      .exec_start,
      .tin(tin[i]), .tout(tout[i]),
      .la_en, .la_we, .la_addr, .la_wdata, .la_rdata,
      .busy(pe_busy[i])
    );

    lmm #(.BYTES(LMM_BYTES), .DATA_W(DATA_W)) u_lmm (
      .clk,
      .a_en(la_en), .a_we(la_we), .a_addr(la_addr), .a_wdata(la_wdata), .a_rdata(la_rdata),
      .b_en(lb_en && lb_sel == ID_W'(i)), .b_we(lb_we), .b_addr(lb_addr),
      .b_wdata(lb_wdata), .b_rdata(b_rdata[i])
    );

    assign tok_valid[i] = tout[i].valid;
  end

  assign lb_rdata   = b_rdata[lb_sel];
  assign array_busy = (pe_busy != '0) || (tok_valid != '0) || tok.valid;

endmodule
