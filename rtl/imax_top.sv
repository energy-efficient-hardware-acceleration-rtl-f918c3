// imax_top: IMAX accelerator with NUM_LANES independent lanes.
//
// Each lane is a chain AXI DMA READ -> lane (64 PEs with 64 LMMs) -> AXI DMA
// WRITE. The host prepares a command buffer in DRAM for a lane (PE
// configuration, register values, operand vectors, EXEC and DRAIN items; see
// lane_ctrl) and pulses start with the buffer's address and length and the
// address where results go. The read DMA streams the buffer into the lane; the
// lane's DRAIN output is written back by the write DMA. done pulses when the
// lane reaches the END item of its buffer. Lanes share nothing, so one host
// thread can drive each lane.
//
// Interface: per lane a start/rd_addr/rd_words/wr_addr command, done and
// exec_done pulses, words_written, dma_busy (a DMA transfer is still in
// flight), the current phase and per-phase cycle
// counters, and one AXI4 master port (read and write channels) towards the
// on-chip network and DRAM, which are outside this design.
// Timing: see lane_ctrl, axi_dma_read and axi_dma_write.
//
// Following the paper: lanes of 64 PE/LMM pairs, each with its own AXI DMA
// READ and WRITE; two lanes, the largest configuration the paper evaluates
// (its FPGA prototype carries eight). This design's choice: the host command
// interface.
module imax_top
  import imax_pkg::*;
#(
  parameter int unsigned NUM_LANES = 2,
  parameter int unsigned N_PE      = NUM_PE,
  parameter int unsigned ADDR_W    = 40
) (
  input  logic              clk,
  input  logic              rst_n,
  // host command per lane
  input  logic              start    [NUM_LANES],
  input  logic [ADDR_W-1:0] rd_addr  [NUM_LANES],
  input  logic [19:0]       rd_words [NUM_LANES],
  input  logic [ADDR_W-1:0] wr_addr  [NUM_LANES],
  output logic              done     [NUM_LANES],
  output logic              exec_done[NUM_LANES],
  output logic [19:0]       words_written [NUM_LANES],
  output logic              dma_busy [NUM_LANES],
  output phase_e            phase    [NUM_LANES],
  output logic [31:0]       phase_cycles [NUM_LANES][NUM_PHASES],
  // AXI4 read channels per lane
  output logic [ADDR_W-1:0] araddr  [NUM_LANES],
  output logic [7:0]        arlen   [NUM_LANES],
  output logic [2:0]        arsize  [NUM_LANES],
  output logic [1:0]        arburst [NUM_LANES],
  output logic              arvalid [NUM_LANES],
  input  logic              arready [NUM_LANES],
  input  logic [63:0]       rdata   [NUM_LANES],
  input  logic [1:0]        rresp   [NUM_LANES],
  input  logic              rlast   [NUM_LANES],
  input  logic              rvalid  [NUM_LANES],
  output logic              rready  [NUM_LANES],
  // AXI4 write channels per lane
  output logic [ADDR_W-1:0] awaddr  [NUM_LANES],
  output logic [7:0]        awlen   [NUM_LANES],
  output logic [2:0]        awsize  [NUM_LANES],
  output logic [1:0]        awburst [NUM_LANES],
  output logic              awvalid [NUM_LANES],
  input  logic              awready [NUM_LANES],
  output logic [63:0]       wdata   [NUM_LANES],
  output logic [7:0]        wstrb   [NUM_LANES],
  output logic              wlast   [NUM_LANES],
  output logic              wvalid  [NUM_LANES],
  input  logic              wready  [NUM_LANES],
  input  logic [1:0]        bresp   [NUM_LANES],
  input  logic              bvalid  [NUM_LANES],
  output logic              bready  [NUM_LANES]
);

  for (genvar l = 0; l < int'(NUM_LANES); l++) begin : g_lane
    logic [63:0] rs_data, ws_data;
    logic        rs_valid, rs_ready, ws_valid, ws_ready, ws_last;
    logic        rd_busy, wr_busy;

    assign dma_busy[l] = rd_busy || wr_busy;

    axi_dma_read #(.ADDR_W(ADDR_W)) u_rd (
      .clk, .rst_n,
      .start(start[l]), .addr(rd_addr[l]), .words(rd_words[l]), .busy(rd_busy),
      .araddr(araddr[l]), .arlen(arlen[l]), .arsize(arsize[l]), .arburst(arburst[l]),
      .arvalid(arvalid[l]), .arready(arready[l]),
      .rdata(rdata[l]), .rresp(rresp[l]), .rlast(rlast[l]), .rvalid(rvalid[l]),
      .rready(rready[l]),
      .m_data(rs_data), .m_valid(rs_valid), .m_ready(rs_ready)
    );

    imax_lane #(.N_PE(N_PE)) u_lane (
      .clk, .rst_n,
      .s_data(rs_data), .s_valid(rs_valid), .s_ready(rs_ready),
      .m_data(ws_data), .m_valid(ws_valid), .m_ready(ws_ready), .m_last(ws_last),
      .exec_done(exec_done[l]), .done(done[l]),
      .phase(phase[l]), .phase_cycles(phase_cycles[l])
    );

    axi_dma_write #(.ADDR_W(ADDR_W)) u_wr (
      .clk, .rst_n,
      .start(start[l]), .addr(wr_addr[l]), .busy(wr_busy),
      .words_written(words_written[l]),
      .s_data(ws_data), .s_valid(ws_valid), .s_ready(ws_ready), .s_last(ws_last),
      .awaddr(awaddr[l]), .awlen(awlen[l]), .awsize(awsize[l]), .awburst(awburst[l]),
      .awvalid(awvalid[l]), .awready(awready[l]),
      .wdata(wdata[l]), .wstrb(wstrb[l]), .wlast(wlast[l]), .wvalid(wvalid[l]),
      .wready(wready[l]),
      .bresp(bresp[l]), .bvalid(bvalid[l]), .bready(bready[l])
    );
  end

endmodule
