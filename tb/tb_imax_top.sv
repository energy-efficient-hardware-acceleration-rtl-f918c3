// tb_imax_top: the whole accelerator at its default size (2 lanes x 64 PEs).
//
// Each lane gets its own DRAM model and a command buffer for ten six-PE
// dot-product units. Lane 0 computes ten 384-element FP16 dot products,
// lane 1 ten 1536-element ones with a non-zero REGV start value (384 and 1536
// are the hidden and feed-forward widths of the tiny Whisper model). The
// buffers and result areas straddle 4 KB boundaries, and the DRAM models
// stall at random. After both lanes signal done, every result word in DRAM
// must equal the reference FMA chain bit for bit. The test also counts the
// mechanisms it must have exercised: every phase on both lanes, read and write
// stalls, bursts split at a 4 KB boundary, both lanes running at once.
module tb_imax_top;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  import tb_imax_pkg::*;

  localparam int L = 2;
  localparam int ADDR_W = 40;
  logic clk = 1'b0, rst_n = 1'b0;

  logic              start    [L];
  logic [ADDR_W-1:0] rd_addr  [L];
  logic [19:0]       rd_words [L];
  logic [ADDR_W-1:0] wr_addr  [L];
  logic              done     [L];
  logic              exec_done[L];
  logic [19:0]       words_written [L];
  logic              dma_busy [L];
  phase_e            phase    [L];
  logic [31:0]       phase_cycles [L][NUM_PHASES];
  logic [ADDR_W-1:0] araddr [L], awaddr [L];
  logic [7:0]        arlen [L], awlen [L], wstrb [L];
  logic [2:0]        arsize [L], awsize [L];
  logic [1:0]        arburst [L], awburst [L], rresp [L], bresp [L];
  logic              arvalid [L], arready [L], rlast [L], rvalid [L], rready [L];
  logic              awvalid [L], awready [L], wlast [L], wvalid [L], wready [L];
  logic              bvalid [L], bready [L];
  logic [63:0]       rdata [L], wdata [L];

  imax_top dut (.clk, .rst_n, .start, .rd_addr, .rd_words, .wr_addr, .done, .exec_done,
    .words_written, .dma_busy, .phase, .phase_cycles,
    .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready);

  for (genvar l = 0; l < L; l++) begin : g_mem
    axi_mem_model #(.ADDR_W(ADDR_W)) u_mem (
      .clk, .rst_n,
      .araddr(araddr[l]), .arlen(arlen[l]), .arsize(arsize[l]), .arburst(arburst[l]),
      .arvalid(arvalid[l]), .arready(arready[l]),
      .rdata(rdata[l]), .rresp(rresp[l]), .rlast(rlast[l]), .rvalid(rvalid[l]), .rready(rready[l]),
      .awaddr(awaddr[l]), .awlen(awlen[l]), .awsize(awsize[l]), .awburst(awburst[l]),
      .awvalid(awvalid[l]), .awready(awready[l]),
      .wdata(wdata[l]), .wstrb(wstrb[l]), .wlast(wlast[l]), .wvalid(wvalid[l]), .wready(wready[l]),
      .bresp(bresp[l]), .bvalid(bvalid[l]), .bready(bready[l]));
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;
  int n_done [L] = '{0, 0};
  int n_exec [L] = '{0, 0};
  int n_overlap = 0, n_dma_busy = 0;
  always @(posedge clk) begin
    cycles++;
    for (int l = 0; l < L; l++) begin
      if (done[l]) n_done[l]++;
      if (exec_done[l]) n_exec[l]++;
    end
    if (phase[0] != PH_IDLE && phase[1] != PH_IDLE) n_overlap++;
    if (dma_busy[0] && dma_busy[1]) n_dma_busy++;
  end

  localparam logic [ADDR_W-1:0] RD_BASE [L] = '{40'h0FA8, 40'h0FE0};
  localparam logic [ADDR_W-1:0] WR_BASE [L] = '{40'h1EFE0, 40'h1EFC8};
  localparam int WORDS_PER_LANE [L] = '{96, 384};

  logic [63:0] cmd [L][$];
  logic [63:0] exp_q [L][$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    real err, exact_q [$];
    for (int l = 0; l < L; l++) begin
      start[l] = 1'b0; rd_addr[l] = '0; rd_words[l] = '0; wr_addr[l] = '0;
    end
    build_dot(cmd[0], exp_q[0], exact_q, 10, WORDS_PER_LANE[0], 64'h0, err);
    $display("lane 0: 10 dot products of %0d elements, rel. error of summed partials %g",
             4 * WORDS_PER_LANE[0], err);
    build_dot(cmd[1], exp_q[1], exact_q, 10, WORDS_PER_LANE[1], 64'h3F000000_BF000000, err);
    $display("lane 1: 10 dot products of %0d elements, rel. error of summed partials %g",
             4 * WORDS_PER_LANE[1], err);
    for (int l = 0; l < L; l++) cmd[l].push_back(hdr(TAG_END, 0, 0, 0));
    for (int i = 0; i < cmd[0].size(); i++) g_mem[0].u_mem.mem[(RD_BASE[0] >> 3) + i] = cmd[0][i];
    for (int i = 0; i < cmd[1].size(); i++) g_mem[1].u_mem.mem[(RD_BASE[1] >> 3) + i] = cmd[1][i];
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (3) @(posedge clk);
    for (int l = 0; l < L; l++) begin
      start[l] <= 1'b1; rd_addr[l] <= RD_BASE[l]; wr_addr[l] <= WR_BASE[l];
      rd_words[l] <= 20'(cmd[l].size());
    end
    @(posedge clk);
    for (int l = 0; l < L; l++) start[l] <= 1'b0;
    wait (n_done[0] == 1 && n_done[1] == 1);
    wait (words_written[0] == 20'(exp_q[0].size()) && words_written[1] == 20'(exp_q[1].size()));
    repeat (5) @(posedge clk);
    $display("finished after %0d cycles", cycles);
    for (int i = 0; i < exp_q[0].size(); i++)
      check(g_mem[0].u_mem.mem[(WR_BASE[0] >> 3) + i] === exp_q[0][i], $sformatf("lane 0 result %0d", i));
    for (int i = 0; i < exp_q[1].size(); i++)
      check(g_mem[1].u_mem.mem[(WR_BASE[1] >> 3) + i] === exp_q[1][i], $sformatf("lane 1 result %0d", i));
    // mechanisms
    for (int l = 0; l < L; l++) begin
      $display("lane %0d phases: conf %0d regv %0d range %0d load %0d exec %0d drain %0d; rd stalls %0d wr stalls %0d rd bursts %0d wr bursts %0d",
               l, phase_cycles[l][PH_CONF], phase_cycles[l][PH_REGV], phase_cycles[l][PH_RANGE],
               phase_cycles[l][PH_LOAD], phase_cycles[l][PH_EXEC], phase_cycles[l][PH_DRAIN],
               l == 0 ? g_mem[0].u_mem.rd_stalls : g_mem[1].u_mem.rd_stalls,
               l == 0 ? g_mem[0].u_mem.wr_stalls : g_mem[1].u_mem.wr_stalls,
               l == 0 ? g_mem[0].u_mem.rd_bursts : g_mem[1].u_mem.rd_bursts,
               l == 0 ? g_mem[0].u_mem.wr_bursts : g_mem[1].u_mem.wr_bursts);
      for (int p = int'(PH_CONF); p <= int'(PH_DRAIN); p++)
        check(phase_cycles[l][p] != 0, $sformatf("lane %0d phase %0d never ran", l, p));
      check(n_exec[l] == 1, $sformatf("lane %0d exec_done count %0d", l, n_exec[l]));
      // EXEC: one token per cycle, plus at most the array depth and the store
      check(int'(phase_cycles[l][PH_EXEC]) >= WORDS_PER_LANE[l] + 1 &&
            int'(phase_cycles[l][PH_EXEC]) <= WORDS_PER_LANE[l] + NUM_PE + 12,
            $sformatf("lane %0d EXEC cycles %0d", l, phase_cycles[l][PH_EXEC]));
    end
    check(g_mem[0].u_mem.rd_stalls > 0 && g_mem[1].u_mem.rd_stalls > 0, "no read stalls");
    check(g_mem[0].u_mem.wr_stalls > 0 && g_mem[1].u_mem.wr_stalls > 0, "no write stalls");
    // a 4 KB split costs one extra burst beyond ceil(words/16)
    check(g_mem[0].u_mem.rd_bursts > (cmd[0].size() + 15) / 16, "lane 0 read never split at 4 KB");
    check(g_mem[0].u_mem.wr_bursts > 10, "lane 0 write never split at 4 KB");
    check(g_mem[0].u_mem.errors == 0 && g_mem[1].u_mem.errors == 0, "AXI protocol errors");
    repeat (4) @(posedge clk);
    check(n_dma_busy > 0 && !dma_busy[0] && !dma_busy[1], "DMA still busy after the results were written");
    check(n_overlap > 0, "lanes never worked at the same time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
