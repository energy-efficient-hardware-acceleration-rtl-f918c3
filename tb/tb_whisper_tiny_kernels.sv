// tb_whisper_tiny_kernels: the accelerator at its default size running the
// dot-product shapes of the tiny Whisper model, with the residual split.
//
// Lane 0 computes ten dot products of 1500 FP16 elements (the length of the
// encoder's audio context): the main segment of 1488 elements (93 bursts of
// 16) runs on the lane, and the host (this testbench) computes the 12
// residual elements itself and adds them to the 16 partial sums it reads
// back. Lane 1 runs two jobs from one command buffer: ten dot products of 64
// elements (one attention head) and ten of 384 (the model width), so it is
// reconfigured between EXECs. Checks: every drained word bit for bit against
// the reference FMA order; each host-side total within 1e-5 of the exact dot
// product; EXEC time of lane 0 within one cycle per word plus the array depth.
module tb_whisper_tiny_kernels;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  import tb_imax_pkg::*;

  localparam int L = 2;
  localparam int ADDR_W = 40;
  localparam int MAIN_WORDS = 372;   // 1488 elements
  localparam int RESID = 12;         // 1500 - 1488
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
  int n_done [L] = '{0, 0};
  int n_exec [L] = '{0, 0};
  always @(posedge clk) begin
    for (int l = 0; l < L; l++) begin
      if (done[l]) n_done[l]++;
      if (exec_done[l]) n_exec[l]++;
    end
  end

  localparam logic [ADDR_W-1:0] RD_BASE [L] = '{40'h0000, 40'h0000};
  localparam logic [ADDR_W-1:0] WR_BASE [L] = '{40'h1C000, 40'h1C000};

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
    real err, exact_main [$], exact_lane1 [$];
    for (int l = 0; l < L; l++) begin
      start[l] = 1'b0; rd_addr[l] = '0; rd_words[l] = '0; wr_addr[l] = '0;
    end
    build_dot(cmd[0], exp_q[0], exact_main, 10, MAIN_WORDS, 64'h0, err);
    build_dot(cmd[1], exp_q[1], exact_lane1, 10, 16, 64'h0, err);
    build_dot(cmd[1], exp_q[1], exact_lane1, 10, 96, 64'h0, err);
    for (int l = 0; l < L; l++) cmd[l].push_back(hdr(TAG_END, 0, 0, 0));
    for (int l = 0; l < L; l++)
      for (int i = 0; i < cmd[l].size(); i++)
        if (l == 0) g_mem[0].u_mem.mem[(RD_BASE[0] >> 3) + i] = cmd[0][i];
        else        g_mem[1].u_mem.mem[(RD_BASE[1] >> 3) + i] = cmd[1][i];
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
    for (int i = 0; i < exp_q[0].size(); i++)
      check(g_mem[0].u_mem.mem[(WR_BASE[0] >> 3) + i] === exp_q[0][i], $sformatf("lane 0 word %0d", i));
    for (int i = 0; i < exp_q[1].size(); i++)
      check(g_mem[1].u_mem.mem[(WR_BASE[1] >> 3) + i] === exp_q[1][i], $sformatf("lane 1 word %0d", i));
    // host side: 16 partials + residual, against the exact 1500-element product
    for (int u = 0; u < 10; u++) begin
      real got, exact, rel;
      got = 0.0;
      for (int k = 0; k < 8; k++) begin
        logic [63:0] w;
        w = g_mem[0].u_mem.mem[(WR_BASE[0] >> 3) + 8 * u + k];
        got += f32_to_real(w[31:0]) + f32_to_real(w[63:32]);
      end
      exact = exact_main[u];
      for (int e = 0; e < RESID; e++) begin
        real p;
        p = f16_to_real(rand_f16(10, 20)) * f16_to_real(rand_f16(10, 20));
        got += p;
        exact += p;
      end
      rel = (got > exact) ? (got - exact) / exact : (exact - got) / exact;
      check(rel < 1e-5, $sformatf("dot product %0d of 1500: rel. error %g", u, rel));
    end
    check(n_exec[0] == 1 && n_exec[1] == 2, "EXEC count");
    check(int'(phase_cycles[0][PH_EXEC]) >= MAIN_WORDS + 1 &&
          int'(phase_cycles[0][PH_EXEC]) <= MAIN_WORDS + NUM_PE + 12,
          $sformatf("lane 0 EXEC cycles %0d", phase_cycles[0][PH_EXEC]));
    $display("lane 0 EXEC %0d cycles for %0d words x 10 units; lane 1 EXEC %0d cycles",
             phase_cycles[0][PH_EXEC], MAIN_WORDS, phase_cycles[1][PH_EXEC]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
