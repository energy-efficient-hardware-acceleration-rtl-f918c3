// tb_axi_dma_read: the read DMA against the behavioural AXI memory.
// Three transfers (crossing a 4 KB boundary, a single word, a long one) with
// random memory stalls and random stream back-pressure. Every streamed word
// must match memory in order, no burst may exceed 16 beats or cross 4 KB,
// and busy must fall when the transfer is complete.
module tb_axi_dma_read;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 0;
  logic [39:0] addr = '0, araddr;
  logic [19:0] words = '0;
  logic busy;
  logic [7:0] arlen;
  logic [2:0] arsize;
  logic [1:0] arburst, rresp;
  logic arvalid, arready, rlast, rvalid, rready;
  logic [63:0] rdata, m_data;
  logic m_valid, m_ready = 0;
  // unused write side of the memory model
  logic awready, wready, bvalid;
  logic [1:0] bresp;
  int checks = 0, failures = 0;

  axi_dma_read dut (.clk, .rst_n, .start, .addr, .words, .busy,
    .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rdata, .rresp, .rlast, .rvalid, .rready, .m_data, .m_valid, .m_ready);

  axi_mem_model #(.WORDS(4096)) u_mem (.clk, .rst_n,
    .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr('0), .awlen('0), .awsize(3'd3), .awburst(2'b01), .awvalid(1'b0), .awready,
    .wdata('0), .wstrb('0), .wlast(1'b0), .wvalid(1'b0), .wready, .bresp, .bvalid, .bready(1'b1));

  always #5 clk = ~clk;

  int got = 0, exp_idx = 0, max_len = 0;
  always @(posedge clk) begin
    m_ready <= ($urandom % 4 != 0);
    if (rst_n && arvalid && arready && int'(arlen) > max_len) max_len = int'(arlen);
    if (rst_n && m_valid && m_ready) begin
      checks++;
      if (m_data !== u_mem.mem[exp_idx % 4096]) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d got %h exp %h", got, m_data, u_mem.mem[exp_idx % 4096]);
      end
      got++;
      exp_idx++;
    end
  end

  task automatic xfer(input logic [39:0] a, input int n);
    got = 0;
    exp_idx = int'(a >> 3);
    @(posedge clk);
    start <= 1; addr <= a; words <= 20'(n);
    @(posedge clk);
    start <= 0;
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
    checks++;
    if (got != n) begin failures++; $display("FAIL transfer of %0d words gave %0d", n, got); end
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = {32'(i), $urandom};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    xfer(40'h0F90, 100);    // crosses 0x1000
    xfer(40'h2000, 1);
    xfer(40'h4008, 1000);   // wraps the model, crosses several 4 KB pages
    checks++;
    if (max_len > 15 || u_mem.errors != 0) begin
      failures++;
      $display("FAIL max arlen %0d, protocol errors %0d", max_len, u_mem.errors);
    end
    checks++;
    if (u_mem.rd_stalls == 0) begin failures++; $display("FAIL no stalls"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
