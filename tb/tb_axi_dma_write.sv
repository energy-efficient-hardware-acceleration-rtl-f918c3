// tb_axi_dma_write: the write DMA against the behavioural AXI memory.
// Streams 17 words (s_last on the 17th, so the second burst is closed early)
// then 40 more to a destination just below a 4 KB boundary, with random
// stream gaps and memory stalls. Memory must hold exactly the streamed words
// at consecutive addresses, words_written must count them, and no burst may
// exceed 16 beats, cross 4 KB or carry a wrong WLAST.
module tb_axi_dma_write;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 0, busy;
  logic [39:0] addr = '0, awaddr;
  logic [19:0] words_written;
  logic [63:0] s_data = '0, wdata, rdata;
  logic s_valid = 0, s_ready, s_last = 0;
  logic [7:0] awlen, wstrb;
  logic [2:0] awsize;
  logic [1:0] awburst, bresp, rresp;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic arready, rlast, rvalid;
  int checks = 0, failures = 0;

  axi_dma_write dut (.clk, .rst_n, .start, .addr, .busy, .words_written,
    .s_data, .s_valid, .s_ready, .s_last,
    .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready);

  axi_mem_model #(.WORDS(4096)) u_mem (.clk, .rst_n,
    .araddr('0), .arlen('0), .arsize(3'd3), .arburst(2'b01), .arvalid(1'b0), .arready,
    .rdata, .rresp, .rlast, .rvalid, .rready(1'b1),
    .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready);

  always #5 clk = ~clk;

  int max_len = 0;
  always @(posedge clk) if (rst_n && awvalid && awready && int'(awlen) > max_len) max_len = int'(awlen);

  logic [63:0] data [$];
  int lasts [$];
  initial begin
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (s_valid && s_ready) begin
        void'(data.pop_front());
        void'(lasts.pop_front());
      end
      s_valid <= (data.size() != 0) && ($urandom % 3 != 0);
      s_data  <= (data.size() != 0) ? data[0] : '0;
      s_last  <= (lasts.size() != 0) ? lasts[0][0] : 1'b0;
    end
  end

  initial begin
    logic [63:0] sent [$];
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = '0;
    for (int i = 0; i < 57; i++) begin
      logic [63:0] v;
      v = {$urandom, $urandom};
      sent.push_back(v);
      data.push_back(v);
      lasts.push_back(i == 16 || i == 56);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1; addr <= 40'h0F60;    // 20 words below 0x1000
    @(posedge clk);
    start <= 0;
    wait (words_written == 20'd57);
    repeat (3) @(posedge clk);
    for (int i = 0; i < 57; i++) begin
      checks++;
      if (u_mem.mem[(12'hF60 >> 3) + i] !== sent[i]) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d", i);
      end
    end
    checks++;
    if (u_mem.mem[(12'hF60 >> 3) + 57] !== '0 || u_mem.mem[(12'hF60 >> 3) - 1] !== '0) begin
      failures++; $display("FAIL wrote outside the destination");
    end
    checks++;
    if (max_len > 15 || u_mem.errors != 0 || busy) begin
      failures++;
      $display("FAIL max awlen %0d, protocol errors %0d, busy %b", max_len, u_mem.errors, busy);
    end
    // 17 words: 16 + 1 (s_last); 40 words: 3 to the 4 KB boundary, 16, 16, 5
    checks++;
    if (u_mem.wr_bursts != 6) begin failures++; $display("FAIL %0d bursts, expected 6", u_mem.wr_bursts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
