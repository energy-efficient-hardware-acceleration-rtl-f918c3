// tb_lmm: the 32 KB dual-port local memory.
// Random writes through both ports, then reads through both ports with the
// data checked one cycle after each read against a scoreboard array.
module tb_lmm;
  logic clk = 1'b0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [11:0] a_addr = '0, b_addr = '0;
  logic [63:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  int checks = 0, failures = 0;
  logic [63:0] model [4096];
  logic [4095:0] written = '0;

  lmm dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
           .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  always #5 clk = ~clk;

  initial begin
    @(posedge clk);
    // fill every word: port A even addresses, port B odd, plus random rewrites
    for (int i = 0; i < 2048; i++) begin
      logic [63:0] va, vb;
      va = {$urandom, $urandom}; vb = {$urandom, $urandom};
      a_en <= 1; a_we <= 1; a_addr <= 12'(2*i);   a_wdata <= va;
      b_en <= 1; b_we <= 1; b_addr <= 12'(2*i+1); b_wdata <= vb;
      model[2*i] = va; model[2*i+1] = vb;
      @(posedge clk);
    end
    for (int i = 0; i < 500; i++) begin
      logic [11:0] ad;
      logic [63:0] v;
      ad = 12'($urandom); v = {$urandom, $urandom};
      if (i % 2 == 0) begin a_en <= 1; a_we <= 1; a_addr <= ad; a_wdata <= v; b_en <= 0; end
      else            begin b_en <= 1; b_we <= 1; b_addr <= ad; b_wdata <= v; a_en <= 0; end
      model[ad] = v;
      @(posedge clk);
    end
    a_en <= 0; b_en <= 0;
    @(posedge clk);
    // read back on both ports, one read per port per cycle
    for (int i = 0; i < 4096; i++) begin
      logic [11:0] ra, rb;
      ra = 12'(i); rb = 12'(4095 - i);
      a_en <= 1; a_we <= 0; a_addr <= ra;
      b_en <= 1; b_we <= 0; b_addr <= rb;
      @(posedge clk);
      #1;
      checks += 2;
      if (a_rdata !== model[ra]) begin failures++; if (failures < 10) $display("FAIL A %0d", ra); end
      if (b_rdata !== model[rb]) begin failures++; if (failures < 10) $display("FAIL B %0d", rb); end
    end
    // read data holds while the port is idle
    a_en <= 0; b_en <= 0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (a_rdata !== model[4095]) begin failures++; $display("FAIL hold"); end
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
