// tb_lane_ctrl: the lane controller against behavioural PE-array and LMM
// models. Feeds CONF, REGV, LOAD, EXEC, DRAIN and END items and checks the
// configuration and register writes, the LMM writes, the EXEC token sequence
// (one token per cycle, thread = index mod 4, last on the final token),
// that EXEC waits for array_busy, the drained words and m_last under random
// back-pressure, the done pulse and the per-phase cycle counters.
module tb_lane_ctrl;
  import imax_pkg::*;
  import tb_imax_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [63:0] s_data = '0, m_data, regv_data, lb_wdata, lb_rdata = '0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0, m_last;
  logic cfg_we, regv_we, exec_start, array_busy = 0, lb_en, lb_we, exec_done, done;
  logic [5:0] cfg_sel, lb_sel;
  logic [11:0] lb_addr;
  pe_cfg_t cfg_data;
  token_t tok;
  phase_e phase;
  logic [31:0] phase_cycles [NUM_PHASES];
  int checks = 0, failures = 0;

  lane_ctrl dut (.clk, .rst_n, .s_data, .s_valid, .s_ready, .m_data, .m_valid, .m_ready, .m_last,
    .cfg_we, .cfg_sel, .cfg_data, .regv_we, .regv_data, .exec_start, .tok, .array_busy,
    .lb_en, .lb_we, .lb_sel, .lb_addr, .lb_wdata, .lb_rdata, .exec_done, .done, .phase, .phase_cycles);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // LMM model: 64 memories of 4096 words, one-cycle read
  logic [63:0] mem [64][4096];
  always @(posedge clk) begin
    if (lb_en && lb_we) mem[lb_sel][lb_addr] <= lb_wdata;
    else if (lb_en) lb_rdata <= mem[lb_sel][lb_addr];
  end

  // observers
  int n_cfg = 0, n_regv = 0, n_start = 0, n_tok = 0, n_done = 0, n_exec_done = 0, n_out = 0;
  int last_tok_cycle = 0, start_cycle = 0, first_tok_cycle = -1, exec_done_cycle = 0, cycle = 0;
  int busy_hold = 0;
  logic [63:0] exp_out [$];
  always @(posedge clk) if (rst_n) begin
    cycle++;
    m_ready <= ($urandom % 3 != 0);
    if (cfg_we) begin
      n_cfg++;
      check(cfg_sel == 6'(n_cfg + 2) && cfg_data.op == OP_FMA && cfg_data.base == 12'(10 * n_cfg)
            && cfg_data.st_addr == 12'(100 + n_cfg), "CONF write");
    end
    if (regv_we) begin
      n_regv++;
      check(cfg_sel == 6'd7 && regv_data == 64'hDEAD_BEEF_0123_4567, "REGV write");
    end
    if (exec_start) begin n_start++; start_cycle = cycle; end
    if (tok.valid) begin
      if (first_tok_cycle < 0) first_tok_cycle = cycle;
      check(tok.idx == 12'(n_tok) && tok.tid == 2'(n_tok % 4) && tok.last == (n_tok == 7),
            $sformatf("token %0d", n_tok));
      check(cycle == first_tok_cycle + n_tok, "tokens back to back");
      n_tok++;
      if (tok.last) begin last_tok_cycle = cycle; busy_hold = 6; end
    end
    // the array model stays busy for four cycles after the last token
    if (busy_hold > 0) busy_hold--;
    array_busy <= tok.valid || busy_hold > 1;
    if (exec_done) begin n_exec_done++; exec_done_cycle = cycle; end
    if (m_valid && m_ready) begin
      check(exp_out.size() > 0 && m_data == exp_out[0] && m_last == (exp_out.size() == 1),
            $sformatf("drain word %0d", n_out));
      if (exp_out.size() > 0) void'(exp_out.pop_front());
      n_out++;
    end
    if (done) n_done++;
  end

  logic [63:0] cmd [$];
  initial begin
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (s_valid && s_ready) void'(cmd.pop_front());
      s_valid <= (cmd.size() != 0) && ($urandom % 4 != 0);
      s_data  <= (cmd.size() != 0) ? cmd[0] : '0;
    end
  end

  initial begin
    for (int i = 0; i < 3; i++) cmd.push_back(hdr(TAG_CONF, i + 3, 10 * (i + 1), 0, 100 + i + 1, OP_FMA));
    cmd.push_back(hdr(TAG_REGV, 7, 0, 0));
    cmd.push_back(64'hDEAD_BEEF_0123_4567);
    cmd.push_back(hdr(TAG_LOAD, 9, 4090, 10));   // wraps at the end of the LMM
    for (int i = 0; i < 10; i++) cmd.push_back(64'h1000 + 64'(i));
    cmd.push_back(hdr(TAG_EXEC, 0, 0, 8));
    cmd.push_back(hdr(TAG_DRAIN, 9, 4092, 7));
    for (int i = 2; i < 9; i++) exp_out.push_back(64'h1000 + 64'(i));
    cmd.push_back(hdr(TAG_END, 0, 0, 0));
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    wait (n_done == 1);
    repeat (3) @(posedge clk);
    check(n_cfg == 3 && n_regv == 1 && n_start == 1 && n_tok == 8 && n_exec_done == 1,
          $sformatf("counts cfg %0d regv %0d start %0d tok %0d exec_done %0d",
                    n_cfg, n_regv, n_start, n_tok, n_exec_done));
    check(first_tok_cycle == start_cycle + 1, "tokens start the cycle after exec_start");
    check(exec_done_cycle == last_tok_cycle + 5, $sformatf("exec_done at +%0d", exec_done_cycle - last_tok_cycle));
    check(mem[9][4090] == 64'h1000 && mem[9][3] == 64'h1009, "LOAD wrap");
    check(n_out == 7 && exp_out.size() == 0, "drain length");
    for (int p = int'(PH_CONF); p <= int'(PH_DRAIN); p++)
      check(phase_cycles[p] != 0, $sformatf("phase %0d counted", p));
    check(phase_cycles[PH_EXEC] == 32'(1 + 8 + 5), $sformatf("EXEC cycles %0d", phase_cycles[PH_EXEC]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
