// tb_imax_lane: one lane running the FP16 dot-product kernel end to end.
// The lane (12 PEs here: two six-PE units) receives a command buffer over its
// input stream with random gaps, runs two EXECs of different lengths (the
// second starting from non-zero REGV values), and drains the partial sums
// with random back-pressure. Every drained word must equal the reference
// FMA chain bit for bit; m_last must close each drain; EXEC must take at least
// one cycle per word and no more than the pipeline depth beyond that.
module tb_imax_lane;
  import imax_pkg::*;
  import tb_fp_pkg::*;
  import tb_imax_pkg::*;

  localparam int NPE = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [63:0] s_data = '0, m_data;
  logic s_valid = 1'b0, s_ready, m_valid, m_ready = 1'b0, m_last, exec_done, done;
  phase_e phase;
  logic [31:0] phase_cycles [NUM_PHASES];
  int checks = 0, failures = 0;
  int n_done = 0, n_exec = 0, n_mstall = 0, n_sgap = 0;

  imax_lane #(.N_PE(NPE)) dut (.clk, .rst_n, .s_data, .s_valid, .s_ready,
    .m_data, .m_valid, .m_ready, .m_last, .exec_done, .done, .phase, .phase_cycles);

  always #5 clk = ~clk;

  logic [63:0] cmd [$];
  logic [63:0] exp_q [$];
  int          exp_last [$];   // 1 where m_last is expected

  // stream driver with random gaps
  initial begin
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (s_valid && s_ready) void'(cmd.pop_front());
      if (cmd.size() != 0 && ($urandom % 4 != 0)) begin
        s_valid <= 1'b1; s_data <= cmd[0];
      end else begin
        if (cmd.size() != 0) n_sgap++;
        s_valid <= 1'b0;
      end
    end
  end

  // output sink with random back-pressure and checking
  int got_words = 0;
  always @(posedge clk) begin
    m_ready <= ($urandom % 3 != 0);
    if (m_valid && !m_ready) n_mstall++;
    if (m_valid && m_ready) begin
      logic [63:0] e;
      int el;
      checks++;
      got_words++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output %h", m_data);
      end else begin
        e = exp_q.pop_front();
        el = exp_last.pop_front();
        if (m_data !== e || m_last !== el[0]) begin
          failures++;
          $display("FAIL drain word got %h last %b exp %h last %0d", m_data, m_last, e, el);
        end
      end
    end
    if (exec_done) n_exec++;
    if (done) n_done++;
  end

  task automatic job(input int words, input logic [63:0] init);
    real err, exact_q [$];
    int n_before;
    n_before = exp_q.size();
    build_dot(cmd, exp_q, exact_q, 2, words, init, err);
    for (int i = n_before; i < exp_q.size(); i++) exp_last.push_back((i - n_before) % 4 == 3);
    $display("job words=%0d max relative error of summed partials %g", words, err);
  endtask

  initial begin
    int exec0, exec1;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    job(32, 64'h0);
    wait (n_exec == 1);
    exec0 = int'(phase_cycles[PH_EXEC]);
    checks++;
    if (exec0 < 1 + 32 || exec0 > 1 + 32 + NPE + 12) begin
      failures++;
      $display("FAIL EXEC took %0d cycles for 32 words", exec0);
    end
    job(100, 64'h3F800000_BF800000);
    cmd.push_back(hdr(TAG_END, 0, 0, 0));
    wait (n_done == 1);
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || got_words != 32) begin
      failures++;
      $display("FAIL %0d words missing, %0d received", exp_q.size(), got_words);
    end
    exec1 = int'(phase_cycles[PH_EXEC]) - exec0;
    checks++;
    if (exec1 < 101 || exec1 > 101 + NPE + 12) begin
      failures++;
      $display("FAIL second EXEC took %0d cycles", exec1);
    end
    for (int p = int'(PH_CONF); p <= int'(PH_DRAIN); p++) begin
      checks++;
      if (phase_cycles[p] == 0) begin failures++; $display("FAIL phase %0d never ran", p); end
    end
    checks++;
    if (n_mstall == 0 || n_sgap == 0 || n_exec != 2) begin
      failures++;
      $display("FAIL stalls %0d gaps %0d execs %0d", n_mstall, n_sgap, n_exec);
    end
    $display("phase cycles: conf %0d regv %0d range %0d load %0d exec %0d drain %0d",
             phase_cycles[PH_CONF], phase_cycles[PH_REGV], phase_cycles[PH_RANGE],
             phase_cycles[PH_LOAD], phase_cycles[PH_EXEC], phase_cycles[PH_DRAIN]);
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
