// fma_simd_mt: the PE's floating-point unit, 2x32-bit SIMD with four threads.
//
// Two fp32_fma pipelines sit side by side on the 64-bit datapath: the low and
// high 32 bits of x and y are two independent FP32 lanes. Each of the THREADS
// logical threads owns one 64-bit accumulator (a pair of FP32 sums). An issue
// for thread t computes acc[t] += x*y in both lanes. The pipeline is
// FMA_STAGES deep and the result is written back one edge after it leaves, so
// the accumulation loop of one thread is FMA_STAGES+1 = THREADS cycles long:
// issuing the threads round robin keeps the FPU busy every cycle while each
// thread still sees its own previous result (the latency is hidden).
//
// Interface: clear loads acc[0] with init and the other accumulators with +0.
// issue/tid/x/y start one operation. rd_tid/rd_acc read an accumulator
// combinationally. busy is high while an operation is in flight.
// Timing rule (checked by an assertion): a thread may not be issued again
// while its previous operation is in flight, i.e. within THREADS cycles.
//
// Following the paper: two FP32 FMAs per 64-bit datapath, four logical FMAs
// time-multiplexed on one FPU. This design's choice: the thread of an element
// and the initial accumulator values.
module fma_simd_mt
  import imax_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [DATA_W-1:0] init,
  input  logic              issue,
  input  logic [TID_W-1:0]  tid,
  input  logic [DATA_W-1:0] x,
  input  logic [DATA_W-1:0] y,
  input  logic [TID_W-1:0]  rd_tid,
  output logic [DATA_W-1:0] rd_acc,
  output logic              busy
);

  logic [DATA_W-1:0] acc [THREADS];
  logic [DATA_W-1:0] acc_cur;
  logic [31:0]       r_lo, r_hi;
  logic              v_lo, v_hi;

  // thread number and valid of each pipeline stage
  logic [TID_W-1:0]  tid_pipe [FMA_STAGES];
  logic [FMA_STAGES-1:0] vld_pipe;

  assign acc_cur = acc[tid];

  fp32_fma u_lo (
    .clk, .rst_n, .in_valid(issue),
    .a(x[31:0]), .b(y[31:0]), .c(acc_cur[31:0]),
    .out_valid(v_lo), .r(r_lo)
  );

  fp32_fma u_hi (
    .clk, .rst_n, .in_valid(issue),
    .a(x[63:32]), .b(y[63:32]), .c(acc_cur[63:32]),
    .out_valid(v_hi), .r(r_hi)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_pipe <= '0;
      for (int i = 0; i < int'(FMA_STAGES); i++) tid_pipe[i] <= '0;
    end else begin
      vld_pipe    <= {vld_pipe[FMA_STAGES-2:0], issue};
      tid_pipe[0] <= tid;
      for (int i = 1; i < int'(FMA_STAGES); i++) tid_pipe[i] <= tid_pipe[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < int'(THREADS); t++) acc[t] <= '0;
    end else if (clear) begin
      acc[0] <= init;
      for (int t = 1; t < int'(THREADS); t++) acc[t] <= '0;
    end else if (v_lo) begin
      acc[tid_pipe[FMA_STAGES-1]] <= {r_hi, r_lo};
    end
  end

  assign rd_acc = acc[rd_tid];
  assign busy   = (vld_pipe != '0);

  // Both lanes run in lock step, and a thread is not issued again while
  // its previous result is still in flight.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      // nothing to check in reset
    end else begin
      for (int i = 0; i < int'(FMA_STAGES); i++) begin
        assert (!(issue && vld_pipe[i] && tid_pipe[i] == tid))
          else $error("fma_simd_mt: thread %0d issued while in flight", tid);
      end
      assert (v_lo == v_hi) else $error("fma_simd_mt: lanes out of step");
    end
  end

endmodule
