// tb_fma_simd_mt: four-thread 2x32-bit SIMD accumulation.
// Issues random FP32 pairs round robin over the four threads, back to back
// and then with bubbles, and compares every accumulator (both lanes) with a
// chain of reference FMAs. Also checks clear/init and the busy flag.
module tb_fma_simd_mt;
  import imax_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 1'b0, issue = 1'b0;
  logic [63:0] init = '0, x = '0, y = '0, rd_acc;
  logic [1:0] tid = '0, rd_tid = '0;
  logic busy;
  int checks = 0, failures = 0;

  fma_simd_mt dut (.clk, .rst_n, .clear, .init, .issue, .tid, .x, .y, .rd_tid, .rd_acc, .busy);

  always #5 clk = ~clk;

  logic [31:0] ref_acc [4][2];

  task automatic check_all(input string what);
    for (int t = 0; t < 4; t++) begin
      rd_tid = 2'(t);
      #1;
      checks++;
      if (rd_acc !== {ref_acc[t][1], ref_acc[t][0]}) begin
        failures++;
        $display("FAIL %s thread %0d got %h exp %h%h", what, t, rd_acc, ref_acc[t][1], ref_acc[t][0]);
      end
    end
  endtask

  task automatic run(input int n, input bit bubbles, input logic [63:0] iv);
    @(posedge clk);
    clear <= 1'b1; init <= iv;
    @(posedge clk);
    clear <= 1'b0;
    ref_acc[0][0] = iv[31:0]; ref_acc[0][1] = iv[63:32];
    for (int t = 1; t < 4; t++) begin ref_acc[t][0] = '0; ref_acc[t][1] = '0; end
    for (int i = 0; i < n; i++) begin
      logic [31:0] x0, x1, y0, y1;
      x0 = rand_f32(110, 140); x1 = rand_f32(110, 140);
      y0 = rand_f32(110, 140); y1 = rand_f32(110, 140);
      ref_acc[i % 4][0] = ref_fma(x0, y0, ref_acc[i % 4][0]);
      ref_acc[i % 4][1] = ref_fma(x1, y1, ref_acc[i % 4][1]);
      issue <= 1'b1; tid <= 2'(i % 4); x <= {x1, x0}; y <= {y1, y0};
      @(posedge clk);
      if (bubbles && ($urandom % 3 == 0)) begin
        issue <= 1'b0;
        repeat (1 + $urandom % 3) @(posedge clk);
      end
    end
    issue <= 1'b0;
    @(posedge clk);
    checks++;
    if (!busy) begin failures++; $display("FAIL busy low while in flight"); end
    repeat (4) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy stuck"); end
    check_all(bubbles ? "bubbles" : "back-to-back");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    run(400, 1'b0, 64'h0);
    run(400, 1'b1, 64'h40490FDB_BF800000);
    run(4, 1'b0, 64'h3F800000_3F800000);
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
