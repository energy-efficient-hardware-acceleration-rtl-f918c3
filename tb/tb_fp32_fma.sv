// tb_fp32_fma: fp32_fma against a real-arithmetic reference.
// Directed special cases, then random operands (including cancelling signs
// and widely different exponents) issued back to back; each result must be
// bit exact and appear exactly 3 cycles after its issue.
module tb_fp32_fma;
  import tb_fp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [31:0] a = '0, b = '0, c = '0, r;
  logic out_valid;
  int checks = 0, failures = 0;
  int cycle = 0;

  fp32_fma dut (.clk, .rst_n, .in_valid, .a, .b, .c, .out_valid, .r);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // expected results and issue cycles, in order
  logic [31:0] exp_q [$];
  int          cyc_q [$];

  always @(posedge clk) begin
    if (rst_n && in_valid) begin
      exp_q.push_back(expected(a, b, c));
      cyc_q.push_back(cycle);
    end
    if (rst_n && out_valid) begin
      logic [31:0] e;
      int ic;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        e  = exp_q.pop_front();
        ic = cyc_q.pop_front();
        if (r !== e || cycle - ic != 3) begin
          failures++;
          if (failures < 10) $display("FAIL got %h exp %h latency %0d", r, e, cycle - ic);
        end
      end
    end
  end

  function automatic logic [31:0] expected(input logic [31:0] x, y, z);
    logic nanx, nany, nanz, infx, infy, infz, zx, zy;
    nanx = x[30:23] == 8'hFF && x[22:0] != 0;
    nany = y[30:23] == 8'hFF && y[22:0] != 0;
    nanz = z[30:23] == 8'hFF && z[22:0] != 0;
    infx = x[30:23] == 8'hFF && x[22:0] == 0;
    infy = y[30:23] == 8'hFF && y[22:0] == 0;
    infz = z[30:23] == 8'hFF && z[22:0] == 0;
    zx = x[30:23] == 0;
    zy = y[30:23] == 0;
    if (nanx || nany || nanz || (infx && zy) || (infy && zx)) return 32'h7FC00000;
    if (infx || infy) return (infz && z[31] != (x[31] ^ y[31])) ? 32'h7FC00000
                                                              : {x[31] ^ y[31], 8'hFF, 23'd0};
    if (infz) return z;
    if ((zx || zy) && z[30:23] == 0) return {(x[31] ^ y[31]) & z[31], 31'd0};
    if (zx || zy) return z;
    return ref_fma(x, y, z);
  endfunction

  task automatic issue(input logic [31:0] x, y, z);
    a <= x; b <= y; c <= z; in_valid <= 1'b1;
    @(posedge clk);
    in_valid <= 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    issue(32'h3F800000, 32'h3F800000, 32'h3F800000);  // 1*1+1 = 2
    issue(32'h40000000, 32'h40400000, 32'hC0C00000);  // 2*3-6 = +0
    issue(32'h7F800000, 32'h00000000, 32'h3F800000);  // inf*0 = NaN
    issue(32'h7F800000, 32'h3F800000, 32'hFF800000);  // inf-inf = NaN
    issue(32'h7F800000, 32'h3F800000, 32'h3F800000);  // inf
    issue(32'h00000000, 32'h3F800000, 32'h41200000);  // 0*1+10 = 10
    issue(32'h7F000000, 32'h7F000000, 32'h00000000);  // overflow -> inf
    issue(32'h3F800001, 32'h3F800001, 32'hBF800000);  // cancellation, tiny exact
    issue(32'h4B800000, 32'h3F800000, 32'h3F800000);  // 2^24 + 1: tie to even
    issue(32'h4B800000, 32'h3F800000, 32'h40400000);  // 2^24 + 3: round up
    repeat (5) @(posedge clk);
    // random operands, one per cycle
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] x, y, z;
      int k;
      k = int'($urandom % 4);
      x = rand_f32(100, 150);
      y = rand_f32(100, 150);
      unique case (k)
        0: z = rand_f32(60, 200);                               // anywhere
        1: z = {~(x[31] ^ y[31]), 8'(int'(x[30:23]) + int'(y[30:23]) - 127), 23'($urandom)};
        2: z = {1'($urandom), 8'(int'(x[30:23]) + int'(y[30:23]) - 127 + int'($urandom % 5) - 2),
                23'($urandom)};
        default: z = rand_f32(1, 254);
      endcase
      a <= x; b <= y; c <= z; in_valid <= 1'b1;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (6) @(posedge clk);
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
