// tb_pe: one processing element, every operation.
// A behavioural one-cycle-read memory stands in for the PE's LMM. Checks
// NOP pass-through with one cycle of latency, LDA/LDB loads from base+index,
// CVT_LO/CVT_HI widening of both operands, and an FMA burst: after the last
// token the four thread accumulators must be written to st_addr..st_addr+3
// with the values of a reference FMA chain, and busy must then fall.
module tb_pe;
  import imax_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 0, regv_we = 0, exec_start = 0;
  pe_cfg_t cfg_in = '0;
  logic [63:0] regv_in = '0;
  token_t tin = '0, tout;
  logic la_en, la_we, busy;
  logic [11:0] la_addr;
  logic [63:0] la_wdata, la_rdata;
  int checks = 0, failures = 0;

  logic [63:0] mem [4096];
  int stores = 0;
  always @(posedge clk) begin
    if (la_en && la_we) begin
      mem[la_addr] <= la_wdata;
      stores++;
    end else if (la_en) la_rdata <= mem[la_addr];
  end

  pe dut (.clk, .rst_n, .cfg_we, .cfg_in, .regv_we, .regv_in, .exec_start,
          .tin, .tout, .la_en, .la_we, .la_addr, .la_wdata, .la_rdata, .busy);

  always #5 clk = ~clk;

  task automatic configure(input pe_op_e op, input logic [11:0] base, st);
    cfg_we <= 1; cfg_in <= '{op: op, base: base, st_addr: st};
    @(posedge clk);
    cfg_we <= 0;
  endtask

  function automatic token_t rand_tok(input int i);
    token_t t;
    t.valid = 1'b1; t.last = 1'b0; t.idx = 12'(i); t.tid = 2'(i);
    t.a = {$urandom, $urandom}; t.b = {$urandom, $urandom};
    t.c = {$urandom, $urandom}; t.d = {$urandom, $urandom};
    return t;
  endfunction

  function automatic token_t expect_tok(input pe_op_e op, input token_t t, input logic [11:0] base);
    token_t e;
    e = t;
    unique case (op)
      OP_LDA: e.a = mem[base + t.idx];
      OP_LDB: e.b = mem[base + t.idx];
      OP_CVT_LO: begin
        e.c = {real_to_f32(f16_to_real(t.a[31:16])), real_to_f32(f16_to_real(t.a[15:0]))};
        e.d = {real_to_f32(f16_to_real(t.b[31:16])), real_to_f32(f16_to_real(t.b[15:0]))};
      end
      OP_CVT_HI: begin
        e.c = {real_to_f32(f16_to_real(t.a[63:48])), real_to_f32(f16_to_real(t.a[47:32]))};
        e.d = {real_to_f32(f16_to_real(t.b[63:48])), real_to_f32(f16_to_real(t.b[47:32]))};
      end
      default: ;
    endcase
    return e;
  endfunction

  // stream n random tokens through op; compare tout one cycle later
  task automatic stream(input pe_op_e op, input logic [11:0] base, input int n);
    token_t sent [$];
    for (int i = 0; i <= n; i++) begin
      if (i < n) begin
        token_t t;
        t = rand_tok(i);
        if (op == OP_CVT_LO || op == OP_CVT_HI) begin
          // finite FP16 operands
          t.a = {rand_f16(1, 30), rand_f16(0, 30), rand_f16(1, 30), rand_f16(0, 30)};
          t.b = {rand_f16(1, 30), rand_f16(0, 30), rand_f16(1, 30), rand_f16(0, 30)};
        end
        tin <= t;
        sent.push_back(expect_tok(op, t, base));
      end else tin <= '0;
      @(posedge clk);
      #1;
      // tout shows token i right after the edge that registered it
      if (i < n) begin
        token_t e;
        e = sent.pop_front();
        checks++;
        if (tout !== e) begin
          failures++;
          if (failures < 10) $display("FAIL op %s token %0d got %h exp %h", op.name(), i, tout, e);
        end
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) mem[i] = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    configure(OP_NOP, 12'd0, 12'd0);     stream(OP_NOP, 12'd0, 50);
    configure(OP_LDA, 12'd100, 12'd0);   stream(OP_LDA, 12'd100, 50);
    configure(OP_LDB, 12'd4000, 12'd0);  stream(OP_LDB, 12'd4000, 200);   // wraps
    configure(OP_CVT_LO, 12'd0, 12'd0);  stream(OP_CVT_LO, 12'd0, 200);
    configure(OP_CVT_HI, 12'd0, 12'd0);  stream(OP_CVT_HI, 12'd0, 200);

    // FMA burst of 16 tokens with a REGV start value
    begin
      logic [31:0] acc [4][2];
      int n;
      n = 16;
      configure(OP_FMA, 12'd0, 12'd2000);
      regv_we <= 1; regv_in <= 64'h3F800000_C0000000;   // {1.0, -2.0}
      @(posedge clk);
      regv_we <= 0; exec_start <= 1;
      @(posedge clk);
      exec_start <= 0;
      acc[0][0] = 32'hC0000000; acc[0][1] = 32'h3F800000;
      for (int t = 1; t < 4; t++) begin acc[t][0] = '0; acc[t][1] = '0; end
      stores = 0;
      for (int i = 0; i < n; i++) begin
        token_t t;
        t = rand_tok(i);
        t.c = {rand_f32(115, 135), rand_f32(115, 135)};
        t.d = {rand_f32(115, 135), rand_f32(115, 135)};
        t.last = (i == n - 1);
        acc[i % 4][0] = ref_fma(t.c[31:0], t.d[31:0], acc[i % 4][0]);
        acc[i % 4][1] = ref_fma(t.c[63:32], t.d[63:32], acc[i % 4][1]);
        tin <= t;
        @(posedge clk);
      end
      tin <= '0;
      @(posedge clk);
      #1;
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low after last token"); end
      repeat (12) @(posedge clk);
      #1;
      checks++;
      if (busy || stores != 4) begin
        failures++;
        $display("FAIL busy=%b stores=%0d", busy, stores);
      end
      for (int t = 0; t < 4; t++) begin
        checks++;
        if (mem[2000 + t] !== {acc[t][1], acc[t][0]}) begin
          failures++;
          $display("FAIL acc %0d got %h exp %h%h", t, mem[2000 + t], acc[t][1], acc[t][0]);
        end
      end
    end
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
