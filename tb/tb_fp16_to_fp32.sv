// tb_fp16_to_fp32: exhaustive check of the FP16 -> FP32 widening.
// Every one of the 65536 inputs is compared with a value computed through
// reals (finite inputs) or with the IEEE encoding rule (infinities, NaNs).
module tb_fp16_to_fp32;
  import tb_fp_pkg::*;

  logic [15:0] h;
  logic [31:0] f, exp_f;
  int checks = 0, failures = 0;

  fp16_to_fp32 dut (.h, .f);

  initial begin
    for (int i = 0; i < 65536; i++) begin
      h = 16'(i);
      #1;
      if (h[14:10] == 5'h1F) exp_f = {h[15], 8'hFF, h[9:0], 13'd0};
      else                   exp_f = real_to_f32(f16_to_real(h));
      checks++;
      if (f !== exp_f) begin
        failures++;
        if (failures < 10) $display("FAIL h=%h got %h exp %h", h, f, exp_f);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
