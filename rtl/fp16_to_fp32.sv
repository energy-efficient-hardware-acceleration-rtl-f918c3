// fp16_to_fp32: IEEE 754 half to single precision conversion.
//
// The FP16 dot-product kernel widens its FP16 operands to FP32 in the PEs
// before the FMA, using the PE's bit-manipulation capability rather than a
// separate converter. This module is that bit manipulation: the sign is
// copied, the 5-bit exponent is re-biased by +112 (127-15) and the 10-bit
// mantissa is shifted up by 13. A subnormal FP16 value is normalised by a
// leading-zero count; infinities and NaNs keep their payload. Every FP16 value
// is exactly representable in FP32, so the conversion never rounds.
//
// Interface: h (16-bit FP16) in, f (32-bit FP32) out. Purely combinational.
// Following the paper: the conversion is an inline PE operation. This design's
// choice: it is one operation, not a sequence of generic shift/mask ops.
module fp16_to_fp32 (
  input  logic [15:0] h,
  output logic [31:0] f
);

  logic       s;
  logic [4:0] e;
  logic [9:0] m;
  logic [3:0] lz;        // position of the leading one in m (0..9)
  logic [9:0] m_norm;

  assign s = h[15];
  assign e = h[14:10];
  assign m = h[9:0];

  always_comb begin
    lz = 4'd0;
    for (int i = 0; i < 10; i++) begin
      if (m[i]) lz = 4'(i);
    end
    // Shift the leading one out of the 10-bit field.
    m_norm = 10'(m << (4'd10 - lz));
  end

  always_comb begin
    if (e == 5'd0) begin
      if (m == 10'd0) f = {s, 31'd0};
      // value = m * 2^-24 = 1.x * 2^(lz-24); biased exponent lz - 24 + 127
      else            f = {s, 8'(8'd103 + 8'(lz)), m_norm, 13'd0};
    end else if (e == 5'h1F) begin
      f = {s, 8'hFF, m, 13'd0};
    end else begin
      f = {s, 8'(8'(e) + 8'd112), m, 13'd0};
    end
  end

endmodule
