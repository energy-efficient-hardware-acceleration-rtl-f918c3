// tb_fp_pkg: floating-point reference functions for the testbenches.
//
// These go through the simulator's double-precision reals, not through the
// design's integer datapath, so they give independent expected values:
// FP16 and FP32 values are converted to real, combined exactly or with one
// double rounding, and rounded back to FP32 (nearest-even, subnormals flushed
// to zero like the design).
package tb_fp_pkg;

  function automatic real f32_to_real(input logic [31:0] f);
    if (f[30:23] == 8'd0) return f[31] ? -0.0 : 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] real_to_f32(input real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = (d[27:0] != '0);
    if (g && (st || m[0])) m = m + 1'b1;
    if (m[23]) begin
      m = '0;
      e = e + 1;
    end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic real f16_to_real(input logic [15:0] h);
    real v;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) v = real'(h[9:0]) / 1024.0 * (2.0 ** -14);
    else        v = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  // One rounded FMA step: round(a*b + c). a*b is exact in double.
  function automatic logic [31:0] ref_fma(input logic [31:0] a, b, c);
    return real_to_f32(f32_to_real(a) * f32_to_real(b) + f32_to_real(c));
  endfunction

  // Random FP32 with a biased exponent in [lo, hi].
  function automatic logic [31:0] rand_f32(input int lo, input int hi);
    return {1'($urandom), 8'(lo + int'($urandom % unsigned'(hi - lo + 1))), 23'($urandom)};
  endfunction

  // Random normal FP16 with a biased exponent in [lo, hi].
  function automatic logic [15:0] rand_f16(input int lo, input int hi);
    return {1'($urandom), 5'(lo + int'($urandom % unsigned'(hi - lo + 1))), 10'($urandom)};
  endfunction

endpackage
