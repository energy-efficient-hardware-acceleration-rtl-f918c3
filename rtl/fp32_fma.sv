// fp32_fma: pipelined IEEE 754 single-precision fused multiply-add.
//
// r = a*b + c with a single rounding (round to nearest, ties to even).
// Stage 1 unpacks the operands, multiplies the 24-bit significands exactly
// (48-bit product) and resolves the special cases. Stage 2 aligns the addend
// and the product on a 98-bit fixed-point grid (point at bit 96), with every
// bit shifted out folded into a sticky bit, then adds or subtracts the
// magnitudes. Stage 3 normalises with a leading-one search and rounds.
//
// Interface: in_valid/a/b/c are sampled on a rising edge; out_valid/r appear
// FMA_STAGES (3) edges later. The pipeline never stalls; one operation can be
// issued every cycle.
//
// The paper gives only the function (FMA units, two per 64-bit datapath) and
// that four threads hide the FPU latency. The depth of 3, flush-to-zero of
// subnormal inputs and results, and the canonical quiet NaN are this design's
// choices.
module fp32_fma
  import imax_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  output logic        out_valid,
  output logic [31:0] r
);

  localparam int unsigned W = 98;  // alignment grid width, point at bit 96

  // ---------------- stage 1: unpack, multiply, specials -------------------
  logic        sa, sb, sc_in;
  logic [7:0]  ea, eb, ec_in;
  logic        za, zb, zc_in, ia, ib, ic, na, nb, nc;
  logic [23:0] ma, mb, mc_in;
  logic        s1_special_c;
  logic [31:0] s1_special_v_c;

  assign sa = a[31];    assign ea = a[30:23];
  assign sb = b[31];    assign eb = b[30:23];
  assign sc_in = c[31]; assign ec_in = c[30:23];
  assign za = (ea == 8'd0);  assign zb = (eb == 8'd0);  assign zc_in = (ec_in == 8'd0);
  assign ia = (ea == 8'hFF) && (a[22:0] == '0);
  assign ib = (eb == 8'hFF) && (b[22:0] == '0);
  assign ic = (ec_in == 8'hFF) && (c[22:0] == '0);
  assign na = (ea == 8'hFF) && (a[22:0] != '0);
  assign nb = (eb == 8'hFF) && (b[22:0] != '0);
  assign nc = (ec_in == 8'hFF) && (c[22:0] != '0);
  assign ma = za ? 24'd0 : {1'b1, a[22:0]};
  assign mb = zb ? 24'd0 : {1'b1, b[22:0]};
  assign mc_in = zc_in ? 24'd0 : {1'b1, c[22:0]};

  always_comb begin
    logic sp;
    sp = sa ^ sb;
    s1_special_c   = 1'b1;
    s1_special_v_c = FP32_QNAN;
    if (na || nb || nc || (ia && zb) || (ib && za)) begin
      s1_special_v_c = FP32_QNAN;
    end else if (ia || ib) begin
      s1_special_v_c = (ic && (sc_in != sp)) ? FP32_QNAN : {sp, 8'hFF, 23'd0};
    end else if (ic) begin
      s1_special_v_c = {sc_in, 8'hFF, 23'd0};
    end else if (za || zb) begin
      // zero product: result is c, or a signed zero
      s1_special_v_c = zc_in ? {sp & sc_in, 31'd0} : c;
    end else begin
      s1_special_c = 1'b0;
    end
  end

  logic               s1_valid, s1_special, s1_sp, s1_sc, s1_zc;
  logic [31:0]        s1_special_v;
  logic [47:0]        s1_mp;
  logic [23:0]        s1_mc;
  logic signed [11:0] s1_ep, s1_ec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
    end else begin
      s1_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    s1_special   <= s1_special_c;
    s1_special_v <= s1_special_v_c;
    s1_sp        <= sa ^ sb;
    s1_sc        <= sc_in;
    s1_zc        <= zc_in;
    s1_mp        <= ma * mb;
    s1_mc        <= mc_in;
    s1_ep        <= $signed({4'd0, ea}) + $signed({4'd0, eb}) - 12'sd127;
    s1_ec        <= $signed({4'd0, ec_in});
  end

  // ---------------- stage 2: align and add --------------------------------
  function automatic logic [W-1:0] shr_sticky(input logic [W-1:0] v, input logic [11:0] sh);
    logic [W-1:0] o;
    logic         st;
    if (sh >= 12'(W)) begin
      o  = '0;
      st = (v != '0);
    end else begin
      o  = v >> sh;
      st = ((o << sh) != v);
    end
    return o | {{(W-1){1'b0}}, st};
  endfunction

  logic [W:0]         s2_sum_c;
  logic signed [11:0] s2_e_c;
  logic               s2_s_c;

  always_comb begin
    logic [W-1:0]       x, y, big, sml;
    logic signed [11:0] d;
    logic               sbig, ssmall;
    x = {s1_mp, 50'd0};
    y = {1'b0, s1_mc, 73'd0};
    d = s1_ep - s1_ec;
    if (s1_zc || d >= 0) begin
      big = x;  sml = s1_zc ? '0 : shr_sticky(y, 12'(d));
      s2_e_c = s1_ep;  sbig = s1_sp;  ssmall = s1_sc;
    end else begin
      big = y;  sml = shr_sticky(x, 12'(-d));
      s2_e_c = s1_ec;  sbig = s1_sc;  ssmall = s1_sp;
    end
    if (sbig == ssmall) begin
      s2_sum_c = {1'b0, big} + {1'b0, sml};
      s2_s_c   = sbig;
    end else if (big >= sml) begin
      s2_sum_c = {1'b0, big - sml};
      s2_s_c   = sbig;
    end else begin
      s2_sum_c = {1'b0, sml - big};
      s2_s_c   = ssmall;
    end
  end

  logic               s2_valid, s2_special, s2_s;
  logic [31:0]        s2_special_v;
  logic [W:0]         s2_sum;
  logic signed [11:0] s2_e;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s2_valid <= 1'b0;
    else        s2_valid <= s1_valid;
  end

  always_ff @(posedge clk) begin
    s2_special   <= s1_special;
    s2_special_v <= s1_special_v;
    s2_sum       <= s2_sum_c;
    s2_e         <= s2_e_c;
    s2_s         <= s2_s_c;
  end

  // ---------------- stage 3: normalise and round --------------------------
  logic [31:0] r_c;

  always_comb begin
    logic [6:0]         p;
    logic [W:0]         n;
    logic [22:0]        frac;
    logic               lsb, rnd, st, up;
    logic [23:0]        frac_r;
    logic signed [11:0] e;
    p = '0;
    for (int i = 0; i <= int'(W); i++) begin
      if (s2_sum[i]) p = 7'(i);
    end
    n      = s2_sum << (7'(W) - p);               // leading one at bit W
    frac   = n[W-1 -: 23];
    lsb    = n[W-23];
    rnd    = n[W-24];
    st     = (n[W-25:0] != '0);
    up     = rnd && (st || lsb);
    frac_r = {1'b0, frac} + 24'(up);
    e      = s2_e + $signed({5'd0, p}) - 12'sd96 + (frac_r[23] ? 12'sd1 : 12'sd0);
    if (s2_special)              r_c = s2_special_v;
    else if (s2_sum == '0)       r_c = 32'd0;
    else if (e >= 12'sd255)      r_c = {s2_s, 8'hFF, 23'd0};
    else if (e <= 12'sd0)        r_c = {s2_s, 31'd0};
    else                         r_c = {s2_s, e[7:0], frac_r[22:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      r         <= '0;
    end else begin
      out_valid <= s2_valid;
      r         <= r_c;
    end
  end

endmodule
