// tb_imax_pkg: host-side helpers for the lane and top testbenches.
//
// build_dot() plays the host: it packs the command buffer for an FP16
// dot-product kernel and computes the expected partial sums.
// Kernel mapping, per unit u of six PEs starting at PE 6u:
//   6u+0 LDA  (LMM 6u holds vector x_u)     6u+3 FMA  (low two elements)
//   6u+1 LDB  (LMM 6u+1 holds vector y)     6u+4 CVT_HI
//   6u+2 CVT_LO                             6u+5 FMA  (high two elements)
// Each FMA PE stores 4 threads x 2 lanes of FP32 partial sums at ST_ADDR;
// the dot product is the sum of the 16 partials of a unit.
package tb_imax_pkg;
  import imax_pkg::*;
  import tb_fp_pkg::*;

  localparam int ST_ADDR = 4000;

  function automatic logic [63:0] hdr(input tag_e tag, input int id, input int addr,
                                      input int len, input int aux_addr = 0,
                                      input pe_op_e op = OP_NOP);
    hdr_t h;
    h          = '0;
    h.tag      = tag;
    h.id       = ID_W'(id);
    h.addr     = LMM_AW'(addr);
    h.len      = LEN_W'(len);
    h.aux_addr = LMM_AW'(aux_addr);
    h.aux_op   = op;
    return h;
  endfunction

  // Append a dot-product job for `units` units, each with its own x vector
  // and one shared y vector of `words` 64-bit words (4*words FP16 elements).
  // exp_q receives, per unit, the 8 expected words drained (4 from each FMA
  // PE); init is the REGV value given to every FMA PE. exact_q receives the
  // exact value of each dot product (without init).
  task automatic build_dot(ref logic [63:0] q[$], ref logic [63:0] exp_q[$],
                           ref real exact_q[$],
                           input int units, input int words, input logic [63:0] init,
                           output real dot_err_max);
    logic [63:0] x [$];
    logic [63:0] y [$];
    dot_err_max = 0.0;
    for (int i = 0; i < words; i++) y.push_back({rand_f16(10, 20), rand_f16(10, 20),
                                                 rand_f16(10, 20), rand_f16(10, 20)});
    for (int u = 0; u < units; u++) begin
      int p;
      p = 6 * u;
      q.push_back(hdr(TAG_CONF, p + 0, 0, 0, 0, OP_LDA));
      q.push_back(hdr(TAG_CONF, p + 1, 0, 0, 0, OP_LDB));
      q.push_back(hdr(TAG_CONF, p + 2, 0, 0, 0, OP_CVT_LO));
      q.push_back(hdr(TAG_CONF, p + 3, 0, 0, ST_ADDR, OP_FMA));
      q.push_back(hdr(TAG_CONF, p + 4, 0, 0, 0, OP_CVT_HI));
      q.push_back(hdr(TAG_CONF, p + 5, 0, 0, ST_ADDR, OP_FMA));
      q.push_back(hdr(TAG_REGV, p + 3, 0, 0));
      q.push_back(init);
      q.push_back(hdr(TAG_REGV, p + 5, 0, 0));
      q.push_back(init);
    end
    for (int u = 0; u < units; u++) begin
      x.delete();
      for (int i = 0; i < words; i++) x.push_back({rand_f16(10, 20), rand_f16(10, 20),
                                                   rand_f16(10, 20), rand_f16(10, 20)});
      q.push_back(hdr(TAG_LOAD, 6 * u, 0, words));
      foreach (x[i]) q.push_back(x[i]);
      q.push_back(hdr(TAG_LOAD, 6 * u + 1, 0, words));
      foreach (y[i]) q.push_back(y[i]);
      // expected partials
      for (int half = 0; half < 2; half++) begin
        logic [31:0] acc [4][2];
        for (int t = 0; t < 4; t++) begin
          acc[t][0] = (t == 0) ? init[31:0]  : '0;
          acc[t][1] = (t == 0) ? init[63:32] : '0;
        end
        for (int i = 0; i < words; i++) begin
          for (int l = 0; l < 2; l++) begin
            logic [15:0] xa, yb;
            xa = x[i][32*half + 16*l +: 16];
            yb = y[i][32*half + 16*l +: 16];
            acc[i % 4][l] = ref_fma(real_to_f32(f16_to_real(xa)),
                                    real_to_f32(f16_to_real(yb)), acc[i % 4][l]);
          end
        end
        for (int t = 0; t < 4; t++) exp_q.push_back({acc[t][1], acc[t][0]});
      end
      // accuracy of the summed partials against the exact dot product
      begin
        real exact, got;
        exact = 0.0;
        got = 0.0;
        for (int i = 0; i < words; i++)
          for (int e = 0; e < 4; e++)
            exact += f16_to_real(x[i][16*e +: 16]) * f16_to_real(y[i][16*e +: 16]);
        exact_q.push_back(exact);
        for (int k = exp_q.size() - 8; k < exp_q.size(); k++)
          got += f32_to_real(exp_q[k][31:0]) + f32_to_real(exp_q[k][63:32]);
        got -= 2.0 * (f32_to_real(init[31:0]) + f32_to_real(init[63:32]));
        if (exact != 0.0 && ((got - exact) / exact > dot_err_max || (exact - got) / exact > dot_err_max))
          dot_err_max = (got > exact) ? (got - exact) / (exact < 0 ? -exact : exact)
                                      : (exact - got) / (exact < 0 ? -exact : exact);
      end
    end
    q.push_back(hdr(TAG_EXEC, 0, 0, words));
    for (int u = 0; u < units; u++) begin
      q.push_back(hdr(TAG_DRAIN, 6 * u + 3, ST_ADDR, 4));
      q.push_back(hdr(TAG_DRAIN, 6 * u + 5, ST_ADDR, 4));
    end
  endtask

endpackage
