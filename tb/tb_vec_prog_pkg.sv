// tb_vec_prog_pkg: vector-unit programs shared by the vector-unit and
// top-level testbenches: address patterns, the exp and ReLU splines (exp is
// fitted here, at "compile time", by interpolating each of the seven
// quadratic segments at its ends and midpoint) and the three softmax passes.
package tb_vec_prog_pkg;
  import voyager_pkg::*;
  import tb_util_pkg::*;

  function automatic ag_cfg_t pat2(int base, int b4, int s4, int b5, int s5);
    ag_cfg_t a;
    a = '0;
    for (int i = 0; i < AG_NL; i++) a.bound[i] = 1;
    a.base = base;
    a.bound[4] = 16'(b4); a.stride[4] = s4;
    a.bound[5] = 16'(b5); a.stride[5] = s5;
    return a;
  endfunction

  function automatic void fit_exp(output logic [SPL_KNOTS-1:0][15:0] knots,
                                  output logic [SPL_SEGS-1:0][2:0][15:0] coef);
    real kn [SPL_KNOTS] = '{-6.0, -4.0, -2.75, -1.75, -1.0, -0.45};
    real lo, hi;
    for (int k = 0; k < SPL_KNOTS; k++) knots[k] = r2bf(kn[k]);
    for (int s = 0; s < SPL_SEGS; s++) begin
      real x0, x1, x2, y0, y1, y2, a, b, c;
      lo = (s == 0) ? -12.0 : kn[s-1];
      hi = (s == SPL_SEGS - 1) ? 0.0 : kn[s];
      x0 = lo; x1 = (lo + hi) / 2.0; x2 = hi;
      y0 = $exp(x0); y1 = $exp(x1); y2 = $exp(x2);
      // Lagrange -> a x^2 + b x + c
      a = y0 / ((x0 - x1) * (x0 - x2)) + y1 / ((x1 - x0) * (x1 - x2)) + y2 / ((x2 - x0) * (x2 - x1));
      b = -y0 * (x1 + x2) / ((x0 - x1) * (x0 - x2)) - y1 * (x0 + x2) / ((x1 - x0) * (x1 - x2))
          - y2 * (x0 + x1) / ((x2 - x0) * (x2 - x1));
      c = y0 * x1 * x2 / ((x0 - x1) * (x0 - x2)) + y1 * x0 * x2 / ((x1 - x0) * (x1 - x2))
          + y2 * x0 * x1 / ((x2 - x0) * (x2 - x1));
      if (s == 0) begin a = 0.0; b = 0.0; c = 0.0; end   // exp(u) ~ 0 below -6
      coef[s][0] = r2bf(a); coef[s][1] = r2bf(b); coef[s][2] = r2bf(c);
    end
  endfunction

  function automatic void fit_relu(output logic [SPL_KNOTS-1:0][15:0] knots,
                                   output logic [SPL_SEGS-1:0][2:0][15:0] coef);
    for (int k = 0; k < SPL_KNOTS; k++) knots[k] = r2bf(real'(k - 2));
    for (int s = 0; s < SPL_SEGS; s++) begin
      coef[s][0] = 16'd0;
      coef[s][1] = (s >= 3) ? r2bf(1.0) : 16'd0;
      coef[s][2] = 16'd0;
    end
  endfunction

  // softmax over R rows of V vectors (row r: words x_base + r*V .. +V-1)
  function automatic vu_inst_t softmax_pass(int pass, int R, int V, int x_base, int max_base,
                                            int sum_base, int out_base);
    vu_inst_t i;
    i = '0;
    i.m_src = M_MEM;
    i.n_src = OPND_NONE;
    i.z_src = OPND_NONE;
    i.ag0   = pat2(x_base, R, V, V, 1);
    i.count = 32'(R * V);
    i.vp.s1_op = S1_X; i.vp.s2_op = S2_U; i.vp.s3_op = S3_V; i.vp.s4_op = S4_W;
    fit_exp(i.vp.knots, i.vp.coef);
    i.red_len = 16'(V);
    if (pass == 1) begin
      i.red_max = 1'b1;
      i.out_sel = OUT_RED;
      i.agw     = pat2(max_base, 1, 0, R, 1);
    end else begin
      i.n_src    = OPND_MEM;
      i.ag1      = pat2(max_base, R, 1, V, 0);
      i.vp.s1_op = S1_SUB;
      i.vp.s2_op = S2_NL;
      if (pass == 2) begin
        i.out_sel = OUT_RED;
        i.agw     = pat2(sum_base, 1, 0, R, 1);
      end else begin
        i.z_src    = OPND_MEM;
        i.ag2      = pat2(sum_base, R, 1, V, 0);
        i.vp.s3_op = S3_DIV;
        i.out_sel  = OUT_PIPE;
        i.agw      = pat2(out_base, 1, 0, R * V, 1);
      end
    end
    return i;
  endfunction
endpackage
