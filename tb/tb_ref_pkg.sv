// tb_ref_pkg: reference model of one vector-unit lane in double precision,
// rounding to bfloat16 after every operation (round to nearest even), for
// comparison with the design.
package tb_ref_pkg;
  import voyager_pkg::*;
  import tb_util_pkg::*;

  function automatic real rb(real r);   // round to bf16 and back
    return bf2r(r2bf(r));
  endfunction

  function automatic int rne(real r);
    real f;
    int  i;
    f = (r < 0.0) ? -r : r;
    i = int'($floor(f));
    if (f - real'(i) > 0.5 || (f - real'(i) == 0.5 && (i % 2) == 1)) i++;
    return (r < 0.0) ? -i : i;
  endfunction

  function automatic real spline_ref(real u, logic [SPL_KNOTS-1:0][15:0] knots,
                                     logic [SPL_SEGS-1:0][2:0][15:0] coef, output int seg);
    real a, b, c;
    seg = 0;
    for (int k = 0; k < SPL_KNOTS; k++) if (u >= bf2r(knots[k])) seg = k + 1;
    a = bf2r(coef[seg][0]); b = bf2r(coef[seg][1]); c = bf2r(coef[seg][2]);
    return rb(rb(rb(rb(a * u) + b) * u) + c);
  endfunction

  // returns w (stage 3) and o (stage 4) as bf16 bits (o may be an int8)
  function automatic void lane_ref(vp_cfg_t cfg, logic [31:0] m, logic [15:0] n, logic [15:0] z,
                                   output logic [15:0] w_bits, output logic [15:0] o_bits);
    real x, y, u, v, w, zz, q;
    int  seg, qi;
    x  = cfg.m_dq ? rb(rb(real'($signed(m))) * bf2r(cfg.s_m)) : bf2r(m[15:0]);
    y  = cfg.n_dq ? rb(rb(real'($signed(n))) * bf2r(cfg.s_n)) : bf2r(n);
    zz = bf2r(z);
    case (cfg.s1_op)
      S1_SX:   u = rb(bf2r(cfg.s1_s) * x);
      S1_ADD:  u = rb(x + y);
      S1_SUB:  u = rb(x - y);
      S1_MUL:  u = rb(x * y);
      default: u = x;
    endcase
    v = (cfg.s2_op == S2_NL) ? spline_ref(u, cfg.knots, cfg.coef, seg) : u;
    case (cfg.s3_op)
      S3_SV:   w = rb(bf2r(cfg.s3_s) * v);
      S3_SQ:   w = rb(v * v);
      S3_ADD:  w = rb(v + zz);
      S3_MUL:  w = rb(v * zz);
      S3_DIV:  w = rb(v * rb(1.0 / zz));
      default: w = v;
    endcase
    w_bits = r2bf(w);
    case (cfg.s4_op)
      S4_DIV: o_bits = r2bf(rb(w * rb(1.0 / bf2r(cfg.s4_s))));
      S4_Q: begin
        q  = rb(w * bf2r(cfg.s4_s));
        if (q > 1000.0) q = 1000.0;
        if (q < -1000.0) q = -1000.0;
        qi = rne(q);
        if (qi > 127) qi = 127;
        if (qi < -128) qi = -128;
        o_bits = 16'(qi);
      end
      default: o_bits = w_bits;
    endcase
  endfunction
endpackage
