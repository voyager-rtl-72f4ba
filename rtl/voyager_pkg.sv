// voyager_pkg: types, constants and bfloat16 arithmetic shared by the accelerator.
//
// The matrix unit computes with int8 activations and weights and int32 partial
// sums. The vector unit computes in bfloat16 (1 sign, 8 exponent, 7 mantissa
// bits). The bfloat16 functions below are combinational and synthesizable:
// results are rounded to nearest even, subnormal inputs and results are flushed
// to zero and overflow gives infinity. These rounding rules are this design's
// choice.
//
// The instruction structs (address generator, matrix and vector instructions)
// are packed so that the control registers can hold them as plain words.
package voyager_pkg;

  typedef logic [15:0] bf16_t;


  // ---------------------------------------------------------------- address generator
  localparam int AG_NL = 6;  // loops per address generator

  typedef struct packed {
    logic [31:0]                    base;
    logic [AG_NL-1:0][15:0]         bound;   // iteration count of loop i (>= 1), loop AG_NL-1 innermost
    logic [AG_NL-1:0][31:0]         stride;  // signed word stride of loop i
  } ag_cfg_t;

  // ---------------------------------------------------------------- matrix unit
  typedef struct packed {
    ag_cfg_t      in_ag;      // input-fetch address pattern (all tiles, in tile order)
    ag_cfg_t      w_ag;       // weight-fetch address pattern (ROWS words per tile)
    ag_cfg_t      b_ag;       // bias-fetch address pattern (one word per output-channel tile)
    logic [15:0]  p;          // input vectors (output pixels) per tile
    logic [15:0]  kt;         // reduction tiles per output tile
    logic [15:0]  nt;         // output-channel tiles
    logic         bias_en;    // add bias on the first reduction tile
  } mu_inst_t;

  // ---------------------------------------------------------------- vector unit
  typedef enum logic [2:0] {S1_X, S1_SX, S1_ADD, S1_SUB, S1_MUL} s1_op_e;
  typedef enum logic [0:0] {S2_U, S2_NL} s2_op_e;
  typedef enum logic [2:0] {S3_V, S3_SV, S3_SQ, S3_ADD, S3_MUL, S3_DIV} s3_op_e;
  typedef enum logic [1:0] {S4_W, S4_DIV, S4_Q} s4_op_e;

  localparam int SPL_SEGS  = 7;
  localparam int SPL_KNOTS = SPL_SEGS - 1;

  typedef struct packed {
    logic                              m_dq;   // m lanes are integers: convert and scale by s_m
    logic                              n_dq;   // n lanes are integers: convert and scale by s_n
    bf16_t                             s_m;
    bf16_t                             s_n;
    s1_op_e                            s1_op;
    bf16_t                             s1_s;
    s2_op_e                            s2_op;
    logic [SPL_KNOTS-1:0][15:0]        knots;  // ascending segment boundaries
    logic [SPL_SEGS-1:0][2:0][15:0]    coef;   // [seg][0]=a, [1]=b, [2]=c : a*u*u + b*u + c
    s3_op_e                            s3_op;
    bf16_t                             s3_s;
    s4_op_e                            s4_op;
    bf16_t                             s4_s;
  } vp_cfg_t;

  typedef enum logic [0:0] {M_MU, M_MEM} m_src_e;
  typedef enum logic [1:0] {OPND_MEM, OPND_RED, OPND_ACC, OPND_NONE} opnd_src_e;
  typedef enum logic [1:0] {OUT_PIPE, OUT_RED, OUT_ACC, OUT_NONE} out_sel_e;

  typedef struct packed {
    m_src_e       m_src;
    opnd_src_e    n_src;
    opnd_src_e    z_src;
    ag_cfg_t      ag0;       // stream 0 -> m
    ag_cfg_t      ag1;       // stream 1 -> n
    ag_cfg_t      ag2;       // stream 2 -> z
    ag_cfg_t      agw;       // output write addresses
    logic [31:0]  count;     // vectors through the pipeline
    vp_cfg_t      vp;
    logic         red_max;   // reducer: max instead of sum
    logic         red_append;// reducer: append scalars instead of replicating
    logic [15:0]  red_len;   // vectors per reduction
    logic [15:0]  acc_len;   // vectors per accumulation
    out_sel_e     out_sel;   // which result is written to memory
  } vu_inst_t;

  // ---------------------------------------------------------------- bfloat16 helpers
  function automatic logic bf16_is_zero(bf16_t a);
    return a[14:7] == 8'd0;
  endfunction

  // Round and pack: value = (-1)^s * m * 2^(e - 157), m unsigned, not normalised.
  function automatic bf16_t bf16_pack(logic s, int e, logic [31:0] m);
    int          p;
    int          ex;
    logic [31:0] mn;
    logic [7:0]  mant;
    logic        g, st;
    p = -1;
    for (int i = 0; i < 32; i++) if (m[i]) p = i;
    if (p < 0) return {s, 15'd0};
    mn   = m << (31 - p);
    ex   = e + p - 30;
    mant = {1'b0, mn[30:24]};
    g    = mn[23];
    st   = |mn[22:0];
    if (g && (st || mant[0])) mant = mant + 8'd1;
    if (mant[7]) begin
      mant = 8'd0;
      ex   = ex + 1;
    end
    if (ex <= 0) return {s, 15'd0};
    if (ex >= 255) return {s, 8'hFF, 7'd0};
    return {s, ex[7:0], mant[6:0]};
  endfunction

  function automatic bf16_t bf16_mul(bf16_t a, bf16_t b);
    logic [15:0] m;
    logic        s;
    s = a[15] ^ b[15];
    if (bf16_is_zero(a) || bf16_is_zero(b)) return {s, 15'd0};
    m = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    return bf16_pack(s, int'(a[14:7]) + int'(b[14:7]) - 111, {16'd0, m});
  endfunction

  // |a| >= |b|
  function automatic logic bf16_mag_ge(bf16_t a, bf16_t b);
    return a[14:0] >= b[14:0];
  endfunction

  function automatic bf16_t bf16_add(bf16_t a, bf16_t b);
    bf16_t       x, y;
    int          d;
    logic [31:0] mx, my, mys, r;
    logic        sticky;
    if (bf16_is_zero(b)) return bf16_is_zero(a) ? {a[15] & b[15], 15'd0} : a;
    if (bf16_is_zero(a)) return b;
    if (bf16_mag_ge(a, b)) begin x = a; y = b; end
    else begin x = b; y = a; end
    d  = int'(x[14:7]) - int'(y[14:7]);
    mx = {1'b0, 1'b1, x[6:0], 23'd0};
    my = {1'b0, 1'b1, y[6:0], 23'd0};
    if (d > 31) begin
      mys    = 32'd0;
      sticky = 1'b1;
    end else begin
      mys    = my >> d;
      sticky = (d == 0) ? 1'b0 : |(my << (32 - d));
    end
    if (x[15] == y[15]) r = mx + mys;
    else                r = mx - mys;
    r[0] = r[0] | sticky;
    if (r == 32'd0) return 16'd0;
    return bf16_pack(x[15], int'(x[14:7]), r);
  endfunction

  function automatic bf16_t bf16_neg(bf16_t a);
    return {~a[15], a[14:0]};
  endfunction

  function automatic bf16_t bf16_sub(bf16_t a, bf16_t b);
    return bf16_add(a, bf16_neg(b));
  endfunction

  // a < b (zeros of either sign compare equal)
  function automatic logic bf16_lt(bf16_t a, bf16_t b);
    logic az, bz;
    az = bf16_is_zero(a);
    bz = bf16_is_zero(b);
    if (az && bz) return 1'b0;
    if (az) return !b[15];
    if (bz) return a[15];
    if (a[15] != b[15]) return a[15];
    if (a[15]) return a[14:0] > b[14:0];
    return a[14:0] < b[14:0];
  endfunction

  function automatic bf16_t bf16_max(bf16_t a, bf16_t b);
    return bf16_lt(a, b) ? b : a;
  endfunction

  function automatic bf16_t bf16_recip(bf16_t a);
    logic [31:0] q, r, d;
    if (bf16_is_zero(a)) return {a[15], 8'hFF, 7'd0};
    d = {24'd0, 1'b1, a[6:0]};
    q = 32'h8000_0000 / d;
    r = 32'h8000_0000 % d;
    q[0] = q[0] | (r != 32'd0);
    return bf16_pack(a[15], 260 - int'(a[14:7]), q);
  endfunction

  function automatic bf16_t bf16_from_int(logic signed [31:0] i);
    logic [31:0] mag;
    mag = i[31] ? 32'(-i) : 32'(i);
    return bf16_pack(i[31], 157, mag);
  endfunction

  // round to nearest even and saturate to int8
  function automatic logic signed [7:0] bf16_to_int8(bf16_t a);
    int          sh;
    logic [8:0]  mag;
    logic [7:0]  mx;
    logic        g, st;
    if (bf16_is_zero(a)) return 8'sd0;
    if (a[14:7] >= 8'd134) return a[15] ? -8'sd128 : 8'sd127;
    mx = {1'b1, a[6:0]};
    sh = 134 - int'(a[14:7]);
    if (sh > 8) return 8'sd0;
    mag = 9'(mx >> sh);
    g   = mx[sh-1];
    st  = (sh >= 2) ? |(mx & ((8'd1 << (sh - 1)) - 8'd1)) : 1'b0;
    if (g && (st || mag[0])) mag = mag + 9'd1;
    if (a[15]) return (mag >= 9'd128) ? -8'sd128 : -$signed(8'(mag));
    return (mag >= 9'd127) ? 8'sd127 : $signed(8'(mag));
  endfunction

endpackage
