// vector_pipeline: the N-lane multi-stage operation pipeline of the vector unit.
//
// Each lane runs the same five steps, each ending in a register:
//   dq      x = m, or dq(m, s_m) = bf16(int m) * s_m; y likewise from n
//   stage 1 u = x | s*x | x+y | x-y | x*y
//   stage 2 v = u | nonlinear(u)          (spline_unit, 7 quadratic segments)
//   stage 3 w = v | s*v | v*v | v+z | v*z | v*(1/z)
//   stage 4 o = w | w/s | quantize(w, s) = int8(round(w*s)), sign-extended
// A stage that is not needed forwards its input, so fused chains such as
// dequantize -> ReLU or subtract -> exp -> divide pass in one sweep. The third
// operand z travels with its vector to stage 3. Stage-3 results w leave next
// to the stage-4 results o, for the reducer and accumulator.
//
// Lanes are bfloat16 except the m input (32 bits: int32 from the matrix unit
// or integer/bf16 from memory) and n (16 bits, int16 or bf16). The pipeline
// advances as a whole when its last register is empty or out_ready is high;
// in_ready says so. Latency is five cycles, throughput one vector per cycle.
// The stage operation lists are those drawn in the paper's vector unit; the
// number of registers, bfloat16 rounding and the quantize/dequantize formulas
// are this design's choices.
module vector_pipeline
  import voyager_pkg::*;
#(
  parameter int N = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  vp_cfg_t              cfg,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [N-1:0][31:0]   m,
  input  logic [N-1:0][15:0]   n,
  input  logic [N-1:0][15:0]   z,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [N-1:0][15:0]   w_out,
  output logic [N-1:0][15:0]   o_out
);
  localparam int NS = 5;
  logic [NS-1:0]       v;               // stage registers valid
  logic                en;
  bf16_t               x_q [N], y_q [N], z0 [N];
  bf16_t               u_q [N], z1 [N];
  bf16_t               v_q [N], z2 [N];
  bf16_t               w_q [N];
  bf16_t               w4  [N], o4 [N];

  assign en        = !v[NS-1] || out_ready;
  assign in_ready  = en;
  assign out_valid = v[NS-1];

  // ---------------- combinational stage functions
  bf16_t x_d [N], y_d [N], u_d [N], v_d [N], w_d [N], o_d [N];
  bf16_t nl  [N];
  logic [2:0] seg [N];
  bf16_t rs4;
  assign rs4 = bf16_recip(cfg.s4_s);

  for (genvar l = 0; l < N; l++) begin : g_nl
    spline_unit u_spl (.u(u_q[l]), .knots(cfg.knots), .coef(cfg.coef), .y(nl[l]), .seg(seg[l]));
  end

  always_comb begin
    logic signed [7:0] q8;
    q8 = '0;
    for (int l = 0; l < N; l++) begin
      x_d[l] = cfg.m_dq ? bf16_mul(bf16_from_int(m[l]), cfg.s_m) : m[l][15:0];
      y_d[l] = cfg.n_dq ? bf16_mul(bf16_from_int(32'(signed'(n[l]))), cfg.s_n) : n[l];
      case (cfg.s1_op)
        S1_SX:   u_d[l] = bf16_mul(cfg.s1_s, x_q[l]);
        S1_ADD:  u_d[l] = bf16_add(x_q[l], y_q[l]);
        S1_SUB:  u_d[l] = bf16_sub(x_q[l], y_q[l]);
        S1_MUL:  u_d[l] = bf16_mul(x_q[l], y_q[l]);
        default: u_d[l] = x_q[l];
      endcase
      v_d[l] = (cfg.s2_op == S2_NL) ? nl[l] : u_q[l];
      case (cfg.s3_op)
        S3_SV:   w_d[l] = bf16_mul(cfg.s3_s, v_q[l]);
        S3_SQ:   w_d[l] = bf16_mul(v_q[l], v_q[l]);
        S3_ADD:  w_d[l] = bf16_add(v_q[l], z2[l]);
        S3_MUL:  w_d[l] = bf16_mul(v_q[l], z2[l]);
        S3_DIV:  w_d[l] = bf16_mul(v_q[l], bf16_recip(z2[l]));
        default: w_d[l] = v_q[l];
      endcase
      case (cfg.s4_op)
        S4_DIV:  o_d[l] = bf16_mul(w_q[l], rs4);
        S4_Q: begin
          q8     = bf16_to_int8(bf16_mul(w_q[l], cfg.s4_s));
          o_d[l] = {{8{q8[7]}}, q8};
        end
        default: o_d[l] = w_q[l];
      endcase
    end
  end

  // ---------------- pipeline registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      for (int l = 0; l < N; l++) begin
        x_q[l] <= '0; y_q[l] <= '0; z0[l] <= '0;
        u_q[l] <= '0; z1[l] <= '0;
        v_q[l] <= '0; z2[l] <= '0;
        w_q[l] <= '0; w4[l] <= '0; o4[l] <= '0;
      end
    end else if (en) begin
      v <= {v[NS-2:0], in_valid};
      for (int l = 0; l < N; l++) begin
        x_q[l] <= x_d[l]; y_q[l] <= y_d[l]; z0[l] <= z[l];
        u_q[l] <= u_d[l]; z1[l] <= z0[l];
        v_q[l] <= v_d[l]; z2[l] <= z1[l];
        w_q[l] <= w_d[l];
        w4[l]  <= w_q[l]; o4[l] <= o_d[l];
      end
    end
  end

  always_comb begin
    for (int l = 0; l < N; l++) begin
      w_out[l] = w4[l];
      o_out[l] = o4[l];
    end
  end

  logic unused;
  always_comb begin
    unused = 1'b0;
    for (int l = 0; l < N; l++) unused = unused ^ (^seg[l]);
  end
endmodule
