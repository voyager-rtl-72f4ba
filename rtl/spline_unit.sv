// spline_unit: programmable nonlinear function of one bfloat16 lane.
//
// A nonlinear function (exp, gelu, silu, tanh, sigmoid, ...) is approximated
// off-line by a spline of SPL_SEGS = 7 quadratic segments; the six knots and
// the 7 x 3 coefficients come with the vector instruction, so one circuit
// serves every function. Segment k covers knots[k-1] <= u < knots[k] (segment 0
// everything below knots[0], segment 6 everything from knots[5] up); knots
// must be ascending. The result is evaluated in Horner form,
// y = (a*u + b)*u + c, in bfloat16. Purely combinational. The seven quadratic
// segments and the run-time coefficients follow the paper; the segment rule
// and Horner evaluation are this design's choices.
module spline_unit
  import voyager_pkg::*;
(
  input  bf16_t                           u,
  input  logic [SPL_KNOTS-1:0][15:0]      knots,
  input  logic [SPL_SEGS-1:0][2:0][15:0]  coef,
  output bf16_t                           y,
  output logic [2:0]                      seg
);
  bf16_t a, b, cc;

  always_comb begin
    seg = 3'd0;
    for (int k = 0; k < SPL_KNOTS; k++) begin
      if (!bf16_lt(u, knots[k])) seg = 3'(k + 1);
    end
    a  = coef[seg][0];
    b  = coef[seg][1];
    cc = coef[seg][2];
    y  = bf16_add(bf16_mul(bf16_add(bf16_mul(a, u), b), u), cc);
  end
endmodule
