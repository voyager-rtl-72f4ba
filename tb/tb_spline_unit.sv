// tb_spline_unit: random ascending knots and coefficients; checks the chosen
// segment and the bfloat16 Horner result against a double-precision reference
// rounded after every operation, and a 7-segment fit of ReLU on the knots.
module tb_spline_unit
  import voyager_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;
;
  int checks = 0, failures = 0;
  bf16_t u, y;
  logic [SPL_KNOTS-1:0][15:0] knots;
  logic [SPL_SEGS-1:0][2:0][15:0] coef;
  logic [2:0] seg;

  spline_unit dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 40; trial++) begin
      real k0;
      k0 = -4.0;
      for (int k = 0; k < SPL_KNOTS; k++) begin
        k0 = k0 + 0.25 + real'($urandom % 100) / 100.0;
        knots[k] = r2bf(k0);
      end
      for (int s = 0; s < SPL_SEGS; s++) for (int j = 0; j < 3; j++)
        coef[s][j] = r2bf((real'($urandom % 2000) - 1000.0) / 250.0);
      for (int i = 0; i < 50; i++) begin
        real ur, er;
        int  es;
        ur = (real'($urandom % 20000) - 10000.0) / 1000.0;
        u  = r2bf(ur);
        #1;
        er = spline_ref(bf2r(u), knots, coef, es);
        checks++;
        if (int'(seg) != es) begin failures++; $display("FAIL seg %0d exp %0d (u=%f)", seg, es, bf2r(u)); end
        checks++;
        if (!close(bf2r(y), er, 0.01, 1e-3)) begin failures++; $display("FAIL y=%f exp %f", bf2r(y), er); end
      end
    end
    // ReLU: zero below the knot at 0, identity above it
    for (int k = 0; k < SPL_KNOTS; k++) knots[k] = r2bf(real'(k - 2));
    for (int s = 0; s < SPL_SEGS; s++) begin
      coef[s][0] = 16'd0;
      coef[s][1] = (s >= 3) ? r2bf(1.0) : 16'd0;
      coef[s][2] = 16'd0;
    end
    for (int i = 0; i < 50; i++) begin
      real ur;
      ur = (real'($urandom % 2000) - 1000.0) / 100.0;
      u = r2bf(ur);
      #1;
      checks++;
      if (!close(bf2r(y), (bf2r(u) > 0.0) ? bf2r(u) : 0.0, 0.0, 0.0)) begin failures++; $display("FAIL relu(%f)=%f", bf2r(u), bf2r(y)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
