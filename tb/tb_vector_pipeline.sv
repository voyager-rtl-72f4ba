// tb_vector_pipeline: random stage selections (all operations of all four
// stages, with and without dequantization) applied to random vectors while the
// consumer stalls at random; every output lane (w and o) is compared with a
// double-precision reference rounded to bfloat16 after each operation, and
// the five-cycle latency is checked when nothing stalls.
module tb_vector_pipeline
  import voyager_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;
;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  vp_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [N-1:0][31:0] m;
  logic [N-1:0][15:0] n, z, w_out, o_out;

  vector_pipeline #(.N(N)) dut (.*);

  logic [15:0] expw [$], expo [$];
  int sent_at [$];
  int cyc = 0;
  always @(posedge clk) cyc++;
  bit check_lat = 0;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] rnd_bf();
    real r;
    r = real'($urandom % 20000 + 1) / 1000.0;
    if ($urandom % 2) r = -r;
    return r2bf(r);
  endfunction

  always @(negedge clk) if (rst_n) begin
    out_ready = check_lat ? 1'b1 : 1'($urandom % 3 != 0);
    #1;
    if (out_valid && out_ready) begin
      int t0;
      t0 = sent_at.pop_front();
      if (check_lat) begin
        checks++;
        if (cyc - t0 != 5) begin failures++; $display("FAIL latency %0d", cyc - t0); end
      end
      for (int l = 0; l < N; l++) begin
        logic [15:0] ew, eo;
        ew = expw.pop_front(); eo = expo.pop_front();
        checks++;
        if (!close(bf2r(w_out[l]), bf2r(ew), 0.01, 1e-6)) begin
          failures++; $display("FAIL w lane %0d got %f exp %f (s1 %0d s2 %0d s3 %0d)", l, bf2r(w_out[l]), bf2r(ew), cfg.s1_op, cfg.s2_op, cfg.s3_op);
        end
        checks++;
        if (cfg.s4_op == S4_Q ? ($signed(o_out[l]) - $signed(eo) > 1 || $signed(eo) - $signed(o_out[l]) > 1)
                              : !close(bf2r(o_out[l]), bf2r(eo), 0.01, 1e-6)) begin
          failures++; $display("FAIL o lane %0d got %h exp %h (s4 %0d)", l, o_out[l], eo, cfg.s4_op);
        end
      end
    end
  end

  initial begin
    in_valid = 0; m = '0; n = '0; z = '0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      real k0;
      @(negedge clk);
      while (sent_at.size() != 0) @(negedge clk);
      check_lat = (trial == 59);
      cfg.m_dq = 1'($urandom); cfg.n_dq = 1'($urandom);
      cfg.s_m = r2bf(real'($urandom % 100 + 1) / 1024.0);
      cfg.s_n = r2bf(real'($urandom % 100 + 1) / 64.0);
      cfg.s1_op = s1_op_e'(trial % 5);
      cfg.s2_op = s2_op_e'((trial / 5) % 2);
      cfg.s3_op = s3_op_e'(trial % 6);
      cfg.s4_op = s4_op_e'(trial % 3);
      cfg.s1_s = rnd_bf(); cfg.s3_s = rnd_bf(); cfg.s4_s = rnd_bf();
      k0 = -8.0;
      for (int k = 0; k < SPL_KNOTS; k++) begin k0 = k0 + 1.0 + real'($urandom % 200) / 100.0; cfg.knots[k] = r2bf(k0); end
      for (int s = 0; s < SPL_SEGS; s++) for (int j = 0; j < 3; j++) cfg.coef[s][j] = r2bf((real'($urandom % 200) - 100.0) / 100.0);
      for (int i = 0; i < 20; i++) begin
        @(negedge clk);
        in_valid = 1'($urandom % 4 != 0) || check_lat;
        for (int l = 0; l < N; l++) begin
          m[l] = cfg.m_dq ? 32'($signed($urandom % 4000) - 2000) : {16'd0, rnd_bf()};
          n[l] = cfg.n_dq ? 16'($signed($urandom % 256) - 128) : rnd_bf();
          z[l] = rnd_bf();
        end
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        if (in_valid) begin
          sent_at.push_back(cyc);
          for (int l = 0; l < N; l++) begin
            logic [15:0] ew, eo;
            lane_ref(cfg, m[l], n[l], z[l], ew, eo);
            expw.push_back(ew); expo.push_back(eo);
          end
        end
      end
      @(negedge clk);
      in_valid = 0;
    end
    while (sent_at.size() != 0) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
