// tb_vector_accum: accumulates groups of len random bfloat16 vectors under
// random output stalls; each emitted vector is compared lane by lane with a
// reference that rounds to bfloat16 after every addition, in the same order.
module tb_vector_accum
  import voyager_pkg::*;
  import tb_util_pkg::*;
;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, in_valid, in_ready, out_valid, out_ready;
  logic [15:0] len;
  logic [N-1:0][15:0] in_vec, out_vec, fb_vec;

  vector_accum #(.N(N)) dut (.*);

  real expq [$];
  int  groups = 0;
  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    out_ready = 1'($urandom % 3 == 0);
    #1;
    if (out_valid && out_ready) begin
      groups++;
      for (int l = 0; l < N; l++) begin
        real e;
        e = expq.pop_front();
        checks++;
        if (!close(bf2r(out_vec[l]), e, 0.004, 0.0)) begin failures++; $display("FAIL lane %0d got %f exp %f", l, bf2r(out_vec[l]), e); end
        checks++;
        if (fb_vec[l] !== out_vec[l]) begin failures++; $display("FAIL fb lane %0d", l); end
      end
    end
  end

  initial begin
    clear = 0; in_valid = 0; len = 1; in_vec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 20; g++) begin
      real acc [N];
      @(negedge clk);
      if (g % 5 == 0) begin
        while (expq.size() != 0) @(negedge clk);
        len = 16'(1 + $urandom % 6);
        clear = 1; @(negedge clk); clear = 0;
      end
      for (int v = 0; v < len; v++) begin
        for (int l = 0; l < N; l++) begin
          in_vec[l] = r2bf(real'($signed($urandom % 2000) - 1000) / 16.0);
          acc[l] = (v == 0) ? bf2r(in_vec[l]) : bf2r(r2bf(bf2r(in_vec[l]) + acc[l]));
        end
        in_valid = 1;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        in_valid = 0;
      end
      for (int l = 0; l < N; l++) expq.push_back(acc[l]);
    end
    while (expq.size() != 0) @(negedge clk);
    checks++;
    if (groups != 20) begin failures++; $display("FAIL %0d groups", groups); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
