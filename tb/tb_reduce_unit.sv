// tb_reduce_unit: sum and max reductions over len vectors, replicated and
// appended (with a flush of a partial vector), under random output stalls;
// results are compared with double-precision references (sum with a
// tolerance, max exactly), and fb_vec with the last emitted vector.
module tb_reduce_unit
  import voyager_pkg::*;
  import tb_util_pkg::*;
;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, op_max, append, flush, in_valid, in_ready, out_valid, out_ready;
  logic [15:0] len;
  logic [N-1:0][15:0] in_vec, out_vec, fb_vec;

  reduce_unit #(.N(N)) dut (.*);

  real expq [$];     // one expected scalar per lane position of each output
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
      for (int l = 0; l < N; l++) begin
        real e;
        e = expq.pop_front();
        checks++;
        if (op_max ? (bf2r(out_vec[l]) != e) : !close(bf2r(out_vec[l]), e, 0.03, 0.05)) begin
          failures++; $display("FAIL lane %0d got %f exp %f (max=%0d app=%0d)", l, bf2r(out_vec[l]), e, op_max, append);
        end
      end
      @(posedge clk); #1;
      checks++;
      if (fb_vec !== out_vec && !append) begin failures++; $display("FAIL fb_vec"); end
    end
  end

  initial begin
    clear = 0; op_max = 0; append = 0; flush = 0; in_valid = 0; len = 1; in_vec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 4; mode++) begin
      int nred;
      real sc [6];
      @(negedge clk);
      op_max = mode[0]; append = mode[1]; len = 16'(1 + $urandom % 5);
      clear = 1; @(negedge clk); clear = 0;
      nred = append ? 6 : 5;   // 6 appended scalars: one full vector of 4 and a flushed one of 2
      for (int r = 0; r < nred; r++) begin
        real acc;
        acc = op_max ? -1.0e30 : 0.0;
        for (int v = 0; v < len; v++) begin
          @(negedge clk);
          for (int l = 0; l < N; l++) begin
            real x;
            x = real'($signed($urandom % 2000) - 1000) / 64.0;
            in_vec[l] = r2bf(x);
            if (op_max) acc = (bf2r(in_vec[l]) > acc) ? bf2r(in_vec[l]) : acc;
            else acc = acc + bf2r(in_vec[l]);
          end
          in_valid = 1;
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
          @(negedge clk);
          in_valid = 0;
        end
        if (!append) for (int l = 0; l < N; l++) expq.push_back(acc);
        else begin expq.push_back(acc); sc[r] = acc; end
      end
      if (append) begin
        // the flushed vector keeps stale lanes 2..3 from the first vector
        expq.push_back(sc[2]); expq.push_back(sc[3]);
        repeat (3) @(negedge clk);
        while (expq.size() > N) @(negedge clk);
        flush = 1; @(negedge clk); flush = 0;
      end
      while (expq.size() != 0) @(negedge clk);
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
