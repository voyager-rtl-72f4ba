// tb_addr_gen: programs random loop nests (bounds 1..4, signed strides) and
// compares the address sequence with a reference computed as
// base + sum(idx*stride) in software nested loops; checks last, one address
// per cycle when ready stays high, and holding under random ready.
module tb_addr_gen
  import voyager_pkg::*;
;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        start, valid, ready, last, busy;
  ag_cfg_t     cfg;
  logic [31:0] addr;

  addr_gen #(.AW(32)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; ready = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      logic [31:0] exp_a [$];
      int idx [AG_NL];
      int total, got, cyc0, cyc1;
      bit rnd;
      cfg.base = $urandom % 10000;
      for (int i = 0; i < AG_NL; i++) begin
        cfg.bound[i]  = 16'(1 + $urandom % 4);
        cfg.stride[i] = 32'($signed($urandom % 200) - 100);
      end
      if (trial == 0) cfg.bound[2] = 16'd0;   // bound 0 behaves as 1
      total = 1;
      for (int i = 0; i < AG_NL; i++) total *= (cfg.bound[i] == 0) ? 1 : int'(cfg.bound[i]);
      for (int n = 0; n < total; n++) begin
        int rem; logic [31:0] a;
        rem = n; a = cfg.base;
        for (int i = AG_NL - 1; i >= 0; i--) begin
          int b;
          b = (cfg.bound[i] == 0) ? 1 : int'(cfg.bound[i]);
          idx[i] = rem % b; rem = rem / b;
          a = a + 32'(idx[i]) * cfg.stride[i];
        end
        exp_a.push_back(a);
      end
      rnd = trial % 2;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      got = 0; cyc0 = -1; cyc1 = 0;
      while (got < total) begin
        ready = rnd ? 1'($urandom % 2) : 1'b1;
        #1;
        if (valid && ready) begin
          logic [31:0] e;
          e = exp_a.pop_front();
          checks++;
          if (addr !== e) begin failures++; $display("FAIL trial %0d n %0d addr %0d exp %0d", trial, got, addr, e); end
          checks++;
          if (last !== (got == total - 1)) begin failures++; $display("FAIL last at %0d", got); end
          if (cyc0 < 0) cyc0 = cyc1;
          got++;
        end
        @(negedge clk);
        cyc1++;
        if (cyc1 > 10000) break;
      end
      ready = 0;
      if (!rnd) begin
        checks++;
        if (cyc1 - cyc0 != total) begin failures++; $display("FAIL rate: %0d cycles for %0d", cyc1 - cyc0, total); end
      end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL still busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
