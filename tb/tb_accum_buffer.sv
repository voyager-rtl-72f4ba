// tb_accum_buffer: writes output tiles of P vectors over KT reduction tiles
// (first tile with bias) into the accumulation buffer and drains them with a
// random-ready consumer; checks the sums, the bank hand-over with double
// buffering, that a bank cannot be claimed while both are in use, and the
// single-bank variant.
module tb_accum_buffer;
  localparam int COLS = 3, DEPTH = 8, P = 5, KT = 3, OT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // two instances: double- and single-buffered, driven identically
  logic                  in_valid, in_first, in_done, bias_en, alloc;
  logic [COLS-1:0][31:0] in_vec, bias;
  logic [2:0]            in_addr;
  logic [1:0]            bank_free, out_valid, out_ready, out_last;
  logic [COLS-1:0][31:0] out_vec [2];

  accum_buffer #(.COLS(COLS), .DEPTH(DEPTH), .DOUBLE_BUF(1)) u_db (
    .clk, .rst_n, .in_valid(in_valid && cur == 0), .in_vec, .in_addr, .in_first, .in_done, .bias, .bias_en, .alloc(alloc && cur == 0),
    .bank_free(bank_free[0]), .out_valid(out_valid[0]), .out_ready(out_ready[0]), .out_vec(out_vec[0]), .out_last(out_last[0]));
  accum_buffer #(.COLS(COLS), .DEPTH(DEPTH), .DOUBLE_BUF(0)) u_sb (
    .clk, .rst_n, .in_valid(in_valid && cur == 1), .in_vec, .in_addr, .in_first, .in_done, .bias, .bias_en, .alloc(alloc && cur == 1),
    .bank_free(bank_free[1]), .out_valid(out_valid[1]), .out_ready(out_ready[1]), .out_vec(out_vec[1]), .out_last(out_last[1]));

  logic [31:0] expq [2][$];
  int          cur = 0;
  int          waits [2];
  int          drained [2];

  // consumers
  for (genvar d = 0; d < 2; d++) begin : g_cons
    always @(negedge clk) begin
      if (rst_n) begin
        out_ready[d] = 1'($urandom % 3 == 0);
        #1;
        if (out_valid[d] && out_ready[d]) begin
          for (int c = 0; c < COLS; c++) begin
            logic [31:0] e;
            e = expq[d].pop_front();
            checks++;
            if (out_vec[d][c] !== e) begin failures++; $display("FAIL inst %0d got %0d exp %0d", d, out_vec[d][c], e); end
          end
          if (out_last[d]) drained[d]++;
        end
      end
    end
  end

  task automatic run(int d);
    for (int ot = 0; ot < OT; ot++) begin
      logic [31:0] acc [P][COLS];
      @(negedge clk);
      while (!bank_free[d]) begin waits[d]++; @(negedge clk); end
      alloc = 1; @(negedge clk); alloc = 0;
      for (int c = 0; c < COLS; c++) bias[c] = $urandom % 1000;
      bias_en = (ot % 2 == 0);
      for (int kt = 0; kt < KT; kt++) begin
        for (int p = 0; p < P; p++) begin
          in_valid = 1; in_addr = 3'(p); in_first = (kt == 0); in_done = (kt == KT - 1 && p == P - 1);
          for (int c = 0; c < COLS; c++) begin
            in_vec[c] = $urandom;
            if (kt == 0) acc[p][c] = in_vec[c] + (bias_en ? bias[c] : 0);
            else acc[p][c] = acc[p][c] + in_vec[c];
          end
          @(negedge clk);
        end
      end
      in_valid = 0; in_done = 0;
      for (int p = 0; p < P; p++) for (int c = 0; c < COLS; c++) expq[d].push_back(acc[p][c]);
    end
  endtask

  initial begin
    in_valid = 0; in_first = 0; in_done = 0; bias_en = 0; alloc = 0; in_vec = '0; bias = '0; in_addr = 0;
    waits[0] = 0; waits[1] = 0; drained[0] = 0; drained[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // double-buffered instance first (the single-buffered one sees the same
    // traffic but is only checked in its own run)
    run(0);
    while (drained[0] < OT) @(negedge clk);
    // now exercise the single-bank instance: reset both
    rst_n = 0; @(negedge clk); rst_n = 1;
    expq[0].delete();
    cur = 1;
    run(1);
    while (drained[1] < OT) @(negedge clk);
    checks++;
    if (waits[0] == 0 || waits[1] == 0) begin failures++; $display("FAIL no bank wait seen %0d %0d", waits[0], waits[1]); end
    checks++;
    if (waits[1] <= waits[0]) begin failures++; $display("FAIL single bank should wait longer"); end
    $display("waits double=%0d single=%0d", waits[0], waits[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
