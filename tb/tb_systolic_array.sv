// tb_systolic_array: loads two weight tiles into the two PE banks, streams
// random int8 vectors that alternate between the tiles (also while a third
// tile is being shifted in), and compares every output vector with a
// reference matrix-vector product and its arrival with the ROWS+COLS-1 cycle
// latency.
module tb_systolic_array;
  localparam int ROWS = 5, COLS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                  act_valid, act_sel, w_shift, w_latch, w_bank, out_valid, out_sel;
  logic [ROWS-1:0][7:0]  act;
  logic [COLS-1:0][7:0]  w_row;
  logic [COLS-1:0][31:0] out_vec;

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  logic signed [7:0] W [3][ROWS][COLS];
  logic signed [31:0] expq [$];
  int                 sendt [$];
  int                 cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_tile(int t);
    for (int r = ROWS - 1; r >= 0; r--) begin
      @(negedge clk);
      w_shift = 1;
      for (int c = 0; c < COLS; c++) w_row[c] = W[t][r][c];
    end
    @(negedge clk);
    w_shift = 0;
  endtask

  task automatic send(int t, int bank);
    logic signed [7:0] a [ROWS];
    for (int r = 0; r < ROWS; r++) a[r] = 8'($urandom);
    act_valid = 1; act_sel = 1'(bank);
    for (int r = 0; r < ROWS; r++) act[r] = a[r];
    for (int c = 0; c < COLS; c++) begin
      logic signed [31:0] s;
      s = 0;
      for (int r = 0; r < ROWS; r++) s += 32'(a[r]) * 32'(W[t][r][c]);
      expq.push_back(s);
    end
    sendt.push_back(cyc);
  endtask

  // output checker
  always @(negedge clk) if (rst_n && out_valid) begin
    int t0;
    t0 = sendt.pop_front();
    checks++;
    if (cyc - t0 != ROWS + COLS - 1) begin
      failures++; $display("FAIL latency %0d", cyc - t0);
    end
    for (int c = 0; c < COLS; c++) begin
      logic signed [31:0] e;
      e = expq.pop_front();
      checks++;
      if ($signed(out_vec[c]) !== e) begin failures++; $display("FAIL col %0d got %0d exp %0d", c, $signed(out_vec[c]), e); end
    end
  end

  initial begin
    act_valid = 0; act_sel = 0; act = '0; w_shift = 0; w_latch = 0; w_bank = 0; w_row = '0;
    for (int t = 0; t < 3; t++) for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) W[t][r][c] = 8'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    load_tile(0);
    w_latch = 1; w_bank = 0; @(negedge clk); w_latch = 0;
    load_tile(1);
    w_latch = 1; w_bank = 1; @(negedge clk); w_latch = 0;
    // alternate tiles back to back, while tile 2 is shifted into the chains
    fork
      begin
        for (int i = 0; i < 12; i++) begin
          send(i % 2, i % 2);
          @(negedge clk);
        end
        act_valid = 0;
      end
      load_tile(2);
    join
    // the bank-0 vectors above are gone after ROWS+COLS cycles: latch tile 2 there
    repeat (ROWS + COLS) @(negedge clk);
    w_latch = 1; w_bank = 0; @(negedge clk); w_latch = 0;
    for (int i = 0; i < 10; i++) begin
      send((i % 2) ? 1 : 2, i % 2);
      @(negedge clk);
    end
    act_valid = 0;
    repeat (ROWS + COLS + 4) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
