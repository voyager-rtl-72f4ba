// tb_pingpong_buffer: a producer writes numbered tiles into the double buffer
// while a slower consumer reads and releases them; checks the data of every
// tile, the alternation of banks, that the producer is held off when both
// banks are full, and the one-cycle read latency.
module tb_pingpong_buffer;
  localparam int W = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         wr_en, wr_commit, wr_ready, rd_avail, rd_release;
  logic [2:0]   wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;

  pingpong_buffer #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int held = 0;
  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int TILES = 10;
  // producer: tile t word k = t*256 + k
  initial begin
    wr_en = 0; wr_commit = 0; wr_addr = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < TILES; t++) begin
      @(negedge clk);
      while (!wr_ready) begin held++; @(negedge clk); end
      for (int k = 0; k < DEPTH; k++) begin
        wr_en = 1; wr_addr = 3'(k); wr_data = W'(t * 256 + k); wr_commit = (k == DEPTH - 1);
        @(negedge clk);
      end
      wr_en = 0; wr_commit = 0;
    end
  end
  // consumer: slow, reads every word of every tile
  initial begin
    rd_addr = 0; rd_release = 0;
    @(posedge rst_n);
    for (int t = 0; t < TILES; t++) begin
      @(negedge clk);
      while (!rd_avail) @(negedge clk);
      repeat (5) @(negedge clk);
      for (int k = 0; k < DEPTH; k++) begin
        rd_addr = 3'(DEPTH - 1 - k);
        @(negedge clk);
        checks++;
        if (rd_data !== W'(t * 256 + DEPTH - 1 - k)) begin
          failures++; $display("FAIL tile %0d word %0d got %h", t, DEPTH - 1 - k, rd_data);
        end
      end
      rd_release = 1;
      @(negedge clk);
      rd_release = 0;
    end
    @(negedge clk);
    checks++;
    if (rd_avail) begin failures++; $display("FAIL bank still full"); end
    checks++;
    if (held == 0) begin failures++; $display("FAIL producer never held off"); end
    $display("producer held %0d cycles", held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
