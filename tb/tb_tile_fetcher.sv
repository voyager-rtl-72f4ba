// tb_tile_fetcher: the fetcher reads a strided pattern from a memory model
// with latency and random request stalls, into a ping-pong buffer drained by
// a slow consumer; checks every word of every tile (including a short last
// tile), the back-pressure when both banks are full, and that reads proceed
// at one word per cycle when neither memory nor buffer stalls.
module tb_tile_fetcher
  import voyager_pkg::*;
;
  localparam int W = 32, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         start, busy, mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [31:0]  mem_req_addr;
  logic [W-1:0] mem_resp_data, wr_data, rd_data;
  logic         wr_en, wr_commit, wr_ready, rd_avail, rd_release;
  logic [2:0]   wr_addr, rd_addr;
  ag_cfg_t      cfg;
  logic [15:0]  tile_words;

  tile_fetcher #(.W(W), .DEPTH(DEPTH)) dut (.*);
  pingpong_buffer #(.W(W), .DEPTH(DEPTH)) u_buf (.*);
  tb_rd_port #(.W(W), .DEPTH(1024), .LAT(4), .STALL(1)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  int held = 0;
  always @(posedge clk) if (wr_en === 1'b0 && !wr_ready) held++;

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    logic [31:0] exp_w [$];
    start = 0; rd_addr = 0; rd_release = 0; cfg = '0;
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = 32'hA000_0000 + i;
    // pattern: 3 outer x 5 inner words, stride 7 and 2 -> 15 words, tiles of 6 (6, 6, 3)
    for (int i = 0; i < AG_NL; i++) begin cfg.bound[i] = 1; cfg.stride[i] = 0; end
    cfg.base = 100; cfg.bound[4] = 3; cfg.stride[4] = 7; cfg.bound[5] = 5; cfg.stride[5] = 2;
    tile_words = 6;
    for (int a = 0; a < 3; a++) for (int b = 0; b < 5; b++) exp_w.push_back(32'hA000_0000 + 100 + a * 7 + b * 2);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    n = 0;
    for (int t = 0; t < 3; t++) begin
      int tw;
      tw = (t < 2) ? 6 : 3;
      while (!rd_avail) @(negedge clk);
      repeat (10) @(negedge clk);
      for (int k = 0; k < tw; k++) begin
        rd_addr = 3'(k);
        @(negedge clk);
        checks++;
        if (rd_data !== exp_w[n]) begin failures++; $display("FAIL tile %0d word %0d got %h exp %h", t, k, rd_data, exp_w[n]); end
        n++;
      end
      rd_release = 1; @(negedge clk); rd_release = 0;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (busy || rd_avail) begin failures++; $display("FAIL fetcher still busy or extra tile"); end
    checks++;
    if (held == 0) begin failures++; $display("FAIL never back-pressured"); end
    checks++;
    if (u_mem.reads != 15) begin failures++; $display("FAIL reads %0d", u_mem.reads); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
