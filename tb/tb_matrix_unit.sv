// tb_matrix_unit: runs GEMMs C = A * W + bias through the matrix unit with
// memory models behind its three read ports and a consumer on its output.
// Run 1: random-stall memories and a slow consumer (checks results, that the
// streamer waits for a free accumulation bank, that weight loading overlaps
// streaming). Run 2: ideal memories and consumer; checks the cycle count
// against the tile rate max(P+2, ROWS+3) plus pipeline fill.
module tb_matrix_unit
  import voyager_pkg::*;
;
  localparam int ROWS = 4, COLS = 4, P = 6, KT = 3, NT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, out_valid, out_ready, out_last, ev_wait_acc, ev_overlap;
  mu_inst_t inst;
  logic [COLS-1:0][31:0] out_vec;
  logic in_req_valid, in_req_ready, in_resp_valid, w_req_valid, w_req_ready, w_resp_valid;
  logic b_req_valid, b_req_ready, b_resp_valid;
  logic [31:0] in_req_addr, w_req_addr, b_req_addr;
  logic [ROWS*8-1:0]  in_resp_data;
  logic [COLS*8-1:0]  w_resp_data;
  logic [COLS*32-1:0] b_resp_data;

  matrix_unit #(.ROWS(ROWS), .COLS(COLS), .IBUF_DEPTH(8), .ABUF_DEPTH(8), .DOUBLE_BUF(1)) dut (.*);

  bit stall = 1;
  tb_rd_port #(.W(ROWS*8), .DEPTH(256), .LAT(5), .STALL(1)) u_im (.clk, .req_valid(in_req_valid), .req_ready(in_req_ready),
    .req_addr(in_req_addr), .resp_valid(in_resp_valid), .resp_data(in_resp_data));
  tb_rd_port #(.W(COLS*8), .DEPTH(256), .LAT(5), .STALL(0)) u_wm (.clk, .req_valid(w_req_valid), .req_ready(w_req_ready),
    .req_addr(w_req_addr), .resp_valid(w_resp_valid), .resp_data(w_resp_data));
  tb_rd_port #(.W(COLS*32), .DEPTH(16), .LAT(5), .STALL(0)) u_bm (.clk, .req_valid(b_req_valid), .req_ready(b_req_ready),
    .req_addr(b_req_addr), .resp_valid(b_resp_valid), .resp_data(b_resp_data));

  int n_wait = 0, n_overlap = 0;
  always @(posedge clk) begin
    if (ev_wait_acc) n_wait++;
    if (ev_overlap) n_overlap++;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [7:0]  A [P][KT*ROWS];
  logic signed [7:0]  Wt [KT*ROWS][NT*COLS];
  logic signed [31:0] bias [NT*COLS];

  function automatic ag_cfg_t pat(int base, int b3, int s3, int b4, int s4, int b5, int s5);
    ag_cfg_t a;
    a = '0;
    for (int i = 0; i < AG_NL; i++) a.bound[i] = 1;
    a.base = base;
    a.bound[3] = 16'(b3); a.stride[3] = s3;
    a.bound[4] = 16'(b4); a.stride[4] = s4;
    a.bound[5] = 16'(b5); a.stride[5] = s5;
    return a;
  endfunction

  task automatic run(bit slow, bit bias_on, output int cycles);
    int nt, p, n_out;
    for (int p2 = 0; p2 < P; p2++) for (int k = 0; k < KT*ROWS; k++) A[p2][k] = 8'($urandom);
    for (int k = 0; k < KT*ROWS; k++) for (int n = 0; n < NT*COLS; n++) Wt[k][n] = 8'($urandom);
    for (int n = 0; n < NT*COLS; n++) bias[n] = $urandom % 100000 - 50000;
    for (int kt = 0; kt < KT; kt++) for (int p2 = 0; p2 < P; p2++)
      for (int r = 0; r < ROWS; r++) u_im.mem[kt*P + p2][r*8 +: 8] = A[p2][kt*ROWS + r];
    for (int n2 = 0; n2 < NT; n2++) for (int kt = 0; kt < KT; kt++) for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) u_wm.mem[(n2*KT + kt)*ROWS + r][c*8 +: 8] = Wt[kt*ROWS + r][n2*COLS + c];
    for (int n2 = 0; n2 < NT; n2++) for (int c = 0; c < COLS; c++) u_bm.mem[n2][c*32 +: 32] = bias[n2*COLS + c];
    inst = '0;
    inst.in_ag = pat(0, NT, 0, KT, P, P, 1);
    inst.w_ag  = pat(0, NT, KT*ROWS, KT, ROWS, ROWS, 1);
    inst.b_ag  = pat(0, 1, 0, 1, 0, NT, 1);
    inst.p = P; inst.kt = KT; inst.nt = NT; inst.bias_en = bias_on;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1; nt = 0; p = 0; n_out = 0;
    while (busy || out_valid) begin
      out_ready = slow ? 1'($urandom % 8 == 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        for (int c = 0; c < COLS; c++) begin
          logic signed [31:0] e;
          e = bias_on ? bias[nt*COLS + c] : 0;
          for (int k = 0; k < KT*ROWS; k++) e += 32'(A[p][k]) * 32'(Wt[k][nt*COLS + c]);
          checks++;
          if ($signed(out_vec[c]) !== e) begin failures++; $display("FAIL nt %0d p %0d c %0d got %0d exp %0d", nt, p, c, $signed(out_vec[c]), e); end
        end
        checks++;
        if (out_last !== (p == P - 1)) begin failures++; $display("FAIL out_last"); end
        n_out++;
        if (p == P - 1) begin p = 0; nt++; end else p++;
      end
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (n_out != P * NT) begin failures++; $display("FAIL %0d outputs, expected %0d", n_out, P * NT); end
  endtask

  initial begin
    int cyc, bound;
    start = 0; out_ready = 0; inst = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1, 1, cyc);
    $display("run 1 (stalls): %0d cycles, acc-bank waits %0d, overlapped weight-load cycles %0d", cyc, n_wait, n_overlap);
    checks++;
    if (n_wait == 0) begin failures++; $display("FAIL never waited for an accumulation bank"); end
    checks++;
    if (n_overlap == 0) begin failures++; $display("FAIL weight loading never overlapped streaming"); end
    run(0, 0, cyc);
    bound = NT * KT * ((P + 2 > ROWS + 3) ? P + 2 : ROWS + 3) + 2 * (ROWS + COLS) + ROWS + 20;
    $display("run 2 (ideal): %0d cycles, bound %0d", cyc, bound);
    checks++;
    if (cyc > bound) begin failures++; $display("FAIL too slow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
