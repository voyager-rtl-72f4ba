// tb_vector_unit: runs whole vector-unit instructions against a shared
// memory model with random read and write stalls.
//  1. Softmax over R rows of V vectors as three instructions: row max
//     (reduce, replicate) -> memory; sum of exp(x - max) (spline, reduce) ->
//     memory; exp(x - max) / sum (three streams, reciprocal multiply) ->
//     memory. Each intermediate and the result are compared with real-number
//     math (tolerances cover bfloat16 rounding and the spline fit).
//  2. A fused matrix-unit epilogue: int32 vectors from a randomly stalling
//     producer are dequantised, passed through a ReLU spline and quantised to
//     int8; compared with the per-lane reference model.
//  3. Element-wise accumulation of groups of vectors, and per-vector sums
//     appended into lanes (with a final flush of a partial vector).
// It also checks that every instruction ends (busy falls) and that
// the output stalls really occurred.
module tb_vector_unit
  import voyager_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;
  import tb_vec_prog_pkg::*;
;
  localparam int N = 4;
  localparam int R = 3, V = 2;
  localparam int XB = 0, MB = 64, SB = 80, OB = 96, AB = 160, PB = 192;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, mu_valid, mu_ready, wr_valid, wr_ready, ev_stall;
  vu_inst_t inst;
  logic [N-1:0][31:0] mu_vec;
  logic [2:0] rd_req_valid, rd_req_ready, rd_resp_valid;
  logic [2:0][31:0] rd_req_addr;
  logic [2:0][N*16-1:0] rd_resp_data;
  logic [31:0] wr_addr;
  logic [N*16-1:0] wr_data;

  vector_unit #(.N(N)) dut (.*);
  tb_vmem #(.W(N*16), .DEPTH(256), .LAT(3), .STALL(1'b1)) mem (.*);

  int stalls = 0;
  always @(posedge clk) if (ev_stall) stalls++;

  initial begin
    #4000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // matrix-unit stand-in: offers queued int32 vectors, sometimes withholds them
  logic [N-1:0][31:0] mu_q [$];
  logic mu_hold;
  always @(posedge clk) begin
    if (mu_valid && mu_ready) void'(mu_q.pop_front());
    mu_hold <= ($urandom % 3 == 0);
  end
  always_comb begin
    mu_valid = (mu_q.size() > 0) && !mu_hold;
    mu_vec   = (mu_q.size() > 0) ? mu_q[0] : '0;
  end

  task automatic run(vu_inst_t i, string name);
    int cyc = 0;
    @(negedge clk);
    inst = i; start = 1;
    @(negedge clk);
    start = 0;
    while (busy) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc == 0) begin failures++; $display("%s: never busy", name); end
    repeat (4) @(negedge clk);   // last write lands
  endtask

  function automatic real lane(int addr, int l);
    return bf2r(mem.mem[addr][l*16 +: 16]);
  endfunction

  task automatic chk(real got, real want, real rel, real ab, string what);
    checks++;
    if (!close(got, want, rel, ab)) begin
      failures++;
      if (failures < 20) $display("%s: got %f want %f", what, got, want);
    end
  endtask

  real x [R][V*N];
  real rmax [R], rsum [R];
  vu_inst_t i0;
  initial begin
    start = 0; inst = '0; mu_hold = 0;
    for (int a = 0; a < 256; a++) mem.mem[a] = '0;
    // ---------------- softmax
    for (int r = 0; r < R; r++) begin
      rmax[r] = -1.0e9;
      for (int k = 0; k < V * N; k++) begin
        logic [15:0] b;
        b = r2bf((real'($urandom % 1000) / 125.0) - 4.0);
        x[r][k] = bf2r(b);
        mem.mem[XB + r*V + k/N][(k%N)*16 +: 16] = b;
        if (x[r][k] > rmax[r]) rmax[r] = x[r][k];
      end
    end
    repeat (10) @(negedge clk);   // let the memory models drain pre-reset requests
    rst_n = 1;
    repeat (2) @(negedge clk);

    run(softmax_pass(1, R, V, XB, MB, SB, OB), "max");
    for (int r = 0; r < R; r++)
      for (int l = 0; l < N; l++) chk(lane(MB + r, l), rmax[r], 0.0, 0.0, $sformatf("max r%0d", r));

    run(softmax_pass(2, R, V, XB, MB, SB, OB), "sum");
    for (int r = 0; r < R; r++) begin
      rsum[r] = 0.0;
      for (int k = 0; k < V * N; k++) rsum[r] += $exp(x[r][k] - rmax[r]);
      for (int l = 0; l < N; l++) chk(lane(SB + r, l), rsum[r], 0.04, 0.0, $sformatf("sum r%0d", r));
    end

    run(softmax_pass(3, R, V, XB, MB, SB, OB), "softmax");
    for (int r = 0; r < R; r++) begin
      real tot;
      tot = 0.0;
      for (int k = 0; k < V * N; k++) begin
        real got;
        got = lane(OB + r*V + k/N, k%N);
        tot += got;
        chk(got, $exp(x[r][k] - rmax[r]) / rsum[r], 0.06, 0.004, $sformatf("p r%0d k%0d", r, k));
      end
      chk(tot, 1.0, 0.05, 0.0, $sformatf("row %0d sums to 1", r));
    end

    // ---------------- fused matrix-unit epilogue: dq -> ReLU -> int8
    begin
      localparam int K = 12;
      logic [N-1:0][31:0] src [K];
      i0 = '0;
      i0.m_src = M_MU; i0.n_src = OPND_NONE; i0.z_src = OPND_NONE; i0.count = K;
      i0.vp.m_dq = 1'b1; i0.vp.s_m = r2bf(1.0 / 64.0);
      i0.vp.s1_op = S1_X; i0.vp.s2_op = S2_NL; i0.vp.s3_op = S3_V;
      i0.vp.s4_op = S4_Q; i0.vp.s4_s = r2bf(8.0);
      fit_relu(i0.vp.knots, i0.vp.coef);
      i0.out_sel = OUT_PIPE;
      i0.agw = pat2(PB, 1, 0, K, 1);
      for (int v = 0; v < K; v++) begin
        for (int l = 0; l < N; l++) src[v][l] = 32'($urandom % 2000) - 32'd1000;
        mu_q.push_back(src[v]);
      end
      run(i0, "epilogue");
      checks++;
      if (mu_q.size() != 0) begin failures++; $display("epilogue left %0d vectors", mu_q.size()); end
      for (int v = 0; v < K; v++)
        for (int l = 0; l < N; l++) begin
          logic [15:0] wb, ob, got;
          lane_ref(i0.vp, src[v][l], 16'd0, 16'd0, wb, ob);
          got = mem.mem[PB + v][l*16 +: 16];
          checks++;
          if (got != ob) begin
            failures++;
            $display("epilogue v%0d l%0d: m=%0d got %0d want %0d", v, l, $signed(src[v][l]),
                     $signed(got), $signed(ob));
          end
        end
    end

    // ---------------- accumulate groups of 3 vectors (rows of x: 6 vectors -> 2 sums)
    i0 = '0;
    i0.m_src = M_MEM; i0.n_src = OPND_NONE; i0.z_src = OPND_NONE; i0.count = R * V;
    i0.ag0 = pat2(XB, 1, 0, R * V, 1);
    i0.vp.s1_op = S1_X; i0.vp.s2_op = S2_U; i0.vp.s3_op = S3_V; i0.vp.s4_op = S4_W;
    i0.acc_len = 3; i0.out_sel = OUT_ACC;
    i0.agw = pat2(AB, 1, 0, 2, 1);
    run(i0, "accumulate");
    for (int g = 0; g < 2; g++)
      for (int l = 0; l < N; l++) begin
        real s;
        s = 0.0;
        for (int j = 0; j < 3; j++) begin
          int vi;
          vi = g * 3 + j;
          s += x[vi / V][(vi % V) * N + l];
        end
        chk(lane(AB + g, l), s, 0.02, 0.05, $sformatf("acc g%0d l%0d", g, l));
      end

    // ---------------- per-vector sums of squares appended into lanes (6 -> 4 + flushed 2)
    i0.vp.s3_op = S3_SQ; i0.out_sel = OUT_RED; i0.red_append = 1'b1; i0.red_len = 1;
    i0.agw = pat2(AB + 4, 1, 0, 2, 1);
    run(i0, "append");
    for (int vi = 0; vi < R * V; vi++) begin
      real s;
      s = 0.0;
      for (int l = 0; l < N; l++) s += x[vi / V][(vi % V) * N + l] ** 2;
      chk(lane(AB + 4 + vi / N, vi % N), s, 0.03, 0.05, $sformatf("append v%0d", vi));
    end

    checks++;
    if (stalls == 0) begin failures++; $display("no output stall seen"); end
    checks++;
    if (mem.wr_stalls == 0) begin failures++; $display("no write stall seen"); end
    $display("stalls=%0d wr_stalls=%0d writes=%0d", stalls, mem.wr_stalls, mem.writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
