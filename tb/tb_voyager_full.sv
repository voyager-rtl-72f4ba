// tb_voyager_full: end-to-end test of the accelerator with every parameter at its default (32 x 32 array).
//
// The testbench acts as host and L2 memory. Through the register port it
// programs (1) a GEMM with bias on the matrix unit fused with a vector-unit
// epilogue (dequantize -> ReLU spline -> bfloat16 to memory); then, from that
// result, (2) a three-instruction softmax over rows, (3) column sums through
// the vector accumulator and (4) an int8 quantisation of the softmax. Units are
// started by writing the command register and finished by polling the status
// register. Every result is compared with a reference computed here: the
// GEMM exactly (the epilogue bit-exactly through the lane model), softmax and
// sums within bfloat16 tolerances.
// It counts how often each mechanism occurred -- accumulation-bank waits,
// weight loading behind streaming, vector-unit back-pressure on the matrix
// unit, memory stalls on the weight and vector ports, bias use, max and sum
// reductions, accumulation, quantisation -- and counts a failure for any that
// never occurred.
module tb_voyager_full
  import voyager_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;
  import tb_vec_prog_pkg::*;
;
  localparam int ROWS = 32, COLS = 32, N = COLS;
  localparam int P = 64, KT = 2, NT = 3, K = KT * ROWS;
  localparam int R = P, V = NT;            // softmax rows: one GEMM output row each
  localparam int XB = 0, MB = XB + P * NT, SB = MB + R, OB = SB + R, AB = OB + P * NT,
                 QB = AB + NT, VDEPTH = QB + P * NT + 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mmio_valid, mmio_write;
  logic [9:0]  mmio_addr;
  logic [31:0] mmio_wdata, mmio_rdata;
  logic in_req_valid, in_req_ready, in_resp_valid, w_req_valid, w_req_ready, w_resp_valid;
  logic b_req_valid, b_req_ready, b_resp_valid;
  logic [31:0] in_req_addr, w_req_addr, b_req_addr;
  logic [ROWS*8-1:0]  in_resp_data;
  logic [COLS*8-1:0]  w_resp_data;
  logic [COLS*32-1:0] b_resp_data;
  logic [2:0] vrd_req_valid, vrd_req_ready, vrd_resp_valid;
  logic [2:0][31:0] vrd_req_addr;
  logic [2:0][COLS*16-1:0] vrd_resp_data;
  logic vwr_valid, vwr_ready;
  logic [31:0] vwr_addr;
  logic [COLS*16-1:0] vwr_data;
  logic mu_busy, vu_busy, ev_wait_acc, ev_overlap, ev_vu_stall;

  voyager_top dut (.*);

  tb_rd_port #(.W(ROWS*8), .DEPTH(KT*P), .LAT(4), .STALL(0)) u_im (.clk, .req_valid(in_req_valid),
    .req_ready(in_req_ready), .req_addr(in_req_addr), .resp_valid(in_resp_valid), .resp_data(in_resp_data));
  tb_rd_port #(.W(COLS*8), .DEPTH(NT*K), .LAT(4), .STALL(1)) u_wm (.clk, .req_valid(w_req_valid),
    .req_ready(w_req_ready), .req_addr(w_req_addr), .resp_valid(w_resp_valid), .resp_data(w_resp_data));
  tb_rd_port #(.W(COLS*32), .DEPTH(NT), .LAT(4), .STALL(0)) u_bm (.clk, .req_valid(b_req_valid),
    .req_ready(b_req_ready), .req_addr(b_req_addr), .resp_valid(b_resp_valid), .resp_data(b_resp_data));
  tb_vmem #(.W(COLS*16), .DEPTH(VDEPTH), .LAT(3), .STALL(1'b1), .WR_HEAVY(1'b1)) u_vm (.clk,
    .rd_req_valid(vrd_req_valid), .rd_req_ready(vrd_req_ready), .rd_req_addr(vrd_req_addr),
    .rd_resp_valid(vrd_resp_valid), .rd_resp_data(vrd_resp_data),
    .wr_valid(vwr_valid), .wr_ready(vwr_ready), .wr_addr(vwr_addr), .wr_data(vwr_data));

  initial begin
    #200000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters
  typedef enum int {M_ACC_WAIT, M_OVERLAP, M_VU_STALL, M_IN_STALL, M_VWR_STALL, M_BIAS,
                    M_RED_MAX, M_RED_SUM, M_ACCUM, M_QUANT, M_NUM} mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{"acc-bank wait", "weight load behind streaming",
    "vector-unit back-pressure", "weight-port stall", "vector write stall", "bias read",
    "max reduction", "sum reduction", "accumulation", "int8 quantisation"};
  initial for (int i = 0; i < M_NUM; i++) mech[i] = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_wait_acc) mech[M_ACC_WAIT]++;
    if (ev_overlap) mech[M_OVERLAP]++;
    if (ev_vu_stall) mech[M_VU_STALL]++;
    if (w_req_valid && !w_req_ready) mech[M_IN_STALL]++;
    if (vwr_valid && !vwr_ready) mech[M_VWR_STALL]++;
    if (b_resp_valid) mech[M_BIAS]++;
    if (dut.u_vu.u_red.out_valid && dut.u_vu.u_red.out_ready) begin
      if (dut.u_vu.c.red_max) mech[M_RED_MAX]++; else mech[M_RED_SUM]++;
    end
    if (dut.u_vu.u_acc.out_valid && dut.u_vu.u_acc.out_ready) mech[M_ACCUM]++;
    if (vwr_valid && vwr_ready && dut.u_vu.c.vp.s4_op == S4_Q) mech[M_QUANT]++;
  end

  // ---------------- host side
  task automatic mmio_wr(logic [9:0] a, logic [31:0] d);
    @(negedge clk);
    mmio_valid = 1; mmio_write = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk);
    mmio_valid = 0; mmio_write = 0;
  endtask

  task automatic write_mu(mu_inst_t i);
    logic [32*32-1:0] b;
    b = '0;
    b[$bits(mu_inst_t)-1:0] = i;
    for (int w = 0; w < ($bits(mu_inst_t) + 31) / 32; w++) mmio_wr(10'h100 + 10'(w), b[32*w +: 32]);
  endtask

  task automatic write_vu(vu_inst_t i);
    logic [96*32-1:0] b;
    b = '0;
    b[$bits(vu_inst_t)-1:0] = i;
    for (int w = 0; w < ($bits(vu_inst_t) + 31) / 32; w++) mmio_wr(10'h200 + 10'(w), b[32*w +: 32]);
  endtask

  task automatic wait_idle(string what, output int cyc);
    cyc = 0;
    @(negedge clk);
    mmio_valid = 1; mmio_write = 0; mmio_addr = 10'h001;
    do begin @(negedge clk); cyc++; end while (mmio_rdata[1:0] != 2'b00);
    mmio_valid = 0;
    $display("%s: %0d cycles", what, cyc);
  endtask

  task automatic vu_run(vu_inst_t i, string what);
    int cyc;
    write_vu(i);
    mmio_wr(10'h000, 32'h2);
    wait_idle(what, cyc);
  endtask

  task automatic chk(real got, real want, real rel, real ab, string what);
    checks++;
    if (!close(got, want, rel, ab)) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %f want %f", what, got, want);
    end
  endtask

  function automatic real vlane(int addr, int l);
    return bf2r(u_vm.mem[addr][l*16 +: 16]);
  endfunction

  function automatic ag_cfg_t pat3(int base, int b3, int s3, int b4, int s4, int b5, int s5);
    ag_cfg_t a;
    a = pat2(base, b4, s4, b5, s5);
    a.bound[3] = 16'(b3); a.stride[3] = s3;
    return a;
  endfunction

  logic signed [7:0]  A [P][K];
  logic signed [7:0]  Wt [K][NT*COLS];
  logic signed [31:0] bias [NT*COLS];
  logic signed [31:0] C [P][NT*COLS];
  real                x [R][V*N], rmax [R], rsum [R];

  initial begin
    mu_inst_t mi;
    vu_inst_t vi;
    int cyc;
    real smax;
    mmio_valid = 0; mmio_write = 0; mmio_addr = 0; mmio_wdata = 0;
    // ---------------- data
    for (int p = 0; p < P; p++) for (int k = 0; k < K; k++) A[p][k] = 8'($urandom);
    for (int k = 0; k < K; k++) for (int n = 0; n < NT*COLS; n++) Wt[k][n] = 8'($urandom);
    for (int n = 0; n < NT*COLS; n++) bias[n] = $urandom % 20000 - 10000;
    for (int kt = 0; kt < KT; kt++) for (int p = 0; p < P; p++)
      for (int r = 0; r < ROWS; r++) u_im.mem[kt*P + p][r*8 +: 8] = A[p][kt*ROWS + r];
    for (int nt = 0; nt < NT; nt++) for (int kt = 0; kt < KT; kt++) for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) u_wm.mem[(nt*KT + kt)*ROWS + r][c*8 +: 8] = Wt[kt*ROWS + r][nt*COLS + c];
    for (int nt = 0; nt < NT; nt++) for (int c = 0; c < COLS; c++) u_bm.mem[nt][c*32 +: 32] = bias[nt*COLS + c];
    for (int a = 0; a < VDEPTH; a++) u_vm.mem[a] = '0;
    smax = 0.0;
    for (int p = 0; p < P; p++) for (int n = 0; n < NT*COLS; n++) begin
      C[p][n] = bias[n];
      for (int k = 0; k < K; k++) C[p][n] += 32'(A[p][k]) * 32'(Wt[k][n]);
      if (real'(C[p][n]) > smax) smax = real'(C[p][n]);
    end
    repeat (10) @(negedge clk);   // let the memory models drain pre-reset requests
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---------------- (1) GEMM + fused epilogue; output (p, nt) -> XB + p*NT + nt
    vi = '0;
    vi.m_src = M_MU; vi.n_src = OPND_NONE; vi.z_src = OPND_NONE; vi.count = P * NT;
    vi.vp.m_dq = 1'b1; vi.vp.s_m = r2bf(4.0 / smax);
    vi.vp.s1_op = S1_X; vi.vp.s2_op = S2_NL; vi.vp.s3_op = S3_V; vi.vp.s4_op = S4_W;
    fit_relu(vi.vp.knots, vi.vp.coef);
    vi.out_sel = OUT_PIPE;
    vi.agw = pat2(XB, NT, 1, P, NT);
    write_vu(vi);
    mi = '0;
    mi.in_ag = pat3(0, NT, 0, KT, P, P, 1);
    mi.w_ag  = pat3(0, NT, K, KT, ROWS, ROWS, 1);
    mi.b_ag  = pat3(0, 1, 0, 1, 0, NT, 1);
    mi.p = P; mi.kt = KT; mi.nt = NT; mi.bias_en = 1'b1;
    write_mu(mi);
    mmio_wr(10'h000, 32'h3);
    wait_idle("GEMM + epilogue", cyc);
    for (int p = 0; p < P; p++) for (int nt = 0; nt < NT; nt++) for (int l = 0; l < N; l++) begin
      logic [15:0] wb, ob, got;
      lane_ref(vi.vp, C[p][nt*COLS + l], 16'd0, 16'd0, wb, ob);
      got = u_vm.mem[XB + p*NT + nt][l*16 +: 16];
      checks++;
      if (got !== ob) begin
        failures++;
        if (failures < 20) $display("FAIL epilogue p%0d n%0d: C=%0d got %h want %h", p, nt*COLS + l, C[p][nt*COLS + l], got, ob);
      end
      x[p][nt*N + l] = bf2r(ob);
    end

    // ---------------- (2) softmax over each output row
    for (int r = 0; r < R; r++) begin
      rmax[r] = -1.0e9; rsum[r] = 0.0;
      for (int k = 0; k < V*N; k++) if (x[r][k] > rmax[r]) rmax[r] = x[r][k];
      for (int k = 0; k < V*N; k++) rsum[r] += $exp(x[r][k] - rmax[r]);
    end
    vu_run(softmax_pass(1, R, V, XB, MB, SB, OB), "softmax max");
    vu_run(softmax_pass(2, R, V, XB, MB, SB, OB), "softmax sum");
    vu_run(softmax_pass(3, R, V, XB, MB, SB, OB), "softmax divide");
    for (int r = 0; r < R; r++) begin
      chk(vlane(MB + r, 0), rmax[r], 0.0, 0.0, $sformatf("max %0d", r));
      chk(vlane(SB + r, N - 1), rsum[r], 0.04, 0.0, $sformatf("sum %0d", r));
      for (int k = 0; k < V*N; k++)
        chk(vlane(OB + r*V + k/N, k%N), $exp(x[r][k] - rmax[r]) / rsum[r], 0.06, 0.004,
            $sformatf("softmax %0d,%0d", r, k));
    end

    // ---------------- (3) column sums of the epilogue output (vector accumulator)
    vi = '0;
    vi.m_src = M_MEM; vi.n_src = OPND_NONE; vi.z_src = OPND_NONE; vi.count = P * NT;
    vi.ag0 = pat2(XB, NT, 1, P, NT);
    vi.vp.s1_op = S1_X; vi.vp.s2_op = S2_U; vi.vp.s3_op = S3_V; vi.vp.s4_op = S4_W;
    vi.acc_len = 16'(P); vi.out_sel = OUT_ACC;
    vi.agw = pat2(AB, 1, 0, NT, 1);
    vu_run(vi, "column sums");
    for (int nt = 0; nt < NT; nt++) for (int l = 0; l < N; l++) begin
      real s;
      s = 0.0;
      for (int p = 0; p < P; p++) s += x[p][nt*N + l];
      chk(vlane(AB + nt, l), s, 0.01 * P, 0.05, $sformatf("colsum %0d", nt*N + l));
    end

    // ---------------- (4) quantise the softmax to int8 with scale 127
    vi = '0;
    vi.m_src = M_MEM; vi.n_src = OPND_NONE; vi.z_src = OPND_NONE; vi.count = P * NT;
    vi.ag0 = pat2(OB, 1, 0, P * NT, 1);
    vi.vp.s1_op = S1_X; vi.vp.s2_op = S2_U; vi.vp.s3_op = S3_V; vi.vp.s4_op = S4_Q;
    vi.vp.s4_s = r2bf(127.0);
    vi.out_sel = OUT_PIPE;
    vi.agw = pat2(QB, 1, 0, P * NT, 1);
    vu_run(vi, "quantise");
    for (int a = 0; a < P * NT; a++) for (int l = 0; l < N; l++) begin
      logic [15:0] wb, ob;
      lane_ref(vi.vp, {16'd0, u_vm.mem[OB + a][l*16 +: 16]}, 16'd0, 16'd0, wb, ob);
      checks++;
      if (u_vm.mem[QB + a][l*16 +: 16] !== ob) begin
        failures++;
        if (failures < 20) $display("FAIL quantise %0d,%0d got %h want %h", a, l, u_vm.mem[QB + a][l*16 +: 16], ob);
      end
    end

    for (int i = 0; i < M_NUM; i++) begin
      $display("mechanism %-30s %0d", mech_name[i], mech[i]);
      checks++;
      if (mech[i] == 0) begin failures++; $display("FAIL mechanism never occurred: %s", mech_name[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
