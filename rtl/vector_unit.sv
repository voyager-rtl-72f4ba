// vector_unit: programmable vector engine for everything that is not a GEMM.
//
// Data path, per the paper's vector-unit drawing: three address generators
// (inside stream_readers 0, 1, 2) read operand vectors from L2 memory; the m
// operand comes either from the matrix unit (fused GEMM -> vector ops, the
// accumulation buffer draining straight in) or from stream 0; n from stream 1
// or from the fed-back reducer or accumulator result; z likewise from stream
// 2, the reducer or the accumulator. The operands enter vector_pipeline
// (dequantize, four op stages). Its stage-4 result, or the stage-3 result
// reduced (reduce_unit) or accumulated (vector_accum), is written to L2 through
// a fourth address generator and the write port.
//
// One instruction (vu_inst_t) streams count vectors. A vector enters the
// pipeline when every operand it needs is present and the pipeline can take
// it; the selected consumer back-pressures the pipeline, and through it the
// matrix unit. When the count is done, a partly appended reduction is flushed;
// busy falls when the last output address has been written. Softmax, for
// example, is three instructions (max, sum of exp(x - max), exp(x - max) / sum).
// Lane width is bfloat16 (16 bits in memory); the matrix-unit input is int32.
// The fourth address generator for writes and the operand-selection encoding
// are this design's choices.
module vector_unit
  import voyager_pkg::*;
#(
  parameter int N = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  vu_inst_t           inst,
  output logic               busy,
  // from the matrix unit
  input  logic               mu_valid,
  output logic               mu_ready,
  input  logic [N-1:0][31:0] mu_vec,
  // L2 read ports 0..2
  output logic [2:0]         rd_req_valid,
  input  logic [2:0]         rd_req_ready,
  output logic [2:0][31:0]   rd_req_addr,
  input  logic [2:0]         rd_resp_valid,
  input  logic [2:0][N*16-1:0] rd_resp_data,
  // L2 write port
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic [31:0]        wr_addr,
  output logic [N*16-1:0]    wr_data,
  // event strobes
  output logic               ev_stall      // pipeline held by its consumer
);
  vu_inst_t    c;
  logic        running;
  logic [31:0] issued, consumed;

  // ---------------- operand streams
  logic [2:0]           s_valid, s_ready, s_last, s_busy;
  logic [2:0][N*16-1:0] s_data;
  ag_cfg_t              s_cfg [3];
  logic [2:0]           s_start;
  assign s_cfg[0] = inst.ag0;
  assign s_cfg[1] = inst.ag1;
  assign s_cfg[2] = inst.ag2;
  assign s_start[0] = start && inst.m_src == M_MEM;
  assign s_start[1] = start && inst.n_src == OPND_MEM;
  assign s_start[2] = start && inst.z_src == OPND_MEM;

  for (genvar i = 0; i < 3; i++) begin : g_rd
    stream_reader #(.W(N*16), .FIFO_D(8)) u_rd (
      .clk, .rst_n, .start(s_start[i]), .cfg(s_cfg[i]), .busy(s_busy[i]),
      .mem_req_valid(rd_req_valid[i]), .mem_req_ready(rd_req_ready[i]), .mem_req_addr(rd_req_addr[i]),
      .mem_resp_valid(rd_resp_valid[i]), .mem_resp_data(rd_resp_data[i]),
      .out_valid(s_valid[i]), .out_ready(s_ready[i]), .out_data(s_data[i]), .out_last(s_last[i])
    );
  end

  // ---------------- operand muxes
  logic [N-1:0][31:0] m_in;
  logic [N-1:0][15:0] n_in, z_in, red_fb, acc_fb;
  logic               m_ok, n_ok, z_ok, p_in_valid, p_in_ready, take;

  always_comb begin
    for (int l = 0; l < N; l++) begin
      m_in[l] = (c.m_src == M_MU) ? mu_vec[l] : 32'(signed'(s_data[0][l*16 +: 16]));
      case (c.n_src)
        OPND_MEM: n_in[l] = s_data[1][l*16 +: 16];
        OPND_RED: n_in[l] = red_fb[l];
        OPND_ACC: n_in[l] = acc_fb[l];
        default:  n_in[l] = '0;
      endcase
      case (c.z_src)
        OPND_MEM: z_in[l] = s_data[2][l*16 +: 16];
        OPND_RED: z_in[l] = red_fb[l];
        OPND_ACC: z_in[l] = acc_fb[l];
        default:  z_in[l] = '0;
      endcase
    end
  end

  assign m_ok       = (c.m_src == M_MU) ? mu_valid : s_valid[0];
  assign n_ok       = (c.n_src != OPND_MEM) || s_valid[1];
  assign z_ok       = (c.z_src != OPND_MEM) || s_valid[2];
  assign p_in_valid = running && issued < c.count && m_ok && n_ok && z_ok;
  assign take       = p_in_valid && p_in_ready;
  assign mu_ready   = take && c.m_src == M_MU;
  assign s_ready[0] = take && c.m_src == M_MEM;
  assign s_ready[1] = take && c.n_src == OPND_MEM;
  assign s_ready[2] = take && c.z_src == OPND_MEM;

  // ---------------- pipeline and consumers
  logic               p_out_valid, p_out_ready;
  logic [N-1:0][15:0] p_w, p_o;
  vector_pipeline #(.N(N)) u_pipe (
    .clk, .rst_n, .cfg(c.vp),
    .in_valid(p_in_valid), .in_ready(p_in_ready), .m(m_in), .n(n_in), .z(z_in),
    .out_valid(p_out_valid), .out_ready(p_out_ready), .w_out(p_w), .o_out(p_o)
  );

  logic               r_in_ready, r_out_valid, r_out_ready;
  logic [N-1:0][15:0] r_out;
  logic               a_in_ready, a_out_valid, a_out_ready;
  logic [N-1:0][15:0] a_out;
  logic               flush;

  reduce_unit #(.N(N)) u_red (
    .clk, .rst_n, .clear(start), .op_max(c.red_max), .append(c.red_append), .len(c.red_len),
    .flush, .in_valid(p_out_valid && c.out_sel == OUT_RED), .in_ready(r_in_ready), .in_vec(p_w),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_vec(r_out), .fb_vec(red_fb)
  );
  vector_accum #(.N(N)) u_acc (
    .clk, .rst_n, .clear(start), .len(c.acc_len),
    .in_valid(p_out_valid && c.out_sel == OUT_ACC), .in_ready(a_in_ready), .in_vec(p_w),
    .out_valid(a_out_valid), .out_ready(a_out_ready), .out_vec(a_out), .fb_vec(acc_fb)
  );

  // ---------------- output writer
  logic        ag_valid, ag_ready, ag_last, ag_busy, d_valid, wr_fire, wr_done;
  logic [31:0] ag_addr;
  logic [N-1:0][15:0] d_vec;

  addr_gen #(.AW(32)) u_agw (
    .clk, .rst_n, .start(start && inst.out_sel != OUT_NONE), .cfg(inst.agw),
    .valid(ag_valid), .ready(ag_ready), .addr(ag_addr), .last(ag_last), .busy(ag_busy)
  );

  always_comb begin
    case (c.out_sel)
      OUT_PIPE: begin d_valid = p_out_valid; d_vec = p_o;   end
      OUT_RED:  begin d_valid = r_out_valid; d_vec = r_out; end
      OUT_ACC:  begin d_valid = a_out_valid; d_vec = a_out; end
      default:  begin d_valid = 1'b0;        d_vec = p_o;   end
    endcase
  end

  assign wr_valid    = running && d_valid && ag_valid;
  assign wr_addr     = ag_addr;
  assign wr_data     = d_vec;
  assign wr_fire     = wr_valid && wr_ready;
  assign ag_ready    = wr_fire;
  assign r_out_ready = wr_fire && c.out_sel == OUT_RED;
  assign a_out_ready = wr_fire && c.out_sel == OUT_ACC;
  always_comb begin
    case (c.out_sel)
      OUT_PIPE: p_out_ready = wr_fire;
      OUT_RED:  p_out_ready = r_in_ready;
      OUT_ACC:  p_out_ready = a_in_ready;
      default:  p_out_ready = 1'b1;
    endcase
  end
  assign ev_stall = p_out_valid && !p_out_ready;
  assign flush    = running && consumed == c.count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c        <= '0;
      running  <= 1'b0;
      issued   <= '0;
      consumed <= '0;
      wr_done  <= 1'b0;
    end else if (start) begin
      c        <= inst;
      running  <= 1'b1;
      issued   <= '0;
      consumed <= '0;
      wr_done  <= (inst.out_sel == OUT_NONE);
    end else if (running) begin
      if (take) issued <= issued + 1;
      if (p_out_valid && p_out_ready) consumed <= consumed + 1;
      if (wr_fire && ag_last) wr_done <= 1'b1;
      if (consumed == c.count && wr_done) running <= 1'b0;
    end
  end

  assign busy = running;

  logic unused;
  assign unused = ^s_last ^ ^s_busy ^ ag_busy;
endmodule
