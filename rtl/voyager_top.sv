// voyager_top: the generated accelerator -- matrix unit, vector unit and their
// control registers.
//
// The host programs instructions through the memory-mapped register port
// (ctrl_regs) and starts the units. The matrix unit (GEMM and convolution on a
// ROWS x COLS int8 systolic array) streams its int32 output vectors from the
// accumulation buffer straight into the N = COLS lane vector unit, which
// dequantizes them and applies element-wise, nonlinear and reduction
// operations in bfloat16 before writing to memory; the vector unit also runs
// stand-alone passes (softmax, layer norm, residual additions) from memory.
//
// Memory: seven dedicated ports to the system's L2 memory, each an in-order
// request/response port (req_valid/ready/addr, resp_valid/data, no
// back-pressure on responses): inputs (ROWS bytes per word), weights (COLS
// bytes), biases (COLS int32), three vector-operand read ports and one
// vector write port (N bfloat16 per word). In an SoC these would sit behind
// the system bus; the bus adapter is not part of this design. Defaults are the
// 32 x 32 configuration evaluated in the paper; buffer sizes are this design's
// split of its 192 KB.
module voyager_top
  import voyager_pkg::*;
#(
  parameter int ROWS       = 32,
  parameter int COLS       = 32,
  parameter int IBUF_DEPTH = 1024,
  parameter int ABUF_DEPTH = 512,
  parameter bit DOUBLE_BUF = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host register port
  input  logic                  mmio_valid,
  input  logic                  mmio_write,
  input  logic [9:0]            mmio_addr,
  input  logic [31:0]           mmio_wdata,
  output logic [31:0]           mmio_rdata,
  // matrix unit L2 read ports
  output logic                  in_req_valid,
  input  logic                  in_req_ready,
  output logic [31:0]           in_req_addr,
  input  logic                  in_resp_valid,
  input  logic [ROWS*8-1:0]     in_resp_data,
  output logic                  w_req_valid,
  input  logic                  w_req_ready,
  output logic [31:0]           w_req_addr,
  input  logic                  w_resp_valid,
  input  logic [COLS*8-1:0]     w_resp_data,
  output logic                  b_req_valid,
  input  logic                  b_req_ready,
  output logic [31:0]           b_req_addr,
  input  logic                  b_resp_valid,
  input  logic [COLS*32-1:0]    b_resp_data,
  // vector unit L2 ports
  output logic [2:0]            vrd_req_valid,
  input  logic [2:0]            vrd_req_ready,
  output logic [2:0][31:0]      vrd_req_addr,
  input  logic [2:0]            vrd_resp_valid,
  input  logic [2:0][COLS*16-1:0] vrd_resp_data,
  output logic                  vwr_valid,
  input  logic                  vwr_ready,
  output logic [31:0]           vwr_addr,
  output logic [COLS*16-1:0]    vwr_data,
  // status and event strobes
  output logic                  mu_busy,
  output logic                  vu_busy,
  output logic                  ev_wait_acc,
  output logic                  ev_overlap,
  output logic                  ev_vu_stall
);
  mu_inst_t mu_inst;
  vu_inst_t vu_inst;
  logic     mu_start, vu_start;

  logic                  mv_valid, mv_ready, mv_last;
  logic [COLS-1:0][31:0] mv_vec;

  ctrl_regs u_regs (
    .clk, .rst_n, .mmio_valid, .mmio_write, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .mu_inst, .vu_inst, .mu_start, .vu_start, .mu_busy, .vu_busy
  );

  matrix_unit #(.ROWS(ROWS), .COLS(COLS), .IBUF_DEPTH(IBUF_DEPTH), .ABUF_DEPTH(ABUF_DEPTH), .DOUBLE_BUF(DOUBLE_BUF)) u_mu (
    .clk, .rst_n, .start(mu_start), .inst(mu_inst), .busy(mu_busy),
    .in_req_valid, .in_req_ready, .in_req_addr, .in_resp_valid, .in_resp_data,
    .w_req_valid, .w_req_ready, .w_req_addr, .w_resp_valid, .w_resp_data,
    .b_req_valid, .b_req_ready, .b_req_addr, .b_resp_valid, .b_resp_data,
    .out_valid(mv_valid), .out_ready(mv_ready), .out_vec(mv_vec), .out_last(mv_last),
    .ev_wait_acc, .ev_overlap
  );

  vector_unit #(.N(COLS)) u_vu (
    .clk, .rst_n, .start(vu_start), .inst(vu_inst), .busy(vu_busy),
    .mu_valid(mv_valid), .mu_ready(mv_ready), .mu_vec(mv_vec),
    .rd_req_valid(vrd_req_valid), .rd_req_ready(vrd_req_ready), .rd_req_addr(vrd_req_addr),
    .rd_resp_valid(vrd_resp_valid), .rd_resp_data(vrd_resp_data),
    .wr_valid(vwr_valid), .wr_ready(vwr_ready), .wr_addr(vwr_addr), .wr_data(vwr_data),
    .ev_stall(ev_vu_stall)
  );

  logic unused;
  assign unused = mv_last;
endmodule
