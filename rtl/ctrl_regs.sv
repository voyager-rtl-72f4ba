// ctrl_regs: memory-mapped control registers through which the host CPU drives
// the accelerator.
//
// The host writes a matrix-unit and a vector-unit instruction as 32-bit words
// and starts either unit by writing the command register. Word map (word
// addresses on a 32-bit register port, one access per cycle, reads return the
// register of the current address combinationally):
//   0x000  CMD     write: bit 0 starts the matrix unit, bit 1 the vector unit
//   0x001  STATUS  read:  bit 0 matrix unit busy, bit 1 vector unit busy
//   0x002  CYCLES  read:  free-running cycle counter
//   0x100+i        word i of the matrix instruction (mu_inst_t, LSB word first)
//   0x200+i        word i of the vector instruction (vu_inst_t, LSB word first)
// A start is ignored while that unit is busy. Control through memory-mapped
// registers follows the paper; the map and the encoding are this design's.
module ctrl_regs
  import voyager_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mmio_valid,
  input  logic        mmio_write,
  input  logic [9:0]  mmio_addr,
  input  logic [31:0] mmio_wdata,
  output logic [31:0] mmio_rdata,
  output mu_inst_t    mu_inst,
  output vu_inst_t    vu_inst,
  output logic        mu_start,
  output logic        vu_start,
  input  logic        mu_busy,
  input  logic        vu_busy
);
  localparam int MU_WORDS = ($bits(mu_inst_t) + 31) / 32;
  localparam int VU_WORDS = ($bits(vu_inst_t) + 31) / 32;

  logic [MU_WORDS*32-1:0] mu_bits;
  logic [VU_WORDS*32-1:0] vu_bits;
  logic [31:0]            cycles;
  logic                   wr;

  assign wr      = mmio_valid && mmio_write;
  assign mu_inst = mu_inst_t'(mu_bits[$bits(mu_inst_t)-1:0]);
  assign vu_inst = vu_inst_t'(vu_bits[$bits(vu_inst_t)-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mu_bits  <= '0;
      vu_bits  <= '0;
      cycles   <= '0;
      mu_start <= 1'b0;
      vu_start <= 1'b0;
    end else begin
      cycles   <= cycles + 32'd1;
      mu_start <= wr && mmio_addr == 10'h000 && mmio_wdata[0] && !mu_busy;
      vu_start <= wr && mmio_addr == 10'h000 && mmio_wdata[1] && !vu_busy;
      if (wr && mmio_addr[9:8] == 2'b01 && 32'(mmio_addr[7:0]) < MU_WORDS)
        mu_bits[32*mmio_addr[7:0] +: 32] <= mmio_wdata;
      if (wr && mmio_addr[9:8] == 2'b10 && 32'(mmio_addr[7:0]) < VU_WORDS)
        vu_bits[32*mmio_addr[7:0] +: 32] <= mmio_wdata;
    end
  end

  always_comb begin
    mmio_rdata = '0;
    if (mmio_addr == 10'h001) mmio_rdata = {30'd0, vu_busy, mu_busy};
    else if (mmio_addr == 10'h002) mmio_rdata = cycles;
    else if (mmio_addr[9:8] == 2'b01 && 32'(mmio_addr[7:0]) < MU_WORDS) mmio_rdata = mu_bits[32*mmio_addr[7:0] +: 32];
    else if (mmio_addr[9:8] == 2'b10 && 32'(mmio_addr[7:0]) < VU_WORDS) mmio_rdata = vu_bits[32*mmio_addr[7:0] +: 32];
  end
endmodule
