// tb_ctrl_regs: writes random matrix- and vector-unit instructions word by
// word through the register port, checks that the instruction outputs carry
// exactly those bits and that every word reads back; checks the start
// pulses (one cycle, one cycle after the command write, suppressed while the
// unit is busy), the status register and the cycle counter's rate.
module tb_ctrl_regs
  import voyager_pkg::*;
;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mmio_valid, mmio_write, mu_start, vu_start, mu_busy, vu_busy;
  logic [9:0] mmio_addr;
  logic [31:0] mmio_wdata, mmio_rdata;
  mu_inst_t mu_inst;
  vu_inst_t vu_inst;

  ctrl_regs dut (.*);

  localparam int MUW = ($bits(mu_inst_t) + 31) / 32;
  localparam int VUW = ($bits(vu_inst_t) + 31) / 32;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [9:0] a, logic [31:0] d);
    @(negedge clk);
    mmio_valid = 1; mmio_write = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk);
    mmio_valid = 0; mmio_write = 0;
  endtask

  task automatic rd(logic [9:0] a, output logic [31:0] d);
    @(negedge clk);
    mmio_valid = 1; mmio_write = 0; mmio_addr = a;
    #1 d = mmio_rdata;
    @(negedge clk);
    mmio_valid = 0;
  endtask

  task automatic chk(logic [31:0] got, logic [31:0] want, string what);
    checks++;
    if (got !== want) begin failures++; $display("%s: got %h want %h", what, got, want); end
  endtask

  int mu_pulses = 0, vu_pulses = 0;
  always @(posedge clk) begin
    if (rst_n && mu_start) mu_pulses++;
    if (rst_n && vu_start) vu_pulses++;
  end

  logic [MUW*32-1:0] mu_w;
  logic [VUW*32-1:0] vu_w;
  logic [31:0] d, c0, c1;
  initial begin
    mmio_valid = 0; mmio_write = 0; mmio_addr = 0; mmio_wdata = 0; mu_busy = 0; vu_busy = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int i = 0; i < MUW; i++) mu_w[32*i +: 32] = $urandom;
      for (int i = 0; i < VUW; i++) vu_w[32*i +: 32] = $urandom;
      for (int i = 0; i < MUW; i++) wr(10'h100 + 10'(i), mu_w[32*i +: 32]);
      for (int i = 0; i < VUW; i++) wr(10'h200 + 10'(i), vu_w[32*i +: 32]);
      checks++;
      if (mu_inst !== mu_inst_t'(mu_w[$bits(mu_inst_t)-1:0])) begin failures++; $display("mu_inst bits"); end
      checks++;
      if (vu_inst !== vu_inst_t'(vu_w[$bits(vu_inst_t)-1:0])) begin failures++; $display("vu_inst bits"); end
      for (int i = 0; i < MUW; i++) begin
        logic [31:0] want;
        want = mu_w[32*i +: 32];
        rd(10'h100 + 10'(i), d); chk(d, want, $sformatf("mu word %0d", i));
      end
      for (int i = 0; i < VUW; i++) begin
        rd(10'h200 + 10'(i), d); chk(d, vu_w[32*i +: 32], $sformatf("vu word %0d", i));
      end
    end
    // start pulses: exactly one cycle wide, after the write
    @(negedge clk);
    mmio_valid = 1; mmio_write = 1; mmio_addr = 10'h000; mmio_wdata = 32'h3;
    #1 chk({30'd0, vu_start, mu_start}, 0, "no start before the edge");
    @(negedge clk);
    mmio_valid = 0; mmio_write = 0;
    chk({30'd0, vu_start, mu_start}, 32'h3, "both start");
    @(negedge clk);
    chk({30'd0, vu_start, mu_start}, 0, "start is one cycle");
    // busy units ignore start
    mu_busy = 1;
    wr(10'h000, 32'h3);
    chk({30'd0, vu_start, mu_start}, 32'h2, "busy MU ignores start");
    vu_busy = 1; mu_busy = 0;
    wr(10'h000, 32'h1);
    chk({30'd0, vu_start, mu_start}, 32'h1, "MU only");
    rd(10'h001, d); chk(d, 32'h2, "status");
    mu_busy = 1;
    rd(10'h001, d); chk(d, 32'h3, "status both");
    mu_busy = 0; vu_busy = 0;
    @(negedge clk);
    chk(mu_pulses, 2, "MU pulse count");
    chk(vu_pulses, 2, "VU pulse count");
    // cycle counter: one per clock
    rd(10'h002, c0);
    repeat (17) @(negedge clk);
    rd(10'h002, c1);
    chk(c1 - c0, 19, "cycle counter rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
