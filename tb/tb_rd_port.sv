// tb_rd_port: behavioural model of one in-order L2 read port for testbenches.
// Holds its own word array (mem, written by the testbench hierarchically),
// accepts a request when ready (ready is dropped pseudo-randomly when STALL is
// set) and returns the word LAT cycles later.
module tb_rd_port #(
  parameter int W     = 256,
  parameter int DEPTH = 4096,
  parameter int LAT   = 3,
  parameter bit STALL = 1'b0
) (
  input  logic          clk,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [31:0]   req_addr,
  output logic          resp_valid,
  output logic [W-1:0]  resp_data
);
  logic [W-1:0] mem [DEPTH];
  logic         pv [LAT];
  logic [W-1:0] pd [LAT];
  int unsigned  reads = 0;
  logic         rdy = 1'b1;

  assign req_ready  = rdy;
  assign resp_valid = pv[LAT-1];
  assign resp_data  = pd[LAT-1];

  initial for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end

  always @(posedge clk) begin
    pv[0] <= req_valid && req_ready;
    pd[0] <= mem[req_addr % DEPTH];
    for (int i = 1; i < LAT; i++) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    if (req_valid && req_ready) reads++;
    rdy <= STALL ? ($urandom % 4 != 0) : 1'b1;
  end
endmodule
