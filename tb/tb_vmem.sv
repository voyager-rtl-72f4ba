// tb_vmem: behavioural model of the L2 memory seen by the vector unit: one
// word array shared by three in-order read ports (fixed latency LAT) and one
// write port. With STALL set, read and write ports drop ready at random;
// WR_HEAVY makes the write port accept only about one cycle in three.
module tb_vmem #(
  parameter int W     = 64,
  parameter int DEPTH = 1024,
  parameter int LAT   = 3,
  parameter bit STALL = 1'b0,
  parameter bit WR_HEAVY = 1'b0
) (
  input  logic              clk,
  input  logic [2:0]        rd_req_valid,
  output logic [2:0]        rd_req_ready,
  input  logic [2:0][31:0]  rd_req_addr,
  output logic [2:0]        rd_resp_valid,
  output logic [2:0][W-1:0] rd_resp_data,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [31:0]       wr_addr,
  input  logic [W-1:0]      wr_data
);
  logic [W-1:0] mem [DEPTH];
  logic [2:0]   pv [LAT];
  logic [2:0][W-1:0] pd [LAT];
  int unsigned  writes = 0, wr_stalls = 0;

  initial begin
    for (int i = 0; i < LAT; i++) begin pv[i] = '0; pd[i] = '0; end
    rd_req_ready = '1;
    wr_ready = 1'b1;
  end
  assign rd_resp_valid = pv[LAT-1];
  assign rd_resp_data  = pd[LAT-1];

  always @(posedge clk) begin
    for (int p = 0; p < 3; p++) begin
      pv[0][p] <= rd_req_valid[p] && rd_req_ready[p];
      pd[0][p] <= mem[rd_req_addr[p] % DEPTH];
    end
    for (int i = 1; i < LAT; i++) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    if (wr_valid && wr_ready) begin
      mem[wr_addr % DEPTH] <= wr_data;
      writes++;
    end
    if (wr_valid && !wr_ready) wr_stalls++;
    for (int p = 0; p < 3; p++) rd_req_ready[p] <= STALL ? ($urandom % 4 != 0) : 1'b1;
    wr_ready <= WR_HEAVY ? ($urandom % 3 == 0) : STALL ? ($urandom % 3 != 0) : 1'b1;
  end
endmodule
