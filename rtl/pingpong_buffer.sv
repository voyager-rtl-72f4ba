// pingpong_buffer: two-bank (double) buffer used for the input and weight buffers.
//
// A producer fills one bank while a consumer reads the other, so memory
// fetches overlap with computation. The write side writes words at wr_addr into
// the current write bank and raises wr_commit with (or after) its last word;
// the bank is then full and the write side moves to the other bank, which it
// may fill once wr_ready says that bank is free. The read side sees rd_avail
// while its bank is full, reads with a one-cycle latency (rd_data is the word
// at the rd_addr of the previous cycle) and frees the bank with rd_release.
// Banks are handed over strictly alternately. The double buffering follows
// the paper; bank size and this handshake are this design's choice.
module pingpong_buffer #(
  parameter int W     = 256,
  parameter int DEPTH = 1024,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // write (fill) side
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          wr_commit,
  output logic          wr_ready,
  // read (drain) side
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data,
  output logic          rd_avail,
  input  logic          rd_release
);
  logic [W-1:0] mem0 [DEPTH];
  logic [W-1:0] mem1 [DEPTH];
  logic [1:0]   full;
  logic         wb, rb;

  assign wr_ready = !full[wb];
  assign rd_avail = full[rb];

  always_ff @(posedge clk) begin
    if (wr_en && !wb) mem0[wr_addr] <= wr_data;
    if (wr_en &&  wb) mem1[wr_addr] <= wr_data;
    rd_data <= rb ? mem1[rd_addr] : mem0[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= 2'b00;
      wb   <= 1'b0;
      rb   <= 1'b0;
    end else begin
      if (wr_commit) begin
        full[wb] <= 1'b1;
        wb       <= !wb;
      end
      if (rd_release && full[rb]) begin
        full[rb] <= 1'b0;
        rb       <= !rb;
      end
    end
  end

  // a commit must not overwrite a full bank
  a_commit_free: assert property (@(posedge clk) disable iff (!rst_n) wr_commit |-> !full[wb]);
endmodule
