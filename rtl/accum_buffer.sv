// accum_buffer: accumulation buffer between the systolic array and the vector unit.
//
// Every output vector leaving the array carries its pixel address and two
// tags. On the first reduction tile (in_first) the vector, plus the bias
// vector when bias_en is set, is written; on later tiles it is added to what
// the buffer holds (int32 read-modify-write in one cycle, so back-to-back
// updates of one address need no forwarding). The vector tagged in_done is the
// last one of an output tile: its bank becomes full and is streamed to the
// vector unit (out_*, valid/ready, out_last on the tile's last vector) in
// address order 0..in_addr. Banks are claimed in turn by the controller with
// alloc before an output tile starts and are freed when their drain ends.
//
// With DOUBLE_BUF=1 there are two banks and the array fills one while the
// vector unit drains the other; with DOUBLE_BUF=0 a new output tile must wait
// until the drain is over. bank_free tells the controller that the next bank
// can be claimed for a new output tile; the array itself never stalls. Bias
// addition and the optional double buffer follow the paper; the
// one-cycle read-modify-write (asynchronous array read) is this design's choice.
module accum_buffer #(
  parameter int COLS       = 32,
  parameter int DEPTH      = 512,
  parameter bit DOUBLE_BUF = 1'b1,
  localparam int AW        = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // from the systolic array
  input  logic                  in_valid,
  input  logic [COLS-1:0][31:0] in_vec,
  input  logic [AW-1:0]         in_addr,
  input  logic                  in_first,
  input  logic                  in_done,
  input  logic [COLS-1:0][31:0] bias,
  input  logic                  bias_en,
  input  logic                  alloc,
  output logic                  bank_free,
  // to the vector unit
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [COLS-1:0][31:0] out_vec,
  output logic                  out_last
);
  localparam int NB = DOUBLE_BUF ? 2 : 1;

  logic [COLS-1:0][31:0] mem [NB][DEPTH];
  logic [NB-1:0]         full;
  logic [AW-1:0]         len  [NB];   // last address of the tile held in each bank
  logic [NB-1:0]         owned;       // claimed by alloc, not yet drained
  logic                  ap, wb, rb;  // alloc, write and read bank (always 0 with one bank)
  logic [AW-1:0]         rp;
  logic [COLS-1:0][31:0] upd;

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      if (in_first) upd[c] = in_vec[c] + (bias_en ? bias[c] : 32'd0);
      else          upd[c] = mem[wb][in_addr][c] + in_vec[c];
    end
  end

  assign bank_free = !owned[ap];
  assign out_valid = full[rb];
  assign out_vec   = mem[rb][rp];
  assign out_last  = (rp == len[rb]);

  always_ff @(posedge clk) begin
    if (in_valid) mem[wb][in_addr] <= upd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full  <= '0;
      owned <= '0;
      ap    <= 1'b0;
      wb   <= 1'b0;
      rb   <= 1'b0;
      rp   <= '0;
      for (int b = 0; b < NB; b++) len[b] <= '0;
    end else begin
      if (alloc) begin
        owned[ap] <= 1'b1;
        if (DOUBLE_BUF) ap <= !ap;
      end
      if (in_valid && in_done) begin
        full[wb] <= 1'b1;
        len[wb]  <= in_addr;
        if (DOUBLE_BUF) wb <= !wb;
      end
      if (out_valid && out_ready) begin
        if (out_last) begin
          rp       <= '0;
          full[rb]  <= 1'b0;
          owned[rb] <= 1'b0;
          if (DOUBLE_BUF) rb <= !rb;
        end else begin
          rp <= rp + 1'b1;
        end
      end
    end
  end

  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !full[wb] && owned[wb]);
  a_alloc_free:   assert property (@(posedge clk) disable iff (!rst_n) alloc |-> bank_free);
endmodule
