// pe: one processing element of the weight-stationary systolic array.
//
// Each cycle the PE multiplies the activation arriving from the left by its
// stationary weight, adds the partial sum arriving from above, and registers
// the sum for the PE below; the activation is registered for the PE on the
// right. Both outputs therefore lag their inputs by one cycle.
//
// Weights: three registers per PE. w_chain is one stage of a column-wise shift
// chain (w_in from the PE above, w_out to the PE below) that moves one place
// per cycle while w_shift is high, so the next tile's weights can be loaded
// while the current tile computes. w_latch copies the chain register into bank
// w_bank of the two-entry weight bank. Every activation carries a bank select
// bit (sel_in/sel_out) that picks the weight it is multiplied with, so tile
// boundaries need no pipeline bubble. The weight-stationary dataflow, the
// column shift chain and the three weight registers follow the paper; the
// travelling bank select is this design's choice. Arithmetic is int8 x int8 +
// int32, as in the paper's example processing element.
module pe #(
  parameter int IN_W  = 8,
  parameter int W_W   = 8,
  parameter int ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // activation path (left to right)
  input  logic                    act_valid_in,
  input  logic signed [IN_W-1:0]  act_in,
  input  logic                    sel_in,
  output logic                    act_valid_out,
  output logic signed [IN_W-1:0]  act_out,
  output logic                    sel_out,
  // partial-sum path (top to bottom)
  input  logic signed [ACC_W-1:0] psum_in,
  output logic signed [ACC_W-1:0] psum_out,
  // weight chain (top to bottom)
  input  logic                    w_shift,
  input  logic signed [W_W-1:0]   w_in,
  output logic signed [W_W-1:0]   w_out,
  input  logic                    w_latch,
  input  logic                    w_bank
);
  logic signed [W_W-1:0] w_chain;
  logic signed [W_W-1:0] w_reg [2];
  logic signed [ACC_W-1:0] prod;

  assign w_out = w_chain;
  assign prod  = ACC_W'(act_in) * ACC_W'(w_reg[sel_in]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_chain       <= '0;
      w_reg[0]      <= '0;
      w_reg[1]      <= '0;
      act_valid_out <= 1'b0;
      act_out       <= '0;
      sel_out       <= 1'b0;
      psum_out      <= '0;
    end else begin
      if (w_shift) w_chain <= w_in;
      if (w_latch) w_reg[w_bank] <= w_chain;
      act_valid_out <= act_valid_in;
      act_out       <= act_in;
      sel_out       <= sel_in;
      psum_out      <= act_valid_in ? psum_in + prod : psum_in;
    end
  end
endmodule
