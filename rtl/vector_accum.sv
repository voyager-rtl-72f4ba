// vector_accum: element-wise accumulator of the vector unit, b = w + b.
//
// Adds len consecutive input vectors lane by lane in bfloat16 and emits the
// sum as one output vector (valid/ready, one-entry output register); the first
// vector of each group replaces b. fb_vec keeps the last emitted sum for use
// as a pipeline operand. The accumulator and its feedback follow the paper;
// the grouping by len is this design's choice.
module vector_accum
  import voyager_pkg::*;
#(
  parameter int N = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic [15:0]        len,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [N-1:0][15:0] in_vec,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [N-1:0][15:0] out_vec,
  output logic [N-1:0][15:0] fb_vec
);
  logic [N-1:0][15:0] b, nxt;
  logic [15:0]        cnt;
  logic               fire, done;

  always_comb begin
    for (int l = 0; l < N; l++) nxt[l] = (cnt == 16'd0) ? in_vec[l] : bf16_add(in_vec[l], b[l]);
  end

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign done     = fire && (cnt == len - 16'd1 || len == 16'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b         <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_vec   <= '0;
      fb_vec    <= '0;
    end else if (clear) begin
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        b   <= nxt;
        cnt <= done ? 16'd0 : cnt + 16'd1;
      end
      if (done) begin
        out_vec   <= nxt;
        fb_vec    <= nxt;
        out_valid <= 1'b1;
      end
    end
  end
endmodule
