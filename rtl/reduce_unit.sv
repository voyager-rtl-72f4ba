// reduce_unit: reduction engine of the vector unit (sum or max).
//
// Each accepted vector is reduced across its N lanes by a binary tree of
// bfloat16 adders (or max units), and the lane results of len consecutive
// vectors are combined into one scalar. The scalar is then either replicated
// to all N lanes (one output vector per reduction) or appended into lane k of
// a vector that is emitted once N scalars are collected, or early on flush.
// fb_vec holds the last emitted vector so that it can be fed back into the
// pipeline as an operand. The output is a one-entry register with
// valid/ready; in_ready drops while a finished result waits. Sum and max
// reduction and replicate/append follow the paper; the tree, the per-vector
// accumulation order and the append rule are this design's choices.
module reduce_unit
  import voyager_pkg::*;
#(
  parameter int N = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,      // start of an instruction
  input  logic               op_max,
  input  logic               append,
  input  logic [15:0]        len,
  input  logic               flush,      // emit a partly appended vector
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [N-1:0][15:0] in_vec,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [N-1:0][15:0] out_vec,
  output logic [N-1:0][15:0] fb_vec
);
  localparam int LW = (N > 1) ? $clog2(N) : 1;

  bf16_t       tree;
  bf16_t       acc, nxt;
  logic [15:0] cnt;
  logic [LW:0] k;            // appended lanes
  logic        fire, done_scalar;

  // lane reduction
  always_comb begin
    bf16_t t [2*N];
    for (int i = 0; i < N; i++) t[N+i] = in_vec[i];
    for (int i = N-1; i >= 1; i--) t[i] = op_max ? bf16_max(t[2*i], t[2*i+1]) : bf16_add(t[2*i], t[2*i+1]);
    tree = (N == 1) ? t[N] : t[1];
    t[0] = '0;
  end

  assign nxt         = (cnt == 16'd0) ? tree : (op_max ? bf16_max(acc, tree) : bf16_add(acc, tree));
  assign in_ready    = !out_valid || out_ready;
  assign fire        = in_valid && in_ready;
  assign done_scalar = fire && (cnt == len - 16'd1 || len == 16'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      k         <= '0;
      out_valid <= 1'b0;
      out_vec   <= '0;
      fb_vec    <= '0;
    end else if (clear) begin
      cnt       <= '0;
      k         <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        acc <= nxt;
        cnt <= done_scalar ? 16'd0 : cnt + 16'd1;
      end
      if (done_scalar) begin
        if (!append) begin
          for (int i = 0; i < N; i++) out_vec[i] <= nxt;
          for (int i = 0; i < N; i++) fb_vec[i]  <= nxt;
          out_valid <= 1'b1;
        end else begin
          out_vec[k[LW-1:0]] <= nxt;
          if (32'(k) == N - 1) begin
            k         <= '0;
            out_valid <= 1'b1;
            fb_vec    <= out_vec;
            fb_vec[k[LW-1:0]] <= nxt;
          end else begin
            k <= k + 1'b1;
          end
        end
      end else if (flush && append && k != '0 && !out_valid) begin
        out_valid <= 1'b1;
        fb_vec    <= out_vec;
        k         <= '0;
      end
    end
  end
endmodule
