// systolic_array: ROWS x COLS grid of weight-stationary processing elements.
//
// Input channels are unrolled down the rows and output channels across the
// columns. One input vector (one int8 per row) enters per cycle; row r is
// delayed r cycles by a skew register staircase so that the activations meet
// the partial sums flowing down the columns at the right time. The partial
// sum leaving the bottom of column c is delayed COLS-1-c cycles by a de-skew
// staircase, so one aligned output vector (one int32 per column) leaves for
// each input vector, ROWS+COLS-1 cycles after it entered (out_valid marks it).
//
// Weight loading: w_shift pushes weight row w_row into the top of every column
// chain; after ROWS shifts (the last row of the tile first) the chains hold the
// tile and w_latch copies it into bank w_bank of all PEs at once. act_sel tells
// which bank each input vector uses; out_sel returns it with the output.
// Everything here follows the structure drawn in the paper's matrix-unit figure;
// the exact latencies are this design's.
module systolic_array #(
  parameter int ROWS = 32,
  parameter int COLS = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         act_valid,
  input  logic [ROWS-1:0][7:0]         act,
  input  logic                         act_sel,
  input  logic                         w_shift,
  input  logic [COLS-1:0][7:0]         w_row,
  input  logic                         w_latch,
  input  logic                         w_bank,
  output logic                         out_valid,
  output logic                         out_sel,
  output logic [COLS-1:0][31:0]        out_vec
);
  // grid wires: a_* indexed [row][col boundary 0..COLS], p_* [row boundary 0..ROWS][col]
  logic        av [ROWS][COLS+1];
  logic [7:0]  a  [ROWS][COLS+1];
  logic        as [ROWS][COLS+1];
  logic [31:0] ps [ROWS+1][COLS];
  logic [7:0]  wc [ROWS+1][COLS];

  // ---------------- input skew: row r delayed r cycles
  for (genvar r = 0; r < ROWS; r++) begin : g_skew
    if (r == 0) begin : g_d0
      assign av[0][0] = act_valid;
      assign a[0][0]  = act[0];
      assign as[0][0] = act_sel;
    end else begin : g_dr
      logic       sv [r];
      logic [7:0] sd [r];
      logic       ss [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin
            sv[i] <= 1'b0;
            sd[i] <= '0;
            ss[i] <= 1'b0;
          end
        end else begin
          sv[0] <= act_valid;
          sd[0] <= act[r];
          ss[0] <= act_sel;
          for (int i = 1; i < r; i++) begin
            sv[i] <= sv[i-1];
            sd[i] <= sd[i-1];
            ss[i] <= ss[i-1];
          end
        end
      end
      assign av[r][0] = sv[r-1];
      assign a[r][0]  = sd[r-1];
      assign as[r][0] = ss[r-1];
    end
  end

  // ---------------- PE grid
  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign ps[0][c] = '0;
    assign wc[0][c] = w_row[c];
  end
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe #(.IN_W(8), .W_W(8), .ACC_W(32)) u_pe (
        .clk, .rst_n,
        .act_valid_in (av[r][c]),   .act_in (a[r][c]),   .sel_in (as[r][c]),
        .act_valid_out(av[r][c+1]), .act_out(a[r][c+1]), .sel_out(as[r][c+1]),
        .psum_in (ps[r][c]), .psum_out(ps[r+1][c]),
        .w_shift, .w_in(wc[r][c]), .w_out(wc[r+1][c]),
        .w_latch, .w_bank
      );
    end
  end

  // valid/sel of a vector leaving the bottom of column 0: row ROWS-1 reached
  // column 0 at the same cycle as its psum, i.e. av[ROWS-1][1] one cycle later.
  logic v_bot, s_bot;
  assign v_bot = av[ROWS-1][1];
  assign s_bot = as[ROWS-1][1];

  // ---------------- output de-skew: column c delayed COLS-1-c cycles
  for (genvar c = 0; c < COLS; c++) begin : g_dsk
    localparam int D = COLS - 1 - c;
    if (D == 0) begin : g_d0
      assign out_vec[c] = ps[ROWS][c];
    end else begin : g_dd
      logic [31:0] dq [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < D; i++) dq[i] <= '0;
        end else begin
          dq[0] <= ps[ROWS][c];
          for (int i = 1; i < D; i++) dq[i] <= dq[i-1];
        end
      end
      assign out_vec[c] = dq[D-1];
    end
  end

  // valid/sel follow column 0, so they take the full COLS-1 delay
  if (COLS == 1) begin : g_v1
    assign out_valid = v_bot;
    assign out_sel   = s_bot;
  end else begin : g_vn
    logic vq [COLS-1];
    logic sq [COLS-1];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < COLS-1; i++) begin
          vq[i] <= 1'b0;
          sq[i] <= 1'b0;
        end
      end else begin
        vq[0] <= v_bot;
        sq[0] <= s_bot;
        for (int i = 1; i < COLS-1; i++) begin
          vq[i] <= vq[i-1];
          sq[i] <= sq[i-1];
        end
      end
    end
    assign out_valid = vq[COLS-2];
    assign out_sel   = sq[COLS-2];
  end

  // the activation leaving the right edge and the weight leaving the bottom are not used
  logic unused;
  always_comb begin
    unused = 1'b0;
    for (int r = 0; r < ROWS; r++) unused = unused ^ av[r][COLS] ^ as[r][COLS] ^ (^a[r][COLS]);
    for (int c = 0; c < COLS; c++) unused = unused ^ (^wc[ROWS][c]);
  end
endmodule
