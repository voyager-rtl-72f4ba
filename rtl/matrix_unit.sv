// matrix_unit: GEMM / convolution engine of the accelerator.
//
// Blocks: an input fetcher and a weight fetcher (tile_fetcher), each filling
// its own double buffer (pingpong_buffer) from a dedicated L2 read port; a
// bias reader; the ROWS x COLS weight-stationary systolic array; and the
// accumulation buffer, whose full banks stream to the vector unit (out_*).
//
// One instruction (mu_inst_t) computes NT output-channel tiles; each is the
// sum over KT reduction tiles of P input vectors (ROWS int8 each) times a
// ROWS x COLS int8 weight tile. Tile t = nt*KT + kt. The memory layout and
// fetch order of inputs, weights and biases are free: they are the three
// address patterns of the instruction (the input pattern must deliver P words
// per tile, the weight pattern ROWS words per tile, row 0 first, the bias
// pattern one COLS x int32 word per output tile).
//
// Two controllers run concurrently. The weight loader shifts the next tile's
// weights into the PE chains (ROWS cycles) while the current tile computes and
// latches them into the PE bank t%2 once tile t-2 has left the array.
// Weight loading is thus hidden behind computation, as in the paper. The
// streamer sends the P input vectors of tile t, tagged with bank t%2, as soon
// as the tile's weights are loaded and its inputs are buffered; on the first
// reduction tile of an output tile it also claims an accumulation-buffer bank
// and takes that tile's bias. Output vectors are tagged on the way out by
// counters that mirror the input order. In steady state a tile takes
// max(P + 2, ROWS + 3) cycles once P is at least about ROWS + COLS; smaller
// tiles also wait for tile t-2 to drain before bank t%2 is reused. The structure follows the paper; the fixed tile
// order (output tiles outer, reduction tiles inner) and all latencies are this
// design's choices.
module matrix_unit
  import voyager_pkg::*;
#(
  parameter int ROWS       = 32,
  parameter int COLS       = 32,
  parameter int IBUF_DEPTH = 1024,
  parameter int ABUF_DEPTH = 512,
  parameter bit DOUBLE_BUF = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  mu_inst_t               inst,
  output logic                   busy,
  // L2 read ports
  output logic                   in_req_valid,
  input  logic                   in_req_ready,
  output logic [31:0]            in_req_addr,
  input  logic                   in_resp_valid,
  input  logic [ROWS*8-1:0]      in_resp_data,
  output logic                   w_req_valid,
  input  logic                   w_req_ready,
  output logic [31:0]            w_req_addr,
  input  logic                   w_resp_valid,
  input  logic [COLS*8-1:0]      w_resp_data,
  output logic                   b_req_valid,
  input  logic                   b_req_ready,
  output logic [31:0]            b_req_addr,
  input  logic                   b_resp_valid,
  input  logic [COLS*32-1:0]     b_resp_data,
  // output vectors to the vector unit
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [COLS-1:0][31:0]  out_vec,
  output logic                   out_last,
  // event strobes for performance counting
  output logic                   ev_wait_acc,   // streamer held: no free accumulation bank
  output logic                   ev_overlap     // weights shifted while a tile streams
);
  localparam int IAW = (IBUF_DEPTH > 1) ? $clog2(IBUF_DEPTH) : 1;
  localparam int WAW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int AAW = (ABUF_DEPTH > 1) ? $clog2(ABUF_DEPTH) : 1;

  mu_inst_t c;
  logic [31:0] ntiles;
  logic        running;

  // ------------------------------------------------------------- fetchers and buffers
  logic               ib_wr_en, ib_wr_commit, ib_wr_ready, ib_rd_avail, ib_rd_release;
  logic [IAW-1:0]     ib_wr_addr, ib_rd_addr;
  logic [ROWS*8-1:0]  ib_wr_data, ib_rd_data;
  logic               wb_wr_en, wb_wr_commit, wb_wr_ready, wb_rd_avail, wb_rd_release;
  logic [WAW-1:0]     wb_wr_addr, wb_rd_addr;
  logic [COLS*8-1:0]  wb_wr_data, wb_rd_data;
  logic               if_busy, wf_busy, bf_busy;

  tile_fetcher #(.W(ROWS*8), .DEPTH(IBUF_DEPTH)) u_in_fetch (
    .clk, .rst_n, .start, .cfg(inst.in_ag), .tile_words(inst.p), .busy(if_busy),
    .mem_req_valid(in_req_valid), .mem_req_ready(in_req_ready), .mem_req_addr(in_req_addr),
    .mem_resp_valid(in_resp_valid), .mem_resp_data(in_resp_data),
    .wr_en(ib_wr_en), .wr_addr(ib_wr_addr), .wr_data(ib_wr_data), .wr_commit(ib_wr_commit), .wr_ready(ib_wr_ready)
  );
  pingpong_buffer #(.W(ROWS*8), .DEPTH(IBUF_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .wr_en(ib_wr_en), .wr_addr(ib_wr_addr), .wr_data(ib_wr_data), .wr_commit(ib_wr_commit), .wr_ready(ib_wr_ready),
    .rd_addr(ib_rd_addr), .rd_data(ib_rd_data), .rd_avail(ib_rd_avail), .rd_release(ib_rd_release)
  );
  tile_fetcher #(.W(COLS*8), .DEPTH(ROWS)) u_w_fetch (
    .clk, .rst_n, .start, .cfg(inst.w_ag), .tile_words(16'(ROWS)), .busy(wf_busy),
    .mem_req_valid(w_req_valid), .mem_req_ready(w_req_ready), .mem_req_addr(w_req_addr),
    .mem_resp_valid(w_resp_valid), .mem_resp_data(w_resp_data),
    .wr_en(wb_wr_en), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data), .wr_commit(wb_wr_commit), .wr_ready(wb_wr_ready)
  );
  pingpong_buffer #(.W(COLS*8), .DEPTH(ROWS)) u_w_buf (
    .clk, .rst_n,
    .wr_en(wb_wr_en), .wr_addr(wb_wr_addr), .wr_data(wb_wr_data), .wr_commit(wb_wr_commit), .wr_ready(wb_wr_ready),
    .rd_addr(wb_rd_addr), .rd_data(wb_rd_data), .rd_avail(wb_rd_avail), .rd_release(wb_rd_release)
  );

  logic               bs_valid, bs_ready, bs_last;
  logic [COLS*32-1:0] bs_data;
  stream_reader #(.W(COLS*32), .FIFO_D(4)) u_b_rd (
    .clk, .rst_n, .start(start && inst.bias_en), .cfg(inst.b_ag), .busy(bf_busy),
    .mem_req_valid(b_req_valid), .mem_req_ready(b_req_ready), .mem_req_addr(b_req_addr),
    .mem_resp_valid(b_resp_valid), .mem_resp_data(b_resp_data),
    .out_valid(bs_valid), .out_ready(bs_ready), .out_data(bs_data), .out_last(bs_last)
  );

  // ------------------------------------------------------------- systolic array
  logic                  sa_act_valid, sa_act_sel, sa_w_shift, sa_w_latch, sa_w_bank;
  logic                  sa_out_valid, sa_out_sel;
  logic [COLS-1:0][31:0] sa_out_vec;

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n,
    .act_valid(sa_act_valid), .act(ib_rd_data), .act_sel(sa_act_sel),
    .w_shift(sa_w_shift), .w_row(wb_rd_data), .w_latch(sa_w_latch), .w_bank(sa_w_bank),
    .out_valid(sa_out_valid), .out_sel(sa_out_sel), .out_vec(sa_out_vec)
  );

  // ------------------------------------------------------------- tile bookkeeping
  logic [31:0] lt;        // tiles whose weights are latched
  logic [31:0] st;        // tiles fully streamed into the array
  logic [31:0] dt;        // tiles fully out of the array
  logic [15:0] st_kt, dt_kt, dt_j;

  // ------------------------------------------------------------- weight loader
  typedef enum logic [1:0] {L_WAIT, L_SHIFT, L_LAST, L_LATCH} lstate_e;
  lstate_e     ls;
  logic [15:0] li;
  logic        shift_q;

  assign wb_rd_addr    = WAW'(ROWS - 1 - 32'(li));
  assign sa_w_shift    = shift_q;
  assign sa_w_latch    = (ls == L_LATCH);
  assign sa_w_bank     = lt[0];
  assign wb_rd_release = (ls == L_LATCH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ls      <= L_WAIT;
      li      <= '0;
      lt      <= '0;
      shift_q <= 1'b0;
    end else begin
      shift_q <= (ls == L_SHIFT);
      if (start) begin
        ls <= L_WAIT;
        lt <= '0;
      end else case (ls)
        L_WAIT: if (running && lt < ntiles && wb_rd_avail) begin
          ls <= L_SHIFT;
          li <= '0;
        end
        L_SHIFT: begin
          if (32'(li) == ROWS - 1) ls <= L_LAST;
          li <= li + 16'd1;
        end
        // the last row shifts in at the end of the first L_LAST cycle; the
        // latch waits until tile lt-2, the last user of bank lt%2, has left
        L_LAST: if (lt < 2 || dt >= lt - 1) ls <= L_LATCH;
        L_LATCH: begin
          ls <= L_WAIT;
          lt <= lt + 1;
        end
        default: ls <= L_WAIT;
      endcase
    end
  end

  // ------------------------------------------------------------- input streamer
  typedef enum logic [1:0] {S_WAIT, S_RUN, S_REL} sstate_e;
  sstate_e     ss;
  logic [15:0] sj;
  logic        act_q;
  logic        new_out;        // tile st starts an output tile
  logic        acc_ok, bias_ok;
  logic        acc_bank_free;
  logic [COLS*32-1:0] bias_fifo [4];
  logic [1:0]  bf_wp, bf_rp;
  logic [2:0]  bf_cnt;
  logic        bf_pop;

  assign new_out  = (st_kt == 16'd0);
  assign acc_ok   = !new_out || acc_bank_free;
  assign bias_ok  = !new_out || !c.bias_en || (bs_valid && bf_cnt < 3'd4);
  assign bs_ready = (ss == S_WAIT) && running && st < ntiles && lt > st && ib_rd_avail && acc_ok && bias_ok
                    && new_out && c.bias_en;

  logic s_go;
  assign s_go = (ss == S_WAIT) && running && st < ntiles && lt > st && ib_rd_avail && acc_ok && bias_ok;
  assign ib_rd_addr    = IAW'(sj);
  assign ib_rd_release = (ss == S_REL);
  assign sa_act_valid  = act_q;
  assign sa_act_sel    = st[0];
  assign ev_wait_acc   = (ss == S_WAIT) && running && st < ntiles && lt > st && ib_rd_avail && !acc_ok;
  assign ev_overlap    = (ls == L_SHIFT) && (ss == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ss     <= S_WAIT;
      sj     <= '0;
      st     <= '0;
      st_kt  <= '0;
      act_q  <= 1'b0;
      bf_wp  <= '0;
      bf_rp  <= '0;
      bf_cnt <= '0;
    end else begin
      act_q <= (ss == S_RUN);
      if (bs_ready && bs_valid) begin
        bias_fifo[bf_wp] <= bs_data;
        bf_wp <= bf_wp + 2'd1;
      end
      bf_cnt <= bf_cnt + 3'(bs_ready && bs_valid) - 3'(bf_pop);
      if (bf_pop) bf_rp <= bf_rp + 2'd1;
      if (start) begin
        ss    <= S_WAIT;
        st    <= '0;
        st_kt <= '0;
      end else case (ss)
        S_WAIT: if (s_go) begin
          ss <= S_RUN;
          sj <= '0;
        end
        S_RUN: begin
          if (sj == c.p - 16'd1) ss <= S_REL;
          sj <= sj + 16'd1;
        end
        S_REL: begin
          ss    <= S_WAIT;
          st    <= st + 1;
          st_kt <= (st_kt == c.kt - 16'd1) ? 16'd0 : st_kt + 16'd1;
        end
        default: ss <= S_WAIT;
      endcase
    end
  end

  // the array outputs are not used by the bias or last flags of the bias reader
  logic unused_b;
  assign unused_b = bs_last ^ sa_out_sel;

  // ------------------------------------------------------------- output side
  logic out_first, out_done, out_tile_end;
  assign out_first    = (dt_kt == 16'd0);
  assign out_tile_end = (dt_j == c.p - 16'd1);
  assign out_done     = out_tile_end && (dt_kt == c.kt - 16'd1);
  assign bf_pop       = sa_out_valid && out_tile_end && out_first && c.bias_en;

  accum_buffer #(.COLS(COLS), .DEPTH(ABUF_DEPTH), .DOUBLE_BUF(DOUBLE_BUF)) u_acc (
    .clk, .rst_n,
    .in_valid(sa_out_valid), .in_vec(sa_out_vec), .in_addr(AAW'(dt_j)),
    .in_first(out_first), .in_done(out_done),
    .bias(bias_fifo[bf_rp]), .bias_en(c.bias_en),
    .alloc(s_go && new_out), .bank_free(acc_bank_free),
    .out_valid, .out_ready, .out_vec, .out_last
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dt    <= '0;
      dt_kt <= '0;
      dt_j  <= '0;
    end else if (start) begin
      dt    <= '0;
      dt_kt <= '0;
      dt_j  <= '0;
    end else if (sa_out_valid) begin
      if (out_tile_end) begin
        dt_j  <= '0;
        dt    <= dt + 1;
        dt_kt <= (dt_kt == c.kt - 16'd1) ? 16'd0 : dt_kt + 16'd1;
      end else begin
        dt_j <= dt_j + 16'd1;
      end
    end
  end

  // ------------------------------------------------------------- instruction
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c       <= '0;
      ntiles  <= '0;
      running <= 1'b0;
    end else if (start) begin
      c       <= inst;
      ntiles  <= 32'(inst.kt) * 32'(inst.nt);
      running <= 1'b1;
    end else if (running && dt == ntiles && !out_valid) begin
      running <= 1'b0;
    end
  end

  assign busy = running || if_busy || wf_busy || bf_busy;

  a_p_fits: assert property (@(posedge clk) disable iff (!rst_n) start |-> (32'(inst.p) <= IBUF_DEPTH && 32'(inst.p) <= ABUF_DEPTH && inst.p != 0));
endmodule
