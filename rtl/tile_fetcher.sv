// tile_fetcher: input fetcher / weight fetcher of the matrix unit.
//
// Reads L2 memory along a programmable address pattern (stream_reader with
// its addr_gen) and packs the returned words into tiles of tile_words words in
// a ping-pong buffer: word k of a tile is written at buffer address k, and the
// bank is committed after the tile's last word. When the next bank is still in
// use the stream stalls, which back-pressures the memory requests. The
// fetcher stops after the address pattern's last word; a partly filled last
// tile is committed too. The fetchers and their double buffers follow the
// paper; the packing rule is this design's.
module tile_fetcher
  import voyager_pkg::*;
#(
  parameter int W     = 256,
  parameter int DEPTH = 1024,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  ag_cfg_t       cfg,
  input  logic [15:0]   tile_words,
  output logic          busy,
  // memory read port
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic [31:0]   mem_req_addr,
  input  logic          mem_resp_valid,
  input  logic [W-1:0]  mem_resp_data,
  // ping-pong buffer write side
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output logic [W-1:0]  wr_data,
  output logic          wr_commit,
  input  logic          wr_ready
);
  logic         s_valid, s_ready, s_last, s_busy;
  logic [W-1:0] s_data;
  logic [15:0]  k, tw;

  stream_reader #(.W(W), .FIFO_D(8)) u_rd (
    .clk, .rst_n, .start, .cfg, .busy(s_busy),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_resp_valid, .mem_resp_data,
    .out_valid(s_valid), .out_ready(s_ready), .out_data(s_data), .out_last(s_last)
  );

  assign s_ready   = wr_ready;
  assign wr_en     = s_valid && s_ready;
  assign wr_addr   = AW'(k);
  assign wr_data   = s_data;
  assign wr_commit = wr_en && ((k == tw - 16'd1) || s_last);
  assign busy      = s_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k  <= '0;
      tw <= 16'd1;
    end else begin
      if (start) begin
        k  <= '0;
        tw <= tile_words;
      end else if (wr_en) begin
        k <= wr_commit ? '0 : k + 16'd1;
      end
    end
  end
endmodule
