// stream_reader: turns an address pattern into a stream of words read from L2 memory.
//
// An addr_gen produces the addresses; each is issued on a read port
// (mem_req_valid/ready/addr) whose responses return in order, any number of
// cycles later, on mem_resp_valid/data without back-pressure. Responses land
// in a FIFO of FIFO_D words and leave on a valid/ready stream (out_*); a
// request is only issued while the FIFO has room for every outstanding
// response, so nothing is ever dropped. out_last marks the word fetched for
// the generator's last address. One word per cycle is sustained when the
// memory latency is below FIFO_D cycles. The read port stands in for the
// accelerator's dedicated memory ports on the system bus; its handshake is this
// design's choice.
module stream_reader
  import voyager_pkg::*;
#(
  parameter int W      = 256,
  parameter int FIFO_D = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  ag_cfg_t       cfg,
  output logic          busy,
  // memory read port
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic [31:0]   mem_req_addr,
  input  logic          mem_resp_valid,
  input  logic [W-1:0]  mem_resp_data,
  // output stream
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data,
  output logic          out_last
);
  localparam int CW = $clog2(FIFO_D + 1);
  localparam int PW = (FIFO_D > 1) ? $clog2(FIFO_D) : 1;

  logic          ag_valid, ag_ready, ag_last, ag_busy;
  logic [31:0]   ag_addr;
  logic [W-1:0]  fifo   [FIFO_D];
  logic          fifo_l [FIFO_D];
  logic [PW-1:0] wp, rp;
  logic [CW-1:0] count;     // words in the FIFO
  logic [CW-1:0] pending;   // requests issued, response not yet back
  logic          last_q [FIFO_D];  // last flag of outstanding requests, in order
  logic [PW-1:0] lq_wp, lq_rp;
  logic          issue, pop, push;

  addr_gen #(.AW(32)) u_ag (
    .clk, .rst_n, .start, .cfg,
    .valid(ag_valid), .ready(ag_ready), .addr(ag_addr), .last(ag_last), .busy(ag_busy)
  );

  assign mem_req_valid = ag_valid && ((32'(count) + 32'(pending)) < FIFO_D);
  assign mem_req_addr  = ag_addr;
  assign issue         = mem_req_valid && mem_req_ready;
  assign ag_ready      = issue;
  assign push          = mem_resp_valid;
  assign pop           = out_valid && out_ready;
  assign out_valid     = (count != '0);
  assign out_data      = fifo[rp];
  assign out_last      = fifo_l[rp];
  assign busy          = ag_busy || (pending != '0) || (count != '0);

  always_ff @(posedge clk) begin
    if (push) begin
      fifo[wp]   <= mem_resp_data;
      fifo_l[wp] <= last_q[lq_rp];
    end
    if (issue) last_q[lq_wp] <= ag_last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp      <= '0;
      rp      <= '0;
      lq_wp   <= '0;
      lq_rp   <= '0;
      count   <= '0;
      pending <= '0;
    end else begin
      if (push) begin
        wp    <= (32'(wp) == FIFO_D-1) ? '0 : wp + 1'b1;
        lq_rp <= (32'(lq_rp) == FIFO_D-1) ? '0 : lq_rp + 1'b1;
      end
      if (issue) lq_wp <= (32'(lq_wp) == FIFO_D-1) ? '0 : lq_wp + 1'b1;
      if (pop) rp <= (32'(rp) == FIFO_D-1) ? '0 : rp + 1'b1;
      count   <= count + CW'(push) - CW'(pop);
      pending <= pending + CW'(issue) - CW'(push);
    end
  end

  a_no_spurious_resp: assert property (@(posedge clk) disable iff (!rst_n) mem_resp_valid |-> pending != '0);
endmodule
