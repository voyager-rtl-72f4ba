// addr_gen: programmable nested-loop address generator.
//
// Walks a nest of AG_NL loops (loop AG_NL-1 innermost) whose iteration counts
// and word strides are set at run time, producing one address per cycle:
// addr = base + sum_i idx[i] * stride[i]. Following the coding style the
// paper recommends, the per-loop address step ("jump") is computed once at
// start -- when loop i advances and all inner loops wrap, the address moves by
// stride[i] - sum_{j>i} (bound[j]-1) * stride[j] -- so the running address
// needs one adder per cycle, and each loop ends on an explicit test of its
// last index instead of a trailing bound check.
//
// Interface: pulse start with cfg; the first address appears two cycles later
// (one cycle for the precomputation). valid/ready hand addresses out; last
// marks the final one. A loop with bound 0 is treated as bound 1.
module addr_gen
  import voyager_pkg::*;
#(
  parameter int AW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  ag_cfg_t       cfg,
  output logic          valid,
  input  logic          ready,
  output logic [AW-1:0] addr,
  output logic          last,
  output logic          busy
);
  typedef enum logic [1:0] {IDLE, PREP, RUN} state_e;
  state_e state;

  logic [AG_NL-1:0][15:0] idx;
  logic [AG_NL-1:0][15:0] last_idx;
  logic [AG_NL-1:0][31:0] jump;
  logic [AG_NL-1:0]       at_last;
  ag_cfg_t                c;

  always_comb begin
    for (int i = 0; i < AG_NL; i++) at_last[i] = (idx[i] == last_idx[i]);
  end
  assign last  = &at_last;
  assign valid = (state == RUN);
  assign busy  = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      idx      <= '0;
      last_idx <= '0;
      jump     <= '0;
      addr     <= '0;
      c        <= '0;
    end else begin
      case (state)
        IDLE: if (start) begin
          c     <= cfg;
          state <= PREP;
        end
        PREP: begin
          // pre-computation of loop constants
          logic [31:0] back;
          back = '0;
          for (int i = AG_NL-1; i >= 0; i--) begin
            logic [15:0] lb;
            lb          = (c.bound[i] == 16'd0) ? 16'd0 : c.bound[i] - 16'd1;
            last_idx[i] <= lb;
            jump[i]     <= c.stride[i] - back;
            back        = back + 32'(lb) * c.stride[i];
          end
          idx   <= '0;
          addr  <= AW'(c.base);
          state <= RUN;
        end
        RUN: if (ready) begin
          if (last) begin
            state <= IDLE;
          end else begin
            // flattened loop control: the innermost loop that is not at its
            // last index advances, every loop inside it wraps to zero
            logic done;
            done = 1'b0;
            for (int i = AG_NL-1; i >= 0; i--) begin
              if (!done) begin
                if (!at_last[i]) begin
                  idx[i] <= idx[i] + 16'd1;
                  addr   <= addr + AW'(jump[i]);
                  done    = 1'b1;
                end else begin
                  idx[i] <= '0;
                end
              end
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
