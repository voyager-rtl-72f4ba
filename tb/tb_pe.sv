// tb_pe: checks the processing element -- weight chain shift, bank latch,
// bank selection by the travelling select bit, the one-cycle MAC and the
// pass-through of activations.
module tb_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               avi, avo, si, so, w_shift, w_latch, w_bank;
  logic signed [7:0]  ai, ao, wi, wo;
  logic signed [31:0] pi, po;

  pe dut (.clk, .rst_n, .act_valid_in(avi), .act_in(ai), .sel_in(si), .act_valid_out(avo),
          .act_out(ao), .sel_out(so), .psum_in(pi), .psum_out(po), .w_shift, .w_in(wi), .w_out(wo),
          .w_latch, .w_bank);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [7:0] w0, w1, a;
    logic signed [31:0] p;
    avi = 0; ai = 0; si = 0; pi = 0; w_shift = 0; w_latch = 0; w_bank = 0; wi = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load w0 into bank 0, w1 into bank 1
    w0 = -8'sd7; w1 = 8'sd93;
    @(negedge clk); w_shift = 1; wi = w0;
    @(negedge clk); w_shift = 0; w_latch = 1; w_bank = 0;
    check("chain out", wo, w0);
    @(negedge clk); w_shift = 1; wi = w1; w_latch = 0;
    @(negedge clk); w_shift = 0; w_latch = 1; w_bank = 1;
    @(negedge clk); w_latch = 0;
    for (int i = 0; i < 200; i++) begin
      a = 8'($urandom); p = $urandom; si = 1'($urandom);
      avi = 1'($urandom % 4 != 0);
      ai = a; pi = p;
      @(negedge clk);
      check("act pass", ao, a);
      check("sel pass", so, si);
      check("valid pass", avo, avi);
      check("psum", po, avi ? p + 32'(a) * 32'(si ? w1 : w0) : p);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
