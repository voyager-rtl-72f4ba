// tb_util_pkg: testbench helpers -- conversions between real numbers and
// bfloat16 bit patterns, computed through IEEE double precision and so
// independent of the bfloat16 arithmetic in the design.
package tb_util_pkg;
  function automatic real bf2r(logic [15:0] b);
    logic [63:0] d;
    if (b[14:7] == 8'd0) return 0.0;
    d = {b[15], 11'(int'(b[14:7]) - 127 + 1023), b[6:0], 45'd0};
    return $bitstoreal(d);
  endfunction

  // round to nearest even
  function automatic logic [15:0] r2bf(real r);
    logic [63:0] d;
    int          e;
    logic [7:0]  m;
    logic        g, st;
    if (r == 0.0) return 16'd0;
    d  = $realtobits(r);
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:45]};
    g  = d[44];
    st = |d[43:0];
    if (g && (st || m[0])) m = m + 8'd1;
    if (m[7]) begin m = 8'd0; e = e + 1; end
    if (e <= 0) return {d[63], 15'd0};
    if (e >= 255) return {d[63], 8'hFF, 7'd0};
    return {d[63], e[7:0], m[6:0]};
  endfunction

  function automatic real rabs(real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // |got - want| <= rel * |want| + absol
  function automatic bit close(real got, real want, real rel, real absol);
    return rabs(got - want) <= rel * rabs(want) + absol;
  endfunction
endpackage
