// tb_fp_util: reference single-precision arithmetic for the testbenches.
// A single-precision value is widened exactly to double precision, the
// operation is done in double precision by the simulator, and the result
// is rounded back to single precision (round to nearest even).  For an
// addition of two single-precision numbers this double rounding gives the
// correctly rounded single-precision sum.  Subnormal results are flushed
// to zero, like the design.
package tb_fp_util;
  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;        // hidden + 23
    logic        g, st, up;
    logic [24:0] mr;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:29]};
    g = d[28];
    st = |d[27:0];
    up = g & (st | m[0]);
    mr = {1'b0, m} + 25'(up);
    if (mr[24]) begin
      mr = mr >> 1;
      e++;
    end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction
endpackage
