// tb_fp_ref_pkg: reference FP32 arithmetic for the testbenches.
//
// The reference works in double precision (real) and rounds the double
// result to single precision with round-to-nearest-even, flushing
// subnormals to zero, so that it matches the number format of the RTL
// without sharing any code with it. A sum or product of two FP32 values is
// exact in double precision for the operand ranges the testbenches use,
// so a single rounding step gives the correctly rounded FP32 result.
package tb_fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return f[31] ? -0.0 : 0.0;
    d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic        s, g, st;
    int          e;
    logic [24:0] m;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = (d[27:0] != 28'd0);
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {s, 8'hff, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] add(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] mul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // random normal FP32 with exponent in [127-span, 127+span]
  function automatic logic [31:0] rnd(input int span);
    int unsigned e;
    e = 127 - span + ($urandom % (2 * span + 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
