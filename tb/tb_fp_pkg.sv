// tb_fp_pkg: reference float32 arithmetic for the testbenches, computed
// independently of the RTL through the simulator's 64-bit real type.
//
// A float32 operand is widened exactly to a double, the operation is done in
// double precision and the result is rounded once to float32 (nearest, ties to
// even). For +, -, * and / of float32 operands the double result carries
// enough bits that this gives the correctly rounded float32 result. Results
// below the normal float32 range are flushed to zero, as in the RTL.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] man;
    logic g, rest;
    int e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    man = {1'b0, m[52:29]};
    g = m[28];
    rest = |m[27:0];
    if (g && (rest || man[0])) man = man + 25'd1;
    if (man[24]) begin man = man >> 1; e = e + 1; end
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), man[22:0]};
  endfunction

  function automatic logic [31:0] radd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction
  function automatic logic [31:0] rsub(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) - f2r(b));
  endfunction
  function automatic logic [31:0] rmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction
  function automatic logic [31:0] rdiv(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) / f2r(b));
  endfunction

  // Random float32 with magnitude in [2^(lo-127), 2^(hi-127)) and random sign.
  function automatic logic [31:0] rand_f32(input int lo, input int hi);
    int e;
    e = lo + int'($urandom_range(hi - lo - 1));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
