// tb_fp_pkg -- FP32 reference arithmetic for the testbenches.
//
// Converts between IEEE-754 single-precision bit patterns and SystemVerilog
// real (double) without using the design's own arithmetic: a single-precision
// value is widened exactly to double, the operation is done in double, and
// the result is rounded back to single precision (round to nearest even,
// subnormals flushed to zero, like the design). ulp_diff measures how far two
// results are apart.
package tb_fp_pkg;
  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [23:0] m;
    logic [28:0] rem;
    int e;
    if (r == 0.0) return 32'd0;
    d   = $realtobits(r);
    e   = int'(d[62:52]) - 1023 + 127;
    m   = {1'b0, d[51:29]};
    rem = d[28:0];
    if (rem > 29'h1000_0000 || (rem == 29'h1000_0000 && m[0])) m = m + 24'd1;
    if (m[23]) begin m = 24'd0; e = e + 1; end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // random value with magnitude about 2^-4 .. 2^4
  function automatic logic [31:0] rand_f();
    logic [31:0] r;
    r = $urandom;
    return {r[31], 8'(8'd123 + 8'($urandom_range(0, 8))), r[22:0]};
  endfunction

  function automatic int ulp_diff(input logic [31:0] a, input logic [31:0] b);
    int ia, ib;
    if ($isunknown(a) || $isunknown(b)) return 32'h7fffffff;   // X or Z never matches
    ia = a[31] ? -int'(a[30:0]) : int'(a[30:0]);
    ib = b[31] ? -int'(b[30:0]) : int'(b[30:0]);
    return (ia > ib) ? ia - ib : ib - ia;
  endfunction
endpackage
