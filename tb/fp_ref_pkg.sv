// fp_ref_pkg -- reference floating point for the testbenches.
//
// Works on the simulator's double precision `real` and rounds to single
// precision by hand (round to nearest even, subnormals flushed to zero), so
// that expected results are computed independently of the RTL's integer
// implementation of fp_mul / fp_add. One double operation followed by one
// rounding to single is exactly the correctly rounded single result for
// add and multiply, because double has more than 2*24+2 mantissa bits.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] q;
    int e;
    logic g, st;
    if (r == 0.0) return 32'h0;
    d  = $realtobits(r);
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    q  = {1'b0, m[52:29]};
    g  = m[28];
    st = |m[27:0];
    q  = q + 25'(g & (st | q[0]));
    if (q[24]) begin q = q >> 1; e++; end
    if (e <= 0)   return {d[63], 31'h0};
    if (e >= 255) return {d[63], 8'hFF, 23'h0};
    return {d[63], 8'(e), q[22:0]};
  endfunction

  function automatic logic [31:0] rmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] radd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  // random float with magnitude in [2^lo, 2^hi)
  function automatic logic [31:0] rand_f(input int lo, input int hi);
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(127 + lo + int'($urandom % 32'(hi - lo)));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

endpackage
