// fp_ref_pkg: reference single-precision arithmetic for the testbenches.
//
// Values are widened to double precision, where the sum or product of two
// single-precision numbers is rounded at most once more when narrowed again;
// since double carries more than twice the single-precision significand plus
// two bits, narrowing with round-to-nearest-even then gives the correctly
// rounded single-precision result. Narrowing flushes results below the
// normal range to signed zero, matching the accelerator's number handling.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return f[31] ? -0.0 : 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
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
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hFF, 23'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] f_add(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] f_mul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // Random normal number with exponent in [127-erange, 127+erange].
  function automatic logic [31:0] rand_f(input int erange);
    int e;
    e = 127 - erange + int'($urandom_range(2 * erange));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
