// fp_ref_pkg: testbench reference arithmetic for IEEE-754 single precision.
//
// Converts between 32-bit patterns and real numbers, and rounds a real to the
// nearest single-precision value (ties to even), flushing results below the
// normal range to zero as the hardware does. A single add or multiply of two
// singles done in double precision and then rounded this way gives the
// correctly rounded single result.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [24:0] m;
    int          e;
    logic        g, st;
    if (r == 0.0) return 32'd0;
    d  = $realtobits(r);
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  // random normal single in +-[2^-4, 2^4)
  function automatic logic [31:0] frand();
    return {1'($urandom), 8'($urandom_range(123, 130)), 23'($urandom)};
  endfunction

endpackage
