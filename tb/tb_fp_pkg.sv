// tb_fp_pkg: conversions between real numbers and IEEE-754 single-precision
// bit patterns for the testbenches, done through the double-precision bit
// pattern so that no simulator support for shortreal is needed.
// r2f rounds to nearest even and flushes results below the normal range to
// zero, matching the arithmetic units; f2r is exact.
package tb_fp_pkg;

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [22:0] m;
    logic        g, st;
    logic [23:0] mr;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 0) return {s, 31'd0};
    if (d[62:52] == 11'h7ff) return (d[51:0] != 0) ? 32'h7fc0_0000 : {s, 8'hff, 23'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = d[51:29];
    g  = d[28];
    st = |d[27:0];
    mr = {1'b0, m} + 24'(g && (st || m[0]));
    if (mr[23]) e++;
    if (e >= 255) return {s, 8'hff, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), mr[22:0]};
  endfunction

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    if (f[30:23] == 8'hff) d = {f[31], 11'h7ff, f[22:0], 29'd0};
    else d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // Random normal float with exponent in [127-er, 127+er].
  function automatic logic [31:0] rand_f(input int er);
    int e;
    e = 127 - er + int'($urandom_range(2*er, 0));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
