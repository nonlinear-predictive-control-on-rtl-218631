// tb_fp_pkg: reference conversions between single-precision bit patterns and
// SystemVerilog reals (double precision), used by the testbenches to work out
// expected results independently of the RTL. r2f rounds to nearest even and
// flushes results below the normal range to zero, as the RTL does.
package tb_fp_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], {3'b000, f[30:23]} + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic        g, st;
    logic [24:0] rnd;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:29]};
    g = d[28];
    st = |d[27:0];
    rnd = {1'b0, m} + {24'd0, (g & (st | m[0]))};
    if (rnd[24]) begin rnd = rnd >> 1; e = e + 1; end
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), rnd[22:0]};
  endfunction

  // distance in units of the last place between two finite floats of equal sign
  function automatic int unsigned ulp_diff(logic [31:0] a, logic [31:0] b);
    int signed ia, ib;
    ia = a[31] ? -int'(a[30:0]) : int'(a[30:0]);
    ib = b[31] ? -int'(b[30:0]) : int'(b[30:0]);
    return (ia > ib) ? int'(ia - ib) : int'(ib - ia);
  endfunction

  // random normal float with exponent in [127-er, 127+er]
  function automatic logic [31:0] rand_fp(int er);
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(127 - er + int'($urandom_range(0, 2 * er)));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

endpackage
