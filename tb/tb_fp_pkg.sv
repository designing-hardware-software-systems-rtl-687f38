// tb_fp_pkg: reference conversions between single-precision bit patterns and
// SystemVerilog reals, used by testbenches to work out expected results
// without the design's arithmetic. Rounding is to nearest even; subnormal
// values are read and produced as zero, as the design does.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic [24:0] m;
    logic        rb, st;
    int          e;
    d = $realtobits(x);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    if (d[62:52] == 11'h7ff) return (d[51:0] == '0) ? {d[63], 8'hff, 23'd0} : 32'h7fc00000;
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    rb = d[28];
    st = (d[27:0] != '0);
    if (rb && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // Distance in units in the last place between two finite values of the same sign.
  function automatic int unsigned ulp_diff(input logic [31:0] x, input logic [31:0] y);
    if (x == y) return 0;
    if (x[31] != y[31]) return 32'hffff_ffff;
    return (x[30:0] > y[30:0]) ? x[30:0] - y[30:0] : y[30:0] - x[30:0];
  endfunction

  // A random normal number with exponent in [127-span, 127+span].
  function automatic logic [31:0] rnd_f(input int span);
    logic [31:0] f;
    f = $urandom;
    f[30:23] = 8'(127 - span + int'($urandom_range(2 * span, 0)));
    return f;
  endfunction

endpackage
