// tb_fp_pkg -- reference conversions between real numbers and FP32 bit patterns for the
// testbenches. r2f rounds a double to single precision (round to nearest even, subnormals
// flushed to zero); f2r widens an FP32 pattern to a double. Both go through $realtobits and
// $bitstoreal, so the reference does not depend on the RTL's FP32 functions.
package tb_fp_pkg;

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) e = e + 1;
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  function automatic real f2r(input logic [31:0] f);
    logic [10:0] e;
    if (f[30:23] == 8'd0) return 0.0;
    e = 11'(int'(f[30:23]) - 127 + 1023);
    return $bitstoreal({f[31], e, f[22:0], 29'd0});
  endfunction

  // random FP32 value of moderate magnitude: +-[2^-lo_exp .. 2^hi_exp)
  function automatic logic [31:0] rand_fp(input int span);
    logic [7:0] e;
    e = 8'(127 - span + int'($urandom_range(2 * span, 0)));
    return {1'($urandom_range(1, 0)), e, 23'($urandom)};
  endfunction

  // |a-b| in units in the last place (FP32 patterns of the same sign)
  function automatic int ulp_diff(input logic [31:0] a, input logic [31:0] b);
    int ia, ib;
    ia = a[31] ? -int'(a[30:0]) : int'(a[30:0]);
    ib = b[31] ? -int'(b[30:0]) : int'(b[30:0]);
    return (ia > ib) ? ia - ib : ib - ia;
  endfunction

endpackage
