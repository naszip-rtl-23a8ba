// tb_fp_pkg: testbench helpers that convert between FP32 bit patterns and
// real numbers, independently of the FP32 functions of the design, so that
// testbenches can compute reference distances in double precision.
//   f2r(bits)   exact value of an FP32 pattern (subnormals read as zero)
//   r2f(x)      nearest FP32 pattern of a real (round to nearest even)
//   close(a,b)  a and b agree to a relative 1e-4 (or both are below 1e-20)
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic [10:0] e;
    logic [52:0] m;
    logic [23:0] mr;
    logic [8:0]  es;
    logic        g, st;
    if (x == 0.0) return 32'd0;
    d  = $realtobits(x);
    e  = d[62:52];
    m  = {1'b1, d[51:0]};
    g  = m[28];
    st = |m[27:0];
    mr = {1'b0, m[51:29]} + 24'(g && (st || m[29]));
    es = 9'(e) - 9'd1023 + 9'd127;
    if (mr[23]) es = es + 9'd1;
    if ($signed({1'b0, es}) <= 0) return 32'd0;
    return {d[63], es[7:0], mr[22:0]};
  endfunction

  function automatic logic close(input real a, input real b);
    real diff, mag;
    diff = (a > b) ? a - b : b - a;
    mag  = (a < 0.0 ? -a : a) + (b < 0.0 ? -b : b);
    return (mag < 1e-20) || (diff <= 1e-4 * mag);
  endfunction

endpackage
