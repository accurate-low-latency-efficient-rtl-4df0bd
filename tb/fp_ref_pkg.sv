// fp_ref_pkg: reference conversions between FP32 bit patterns and real, for
// the testbenches. They go through the IEEE double bit pattern, so f2r is
// exact and r2f rounds to nearest even (subnormals flushed to zero, like the
// design).
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [52:0] m;
    logic [24:0] mr;
    int          e;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    g = m[28];
    st = |m[27:0];
    mr = {1'b0, m[52:29]} + 25'((g && (st || m[29])) ? 1 : 0);
    if (mr[24]) begin mr = mr >> 1; e++; end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), mr[22:0]};
  endfunction

  // random FP32 with magnitude in [2^lo, 2^hi)
  function automatic logic [31:0] rand_f(input int lo, input int hi);
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(127 + lo + int'($urandom % 32'(hi - lo)));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

  function automatic real absr(input real r);
    return r < 0.0 ? -r : r;
  endfunction

  // |a-b| <= tol * max(1, |b|)
  function automatic bit close(input real a, input real b, input real tol);
    real m;
    m = absr(b) > 1.0 ? absr(b) : 1.0;
    return absr(a - b) <= tol * m;
  endfunction

  function automatic real sigmoid_plan(input real x);
    real ax, y;
    ax = absr(x);
    if (ax >= 5.0)        y = 1.0;
    else if (ax >= 2.375) y = ax / 32.0 + 0.84375;
    else if (ax >= 1.0)   y = ax / 8.0 + 0.625;
    else                  y = ax / 4.0 + 0.5;
    return x < 0.0 ? 1.0 - y : y;
  endfunction

endpackage
