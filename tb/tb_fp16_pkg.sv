// tb_fp16_pkg: reference conversions between FP16 bit patterns and real
// numbers for the testbenches. They are written independently of the RTL's
// fp16_pkg (plain real arithmetic) so that checks do not reuse the design's
// own functions.
package tb_fp16_pkg;

  function automatic real h2r(input logic [15:0] h);
    int  e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    if (e == 31) m = 1.0e30;
    else         m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  // Nearest FP16 (ties away from zero); values below 2^-14 become zero.
  function automatic logic [15:0] r2h(input real r);
    logic s;
    real  a;
    int   e;
    int   f;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a < 6.103515625e-5) return {s, 15'd0};
    if (a >= 65520.0) return {s, 5'h1F, 10'd0};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    f = int'((a - 1.0) * 1024.0 + 0.5);
    if (f >= 1024) begin f = 0; e++; end
    return {s, 5'(e + 15), 10'(f)};
  endfunction

  // |x - ref| within rel * |ref| + abs_tol
  function automatic bit close(input real x, input real ref_v, input real rel, input real abs_tol);
    real d, m;
    d = x - ref_v; if (d < 0.0) d = -d;
    m = ref_v;     if (m < 0.0) m = -m;
    return d <= rel * m + abs_tol;
  endfunction

  // random FP16 in +/-[2^lo, 2^hi)
  function automatic logic [15:0] rnd_h(input int lo, input int hi);
    logic [4:0] e;
    e = 5'(15 + lo + int'($urandom_range(0, hi - lo - 1)));
    return {1'($urandom), e, 10'($urandom)};
  endfunction

endpackage
