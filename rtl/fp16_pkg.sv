// fp16_pkg: IEEE 754 binary16 arithmetic shared by every compute unit of the
// KV-cache manager (VPU M/C and A/C units, SFU, Top-K sorter).
//
// All compute units of the accelerator work in FP16. The functions here are
// combinational and synthesizable:
//   fp16_mul / fp16_add : round-to-nearest-even, subnormal inputs and results
//                         flushed to zero, overflow saturates to +/-infinity,
//                         NaN inputs are not treated specially.
//   fp16_gt, fp16_max, fp16_min : ordering of finite values and infinities.
//   fp16_key            : maps an FP16 value to an unsigned key with the same
//                         order, used by the sorter.
// The FP16 format follows the paper; flush-to-zero, saturation and NaN
// handling are choices of this design (the paper does not state them).
package fp16_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO    = 16'h0000;
  localparam fp16_t FP16_ONE     = 16'h3C00;
  localparam fp16_t FP16_POS_INF = 16'h7C00;
  localparam fp16_t FP16_NEG_INF = 16'hFC00;
  localparam fp16_t FP16_LOG2E   = 16'h3DC5;  // 1.4424 ~ log2(e)

  // Unsigned key whose order equals the numeric order of FP16 values.
  function automatic logic [15:0] fp16_key(input fp16_t a);
    return a[15] ? ~a : (a | 16'h8000);
  endfunction

  function automatic logic fp16_gt(input fp16_t a, input fp16_t b);
    return fp16_key(a) > fp16_key(b);
  endfunction

  function automatic fp16_t fp16_max(input fp16_t a, input fp16_t b);
    return fp16_gt(b, a) ? b : a;
  endfunction

  function automatic fp16_t fp16_min(input fp16_t a, input fp16_t b);
    return fp16_gt(a, b) ? b : a;
  endfunction

  // Round a normalised significand (bit 13 = hidden one, bits 2:0 = guard,
  // round, sticky) with biased exponent e to FP16.
  function automatic fp16_t fp16_pack(input logic s, input int e, input logic [13:0] m);
    logic [11:0] r;
    int          ee;
    logic        up;
    up = m[2] & (m[1] | m[0] | m[3]);
    r  = {1'b0, m[13:3]} + {11'd0, up};
    ee = e;
    if (r[11]) begin
      ee = ee + 1;
      r  = r >> 1;
    end
    if (ee <= 0)  return {s, 15'd0};
    if (ee >= 31) return {s, 5'h1F, 10'd0};
    return {s, ee[4:0], r[9:0]};
  endfunction

  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    logic        s;
    logic [10:0] ma, mb;
    logic [21:0] p;
    logic [13:0] m;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return {s, 15'd0};
    if (a[14:10] == 5'h1F || b[14:10] == 5'h1F) return {s, 5'h1F, 10'd0};
    ma = {1'b1, a[9:0]};
    mb = {1'b1, b[9:0]};
    p  = ma * mb;
    e  = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) begin
      e = e + 1;
      m = {p[21:9], |p[8:0]};
    end else begin
      m = {p[20:8], |p[7:0]};
    end
    return fp16_pack(s, e, m);
  endfunction

  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    fp16_t       x, y;
    logic [14:0] mx, my, sum;
    logic [13:0] m;
    int          d, e, lz;
    logic        st;
    if (a[14:10] == 5'd0) return (b[14:10] == 5'd0) ? (a & b & 16'h8000) : b;
    if (b[14:10] == 5'd0) return a;
    if (a[14:10] == 5'h1F) return a;
    if (b[14:10] == 5'h1F) return b;
    // x has the larger magnitude
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = int'(x[14:10]) - int'(y[14:10]);
    mx = {1'b0, 1'b1, x[9:0], 3'b000};
    my = {1'b0, 1'b1, y[9:0], 3'b000};
    if (d > 13) begin
      my = 15'd1;                       // only sticky survives
    end else if (d > 0) begin
      st = 1'b0;
      for (int i = 0; i < 14; i++) if (i < d && my[i]) st = 1'b1;
      my = (my >> d) | {14'd0, st};
    end
    e = int'(x[14:10]);
    if (x[15] == y[15]) begin
      sum = mx + my;
      if (sum[14]) begin
        m = {sum[14:2], sum[1] | sum[0]};
        e = e + 1;
      end else begin
        m = sum[13:0];
      end
    end else begin
      sum = mx - my;
      if (sum == 15'd0) return FP16_ZERO;
      lz = 0;
      for (int i = 13; i >= 0; i--) begin
        if (sum[i]) break;
        lz = lz + 1;
      end
      m = sum[13:0] << lz;
      e = e - lz;
    end
    return fp16_pack(x[15], e, m);
  endfunction

endpackage
