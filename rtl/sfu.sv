// sfu: Special Function Unit that computes softmax next to the VPUs.
//
// The unit has an adder array and a multiplier array as wide as the VPU tile
// (LANES), an adder tree for the sum reduction, an exponent look-up unit and
// a reciprocal look-up unit (the paper's list of SFU parts). Softmax over a
// score vector of any length is done in two sweeps of LANES-wide chunks:
//   op SFU_EXP  : y_i = exp(x_i - bias); the adder tree sums the chunk and the
//                 running sum register accumulates it (clear with sum_clr).
//   op SFU_NORM : y_i = x_i * (1 / sum), the reciprocal taken from the LUT.
// For the GPU-PNM hybrid mode the running sum is also an output, so that the
// partial exponent sums of the PNM and the GPU can be combined as in
// FlashAttention before the outputs are rescaled.
// exp(t) is built as 2^(t*log2 e): the multiplier array scales by log2 e, the
// integer part of the result sets the exponent and a 64-entry table of
// 2^(k/64) gives the mantissa (|error| < 1.1 %). The reciprocal table has
// 1024 entries, one per FP16 mantissa. Both tables are computed at
// elaboration from their formulas. Table sizes, the two-sweep scheme and the
// bias input (the caller passes the row maximum or a bound on it) are this
// design's choices; the paper gives only the unit list.
// Lanes whose lane_en bit is 0 give 0 and do not enter the sum.
// Timing: y/out_valid two cycles after in_valid; sum is updated in the same
// cycle y is valid and is readable from the next cycle, so SFU_NORM must be
// issued only after the last SFU_EXP result has come out.
module sfu
  import fp16_pkg::*;
#(
  parameter int LANES = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             op_norm,    // 0: SFU_EXP, 1: SFU_NORM
  input  fp16_t            bias,
  input  logic [LANES-1:0] lane_en,
  input  fp16_t            x [LANES],
  input  logic             sum_clr,
  output logic             out_valid,
  output fp16_t            y [LANES],
  output fp16_t            sum
);
  localparam int LEVELS = $clog2(LANES);

  // ---------- look-up tables, computed at elaboration ----------
  typedef logic [63:0][9:0]   exp_lut_t;
  typedef logic [1023:0][9:0] rcp_lut_t;

  // mant[k] = round(1024 * (2^(k/64) - 1)); 2^(1/64) in Q30 = 1085434106
  function automatic exp_lut_t build_exp_lut();
    exp_lut_t t;
    longint   v;
    v = longint'(1) << 30;
    for (int k = 0; k < 64; k++) begin
      t[k] = 10'((v - (longint'(1) << 30) + (longint'(1) << 19)) >> 20);
      v    = (v * 64'sd1085434106) >>> 30;
    end
    return t;
  endfunction

  // mant[m] = round(2^21 / (1024 + m)) - 1024 for m > 0
  function automatic rcp_lut_t build_rcp_lut();
    rcp_lut_t t;
    t[0] = 10'd0;
    for (int m = 1; m < 1024; m++)
      t[m] = 10'(((longint'(1) << 22) / (longint'(1024) + longint'(m)) + 1) / 2 - 1024);
    return t;
  endfunction

  localparam exp_lut_t EXP_LUT = build_exp_lut();
  localparam rcp_lut_t RCP_LUT = build_rcp_lut();

  // 2^z for FP16 z
  function automatic fp16_t exp2_lut(input fp16_t z);
    int          e, n, ee;
    logic [5:0]  f;
    logic [31:0] mag;
    e = int'(z[14:10]);
    if (e == 0) return FP16_ONE;
    if (e >= 19) return z[15] ? FP16_ZERO : FP16_POS_INF;   // |z| >= 16
    mag = 32'({1'b1, z[9:0]}) >> (19 - e);                   // |z| * 64
    n   = int'(mag >> 6);
    f   = mag[5:0];
    if (!z[15]) begin
      ee = 15 + n;
      if (ee >= 31) return FP16_POS_INF;
      return {1'b0, 5'(ee), EXP_LUT[f]};
    end
    if (f == 6'd0) begin
      ee = 15 - n;
      if (ee <= 0) return FP16_ZERO;
      return {1'b0, 5'(ee), 10'd0};
    end
    ee = 14 - n;
    if (ee <= 0) return FP16_ZERO;
    return {1'b0, 5'(ee), EXP_LUT[6'(64 - int'(f))]};
  endfunction

  function automatic fp16_t recip_lut(input fp16_t s);
    int ee;
    if (s[14:10] == 5'd0)  return {s[15], 5'h1F, 10'd0};
    if (s[14:10] == 5'h1F) return {s[15], 15'd0};
    ee = (s[9:0] == 10'd0) ? 30 - int'(s[14:10]) : 29 - int'(s[14:10]);
    if (ee <= 0)  return {s[15], 15'd0};
    if (ee >= 31) return {s[15], 5'h1F, 10'd0};
    return {s[15], 5'(ee), RCP_LUT[s[9:0]]};
  endfunction

  // ---------- stage 1: adder array ----------
  fp16_t            t_q [LANES];
  logic             v1, norm1;
  logic [LANES-1:0] en1;
  fp16_t            rcp_q;

  always_ff @(posedge clk) begin
    for (int i = 0; i < LANES; i++)
      t_q[i] <= op_norm ? x[i] : fp16_add(x[i], bias ^ 16'h8000);
    rcp_q <= recip_lut(sum);
    en1   <= lane_en;
    norm1 <= op_norm;
  end

  // ---------- stage 2: multiplier array + exponent LUT ----------
  fp16_t y_d [LANES];
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      if (!en1[i])    y_d[i] = FP16_ZERO;
      else if (norm1) y_d[i] = fp16_mul(t_q[i], rcp_q);
      else            y_d[i] = exp2_lut(fp16_mul(t_q[i], FP16_LOG2E));
    end
  end

  always_ff @(posedge clk) begin
    y <= y_d;
  end

  // ---------- adder tree over the exponentials ----------
  fp16_t tree [2*LANES-1];
  always_comb begin
    for (int i = 0; i < LANES; i++) tree[LANES-1+i] = y_d[i];
    for (int i = LANES - 2; i >= 0; i--) tree[i] = fp16_add(tree[2*i+1], tree[2*i+2]);
  end

  logic v2_exp;
  assign v2_exp = v1 && !norm1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
      sum       <= FP16_ZERO;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
      if (sum_clr)     sum <= FP16_ZERO;
      else if (v2_exp) sum <= fp16_add(sum, tree[0]);
    end
  end

  initial assert ((1 << LEVELS) == LANES) else $error("sfu: LANES must be a power of two");
endmodule
