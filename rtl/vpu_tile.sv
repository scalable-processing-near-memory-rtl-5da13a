// vpu_tile: one reconfigurable Vector Processing Unit tile.
//
// A LANES-wide configurable array of M/C units feeds a binary configurable
// tree of LANES-1 A/C units. The mode picks how each level is programmed:
//   GEMV        array = multipliers,  whole tree = adders   -> dot(a, b)
//   DIGEST_MAX  array = comparators,  whole tree = max      -> max of a and b
//   DIGEST_MIN  array = comparators,  whole tree = min      -> min of a and b
//   SCORE       array = multipliers,  tree level 1 = max, rest = adders
//               With lanes 2c and 2c+1 holding (q_c*dmax_c, q_c*dmin_c),
//               the result is sum_c max(q_c*dmax_c, q_c*dmin_c).
// These mappings are the paper's. For LANES = 128 the tile has 128 M/C and
// 127 A/C units (32 tiles give the 4,096 multipliers, 4,064 adders and
// 8,160 comparators the paper lists).
//
// Pipelining (this design's choice): a register after the array and after
// every tree level, so a new vector pair can enter every cycle and its result
// appears LANES_LOG2+1 cycles later on y/y_valid. An optional accumulate step
// (acc = 1) combines the result with the previous accumulated value (sum for
// GEMV/SCORE, max/min for digests); it adds one more cycle and lets vectors
// longer than LANES be processed in several passes. The paper does not
// describe an accumulator; it is this design's.
// Interface: in_valid/mode/acc/a/b in, y_valid/y out after LATENCY cycles.
module vpu_tile
  import fp16_pkg::*;
  import vpu_pkg::*;
#(
  parameter int LANES = 128
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  vpu_mode_e mode,
  input  logic      acc,
  input  fp16_t     a [LANES],
  input  fp16_t     b [LANES],
  output logic      y_valid,
  output fp16_t     y
);
  localparam int LEVELS  = $clog2(LANES);

  // ---------------- configurable array ----------------
  fp16_t     arr_y [LANES];
  fp16_t     arr_q [LANES];
  logic      v_q   [LEVELS+1];
  vpu_mode_e m_q   [LEVELS+1];
  logic      acc_q [LEVELS+1];

  for (genvar i = 0; i < LANES; i++) begin : g_arr
    mc_unit u_mc (.op(mc_op_of(mode)), .a(a[i]), .b(b[i]), .y(arr_y[i]));
  end

  always_ff @(posedge clk) begin
    arr_q <= arr_y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q[0]   <= 1'b0;
      m_q[0]   <= VPU_GEMV;
      acc_q[0] <= 1'b0;
    end else begin
      v_q[0]   <= in_valid;
      m_q[0]   <= mode;
      acc_q[0] <= acc;
    end
  end

  // ---------------- configurable tree ----------------
  for (genvar k = 1; k <= LEVELS; k++) begin : g_lvl
    localparam int N = LANES >> k;
    fp16_t nd_y [N];
    fp16_t nd_q [N];
    for (genvar i = 0; i < N; i++) begin : g_node
      fp16_t ca, cb;
      if (k == 1) begin : g_first
        assign ca = arr_q[2*i];
        assign cb = arr_q[2*i+1];
      end else begin : g_next
        assign ca = g_lvl[k-1].nd_q[2*i];
        assign cb = g_lvl[k-1].nd_q[2*i+1];
      end
      ac_unit u_ac (.op(ac_op_of(m_q[k-1], k)), .a(ca), .b(cb), .y(nd_y[i]));
    end
    always_ff @(posedge clk) begin
      nd_q <= nd_y;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v_q[k]   <= 1'b0;
        m_q[k]   <= VPU_GEMV;
        acc_q[k] <= 1'b0;
      end else begin
        v_q[k]   <= v_q[k-1];
        m_q[k]   <= m_q[k-1];
        acc_q[k] <= acc_q[k-1];
      end
    end
  end

  // ---------------- accumulate / output stage ----------------
  fp16_t root, acc_res;
  assign root = g_lvl[LEVELS].nd_q[0];

  always_comb begin
    case (m_q[LEVELS])
      VPU_DIGEST_MAX: acc_res = fp16_max(y, root);
      VPU_DIGEST_MIN: acc_res = fp16_min(y, root);
      default:        acc_res = fp16_add(y, root);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      y       <= FP16_ZERO;
    end else begin
      y_valid <= v_q[LEVELS];
      if (v_q[LEVELS]) y <= acc_q[LEVELS] ? acc_res : root;
    end
  end

  initial assert (LANES >= 2 && (1 << LEVELS) == LANES)
    else $error("vpu_tile: LANES must be a power of two");
endmodule
