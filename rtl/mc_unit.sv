// mc_unit: one element of the VPU's configurable array (the "M/C unit").
//
// It holds an FP16 multiplier and an FP16 comparator side by side; input
// multiplexers steer the operand pair to one of them and an output
// multiplexer returns its result. The comparator returns the larger (MC_MAX)
// or the smaller (MC_MIN) operand. The M/C structure follows the paper's VPU
// figure; the min/max selection on the comparator is this design's way of
// serving both halves of digest generation.
// Purely combinational: y is valid in the same cycle as a, b and op.
module mc_unit
  import fp16_pkg::*;
  import vpu_pkg::*;
(
  input  mc_op_e op,
  input  fp16_t  a,
  input  fp16_t  b,
  output fp16_t  y
);
  fp16_t mul_y, cmp_y;

  always_comb begin
    mul_y = fp16_mul(a, b);
    cmp_y = (op == MC_MIN) ? fp16_min(a, b) : fp16_max(a, b);
    y     = (op == MC_MUL) ? mul_y : cmp_y;
  end
endmodule
