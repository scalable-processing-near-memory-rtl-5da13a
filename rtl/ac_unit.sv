// ac_unit: one node of the VPU's configurable reduction tree (the "A/C unit").
//
// It holds an FP16 adder and an FP16 comparator; the operation select picks
// the sum (AC_ADD), the larger (AC_MAX) or the smaller (AC_MIN) of the two
// children. Structure after the paper's VPU figure; the min option is this
// design's addition for the min half of digest generation.
// Purely combinational.
module ac_unit
  import fp16_pkg::*;
  import vpu_pkg::*;
(
  input  ac_op_e op,
  input  fp16_t  a,
  input  fp16_t  b,
  output fp16_t  y
);
  fp16_t add_y, cmp_y;

  always_comb begin
    add_y = fp16_add(a, b);
    cmp_y = (op == AC_MIN) ? fp16_min(a, b) : fp16_max(a, b);
    y     = (op == AC_ADD) ? add_y : cmp_y;
  end
endmodule
