// vpu_pkg: configuration encodings of the reconfigurable Vector Processing
// Unit (VPU).
//
// The VPU has three operating patterns: GEMV for the attention products
// (QK^T and SV), digest generation (per-page min/max) and score estimation
// (inner product of the query with the min and max digests, keeping the
// larger one per channel). Digest generation needs both a max and a min pass,
// so this design splits it into DIGEST_MAX and DIGEST_MIN. The encodings are
// this design's own.
package vpu_pkg;

  // Configurable-array element (M/C unit)
  typedef enum logic [1:0] {
    MC_MUL = 2'd0,
    MC_MAX = 2'd1,
    MC_MIN = 2'd2
  } mc_op_e;

  // Configurable-tree element (A/C unit)
  typedef enum logic [1:0] {
    AC_ADD = 2'd0,
    AC_MAX = 2'd1,
    AC_MIN = 2'd2
  } ac_op_e;

  typedef enum logic [1:0] {
    VPU_GEMV       = 2'd0,
    VPU_DIGEST_MAX = 2'd1,
    VPU_DIGEST_MIN = 2'd2,
    VPU_SCORE      = 2'd3
  } vpu_mode_e;

  function automatic mc_op_e mc_op_of(input vpu_mode_e m);
    case (m)
      VPU_DIGEST_MAX: return MC_MAX;
      VPU_DIGEST_MIN: return MC_MIN;
      default:        return MC_MUL;
    endcase
  endfunction

  // Tree level 1 is the level fed by the array.
  function automatic ac_op_e ac_op_of(input vpu_mode_e m, input int level);
    case (m)
      VPU_DIGEST_MAX: return AC_MAX;
      VPU_DIGEST_MIN: return AC_MIN;
      VPU_SCORE:      return (level == 1) ? AC_MAX : AC_ADD;
      default:        return AC_ADD;
    endcase
  endfunction

endpackage
