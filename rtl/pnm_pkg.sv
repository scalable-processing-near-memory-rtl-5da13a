// pnm_pkg: instruction set and shared constants of the KV-manager controller.
//
// The paper describes an instruction pipeline (buffer, decoder, scheduler,
// scoreboard, dispatch) but not its encoding; the 64-bit format below is
// this design's. Fields by opcode (bits):
//   DMA_LD/DMA_ST [59:56] metadata register holding the DRAM base (in 128-byte
//                 units), [55:32] row offset in 128-byte units, [31:16] buffer
//                 row, [15:0] rows
//   LDQ           [31:16] Matrix/Vector buffer row copied into the query
//                 row register
//   VPU           [57:56] mode, [55:48] rows accumulated per result (0 = 1),
//                 [47:32] first output row, [31:16] first source row,
//                 [15:0] source rows
//   SFU_EXP       [48] clear the running sum, [47:32] FP16 bias,
//                 [31:16] output-buffer row, [15:0] rows
//   SFU_NORM      [31:16] output-buffer row, [15:0] rows
//   TOPK          [31:16] first score row, [15:0] score rows
//   STEADY        [48] empty the resident set first, [47:32] GPU page slots,
//                 [31:16] output row receiving the (slot, recall) pairs
//   END           wait for all units, then raise the completion interrupt
package pnm_pkg;
  typedef enum logic [3:0] {
    OP_END      = 4'd0,
    OP_DMA_LD   = 4'd1,
    OP_DMA_ST   = 4'd2,
    OP_LDQ      = 4'd3,
    OP_VPU      = 4'd4,
    OP_SFU_EXP  = 4'd5,
    OP_SFU_NORM = 4'd6,
    OP_TOPK     = 4'd7,
    OP_STEADY   = 4'd8
  } opcode_e;

  // execution units
  localparam int NUNITS = 5;
  localparam int U_DMA = 0, U_VPU = 1, U_SFU = 2, U_TOPK = 3, U_STDY = 4;
  // resources tracked by the scoreboard
  localparam int NRES = 5;
  localparam int R_MBUF = 0, R_QREG = 1, R_OBUF = 2, R_TOPK = 3, R_STDY = 4;

  typedef logic [63:0] instr_t;

  typedef struct packed {
    opcode_e     op;
    logic [3:0]  reg_sel;
    logic [1:0]  mode;
    logic [7:0]  grp;
    logic        flag;
    logic [15:0] imm;      // [47:32]
    logic [23:0] offset;   // [55:32]
    logic [15:0] row;      // [31:16]
    logic [15:0] cnt;      // [15:0]
  } dec_t;

  function automatic dec_t decode(input instr_t i);
    dec_t d;
    d.op      = opcode_e'(i[63:60]);
    d.reg_sel = i[59:56];
    d.mode    = i[57:56];
    d.grp     = i[55:48];
    d.flag    = i[48];
    d.imm     = i[47:32];
    d.offset  = i[55:32];
    d.row     = i[31:16];
    d.cnt     = i[15:0];
    return d;
  endfunction
endpackage
