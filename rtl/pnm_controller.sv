// pnm_controller: instruction pipeline of the KV manager.
//
// The host programs a sequence of 64-bit instructions (pnm_pkg) into the
// instruction buffer over CXL.io and starts it. The controller fetches one
// instruction at a time, decodes it, asks the scoreboard whether its unit is
// idle and its resources free, and dispatches it (a one-cycle disp_valid
// pulse to the unit together with the decoded fields). Instructions issue in
// order, but run in parallel on different units as long as they share no
// resource. OP_END waits until every unit is idle and then pulses done, which
// the register file turns into the completion interrupt.
// Fetch, decode, schedule, dispatch and the scoreboard are the paper's
// pipeline stages; the encoding, the buffer depth and the one-instruction-
// per-two-cycles fetch are this design's.
// Interface: ib_we writes one 32-bit half (ib_hi) of entry ib_waddr; start
// begins at entry 0 when idle; stall_cycles counts cycles an instruction
// waited on the scoreboard.
module pnm_controller
  import pnm_pkg::*;
#(
  parameter int IB_DEPTH = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        ib_we,
  input  logic [$clog2(IB_DEPTH)-1:0] ib_waddr,
  input  logic                        ib_hi,
  input  logic [31:0]                 ib_wdata,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic [NUNITS-1:0]           disp_valid,
  output dec_t                        disp,
  input  logic [NUNITS-1:0]           unit_done,
  output logic [31:0]                 stall_cycles
);
  typedef enum logic [1:0] {C_IDLE, C_FETCH, C_ISSUE} cstate_e;
  cstate_e st;

  logic [63:0] ib [IB_DEPTH];
  logic [$clog2(IB_DEPTH)-1:0] pc;
  instr_t ir;
  dec_t   d;

  always_ff @(posedge clk) begin
    if (ib_we) begin
      if (ib_hi) ib[ib_waddr][63:32] <= ib_wdata;
      else       ib[ib_waddr][31:0]  <= ib_wdata;
    end
  end

  assign d = decode(ir);

  // unit and resources of the instruction in the issue stage
  logic [$clog2(NUNITS)-1:0] req_unit;
  logic [NRES-1:0]           req_res;
  always_comb begin
    req_unit = 3'(U_DMA);
    req_res  = '0;
    case (d.op)
      OP_DMA_LD:   begin req_unit = 3'(U_DMA);  req_res[R_MBUF] = 1'b1; end
      OP_DMA_ST:   begin req_unit = 3'(U_DMA);  req_res[R_OBUF] = 1'b1; end
      OP_LDQ:      begin req_unit = 3'(U_VPU);  req_res[R_MBUF] = 1'b1; req_res[R_QREG] = 1'b1; end
      OP_VPU:      begin req_unit = 3'(U_VPU);  req_res[R_MBUF] = 1'b1; req_res[R_QREG] = 1'b1; req_res[R_OBUF] = 1'b1; end
      OP_SFU_EXP,
      OP_SFU_NORM: begin req_unit = 3'(U_SFU);  req_res[R_OBUF] = 1'b1; end
      OP_TOPK:     begin req_unit = 3'(U_TOPK); req_res[R_OBUF] = 1'b1; req_res[R_TOPK] = 1'b1; end
      OP_STEADY:   begin req_unit = 3'(U_STDY); req_res[R_OBUF] = 1'b1; req_res[R_TOPK] = 1'b1; req_res[R_STDY] = 1'b1; end
      default: ;
    endcase
  end

  logic              can_issue, do_issue;
  logic [NUNITS-1:0] unit_busy;
  logic [NRES-1:0]   res_busy;

  scoreboard #(.NUNITS(NUNITS), .NRES(NRES)) u_sb (
    .clk, .rst_n, .req_unit, .req_res, .can_issue,
    .issue(do_issue), .complete(unit_done), .unit_busy, .res_busy
  );

  assign do_issue = (st == C_ISSUE) && (d.op != OP_END) && can_issue;
  assign busy     = (st != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; pc <= '0; ir <= '0; done <= 1'b0; disp_valid <= '0; disp <= '0;
      stall_cycles <= '0;
    end else begin
      done       <= 1'b0;
      disp_valid <= '0;
      case (st)
        C_IDLE: if (start) begin pc <= '0; st <= C_FETCH; stall_cycles <= '0; end
        C_FETCH: begin
          ir <= ib[pc];
          st <= C_ISSUE;
        end
        C_ISSUE: begin
          if (d.op == OP_END) begin
            if (unit_busy == '0 && unit_done == '0) begin
              done <= 1'b1;
              st   <= C_IDLE;
            end
          end else if (can_issue) begin
            disp_valid[req_unit] <= 1'b1;
            disp <= d;
            pc   <= pc + 1'b1;
            st   <= C_FETCH;
          end else begin
            stall_cycles <= stall_cycles + 1;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
