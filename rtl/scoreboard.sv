// scoreboard: dependency tracking for the in-order instruction issue of the
// KV-manager controller.
//
// Each instruction names the execution unit it needs and a mask of shared
// resources it reads or writes (buffers, query register, Top-K list, steady
// state). An instruction may issue when its unit is idle and none of its
// resources is held by an instruction still in flight; otherwise the
// controller stalls. On issue the unit and its resources are marked busy; the
// unit's completion pulse releases both. This gives independent
// instructions (for example a DMA load and a softmax on another buffer)
// parallel execution while ordering every true, anti and output dependency.
// The paper states only that a hardware scoreboard tracks inter-instruction
// dependencies; holding whole resources is this design's policy.
// Timing: can_issue is combinational; issue and complete act at the clock edge.
module scoreboard #(
  parameter int NUNITS = 5,
  parameter int NRES   = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [$clog2(NUNITS)-1:0] req_unit,
  input  logic [NRES-1:0]   req_res,
  output logic              can_issue,
  input  logic              issue,
  input  logic [NUNITS-1:0] complete,
  output logic [NUNITS-1:0] unit_busy,
  output logic [NRES-1:0]   res_busy
);
  logic [NRES-1:0] held [NUNITS];

  assign can_issue = !unit_busy[req_unit] && ((res_busy & req_res) == '0);

  always_comb begin
    res_busy = '0;
    for (int u = 0; u < NUNITS; u++) if (unit_busy[u]) res_busy |= held[u];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      unit_busy <= '0;
      for (int u = 0; u < NUNITS; u++) held[u] <= '0;
    end else begin
      for (int u = 0; u < NUNITS; u++)
        if (complete[u]) begin
          unit_busy[u] <= 1'b0;
          held[u]      <= '0;
        end
      if (issue && can_issue) begin
        unit_busy[req_unit] <= 1'b1;
        held[req_unit]      <= req_res;
      end
    end
  end

  a_issue_ok: assert property (@(posedge clk) disable iff (!rst_n) issue |-> can_issue);
  a_complete_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (complete & ~unit_busy) == '0);
endmodule
