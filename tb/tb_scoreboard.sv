// tb_scoreboard: random test of the issue scoreboard against a reference.
// Each cycle a random instruction (unit, resource mask) is offered and a
// random set of busy units completes; the test keeps its own busy/held model,
// checks can_issue, unit_busy and res_busy against it, and issues whenever
// the DUT allows. It counts stalls caused by a busy unit and by a held
// resource and fails if either never happened. Default sizes (5 units,
// 5 resources) as in the top. The policy checked here is this design's own.
module tb_scoreboard;
  localparam int NU = 5, NR = 5;
  logic clk = 0, rst_n = 0;
  logic [2:0] req_unit;
  logic [NR-1:0] req_res;
  logic can_issue, issue;
  logic [NU-1:0] complete, unit_busy;
  logic [NR-1:0] res_busy;

  scoreboard dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_unit_stall = 0, n_res_stall = 0, n_issue = 0;
  bit m_busy [NU];
  logic [NR-1:0] m_held [NU];

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    foreach (m_busy[u]) begin m_busy[u] = 0; m_held[u] = '0; end
    req_unit = '0; req_res = '0; issue = 0; complete = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      logic [NR-1:0] rb;
      bit exp_ok;
      @(negedge clk);
      req_unit = 3'($urandom_range(0, NU - 1));
      req_res  = NR'($urandom);
      complete = '0;
      for (int u = 0; u < NU; u++) if (m_busy[u] && $urandom_range(0, 3) == 0) complete[u] = 1'b1;
      rb = '0;
      for (int u = 0; u < NU; u++) if (m_busy[u]) rb |= m_held[u];
      exp_ok = !m_busy[req_unit] && ((rb & req_res) == '0);
      #1;
      checks++;
      if (can_issue !== exp_ok || res_busy !== rb) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d can_issue %b exp %b res_busy %b exp %b", c, can_issue, exp_ok, res_busy, rb);
      end
      for (int u = 0; u < NU; u++) begin
        checks++;
        if (unit_busy[u] !== m_busy[u]) failures++;
      end
      if (m_busy[req_unit]) n_unit_stall++;
      else if ((rb & req_res) != '0) n_res_stall++;
      issue = can_issue;
      @(posedge clk);
      for (int u = 0; u < NU; u++) if (complete[u]) begin m_busy[u] = 0; m_held[u] = '0; end
      if (issue) begin m_busy[req_unit] = 1; m_held[req_unit] = req_res; n_issue++; end
    end
    $display("issues=%0d unit_stalls=%0d resource_stalls=%0d", n_issue, n_unit_stall, n_res_stall);
    checks += 3;
    if (n_issue == 0) failures++;
    if (n_unit_stall == 0) failures++;
    if (n_res_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
