// tb_sfu: runs a softmax over a score row of 2*LANES entries (the second
// chunk with a few lanes disabled) through the SFU's two sweeps and compares
// the exponentials, the running sum and the normalised outputs with real
// exp() references. Also checks the 2-cycle latency and sum clearing.
module tb_sfu;
  import fp16_pkg::*;
  import tb_fp16_pkg::*;

  localparam int LANES = 128;
  localparam int NCH   = 2;

  logic             clk = 0, rst_n = 0;
  logic             in_valid, op_norm, sum_clr, out_valid;
  fp16_t            bias;
  logic [LANES-1:0] lane_en;
  fp16_t            x [LANES], y [LANES];
  fp16_t            sum;
  int checks = 0, failures = 0;

  sfu #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  fp16_t            sc  [NCH][LANES];
  fp16_t            ex  [NCH][LANES];
  logic [LANES-1:0] en  [NCH];
  real              mx, tot;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input bit nrm, input int c);
    @(negedge clk);
    in_valid = 1; op_norm = nrm; lane_en = en[c];
    x = nrm ? ex[c] : sc[c];
    @(negedge clk);
    in_valid = 0;
    chk(!out_valid, "no early result");
    @(posedge clk); #1;
    chk(out_valid, "2-cycle latency");
  endtask

  initial begin
    in_valid = 0; op_norm = 0; sum_clr = 0; bias = '0; lane_en = '0;
    foreach (x[i]) x[i] = '0;
    mx = -100.0;
    for (int c = 0; c < NCH; c++) begin
      en[c] = '1;
      for (int i = 0; i < LANES; i++) begin
        sc[c][i] = r2h(real'(int'($urandom_range(0, 8000)) - 4000) / 1000.0);
        if (c == NCH - 1 && i >= LANES - 5) en[c][i] = 1'b0;
        if (en[c][i] && h2r(sc[c][i]) > mx) mx = h2r(sc[c][i]);
      end
    end
    bias = r2h(mx);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); sum_clr = 1; @(negedge clk); sum_clr = 0;
    chk(sum == FP16_ZERO, "sum cleared");
    tot = 0.0;
    for (int c = 0; c < NCH; c++) begin
      issue(0, c);
      for (int i = 0; i < LANES; i++) begin
        real r;
        r = en[c][i] ? $exp(h2r(sc[c][i]) - h2r(bias)) : 0.0;
        tot += r;
        ex[c][i] = y[i];
        chk(close(h2r(y[i]), r, 0.015, 1.0e-4), $sformatf("exp c%0d l%0d got %f exp %f", c, i, h2r(y[i]), r));
      end
    end
    @(posedge clk); #1;
    chk(close(h2r(sum), tot, 0.02, 0.0), $sformatf("sum %f vs %f", h2r(sum), tot));
    for (int c = 0; c < NCH; c++) begin
      issue(1, c);
      for (int i = 0; i < LANES; i++) begin
        real r;
        r = en[c][i] ? $exp(h2r(sc[c][i]) - h2r(bias)) / tot : 0.0;
        chk(close(h2r(y[i]), r, 0.04, 1.0e-4), $sformatf("softmax c%0d l%0d got %f exp %f", c, i, h2r(y[i]), r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
