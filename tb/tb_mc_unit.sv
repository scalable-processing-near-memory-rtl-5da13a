// tb_mc_unit: checks the M/C unit's multiply, max and min operations against
// real-number arithmetic on random FP16 operands and a few fixed cases.
module tb_mc_unit;
  import fp16_pkg::*;
  import vpu_pkg::*;
  import tb_fp16_pkg::*;

  mc_op_e op;
  fp16_t  a, b, y;
  int checks = 0, failures = 0;

  mc_unit dut (.op(op), .a(a), .b(b), .y(y));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s op=%0d a=%h b=%h y=%h", what, op, a, b, y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fixed cases: 1.5 * -2.0 = -3.0
    op = MC_MUL; a = 16'h3E00; b = 16'hC000; #1;
    chk(y == 16'hC200, "1.5*-2");
    op = MC_MAX; #1; chk(y == 16'h3E00, "max(1.5,-2)");
    op = MC_MIN; #1; chk(y == 16'hC000, "min(1.5,-2)");
    for (int i = 0; i < 2000; i++) begin
      a = rnd_h(-6, 6);
      b = rnd_h(-6, 6);
      op = MC_MUL; #1;
      chk(close(h2r(y), h2r(a) * h2r(b), 1.0/1024.0, 0.0), "mul");
      op = MC_MAX; #1;
      chk(h2r(y) == ((h2r(a) > h2r(b)) ? h2r(a) : h2r(b)), "max");
      op = MC_MIN; #1;
      chk(h2r(y) == ((h2r(a) < h2r(b)) ? h2r(a) : h2r(b)), "min");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
