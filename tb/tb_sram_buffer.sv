// tb_sram_buffer: random write/read test of the buffer at a reduced size
// (64 rows of 256 bits) against an array model. Checks the one-cycle
// registered read, that rdata holds while re is low, and read-before-write
// when the same row is written and read in one cycle (counted; fails if it
// never happened). The port structure is this design's own choice.
module tb_sram_buffer;
  localparam int R = 64, W = 256;
  logic clk = 0, we, re;
  logic [5:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;

  sram_buffer #(.ROWS(R), .WIDTH(W)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_same = 0;
  logic [W-1:0] model [R];
  logic [W-1:0] expq;
  bit           expv;

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0; expv = 0;
    // fill every row first
    for (int r = 0; r < R; r++) begin
      @(negedge clk); we = 1; waddr = 6'(r);
      for (int k = 0; k < W / 32; k++) wdata[k*32 +: 32] = $urandom;
      model[r] = wdata;
    end
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      if (expv) begin
        checks++;
        if (rdata !== expq) begin failures++; if (failures < 10) $display("FAIL cycle %0d", c); end
      end
      we = ($urandom_range(0, 1) == 1);
      re = ($urandom_range(0, 2) != 0);
      waddr = 6'($urandom_range(0, R - 1));
      raddr = ($urandom_range(0, 7) == 0) ? waddr : 6'($urandom_range(0, R - 1));
      for (int k = 0; k < W / 32; k++) wdata[k*32 +: 32] = $urandom;
      if (re) begin expq = model[raddr]; expv = 1; end
      if (we && re && waddr == raddr) n_same++;
      if (we) model[waddr] = wdata;
    end
    $display("same-row read/write cycles=%0d", n_same);
    checks++;
    if (n_same == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
