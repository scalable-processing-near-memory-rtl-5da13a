// tb_topk_merge_sorter: streams random page scores (with duplicates, a
// partial last chunk and two rounds) into the sorter and checks the streamed
// Top-K indices and scores against a reference stable selection sort, the
// reported count, and the done timing (two cycles after the last chunk).
module tb_topk_merge_sorter;
  import fp16_pkg::*;
  import tb_fp16_pkg::*;

  localparam int K = 128, W = 16, IDX_W = 16;

  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_last, done, out_valid, out_ready;
  logic [W-1:0] in_en;
  fp16_t in_score [W];
  logic [IDX_W-1:0] in_idx [W];
  logic [$clog2(K+1)-1:0] out_count;
  logic [IDX_W-1:0] out_idx;
  fp16_t out_score;
  int checks = 0, failures = 0;

  topk_merge_sorter #(.K(K), .W(W), .IDX_W(IDX_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n);
    fp16_t sc [];
    int    ord [];
    bit    used [];
    int    nchunks, got;
    sc = new[n]; ord = new[n]; used = new[n];
    for (int i = 0; i < n; i++) begin
      sc[i] = r2h(real'(int'($urandom_range(0, 400)) - 200) / 16.0);
      used[i] = 0;
    end
    // reference: stable selection of the best first
    for (int r = 0; r < n; r++) begin
      int b;
      b = -1;
      for (int i = 0; i < n; i++)
        if (!used[i] && (b < 0 || h2r(sc[i]) > h2r(sc[b]))) b = i;
      used[b] = 1; ord[r] = b;
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    nchunks = (n + W - 1) / W;
    for (int c = 0; c < nchunks; c++) begin
      in_valid = 1; in_last = (c == nchunks - 1);
      for (int j = 0; j < W; j++) begin
        int g;
        g = c * W + j;
        in_en[j] = g < n;
        in_score[j] = (g < n) ? sc[g] : 16'h7BFF;
        in_idx[j] = IDX_W'(g);
      end
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    chk(!done, "done not early");
    @(negedge clk);
    chk(done, "done two cycles after last chunk");
    chk(out_count == ((n < K) ? n : K), $sformatf("count %0d", out_count));
    got = 0;
    out_ready = 1;
    while (out_valid) begin
      chk(out_idx == IDX_W'(ord[got]) && out_score == sc[ord[got]],
          $sformatf("rank %0d idx %0d exp %0d", got, out_idx, ord[got]));
      got++;
      @(negedge clk);
    end
    out_ready = 0;
    chk(got == ((n < K) ? n : K), "stream length");
  endtask

  initial begin
    start = 0; in_valid = 0; in_last = 0; out_ready = 0; in_en = '0;
    foreach (in_score[j]) begin in_score[j] = '0; in_idx[j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(300);
    run(1000);
    run(37);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
