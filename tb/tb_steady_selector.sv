// tb_steady_selector: first replays the toy example of the steady-selection
// figure (Top-K order 1,8,9,3; GPU holds pages 1 and 10; two slots): page 10
// must be evicted, page 8 recalled into its slot, and P must become {1,8}.
// Then it runs random selection steps and compares the recall pairs, counts
// and the new resident set with a reference model of Algorithm 1
// (evict = P - S[:K]; recall = first |evict| (+ free slots) of S[:K] - P).
module tb_steady_selector;
  localparam int NPAGES = 32768, K = 128, IDX_W = 16;

  logic clk = 0, rst_n = 0;
  logic start, clear, in_valid, in_last, busy, done;
  logic pair_valid, pair_slot_valid;
  logic [IDX_W-1:0] cap, in_idx, pair_slot, pair_recall, n_evict, n_recall;
  logic [NPAGES-1:0] resident_mask, recall_mask;
  int checks = 0, failures = 0;

  steady_selector #(.NPAGES(NPAGES), .K(K), .IDX_W(IDX_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit ref_p [int];          // reference resident set
  int pairs_slot [$], pairs_rec [$], pairs_sv [$];

  always @(posedge clk) if (pair_valid) begin
    pairs_slot.push_back(int'(pair_slot));
    pairs_rec.push_back(int'(pair_recall));
    pairs_sv.push_back(int'(pair_slot_valid));
  end

  task automatic step(input int topk [$], input int capv);
    int ev [$], rc [$], free_slots, nfill, ne, k;
    bit in_t [int];
    foreach (topk[i]) in_t[topk[i]] = 1;
    foreach (ref_p[p]) if (!in_t.exists(p)) ev.push_back(p);
    ne = ev.size();
    free_slots = capv - ref_p.size();
    nfill = ne + ((free_slots > 0) ? free_slots : 0);
    foreach (topk[i]) if (!ref_p.exists(topk[i]) && rc.size() < nfill) rc.push_back(topk[i]);
    pairs_slot.delete(); pairs_rec.delete(); pairs_sv.delete();
   
    @(negedge clk); start = 1; cap = IDX_W'(capv); @(negedge clk); start = 0;
    foreach (topk[i]) begin
      in_valid = 1; in_idx = IDX_W'(topk[i]); in_last = (i == topk.size() - 1);
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    while (!done) @(negedge clk);
    chk(n_evict == IDX_W'(ne), $sformatf("n_evict %0d exp %0d", n_evict, ne));
    chk(n_recall == IDX_W'(rc.size()), $sformatf("n_recall %0d exp %0d", n_recall, rc.size()));
    chk(pairs_rec.size() == rc.size(), "pair count");
    k = 0;
    foreach (rc[i]) if (i < pairs_rec.size()) begin
      chk(pairs_rec[i] == rc[i], $sformatf("recall %0d got %0d exp %0d", i, pairs_rec[i], rc[i]));
      if (i < ne) chk(pairs_sv[i] == 1 && pairs_slot[i] == ev[i], $sformatf("slot %0d got %0d exp %0d", i, pairs_slot[i], ev[i]));
      else        chk(pairs_sv[i] == 0, "free slot fill");
    end
    foreach (ev[i]) ref_p.delete(ev[i]);
    foreach (rc[i]) ref_p[rc[i]] = 1;
    k = 0;
    for (int p = 0; p < NPAGES; p++) begin
      if (resident_mask[p] != ref_p.exists(p)) k++;
    end
    chk(k == 0, $sformatf("resident mask differs in %0d pages", k));
  endtask

  initial begin
    int tk [$];
    start = 0; clear = 0; in_valid = 0; in_last = 0; in_idx = '0; cap = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // put pages 1 and 10 on the GPU
    step('{1, 10}, 2);
    chk(resident_mask[1] && resident_mask[10], "initial fill");
    // toy example
    step('{1, 8, 9, 3}, 2);
    chk(recall_mask[8] && $countones(recall_mask) == 1, "updated mask = {8}");
    chk(resident_mask[1] && resident_mask[8] && !resident_mask[10], "P = {1,8}");
    // random steps on a drifting working set
    @(negedge clk); clear = 1; @(negedge clk); clear = 0; ref_p.delete();
    for (int s = 0; s < 12; s++) begin
      bit seen [int];
      tk.delete(); seen.delete();
      while (tk.size() < K) begin
        int p;
        p = (s * 20 + int'($urandom_range(0, 400))) % NPAGES;
        if (!seen.exists(p)) begin seen[p] = 1; tk.push_back(p); end
      end
      step(tk, 48);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
