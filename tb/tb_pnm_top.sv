// tb_pnm_top: end-to-end test of the KV-manager top at a reduced size
// (2 tiles of 64 lanes). A behavioural DRAM holds per-page min/max digests
// of a 64-channel head and two queries. The host programs over AHB a
// complete decode step twice:
//   load digests and queries -> score estimation (2 rows accumulated per
//   page) -> Top-K merge sort -> steady selection (recall pairs) -> store
//   scores and pairs -> softmax (exp sweep, normalise sweep) -> store,
// then a digest (max) pass and a GEMV pass. It checks every stored result in
// DRAM against references computed here (real arithmetic for scores, digest,
// GEMV and softmax; a stable sort of the stored scores and Algorithm 1 for
// Top-K and steady selection), while the host keeps reading DRAM through
// CXL.mem so that the memory arbiter sees contention. Mechanisms counted:
// scoreboard stalls, arbiter contention, steady evictions, recalls,
// free-slot fills, the completion interrupt.
// The flow (digest, score, Top-K, steady selection, softmax) follows the
// paper; the program, data layout, sizes and page count are this test's own.
module tb_pnm_top;
  import fp16_pkg::*;
  import axi_pkg::*;
  import pnm_pkg::*;
  import tb_fp16_pkg::*;

  localparam int NT = 2, LN = 64, MROWS = 256, OROWS = 128, KK = 16, KW = 8, NPG = 256;
  localparam int CAP    = 6;
  localparam int NG     = 64;              // page groups
  localparam int NP     = NG * NT;         // pages
  localparam int NSR    = NP / LN;         // score rows
  localparam int LB     = NT * LN * 16 / 1024;   // DRAM lines per MBUF row
  localparam int LBO    = LN * 16 / 1024;        // DRAM lines per OBUF row
  localparam int DH     = LN;              // channels per head (2 rows x LN/2)
  localparam longint B0 = 'h1000, B1 = 'h0800, B2 = 'h4000;

  logic clk = 0, rst_n = 0;
  logic hsel, hwrite, hready, hresp, irq;
  logic [15:0] haddr;
  logic [1:0]  htrans;
  logic [31:0] hwdata, hrdata;
  logic    h_arvalid, h_arready, h_rvalid, h_rready, h_awvalid, h_awready;
  logic    h_wvalid, h_wready, h_bvalid, h_bready;
  axi_ax_t h_ar, h_aw;
  axi_r_t  h_r;
  axi_w_t  h_w;
  axi_b_t  h_b;
  logic    mem_arvalid, mem_arready, mem_rvalid, mem_rready, mem_awvalid, mem_awready;
  logic    mem_wvalid, mem_wready, mem_bvalid, mem_bready;
  axi_ax_t mem_ar, mem_aw;
  axi_r_t  mem_r;
  axi_w_t  mem_w;
  axi_b_t  mem_b;
  logic [31:0] stall_cycles;
  fp16_t       sfu_sum;
  logic [15:0] steady_n_evict, steady_n_recall;

  pnm_top #(.NUM_TILES(NT), .LANES(LN), .MBUF_ROWS(MROWS), .OBUF_ROWS(OROWS),
            .TOPK_K(KK), .TOPK_W(KW), .NPAGES(NPG)) dut (.*);

  axi_mem_model u_mem (
    .clk, .rst_n, .arvalid(mem_arvalid), .arready(mem_arready), .ar(mem_ar),
    .rvalid(mem_rvalid), .rready(mem_rready), .r(mem_r),
    .awvalid(mem_awvalid), .awready(mem_awready), .aw(mem_aw),
    .wvalid(mem_wvalid), .wready(mem_wready), .w(mem_w),
    .bvalid(mem_bvalid), .bready(mem_bready), .b(mem_b));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_contention = 0, n_host_reads = 0, n_irq = 0;
  int n_evict_total = 0, n_recall_total = 0, n_free_fill = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 400) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired pc=%0d st=%0d ubusy=%b", dut.u_ctrl.pc, dut.u_ctrl.st, dut.u_ctrl.u_sb.unit_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- DRAM contents ----------------
  real dmax [NP][DH], dmin [NP][DH], qv [2][DH];

  function automatic fp16_t get16(input longint line_base, input int elem);
    logic [1023:0] l;
    l = u_mem.mem.exists(line_base + elem / 64) ? u_mem.mem[line_base + elem / 64] : '0;
    return l[(elem % 64) * 16 +: 16];
  endfunction

  task automatic put16(input longint line_base, input int elem, input fp16_t v);
    logic [1023:0] l;
    l = u_mem.mem.exists(line_base + elem / 64) ? u_mem.mem[line_base + elem / 64] : '0;
    l[(elem % 64) * 16 +: 16] = v;
    u_mem.mem[line_base + elem / 64] = l;
  endtask

  task automatic fill_dram();
    for (int p = 0; p < NP; p++)
      for (int c = 0; c < DH; c++) begin
        real a, b2;
        a  = h2r(r2h(real'(int'($urandom_range(0, 2000)) - 1000) / 1000.0));
        b2 = h2r(r2h(real'(int'($urandom_range(0, 2000)) - 1000) / 1000.0));
        dmax[p][c] = (a > b2) ? a : b2;
        dmin[p][c] = (a > b2) ? b2 : a;
      end
    for (int s = 0; s < 2; s++)
      for (int c = 0; c < DH; c++)
        qv[s][c] = h2r(r2h(real'(int'($urandom_range(0, 2000)) - 1000) / 1000.0));
    // digest rows: row g*2+j, slice t, lanes (2k, 2k+1) = channel j*LN/2+k
    for (int g = 0; g < NG; g++)
      for (int j = 0; j < 2; j++)
        for (int t = 0; t < NT; t++)
          for (int k = 0; k < LN / 2; k++) begin
            int p, c;
            p = g * NT + t; c = j * LN / 2 + k;
            put16(B0 + (g * 2 + j) * LB, t * LN + 2 * k,     r2h(dmax[p][c]));
            put16(B0 + (g * 2 + j) * LB, t * LN + 2 * k + 1, r2h(dmin[p][c]));
          end
    // query rows: slice j, lanes (2k, 2k+1) = q[j*LN/2+k]
    for (int s = 0; s < 2; s++)
      for (int j = 0; j < NT; j++)
        for (int k = 0; k < LN / 2; k++) begin
          put16(B1 + s * LB, j * LN + 2 * k,     r2h(qv[s][(j % 2) * LN / 2 + k]));
          put16(B1 + s * LB, j * LN + 2 * k + 1, r2h(qv[s][(j % 2) * LN / 2 + k]));
        end
  endtask

  // ---------------- AHB host ----------------
  task automatic ahb_wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); hsel = 1; htrans = 2'b10; hwrite = 1; haddr = a;
    @(negedge clk); htrans = 2'b00; hwrite = 0; hsel = 0; hwdata = d;
  endtask

  int pc;
  task automatic emit(input instr_t ins);
    ahb_wr(16'h1000 + 16'(pc * 8),     ins[31:0]);
    ahb_wr(16'h1000 + 16'(pc * 8) + 4, ins[63:32]);
    pc++;
  endtask

  function automatic instr_t mk(input opcode_e op, input int hi8, input int imm, input int row, input int cnt);
    return {op, 4'd0, 8'(hi8), 16'(imm), 16'(row), 16'(cnt)};
  endfunction
  // field helpers
  function automatic instr_t i_dma(input opcode_e op, input int rsel, input int off, input int row, input int cnt);
    return {op, 4'(rsel), 24'(off), 16'(row), 16'(cnt)};
  endfunction
  function automatic instr_t i_vpu(input int mode, input int grp, input int dst, input int src, input int cnt);
    return {OP_VPU, 2'b00, 2'(mode), 8'(grp), 16'(dst), 16'(src), 16'(cnt)};
  endfunction

  // ---------------- host CXL.mem traffic ----------------
  bit host_on = 0;
  always @(posedge clk) if (h_arvalid && dut.d_arvalid) n_contention++;
  initial begin
    h_arvalid = 0; h_ar = '0; h_rready = 1; h_awvalid = 0; h_aw = '0; h_wvalid = 0; h_w = '0; h_bready = 1;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (host_on) begin
        longint line;
        logic [1023:0] expv;
        line = B0 + longint'($urandom_range(0, 2 * NG * LB - 1));
        expv = u_mem.mem.exists(line) ? u_mem.mem[line] : '0;
        h_arvalid = 1; h_ar = '{id: 4'd0, addr: AXI_ADDR_W'(line << 7), len: 8'd0};
        do @(posedge clk); while (!h_arready);
        @(negedge clk); h_arvalid = 0;
        while (!h_rvalid) @(negedge clk);
        chk(h_r.data == expv && h_r.last, "host CXL.mem read data");
        n_host_reads++;
      end
    end
  end

  // steady counters of each step, taken when the selector finishes
  int st_ev [2], st_rc [2], n_steady = 0;
  always @(posedge clk) if (dut.t_done && n_steady < 2) begin
    #1 st_ev[n_steady] = steady_n_evict; st_rc[n_steady] = steady_n_recall; n_steady++;
  end
  always @(posedge clk) if (dut.t_pair_valid && !dut.t_pair_slot_valid) n_free_fill++;

  // ---------------- references ----------------
  function automatic real score_ref(input int s, input int p);
    real acc;
    acc = 0.0;
    for (int c = 0; c < DH; c++) begin
      real x0, x1;
      x0 = h2r(r2h(qv[s][c])) * dmax[p][c];
      x1 = h2r(r2h(qv[s][c])) * dmin[p][c];
      acc += (x0 > x1) ? x0 : x1;
    end
    return acc;
  endfunction

  bit ref_p [int];

  task automatic check_step(input int s, input longint sc_base, input longint pr_base);
    real    sc [NP];
    int     ord [NP];
    bit     used [NP];
    int     ev [$], rc [$], nfill, nslot;
    bit     in_t [int];
    real    tol;
    // scores
    for (int p = 0; p < NP; p++) begin
      sc[p] = h2r(get16(sc_base + (p / LN) * LBO, p % LN));
      tol = 0.0;
      for (int c = 0; c < DH; c++) tol += (qv[s][c] < 0 ? -qv[s][c] : qv[s][c]) * 1.0;
      chk(close(sc[p], score_ref(s, p), 0.0, tol * 0.004 + 0.01),
          $sformatf("score q%0d page %0d got %f exp %f", s, p, sc[p], score_ref(s, p)));
      used[p] = 0;
    end
    // Top-K over the stored scores (stable, highest first)
    for (int r = 0; r < KK; r++) begin
      int b;
      b = -1;
      for (int p = 0; p < NP; p++) if (!used[p] && (b < 0 || sc[p] > sc[b])) b = p;
      used[b] = 1; ord[r] = b; in_t[b] = 1;
    end
    // Algorithm 1
    foreach (ref_p[p]) if (!in_t.exists(p)) ev.push_back(p);
    nslot = CAP - ref_p.size();
    nfill = ev.size() + ((nslot > 0) ? nslot : 0);
    for (int r = 0; r < KK; r++) if (!ref_p.exists(ord[r]) && rc.size() < nfill) rc.push_back(ord[r]);
    n_evict_total  += ev.size();
    n_recall_total += rc.size();
    chk(st_ev[s] == ev.size(), $sformatf("n_evict %0d exp %0d", st_ev[s], ev.size()));
    chk(st_rc[s] == rc.size(), $sformatf("n_recall %0d exp %0d", st_rc[s], rc.size()));
    for (int i = 0; i < LN * 16 / 32; i++) begin
      logic [31:0] pr;
      pr = {get16(pr_base, 2 * i + 1), get16(pr_base, 2 * i)};
      if (i < rc.size()) begin
        chk(int'(pr[15:0]) == rc[i], $sformatf("pair %0d recall %0d exp %0d", i, pr[15:0], rc[i]));
        chk(int'(pr[31:16]) == ((i < ev.size()) ? ev[i] : 'hFFFF), $sformatf("pair %0d slot %0d", i, pr[31:16]));
      end else begin
        chk(pr == 32'hFFFF_FFFF, "unused pair entry");
      end
    end
    foreach (ev[i]) ref_p.delete(ev[i]);
    foreach (rc[i]) ref_p[rc[i]] = 1;
  endtask

  initial begin
    real bias_r, mx, tot;
    hsel = 0; haddr = '0; htrans = '0; hwrite = 0; hwdata = '0;
    fill_dram();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // metadata registers: DRAM bases in 128-byte units
    ahb_wr(16'h0000, 32'(B0));
    ahb_wr(16'h0004, 32'(B1));
    ahb_wr(16'h0008, 32'(B2));
    mx = -1.0e9;
    for (int p = 0; p < NP; p++) if (score_ref(0, p) > mx) mx = score_ref(0, p);
    bias_r = h2r(r2h(mx + 1.0));
    pc = 0;
    emit(i_dma(OP_DMA_LD, 0, 0, 0, 2 * NG));
    emit(i_dma(OP_DMA_LD, 1, 0, 2 * NG, 2));
    emit(mk(OP_LDQ, 0, 0, 2 * NG, 0));
    emit(i_vpu(3, 2, 0, 0, 2 * NG));                         // SCORE, 2 rows per page
    emit(mk(OP_TOPK, 0, 0, 0, NSR));
    emit(mk(OP_STEADY, 8'h01, CAP, 40, 0));                 // clear resident set
    emit(i_dma(OP_DMA_ST, 2, 0, 0, NSR));
    emit(i_dma(OP_DMA_ST, 2, 16 * LBO, 40, 1));
    emit(mk(OP_SFU_EXP, 8'h01, int'(r2h(bias_r)), 0, NSR));
    emit(mk(OP_SFU_NORM, 0, 0, 0, NSR));
    emit(i_dma(OP_DMA_ST, 2, 32 * LBO, 0, NSR));
    emit(mk(OP_LDQ, 0, 0, 2 * NG + 1, 0));
    emit(i_vpu(3, 2, 50, 0, 2 * NG));
    emit(mk(OP_TOPK, 0, 0, 50, NSR));
    emit(mk(OP_STEADY, 0, CAP, 41, 0));
    emit(i_dma(OP_DMA_ST, 2, 48 * LBO, 50, NSR));
    emit(i_dma(OP_DMA_ST, 2, 64 * LBO, 41, 1));
    emit(i_vpu(1, 1, 60, 0, 2));                             // DIGEST_MAX
    emit(i_vpu(0, 2, 61, 0, 2));                             // GEMV
    emit(i_dma(OP_DMA_ST, 2, 80 * LBO, 60, 2));
    emit(mk(OP_END, 0, 0, 0, 0));
    host_on = 1;
    ahb_wr(16'h0040, 32'h1);
    while (!irq) @(posedge clk);
    n_irq++;
    host_on = 0;
    repeat (5) @(posedge clk);
    check_step(0, B2, B2 + 16 * LBO);
    check_step(1, B2 + 48 * LBO, B2 + 64 * LBO);
    // softmax of the stored query-A scores
    tot = 0.0;
    for (int p = 0; p < NP; p++) tot += $exp(h2r(get16(B2 + (p / LN) * LBO, p % LN)) - bias_r);
    for (int p = 0; p < NP; p++) begin
      real y, e;
      y = h2r(get16(B2 + 32 * LBO + (p / LN) * LBO, p % LN));
      e = $exp(h2r(get16(B2 + (p / LN) * LBO, p % LN)) - bias_r) / tot;
      chk(close(y, e, 0.05, 2.0e-4), $sformatf("softmax page %0d got %f exp %f", p, y, e));
    end
    // digest max of rows 0 and 1 per tile (results 0..NT-1 row 0, NT.. row 1)
    for (int j = 0; j < 2; j++)
      for (int t = 0; t < NT; t++) begin
        real m;
        m = -1.0e9;
        for (int k = 0; k < LN / 2; k++) if (dmax[t][j * LN / 2 + k] > m) m = dmax[t][j * LN / 2 + k];
        chk(h2r(get16(B2 + 80 * LBO, j * NT + t)) == h2r(r2h(m)), $sformatf("digest max row %0d tile %0d", j, t));
      end
    // GEMV: rows 0,1 (page t) with query B slices 0,1
    for (int t = 0; t < NT; t++) begin
      real d, tl;
      d = 0.0; tl = 0.0;
      for (int c = 0; c < DH; c++) begin
        d  += h2r(r2h(qv[1][c])) * (dmax[t][c] + dmin[t][c]);
        tl += (qv[1][c] < 0 ? -qv[1][c] : qv[1][c]) * 2.0;
      end
      chk(close(h2r(get16(B2 + 81 * LBO, t)), d, 0.0, tl * 0.005 + 0.01),
          $sformatf("gemv tile %0d got %f exp %f", t, h2r(get16(B2 + 81 * LBO, t)), d));
    end
    // mechanisms
    $display("mechanisms: stalls=%0d contention=%0d host_reads=%0d evict=%0d recall=%0d free_fill=%0d irq=%0d",
             stall_cycles, n_contention, n_host_reads, n_evict_total, n_recall_total, n_free_fill, n_irq);
    chk(stall_cycles > 0, "scoreboard stall happened");
    chk(n_contention > 0, "arbiter contention happened");
    chk(n_evict_total > 0, "steady eviction happened");
    chk(n_recall_total > 0, "steady recall happened");
    chk(n_free_fill > 0, "free-slot fill happened");
    chk(n_irq == 1, "completion interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
