// topk_merge_sorter: parallel merge sorter that keeps the K best page scores.
//
// Page scores arrive W per cycle. Each chunk is first sorted in one cycle by
// parallel ranking (every element is compared with every other; its rank is
// the number that beat it), then merged into the running sorted list of the K
// best entries, also in one cycle, by the parallel merge rule of merge sort:
// list element i goes to i + (chunk elements greater than it), chunk element
// j goes to j + (list elements greater or equal). Entries whose position is K
// or more fall out. Ties keep the earlier entry first, so the result is the
// stable descending order of (score, arrival).
// After in_last the list is final (done = 1) and the page indices stream out
// in descending score order on out_valid/out_ready; this stream is the sorted
// Top-K FIFO that the steady selector reads.
// The paper states only that the Top-K sorter is a highly parallel merge
// sort; chunk width, list length, the ranking sort of a chunk and the
// streaming interface are this design's choices.
// Timing: one chunk per cycle, no back-pressure on the input; done rises two
// cycles after the chunk with in_last; out_count is the number of valid
// entries (min(K, candidates)). start clears the list.
module topk_merge_sorter
  import fp16_pkg::*;
#(
  parameter int K     = 128,   // pages kept (T_Budget / page size)
  parameter int W     = 16,    // scores accepted per cycle
  parameter int IDX_W = 16     // page index width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             in_valid,
  input  logic             in_last,
  input  logic [W-1:0]     in_en,
  input  fp16_t            in_score [W],
  input  logic [IDX_W-1:0] in_idx   [W],
  output logic             done,
  output logic [$clog2(K+1)-1:0] out_count,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [IDX_W-1:0] out_idx,
  output fp16_t            out_score
);
  localparam int PW = $clog2(K + W);

  typedef struct packed {
    logic             vld;
    logic [15:0]      key;     // order-preserving key of the score
    fp16_t            score;
    logic [IDX_W-1:0] idx;
  } entry_t;

  function automatic logic beats(input entry_t x, input entry_t y);
    return {x.vld, x.key} > {y.vld, y.key};
  endfunction

  // ---------------- stage 1: sort one chunk ----------------
  entry_t in_e [W];
  entry_t srt_d [W];
  entry_t srt_q [W];
  logic   v1, last1;

  always_comb begin
    for (int j = 0; j < W; j++) begin
      in_e[j].vld   = in_en[j];
      in_e[j].key   = fp16_key(in_score[j]);
      in_e[j].score = in_score[j];
      in_e[j].idx   = in_idx[j];
    end
    for (int j = 0; j < W; j++) srt_d[j] = '0;
    for (int j = 0; j < W; j++) begin
      int r;
      r = 0;
      for (int i = 0; i < W; i++)
        if (beats(in_e[i], in_e[j]) || (i < j && {in_e[i].vld, in_e[i].key} == {in_e[j].vld, in_e[j].key}))
          r++;
      srt_d[r] = in_e[j];
    end
  end

  always_ff @(posedge clk) begin
    srt_q <= srt_d;
  end

  // ---------------- stage 2: merge into the Top-K list ----------------
  entry_t lst_q [K];
  entry_t lst_d [K];

  always_comb begin
    for (int p = 0; p < K; p++) lst_d[p] = '0;
    for (int i = 0; i < K; i++) begin
      int pos;
      pos = i;
      for (int j = 0; j < W; j++) if (beats(srt_q[j], lst_q[i])) pos++;
      if (pos < K) lst_d[pos] = lst_q[i];
    end
    for (int j = 0; j < W; j++) begin
      int pos;
      pos = j;
      for (int i = 0; i < K; i++) if (!beats(srt_q[j], lst_q[i])) pos++;
      if (pos < K) lst_d[pos] = srt_q[j];
    end
  end

  logic [$clog2(K+1)-1:0] rd_ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1     <= 1'b0;
      last1  <= 1'b0;
      done   <= 1'b0;
      rd_ptr <= '0;
      for (int i = 0; i < K; i++) lst_q[i] <= '0;
    end else begin
      v1    <= in_valid && !start;
      last1 <= in_valid && in_last && !start;
      if (start) begin
        done   <= 1'b0;
        rd_ptr <= '0;
        for (int i = 0; i < K; i++) lst_q[i] <= '0;
      end else begin
        if (v1) lst_q <= lst_d;
        if (last1) done <= 1'b1;
        if (out_valid && out_ready) rd_ptr <= rd_ptr + 1'b1;
      end
    end
  end

  always_comb begin
    out_count = '0;
    for (int i = 0; i < K; i++) if (lst_q[i].vld) out_count++;
  end

  assign out_valid = done && (rd_ptr < out_count);
  assign out_idx   = lst_q[rd_ptr[$clog2(K)-1:0]].idx;
  assign out_score = lst_q[rd_ptr[$clog2(K)-1:0]].score;

  initial assert (K >= 2 && (1 << $clog2(K)) == K) else $error("topk_merge_sorter: K must be a power of two");
endmodule
