// steady_selector: bitmask-based Steady Token Selection for GPU-PNM hybrid
// execution (PnG-KV).
//
// The GPU keeps a fixed number of KV pages of each request resident (mask P).
// After every Top-K selection the selector
//   1. one-hot encodes the sorted Top-K page indices into the Top-K mask T and
//      keeps the indices, in rank order, in the Top-K FIFO;
//   2. forms evict = P & ~T (resident pages no longer selected) and
//      candidate = T & ~P (selected pages not yet resident) with bitwise ANDs;
//   3. loads a counter with the number of slots to refill and walks the
//      Top-K FIFO, highest score first: every index that is a candidate
//      (candidate[idx] = 1) is recalled into the next evicted slot and the
//      counter counts down, until it reaches zero or the FIFO is empty;
//   4. updates P = (P & ~evict) | recalled.
// Each recall is reported as a (slot page, recalled page) pair so that the
// GPU can overwrite the evicted slot with the recalled page. The "Updated"
// mask of the paper's toy example is recall_mask.
// Steps 1-4 follow the paper's Algorithm 1 and its selector figure. This
// design's own choices: the slot budget is an input (cap); when P holds fewer
// than cap pages the free slots are filled as well (pair_slot_valid = 0), which
// is how P gets its first pages; one FIFO entry is examined per cycle.
// Timing: Top-K indices are accepted one per cycle (in_valid, in_last); the
// masks are formed in the cycle after in_last; the walk takes one cycle per
// FIFO entry examined; done pulses when P has been updated.
module steady_selector #(
  parameter int NPAGES = 32768,  // pages per request (1M tokens / 32 per page)
  parameter int K      = 128,    // Top-K FIFO depth (T_Budget / page size)
  parameter int IDX_W  = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,      // begin a selection step
  input  logic             clear,      // empty the resident set P
  input  logic [IDX_W-1:0] cap,        // GPU slots for this request
  input  logic             in_valid,
  input  logic             in_last,
  input  logic [IDX_W-1:0] in_idx,
  output logic             busy,
  output logic             pair_valid,
  output logic             pair_slot_valid,
  output logic [IDX_W-1:0] pair_slot,
  output logic [IDX_W-1:0] pair_recall,
  output logic             done,
  output logic [IDX_W-1:0] n_evict,
  output logic [IDX_W-1:0] n_recall,
  output logic [NPAGES-1:0] resident_mask,
  output logic [NPAGES-1:0] recall_mask
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_MASK, S_WALK} state_e;
  state_e st;

  logic [NPAGES-1:0] topk_mask, evict_mask, cand_mask, slot_mask;
  logic [IDX_W-1:0]  fifo [K];
  logic [$clog2(K+1)-1:0] wr_ptr, rd_ptr;
  logic [IDX_W-1:0]  counter;

  // population counts and first evicted slot still free (two-level search:
  // first non-zero 64-bit word, then the bit inside it)
  localparam int NW = (NPAGES + 63) / 64;
  logic [IDX_W:0]   pop_p, pop_e;
  logic [IDX_W-1:0] first_slot;
  logic             slot_found;
  logic [NW*64-1:0] slot_ext;
  logic [63:0]      slot_word;
  logic [IDX_W-1:0] word_sel;
  always_comb begin
    pop_p = (IDX_W+1)'($countones(resident_mask));
    pop_e = (IDX_W+1)'($countones(resident_mask & ~topk_mask));
    slot_ext   = (NW*64)'(slot_mask);
    word_sel   = '0;
    slot_found = 1'b0;
    for (int w = NW - 1; w >= 0; w--)
      if (slot_ext[w*64 +: 64] != 64'd0) begin
        word_sel   = IDX_W'(w);
        slot_found = 1'b1;
      end
    slot_word  = slot_ext[word_sel*64 +: 64];
    first_slot = '0;
    for (int b = 63; b >= 0; b--)
      if (slot_word[b]) first_slot = IDX_W'(word_sel * 64 + b);
  end

  logic [IDX_W-1:0] head;
  logic             hit, fifo_empty;
  assign head       = fifo[rd_ptr[$clog2(K)-1:0]];
  assign fifo_empty = (rd_ptr == wr_ptr);
  assign hit        = (st == S_WALK) && !fifo_empty && (counter != '0) && cand_mask[head[$clog2(NPAGES)-1:0]];
  assign busy       = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= S_IDLE;
      topk_mask     <= '0;
      evict_mask    <= '0;
      cand_mask     <= '0;
      slot_mask     <= '0;
      resident_mask <= '0;
      recall_mask   <= '0;
      wr_ptr        <= '0;
      rd_ptr        <= '0;
      counter       <= '0;
      n_evict       <= '0;
      n_recall      <= '0;
      done          <= 1'b0;
      pair_valid    <= 1'b0;
      pair_slot_valid <= 1'b0;
      pair_slot     <= '0;
      pair_recall   <= '0;
      for (int i = 0; i < K; i++) fifo[i] <= '0;
    end else begin
      done       <= 1'b0;
      pair_valid <= 1'b0;
      if (clear && st == S_IDLE) resident_mask <= '0;
      case (st)
        S_IDLE: if (start) begin
          topk_mask   <= '0;
          recall_mask <= '0;
          wr_ptr      <= '0;
          rd_ptr      <= '0;
          st          <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          // one-hot encoding of the ranked index, and the Top-K FIFO
          topk_mask[in_idx] <= 1'b1;
          if (wr_ptr < ($clog2(K+1))'(K)) begin
            fifo[wr_ptr[$clog2(K)-1:0]] <= in_idx;
            wr_ptr <= wr_ptr + 1'b1;
          end
          if (in_last) st <= S_MASK;
        end
        S_MASK: begin
          evict_mask <= resident_mask & ~topk_mask;
          slot_mask  <= resident_mask & ~topk_mask;
          cand_mask  <= topk_mask & ~resident_mask;
          n_evict    <= IDX_W'(pop_e);
          n_recall   <= '0;
          // slots to fill: evicted ones plus free ones up to the budget
          if ((IDX_W+1)'(cap) > pop_p) counter <= IDX_W'(pop_e + (IDX_W+1)'(cap) - pop_p);
          else                         counter <= IDX_W'(pop_e);
          st <= S_WALK;
        end
        S_WALK: begin
          if (fifo_empty || counter == '0) begin
            resident_mask <= (resident_mask & ~evict_mask) | recall_mask;
            done          <= 1'b1;
            st            <= S_IDLE;
          end else begin
            rd_ptr <= rd_ptr + 1'b1;
            if (hit) begin
              counter         <= counter - 1'b1;
              recall_mask[head] <= 1'b1;
              n_recall        <= n_recall + 1'b1;
              pair_valid      <= 1'b1;
              pair_recall     <= head;
              pair_slot_valid <= slot_found;
              pair_slot       <= first_slot;
              if (slot_found) slot_mask[first_slot] <= 1'b0;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  initial assert (NPAGES <= (1 << IDX_W)) else $error("steady_selector: IDX_W too small for NPAGES");
endmodule
