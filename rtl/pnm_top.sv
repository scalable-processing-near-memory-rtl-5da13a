// pnm_top: KV-cache manager of the CXL-PNM device.
//
// This is the logic that sits between the CXL protocol IP and the LPDDR5X
// memory controllers of the CXL-PNM card. The host (or GPU) writes the query
// activations and KV pages into device memory over CXL.mem, programs a short
// instruction sequence over CXL.io, and receives an interrupt when the page
// scores, the Top-K selection, the softmax and the steady-page recall list
// have been produced in device memory.
//
// Blocks and connections (after the paper's device overview figure):
//   cfg_regs         AHB-Lite slave on the CXL.io side: ten metadata
//                    registers, control/status, instruction-buffer window, irq
//   pnm_controller   instruction buffer, fetch/decode, scoreboard, dispatch
//   dma_engine       DRAM <-> buffers, AXI4 master 1 of the arbiter
//   axi_arbiter      memory ARB/MUX: host CXL.mem (master 0) and DMA share the
//                    memory-controller port
//   sram_buffer x2   Matrix/Vector buffer (2 MB) and Output Vector buffer
//                    (0.25 MB)
//   vpu_tile x32     reconfigurable VPUs, all fed from one buffer row per cycle
//   sfu              softmax (exp / sum / reciprocal)
//   topk_merge_sorter, steady_selector   the paper's KV-manager path
//                    (merge sorter -> steady select)
// Unit sequencers in this module turn a dispatched instruction into buffer
// reads and writes:
//   LDQ   copies a buffer row into the query row register (NUM_TILES slices).
//   VPU   streams rows; tile t works on slice t of each row, with a query
//         slice (GEMV, SCORE) or the slice itself (digests) as second
//         operand; with a group of g rows, g consecutive rows accumulate into
//         one result per tile and row j of a group uses query slice j, so a
//         vector longer than LANES (for example a 128-channel score with two
//         lanes per channel) is split over g rows. Results are packed NUM_TILES at a time into
//         Output-buffer rows, result n of a group at element n*NUM_TILES+t.
//   SFU   one Output row per cycle through the SFU, results written back in
//         place.
//   TOPK  streams score rows into the sorter, W scores per cycle; the page
//         index of element e of score row r is r*LANES + e.
//   STEADY feeds the sorted Top-K indices to the steady selector and writes
//         its (slot, recall) pairs, 32 bits each ({slot, page}, slot = 16'hFFFF
//         for a free slot, unused entries all ones), into Output rows.
// Buffer row widths and the sequencers are this design's; the paper gives the
// block list, the 32 tiles of 128 lanes, FP16, the 2.25 MB buffers and the
// 1,024-bit DRAM interface.
// The CXL PHY/controller IP, the memory controllers and the DRAM are outside
// this module; their AHB and AXI4 sides are its ports.
module pnm_top
  import fp16_pkg::*;
  import vpu_pkg::*;
  import axi_pkg::*;
  import pnm_pkg::*;
#(
  parameter int NUM_TILES = 32,
  parameter int LANES     = 128,
  parameter int MBUF_ROWS = 256,     // 256 x 8 KB = 2 MB
  parameter int OBUF_ROWS = 1024,    // 1024 x 256 B = 0.25 MB
  parameter int TOPK_K    = 128,
  parameter int TOPK_W    = 16,
  parameter int NPAGES    = 32768,
  parameter int IB_DEPTH  = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // CXL.io side (AHB-Lite)
  input  logic        hsel,
  input  logic [15:0] haddr,
  input  logic [1:0]  htrans,
  input  logic        hwrite,
  input  logic [31:0] hwdata,
  output logic [31:0] hrdata,
  output logic        hready,
  output logic        hresp,
  output logic        irq,
  // CXL.mem side (host AXI4 master)
  input  logic        h_arvalid,
  output logic        h_arready,
  input  axi_ax_t     h_ar,
  output logic        h_rvalid,
  input  logic        h_rready,
  output axi_r_t      h_r,
  input  logic        h_awvalid,
  output logic        h_awready,
  input  axi_ax_t     h_aw,
  input  logic        h_wvalid,
  output logic        h_wready,
  input  axi_w_t      h_w,
  output logic        h_bvalid,
  input  logic        h_bready,
  output axi_b_t      h_b,
  // memory-controller side (AXI4)
  output logic        mem_arvalid,
  input  logic        mem_arready,
  output axi_ax_t     mem_ar,
  input  logic        mem_rvalid,
  output logic        mem_rready,
  input  axi_r_t      mem_r,
  output logic        mem_awvalid,
  input  logic        mem_awready,
  output axi_ax_t     mem_aw,
  output logic        mem_wvalid,
  input  logic        mem_wready,
  output axi_w_t      mem_w,
  input  logic        mem_bvalid,
  output logic        mem_bready,
  input  axi_b_t      mem_b,
  // status: scoreboard stall count, running softmax sum (for combining the
  // PNM and GPU partial sums in the hybrid mode), last steady-selection counts
  output logic [31:0] stall_cycles,
  output fp16_t       sfu_sum,
  output logic [15:0] steady_n_evict,
  output logic [15:0] steady_n_recall
);
  localparam int MROW_W = NUM_TILES * LANES * 16;
  localparam int OROW_W = LANES * 16;
  localparam int MA_W   = $clog2(MBUF_ROWS);
  localparam int OA_W   = $clog2(OBUF_ROWS);
  localparam int PACK   = LANES / NUM_TILES;      // VPU result groups per Output row
  localparam int CHUNKS = LANES / TOPK_W;         // sorter chunks per score row
  localparam int PAIRS  = OROW_W / 32;            // recall pairs per Output row

  // ---------------- configuration and control ----------------
  logic [31:0] meta [10];
  logic        start, ib_we, ib_hi, core_busy, core_done;
  logic [$clog2(IB_DEPTH)-1:0] ib_waddr;
  logic [31:0] ib_wdata;
  logic [NUNITS-1:0] disp_valid, unit_done;
  dec_t        disp;

  cfg_regs #(.NUM_REGS(10), .REG_W(32), .IB_DEPTH(IB_DEPTH)) u_cfg (
    .hclk(clk), .hresetn(rst_n), .hsel, .haddr, .htrans, .hwrite, .hwdata, .hrdata,
    .hready, .hresp, .meta, .start, .ib_we, .ib_waddr, .ib_hi, .ib_wdata,
    .core_busy, .core_done, .irq
  );

  pnm_controller #(.IB_DEPTH(IB_DEPTH)) u_ctrl (
    .clk, .rst_n, .ib_we, .ib_waddr, .ib_hi, .ib_wdata, .start, .busy(core_busy),
    .done(core_done), .disp_valid, .disp, .unit_done, .stall_cycles
  );

  // ---------------- buffers ----------------
  logic              mb_we, mb_re;
  logic [MA_W-1:0]   mb_waddr, mb_raddr;
  logic [MROW_W-1:0] mb_wdata, mb_rdata;
  logic              ob_we, ob_re;
  logic [OA_W-1:0]   ob_waddr, ob_raddr;
  logic [OROW_W-1:0] ob_wdata, ob_rdata;

  sram_buffer #(.ROWS(MBUF_ROWS), .WIDTH(MROW_W)) u_mbuf (
    .clk, .we(mb_we), .waddr(mb_waddr), .wdata(mb_wdata), .re(mb_re), .raddr(mb_raddr), .rdata(mb_rdata));
  sram_buffer #(.ROWS(OBUF_ROWS), .WIDTH(OROW_W)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata), .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata));

  // ---------------- DMA and memory arbitration ----------------
  logic    d_arvalid, d_arready, d_rvalid, d_rready, d_awvalid, d_awready;
  logic    d_wvalid, d_wready, d_bvalid, d_bready;
  axi_ax_t d_ar, d_aw;
  axi_w_t  d_w;
  axi_r_t  a_r;
  axi_b_t  a_b;
  logic    dma_st_re;
  logic [OA_W-1:0] dma_st_addr;
  logic            dma_cmd_ready;

  dma_engine #(.LD_W(MROW_W), .ST_W(OROW_W), .LD_ROWS(MBUF_ROWS), .ST_ROWS(OBUF_ROWS)) u_dma (
    .clk, .rst_n,
    .cmd_valid(disp_valid[U_DMA]), .cmd_ready(dma_cmd_ready),
    .cmd_store(disp.op == OP_DMA_ST),
    .cmd_addr(AXI_ADDR_W'({8'd0, meta[disp.reg_sel] + 32'(disp.offset)}) << 7),
    .cmd_buf(disp.row), .cmd_rows(disp.cnt), .done(unit_done[U_DMA]),
    .ld_we(mb_we), .ld_addr(mb_waddr), .ld_data(mb_wdata),
    .st_re(dma_st_re), .st_addr(dma_st_addr), .st_data(ob_rdata),
    .arvalid(d_arvalid), .arready(d_arready), .ar(d_ar), .rvalid(d_rvalid), .rready(d_rready), .r(a_r),
    .awvalid(d_awvalid), .awready(d_awready), .aw(d_aw), .wvalid(d_wvalid), .wready(d_wready), .w(d_w),
    .bvalid(d_bvalid), .bready(d_bready), .b(a_b)
  );

  logic    m_arvalid [2], m_arready [2], m_rvalid [2], m_rready [2];
  logic    m_awvalid [2], m_awready [2], m_wvalid [2], m_wready [2];
  logic    m_bvalid [2], m_bready [2];
  axi_ax_t m_ar [2], m_aw [2];
  axi_w_t  m_w [2];

  assign m_arvalid = '{h_arvalid, d_arvalid};
  assign m_ar      = '{h_ar, d_ar};
  assign m_rready  = '{h_rready, d_rready};
  assign m_awvalid = '{h_awvalid, d_awvalid};
  assign m_aw      = '{h_aw, d_aw};
  assign m_wvalid  = '{h_wvalid, d_wvalid};
  assign m_w       = '{h_w, d_w};
  assign m_bready  = '{h_bready, d_bready};
  assign h_arready = m_arready[0];  assign d_arready = m_arready[1];
  assign h_rvalid  = m_rvalid[0];   assign d_rvalid  = m_rvalid[1];
  assign h_awready = m_awready[0];  assign d_awready = m_awready[1];
  assign h_wready  = m_wready[0];   assign d_wready  = m_wready[1];
  assign h_bvalid  = m_bvalid[0];   assign d_bvalid  = m_bvalid[1];
  assign h_r = a_r;
  assign h_b = a_b;

  axi_arbiter u_arb (
    .clk, .rst_n,
    .m_arvalid, .m_arready, .m_ar, .m_rvalid, .m_rready, .m_r(a_r),
    .m_awvalid, .m_awready, .m_aw, .m_wvalid, .m_wready, .m_w, .m_bvalid, .m_bready, .m_b(a_b),
    .s_arvalid(mem_arvalid), .s_arready(mem_arready), .s_ar(mem_ar),
    .s_rvalid(mem_rvalid), .s_rready(mem_rready), .s_r(mem_r),
    .s_awvalid(mem_awvalid), .s_awready(mem_awready), .s_aw(mem_aw),
    .s_wvalid(mem_wvalid), .s_wready(mem_wready), .s_w(mem_w),
    .s_bvalid(mem_bvalid), .s_bready(mem_bready), .s_b(mem_b)
  );

  // ---------------- VPU array and its sequencer ----------------
  fp16_t     qreg [NUM_TILES][LANES];   // query row register
  logic [$clog2(NUM_TILES)-1:0] v_qsel;
  logic      v_in_valid, v_acc;
  vpu_mode_e v_mode;
  fp16_t     v_a [NUM_TILES][LANES];
  fp16_t     v_b [NUM_TILES][LANES];
  logic      v_y_valid [NUM_TILES];
  fp16_t     v_y [NUM_TILES];

  for (genvar t = 0; t < NUM_TILES; t++) begin : g_tile
    always_comb begin
      for (int i = 0; i < LANES; i++) begin
        v_a[t][i] = mb_rdata[(t*LANES + i)*16 +: 16];
        v_b[t][i] = (v_mode == VPU_DIGEST_MAX || v_mode == VPU_DIGEST_MIN) ? v_a[t][i] : qreg[v_qsel][i];
      end
    end
    vpu_tile #(.LANES(LANES)) u_vpu (
      .clk, .rst_n, .in_valid(v_in_valid), .mode(v_mode), .acc(v_acc),
      .a(v_a[t]), .b(v_b[t]), .y_valid(v_y_valid[t]), .y(v_y[t]));
  end

  typedef enum logic [1:0] {V_IDLE, V_LDQ, V_RUN, V_FLUSH} vstate_e;
  vstate_e         vst;
  logic [15:0]     v_src, v_left, v_outs_left;
  logic [7:0]      v_grp, v_rcnt, v_ocnt;
  logic            v_rd_q, v_ldq_rd;
  logic [OA_W-1:0] v_dst;
  logic [$clog2(PACK+1)-1:0] v_pk;
  logic [OROW_W-1:0] v_row;
  logic            v_we;
  logic [OA_W-1:0] v_waddr;
  logic [OROW_W-1:0] v_wdata;
  logic            vpu_re;
  logic [MA_W-1:0] vpu_raddr;

  assign vpu_re    = (vst == V_LDQ && !v_ldq_rd) || (vst == V_RUN && v_left != 16'd0);
  assign vpu_raddr = MA_W'(v_src);
  // the row read last cycle is on mb_rdata now: feed it to the tiles together
  // with its position in the accumulation group
  assign v_in_valid = (vst == V_RUN) && v_rd_q;
  assign v_acc      = (v_rcnt != 8'd0);
  assign v_qsel     = ($clog2(NUM_TILES))'(v_rcnt);
  assign mb_re     = vpu_re;
  assign mb_raddr  = vpu_raddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vst <= V_IDLE; v_src <= '0; v_left <= '0; v_grp <= 8'd1; v_rcnt <= '0; v_ocnt <= '0;
      v_rd_q <= 1'b0; v_ldq_rd <= 1'b0; v_dst <= '0; v_pk <= '0; v_row <= '0; v_we <= 1'b0;
      v_waddr <= '0; v_wdata <= '0; v_mode <= VPU_GEMV;
      v_outs_left <= '0;
      unit_done[U_VPU] <= 1'b0;
      for (int t = 0; t < NUM_TILES; t++) for (int i = 0; i < LANES; i++) qreg[t][i] <= FP16_ZERO;
    end else begin
      unit_done[U_VPU] <= 1'b0;
      v_we       <= 1'b0;
      v_rd_q     <= 1'b0;
      case (vst)
        V_IDLE: if (disp_valid[U_VPU]) begin
          v_src <= disp.row;
          if (disp.op == OP_LDQ) begin
            vst <= V_LDQ; v_ldq_rd <= 1'b0;
          end else begin
            vst    <= V_RUN;
            v_mode <= vpu_mode_e'(disp.mode);
            v_left <= disp.cnt;
            v_grp  <= (disp.grp == 8'd0) ? 8'd1 : disp.grp;
            v_rcnt <= '0; v_ocnt <= '0;
            v_dst  <= OA_W'(disp.imm);
            v_pk   <= '0;
            v_row  <= '1;
            v_outs_left <= disp.cnt;
          end
        end
        V_LDQ: begin
          if (!v_ldq_rd) v_ldq_rd <= 1'b1;
          else begin
            for (int t = 0; t < NUM_TILES; t++) for (int i = 0; i < LANES; i++)
              qreg[t][i] <= mb_rdata[(t*LANES + i)*16 +: 16];
            unit_done[U_VPU] <= 1'b1;
            vst <= V_IDLE;
          end
        end
        V_RUN: begin
          // one buffer row per cycle into all tiles (data arrives next cycle)
          if (v_left != 16'd0) begin
            v_src  <= v_src + 1'b1;
            v_left <= v_left - 1'b1;
            v_rd_q <= 1'b1;
          end
          if (v_rd_q) begin
            v_rcnt     <= (v_rcnt + 8'd1 == v_grp) ? 8'd0 : v_rcnt + 8'd1;
          end
          // collect results: the last of every group is final
          if (v_y_valid[0]) begin
            v_outs_left <= v_outs_left - 1'b1;
            v_ocnt      <= (v_ocnt + 8'd1 == v_grp) ? 8'd0 : v_ocnt + 8'd1;
            if (v_ocnt + 8'd1 == v_grp) begin
              for (int t = 0; t < NUM_TILES; t++)
                v_row[(int'(v_pk)*NUM_TILES + t)*16 +: 16] <= v_y[t];
              if (int'(v_pk) == PACK - 1) begin
                v_pk    <= '0;
                v_we    <= 1'b1;
                v_waddr <= v_dst;
                v_wdata <= v_row;
                for (int t = 0; t < NUM_TILES; t++)
                  v_wdata[((PACK-1)*NUM_TILES + t)*16 +: 16] <= v_y[t];
                v_dst   <= v_dst + 1'b1;
                v_row   <= '1;
              end else begin
                v_pk <= v_pk + 1'b1;
              end
            end
            if (v_outs_left == 16'd1) vst <= V_FLUSH;
          end
        end
        V_FLUSH: begin
          if (v_pk != '0) begin
            v_we <= 1'b1; v_waddr <= v_dst; v_wdata <= v_row;
          end
          unit_done[U_VPU] <= 1'b1;
          vst <= V_IDLE;
        end
        default: vst <= V_IDLE;
      endcase
    end
  end

  // ---------------- SFU and its sequencer ----------------
  logic        s_busy, s_norm, s_in_valid, s_out_valid, s_clr, s_rd_q;
  fp16_t       s_bias;
  fp16_t       s_x [LANES], s_y [LANES];
  logic [15:0] s_left, s_wleft;
  logic [OA_W-1:0] s_raddr, s_waddr;

  always_comb for (int i = 0; i < LANES; i++) s_x[i] = ob_rdata[i*16 +: 16];
  assign s_in_valid = s_rd_q;         // the row read last cycle is on ob_rdata

  sfu #(.LANES(LANES)) u_sfu (
    .clk, .rst_n, .in_valid(s_in_valid), .op_norm(s_norm), .bias(s_bias), .lane_en('1),
    .x(s_x), .sum_clr(s_clr), .out_valid(s_out_valid), .y(s_y), .sum(sfu_sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_busy <= 1'b0; s_norm <= 1'b0; s_clr <= 1'b0; s_rd_q <= 1'b0;
      s_bias <= '0; s_left <= '0; s_wleft <= '0; s_raddr <= '0; s_waddr <= '0;
      unit_done[U_SFU] <= 1'b0;
    end else begin
      unit_done[U_SFU] <= 1'b0;
      s_clr      <= 1'b0;
      s_rd_q     <= 1'b0;
      if (!s_busy) begin
        if (disp_valid[U_SFU]) begin
          s_busy  <= 1'b1;
          s_norm  <= (disp.op == OP_SFU_NORM);
          s_clr   <= (disp.op == OP_SFU_EXP) && disp.flag;
          s_bias  <= disp.imm;
          s_left  <= disp.cnt;
          s_wleft <= disp.cnt;
          s_raddr <= OA_W'(disp.row);
          s_waddr <= OA_W'(disp.row);
          if (disp.cnt == 16'd0) begin s_busy <= 1'b0; unit_done[U_SFU] <= 1'b1; end
        end
      end else begin
        if (s_left != 16'd0 && !s_clr) begin
          s_raddr <= s_raddr + 1'b1;
          s_left  <= s_left - 1'b1;
          s_rd_q  <= 1'b1;
        end
        if (s_out_valid) begin
          s_waddr <= s_waddr + 1'b1;
          s_wleft <= s_wleft - 1'b1;
          if (s_wleft == 16'd1) begin s_busy <= 1'b0; unit_done[U_SFU] <= 1'b1; end
        end
      end
    end
  end

  logic [OROW_W-1:0] s_wrow;
  always_comb for (int i = 0; i < LANES; i++) s_wrow[i*16 +: 16] = s_y[i];

  // ---------------- Top-K sorter and its sequencer ----------------
  logic        k_start, k_in_valid, k_in_last, k_done, k_out_valid, k_out_ready;
  logic [TOPK_W-1:0] k_en;
  fp16_t       k_score [TOPK_W];
  logic [15:0] k_idx [TOPK_W];
  logic [$clog2(TOPK_K+1)-1:0] k_count;
  logic [15:0] k_out_idx;
  fp16_t       k_out_score;
  logic        k_busy, k_rd_q, k_have;
  logic [15:0] k_left, k_rowi;
  logic [$clog2(CHUNKS+1)-1:0] k_chunk;
  logic [OA_W-1:0] k_raddr;

  always_comb begin
    for (int j = 0; j < TOPK_W; j++) begin
      k_score[j] = ob_rdata[(int'(k_chunk)*TOPK_W + j)*16 +: 16];
      k_idx[j]   = 16'(int'(k_rowi) * LANES + int'(k_chunk) * TOPK_W + j);
    end
    k_en       = '1;
    k_in_valid = k_busy && k_have;
    k_in_last  = k_in_valid && (int'(k_chunk) == CHUNKS - 1) && (k_left == 16'd0);
  end

  topk_merge_sorter #(.K(TOPK_K), .W(TOPK_W), .IDX_W(16)) u_topk (
    .clk, .rst_n, .start(k_start), .in_valid(k_in_valid), .in_last(k_in_last), .in_en(k_en),
    .in_score(k_score), .in_idx(k_idx), .done(k_done), .out_count(k_count),
    .out_valid(k_out_valid), .out_ready(k_out_ready), .out_idx(k_out_idx), .out_score(k_out_score));

  logic k_wait;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_busy <= 1'b0; k_rd_q <= 1'b0; k_have <= 1'b0; k_left <= '0; k_rowi <= '0;
      k_chunk <= '0; k_raddr <= '0; k_start <= 1'b0; k_wait <= 1'b0;
      unit_done[U_TOPK] <= 1'b0;
    end else begin
      unit_done[U_TOPK] <= 1'b0;
      k_start <= 1'b0;
      k_rd_q  <= 1'b0;
      if (!k_busy && !k_wait) begin
        if (disp_valid[U_TOPK]) begin
          k_start <= 1'b1;
          k_raddr <= OA_W'(disp.row);
          k_left  <= disp.cnt;
          k_rowi  <= '0;
          k_busy  <= (disp.cnt != 16'd0);
          if (disp.cnt == 16'd0) unit_done[U_TOPK] <= 1'b1;
        end
      end else if (k_busy) begin
        if (!k_have && !k_rd_q && !k_start) begin
          k_rd_q  <= 1'b1;            // read one score row
          k_raddr <= k_raddr + 1'b1;
          k_left  <= k_left - 1'b1;
        end
        if (k_rd_q) begin k_have <= 1'b1; k_chunk <= '0; end
        if (k_have) begin
          if (int'(k_chunk) == CHUNKS - 1) begin
            k_have <= 1'b0;
            k_rowi <= k_rowi + 1'b1;
            if (k_left == 16'd0) begin k_busy <= 1'b0; k_wait <= 1'b1; end
          end else k_chunk <= k_chunk + 1'b1;
        end
      end else if (k_wait && k_done) begin
        k_wait <= 1'b0;
        unit_done[U_TOPK] <= 1'b1;
      end
    end
  end

  // ---------------- steady selector and its sequencer ----------------
  logic        t_start, t_clear, t_in_valid, t_in_last, t_busy, t_done;
  logic        t_pair_valid, t_pair_slot_valid;
  logic [15:0] t_cap, t_pair_slot, t_pair_recall;
  logic [NPAGES-1:0] t_resident, t_recall;
  logic        t_act, t_feed, t_flush;
  logic [$clog2(TOPK_K+1)-1:0] t_fed;
  logic [OA_W-1:0] t_dst;
  logic [$clog2(PAIRS+1)-1:0] t_np;
  logic [OROW_W-1:0] t_row;
  logic        t_we;
  logic [OA_W-1:0] t_waddr;
  logic [OROW_W-1:0] t_wdata;

  assign t_in_valid  = t_feed && k_out_valid;
  assign t_in_last   = t_in_valid && (int'(t_fed) + 1 == int'(k_count));
  assign k_out_ready = t_feed;

  steady_selector #(.NPAGES(NPAGES), .K(TOPK_K), .IDX_W(16)) u_steady (
    .clk, .rst_n, .start(t_start), .clear(t_clear), .cap(t_cap), .in_valid(t_in_valid),
    .in_last(t_in_last), .in_idx(k_out_idx), .busy(t_busy), .pair_valid(t_pair_valid),
    .pair_slot_valid(t_pair_slot_valid), .pair_slot(t_pair_slot), .pair_recall(t_pair_recall),
    .done(t_done), .n_evict(steady_n_evict), .n_recall(steady_n_recall),
    .resident_mask(t_resident), .recall_mask(t_recall));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_act <= 1'b0; t_feed <= 1'b0; t_flush <= 1'b0; t_start <= 1'b0; t_clear <= 1'b0;
      t_cap <= '0; t_fed <= '0; t_dst <= '0; t_np <= '0; t_row <= '1; t_we <= 1'b0;
      t_waddr <= '0; t_wdata <= '0;
      unit_done[U_STDY] <= 1'b0;
    end else begin
      unit_done[U_STDY] <= 1'b0;
      t_start <= 1'b0;
      t_clear <= 1'b0;
      t_we    <= 1'b0;
      if (!t_act) begin
        if (disp_valid[U_STDY]) begin
          t_act   <= 1'b1;
          t_clear <= disp.flag;
          t_cap   <= disp.imm;
          t_dst   <= OA_W'(disp.row);
          t_np    <= '0;
          t_row   <= '1;
          t_fed   <= '0;
        end
      end else begin
        if (!t_feed && !t_busy && !t_flush && !t_start && !t_clear && t_fed == '0 && !t_done) begin
          t_start <= 1'b1;
        end
        if (t_start) t_feed <= 1'b1;     // the selector takes indices after start
        if (t_in_valid) begin
          t_fed <= t_fed + 1'b1;
          if (t_in_last) t_feed <= 1'b0;
        end
        if (t_pair_valid) begin
          t_row[int'(t_np)*32 +: 32] <= {t_pair_slot_valid ? t_pair_slot : 16'hFFFF, t_pair_recall};
          if (int'(t_np) == PAIRS - 1) begin
            t_we    <= 1'b1;
            t_waddr <= t_dst;
            t_wdata <= t_row;
            t_wdata[(PAIRS-1)*32 +: 32] <= {t_pair_slot_valid ? t_pair_slot : 16'hFFFF, t_pair_recall};
            t_dst   <= t_dst + 1'b1;
            t_np    <= '0;
            t_row   <= '1;
          end else t_np <= t_np + 1'b1;
        end
        if (t_done) t_flush <= 1'b1;
        if (t_flush) begin
          t_we    <= 1'b1;
          t_waddr <= t_dst;
          t_wdata <= t_row;
          t_flush <= 1'b0;
          t_act   <= 1'b0;
          t_fed   <= '0;
          unit_done[U_STDY] <= 1'b1;
        end
      end
    end
  end

  // ---------------- Output buffer port sharing ----------------
  // The scoreboard gives the Output buffer to one instruction at a time, so
  // at most one of these users is active.
  always_comb begin
    ob_re    = 1'b0;
    ob_raddr = dma_st_addr;
    if (dma_st_re)   begin ob_re = 1'b1; ob_raddr = dma_st_addr; end
    if (s_busy && s_left != 16'd0 && !s_clr) begin ob_re = 1'b1; ob_raddr = s_raddr; end
    if (k_busy && !k_have && !k_rd_q && !k_start) begin ob_re = 1'b1; ob_raddr = k_raddr; end
    ob_we    = 1'b0;
    ob_waddr = v_waddr;
    ob_wdata = v_wdata;
    if (v_we)        begin ob_we = 1'b1; ob_waddr = v_waddr; ob_wdata = v_wdata; end
    if (s_out_valid) begin ob_we = 1'b1; ob_waddr = s_waddr; ob_wdata = s_wrow; end
    if (t_we)        begin ob_we = 1'b1; ob_waddr = t_waddr; ob_wdata = t_wdata; end
  end

  // the scoreboard only dispatches to an idle DMA engine
  a_dma_ready: assert property (@(posedge clk) disable iff (!rst_n)
    disp_valid[U_DMA] |-> dma_cmd_ready);

  a_one_obuf_writer: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({v_we, s_out_valid, t_we}));
endmodule
