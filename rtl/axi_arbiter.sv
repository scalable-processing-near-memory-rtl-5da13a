// axi_arbiter: the memory-side ARB/MUX that lets the host (CXL.mem) and the
// accelerator's DMA engine share the LPDDR5X memory controllers over AXI4.
//
// Reads and writes are arbitrated independently, round-robin between the two
// masters (0 = host, 1 = DMA). A granted master owns its direction until the
// burst completes (last read beat, or write response), so responses need no
// ID remapping. The paper states that host and accelerator share the memory
// through AXI4-based arbitration; round-robin and one burst in flight per
// direction are this design's choices.
// All channels are valid/ready handshakes; assertions check that a request
// held by the memory side stays stable until accepted.
module axi_arbiter
  import axi_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // masters
  input  logic    m_arvalid [2],
  output logic    m_arready [2],
  input  axi_ax_t m_ar      [2],
  output logic    m_rvalid  [2],
  input  logic    m_rready  [2],
  output axi_r_t  m_r,
  input  logic    m_awvalid [2],
  output logic    m_awready [2],
  input  axi_ax_t m_aw      [2],
  input  logic    m_wvalid  [2],
  output logic    m_wready  [2],
  input  axi_w_t  m_w       [2],
  output logic    m_bvalid  [2],
  input  logic    m_bready  [2],
  output axi_b_t  m_b,
  // memory side
  output logic    s_arvalid,
  input  logic    s_arready,
  output axi_ax_t s_ar,
  input  logic    s_rvalid,
  output logic    s_rready,
  input  axi_r_t  s_r,
  output logic    s_awvalid,
  input  logic    s_awready,
  output axi_ax_t s_aw,
  output logic    s_wvalid,
  input  logic    s_wready,
  output axi_w_t  s_w,
  input  logic    s_bvalid,
  output logic    s_bready,
  input  axi_b_t  s_b
);
  logic rd_busy, rd_own, rd_last_grant;
  logic wr_busy, wr_own, wr_last_grant;
  logic rd_pick, wr_pick;

  // round-robin pick: prefer the master that was not granted last
  always_comb begin
    if (m_arvalid[0] && m_arvalid[1]) rd_pick = ~rd_last_grant;
    else                              rd_pick = m_arvalid[1];
    if (m_awvalid[0] && m_awvalid[1]) wr_pick = ~wr_last_grant;
    else                              wr_pick = m_awvalid[1];
  end

  // read address
  assign s_arvalid = !rd_busy && (m_arvalid[0] || m_arvalid[1]);
  assign s_ar      = m_ar[rd_pick];
  assign m_arready[0] = !rd_busy && s_arready && (rd_pick == 1'b0);
  assign m_arready[1] = !rd_busy && s_arready && (rd_pick == 1'b1);
  // read data
  assign m_r         = s_r;
  assign m_rvalid[0] = rd_busy && s_rvalid && (rd_own == 1'b0);
  assign m_rvalid[1] = rd_busy && s_rvalid && (rd_own == 1'b1);
  assign s_rready    = rd_busy && m_rready[rd_own];

  // write address
  assign s_awvalid = !wr_busy && (m_awvalid[0] || m_awvalid[1]);
  assign s_aw      = m_aw[wr_pick];
  assign m_awready[0] = !wr_busy && s_awready && (wr_pick == 1'b0);
  assign m_awready[1] = !wr_busy && s_awready && (wr_pick == 1'b1);
  // write data and response
  assign s_wvalid    = wr_busy && m_wvalid[wr_own];
  assign s_w         = m_w[wr_own];
  assign m_wready[0] = wr_busy && s_wready && (wr_own == 1'b0);
  assign m_wready[1] = wr_busy && s_wready && (wr_own == 1'b1);
  assign m_b         = s_b;
  assign m_bvalid[0] = wr_busy && s_bvalid && (wr_own == 1'b0);
  assign m_bvalid[1] = wr_busy && s_bvalid && (wr_own == 1'b1);
  assign s_bready    = wr_busy && m_bready[wr_own];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy <= 1'b0; rd_own <= 1'b0; rd_last_grant <= 1'b1;
      wr_busy <= 1'b0; wr_own <= 1'b0; wr_last_grant <= 1'b1;
    end else begin
      if (!rd_busy && s_arvalid && s_arready) begin
        rd_busy <= 1'b1; rd_own <= rd_pick; rd_last_grant <= rd_pick;
      end else if (rd_busy && s_rvalid && s_rready && s_r.last) begin
        rd_busy <= 1'b0;
      end
      if (!wr_busy && s_awvalid && s_awready) begin
        wr_busy <= 1'b1; wr_own <= wr_pick; wr_last_grant <= wr_pick;
      end else if (wr_busy && s_bvalid && s_bready) begin
        wr_busy <= 1'b0;
      end
    end
  end

  // handshake rules: a pending request on the memory side stays put
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_arvalid && !s_arready && !rd_busy |=> s_arvalid);
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_awvalid && !s_awready && !wr_busy |=> s_awvalid);
endmodule
