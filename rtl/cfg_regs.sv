// cfg_regs: the configuration block on the CXL.io side (AHB-Lite slave).
//
// It holds the ten 32-bit metadata registers of the paper (layer count,
// sequence length, memory mapping and so on; their meaning is set by the
// software, the hardware uses any of them as a DRAM base address in 128-byte
// units for DMA instructions), a control register, a status register and the
// write window into the controller's instruction buffer. The completion of a
// program sets the interrupt, which the host clears by writing CTRL[1]; the
// CXL.io side turns it into an MSI-X message.
// Address map (byte offsets): 0x00-0x24 metadata regs 0-9; 0x40 CTRL (write
// 1 to bit 0 starts the program, bit 1 clears the interrupt); 0x44 STATUS
// (bit 0 busy, bit 1 interrupt pending); 0x1000 + 8*n (+4) low (high) word of
// instruction n. The map and the AHB-Lite timing (zero wait states, OKAY
// responses) are this design's choices; the register count and width are the
// paper's.
module cfg_regs #(
  parameter int NUM_REGS = 10,
  parameter int REG_W    = 32,
  parameter int IB_DEPTH = 256
) (
  input  logic                        hclk,
  input  logic                        hresetn,
  input  logic                        hsel,
  input  logic [15:0]                 haddr,
  input  logic [1:0]                  htrans,
  input  logic                        hwrite,
  input  logic [REG_W-1:0]            hwdata,
  output logic [REG_W-1:0]            hrdata,
  output logic                        hready,
  output logic                        hresp,
  // to the core
  output logic [REG_W-1:0]            meta [NUM_REGS],
  output logic                        start,
  output logic                        ib_we,
  output logic [$clog2(IB_DEPTH)-1:0] ib_waddr,
  output logic                        ib_hi,
  output logic [31:0]                 ib_wdata,
  input  logic                        core_busy,
  input  logic                        core_done,
  output logic                        irq
);
  logic        wr_pend;
  logic [15:0] wr_addr;

  assign hready = 1'b1;
  assign hresp  = 1'b0;

  // write data phase follows the address phase by one cycle
  assign ib_we    = wr_pend && wr_addr[15:12] == 4'h1;
  assign ib_waddr = wr_addr[3 +: $clog2(IB_DEPTH)];
  assign ib_hi    = wr_addr[2];
  assign ib_wdata = hwdata;

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      wr_pend <= 1'b0;
      wr_addr <= '0;
      start   <= 1'b0;
      irq     <= 1'b0;
      hrdata  <= '0;
      for (int i = 0; i < NUM_REGS; i++) meta[i] <= '0;
    end else begin
      start   <= 1'b0;
      wr_pend <= hsel && htrans[1] && hwrite;
      if (hsel && htrans[1]) wr_addr <= haddr;
      if (wr_pend) begin
        if (wr_addr[15:12] == 4'h0 && wr_addr[7:2] < 6'(NUM_REGS))
          meta[wr_addr[7:2]] <= hwdata;
        if (wr_addr == 16'h0040) begin
          start <= hwdata[0];
          if (hwdata[1]) irq <= 1'b0;
        end
      end
      if (core_done) irq <= 1'b1;
      // read data for the next data phase
      if (hsel && htrans[1] && !hwrite) begin
        if (haddr[15:12] == 4'h0 && haddr[7:2] < 6'(NUM_REGS)) hrdata <= meta[haddr[7:2]];
        else if (haddr == 16'h0044) hrdata <= {30'd0, irq, core_busy};
        else hrdata <= '0;
      end
    end
  end
endmodule
