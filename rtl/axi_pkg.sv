// axi_pkg: the AXI4 channel payloads used between the host CXL.mem port, the
// DMA engine, the arbiter and the LPDDR5X memory controllers. Only the fields
// this design uses are carried: incrementing bursts of full-width beats, so
// size and burst type are fixed and omitted. The 1,024-bit data width is the
// paper's DRAM I/O width; the rest is this design's choice.
package axi_pkg;
  localparam int AXI_ADDR_W = 40;     // 512 GB per module needs 39 bits
  localparam int AXI_DATA_W = 1024;
  localparam int AXI_ID_W   = 4;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_ADDR_W-1:0] addr;
    logic [7:0]            len;    // beats - 1
  } axi_ax_t;

  typedef struct packed {
    logic [AXI_DATA_W-1:0] data;
    logic                  last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_DATA_W-1:0] data;
    logic                  last;
  } axi_r_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
  } axi_b_t;
endpackage
