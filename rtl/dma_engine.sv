// dma_engine: moves whole buffer rows between LPDDR5X (AXI4 master side, via
// the memory ARB/MUX) and the on-chip buffers.
//
// Load (cmd_store = 0): for each of cmd_rows rows, one AXI4 read burst of
// LD_W/1024 beats is assembled into a row and written to the Matrix/Vector
// buffer at cmd_buf + n. Store (cmd_store = 1): each row of the Output Vector
// buffer is read (one-cycle SRAM latency) and written to DRAM as one burst of
// ST_W/1024 beats. DRAM addresses advance by the row size in bytes. One burst
// is in flight at a time.
// The paper describes the DMA only as a light engine between LPDDR5X and the
// internal buffers; the row-granular command and the burst scheme are this
// design's. The 1 MB DMA buffers of the paper are not modelled: data go
// straight into the vector buffers.
// Interface: cmd_valid/cmd_ready accepts a command when idle; done pulses
// when the last row has been written (load) or acknowledged (store).
module dma_engine
  import axi_pkg::*;
#(
  parameter int LD_W    = 65536,   // Matrix/Vector buffer row bits
  parameter int ST_W    = 2048,    // Output buffer row bits
  parameter int LD_ROWS = 256,
  parameter int ST_ROWS = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  input  logic                       cmd_store,
  input  logic [AXI_ADDR_W-1:0]      cmd_addr,
  input  logic [15:0]                cmd_buf,
  input  logic [15:0]                cmd_rows,
  output logic                       done,
  // Matrix/Vector buffer write port
  output logic                       ld_we,
  output logic [$clog2(LD_ROWS)-1:0] ld_addr,
  output logic [LD_W-1:0]            ld_data,
  // Output buffer read port
  output logic                       st_re,
  output logic [$clog2(ST_ROWS)-1:0] st_addr,
  input  logic [ST_W-1:0]            st_data,
  // AXI4 master
  output logic    arvalid,
  input  logic    arready,
  output axi_ax_t ar,
  input  logic    rvalid,
  output logic    rready,
  input  axi_r_t  r,
  output logic    awvalid,
  input  logic    awready,
  output axi_ax_t aw,
  output logic    wvalid,
  input  logic    wready,
  output axi_w_t  w,
  input  logic    bvalid,
  output logic    bready,
  input  axi_b_t  b
);
  localparam int LD_BEATS = LD_W / AXI_DATA_W;
  localparam int ST_BEATS = ST_W / AXI_DATA_W;

  typedef enum logic [2:0] {D_IDLE, D_AR, D_R, D_RD_BUF, D_AW, D_W, D_B} dstate_e;
  dstate_e st;

  logic [AXI_ADDR_W-1:0] addr;
  logic [15:0]           bufrow, rows_left;
  logic [7:0]            beat;
  logic [LD_W-1:0]       ld_row;
  logic [ST_W-1:0]       st_row;

  assign cmd_ready = (st == D_IDLE);

  assign arvalid = (st == D_AR);
  assign ar      = '{id: AXI_ID_W'(1), addr: addr, len: 8'(LD_BEATS - 1)};
  assign rready  = (st == D_R);
  assign awvalid = (st == D_AW);
  assign aw      = '{id: AXI_ID_W'(1), addr: addr, len: 8'(ST_BEATS - 1)};
  assign wvalid  = (st == D_W);
  assign w       = '{data: st_row[beat[$clog2(ST_BEATS+1)-1:0]*AXI_DATA_W +: AXI_DATA_W],
                     last: (beat == 8'(ST_BEATS - 1))};
  assign bready  = (st == D_B);

  assign ld_addr = ($clog2(LD_ROWS))'(bufrow);
  assign ld_data = ld_row;
  assign st_addr = ($clog2(ST_ROWS))'(bufrow);
  assign st_re   = (st == D_RD_BUF);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; addr <= '0; bufrow <= '0; rows_left <= '0;
      beat <= '0; ld_we <= 1'b0; done <= 1'b0; ld_row <= '0; st_row <= '0;
    end else begin
      ld_we <= 1'b0;
      done  <= 1'b0;
      if (ld_we) bufrow <= bufrow + 1'b1;
      case (st)
        D_IDLE: if (cmd_valid) begin
          addr <= cmd_addr; bufrow <= cmd_buf; rows_left <= cmd_rows;
          if (cmd_rows == '0) done <= 1'b1;
          else st <= cmd_store ? D_RD_BUF : D_AR;
        end
        D_AR: if (arready) begin st <= D_R; beat <= '0; end
        D_R: if (rvalid) begin
          ld_row[beat*AXI_DATA_W +: AXI_DATA_W] <= r.data;
          beat <= beat + 1'b1;
          if (r.last) begin
            ld_we     <= 1'b1;
            addr      <= addr + AXI_ADDR_W'(LD_W / 8);
            rows_left <= rows_left - 1'b1;
            if (rows_left == 16'd1) begin st <= D_IDLE; done <= 1'b1; end
            else st <= D_AR;
          end
        end
        D_RD_BUF: st <= D_AW;
        D_AW: begin
          st_row <= st_data;          // SRAM output holds while re is low
          if (awready) begin st <= D_W; beat <= '0; end
        end
        D_W: if (wready) begin
          beat <= beat + 1'b1;
          if (beat == 8'(ST_BEATS - 1)) st <= D_B;
        end
        D_B: if (bvalid) begin
          addr      <= addr + AXI_ADDR_W'(ST_W / 8);
          bufrow    <= bufrow + 1'b1;
          rows_left <= rows_left - 1'b1;
          beat      <= '0;
          if (rows_left == 16'd1) begin st <= D_IDLE; done <= 1'b1; end
          else st <= D_RD_BUF;
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  initial assert (LD_W % AXI_DATA_W == 0 && ST_W % AXI_DATA_W == 0 && LD_W / AXI_DATA_W <= 256)
    else $error("dma_engine: row widths must be whole bursts");
endmodule
