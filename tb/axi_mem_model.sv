// axi_mem_model: behavioural stand-in for the LPDDR5X memory controllers and
// DRAM behind the device's AXI4 port (not synthesizable). Memory is an
// associative array of 1,024-bit lines indexed by byte address / 128. Reads
// return one beat per cycle after a fixed latency; writes are acknowledged
// after the last beat. Testbenches preload and inspect `mem` directly.
// The paper does not describe the memory side; latency and behaviour here
// are this model's own choices.
module axi_mem_model
  import axi_pkg::*;
#(
  parameter int RD_LAT = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    arvalid,
  output logic    arready,
  input  axi_ax_t ar,
  output logic    rvalid,
  input  logic    rready,
  output axi_r_t  r,
  input  logic    awvalid,
  output logic    awready,
  input  axi_ax_t aw,
  input  logic    wvalid,
  output logic    wready,
  input  axi_w_t  w,
  output logic    bvalid,
  input  logic    bready,
  output axi_b_t  b
);
  logic [AXI_DATA_W-1:0] mem [longint];

  function automatic logic [AXI_DATA_W-1:0] rd(input longint line);
    return mem.exists(line) ? mem[line] : '0;
  endfunction

  // read channel
  logic                  rbusy;
  longint                rline;
  int                    rleft, rwait;
  logic [AXI_ID_W-1:0]   rid;
  assign arready = !rbusy;
  assign rvalid  = rbusy && rwait == 0;
  assign r       = '{id: rid, data: rd(rline), last: (rleft == 1)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbusy <= 1'b0; rline <= 0; rleft <= 0; rwait <= 0; rid <= '0;
    end else if (!rbusy) begin
      if (arvalid) begin
        rbusy <= 1'b1; rline <= longint'(ar.addr >> 7); rleft <= int'(ar.len) + 1;
        rwait <= RD_LAT; rid <= ar.id;
      end
    end else if (rwait != 0) begin
      rwait <= rwait - 1;
    end else if (rready) begin
      rline <= rline + 1;
      rleft <= rleft - 1;
      if (rleft == 1) rbusy <= 1'b0;
    end
  end

  // write channel
  logic                wbusy, bpend;
  longint              wline;
  logic [AXI_ID_W-1:0] wid;
  assign awready = !wbusy && !bpend;
  assign wready  = wbusy;
  assign bvalid  = bpend;
  assign b       = '{id: wid};

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbusy <= 1'b0; bpend <= 1'b0; wline <= 0; wid <= '0;
    end else begin
      if (!wbusy && !bpend && awvalid) begin
        wbusy <= 1'b1; wline <= longint'(aw.addr >> 7); wid <= aw.id;
      end
      if (wbusy && wvalid) begin
        mem[wline] = w.data;
        wline <= wline + 1;
        if (w.last) begin wbusy <= 1'b0; bpend <= 1'b1; end
      end
      if (bpend && bready) bpend <= 1'b0;
    end
  end
endmodule
