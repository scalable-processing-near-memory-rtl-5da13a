// sram_buffer: on-chip SRAM buffer of the KV manager (used for the
// Matrix/Vector buffer and the Output Vector buffer).
//
// A simple-dual-port memory written as an array: one write port and one read
// port, each one row wide, with a registered read (data on rdata one cycle
// after re). A write and a read of the same row in one cycle return the old
// data. The paper gives the buffers' names and their 2.25 MB total; the
// split between the two buffers, the row width and the port structure are
// this design's choices.
module sram_buffer #(
  parameter int ROWS  = 256,
  parameter int WIDTH = 65536
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  logic [WIDTH-1:0]        wdata,
  input  logic                    re,
  input  logic [$clog2(ROWS)-1:0] raddr,
  output logic [WIDTH-1:0]        rdata
);
  logic [WIDTH-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
