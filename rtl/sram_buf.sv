// sram_buf: one on-chip buffer bank (I, W or O buffer of the array).
//
// A simple dual-port memory, one write port and one read port, with a registered read
// (data appears the cycle after re). The paper gives the total on-chip SRAM (96 KB) and
// shows the buffers' placement (one I buffer per row, one W and one O buffer per column
// at the top and at the bottom) but not their organisation; depth, width and the
// one-cycle read latency are this design's choices. Memory contents are not reset.
module sram_buf #(
  parameter int DEPTH = 192,
  parameter int WIDTH = 72,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
