// sram_2p: one 256 x 64-bit buffer bank, one synchronous read port and one
// write port (both may be used in the same cycle).
//
// A read issued in cycle c returns data in c+1; rdata then holds until the
// next read, so a consumer that stalls needs no extra register. A read and
// a write to the same address in one cycle return the old word. Written as
// an array so synthesis can map it to an SRAM macro; the chip used foundry
// SRAM macros (five banks of 2 KB, 10 KB in all), whose port structure the
// paper does not give.
module sram_2p
  import dla_pkg::*;
#(
  parameter int DEPTH = BUF_DEPTH,
  parameter int WIDTH = DATA_W,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
