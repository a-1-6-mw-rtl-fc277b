// bn_reg: the 32 x 64-bit batch-normalisation register file.
//
// Written one word at a time from the host side; two combinational read
// ports give the scale word and the bias word of the current output group
// to the normalisation unit in the same cycle. This design stores scale and
// bias of channel group g in entries base+2g and base+2g+1, one FP8 value
// per byte (byte i for lane i); the paper gives only the size.
// Flip-flops, reset to zero.
module bn_reg
  import dla_pkg::*;
#(
  parameter int DEPTH = BN_DEPTH,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [AW-1:0]     raddr_a,
  output logic [DATA_W-1:0] rdata_a,
  input  logic [AW-1:0]     raddr_b,
  output logic [DATA_W-1:0] rdata_b
);
  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];
endmodule
