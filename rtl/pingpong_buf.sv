// pingpong_buf: a ping-pong pair of 256 x 64-bit banks.
//
// The accelerator side ("a" ports) works on bank `sel`; the host/DMA side
// ("h" ports) reaches the other bank, so the next layer's data can be
// loaded, or the last results drained, while the accelerator computes.
// Flipping `sel` swaps the roles. Each side has a synchronous read port
// (data one cycle after re, held until the next read) and a write port.
// Used for in/out buffer1 and for the weight buffer.
// Paper: the ping-pong arrangement and the bank sizes. This design: the
// port split and that `sel` comes from the layer descriptor.
module pingpong_buf
  import dla_pkg::*;
#(
  parameter int DEPTH = BUF_DEPTH,
  parameter int WIDTH = DATA_W,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sel,
  // accelerator side
  input  logic             a_re,
  input  logic [AW-1:0]    a_raddr,
  output logic [WIDTH-1:0] a_rdata,
  input  logic             a_we,
  input  logic [AW-1:0]    a_waddr,
  input  logic [WIDTH-1:0] a_wdata,
  // host / DMA side
  input  logic             h_re,
  input  logic [AW-1:0]    h_raddr,
  output logic [WIDTH-1:0] h_rdata,
  input  logic             h_we,
  input  logic [AW-1:0]    h_waddr,
  input  logic [WIDTH-1:0] h_wdata
);
  logic             re   [2];
  logic [AW-1:0]    ra   [2];
  logic [WIDTH-1:0] rd   [2];
  logic             we   [2];
  logic [AW-1:0]    wa   [2];
  logic [WIDTH-1:0] wd   [2];
  logic             a_bank_q, h_bank_q;  // bank that answered the last read

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic mine;  // this bank belongs to the accelerator side
    assign mine  = (sel == 1'(b));
    assign re[b] = mine ? a_re    : h_re;
    assign ra[b] = mine ? a_raddr : h_raddr;
    assign we[b] = mine ? a_we    : h_we;
    assign wa[b] = mine ? a_waddr : h_waddr;
    assign wd[b] = mine ? a_wdata : h_wdata;
    sram_2p #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_bank (
      .clk, .re(re[b]), .raddr(ra[b]), .rdata(rd[b]),
      .we(we[b]), .waddr(wa[b]), .wdata(wd[b]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_bank_q <= 1'b0;
      h_bank_q <= 1'b1;
    end else begin
      if (a_re) a_bank_q <= sel;
      if (h_re) h_bank_q <= !sel;
    end
  end

  assign a_rdata = rd[a_bank_q];
  assign h_rdata = rd[h_bank_q];
endmodule
