// out_reg: the eight 8-bit output registers and the write-back to an
// in/out buffer.
//
// Parallel mode (serial=0): each in_valid loads all eight bytes at once
// (one output position of eight channels) and the word is written in the
// next cycle. Serial mode (serial=1, transposed convolution): each in_valid
// carries one output sample in byte 0; samples fill bytes 0..7 in order and
// the word is written once the eighth has arrived. Write addresses run
// base, base+1, ... from the last clear.
//
// Timing: wr_en is registered, one cycle after the in_valid that
// completes a word.
// Paper: eight 8-bit registers updated in parallel or serially before the
// buffer write (Figs. 12-15). This design: byte order (first sample in
// byte 0) and sequential addressing.
module out_reg
  import dla_pkg::*;
#(
  parameter int NL = LANES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,     // start of a layer
  input  logic [ADDR_W-1:0] base,
  input  logic              serial,
  input  logic              in_valid,
  input  fp8_t              in_q [NL],
  output logic              wr_en,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [NL*8-1:0]   wr_data
);
  localparam int IW = $clog2(NL);
  fp8_t              regs [NL];
  logic [IW-1:0]     idx;
  logic [ADDR_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx     <= '0;
      cnt     <= '0;
      wr_en   <= 1'b0;
      wr_addr <= '0;
      wr_data <= '0;
      for (int i = 0; i < NL; i++) regs[i] <= '0;
    end else begin
      wr_en <= 1'b0;
      if (clear) begin
        idx <= '0;
        cnt <= '0;
      end else if (in_valid) begin
        if (!serial) begin
          for (int i = 0; i < NL; i++) begin
            regs[i]         <= in_q[i];
            wr_data[i*8 +: 8] <= in_q[i];
          end
          wr_en   <= 1'b1;
          wr_addr <= base + cnt;
          cnt     <= cnt + 1'b1;
        end else begin
          regs[idx] <= in_q[0];
          idx       <= idx + 1'b1;
          if (idx == IW'(NL - 1)) begin
            for (int i = 0; i < NL - 1; i++) wr_data[i*8 +: 8] <= regs[i];
            wr_data[(NL-1)*8 +: 8] <= in_q[0];
            wr_en   <= 1'b1;
            wr_addr <= base + cnt;
            cnt     <= cnt + 1'b1;
          end
        end
      end
    end
  end
endmodule
