// zero_skip: on-the-fly nonzero detector and compactor for broadcast
// convolutions.
//
// A 64-bit activation word holds LANES FP8 values. LANES comparators test
// each value for zero (nz_mask, combinational on in_data, also used by the
// top to gate PEs in the depthwise and transposed modes). When a word is
// loaded, a multiplexer packs the offset indexes (lane numbers) and values
// of its nonzero lanes, in lane order, into an offset-index register and a
// nonzero-value register. One (offset, value) pair is then shifted out per
// cycle: the offset goes to the weight address controller, the value is
// broadcast to all PEs. No index memory is needed.
//
// Handshake. in_valid/in_ready load a word; out_valid/out_ready shift one
// entry. A new word is taken while the register is empty or while its last
// entry leaves, so a word with n nonzeros costs n cycles and an all-zero
// word one cycle. in_tag travels with the word (the controller passes the
// weight row base). in_last marks the last word of one output; out_last is
// raised with the final entry of such a word. An all-zero last word yields
// one marker entry with out_nz=0, so the end of the output is still seen.
//
// Offsets are 0-based lane numbers (the paper's figure counts from 1).
// rst_n also disables the handshake assertion, which lint reports as a
// reset used both asynchronously and synchronously.
// Paper: comparators, selection mux, two shift registers (Fig. 11).
// This design: the handshake, the tag and the marker entry.
module zero_skip
  import dla_pkg::*;
#(
  parameter int NL    = LANES,
  parameter int TAG_W = ADDR_W,
  localparam int OW   = $clog2(NL),
  localparam int CW   = $clog2(NL + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [NL*8-1:0]   in_data,
  input  logic [TAG_W-1:0]  in_tag,
  input  logic              in_last,
  output logic [NL-1:0]     nz_mask,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [OW-1:0]     out_offset,
  output fp8_t              out_value,
  output logic              out_nz,
  output logic [TAG_W-1:0]  out_tag,
  output logic              out_last
);
  logic [OW-1:0] off_q [NL];
  fp8_t          val_q [NL];
  logic [CW-1:0] cnt_q;
  logic [TAG_W-1:0] tag_q;
  logic          last_q;
  logic          marker_q;   // current content is a marker entry

  logic [OW-1:0] off_d [NL];
  fp8_t          val_d [NL];
  logic [CW-1:0] nnz;
  logic          load, shift;

  // Zero comparators.
  always_comb begin
    for (int i = 0; i < NL; i++)
      nz_mask[i] = !fp8_is_zero(in_data[i*8 +: 8]);
  end

  // Compaction multiplexer: nonzero lanes packed to the front, lane order.
  always_comb begin
    nnz = '0;
    for (int i = 0; i < NL; i++) begin
      off_d[i] = '0;
      val_d[i] = '0;
    end
    for (int i = 0; i < NL; i++) begin
      if (nz_mask[i]) begin
        off_d[nnz[OW-1:0]] = OW'(i);
        val_d[nnz[OW-1:0]] = in_data[i*8 +: 8];
        nnz = nnz + 1'b1;
      end
    end
  end

  assign out_valid  = cnt_q != '0;
  assign shift      = out_valid && out_ready;
  assign in_ready   = (cnt_q == '0) || (cnt_q == CW'(1) && out_ready);
  assign load       = in_valid && in_ready;
  assign out_offset = off_q[0];
  assign out_value  = val_q[0];
  assign out_nz     = !marker_q;
  assign out_tag    = tag_q;
  assign out_last   = last_q && (cnt_q == CW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q    <= '0;
      tag_q    <= '0;
      last_q   <= 1'b0;
      marker_q <= 1'b0;
      for (int i = 0; i < NL; i++) begin
        off_q[i] <= '0;
        val_q[i] <= '0;
      end
    end else if (load) begin
      tag_q  <= in_tag;
      last_q <= in_last;
      if (nnz == '0 && in_last) begin
        cnt_q    <= CW'(1);
        marker_q <= 1'b1;
      end else begin
        cnt_q    <= nnz;
        marker_q <= 1'b0;
      end
      for (int i = 0; i < NL; i++) begin
        off_q[i] <= off_d[i];
        val_q[i] <= val_d[i];
      end
    end else if (shift) begin
      cnt_q <= cnt_q - 1'b1;
      for (int i = 0; i < NL - 1; i++) begin
        off_q[i] <= off_q[i+1];
        val_q[i] <= val_q[i+1];
      end
      off_q[NL-1] <= '0;
      val_q[NL-1] <= '0;
    end
  end

  // A word may only be taken when the previous one is (about to be) gone.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    load |-> (cnt_q == '0 || shift));
endmodule
