// act_addr_ctrl: activation address controller. Maps the controller's loop
// indexes to an in/out buffer word address. Combinational.
//
// Buffer layouts (one word = eight FP8 lanes):
//  CONV/PW : window `t` starts at act_base + t*in_stride and is n_in words
//            long; word `k` of it is read (PW: the channel groups of one
//            time step; CONV: eight consecutive samples per word).
//  DW      : word (time u, channel group g) at act_base + u*n_grp + g. The
//            dilated convolution is decomposed: output t, tap k reads
//            u = t + k*(dil+1), so the zeros of the dilated kernel never
//            reach a PE (taps 1, 4, 7 for dil=2 as in the paper's example).
//  TCONV   : same layout as DW; output sample n reads u = m + k where
//            m = ceil(n/s) is kept by the controller, so the zeros a
//            transposed convolution inserts between inputs are never read.
// Addresses wrap at the buffer size.
// Paper: the d+1 grouping of inputs for the dilated convolution. This
// design: the layouts and the address formulas.
module act_addr_ctrl
  import dla_pkg::*;
(
  input  mode_e             mode,
  input  logic [ADDR_W-1:0] act_base,
  input  logic [7:0]        in_stride,
  input  logic [7:0]        n_grp,
  input  logic [7:0]        dil,
  input  logic [11:0]       t,      // output position (CONV/PW/DW)
  input  logic [11:0]       m,      // first input of output sample (TCONV)
  input  logic [7:0]        k,      // word in window / tap
  input  logic [7:0]        g,      // channel group (DW/TCONV)
  output logic [ADDR_W-1:0] addr
);
  logic [23:0] u;
  always_comb begin
    u = '0;
    unique case (mode)
      MODE_CONV, MODE_PW:
        addr = act_base + ADDR_W'(t * in_stride) + ADDR_W'(k);
      MODE_DW: begin
        u    = 24'(t) + 24'(k) * (24'(dil) + 24'd1);
        addr = act_base + ADDR_W'(u * 24'(n_grp)) + ADDR_W'(g);
      end
      default: begin
        u    = 24'(m) + 24'(k);
        addr = act_base + ADDR_W'(u * 24'(n_grp)) + ADDR_W'(g);
      end
    endcase
  end
endmodule
