// wgt_addr_ctrl: weight address controller. Combinational.
//
// Weight buffer layouts (one word = eight FP8 weights, byte i for PE i):
//  CONV/PW : for filter group og and window word k, the eight rows
//            row_base .. row_base+7 (row_base = wgt_base + (og*n_in + k)*8)
//            hold, for each of the eight input lanes of that word, the
//            weights of the eight filters. row_base travels with the word
//            through the zero-skipping unit; the read address is
//            row_base + offset index of the nonzero lane being broadcast.
//  DW      : tap k of channel group g at wgt_base + k*n_grp + g (kernel
//            stored without the dilation zeros).
//  TCONV   : tap index ph + k*s of channel group g at
//            wgt_base + (ph + k*s)*n_grp + g, where the phase
//            ph = (s - (n mod s)) mod s of output sample n selects one of
//            the s decomposed sub-kernels. For s=3 and three taps per phase
//            this gives rows {1,4,7}, {3,6,9}, {2,5,8} (1-based) for outputs
//            1, 2, 3, as in the paper's decomposition example.
// The row products are computed wide and their upper bits dropped on
// purpose: all addresses wrap modulo the 256-word bank.
// Paper: base + offset index addressing and the kernel decomposition.
// This design: the layouts and the formulas.
module wgt_addr_ctrl
  import dla_pkg::*;
(
  input  mode_e             mode,
  input  logic [ADDR_W-1:0] wgt_base,
  input  logic [7:0]        n_in,
  input  logic [7:0]        n_grp,
  input  logic [3:0]        tstride,
  input  logic [7:0]        og,      // filter group of the fetched word
  input  logic [7:0]        kf,      // word index of the fetched word
  output logic [ADDR_W-1:0] row_base,
  input  logic [ADDR_W-1:0] zs_tag,  // row_base of the broadcast entry
  input  logic [2:0]        zs_off,  // its offset index
  input  logic [7:0]        k,       // tap (DW/TCONV)
  input  logic [7:0]        g,       // channel group (DW/TCONV)
  input  logic [3:0]        r,       // n mod s (TCONV)
  output logic [ADDR_W-1:0] addr
);
  logic [3:0]  ph;
  logic [23:0] row;
  always_comb begin
    row_base = wgt_base + ADDR_W'((24'(og) * 24'(n_in) + 24'(kf)) * 24'd8);
    ph  = (r == '0) ? 4'd0 : tstride - r;
    row = '0;
    unique case (mode)
      MODE_CONV, MODE_PW:
        addr = zs_tag + ADDR_W'(zs_off);
      MODE_DW: begin
        row  = 24'(k) * 24'(n_grp);
        addr = wgt_base + ADDR_W'(row) + ADDR_W'(g);
      end
      default: begin
        row  = (24'(ph) + 24'(k) * 24'(tstride)) * 24'(n_grp);
        addr = wgt_base + ADDR_W'(row) + ADDR_W'(g);
      end
    endcase
  end
endmodule
