// fp8_mul: multiplier for the shifted 8-bit floating-point format.
//
// Computes a*b exactly and returns it as a signed fixed-point number with
// ACC_FRAC fraction bits, ready to be added into a PE accumulator. Purely
// combinational.
//
// How it works. The significands are 1.Ma and 1.Mb (4 bits each). As in the
// paper, only the 3-bit fractions need a real multiplier:
//   (8+Ma)*(8+Mb) = 64 + 8*(Ma+Mb) + Ma*Mb,
// an 8-bit integer P worth P*2^-6. The exponents are added (Ea+Eb, 0..30)
// and P is shifted into place: value = P * 2^(Ea+Eb-2*EXP_BIAS-6). Bits
// below 2^-ACC_FRAC are dropped (truncation of the magnitude), then the sign
// Sa^Sb is applied. A zero operand (E=0, M=0) gives 0.
//
// Paper: format 1/4/3 with bias 15 and the 3-bit mantissa multiplier.
// This design: the fixed-point product, the truncation and the zero code.
module fp8_mul
  import dla_pkg::*;
#(
  parameter int EXP_B  = EXP_BIAS,
  parameter int FRAC   = ACC_FRAC,
  parameter int P_W    = PROD_W
) (
  input  fp8_t               a,
  input  fp8_t               b,
  output logic signed [P_W-1:0] p
);
  localparam int RSH = 2 * EXP_B + 6 - FRAC;  // right shift after << (Ea+Eb)
  localparam int WIDE = 8 + 2 * 15 + 1;

  logic [2:0]      ma, mb;
  logic [3:0]      ea, eb;
  logic [5:0]      mfrac;     // 3-bit x 3-bit mantissa product
  logic [7:0]      sig;       // (1.Ma)*(1.Mb) * 2^6
  logic [4:0]      esum;
  logic [WIDE-1:0] shifted;
  logic [P_W-1:0]  mag;

  always_comb begin
    ma    = a[2:0];
    mb    = b[2:0];
    ea    = a[6:3];
    eb    = b[6:3];
    mfrac = ma * mb;
    sig   = 8'd64 + ({5'd0, ma} + {5'd0, mb}) * 8'd8 + {2'd0, mfrac};
    esum  = {1'b0, ea} + {1'b0, eb};
    shifted = {{(WIDE-8){1'b0}}, sig} << esum;
    mag   = P_W'(shifted >> RSH);
    if (fp8_is_zero(a) || fp8_is_zero(b))
      p = '0;
    else if (a[7] ^ b[7])
      p = -$signed(mag);
    else
      p = $signed(mag);
  end
endmodule
