// norm_act: batch normalisation, activation and FP8 quantisation of PE
// results (the BN/ReLU/tanh box and the PE-sum adder of the architecture).
//
// Two registered stages.
//  Stage A (in_valid, the cycle the PEs dump): latches the eight
//   accumulators, or in sum_mode their sum in lane 0 (transposed
//   convolution, where the eight PEs hold partial sums of one output
//   sample), together with the scale and bias words read from the BN
//   register for this output group.
//  Stage B: per lane y = x*gamma + beta (gamma, beta FP8, lane i uses byte
//   i of the two words; with bn_en=0 gamma=1 and beta=0), then ReLU, a
//   piecewise-linear tanh, or nothing, then conversion to FP8: leading-one
//   search, truncation to 3 mantissa bits, saturation to +-1.875,
//   flush to zero below 2^-15 (and for exactly 2^-15, whose code is zero).
// out_valid follows in_valid by two cycles; one result set per cycle.
//
// Piecewise tanh, on |x| with the sign restored:
//   |x| < 0.5 : |x|      0.5..1 : |x|/2 + 1/4
//   1..2      : |x|/4 + 1/2      >= 2 : 1
// Paper: BN, ReLU and tanh applied to the PE outputs, and the adder with a
// register that sums the eight PE outputs for the transposed convolution.
// This design: the arithmetic above, the tanh approximation, the rounding,
// and the BN word layout.
module norm_act
  import dla_pkg::*;
#(
  parameter int NL = LANES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] acc [NL],
  input  logic                    sum_mode,
  input  act_e                    act,
  input  logic                    bn_en,
  input  logic [NL*8-1:0]         gamma_w,
  input  logic [NL*8-1:0]         beta_w,
  output logic                    out_valid,
  output fp8_t                    out_q [NL]
);
  localparam int F   = ACC_FRAC;
  localparam int XW  = SUM_W;        // stage A value width
  localparam int YW  = SUM_W + 6;    // after scaling and bias

  logic                   va_q;
  logic signed [XW-1:0]   xa_q [NL];
  logic [NL*8-1:0]        g_q, b_q;
  act_e                   act_q;
  logic                   bn_q;

  // Stage A.
  logic signed [XW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < NL; i++)
      sum = sum + XW'(acc[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va_q  <= 1'b0;
      g_q   <= '0;
      b_q   <= '0;
      act_q <= ACT_NONE;
      bn_q  <= 1'b0;
      for (int i = 0; i < NL; i++) xa_q[i] <= '0;
    end else begin
      va_q <= in_valid;
      if (in_valid) begin
        g_q   <= gamma_w;
        b_q   <= beta_w;
        act_q <= act;
        bn_q  <= bn_en;
        for (int i = 0; i < NL; i++)
          xa_q[i] <= sum_mode ? ((i == 0) ? sum : '0) : XW'(acc[i]);
      end
    end
  end

  // y = x * gamma, gamma = (8+M) * 2^(E-EXP_BIAS-3)
  function automatic logic signed [YW-1:0] bn_scale(logic signed [XW-1:0] x, fp8_t g);
    logic signed [YW-1:0] t;
    int sh;
    if (fp8_is_zero(g)) return '0;
    t  = YW'(x) * $signed({1'b0, 1'b1, g[2:0]});
    sh = EXP_BIAS + 3 - int'(g[6:3]);
    t  = t >>> sh;
    return g[7] ? -t : t;
  endfunction

  // beta as fixed point, F fraction bits
  function automatic logic signed [YW-1:0] fp8_to_fx(fp8_t b);
    logic signed [YW-1:0] t;
    int sh;
    if (fp8_is_zero(b)) return '0;
    t  = YW'({1'b1, b[2:0]});
    sh = F - EXP_BIAS - 3 + int'(b[6:3]);
    t  = t <<< sh;
    return b[7] ? -t : t;
  endfunction

  function automatic logic signed [YW-1:0] tanh_pwl(logic signed [YW-1:0] x);
    logic [YW-1:0] m, r;
    m = x[YW-1] ? YW'(-x) : YW'(x);
    if (m < (YW'(1) << (F - 1)))      r = m;
    else if (m < (YW'(1) << F))       r = (m >> 1) + (YW'(1) << (F - 2));
    else if (m < (YW'(1) << (F + 1))) r = (m >> 2) + (YW'(1) << (F - 1));
    else                              r = YW'(1) << F;
    return x[YW-1] ? -$signed(r) : $signed(r);
  endfunction

  function automatic fp8_t fx_to_fp8(logic signed [YW-1:0] x);
    logic [YW-1:0] m;
    int p, e;
    logic [2:0] man;
    m = x[YW-1] ? YW'(-x) : YW'(x);
    if (m >= (YW'(1) << (F + 1))) return {x[YW-1], 4'd15, 3'd7};
    p = -1;
    for (int i = 0; i <= F; i++)
      if (m[i]) p = i;
    e = p - F + EXP_BIAS;
    if (p < 0 || e < 0) return 8'h00;
    man = m[p-1 -: 3];
    if (e == 0 && man == 3'd0) return 8'h00;
    return {x[YW-1], e[3:0], man};
  endfunction

  // Stage B.
  fp8_t q_d [NL];
  always_comb begin
    for (int i = 0; i < NL; i++) begin
      logic signed [YW-1:0] y;
      y = bn_q ? bn_scale(xa_q[i], g_q[i*8 +: 8]) + fp8_to_fx(b_q[i*8 +: 8])
               : YW'(xa_q[i]);
      case (act_q)
        ACT_RELU: if (y < 0) y = '0;
        ACT_TANH: y = tanh_pwl(y);
        default: ;
      endcase
      q_d[i] = fx_to_fp8(y);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < NL; i++) out_q[i] <= '0;
    end else begin
      out_valid <= va_q;
      if (va_q)
        for (int i = 0; i < NL; i++) out_q[i] <= q_d[i];
    end
  end
endmodule
