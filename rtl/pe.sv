// pe: one processing element, an FP8 multiplier and a fixed-point
// accumulator (output stationary).
//
// Each cycle with en=1 the product a*w is added into acc. A dump ends the
// current output: in that cycle acc still shows the finished sum (the
// normalisation unit samples it) and is replaced by the new product (en=1)
// or by zero, so back-to-back outputs need no idle cycle. en=0 holds the
// register; it stands for the gated clock the paper uses for a PE whose
// activation is zero, and is how zero activations are skipped in the
// depthwise and transposed convolutions.
//
// Timing: acc is registered; a product issued in cycle c is in acc at c+1.
// Paper: multiplier, adder and accumulator register per PE (Fig. 10).
// This design: the accumulator width and the dump protocol.
module pe
  import dla_pkg::*;
#(
  parameter int A_W = ACC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,     // multiply-accumulate this cycle
  input  logic                dump,   // start a new output (acc is read now)
  input  fp8_t                a,      // activation
  input  fp8_t                w,      // weight
  output logic signed [A_W-1:0] acc
);
  logic signed [PROD_W-1:0] prod;
  logic signed [A_W-1:0]    base, addend;

  fp8_mul u_mul (.a(a), .b(w), .p(prod));

  always_comb begin
    base   = dump ? '0 : acc;
    addend = en ? A_W'(prod) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      acc <= '0;
    else if (en || dump)
      acc <= base + addend;
  end
endmodule
