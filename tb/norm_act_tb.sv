// norm_act_tb: random accumulator sets through every combination of
// activation (none/ReLU/tanh), BN on/off and per-lane or summed mode.
// The reference works in real numbers: x = acc/2^24 (or the sum of the
// eight), y = x*gamma + beta, activation, FP8 quantisation. Without BN the
// result must match exactly; with BN one code of difference is allowed
// (the hardware floors the scaled value at 2^-24 before quantising).
// Checks the two-cycle latency as well.
module norm_act_tb;
  import tb_ref_pkg::*;
  import dla_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, sum_mode = 0, bn_en = 0, out_valid;
  act_e act = ACT_NONE;
  logic signed [ACC_W-1:0] acc [8];
  logic [63:0] gamma_w = 0, beta_w = 0;
  fp8_t out_q [8];
  int checks = 0, failures = 0;

  norm_act dut (.clk, .rst_n, .in_valid, .acc, .sum_mode, .act, .bn_en,
                .gamma_w, .beta_w, .out_valid, .out_q);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] expq [8];
    real x, y, s;
    int tol;
    for (int i = 0; i < 8; i++) acc[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      sum_mode = $urandom_range(0, 3) == 0;
      bn_en    = $urandom_range(0, 1);
      act      = act_e'($urandom_range(0, 2));
      for (int i = 0; i < 8; i++) begin
        // magnitudes from 2^-20 to about 3
        acc[i] = ACC_W'($signed($urandom_range(0, 1 << ($urandom_range(4, 25)))));
        if ($urandom_range(0, 1)) acc[i] = -acc[i];
        if ($urandom_range(0, 15) == 0) acc[i] = '0;
        gamma_w[i*8 +: 8] = rand_fp8(10, 15);
        beta_w[i*8 +: 8]  = ($urandom_range(0, 3) == 0) ? 8'h00 : rand_fp8(4, 14);
      end
      s = 0.0;
      for (int i = 0; i < 8; i++) s += real'(acc[i]) / TWO24;
      for (int i = 0; i < 8; i++) begin
        x = sum_mode ? ((i == 0) ? s : 0.0) : real'(acc[i]) / TWO24;
        y = bn_en ? x * fp8_real(gamma_w[i*8 +: 8]) + fp8_real(beta_w[i*8 +: 8]) : x;
        if (act == ACT_RELU && y < 0) y = 0.0;
        if (act == ACT_TANH) y = tanh_pwl(y);
        expq[i] = q_fp8(y);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (out_valid) begin failures++; $display("FAIL result after one cycle"); end
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no result after two cycles"); end
      tol = bn_en ? 1 : 0;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (code_dist(out_q[i], expq[i]) > tol) begin
          failures++;
          if (failures < 12)
            $display("FAIL n=%0d lane %0d sum=%b bn=%b act=%0d: got %h expected %h",
                     n, i, sum_mode, bn_en, act, out_q[i], expq[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
