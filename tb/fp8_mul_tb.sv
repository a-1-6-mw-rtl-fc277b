// fp8_mul_tb: checks the FP8 multiplier against real arithmetic, first on
// the corner codes (zero, +-0, the extremes), then on every pair of a
// random sample of codes.
module fp8_mul_tb;
  import tb_ref_pkg::*;
  logic [7:0] a, b;
  logic signed [27:0] p;
  int checks = 0, failures = 0;

  fp8_mul dut (.a, .b, .p);

  task automatic check(logic [7:0] x, logic [7:0] y);
    longint exp_p;
    a = x; b = y;
    #1;
    exp_p = prod_fx(x, y);
    checks++;
    if (longint'(p) != exp_p) begin
      failures++;
      if (failures < 10)
        $display("FAIL %h*%h: got %0d expected %0d", x, y, p, exp_p);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] corner [8] = '{8'h00, 8'h80, 8'h7f, 8'hff, 8'h01, 8'h78, 8'h38, 8'hb9};
    foreach (corner[i]) foreach (corner[j]) check(corner[i], corner[j]);
    // exhaustive over all codes against a few operands, random otherwise
    for (int i = 0; i < 256; i++) begin
      check(8'(i), 8'h78);       // 1.0
      check(8'(i), 8'h7f);       // 1.875
      check(8'(i), 8'h4d);
    end
    for (int n = 0; n < 3000; n++) check(8'($urandom), 8'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
