// pe_tb: drives one PE with random multiply-accumulate sequences, gated
// cycles (en=0) and back-to-back dumps, and compares the accumulator seen
// at each dump with a sum of exact products computed in the testbench.
module pe_tb;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, dump = 0;
  logic [7:0] a = 0, w = 0;
  logic signed [35:0] acc;
  int checks = 0, failures = 0;

  pe dut (.clk, .rst_n, .en, .dump, .a, .w, .acc);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ref_acc;
    int len;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // first output starts from the reset value 0
    ref_acc = 0;
    for (int o = 0; o < 300; o++) begin
      len = $urandom_range(0, 12);
      for (int i = 0; i < len; i++) begin
        en   = ($urandom_range(0, 3) != 0);
        a    = ($urandom_range(0, 4) == 0) ? 8'h00 : rand_fp8(0, 15);
        w    = rand_fp8(0, 15);
        dump = 0;
        if (en) ref_acc += prod_fx(a, w);
        @(negedge clk);
      end
      // dump: acc holds the finished sum in this cycle
      dump = 1;
      en   = $urandom_range(0, 1);
      a    = rand_fp8(0, 15);
      w    = rand_fp8(0, 15);
      checks++;
      if (longint'(acc) != ref_acc) begin
        failures++;
        if (failures < 10) $display("FAIL output %0d: acc=%0d expected %0d", o, acc, ref_acc);
      end
      ref_acc = en ? prod_fx(a, w) : 0;
      @(negedge clk);
      dump = 0; en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
