// act_addr_ctrl_tb: the paper's decomposition examples (dilated, d=2:
// inputs 1,4,7 / 2,5,8 / 3,6,9; transposed, s=3: a1..a3 then a2..a4) and
// random index sets for every mode against integer formulas.
module act_addr_ctrl_tb;
  import dla_pkg::*;
  mode_e mode;
  logic [7:0] act_base, in_stride, n_grp, k, g, addr;
  logic [7:0] dil;
  logic [11:0] t, m;
  int checks = 0, failures = 0;

  act_addr_ctrl dut (.mode, .act_base, .in_stride, .n_grp, .dil, .t, .m, .k, .g, .addr);

  task automatic expect_addr(int e, string what);
    #1;
    checks++;
    if (addr !== 8'(e)) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, addr, 8'(e));
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ek;
    #1;
    // dilated, d=2, one channel group: output o_(t+1) uses a_(t+1), a_(t+4), a_(t+7)
    mode = MODE_DW; act_base = 0; n_grp = 1; dil = 2; in_stride = 0; g = 0; m = 0;
    for (int tt = 0; tt < 3; tt++)
      for (int kk = 0; kk < 3; kk++) begin
        t = 12'(tt); k = 8'(kk);
        expect_addr(tt + 3 * kk, "dilated example");
      end
    // transposed, s=3: o1 <- a1 a2 a3, o2 <- a2 a3 a4, o3 <- a2 a3 a4
    mode = MODE_TCONV;
    for (int n = 0; n < 3; n++)
      for (int kk = 0; kk < 3; kk++) begin
        m = 12'((n + 2) / 3); k = 8'(kk);
        expect_addr(((n + 2) / 3) + kk, "transposed example");
      end
    for (int n = 0; n < 3000; n++) begin
      mode = mode_e'($urandom_range(0, 3));
      act_base = 8'($urandom); in_stride = 8'($urandom_range(1, 40));
      n_grp = 8'($urandom_range(1, 32)); dil = 8'($urandom);
      t = 12'($urandom_range(0, 300)); m = 12'($urandom_range(0, 300));
      k = 8'($urandom_range(0, 31)); g = 8'($urandom_range(0, 31));
      case (mode)
        MODE_CONV, MODE_PW: ek = act_base + t * in_stride + k;
        MODE_DW:            ek = act_base + (t + k * (dil + 1)) * n_grp + g;
        default:            ek = act_base + (m + k) * n_grp + g;
      endcase
      expect_addr(ek % 256, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
