// wgt_addr_ctrl_tb: the paper's transposed-convolution decomposition
// (s=3: outputs 1, 2, 3 use kernel taps {1,4,7}, {3,6,9}, {2,5,8}), base +
// offset addressing for the broadcast modes, and random cases of every
// mode against integer formulas.
module wgt_addr_ctrl_tb;
  import dla_pkg::*;
  mode_e mode;
  logic [7:0] wgt_base, n_in, n_grp, og, kf, row_base, zs_tag, k, g, addr;
  logic [2:0] zs_off;
  logic [3:0] tstride, r;
  int checks = 0, failures = 0;

  wgt_addr_ctrl dut (.mode, .wgt_base, .n_in, .n_grp, .tstride, .og, .kf, .row_base,
                     .zs_tag, .zs_off, .k, .g, .r, .addr);

  task automatic expect_val(logic [7:0] got, int e, string what);
    checks++;
    if (got !== 8'(e)) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, 8'(e));
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int taps [3][3] = '{'{1, 4, 7}, '{3, 6, 9}, '{2, 5, 8}};
    int ph, e;
    mode = MODE_TCONV; wgt_base = 0; n_grp = 1; tstride = 3; n_in = 3;
    og = 0; kf = 0; zs_tag = 0; zs_off = 0; g = 0;
    for (int n = 0; n < 3; n++)
      for (int kk = 0; kk < 3; kk++) begin
        r = 4'(n % 3); k = 8'(kk); #1;
        expect_val(addr, taps[n][kk] - 1, "transposed example");
      end
    for (int n = 0; n < 3000; n++) begin
      mode = mode_e'($urandom_range(0, 3));
      wgt_base = 8'($urandom); n_in = 8'($urandom_range(1, 32));
      n_grp = 8'($urandom_range(1, 16)); tstride = 4'($urandom_range(1, 15));
      og = 8'($urandom_range(0, 7)); kf = 8'($urandom_range(0, 31));
      zs_tag = 8'($urandom); zs_off = 3'($urandom);
      k = 8'($urandom_range(0, 15)); g = 8'($urandom_range(0, 15));
      r = 4'($urandom_range(0, tstride - 1));
      #1;
      expect_val(row_base, wgt_base + (og * n_in + kf) * 8, "row base");
      ph = (tstride - r) % tstride;
      case (mode)
        MODE_CONV, MODE_PW: e = zs_tag + zs_off;
        MODE_DW:            e = wgt_base + k * n_grp + g;
        default:            e = wgt_base + (ph + k * tstride) * n_grp + g;
      endcase
      expect_val(addr, e % 256, "address");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
