// controller_tb: checks the layer sequencer with the real zero-skipping unit.
//
// The testbench models the activation and weight buffers (synchronous read,
// data held while not reading) and the downstream write-back (one write
// three cycles after each dump: two normalisation stages and the output
// register; in the transposed mode one write per eight dumps). For random
// layer descriptors of every mode it checks:
//   - every activation read address against the addressing formulas, in
//     loop order (taps innermost, then groups, then positions);
//   - dense modes: the weight address of every tap;
//   - broadcast modes: for every nonzero lane, the weight row
//     (row base + offset index) and the broadcast value one cycle later;
//     no MAC for zero lanes;
//   - the number of dumps and of MACs, a single done pulse, busy;
//   - the cycle count: one cycle per nonzero activation and per all-zero
//     word in broadcast modes, one per tap in dense modes, plus latency.
module controller_tb;
  import dla_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg;
  logic busy, done, act_re, wgt_re, zs_in_valid, zs_in_ready, zs_in_last;
  logic zs_out_valid, zs_out_ready, zs_out_nz, zs_out_last, mac_valid, mac_bcast, dump;
  logic wr_en = 0;
  logic [ADDR_W-1:0] act_addr, wgt_addr, zs_in_tag, zs_out_tag;
  logic [2:0] zs_out_offset;
  fp8_t zs_out_value, bcast_val;
  logic [BN_AW-1:0] bn_gamma_addr, bn_beta_addr;
  logic [63:0] act_rdata;
  logic [7:0] nz_mask;
  int checks = 0, failures = 0;

  logic [63:0] act_mem [256];

  controller dut (.clk, .rst_n, .start, .cfg, .busy, .done, .act_re, .act_addr,
    .zs_in_valid, .zs_in_ready, .zs_in_tag, .zs_in_last, .zs_out_valid, .zs_out_ready,
    .zs_out_offset, .zs_out_value, .zs_out_nz, .zs_out_tag, .zs_out_last,
    .wgt_re, .wgt_addr, .mac_valid, .mac_bcast, .bcast_val, .dump,
    .bn_gamma_addr, .bn_beta_addr, .wr_en);

  zero_skip u_zs (.clk, .rst_n, .in_valid(zs_in_valid), .in_ready(zs_in_ready),
    .in_data(act_rdata), .in_tag(zs_in_tag), .in_last(zs_in_last), .nz_mask,
    .out_valid(zs_out_valid), .out_ready(zs_out_ready), .out_offset(zs_out_offset),
    .out_value(zs_out_value), .out_nz(zs_out_nz), .out_tag(zs_out_tag),
    .out_last(zs_out_last));

  always #5 clk = ~clk;

  always_ff @(posedge clk) if (act_re) act_rdata <= act_mem[act_addr];

  // downstream write-back model
  logic [2:0] dump_d;
  int dump_cnt_mod8;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin dump_d <= '0; wr_en <= 1'b0; dump_cnt_mod8 <= 0; end
    else begin
      dump_d <= {dump_d[1:0], dump};
      wr_en <= 1'b0;
      if (dump_d[1]) begin
        if (cfg.c0.mode != MODE_TCONV) wr_en <= 1'b1;
        else begin
          dump_cnt_mod8 <= (dump_cnt_mod8 + 1) % 8;
          if (dump_cnt_mod8 == 7) wr_en <= 1'b1;
        end
      end
    end
  end

  // expected streams, filled per layer
  int exp_act [$];
  int exp_wgt [$];
  logic [7:0] exp_val [$];
  int n_dump, n_mac, n_done, n_wgt;
  logic [7:0] val_pending;
  logic val_chk;

  always @(posedge clk) if (rst_n) begin
    if (act_re) begin
      checks++;
      if (exp_act.size() == 0) begin failures++; $display("FAIL extra activation read %0d", act_addr); end
      else begin
        int e;
        e = exp_act.pop_front();
        if (act_addr != 8'(e)) begin
          failures++;
          if (failures < 20) $display("FAIL act addr %0d expected %0d", act_addr, 8'(e));
        end
      end
    end
    if (wgt_re) begin
      checks++;
      n_wgt++;
      if (exp_wgt.size() == 0) begin failures++; $display("FAIL extra weight read %0d", wgt_addr); end
      else begin
        int e;
        e = exp_wgt.pop_front();
        if (wgt_addr != 8'(e)) begin
          failures++;
          if (failures < 20) $display("FAIL wgt addr %0d expected %0d", wgt_addr, 8'(e));
        end
      end
    end
    if (val_chk && mac_valid) begin
      checks++;
      if (bcast_val != val_pending) begin
        failures++;
        if (failures < 20) $display("FAIL broadcast value %h expected %h", bcast_val, val_pending);
      end
    end
    val_chk <= 1'b0;
    if (wgt_re && mac_bcast) begin
      val_chk <= 1'b1;
      val_pending <= exp_val.pop_front();
    end
    if (mac_valid) n_mac++;
    if (dump) n_dump++;
    if (done) n_done++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(mode_e md);
    int c0_, nnz_total, ecyc, outs, cyc, s, m, ph, nout, nnz;
    logic [63:0] w;
    cfg = '0;
    cfg.c0.mode = md;
    cfg.c0.act_base = 8'($urandom);
    cfg.c0.wgt_base = 8'($urandom);
    cfg.c0.out_base = 8'($urandom);
    cfg.c0.bn_base = 5'($urandom);
    cfg.c1.n_grp = 8'($urandom_range(1, 3));
    cfg.c1.n_in = 8'($urandom_range(1, 4));
    cfg.c1.n_pos = 9'($urandom_range(1, 12));
    cfg.c1.in_stride = 8'($urandom_range(0, 5));
    cfg.c1.dil = 8'($urandom_range(0, 40));
    cfg.c1.tstride = 4'($urandom_range(1, 5));
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 8; j++)
        w[j*8 +: 8] = ($urandom_range(0, 99) < 55) ? 8'h00 :
                      ($urandom_range(0, 9) == 0) ? 8'h80 : rand_fp8(1, 15);
      if ($urandom_range(0, 5) == 0) w = '0;
      act_mem[i] = w;
    end
    exp_act = {}; exp_wgt = {}; exp_val = {};
    ecyc = 0; nnz_total = 0;
    nout = (md == MODE_TCONV) ? cfg.c1.n_pos * 8 : cfg.c1.n_pos;
    s = cfg.c1.tstride;
    for (int t = 0; t < nout; t++)
      for (int g = 0; g < cfg.c1.n_grp; g++)
        for (int k = 0; k < cfg.c1.n_in; k++) begin
          case (md)
            MODE_CONV, MODE_PW: begin
              int a;
              a = cfg.c0.act_base + t * cfg.c1.in_stride + k;
              exp_act.push_back(a);
              w = act_mem[a % 256];
              nnz = 0;
              for (int j = 0; j < 8; j++)
                if (w[j*8 +: 7] != 0) begin
                  nnz++;
                  exp_wgt.push_back(cfg.c0.wgt_base + (g * cfg.c1.n_in + k) * 8 + j);
                  exp_val.push_back(w[j*8 +: 8]);
                end
              nnz_total += nnz;
              ecyc += (nnz == 0) ? 1 : nnz;
            end
            MODE_DW: begin
              exp_act.push_back(cfg.c0.act_base + (t + k * (cfg.c1.dil + 1)) * cfg.c1.n_grp + g);
              exp_wgt.push_back(cfg.c0.wgt_base + k * cfg.c1.n_grp + g);
              ecyc++;
            end
            default: begin
              m = (t + s - 1) / s;
              ph = (s - t % s) % s;
              exp_act.push_back(cfg.c0.act_base + (m + k) * cfg.c1.n_grp + g);
              exp_wgt.push_back(cfg.c0.wgt_base + (ph + k * s) * cfg.c1.n_grp + g);
              ecyc++;
            end
          endcase
        end
    outs = (md == MODE_TCONV) ? nout : nout * cfg.c1.n_grp;
    n_dump = 0; n_mac = 0; n_done = 0; n_wgt = 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy not set after start"); end
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    repeat (3) @(negedge clk);
    checks += 6;
    if (exp_act.size() != 0) begin failures++; $display("FAIL %0d activation reads missing", exp_act.size()); end
    if (exp_wgt.size() != 0) begin failures++; $display("FAIL %0d weight reads missing", exp_wgt.size()); end
    if (n_dump != outs) begin failures++; $display("FAIL %0d dumps expected %0d", n_dump, outs); end
    if (n_mac != ((md == MODE_CONV || md == MODE_PW) ? nnz_total : ecyc)) begin
      failures++; $display("FAIL %0d MACs", n_mac);
    end
    if (n_done != 1 || busy) begin failures++; $display("FAIL done pulses %0d busy %b", n_done, busy); end
    if (cyc < ecyc || cyc > ecyc + 8) begin
      failures++; $display("FAIL mode %s: %0d cycles expected %0d + latency", md.name(), cyc, ecyc);
    end
  endtask

  initial begin
    cfg = '0;
    val_chk = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      run(MODE_CONV); run(MODE_PW); run(MODE_DW); run(MODE_TCONV);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
