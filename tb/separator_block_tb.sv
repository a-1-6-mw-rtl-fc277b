// separator_block_tb: one separator block of the separation network at its
// real channel counts, run as the host would run it on this core.
//
// The block is 1x1 pointwise 128 -> 256 channels (ReLU, BN), depthwise
// dilated convolution over the 256 channels (3 taps, dilation 1, tanh, BN)
// and 1x1 pointwise 256 -> 128 channels, on 8 time steps of sparse input.
// Each layer is split into calls that fit one 256-word bank:
//   PW 128->256: one call per time step and pair of filter groups
//                (2 x 128 weight rows, a whole bank), 16 weight loads,
//                128 calls;
//   DW 256:      one call over all 32 channel groups and 4 positions;
//   PW 256->128: one call per time step and filter group (256 weight
//                rows, a whole bank), 16 weight loads, 64 calls.
// Output addresses are chosen so that every layer leaves its result in
// the time-major layout the next layer reads. Weights for the next call
// are written into the free weight bank while the current call runs.
// Every output word of every call is compared with a real-arithmetic
// reference (within one FP8 code, as BN is used), and every call's cycle
// count with the zero-skipping / dense rate plus 8 cycles of latency.
module separator_block_tb;
  import dla_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic host_we = 0, host_re = 0, host_rsel = 0, busy, done;
  logic [1:0] host_wsel = 2'(HOST_CTRL);
  logic [7:0] host_waddr = 0, host_raddr = 0;
  logic [63:0] host_wdata = 0, host_rdata;
  logic [1:0] status;
  int checks = 0, failures = 0;

  dla_top dut (.clk, .rst_n, .host_we, .host_wsel, .host_waddr, .host_wdata,
               .host_re, .host_rsel, .host_raddr, .host_rdata, .busy, .done, .status);
  always #5 clk = ~clk;

  // shadow state
  logic [63:0] s_buf1 [2][256];
  logic [63:0] s_wbuf [2][256];
  logic [63:0] s_buf2 [256];
  logic [63:0] s_bn   [32];
  logic cur_buf1_bank = 0, cur_wbuf_bank = 0;

  // mechanism counters
  int n_mode [4];
  int n_act [3];
  int n_skip_lanes, n_zero_words, n_marker, n_stall, n_gated, n_pp_writes;
  int n_serial_wr, n_src1, n_src2, n_dst1, n_dst2, n_bn;
  int cyc;
  longint layer_cycles = 0, layer_bound = 0;

  logic done_seen = 0;
  int done_cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (done) begin done_seen <= 1'b1; done_cyc <= cyc; end
    if (rst_n) begin
      if (dut.u_zs.load) begin
        if (dut.nz_mask != 8'hFF) n_skip_lanes += 8 - $countones(dut.nz_mask);
        if (dut.nz_mask == 8'h00) n_zero_words++;
      end
      if (dut.zs_out_valid && !dut.zs_out_nz) n_marker++;
      if (dut.zs_in_valid && !dut.zs_in_ready) n_stall++;
      if (dut.mac_valid && !dut.mac_bcast && dut.nz_mask != 8'hFF) n_gated++;
      if (busy && host_we && (host_wsel == 2'(HOST_WBUF) || host_wsel == 2'(HOST_BUF1))) n_pp_writes++;
      if (dut.wr_en && dut.cfg.c0.mode == MODE_TCONV) n_serial_wr++;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hwrite(host_sel_e sel, int addr, logic [63:0] d);
    host_we = 1; host_wsel = 2'(sel); host_waddr = 8'(addr); host_wdata = d;
    @(negedge clk);
    host_we = 0;
    case (sel)
      HOST_WBUF: s_wbuf[!cur_wbuf_bank][addr % 256] = d;
      HOST_BUF1: s_buf1[!cur_buf1_bank][addr % 256] = d;
      HOST_BN:   s_bn[addr % 32] = d;
      default: ;
    endcase
  endtask

  task automatic hread(logic sel, int addr, output logic [63:0] d);
    host_re = 1; host_rsel = sel; host_raddr = 8'(addr);
    @(negedge clk);
    host_re = 0;
    d = host_rdata;
  endtask

  task automatic set_cfg0(cfg0_t c0);
    hwrite(HOST_CTRL, 0, 64'(c0));
    cur_buf1_bank = c0.buf1_bank;
    cur_wbuf_bank = c0.wbuf_bank;
  endtask

  function automatic logic [7:0] lane(logic [63:0] w, int i);
    return w[i*8 +: 8];
  endfunction

  function automatic logic [63:0] rd_src(cfg0_t c0, int addr);
    return c0.src_buf2 ? s_buf2[addr % 256] : s_buf1[c0.buf1_bank][addr % 256];
  endfunction

  function automatic real bn_apply(cfg0_t c0, int grp, int ln, real x);
    real y;
    y = x;
    if (c0.bn_en)
      y = x * fp8_real(lane(s_bn[(c0.bn_base + 2 * grp) % 32], ln))
            + fp8_real(lane(s_bn[(c0.bn_base + 2 * grp + 1) % 32], ln));
    if (c0.act == ACT_RELU && y < 0) y = 0;
    if (c0.act == ACT_TANH) y = tanh_pwl(y);
    return y;
  endfunction

  // Reference for one layer: fills expected words and the expected cycles.
  task automatic ref_layer(cfg0_t c0, cfg1_t c1, output logic [63:0] ew [$],
                           output int ecyc);
    logic [63:0] w, o;
    int nnz;
    real acc;
    ew = {};
    ecyc = 0;
    if (c0.mode == MODE_CONV || c0.mode == MODE_PW) begin
      for (int t = 0; t < c1.n_pos; t++)
        for (int og = 0; og < c1.n_grp; og++) begin
          for (int k = 0; k < c1.n_in; k++) begin
            w = rd_src(c0, c0.act_base + t * c1.in_stride + k);
            nnz = 0;
            for (int i = 0; i < 8; i++) if (lane(w, i)[6:0] != 0) nnz++;
            ecyc += (nnz == 0) ? 1 : nnz;
          end
          for (int j = 0; j < 8; j++) begin
            acc = 0;
            for (int k = 0; k < c1.n_in; k++) begin
              w = rd_src(c0, c0.act_base + t * c1.in_stride + k);
              for (int i = 0; i < 8; i++)
                acc += fp8_real(lane(w, i)) *
                       fp8_real(lane(s_wbuf[c0.wbuf_bank][(c0.wgt_base + (og * c1.n_in + k) * 8 + i) % 256], j));
            end
            o[j*8 +: 8] = q_fp8(bn_apply(c0, og, j, acc));
          end
          ew.push_back(o);
        end
    end else if (c0.mode == MODE_DW) begin
      ecyc = c1.n_pos * c1.n_grp * c1.n_in;
      for (int t = 0; t < c1.n_pos; t++)
        for (int g = 0; g < c1.n_grp; g++) begin
          for (int j = 0; j < 8; j++) begin
            acc = 0;
            for (int k = 0; k < c1.n_in; k++)
              acc += fp8_real(lane(rd_src(c0, c0.act_base + (t + k * (c1.dil + 1)) * c1.n_grp + g), j)) *
                     fp8_real(lane(s_wbuf[c0.wbuf_bank][(c0.wgt_base + k * c1.n_grp + g) % 256], j));
            o[j*8 +: 8] = q_fp8(bn_apply(c0, g, j, acc));
          end
          ew.push_back(o);
        end
    end else begin
      int s, m, ph;
      s = c1.tstride;
      ecyc = c1.n_pos * 8 * c1.n_grp * c1.n_in;
      for (int n = 0; n < c1.n_pos * 8; n++) begin
        m  = (n + s - 1) / s;
        ph = (s - n % s) % s;
        acc = 0;
        for (int g = 0; g < c1.n_grp; g++)
          for (int k = 0; k < c1.n_in; k++)
            for (int j = 0; j < 8; j++)
              acc += fp8_real(lane(rd_src(c0, c0.act_base + (m + k) * c1.n_grp + g), j)) *
                     fp8_real(lane(s_wbuf[c0.wbuf_bank][(c0.wgt_base + (ph + k * s) * c1.n_grp + g) % 256], j));
        o[(n % 8)*8 +: 8] = q_fp8(bn_apply(c0, 0, 0, acc));
        if (n % 8 == 7) ew.push_back(o);
      end
    end
  endtask

  // Start a layer; `during` is called once the layer runs (ping-pong loads).
  task automatic run_layer(cfg0_t c0, cfg1_t c1, string name,
                           input logic [63:0] nxt_w [$], input host_sel_e nxt_sel);
    logic [63:0] ew [$];
    logic [63:0] got;
    int ecyc, c_start, c_end, tol;
    ref_layer(c0, c1, ew, ecyc);
    set_cfg0(c0);
    hwrite(HOST_CTRL, 1, 64'(c1));
    done_seen = 0;
    hwrite(HOST_CTRL, 2, 64'd1);
    c_start = cyc;
    n_mode[c0.mode]++;
    n_act[c0.act]++;
    if (c0.src_buf2) n_src2++; else n_src1++;
    if (c0.dst_buf2) n_dst2++; else n_dst1++;
    if (c0.bn_en) n_bn++;
    // ping-pong: load the next data into the free bank while this layer runs
    foreach (nxt_w[i]) hwrite(nxt_sel, i, nxt_w[i]);
    while (!done_seen) @(negedge clk);
    c_end = done_cyc;
    // update shadow destination
    foreach (ew[i]) begin
      if (c0.dst_buf2) s_buf2[(c0.out_base + i) % 256] = ew[i];
      else s_buf1[c0.buf1_bank][(c0.out_base + i) % 256] = ew[i];
    end
    // cycle count: from the start command to done
    checks++;
    if (c_end - c_start < ecyc || c_end - c_start > ecyc + 8) begin
      failures++;
      $display("FAIL %s: %0d cycles, expected %0d (+ pipeline latency up to 8)",
               name, c_end - c_start, ecyc);
    end
    layer_cycles += c_end - c_start;
    layer_bound  += ecyc;
    // read back: buffer1 results need a bank swap to reach the host side
    if (!c0.dst_buf2) begin
      cfg0_t sw = c0;
      sw.buf1_bank = !c0.buf1_bank;
      set_cfg0(sw);
    end
    tol = (c0.bn_en || c0.act == ACT_TANH) ? 1 : 0;
    foreach (ew[i]) begin
      hread(c0.dst_buf2, c0.out_base + i, got);
      for (int j = 0; j < 8; j++) begin
        checks++;
        if (code_dist(lane(got, j), lane(ew[i], j)) > tol) begin
          failures++;
          if (failures < 20)
            $display("FAIL %s word %0d lane %0d: got %h expected %h", name, i, j,
                     lane(got, j), lane(ew[i], j));
        end
      end
    end
    if (!c0.dst_buf2) set_cfg0(c0);
  endtask

  function automatic logic [63:0] rand_word(int pct_zero, int emin, int emax);
    logic [63:0] w;
    for (int i = 0; i < 8; i++)
      w[i*8 +: 8] = ($urandom_range(0, 99) < pct_zero) ? 8'h00 : rand_fp8(emin, emax);
    return w;
  endfunction

  initial begin
    cfg0_t c0;
    cfg1_t c1;
    logic [63:0] wa [16][256];   // PW1 weights, 16 chunks of 2 filter groups
    logic [63:0] wc [16][256];   // PW2 weights, one chunk per filter group
    logic [63:0] wdw [$];
    logic [63:0] wl [$];
    logic [63:0] none [$];
    int ncalls;
    for (int i = 0; i < 4; i++) n_mode[i] = 0;
    for (int i = 0; i < 3; i++) n_act[i] = 0;
    n_skip_lanes = 0; n_zero_words = 0; n_marker = 0; n_stall = 0; n_gated = 0;
    n_pp_writes = 0; n_serial_wr = 0; n_src1 = 0; n_src2 = 0; n_dst1 = 0; n_dst2 = 0;
    n_bn = 0; cyc = 0; ncalls = 0;
    for (int b = 0; b < 2; b++) for (int i = 0; i < 256; i++) begin
      s_buf1[b][i] = '0; s_wbuf[b][i] = '0;
    end
    for (int i = 0; i < 256; i++) s_buf2[i] = '0;
    for (int i = 0; i < 32; i++) s_bn[i] = '0;
    for (int c = 0; c < 16; c++) for (int i = 0; i < 256; i++) wa[c][i] = rand_word(15, 8, 11);
    for (int c = 0; c < 16; c++) for (int i = 0; i < 256; i++) wc[c][i] = rand_word(15, 8, 11);
    for (int i = 0; i < 96; i++) wdw.push_back(rand_word(0, 12, 15));
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // BN words: scale/bias pairs 0..15 for PW1 (per filter-group pair of a
    // call), 16..31 reused for DW and PW2.
    for (int i = 0; i < 32; i++) begin
      logic [63:0] w;
      for (int j = 0; j < 8; j++) begin
        if (i % 2 == 0) w[j*8 +: 8] = {1'b0, 4'($urandom_range(14, 15)), 3'($urandom)};
        else w[j*8 +: 8] = ($urandom_range(0, 2) == 0) ? 8'h00 : rand_fp8(6, 10);
      end
      hwrite(HOST_BN, i, w);
    end

    // 128-channel input, 8 time steps x 16 words, into buffer1 bank 0;
    // first weight chunk into weight bank 0.
    c0 = '0; c0.buf1_bank = 1; c0.wbuf_bank = 1;
    set_cfg0(c0);
    for (int i = 0; i < 128; i++) hwrite(HOST_BUF1, i, rand_word(60, 9, 15));
    for (int i = 0; i < 256; i++) hwrite(HOST_WBUF, i, wa[0][i]);

    // PW 128 -> 256, buffer1 -> buffer2 (word t*32 + group)
    c0 = '0; c0.mode = MODE_PW; c0.act = ACT_RELU; c0.bn_en = 1;
    c0.src_buf2 = 0; c0.dst_buf2 = 1; c0.buf1_bank = 0; c0.wbuf_bank = 0;
    c1 = '0; c1.n_pos = 1; c1.n_in = 16; c1.in_stride = 16; c1.n_grp = 2;
    for (int ch = 0; ch < 16; ch++) begin
      for (int t = 0; t < 8; t++) begin
        c0.act_base = 8'(t * 16); c0.wgt_base = 0; c0.out_base = 8'(t * 32 + 2 * ch);
        c0.bn_base = 5'(2 * (ch % 8));
        wl = {};
        if (t == 0 && ch < 15) for (int i = 0; i < 256; i++) wl.push_back(wa[ch + 1][i]);
        if (t == 0 && ch == 15) wl = wdw;
        run_layer(c0, c1, $sformatf("pw1 chunk %0d step %0d", ch, t), wl, HOST_WBUF);
        ncalls++;
      end
      c0.wbuf_bank = !c0.wbuf_bank;
    end

    // DW over 256 channels, 3 taps, dilation 1: buffer2 -> buffer1 (t*32 + g)
    c0.mode = MODE_DW; c0.act = ACT_TANH; c0.bn_en = 1; c0.bn_base = 16;
    c0.src_buf2 = 1; c0.dst_buf2 = 0; c0.act_base = 0; c0.wgt_base = 0; c0.out_base = 0;
    c1 = '0; c1.n_pos = 4; c1.n_in = 3; c1.n_grp = 32; c1.dil = 1;
    wl = {};
    for (int i = 0; i < 256; i++) wl.push_back(wc[0][i]);
    run_layer(c0, c1, "dw 256ch", wl, HOST_WBUF);
    ncalls++;
    c0.wbuf_bank = !c0.wbuf_bank;

    // PW 256 -> 128, buffer1 -> buffer2 (word t*16 + group)
    c0.mode = MODE_PW; c0.act = ACT_NONE; c0.bn_en = 1; c0.bn_base = 16;
    c0.src_buf2 = 0; c0.dst_buf2 = 1;
    c1 = '0; c1.n_pos = 1; c1.n_in = 32; c1.in_stride = 32; c1.n_grp = 1;
    for (int og = 0; og < 16; og++) begin
      for (int t = 0; t < 4; t++) begin
        c0.act_base = 8'(t * 32); c0.wgt_base = 0; c0.out_base = 8'(t * 16 + og);
        wl = {};
        if (t == 0 && og < 15) for (int i = 0; i < 256; i++) wl.push_back(wc[og + 1][i]);
        run_layer(c0, c1, $sformatf("pw2 group %0d step %0d", og, t), wl, HOST_WBUF);
        ncalls++;
      end
      c0.wbuf_bank = !c0.wbuf_bank;
    end

    $display("separator block: %0d calls, %0d busy cycles, rate bound %0d",
             ncalls, layer_cycles, layer_bound);
    checks++;
    if (n_pp_writes == 0) begin failures++; $display("FAIL no weight load overlapped a call"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
