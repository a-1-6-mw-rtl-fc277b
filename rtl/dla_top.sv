// dla_top: the sparse speech-separation accelerator core.
//
// Eight FP8 processing elements work in parallel on one layer at a time.
// In the 1-D and 1x1 convolutions one nonzero activation per cycle is
// broadcast to all eight PEs, each PE holding a different filter; the
// zero-skipping unit finds the nonzero activations of each 64-bit word on
// the fly, so zero activations cost no cycle. In the depthwise dilated and
// transposed convolutions each PE owns one channel and zero activations
// only gate the PE. Results pass through batch normalisation, ReLU/tanh and
// FP8 quantisation into eight output registers and back into a buffer, so
// consecutive layers can run from on-chip buffers (layer fusion).
//
// Storage: in/out buffer1 and the weight buffer are ping-pong pairs of
// 256x64-bit banks (the host fills one bank while the accelerator uses the
// other), in/out buffer2 is one 256x64-bit bank, plus the 32x64-bit BN
// register. Layer sources and destinations: activations from buffer1 or
// buffer2, results to buffer1 or buffer2.
//
// Host port (where the DMA controller/wrapper connects): a 64-bit write
// port (host_wsel: control register, weight buffer, buffer1, BN register;
// host_waddr the word address) and a 64-bit read port (host_rsel 0:
// buffer1, 1: buffer2; data one cycle later). Buffer1 and the weight buffer
// are written and read in the bank the accelerator is not using. Buffer2
// may only be read while the accelerator is idle. `busy` is high while a
// layer runs, `done` pulses at its end.
// Lint notes: the weight buffer's host read data is not brought out (the
// host never reads weights back), and rst_n is both the asynchronous reset
// and the disable condition of the assertions in the sub-blocks.
// Paper: the block structure, widths and sizes of its architecture figure.
// This design: the host port, descriptor and all timing.
module dla_top
  import dla_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              host_we,
  input  logic [1:0]        host_wsel,
  input  logic [ADDR_W-1:0] host_waddr,
  input  logic [DATA_W-1:0] host_wdata,
  input  logic              host_re,
  input  logic              host_rsel,
  input  logic [ADDR_W-1:0] host_raddr,
  output logic [DATA_W-1:0] host_rdata,
  output logic              busy,
  output logic              done,
  output logic [1:0]        status
);
  layer_cfg_t cfg;
  logic       start;

  // controller <-> datapath
  logic              act_re, wgt_re, mac_valid, mac_bcast, dump;
  logic [ADDR_W-1:0] act_addr, wgt_addr;
  fp8_t              bcast_val;
  logic [BN_AW-1:0]  bn_ga, bn_ba;
  logic              zs_in_valid, zs_in_ready, zs_in_last, zs_out_valid, zs_out_ready;
  logic              zs_out_nz, zs_out_last;
  logic [ADDR_W-1:0] zs_in_tag, zs_out_tag;
  logic [2:0]        zs_out_offset;
  fp8_t              zs_out_value;
  logic [LANES-1:0]  nz_mask;

  logic [DATA_W-1:0] buf1_rdata, buf2_rdata, wgt_rdata, act_rdata;
  logic [DATA_W-1:0] buf1_h_rdata, wbuf_h_rdata, bn_g_word, bn_b_word;
  logic              wr_en;
  logic [ADDR_W-1:0] wr_addr;
  logic [DATA_W-1:0] wr_data;
  logic signed [ACC_W-1:0] acc [LANES];
  logic              na_valid;
  fp8_t              na_q [LANES];
  logic              host_rsel_q;

  ctrl_reg u_ctrl_reg (
    .clk, .rst_n,
    .we(host_we && host_wsel == 2'(HOST_CTRL)), .waddr(host_waddr[1:0]),
    .wdata(host_wdata), .busy, .layer_done(done), .cfg, .start, .status);

  controller u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .act_re, .act_addr,
    .zs_in_valid, .zs_in_ready, .zs_in_tag, .zs_in_last,
    .zs_out_valid, .zs_out_ready, .zs_out_offset, .zs_out_value, .zs_out_nz,
    .zs_out_tag, .zs_out_last,
    .wgt_re, .wgt_addr,
    .mac_valid, .mac_bcast, .bcast_val, .dump,
    .bn_gamma_addr(bn_ga), .bn_beta_addr(bn_ba), .wr_en);

  // in/out buffer1 (ping-pong)
  pingpong_buf u_buf1 (
    .clk, .rst_n, .sel(cfg.c0.buf1_bank),
    .a_re(act_re && !cfg.c0.src_buf2), .a_raddr(act_addr), .a_rdata(buf1_rdata),
    .a_we(wr_en && !cfg.c0.dst_buf2), .a_waddr(wr_addr), .a_wdata(wr_data),
    .h_re(host_re && !host_rsel), .h_raddr(host_raddr), .h_rdata(buf1_h_rdata),
    .h_we(host_we && host_wsel == 2'(HOST_BUF1)), .h_waddr(host_waddr),
    .h_wdata(host_wdata));

  // weight buffer (ping-pong)
  pingpong_buf u_wbuf (
    .clk, .rst_n, .sel(cfg.c0.wbuf_bank),
    .a_re(wgt_re), .a_raddr(wgt_addr), .a_rdata(wgt_rdata),
    .a_we(1'b0), .a_waddr('0), .a_wdata('0),
    .h_re(1'b0), .h_raddr('0), .h_rdata(wbuf_h_rdata),
    .h_we(host_we && host_wsel == 2'(HOST_WBUF)), .h_waddr(host_waddr),
    .h_wdata(host_wdata));

  // in/out buffer2; its read port serves the host while idle
  sram_2p u_buf2 (
    .clk,
    .re(busy ? (act_re && cfg.c0.src_buf2) : (host_re && host_rsel)),
    .raddr(busy ? act_addr : host_raddr), .rdata(buf2_rdata),
    .we(wr_en && cfg.c0.dst_buf2), .waddr(wr_addr), .wdata(wr_data));

  assign act_rdata = cfg.c0.src_buf2 ? buf2_rdata : buf1_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_rsel_q <= 1'b0;
    else if (host_re) host_rsel_q <= host_rsel;
  end
  assign host_rdata = host_rsel_q ? buf2_rdata : buf1_h_rdata;

  bn_reg u_bn (
    .clk, .rst_n,
    .we(host_we && host_wsel == 2'(HOST_BN)), .waddr(host_waddr[BN_AW-1:0]),
    .wdata(host_wdata),
    .raddr_a(bn_ga), .rdata_a(bn_g_word), .raddr_b(bn_ba), .rdata_b(bn_b_word));

  zero_skip u_zs (
    .clk, .rst_n,
    .in_valid(zs_in_valid), .in_ready(zs_in_ready), .in_data(act_rdata),
    .in_tag(zs_in_tag), .in_last(zs_in_last), .nz_mask,
    .out_valid(zs_out_valid), .out_ready(zs_out_ready), .out_offset(zs_out_offset),
    .out_value(zs_out_value), .out_nz(zs_out_nz), .out_tag(zs_out_tag),
    .out_last(zs_out_last));

  for (genvar i = 0; i < LANES; i++) begin : g_pe
    pe u_pe (
      .clk, .rst_n,
      .en(mac_valid && (mac_bcast || nz_mask[i])),
      .dump,
      .a(mac_bcast ? bcast_val : act_rdata[i*8 +: 8]),
      .w(wgt_rdata[i*8 +: 8]),
      .acc(acc[i]));
  end

  norm_act u_na (
    .clk, .rst_n, .in_valid(dump), .acc,
    .sum_mode(cfg.c0.mode == MODE_TCONV), .act(cfg.c0.act), .bn_en(cfg.c0.bn_en),
    .gamma_w(bn_g_word), .beta_w(bn_b_word),
    .out_valid(na_valid), .out_q(na_q));

  out_reg u_out (
    .clk, .rst_n, .clear(start), .base(cfg.c0.out_base),
    .serial(cfg.c0.mode == MODE_TCONV),
    .in_valid(na_valid), .in_q(na_q),
    .wr_en, .wr_addr, .wr_data);
endmodule
