// controller: runs one layer of the separation network on the datapath.
//
// After `start` it walks three nested loops (innermost first):
//   k : word of the input window (CONV/PW) or kernel tap (DW/TCONV)
//   g : filter group (CONV/PW) or channel group (DW/TCONV)
//   t : output position (CONV/PW/DW) or output sample n (TCONV, n_pos*8 of
//       them), for TCONV also keeping r = n mod s and m = ceil(n/s).
// The address controllers turn the indexes into buffer addresses.
//
// Broadcast modes (CONV, PW). One activation word is read per issue; the
// read data is held by the buffer until the zero-skipping unit takes it
// (in_valid = word pending, a new read only when it is taken), so the
// fetch runs at one word per cycle when words have at most one nonzero and
// slows to one nonzero per cycle otherwise. Each entry the unit shifts out
// starts a weight read at row_base + offset; one cycle later the weights
// and the registered broadcast value reach the PEs (mac_valid, mac_bcast).
//
// Dense modes (DW, TCONV). Activation and weight words are read in the same
// cycle, one pair per cycle with no stall; the PEs get lane i of both, and
// lanes whose activation is zero are not clocked (the top uses the zero
// comparators of the zero-skipping unit for that).
//
// The end of an output (last word/tap of a group) follows the MAC by one
// cycle as `dump`, which makes the PEs hand their sums to norm_act and
// restart. The BN entries of the dumped group are addressed in the same
// cycle. The layer is done when norm_act/out_reg have written every output
// word (n_pos*n_grp, TCONV n_pos); `done` pulses and busy falls.
// The descriptor fields that belong to other blocks (activation, BN enable,
// bank selects, output base) are unused here, which lint reports.
// Paper: the controller sequences the data flows and generates the buffer
// addresses. This design: loop order, handshakes and pipeline timing.
module controller
  import dla_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_cfg_t        cfg,       // must stay stable while busy
  output logic              busy,
  output logic              done,
  // activation buffer read
  output logic              act_re,
  output logic [ADDR_W-1:0] act_addr,
  // zero-skipping unit
  output logic              zs_in_valid,
  input  logic              zs_in_ready,
  output logic [ADDR_W-1:0] zs_in_tag,
  output logic              zs_in_last,
  input  logic              zs_out_valid,
  output logic              zs_out_ready,
  input  logic [2:0]        zs_out_offset,
  input  fp8_t              zs_out_value,
  input  logic              zs_out_nz,
  input  logic [ADDR_W-1:0] zs_out_tag,
  input  logic              zs_out_last,
  // weight buffer read
  output logic              wgt_re,
  output logic [ADDR_W-1:0] wgt_addr,
  // PE control
  output logic              mac_valid,
  output logic              mac_bcast,
  output fp8_t              bcast_val,
  output logic              dump,
  output logic [BN_AW-1:0]  bn_gamma_addr,
  output logic [BN_AW-1:0]  bn_beta_addr,
  // write-back
  input  logic              wr_en
);
  cfg0_t c0;
  cfg1_t c1;
  assign c0 = cfg.c0;
  assign c1 = cfg.c1;

  logic        bcast, tconv;
  logic        f_active;
  logic [11:0] t, m;
  logic [7:0]  g, k;
  logic [3:0]  r;
  logic        pend, pend_last;
  logic [ADDR_W-1:0] pend_tag, row_base;
  logic        issue_f, issue_d;
  logic        last_k, last_g, last_t;
  logic        ge_q;
  logic [7:0]  bn_g;
  logic [16:0] total, wr_cnt;
  logic [3:0]  r_nx;

  assign bcast = (c0.mode == MODE_CONV) || (c0.mode == MODE_PW);
  assign tconv = (c0.mode == MODE_TCONV);

  assign last_k = (k == c1.n_in - 8'd1);
  assign last_g = (g == c1.n_grp - 8'd1);
  assign last_t = tconv ? (t == {c1.n_pos, 3'b000} - 12'd1)
                        : (t == {3'b000, c1.n_pos} - 12'd1);

  assign issue_f = busy && f_active && bcast && (!pend || zs_in_ready);
  assign issue_d = busy && f_active && !bcast;

  act_addr_ctrl u_aac (
    .mode(c0.mode), .act_base(c0.act_base), .in_stride(c1.in_stride),
    .n_grp(c1.n_grp), .dil(c1.dil), .t(t), .m(m), .k(k), .g(g),
    .addr(act_addr));

  wgt_addr_ctrl u_wac (
    .mode(c0.mode), .wgt_base(c0.wgt_base), .n_in(c1.n_in), .n_grp(c1.n_grp),
    .tstride(c1.tstride), .og(g), .kf(k), .row_base(row_base),
    .zs_tag(zs_out_tag), .zs_off(zs_out_offset), .k(k), .g(g), .r(r),
    .addr(wgt_addr));

  assign act_re       = bcast ? issue_f : issue_d;
  assign wgt_re       = bcast ? (zs_out_valid && zs_out_nz) : issue_d;
  assign zs_in_valid  = pend;
  assign zs_in_tag    = pend_tag;
  assign zs_in_last   = pend_last;
  assign zs_out_ready = 1'b1;
  assign mac_bcast    = bcast;

  assign bn_gamma_addr = c0.bn_base + BN_AW'({bn_g, 1'b0});
  assign bn_beta_addr  = bn_gamma_addr + 1'b1;

  assign r_nx = (r == c1.tstride - 4'd1) ? 4'd0 : r + 4'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; f_active <= 1'b0;
      t <= '0; m <= '0; g <= '0; k <= '0; r <= '0;
      pend <= 1'b0; pend_last <= 1'b0; pend_tag <= '0;
      mac_valid <= 1'b0; ge_q <= 1'b0; dump <= 1'b0; bcast_val <= '0;
      bn_g <= '0; total <= '0; wr_cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        f_active <= 1'b1;
        t <= '0; m <= '0; g <= '0; k <= '0; r <= '0;
        pend <= 1'b0;
        bn_g <= '0;
        wr_cnt <= '0;
        total <= (cfg.c0.mode == MODE_TCONV) ? 17'(cfg.c1.n_pos)
                                             : 17'(cfg.c1.n_pos) * 17'(cfg.c1.n_grp);
      end else if (busy) begin
        // loop counters
        if (issue_f || issue_d) begin
          if (!last_k) k <= k + 8'd1;
          else begin
            k <= '0;
            if (!last_g) g <= g + 8'd1;
            else begin
              g <= '0;
              if (last_t) f_active <= 1'b0;
              else begin
                t <= t + 12'd1;
                r <= r_nx;
                if (c1.tstride <= 4'd1 || r_nx == 4'd1) m <= m + 12'd1;
              end
            end
          end
        end
        // word held for the zero-skipping unit
        if (issue_f) begin
          pend      <= 1'b1;
          pend_tag  <= row_base;
          pend_last <= last_k;
        end else if (zs_in_ready) begin
          pend <= 1'b0;
        end
        // MAC and end-of-output pipeline
        mac_valid <= bcast ? (zs_out_valid && zs_out_nz) : issue_d;
        ge_q      <= bcast ? (zs_out_valid && zs_out_last)
                           : (issue_d && last_k && (tconv ? last_g : 1'b1));
        bcast_val <= zs_out_value;
        dump      <= ge_q;
        if (dump && !tconv)
          bn_g <= (bn_g == c1.n_grp - 8'd1) ? 8'd0 : bn_g + 8'd1;
        // write-back count
        if (wr_en) begin
          wr_cnt <= wr_cnt + 17'd1;
          if (wr_cnt + 17'd1 == total) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end else begin
        mac_valid <= 1'b0;
        ge_q      <= 1'b0;
        dump      <= 1'b0;
      end
    end
  end

  // A pending word stays offered until the zero-skipping unit takes it.
  a_pend_held: assert property (@(posedge clk) disable iff (!rst_n)
    (pend && !zs_in_ready) |=> pend);
  // Dense modes never use the zero-skipping queue.
  a_dense_no_zs: assert property (@(posedge clk) disable iff (!rst_n)
    (busy && !bcast) |-> !zs_in_valid);
endmodule
