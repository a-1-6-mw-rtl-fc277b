// ctrl_reg: control register written from the host/DMA side.
//
// Word 0 and word 1 hold the layer descriptor (dla_pkg::cfg0_t, cfg1_t);
// writing bit 0 of word 2 starts the layer. While the accelerator is busy
// descriptor writes and start commands are ignored, so a running layer
// always sees a stable descriptor. `status` reports {done, busy}; done is
// set when a layer finishes and cleared by the next start.
// Timing: start is a one-cycle pulse in the cycle after the command write.
// Paper: a control register written over the 64-bit port that drives the
// controller. This design: the register map and the busy rule.
module ctrl_reg
  import dla_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [1:0]        waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              busy,
  input  logic              layer_done,
  output layer_cfg_t        cfg,
  output logic              start,
  output logic [1:0]        status
);
  logic done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg    <= '0;
      start  <= 1'b0;
      done_q <= 1'b0;
    end else begin
      start <= 1'b0;
      if (layer_done) done_q <= 1'b1;
      if (we && !busy && !start) begin
        unique case (waddr)
          2'd0: cfg.c0 <= cfg0_t'(wdata);
          2'd1: cfg.c1 <= cfg1_t'(wdata);
          2'd2: if (wdata[0]) begin
                  start  <= 1'b1;
                  done_q <= 1'b0;
                end
          default: ;
        endcase
      end
    end
  end

  assign status = {done_q, busy};
endmodule
