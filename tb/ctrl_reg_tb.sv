// ctrl_reg_tb: descriptor writes, start pulse, writes ignored while busy,
// and the done/busy status bits.
module ctrl_reg_tb;
  import dla_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, busy = 0, layer_done = 0, start;
  logic [1:0] waddr = 0, status;
  logic [63:0] wdata = 0;
  layer_cfg_t cfg;
  int checks = 0, failures = 0;

  ctrl_reg dut (.clk, .rst_n, .we, .waddr, .wdata, .busy, .layer_done, .cfg, .start, .status);
  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [1:0] a, logic [63:0] d);
    we = 1; waddr = a; wdata = d; @(negedge clk); we = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] w0, w1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 20; n++) begin
      w0 = {$urandom, $urandom}; w1 = {$urandom, $urandom};
      wr(2'd0, w0); wr(2'd1, w1);
      chk(cfg.c0 == cfg0_t'(w0) && cfg.c1 == cfg1_t'(w1), "descriptor");
      chk(!start, "no start without command");
      wr(2'd2, 64'd1);
      chk(start, "start pulse after command");
      busy = 1;
      @(negedge clk);
      chk(!start, "start is one cycle");
      chk(status == 2'b01, "status busy");
      wr(2'd0, ~w0);
      wr(2'd2, 64'd1);
      chk(cfg.c0 == cfg0_t'(w0) && !start, "writes ignored while busy");
      layer_done = 1; busy = 0; @(negedge clk); layer_done = 0;
      chk(status == 2'b10, "status done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
