// sram_2p_tb: random reads and writes against a model; checks the one-cycle
// read latency, that read data holds while re is low, and that a read and
// a write of the same word in one cycle return the old word.
module sram_2p_tb;
  logic clk = 0, re = 0, we = 0;
  logic [7:0] raddr = 0, waddr = 0;
  logic [63:0] rdata, wdata = 0;
  logic [63:0] model [256];
  int checks = 0, failures = 0;

  sram_2p dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] expd;
    @(negedge clk);
    for (int i = 0; i < 256; i++) begin
      we = 1; waddr = 8'(i); wdata = {$urandom, $urandom}; model[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 2000; n++) begin
      re = 1; raddr = 8'($urandom);
      we = $urandom_range(0, 1);
      waddr = ($urandom_range(0, 3) == 0) ? raddr : 8'($urandom);
      wdata = {$urandom, $urandom};
      expd = model[raddr];
      @(negedge clk);
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata !== expd) begin failures++; if (failures < 10) $display("FAIL read %h", raddr); end
      // hold
      re = 0; we = 0; raddr = 8'($urandom);
      @(negedge clk);
      checks++;
      if (rdata !== expd) begin failures++; if (failures < 10) $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
