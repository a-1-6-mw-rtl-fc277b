// bn_reg_tb: writes all 32 entries with random words and reads them back
// through both ports, including a rewrite and reset-to-zero.
module bn_reg_tb;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] waddr = 0, raddr_a = 0, raddr_b = 0;
  logic [63:0] wdata = 0, rdata_a, rdata_b;
  logic [63:0] model [32];
  int checks = 0, failures = 0;

  bn_reg dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr_a, .rdata_a, .raddr_b, .rdata_b);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 32; i++) begin
      raddr_a = 5'(i); #1;
      checks++;
      if (rdata_a !== 64'd0) begin failures++; $display("FAIL entry %0d not reset", i); end
    end
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < 32; i++) begin
        we = 1; waddr = 5'(i); wdata = {$urandom, $urandom}; model[i] = wdata;
        @(negedge clk);
      end
    we = 0;
    for (int n = 0; n < 200; n++) begin
      raddr_a = 5'($urandom); raddr_b = 5'($urandom); #1;
      checks += 2;
      if (rdata_a !== model[raddr_a]) begin failures++; $display("FAIL port a %0d", raddr_a); end
      if (rdata_b !== model[raddr_b]) begin failures++; $display("FAIL port b %0d", raddr_b); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
