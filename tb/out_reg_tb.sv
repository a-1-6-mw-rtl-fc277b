// out_reg_tb: parallel mode (one word per input, written the next cycle)
// and serial mode (eight samples per word, first sample in byte 0), with
// sequential addresses from the base and a clear between the two.
module out_reg_tb;
  import dla_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, serial = 0, in_valid = 0, wr_en;
  logic [7:0] base = 8'h20, wr_addr;
  fp8_t in_q [8];
  logic [63:0] wr_data;
  logic [63:0] exp_w [$];
  logic [7:0]  exp_a [$];
  int checks = 0, failures = 0;

  out_reg dut (.clk, .rst_n, .clear, .base, .serial, .in_valid, .in_q,
               .wr_en, .wr_addr, .wr_data);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && wr_en) begin
    checks++;
    if (exp_w.size() == 0 || wr_data !== exp_w[0] || wr_addr !== exp_a[0]) begin
      failures++;
      $display("FAIL write %h @%h", wr_data, wr_addr);
    end
    if (exp_w.size() != 0) begin void'(exp_w.pop_front()); void'(exp_a.pop_front()); end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] w;
    for (int i = 0; i < 8; i++) in_q[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    clear = 1; @(negedge clk); clear = 0;
    for (int n = 0; n < 20; n++) begin
      for (int i = 0; i < 8; i++) begin in_q[i] = 8'($urandom); w[i*8 +: 8] = in_q[i]; end
      exp_w.push_back(w); exp_a.push_back(8'h20 + 8'(n));
      in_valid = 1; @(negedge clk); in_valid = 0;
      checks++;
      if (!wr_en) begin failures++; $display("FAIL parallel write not in next cycle"); end
      if ($urandom_range(0, 1)) @(negedge clk);
    end
    @(negedge clk);
    serial = 1; base = 8'h80;
    clear = 1; @(negedge clk); clear = 0;
    for (int n = 0; n < 10; n++) begin
      w = {$urandom, $urandom};
      exp_w.push_back(w); exp_a.push_back(8'h80 + 8'(n));
      for (int s = 0; s < 8; s++) begin
        in_q[0] = w[s*8 +: 8];
        for (int i = 1; i < 8; i++) in_q[i] = 8'($urandom);
        in_valid = 1; @(negedge clk); in_valid = 0;
        if ($urandom_range(0, 2) == 0) @(negedge clk);
      end
    end
    repeat (4) @(negedge clk);
    checks++;
    if (exp_w.size() != 0) begin failures++; $display("FAIL %0d words missing", exp_w.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
