// pingpong_buf_tb: the host side fills the free bank while the accelerator
// side reads and writes the other; after a swap each side must see the
// bank the other side filled. Random traffic on both sides against a model
// of the two banks.
module pingpong_buf_tb;
  logic clk = 0, rst_n = 0, sel = 0;
  logic a_re = 0, a_we = 0, h_re = 0, h_we = 0;
  logic [7:0] a_raddr = 0, a_waddr = 0, h_raddr = 0, h_waddr = 0;
  logic [63:0] a_rdata, a_wdata = 0, h_rdata, h_wdata = 0;
  logic [63:0] bank [2][256];
  int checks = 0, failures = 0;

  pingpong_buf dut (.clk, .rst_n, .sel,
    .a_re, .a_raddr, .a_rdata, .a_we, .a_waddr, .a_wdata,
    .h_re, .h_raddr, .h_rdata, .h_we, .h_waddr, .h_wdata);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] ea, eh;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // host fills both banks through swaps
    for (int b = 0; b < 2; b++) begin
      sel = 1'(b);
      for (int i = 0; i < 256; i++) begin
        h_we = 1; h_waddr = 8'(i); h_wdata = {$urandom, $urandom};
        bank[1-b][i] = h_wdata;
        @(negedge clk);
      end
      h_we = 0;
    end
    for (int n = 0; n < 3000; n++) begin
      if ($urandom_range(0, 63) == 0) sel = !sel;
      a_re = 1; a_raddr = 8'($urandom);
      h_re = 1; h_raddr = 8'($urandom);
      a_we = $urandom_range(0, 1); a_waddr = 8'($urandom); a_wdata = {$urandom, $urandom};
      h_we = $urandom_range(0, 1); h_waddr = 8'($urandom); h_wdata = {$urandom, $urandom};
      ea = bank[sel][a_raddr];
      eh = bank[!sel][h_raddr];
      @(negedge clk);
      if (a_we) bank[sel][a_waddr] = a_wdata;
      if (h_we) bank[!sel][h_waddr] = h_wdata;
      checks += 2;
      if (a_rdata !== ea) begin failures++; if (failures < 10) $display("FAIL a read"); end
      if (h_rdata !== eh) begin failures++; if (failures < 10) $display("FAIL h read"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
