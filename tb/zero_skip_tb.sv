// zero_skip_tb: feeds words of random sparsity (including the paper's
// example {18,-2,23,4,0,-3,2,0}, all-zero words and all-zero last words)
// with random gaps, and checks that the entries come out in lane order,
// one per cycle with no gaps while words are queued, with the right
// offsets, values, tags, last flags and marker entries. Also checks the
// zero comparators and the cycle count of a back-to-back stream.
module zero_skip_tb;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_nz, out_last;
  logic out_ready = 1;
  logic [63:0] in_data = 0;
  logic [7:0]  in_tag = 0, out_tag;
  logic [7:0]  nz_mask;
  logic [2:0]  out_offset;
  logic [7:0]  out_value;
  int checks = 0, failures = 0;

  zero_skip dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .in_tag, .in_last,
                 .nz_mask, .out_valid, .out_ready, .out_offset, .out_value, .out_nz,
                 .out_tag, .out_last);
  always #5 clk = ~clk;

  // expected entry queue
  typedef struct { logic [2:0] off; logic [7:0] val; logic nz; logic [7:0] tag; logic last; } ent_t;
  ent_t q[$];

  function automatic logic [7:0] int2fp8(int v);
    // small integers as FP8 (exact for |v| <= 1.875*2^0 * ... scaled): use
    // value v * 2^-5 so that 18 -> 0.5625
    if (v == 0) return 8'h00;
    return q_fp8(real'(v) / 32.0);
  endfunction

  task automatic push_word(logic [63:0] d, logic [7:0] tag, logic last);
    int n = 0;
    for (int i = 0; i < 8; i++)
      if (d[i*8 +: 7] != 0) begin
        q.push_back('{off: 3'(i), val: d[i*8 +: 8], nz: 1'b1, tag: tag, last: 1'b0});
        n++;
      end
    if (n == 0 && last) q.push_back('{off: 3'd0, val: 8'h00, nz: 1'b0, tag: tag, last: 1'b1});
    else if (n > 0 && last) q[$].last = 1'b1;
  endtask

  // output checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    ent_t e;
    checks++;
    if (q.size() == 0) begin
      failures++; $display("FAIL unexpected entry");
    end else begin
      e = q.pop_front();
      if (out_nz !== e.nz || out_last !== e.last || out_tag !== e.tag ||
          (e.nz && (out_offset !== e.off || out_value !== e.val))) begin
        failures++;
        if (failures < 10)
          $display("FAIL got off=%0d val=%h nz=%b last=%b tag=%h exp off=%0d val=%h nz=%b last=%b tag=%h",
                   out_offset, out_value, out_nz, out_last, out_tag, e.off, e.val, e.nz, e.last, e.tag);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(logic [63:0] d, logic [7:0] tag, logic last);
    in_valid = 1; in_data = d; in_tag = tag; in_last = last;
    #1;
    while (!in_ready) begin @(negedge clk); end
    push_word(d, tag, last);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    logic [63:0] ex, d;
    int ex_vals [8] = '{18, -2, 23, 4, 0, -3, 2, 0};
    int cyc0, cyc1, expected_cycles;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // the paper's example word, lane 0 = a1
    for (int i = 0; i < 8; i++) ex[i*8 +: 8] = int2fp8(ex_vals[i]);
    in_data = ex; #1;
    checks++;
    if (nz_mask !== 8'b0110_1111) begin
      failures++; $display("FAIL nz_mask %b", nz_mask);
    end
    send(ex, 8'h11, 1'b1);
    // random words, random gaps
    for (int n = 0; n < 400; n++) begin
      for (int i = 0; i < 8; i++)
        d[i*8 +: 8] = ($urandom_range(0, 99) < 60) ? 8'h00 : rand_fp8(0, 15);
      if ($urandom_range(0, 9) == 0) d = '0;
      if ($urandom_range(0, 9) == 0) d[7:0] = 8'h80;   // negative zero
      send(d, 8'($urandom), 1'($urandom_range(0, 2) == 0));
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 4)) @(negedge clk);
    end
    repeat (12) @(negedge clk);
    // rate: a back-to-back stream takes sum(max(nnz,1)) cycles
    expected_cycles = 0;
    cyc0 = $time / 10;
    for (int n = 0; n < 50; n++) begin
      int nnz;
      nnz = 0;
      for (int i = 0; i < 8; i++) begin
        d[i*8 +: 8] = ($urandom_range(0, 1) == 0) ? 8'h00 : rand_fp8(0, 15);
        if (d[i*8 +: 7] != 0) nnz++;
      end
      expected_cycles += (nnz == 0) ? 1 : nnz;
      send(d, 8'(n), 1'b0);
    end
    cyc1 = $time / 10;
    checks++;
    // the last word's entries are still draining when its send returns
    if ((cyc1 - cyc0) > expected_cycles + 1 || (cyc1 - cyc0) < expected_cycles - 8) begin
      failures++;
      $display("FAIL stream took %0d cycles, expected about %0d", cyc1 - cyc0, expected_cycles);
    end
    repeat (12) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d entries never came out", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
