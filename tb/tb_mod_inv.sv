// tb_mod_inv: inverts edge values (1, 2, r-1, r-2, 2^254) and random
// elements; checks a * y = 1 mod r and the fixed 2W-1 = 509-cycle loop.
//
// The 2W-1 = 509-iteration constant latency is the paper's; the load cycle
// is this design's.
module tb_mod_inv;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start = 0, busy, done;
  fr_t a, y;
  mod_inv dut (.clk, .rst_n, .start, .a, .busy, .done, .y);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fr_t vals [$];
    a = '0;
    vals.push_back(fr_t'(1)); vals.push_back(fr_t'(2));
    vals.push_back(RMOD - 255'd1); vals.push_back(RMOD - 255'd2);
    vals.push_back(255'd1 << 254);
    for (int i = 0; i < 40; i++) vals.push_back(rrand() | 255'd1);
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (vals[i]) begin
      int t0;
      @(negedge clk);
      a = vals[i]; start = 1;
      t0 = cyc;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (rm(a, y) !== fr_t'(1)) begin failures++; $display("inverse of %h wrong", a); end
      checks++;
      if (cyc - t0 != 510) begin failures++; $display("latency %0d", cyc - t0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
