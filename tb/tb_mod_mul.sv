// tb_mod_mul: random products against the reference, checks the latency.
//
// The LAT-cycle latency checked is this design's (the paper gives none).
module tb_mod_mul;
  import tb_ref_pkg::*;
  localparam int LAT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  fr_t a, b, y;
  fr_t exp_q [$];
  int  t_in [$];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  mod_mul #(.LAT(LAT)) dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .y);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid) begin
    fr_t e; int t;
    e = exp_q.pop_front(); t = t_in.pop_front();
    checks++;
    if (y !== e) begin failures++; $display("mismatch %h vs %h", y, e); end
    checks++;
    if (cyc - t != LAT) begin failures++; $display("latency %0d", cyc - t); end
  end

  initial begin
    a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      a = (i < 4) ? RMOD - 255'(i + 1) : rrand();
      b = (i < 4) ? RMOD - 255'(1) : rrand();
      if (in_valid) begin exp_q.push_back(rm(a, b)); t_in.push_back(cyc); end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
