// tb_mle_combine: 6 x 12 linear combinations of random entries at the
// default sizes, including a row of zero coefficients (a disabled output);
// checks every output and the LAT + 1 latency.
//
// The 6 x 12 shape is this design's reading of the paper's 72 multipliers;
// the latency checked is this design's.
module tb_mle_combine;
  import tb_ref_pkg::*;
  localparam int NI = 12, NO = 6, LAT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  fr_t coef [NO][NI], din [NI], dout [NO];
  logic in_valid = 0, out_valid;
  fr_t q [$];
  int tq [$];
  mle_combine dut (.clk, .rst_n, .coef, .in_valid, .in_data(din), .out_valid, .out_data(dout));

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++; if (cyc - tq.pop_front() != LAT + 1) failures++;
    for (int o = 0; o < NO; o++) begin
      checks++;
      if (dout[o] !== q.pop_front()) begin failures++; $display("out %0d mismatch", o); end
    end
  end
  initial begin
    for (int o = 0; o < NO; o++) for (int j = 0; j < NI; j++) coef[o][j] = (o == 5) ? '0 : rrand();
    for (int j = 0; j < NI; j++) din[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 150; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int j = 0; j < NI; j++) din[j] = rsparse();
      if (in_valid) begin
        for (int o = 0; o < NO; o++) begin
          fr_t s; s = '0;
          for (int j = 0; j < NI; j++) s = ra(s, rm(coef[o][j], din[j]));
          q.push_back(s);
        end
        tq.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 4) @(posedge clk);
    checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
