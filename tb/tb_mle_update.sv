// tb_mle_update: folds random tables with random challenges in two PEs of
// two lanes each, compares t'[i] = t[2i] + r*(t[2i+1]-t[2i]) computed in the
// reference form (1-r)*t[2i] + r*t[2i+1], and checks the LAT-cycle latency.
//
// The update formula is the paper's Eq 2; PE and multiplier counts are
// reduced here to keep the run short.
module tb_mle_update;
  import tb_ref_pkg::*;
  localparam int NP = 2, NM = 2, LAT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [NP-1:0] in_valid = '0, out_valid;
  fr_t r [NP];
  fr_t te [NP][NM], to [NP][NM], tn [NP][NM];
  fr_t exp_q [NP][$];
  int  t_q [NP][$];

  mle_update #(.NUM_PE(NP), .MULS(NM), .LAT(LAT)) dut (
    .clk, .rst_n, .in_valid, .r, .t_even(te), .t_odd(to), .out_valid, .t_new(tn));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) for (int p = 0; p < NP; p++) if (out_valid[p]) begin
    checks++;
    if (cyc - t_q[p].pop_front() != LAT) failures++;
    for (int l = 0; l < NM; l++) begin
      fr_t e;
      e = exp_q[p].pop_front();
      checks++;
      if (tn[p][l] !== e) begin failures++; $display("pe%0d lane%0d mismatch", p, l); end
    end
  end

  initial begin
    for (int p = 0; p < NP; p++) begin
      r[p] = '0;
      for (int l = 0; l < NM; l++) begin te[p][l] = '0; to[p][l] = '0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) r[p] = rrand();
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        in_valid[p] = ($urandom_range(0, 4) != 0);
        if (i == 150) r[p] = rrand();
        for (int l = 0; l < NM; l++) begin
          te[p][l] = (i % 7 == 0) ? fr_t'($urandom_range(0, 1)) : rrand();
          to[p][l] = rrand();
          if (in_valid[p])
            exp_q[p].push_back(ra(rm(rs(fr_t'(1), r[p]), te[p][l]), rm(r[p], to[p][l])));
        end
        if (in_valid[p]) t_q[p].push_back(cyc);
      end
    end
    @(negedge clk) in_valid = '0;
    repeat (LAT + 3) @(posedge clk);
    for (int p = 0; p < NP; p++) begin checks++; if (exp_q[p].size() != 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
