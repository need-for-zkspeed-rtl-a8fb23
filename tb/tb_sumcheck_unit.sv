// tb_sumcheck_unit: one full SumCheck round for each of the three
// polynomials. Random MLE tables of 2^MU entries are streamed, NUM_PE pairs
// per cycle; the round evaluations g(k), k = 0..5, are compared with a
// direct evaluation of the polynomial at X1 = k over the hypercube, where
// each MLE is taken as (1-k)*t[2i] + k*t[2i+1]. Also checks the SumCheck
// identity g(0) + g(1) = sum of the polynomial over the whole hypercube,
// and that the round result is ready LAT + 1 cycles after the last beat.
//
// The three polynomials are the paper's Eq 3-5; the order of MLEs on the
// ports and the LAT+1 latency are this design's.
module tb_sumcheck_unit;
  import tb_ref_pkg::*;
  import zk_pkg::sc_mode_e, zk_pkg::SC_ZERO, zk_pkg::SC_PERM, zk_pkg::SC_OPEN;
  localparam int NP = 2, NM = 12, NE = 6, LAT = 4, MU = 5;
  localparam int N = 2**MU;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  sc_mode_e mode;
  fr_t alpha;
  logic start = 0, last = 0, done;
  logic [NP-1:0] in_valid = '0;
  fr_t v0 [NP][NM], v1 [NP][NM], ev [NE];
  fr_t tab [NM][N];

  sumcheck_unit #(.NUM_PE(NP), .LAT(LAT)) dut (
    .clk, .rst_n, .mode, .alpha, .start, .in_valid, .last, .v0, .v1, .done, .round_evals(ev));

  function automatic fr_t poly(sc_mode_e m, fr_t x [NM], fr_t al);
    fr_t s;
    case (m)
      SC_ZERO: begin
        s = ra(rm(x[0], x[5]), rm(x[1], x[6]));
        s = ra(s, rm(rm(x[2], x[5]), x[6]));
        s = rs(s, rm(x[3], x[7]));
        s = ra(s, x[4]);
        return rm(s, x[8]);
      end
      SC_PERM: begin
        s = rs(x[0], rm(x[1], x[2]));
        s = ra(s, rm(al, rm(x[3], rm(x[4], rm(x[5], x[6])))));
        s = rs(s, rm(al, rm(x[7], rm(x[8], x[9]))));
        return rm(s, x[10]);
      end
      default: begin
        s = '0;
        for (int i = 0; i < 6; i++) s = ra(s, rm(x[i], x[6+i]));
        return s;
      end
    endcase
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sc_mode_e modes [3];
    modes[0] = SC_ZERO; modes[1] = SC_PERM; modes[2] = SC_OPEN;
    mode = SC_ZERO; alpha = '0;
    for (int p = 0; p < NP; p++) for (int m = 0; m < NM; m++) begin v0[p][m] = '0; v1[p][m] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (modes[mi]) begin
      fr_t expv [NE];
      fr_t hsum;
      int t_last;
      mode = modes[mi];
      alpha = rrand();
      for (int m = 0; m < NM; m++) for (int i = 0; i < N; i++)
        tab[m][i] = (mi == 0 && m < 4) ? fr_t'($urandom_range(0, 1)) : rrand();
      // reference
      for (int k = 0; k < NE; k++) begin
        expv[k] = '0;
        for (int i = 0; i < N/2; i++) begin
          fr_t x [NM];
          for (int m = 0; m < NM; m++)
            x[m] = ra(rm(rs(fr_t'(1), fr_t'(k)), tab[m][2*i]), rm(fr_t'(k), tab[m][2*i+1]));
          expv[k] = ra(expv[k], poly(mode, x, alpha));
        end
      end
      hsum = '0;
      for (int i = 0; i < N; i++) begin
        fr_t x [NM];
        for (int m = 0; m < NM; m++) x[m] = tab[m][i];
        hsum = ra(hsum, poly(mode, x, alpha));
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      for (int i = 0; i < N/2; i += NP) begin
        for (int p = 0; p < NP; p++)
          for (int m = 0; m < NM; m++) begin
            v0[p][m] = tab[m][2*(i+p)];
            v1[p][m] = tab[m][2*(i+p)+1];
          end
        in_valid = '1;
        last = (i + NP >= N/2);
        @(negedge clk);
      end
      t_last = cyc - 1;
      in_valid = '0; last = 0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t_last != LAT + 1) begin failures++; $display("latency %0d", cyc - t_last); end
      for (int k = 0; k < NE; k++) begin
        checks++;
        if (ev[k] !== expv[k]) begin failures++; $display("mode %0d eval %0d mismatch", mi, k); end
      end
      checks++;
      if (ra(ev[0], ev[1]) !== hsum) begin failures++; $display("g(0)+g(1) mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
