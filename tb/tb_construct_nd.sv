// tb_construct_nd: random witnesses and permutations for a 2^10-gate
// circuit; checks N_j, D_j, N, D against the permutation-argument formulas
// and the 3-cycle latency.
//
// Expected values come from the reference package; the formulas checked are
// the standard permutation terms this design chose, the latency is its own.
module tb_construct_nd;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [5:0] mu = 6'd10;
  fr_t beta, gamma;
  logic in_valid = 0, out_valid;
  logic [31:0] idx;
  fr_t w [3], sigma [3], n_j [3], d_j [3], n_prod, d_prod;
  fr_t q [$];
  int tq [$];

  construct_nd dut (.clk, .rst_n, .mu, .beta, .gamma, .in_valid, .idx, .w, .sigma,
                    .out_valid, .n_j, .d_j, .n_prod, .d_prod);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid) begin
    fr_t e [8];
    for (int k = 0; k < 8; k++) e[k] = q.pop_front();
    checks++; if (cyc - tq.pop_front() != 3) failures++;
    for (int j = 0; j < 3; j++) begin
      checks += 2;
      if (n_j[j] !== e[j])   begin failures++; $display("N%0d mismatch", j+1); end
      if (d_j[j] !== e[3+j]) begin failures++; $display("D%0d mismatch", j+1); end
    end
    checks += 2;
    if (n_prod !== e[6]) failures++;
    if (d_prod !== e[7]) failures++;
  end

  initial begin
    idx = '0;
    for (int j = 0; j < 3; j++) begin w[j] = '0; sigma[j] = '0; end
    beta = rrand(); gamma = rrand();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      fr_t nn [3], dd [3];
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      idx = 32'($urandom_range(0, 1023));
      for (int j = 0; j < 3; j++) begin
        w[j] = rsparse();
        sigma[j] = fr_t'($urandom_range(0, 3*1024 - 1));
        nn[j] = ra(ra(w[j], rm(beta, fr_t'(j * 1024 + int'(idx)))), gamma);
        dd[j] = ra(ra(w[j], rm(beta, sigma[j])), gamma);
      end
      if (in_valid) begin
        for (int j = 0; j < 3; j++) q.push_back(nn[j]);
        for (int j = 0; j < 3; j++) q.push_back(dd[j]);
        q.push_back(rm(nn[0], rm(nn[1], nn[2])));
        q.push_back(rm(dd[0], rm(dd[1], dd[2])));
        tq.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(posedge clk);
    checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
