// tb_multifunction_tree: runs all four tree modes on random data.
//   MT_MULT  product of 2^mu inputs (mu = 3, 4, 7)
//   MT_EVAL  MLE evaluation, reference by folding the table round by round
//   MT_PROD  every tree and accumulator node against a level-order product
//            tree, and the root
//   MT_BUILD eq table against the product formula, entry by entry
// Counts the cycles in which the unit refused input (stalls) and the
// Build MLE output rate.
//
// The modes and the 8-leaf tree follow the paper; the build-rate bound and
// the stall handshake are this design's.
module tb_multifunction_tree;
  import tb_ref_pkg::*;
  import zk_pkg::mt_mode_e, zk_pkg::MT_MULT, zk_pkg::MT_EVAL, zk_pkg::MT_PROD, zk_pkg::MT_BUILD;
  localparam int LOG_P = 3, P = 8, MAX_MU = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0, stalls = 0;
  always @(posedge clk) cyc <= cyc + 1;

  mt_mode_e mode;
  logic start = 0, in_valid = 0, in_ready, res_valid, acc_valid, bld_valid, bld_done;
  logic [3:0] mu;
  fr_t r [MAX_MU+1];
  fr_t in_data [P], res_data, acc_data, bld_data [P];
  logic [LOG_P-1:0] lvl_valid;
  fr_t lvl_data [LOG_P][P/2];
  logic [3:0] acc_level;

  multifunction_tree #(.LOG_P(LOG_P), .MAX_MU(MAX_MU)) dut (
    .clk, .rst_n, .mode, .start, .mu, .r, .in_valid, .in_ready, .in_data,
    .res_valid, .res_data, .lvl_valid, .lvl_data, .acc_valid, .acc_data, .acc_level,
    .bld_valid, .bld_data, .bld_done);

  fr_t tab [1024];
  // level-order product tree: node[l][i], l = 0 leaves
  fr_t node [11][1024];
  int  seen_acc [11];
  fr_t got_res;
  bit  got_any;

  always @(posedge clk) begin
    if (lvl_valid != 0 && mode == MT_PROD) begin
      // tree nodes of the beat: compare against the level tables by position
      // (beat index is tracked by the test process through beat_idx)
    end
    if (res_valid) begin got_res = res_data; got_any = 1; end
  end

  int beat_out [LOG_P];
  always @(posedge clk) begin
    for (int l = 0; l < LOG_P; l++) if (lvl_valid[l]) begin
      for (int i = 0; i < (P >> (l+1)); i++) begin
        checks++;
        if (lvl_data[l][i] !== node[l+1][beat_out[l]*(P >> (l+1)) + i]) begin
          failures++; $display("prod level %0d node mismatch", l+1);
        end
      end
      beat_out[l]++;
    end
    if (acc_valid) begin
      checks++;
      if (acc_data !== node[acc_level][seen_acc[acc_level]]) begin
        failures++; $display("acc node level %0d idx %0d mismatch", acc_level, seen_acc[acc_level]);
      end
      seen_acc[acc_level]++;
    end
  end

  task automatic run_inverse(mt_mode_e m, int mu_v);
    int n;
    fr_t expv;
    n = 2**mu_v;
    mode = m; mu = 4'(mu_v);
    for (int i = 1; i <= MAX_MU; i++) r[i] = rrand();
    for (int i = 0; i < n; i++) tab[i] = rrand();
    // reference tree
    for (int i = 0; i < n; i++) node[0][i] = tab[i];
    for (int l = 1; l <= mu_v; l++)
      for (int i = 0; i < (n >> l); i++)
        node[l][i] = (m == MT_EVAL)
          ? ra(rm(rs(fr_t'(1), r[l]), node[l-1][2*i]), rm(r[l], node[l-1][2*i+1]))
          : rm(node[l-1][2*i], node[l-1][2*i+1]);
    expv = node[mu_v][0];
    for (int l = 0; l < 11; l++) seen_acc[l] = 0;
    for (int l = 0; l < LOG_P; l++) beat_out[l] = 0;
    got_any = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int b = 0; b < n / P; ) begin
      for (int i = 0; i < P; i++) in_data[i] = tab[b*P + i];
      in_valid = 1;
      @(posedge clk);
      if (in_ready) b++; else stalls++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (!got_any || got_res !== expv) begin failures++; $display("mode %0d mu %0d root mismatch", m, mu_v); end
    if (m == MT_PROD) begin
      for (int l = LOG_P + 1; l <= mu_v; l++) begin
        checks++;
        if (seen_acc[l] != (n >> l)) begin failures++; $display("level %0d count %0d", l, seen_acc[l]); end
      end
    end
  endtask

  task automatic run_build(int mu_v);
    int n, k, t0;
    n = 2**mu_v;
    mode = MT_BUILD; mu = 4'(mu_v);
    for (int i = 1; i <= MAX_MU; i++) r[i] = rrand();
    for (int e = 0; e < n; e++) begin
      tab[e] = fr_t'(1);
      for (int l = 1; l <= mu_v; l++)
        tab[e] = rm(tab[e], ((e >> (mu_v - l)) & 1) ? r[l] : rs(fr_t'(1), r[l]));
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    k = 0; t0 = cyc;
    while (k < n / P && cyc - t0 < 4 * n) begin
      @(posedge clk);
      if (bld_valid) begin
        for (int i = 0; i < P; i++) begin
          checks++;
          if (bld_data[i] !== tab[k*P + i]) begin failures++; $display("build entry %0d mismatch", k*P+i); end
        end
        k++;
      end
    end
    checks++;
    if (k != n / P) begin failures++; $display("build beats %0d", k); end
    // rate: roughly one beat of P entries per cycle (plus pipeline fill)
    checks++;
    if (cyc - t0 > (n / P) + (n / P) / 4 + LOG_P + 6) begin failures++; $display("build slow: %0d cycles", cyc - t0); end
    repeat (5) @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode = MT_MULT; mu = 3;
    for (int i = 0; i <= MAX_MU; i++) r[i] = '0;
    for (int i = 0; i < P; i++) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_inverse(MT_MULT, 3);
    run_inverse(MT_MULT, 4);
    run_inverse(MT_MULT, 7);
    run_inverse(MT_EVAL, 5);
    run_inverse(MT_EVAL, 8);
    run_inverse(MT_PROD, 7);
    run_build(3);
    run_build(4);
    run_build(8);
    run_build(10);
    $display("input stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
