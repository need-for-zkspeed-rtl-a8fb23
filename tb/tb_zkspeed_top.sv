// tb_zkspeed_top: end-to-end test of the accelerator top at reduced sizes.
//
// The host loads a 32-gate circuit (selectors, three witness columns, the
// wiring permutation) into the compressed global SRAM, then runs the
// controller's steps:
//   1. witness commitment of w1 as a sparse MSM: a ones pass and a dense
//      pass (zero scalars skipped), checked against sum w_i * P_i;
//   2. the wire identity: Construct N&D -> FIFO -> FracMLE -> product tree;
//      every N_j, D_j, phi and 1/D is checked, and so is the grand product;
//   3. the commitment to phi, run on the points loaded during step 2;
//   4. the multifunction tree used directly, in product and evaluation
//      mode, with back-to-back input beats;
//   5. one SumCheck (ZeroCheck) round, one MLE Update beat and one MLE
//      Combine beat through the top's stream ports.
// MSM base points come from a behavioural off-chip memory: P_i = (i+1) G.
// Scalars of the reduced MSM are taken modulo 2^MSM_SBITS, as the unit at
// this size does. The FracMLE is made small (8-entry batches, 2 inverse
// units) so that it stalls and the bus FIFO fills, and every mechanism the
// top has (bus stall, FracMLE stall, MSM hazard stall, tree stall, zero
// skip, ones / dense loading, tree mode switches) is counted and must occur.
//
// The dataflow checked follows the paper's wire-identity chaining; the
// counters and the reduced sizes are this design's.
module tb_zkspeed_top;
  import zk_pkg::point_t, zk_pkg::instr_t, zk_pkg::sc_mode_e, zk_pkg::mt_mode_e;
  import zk_pkg::*;
  import tb_ref_pkg::rm, tb_ref_pkg::ra, tb_ref_pkg::rs, tb_ref_pkg::rrand;
  import tb_ref_pkg::apt_t, tb_ref_pkg::aadd, tb_ref_pkg::amul, tb_ref_pkg::gen;
  import tb_ref_pkg::proj_eq;

  localparam int MU = 7, MUC = 5, NG = 32;
  localparam int NPE = 2, PTS = 32, SB = 16, UPE = 2, UM = 2, MTMU = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;
  int checks = 0, failures = 0;

  // DUT signals
  logic instr_valid = 0, instr_ready, instr_done;
  instr_t instr;
  logic gs_wr_valid = 0, gs_overflow;
  logic [3:0] gs_wr_table;
  logic [MU-1:0] gs_wr_idx;
  fr_t gs_wr_data, beta, gamma;
  logic pt_rd_valid; logic [MU-1:0] pt_rd_idx; point_t pt_rd_data;
  logic nd_valid, phi_valid; fr_t nd_n [3], nd_d [3], phi, phi_dinv;
  point_t msm_result; logic msm_busy;
  mt_mode_e mt_mode; logic mt_start = 0; logic [3:0] mt_mu; fr_t mt_r [MTMU+1];
  logic mt_in_valid = 0, mt_in_ready; fr_t mt_in_data [8];
  logic mt_res_valid, mt_acc_valid, mt_bld_valid, mt_bld_done; fr_t mt_res_data, mt_acc_data;
  logic [3:0] mt_acc_level; fr_t mt_bld_data [8];
  logic [2:0] mt_lvl_valid; fr_t mt_lvl_data [3][4];
  sc_mode_e sc_mode; fr_t sc_alpha; logic sc_start = 0; logic [1:0] sc_in_valid = 0;
  logic sc_last = 0; fr_t sc_v0 [2][12], sc_v1 [2][12]; logic sc_done; fr_t sc_round_evals [6];
  logic [UPE-1:0] up_in_valid = 0, up_out_valid; fr_t up_r [UPE];
  fr_t up_t_even [UPE][UM], up_t_odd [UPE][UM], up_t_new [UPE][UM];
  fr_t mc_coef [6][12]; logic mc_in_valid = 0, mc_out_valid; fr_t mc_in_data [12], mc_out_data [6];
  logic [31:0] cnt_bus_stall, cnt_frac_stall, cnt_mtu_stall, cnt_msm_stall, cnt_msm_padd;
  logic [31:0] cnt_zero_skip, cnt_ones_loaded, cnt_dense_loaded;
  logic mtu_overrun;

  zkspeed_top #(.MU(MU), .MSM_PE(NPE), .MSM_WIN(4), .MSM_PTS(PTS), .MSM_SBITS(SB),
                .MSM_GROUP(4), .PADD_LAT(4), .SC_PE(2), .UPD_PE(UPE), .UPD_MULS(UM),
                .MT_LOG_P(3), .MT_MAX_MU(MTMU), .FR_B(8), .FR_K(2), .LAT(4),
                .NDQ_DEPTH(8)) dut (.*);

  // ---------------- behavioural off-chip point memory: P_i = (i+1) G
  apt_t pts [2**MU];
  always @(posedge clk)
    if (pt_rd_valid) begin
      pt_rd_data.x <= pts[pt_rd_idx].x;
      pt_rd_data.y <= pts[pt_rd_idx].y;
      pt_rd_data.z <= fq_t'(1);
    end

  // ---------------- reference data
  fr_t tab [11][2**MU];
  fr_t exp_n [NG][3], exp_d [NG][3], exp_phi [NG];
  int  nd_seen = 0, phi_seen = 0, mt_res_cnt = 0, mt_stalls = 0;
  fr_t mt_res_last;

  function automatic fr_t rpow(fr_t a, logic [254:0] e);
    fr_t r = fr_t'(1);
    for (int i = 254; i >= 0; i--) begin
      r = rm(r, r);
      if (e[i]) r = rm(r, a);
    end
    return r;
  endfunction
  function automatic fr_t rinv(fr_t a);
    return rpow(a, tb_ref_pkg::RMOD - 255'd2);
  endfunction

  // output monitors
  always @(posedge clk) begin
    if (rst_n && nd_valid) begin
      for (int j = 0; j < 3; j++) begin
        checks += 2;
        if (nd_n[j] !== exp_n[nd_seen % NG][j]) begin failures++; $display("N mismatch %0d", nd_seen); end
        if (nd_d[j] !== exp_d[nd_seen % NG][j]) begin failures++; $display("D mismatch %0d", nd_seen); end
      end
      nd_seen++;
    end
    if (rst_n && phi_valid) begin
      checks += 2;
      if (phi !== exp_phi[phi_seen % NG]) begin failures++; $display("phi mismatch %0d", phi_seen); end
      if (rm(phi_dinv, rm(rm(exp_d[phi_seen % NG][0], exp_d[phi_seen % NG][1]),
                          exp_d[phi_seen % NG][2])) !== fr_t'(1)) begin
        failures++; $display("1/D mismatch %0d", phi_seen);
      end
      phi_seen++;
    end
    if (rst_n && mt_res_valid) begin mt_res_cnt++; mt_res_last = mt_res_data; end
    if (rst_n && mt_in_valid && !mt_in_ready) mt_stalls++;
  end

  task automatic run_instr(zk_pkg::iop_e op, logic [23:0] len, logic [1:0] wsel,
                           logic pass, logic clr);
    instr = '0;
    instr.op = op; instr.mu = 5'(MUC); instr.base = '0; instr.len = len;
    instr.wsel = wsel; instr.msm_pass = pass; instr.msm_clear = clr;
    while (!instr_ready) @(negedge clk);
    instr_valid = 1;
    @(negedge clk) instr_valid = 0;
    while (!instr_done) @(negedge clk);
  endtask

  task automatic check_msm(logic [63:0] k, string what);
    checks++;
    if (!proj_eq(msm_result.x, msm_result.y, msm_result.z, amul(k, gen()))) begin
      failures++; $display("%s MSM wrong", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] kw;
    int ndense;
    instr = '0; gs_wr_table = '0; gs_wr_idx = '0; gs_wr_data = '0;
    mt_mode = MT_MULT; mt_mu = '0; sc_mode = SC_ZERO; sc_alpha = '0;
    for (int i = 0; i <= MTMU; i++) mt_r[i] = '0;
    for (int i = 0; i < 8; i++) mt_in_data[i] = '0;
    for (int p = 0; p < 2; p++) for (int m = 0; m < 12; m++) begin sc_v0[p][m] = '0; sc_v1[p][m] = '0; end
    for (int p = 0; p < UPE; p++) begin
      up_r[p] = '0;
      for (int m = 0; m < UM; m++) begin up_t_even[p][m] = '0; up_t_odd[p][m] = '0; end
    end
    for (int o = 0; o < 6; o++) for (int i = 0; i < 12; i++) mc_coef[o][i] = '0;
    for (int i = 0; i < 12; i++) mc_in_data[i] = '0;
    beta = rrand(); gamma = rrand();

    // points
    pts[0] = gen();
    for (int i = 1; i < 2**MU; i++) pts[i] = aadd(pts[i-1], gen());

    // circuit tables: binary selectors, sparse qC / witnesses, full sigma
    for (int i = 0; i < 2**MU; i++) begin
      for (int t = 0; t < 4; t++) tab[t][i] = fr_t'($urandom_range(0, 1));
      for (int t = 8; t < 11; t++) tab[t][i] = (i < NG) ? rrand() : '0;
    end
    for (int t = 4; t < 8; t++) begin
      ndense = 0;
      for (int i = 0; i < 2**MU; i++) begin
        int u;
        u = $urandom_range(0, 99);
        if (i >= NG || u < 35) tab[t][i] = '0;
        else if (u < 70 || ndense >= 14) tab[t][i] = fr_t'(1);
        else begin tab[t][i] = rrand(); ndense++; end
      end
    end
    tab[5][0] = '0;  // at least one zero scalar
    tab[5][1] = fr_t'(1);
    tab[5][2] = fr_t'(12345);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 11; t++)
      for (int i = 0; i < 2**MU; i++) begin
        gs_wr_valid = 1; gs_wr_table = 4'(t); gs_wr_idx = MU'(i); gs_wr_data = tab[t][i];
        @(negedge clk);
      end
    gs_wr_valid = 0;

    // references for the wire identity
    for (int i = 0; i < NG; i++) begin
      fr_t np, dp;
      np = fr_t'(1); dp = fr_t'(1);
      for (int j = 0; j < 3; j++) begin
        exp_n[i][j] = ra(ra(tab[5+j][i], rm(beta, fr_t'((j << MUC) + i))), gamma);
        exp_d[i][j] = ra(ra(tab[5+j][i], rm(beta, tab[8+j][i])), gamma);
        np = rm(np, exp_n[i][j]); dp = rm(dp, exp_d[i][j]);
      end
      exp_phi[i] = rm(np, rinv(dp));
    end

    // ---- 1. witness commitment of w1: ones pass, then dense pass
    kw = 0;
    for (int i = 0; i < NG; i++)
      if (tab[5][i] != '0) kw += 64'(tab[5][i][SB-1:0]) * 64'(i + 1);
    run_instr(I_WITNESS_LOAD, 24'(NG), 2'd0, 1'b0, 1'b0);
    run_instr(I_MSM_RUN, 24'(NG), 2'd0, 1'b0, 1'b1);
    run_instr(I_WITNESS_LOAD, 24'(NG), 2'd0, 1'b1, 1'b0);
    run_instr(I_MSM_RUN, 24'(NG), 2'd0, 1'b1, 1'b0);
    check_msm(kw, "witness");
    $display("witness MSM done at cycle %0d", cyc);

    // ---- 2. wire identity
    run_instr(I_WIRE, 24'(NG), 2'd0, 1'b1, 1'b0);
    checks += 3;
    if (nd_seen != NG)  begin failures++; $display("N&D count %0d", nd_seen); end
    if (phi_seen != NG) begin failures++; $display("phi count %0d", phi_seen); end
    if (mt_res_cnt != 1) begin failures++; $display("tree results %0d", mt_res_cnt); end
    begin
      fr_t gp = fr_t'(1);
      for (int i = 0; i < NG; i++) gp = rm(gp, exp_phi[i]);
      checks++;
      if (mt_res_last !== gp) begin failures++; $display("grand product wrong"); end
    end
    $display("wire identity done at cycle %0d", cyc);

    // ---- 3. commitment to phi
    kw = 0;
    for (int i = 0; i < NG; i++) kw += 64'(exp_phi[i][SB-1:0]) * 64'(i + 1);
    run_instr(I_MSM_RUN, 24'(NG), 2'd0, 1'b1, 1'b1);
    check_msm(kw, "phi");
    $display("phi MSM done at cycle %0d", cyc);

    // ---- 4. tree used directly: product (mu=6) then evaluation (mu=5)
    begin
      fr_t tv [64];
      fr_t gp;
      gp = fr_t'(1);
      for (int i = 0; i < 64; i++) begin tv[i] = rrand(); gp = rm(gp, tv[i]); end
      mt_res_cnt = 0;
      mt_mode = MT_PROD; mt_mu = 4'd6;
      @(negedge clk) mt_start = 1;
      @(negedge clk) mt_start = 0;
      for (int b = 0; b < 8; b++) begin
        for (int k = 0; k < 8; k++) mt_in_data[k] = tv[8*b + k];
        mt_in_valid = 1;
        @(posedge clk);
        while (!mt_in_ready) @(posedge clk);
        @(negedge clk);
      end
      mt_in_valid = 0;
      while (mt_res_cnt == 0) @(negedge clk);
      checks++;
      if (mt_res_last !== gp) begin failures++; $display("tree product wrong"); end

      // evaluation: fold the LSB pair with r1, then r2, ...
      for (int i = 1; i <= 5; i++) mt_r[i] = rrand();
      for (int i = 0; i < 32; i++) tv[i] = rrand();
      mt_mode = MT_EVAL; mt_mu = 4'd5; mt_res_cnt = 0;
      @(negedge clk) mt_start = 1;
      @(negedge clk) mt_start = 0;
      for (int b = 0; b < 4; b++) begin
        for (int k = 0; k < 8; k++) mt_in_data[k] = tv[8*b + k];
        mt_in_valid = 1;
        @(posedge clk);
        while (!mt_in_ready) @(posedge clk);
        @(negedge clk);
      end
      mt_in_valid = 0;
      for (int l = 1; l <= 5; l++)
        for (int i = 0; i < (32 >> l); i++)
          tv[i] = ra(tv[2*i], rm(mt_r[l], rs(tv[2*i+1], tv[2*i])));
      while (mt_res_cnt == 0) @(negedge clk);
      checks++;
      if (mt_res_last !== tv[0]) begin failures++; $display("tree evaluation wrong"); end
    end

    // ---- 5. SumCheck ZeroCheck round (one pair per PE), MLE Update, Combine
    begin
      fr_t v [2][2][12];
      fr_t expv [6];
      for (int p = 0; p < 2; p++) for (int h = 0; h < 2; h++) for (int m = 0; m < 12; m++)
        v[p][h][m] = (m < 4) ? fr_t'($urandom_range(0, 1)) : rrand();
      for (int k = 0; k < 6; k++) begin
        expv[k] = '0;
        for (int p = 0; p < 2; p++) begin
          fr_t x [12];
          fr_t s;
          for (int m = 0; m < 12; m++)
            x[m] = ra(rm(rs(fr_t'(1), fr_t'(k)), v[p][0][m]), rm(fr_t'(k), v[p][1][m]));
          s = ra(rm(x[0], x[5]), rm(x[1], x[6]));
          s = ra(s, rm(rm(x[2], x[5]), x[6]));
          s = rs(s, rm(x[3], x[7]));
          s = ra(s, x[4]);
          expv[k] = ra(expv[k], rm(s, x[8]));
        end
      end
      sc_mode = SC_ZERO;
      @(negedge clk) sc_start = 1;
      @(negedge clk) sc_start = 0;
      for (int p = 0; p < 2; p++) for (int m = 0; m < 12; m++) begin
        sc_v0[p][m] = v[p][0][m]; sc_v1[p][m] = v[p][1][m];
      end
      sc_in_valid = '1; sc_last = 1;
      @(negedge clk) begin sc_in_valid = '0; sc_last = 0; end
      while (!sc_done) @(negedge clk);
      for (int k = 0; k < 6; k++) begin
        checks++;
        if (sc_round_evals[k] !== expv[k]) begin failures++; $display("sumcheck eval %0d", k); end
      end
    end
    begin
      fr_t exp_u [UPE][UM];
      for (int p = 0; p < UPE; p++) begin
        up_r[p] = rrand();
        for (int m = 0; m < UM; m++) begin
          up_t_even[p][m] = rrand(); up_t_odd[p][m] = rrand();
          exp_u[p][m] = ra(rm(rs(up_t_odd[p][m], up_t_even[p][m]), up_r[p]), up_t_even[p][m]);
        end
      end
      up_in_valid = '1;
      @(negedge clk) up_in_valid = '0;
      while (up_out_valid != '1) @(negedge clk);
      for (int p = 0; p < UPE; p++) for (int m = 0; m < UM; m++) begin
        checks++;
        if (up_t_new[p][m] !== exp_u[p][m]) begin failures++; $display("mle update %0d %0d", p, m); end
      end
    end
    begin
      fr_t exp_c [6];
      for (int i = 0; i < 12; i++) mc_in_data[i] = rrand();
      for (int o = 0; o < 6; o++) begin
        exp_c[o] = '0;
        for (int i = 0; i < 12; i++) begin
          mc_coef[o][i] = rrand();
          exp_c[o] = ra(exp_c[o], rm(mc_coef[o][i], mc_in_data[i]));
        end
      end
      mc_in_valid = 1;
      @(negedge clk) mc_in_valid = 0;
      while (!mc_out_valid) @(negedge clk);
      for (int o = 0; o < 6; o++) begin
        checks++;
        if (mc_out_data[o] !== exp_c[o]) begin failures++; $display("mle combine %0d", o); end
      end
    end

    // ---- mechanisms
    $display("bus stalls %0d, FracMLE stalls %0d, MSM hazard stalls %0d, tree stalls %0d (controller %0d)",
             cnt_bus_stall, cnt_frac_stall, cnt_msm_stall, mt_stalls, cnt_mtu_stall);
    $display("zero skips %0d, ones loaded %0d, dense loaded %0d, point additions %0d",
             cnt_zero_skip, cnt_ones_loaded, cnt_dense_loaded, cnt_msm_padd);
    checks += 9;
    if (cnt_bus_stall == 0)    begin failures++; $display("no bus stall"); end
    if (cnt_frac_stall == 0)   begin failures++; $display("no FracMLE stall"); end
    if (cnt_msm_stall == 0)    begin failures++; $display("no MSM hazard stall"); end
    if (mt_stalls == 0)        begin failures++; $display("no tree stall"); end
    if (cnt_zero_skip == 0)    begin failures++; $display("no zero skip"); end
    if (cnt_ones_loaded == 0)  begin failures++; $display("no ones load"); end
    if (cnt_dense_loaded == 0) begin failures++; $display("no dense load"); end
    if (mtu_overrun)           begin failures++; $display("tree buffer overrun"); end
    if (gs_overflow)           begin failures++; $display("SRAM overflow"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
