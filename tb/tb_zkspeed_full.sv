// tb_zkspeed_full: the accelerator top at its default sizes, one wire step.
//
// The top is instantiated with no parameter overrides (2^20-gate global
// SRAM, 16 MSM PEs with 2048 points each, 64-entry FracMLE batches with 12
// inverse units, 2 SumCheck PEs, 11 MLE Update PEs). The host writes the
// first 64 gates of a circuit into the global SRAM and runs one complete
// wire-identity step (Construct N&D -> FIFO -> FracMLE -> product tree,
// phi also loaded into the MSM point SRAMs) on a 2^6-gate table. Every
// N_j, D_j, phi and 1/D is checked against a reference, and so is the grand
// product. The other ports are held idle.
//
// The sizes are the paper's main configuration; the step instruction and
// the off-chip point port are this design's.
module tb_zkspeed_full;
  import zk_pkg::point_t, zk_pkg::instr_t, zk_pkg::sc_mode_e, zk_pkg::mt_mode_e;
  import zk_pkg::*;
  import tb_ref_pkg::rm, tb_ref_pkg::ra, tb_ref_pkg::rs, tb_ref_pkg::rrand;
  import tb_ref_pkg::apt_t, tb_ref_pkg::aadd, tb_ref_pkg::amul, tb_ref_pkg::gen;
  import tb_ref_pkg::proj_eq;

  localparam int MU = 20, MUC = 6, NG = 64;
  localparam int UPE = 11, UM = 4, MTMU = 24;

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
  mt_mode_e mt_mode; logic mt_start = 0; logic [4:0] mt_mu; fr_t mt_r [MTMU+1];
  logic mt_in_valid = 0, mt_in_ready; fr_t mt_in_data [8];
  logic mt_res_valid, mt_acc_valid, mt_bld_valid, mt_bld_done; fr_t mt_res_data, mt_acc_data;
  logic [4:0] mt_acc_level; fr_t mt_bld_data [8];
  logic [2:0] mt_lvl_valid; fr_t mt_lvl_data [3][4];
  sc_mode_e sc_mode; fr_t sc_alpha; logic sc_start = 0; logic [1:0] sc_in_valid = 0;
  logic sc_last = 0; fr_t sc_v0 [2][12], sc_v1 [2][12]; logic sc_done; fr_t sc_round_evals [6];
  logic [UPE-1:0] up_in_valid = 0, up_out_valid; fr_t up_r [UPE];
  fr_t up_t_even [UPE][UM], up_t_odd [UPE][UM], up_t_new [UPE][UM];
  fr_t mc_coef [6][12]; logic mc_in_valid = 0, mc_out_valid; fr_t mc_in_data [12], mc_out_data [6];
  logic [31:0] cnt_bus_stall, cnt_frac_stall, cnt_mtu_stall, cnt_msm_stall, cnt_msm_padd;
  logic [31:0] cnt_zero_skip, cnt_ones_loaded, cnt_dense_loaded;
  logic mtu_overrun;

  zkspeed_top dut (.*);

  // ---------------- behavioural off-chip point memory (only G is served)
  always @(posedge clk)
    if (pt_rd_valid) begin
      pt_rd_data.x <= tb_ref_pkg::GX;
      pt_rd_data.y <= tb_ref_pkg::GY;
      pt_rd_data.z <= fq_t'(1);
    end

  fr_t tab [11][NG];
  fr_t exp_n [NG][3], exp_d [NG][3], exp_phi [NG];
  int  nd_seen = 0, phi_seen = 0, mt_res_cnt = 0;
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

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ndense;
    int t0;
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

    for (int i = 0; i < NG; i++) begin
      for (int t = 0; t < 4; t++) tab[t][i] = fr_t'($urandom_range(0, 1));
      for (int t = 8; t < 11; t++) tab[t][i] = rrand();
    end
    for (int t = 4; t < 8; t++) begin
      ndense = 0;
      for (int i = 0; i < NG; i++) begin
        int u;
        u = $urandom_range(0, 99);
        if (u < 35) tab[t][i] = '0;
        else if (u < 70 || ndense >= 8) tab[t][i] = fr_t'(1);
        else begin tab[t][i] = rrand(); ndense++; end
      end
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // only the first 64 gates are written and read
    for (int t = 0; t < 11; t++)
      for (int i = 0; i < NG; i++) begin
        gs_wr_valid = 1; gs_wr_table = 4'(t); gs_wr_idx = 20'(i); gs_wr_data = tab[t][i];
        @(negedge clk);
      end
    gs_wr_valid = 0;

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

    t0 = cyc;
    run_instr(I_WIRE, 24'(NG), 2'd0, 1'b1, 1'b0);
    $display("wire step of %0d gates took %0d cycles", NG, cyc - t0);
    checks += 4;
    if (nd_seen != NG)  begin failures++; $display("N&D count %0d", nd_seen); end
    if (phi_seen != NG) begin failures++; $display("phi count %0d", phi_seen); end
    if (mt_res_cnt != 1) begin failures++; $display("tree results %0d", mt_res_cnt); end
    if (cnt_dense_loaded != 32'(NG)) begin failures++; $display("phi loads %0d", cnt_dense_loaded); end
    begin
      fr_t gp = fr_t'(1);
      for (int i = 0; i < NG; i++) gp = rm(gp, exp_phi[i]);
      checks++;
      if (mt_res_last !== gp) begin failures++; $display("grand product wrong"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
