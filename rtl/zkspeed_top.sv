// zkspeed_top: top level of the HyperPlonk prover accelerator.
//
// The chip keeps the circuit tables (selectors, witnesses, permutation) in a
// compressed global SRAM and runs each proof step on a dedicated unit:
//   * msm_unit           - Pippenger MSM (witness and polynomial commitments)
//   * sumcheck_unit      - ZeroCheck / PermCheck / OpenCheck round polynomials
//   * mle_update         - table halving with the round challenge
//   * multifunction_tree - MLE evaluation, product MLE, eq-table build
//   * construct_nd       - numerator/denominator of the wire identity
//   * fracmle            - batched-inverse fraction MLE (phi = N / D)
//   * mle_combine        - linear combination of MLEs for the batch opening
//
// A small step controller sequences the two dataflows that run out of the
// global SRAM, as in the paper's schedule:
//   I_WITNESS_LOAD  stream gate rows, pick witness column wsel, and load the
//                   MSM point SRAMs with the points of the 1-valued scalars
//                   (msm_pass=0) or of the other non-zero scalars with their
//                   scalar (msm_pass=1). Zero scalars are skipped.
//   I_MSM_RUN       run the loaded MSM (ones pass or dense pass).
//   I_WIRE          stream gate rows -> Construct N&D -> bus FIFO -> FracMLE.
//                   phi goes out (to off-chip memory), into the MSM point
//                   SRAMs as dense scalars (commitment to phi) and, eight at a
//                   time, into the multifunction tree in product mode, which
//                   produces the product MLE v and the grand product.
// Whatever the paper leaves to off-chip memory is brought out as ports: MSM
// base points come from an HBM read port (index out, point back one cycle
// later), the SumCheck / MLE Update / MLE Combine / tree streams come in from
// HBM stream ports, and the Fiat-Shamir challenges (SHA3 is not built) come
// in as ports.
//
// Follows the paper: the set of units, the SRAM-to-N&D-to-FracMLE-to-ProdMLE
// chaining, and the sparse (ones / dense) MSM handling of witnesses.
// This design's own choices: the instruction format, a single global SRAM
// read channel, an 8-deep FIFO between Construct N&D and FracMLE with
// credit-based issue (the streamer stalls when the FIFO could overflow), and
// a two-beat buffer in front of the tree that absorbs its short stalls
// (`mtu_overrun` flags if that was ever not enough). MSM point SRAM slots are
// filled round-robin across the PEs.
//
// Timing: instr is taken when instr_valid && instr_ready; instr_done pulses
// when the step has completed.
//
// Lint notes: the instruction's op bits are only decoded when it is taken,
// so the stored copy leaves them unused; rst_n is also read by the
// assertion's disable clause, which lint reports as a synchronous use.
module zkspeed_top
  import zk_pkg::*;
#(
  parameter int MU         = 20,   // log2 gates held by the global SRAM
  parameter int MSM_PE     = 16,
  parameter int MSM_WIN    = 9,
  parameter int MSM_PTS    = 2048,
  parameter int MSM_SBITS  = 255,
  parameter int MSM_GROUP  = 16,
  parameter int PADD_LAT   = 8,
  parameter int SC_PE      = 2,
  parameter int UPD_PE     = 11,
  parameter int UPD_MULS   = 4,
  parameter int MT_LOG_P   = 3,
  parameter int MT_MAX_MU  = 24,
  parameter int FR_B       = 64,
  parameter int FR_K       = 12,
  parameter int LAT        = 4,
  parameter int NDQ_DEPTH  = 8
) (
  input  logic clk,
  input  logic rst_n,

  // ---- step controller
  input  logic   instr_valid,
  output logic   instr_ready,
  input  instr_t instr,
  output logic   instr_done,

  // ---- host writes into the global SRAM (circuit and witness tables)
  input  logic          gs_wr_valid,
  input  logic [3:0]    gs_wr_table,
  input  logic [MU-1:0] gs_wr_idx,
  input  fr_t           gs_wr_data,
  output logic          gs_overflow,

  // ---- Fiat-Shamir challenges (from the SHA3 unit / host)
  input  fr_t beta,
  input  fr_t gamma,

  // ---- HBM read port for MSM base points
  output logic          pt_rd_valid,
  output logic [MU-1:0] pt_rd_idx,
  input  point_t        pt_rd_data,     // one cycle after pt_rd_valid

  // ---- wire-identity results to HBM
  output logic  nd_valid,
  output fr_t   nd_n [3],
  output fr_t   nd_d [3],
  output logic  phi_valid,
  output fr_t   phi,
  output fr_t   phi_dinv,

  // ---- MSM result
  output point_t msm_result,
  output logic   msm_busy,

  // ---- multifunction tree: external use (EVAL / BUILD / MULT / PROD)
  input  mt_mode_e mt_mode,
  input  logic     mt_start,
  input  logic [$clog2(MT_MAX_MU+1)-1:0] mt_mu,
  input  fr_t      mt_r [MT_MAX_MU+1],
  input  logic     mt_in_valid,
  output logic     mt_in_ready,
  input  fr_t      mt_in_data [2**MT_LOG_P],
  output logic     mt_res_valid,
  output fr_t      mt_res_data,
  output logic     mt_acc_valid,
  output fr_t      mt_acc_data,
  output logic [$clog2(MT_MAX_MU+1)-1:0] mt_acc_level,
  output logic     mt_bld_valid,
  output fr_t      mt_bld_data [2**MT_LOG_P],
  output logic     mt_bld_done,
  output logic [MT_LOG_P-1:0] mt_lvl_valid,       // in-tree partial products
  output fr_t      mt_lvl_data [MT_LOG_P][2**(MT_LOG_P-1)],

  // ---- SumCheck stream (from HBM)
  input  sc_mode_e          sc_mode,
  input  fr_t               sc_alpha,
  input  logic              sc_start,
  input  logic [SC_PE-1:0]  sc_in_valid,
  input  logic              sc_last,
  input  fr_t               sc_v0 [SC_PE][12],
  input  fr_t               sc_v1 [SC_PE][12],
  output logic              sc_done,
  output fr_t               sc_round_evals [6],

  // ---- MLE Update stream
  input  logic [UPD_PE-1:0] up_in_valid,
  input  fr_t               up_r [UPD_PE],
  input  fr_t               up_t_even [UPD_PE][UPD_MULS],
  input  fr_t               up_t_odd  [UPD_PE][UPD_MULS],
  output logic [UPD_PE-1:0] up_out_valid,
  output fr_t               up_t_new  [UPD_PE][UPD_MULS],

  // ---- MLE Combine stream
  input  fr_t  mc_coef [6][12],
  input  logic mc_in_valid,
  input  fr_t  mc_in_data [12],
  output logic mc_out_valid,
  output fr_t  mc_out_data [6],

  // ---- event counters
  output logic [31:0] cnt_bus_stall,    // streamer held back by FIFO credit
  output logic [31:0] cnt_frac_stall,   // FIFO non-empty but FracMLE not ready
  output logic [31:0] cnt_mtu_stall,    // product beat waiting on the tree
  output logic [31:0] cnt_msm_stall,    // MSM hazard stalls
  output logic [31:0] cnt_msm_padd,     // MSM point additions
  output logic [31:0] cnt_zero_skip,    // zero scalars skipped on load
  output logic [31:0] cnt_ones_loaded,  // points loaded for the ones pass
  output logic [31:0] cnt_dense_loaded, // points loaded for the dense pass
  output logic        mtu_overrun
);
  localparam int P      = 2 ** MT_LOG_P;
  localparam int PEW    = $clog2(MSM_PE > 1 ? MSM_PE : 2);
  localparam int PAW    = $clog2(MSM_PTS);
  localparam int PNW    = $clog2(MSM_PTS + 1);
  localparam int QW     = $clog2(NDQ_DEPTH + 1);

  // ======================================================================
  // Controller state
  // ======================================================================
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_MSM, S_WIRE, S_DONE} st_e;
  st_e    st;
  instr_t cur;

  logic [23:0] iss_cnt;          // rows issued to the global SRAM
  logic [23:0] phi_cnt;          // phi values produced (I_WIRE)
  logic        mt_res_seen;
  logic        msm_started;
  logic        gs_rd_valid_q;    // set after the first cycle of a wire step

  assign instr_ready = (st == S_IDLE);

  // ======================================================================
  // Global SRAM and row streamer
  // ======================================================================
  logic          gs_rd_valid;
  logic [MU-1:0] gs_rd_idx;
  logic          gs_row_valid;
  fr_t           gs_row [11];

  global_sram #(.MU(MU)) u_gsram (
    .clk, .rst_n,
    .wr_valid(gs_wr_valid), .wr_table(gs_wr_table), .wr_idx(gs_wr_idx),
    .wr_data(gs_wr_data),
    .rd_valid(gs_rd_valid), .rd_idx(gs_rd_idx),
    .rd_out_valid(gs_row_valid), .rd_row(gs_row),
    .overflow(gs_overflow)
  );

  // FIFO credit: rows in flight between the SRAM and the FIFO
  logic [QW:0]   inflight;
  logic [QW-1:0] ndq_count;
  logic          streaming, credit_ok;
  logic [MU-1:0] row_idx_q;      // gate index of the row coming out of SRAM

  assign streaming = (st == S_LOAD || st == S_WIRE) && (iss_cnt < cur.len);
  assign credit_ok = (st != S_WIRE) ||
                     (32'(ndq_count) + 32'(inflight) < NDQ_DEPTH);
  assign gs_rd_valid = streaming && credit_ok;
  assign gs_rd_idx   = MU'(cur.base + iss_cnt);

  // ======================================================================
  // Construct N&D
  // ======================================================================
  logic nd_in_valid;
  fr_t  nd_w [3], nd_sigma [3];
  fr_t  nd_nprod, nd_dprod;
  logic [31:0] nd_idx;

  assign nd_in_valid = gs_row_valid && (st == S_WIRE);
  assign nd_idx      = 32'(row_idx_q);
  always_comb
    for (int j = 0; j < 3; j++) begin
      nd_w[j]     = gs_row[5 + j];
      nd_sigma[j] = gs_row[8 + j];
    end

  construct_nd u_nd (
    .clk, .rst_n, .mu({1'b0, cur.mu}), .beta, .gamma,
    .in_valid(nd_in_valid), .idx(nd_idx), .w(nd_w), .sigma(nd_sigma),
    .out_valid(nd_valid), .n_j(nd_n), .d_j(nd_d),
    .n_prod(nd_nprod), .d_prod(nd_dprod)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + $bits(inflight)'(gs_rd_valid && st == S_WIRE)
                              - $bits(inflight)'(nd_valid);

  // ======================================================================
  // Bus FIFO and FracMLE
  // ======================================================================
  logic [2*FR_W-1:0] ndq_dout;
  logic ndq_empty, fr_in_ready, fr_in_valid;

  sync_fifo #(.W(2 * FR_W), .DEPTH(NDQ_DEPTH)) u_ndq (
    .clk, .rst_n,
    .push(nd_valid), .din({nd_nprod, nd_dprod}),
    .pop(fr_in_valid && fr_in_ready), .dout(ndq_dout),
    .empty(ndq_empty), .count(ndq_count)
  );
  assign fr_in_valid = !ndq_empty;

  fracmle #(.B(FR_B), .K(FR_K), .LAT(LAT)) u_frac (
    .clk, .rst_n,
    .in_valid(fr_in_valid), .in_ready(fr_in_ready),
    .in_n(ndq_dout[2*FR_W-1:FR_W]), .in_d(ndq_dout[FR_W-1:0]),
    .out_valid(phi_valid), .out_phi(phi), .out_dinv(phi_dinv)
  );

  // ======================================================================
  // Product MLE: pack phi into tree beats
  // ======================================================================
  fr_t  pk_data [P];
  logic [MT_LOG_P-1:0] pk_cnt;
  fr_t  bq_data [2][P];          // two-beat buffer in front of the tree
  logic [1:0] bq_cnt;
  logic bq_rp, bq_wp;
  logic pk_full;
  logic ctl_mt;                  // controller owns the tree
  logic ctl_mt_start;
  logic mt_in_valid_i, mt_in_ready_i;
  fr_t  mt_in_data_i [P];

  assign pk_full = phi_valid && (st == S_WIRE) && (pk_cnt == MT_LOG_P'(P - 1));
  assign ctl_mt  = (st == S_WIRE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pk_cnt <= '0; bq_cnt <= '0; bq_rp <= 1'b0; bq_wp <= 1'b0;
      mtu_overrun <= 1'b0;
    end else begin
      if (ctl_mt_start) begin
        pk_cnt <= '0; bq_cnt <= '0; bq_rp <= 1'b0; bq_wp <= 1'b0;
      end else begin
        if (phi_valid && st == S_WIRE) begin
          pk_data[pk_cnt] <= phi;
          pk_cnt <= pk_cnt + 1'b1;
        end
        if (pk_full) begin
          for (int i = 0; i < P - 1; i++) bq_data[bq_wp][i] <= pk_data[i];
          bq_data[bq_wp][P-1] <= phi;
          bq_wp <= ~bq_wp;
          if (bq_cnt == 2'd2) mtu_overrun <= 1'b1;
        end
        if (ctl_mt && mt_in_valid_i && mt_in_ready_i) bq_rp <= ~bq_rp;
        bq_cnt <= bq_cnt + 2'(pk_full) - 2'(ctl_mt && mt_in_valid_i && mt_in_ready_i);
      end
    end
  end

  // ======================================================================
  // Multifunction tree (shared between controller and external use)
  // ======================================================================
  mt_mode_e mt_mode_i;
  logic     mt_start_i;
  logic [$clog2(MT_MAX_MU+1)-1:0] mt_mu_i;
  logic     mt_res_valid_i;

  assign mt_mode_i     = ctl_mt ? MT_PROD : mt_mode;
  assign mt_start_i    = ctl_mt ? ctl_mt_start : mt_start;
  assign mt_mu_i       = ctl_mt ? $bits(mt_mu_i)'(cur.mu) : mt_mu;
  assign mt_in_valid_i = ctl_mt ? (bq_cnt != 2'd0) : mt_in_valid;
  always_comb
    for (int i = 0; i < P; i++)
      mt_in_data_i[i] = ctl_mt ? bq_data[bq_rp][i] : mt_in_data[i];
  assign mt_in_ready  = !ctl_mt && mt_in_ready_i;
  assign mt_res_valid = mt_res_valid_i;

  multifunction_tree #(.LOG_P(MT_LOG_P), .MAX_MU(MT_MAX_MU)) u_mtu (
    .clk, .rst_n,
    .mode(mt_mode_i), .start(mt_start_i), .mu(mt_mu_i), .r(mt_r),
    .in_valid(mt_in_valid_i), .in_ready(mt_in_ready_i), .in_data(mt_in_data_i),
    .res_valid(mt_res_valid_i), .res_data(mt_res_data),
    .lvl_valid(mt_lvl_valid), .lvl_data(mt_lvl_data),
    .acc_valid(mt_acc_valid), .acc_data(mt_acc_data), .acc_level(mt_acc_level),
    .bld_valid(mt_bld_valid), .bld_data(mt_bld_data), .bld_done(mt_bld_done)
  );

  // ======================================================================
  // MSM loader: scalars from SRAM rows (witness) or from phi (wire)
  // ======================================================================
  fr_t         ld_scalar;
  logic        ld_cand;            // a scalar is presented this cycle
  logic        phi_d_valid;
  fr_t         phi_d;
  logic        ld_take;
  logic        ld_valid;
  logic [PEW-1:0] ld_pe;
  logic [PNW-1:0] ld_fill [MSM_PE];
  logic        is_zero, is_one;
  point_t      ld_pt;
  logic        msm_start, msm_done, msm_op;

  // point read: the row index (load) or the phi index (wire)
  assign pt_rd_valid = (st == S_LOAD) ? gs_rd_valid : (phi_valid && st == S_WIRE);
  assign pt_rd_idx   = (st == S_LOAD) ? gs_rd_idx   : MU'(cur.base + phi_cnt);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      phi_d_valid <= 1'b0; phi_d <= '0;
    end else begin
      phi_d_valid <= phi_valid && st == S_WIRE;
      phi_d       <= phi;
    end

  assign ld_cand   = (st == S_LOAD) ? gs_row_valid : phi_d_valid;
  assign ld_scalar = (st == S_LOAD) ? gs_row[5 + 32'(cur.wsel)] : phi_d;
  assign is_zero   = (ld_scalar == '0);
  assign is_one    = (ld_scalar == fr_t'(1));
  // ones pass loads the 1-valued scalars, dense pass the others; zero
  // scalars are skipped. phi (wire step) is dense: every non-zero value.
  assign ld_take   = ld_cand && !is_zero &&
                     (st == S_WIRE || (cur.msm_pass ? !is_one : is_one));
  assign ld_valid  = ld_take;
  always_comb begin
    ld_pt   = pt_rd_data;
    ld_pt.z = fq_t'(ld_scalar);   // dense: the scalar; ones pass: 1 (affine)
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_pe <= '0;
      for (int i = 0; i < MSM_PE; i++) ld_fill[i] <= '0;
    end else if (instr_valid && instr_ready &&
                 (instr.op == I_WITNESS_LOAD || instr.op == I_WIRE)) begin
      ld_pe <= '0;
      for (int i = 0; i < MSM_PE; i++) ld_fill[i] <= '0;
    end else if (ld_take) begin
      ld_fill[ld_pe] <= ld_fill[ld_pe] + 1'b1;
      ld_pe <= (32'(ld_pe) == MSM_PE - 1) ? '0 : ld_pe + 1'b1;
    end
  end

  assign msm_op = cur.msm_pass;

  msm_unit #(.NUM_PE(MSM_PE), .WIN(MSM_WIN), .PTS_PER_PE(MSM_PTS),
             .SBITS(MSM_SBITS), .GROUP(MSM_GROUP), .PADD_LAT(PADD_LAT)) u_msm (
    .clk, .rst_n,
    .ld_valid(ld_valid), .ld_pe(ld_pe), .ld_addr(PAW'(ld_fill[ld_pe])),
    .ld_pt(ld_pt),
    .start(msm_start), .op(msm_op), .clear(cur.msm_clear), .npts(ld_fill),
    .busy(msm_busy), .done(msm_done), .result(msm_result),
    .stall_cycles(cnt_msm_stall), .padd_ops(cnt_msm_padd)
  );

  // ======================================================================
  // Step sequencer
  // ======================================================================
  assign msm_start    = (st == S_MSM) && !msm_started;
  assign ctl_mt_start = (st == S_WIRE) && (iss_cnt == '0) && !mt_res_seen &&
                        (phi_cnt == '0) && !gs_rd_valid_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cur <= '0; iss_cnt <= '0; phi_cnt <= '0;
      mt_res_seen <= 1'b0; msm_started <= 1'b0; instr_done <= 1'b0;
      gs_rd_valid_q <= 1'b0;
    end else begin
      instr_done <= 1'b0;
      case (st)
        S_IDLE: if (instr_valid) begin
          cur <= instr; iss_cnt <= '0; phi_cnt <= '0;
          mt_res_seen <= 1'b0; msm_started <= 1'b0; gs_rd_valid_q <= 1'b0;
          case (instr.op)
            I_WITNESS_LOAD: st <= S_LOAD;
            I_WIRE:         st <= S_WIRE;
            I_MSM_RUN:      st <= S_MSM;
            default:        st <= S_DONE;
          endcase
        end
        S_LOAD: begin
          if (gs_rd_valid) iss_cnt <= iss_cnt + 1'b1;
          // the last row comes out of the SRAM one cycle after issue
          if (iss_cnt == cur.len && !gs_row_valid) st <= S_DONE;
        end
        S_MSM: begin
          msm_started <= 1'b1;
          if (msm_done) st <= S_DONE;
        end
        S_WIRE: begin
          gs_rd_valid_q <= 1'b1;
          if (gs_rd_valid) iss_cnt <= iss_cnt + 1'b1;
          if (phi_valid) phi_cnt <= phi_cnt + 1'b1;
          if (mt_res_valid_i) mt_res_seen <= 1'b1;
          if (phi_cnt == cur.len && !phi_d_valid && (mt_res_seen || mt_res_valid_i))
            st <= S_DONE;
        end
        S_DONE: begin
          instr_done <= 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // row index pipeline for Construct N&D (SRAM read latency 1)
  always_ff @(posedge clk) row_idx_q <= gs_rd_idx;

  // ======================================================================
  // Streamed units
  // ======================================================================
  sumcheck_unit #(.NUM_PE(SC_PE), .NMLE(12), .NEVAL(6), .LAT(LAT)) u_sc (
    .clk, .rst_n, .mode(sc_mode), .alpha(sc_alpha), .start(sc_start),
    .in_valid(sc_in_valid), .last(sc_last), .v0(sc_v0), .v1(sc_v1),
    .done(sc_done), .round_evals(sc_round_evals)
  );

  mle_update #(.NUM_PE(UPD_PE), .MULS(UPD_MULS), .LAT(LAT)) u_upd (
    .clk, .rst_n, .in_valid(up_in_valid), .r(up_r),
    .t_even(up_t_even), .t_odd(up_t_odd),
    .out_valid(up_out_valid), .t_new(up_t_new)
  );

  mle_combine #(.NUM_IN(12), .NUM_OUT(6), .LAT(LAT)) u_mc (
    .clk, .rst_n, .coef(mc_coef), .in_valid(mc_in_valid), .in_data(mc_in_data),
    .out_valid(mc_out_valid), .out_data(mc_out_data)
  );

  // ======================================================================
  // Event counters
  // ======================================================================
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_bus_stall <= '0; cnt_frac_stall <= '0; cnt_mtu_stall <= '0;
      cnt_zero_skip <= '0; cnt_ones_loaded <= '0; cnt_dense_loaded <= '0;
    end else begin
      if (streaming && !credit_ok) cnt_bus_stall <= cnt_bus_stall + 1;
      if (fr_in_valid && !fr_in_ready) cnt_frac_stall <= cnt_frac_stall + 1;
      if (ctl_mt && mt_in_valid_i && !mt_in_ready_i) cnt_mtu_stall <= cnt_mtu_stall + 1;
      if (ld_cand && is_zero) cnt_zero_skip <= cnt_zero_skip + 1;
      if (ld_take && st == S_LOAD && !cur.msm_pass) cnt_ones_loaded <= cnt_ones_loaded + 1;
      if (ld_take && (st == S_WIRE || cur.msm_pass)) cnt_dense_loaded <= cnt_dense_loaded + 1;
    end
  end

  a_no_bus_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                      32'(ndq_count) <= NDQ_DEPTH);
endmodule
