// multifunction_tree: the Multifunction Tree Unit (MTU).
//
// Several prover kernels are binary trees over an MLE table of 2^mu entries.
// The MTU runs them on one structure: a hardware tree of P-1 PEs (P = 2^LOG_P
// leaves, LOG_P levels) followed by an accumulator PE that handles every
// level above LOG_P in depth-first order, so no whole tree level is ever
// stored. Every PE is one modular multiplier plus one modular adder, with
// muxes selecting the operation per mode:
//
//   MT_MULT  inverse tree, node = left*right; result = product of all inputs
//            (used for the batch product of an inversion batch)
//   MT_EVAL  inverse tree, node = left + r_L*(right-left) at level L, i.e.
//            MLE Evaluate at (r_1..r_mu); r_1 folds index bit 0
//   MT_PROD  like MT_MULT, and every node of every level is an output
//            (Product MLE)
//   MT_BUILD forward tree: eq table e[j] = prod_L (bit_{mu-L}(j) ? r_L : 1-r_L);
//            r_1 selects the most significant index bit, as in the
//            published figure. Each PE takes x and r and emits
//            (x - x*r, x*r): one multiplication per node.
//
// Inverse modes: P inputs per beat on in_data with in_valid/in_ready; beats
// are table order. Level-LOG_P results go to a small FIFO; the accumulator
// keeps one pending node per level (DFS needs no more) and merges a new node
// with the pending one of its level, one multiplication per cycle; a merged
// node that is not the root is written back the next cycle. in_ready drops
// when the FIFO fills (a stall). The root leaves on res_valid/res_data.
// In MT_PROD every tree node is shown on lvl_valid/lvl_data per level and
// every accumulator node on acc_valid/acc_data/acc_level.
// Forward mode: the accumulator walks the upper mu-LOG_P levels depth-first.
// One multiplication x*r yields both children (x - x*r, x*r); the left child
// continues down the path and the right one waits in a per-level register
// until the index reaches it. Each completed prefix (one per cycle in steady
// state) goes to the tree, which emits P consecutive table entries per beat
// on bld_valid/bld_data.
// Tree structure, PE contents, the accumulator, and the DFS/BFS split
// follow the published unit. The FIFO depth, the one-slot-per-level pending
// store and the registered levels are this design's own choices.
module multifunction_tree
  import zk_pkg::*;
#(
  parameter int LOG_P  = 3,
  parameter int MAX_MU = 24,
  parameter int FIFO_D = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mt_mode_e mode,
  input  logic     start,                 // latches mode/mu, clears state
  input  logic [$clog2(MAX_MU+1)-1:0] mu, // table has 2^mu entries, mu >= LOG_P
  input  fr_t      r [MAX_MU+1],          // r[1..mu]; r[0] unused
  // inverse-tree stream
  input  logic     in_valid,
  output logic     in_ready,
  input  fr_t      in_data [2**LOG_P],
  // root of an inverse tree
  output logic     res_valid,
  output fr_t      res_data,
  // every node (MT_PROD)
  output logic [LOG_P-1:0] lvl_valid,
  output fr_t      lvl_data [LOG_P][2**(LOG_P-1)],
  output logic     acc_valid,
  output fr_t      acc_data,
  output logic [$clog2(MAX_MU+1)-1:0] acc_level,
  // Build MLE output
  output logic     bld_valid,
  output fr_t      bld_data [2**LOG_P],
  output logic     bld_done
);
  localparam int P  = 2**LOG_P;
  localparam int LW = $clog2(MAX_MU+1);
  typedef logic [LW-1:0] lvl_t;

  // PE operation: inverse tree node
  function automatic fr_t inv_op(mt_mode_e m, fr_t a, fr_t b, fr_t rr);
    if (m == MT_EVAL) return fr_add(a, fr_mul(rr, fr_sub(b, a)));
    return fr_mul(a, b);
  endfunction

  // ---------------------------------------------------------------------
  // Hardware tree. Level 0 holds the leaves (input or forward prefix);
  // lev_v/lev_d[L] hold level L. Inverse: level L node i = op(L-1 nodes
  // 2i, 2i+1). Forward: level L node 2i/2i+1 = (x - x r, x r) of level L-1
  // node i; forward levels count down from the prefix.
  // ---------------------------------------------------------------------
  fr_t  inv_d [LOG_P+1][P];
  logic inv_v [LOG_P+1];
  fr_t  fwd_d [LOG_P+1][P];
  logic fwd_v [LOG_P+1];
  lvl_t mu_q;
  mt_mode_e mode_q;

  logic fifo_full;
  assign in_ready = !fifo_full && mode_q != MT_BUILD;

  logic leaf_v;
  assign leaf_v = in_valid && in_ready;

  logic pf_valid;      // prefix from the accumulator (forward mode)
  fr_t  pf_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 1; l <= LOG_P; l++) begin
        inv_v[l] <= 1'b0;
        fwd_v[l] <= 1'b0;
      end
    end else begin
      for (int l = 1; l <= LOG_P; l++) begin
        inv_v[l] <= (l == 1 ? leaf_v : inv_v[l-1]) && !start;
        fwd_v[l] <= fwd_v[l-1] && !start;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 1; l <= LOG_P; l++) begin
      for (int i = 0; i < P; i++) begin
        if (l == 1 && i < P/2)
          inv_d[l][i] <= inv_op(mode_q, in_data[2*i], in_data[2*i+1], r[l]);
        else if (l > 1 && i < (P >> l))
          inv_d[l][i] <= inv_op(mode_q, inv_d[l-1][2*i], inv_d[l-1][2*i+1], r[l]);
        else
          inv_d[l][i] <= '0;
      end
      // forward: level l has 2^l nodes, challenge r[mu - LOG_P + l]
      for (int i = 0; i < P; i++) begin
        if (i < (1 << l)) begin
          if (i[0])
            fwd_d[l][i] <= fr_mul(fwd_d[l-1][i>>1], r[int'(mu_q) - LOG_P + l]);
          else
            fwd_d[l][i] <= fr_sub(fwd_d[l-1][i>>1],
                                  fr_mul(fwd_d[l-1][i>>1], r[int'(mu_q) - LOG_P + l]));
        end else begin
          fwd_d[l][i] <= '0;
        end
      end
    end
  end

  always_comb begin
    fwd_v[0] = pf_valid;
    fwd_d[0][0] = pf_data;
    for (int i = 1; i < P; i++) fwd_d[0][i] = '0;
  end

  for (genvar l = 0; l < LOG_P; l++) begin : g_lvl_out
    assign lvl_valid[l] = inv_v[l+1] && mode_q == MT_PROD;
    for (genvar i = 0; i < P/2; i++) begin : g_n
      assign lvl_data[l][i] = inv_d[l+1][i];
    end
  end

  assign bld_valid = fwd_v[LOG_P] && mode_q == MT_BUILD;
  for (genvar i = 0; i < P; i++) begin : g_bld
    assign bld_data[i] = fwd_d[LOG_P][i];
  end

  // ---------------------------------------------------------------------
  // Accumulator: FIFO of level-LOG_P nodes, pending node per level, one
  // multiplier op per cycle.
  // ---------------------------------------------------------------------
  fr_t  fifo_d [FIFO_D];
  logic [$clog2(FIFO_D+1)-1:0] fifo_cnt;

  // fifo is kept with a margin equal to the tree depth, since beats in
  // flight in the tree cannot be stopped
  logic [$clog2(FIFO_D+LOG_P+2)-1:0] inflight;
  always_comb begin
    inflight = '0;
    for (int l = 1; l <= LOG_P; l++) inflight += {{($bits(inflight)-1){1'b0}}, inv_v[l]};
    fifo_full = (32'(fifo_cnt) + 32'(inflight) + 1) > FIFO_D;
  end

  fr_t  pend_d [MAX_MU+1];
  logic [MAX_MU:0] pend_v;
  logic res_v_q;      // merged node written last cycle
  fr_t  res_d_q;
  lvl_t res_l_q;

  // forward-mode DFS state
  fr_t  fwd_sib [MAX_MU+1];       // right child kept at each upper level
  fr_t  fwd_cur;                  // node on the current path at fwd_depth
  lvl_t fwd_depth;
  logic [MAX_MU-1:0] fwd_k;       // prefix index
  logic fwd_busy;
  lvl_t top_lv;                   // mu - LOG_P
  assign top_lv = mu_q - lvl_t'(LOG_P);

  logic [MAX_MU-1:0] fwd_k_next;
  assign fwd_k_next = fwd_k + 1'b1;

  // number of trailing ones of k: highest bit that changes on k+1
  function automatic int trailing_ones(logic [MAX_MU-1:0] k);
    int n;
    n = 0;
    for (int i = 0; i < MAX_MU; i++) begin
      if (k[i] && n == i) n = i + 1;
    end
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q    <= MT_MULT;
      mu_q      <= lvl_t'(LOG_P);
      fifo_cnt  <= '0;
      pend_v    <= '0;
      res_v_q   <= 1'b0;
      res_d_q   <= '0;
      res_l_q   <= '0;
      res_valid <= 1'b0;
      res_data  <= '0;
      acc_valid <= 1'b0;
      acc_data  <= '0;
      acc_level <= '0;
      fwd_busy  <= 1'b0;
      fwd_depth <= '0;
      fwd_k     <= '0;
      fwd_cur   <= '0;
      pf_valid  <= 1'b0;
      pf_data   <= '0;
      bld_done  <= 1'b0;
      for (int j = 0; j <= MAX_MU; j++) begin
        fwd_sib[j] <= '0;
        pend_d[j]  <= '0;
      end
      for (int j = 0; j < FIFO_D; j++) fifo_d[j] <= '0;
    end else if (start) begin
      mode_q     <= mode;
      mu_q       <= mu;
      fifo_cnt   <= '0;
      pend_v     <= '0;
      res_v_q    <= 1'b0;
      res_valid  <= 1'b0;
      acc_valid  <= 1'b0;
      pf_valid   <= 1'b0;
      bld_done   <= 1'b0;
      fwd_busy   <= (mode == MT_BUILD);
      fwd_depth  <= '0;
      fwd_k      <= '0;
      fwd_cur    <= fr_t'(1);
    end else begin
      logic mul_used;
      logic fifo_pop;
      logic [$clog2(FIFO_D+1)-1:0] cnt;
      mul_used  = 1'b0;
      res_valid <= 1'b0;
      acc_valid <= 1'b0;
      res_v_q   <= 1'b0;
      pf_valid  <= 1'b0;
      cnt       = fifo_cnt;

      if (mode_q != MT_BUILD) begin
        // 1) the node merged last cycle
        if (res_v_q) begin
          if (mode_q == MT_PROD) begin
            acc_valid <= 1'b1;
            acc_data  <= res_d_q;
            acc_level <= res_l_q;
          end
          if (res_l_q == mu_q) begin
            res_valid <= 1'b1;
            res_data  <= res_d_q;
          end else if (!pend_v[res_l_q]) begin
            pend_v[res_l_q] <= 1'b1;
            pend_d[res_l_q] <= res_d_q;
          end else begin
            res_v_q   <= 1'b1;
            res_d_q   <= inv_op(mode_q, pend_d[res_l_q], res_d_q, r[res_l_q + 1'b1]);
            res_l_q   <= res_l_q + 1'b1;
            pend_v[res_l_q] <= 1'b0;
            mul_used  = 1'b1;
          end
        end
        // 2) head of the FIFO (a level-LOG_P node)
        if (cnt != 0) begin
          if (mu_q == lvl_t'(LOG_P)) begin
            res_valid <= 1'b1;
            res_data  <= fifo_d[0];
            fifo_pop  = 1'b1;
          end else if (!pend_v[LOG_P]) begin
            pend_v[LOG_P] <= 1'b1;
            pend_d[LOG_P] <= fifo_d[0];
            fifo_pop  = 1'b1;
          end else if (!mul_used) begin
            res_v_q  <= 1'b1;
            res_d_q  <= inv_op(mode_q, pend_d[LOG_P], fifo_d[0], r[LOG_P+1]);
            res_l_q  <= lvl_t'(LOG_P + 1);
            pend_v[LOG_P] <= 1'b0;
            fifo_pop = 1'b1;
          end else begin
            fifo_pop = 1'b0;
          end
        end else begin
          fifo_pop = 1'b0;
        end
        if (fifo_pop) begin
          for (int j = 0; j < FIFO_D-1; j++) fifo_d[j] <= fifo_d[j+1];
          cnt = cnt - 1'b1;
        end
        // 3) push the tree output
        if (inv_v[LOG_P]) begin
          fifo_d[$clog2(FIFO_D)'(cnt)] <= inv_d[LOG_P][0];
          cnt = cnt + 1'b1;
        end
        fifo_cnt <= cnt;
      end else if (fwd_busy) begin
        // forward: one multiplication per cycle. A multiplication of the
        // node on the current path by the next challenge yields both
        // children (x - x*r, x*r); the left one continues the path, the
        // right one is kept in fwd_sib for when the index reaches it.
        if (fwd_depth == top_lv) begin
          // emit the prefix on the path
          pf_valid <= 1'b1;
          pf_data  <= fwd_cur;
          if (trailing_ones(fwd_k) >= int'(top_lv)) begin
            fwd_busy <= 1'b0;
            bld_done <= 1'b1;
          end else begin
            lvl_t lv;
            fr_t  m;
            lv = top_lv - lvl_t'(trailing_ones(fwd_k));
            fwd_k <= fwd_k_next;
            if (lv == top_lv) begin
              fwd_cur <= fwd_sib[lv];
            end else begin
              m = fr_mul(fwd_sib[lv], r[lv + 1'b1]);
              fwd_cur   <= fr_sub(fwd_sib[lv], m);
              fwd_sib[lv + 1'b1] <= m;
              fwd_depth <= lv + 1'b1;
            end
          end
        end else begin
          fr_t m;
          m = fr_mul(fwd_cur, r[fwd_depth + 1'b1]);
          fwd_sib[fwd_depth + 1'b1] <= m;
          if (fwd_depth + 1'b1 == top_lv) begin
            // left leaf of the upper tree: emit at once, the right one next
            pf_valid  <= 1'b1;
            pf_data   <= fr_sub(fwd_cur, m);
            fwd_cur   <= m;
            fwd_k     <= fwd_k_next;
            fwd_depth <= top_lv;
          end else begin
            fwd_cur   <= fr_sub(fwd_cur, m);
            fwd_depth <= fwd_depth + 1'b1;
          end
        end
      end
    end
  end
endmodule
