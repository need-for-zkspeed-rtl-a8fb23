// msm_pe: one MSM processing element (Pippenger bucket method).
//
// The PE owns NPTS points in three SRAM banks (X, Y, Z) and one pipelined
// point adder (padd). All work is expressed as point additions
// dst = a + b issued in order to the adder; a scoreboard bit per register
// holds back an addition whose operands or destination are still in the
// adder pipeline (a stall), so back-to-back independent additions fill the
// pipeline and dependent ones wait.
//
// Two operations, chosen by `op` at `start`:
//  OP_ONES  (sparse MSM, points whose scalar is 1) the banks hold full
//           projective points. They are summed as a tree: pairs (2i, 2i+1)
//           go through the adder and the sum is written back to address i,
//           halving the list each round until one point is left, which is
//           added into the result register. Scalars need no storage here.
//  OP_DENSE (Pippenger) the banks hold affine points (Z = 1 is implied)
//           and the Z bank holds the scalars instead. For each WIN-bit
//           window, from the top: the window accumulator is doubled WIN
//           times; every point with a non-zero digit d is added to bucket
//           d; the buckets are aggregated to sum_d d*B_d with the grouped
//           method: GROUP-sized groups get running sums interleaved across
//           groups (so consecutive additions are independent), then the
//           group sums are combined; the window sum is added to the window
//           accumulator. The accumulator is finally added into the result.
// `clear` at start sets the result register to the point at infinity, so a
// sparse MSM is OP_ONES (clear) followed by OP_DENSE (no clear) over the
// dense part, which is how the published unit handles sparse scalars.
// Reusing the Z bank for scalars, the tree over 1-valued points and the
// grouped aggregation with group size 16 follow the published design;
// the in-order scoreboarded issue and the register set are this design's.
module msm_pe
  import zk_pkg::*;
#(
  parameter int WIN      = 9,
  parameter int NPTS     = 2048,
  parameter int SBITS    = 255,
  parameter int GROUP    = 16,
  parameter int PADD_LAT = 8
) (
  input  logic clk,
  input  logic rst_n,
  // point / scalar load port
  input  logic ld_valid,
  input  logic [$clog2(NPTS)-1:0] ld_addr,
  input  point_t ld_pt,            // z field carries the scalar in dense mode
  // command
  input  logic start,
  input  logic op,                 // 0: OP_ONES, 1: OP_DENSE
  input  logic clear,
  input  logic [$clog2(NPTS+1)-1:0] npts,
  output logic busy,
  output logic done,
  output point_t result,
  output logic [31:0] stall_cycles,
  output logic [31:0] padd_ops
);
  localparam int NB   = 2**WIN;
  localparam int NG   = NB / GROUP;
  localparam int LG   = $clog2(GROUP);
  localparam int NWIN = (SBITS + WIN - 1) / WIN;
  localparam int R_RUN = NB;            // run_g
  localparam int R_T   = NB + NG;       // T_g
  localparam int R_R2  = NB + 2*NG;
  localparam int R_U   = R_R2 + 1;
  localparam int R_DAC = R_R2 + 2;
  localparam int R_ACC = R_R2 + 3;
  localparam int NREG  = R_R2 + 4;
  localparam int RW    = $clog2(NREG);
  localparam int AW    = $clog2(NPTS);
  localparam int CW    = $clog2(NPTS+1);
  localparam point_t INF = '{x: '0, y: fq_t'(1), z: '0};

  typedef enum logic [3:0] {
    S_IDLE, S_ONES, S_ONES_DRAIN, S_ONES_FIN, S_WCLR, S_DBL, S_ACC,
    S_AGG_RUN, S_AGG_T, S_AGG_G, S_AGG_U, S_AGG_DBL, S_AGG_TS, S_AGG_W,
    S_FIN, S_DRAIN
  } st_e;

  // operand sources
  typedef enum logic [1:0] {SRC_REG, SRC_MEM, SRC_INF} src_e;
  typedef struct packed {
    logic          v;
    src_e          a_src;
    logic [RW-1:0] a_reg;
    logic [AW-1:0] a_mem;
    src_e          b_src;
    logic [RW-1:0] b_reg;
    logic [AW-1:0] b_mem;
    logic          d_mem;          // destination is SRAM
    logic [RW-1:0] d_reg;
    logic [AW-1:0] d_addr;
  } op_t;

  fq_t bank_x [NPTS];
  fq_t bank_y [NPTS];
  fq_t bank_z [NPTS];
  point_t regs [NREG];
  logic [NREG-1:0] rbusy;

  st_e  st, st_after_drain;
  logic dense;
  logic [CW-1:0] m_cnt;            // ones: points left in this round
  logic [CW-1:0] i_cnt;
  logic [$clog2(NWIN+1)-1:0] w_cnt;
  logic [LG:0]   j_cnt;
  logic [$clog2(NG+1)-1:0] g_cnt;
  logic [$clog2(WIN+LG+1)-1:0] k_cnt;
  logic [CW-1:0] n_q;
  logic [$clog2(PADD_LAT+2)-1:0] inflight;

  // digit of point i in window w
  logic [WIN-1:0] digit;
  always_comb begin
    logic [NWIN*WIN-1:0] sc;
    sc = '0;
    sc[SBITS-1:0] = bank_z[AW'(i_cnt)][SBITS-1:0];
    digit = sc[int'(w_cnt)*WIN +: WIN];
  end

  // ---------------- current op ----------------
  op_t cur;
  logic skip;     // advance without issuing
  always_comb begin
    cur = '0;
    skip = 1'b0;
    unique case (st)
      S_ONES: begin
        cur.v = 1'b1;
        cur.a_src = SRC_MEM; cur.a_mem = AW'(2*i_cnt);
        cur.b_src = (2*i_cnt + 1 < m_cnt) ? SRC_MEM : SRC_INF;
        cur.b_mem = AW'(2*i_cnt + 1);
        cur.d_mem = 1'b1; cur.d_addr = AW'(i_cnt);
      end
      S_ONES_FIN: begin
        cur.v = 1'b1;
        cur.a_src = SRC_REG; cur.a_reg = RW'(R_ACC);
        cur.b_src = SRC_MEM; cur.b_mem = '0;
        cur.d_reg = RW'(R_ACC);
      end
      S_DBL, S_AGG_DBL: begin
        cur.v = 1'b1;
        cur.a_reg = (st == S_DBL) ? RW'(R_DAC) : RW'(R_U);
        cur.b_reg = cur.a_reg; cur.d_reg = cur.a_reg;
      end
      S_ACC: begin
        if (digit == '0) skip = 1'b1;
        else begin
          cur.v = 1'b1;
          cur.a_reg = RW'(digit);
          cur.b_src = SRC_MEM; cur.b_mem = AW'(i_cnt);
          cur.d_reg = RW'(digit);
        end
      end
      S_AGG_RUN: begin   // run_g += B[g*GROUP + j]
        cur.v = 1'b1;
        cur.a_reg = RW'(R_RUN + int'(g_cnt));
        cur.b_reg = RW'(int'(g_cnt) * GROUP + int'(j_cnt));
        cur.d_reg = cur.a_reg;
      end
      S_AGG_T: begin     // T_g += run_g
        cur.v = 1'b1;
        cur.a_reg = RW'(R_T + int'(g_cnt));
        cur.b_reg = RW'(R_RUN + int'(g_cnt));
        cur.d_reg = cur.a_reg;
      end
      S_AGG_G: begin     // run2 += S_g, then U += run2 (k_cnt selects)
        cur.v = 1'b1;
        if (k_cnt == 0) begin
          cur.a_reg = RW'(R_R2); cur.b_reg = RW'(R_RUN + int'(g_cnt)); cur.d_reg = RW'(R_R2);
        end else begin
          cur.a_reg = RW'(R_U);  cur.b_reg = RW'(R_R2); cur.d_reg = RW'(R_U);
        end
      end
      S_AGG_TS: begin    // U += T_g
        cur.v = 1'b1;
        cur.a_reg = RW'(R_U); cur.b_reg = RW'(R_T + int'(g_cnt)); cur.d_reg = RW'(R_U);
      end
      S_AGG_W: begin     // window accumulator += U
        cur.v = 1'b1;
        cur.a_reg = RW'(R_DAC); cur.b_reg = RW'(R_U); cur.d_reg = RW'(R_DAC);
      end
      S_FIN: begin
        cur.v = 1'b1;
        cur.a_reg = RW'(R_ACC); cur.b_reg = RW'(R_DAC); cur.d_reg = RW'(R_ACC);
      end
      default: ;
    endcase
  end

  // hazard check
  logic hazard, issue;
  always_comb begin
    hazard = 1'b0;
    if (cur.a_src == SRC_REG && rbusy[cur.a_reg]) hazard = 1'b1;
    if (cur.b_src == SRC_REG && rbusy[cur.b_reg]) hazard = 1'b1;
    if (!cur.d_mem && rbusy[cur.d_reg]) hazard = 1'b1;
    issue = cur.v && !hazard;
  end

  function automatic point_t mem_pt(logic [AW-1:0] a, logic dn);
    return '{x: bank_x[a], y: bank_y[a], z: dn ? fq_t'(1) : bank_z[a]};
  endfunction

  point_t opa, opb;
  always_comb begin
    unique case (cur.a_src)
      SRC_REG: opa = regs[cur.a_reg];
      SRC_MEM: opa = mem_pt(cur.a_mem, dense);
      default: opa = INF;
    endcase
    unique case (cur.b_src)
      SRC_REG: opb = regs[cur.b_reg];
      SRC_MEM: opb = mem_pt(cur.b_mem, dense);
      default: opb = INF;
    endcase
  end

  // ---------------- point adder ----------------
  localparam int TW = 1 + (RW > AW ? RW : AW);
  logic   pa_ov;
  point_t pa_sum;
  logic [TW-1:0] pa_tag, in_tag;
  assign in_tag = cur.d_mem ? {1'b1, (TW-1)'(cur.d_addr)} : {1'b0, (TW-1)'(cur.d_reg)};
  padd #(.LAT(PADD_LAT), .TAG_W(TW)) u_padd (
    .clk, .rst_n, .in_valid(issue), .p1(opa), .p2(opb), .in_tag,
    .out_valid(pa_ov), .sum(pa_sum), .out_tag(pa_tag));

  assign result = regs[R_ACC];

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; st_after_drain <= S_IDLE;
      dense <= 1'b0; busy <= 1'b0; done <= 1'b0;
      m_cnt <= '0; i_cnt <= '0; w_cnt <= '0; j_cnt <= '0; g_cnt <= '0; k_cnt <= '0;
      n_q <= '0; inflight <= '0; rbusy <= '0;
      stall_cycles <= '0; padd_ops <= '0;
      for (int r = 0; r < NREG; r++) regs[r] <= INF;
    end else begin
      done <= 1'b0;
      // retire
      if (pa_ov) begin
        if (pa_tag[TW-1]) begin
          bank_x[AW'(pa_tag)] <= pa_sum.x;
          bank_y[AW'(pa_tag)] <= pa_sum.y;
          bank_z[AW'(pa_tag)] <= pa_sum.z;
        end else begin
          regs[RW'(pa_tag)] <= pa_sum;
        end
      end
      inflight <= inflight + $bits(inflight)'(issue) - $bits(inflight)'(pa_ov);
      begin
        logic [NREG-1:0] nb;
        nb = rbusy;
        if (pa_ov && !pa_tag[TW-1]) nb[RW'(pa_tag)] = 1'b0;
        if (issue && !cur.d_mem) nb[cur.d_reg] = 1'b1;
        rbusy <= nb;
      end
      if (issue) padd_ops <= padd_ops + 1'b1;
      if (cur.v && hazard) stall_cycles <= stall_cycles + 1'b1;

      // load port (only while idle)
      if (ld_valid && st == S_IDLE) begin
        bank_x[ld_addr] <= ld_pt.x;
        bank_y[ld_addr] <= ld_pt.y;
        bank_z[ld_addr] <= ld_pt.z;
      end

      unique case (st)
        S_IDLE: if (start) begin
          busy  <= 1'b1;
          dense <= op;
          n_q   <= npts;
          if (clear) regs[R_ACC] <= INF;
          i_cnt <= '0;
          if (!op) begin
            m_cnt <= npts;
            st <= (npts == 0) ? S_DRAIN : (npts == 1) ? S_ONES_FIN : S_ONES;
            st_after_drain <= S_IDLE;
          end else begin
            w_cnt <= ($clog2(NWIN+1))'(NWIN - 1);
            regs[R_DAC] <= INF;
            st <= S_WCLR;
          end
        end
        S_ONES: if (issue) begin
          if (2*i_cnt + 2 >= m_cnt) begin
            m_cnt <= (m_cnt + 1'b1) >> 1;
            i_cnt <= '0;
            st <= S_ONES_DRAIN;
          end else i_cnt <= i_cnt + 1'b1;
        end
        S_ONES_DRAIN: if (inflight == 0 && !pa_ov) begin
          st <= (m_cnt == 1) ? S_ONES_FIN : S_ONES;
        end
        S_ONES_FIN: if (issue) begin
          st <= S_DRAIN; st_after_drain <= S_IDLE;
        end
        S_WCLR: if (inflight == 0 && !pa_ov) begin
          for (int r = 0; r < R_DAC; r++) regs[r] <= INF;
          k_cnt <= '0;
          st <= S_DBL;
        end
        S_DBL: if (issue) begin
          if (int'(k_cnt) == WIN - 1) begin
            i_cnt <= '0;
            st <= (n_q == 0) ? S_AGG_RUN : S_ACC;
            j_cnt <= (LG+1)'(GROUP - 1); g_cnt <= '0;
          end else k_cnt <= k_cnt + 1'b1;
        end
        S_ACC: if (issue || skip) begin
          if (i_cnt == n_q - 1'b1) begin
            st <= S_AGG_RUN;
            j_cnt <= (LG+1)'(GROUP - 1); g_cnt <= '0;
          end else i_cnt <= i_cnt + 1'b1;
        end
        S_AGG_RUN: if (issue) begin
          if (int'(g_cnt) == NG - 1) begin
            g_cnt <= '0;
            if (j_cnt == 0) begin
              st <= S_AGG_G; g_cnt <= ($clog2(NG+1))'(NG - 1); k_cnt <= '0;
            end else st <= S_AGG_T;
          end else g_cnt <= g_cnt + 1'b1;
        end
        S_AGG_T: if (issue) begin
          if (int'(g_cnt) == NG - 1) begin
            g_cnt <= '0;
            j_cnt <= j_cnt - 1'b1;
            st <= S_AGG_RUN;
          end else g_cnt <= g_cnt + 1'b1;
        end
        S_AGG_G: begin
          if (g_cnt == 0) begin
            k_cnt <= '0;
            st <= (LG == 0) ? S_AGG_TS : S_AGG_DBL;
          end else if (issue) begin
            if (k_cnt == 0) k_cnt <= 1;
            else begin
              k_cnt <= '0;
              g_cnt <= g_cnt - 1'b1;
            end
          end
        end
        S_AGG_DBL: if (issue) begin
          if (int'(k_cnt) == LG - 1) begin
            g_cnt <= '0; st <= S_AGG_TS;
          end else k_cnt <= k_cnt + 1'b1;
        end
        S_AGG_TS: if (issue) begin
          if (int'(g_cnt) == NG - 1) st <= S_AGG_W;
          else g_cnt <= g_cnt + 1'b1;
        end
        S_AGG_W: if (issue) begin
          if (w_cnt == 0) st <= S_FIN;
          else begin
            w_cnt <= w_cnt - 1'b1;
            st <= S_WCLR;
          end
        end
        S_FIN: if (issue) begin
          st <= S_DRAIN; st_after_drain <= S_IDLE;
        end
        S_DRAIN: if (inflight == 0 && !pa_ov && !issue) begin
          st <= st_after_drain; busy <= 1'b0; done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
