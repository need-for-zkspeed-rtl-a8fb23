// msm_unit: the MSM unit, NUM_PE Pippenger PEs and a final reduction.
//
// Computes sum_i s_i * P_i over BLS12-381 G1. The points of one MSM are
// split over the PEs (each holds up to PTS_PER_PE of them in its own
// three-bank SRAM); every PE runs the same command on its share at the same
// time, and when all are done the unit adds the NUM_PE partial results
// with its own point adder, one at a time, into `result`.
// Commands (start/op/clear) are those of msm_pe: op 0 sums points whose
// scalar is 1 (sparse part), op 1 runs Pippenger over points with scalars.
// Each PE's point count comes in npts. The load port writes one point (and,
// in dense mode, its scalar in the z field) into PE ld_pe at ld_addr.
// Defaults follow the published design point: 16 PEs, 9-bit windows,
// 2048 points per PE, bucket groups of 16. stall_cycles and padd_ops sum
// the PE counters (hazard stalls, point additions issued).
//
// From the paper: 16 PEs, 9-bit windows, 2048 points per PE. This design's
// choices: PEs loaded independently, results added one after another with
// one extra point adder.
module msm_unit
  import zk_pkg::*;
#(
  parameter int NUM_PE     = 16,
  parameter int WIN        = 9,
  parameter int PTS_PER_PE = 2048,
  parameter int SBITS      = 255,
  parameter int GROUP      = 16,
  parameter int PADD_LAT   = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic ld_valid,
  input  logic [$clog2(NUM_PE > 1 ? NUM_PE : 2)-1:0] ld_pe,
  input  logic [$clog2(PTS_PER_PE)-1:0] ld_addr,
  input  point_t ld_pt,
  input  logic start,
  input  logic op,
  input  logic clear,
  input  logic [$clog2(PTS_PER_PE+1)-1:0] npts [NUM_PE],
  output logic busy,
  output logic done,
  output point_t result,
  output logic [31:0] stall_cycles,
  output logic [31:0] padd_ops
);
  localparam point_t INF = '{x: '0, y: fq_t'(1), z: '0};
  localparam int PW = $clog2(NUM_PE + 1);

  logic [NUM_PE-1:0] pe_busy, pe_done, pe_fin;
  point_t pe_res [NUM_PE];
  logic [31:0] pe_stall [NUM_PE], pe_ops [NUM_PE];

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    msm_pe #(.WIN(WIN), .NPTS(PTS_PER_PE), .SBITS(SBITS), .GROUP(GROUP),
             .PADD_LAT(PADD_LAT)) u_pe (
      .clk, .rst_n,
      .ld_valid(ld_valid && 32'(ld_pe) == p), .ld_addr, .ld_pt,
      .start, .op, .clear, .npts(npts[p]),
      .busy(pe_busy[p]), .done(pe_done[p]), .result(pe_res[p]),
      .stall_cycles(pe_stall[p]), .padd_ops(pe_ops[p]));
  end

  always_comb begin
    stall_cycles = '0;
    padd_ops = '0;
    for (int p = 0; p < NUM_PE; p++) begin
      stall_cycles += pe_stall[p];
      padd_ops     += pe_ops[p];
    end
  end

  // final reduction
  typedef enum logic [1:0] {U_IDLE, U_RUN, U_RED, U_WAIT} ust_e;
  ust_e st;
  logic [PW-1:0] p_idx;
  logic   ra_v, ra_ov;
  point_t ra_sum;
  logic [0:0] ra_tag;

  padd #(.LAT(PADD_LAT), .TAG_W(1)) u_red (
    .clk, .rst_n, .in_valid(ra_v), .p1(result), .p2(pe_res[p_idx[$clog2(NUM_PE > 1 ? NUM_PE : 2)-1:0]]),
    .in_tag(1'b0), .out_valid(ra_ov), .sum(ra_sum), .out_tag(ra_tag));
  assign ra_v = (st == U_RED);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= U_IDLE; busy <= 1'b0; done <= 1'b0; p_idx <= '0; pe_fin <= '0;
      result <= INF;
    end else begin
      done <= 1'b0;
      unique case (st)
        U_IDLE: if (start) begin
          st <= U_RUN; busy <= 1'b1; pe_fin <= '0;
        end
        U_RUN: begin
          if (&(pe_fin | pe_done)) begin
            st <= U_RED; p_idx <= '0; result <= INF;
          end
          pe_fin <= pe_fin | pe_done;
        end
        U_RED: st <= U_WAIT;
        U_WAIT: if (ra_ov) begin
          result <= ra_sum;
          if (32'(p_idx) == NUM_PE - 1) begin
            st <= U_IDLE; busy <= 1'b0; done <= 1'b1;
          end else begin
            p_idx <= p_idx + 1'b1;
            st <= U_RED;
          end
        end
        default: st <= U_IDLE;
      endcase
    end
  end
  logic unused;
  assign unused = ^{ra_tag, pe_busy};
endmodule
