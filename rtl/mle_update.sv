// mle_update: the MLE Update unit, which folds MLE tables after a SumCheck round.
//
// After the verifier's challenge r of a round is known, every MLE table t
// with 2^k entries is halved: t'[i] = (t[2i+1] - t[2i]) * r + t[2i].
// The unit has NUM_PE processing elements. Each PE works on one table
// by itself (tables are independent), and each PE has MULS lanes. A lane
// takes one pair (t[2i], t[2i+1]) per cycle and spends one modular
// multiplication on it. Each PE has its own challenge input, so tables
// from different rounds may be folded at once.
//
// Interface: per PE a valid and MULS pairs in; per PE a valid and MULS
// folded entries out, LAT cycles later, in input order. There is no stall:
// the unit always accepts (it is rate-matched to the memory stream).
// The formula, the PE/lane organisation and the default sizes (11 PEs,
// 4 multipliers per PE) are the published ones; the stream interface and
// the multiplier latency are this design's choice.
//
// Lint note: only lane 0's multiplier valid drives out_valid (all lanes
// of a PE move together), so the other lanes' valid nets are unused.
module mle_update
  import zk_pkg::*;
#(
  parameter int NUM_PE = 11,
  parameter int MULS   = 4,
  parameter int LAT    = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [NUM_PE-1:0]  in_valid,
  input  fr_t                r     [NUM_PE],
  input  fr_t                t_even[NUM_PE][MULS],   // t[2i]
  input  fr_t                t_odd [NUM_PE][MULS],   // t[2i+1]
  output logic [NUM_PE-1:0]  out_valid,
  output fr_t                t_new [NUM_PE][MULS]
);
  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    for (genvar l = 0; l < MULS; l++) begin : g_lane
      fr_t diff, prod, base_d [LAT];
      logic v;
      assign diff = fr_sub(t_odd[p][l], t_even[p][l]);
      mod_mul #(.LAT(LAT)) u_mul (
        .clk, .rst_n, .in_valid(in_valid[p]), .a(diff), .b(r[p]),
        .out_valid(v), .y(prod));
      // the addend t[2i] travels alongside the multiplier pipeline
      always_ff @(posedge clk) begin
        base_d[0] <= t_even[p][l];
        for (int i = 1; i < LAT; i++) base_d[i] <= base_d[i-1];
      end
      assign t_new[p][l] = fr_add(prod, base_d[LAT-1]);
      if (l == 0) begin : g_v
        assign out_valid[p] = v;
      end
    end
  end
endmodule
