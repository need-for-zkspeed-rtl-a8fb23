// sumcheck_unit: SumCheck round unit with NUM_PE parallel PEs.
//
// Each cycle every PE may take one boolean-hypercube iteration (the pair of
// entries of every MLE). The per-iteration evaluations of all PEs are added
// into one accumulator register per evaluation point, so after all 2^(k-1)
// iterations of a round the unit holds the round polynomial's evaluations
// g(0..NEVAL-1) that are sent to the transcript. `start` clears the
// accumulators; `last` marks the final beat of the round, and `done` rises
// once that beat has drained through the PE pipeline (LAT + 1 cycles later).
// The PE count default (2) is the published design point; the accumulate
// structure follows the cross-PE accumulation of the published PE figure.
//
// From the paper: 2 PEs and accumulation of evaluations across the
// hypercube (Fig 5). This design's choices: start/last/done handshake and
// the single adder tree across PEs.
module sumcheck_unit
  import zk_pkg::*;
#(
  parameter int NUM_PE = 2,
  parameter int NMLE   = 12,
  parameter int NEVAL  = 6,
  parameter int LAT    = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  sc_mode_e          mode,
  input  fr_t               alpha,
  input  logic              start,
  input  logic [NUM_PE-1:0] in_valid,
  input  logic              last,
  input  fr_t               v0 [NUM_PE][NMLE],
  input  fr_t               v1 [NUM_PE][NMLE],
  output logic              done,
  output fr_t               round_evals [NEVAL]
);
  logic [NUM_PE-1:0] pe_v;
  fr_t               pe_e [NUM_PE][NEVAL];
  logic [LAT-1:0]    last_d;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    sumcheck_pe #(.NMLE(NMLE), .NEVAL(NEVAL), .LAT(LAT)) u_pe (
      .clk, .rst_n, .mode, .alpha, .in_valid(in_valid[p]),
      .v0(v0[p]), .v1(v1[p]), .out_valid(pe_v[p]), .evals(pe_e[p]));
  end

  fr_t beat_sum [NEVAL];
  always_comb begin
    for (int k = 0; k < NEVAL; k++) begin
      beat_sum[k] = '0;
      for (int p = 0; p < NUM_PE; p++)
        if (pe_v[p]) beat_sum[k] = fr_add(beat_sum[k], pe_e[p][k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_d <= '0;
      done   <= 1'b0;
      for (int k = 0; k < NEVAL; k++) round_evals[k] <= '0;
    end else begin
      last_d <= {last_d[LAT-2:0], last && |in_valid};
      done   <= last_d[LAT-1];
      if (start) begin
        for (int k = 0; k < NEVAL; k++) round_evals[k] <= '0;
      end else if (|pe_v) begin
        for (int k = 0; k < NEVAL; k++) round_evals[k] <= fr_add(round_evals[k], beat_sum[k]);
      end
    end
  end
endmodule
