// sumcheck_pe: one unified SumCheck round processing element.
//
// A PE handles one iteration over the boolean hypercube: it receives, for
// each MLE of the polynomial, the pair of table entries whose first free
// variable is 0 and 1 (v0 = t[2i], v1 = t[2i+1]). Each MLE is extended once
// to every evaluation point X = 0..NEVAL-1 by repeated addition of
// (v1 - v0); the extensions are then reused by every term that names that
// MLE, so a polynomial that appears in several terms is extended only once.
// The per-term products are formed at every point and summed. One hypercube
// iteration enters per cycle; its NEVAL evaluations leave LAT cycles later.
//
// The three polynomials (mode) and their MLE slots are:
//   SC_ZERO  fz*(qL*w1 + qR*w2 + qM*w1*w2 - qO*w3 + qc)
//            slots 0 qL, 1 qR, 2 qM, 3 qO, 4 qc, 5 w1, 6 w2, 7 w3, 8 fz
//   SC_PERM  fz*(pi - p1*p2 + alpha*(phi*D1*D2*D3 - N1*N2*N3))
//            slots 0 pi, 1 p1, 2 p2, 3 phi, 4 D1, 5 D2, 6 D3, 7 N1, 8 N2,
//            9 N3, 10 fz
//   SC_OPEN  sum_{i=1..6} y_i*k_i, slots 0..5 y, 6..11 k
// The polynomials are the published ones. The published PE evaluates each
// term only at as many points as its degree needs and fills the rest by
// barycentric interpolation at the end of the round; this PE evaluates every
// term at all NEVAL = 6 points (enough for the degree-5 PermCheck polynomial),
// which yields the same round evaluations without the interpolation step.
//
// From the paper: one hypercube pair per PE, extension of each MLE to the
// needed X values, products of Eq 3-5. This design's choices: extension
// by repeated addition, one combinational datapath plus LAT registers
// instead of an HLS schedule.
module sumcheck_pe
  import zk_pkg::*;
#(
  parameter int NMLE  = 12,
  parameter int NEVAL = 6,
  parameter int LAT   = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  sc_mode_e mode,
  input  fr_t      alpha,
  input  logic     in_valid,
  input  fr_t      v0 [NMLE],
  input  fr_t      v1 [NMLE],
  output logic     out_valid,
  output fr_t      evals [NEVAL]
);
  fr_t ext [NMLE][NEVAL];   // per-MLE evaluations at X = 0..NEVAL-1
  fr_t e_comb [NEVAL];

  // per-MLE extension: f(k+1) = f(k) + (f(1) - f(0))
  always_comb begin
    for (int m = 0; m < NMLE; m++) begin
      ext[m][0] = v0[m];
      for (int k = 1; k < NEVAL; k++)
        ext[m][k] = fr_add(ext[m][k-1], fr_sub(v1[m], v0[m]));
    end
  end

  // per-term products and sum of products at every point
  always_comb begin
    for (int k = 0; k < NEVAL; k++) begin
      fr_t s, t1, t2;
      unique case (mode)
        SC_ZERO: begin
          s  = fr_mul(ext[0][k], ext[5][k]);                              // qL w1
          s  = fr_add(s, fr_mul(ext[1][k], ext[6][k]));                   // qR w2
          t1 = fr_mul(fr_mul(ext[2][k], ext[5][k]), ext[6][k]);           // qM w1 w2
          s  = fr_add(s, t1);
          s  = fr_sub(s, fr_mul(ext[3][k], ext[7][k]));                   // - qO w3
          s  = fr_add(s, ext[4][k]);                                      // qc
          e_comb[k] = fr_mul(s, ext[8][k]);                               // * fz
        end
        SC_PERM: begin
          t1 = fr_mul(fr_mul(ext[3][k], ext[4][k]), fr_mul(ext[5][k], ext[6][k]));
          t2 = fr_mul(fr_mul(ext[7][k], ext[8][k]), ext[9][k]);
          s  = fr_mul(alpha, fr_sub(t1, t2));
          s  = fr_add(s, fr_sub(ext[0][k], fr_mul(ext[1][k], ext[2][k])));
          e_comb[k] = fr_mul(s, ext[10][k]);
        end
        default: begin  // SC_OPEN
          s = '0;
          for (int i = 0; i < 6; i++) s = fr_add(s, fr_mul(ext[i][k], ext[i+6][k]));
          e_comb[k] = s;
        end
      endcase
    end
  end

  // pipeline standing for the depth of the multiplier chain
  fr_t  pipe_d [LAT][NEVAL];
  logic pipe_v [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe_v[i] <= 1'b0;
    end else begin
      pipe_v[0] <= in_valid;
      for (int i = 1; i < LAT; i++) pipe_v[i] <= pipe_v[i-1];
    end
  end
  always_ff @(posedge clk) begin
    pipe_d[0] <= e_comb;
    for (int i = 1; i < LAT; i++) pipe_d[i] <= pipe_d[i-1];
  end

  assign out_valid = pipe_v[LAT-1];
  assign evals     = pipe_d[LAT-1];
endmodule
