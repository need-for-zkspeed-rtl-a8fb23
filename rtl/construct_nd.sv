// construct_nd: the Construct N&D unit of the permutation (wiring) check.
//
// For gate index i of a 2^mu-gate circuit and wire column j = 1..3 it forms
//   N_j[i] = w_j[i] + beta * id_j(i)    + gamma
//   D_j[i] = w_j[i] + beta * sigma_j[i] + gamma
// where id_j(i) = (j-1)*2^mu + i numbers every wire of the circuit and
// sigma_j is the wiring permutation. It also forms the products
// N[i] = N1 N2 N3 and D[i] = D1 D2 D3 that feed the FracMLE unit. The six
// N_j/D_j values go to memory for the later PermCheck.
// One gate enters per cycle; results leave 3 cycles later (one cycle for
// the beta products, one for the first and one for the second product).
// The inputs, outputs and challenges (beta, gamma) are the published ones;
// the exact formula, including the identity numbering id_j, is the usual
// one for a Plonk permutation argument, which the published text does not
// spell out.
//
// From the paper: the unit's place (SRAM -> Construct N&D -> FracMLE) and
// its outputs N_j, D_j. This design's choices: the term formulas (standard
// Plonk permutation terms), the 3-cycle pipeline.
module construct_nd
  import zk_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [5:0] mu,
  input  fr_t        beta,
  input  fr_t        gamma,
  input  logic       in_valid,
  input  logic [31:0] idx,
  input  fr_t        w     [3],
  input  fr_t        sigma [3],
  output logic       out_valid,
  output fr_t        n_j [3],
  output fr_t        d_j [3],
  output fr_t        n_prod,
  output fr_t        d_prod
);
  logic [2:0] v;
  fr_t n1 [3], d1 [3];
  fr_t n2 [3], d2 [3];
  fr_t np2, dp2;

  function automatic fr_t ident(int j, logic [5:0] m, logic [31:0] i);
    logic [95:0] x;
    x = ({64'd0, 32'(j)} << m) + {64'd0, i};
    return fr_t'(x);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[1:0], in_valid};
  end

  always_ff @(posedge clk) begin
    // stage 1: N_j, D_j
    for (int j = 0; j < 3; j++) begin
      n1[j] <= fr_add(fr_add(w[j], fr_mul(beta, ident(j, mu, idx))), gamma);
      d1[j] <= fr_add(fr_add(w[j], fr_mul(beta, sigma[j])), gamma);
    end
    // stage 2: first partial product
    n2  <= n1;
    d2  <= d1;
    np2 <= fr_mul(n1[0], n1[1]);
    dp2 <= fr_mul(d1[0], d1[1]);
    // stage 3: full product
    n_j    <= n2;
    d_j    <= d2;
    n_prod <= fr_mul(np2, n2[2]);
    d_prod <= fr_mul(dp2, d2[2]);
  end
  assign out_valid = v[2];
endmodule
