// mod_mul: pipelined modular multiplier, y = a*b mod MOD.
//
// The building block of every datapath unit. One product enters per cycle
// when in_valid is high and leaves LAT cycles later with out_valid. The
// full double-width product is reduced by a remainder operation in the first
// stage; the remaining LAT-1 stages are plain registers that stand for the
// deeper pipeline of a real multiplier. The published design uses
// Montgomery multipliers; this one works in the ordinary residue domain so
// that operands need no conversion. MOD and W default to the 255-bit
// BLS12-381 scalar field.
//
// The paper uses HLS-generated Montgomery multipliers; this design's own
// choice is a plain product reduced by the remainder operator, then LAT
// registers, which computes the same function in the normal domain.
module mod_mul #(
  parameter int            W   = zk_pkg::FR_W,
  parameter logic [W-1:0]  MOD = W'(zk_pkg::FR_MOD),
  parameter int            LAT = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         out_valid,
  output logic [W-1:0] y
);
  logic [W-1:0] stage_d [LAT];
  logic         stage_v [LAT];
  logic [2*W-1:0] prod;

  always_comb begin
    prod = {{W{1'b0}}, a} * {{W{1'b0}}, b};
    prod = prod % {{W{1'b0}}, MOD};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        stage_v[i] <= 1'b0;
        stage_d[i] <= '0;
      end
    end else begin
      stage_v[0] <= in_valid;
      stage_d[0] <= prod[W-1:0];
      for (int i = 1; i < LAT; i++) begin
        stage_v[i] <= stage_v[i-1];
        stage_d[i] <= stage_d[i-1];
      end
    end
  end

  assign out_valid = stage_v[LAT-1];
  assign y         = stage_d[LAT-1];
endmodule
