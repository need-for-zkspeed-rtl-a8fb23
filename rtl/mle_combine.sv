// mle_combine: the MLE Combine unit (linear combinations of MLE tables).
//
// The polynomial-opening step repeatedly forms MLEs that are linear
// combinations of others: six combined MLEs before OpenCheck, the g' MLE
// after it, and the element-wise combinations in between. Each cycle the
// unit takes entry i of up to NUM_IN input tables and produces entry i of
// NUM_OUT output tables, out_o[i] = sum_j coef[o][j] * in_j[i], using
// NUM_OUT*NUM_IN pipelined multipliers followed by an adder tree. Setting a
// coefficient row to zero disables that output; because the operations
// before OpenCheck and those before the MSMs never overlap, the same
// multipliers serve both, which is the published resource-sharing scheme
// (72 multipliers = 6 outputs x 12 inputs at the default sizes).
// Results appear LAT + 1 cycles after the inputs.
//
// From the paper: 72 shared multipliers for the opening-step linear
// combinations. This design's choices: their arrangement as 6 outputs of
// 12 inputs each and the adder tree.
module mle_combine
  import zk_pkg::*;
#(
  parameter int NUM_IN  = 12,
  parameter int NUM_OUT = 6,
  parameter int LAT     = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  fr_t  coef [NUM_OUT][NUM_IN],
  input  logic in_valid,
  input  fr_t  in_data [NUM_IN],
  output logic out_valid,
  output fr_t  out_data [NUM_OUT]
);
  logic mv [NUM_OUT][NUM_IN];
  fr_t  prod [NUM_OUT][NUM_IN];

  for (genvar o = 0; o < NUM_OUT; o++) begin : g_out
    for (genvar j = 0; j < NUM_IN; j++) begin : g_in
      mod_mul #(.LAT(LAT)) u_mul (.clk, .rst_n, .in_valid, .a(coef[o][j]),
                                  .b(in_data[j]), .out_valid(mv[o][j]), .y(prod[o][j]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < NUM_OUT; o++) out_data[o] <= '0;
    end else begin
      out_valid <= mv[0][0];
      for (int o = 0; o < NUM_OUT; o++) begin
        fr_t s;
        s = '0;
        for (int j = 0; j < NUM_IN; j++) s = fr_add(s, prod[o][j]);
        out_data[o] <= s;
      end
    end
  end
endmodule
