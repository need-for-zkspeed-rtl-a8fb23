// fracmle: the FracMLE unit, phi[i] = N[i] / D[i] at one element per cycle.
//
// K batched inverse units (batch B) take consecutive batches of the D and N
// streams in round-robin order. While one unit waits out its ~B + 2W
// cycle inversion, the others keep loading, so with K*B larger than one
// batch's latency the unit accepts one input and produces one output every
// cycle, a pipeline about B*K deep. Because every inversion takes the same
// number of cycles, units finish in the order they started, and the output
// side just follows the same round-robin pointer. Two shared multipliers
// (pipelined, LAT cycles) form D^-1 = excl * inverse and then phi = N * D^-1.
// in_ready falls (a stall) when the unit whose turn it is to load is still
// busy with an earlier batch. Stream lengths must be multiples of B.
// The round-robin arrangement, shared output multiplication, and default
// sizes (B = 64, K = 12) are the published ones.
//
// From the paper: batched inverse units used in round robin so that one
// element enters and one phi leaves per cycle, B = 64, K = 12. This
// design's choices: the two shared output multipliers, the in_ready rule;
// the FracMLE local SRAM is not modelled.
module fracmle
  import zk_pkg::*;
#(
  parameter int B   = 64,
  parameter int K   = 12,
  parameter int LAT = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fr_t  in_n,
  input  fr_t  in_d,
  output logic out_valid,
  output fr_t  out_phi,
  output fr_t  out_dinv
);
  localparam int KW = (K > 1) ? $clog2(K) : 1;
  localparam int BW = $clog2(B);

  logic [K-1:0] u_ready, u_pend, u_ov, u_last, u_in_v, u_out_en;
  logic         unused_last;
  assign unused_last = ^u_last;
  fr_t u_excl [K], u_inv [K], u_n [K];
  logic [KW-1:0] in_ptr, out_ptr;
  logic [BW-1:0] in_cnt, out_cnt;

  for (genvar k = 0; k < K; k++) begin : g_bi
    batched_inverse #(.B(B)) u_bi (
      .clk, .rst_n, .in_valid(u_in_v[k]), .in_d, .in_n,
      .ready(u_ready[k]), .out_pending(u_pend[k]), .out_en(u_out_en[k]),
      .out_valid(u_ov[k]), .out_excl(u_excl[k]), .out_inv(u_inv[k]),
      .out_n(u_n[k]), .out_last(u_last[k]));
  end

  assign in_ready = u_ready[in_ptr];
  always_comb begin
    u_in_v   = '0;
    u_out_en = '0;
    u_in_v[in_ptr]    = in_valid && in_ready;
    u_out_en[out_ptr] = u_pend[out_ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_ptr  <= '0;
      out_ptr <= '0;
      in_cnt  <= '0;
      out_cnt <= '0;
    end else begin
      if (in_valid && in_ready) begin
        in_cnt <= in_cnt + 1'b1;
        if (32'(in_cnt) == B - 1)
          in_ptr <= (32'(in_ptr) == K - 1) ? '0 : in_ptr + 1'b1;
      end
      if (u_out_en[out_ptr]) begin
        out_cnt <= out_cnt + 1'b1;
        if (32'(out_cnt) == B - 1)
          out_ptr <= (32'(out_ptr) == K - 1) ? '0 : out_ptr + 1'b1;
      end
    end
  end

  // shared output multipliers: D^-1 = excl * inv, then phi = N * D^-1
  logic sel_v;
  fr_t  sel_excl, sel_inv, sel_n;
  always_comb begin
    sel_v = 1'b0; sel_excl = '0; sel_inv = '0; sel_n = '0;
    for (int k = 0; k < K; k++) begin
      if (u_ov[k]) begin
        sel_v = 1'b1; sel_excl = u_excl[k]; sel_inv = u_inv[k]; sel_n = u_n[k];
      end
    end
  end

  logic dinv_v;
  fr_t  dinv, n_d [LAT];
  mod_mul #(.LAT(LAT)) u_mul_dinv (.clk, .rst_n, .in_valid(sel_v), .a(sel_excl),
                                   .b(sel_inv), .out_valid(dinv_v), .y(dinv));
  always_ff @(posedge clk) begin
    n_d[0] <= sel_n;
    for (int i = 1; i < LAT; i++) n_d[i] <= n_d[i-1];
  end
  mod_mul #(.LAT(LAT)) u_mul_phi (.clk, .rst_n, .in_valid(dinv_v), .a(n_d[LAT-1]),
                                  .b(dinv), .out_valid(out_valid), .y(out_phi));
  fr_t dinv_d [LAT];
  always_ff @(posedge clk) begin
    dinv_d[0] <= dinv;
    for (int i = 1; i < LAT; i++) dinv_d[i] <= dinv_d[i-1];
  end
  assign out_dinv = dinv_d[LAT-1];
endmodule
