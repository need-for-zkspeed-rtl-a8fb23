// mod_inv: constant-time modular inverse by the binary extended Euclidean
// algorithm.
//
// y = a^-1 mod MOD for a != 0. The state (u, v, x1, x2) keeps the
// invariants u = a*x1 and v = a*x2 (mod MOD), starting from (a, MOD, 1, 0).
// Each cycle does one step: if u is odd, the smaller of u, v is subtracted
// from the larger (swapping so that u holds the difference) and likewise
// x2 from x1; then u is halved and x1 halved modulo MOD. The bit lengths of
// u and v shrink by at least one per step, so after 2W-1 steps u = 0 and
// v = 1 for any input, and x2 is the inverse. The loop always runs exactly
// 2W-1 steps, so the latency is data-independent: 509 cycles for W = 255,
// plus one cycle to load. That fixed count is what lets several inverters
// run side by side and still finish in order. The constant-time algorithm
// and the 2W-1 iteration count follow the published unit; the exact step
// rule is this design's formulation.
module mod_inv #(
  parameter int           W   = zk_pkg::FR_W,
  parameter logic [W-1:0] MOD = W'(zk_pkg::FR_MOD)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  output logic         busy,
  output logic         done,    // one-cycle pulse, y valid from then on
  output logic [W-1:0] y
);
  localparam int ITERS = 2*W - 1;
  logic [W-1:0] u, v, x1, x2;
  logic [$clog2(ITERS+1)-1:0] cnt;

  function automatic logic [W-1:0] msub(logic [W-1:0] p, logic [W-1:0] q);
    logic [W:0] s;
    s = {1'b0, p} - {1'b0, q};
    if (p < q) s = s + {1'b0, MOD};
    return s[W-1:0];
  endfunction

  function automatic logic [W-1:0] mhalf(logic [W-1:0] p);
    logic [W:0] s;
    s = p[0] ? ({1'b0, p} + {1'b0, MOD}) : {1'b0, p};
    return W'(s >> 1);        // s is even here: halve it
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      u <= '0; v <= '0; x1 <= '0; x2 <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        u    <= a;
        v    <= MOD;
        x1   <= W'(1);
        x2   <= '0;
        cnt  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        logic [W-1:0] nu, nv, n1, n2;
        nu = u; nv = v; n1 = x1; n2 = x2;
        if (nu[0]) begin
          if (nu < nv) begin
            nu = v;  nv = u;
            n1 = x2; n2 = x1;
          end
          nu = nu - nv;
          n1 = msub(n1, n2);
        end
        u  <= nu >> 1;
        v  <= nv;
        x1 <= mhalf(n1);
        x2 <= n2;
        cnt <= cnt + 1'b1;
        if (32'(cnt) == ITERS - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
  assign y = x2;
endmodule
