// batched_inverse: Montgomery-batched inverse of B field elements.
//
// Inverting every element separately would cost one long inversion each;
// batching costs one inversion per B elements. Phases:
//   LOAD   B elements D[i] (with the numerator N[i] that rides along) arrive
//          one per cycle and go into the local SRAM. A running product gives
//          the exclusive prefix products pre[i] = D[0]...D[i-1] and, after the
//          last element, the batch product D[0]...D[B-1].
//   INVERT the batch product goes to the constant-time inverter (509 cycles
//          for 255-bit elements). Meanwhile the SRAM is swept backwards with
//          a running suffix product, turning pre[i] into the "all but i"
//          product excl[i] = prod_{j != i} D[j]. This overlaps the partial
//          product work with the inversion.
//   OUTPUT once the inversion is done and out_en is high, the unit streams
//          (excl[i], inverse, N[i]) for i = 0..B-1, one per cycle; the caller
//          forms D[i]^-1 = excl[i] * inverse with a shared multiplier.
// `ready` is high only in the idle/LOAD phase. The published unit computes
// the batch product with a multiplier tree; here the running prefix product
// already holds it, so no tree is needed in this unit. Batch size default
// B = 64 is the published choice.
//
// From the paper: Montgomery batching, one inversion per batch of B = 64
// elements. This design's choices: the prefix / suffix-sweep order, the
// single internal multiplier schedule and the handshake.
module batched_inverse
  import zk_pkg::*;
#(
  parameter int B = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fr_t  in_d,
  input  fr_t  in_n,
  output logic ready,
  output logic out_pending,     // inversion done, waiting for out_en
  input  logic out_en,
  output logic out_valid,
  output fr_t  out_excl,
  output fr_t  out_inv,
  output fr_t  out_n,
  output logic out_last
);
  typedef enum logic [1:0] {S_LOAD, S_INV, S_OUT} state_e;
  localparam int AW = $clog2(B);

  state_e st;
  fr_t d_mem [B];
  fr_t n_mem [B];
  fr_t pp_mem [B];
  fr_t run;           // running prefix / suffix product
  logic [AW:0] cnt;
  logic sweep_done;
  logic inv_start, inv_busy, inv_done;
  fr_t  inv_y;
  logic inv_ok;

  mod_inv u_inv (.clk, .rst_n, .start(inv_start), .a(run), .busy(inv_busy),
                 .done(inv_done), .y(inv_y));

  assign ready       = (st == S_LOAD);
  assign out_pending = (st == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_LOAD;
      run        <= fr_t'(1);
      cnt        <= '0;
      sweep_done <= 1'b0;
      inv_start  <= 1'b0;
      inv_ok     <= 1'b0;
      out_valid  <= 1'b0;
      out_last   <= 1'b0;
      out_excl   <= '0;
      out_inv    <= '0;
      out_n      <= '0;
    end else begin
      inv_start <= 1'b0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (st)
        S_LOAD: if (in_valid) begin
          d_mem[cnt[AW-1:0]]  <= in_d;
          n_mem[cnt[AW-1:0]]  <= in_n;
          pp_mem[cnt[AW-1:0]] <= run;
          run <= fr_mul(run, in_d);
          if (32'(cnt) == B - 1) begin
            st        <= S_INV;
            inv_start <= 1'b1;
            cnt       <= (AW+1)'(B - 1);
            sweep_done <= 1'b0;
            inv_ok    <= 1'b0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_INV: begin
          // the inverter latched `run` (the batch product) on inv_start;
          // from the next cycle `run` is reused as the suffix product
          if (inv_start) begin
            run <= fr_t'(1);
          end else if (!sweep_done) begin
            pp_mem[cnt[AW-1:0]] <= fr_mul(pp_mem[cnt[AW-1:0]], run);
            run <= fr_mul(run, d_mem[cnt[AW-1:0]]);
            if (cnt == 0) sweep_done <= 1'b1;
            else          cnt <= cnt - 1'b1;
          end
          if (inv_done) inv_ok <= 1'b1;
          if (sweep_done && (inv_ok || inv_done)) begin
            st  <= S_OUT;
            cnt <= '0;
          end
        end
        S_OUT: if (out_en) begin
          out_valid <= 1'b1;
          out_excl  <= pp_mem[cnt[AW-1:0]];
          out_n     <= n_mem[cnt[AW-1:0]];
          out_inv   <= inv_y;
          if (32'(cnt) == B - 1) begin
            out_last <= 1'b1;
            st  <= S_LOAD;
            cnt <= '0;
            run <= fr_t'(1);
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: st <= S_LOAD;
      endcase
    end
  end
  logic unused;
  assign unused = inv_busy;
endmodule
