// tb_fracmle: streams N and D MLE entries into two FracMLE units and checks
// every phi = N * D^-1 and D^-1 against the reference.
//  dut_full: the default configuration (B = 64, K = 12). The stream of
//            NB batches is offered every cycle; it must never stall and,
//            once the first batch is out, must produce one result per cycle.
//  dut_small: B = 8, K = 2, far too few units to hide the inversion
//            latency, so the input must stall; results stay correct.
//
// The one-per-cycle rate checked is the paper's; the stall of the small
// configuration exercises this design's in_ready rule.
module tb_fracmle;
  import tb_ref_pkg::*;
  localparam int NB = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ------------- full-size unit -------------
  localparam int BF = 64, NF = NB * BF;
  fr_t nv [NF], dv [NF];
  logic fv, f_rdy, f_ov;
  fr_t fn, fd, f_phi, f_dinv;
  int f_in = 0, f_out = 0, f_stall = 0, f_first = -1, f_last = -1;

  fracmle dut_full (.clk, .rst_n, .in_valid(fv), .in_ready(f_rdy), .in_n(fn), .in_d(fd),
                    .out_valid(f_ov), .out_phi(f_phi), .out_dinv(f_dinv));

  always_comb begin
    fv = rst_n && f_in < NF;
    fn = nv[f_in < NF ? f_in : 0];
    fd = dv[f_in < NF ? f_in : 0];
  end
  always @(posedge clk) begin
    if (fv && f_rdy) f_in <= f_in + 1;
    if (fv && !f_rdy) f_stall++;
    if (rst_n && f_ov) begin
      checks += 2;
      if (rm(f_dinv, dv[f_out]) !== fr_t'(1)) begin failures++; $display("full dinv %0d", f_out); end
      if (f_phi !== rm(nv[f_out], f_dinv)) begin failures++; $display("full phi %0d", f_out); end
      if (f_first < 0) f_first = cyc;
      f_last = cyc;
      f_out <= f_out + 1;
    end
  end

  // ------------- small unit (stalls) -------------
  localparam int BS = 8, NS = 6 * BS;
  logic sv, s_rdy, s_ov;
  fr_t sn, sd, s_phi, s_dinv;
  int s_in = 0, s_out = 0, s_stall = 0;
  fracmle #(.B(BS), .K(2)) dut_small (.clk, .rst_n, .in_valid(sv), .in_ready(s_rdy), .in_n(sn),
                    .in_d(sd), .out_valid(s_ov), .out_phi(s_phi), .out_dinv(s_dinv));
  always_comb begin
    sv = rst_n && s_in < NS;
    sn = nv[s_in < NS ? s_in : 0];
    sd = dv[s_in < NS ? s_in : 0];
  end
  always @(posedge clk) begin
    if (sv && s_rdy) s_in <= s_in + 1;
    if (sv && !s_rdy) s_stall++;
    if (rst_n && s_ov) begin
      checks += 2;
      if (rm(s_dinv, dv[s_out]) !== fr_t'(1)) begin failures++; $display("small dinv %0d", s_out); end
      if (s_phi !== rm(nv[s_out], s_dinv)) begin failures++; $display("small phi %0d", s_out); end
      s_out <= s_out + 1;
    end
  end

  initial begin
    repeat (NF + 2000) @(posedge clk);
    failures++;
    $display("f_out=%0d s_out=%0d", f_out, s_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NF; i++) begin
      nv[i] = rrand();
      dv[i] = rrand() | fr_t'(1);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (f_out < NF || s_out < NS) @(posedge clk);
    checks++;
    if (f_stall != 0) begin failures++; $display("full unit stalled %0d cycles", f_stall); end
    checks++;
    if (f_last - f_first != NF - 1) begin failures++; $display("full unit output gaps: %0d cycles for %0d", f_last - f_first + 1, NF); end
    checks++;
    if (s_stall == 0) begin failures++; $display("small unit never stalled"); end
    $display("full: first output after %0d cycles; small: %0d stall cycles", f_first, s_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
