// tb_msm_unit: MSMs on a reduced unit (2 PEs, 4-bit windows, 16 points per
// PE, 16-bit scalars, groups of 4). Points are P_i = (i+2)G, so every MSM
// result must be (sum s_i (i+2)) G, computed with affine double-and-add.
//   1. sparse part: sum of the points whose scalar is 1 (OP_ONES, clear),
//      odd and even counts per PE
//   2. dense part added on top (OP_DENSE, no clear), random scalars with
//      zero digits: result = ones sum + dense sum
//   3. a dense MSM alone (clear), with a repeated digit so that bucket
//      hazards stall the adder pipeline
//
// The ones / dense split follows the paper; the sizes are reduced and the
// hazard stall is this design's scheduler.
module tb_msm_unit;
  import tb_ref_pkg::*;
  import zk_pkg::point_t;
  localparam int NP = 2, WIN = 4, NPTS = 16, SB = 16, GRP = 4, LAT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld_valid = 0, start = 0, op = 0, clear = 0, busy, done;
  logic [0:0] ld_pe;
  logic [3:0] ld_addr;
  point_t ld_pt, result;
  logic [4:0] npts [NP];
  logic [31:0] stall_cycles, padd_ops;

  msm_unit #(.NUM_PE(NP), .WIN(WIN), .PTS_PER_PE(NPTS), .SBITS(SB), .GROUP(GRP),
             .PADD_LAT(LAT)) dut (
    .clk, .rst_n, .ld_valid, .ld_pe, .ld_addr, .ld_pt, .start, .op, .clear, .npts,
    .busy, .done, .result, .stall_cycles, .padd_ops);

  apt_t pts [2*NPTS];

  task automatic load(int pe, int addr, int k, logic [15:0] s);
    @(negedge clk);
    ld_valid = 1; ld_pe = 1'(pe); ld_addr = 4'(addr);
    ld_pt.x = pts[k].x; ld_pt.y = pts[k].y; ld_pt.z = fq_t'(s);
    @(negedge clk) ld_valid = 0;
  endtask

  task automatic run(logic o, logic c);
    @(negedge clk); start = 1; op = o; clear = c;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] ksum, kones;
    int s0;
    ld_pe = '0; ld_addr = '0; ld_pt = '0;
    npts[0] = '0; npts[1] = '0;
    pts[0] = gen(); pts[0] = aadd(pts[0], pts[0]);   // 2G
    for (int i = 1; i < 2*NPTS; i++) pts[i] = aadd(pts[i-1], gen());
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. ones: PE0 gets points 0..4, PE1 points 5..8
    kones = 0;
    for (int i = 0; i < 5; i++) begin load(0, i, i, 16'd1); kones += 64'(i + 2); end
    for (int i = 0; i < 4; i++) begin load(1, i, 5 + i, 16'd1); kones += 64'(i + 7); end
    npts[0] = 5; npts[1] = 4;
    run(1'b0, 1'b1);
    checks++;
    if (!proj_eq(result.x, result.y, result.z, amul(kones, gen()))) begin failures++; $display("ones sum wrong"); end
    // 2. dense part on top
    ksum = kones;
    for (int p = 0; p < NP; p++) begin
      int n;
      n = (p == 0) ? 11 : 7;
      for (int i = 0; i < n; i++) begin
        logic [15:0] s;
        int k;
        s = 16'($urandom);
        if (i == 2) s = 16'h0000;
        if (i == 3) s = 16'h0f00;
        k = p * NPTS + i;
        load(p, i, k, s);
        ksum += 64'(s) * 64'(k + 2);
      end
      npts[p] = 5'(n);
    end
    run(1'b1, 1'b0);
    checks++;
    if (!proj_eq(result.x, result.y, result.z, amul(ksum, gen()))) begin failures++; $display("sparse MSM wrong"); end
    // 3. dense alone, all points share the low digit (bucket hazards)
    ksum = 0;
    s0 = int'(stall_cycles);
    for (int p = 0; p < NP; p++) begin
      for (int i = 0; i < NPTS; i++) begin
        logic [15:0] s;
        int k;
        s = {12'($urandom), 4'h5};
        k = p * NPTS + i;
        load(p, i, k, s);
        ksum += 64'(s) * 64'(k + 2);
      end
      npts[p] = 5'(NPTS);
    end
    run(1'b1, 1'b1);
    checks++;
    if (!proj_eq(result.x, result.y, result.z, amul(ksum, gen()))) begin failures++; $display("dense MSM wrong"); end
    checks++;
    if (int'(stall_cycles) == s0) begin failures++; $display("no hazard stalls seen"); end
    $display("padd ops %0d, stall cycles %0d", padd_ops, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
