// tb_padd: point additions on BLS12-381 G1 against affine chord/tangent
// arithmetic: distinct points, doubling (P + P), P + (-P) = infinity,
// P + infinity, and points with Z != 1; checks the LAT-cycle latency.
//
// The curve is the paper's; the addition formula and the 8-cycle latency
// are this design's.
module tb_padd;
  import tb_ref_pkg::*;
  import zk_pkg::point_t;
  localparam int LAT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic in_valid = 0, out_valid;
  point_t p1, p2, sum;
  logic [15:0] in_tag, out_tag;
  apt_t expq [$];
  int tq [$];
  padd #(.LAT(LAT)) dut (.clk, .rst_n, .in_valid, .p1, .p2, .in_tag, .out_valid, .sum, .out_tag);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (out_valid) begin
    apt_t e;
    e = expq.pop_front();
    checks += 2;
    if (!proj_eq(sum.x, sum.y, sum.z, e)) begin failures++; $display("sum mismatch tag %0d", out_tag); end
    if (cyc - tq.pop_front() != LAT) failures++;
  end

  function automatic point_t proj(apt_t a, fq_t z);
    point_t p;
    if (a.inf) begin p.x = '0; p.y = fq_t'(1); p.z = '0; return p; end
    p.x = qm(a.x, z); p.y = qm(a.y, z); p.z = z;
    return p;
  endfunction

  initial begin
    apt_t pts [8];
    apt_t inf;
    inf.inf = 1; inf.x = '0; inf.y = '0;
    p1 = '0; p2 = '0; in_tag = '0;
    pts[0] = gen();
    for (int i = 1; i < 8; i++) pts[i] = aadd(pts[i-1], pts[0]);
    checks++;
    if (qm(GY, GY) !== qa(qm(GX, qm(GX, GX)), fq_t'(4))) begin failures++; $display("generator not on curve"); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      apt_t a, b;
      int sel;
      @(negedge clk);
      sel = t % 5;
      a = pts[$urandom_range(0, 7)];
      case (sel)
        0: b = pts[$urandom_range(0, 7)];
        1: b = a;                                    // doubling
        2: begin b = a; b.y = qs(fq_t'(0), a.y); end // inverse
        3: b = inf;
        default: b = pts[$urandom_range(0, 7)];
      endcase
      p1 = proj(a, (sel == 4) ? fq_t'($urandom_range(2, 1000)) : fq_t'(1));
      p2 = proj(b, (sel == 4) ? fq_t'($urandom_range(2, 1000)) : fq_t'(1));
      in_tag = 16'(t);
      in_valid = 1;
      expq.push_back(aadd(a, b));
      tq.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
