// padd: pipelined elliptic-curve point adder for BLS12-381 G1.
//
// Adds two points in projective coordinates (X:Y:Z) on y^2 = x^3 + 4 over
// the 381-bit base field. The formula is the complete addition law for
// short Weierstrass curves with a = 0 (Renes-Costello-Batina, 12
// multiplications plus two by the constant 3b = 12). "Complete" means the
// same datapath is correct for doubling (P + P) and for the point at
// infinity (Z = 0), so the MSM never needs special cases. One addition
// enters per cycle and leaves LAT cycles later; a tag rides along to name
// the destination of the sum. The published design uses a fully pipelined
// HLS point adder; its formula is not given, so the complete projective law
// is this design's choice.
module padd
  import zk_pkg::*;
#(
  parameter int LAT   = 8,
  parameter int TAG_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  point_t           p1,
  input  point_t           p2,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output point_t           sum,
  output logic [TAG_W-1:0] out_tag
);
  localparam fq_t B3 = fq_t'(12);

  function automatic point_t add_rcb(point_t a, point_t b);
    fq_t t0, t1, t2, t3, t4, x3, y3, z3;
    t0 = fq_mul(a.x, b.x);  t1 = fq_mul(a.y, b.y);  t2 = fq_mul(a.z, b.z);
    t3 = fq_add(a.x, a.y);  t4 = fq_add(b.x, b.y);  t3 = fq_mul(t3, t4);
    t4 = fq_add(t0, t1);    t3 = fq_sub(t3, t4);    t4 = fq_add(a.y, a.z);
    x3 = fq_add(b.y, b.z);  t4 = fq_mul(t4, x3);    x3 = fq_add(t1, t2);
    t4 = fq_sub(t4, x3);    x3 = fq_add(a.x, a.z);  y3 = fq_add(b.x, b.z);
    x3 = fq_mul(x3, y3);    y3 = fq_add(t0, t2);    y3 = fq_sub(x3, y3);
    x3 = fq_add(t0, t0);    t0 = fq_add(x3, t0);    t2 = fq_mul(B3, t2);
    z3 = fq_add(t1, t2);    t1 = fq_sub(t1, t2);    y3 = fq_mul(B3, y3);
    x3 = fq_mul(t4, y3);    t2 = fq_mul(t3, t1);    x3 = fq_sub(t2, x3);
    y3 = fq_mul(y3, t0);    t1 = fq_mul(t1, z3);    y3 = fq_add(t1, y3);
    t0 = fq_mul(t0, t3);    z3 = fq_mul(z3, t4);    z3 = fq_add(z3, t0);
    return '{x: x3, y: y3, z: z3};
  endfunction

  point_t           pd [LAT];
  logic             pv [LAT];
  logic [TAG_W-1:0] pt [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pv[i] <= 1'b0;
    end else begin
      pv[0] <= in_valid;
      for (int i = 1; i < LAT; i++) pv[i] <= pv[i-1];
    end
  end
  always_ff @(posedge clk) begin
    if (in_valid) pd[0] <= add_rcb(p1, p2);
    pt[0] <= in_tag;
    for (int i = 1; i < LAT; i++) begin
      pd[i] <= pd[i-1];
      pt[i] <= pt[i-1];
    end
  end
  assign out_valid = pv[LAT-1];
  assign sum       = pd[LAT-1];
  assign out_tag   = pt[LAT-1];
endmodule
