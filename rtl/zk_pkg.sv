// zk_pkg: shared constants, element types and modular-arithmetic functions.
//
// The prover works over the BLS12-381 curve: every multilinear-extension
// (MLE) table entry is an element of the 255-bit scalar field Fr, every
// elliptic-curve coordinate an element of the 381-bit base field Fq. The two
// moduli below are those of the curve standard. The functions are plain
// combinational arithmetic (add, subtract, multiply-and-reduce); pipelining
// is added by the modules that use them.
//
// The curve (BLS12-381) follows the paper; its moduli come from the curve
// standard. The instruction layout is this design's own.
package zk_pkg;

  localparam int FR_W = 255;
  localparam int FQ_W = 381;

  typedef logic [FR_W-1:0] fr_t;
  typedef logic [FQ_W-1:0] fq_t;

  localparam fr_t FR_MOD =
    255'h73eda753299d7d483339d80809a1d80553bda402fffe5bfeffffffff00000001;
  localparam fq_t FQ_MOD =
    381'h1a0111ea397fe69a4b1ba7b6434bacd764774b84f38512bf6730d2a0f6b0f6241eabfffeb153ffffb9feffffffffaaab;

  // Projective point (X:Y:Z); the point at infinity has Z = 0.
  typedef struct packed {
    fq_t x;
    fq_t y;
    fq_t z;
  } point_t;

  // SumCheck polynomial selector (ZeroCheck, PermCheck, OpenCheck).
  typedef enum logic [1:0] {SC_ZERO = 2'd0, SC_PERM = 2'd1, SC_OPEN = 2'd2} sc_mode_e;

  // Multifunction tree modes.
  typedef enum logic [1:0] {
    MT_MULT  = 2'd0,   // product of all inputs (multiplier tree)
    MT_EVAL  = 2'd1,   // MLE Evaluate: fold pairs with a challenge per level
    MT_PROD  = 2'd2,   // Product MLE: product tree, every node is an output
    MT_BUILD = 2'd3    // Build MLE: expand challenges into an eq table
  } mt_mode_e;

  // Step instructions of the top-level controller.
  typedef enum logic [1:0] {
    I_NOP          = 2'd0,
    I_WITNESS_LOAD = 2'd1,   // witness column -> MSM SRAM (one sparse pass)
    I_WIRE         = 2'd2,   // Construct N&D -> FracMLE -> ProdMLE / MSM load
    I_MSM_RUN      = 2'd3    // run the MSM unit on what was loaded
  } iop_e;

  typedef struct packed {
    iop_e        op;
    logic [4:0]  mu;         // log2 of the MLE table size
    logic [23:0] base;       // first gate index of the stream
    logic [23:0] len;        // number of gates in the stream
    logic [1:0]  wsel;       // witness column 0..2 (I_WITNESS_LOAD)
    logic        msm_pass;   // 0: 1-valued scalars, 1: full scalars
    logic        msm_clear;  // I_MSM_RUN: start a new MSM result
  } instr_t;

  // ---------------- Fr arithmetic ----------------
  function automatic fr_t fr_add(fr_t a, fr_t b);
    logic [FR_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, FR_MOD}) s = s - {1'b0, FR_MOD};
    return s[FR_W-1:0];
  endfunction

  function automatic fr_t fr_sub(fr_t a, fr_t b);
    logic [FR_W:0] s;
    s = {1'b0, a} - {1'b0, b};
    if (a < b) s = s + {1'b0, FR_MOD};
    return s[FR_W-1:0];
  endfunction

  function automatic fr_t fr_mul(fr_t a, fr_t b);
    logic [2*FR_W-1:0] p;
    p = {{FR_W{1'b0}}, a} * {{FR_W{1'b0}}, b};
    p = p % {{FR_W{1'b0}}, FR_MOD};
    return p[FR_W-1:0];
  endfunction

  // ---------------- Fq arithmetic ----------------
  function automatic fq_t fq_add(fq_t a, fq_t b);
    logic [FQ_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, FQ_MOD}) s = s - {1'b0, FQ_MOD};
    return s[FQ_W-1:0];
  endfunction

  function automatic fq_t fq_sub(fq_t a, fq_t b);
    logic [FQ_W:0] s;
    s = {1'b0, a} - {1'b0, b};
    if (a < b) s = s + {1'b0, FQ_MOD};
    return s[FQ_W-1:0];
  endfunction

  function automatic fq_t fq_mul(fq_t a, fq_t b);
    logic [2*FQ_W-1:0] p;
    p = {{FQ_W{1'b0}}, a} * {{FQ_W{1'b0}}, b};
    p = p % {{FQ_W{1'b0}}, FQ_MOD};
    return p[FQ_W-1:0];
  endfunction

endpackage
