# A HyperPlonk prover accelerator in SystemVerilog

HyperPlonk proves that a circuit of 2^mu gates was evaluated correctly without
revealing the values on its wires. Where older Plonk provers spend their time on
NTTs, HyperPlonk works on *multilinear extensions* (MLEs): tables of 2^mu
elements of a 255-bit prime field. Its work comes down to a few kernels:

* **SumCheck rounds** over products of up to a dozen MLE tables (ZeroCheck,
  PermCheck, OpenCheck), each followed by an **MLE update** that halves every
  table with the round's random challenge;
* the **wire identity**: for every gate, a numerator N and a denominator D built
  from the witnesses, the wiring permutation and two challenges; the fraction
  table phi = N / D; and the table of running products of phi;
* **MLE evaluation** at a random point, and building the **eq table** of a point;
* **multi-scalar multiplications** (MSMs) over the BLS12-381 G1 curve, which
  commit to the witness tables and to phi.

This RTL gives one hardware unit per kernel and wires them around a compressed
on-chip table memory. The sizes default to one balanced design point: 16 MSM
processing elements with 9-bit windows and 2048 points each, 2 SumCheck PEs,
11 MLE Update PEs with 4 multipliers each, one FracMLE unit with 12 batched
inverters of 64 elements each, an 8-leaf multifunction tree, and a global memory
for 2^20 gates. Everything is meant to run at 1 GHz and to take one element or
one pair of elements per cycle.

## Arithmetic and data types

`zk_pkg` holds the types shared by all units:

| type      | width | meaning |
|-----------|-------|---------|
| `fr_t`    | 255   | scalar-field element (all MLE data) |
| `fq_t`    | 381   | base-field element (curve coordinates) |
| `point_t` | 3 x 381 | projective point (X, Y, Z) |
| `instr_t` | 59    | step instruction for the top-level sequencer |

It also has `fr_add/sub/mul` and `fq_add/sub/mul`. A multiplication is the
full product reduced with the `%` operator. This gives the right function and
is easy to read. A real chip would use Montgomery multipliers instead: the
modules call the functions in one place each, so one can be swapped in there.
`mod_mul` is the pipelined wrapper (LAT = 4 cycles) used where a multiplier is
a separate resource.

## The units

### SumCheck (`sumcheck_unit`, `sumcheck_pe`)

A PE takes one pair of table entries (X = 0 and X = 1) from each of 12 MLE
inputs. It extends each MLE to X = 2..5 by adding (v1 - v0) again and again,
then evaluates the round polynomial's term products at all six points:

* ZeroCheck: (qL w1 + qR w2 + qM w1 w2 - qO w3 + qC) f_eq. That is 9 MLEs,
  degree 4.
* PermCheck: (pi - p1 p2 + alpha (phi D1 D2 D3 - N1 N2 N3)) f_eq. That is 11
  MLEs, degree 5.
* OpenCheck: the sum of six products of two MLEs each.

`sumcheck_unit` has NUM_PE such PEs. It sums their results each cycle into six
accumulators. `start` clears the accumulators. `done` comes LAT + 1 cycles
after the beat that is flagged `last`. `round_evals` then holds g(0)..g(5),
where g(0) + g(1) is the round's claimed sum.

### MLE Update (`mle_update`)

This unit computes t'[i] = (t[2i+1] - t[2i]) r + t[2i] for NUM_PE tables at
once, MULS entries per table per cycle. There is no backpressure: results
appear LAT cycles after the inputs.

### Multifunction tree (`multifunction_tree`)

This is the most involved unit. It is a binary tree of 2^LOG_P = 8 leaves and
works in four modes:

| mode | node operation | result |
|------|----------------|--------|
| `MT_MULT`  | a * b                   | product of a whole stream |
| `MT_PROD`  | a * b, every node kept | all partial products (the product-MLE table) and the grand product |
| `MT_EVAL`  | a + r_l (b - a)         | the MLE evaluated at (r_1..r_mu) |
| `MT_BUILD` | p -> (p - p r, p r)     | the eq table of (r_1..r_mu), from the root down |

The hardware tree covers the three lowest levels of a 2^mu-entry table. Each
8-element beat yields one node at level 3. The levels above it are done by one
more multiplier, the *accumulator*, in depth-first order:

* It keeps one pending node per level.
* When a new node arrives at a level that already has a pending node, the two
  are combined and the result climbs one level.
* The pending slots therefore hold at most mu - 3 values, however large the
  table.
* A small FIFO (FIFO_D = 4) absorbs level-3 nodes while the accumulator is
  busy climbing. When the FIFO is full, `in_ready` falls. This is the tree's
  only stall.

In evaluation mode, r_1 folds the least significant index bit. In build mode
the order is reversed: the root splits on r_mu, the most significant bit. The
forward walk is depth-first too:

* It keeps a sibling stack.
* One multiply per node gives both children, since p r is one child and
  p - p r is the other.
* The tree then expands each level-3 node into an 8-entry beat.
* Eq-table beats come out at almost one per cycle.

### Wire identity: Construct N&D, FracMLE (`construct_nd`, `fracmle`, `batched_inverse`, `mod_inv`)

For gate i and wire column j = 1..3, `construct_nd` forms:

* N_j = w_j + beta id_j + gamma, with id_j = (j - 1) 2^mu + i;
* D_j = w_j + beta sigma_j + gamma;
* the products N = N1 N2 N3 and D = D1 D2 D3.

This takes three pipeline stages.

`fracmle` turns the N, D stream into phi = N / D and D^-1, one element per
cycle. Inversion is the expensive part, so it works in layers:

* `mod_inv` is a constant-time binary extended Euclid inverter. It always runs
  2W - 1 = 509 iterations plus a load cycle, so its latency is 510 cycles
  whatever the input. Because of this, results come back in order.
* `batched_inverse` collects B = 64 denominators and keeps their prefix
  products. It inverts the total once. A backward sweep then gives, for each
  element, the product of all the others. That product times the inverse is
  D_i^-1.
* `fracmle` runs K = 12 batched inverters in round robin. A new batch starts
  every 64 cycles and an inversion takes about 510, so 12 units hide the
  latency completely.
* Two shared multipliers form D^-1 = (others) x inverse, and then
  phi = N x D^-1.

`in_ready` only falls when the next unit in the rotation is still busy. That
cannot happen at the default sizes. It does happen in the reduced
configurations used in the tests.

### MLE Combine (`mle_combine`)

Before the opening proofs, several tables are replaced by linear combinations
of other tables. The unit has NUM_OUT x NUM_IN = 6 x 12 = 72 multipliers. Per
cycle it takes one entry of each of 12 tables and gives one entry of each of 6
combined tables.

### Point adder and MSM (`padd`, `msm_pe`, `msm_unit`)

`padd` is a fully pipelined projective point adder (LAT = 8). It uses the
complete addition law of Renes, Costello and Batina for curves y^2 = x^3 + b.
Doubling, inverse points and the point at infinity (Z = 0) therefore need no
special cases. This matters because the scheduler adds whatever the buckets
hold.

`msm_pe` is one Pippenger PE. It has three point banks, X, Y and Z, of 2048
entries each. It works in one of two modes:

* **Ones pass** (`op = 0`) sums the points whose scalar is 1. It does this as
  a tree: pairs of points go through the adder and the sums are written back,
  until one point remains.
* **Dense pass** (`op = 1`) handles the other non-zero scalars. Each scalar
  sits in the Z bank, since affine input points do not need Z. The PE then
  runs the bucket method over 255-bit scalars in 9-bit windows:
  * Each point is added into the bucket of its digit.
  * The buckets are aggregated to sum d B_d in groups of 16: each group forms
    its partial and running sums in parallel, and the groups are combined at
    the end.
  * The windows are combined by doubling WIN times and adding.

All of this is issued in order to the single adder, with a scoreboard on
registers and buckets. An addition that needs a result still in the pipeline
waits. `stall_cycles` counts such waits and `padd_ops` counts additions.

`msm_unit` starts all PEs together, then adds their results in one extra
adder. `clear = 0` adds the new result to the previous one. This is how a
ones pass and a dense pass are merged, and how an MSM larger than
16 x 2048 points is run in chunks.

### Global table memory (`global_sram`)

The eleven input tables of a circuit stay on chip for the whole proof. They
are stored by class:

* **Binary** selectors (qL, qR, qM, qO) take one bit per gate.
* **Sparse** tables (qC, w1, w2, w3) are mostly 0 or 1. Each entry has a 2-bit
  tag: zero, one, or dense. Dense values go into a separate array of
  2^MU / 8 entries per table.
  * To find entry i, the memory adds a per-64-entry block base to the number
    of dense tags before i in that block.
  * The base is captured while the table is written, so tables are written
    in gate order.
  * `overflow` is set when a table has more dense values than fit.
* **Full** tables (sigma1..3) are stored as they are.

A read returns all eleven values of one gate a cycle later. This is one
channel of the shared bus.

## The top (`zkspeed_top`) and its step sequencer

The top instantiates all units. A small sequencer runs the steps that read
the table memory. It takes one `instr_t` at a time (`instr_valid` /
`instr_ready`) and pulses `instr_done` when the step has finished.

* **`I_WITNESS_LOAD`** streams gates `base .. base+len-1` and takes witness
  column `wsel`.
  * In the ones pass (`msm_pass = 0`) it loads the point of every scalar equal
    to 1.
  * In the dense pass it loads every other non-zero scalar with its point.
  * Zero scalars are skipped.
  * Points are handed to the MSM PEs in turn.
* **`I_MSM_RUN`** runs the MSM unit on what was loaded (`msm_clear` as above).
* **`I_WIRE`** is the wire-identity chain. Gate rows go to Construct N&D, then
  through an 8-deep FIFO into FracMLE. Each phi then goes to three places:
  * out of the chip (`phi_valid`, `phi`, `phi_dinv`);
  * into the MSM point memories as a dense scalar, for the commitment to phi;
  * into an 8-element packer that feeds the tree in product mode. The tree
    gives the product table and the grand product.

The memory read is issued only when the FIFO is sure to have room for every
row in flight (credit-based issue). So when FracMLE stalls, the stall backs up
to the memory read rather than losing data. A two-beat buffer in front of the
tree absorbs the tree's short stalls. `mtu_overrun` would flag if it ever fell
short.

The other streams enter and leave through ports:

* SumCheck pairs, MLE Update pairs and MLE Combine inputs and outputs;
* direct use of the tree for evaluation and eq-table builds;
* MSM base points, read through `pt_rd_*` with one-cycle latency.

These stand for the chip's HBM interface. The Fiat-Shamir challenges (beta,
gamma, alpha, the round challenges and the combination coefficients) are
inputs too, since the SHA3 transcript is not part of this RTL.

Event counters come out as ports:

* `cnt_bus_stall`: the memory read was held back for want of credit;
* `cnt_frac_stall`: FracMLE was not ready;
* `cnt_mtu_stall`: the tree made the product input wait;
* `cnt_msm_stall` and `cnt_msm_padd`: MSM hazard waits and point additions;
* `cnt_zero_skip`, `cnt_ones_loaded` and `cnt_dense_loaded`: scalars skipped
  or loaded.

## Where this RTL departs from the design it follows

* **Multipliers.** They are remainder-based rather than Montgomery, and their
  pipelines are simple delay lines. The function is the same, but neither
  timing nor area says anything about a real implementation.
* **PE schedules.** The SumCheck PE, point adder and inverter are written as
  clear datapaths. They are not resource-shared schedules, so the SumCheck PE
  is not the 94-multiplier shared design.
* **SumCheck extensions.** Every MLE is extended to all six points by
  repeated addition, and every term is evaluated at all six. The design this
  RTL follows evaluates low-degree terms at fewer points and fills in the rest
  by barycentric interpolation at the end of a round. That saves multipliers
  but does not change the result.
* **Control.** The sequencer covers only the witness commitment, the wire
  identity and MSM runs. ZeroCheck, PermCheck, OpenCheck, the MLE updates, the
  evaluations and the opening combinations are driven from the ports. No
  instruction-level schedule for them is built. During the wire step, the
  product table comes out of the tree on ports (`mt_lvl_*`, `mt_acc_*`). It
  is not fed into the MSM, so committing to it needs a separate MSM run.
* **Memories.**
  * There is no HBM memory controller and no multi-channel bus arbiter.
  * The FracMLE local memory for table reuse is not modelled.
  * The global memory has one read channel.
* **Global memory size.** The default global memory holds 2^20 gates. The
  benchmark circuits of 2^17 and 2^20 gates fit. Those of 2^21, 2^22 and 2^23
  gates (a hash-chain circuit, a recursive-proof circuit and a rollup of ten
  private transactions) would need `MU` raised to 21..23. The rest of the
  design already handles those sizes:
  * the tree goes to 2^24;
  * the step length field is 24 bits;
  * the MSM runs in 32768-point chunks.
* **Choices of this design.** The Construct N&D term formulas, the point-adder
  formula, the instruction format and all FIFO and buffer sizes were filled
  in here.

## Verification

Each unit has a self-checking testbench in `tb/`. Expected values come from
`tb_ref_pkg`, which shares no code with the RTL. It holds field arithmetic,
inversion by Fermat's theorem, and affine chord-and-tangent curve arithmetic
with double-and-add. Each testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it covers |
|-----------|----------------|
| `tb_mod_mul` | random products, latency |
| `tb_sumcheck_unit` | one full round per mode on a 2^5 table; g(0)+g(1) equals the table sum; latency |
| `tb_mle_update` | random folds in 2 PEs |
| `tb_multifunction_tree` | all four modes at several sizes up to 2^10; eq-table rate bound; stalls |
| `tb_construct_nd` | 2^10 gates |
| `tb_mod_inv` | edge values and random values; exactly 510 cycles |
| `tb_fracmle` | default unit, 30 batches, no stall and one phi per cycle; a small unit that must stall |
| `tb_mle_combine` | 6 x 12 combinations |
| `tb_padd` | additions, doublings, infinity |
| `tb_msm_unit` | ones pass, ones plus dense pass, dense pass with bucket hazards (reduced: 2 PEs, 4-bit windows, 16-bit scalars) |
| `tb_global_sram` | all 11 tables of 2^10 gates, every row read back |
| `tb_zkspeed_top` | whole chip at reduced sizes (details below) |
| `tb_zkspeed_full` | whole chip at default sizes: one wire-identity step on 64 gates |

`tb_zkspeed_top` works on a 32-gate circuit:

* a witness commitment as ones pass plus dense pass;
* the wire-identity step, with every N_j, D_j, phi, D^-1 and the grand
  product checked;
* the commitment to phi;
* direct product and evaluation runs of the tree;
* one SumCheck round, one MLE update and one MLE combination.

It requires each mechanism to occur at least once:

* memory-read stall;
* FracMLE stall;
* MSM hazard stall;
* tree stall;
* zero skip;
* ones and dense loading.

To run a testbench with plain Verilator from the project root:

```
verilator --binary -Irtl -Itb rtl/zk_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv \
          tb/tb_zkspeed_top.sv --top-module tb_zkspeed_top -o sim && obj_dir/sim
```

Add `-Wno-fatal` if warnings should not stop the build. The end-to-end test
runs for about a minute and a half, including compilation. The full-size
test runs in under a minute.
