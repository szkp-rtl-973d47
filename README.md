# SZKP datapath in SystemVerilog

Generating a Groth16 zkSNARK proof has two costly parts:

- **Polynomial work.** This is a chain of number-theoretic transforms (NTTs) and element-wise products over the scalar field Fr.
- **Multi-scalar multiplications (MSMs).** An MSM computes `sum_i s_i * P_i`, with 254-bit scalars `s_i` and points `P_i` on an elliptic curve.

Groth16 needs five MSMs:

- One is **dense**: its scalars are uniformly random.
- Four are **sparse**: nearly all of their scalars are 0 or 1, and in two of them many points are the point at infinity.
- Three of the sparse MSMs are over the curve group G1. The fourth is over G2, whose coordinates are pairs of field elements (Fq2).

This design puts all of that work on one chip, using regular dataflows for both kernels:

- **Pippenger MSM PEs.** Each PE owns one scalar window. It reads its own memory bank and switches banks in a rotation, so no two PEs ever compete for a point.
- **Sparse MSM cores.** They discard zero work, sum the scalar-1 points by repeatedly folding pairs of points through an adder, and send only the remaining few pairs to a small Pippenger engine.
- **Constant-geometry NTT PEs.** Every stage uses the same read and write pattern, so the control is a counter and all butterflies are busy in every stage.

The RTL targets the BN254 (also called BN128) curve:

- Fields are 256 bits wide.
- Scalars are 254 bits (`LAMBDA`).
- All field elements are kept in Montgomery form with R = 2^256.

## Block map

```
szkp_top
 ├─ ntt_pe  x NTT_KN (8)            constant-geometry NTT, U = 32 butterflies, n <= 1024
 │   ├─ ntt_bfly x U                DIF / DIT butterfly over Fr
 │   └─ ntt_ew                      element-wise unit: x, x*op, op-x, times g0*q^e
 ├─ dense_msm_core (G1)             (K_M, W, PPW, II) = (16, 8, 16384, 1)
 │   ├─ msm_xbar                    rotating PE <-> bank crossbar
 │   └─ msm_pe x K_M                window PE
 │       ├─ bucket_sched            RR / Max-r / Longest-Queue dispatch
 │       └─ ec_padd                 complete projective adder, latency 30 (G1) / 55 (G2)
 │           └─ fe_mul_bank -> fe_mul -> mont_mul
 ├─ sparse_msm_core (G1)            (8, 7, 1024, 4)
 │   ├─ dense_msm_core              Pippenger engine for the pairs whose scalar is neither 0 nor 1
 │   └─ ec_padd                     ones-buffer folder
 └─ sparse_msm_core (G2, EXT = 2)   (1, 5, 1024, 4), adder latency 55
```

Parameter tuples are written (K_M PEs, W-bit windows, PPW points per batch, adder initiation interval II). The defaults in `szkp_top` are a high-performance configuration:

- The NTT has 8 PEs with 32 butterflies each.
- The dense G1 MSM is (16, 8, 16384, 1).
- The sparse G1 MSM is (8, 7, 1024, 4).
- The sparse G2 MSM is (1, 5, 1024, 4).

The tuples come from the design points reported for the architecture. The adder latencies are those of the reference adders (30 cycles for G1, 55 for G2).

The chip's DRAM interface is not part of the RTL: the streams that would come from it are the top-level ports. The same holds for the four-step NTT sequencer and the final proof assembly (see "What is outside").

## Arithmetic

### Montgomery multiplier (`mont_mul`)

The multiplier is a three-stage REDC pipeline:

1. `t = a*b`.
2. `m = (t mod R) * N'` mod R.
3. `(t + m*N) / R`, followed by one conditional subtraction.

It accepts one product per cycle and has a latency of 3 (`MONT_LAT` in `szkp_pkg`). The modulus is a parameter, so the same module serves Fq (curve coordinates) and Fr (NTT data).

`fe_mul` is one multiplication in Fq (`EXT=1`) or in Fq2 (`EXT=2`):

- Fq2 uses u^2 = -1 and Karatsuba, i.e. three `mont_mul`s with a pre-add stage and a post stage.
- The latency is 3 for Fq and 5 for Fq2.

### Point adder (`ec_padd`)

The adder uses the complete projective addition law for short-Weierstrass curves with a = 0 (Renes–Costello–Batina, Algorithm 7). Because the law is complete, adding a point to itself, to the point at infinity or to its own negative needs no special case, so an MSM bucket never has to branch.

The 14 field products are grouped into three dependent banks of 6, 2 and 6 products:

- Each bank is a `fe_mul_bank`.
- With initiation interval II, a bank time-multiplexes its products over ceil(n/II) multipliers.
- This is the knob that trades multipliers for throughput. The sparse cores use II = 4, since they are far from the critical path.

Whatever the II, the pipeline is padded to a fixed `LATENCY` (30 for G1, 55 for G2) with delay registers. `in_ready` drops for II-1 cycles after each accepted operation.

- **Point format:** `[2:0][EXT-1:0][255:0]`, with index 0 = X, 1 = Y, 2 = Z. Within a coordinate, c0 is the low word.
- **Point at infinity:** (0 : 1 : 0).

## Dense MSM

### The PE (`msm_pe`)

One PE computes the bucket sums for one window. It is driven by commands:

- **ACCUM:**
  - The PE reads two scalars per cycle (the banks are dual-ported).
  - It extracts the W-bit digit at the window's offset.
  - It pushes the point's address into that digit's bucket queue, one queue of depth `D` per bucket.
  - If a queue cannot take the address, the fetch of that pair is repeated next cycle. This is a *stall*.
  - Each cycle `bucket_sched` picks a queue whose bucket is not already in the adder and issues `bucket + point`.
  - A *bubble* is a cycle in which the adder could accept but nothing was eligible.
  - A busy bit per bucket guarantees that a bucket has at most one addition in flight, so no hazard can occur.
- **REDUCE:** Runs the running-sum recursion `s_r += B_i; s_t += s_r` for i = 2^W-1 down to 1. It uses two dependent additions per bucket, so it takes `2 * LATENCY * (2^W - 1)` cycles. The result is `sum i*B_i`.
- **WINRED:** One Horner step of window reduction: `2^k * acc + window_sum`, made of k doublings and one addition.
- **CLEAR:** Empties a slot's buckets.

The three dispatch policies in `bucket_sched` are:

- **Round-robin:** the first eligible queue at or after a rotating pointer.
- **Max-r:** the longest eligible queue among r consecutive queues, with the pointer advancing by r.
- **Longest queue:** the longest eligible queue of all.

A balanced tournament tree finds the winner; ties go to the lower index.

### The core (`dense_msm_core`)

Scalars and points are stored in K_M banks: element e goes to bank e % K_M, row e / K_M. The core works in batches:

1. It loads up to PPW pairs.
2. Every PE processes the batch for each window it owns. There are ceil(254/W) windows, so each PE owns ceil(254/W)/K_M *slots*. For each slot the PEs run K_M *rounds*: in round j, PE i works on bank (i+j) % K_M through `msm_xbar`, a rotation crossbar.
3. After the batch that ends the MSM, each PE reduces its slots.
4. PE0 then chains the window sums from the most significant window down to the least.

Bucket sums stay on chip across batches, so an MSM of any length streams through the core once.

## Sparse MSM (`sparse_msm_core`)

Each incoming pair is classified:

| class | condition | action |
|---|---|---|
| drop | scalar 0 or Z = 0 | discarded |
| one | scalar 1 | point written to the ones buffer |
| other | anything else | forwarded to an internal `dense_msm_core` |

The ones buffer is a circular point memory. Whenever it holds two points, both are read, added by the core's own `ec_padd` and the sum is written back. This keeps the adder busy until a single point remains.

When the internal Pippenger engine finishes, its result goes into the same buffer. The last remaining point is the MSM result.

The same module serves G2 (`EXT=2`): points carry Fq2 coordinates and the adder latency is 55.

## NTT

### Constant geometry (`ntt_pe`)

Each stage of an n-point transform reads element pairs at the same positions and writes them to the same positions, so there is no per-stage address permutation:

- **DIF (forward).** Read x[k] and x[k + n/2], write y[2k] and y[2k+1]. The twiddle is w^((k >> s) << s) in stage s. After log2(n) stages the output is in bit-reversed order.
- **DIT (inverse).** Read x[2k] and x[2k+1], write y[k] and y[k + n/2]. The twiddle is w^((k >> (L-1-s)) << (L-1-s)), where L = log2(n). Its input is the bit-reversed output of the forward transform; its output is in natural order.

The price of a constant geometry is that stages are out of place. The PE has two memories of NMAX words, each split into U lanes; a stage reads one and writes the other. U butterflies process one row of U pairs per cycle, so a stage takes n/(2U) cycles plus the pipeline drain.

The twiddle table holds w^e for e < n/2. It is loaded by the host, and loading it with inverse roots turns the DIT pass into an inverse NTT.

### Element-wise unit (`ntt_ew`)

In Groth16 the transforms are followed by element-wise work:

- scaling by the coset generator powers;
- multiplying A by B;
- subtracting C;
- the four-step twiddle scaling.

`ntt_ew` sits on the output path and computes:

| `cfg_ew_op` | y_e |
|---|---|
| `EW_PASS` | x_e · g_e |
| `EW_MUL`  | x_e · op_e · g_e |
| `EW_SUB`  | (op_e − x_e) · g_e |

Here g_e = g0 · q^e. The operand `op` is a vector held in an operand memory, written either by the host or by a previous transform (`cfg_op_store`).

The sequence g_e is generated on chip:

- Each lane keeps four running products. Four covers the multiplier latency, so every multiplier is fed every cycle.
- The host loads the starting values g0·q^(kU+l) and the step q^(4U).
- Taking g0 = 1/n and q = 1 gives the inverse-NTT scale; other values give coset shifts and four-step twiddles.

Generating these sequences on chip removes most of the operand traffic from memory. Only A(x), which is multiplied with B(x), and A(x)B(x), from which C(x) is subtracted, must be real vectors. Both can stay in the operand memory: the PE writes them there itself with `cfg_op_store`.

### Usage

1. Pulse `start` with the `cfg_*` inputs.
2. Stream n/U rows in (`in_valid`). A row holds U consecutive elements.
3. The PE runs log2(n) stages. `ev_stage` pulses after each.
4. The PE streams n/U rows out (`out_valid`).

The transform length must satisfy 2U ≤ n ≤ NMAX. In the top, the K_N PEs share configuration and tables and have their own data streams, because in a four-step NTT each PE transforms a separate column or row.

## What is outside

These parts are not RTL here:

- The DRAM (HBM/DDR) and its fetch, prefetch and write-back engines. This includes the transposed write-back of the four-step algorithm.
- The sequencing of the four-step (I)NTT and of the Groth16 polynomial schedule.
- Assembling the MSM results into a proof.

In the top they appear as ports:

- valid/ready input streams for each MSM core;
- data and table inputs for each NTT PE;
- result outputs for every core.

## Differences from the architecture as described

- **Window reduction.** It runs on PE0 alone, as one Horner chain. The original spreads the doublings across the PEs. The result is the same, but the chain is longer.
- **Sparse core order.** The ones folding and the Pippenger part of a sparse MSM run at the same time, instead of one after the other.
- **No double buffering or overlap.**
  - MSM point memories are not double-buffered: loading and computing alternate.
  - The NTT PE does not overlap loading, computing and unloading of consecutive transforms.
- **Adder implementation.** The adder's multiplier counts per II come from the folding rule above, not from a reference implementation. Its latencies (30 and 55) are matched exactly.
- **Assumed parameters.** Queue depth (D = 32), the Max-r window (r = 8), and every handshake and encoding are this design's own choices.

## Verification

Each testbench checks against references written independently of the RTL, in `tb/tb_ec_ref.sv`:

- plain modular arithmetic;
- affine point arithmetic in Fq and Fq2;
- a direct O(n^2) DFT.

| testbench | what it covers |
|---|---|
| `tb_ec_padd` | G1 and G2 adders at II = 1 and II = 4 against affine arithmetic, including doubling, P + O and P + (−P). Checks the exact latency and the II spacing. |
| `tb_msm_pe` | One PE under each dispatch policy, with shallow queues so that stalls occur. Checks the bucket sums after reduction and the reduction cycle count 2·t_add·(2^W − 1). |
| `tb_dense_msm_core` | 4 PEs and two MSMs, one of them spanning two batches. Requires more than one batch and at least one queue stall. |
| `tb_sparse_msm_core` | G1 and G2 sparse cores side by side, with mixed 0/1/other scalars and points at infinity. |
| `tb_ntt_pe` | n = 16 and 32 with 2 butterflies: forward, inverse (scaled and stored as operand), multiply and subtract modes. Checks the stage count. |
| `tb_szkp_top` | All four engines at reduced size (bucket queues 2 deep), running at the same time. Counts every mechanism: NTT stages, DIF/DIT, the three element-wise modes, dense stalls, bubbles and batches, and sparse drops, ones, Pippenger pairs and folds. Fails if any of them never occurred. |

Simulate with plain verilator, for example:

```
verilator --binary --timing -Wno-fatal --top-module tb_ntt_pe -y rtl -y tb +libext+.sv \
  -Irtl -Itb rtl/szkp_pkg.sv tb/tb_ec_ref.sv tb/tb_ntt_pe.sv && obj_dir/Vtb_ntt_pe
```

Every testbench prints `TB_RESULT checks=N failures=M`.

**Ready depends on the offered pair.** The sparse core's `ld_ready` depends on the class of the pair it is offered, because a scalar-1 pair needs room in the ones buffer and a Pippenger pair needs the engine to be loading. A driver must therefore let `ld_ready` settle after changing the pair before it samples it. The testbenches drive on the falling edge and sample a moment later.

**Full-size simulation.** There is no testbench at the default (full) parameters. The largest configurations simulated are the reduced ones in the table above (for the top: 2 NTT PEs with 2 butterflies, 4/2/1 MSM PEs, 16-bit scalars). At full size, one dense MSM alone needs on the order of 10^5 cycles of reductions. That is beyond what a simulation run of a few minutes covers at the simulator's speed for this design.
