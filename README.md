# A bucket-method MSM engine built around one fully pipelined point adder

This is synthesizable SystemVerilog for a multi-scalar-multiplication (MSM) accelerator. An MSM is the operation

    R = s_1*P_1 + s_2*P_2 + ... + s_m*P_m

over the group of an elliptic curve. Here the s_i are large integers and the P_i are curve points. MSM takes most of the run time of a zk-SNARK prover, and the BN128 and BLS12-381 curves are the usual targets. The design follows the published architecture of an FPGA MSM accelerator, "if-ZKP". Its default configuration is the BLS12-381 build with two bucket managers (scaling factor S = 2).

The whole engine rests on one idea. There is exactly one point processor, the *Unified Double-Add* pipeline (UDA). It accepts a new point addition every clock, doubles automatically when both inputs are the same point, and returns its result 270 clocks later. Every block that needs a point addition shares it through a tag-routed arbiter:

- the bucket managers;
- the recursive bucket stage;
- the final double-and-add unit.

The rest of the design exists to keep that pipeline busy with independent additions and to put the results back together.

## 1. The arithmetic being implemented

**Bucket (Pippenger) method.**
- Each scalar is cut into `NUM_WINDOWS` windows of `K = WINDOW_BITS` bits: s = sum_j 2^(K*j) * s_ij.
- For each window j, every point is added into bucket `B_j[s_ij]`. An index of 0 is dropped.
- The window's contribution is then W_j = sum_b b * B_j[b].
- The result is R = sum_j 2^(K*j) * W_j.

With K = 12 there are 32 windows for 381-bit scalars and 22 for 254-bit scalars. That gives one bucket addition per point per window, which matches the operation counts the architecture is sized for.

**Recursive reduction (IS-RBAM).**
- The expensive part of W_j = sum_b b*B_j[b] is itself an MSM, with 4095 points and 12-bit scalars b.
- So it is run as a second, small bucket MSM. The index b is split into `NUM_RBAM` = 4 digits of `RBAM_BITS` = 3 bits: b = sum_r d_r 8^r.
- RBAM r accumulates R_r[d_r] += B_j[b].
- Then W_j = sum_r 8^r * sum_c c * R_r[c].

**Bit collection and one double-and-add (DNA).**
- An RBAM bucket (window j, RBAM r, digit c, point R) stands for c * 2^(K*j + 3r) * R.
- For every set bit t of c, the DNA adds R into the collector C[K*j + 3r + t].
- At the end, R = sum_u 2^u * C[u] over u = 0 .. 383.
- One Horner pass computes this: A = 2A + C[u], from the top position down.

All of these are point additions or doublings, so all of them go to the UDA.

## 2. The Unified Double-Add pipeline (`uda.sv`)

This is the hardest block to understand and the one that decides throughput.

**Coordinates and format.**
- Points are in Jacobian coordinates (X, Y, Z), where x = X/Z^2 and y = Y/Z^3.
- The curves have a = 0.
- Field elements are 381-bit integers in standard form (not Montgomery), fully reduced below p.
- Z = 0 is the point at infinity O.

**Structure.** Every box in the list below is a pipelined modular unit. A *band* is a set of units working on the same clock.

```
 addition front end (4 bands)            doubling front end (parallel)
  Z1^2, Z1*Z2, Z2^2                        X1^2, 2*Y1, X1+X1
  Z1^3, U2=X2*Z1^2, U1=X1*Z2^2, Z2^3       2*X1^2
  S2=Y2*Z1^3, S1=Y1*Z2^3, H=U2-U1, SX=U1+U2  3*X1^2
  R = S2-S1
        \                                   /
         join multiplexer: take the doubling set if H == 0 and R == 0
                                |
 fused back end (5 bands), common to both operations
  R^2, H^2, Z3 = ZZ*H
  H^3, H^2*SX, H^2*U1
  X3 = R^2 - H^2*SX,  T = H^2*U1 - X3,  H^3*S1
  R*T
  Y3 = R*T - H^3*S1
```

**How the two front ends meet.**
- Both front ends deliver the same six quantities (R, H, ZZ, SX, U1, S1). The doubling end delivers R = 3X1^2, H = 2Y1, ZZ = Z1, SX = 2X1, U1 = X1 and S1 = Y1.
- So one back end serves both, and the X3 and Y3 formulas need no case split.
- The join multiplexer's test (H = 0 and R = 0) is exactly "p1 = p2".
- P + (-P) gives H = 0 with R != 0. The back end then produces Z3 = 0, which is the correct result O, with no extra logic.

**Multiplier count.** The pipeline uses 18 modular multipliers:
- 9 in the addition front end;
- 1 in the doubling front end;
- 8 in the back end.

**Latency.**
- A band that contains a multiplier takes `MUL_LAT` clocks. A band with only adders takes `ADD_LAT`.
- The join and the output register take one clock each.
- So LATENCY = 7*MUL_LAT + 2*ADD_LAT + 2. With MUL_LAT = 38 and ADD_LAT = 1 that is 270 clocks.
- Operands that later bands need are carried forward in delay lines (`pipe_delay`).
- The input valid and a tag (16 bits here) travel with each operation.

**Infinity.**
- If either input has Z = 0, the formulas above would give a wrong answer.
- So both inputs ride along the pipeline. If one of them is O, the other is returned.
- The strobes `out_was_dbl` and `out_inf_bypass` report which path was used.

**Field units.**
- `mod_mul` computes a*b mod p and returns it `LAT` clocks later.
- `mod_addsub` computes a+b, a-b or 2a with one conditional correction.
- In this RTL the multiplier's reduction is written as a behavioural `%` followed by a register chain. That is exact and synthesizable, but it is not an efficient FPGA implementation.
- The multiplier architecture the published design relies on is taken from separate work and is not reproduced here. A real build replaces the body of `mod_mul` and keeps its interface and `LAT`.

## 3. Feeding the pipeline without hazards (`bam.sv`)

A bucket manager holds 2^K buckets of 1143 bits, with one valid bit and one pending bit per bucket.

For each incoming (index, point):
- **Index 0** is accepted and dropped.
- **Empty bucket (bypass):** the point is written directly, with no addition. This is not allowed in a clock where a UDA result is being written back, because the memory has one write port.
- **Full bucket, not pending:** the bucket and the point go to the UDA as one request, with the bucket index in the tag. The pending bit is set.
- **Pending bucket (conflict):** its previous sum is still inside the 270-stage pipeline, so the input stalls until that result has been written back.

Results come back with their tag, are written into the bucket, and clear its pending bit.

Draining:
- Draining visits buckets 1 .. 2^K-1 at one per clock.
- It emits each valid bucket and clears it, then pulses `drain_done`.
- It may start only when nothing is in flight (`busy` low). An assertion checks this.

The same module with K = 3 is the RBAM.

## 4. The top level (`if_zkp_msm.sv`)

```
 memory ch. X ─┐
 memory ch. Y ─┼─ SPS ──fork──> BAM 0 ─┐            ┌──> IS-RBAM (4 RBAMs) ──> DNA ──> result
 memory ch. s ─┘          └───> BAM 1 ─┴─ SPS' ─────┘
                         all point additions ──> arbiter ──> UDA ──> routed back by tag
```

**SPS (`sps.sv`), the scalar-point stream.**
- It issues reads on three memory channels: X, Y and the scalar. Word i of each channel belongs to point i.
- It has per-channel credits, so its 8-deep FIFOs never overflow.
- Each point is given Z = 1 and offered to both BAMs at once.
- BAM b receives the slice of window `pass*NUM_BAM + b`.
- The point leaves the head of the stream only when every BAM has taken it. Each BAM's acceptance is remembered separately.

**Passes.**
- One pass fills two windows, so the 32 windows take `NUM_PASSES` = 16 passes.
- Every pass re-reads all points.
- `msm_ctrl.sv` sequences each pass: fill, wait for the BAMs' in-flight sums, then drain. At the end it runs the DNA's final pass.

**SPS' (`sps_bucket.sv`), the second stream.**
- After a fill pass it drains BAM 0, then BAM 1, into the IS-RBAM.
- For each one it waits until the IS-RBAM has no sums in flight.
- It then drains the IS-RBAM into the DNA, telling the DNA which window the RBAM buckets belong to.

**IS-RBAM (`is_rbam.sv`).**
- It offers each (b, B[b]) to its four RBAMs together. Each RBAM takes its own digit.
- The RBAMs share a single UDA port through an internal arbiter. The number of RBAMs can therefore change without affecting anything outside the block.

**DNA (`dna.sv`).**
- It has 384 collectors, with the same bypass and conflict rules as a BAM, and processes one set bit per clock.
- The final pass is sequential: each doubling and each addition waits for its own result. It takes about 2 × 270 clocks per bit position, roughly 0.2 M clocks in total.

**Arbiter (`uda_arbiter.sv`).**
- Priority is fixed: DNA first, then IS-RBAM, then BAM 0, then BAM 1. The blocks nearer the end of the computation come first, so a drain is never starved by a fill.
- The arbiter writes the client number into the tag bits 13..15. Each result is delivered to its client in the clock it leaves the UDA, and every client must accept it.
- The UDA never stalls.

**Events.** The `events` port has one strobe per mechanism:
- arbiter contention;
- UDA doubling;
- UDA infinity bypass;
- conflict and bypass in the BAMs, the RBAMs and the DNA;
- DNA doubling.

## 5. Interfaces and timing

| Port | Meaning |
|---|---|
| `start`, `num_points[31:0]` | Pulse `start` to begin an MSM over points 0 .. num_points-1. The memory must already hold them. |
| `done`, `busy` | `done` pulses once `result` is valid. `result` holds its value until the next start. |
| `result` (`point_t`) | Jacobian X, Y, Z. Z = 0 means O. The host converts to affine with x = X/Z^2, y = Y/Z^3. |
| `rd_read[c]`, `rd_addr[c]`, `rd_waitreq[c]`, `rd_rvalid[c]`, `rd_rdata[c]` | Three Avalon-MM-style read masters: c = 0 is X, c = 1 is Y, c = 2 is the scalar. There is one 381-bit word per element, and read data returns in order. Each channel has up to 8 reads outstanding, the depth of its FIFO. |
| `events` (`msm_events_t`) | Mechanism strobes, for counters. |

Reset is asynchronous and active low. It clears only control state and valid bits. Data registers and memories are not reset.

**Run time.** An MSM of m points has two parts.

*Fill (proportional to m).*
- The UDA takes one operation per clock, and each point costs one operation per window.
- Two windows are filled per pass, so the fill takes about 2*m clocks per pass, or 32*m clocks in all.
- At the ~350 MHz the published BLS12-381 build reached, 64 M points take about 5.9 s. That is an estimate, not a measurement.

*Fixed cost per window (independent of m once the buckets are full).*
- The recursive stage is the limit.
- Each RBAM has only 7 usable buckets, and a bucket cannot take its next addition until the previous one has gone through the 270-clock pipeline.
- Also, a bucket pair enters all four RBAMs together, so one busy RBAM bucket holds up the others.
- In practice only about two pairs go into the IS-RBAM per pipeline latency. Each window therefore costs roughly (non-empty buckets / 2) × 270 clocks.
- For small MSMs this dominates. In simulation, 200 points took 1.8 M clocks, and 1,000 points needed more than 4 M clocks (over 11 ms at 350 MHz).
- For tens of millions of points it is negligible.
- A per-RBAM input FIFO, or more RBAM buckets, would reduce this cost. Neither is implemented.

## 6. Parameters

| Parameter | Default | Where it comes from |
|---|---|---|
| `MODULUS` | BLS12-381 p | Curve of the main configuration. Set it to `P_BN128` for BN128, on the same 381-bit datapath. |
| `SCALAR_BITS` | 381 | The published design uses scalars as wide as the field (254 / 381). BLS12-381's group order actually fits in 255 bits, so 381 is conservative. |
| `WINDOW_BITS` | 12 | Implied by the published operation counts (22 windows for 254 bits, 32 for 381). |
| `NUM_BAM` | 2 | Scaling factor S = 2 of the main build. |
| `RBAM_BITS` | 3 | 4 RBAMs × 3 bits cover a 12-bit bucket index. This design's choice. |
| `MUL_LAT`, `ADD_LAT` | 38, 1 | Chosen so that the UDA has the published latency of 270 clocks. |
| `AW` | 32 | Word address width per memory channel. |

## 7. Where this RTL departs from, or goes beyond, the published design

- **Modular multiplier:** behavioural remainder, not the FPGA-optimised LUT/M20K reduction. This changes resources and fmax only.
- **Value range:** values are kept fully reduced below p, rather than in the wider [0, 2p) range the original add/subtract units allow.
- **Infinity:** handled by carrying the inputs along the pipeline. The published description does not cover it.
- **Scaling factor S:** interpreted as the number of BAMs, each taking a different window of the same point stream. The published text says only that BAMs are replicated and that fork and join have fixed priority.
- **Memory layout:** three channels (X, Y, scalar) with one 381-bit word per element. The host-side layout and bank splitting of the original are not specified.
- **Passes:** run one after another. Fill of pass n+1 does not overlap drain of pass n.
- **Small MSMs:** the IS-RBAM sizes chosen here (4 RBAMs of 8 buckets, fed in lockstep) make the fixed cost per window latency-bound. Small MSMs are therefore slower than the published measurements (see Run time).
- **DNA:** bit-collector organisation and a single sequential Horner pass.
- **Not modelled:** the PCIe/oneAPI shell, the result store unit and the DDR controllers. The top exposes start/done/result and the read masters instead.
- **BN128:** one parameter change on the 381-bit datapath, not a separate 254-bit datapath.

## 8. Verification

Each block has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=N failures=M` and has a cycle watchdog. The expected values come from an independent affine-coordinate model, `tb/ec_ref_pkg.sv`, which uses field inversion and double-and-add scalar multiplication.

| Testbench | What it covers |
|---|---|
| `tb_mod_mul`, `tb_mod_addsub` | Random and edge operands, and the exact latency. |
| `tb_uda` | Add, double, P + (-P) and O inputs. Checks the 270-clock latency and back-to-back issue. |
| `tb_bam` | A 4-bit BAM on a real (short-latency) UDA, with heavy conflicts. |
| `tb_uda_arbiter` | Grant, priority and routing by tag. |
| `tb_sps` | Against `tb/ddr_model.sv`, which has random waitrequest and variable latency. |
| `tb_sps_bucket`, `tb_is_rbam`, `tb_dna`, `tb_msm_ctrl` | Block-level behaviour. |
| `tb_if_zkp_msm` | End to end at reduced size (18-bit scalars, 6-bit windows, 3-bit RBAM digits, MUL_LAT 3). Runs two MSMs and checks each result against the reference. Counts every mechanism strobe and fails if any never fired. |
| `tb_if_zkp_msm_workload` | Every parameter at its default. An MSM of 200 BLS12-381 points with 381-bit scalars, a cut-down version of the smallest published workload (1,000 points). The points are multiples of the generator, so the reference needs only one scalar multiplication. It also checks the clock count against the published 1,000-point time. |
| `tb_if_zkp_msm_full` | The top with every parameter at its default: BLS12-381, 381-bit scalars, 270-clock UDA. Runs an MSM of 4 random points and compares with the reference. |

Simulate with plain Verilator. List the two packages first, and let `-y` find the modules by file name:

```
verilator --binary --timing --assert -y rtl -y tb rtl/zkp_pkg.sv tb/ec_ref_pkg.sv \
    tb/tb_if_zkp_msm.sv --top-module tb_if_zkp_msm
./obj_dir/Vtb_if_zkp_msm
```

Replace the testbench name to run any of the others. The reduced end-to-end test builds in about a minute and runs in under two seconds.

The full-size test takes a few minutes, most of it compilation.

**Lint notes:**
- Verilator reports `SYNCASYNCNET` on `rst_n`. The reset is used asynchronously in the flops and synchronously in `disable iff` of the assertions.
- Unconnected status outputs (`active`, `contention`, `full`) are left open on purpose.
