# A 3D-stacked systolic array for GEMM: distributed output-stationary RTL

A planar systolic array multiplies `C = A(M x K) * B(K x N)` by spreading two of
the three loop dimensions over its rows and columns and running the third in
time. With the output-stationary (OS) mapping, M and N are spatial and the inner
dimension K is temporal: each MAC keeps one output element and accumulates K
products into it. For layers with a long K (language models, large
convolutions unrolled to GEMM) the K cycles dominate the runtime.

This design stacks `L` identical tiers of `R x C` OS arrays, as in a 3D IC, and
links every MAC to the MAC directly below it. K is split into `L` slices, one
per tier. All tiers accumulate their slice in parallel, and then every vertical
*pile* of MACs adds its partial sums from the top tier down to the bottom tier.
The bottom tier then holds the finished output block and shifts it out. The
scheme is called *distributed output stationary* (dOS). It turns
`K` cycles of accumulation into `ceil(K/L)` cycles plus `L-1` cycles of
reduction across tiers.

The default configuration is 3 tiers of 128 x 128 MACs (16384 MACs per
tier, 49152 in all), with 8-bit signed operands and 16-bit results.

## Block map

```
             host write ports (A, B)                host read port (C)
                 |                                        ^
   per tier t:   v                                        |
   +-----------------+   +-----------------+     +-------------------+
   | A scratchpad t  |   | B scratchpad t  |     | output scratchpad |  (bottom tier)
   +--------+--------+   +--------+--------+     +---------^---------+
            |   tier_feeder t     |                        | one row / cycle
            +----------+----------+                        |
                       | skewed west (A + token) / north (B) edges
                       v                                   |
   dos_array3d:  tier 0 (top)   R x C dos_mac ---+         |
                   | psum (one link per MAC)     |  dos_tier each
                 tier 1         R x C dos_mac    |         |
                   | psum                        |         |
                 tier L-1 (bottom) R x C ---- drain ------+
                       ^
   dos_controller: fold loop, fold_start, base addresses, KT, drain, out address
```

| file | role |
|---|---|
| `rtl/dos_pkg.sv` | operand/accumulator types and the control token |
| `rtl/dos_mac.sv` | one MAC, with the MUX that feeds the adder either the product or the partial sum from above |
| `rtl/dos_tier.sv` | one tier: an R x C OS systolic array with a drain path down the columns |
| `rtl/dos_array3d.sv` | L tiers and the vertical links between them |
| `rtl/skew_line.sv` | fixed delay line (operand skew, per-tier start offset) |
| `rtl/tier_feeder.sv` | reads a tier's scratchpads for one fold and drives the tier's edges |
| `rtl/scratchpad_sram.sv` | two-port memory used for all scratchpads |
| `rtl/dos_controller.sv` | fold sequencer, drain and output addressing, capacity check |
| `rtl/accel3d_top.sv` | the accelerator |

## The MAC and its three operations

Each MAC registers the west operand `a` and passes it east. It registers the
north operand `b` and passes it south. A three-bit token (`valid`, `first`,
`vadd`) moves with `a`, one MAC per cycle. The token tells the MAC what to do
with its single adder in that cycle:

| condition | accumulator update |
|---|---|
| `valid` and `first` | `acc <= a*b` (first product of a fold) |
| `valid` | `acc <= acc + a*b` (in-place reduction) |
| `vadd` | `acc <= acc + psum_up` (cross-tier reduction) |
| `drain` (bottom tier only) | `acc <= acc_north` (shift one row south) |

Compared with a 2D OS MAC, the 3D version adds three things: the MUX in front
of the adder (product or `psum_up`), the `vadd` control, and the vertical
`psum_up` link. `psum_up` is the registered accumulator of the MAC directly
above. The top tier's `psum_up` is tied to zero, and the top tier never
receives `vadd`.

## One fold, cycle by cycle

This is the part that takes the most care. A *fold* computes one `R x C` block
of C. Count cycles from the fold's `fold_start` at cycle `F`, and let
`KT = ceil(K/L)`.

* **Per-tier offset.** Tier `t`'s feeder starts `t` cycles after `F`, so the
  tiers start one cycle apart. Each feeder reads one word from each of its two
  scratchpads per cycle for `KT` cycles. The first read happens at `F+t`.
* **Diagonal skew.** Row `r` and column `c` of the edge are delayed by `r` and
  `c` cycles. Product `s` of MAC `(r,c)` in tier `t` therefore happens at
  `F + 1 + t + r + c + s`, for `s = 0 .. KT-1`.
* **Cross-tier reduction.** One cycle after its last operand, a tier below the
  top sends a `vadd` token along each row. It reaches MAC `(r,c)` of tier `t`
  at `F + 1 + t + r + c + KT`. At that moment the MAC above has finished its
  own work: that MAC's `vadd` came one cycle earlier, or, in the top tier, its
  last product did. The one-cycle offset between tiers is what makes this
  local token scheme work. No MAC needs a global schedule.
* **Drain.** The bottom-right MAC of the bottom tier is final after cycle
  `F + R + C + KT + L - 2` (for `L > 1`). From the next cycle, `drain` is high
  for `R` cycles. Each cycle the bottom row leaves the array and is written to
  the output scratchpad, bottom row first. Zeros shift in from the top.
* **Next fold.** The next fold's first scratchpad read shares the last drain
  cycle. So the fold period is

  ```
  P = 2R + C + KT + L - 2      (L > 1)
  P = 2R + C + K - 2           (L = 1, the 2D case)
  ```

  A GEMM takes `ceil(M/R) * ceil(N/C)` folds. `done` rises `folds * P + 2`
  cycles after the cycle in which `start` was sampled.

The analytical model this architecture comes from gives
`2R + C + (K/L + L - 1) - 2` per fold. For `L > 1` the RTL takes exactly one
cycle more. The cause is the one-cycle per-tier feed offset: a tier's own last
product and its vertical add fall in consecutive cycles instead of
overlapping. For `L = 1` the RTL matches the 2D model exactly.

## Data layout and the host interface

The memory controller that would fill the scratchpads from DRAM is not part of
this design. Its side is exposed as host ports. Before `start`, the host writes
the operands in the following layout, with `KT = ceil(K/L)`. Any element whose
index lies outside the matrix must be written as zero.

* **A scratchpad of tier `t`**, word `mf*KT + s`: lane `r` holds
  `A(mf*R + r, t*KT + s)`. One word is one column of an `R`-row block of A,
  restricted to tier `t`'s K slice.
* **B scratchpad of tier `t`**, word `nf*KT + s`: lane `c` holds
  `B(t*KT + s, nf*C + c)`.
* **Output scratchpad**, word `(mf*ceil(N/C) + nf)*R + r`: lane `c` holds
  `C(mf*R + r, nf*C + c)`, modulo 2^16. A read returns the word one cycle after
  `o_re`.

Writes to the scratchpads while `busy` is high are flagged by an assertion.
The controller refuses a GEMM with `done` and `err` in the same cycle, and runs
nothing, if:

* a dimension is zero,
* `ceil(M/R)*KT > A_DEPTH`,
* `ceil(N/C)*KT > B_DEPTH`, or
* `ceil(M/R)*ceil(N/C)*R > O_DEPTH`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `L` | 3 | tiers |
| `R`, `C` | 128, 128 | rows and columns per tier |
| `A_DEPTH`, `B_DEPTH` | 2048 | words per A / B scratchpad (per tier) |
| `O_DEPTH` | 1024 | words of the output scratchpad |
| `DW` | 16 | width of `m`, `n`, `k` |
| `DATA_W`, `ACC_W` (package) | 8, 16 | operand and result widths |

The tier count, array size and data widths follow the configuration used for
the power and thermal analysis of this architecture. That analysis used
3 tiers and 16384 MACs per tier. The square 128 x 128 shape is an assumption,
because only the MAC count is given. The scratchpad organisation and sizes are
this design's own choices: the architecture leaves the scratchpad out of scope.

With the defaults, the `M = N = 128, K = 300` workload of the power study
fits. So does the ResNet-50 layer with `M = 512, K = 784, N = 128` (4 folds of
`KT = 262`). Most of the other large GEMM layers used to motivate the design
(GNMT, DeepBench, Transformer) need more scratchpad than this. A host must
split such a layer into passes that fit. Passes over K must then be summed by
the host, because the array does not accumulate across passes.

## Where this RTL departs from, or adds to, the source architecture

* Fold period is one cycle above the analytical model for `L > 1` (see above).
* A enters from the left and B from the top, as in the dataflow description.
  The overview drawing of the architecture labels the two input memories the
  other way round.
* Operands are treated as signed two's-complement. The 16-bit accumulator
  wraps on overflow. A dot product of 8-bit values over hundreds of terms can
  exceed 16 bits, so results are exact only when they fit.
* The control token, the drain by column shift, the first-product clear, the
  scratchpad layout, the host ports and the capacity check are this design's
  choices.
* Per-tier dedicated scratchpads are used, one of the two options considered
  for the architecture. The output scratchpad sits on the bottom tier.
* The vertical links are plain 16-bit wires in the RTL. Whether they are
  built as TSVs or MIVs is a physical-design choice that does not change the
  logic. One link is provided per MAC pair, the worst case the architecture
  assumes.
* Drain and the next fold's compute do not overlap, so each fold pays the
  full fill and drain time, as the model assumes.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=F`.

| testbench | what it checks |
|---|---|
| `tb_dos_mac` | 400 random token and drain cycles against a reference model, forwarding delay, wrap-around |
| `tb_dos_tier` | a 4 x 3 tier: accumulators after `R-1+C-1+K` cycles, one vertical add, drain order, empty after drain |
| `tb_dos_array3d` | 3 tiers of 4 x 5: full dOS schedule driven by the testbench, two back-to-back GEMMs, outputs at the exact drain cycle |
| `tb_tier_feeder` | every edge value in every cycle of two folds for tier 2, including the `vadd` token |
| `tb_scratchpad_sram` | random reads and writes, one-cycle latency, read-before-write, hold while idle |
| `tb_dos_controller` | fold period, base addresses, drain timing and addresses, `done` latency, refusals; 3-tier and 1-tier instances |
| `tb_accel3d_top` | 3 tiers of 4 x 4: four random GEMMs with several folds, partial folds, padded K and `K < L`, cycle counts, all outputs, one refused workload; counts each mechanism |
| `tb_accel3d_workloads` | 3 tiers of 32 x 32: the whole ResNet-50 layer `M = 512, K = 784, N = 128` (64 folds) and the `M = N = 128, K = 300` layer (16 folds), every output and the cycle count |

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/dos_pkg.sv tb/tb_accel3d_top.sv \
          --top-module tb_accel3d_top -o sim && ./obj_dir/sim
```

The small testbenches build and run in seconds; `tb_accel3d_workloads`
(3 x 32 x 32, about 3k MACs) takes about two minutes, which is the largest
size simulated. At the default size the design has about 49k MACs. Verilator
lints it in about eight minutes, but a simulation build produces several
hundred C++ files and did not complete within ten minutes, so no testbench
runs the default configuration. Scale `L`, `R` and `C` to explore.
