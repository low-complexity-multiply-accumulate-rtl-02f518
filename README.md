# PASM: a multiplier-free accumulate stage for weight-sharing CNN accelerators

In a weight-shared convolutional network every weight is replaced by a short
index (typically 4 bits) into a small table of shared weight values (typically
16). A conventional accelerator still multiplies each image value by its
looked-up weight. This design removes the multiplier from the inner loop. It
uses the identity

    sum_t  x[t] * W[idx[t]]   =   sum_k  W[k] * ( sum_{t : idx[t] = k}  x[t] )

Phase 1 only adds: each image value `x[t]` is added into bin `idx[t]` of a small
register file. Phase 2 multiplies each of the `b` bins once by its shared weight
and accumulates the products. Phase 2 needs `b` multiplications per dot product,
not one per input. A single multiplier can therefore serve several
accumulate-only units.

The accumulate-only unit is the **PAS** (Parallel Accumulate and Store). A
group of PAS units together with the MAC they share is a **PASM**
(Parallel-Accumulate-Shared-MAC). The RTL here builds the 16-PAS-4-MAC
accelerator:

- Each cycle it takes 4 image values and 4 weight indices.
- 16 PAS units together do the work of 16 weight-shared MACs per cycle.
- 4 post-pass MACs finish the dot products.

## Worked example

The example below uses 4 bins and one PAS unit. It is scaled by 10 in the
testbenches, so it runs in integers.

| step | image | bin index | bins after the step |
|------|-------|-----------|---------------------|
| 1    | 26.7  | 0         | 26.7, 0, 0, 0       |
| 2    | 3.4   | 1         | 26.7, 3.4, 0, 0     |
| 3    | 4.8   | 2         | 26.7, 3.4, 4.8, 0   |
| 4    | 17.7  | 3         | 26.7, 3.4, 4.8, 17.7|
| 5    | 6.1   | 0         | 32.8, 3.4, 4.8, 17.7|

Shared weights 1.7, 0.4, 1.3, 2.0 then give
32.8·1.7 + 3.4·0.4 + 4.8·1.3 + 17.7·2.0 = 98.76. A direct MAC gets the same
value from five multiplications.

## Organisation of the 16-PAS-4-MAC accelerator

```
 image[0..3] ──┬───────────────────────────────────────────┐
 bin_index[0..3] ─┐                                        │
                  ▼                                        ▼
          PAS 0  PAS 1  PAS 2  PAS 3      (image lane 0, index lanes 0..3)
          PAS 4  PAS 5  PAS 6  PAS 7      (image lane 1)
          PAS 8  PAS 9  PAS 10 PAS 11     (image lane 2)
          PAS 12 PAS 13 PAS 14 PAS 15     (image lane 3)
            │  one row per MAC, group select picks the column
            ▼
   MAC 0   MAC 1   MAC 2   MAC 3  ◄── weight = weight_regfile[bin_sel]
     │       │       │       │
   res[0]  res[1]  res[2]  res[3]   + res_valid, res_grp
```

- PAS unit `p = 4*i + j` adds `image[i]` into its bin `bin_index[j]`. One
  reading of this: image lane `i` is one output pixel position and index lane
  `j` is one kernel (output channel). PAS `p` then forms the dot product of
  pixel `i` with kernel `j`. All 16 pairings are made every cycle.
- MAC `m` serves the four PAS units `4m .. 4m+3` one after another. In each
  *group* `g` (0..3) it reads PAS `4m+g`, bin by bin.
- All four MACs run in lock-step on the same bin number. They need the same
  shared weight in the same cycle, so one weight register file with one read
  port is enough. All lanes use one shared-weight table, i.e. one codebook per
  layer.

## Phases and timing

`pasm_ctrl` sequences the work in two phases.

**Phase 1 (accumulate).**
- One set of 4 images and 4 indices is accepted per cycle (`in_valid` and
  `in_ready`). The producer may leave gaps.
- The first beat after idle clears all bins of every PAS unit and loads the one
  it addresses, so there is no separate clear cycle.
- The beat flagged `in_last` ends the phase.

**Phase 2 (multiply).**
- The bin counter runs 0..b-1 inside the group counter 0..3. That is
  4 × 16 = 64 cycles with the defaults.
- The bin counter addresses both the PAS read ports and the weight file. The
  group counter drives the multiplexer in front of each MAC.
- A MAC *loads* the product for bin 0 and *adds* the products for the other
  bins.
- `in_ready` is low during this phase, so a beat offered now stalls.

**Results.**
- `res_valid` is high for one cycle after the last bin of each group.
- `res[m]` then holds the dot product of PAS `4m + res_grp`.
- `done` marks group 3.

```
cycle:      0 .. n-1        n .. n+15   n+16 .. n+31   ...  n+48 .. n+63   n+64
phase:      accumulate      grp 0       grp 1               grp 3
in_ready:   1               0 ..................................... 0      1
res_valid:                              ^grp 0 (at n+16)    ^grp 2          ^grp 3 + done
```

- With `n` gapless input beats, the last results appear `n + 4b` cycles after
  the first beat. A single PAS-plus-MAC pair takes `n + b` cycles. Here each MAC
  serves four PAS units, hence `4b`.
- A new operation can start in the cycle the last results appear. Phase 2 of
  one operation does not overlap with phase 1 of the next.

## Number formats and overflow

This is the part that needs the most care when you use the design.

- Image values, weights and bins are `W`-bit signed two's complement (default
  32). Products and MAC results are `2W` bits. These are plain integers. For
  fixed point, the result has the sum of the image and weight fraction bits.
- **The bins are only `W` bits wide.** They wrap on overflow, and so does the
  `2W`-bit MAC register.
  - A bin holds the sum of up to `n` image values. It needs about
    `W_image + ceil(log2 n)` bits.
  - For results equal to a direct MAC, keep image values that narrow. Example:
    with 16-bit images on the 32-bit datapath, even a 7×7×512 dot product
    (25088 inputs) fits.
  - With full-width random data a bin can overflow. The result is then the
    exact wrapped value of the datapath described here, not the true dot
    product.
  - Widening the bins means changing `pas_unit` and the MAC's `a` operand. It is
    not a parameter.
- Reset (asynchronous, active low) clears the bins, the weight table, the MAC
  registers and the controller.

## Modules

| file | role |
|------|------|
| `rtl/pasm_pkg.sv` | default sizes, controller state type |
| `rtl/weight_regfile.sv` | `b` × `W` shared-weight table: load port and one combinational read port |
| `rtl/pas_unit.sv` | PAS unit: `b` × `W` bins, accumulate port and combinational read port |
| `rtl/shared_mac.sv` | `W`×`W` signed multiplier, `2W` adder and result register |
| `rtl/pasm_ctrl.sv` | phase sequencer, input stall, bin and group counters, result strobes |
| `rtl/pasm_accel.sv` | top: 16 PAS, 4 MACs, weight table, controller |

### Top-level ports (`pasm_accel`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `w_we`, `w_addr`, `w_data` | in | 1, WCI, W | write one shared weight per cycle. Do not write during phase 2. |
| `in_valid`, `in_last`, `in_ready` | in, in, out | 1 | input handshake. A beat is taken when `in_valid && in_ready`. |
| `image` | in | 4 × W | image values, packed array |
| `bin_index` | in | 4 × WCI | shared-weight indices, packed array |
| `res_valid`, `res_grp`, `res` | out | 1, 2, 4 × 2W | result strobe, group number, the four MAC results |
| `done`, `busy` | out | 1 | last group of an operation; an operation is in progress |

### Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `W` | 32 | image and weight width (built and tested for 4..32) |
| `WCI` | 4 | bin-index width, `b = 2**WCI` bins (tested for 4, 16, 64, 256 bins) |
| `N_IMG`, `N_KER` | 4, 4 | image lanes and index lanes. There are `N_IMG*N_KER` PAS units. |
| `N_MAC` | 4 | shared MACs. It must divide `N_IMG*N_KER`. |

Only `W`, `WCI` and the default 4/4/4 lane counts are exercised by the
testbenches. If you change the lane counts, `res_grp` is `clog2(N_PAS/N_MAC)`
bits wide.

## Simulation

Every testbench checks itself and prints `TB_RESULT checks=N failures=M`. Run
from the directory that holds `rtl/` and `tb/`. For example, the end-to-end test
at full size:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/pasm_pkg.sv tb/tb_pasm_accel.sv --top-module tb_pasm_accel
./obj_dir/Vtb_pasm_accel
```

| testbench | what it checks |
|-----------|----------------|
| `tb_weight_regfile` | reset, writes and read-back of every entry, random traffic |
| `tb_pas_unit` | the worked example above; random streams with gaps and restarts against a bin model |
| `tb_shared_mac` | the 98.76 example; random signed dot products; hold when disabled |
| `tb_pasm_ctrl` | cycle-exact order of phases, bins and groups; stalls; result strobes; latency `n + 4b` |
| `tb_pasm_accel` | full default size, end to end (checks below) |
| `tb_pasm_workloads` | configurations and stream lengths (checks below) |

`tb_pasm_accel` compares all 16 dot products of 24 operations with a direct
weight-shared MAC computed in the testbench. It also makes each of these happen
and counts it:

- input gaps
- stalls
- a one-beat operation
- back-to-back operations
- a weight reload
- MAC sharing over all four groups

`tb_pasm_workloads` runs seven configurations in parallel, each through the
helper `tb/pasm_case_runner.sv`:

- The default build on the twelve dot-product lengths of 1×1, 3×3, 5×5 and 7×7
  kernels over 32, 128 and 512 input channels (`k·k·c` = 32 … 25088 inputs).
- Widths 4, 8 and 16.
- 4, 64 and 256 bins.

It checks the results against a model of the wrapped datapath. Where no bin
overflowed, it also checks them against a direct MAC.

## Choices made here, and what is not included

The following follow the source description:
- the PAS and shared-MAC structure
- the two phases
- the widths (`W`, `W`-bit bins feeding the MAC, `2W` products and result)
- 4 + 4 inputs per cycle, 16 PAS units and 4 MACs
- one weight register file
- the `n + b` per-PAS cost

The following are this implementation's own choices, because the description
leaves them open:
- which image lane and index lane each PAS unit pairs
- which PAS units each MAC serves, and in what order
- the valid/ready/last input handshake
- the grouped result stream
- the weight-load port
- clearing bins on the first beat
- signed arithmetic
- reset behaviour
- no overlap between phase 2 and the next phase 1

The conventional 16-MAC weight-shared accelerator is a comparison baseline and
is not part of this RTL. The gate-count and power figures, and the 100 MHz
timing target in a 45 nm library, are results of synthesis runs and are not
reproduced here.
