# ONE-SA core: a systolic array that also evaluates nonlinear functions

Neural-network accelerators usually pair a systolic array with separate
units for GELU, softmax, normalisation and similar functions. Those units
are fixed per network, and the data paths between them and the array stall
each other. ONE-SA removes the separate units. Every nonlinear function is
approximated piecewise linearly, so that on each segment `y = k*x + b`. The
approximation is then computed by the systolic array itself, in two passes
that look like ordinary array work:

1. **Parameter fetch.** For every element `x` of a matrix `X`, look up the
   slope `k` and intercept `b` of the segment `x` falls in. This gives two
   matrices `K` and `B` of the same shape as `X`.
2. **Matrix Hadamard product (MHP).** Compute `Y = X (.) K + B` element by
   element on the array's multipliers.

The fetch happens in the output buffer, while the results of a matrix
multiply leave the array. So a layer `GELU(A*W)` costs one GEMM, whose
results come out together with their `K` and `B`, followed by one MHP.

This repository gives synthesizable SystemVerilog for the core: an 8x8
array of processing elements (PEs), each with 16 multiply-accumulate units
(MACs), plus its three buffer levels, the data addressing unit and a
controller. Everything runs in 16-bit fixed point. DRAM is outside the core;
its streams are ports of the top module `onesa_top`.

## 1. Numbers

| item | format |
|---|---|
| operands (X, W, K, B, results) | signed 16 bit, Q7.8 (`FRAC = 8`), range [-128, 128) |
| the constant 1 used in MHP | `ONE = 256` |
| PE accumulator | 40 bit, Q.16 (a product of two Q7.8 values) |
| result leaving a PE | accumulator `>>> 8`, saturated to 16 bit (`requant` in `onesa_pkg`) |

The networks are quantised to INT16. The position of the binary point is
this design's own choice. Q7.8 gives the GELU table a resolution of 1/256.

## 2. Capped piecewise-linear approximation

A function is cut into segments of equal length `g`, called the
granularity. On segment `s`, `k` is the slope of the chord between the
segment's end points and `b` is the chord's intercept. The slopes and
intercepts are computed offline and preloaded into two small buffers of
`NSEG = 32` entries.

Choosing `g` as a power of two lets a shift find the segment:

```
raw = (x >>> shift) + offset            x in Q7.8, g = 2^(shift-8)
s   = max(min(raw, smax), smin)         the "cap"
```

Inputs outside the table's range are clamped to its first or last
segment, which is why the approximation is called capped. For GELU the end
segments are then close to `y = 0` and `y = x`, as they should be. The
default configuration is `g = 0.25` (`shift = 6`), `offset = 16`,
`smin = 0` and `smax = 31`, which covers [-4, 4) with 32 segments. A run of
the full core, using that table against real GELU, stays within 0.0085 of
the true value.

Other powers of two work by changing `shift` and `offset` at run time: 0.5
covers [-8, 8) and 1.0 covers [-16, 16). A granularity that is not a power
of two (0.1, 0.75) is not supported, because the segment unit only shifts.
`onesa_segment` counts each capped lane, and the L3 output buffer reports
the total on `n_capped`.

## 3. The processing element and its two switches

A PE (`onesa_pe`) registers an input vector coming from the left and a
weight vector coming from above. Each vector holds 16 elements. Two
switches decide what the PE does with them:

| mode | PE | C1 (forward) | C2 (compute) | behaviour |
|---|---|---|---|---|
| GEMM | any | on | on | passes both vectors on and multiply-accumulates |
| MHP | diagonal, PE(i,i) | off | on | computes; passes nothing on |
| MHP | off-diagonal | on | off | only passes vectors on |

The 16 products go into a multi-layer adder tree (`onesa_accum_tree`):

* The first layer adds products in pairs, `p0+p1`, `p2+p3` and so on.
* In **GEMM** the tree's total (a 16-term dot product) is added to output
  buffer entry `slot`. The entry starts from zero on `first`.
* In **MHP** the vectors are interleaved, as input `[x0, 1, x1, 1, ...]`
  and weight `[k0, b0, k1, b1, ...]`. The eight first-layer pair sums are
  then exactly `k_i*x_i + b_i`, and they are written to the eight lanes of
  entry `slot`.

Because the diagonal PEs compute in MHP, row `i`'s data meets column `i`'s
`K`/`B` in PE(i,i) and nowhere else. Eight PEs therefore work in parallel,
giving 64 MHP results per cycle at the peak.

Each PE has an output buffer of `OBUF_DEPTH = 6` entries, each holding
eight accumulators. An entry becomes ready on `last`, and ready entries
leave in slot order. Every entry carries the tag `{row, col, slot}`, so the
host can place it whatever order it arrives in. A GEMM entry carries its
result in lane 0 and zeros in the other lanes.

Two assertions guard the PE:
- `a_w_aligned`: in a computing PE, input and weight vectors must arrive
  in the same cycle.
- `no_overwrite`: a slot must not be written while it still waits to drain.

## 4. Getting operands into the array

```
x_* beats --> L3 input  [rearrange -> Input FIFO(9)] --> L2 input 0 -> L2 input 1 -> ... -> L2 input 7
                                                            |             |                   |
                                                          row 0         row 1     ...       row 7
w_* beats --> L3 weight [rearrange -> Input FIFO(9)] --> L2 weight 0 -> ... -> L2 weight 7  (columns)
```

* **Beats.** A beat from DRAM is `{dest, 16 elements}`. `dest` names the row
  (or column) whose L2 buffer should keep it.
* **Rearrange (`onesa_rearrange`).**
  - GEMM: beats pass through unchanged.
  - MHP input side: one X beat becomes two vectors, `[x0,1,...,x7,1]` and
    `[x8,1,...,x15,1]`.
  - MHP weight side: a K beat followed by a B beat for the same
    destination become the two vectors `[k0,b0,...]` and `[k8,b8,...]`.
  - The rearrange stalls its input while it emits the second vector.
* **L2 chain (`onesa_l2_feed`).**
  - The L2 buffers form a chain. A beat travels down the chain until the
    buffer whose index equals `dest` captures it. Capture happens only
    while the controller allows loading.
  - Each L2 buffer holds 16 vectors, and the controller reads all of them
    at the same address together.
  - Buffer `r` delays its read by `r` cycles. This is the usual systolic
    skew: the operands for PE(r,c) then meet after `r + c` hops.
* **Flow control.** All streams use valid/ready. When an L3 Input FIFO is
  full, `x_ready` or `w_ready` drops. `x_level` and `w_level` report how
  full the FIFOs are.

## 5. Getting results out

```
PE(r,0) -> L1 -> PE(r,1) -> L1 -> ... -> PE(r,7) -> L1 --> L2 output (row r)
                                                              |
         L2 output (row 0) -> L2 output (row 1) -> ... -> L2 output (row 7) --> L3 output
```

Every PE has a 2-entry L1 buffer. The L1 buffers of a row form a chain,
which ends in the row's 32-entry L2 output buffer. The L2 output buffers of
the rows form a second chain, which ends in the L3 output buffer. Each link
is a `onesa_drain_node`: a FIFO with two inputs, in which the upstream
input has priority over the local one. Back-pressure from the L3 output
reaches the PEs, which keep their entries until they can leave.

## 6. The L3 output buffer: data addressing

`onesa_data_addr` receives every tagged output entry. It pushes three FIFOs
of depth 8 at the same time:

| FIFO | contents |
|---|---|
| C | the entry itself |
| k | the slope of each lane's segment |
| Reg | the intercept of each lane's segment |

Each of the eight lanes has its own segment unit (section 2) and its own
read port into the k and b buffers. The three FIFOs leave together as one
`o_data = {c, k, b}` beat, so the host writes `C`, `K` and `B` back to DRAM
side by side.

* `ipf_en` turns the fetch on. With it clear, `k` and `b` are zero.
* The k and b buffers are written through the `tbl_*` port, one segment per
  cycle. Writes beyond `NSEG` are ignored.
* For a function applied to data that did not come from a GEMM, the host
  sets `ext_sel` and feeds entries straight into the L3 output buffer over
  `ext_*`.

## 7. Running an operation

An operation is started by a one-cycle `start` with `cfg` valid:

| field | meaning |
|---|---|
| `mode` | `MODE_GEMM` or `MODE_MHP` |
| `n_entries` | vectors per L2 buffer in this operation (1..16) |
| `kchunks` | GEMM: vectors summed into one output slot; forced to 1 in MHP |
| `hold` | GEMM: close no slot and drain nothing; the sums stay in the PEs |
| `cont` | GEMM: the first vector of each slot adds to the sum held from before |

`onesa_ctrl` then works through four phases:

1. **LOAD.** Clear the tile state, then wait until every L2 buffer holds
   `n_entries` vectors.
2. **COMPUTE.** For `n_entries` cycles, read L2 address `e` everywhere. Its
   control word is `slot = e / kchunks`, with `first` and `last` at the
   chunk boundaries.
3. **DRAIN.** Wait until the L3 output buffer has accepted all results. In
   GEMM that is 64 per slot; in MHP it is one entry per diagonal PE per
   vector.
4. **FLUSH.** Wait `ROWS + COLS + 4` more cycles, so nothing of the tile is
   still in flight. Then pulse `done`.

`cycles` is the length of the last operation, from `start` to `done`. The
mode is latched, so a mode switch takes effect between operations.

Each operation has these limits:
- `n_entries` must be a multiple of `kchunks`.
- `n_entries / kchunks` can be at most 6, the number of PE output slots.
- In MHP, `n_entries` is twice the number of X beats per row, because each
  X beat gives two vectors.
- The `cfg_legal` assertion checks the first two rules, and in MHP that
  `n_entries` is at most 6.

What one operation covers at these limits:

* **GEMM.** An 8 x 8 tile of `C = A*W` with up to 6 slots per PE. Each slot
  is a dot product of `16 * kchunks` terms, at most 256.
* **MHP.** Up to 8 diagonal PEs x 6 vectors x 8 results = 384 elements.

**Long dot products.** A layer with K larger than 256, such as K = 4608 in
ResNet-50 or 3072 in BERT's feed-forward layer, is split into `m` GEMM
operations:

* the first with `hold`,
* the middle ones with `cont` and `hold`,
* the last with `cont`.

Only the last operation drains results. Between operations the host
streams the next pieces of `A` and `W`.

**Measured timing** at full size, from the end-to-end test:

| operation | cycles, start to done |
|---|---|
| GEMM, `n_entries = 6`, `kchunks = 3` (two 48-term slots, 128 results) | 244 |
| MHP, 128 elements | 64 |

Most of those cycles go to loading the L2 buffers over one beat per cycle
and draining 64 results per slot through a single output port.

## 8. Top-level ports (`onesa_top`)

| port | dir | type | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `start`, `cfg` | in | 1, `cfg_t` | start an operation |
| `busy`, `done`, `cycles` | out | 1, 1, 32 | status |
| `x_valid/x_ready/x_data` | in/out/in | `beat_t` | input (A or X) stream |
| `w_valid/w_ready/w_data` | in/out/in | `beat_t` | weight (W, or K then B) stream |
| `x_level`, `w_level` | out | 4 | L3 Input FIFO fill levels |
| `ext_sel`, `ext_valid/ext_ready/ext_data` | in | `out_t` | X straight into the L3 output buffer |
| `ipf_en`, `seg_shift`, `seg_offset`, `seg_smin`, `seg_smax` | in | 1, 4, 6, 6, 6 | parameter fetch settings |
| `tbl_we`, `tbl_addr`, `tbl_k`, `tbl_b` | in | 1, 6, 16, 16 | k/b buffer preload |
| `n_capped` | out | 32 | lanes whose segment was capped |
| `o_valid/o_ready/o_data` | out/in/out | `addr_out_t` | `{C entry, k, b}` towards DRAM |

The types are in `rtl/onesa_pkg.sv`.

## 9. Sizes

| parameter | default | origin |
|---|---|---|
| `ROWS` x `COLS` | 8 x 8 | 64 PEs in the main configuration |
| `SIMD` | 16 | MACs per PE |
| `OBUF_DEPTH` | 6 | PE output buffer of 0.094 KB = 6 x 16 B |
| `L1_DEPTH` | 2 | L1 buffer of 0.031 KB |
| `L2_DEPTH` | 16 | L2 buffer of 0.5 KB = 16 vectors x 32 B |
| `L2O_DEPTH` | 32 | L2 output buffer of 0.5 KB = 32 x 16 B results |
| `L3_DEPTH` | 9 | L3 Input FIFO of 0.28 KB, about 9 vectors |
| `NSEG` | 32 | k/b buffer entries (granularity 0.25 over [-4, 4)) |
| output FIFOs | 8 | C/k/Reg FIFO depth; own choice |

The byte sizes come from the published resource table. How the bytes are
divided into entries is this design's reading of them.

## 10. What is this design's own

The published architecture gives the structure, the switch settings, the
vector formats, the segment formula with its cap, the buffer levels and
their sizes. The following are choices made here, where the description is
silent:

* The output-stationary dataflow, with slots and first/last flags carried
  alongside the vectors.
* Q7.8 fixed point, the 40-bit accumulator, and `>>> 8` saturation on the
  way out.
* Valid/ready handshakes everywhere. The `dest` field routes beats to their
  L2 buffer.
* The tags on output entries, and the upstream-first priority in the drain
  chain.
* The controller, whose phase sequence is entirely this design's. The
  original leaves control to an HLS framework.
* The `cont`/`hold` flags for long reductions, and the flush wait.
* The `ext_*` path into the L3 output and the `tbl_*` preload port. The
  original says only that `k`/`b` and `X` are loaded from DRAM.
* In GEMM each entry has eight lanes, of which only lane 0 carries a
  result. IPF therefore also looks up the seven zero lanes; their `k` and
  `b` are the segment of 0.

**Not built:**
* DRAM and the host that tiles layers through it.
* Reductions that are not GEMMs (the max and division inside softmax and
  layernorm; pooling).
* Granularities that are not powers of two.
* Array sizes other than 8x8x16. They are parameters, but only the default
  is simulated.

## 11. Verification

Every module has a self-checking testbench in `tb/`. Each computes its
expected values independently, counts checks and failures, ends with a
`TB_RESULT checks=... failures=...` line, and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_onesa_accum_tree` | pair sums and totals on random products |
| `tb_onesa_pe` | GEMM accumulate, MHP pair results, switch settings, drain order, back-pressure |
| `tb_onesa_drain_node` | no loss, no duplicate, upstream priority, random stalls |
| `tb_onesa_segment` | shift, offset and cap against a reference; capped flag |
| `tb_onesa_rearrange` | `[x,1,...]` / `[k,b,...]` interleaving in MHP, pass-through in GEMM, stalls |
| `tb_onesa_l3_in` | rearrange plus FIFO, full/empty behaviour |
| `tb_onesa_l2_feed` | capture by `dest`, pass-through, read skew |
| `tb_onesa_data_addr` | k/b fetch for every lane, FIFOs in step, capped count |
| `tb_onesa_array` | a full 8x8 GEMM and MHP with random stalls at the output |
| `tb_onesa_ctrl` | phase sequence, control words, cont/hold, flush wait, cycle count |
| `tb_onesa_top` | the whole core at default sizes (below) |
| `tb_onesa_workloads` | layer-shaped cases at default sizes: a 768-term GEMM over three chained operations followed by GELU; ReLU at granularity 1.0 (exact); GELU at granularity 0.5 |

`tb_onesa_top` runs a GELU layer end to end with no parameter overridden:

1. A GEMM with parameter fetch.
2. An MHP on the fetched `X`, `K`, `B`, compared with the exact product
   and with real GELU.
3. A GEMM whose 144-term dot products span three operations (hold;
   cont and hold; cont).
4. Elements loaded straight into the L3 output.

It counts each mechanism and fails if any of them never happened: held
operations, GEMM and MHP operations, mode switches, capped segments,
output and input stalls, and external loads.

To simulate with Verilator 5 (from the repository root):

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl -y tb \
          rtl/onesa_pkg.sv tb/tb_onesa_top.sv --top-module tb_onesa_top -o sim
./obj_dir/sim
```

Replace `tb_onesa_top` with any other testbench name. The full-size top
test takes a few seconds of simulation after compilation.

## 12. Files

| file | contents |
|---|---|
| `rtl/onesa_pkg.sv` | types, constants, `requant` |
| `rtl/onesa_sync_fifo.sv` | generic valid/ready FIFO |
| `rtl/onesa_accum_tree.sv` | multi-layer accumulator |
| `rtl/onesa_pe.sv` | processing element with switches C1/C2 and output buffer |
| `rtl/onesa_drain_node.sv` | L1 / L2-output link of the drain chain |
| `rtl/onesa_array.sv` | PE grid with its drain chains |
| `rtl/onesa_rearrange.sv` | MHP data rearrange |
| `rtl/onesa_l3_in.sv` | L3 input / weight buffer |
| `rtl/onesa_l2_feed.sv` | L2 input / weight buffer with skew |
| `rtl/onesa_segment.sv` | data shift and scale (segment number with cap) |
| `rtl/onesa_data_addr.sv` | L3 output buffer with parameter fetch |
| `rtl/onesa_ctrl.sv` | operation controller |
| `rtl/onesa_top.sv` | the core |
