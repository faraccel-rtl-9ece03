# FaRAccel: a GEMM core that applies Forget-and-Rewire by choosing operands

Forget-and-Rewire (FaR) is a defence against bit-flip attacks on the weights of a
Transformer. After training, it moves the influence of the most important weights onto
"dead" neurons, which are inputs whose activations are almost always zero. This leaves a
gradient-guided attacker ranking the wrong weights. In software, FaR is expensive: each
rewired input needs a duplicated and scaled activation and a gathered weight, and that
breaks fused matrix multiplies.

This RTL does FaR differently. A rewiring never changes *what is computed*, only *which
weight each multiplier lane reads*. Each lane has three choices:

* the baseline weight,
* a pre-scaled copy of a donor weight (scaled by 1, 1/2 or 1/3 before the data ever
  reaches the chip), or
* zero.

For every output neuron, a small table of exceptions, the **FaRMap**, is expanded into a
32-entry **select vector**. That vector stays fixed while the neuron's 32 dot products are
computed. It is built while the previous neuron is still computing, so a tile runs in the
same number of cycles with FaR on as with it off. The scaled donor copies sit in a separate
**shadow store** with its own read port, so the redirect never causes a structural stall.
No divider or extra multiplier is added to the datapath.

Everything here is synthesizable SystemVerilog (IEEE 1800-2017). It was checked with
Verilator 5 (lint and simulation) and with Yosys through the slang front end.

## How a tile flows through the core

```
 s_axis (64b) -> stream_fifo -> data_transfer_manager -+-> tile_buffer  weights (1 bank)
                                                       +-> tile_buffer  activations (2 banks)
                                                       +-> farmap_cache (2 banks)
                                                       +-> shadow_store (2 banks)
 pe_controller: for n in 0..31 (output neuron)  : read FaRMap row n + shadow row n
                  for m in 0..31 (activation row): issue dot(A[m], W[n]) with select vector n
 select_gen -> far_dpe (operand_redirect -> 32 x fp16_mul -> adder_tree -> accumulator)
            -> out_buffer (2 banks) -> data_transfer_manager -> stream_fifo -> m_axis (64b)
 cfg_regs (AXI4-Lite): command, start, status, counters, irq
```

A tile is C[m][n] = Σ_k A[m][k] · W'[k][n], where every dimension is 32 and W' is the
weight after the redirect. The dataflow is output-stationary, and the DPE produces one whole
32-element dot product per cycle. The output neuron n is the outer loop. So for 32
consecutive cycles, the weight row and the select vector stay the same and only the
activation row changes. This is what lets a select vector be "latched for the row".

## The operand redirect and the select vector

`operand_redirect` is a 32-lane, three-way multiplexer on the **weight** operand, placed one
register stage before the multipliers. The activation operand goes straight through. A lane's
select has two fields, defined in `far_pkg`:

| `mode` | weight used by the lane |
|---|---|
| `SEL_MAIN` | the lane's baseline weight |
| `SEL_SHADOW` | shadow slot `slot` of the current row (a pre-scaled donor value) |
| `SEL_SKIP` | +0 |

The select vector comes from `select_gen`. It has two registers:

* **next**: filled by a `decode` pulse from the row's FaRMap entries and shadow words;
* **active**: copied from next by a `commit` pulse. It drives the DPE for the whole row.

Entry j of a row always goes with shadow slot j. A valid entry acts on lane `victim`:

* with `skip=1` the lane gets zero;
* otherwise the lane reads slot j.

Lanes that no entry names keep the baseline weight.

The redirect replaces a lane's weight. It never duplicates, splits or moves an
activation: lane k always multiplies activation k. The row then computes
Σ_k x_k · w'_k, where w'_k is the baseline weight, a shadow value or zero. Any FaR rewiring
must therefore be compiled offline into this weight-only form.

This is a real limit. Take the classic rewire, "halve x1 and send the other half to a dead
neuron 2, whose weight becomes w1". It cannot be reproduced exactly: lane 2 still multiplies
x2, which is near zero, and not x1/2. What the hardware does give is cheap, exact execution
of any row whose weights have been replaced, scaled or zeroed per lane. The source design
describes its datapath in the same terms: lanes change the weight they consume.

`donor` and `div` are stored in the entry and checked when it is written. The datapath uses
only `victim`, `skip` and the slot position, because the scaling is already inside the
shadow value.

### What keeps the multipliers busy

Per output row, the controller does the following:

1. It reads the FaRMap row and the shadow row two cycles before the current row ends. Both
   reads have one-cycle latency.
2. It decodes them on the row's last cycle.
3. It commits them on the first issue of the next row.

So with `overlap_en=1` rows follow back to back. With `overlap_en=0` the read happens on the
last issue cycle and the decode happens in a separate **LATCH** cycle with no issue. That
puts one bubble at each of the 31 row boundaries. Row 0 is always read and decoded in a
two-cycle prologue (PREP0/PREP1) before the first issue.

## Tile timing

The DPE pipeline, from an issued dot product to its result:

| stage | cycles |
|---|---|
| input register | 1 |
| operand redirect | 1 |
| FP16 multiplier (`MUL_STAGES`) | 3 |
| adder tree, 5 registered levels for 32 inputs | 5 |
| accumulator | 1 |
| output register | 1 |
| **latency** | **12** |

One tile issues 32 × 32 = 1024 dot products. The counter `CYCLES` measures from the first
DPE input to the last result written:

* **1036** cycles (1024 + 12) with overlap, the same with FaR on or off;
* **1067** cycles without overlap (31 bubbles more).

The two-cycle prologue, and the wait for a free output bank, are not included. The
testbenches check both numbers exactly.

## FaRMap cache and shadow store

The FaRMap cache has two banks. Each holds 32 rows × `SLOTS`=5 entries, which is 15% of 32
inputs rounded up. An entry is 14 bits:

```
[13] valid  [12:8] victim  [7:3] donor  [2:1] div (0: /1, 1: /2, 2: /3, 3: reserved)  [0] skip
```

Both stores keep one even-parity bit per word. The shadow store has the same shape, with
FP16 words.

**Memory:**

* FaRMap: 2 × 32 × 5 × 15 bits
* shadow store: 2 × 32 × 5 × 17 bits
* total: 10 240 bits, or 1.25 KB.

### Validation and fallback

There are two levels of protection.

* **Bank level.** Loading a FaRMap packet first clears its bank's error flag. Every entry is
  then checked as it is written. The checks are: reserved `div`, victim or donor outside the
  lanes, slot or row outside the array, and a rewire whose donor is its own victim. A bad
  entry sets `bank_err[b]`. A tile started with FaR on and a bad configuration bank runs
  entirely on baseline weights; this is counted in `FALLBACKS`.
* **Row level.** At decode, `select_gen` checks the row. If a valid entry has a parity error,
  its shadow word has a parity error, or two entries name the same victim lane, then that row
  uses baseline weights. This is counted in `ROWFAULTS`.

Control bit `inj_err` stores the next FaRMap or shadow word with inverted parity. It exists
to test the row-level path.

## Data transfer manager: packet format

The input stream carries 64-bit beats. `s_axis_tlast` ends a packet. The first beat is a
header: `[63:60]` type, `[56]` bank.

| type | payload |
|---|---|
| 1 weight | 256 beats, 4 FP16 per beat (element k at bits 16k), weight row n = beats 8n..8n+7; single bank |
| 2 activation | 256 beats, same layout, into activation bank `[56]` |
| 3 FaRMap | one beat per entry: `[13:0]` entry, `[20:16]` row, `[26:24]` slot; the header clears bank `[56]` |
| 4 shadow | one beat per word: `[15:0]` FP16 value, `[20:16]` row, `[26:24]` slot |

Beats past the end of a dense tile, and packets of an unknown type, are dropped up to
`tlast`. `s_axis_tready` stays high, so the core takes one beat per cycle.

Results are drained one output bank at a time:

* 256 beats, row-major C[m][n], 4 per beat;
* `m_axis_tlast` on the last beat;
* the output FIFO applies back-pressure (the testbench checks this by throttling `tready`).

A tile that targets a bank still being drained waits in **STALL**, and is counted in
`STALLS`. The two output banks let one tile drain while the next one computes.

## Register map (AXI4-Lite, 32-bit)

| addr | name | bits |
|---|---|---|
| 0x00 | CTRL | [0] start (self-clearing), [1] far_en, [2] overlap_en, [3] activation bank, [4] FaRMap/shadow bank, [5] output bank, [8] inj_err, [9] write 1 to clear irq |
| 0x04 | STATUS | [0] busy, [2:1] drain busy per output bank, [4:3] bank_err, [5] irq |
| 0x08 | TILES | tiles completed |
| 0x0C | CYCLES | span of the last tile (see above) |
| 0x10 | FALLBACKS | tiles run on baseline because of a bad bank |
| 0x14 | ROWFAULTS | rows forced to baseline |
| 0x18 | STALLS | cycles waiting for an output bank |
| 0x1C | REDIRECTS | lanes redirected (shadow or skip), summed over committed rows |
| 0x20 | BUBBLES | latch cycles inserted (31 per tile without overlap) |

## FP16 arithmetic

* `fp16_mul` and `fp16_add` are combinational IEEE binary16 units.
* They round to nearest even and flush subnormal inputs and results to zero.
* Overflow gives ±Inf, and any NaN result is the quiet NaN 0x7E00.
* `fp16_mul` is followed by `MUL_STAGES`=3 register stages, where a synthesis tool may retime
  the logic. `adder_tree` has one registered level per tree level.
* The tree adds in a fixed pairwise order, so a result is deterministic but is not a single
  rounding of the exact sum.
* The testbench reference (`tb/fp16_ref_pkg.sv`) works in double precision. There, a product
  or sum of two FP16 values is exact, and the reference rounds once.
* The DPE can also accumulate over several K steps (`first`/`last`). The controller always
  uses single-step tiles with K = 32: larger K is split into tiles by the host, and the host
  adds the partial sums.

## Files

| file | role |
|---|---|
| `rtl/far_pkg.sv` | sizes, FP16 type, select, entry, packet and command types |
| `rtl/fp16_mul.sv`, `rtl/fp16_add.sv` | FP16 multiply and add |
| `rtl/adder_tree.sv` | pipelined reduction tree |
| `rtl/operand_redirect.sv` | per-lane weight selector |
| `rtl/far_dpe.sv` | FaR-aware 32-lane dot-product engine |
| `rtl/select_gen.sv` | FaRMap row to select vector, row checks |
| `rtl/farmap_cache.sv`, `rtl/shadow_store.sv` | configuration memories with validation and parity |
| `rtl/tile_buffer.sv`, `rtl/out_buffer.sv` | tile storage |
| `rtl/stream_fifo.sv` | first-word-fall-through stream FIFO |
| `rtl/data_transfer_manager.sv` | packet parser and output drain |
| `rtl/cfg_regs.sv` | AXI4-Lite registers |
| `rtl/pe_controller.sv` | tile scheduler |
| `rtl/faraccel_top.sv` | the core |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/fp16_ref_pkg.sv` | FP16 reference arithmetic |

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

`tb_faraccel_top` runs the core at its default sizes and compares every result with a
reference model. Over several tiles it goes through each mechanism and counts it:

* FaR with overlap
* FaR without overlap (1067 cycles)
* a baseline tile
* a bank fallback after an illegal entry
* a row fault after injected parity
* a stall on a draining output bank
* skip lanes and shadow lanes

## Simulating

With plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -j 8 \
  --top-module tb_faraccel_top -y rtl -y tb +libext+.sv \
  rtl/far_pkg.sv tb/fp16_ref_pkg.sv tb/tb_faraccel_top.sv -o sim --Mdir obj
./obj/sim +verilator+rand+reset+2
```

Replace `tb_faraccel_top` with any other `tb_<module>` to run that module's testbench. The
top-level run builds and simulates in well under a minute.

## What follows the source design and what does not

**Taken from the source design:**

* 32-lane FP16 output-stationary dot-product engine on 32×32 tiles.
* A three-way redirect in front of the multipliers: baseline, pre-scaled donor, or zero.
* A FaRMap of victim, donor, division and skip per output row, capped at 15% (5 of 32).
* Division by 2 or 3 folded into shadow copies.
* A separate read port for the shadow store.
* A select vector latched per row and prepared during the previous row, or one extra cycle
  per row when this is not overlapped.
* Validation with fallback to baseline weights.
* A 12-cycle DPE fill and a 1036-cycle tile.
* Ping-pong input and output buffers with a single weight buffer.
* Stream FIFOs and a data transfer manager between DMA streams and buffers.
* AXI-Lite control.

**This design's own choices**, where the source is silent:

* the packet format, the register map and the counters;
* the entry bit layout;
* parity and the error-injection bit;
* row-level fallback;
* the implicit entry-to-slot pairing;
* the pipeline split of the 12 cycles;
* the loop order (neuron outer);
* the FIFO depth (64);
* the output drain order;
* rounding and subnormal handling;
* the stall rule on output banks.

**Departures and resolved conflicts:**

* **Weights only.** In one place the source speaks of rerouting activations. Its datapath
  description, however, has each lane change only the weight it consumes. This design
  follows the datapath description. So the activation-splitting form of FaR is not
  reproduced exactly (see the operand-redirect section). `donor` and `div` are checked but
  not used by the datapath.
* **Non-overlapped cost.** The source quotes 32 extra cycles per tile. Here it is 31 bubbles,
  because row 0 is always prepared in the prologue, plus the 2-cycle prologue present in both
  modes.
* **One process engine.** The source speaks of several processing engines but gives no
  count, and its block diagram draws one. The core has one engine with one DPE.
* **Weight buffering.** The source says both that a single buffer holds weights and that
  weight tiles are double-buffered. This design follows the single-buffer statement and its
  block diagram. A new weight tile can therefore only be loaded between tiles.
* **Host-side pieces are not here:** the host processor, DDR and its controller, the AXI
  DMAs, and the offline sensitivity analysis that produces FaRMaps and shadow values. The
  core exposes the AXI4-Lite and AXI-Stream ports those would connect to.
* **Resource and power figures** from the source (LUT, FF, BRAM, DSP, watts) are not
  reproduced. The multipliers are generic RTL, not mapped by hand to DSP slices.
