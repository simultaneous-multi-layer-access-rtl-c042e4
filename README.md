# Cascaded-IO: a time-sliced TSV channel for 3D-stacked DRAM

A 3D-stacked DRAM has hundreds of through-silicon vias (TSVs) per channel. Even
so, a conventional stack uses only one layer per access. In each internal DRAM
clock cycle, one layer's global sense amplifiers drive one word onto the
shared TSVs, and the other layers wait. The TSVs could carry far more than
that, but the internal bitlines and sense amplifiers of a single layer cannot
go faster.

Simultaneous Multi Layer Access (SMLA) takes that extra capacity from the other
layers instead of from a faster core. All layers fetch a word in the same
internal cycle. The TSV bus is then clocked L times faster, so the L words
leave the stack one after another within that one internal cycle. The
*Cascaded-IO* variant, built here, does this with identical dies and no
dedicated TSVs per layer:

* Every layer has a multiplexer in front of the TSV segment below it.
* In its own time slot a layer drives its own word downward. In every later
  slot it passes on whatever arrives from the layer above.
* The bottom of the stack therefore sees layer 0, layer 1, ..., layer L-1 in
  turn.

With four layers and a 128-bit bus, a channel moves a 64-byte line every
baseline cycle. At a 200 MHz baseline clock and an 800 MHz IO clock that is
12.8 GB/s, against 3.2 GB/s when one layer at a time owns the bus.

SMLA can also be realised by static partitioning: each layer gets its own
fixed group of TSVs and drives only that group. That variant needs a
different die per stack position. It is not built here.

This repository holds synthesizable SystemVerilog for one such channel, that
is, the stack's interface logic, and for the matching receive logic on the
controller side. It also holds self-checking testbenches for every module.
The DRAM cell arrays are not logic and are not here. Each layer exposes a
port to its own core instead.

## Time base: IO cycles, frames and slots

Everything runs on one clock, `clk`, the IO clock (F × L, where F is the
baseline clock).

| term | meaning | four layers |
|---|---|---|
| IO cycle | one period of `clk` | 1.25 ns |
| frame | L IO cycles, one baseline (in-DRAM) clock period | 5 ns |
| slot s | IO cycle s of a frame; carries layer s's word on the bottom TSVs | slots 0..3 |
| `frame_tick` | high in the last IO cycle of a frame; the baseline clock edge | every 4th cycle |

The bottom layer's clock counter defines the slot numbering. It also produces
`frame_tick`, which all layers use as their core clock: commands are taken on
it, and each layer's own word is loaded on it.

## Clock chain and the own-data windows

This is the least obvious part of the design.

The clock enters at the bottom and climbs the stack. Each layer owns a two-bit
clock counter (`cio_clk_counter`). The counter counts the clock edges arriving
from below and hands a clock to the layer above. Depending on its enable, the
handed-up clock is either the incoming clock or the incoming clock halved. The
count also tells the layer's multiplexer control (`cio_mux_ctrl`) where in
the frame it is.

All clocks are modelled as clock enables ("ticks") on `clk`, so the design is
one synchronous clock domain. A layer running at half rate simply sees a tick
every second IO cycle. The halved clock ticks on the incoming edges that
arrive while the count is even.

Two clock schemes can be selected with `clk_mode`:

* **Identical clocks** (`CLK_IDENTICAL`). Every layer runs at the IO rate and
  drives its own word when its count equals its position. The bottom layer, for
  example, drives at count `2'b00`.
* **Optimized clocks** (`CLK_OPTIMIZED`). An upper layer relays fewer slots, so
  it needs fewer clock edges, and a slower clock saves power:
  * the lower half of the stack runs at F × L;
  * the next quarter runs at F × L / 2;
  * the next eighth runs at F × L / 4, and so on;
  * the top layer runs at F.

  With four layers the local periods are 1, 1, 2 and 4 IO cycles, which gives
  4, 4, 2 and 1 clock edges per frame. `layer_period()` in `smla_pkg` computes
  this. A layer divides its outgoing clock exactly when the layer above has
  twice its period.

In the optimized scheme a slow layer cannot align its own-data window to a
single slot. Instead it must hold its own word over a whole local cycle. That
local cycle has to cover its slot and must end before any later slot that it
has to relay.

A layer with period P has N = L/P local cycles per frame. Because of the
even-phase divider, local cycle k covers slots kP+1 .. kP+P (mod L). The layer
therefore drives its own data in local cycle k = ((id + 1) mod L) / P, that is,
when `cnt mod N == k`. The top layer (P = L) always drives.

The resulting four-layer schedule, as simulated:

| slot | 0 | 1 | 2 | 3 |
|---|---|---|---|---|
| layer 3 (F, 1 edge/frame) | own | own | own | **own** |
| layer 2 (2F, edges at slots 0, 2) | bypass | own | **own** | bypass |
| layer 1 (4F) | bypass | **own** | bypass | bypass |
| layer 0 (4F) | **own** | bypass | bypass | bypass |
| bottom TSVs carry | layer 0 | layer 1 | layer 2 | layer 3 |

An "own" that is not in bold is harmless, because a lower layer is driving
its own word over it. With identical clocks the table is just the diagonal.

**Stacks taller than four layers.** Optimized clocks are only enabled for
stacks of up to four layers (`opt_clock_supported`). In an eight-layer stack,
layers 4 and 5 share one F × L/2 clock. Their own-data windows cannot both be
placed at whole-cycle granularity with one divided clock and zero skew. Real
silicon would use the clock skew of the chained counters and cut-through data
to shift the windows by a fraction of a cycle. An eight-layer stack built from
these files uses identical clocks instead. Its data schedule is unchanged;
only the power saving is lost.

## The relay: one register per layer, cut-through for the rest

`cio_data_mux` is a 2:1 multiplexer per TSV bit. Only a layer's *own* word is
registered. It is loaded into `own_q` on `frame_tick` from the layer's sense
amplifiers and held for the next frame.

Data coming down from above is not re-registered. It passes combinationally
through each lower layer's multiplexer. A word from the top layer therefore
reaches the bottom in its own slot, not several cycles later.

A frame in which a layer fetched nothing loads zeros. The layer's slot is then
an idle *hole* on the bus, reported as `slot_hole`.

## Reads: single-layer and multi-layer ranks

`cio_read_ctrl` decides which layers answer a command. `rank_org` selects one
of two organisations:

| | SLR (single-layer ranks) | MLR (multi-layer rank) |
|---|---|---|
| ranks per channel | L, rank r = layer r | 1, all layers together |
| who answers | the addressed layer | every layer |
| beats per layer | LINE/W = 4 | LINE/(W·L) = 1 |
| line on the bus | slot r of 4 frames | slots 0..L-1 of 1 frame |
| word order in the line | beat b → bits [b·W +: W] | slot s of beat b → word b·L + s |

Commands are sampled only on `frame_tick`, so at most one command is taken
per baseline cycle. That is the rate the top layer's clock and the in-DRAM
logic run at.

A command taken at the end of frame f-1 behaves as follows:

* the layer fetches in frames f .. f+beats-1 (`gsa_rd_en`, `gsa_beat`);
* the fetched words appear on the bus in frames f+1 .. f+beats;
* the receiver's `resp_valid` rises at IO cycle **a + 2 + L·beats + r**, where
  a is the cycle the command was accepted and r is the rank (L-1 for MLR).

For four layers, measured from the start of the first data frame:

| | IO cycles | ns at 800 MHz |
|---|---|---|
| SLR, rank 0 (bottom) | 13 | 16.25 |
| SLR, rank 1 | 14 | 17.5 |
| SLR, rank 2 | 15 | 18.75 |
| SLR, rank 3 (top) | 16 | 20.0 |
| SLR average | 14.5 | 18.1 |
| MLR | 4 | 5.0 |

The testbenches check these to the cycle. The DRAM core timing before the
fetch (activation, tRCD, precharge, bank conflicts) is not modelled. The
latency above starts once the core can deliver.

A rank may take its next command on the `frame_tick` that ends its last fetch
(`rank_free`). Consecutive bursts to one rank are therefore back to back, with
no idle frame between them.

Under a saturating command stream:

* four-layer SLR (ranks in turn) and four-layer MLR both fill every slot;
* a two-layer SLR stack fills every slot at half the line rate;
* an eight-layer SLR stack, fed one command per baseline cycle, keeps four of
  its eight slots busy.

## Controller-side receiver

`smla_rx` mirrors the stack's fixed schedule. It tracks one entry per rank
(SLR) or a single entry (MLR). Each entry holds:

* pending and receiving flags;
* the command tag;
* the beat count;
* the number of frames of fetching left.

For each slot, the receiver picks the word off `tsv_data`, writes it into the
entry's line buffer at the position given above, and emits the complete
512-bit line with its rank and tag. It produces `rank_free`, from which the
channel derives `cmd_ready`, and `slot_hole`.

An assertion flags a command to a busy rank. A second assertion flags MLR on a
stack where one frame is wider than a line (NL·W > LINE, for example eight
layers with 64-byte lines), a case that is not supported.

## Modules

| module | role |
|---|---|
| `smla_pkg` | constants, `rank_org_e`, `clk_mode_e`, `layer_period()`, `opt_clock_supported()` |
| `cio_clk_counter` | two-bit counter on the clock path; optional divide-by-two for the layer above |
| `cio_mux_ctrl` | count → own/bypass select (combinational) |
| `cio_data_mux` | per-TSV multiplexers, own-word register, holes |
| `cio_read_ctrl` | SLR/MLR decode, fetch sequencing from the sense amplifiers |
| `cio_layer` | one die's Cascaded-IO logic: the four above; position from the `layer_id` strap |
| `cio_stack` | NL layers chained: clock upward, data downward; `frame_tick`, `slot` |
| `smla_rx` | controller-side receiver and rank flow control |
| `smla_channel` | top: stack + receiver; command handshake |

### Top-level interface (`smla_channel`)

All signals are synchronous to `clk`. `rst_n` is an asynchronous, active-low
reset.

* `clk_mode`, `rank_org`: configuration. Change them only during reset.
* `cmd_valid` / `cmd_ready`, `cmd_rank`, `cmd_bank`, `cmd_col`, `cmd_tag`:
  the read command. It is taken when `cmd_valid && cmd_ready`. `cmd_ready` is
  high only on `frame_tick`, and only if the target rank (SLR) or the stack
  (MLR) can start a burst.
* `gsa_rd_en`, `gsa_bank`, `gsa_col`, `gsa_beat`, which are outputs, and
  `gsa_data`, an input: one port per layer, packed `[NL-1:0]`, to the layer's
  DRAM core. The core must present the addressed word on `gsa_data` by the
  end of the frame in which `gsa_rd_en` is high.
* `resp_valid`, `resp_rank`, `resp_tag`, `resp_data[511:0]`: the completed
  line, valid for one cycle.
* `tsv_data`, `frame_tick`, `slot`, `slot_hole`, `layer_tick`,
  `layer_sel_own`, `layer_own_valid`, `layer_busy`: observation of the bus and
  of each layer's clock and multiplexer.

### Parameters

| parameter | default | meaning |
|---|---|---|
| `NL` | 4 | layers per stack (power of two; 2, 4 and 8 tested) |
| `W` | 128 | TSV data bits per channel |
| `LINE` | 512 | bits per request (64 bytes) |
| `BANKS` | 2 | banks per rank |
| `COL_W` | 6 | column address bits (this design's choice) |
| `TAG_W` | 8 | request tag bits (this design's choice) |

A system with several channels instantiates `smla_channel` once per channel.

## Simulation

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops. Each also has a watchdog.

Build and run one testbench with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/smla_pkg.sv tb/tb_smla_channel.sv --top-module tb_smla_channel
./obj_dir/Vtb_smla_channel
```

| testbench | what it covers |
|---|---|
| `tb_cio_clk_counter` | counting; full, half and pass-through output rates |
| `tb_cio_mux_ctrl` | exhaustive select table for 2, 4 and 8 layers, both clock schemes |
| `tb_cio_data_mux` | own/bypass selection, frame-boundary load, holes |
| `tb_cio_read_ctrl` | SLR/MLR decode, beat sequence, back-to-back bursts |
| `tb_cio_layer` | one layer with divider enable and data path |
| `tb_cio_stack` | whole stack: slot ownership, every intermediate TSV segment, per-layer clock rates (4/4/4/4 and 4/4/2/1 edges per frame), output utilisation 100/75/50/25 % bottom to top, bypass, holes |
| `tb_smla_rx` | line assembly and response latency against a reference model |
| `tb_smla_channel` | end to end at the default size, all four SLR/MLR × clock combinations: response data, rank, tag and cycle; `cmd_ready`; a saturated window with one line per frame and no holes; counts of bypasses, holes, stalls, back-to-back bursts and divided-clock cycles |
| `tb_smla_layers` | end to end with 2 layers (all four combinations) and 8 layers (SLR, identical clocks), using the helper `tb_smla_layers_run` |

The `rtl/` modules also contain concurrent assertions:

* `cio_read_ctrl`: no rank conflict;
* `cio_stack`: each layer drives its own slot, and lower layers bypass;
* `smla_rx`: commands go only to free ranks, and MLR frames fit in a line.

Keep `--assert` on so that these assertions are checked.

## Departures from the published scheme and open points

* **Reads only.** The time-sliced relay is described for read data flowing
  down the stack. How write data would climb it is left open, so no write
  path is built.
* **Clocks as enables.** Divided clocks are clock enables on one IO clock, not
  separate clock nets. The even-count phase of the divider and the sharing of
  one `frame_tick` across layers are this design's choices.
* **Optimized clocks up to four layers.** Taller stacks use identical clocks
  (see above).
* **No MLR when a frame is wider than a line.** MLR on a stack whose frame is
  wider than a line (eight layers × 128 bits > 512 bits) is not supported.
* **No DRAM core timing.** Row activation, tRCD, precharge and bank conflicts
  are left to the controller that drives `cmd_valid`. The one-frame
  command-to-fetch delay is this design's choice.
* **Simple command handshake.** One command per baseline cycle, through a
  valid/ready handshake. The address is split into bank, column and beat.
  Request scheduling, such as FR-FCFS, is left to the logic in front of the
  channel.
* **Observability ports.** The per-layer observation ports exist for testing.
  A synthesized stack would leave them unconnected.

## How far to trust it

What is established:

* The slot schedule, the clock rates and the latencies in the tables above are
  checked cycle by cycle in simulation, against reference models written
  independently of the RTL.
* Each testbench has been shown to fail when its module carries a deliberate
  bug.
* The sources pass Verilator lint and the slang front end.

What is not established:

* No timing closure, gate-level simulation or silicon validation has been
  done.
* The intra-cycle behaviour that real divided clocks and cut-through paths
  would have is outside what this single-clock model can show.

Two lint warnings remain, and both are expected:

* Reset is used both by the flip-flops and by the assertions' `disable iff`.
* At some stack heights, the counter and tick bits above the top layer are
  unused.
