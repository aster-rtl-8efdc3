# ASTER: a processing-in-memory engine for spiking transformers

Spiking transformers carry information between layers as binary spikes, one
bit per neuron per timestep, and most of those bits are zero. A weight matrix
held in a resistive (RRAM) crossbar can multiply such a spike vector in one
analog step: every row whose input bit is 1 is driven, every column adds up
the current of its conducting cells, and the column totals are the
matrix-vector product. This design builds that idea into a chip with three
extras that exploit sparsity:

* **zero-skipping wordlines**: a row whose input bit is 0 is never driven, so
  the cost of a product follows the number of ones, not the vector length;
* **bit-serial, variable precision**: the same array takes 1-, 2- or 4-bit
  inputs by feeding one bit-plane at a time and shifting the partial sums;
* **two run-time shortcuts**: attention layers whose output spike rate was
  found to be very low are skipped, and a sample stops early, before its last
  timestep, once the running classification is confident enough.

The SystemVerilog here is a cycle-level model of the digital part of such a
chip and a behavioural model of the analog array. It compiles with Verilator 5
and with the slang front end of Yosys, and every block has a self-checking
testbench.

## Hierarchy

```
aster_top          chain of NUM_TILES tiles; host packets in at the head,
 |                 responses out at the tail
 +- tile (x4)
     +- noc_router          one hop of the chain, local delivery by tile id
     +- tile_controller     command sequencer, one response per command
     +- sad                 sub-array decoder -> subarray select lines (SS)
     +- subarray (x4)
     |   +- act_fifo            4-bit activation entries
     |   +- mask_regs           one bit-plane of the head entry
     |   +- gated_wl_driver     WL = mask AND SS AND fire
     |   +- rram_crossbar       behavioural 128x128 array
     |   +- peripheral_readout  16 ADCs, each shared by 8 columns
     |   |   +- sense_adc (x16)
     |   +- timestep_scheduler  bit-plane / timestep sequencing
     |   +- lif_block           accumulate, compare, reset
     |   |   +- membrane_buffer 64 slots of 128 membranes
     |   +- spike_buffer        packs spike vectors into entries
     +- global_accumulator  sum of partial sums across subarrays
     +- global_buffer       256 x 512-bit scratch memory
     +- max_pool            element-wise maximum over entries
     +- sdsa_unit           spike-driven self-attention mask
     +- attn_skip_unit      per-layer activity profile and skip bits
     +- early_exit_unit     logit averaging and exit decision
```

`aster_pkg` holds the sizes (128x128 arrays, 16 ADCs per array, 4-bit
entries, 64 membrane slots, 4 subarrays per tile) and the packet format.

## The activation entry and precision

Everything that enters a subarray is a 512-bit *entry*: four bits for each of
the 128 wordlines. The four bits are four *bit-planes*. How the planes are
read depends on the precision of the run:

| precision | timesteps per entry | plane b belongs to timestep | weight of plane b |
|-----------|--------------------|-----------------------------|-------------------|
| 1 bit     | 4                  | b                           | 1                 |
| 2 bit     | 2                  | b / 2                       | 2^(b mod 2)       |
| 4 bit     | 1                  | 0                           | 2^b               |

Bit 4r+b of an entry is plane b of wordline r; plane 0 is the earliest
timestep (or the least significant bit). Spikes are therefore packed four
timesteps to an entry, while a 4-bit input (for example a pixel in the patch
embedding) fills a whole entry by itself.

## One run of a subarray

A run takes the entry at the head of the FIFO through the array.
`timestep_scheduler` walks the four planes. For each plane:

1. **LOAD** (1 cycle): the plane is copied into the 128 mask registers.
2. **READ** (8 cycles): the gated drivers assert the wordlines whose mask bit is
   1, provided the subarray is selected. The crossbar model returns each
   column's count of conducting cells on asserted rows. The 16 ADCs each step
   through their 8 columns, one per cycle, so after 8 cycles all 128 partial
   sums are held. Each ADC quantises to 8 bits and saturates.
3. **ACC** (1 cycle): the 128 partial sums go to the LIF block with a left
   shift equal to the plane's weight. On the plane that completes a timestep
   (its count reaches the precision N), the block also compares.

The LIF block is a two-stage pipeline. Stage 1 reads the membrane slot chosen
for the run, adds `psum << shift` and saturates at 16 bits. Stage 2 compares
with the threshold. A neuron whose potential is at least the threshold emits a
spike, and its membrane is cleared. Otherwise the membrane keeps the sum. There
is no leak. A forwarding path lets back-to-back planes update the same slot
without a stall. The spike vectors of a run are packed by `spike_buffer` into
an output entry in the same layout as an input entry. That entry can be
returned to the controller, written to the global buffer, or pushed straight
back into the subarray's own FIFO as the input of the next layer (the
*loopback* flag).

A bit-plane with no ones at all drives no wordline, so the scheduler skips
its READ phase and goes straight to ACC with zero partial sums. A run
therefore takes **10 cycles per non-empty plane and 2 per empty plane, plus
4**: 2 to drain the LIF pipeline, 1 to pop the entry, 1 to register done.
That is 44 cycles for a dense entry and 12 for an all-zero one. Within a
plane, zero-skipping shows up as wordlines that are never driven (and, in
silicon, as energy never spent). Sparse spike trains, such as a token that
fires in only one of its four timesteps, also finish sooner.

In *partial-sum* mode (`RUN_PSUM`, `RUN_LOGIT`) the LIF block is bypassed.
Each plane's partial sums go to the tile's global accumulator, which adds the
selected subarrays' sums with the plane's shift. A layer wider than 128 inputs
is split over several subarrays and recombined here.

The 64 membrane slots let one subarray keep the state of up to 64 tokens (or
layers) between runs. `CLR_MEM` clears a slot at the start of a sample.

## Tile commands

The host talks to tiles with packets (`pkt_t`: destination tile, opcode,
subarray or broadcast flag, four 8-bit and two 16-bit arguments, flags and a
512-bit payload). A tile executes one command at a time and answers each with
exactly one response packet to the host. The response carries the opcode and
the tile id, plus any result. The full field list is in the opening comment of
`rtl/tile_controller.sv`. In short:

| command | effect |
|---------|--------|
| `WRITE_ROW` | program one row of a subarray's cells |
| `PUSH_ACT`, `GB_TO_FIFO` | put an entry (from the packet or from the buffer) into one or all FIFOs; refused with a flag if a FIFO is full |
| `RUN` | start the selected subarrays; LIF, PSUM or LOGIT mode, precision, threshold, membrane slot, loopback; in LIF mode the output entry of subarray s can be written to buffer address `a1 + s*a2`; refused if a FIFO is empty |
| `CLR_MEM` | clear a membrane slot |
| `WRITE_GB`, `READ_GB`, `READ_GA` | buffer access; read 32 accumulator lanes |
| `POOL` | OR (the maximum of binary spikes) of `count` consecutive buffer entries into one |
| `SDSA` | spike-driven attention over tokens stored in the buffer |
| `SKIP_CFG` | set skip bits, clear the profile, or decide skips from the profile |
| `EE_CFG` | start a sample: confidence threshold, class count, timestep limit |

A refused command is answered at once, so a wrong host sequence cannot hang a
tile.

## Spike-driven attention

For binary Q, K and V, attention reduces to masking. For each channel the unit
counts over all tokens how often Q and K are both 1. A channel whose count
reaches a threshold opens the mask. Each token's V is then ANDed with the
mask. `sdsa_unit` holds the 128 counters. The controller streams the Q and K
entries of every token, one timestep plane at a time, from the global buffer,
then streams V and writes the masked result back. The response reports the
number of output ones. When profiling is on, that count and the number of
bits go to `attn_skip_unit`.

Typical use: one broadcast `RUN` over three subarrays holding the Q, K and V
weights produces all three projections of a token. The strided write-back
places them in three buffer regions, ready for `SDSA`.

## Skipping attention layers

`attn_skip_unit` keeps, per layer, the total number of attention output ones
and bits seen during a profiling pass. On *decide* with a threshold tau, a
16-bit fraction, it marks every profiled layer whose rate `ones/bits` is below
tau. From then on an `SDSA` command for a marked layer is not computed. It
responds with a flag. The host treats the layer as an identity: the block
input passes through, and the layer's Q, K and V projections are not run
either. The bits can also be written directly. Choosing
tau, like choosing the exit threshold, is an offline search and is not part
of the hardware.

## Early exit over timesteps

In `RUN_LOGIT` mode the accumulator's first `num_classes` lanes are the class
logits of one timestep. `early_exit_unit` adds them into running per-class
sums. It then finds the largest sum m (the prediction) and computes

    S = sum_j 2^-floor((m - sum_j) / t)

in 16-bit fixed point. This is the softmax denominator of the time-averaged
logits, with base 2 in place of e. The largest softmax probability is 1/S. The
sample is confident when `1/S > beta`, checked as `2^32 > beta * S`. The
response to the `RUN` tells the host to stop (confident, or the timestep limit
reached), the predicted class and the timestep count. The decision takes
`2 * num_classes + 2` cycles after the last plane.

## Network

Tiles form a chain. Each router passes a packet addressed to its own tile to
the controller, and sends every other packet, and every response, to the next
tile. The last tile's output is the host's response port. Both router outputs
are registered and use valid/ready. When a passing packet and a local response
compete for the downstream register, they take turns. Back-pressure from the
host therefore stalls the chain without losing packets.

## What follows the source design and what is this implementation's own

The source design is followed for these points:

* the organisation of chip, tiles and subarrays;
* the subarray contents: FIFO, mask registers, gated drivers, array,
  8-to-1 column multiplexing into 16 ADCs, scheduler, LIF block with membrane
  buffer and spike buffer, and spike loopback into the FIFO;
* the 4-bit entry holding 4/2/1 timesteps at 1/2/4 bits;
* zero-skipping and subarray-select gating of wordlines;
* the shift-and-add accumulation and the compare-after-N-planes rule;
* the tile units: global accumulator, buffer, max pool, controller, router;
* attention as a Q-AND-K mask on V;
* layer skipping on a firing-rate threshold, and an early exit on the maximum
  softmax probability.

The following are this implementation's own choices, where the source is
silent:

* the command set, packet format and chain topology;
* the FIFO depth, 4 entries;
* the ADC resolution, 8 bits;
* the membrane width, 16 bits;
* the bit order inside an entry;
* the cycle counts;
* placing an attention, skip and early-exit unit in every tile;
* base-2 softmax arithmetic;
* fixed-point thresholds;
* the number of tiles, 4.

The crossbar cell is taken to be binary, one cell per weight bit. Multi-bit
weights need several columns or subarrays and host-side recombination.

One point of the source is ambiguous. Its LIF drawing labels the comparator
"greater than threshold", while its pipeline formula keeps the membrane when
it is below the threshold. That formula implies firing at equality. The
formula is followed: a neuron fires when its potential is at least the
threshold.

Not modelled:

* the analog programming drivers;
* high-voltage rail gating (only its logical effect, the SS gating, is
  built);
* energy;
* the offline threshold search;
* the normalized-entropy confidence measure, an alternative to the maximum
  softmax probability (only the latter is built);
* overlap of data movement with computation inside a tile: a tile runs one
  command at a time. Different tiles do work concurrently when the host
  does not wait for each response before addressing the next tile.

## Capacity

With the defaults (4 tiles x 4 subarrays x 128 x 128 cells = 262,144 cells) the
chip cannot hold a whole spiking transformer of the sizes these techniques
target. Take a 2-layer, 256-wide model (event-camera classification with 16
timesteps). Its encoder alone has about 1.6 M weights, six times the cell
count. An 8-layer, 512-wide model (about 25 M weights, 4 timesteps, 196
tokens) is about a hundred times larger and has more tokens than membrane
slots. Such models run layer by layer, reprogramming rows between layers, or
need more tiles (`NUM_TILES` is a parameter, up to 14 with 4-bit tile ids).

A layer with more than 128 inputs is split over subarrays and summed in the
global accumulator (`RUN_PSUM`). The neurons, however, live in the subarrays.
A threshold on the accumulated sum is therefore left to the host, which reads
the sum with `READ_GA`. Only layers of up to 128 inputs fire inside the chip.

## Simulating

All testbenches are self-contained and print
`TB_RESULT checks=<n> failures=<m>`. With Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/aster_pkg.sv tb/tb_aster_top.sv \
          --top-module tb_aster_top -Mdir obj -o sim && obj/sim
```

Replace `tb_aster_top` with any other testbench in `tb/`. Each block testbench
compares the block with a model written independently inside the testbench.

* `tb_tile` drives one tile through its packet ports with random
  back-pressure. It covers:
  * programming;
  * 4- and 2-bit LIF runs with membrane carry and clearing;
  * strided write-back;
  * partial sums of four subarrays;
  * pooling and attention;
  * forced layer skip and the logit exit;
  * the refusals.
* `tb_aster_top` runs the whole chip at its default size. It runs a small
  spiking-transformer pipeline for two samples:
  * tile 0: a 4-bit patch embedding, then max pooling;
  * tile 1: Q/K/V projections and attention;
  * tile 2: a two-layer 1-bit MLP joined by loopback;
  * tile 3: a 2-bit classification head over four subarrays, with early exit.

  It checks every intermediate result against its own model. It counts each
  mechanism and fails if any never occurs:
  * zero-skipped wordlines and skipped empty bit-planes;
  * each precision;
  * firing and reset;
  * loopback;
  * multi-subarray accumulation;
  * pooling;
  * attention computed, and attention skipped after profiling;
  * confident exit and timestep-limit exit;
  * router contention;
  * FIFO refusal.

  The first sample runs to the timestep limit. Its attention activity then
  marks the layer for skipping, and the second sample exits early and
  bypasses attention.
