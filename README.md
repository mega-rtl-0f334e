# Mega: an event-driven 3x3 convolution engine for spiking networks

A convolutional spiking neural network (SNN) layer receives, per timestep, a
sparse binary spike map and updates a map of integrate-and-fire neurons. The
usual sliding-window convolution computes every output from its 3x3 input
window, so it reads mostly zeros when 90 % or more of the inputs are silent.
This design turns the convolution around and lets every input spike push its
kernel into the neurons around it:

    a spike at (u, v) adds W[a, b] to V[u - a, v - b]   for (a, b) in {-1,0,1}^2

The work then grows with the number of spikes rather than with the map size.
The nine neurons a spike touches are all updated in the same clock cycle, for
32 output channels at once: 9 x 32 = 288 updates per cycle. When a timestep's
spikes are all in, a threshold pass applies leak, fires and resets the
neurons, and writes the output spike map back in the format the next layer
reads.

The RTL in `rtl/` is a synthesizable SystemVerilog model of this accelerator:
spike streamer, weight buffer, nine compute clusters (neuron state bank,
32 convolution units and a threshold unit each), output spike buffer,
neuron-state mover, control registers and sequencer. The surrounding system
(host processor, shared data memory and its interconnect) is not included.
The top module `mega` instead has four plain memory ports.

## Numbers and formats

| Quantity | Value |
|---|---|
| Neuron state | signed 8 bit, clipped to [-128, 127] on every update |
| Weight | signed 4 bit |
| Output channels per run | 32 (one neuron-state word) |
| Input channels per run | up to 64 (weight buffer depth, this design's choice) |
| Neuron state banks | 9 dual-port banks, 512 words x 256 bit = 16 kB each, 144 kB in total |
| Spike vector | 96 bit, one map row of one channel; map width 1..96 |
| Peak rate | one input spike per cycle, 288 synaptic updates per cycle |

Everything in `mega_pkg` (`rtl/mega_pkg.sv`) is shared by all modules: widths,
the spike address struct, the configuration struct, the operation mask and
the register map.

## Interlaced neuron state memory

This is the central trick of the design. Neuron (x, y) of a layer lives in
bank (bx, by) = (x mod 3, y mod 3), at word (x', y') = (x div 3, y div 3),
address `y' * row_words + x'` with `row_words = ceil(map_w / 3)`. Any 3x3
window of the map then touches each bank exactly once. The nine targets of
one spike therefore lie in nine different banks, and all nine can be read and
written in the same cycle with no conflict. One word holds the 32 output
channels of one position.

Each compute cluster owns one bank. A spike is broadcast to all nine clusters
in the interlaced form (x', bx, y', by), and each cluster works out which of
the spike's nine targets is its own. For the column, with d = (BX - bx) mod 3:

| d | target column | kernel column offset a | target x' |
|---|---|---|---|
| 0 | x | 0 | x' |
| 1 | x + 1 | -1 | x' + 1 if bx = 2, else x' |
| 2 | x - 1 | +1 | x' - 1 if bx = 0, else x' |

Rows are handled the same way for b and y'. A target outside the map is
dropped, which gives zero padding: the output map has the size of the input
map. The cluster uses weight word k = 3*(b+1) + (a+1) of the spike's input
channel. The streamer supplies four edge flags (first/last column and row) so
the clusters need no comparison against the map size.

Because every cluster is hard-wired to one residue class, the cluster that
handles a given kernel offset changes from spike to spike. The weight buffer
therefore delivers all nine kernel words of the spike's input channel at
once, and each cluster picks its own.

## Spike streamer: from dense rows to one spike per cycle

Spikes are stored densely, one 96-bit vector per (input channel, row), at
`spk_base + ch*map_h + y`, with pixel x at bit 95 - x. The streamer
(`mega_spike_streamer`) reads these vectors in order and emits one spike
address per cycle:

* a tree leading-zero counter (`mega_lzc`, depth log2 of the width) finds the
  first set bit; the bit is cleared and the next cycle finds the next one;
* the following vector is prefetched while the current one drains. A second
  LZC watches the prefetched vector, so the first spike of the next row goes
  out in the cycle right after the last spike of the current row;
* x' and bx come from two 96-entry lookup tables indexed by the LZC output,
  computed at elaboration as x div 3 and x mod 3. y' and by come from
  counters that step with the row, so there is no divider;
* an all-zero row costs one cycle. Bits at and beyond `map_w` are masked.

One read is outstanding at a time, so a memory with more than one cycle of
response latency can starve the streamer on very dense rows.

## Convolution pipeline and hazards

Each of the 32 convolution units of a cluster (`mega_cu`) is a four-stage
pipeline. Stage 1, address generation, is shared by the 32 lanes and sits in
`mega_cluster`.

1. **Address.** Target word, kernel index and validity, as in the table above.
   The target address is compared with the addresses of the two spikes ahead.
2. **Fetch.** Synchronous bank read. The weight buffer's registered read
   delivers the nine kernel words in the same cycle.
3. **Update.** state + weight, clipped to 8 bits.
4. **Write back.**

Two spikes in a row can hit the same neuron, for example neighbouring pixels
in a row. The bank has one cycle of read latency and the write happens in
stage 4, so a read can miss the newest value:

* the spike one cycle ahead is still in stage 4. Its result is taken from the
  stage-4 register (`fwd1`);
* the spike two cycles ahead writes the bank in the same cycle this spike
  reads it, and the bank returns the old word. Its result is taken from a
  one-word copy of the last write (`fwd2`).

`fwd1` wins if both are set. The pipeline never stalls; a spike enters
every cycle.

## Threshold pass and output spikes

After the convolution (plus five drain cycles) the sequencer walks the
output map row by row. Row y lives in the three banks with by = y mod 3, so
three of the nine threshold units (`mega_threshold_unit`) sweep the row's
`row_words` words together. Each unit is also a four-stage pipeline:

1. a counter addresses the words;
2. the bank is read;
3. leak and compare, for 32 states at once. The leak is linear and moves the
   state toward zero by `leak`, never past zero. A neuron fires if the
   leaked state is strictly greater than `thresh`;
4. write back: 0 for a neuron that fired, the leaked state otherwise.

The spike buffer (`mega_spike_buffer`) puts each unit's 32 spike bits into
column 3*x' + bx of 32 row vectors. It then writes the vectors to
`out_base + ch*map_h + y`, the same layout the streamer reads, so one
layer's output is the next layer's input. Each row costs about `row_words`
+ 5 cycles of thresholding plus 32 write cycles.

## A run and the host interface

A run covers one timestep of one layer, for 32 output channels. The host
writes the configuration registers and then CTRL with a start bit and an
operation mask. The sequencer (`mega_ctrl`) runs the enabled operations in
this order:

1. **load weights**: `cin * 9` words of 128 bits from `wgt_base + ch*9 + k`;
   lane i holds output channel i at bits 4i+3:4i;
2. **load states**: `ns_words` words per bank from the shared memory into
   the banks. The memory image is bank after bank, bank index 3*by + bx, at
   `ns_base + bank*ns_words + word`;
3. **convolution**: the streamer walks all `cin * map_h` vectors;
4. **threshold**: row by row, each row followed by the output flush;
5. **store states**: the reverse of step 2.

For consecutive timesteps of one layer, the states and weights can stay in
place between runs: start with only convolution and threshold. A layer with
more than 32 output channels takes one pass per group of 32, with its own
weights and its own state image. `irq_done` pulses at the end of a run.

Register map (word addresses, `csr_addr_e`):

| Addr | Name | Meaning |
|---|---|---|
| 0 | CTRL | bit 0 start; bits 5:1 operations: load weights, load states, convolution, threshold, store states |
| 1 | STATUS | bit 0 busy, bit 1 done |
| 2, 3 | MAP_W, MAP_H | map size (width at most 96) |
| 4 | CIN | input channels (1..64) |
| 5..8 | SPK_BASE, WGT_BASE, NS_BASE, OUT_BASE | word addresses, each in its port's word size |
| 9, 10 | LEAK, THRESH | 8-bit leak and signed 8-bit threshold |
| 11 | NS_WORDS | words per bank moved by load/store states |
| 12, 13 | SPIKES, CYCLES | input spikes and cycles of the last run |

Each memory port (spikes in 96 bit, weights 128 bit, neuron states 256 bit
read/write, spikes out 96 bit) is a valid/ready request. Reads answer in
order, one or more cycles later, and the response is always accepted.

## Capacity

A layer fits if `ceil(map_w/3) * ceil(map_h/3) <= 512` (words per bank), if
`map_w <= 96`, and if `cin <= 64`. Some layer shapes that have been run:

| Layer | Fits | Input spikes | Convolution cycles |
|---|---|---|---|
| 32x32, 2 -> 32 channels | 121 words per bank | 200 | 329 |
| 32x32, 32 -> 32 | 121 | 3236 | 4950 |
| 16x16, 32 -> 32 | 36 | 848 | 2367 |
| 8x8, 32 -> 64 (two passes) | 9 | ~186 per pass | ~1190 per pass |
| 8x8, 64 -> 64 (two passes) | 9 | ~400 per pass | ~2365 per pass |
| 96x48, 75 % sparse | 512 (full) | 1145 | 1151 |
| 96x48, 98 % sparse | 512 (full) | 84 | 219 |

Convolution time is about one cycle per spike plus one cycle per empty
vector. Dense rows are limited by the single outstanding read. A 96x50 map
with the same-size output needs 544 words in two of the banks and does not
fit; with a 94x48 ("valid") output it would fit exactly, but this design only
produces same-size outputs. Pooling and fully connected layers are not
executed by this hardware.

## Where this design makes its own choices

What the block diagram fixes is followed: nine clusters of 32 units, the
interlaced banks, four-stage update and threshold pipelines with forwarding,
linear leak, the row-wise threshold with three units active, and the 96-bit
streamer with a tree LZC, a prefetch LZC, lookup tables and counters. The
following are this design's own:

* all memory layouts (spike vectors, weight words, state image, output
  vectors), the port widths, the register map and the run sequence;
* leak toward zero for negative states too; firing on strictly greater;
  reset to zero;
* zero padding (same-size output), and the edge flags that implement it;
* the weight buffer depth of 64 input channels, with nine parallel arrays;
* a sequential neuron-state mover, one word in flight;
* a single outstanding spike-vector read;
* a one-cycle synchronous bank read, which is what sets the two forwarding
  distances.

## Verifying and simulating

Every block has a self-checking testbench in `tb/` (`tb_<module>.sv`) that
prints `TB_RESULT checks=N failures=M`. The testbenches compare against
values computed in the bench itself, usually a plain sequential model:

* `tb_mega` runs the whole accelerator at full size through three runs. The
  runs include a second timestep on states left in the banks and a full
  96-wide map. Memory ports see random back-pressure and random latency.
  Output spikes, stored states and the spike counter are checked against an
  event-driven reference model. The test also counts each mechanism and
  fails if one never occurred: both forwarding paths, clipping, edge drops,
  empty vectors, gap-free continuation into the prefetched vector, a cycle
  with all 288 updates, output spikes, back-pressure and a partial run.
* `tb_mega_workloads` runs the layer shapes in the capacity table and prints
  the cycle counts.

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_mega \
        -y rtl rtl/mega_pkg.sv tb/tb_mega.sv -o sim
    ./obj_dir/sim +verilator+rand+reset+2

Swap in another testbench name for the other blocks. `tb_mega` builds in
about a minute and runs in seconds. The benches drive a real falling edge
on the asynchronous reset and initialise everything they read, so they pass
with random initial values.

Sizes can be changed through `mega_pkg` (`LANES`, `NS_DEPTH`, `CH_MAX`) and
the module parameters. The kernel size of 3 and the 96-bit vector are built
into the addressing and the lookup tables.
