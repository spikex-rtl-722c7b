# SpikeX: a systolic accelerator for sparse spiking neural networks

Spiking neural networks (SNNs) pass binary spikes between neurons over many time
points. Most neurons are silent most of the time, and their spikes come in short
bursts rather than spread evenly. SpikeX uses both facts:

- **Time windows.** Time is cut into windows of a few time points. One
  processing element (PE) handles one neuron for one whole window. It fetches
  each multi-bit weight once and applies it at every time point of the window.
- **Tags.** A one-bit tag records whether a window, a block of windows, or an
  input channel over the whole run saw any spike. Work and data with a zero tag
  are neither loaded nor computed.
- **Dispatch.** The remaining active work is packed onto an 8x8 systolic array
  in one of two ways, depending on how dense the activity is in time. The
  weights of input channels that never fired are not even fetched
  ("weight tailoring").

This repository holds synthesizable SystemVerilog for that accelerator. It has:

- a 54 KB global buffer with two tile slots;
- three double-buffered 2 KB local buffers: input spikes, weights and output spikes;
- an 8x8 array of leaky integrate-and-fire (LIF) PEs with 8-bit weights and 16-bit membrane potentials;
- a memory controller that computes the activity tags and does the tailored loads;
- a global controller that dispatches the work.

Each block has a self-checking testbench. An end-to-end test runs whole layer
tiles at the default sizes and compares every output spike with a plain
time-point-by-time-point LIF model.

## Time: points, windows, blocks and the stride

| term | meaning |
|---|---|
| time point | one SNN timestep |
| time window (TW) | `tws` consecutive time points, 1 to 10 (`cfg.tws`); the unit of work for a PE |
| time block (TB) | two consecutive windows; the unit in which spike data is loaded into the local buffers |
| time stride | the whole run, `ntw` windows (up to 150 per tile) |

The spikes of one input over one window are packed into a 16-bit word. Bit `t`
is time point `t` of the window. Bits at and above `tws` are zero.

**NTWU.** A *neuro-temporal work unit* NTWU(n, w) is the work of producing the
output spikes of neuron `n` in window `w`.

**Activity tags.** They are kept in `spikex_tagger` and set as spike words are
written into the global buffer:

- NTWU tag (per neuron and window): one if any input of the neuron spiked in that window;
- TW tag (per input channel and window): one if any input of the channel spiked in that window;
- TB tag: OR of the TW tags of the block;
- stride tag (the *SP-MB tag*): OR of the TB tags. SP-MB stands for spatiotemporal memory block; here it is one input channel of the tile over the whole stride.

A zero tag always means "nothing happened here". Every level is the OR of the
level below.

## The processing element

`spikex_pe` has one input register for a weight (from the left) and one for a
spike word (from above). It forwards both to its neighbours. It works in three
steps.

1. **Integration.** Each array *beat* latches a new weight and spike word.
   Over the next `tws` cycles the single reusable adder adds to scratchpad
   entry `C[t]` either the weight or zero, chosen by spike bit `t`. After all
   the inputs of a neuron have streamed past, `C[t]` holds the synaptic
   current of time point `t`.
2. **Membrane update.** Started by `upd_start`, one time point per cycle:
   `v = λ·u + C[t]`, beginning from the potential `u_in` that the neuron had at
   the end of its previous window.
3. **Spike generation.** The neuron fires when `v ≥ Vth`. The potential then
   resets to 0; otherwise `u = v`.

The leak factor is `λ = 1 − 2^-leak_shift` (`leak_shift = 0` means no leak), done
with a shift and a subtract. All additions saturate at 16 bits.

**Skipped windows.** If windows between two processed windows of a neuron were
skipped, the PE first applies `lead` leak-only steps, one per skipped time
point. The result is therefore exactly the same as running every time point.

**Timing.** Beats must be at least `tws` cycles apart. An update takes
`lead + tws + 1` cycles and ends with an `upd_done` pulse.

## The array and what goes where

`spikex_array` is an 8x8 grid of PEs fed by two skew buffers:

- `spikex_filter_buf` on the left delays row `r` by `r` beats;
- `spikex_ifm_buf` on top delays column `c` by `c` beats.

**Rows are output channels and columns are NTWUs.**

- Row `r` gets the weights of output channel `r` for the input that is streaming.
- Column `c` gets the spike word of the NTWU placed in that column: neuron (position) `pos_c`, window `w_c`.

Every PE of a column therefore sees the same spikes, which are the inputs
shared by the eight output channels at that position. Every PE of a row uses
the same weight at every column and at every time point of a window. PE
`(r, c)` ends up holding the synaptic currents of output channel `r`, at
position `pos_c`, in window `w_c`.

**A group** is up to 8 NTWUs, one per column, handed out by the dispatcher.
`spikex_global_ctrl` processes it in three stages:

1. **Clear** the PE scratchpads.
2. **Stream.** There is one beat per active input `k`, every `tws + 1` cycles.
   Each beat reads one 64-bit word (eight row weights) from the weight local
   buffer and eight spike words (one per column) from the IFM local buffer.
   Then 14 (= 8 + 8 − 2) empty beats flush the skew.
3. **Update the columns one after another.**
   - Each column's eight PEs start from the potentials in the *membrane-state
     store*, which holds eight potentials and the last processed window per
     neuron.
   - The leak-only `lead` is computed from the gap since that window.
   - The new potentials go back into the store.
   - The column's eight output spike words enter `spikex_ofm_buf`. It writes
     them into the OFM local buffer one per cycle, while the next column
     already updates.
   - A column that finishes before the buffer has drained waits. These waits
     are counted as `stall_cycles`. They happen only for short windows.

**Cost.** A group costs about `(K_active + 14)·(tws + 1)` cycles of streaming,
plus about `8·(tws + 3)` cycles of updates. `K_active` is the number of inputs
of untailored channels.

**Output and skipped work.** Output spikes land at
`(row·npos + pos)·ntw + w` in the OFM local buffer. The bank is cleared at the
start of a run, so NTWUs that were never dispatched (no input activity) read
as zero spikes, which is the correct result.

## Agile dispatch: temporal and spatial density

`spikex_dispatcher` scans the NTWU tags of the tile neuron by neuron and hands
out only active NTWUs. At the start of each run it picks one of two modes.

| mode | chosen when | a group holds |
|---|---|---|
| high temporal density (the default) | the average number of active NTWUs per neuron exceeds the array width (`active_cnt > 8·npos`) | active windows of a single neuron, so one weight serves 8 windows of that neuron |
| high spatial density | otherwise | active NTWUs of consecutive neurons until all 8 columns are full, so the same weights also serve several neurons |

In spatial mode the neurons of a group share weights because they are
positions of the same output channels, as in a convolution.

The result does not depend on the mode. The potential of a neuron is carried
through the store, and its windows are always issued in time order.

## Weight tailoring and the memory hierarchy

The global buffer (`spikex_sram`) holds 27,648 16-bit words (54 KB). It is
double-buffered as two *slots* of 13,824 words. Slot `b` starts at word
`b·13824` and pairs with bank `b` of the local buffers. Each slot has its own
set of activity tags (two `spikex_tagger` instances). A slot is divided into
three regions:

| region (offset in the slot) | word address |
|---|---|
| input spikes, from 0 | `(pos·K + k)·ntw + w`, with `K = nic·kpc` inputs per neuron (`kpc` inputs in each of `nic` input channels) |
| weights, from 1024 | 4 words per input `k`; each word holds two rows (row `2j` in the low byte) |
| output spikes, from 2048 | `(row·npos + pos)·ntw + w` |

A tile uses at most 3072 words of its slot, because that is what the local
buffers can take. Most of the global buffer is therefore idle in this tile
format.

The local buffers (`spikex_lbuf`) use the same offsets inside each 2 KB bank:

- IFM: 1024 16-bit words, 8 read ports (one per column);
- weights: 256 64-bit words, one per input;
- OFM: 1024 16-bit words.

Each bank has a valid bit per word. Clearing a bank makes all its words read
as zero, which is what the skipped data must look like.

**Loading a bank.** `spikex_mem_ctrl` runs `cmd_load` as follows:

1. Clear the target bank.
2. Let the weight tailor (`spikex_weight_tailor`) walk the input channels. For
   every input `k` of a channel whose SP-MB tag is set, read that input's four
   weight words and write one 64-bit local word.
3. Copy the spike words of those inputs, but only for time blocks whose TB tag is set.

The weights and spikes of silent channels are never read. The global
controller runs a second weight tailor over the same tags, so the array does
not spend beats on those inputs either. Status counters report the weight and
spike words fetched and the channels tailored. `cmd_store` copies the OFM
bank back to the global buffer.

## Running a layer

The host, or a DMA engine standing in for the off-chip DRAM, drives the
external port of `spikex_top`. It sends one request per cycle while
`ext_ready` is high: write spike word, write weights, read output word, or
clear tags. `ext_bank` selects the slot of each request.

A tile uses one bank index `b` throughout:

1. Set `cfg`: `tws`, `ntw`, `npos`, `nic`, `kpc`, `vth`, `leak_shift`.
2. With `ext_bank = b`, clear the slot's tags.
3. Write the tile's spike words and weights.
4. Pulse `cmd_load` with `load_bank = b` and wait for `mc_done`.
5. Pulse `cmd_run` with `run_bank = b`, hold `run_bank` during the run, and
   wait for `gc_done`.
6. Pulse `cmd_store` with `load_bank = b`. Read the outputs back with
   `ext_bank = b`.

While a tile runs on bank `b`, the next tile can be written into slot `1 − b`
and loaded into bank `1 − b`. Both tiles share `cfg`, so they must have the
same shape.

**Tile limits.**

- `K ≤ 256`, set by the 2 KB weight bank: 8 bytes per input.
- `nic ≤ 64` and `npos ≤ 64`.
- `npos·K·ntw ≤ 1024` (IFM bank) and `8·npos·ntw ≤ 1024` (OFM bank).

**Time tiling.** A 300-timestep stride does not fit these banks in one piece.
So `run_cont` lets a run continue the previous run's stride:

- use the same neurons and output channels;
- the new run's window 0 follows the last window of the previous run;
- membrane potentials and leak gaps carry over.

A layer is thus run as tiles of positions × groups of 8 output channels × time
slices.

**Network fit.** The layer sizes below are from the networks the design was
evaluated with: gesture recognition (DVS-Gesture, 300 timesteps) and N-MNIST
digits (30 timesteps).

- Fit: convolution layers with `C·E·E ≤ 256` (C input channels, E×E kernel), for
  example a 5×5 kernel over 8 channels or a 3×3 kernel over 12.
- Do not fit: larger convolutions and all fully connected layers, because they
  need more than 256 inputs per neuron.

## Where this design departs from the published description

- **Spike condition.** The published equation is written as a step function of
  `Vth − v`, which taken literally fires *below* threshold. The prose says a
  spike is emitted when the potential exceeds the threshold, and that the
  potential then resets. The RTL follows the prose: fire on `v ≥ Vth`, reset to 0.
- **Blocks per stride.** The description says the example stride has four
  blocks of two windows each. Its figure shows two blocks of two windows. Both
  agree on two windows per block, which is what the RTL uses.
- **Not specified, chosen here.** The leak value, the Vmem width and
  saturation, the word widths, the memory layout, the handshakes, and all
  cycle timing were not given and are this design's choices. The same holds
  for the membrane-state store, the `lead` leak steps and time tiling.
- **Partial sums.** These are not built. Each neuron's inputs must fit one
  tile (`K ≤ 256`). The published work also moves partial sums between memory
  levels, which would lift this limit.
- **Slots.** The global buffer is double-buffered as two fixed tile slots,
  each with its own tags. This pairing of slots, tags and local banks is this
  design's own choice.
- **Tailoring and the off-chip memory.** Tailoring applies between the global
  buffer and the local buffers, and again in the array's input stream. The
  off-chip memory is outside the design. Its side of the memory controller is
  the external port.
- **Mode choice.** The dispatch mode is picked once per tile, not per group.
- **Result.** The accelerator computes exactly the LIF result, with no
  approximation. Zero-skipping changes only the work done, not the outputs.

## Files

| file | block |
|---|---|
| `rtl/spikex_pkg.sv` | sizes, `cfg_t`, slot and mode types, leak and saturating add |
| `rtl/spikex_pe.sv` | processing element |
| `rtl/spikex_filter_buf.sv`, `rtl/spikex_ifm_buf.sv` | left and top skew buffers |
| `rtl/spikex_array.sv` | 8x8 PE array with the skew buffers |
| `rtl/spikex_ofm_buf.sv` | column-to-serial output buffer |
| `rtl/spikex_tagger.sv` | hierarchical activity tags |
| `rtl/spikex_dispatcher.sv` | NTWU dispatch, two density modes |
| `rtl/spikex_weight_tailor.sv` | walks active input channels |
| `rtl/spikex_sram.sv` | global buffer |
| `rtl/spikex_lbuf.sv` | double-buffered local buffer with valid bits |
| `rtl/spikex_mem_ctrl.sv` | external port, tagging, tailored load, store |
| `rtl/spikex_global_ctrl.sv` | tile sequencing, membrane-state store |
| `rtl/spikex_top.sv` | the accelerator, no parameters |

Each `tb/tb_<module>.sv` checks one module against values it works out
independently. The checks include the example tags of the published figure and
cycle counts where they are fixed.

`tb/tb_spikex_top.sv` runs five layer tiles at the default sizes, one of them as
three time tiles. It covers every mechanism and counts each one, failing if one
never happens:

- both dispatch modes;
- skipped NTWUs and the leak across them;
- tailored channels;
- skipped time blocks;
- output-buffer stalls;
- continued strides;
- both banks;
- host writes into one slot while the other slot's tile runs.

`tb/tb_spikex_conv_layer.sv` uses the accelerator the way a host would for
real layers. It runs convolution layers of the evaluated networks, with
random bursty input spikes. For each layer it:

- cuts the layer into tiles of positions × 8 output channels × time slices;
- writes the im2col spike words (one word per kernel input and window);
- runs the tiles, chaining the time slices with `run_cont`;
- checks every output spike against a reference LIF convolution.

What it runs:

- N-MNIST CONV1 (34×34×2 input, 3×3 kernels, 12 channels, 30 timesteps): the
  whole layer, at window sizes 10 and 2.
- N-MNIST CONV2: slices at window sizes 10 and 5.
- The first convolution of both gesture networks (64×64×2 with 5×5 kernels,
  and 32×32×2 with 3×3 kernels): slices over all 300 timesteps.

It takes about 40 s and checks about 115,000 output words.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing -Wno-fatal -Irtl rtl/spikex_pkg.sv rtl/*.sv \
    tb/tb_spikex_top.sv --top-module tb_spikex_top -o sim
./obj_dir/sim
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`, and has a
watchdog. To test another block, replace the testbench file and the top module
name, e.g. `tb/tb_spikex_dispatcher.sv` with `--top-module tb_spikex_dispatcher`.
The end-to-end test builds in about 20 s and simulates in under a second.

The array size, the buffer sizes and the tile limits are parameters in
`spikex_pkg`. The lower-level modules take `NR`/`NC` parameters, so they can be
tested at other sizes.
