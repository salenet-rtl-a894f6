# SaleNet accelerator — RTL

SaleNet classifies sustained attention as one of two levels from a 10-second window of
prefrontal EEG (5 channels, 250 Hz, 2500 samples). It is a small 1-d CNN built end to end,
with no hand-crafted features. It has four convolution blocks (convolution with kernel 16,
batch norm, ReLU), then global average pooling (GAP) and a 128 → 2 linear layer. Group
convolution, GAP, pruning and low-bit quantization bring it down to about 31 k parameters
and 66.6 M operations per window. That is small enough for a low-power FPGA accelerator with
no off-chip memory.

This repository holds synthesizable SystemVerilog for that accelerator. It also holds
self-checking testbenches, one of which runs a complete full-size inference against an
independent reference model. The architecture follows the published SaleNet design:

- 16 process engines (PEs) of 128 multipliers each;
- one on-chip buffer shared by all intermediate feature maps;
- GAP fed directly from the PEs;
- bias-driven channel pruning;
- a fast data-loading clock and a slow PE clock.

The published description gives the architecture's outline but few implementation details.
Where it gives none, this RTL makes its own choices; each is listed in
[Departures and own choices](#departures-and-own-choices).

## The network as the hardware sees it

| layer | in (C, L) | out (C, L) | groups g | Cin/g | stride | zero pad | PE cycles |
|---|---|---|---|---|---|---|---|
| conv block 1 | 5, 2500 | 64, 1254 | 1 | 5 | 2 | 11 | 5016 |
| conv block 2 | 64, 1254 | 64, 1269 | 8 | 8 | 1 | 15 | 5076 |
| conv block 3 | 64, 1269 | 64, 1254 | 8 | 8 | 1 | 0 | 5016 |
| conv block 4 | 64, 1254 | 128, 628 | 16 | 4 | 2 | 8 | 5024 |
| GAP | 128, 628 | 128 | – | – | – | – | (in the PE write-back) |
| linear | 128 | 2 | – | – | – | – | 1 |

These values come from the published design:

- the map shapes;
- the group numbers;
- the kernel size;
- the PE-cycle counts.

Stride and padding are not published. The values in the table are the smallest that turn
each input length into the published output length. Block 2 really does lengthen its map,
from 1254 to 1269.

Group convolution restricts output channel `i` to input channels `s .. e`, where
`s = (i // (Cout/g)) * (Cin/g)` and `e = s + Cin/g - 1`. With a kernel of 16, one output
value is an inner product of at most 8 × 16 = 128 terms. That is exactly one PE.

The layer table lives in `salenet_pkg::layer_cfg`.

## Mapping a layer onto the PE array

A **PE cycle** gives each of the 16 PEs one 128-element inner product. In it, the array
computes 16 output channels (a *chunk*) of one output position `t`. A conv block therefore
takes `Cout/16 × Lout` PE cycles. For the four blocks that is 5016, 5076, 5016 and 5024, the
published counts. The linear layer takes one PE cycle, in which PEs 0 and 1 produce the two
logits.

Each group holds `Cout/g = 8` output channels in blocks 2–4 (64 in block 1). So a chunk of 16
always covers whole groups. The 16 PEs of one chunk read at most two (block 2/3) or four
(block 4) distinct input slices.

PE `p` in chunk `k` computes output channel `oc = 16k + p`. Element `j` of its input vector
is `window[j % 16][s(oc) + j / 16]` while `j / 16 < Cin/g`, and zero beyond that:

- block 1 uses 80 elements;
- blocks 2 and 3 use 128;
- block 4 uses 64.

The weight memory stores each kernel in the same channel-major order.

## The process engine

Every PE evaluates one equation, with `b = conv bias − running mean` and
`w_BN = γ / sqrt(var + ε)` folded offline:

    y = ReLU( (Σ_{i<128} x[i]·w[i] + b) · w_BN + β )          conv block
    y =        Σ_{i<128} x[i]·w[i] + b                          linear layer

The published PE has 128 multipliers, 64 adders and 128 registers. The `pe` module uses them
as a *folded adder tree*, over 9 slow-clock cycles:

1. The 128 products are written into the 128 registers.
2. In each of the next 7 cycles, the 64 adders add neighbouring register pairs. The sums go
   back into registers 0..63 through a mux that selects between product and sum.
3. In the last cycle, the PE adds `b`, multiplies by `w_BN`, shifts, adds `β`, applies ReLU
   and saturates.

Number formats (13-bit activations):

- `x`: 13-bit signed;
- `w`: 8-bit signed (conv weights are 7-bit values);
- `b`: 12-bit;
- `w_BN`: 16-bit with 14 fraction bits;
- `β`: 14-bit;
- accumulator: 28-bit.

Conv-mode results are clamped to `0 .. 4095`. `x` and `w` are only needed in the start cycle.
The next PE cycle's operands can therefore be fetched while the tree reduces. The controller
does not yet use this.

## One buffer for all feature maps (in-place computation)

The outputs of blocks 1–3 are about 1 Mb each, so they all share one `feature_bram` of
1269 columns × 64 channels × 13 bits (1.06 Mb). Each block overwrites its own input map.
That only works because of the order in which columns are read and written:

- `data_loader` keeps a 16-column window of the input map. For output position `t`,
  `window[k]` holds input column `t·stride − pad + k`. Columns outside the map shift in as
  zeros.
- Each input column is read from the buffer exactly once, when it enters the window. After
  that it lives only in the window registers.
- Output column `t` is written to address `t` after all its chunks are done and before the
  window advances.

Every column that a later output still needs is therefore either already in the window or
has an address greater than `t`:

| block | window of output t | highest column read before writing t | safe because |
|---|---|---|---|
| 2 (s=1, pad 15) | t−15 .. t | t | columns t−14 .. t, still needed by later outputs, are in the window |
| 3 (s=1, pad 0) | t .. t+15 | t+15 | column t was last needed by output t |

For block 2, outputs 1254..1268 go to addresses that hold no input (the input ends at
1253). Input columns ≥ 1254 are padding and are never read. Block 1 reads the separate
`input_buffer`. Block 4 reads the buffer but never writes it: its results go straight into
`gap`.

## GAP and the linear layer

During block 4, each PE cycle's 16 results are added to the running sums of their 16
channels. Nothing of the (128, 628) map is stored. When block 4 ends,
`avg[c] = floor(sum[c] · 26715 / 2^24)`, where 26715 = round(2^24 / 628). In linear mode the
data loader gives every PE the 128 averages. The PEs then skip BN and ReLU, which is
equivalent to `w_BN = 1, β = 0`. `level` is 1 when logit 1 is greater than logit 0.

## Bias-driven pruning

Every conv block is followed by ReLU. A channel whose BN bias `β` is strongly negative
mostly produces zeros. In blocks 1–3 such channels are pruned: a channel with
`β < bdp_thr[block]` is not executed. Its PE's registers do not toggle, and its output is 0.

The published thresholds are −0.061, −0.046 and −0.183 in real units. Their fixed-point
values depend on the quantization scale of `β`, so they are run-time inputs. `bdp_en = 0`
turns pruning off. The number of skipped channel evaluations is reported in `pruned`.

Near-zero pruning and weight clustering happen offline. They show up in hardware only as
zero and 7-bit weight values.

## Clocking and timing

The published design loads data at 50 MHz and runs the PEs at 10 MHz. This RTL uses one
50 MHz clock, `clk`. The PE domain is a clock enable `ce` that is high one cycle in five
(`SLOW_DIV`). All loads, memory reads and write-backs happen on `clk`. The PE registers only
advance on `ce`.

Per output position, the sequence is:

- window loads: 2 cycles per column;
- for each chunk:
  - a 2-cycle row read;
  - a wait for `ce`;
  - a 9-slow-cycle PE cycle;
  - a store;
- one write-back cycle.

A whole inference takes 928 k cycles of `clk`, which is 18.6 ms at 50 MHz. That is about
3.6 GOp/s for the 66.56 M operations. The published figure is 0.90 GOp/s. Its latency is not
given in the text, so the RTL's schedule is not tuned to match it.

## Interface (`salenet_top`)

| port | meaning |
|---|---|
| `clk`, `rst_n` | 50 MHz clock, asynchronous active-low reset |
| `eeg_we, eeg_col[11:0], eeg_ch[2:0], eeg_data[12:0]` | write one EEG sample |
| `w_we, w_row[4:0], w_pe[3:0], w_idx[6:0], w_data[7:0]` | write one weight |
| `p_we, p_row[4:0], p_pe[3:0], p_data{b,w_BN,β}` | write one folded BN record |
| `bdp_en, bdp_thr[3]` | bias-driven pruning enable and thresholds (β format) |
| `start` | one-cycle pulse; starts an inference (load everything first) |
| `busy`, `done` | busy until `done` pulses |
| `logits[2]`, `level` | results, valid from `done` until the next `start` |
| `pe_cycles[5]`, `pruned` | PE cycles per layer (conv 1–4, linear) and skipped evaluations |

Memory layout, shared by `weight_bram` and `bn_param_bram`:

- **Conv rows.** Row `row_base(l) + k` (row bases 0, 4, 8, 12), bank `p` holds output
  channel `16k + p` of block `l`. In `weight_bram`, element `j = ci·16 + tap` of that row is
  the weight for input channel `s + ci` and kernel position `tap`. Unused elements must be
  written as 0.
- **Linear row.** Row 20, bank `c` holds class `c`. In `weight_bram`, element `j` of that row
  is the weight of GAP channel `j`. The bias of class `c` goes in field `b` of the
  `bn_param_bram` record at the same row and bank.

## Files

| file | contents |
|---|---|
| `rtl/salenet_pkg.sv` | widths, sizes, layer table, record types |
| `rtl/pe.sv`, `rtl/pe_array.sv` | process engine, 16-PE array |
| `rtl/data_loader.sv` | sliding window, group slice selection |
| `rtl/feature_bram.sv`, `rtl/input_buffer.sv` | shared map buffer, EEG window |
| `rtl/weight_bram.sv`, `rtl/bn_param_bram.sv` | weights, folded BN records |
| `rtl/gap.sv` | global average pooling |
| `rtl/control_logic.sv` | sequencer, pruning decisions, slow-clock enable |
| `rtl/salenet_top.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself, with a watchdog.
With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/salenet_pkg.sv tb/tb_salenet_top.sv \
              --top-module tb_salenet_top -Mdir obj_top -j 8
    obj_top/Vtb_salenet_top

Replace `salenet_top` with any module name to run its testbench.

`tb_salenet_top` runs two full-size inferences back to back, in about 45 s of CPU time. It
writes random weights (half of them zero), BN records and an EEG window. The second run uses
a new EEG window and has pruning switched off. After each run it compares:

- both logits and the level;
- all 128 GAP outputs;
- the entire block-3 map left in the shared buffer;
- the per-layer PE-cycle counts;
- the pruning count.

The expected values come from a behavioural reference in the testbench. The testbench also
requires that each of these happened at least once:

- zero padding;
- in-place write-back;
- pruning;
- ReLU clamping;
- saturation;
- GAP;
- linear mode.

`tb_control_logic` runs the sequencer through a whole inference against models of the PEs
and memories. It checks every load address, write-back column and row read. The other
testbenches check one module each against values computed in the testbench.

## How far to trust it

- The dataflow, PE count, PE-cycle counts, map shapes, group structure, shared buffer,
  direct-to-GAP block 4, pruning rule and clock ratio follow the published design, and
  simulation checks them.
- Bit-exact agreement with the trained SaleNet model is **not** claimed. The fixed-point
  scaling (`>>> 14` after `w_BN`, `β` added at output scale, 13-bit saturation, the GAP
  reciprocal) is this design's choice. Running the published model would need its quantized
  parameters in these formats.
- The testbenches use random parameters. They test the hardware's arithmetic and
  sequencing, not classification accuracy.

## Departures and own choices

- **Clocking.** The design uses one clock with a 1-in-5 enable instead of two clocks. No
  clock manager is included.
- **Stride, padding, activation width, accumulator width and fixed-point format** are
  chosen as described above.
- **Input buffer.** The EEG window sits in its own buffer, `input_buffer`, written by a
  host. The published design does not say where the input is held.
- **Host ports.** Parameters arrive over simple host write ports.
- **PE adder tree.** It is folded: 7 passes through the 64 adders. The published PE gives
  only the unit counts.
- **Linear mode** bypasses BN and ReLU rather than multiplying by 1 and adding 0. The result
  is the same.
- **Pruned channels** output 0, and their thresholds are run-time inputs.
- **Schedule.** Loading, PE cycles and write-back are strictly sequential, with no overlap
  between a chunk's operand fetch and the previous PE cycle. Latency is 18.6 ms per window.
- **Weight storage.** Conv weights are stored as 8-bit words holding 7-bit values.
  Clustering is offline, with no codebook in hardware.
