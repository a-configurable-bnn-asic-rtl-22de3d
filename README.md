# TULIP: a BNN accelerator built from programmable threshold-logic neurons

This is a SystemVerilog model of the TULIP accelerator for binary neural
networks, from "A Configurable BNN ASIC using a Network of Programmable
Threshold Logic Standard Cells". The chip is a row of processing units. Each
unit holds one simplified MAC for integer layers and eight TULIP-PEs for binary
layers. A TULIP-PE is a cluster of four clocked threshold gates ("binary
neurons"). Each neuron has a 16-bit local register. The PE computes a binary
neuron of up to 288 inputs as a serial adder tree of those gates.

## Blocks

| module | role |
|---|---|
| `tulip_pkg` | sizes, routing-mux codes, control-word types |
| `tl_neuron` | threshold gate `y <= (2a+b+c+d >= T)`, with per-input inversion and a clock enable |
| `route_mux` | 32:1 input selector of one neuron input (5-bit select) |
| `local_reg` | 16-bit local register; one bit is written per cycle, all 16 bits are readable |
| `tulip_pe` | 4 fully connected neurons + registers + 16 routing muxes |
| `seq_gen` | sequence generator: a writable store of PE control words, played one word per cycle to all PEs |
| `mac_unit` | integer MAC: ±pixel sum over a k×k×32 window (k ≤ 7), then compare with T |
| `processing_unit` | 1 MAC + 8 PEs; XNOR product generation |
| `kernel_buffer` | shift register holding the weights and thresholds of all units |
| `l2_buffer` | image tile: 8 rows × 32 columns × 32 maps × 12 bits |
| `l1_buffer` | 7×7×32 window, broadcast to every processing unit |
| `mem_ctrl` | kernel load, pixel load into L2, window fetch from L2 into L1 |
| `output_buffer` | holds the PE result bits and the MAC sums/bits |
| `tulip_top` | the chip (default: 32 processing units = 32 MACs + 256 PEs) |

## The neuron and the PE

A neuron has inputs a, b, c, d with weights 2, 1, 1, 1, and a threshold
T in 0..6. The threshold is chosen every cycle. Each input can be inverted.
`f` is the combinational next value. `y` is the value latched at the clock
edge. When `en` is low the neuron holds its value; this stands for clock
gating.

Each neuron input passes through a 32:1 mux. The select codes are:

| code | source |
|---|---|
| 0–3 | input-channel bits `prod[ibase+0..3]` |
| 4–6 | output of neighbour k = 0..2 (neighbour k of neuron n is neuron (n+k+1) mod 4) |
| 7–9 | shared b line of neighbour k |
| 10–12 | shared c line of neighbour k |
| 13 | own output (feedback) |
| 14, 15 | constants 0, 1 |
| 16–31 | own local-register bits 0..15 |

The four neurons share their b and c inputs. A neuron's shared b (or c) line is
the bit its b (or c) mux picks from its own sources. This way one neuron can
read a register bit and broadcast it to the other three in the same cycle.
A code that names a neighbour's shared line is not passed on, and the exported
line reads 0. This keeps the network free of combinational loops.

A register write stores the neuron's new value at the same edge the neuron
evaluates (`we`, `wa` in the control word).

One `pe_ctrl_t` word drives a PE for one cycle. For each neuron it holds four
selects, four inversion bits, T, the enable, the write enable and address, and
`ibase`. The word also holds `capture` and `out_sel`, which tell the output
buffer which neuron carries the PE result. All PEs of the chip receive the
same word.

### Schedules

The schedules are built in software by the class `tulip_prog` in
`tb/tulip_sched_pkg.sv`. They follow the gate configurations drawn in the
paper:

- **Leaf** (3 cycles): a full adder on three product bits, `x+y+cin`, gives a
  2-bit value.
- **Full adder**: carry = majority `[0,1,1,1;2]`. Sum = `[~C,x,y,cin;3]`, with
  the inverted new carry on the weight-2 input.
- **k-bit serial add** (k+2 cycles): two operand neurons broadcast their bits
  on their shared b/c lines. The carry neuron works on feedback. One operand
  neuron acts as a delay neuron `[C,·,·,C;3]`, which passes the carry to the sum
  neuron a cycle later. The sum neuron writes the sum bits, LSB first, into its
  register, and then writes the final carry. An input-channel bit is the carry-in.
- **Adder tree**: reverse post order. Each inner node adds its two subtrees and
  one more product bit as carry-in. The result goes to the neuron with the most
  free register bits. If both operands sit in one neuron, one of them is first
  copied to another neuron.
- **Comparator** (LSB first): a feedback neuron `[0, x_i, ~y_i, prev; 2]`.
  The initial `prev` is 1 for ≥ and 0 for >. The threshold bits come in on the
  input channel.
- **RELU**: a compare, then an AND `[1,1;2]` of each bit with the compare result.
- **Max-pool**: four 4-input ORs (T=1), one per neuron, in one cycle.

## Chip flow (`tulip_top`)

1. `CMD_KERNEL`: weights stream in as 32-bit words (`kvalid/kready`), 3976
   words for each processing unit. Per unit the slot holds:
   - 1568 MAC weights (7×7×32);
   - a 24-bit MAC threshold;
   - for each PE, 288 weights and a 10-bit threshold.
2. `CMD_IMAGE`: pixels stream into L2 one at a time (`pvalid/pready`). The map
   index runs fastest, then the column, then the row.
3. `CMD_FETCH (row, col, k)`: L2 is read one window position (all 32 maps) per
   cycle and written into L1.
4. `run_bin`: the sequence generator plays the PE program. Each PE reads
   `prod = {threshold, XNOR(activation, weight)}`. The activation is bit 0 of
   the pixel in the top-left 3×3 of the window. `capture` latches the PE
   results into the output buffer.
5. `run_int`: all MACs start together and take k² cycles. Their sums and
   threshold bits are latched into the output buffer.

Run requests wait while the memory controller is busy. A processing unit
starts only after its inputs and weights have arrived.

## Simulation

Every block has a self-checking testbench `tb/<module>_tb.sv`. Each one ends
with `TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tulip_pkg.sv tb/tulip_sched_pkg.sv \
    rtl/*.sv tb/tulip_top_tb.sv --top-module tulip_top_tb
./obj_dir/Vtulip_top_tb
```

`tulip_top_tb` runs the chip with 4 processing units (32 PEs). It covers:

- a kernel load and an image load;
- three window fetches;
- two binary windows with the complete 288-input program, checked against a
  reference popcount ≥ T;
- a 7×7 integer window on the MACs;
- a max-pool program;
- a run request held off during a fetch.

At the end it prints how often each of these happened. `tulip_pe_tb` runs the
288-input program on one PE and checks the adder, leaf, tree, compare, RELU and
max-pool schedules.

The default size (32 units) is not simulated. The top testbench at that size
takes Verilator well over a quarter of an hour to build. The 4-unit build
differs only in the number of unit instances and the kernel-buffer length.

## Departures from the paper and assumptions

- **Cycle count.** The 288-input neuron program from this scheduler takes
  **884 cycles**: 97 leaves, 96 adders and 24 copy moves. The paper's Table 5
  gives 441 cycles. The paper does not describe its scheduler in enough detail
  to reproduce it. The serial adds here use k+2 cycles each, and every tree
  node is its own add.
- **Neuron.** The neuron is modelled by its logic function only. The current
  networks, sense amplifier and latch of the mixed-signal cell are not
  modelled, and the paper omits their details. The local registers are
  flip-flops, while the paper uses latches.
- **Assumed sizes and encodings** (the paper gives none of these):
  - the mux select code order;
  - the 3-bit threshold code;
  - the input inversion (read from the bubbles in the schedule figures);
  - the L2 tile of 8×32;
  - the 32-bit kernel words and the kernel slot layout;
  - the 10-bit PE and 24-bit MAC thresholds;
  - a 1024-word program store;
  - a MAC that handles one window position per cycle, with weight bit 1 = +1.
- **MAC kernels.** The MAC accepts any k from 1 to 7. The paper's simplified
  MAC supports 5×5 and 7×7 only.
- **Binary activations.** A binary activation is bit 0 of the stored pixel.
  Binary layers use the top-left 3×3 of the L1 window.
- **Not built:**
  - accumulation of partial results across groups of 32 input maps. Binary
    layers with more than 288 inputs per neuron therefore do not fit;
  - fully connected layers;
  - the off-chip memory;
  - clock-gating cells. The neuron enables and the MAC start stand in for
    the gating signals.

## Workloads

Layer sizes marked * are standard sizes of these networks, not numbers from
the paper.

| workload | fits | why |
|---|---|---|
| 288-input binary neuron (3×3×32) | yes | 288 products per PE; the 884-word program fits the 1024-word store |
| binary 3×3 conv batch, 32 input maps, 256 output maps | yes | 256 output maps = 32 units × 8 PEs |
| 2×2 binary max-pool | yes | one OR per neuron, 1 cycle |
| AlexNet layer 1 (11×11*, integer) | no | kernel 11 > 7, the largest the MAC handles |
| AlexNet layer 2 (5×5* over 96* maps, integer) | no | needs P = 2 partial results accumulated on chip |
| AlexNet layers 3–5 (3×3* over 256/384 maps, binary) | no | 2304–3456 products > 288, P = 8–12 partial results |
| BinaryNet/CIFAR10 layer 1 (3×3* over 3* maps, integer) | yes | MAC with k = 3 |
| BinaryNet/CIFAR10 layers 2–6 (3×3* over 128–512* maps) | no | 1152–4608 products > 288 |
| fully connected layers | no | no fully connected data path |

A partial result is the sum over one group of 32 input maps. Accumulating
these on chip is the missing piece for every layer with more than 32 input
maps. It would need an adder on the MAC sums, and it would need the PE to emit
its popcount rather than its thresholded bit.
