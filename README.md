# Streaming accelerators for fully-connected DNN inference

In a fully-connected layer every weight is used exactly once per input sample. On a
small FPGA SoC the weights of a modern network do not fit on chip. They have to be
streamed from DDR memory for every sample, so the memory interface, not the
multipliers, limits throughput. This RTL has two accelerators that attack the
problem from opposite sides:

* **Batch processing** streams each weight once and applies it to a batch of up to
  `n` samples before dropping it. This divides the weight traffic per sample by `n`.
* **Pruning** streams only the weights left after pruning. Each weight carries the
  number of zeros that preceded it, so the hardware can find the matching input.

Both work one layer at a time on 16-bit fixed-point numbers:

* Activations and weights are Q7.8: sign, 7 integer bits, 8 fraction bits.
* Products are summed in a 32-bit Q15.16 accumulator.
* The sum goes through ReLU or a piecewise-linear sigmoid, selectable per layer.

A processor sets each layer up through a small AXI4-Lite register block. It loads
the first layer's inputs into on-chip memory and reads the last layer's outputs
back. Between layers the activations never leave the chip: the two memory banks
swap their input and output roles.

The design follows the architecture of Posewsky and Ziener, "Throughput
Optimizations for FPGA-based Deep Neural Network Inference" (Microprocessors and
Microsystems, 2018). The RTL is an independent implementation. Where the text left
details open, the choices made here are listed below.

Default sizes are the paper's Zynq-7020 configurations:

* Batch design: `M = 90` MAC lanes, batches of `n = 16`.
* Pruning design: `m = 4` row coprocessors, each with `r = 3` multipliers.

`dnn_accel_top` holds both accelerators side by side. The processor, the DMA
engines and the DDR controller stay outside. Each accelerator has these top-level
ports:

* an AXI4-Lite slave;
* an interrupt;
* an activation-memory port for the processor;
* four (batch) or `m` (pruning) 64-bit valid/ready weight streams, one per DMA
  engine.

## Numbers and activation functions (`activation_unit`)

* **ReLU** is `max(0, z)`, saturated to the largest Q7.8 value (+127.996).
* **Sigmoid** uses the PLAN approximation, computed on `|z|`:
  | range of `\|z\|` | `y` |
  |---|---|
  | `< 1` | `z/4 + 0.5` |
  | `1 ≤ \|z\| < 2.375` | `z/8 + 0.625` |
  | `2.375 ≤ \|z\| < 5` | `z/32 + 0.84375` |
  | `≥ 5` | `1` |

  Negative inputs use `1 - y`.
* All slopes are shifts, so the unit needs no multiplier and no table.
* The result is truncated to Q7.8 and registered: one cycle of latency.
* `mac_unit` registers the 16x16 product and adds it to the 32-bit accumulator one
  cycle later.
* A `first` flag restarts the sum. The accumulator wraps on overflow. Weights are
  expected to be scaled so that this does not happen.

## Batch design (`batch_accel`)

### Sections and the order of work

The layer's `s_out` neurons are cut into *sections* of `M` neurons. Lane `i`
computes neuron `sec_base + i`. The coprocessor (`batch_coprocessor`) walks the
work in this order:

```
for each section (sec_base = 0, M, 2M, ...)
  for each sample b = 0 .. nbatch-1
    for k = 0 .. s_in-1:  every lane i:  acc_i += W[sec_base+i][k] * x_b[k]
```

* The input `x_b[k]` is one value, broadcast to all `M` lanes.
* The weights come from `M` per-lane FIFOs, one weight per lane per cycle.
* A section therefore takes `s_in · nbatch` cycles, and a layer takes
  `ceil(s_out/M) · s_in · nbatch` cycles plus a pipeline tail of about `M` cycles.
  This is the paper's formula. The register `CYCLES` reports the measured figure.

### FIFO replay: using one row n times

Each lane's FIFO (`weight_fifo`) holds the lane's weight row for the current
section. It has three pointers:

* `wr_ptr`: where the DMA writes.
* `head`: start of the current row.
* `peek`: the next weight to read.

Reading advances only `peek`. After the last weight of a row:

* If more samples follow, `rewind` sets `peek = head`, so the same row is read
  again for the next sample.
* After the last sample, `commit` moves `head` past the row and frees its space.
  The pointer is rounded up to a 4-weight boundary, because rows arrive in whole
  64-bit words.

The FIFO can hold words of the following sections while the current one is
replayed. Weight transfer and computation therefore overlap. `full` is computed
from `head`, never from `peek`, so a row being replayed is never overwritten.

Rule: **a row must fit in a FIFO (`s_in ≤ FIFO_DEPTH`, 2048 by default).** The paper
mentions rows that are only partly held. That case is not supported here, and a
larger `s_in` deadlocks.

### Weight streams and asymmetric BRAMs (`asym_weight_bram`)

* The `M` FIFOs are spread over four BRAM groups, one per DMA stream. Each group has
  `ceil(M/4)` FIFOs; with `M = 90` that is 23, 23, 23 and 21.
* A group writes 64 bits (four weights) and each FIFO reads 16 bits.
* A round-robin select (the paper's decoder and demultiplexer) sends successive
  words to FIFOs 0, 1, 2, ... of the group.
* The stream stalls (`s_ready` low) while the selected FIFO is full.

The DMA order per group is therefore:

```
for each section, for each 64-bit column word w = 0 .. ceil(s_in/4)-1,
  for each FIFO f of the group:   word = W[sec_base + lane(f)][4w .. 4w+3]
```

* Lane `j·ceil(M/4) + f` belongs to group `j`, FIFO `f`.
* Weight `4w + l` sits in bits `[16l+15:16l]`.
* Rows past `s_out` in the last section, and columns past `s_in`, are sent as zeros.
  Their results are computed but not written.

### Stalls

The sequencer issues one step per cycle unless one of two stalls holds.

* **Weight stall:** some lane has no weight ready. The whole array waits, because
  the lanes run in lock step.
* **Result stall:** a sample's sums are done, but the previous sample's results are
  still in the result register or the serialiser. This only happens when `s_in` is
  smaller than `M`. The activation stage needs `M` cycles per sample, and the MACs
  give it only `s_in`.

Both stalls are visible as `ev_stall_weights` and `ev_stall_result`.

### From sums to stored activations

1. After the last term of a sample, the `M` sums are loaded into one transfer
   register. This is the pipeline stage that decouples the MACs from the activation
   function.
2. The register hands them in parallel to `multi_piso`.
3. The serialiser shifts them out one per cycle, with neuron index and sample
   number, into the single activation unit.
4. The result is written to the output bank of `batch_memory` when its index is
   below `s_out`.

### Batch memory (`batch_memory`)

* Two banks of `n` sample memories, each `DEPTH` = 2048 words.
* The bank whose number equals `role` is the input bank. The coprocessor reads it,
  one sample at a time, and the processor loads it before the first layer.
* The other bank takes the results.
* Reads have one cycle of latency.
* `role` flips when a layer completes. The next layer then reads what this one
  wrote.
* An assertion forbids processor accesses while a layer runs.

## Pruning design (`prune_accel`)

### Sparse row format

Each pruned weight row is sent as a list of tuples `(w, z)`:

* `w` is a surviving weight in Q7.8.
* `z` (5 bits, 0..31) counts the zero weights since the previous surviving weight.

Three tuples are packed into each 64-bit word:

```
bits [20:0]  tuple 0    bits [41:21]  tuple 1    bits [62:42]  tuple 2    bit 63 unused
tuple: [20:5] = w (Q7.8), [4:0] = z
```

Rules for the stream:

* **A row is ended by a tuple whose address reaches `s_in`.** The zeros after the
  last surviving weight, up to the end of the row, are counted into that tuple.
* The rest of that word is ignored.
* Every row starts in a new word.
* A zero run longer than 31 is split with filler tuples `(0, 31)`.

Example, with `s_in = 16` and the row
`(0, -1.5, 0, 0, 0.3, -0.17, 0, 0, 0, 1.1, 0, 0, -0.2, 0, 0.1, 0)`:

```
word 0: (-1.5,1) (0.3,2) (-0.17,0)
word 1: (1.1,3)  (-0.2,2) (0.1,1)
word 2: (0,1)    (x,x)    (x,x)      <- address 16 = s_in ends the row
```

`tb/sparse_encode.svh` is a reference encoder.

### Offset calculation (`offset_calc`)

For the three tuples of a word, the input addresses are computed in one cycle with
multi-input adders:

```
address_i = o_reg + i + z_0 + ... + z_i          (i = 0, 1, 2)
```

After each word, `o_reg` becomes `address_2 + 1`. It restarts at 0 with each row.
A tuple is used only if `address_i < s_in`. The first tuple that fails this test
ends the row.

### Sparse row coprocessor (`sparse_row_coproc`)

Pipeline of one coprocessor:

1. Input FIFO (512 words).
2. Pipeline word.
3. Offset calculation.
4. Three reads of the coprocessor's own I/O memory (`io_memory`), one port per
   tuple.
5. Three multiplies.
6. One adder into the accumulator.
7. Output FIFO.

Timing:

* One word (three MACs) is taken per cycle. Latency from FIFO to sum is four cycles.
* Coprocessor `p` computes rows `p, p+m, p+2m, ...`, that is
  `ceil((s_out-p)/m)` rows.
* A word is only taken while the output FIFO has room for every sum that could
  still be in flight, so results are never dropped.

Each coprocessor has its own activation unit and FIFO (`prune_act_stage`). Rows
finish at different times, depending on how many weights survived.

### I/O memory and merger

* **Why copies.** Every coprocessor reads inputs at its own addresses, three at a
  time. It therefore has its own `io_memory`: two banks, each holding `r` identical
  copies of the layer's activations, so `m · r` read ports in all.
* **Merger.** `merger` collects the activations in strict round-robin order: row
  0 from coprocessor 0, row 1 from coprocessor 1, and so on. It writes each one
  at its row address into the output bank of **all** `m` I/O memories, so every
  coprocessor sees the full layer as its next input.
* **Waiting.** If the coprocessor whose turn it is has no result yet, the merger
  waits. Strict order avoids storing a row number with each result.
* **Processor writes** to the input bank go to every copy.

## Control registers (`dnn_control`)

Both accelerators use the same AXI4-Lite block (32-bit data, byte addresses).

| addr | name   | access | meaning |
|------|--------|--------|---------|
| 0x00 | CTRL   | W  | bit0: start a layer (ignored while busy); bit1: reset the bank role to 0 |
| 0x04 | STATUS | R  | bit0 busy, bit1 done (sticky, cleared by start), bit2 current role |
| 0x08 | S_IN   | RW | inputs of the layer (`s_j`) |
| 0x0C | S_OUT  | RW | neurons of the layer (`s_j+1`) |
| 0x10 | ACT    | RW | 0 = ReLU, 1 = sigmoid |
| 0x14 | BATCH  | RW | samples in the batch, 1..n (batch design only) |
| 0x18 | IRQEN  | RW | bit0: raise `irq` while done is set |
| 0x1C | CYCLES | R  | cycles the last layer took, from start to done |
| 0x20 | INFO   | R  | `{PAR_B, PAR_A}` = `{n, M}` or `{r, m}` |

To run a network:

1. Write the inputs through the processor port.
2. Set S_IN, S_OUT, ACT and BATCH, then write CTRL = 1.
3. Stream the layer's weights into the DMA ports.
4. Wait for the interrupt.
5. Repeat from step 2 for the next layer.

After an odd number of layers the results sit in bank 1. The processor port always
addresses the current input bank, which now holds them. Write CTRL bit1 before
loading a new batch.

## Where this RTL departs from the paper

* **One clock.** The paper ran memory transfers at 133 MHz and the datapath at
  100 MHz. Here everything runs on `clk`, with no clock-domain crossings.
* **No processor, DMA or DDR logic.** The ARM cores, DMA engines, DDR3 controller
  and PS-PL interconnect are replaced by plain ports.
* **Both designs in one top.** On the FPGA they were separate bitstreams. Here they
  sit in one top, sharing clock and reset.
* **Row size.** A batch-design row must fit its FIFO (see above).
* **Choices the paper does not specify:**
  - the sigmoid breakpoints, taken from the original PLAN method;
  - ReLU saturation;
  - the bit order of the tuple word;
  - starting every sparse row in a new word;
  - the filler tuples;
  - the end-of-row test `address ≥ s_in`. The text says "surpasses"; with 0-based
    addresses the two mean the same thing.
* **Also this design's own:**
  - the strict round-robin merger;
  - the register map;
  - FIFO depths and pipeline depths.
* **Batch configurations.** The paper's other batch configurations (114 MACs for
  n ≤ 4, 106 for n = 8, 58 for n = 32) are parameter settings of the same RTL
  (`B_M`, `B_NB`). They were not simulated.

## Sizes that fit

At the defaults, both designs hold every network the paper evaluates:

* MNIST 784x800x800x10 and 784x800x800x800x800x800x800x10;
* HAR 561x1200x300x6 and 561x2000x1500x750x300x6.

The largest layer (2000) fits the 2048-word activation memories and the
2048-weight batch FIFOs. Batches of up to 16 are possible. A batch of 32 needs
`B_NB = 32`.

## Files

`rtl/`:

| file | contents |
|---|---|
| `dnn_pkg.sv` | types, stream constants, register addresses |
| `mac_unit.sv`, `activation_unit.sv` | shared arithmetic |
| `dnn_control.sv` | control registers |
| `weight_fifo.sv`, `asym_weight_bram.sv`, `batch_memory.sv`, `batch_coprocessor.sv`, `multi_piso.sv`, `batch_accel.sv` | batch design |
| `offset_calc.sv`, `io_memory.sv`, `sparse_row_coproc.sv`, `prune_act_stage.sv`, `merger.sv`, `prune_accel.sv` | pruning design |
| `sync_fifo.sv` | generic FIFO |
| `dnn_accel_top.sv` | top |

`tb/`:

* `tb_<module>.sv` is a self-checking test for each module. The shared helpers are
  `axil_master.sv` (AXI4-Lite bus tasks), `act_ref.svh` (reference activation
  functions) and `sparse_encode.svh`.
* Every test generates random data with `$urandom`, compares against a reference
  model, and prints `TB_RESULT checks=N failures=M`.

`tb_dnn_accel_top` runs the top at its default sizes:

* **Batch network** 40x200x1980x30 for 16 samples, then a 20x95 layer for 5 samples.
* **Pruned network** 300x60x10.
* **Events it counts:** weight stalls, result stalls, DMA back-pressure, partial
  sections, role swaps, both activation functions, sparse row ends, filler tuples
  and round-robin merging.
* **Result:** each event happened at least once and every activation matched. It
  fails if any event never happens.

`tb_workloads` runs the evaluation's four networks at their real sizes, on both
accelerators, at the default parameters:

* MNIST 784x800x800x10 and 784x800x800x800x800x800x800x10;
* HAR 561x1200x300x6 and 561x2000x1500x750x300x6.

The batch design runs each network on 16 random samples. The pruning design runs
one sample, with random pruning at 72, 78, 88 and 94 %. All 600 outputs match the
reference, and the whole run takes about 30 s in Verilator.

The batch layers take 1 to 4 % more cycles than `ceil(s_out/M)·s_in·n`, plus the
tail. The exception is 2000x1500, which takes 701k cycles against 544k:

* A 2000-weight row leaves almost no room in a 2048-weight FIFO.
* The next section's weights can only arrive at the rate of the DMA stream, 4
  weights per cycle shared by 23 FIFOs.
* Each section's first sample therefore waits for weights.

A deeper `B_FIFO` removes this.

## Simulating

With Verilator 5 (any simulator with SystemVerilog timing support should do):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/dnn_pkg.sv tb/tb_dnn_accel_top.sv --top-module tb_dnn_accel_top -o sim
./obj_dir/sim
```

Replace the testbench name to run any other test. The top-level test takes a few
seconds of wall time.

To change sizes, override the top's parameters:

* `B_M`, `B_NB`: lanes and batch size.
* `B_DEPTH`, `B_FIFO`: memory and FIFO depth.
* `P_M`, `P_R`, `P_DEPTH`, `P_FIFO`: the pruning design's counterparts.

Two constraints:

* `B_FIFO` must be a multiple of 4.
* The FIFO depths in `sync_fifo` must be powers of two.
