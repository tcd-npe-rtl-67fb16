# TCD-NPE: a neural processing engine built from temporal-carry-deferring MACs

A multilayer perceptron layer is a long chain of multiply-accumulates: each output neuron adds up
hundreds of products before its sum is used. A conventional MAC finishes every product *and* every
running sum with a full carry-propagate adder, and that adder sits on the critical path on every cycle.
The idea behind this engine is that the running sum of a neuron is never looked at until the last
product has arrived. The MAC therefore keeps the running sum in a redundant, carry-save-like form
and feeds the unresolved carries back into the next cycle's compression tree. Carries are
propagated only once per neuron, in one extra cycle at the end. The cycle time is set by the
compression tree alone. The carry-propagate adder is used once per neuron instead of once per
product.

Around that MAC sits a small, fixed-function accelerator for fully connected layers:

* a 16 x 8 array of these MACs;
* a weight memory and a ping-pong feature memory;
* three small interconnects that let the array be split into K batches of N = 128/K neurons;
* a controller that executes a precomputed list of "rolls".

This repository contains the synthesizable SystemVerilog of all of these parts, one testbench per
part, and an end-to-end testbench. The end-to-end testbench runs five small benchmark MLPs through the
full-size engine and compares every output against a bit-exact software model.

## 1. The temporal-carry-deferring MAC (`tcd_mac`)

### 1.1 Datapath

One MAC holds two registers the width of the accumulator (36 bits):

* **ORU**, the *output register unit*. It holds a per-column "sum" bit.
* **CBU**, the *carry buffer unit*. It holds a per-column "carry" bit that belongs one column
  higher.

Together they represent the running sum as `ORU + 2*CBU`. Nothing is ever propagated between
columns while products accumulate.

Each accumulate cycle (called **CDM**, carry-deferring mode) does this:

1. **DRU** (data reformatting). The two signed 16-bit operands are turned into 16 rows of partial
   products, shown in the table below. The rows are sign-extended to 36 bits.
2. **CEL** (compression and expansion layers). For every column, the partial-product bits are
   collected together with `ORU[m]` and `CBU[m-1]`. A Wallace tree of 3:2 counters (`hwc`, a
   Hamming-weight counter) then reduces every column to at most two bits. With 16 rows plus two
   feedback bits this takes 8 layers. A counter's LSB stays in its column and its MSB moves up one
   column. Bits left over in a column pass straight to the next layer. The tree shape is computed
   at elaboration time by a constant function, so it follows `DW` and `ACC_W`.
3. **GEN**. The two remaining bits `x`, `y` of each column give `P = x ^ y` and `G = x & y`.
   These are stored as `ORU <= P` and `CBU <= G`.

The cycle after the last product is the **CPM** (carry-propagation mode) cycle. It has no new
product. A 36-bit ripple adder (PCPA) adds `ORU + (CBU << 1)` and registers the resolved `sum`.

Signed operands are handled by choosing a multiplicand MD and a multiplier MR:

| A (feature) | B (weight) | MD | MR |
|-------------|------------|----|----|
| < 0         | >= 0       | B  | A  |
| >= 0        | < 0        | A  | B  |
| >= 0        | >= 0       | B  | A  |
| < 0         | < 0        | -B | -A |

Rows 0..14 are `MD << j` for each set bit `j` of MR. Row 15 is the weight of MR's sign bit:
`-(MD << 15)` when MR is negative, or `+(MD << 15)` when MR is the positive value 32768. That last
case happens only for A = B = -32768.

### 1.2 Timing and control

| cycle     | `en` | `clr` | `prop` | effect                                             |
|-----------|------|-------|--------|----------------------------------------------------|
| 1         | 1    | 1     | 0      | ORU/CBU := compress(a1*b1) (old state discarded)   |
| 2..I      | 1    | 0     | 0      | ORU/CBU := compress(ORU + 2*CBU + ai*bi)           |
| I+1       | 0    | x     | 1      | sum := ORU + 2*CBU, available after this edge      |

A neuron with I inputs therefore takes I + 1 cycles. ORU/CBU hold their value when neither `en` nor
`prop` is set. All arithmetic is modulo 2^36. A 16 x 16-bit product needs at most 31 bits, so
any 32 products are summed exactly. Longer sums wrap only if their true value leaves the 36-bit
range.

### 1.3 Departures

* The counter mix is restricted to 3:2 counters. Wider counters (such as 6:3 and 7:3) are a
  possible optimisation and are not used.
* ORU and CBU bits are injected into the first compression layer. Any layer with a free counter
  input would do; choosing a later one is a timing optimisation.
* There is no mode that resolves the sum on every cycle. A single product costs two cycles: one
  `en` and one `prop`.

## 2. Output quantisation and ReLU (`quant_relu`)

Each neuron sum `I[35:0]` is cut back to a signed 16-bit word. The kept field is `I[24:9]`, so a
product of two words with 9 fraction bits each comes back with 9 fraction bits. The bits are used
as follows:

* `I[35]` is the sign.
* `I[34:25]` are the upper integer bits that the 16-bit result cannot hold.
* `I[24]` is the sign bit of the kept word.

The unit saturates as follows:

* It gives `0x7FFF` for a positive sum when any bit of `I[34:24]` is 1.
* It gives `0x8000` for a negative sum when any bit of `I[34:24]` is 0.

Including `I[24]` in the test is what makes the saturation correct. Without it, a positive sum
with only `I[24]` set would wrap to a negative word. The optional ReLU then clears every bit when
the result is negative. The unit is purely combinational.

## 3. The array and its reconfiguration

### 3.1 TCD groups and the PE array (`tcd_group`, `pe_array`)

A TCD group (TG) is a row of 8 MACs:

* One feature word is broadcast to all 8 MACs.
* Each MAC gets its own weight word and its own enable.
* A 3-bit `col_sel` puts one MAC's sum on the group's output bus.

The PE array is 16 such groups, 128 MACs in all. Each group has a `quant_relu` on its bus. After
the CPM cycle, the controller steps `col_sel` over the 8 columns, so each group delivers one
finished neuron per cycle.

### 3.2 NPE(K, N): splitting the array over batches

A roll computes N neurons for each of K input vectors (a batch), with N = 128/K and K in
{1, 2, 4, 8, 16}. Groups are assigned by contiguous blocks:

* group `g` works on batch `b = g >> log2(16/K)`;
* it holds neuron slice `t = g mod (16/K)`, which is neurons `8t .. 8t+7` of the roll.

Every batch therefore sees the same weights, in the same slice pattern. K = 32 would need N = 4,
which is smaller than a group, so it is not supported. MACs whose neuron or batch does not exist
in a roll (for example, the 2 extra neurons when a layer has 130 outputs) are not enabled.

### 3.3 Memory layouts

**Weight memory (`w_mem`)**: 2048 rows x 128 words x 16 bits (512 KB).

* A roll with N neurons stores the weights of `128/N` consecutive inputs in one row.
* Input `i` is in row `w_base + i/(128/N)`, at word `(i mod (128/N))*N + n` for neuron `n`.
* One row read therefore serves `128/N` cycles.
* The memory is word-writable for loading. A read copies a whole row into the memory's output
  register, which holds it until the next read. This register is the *W buffer*.

**Feature memory (`fm_mem`)**: two banks, each 512 rows x 64 words (64 KB per bank).

* A layer reads one bank and writes its results into the other. The banks swap roles after the
  last roll of a layer.
* A row is split into KI partitions (KI a power of two) of `SW = 64/KI` words, one partition per
  batch vector.
* Feature `i` of batch `b` is in row `rd_base + i/SW`, at word `(rd_seg + b)*SW + i mod SW`.
* Writes are row-wide with a per-word mask. One write stores one result word into every batch's
  partition of the same row.
* The read register is the *FM buffer*.

KI is chosen per layer by the schedule. It must be at least the largest K used to read that layer.
A layer can also have more than one batch group per layer, with `rd_seg` picking the partition of
the roll's first batch.

### 3.4 The three local distribution networks (LDNs)

* **`ldn_fm_rd`**: FM buffer to groups. For the current input index, it takes word
  `(rd_seg+b)*SW + idx mod SW` for each batch `b`. It then multicasts batch `b` to the groups of
  that batch.
* **`ldn_w`**: W buffer to MACs. It selects the chunk `idx mod (128/N)` of the buffered row. Group
  `g` then receives the 8 words of slice `g mod (16/K)`.
* **`ldn_fm_wr`**: Q/A outputs to FM rows. On a write-back cycle, partition `b` takes the output of
  group `b*(16/K) + tsel`. It writes it at offset `off` of partition `wr_seg + b`, and the mask
  covers only the batches present.

All three are combinational multiplexers driven by the controller's registered selects.

## 4. The controller and the schedule (`controller`)

Deciding how to cover a layer with rolls is the job of an external mapping step. That step is not
part of the hardware: for every layer it chooses K and the batch and neuron groups. The hardware
receives the result as a schedule, a list of up to 64 roll entries. Each entry holds the fields
below (see `tcd_pkg::sched_entry_t`):

| field      | meaning                                                         |
|------------|-----------------------------------------------------------------|
| `kcfg`     | log2 K                                                          |
| `n_in`     | inputs per neuron (I)                                           |
| `w_base`   | first weight row of the roll                                    |
| `ki`, `rd_seg`, `rd_base` | input layout: log2 partitions, first partition, first row |
| `ko`, `wr_seg`, `wr_base` | output layout                                     |
| `n_base`   | global index of the roll's first neuron                         |
| `nb_act`, `nn_act` | batches and neurons actually present                    |
| `relu`     | apply ReLU                                                      |
| `swap`     | swap FM banks after this roll (last roll of a layer)            |
| `last`     | end of schedule                                                 |

For each roll, the FSM steps through the following states:

1. **FETCH** (1 cycle): reads the entry and issues the first W and FM row reads.
2. **COMP** (I cycles): walks the input index. A new W row is read only when the index crosses a
   W-row boundary, and a new FM row only when it crosses an FM-row boundary. Each cycle's selects
   and MAC enables are registered once, in step with the buffers.
3. **DRAIN** (1 cycle): lets the last product through that register stage.
4. **PROP** (1 cycle): the CPM cycle of every MAC.
5. **WB** (`nn_act` cycles): one neuron per cycle for every batch at once. Neuron `n` is column
   `n mod 8` of group slice `n / 8`. It passes through the Q/A units and the write LDN into the
   other FM bank.

`done` pulses after the last roll. Four counters report activity: rolls, W-row reads, FM-row reads
and MAC-active cycles. Compute, write-back and the next roll's fetch are not overlapped. A roll
costs `I + 3 + nn_act` cycles.

## 5. Getting data in and out (`rlc_decoder`, `rlc_encoder`, `tcd_npe`)

Weights and features come from an external DRAM as run-length-coded tokens
`{run[7:0], value[15:0]}`. A token stands for `run` zero words followed by `value`.

* Two decoders, one for weights and one for features, expand the tokens into words. The words are
  written to consecutive addresses from a start address given with `w_ld_start` / `fm_ld_start`.
* A dump port reads `fm_dump_len` words of a bank from a start address and run-length encodes
  them. A run is closed by a non-zero word, by the last word, or by a full 8-bit counter.
* Both token streams use valid/ready handshakes.
* Loading and dumping are allowed only while the engine is idle. This is checked by an assertion.
* Feature loads and dumps name their bank (`fm_ld_bank`, `fm_dump_bank`). The engine reads its
  first layer from the bank shown on `bank`, and writes each layer's results into the other bank.

`tcd_npe` is the top. It wires the controller, memories, LDNs, PE array, codecs and these host ports
together. All sizes are parameters with the values above as defaults.

## 6. How far to trust it

| block | what the testbench checks |
|-------|---------------------------|
| `hwc` | all inputs |
| `tcd_mac` | random signed streams of length 1..40, corner operands (-32768, 32767, 0), hold/clear behaviour, exact 36-bit sums |
| `quant_relu` | boundaries of both saturation limits, random values, ReLU |
| `tcd_group`, `pe_array` | per-MAC weights, enables, column select, Q/A path |
| `w_mem`, `fm_mem` | word and masked writes, read register hold, bank separation |
| LDNs | every K against an index model of the layouts |
| `controller` | read counts, enables, write-back addresses and cycle count |
| RLC codecs | round trips with long runs, full runs and back-pressure |
| `tb_tcd_npe` | full-size engine runs Iris (4:10:5:3, 3 vectors), FFT (8:140:2, 2 vectors), Poker Hands (10:85:50:10, 5 vectors), Adult (14:48:2, 4 vectors) and Wine (13:10:3, 8 vectors) |

In `tb_tcd_npe`, data is loaded through the RLC decoders. The layers use several K
configurations, including multi-group and idle-MAC cases. Every output word is dumped through the
RLC encoder and compared with a bit-exact model, including saturation and ReLU. The testbench also
checks every roll's cycle count and memory-read counts.

Fit of the benchmark networks at the default sizes:

* Adult 14:48:2, Wine 13:10:3, Iris, FFT, Poker Hands and Fashion-MNIST 728:256:128:100:10 all fit.
  Fashion-MNIST needs 1940 of the 2048 weight rows at K = 1.
* MNIST 784:700:10 does not fit in one weight load. Its first layer needs 4704 rows. It could be run
  as three loads by splitting the 700 neurons over separate schedules.

Known departures and open points:

* The write-side LDN uses the same batch-to-group mapping as the read side.
* Write-back is serial (one neuron per batch per cycle) and not hidden behind the next roll's
  compute.
* Zero counts as a positive operand in the MD/MR selection.
* There is no power or voltage modelling. Memories and array are in one clock and supply domain.

## 7. Simulating

Every testbench is self-checking. It prints one `TB_RESULT checks=N failures=M` line and has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -j 4 --top-module tb_tcd_npe \
    -y rtl -y tb +libext+.sv rtl/tcd_pkg.sv tb/tb_tcd_npe.sv
./obj_dir/Vtb_tcd_npe
```

Replace `tb_tcd_npe` with any `tb_<block>` to test one block. The full-size build takes about a
minute and the run a few seconds. To change the array, override `NTG`, `TGS` and the memory sizes on
`tcd_npe`. The LDN arithmetic requires powers of two and `W_WORDS >= NTG*TGS`.
