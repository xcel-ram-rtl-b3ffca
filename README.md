# Xcel-RAM: binary convolutions computed inside 10T SRAM banks

A binary neural network (BNN) stores weights and activations as single bits
(+1 as logic 1, −1 as logic 0). Its inner loop is therefore an XNOR of two
bit vectors followed by a *popcount*, the number of ones in the result. An
output neuron fires when the popcount exceeds half the kernel length. On a
conventional processor every 64-bit slice of that loop costs two loads, an
XNOR and a software popcount.

Xcel-RAM moves the XNOR and the popcount into the memory array. The memory is
built from 10-transistor SRAM cells, whose read port is separate from the
storage node and has two bitlines (RBL and RBLB) plus a source line (SL). One
memory command then returns `popcount(A XNOR K)` for a 64-bit activation row A
and kernel row K, without the data ever leaving the array. Two ways of doing
this are described and both are implemented here:

* **Proposal A (charge sharing).** A is read onto the bitlines and left there
  as charge. The kernel row's read wordline then shares that charge with its
  SL, so the SL voltage is proportional to the number of matching bits. A
  small two-stage ADC turns the voltage back into a count. Switches cut the
  bitlines into four sections, so one read of A serves four kernels at once.
* **Proposal B (digital).** The read wordlines of A and K are raised together.
  Per column, two deliberately unbalanced sense amplifiers produce A AND B and
  A NOR B. Their OR is the XNOR, and a tree of full adders counts it. The
  result is exact.

This RTL provides the memory side of such a system: 64 KB banks of either kind
behind an Avalon memory-mapped slave port. The processor that issues the
in-memory instructions is not included.

## System view

```
 processor (outside) ── Avalon-MM ──► avalon_xcel_slave ──► xcel_bank #(PROP_A) ── 64 × xcel_a_subarray
                                             │
                                             └────────────► xcel_bank #(PROP_B) ── 64 × xcel_b_subarray
```

`xcel_ram_system` is the top. By default it holds one Proposal-A bank (bank 0)
and one Proposal-B bank (bank 1), each 8192 words of 64 bits. Having both kinds
side by side is this design's choice; the evaluation it follows looks at one
kind at a time. `NBANK_A` and `NBANK_B` change the mix.

### Bus protocol (`avalon_xcel_slave`)

Data words are 64 bits. A word address is `{conv, bank, word}`, where `word`
has 13 bits.

| transfer | `conv` | meaning | `readdata` |
|---|---|---|---|
| write | 0 | store `writedata` at `word` | — |
| read | 0 | plain read | the word |
| read | 1 | in-memory convolution; `word` is the first operand, `writedata` carries the other operand addresses | packed popcount(s) |

An in-memory instruction sends no data operands. The data channel is therefore
free to carry the extra addresses, and the convolution is issued as a read
whose write-data lane holds them.

Other protocol rules:

* At most one read is outstanding. `waitrequest` stays high from an accepted
  read until its `readdatavalid`, and also while the addressed bank is busy.
  A write sent during a long Proposal-A convolution is held off this way.
* `response` is `2'b10` (SLVERR) when a bank refuses the operands, and OKAY
  otherwise.

### Operand layout of a convolution

| bank | address | `writedata` | result in `readdata` |
|---|---|---|---|
| Proposal A | activation row | `[5s+4:5s]` kernel row inside section s (s = 0..3), `[23:20]` section mask | `[8s+6:8s]` = popcount(A XNOR K_s), 0 for a masked section |
| Proposal B | row A | `[12:0]` word address of row B | `[6:0]` = popcount(A XNOR B) |

The operands must lie in the same subarray, because they must share its
bitlines. For Proposal A this holds by construction: the kernel fields are row
numbers inside the activation's subarray. For Proposal B the bank checks it
and answers SLVERR if B is in another subarray.

Accumulating word results over a long kernel and applying the
"greater than half" threshold are left to software, as is max-pooling. For
example, a 3×3×128 kernel is 18 words: 18 commands, then a sum, then a
compare.

## Banks (`xcel_bank`)

A bank has 64 subarrays of 128 rows × 64 bits, which is 64 KB. A word address
splits into `{subarray[5:0], row[6:0]}`.

The bank takes one command at a time:

* `req_ready` is low from an accepted read or convolution until its response.
* A write completes in the cycle it is taken.
* The response is registered one cycle after the subarray finishes.

Each subarray's `busy` output is not used, because the bank-level handshake
already covers it.

## The 10T array (`sram10t_array`)

The array is a digital view of the analog bitlines:

* One write port (WWL, BL/BLB).
* Two independent read-wordline ports, each with its own row address.
* `rbl` and `rblb` are registered levels: 1 means still precharged, 0 means a
  cell discharged the line.
* A cell storing 1 discharges RBL, and a cell storing 0 discharges RBLB. With
  two rows enabled, a line is low if either cell pulls it down.

Cells are not reset, like a real SRAM. `q_row0` exposes the cells of port 0's
row, which are the gate voltages of the read stacks. The Proposal-A charge
model uses it.

## Proposal A: the sectioned, charge-sharing subarray

### One convolution, step by step (`xcel_a_subarray`)

1. **Pseudo-read** (1 cycle). The section switches are closed, and the RWL of
   activation row A is raised without firing any sense amplifier. Every
   section's RBL/RBLB now carry A as charge.
2. **Sectioning.** The switches open, and each of the four 32-row sections
   keeps its own copy of A.
3. **XNOR on SL** (1 cycle). Every row has two read wordlines: RWL1a for
   columns 0..31 and RWL1b for columns 32..63. Each enabled section raises
   RWL1a of its kernel row. A cell whose bit matches the stored A bit pulls
   SL up, and a mismatching cell pulls it down. The SL voltage becomes
   VDD·(matches / 32).
4. **ADC.** Each section's ADC converts its SL voltage into a count of 0..32.
   All four sections convert in parallel.
5. Steps 3 and 4 are repeated with RWL1b, and the two half counts are added.

Splitting the row into two halves is the key trick. The SL then has to
resolve only 33 levels instead of 65, and the ADC only 8 levels per
sub-class.

Timing: one pseudo-read, then per half one share cycle, one ADC start cycle,
the ADC time and one cycle to see all ADCs idle, then one delivery cycle. That
is at most 54 cycles, and the longest measured case is 52. The activation may
be any row of the subarray, including a row inside a computing section.

### The analog section (`cs_section_model`, behavioural)

This module models what happens on one section's SL, its dummy cell and its
two voltage sense amplifiers. It uses `real` values, is not synthesizable,
and is sampled on the clock.

* **SL level.** The model is ideal and linear: one matching cell equals one
  level of VDD/32.
* **Dummy cell.** With `pch1_b` low, its RBL precharges to VDD; with `pch0`
  high, it discharges. A following cycle with `wl_adc` shares that charge with
  SL, moving SL up or down by one level.
* **Sense amplifiers.** On `sae`, they latch `sa_n = V_SL > vrefn·VDD/4` and
  `sa_p = V_SL >= vrefp·VDD/4`.

A real pump moves SL a little less on every cycle, which gives errors at
large counts. The published circuit simulations report a spread of about 0.44
counts and a drop in CIFAR-10 accuracy from 89.29 % to 88.71 %. This model is
exact. The tie-break (SA_P rounds up, SA_N rounds down) makes the boundary
popcounts 0, 8, 16, 24 and 32 land in the sub-classes the design expects.

### The dual-stage ADC (`adc_ctrl`)

**First stage: the sub-class, 2 bits.**

1. SA_N is fired against 3VDD/4 and SA_P against VDD/4.
2. Both low gives SC1 (0–VDD/4). Both high gives SC4 (3VDD/4–VDD).
3. Otherwise both references move to VDD/2 and the amplifiers fire again. A
   high result gives SC3, a low result SC2.

**Second stage: the count, 3 bits plus overflow.**

| sub-class | amplifier and reference | pump direction | popcount |
|---|---|---|---|
| SC1 | SA_P, VDD/4 | into SL (`pch1_b` precharge, then `wl_adc`) | Q − cnt |
| SC2 | SA_P, VDD/2 | into SL | 2Q − cnt |
| SC3 | SA_N, VDD/2 | out of SL (`pch0` discharge, then `wl_adc`) | 2Q + cnt |
| SC4 | SA_N, 3VDD/4 | out of SL | 3Q + cnt |

Here Q = 32/4 = 8, which is N/8 for N = 64 columns.

* Each iteration senses first and pumps only if the amplifier has not yet
  flipped. `cnt` is therefore the number of pumps SL needed to reach the
  reference.
* The counter stops at Q.
* A conversion takes at most 23 cycles.

The output is the half-row popcount as a 6-bit number (0..32) rather than a
5-bit code, because 32 must be representable before the halves are added.

## Proposal B: two-wordline XNOR with a bit-tree adder

### Sense amplifiers (`asym_sa`, behavioural)

When both RWLs are raised:

* If the two bits agree, exactly one of RBL/RBLB is discharged, and a normal
  differential amplifier resolves it.
* If they differ, both lines are discharged. The amplifier then falls to
  whichever input transistor is made stronger.
  * SA_NAND (`BL_STRONG=1`) outputs A AND B.
  * SA_NOR (`BL_STRONG=0`) outputs A NOR B.

The model reproduces this truth table. It is not a transistor-level model.

### Subarray (`xcel_b_subarray`)

The subarray is 128 × 64 and not sectioned: both operands must discharge the
same bitlines, so sectioning cannot apply. Each column has one SA_NAND, one
SA_NOR and an OR gate, which give the XNOR.

Timing:

* Cycle 0 raises the RWLs.
* Cycle 1 fires the amplifiers and runs the adder tree. The published 45 nm
  circuit needs about 1 ns for the XNOR and 0.3 ns for the tree.
* Cycle 2 presents the registered result.

A command can be issued every second cycle. A normal read uses one RWL and
SA_NAND alone.

### Adder tree (`bit_tree_adder`, with `full_adder` and `rc_adder`)

The tree is built only from full adders. Its first layer adds three
consecutive bits into a 2-bit count, and later layers add pairs of counts
with ripple-carry adders one bit wider each time.

It is written recursively: N bits split into one spare bit, a lower part
and an upper part. Each part is counted by a smaller tree, and the two counts
are summed by a ripple-carry adder with the spare bit as carry-in. Three bits
are thus one full adder, which forms the first layer.

For N = 64 the output is 7 bits, because 64 ones is a valid result. The
source text calls it a 6-bit popcount.

Verilator's lint reports the node's internal counts as undriven. The cause is
the recursion; simulation and synthesis are correct (297 cells for N = 64).

## What this design decides where the source is silent

* **Word width, address map and operand layout.** The 64-bit word equals the
  64-column row. The address map and the operand field layout shown above are
  this design's own.
* **Switch placement.** The switches sit only at the three section borders.
  They are closed except during steps 2–4 of a convolution.
* **Cycle-level sequencing.** All cycle-level sequencing is this design's own,
  including the sense-before-pump order, the second first-stage comparison at
  VDD/2 and the two-cycle Proposal-B pipeline. The source gives only
  latencies: about 45 ns for one Proposal-A operation, and 1 ns + 0.3 ns for
  Proposal B.
* **`pch1_b` polarity.** It is treated as the active-low gate of a PMOS
  precharge device (low = precharge). One sentence of the description says
  the opposite.
* **SL polarity.** The cell truth table in the source figure can be read as
  the reverse of the text. The model follows the text: a higher SL voltage
  means more matching bits.
* **Bank count.** The default of one bank of each kind is this design's own.

## Workloads: the CIFAR-10 BNN

The evaluated network is a VGG-like BNN. Conv1 and FC3 are not binarized and
run on the processor, as do the max-pool layers. The binarized layers map onto
Xcel-RAM:

| layer | kernel length (bits) | words per neuron | all weights of the layer | fits one 64 KB bank with its input? |
|---|---|---|---|---|
| Conv2 | 3·3·128 = 1152 | 18 | 18 KB | yes (34 KB) |
| Conv3 | 1152 | 18 | 36 KB | yes (40 KB) |
| Conv4 | 3·3·256 = 2304 | 36 | 72 KB | no |
| Conv5 | 2304 | 36 | 144 KB | no |
| Conv6 | 3·3·512 = 4608 | 72 | 288 KB | no |
| FC1 | 8192 | 128 | 1 MB | no |
| FC2 | 1024 | 16 | 128 KB | no |

Layers that do not fit must load their kernels in parts, or be spread over
more banks (`NBANK_A` / `NBANK_B`).

Per neuron, a Proposal-A subarray holds up to 16 kernel words for each of 4
output channels, and a Proposal-B subarray up to 64 word pairs. A 16-word
limit per 32-row section leaves room for the activation words.

`tb_bnn_layers` computes one output neuron of every distinct kernel length
above (four channels) in both banks at full size. It checks the accumulated
popcounts and the output bits against a software reference: 1350 in-memory
convolutions.

## Verification

Each block has a self-checking testbench `tb/tb_<block>.sv`. Every testbench
has a watchdog and ends with a `TB_RESULT checks=… failures=…` line.

| testbench | what it checks |
|---|---|
| `tb_bit_tree_adder` | every input pattern of a 7-input tree, random and corner vectors for N = 64 |
| `tb_asym_sa` | the full truth table of both amplifier types |
| `tb_sram10t_array` | writes, single and dual reads, precharge |
| `tb_cs_section_model` | SL levels, pumping and reference comparisons |
| `tb_adc_ctrl` | every half popcount 0..32 through an integer SL stand-in, all four sub-classes, ≤ 23 cycles |
| `tb_xcel_a_subarray` | four-kernel convolutions, masks, activation inside a section, ≤ 54 cycles |
| `tb_xcel_b_subarray` | exact popcounts and the two-cycle latency |
| `tb_xcel_bank` | both proposals at reduced size, and the cross-subarray error |
| `tb_avalon_xcel_slave` | command decoding, stalls and the one-outstanding-read rule, against stand-in banks |
| `tb_xcel_ram_system` | end to end at the full default size (see below) |
| `tb_bnn_layers` | the layer workloads above |

`tb_xcel_ram_system` runs at the full default size with no parameter
overrides. It covers:

* plain accesses at both ends of both banks;
* Proposal-A convolutions whose half counts fall in all four ADC sub-classes,
  including masked sections;
* Proposal-B convolutions and one SLVERR;
* a write stalled behind a running convolution;
* a 3×3×128 neuron on both banks.

It counts every one of these mechanisms and fails if any never occurred.

To simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
          --top-module tb_xcel_ram_system rtl/xcel_pkg.sv tb/tb_xcel_ram_system.sv
./obj_dir/Vtb_xcel_ram_system
```

The top-level build takes about two minutes, and the runs take about a
second.

## Differences from the source design and limits

* **Popcount exactness.** Proposal A's ADC here is exact. The real circuit
  has a spread of about 0.44 counts, growing with the count, and the
  behavioural SL model has no noise or pump decay.
* **Latency in cycles.** No clock frequency is given, so the latencies are in
  cycles: up to 54 for Proposal A and 2 for Proposal B, plus the bank and bus
  cycles. They are not in nanoseconds.
* **Popcount widths.** They are 6 bits for a half row and 7 bits for a full
  row. The source mentions 5-bit ADC codes and a "6-bit" popcount.
* **Outside parts.** The processor and its Xcel-Conv instruction extension,
  the instruction memory and the off-chip DRAM holding the kernels are not
  part of this RTL. The Avalon port is where they would attach.
* **Energy.** Energy figures (0.767 pJ per sectioned Proposal-A operation,
  29.67 fJ/bit for the Proposal-B XNOR) cannot be reproduced by RTL and are
  not modelled.
