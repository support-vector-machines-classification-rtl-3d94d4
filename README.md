# A precision-scalable SVM co-processor for the bit-serial SERV RISC-V core

Flexible electronics (thin-film transistors on plastic) can hold only a few
thousand gates and run at tens of kilohertz. A bit-serial RISC-V core such as
SERV fits, but it has no multiplier, so the multiply-accumulate loop of a
classifier costs thousands of cycles per product in software. This design adds
a small co-processor for linear support vector machines (SVMs) next to the
core. The core reaches it through one custom R-type instruction. Eight 4x4-bit
multipliers multiply unsigned 4-bit input features with signed weights of
4, 8 or 16 bits. The same multipliers are regrouped for the wider weights, so
one instruction handles eight, four or two (feature, weight) pairs. A few
registers inside the co-processor keep a running score and a running argmax.
Software can then run either of the two usual multi-class schemes:

* **one-vs-rest (OvR):** one classifier per class; the class with the highest
  score wins, and the co-processor tracks that winner itself;
* **one-vs-one (OvO):** one classifier per pair of classes, `m(m-1)/2` in all;
  software reads the sign of each score and counts votes.

The RTL follows the architecture of the published design, "Support Vector
Machines Classification on Bendable RISC-V" (Vergos et al.). Where that
description leaves a detail open, this RTL makes its own choice; the section
"Where this RTL fills gaps" lists those choices.

## The custom instruction

All operations share `opcode = 0110011` (the standard register-register
opcode) and `funct7 = 0000001`. The core itself uses only funct7 `0000000` and
`0100000` with this opcode, so the accelerator does not collide with any of
its instructions. `funct3` selects the operation:

| funct3 | operation   | rs1                | rs2                  | rd result                  |
|--------|-------------|--------------------|----------------------|----------------------------|
| 000    | `SV_Calc4`  | 8 features         | 8 x 4-bit weights    | 0                          |
| 010    | `SV_Calc8`  | 4 features (15:0)  | 4 x 8-bit weights    | 0                          |
| 101    | `SV_Calc16` | 2 features (7:0)   | 2 x 16-bit weights   | 0                          |
| 001    | `SV_Res4`   | ignored            | ignored              | `{sign, 23'b0, class[7:0]}` |
| 100    | `SV_Res8`   | ignored            | ignored              | same                       |
| 110    | `SV_Res16`  | ignored            | ignored              | same                       |
| 111    | `Create_Env`| ignored            | ignored              | 0                          |
| 011    | unassigned: does nothing | -     | -                    | 0                          |

Feature `i` is `rs1[4i+3:4i]` (unsigned, 0..15). Weight `i` of width `W` is
`rs2[W*i+W-1 : W*i]`, in two's complement. A calc instruction adds
`sum_i feature_i * weight_i` to the running score `cur_sum`. Unused slots
should carry zero weights.

A Res instruction closes the current classifier:

1. if `max_sum <= cur_sum`, then `max_sum <= cur_sum` and `max_id <= cur_id`;
2. the result word gets bit 31 = sign of `cur_sum`, bits 7:0 = `max_id`
   (already updated by step 1), and zeros in between;
3. `cur_sum <= 0`, `cur_id <= cur_id + 1`.

The three Res codes behave the same way. `Create_Env` and reset clear
`cur_sum`, `cur_id` and `max_id`, and set `max_sum` to -2^31.

There is no bias hardware. The bias goes in as one more (feature, weight)
pair, with feature value 1 and the bias as the weight. It costs an extra calc
instruction only when the features fill the last one exactly.

### The software routine

```
Create_Env
for each classifier c:
    for each packed chunk j:  SV_CalcW(features[j], weights[c][j])   # bias in the last chunk
    r = SV_ResW()
    OvO: if r[31] == 0 vote for the first class of the pair, else for the second
OvR: class = r & 0xFF            (r of the last Res)
```

For example, Dermatology with OvO and 8-bit weights has 34 features + bias and
15 classifiers. That makes 15 x (9 calc + 1 Res) + 1 = 151 accelerator
instructions per inference.

## How one instruction moves between the core and the co-processor

SERV moves every register operand one bit per cycle. The co-processor is
parallel, so `flex_svm_top` puts a 32-bit shift register on each side.
`accel_sequencer` stands in for the part of the core's control state machine
that runs accelerator instructions. With a register file that answers in one
cycle, the operation looks like this (cycle 0 = the fetch acknowledge):

| cycle  | event                                                               |
|--------|---------------------------------------------------------------------|
| 0      | instruction fetched; the decoder registers `acc_op`, `funct3`, addresses |
| 1      | `acc_op` seen: the sequencer leaves idle, the core is stalled (`o_busy`) |
| 2      | `init` rises, `o_rf_rreq` (one cycle)                               |
| 3      | register file answers with `i_rf_ready` (one cycle)                 |
| 4..35  | `cnt_en`: rs1 and rs2 bits 0..31 shift in, LSB first; `cnt_done` at 35 |
| 36     | `init` falls, `accel_valid` rises; the co-processor executes        |
| 37     | `accel_ready` (one cycle); the result is loaded into the output shift register |
| 38     | `o_rf_wreq` (one cycle)                                             |
| 39     | `i_rf_ready`                                                        |
| 40..71 | `cnt_en`: result bits 0..31 go to `rd`, LSB first; `cnt_done` and `o_done` at 71 |

An accelerator instruction therefore costs 72 cycles, 64 of them for the
serial transfers. A slower register file adds wait cycles before each
transfer; the sequencer waits for `i_rf_ready`. The co-processor's own work
takes one cycle. `accel_valid` stays high until `accel_ready`, and the
co-processor asserts `accel_ready` one clock after it first sees
`accel_valid`. Assertions in `svm_accel` check both rules. Other instructions
(any other funct7 or opcode) never start the sequencer. For them the
write-back mux `rd_select` passes the core's own ALU, CSR, load or control
result.

## Inside the co-processor: one set of multipliers for three weight widths

This is the part of the design that takes the most care. `svm_accel` holds
two processing elements (`svm_pe`). Each has four 4x4 unsigned multipliers,
so the low PE takes bits 15:0 of the weight word and the high PE bits 31:16.

**Signed weights on unsigned multipliers.** `sm_converter` replaces every
weight by its magnitude, at the weight's own width. -8, -128 and -32768
become 8, 128 and 32768, which still fit unsigned. It also gives one sign
flag per 4-bit nibble, copied from the weight that owns the nibble. Each
multiplier's product is negated before the adders when its flag is set. A
wide weight therefore gets the same sign on all of its partial products.

**Feeding the multipliers.** Multiplier `k` of a PE multiplies feature
nibble `k` with weight nibble `k`. For wider weights the feature is repeated,
so that every nibble of a weight meets the same feature:

| width | A_H (high PE)      | A_L (low PE)       | weights in B'_H / B'_L |
|-------|--------------------|--------------------|------------------------|
| 4     | A7, A6, A5, A4     | A3, A2, A1, A0     | B7..B4 / B3..B0        |
| 8     | A3, A3, A2, A2     | A1, A1, A0, A0     | B3, B2 / B1, B0        |
| 16    | A1, A1, A1, A1     | A0, A0, A0, A0     | B1 / B0                |

**Reassembling wide products.** Within a PE, products 1 and 3 can be shifted
left by 4. The sum of products 2 and 3 can also be shifted left by 8:

```
sum_0 = ±P0 ± (P1 << 4·sh4)
sum_1 = (±P2 ± (P3 << 4·sh4)) << 8·sh8          sh4 = funct3[2] | funct3[1],  sh8 = funct3[2]
```

* 4-bit (`000`): no shifts; four independent signed products per PE.
* 8-bit (`010`): `sh4` only. `sum_0 = A0·(lo + hi·16) = A0·|B0|`, and
  likewise `sum_1 = A1·|B1|`.
* 16-bit (`101`): both shifts. `sum_0 + sum_1 = A0·(n0 + n1·16 + n2·256 + n3·4096) = A0·|B0|`.

The shift selects come straight from the funct3 bits. They are only
meaningful for the three calc codes; Res and Create_Env do not use the PE
outputs. An adder adds the four PE sums (22-bit signed each) to the 32-bit
`cur_sum`.

**Worked example (8-bit).** rs1 = `0x0000_0053` (A0 = 3, A1 = 5), rs2 =
`0x0000_07FE` (B0 = -2, B1 = 7). The low PE sees I = {5,5,3,3} and
W' = {0x07, 0x02}, with signs {+,+,-,-}. Its sums are sum_0 = -(3·2 + 3·0·16)
= -6 and sum_1 = 5·7 + 5·0·16 = 35, so `cur_sum` grows by 29.

### Argmax and the result word

`cur_id` counts classifiers. `max_sum`/`max_id` hold the best score so far
and the classifier that produced it. The comparison is `max_sum <= cur_sum`,
so a tie goes to the later classifier. Because `max_sum` starts at -2^31, the
first classifier always wins the first comparison. The class id is 8 bits
(`ID_W`), so `cur_id` wraps after 256 classifiers.

## Module map

| file                     | module            | role |
|--------------------------|-------------------|------|
| `rtl/svm_pkg.sv`         | package           | opcode, funct7, funct3 codes (`svm_op_e`), weight width (`wmode_e`), decode helpers |
| `rtl/flex_svm_top.sv`    | `flex_svm_top`    | top: everything below, core signals as ports |
| `rtl/accel_decoder.sv`   | `accel_decoder`   | registers `acc_op`, funct3, register addresses on decoder enable |
| `rtl/accel_sequencer.sv` | `accel_sequencer` | FSM of the table above |
| `rtl/accel_serdes.sv`    | `accel_serdes`    | 32-bit shift registers: serial operands in, serial result out |
| `rtl/svm_accel.sv`       | `svm_accel`       | the co-processor: `clk, rst, rs1, rs2, funct3, valid -> ready, result` |
| `rtl/sm_converter.sv`    | `sm_converter`    | two's complement to magnitude + per-nibble sign |
| `rtl/svm_pe.sv`          | `svm_pe`          | four multipliers, shift muxes, signed sums |
| `rtl/rd_select.sv`       | `rd_select`       | write-back source mux with the accelerator as a fifth source |

Parameters, with defaults from the design: `svm_accel.SUM_W = 32` (score
registers), `ID_W = 8` (class id bits in the result), `PSUM_W = 22` (PE sum
width; the smallest that holds `15·255·256 + 15·255`). `accel_decoder.ACC_FUNCT7`
(default `0000001`) allows another funct7 for a second accelerator.

After synthesis, the whole top has about 180 word-level cells and 237
flip-flop bits (generic yosys cells, no technology mapping).

### Connecting it to the core

`flex_svm_top` does not include SERV. It expects:

* `i_ibus_rdt`, `i_ibus_ack`: the fetched instruction and its acknowledge,
  which is also the decoder enable;
* a bit-serial register-file port. The top raises `o_rf_rreq` or `o_rf_wreq`
  for one cycle, with addresses `o_rs1_addr`, `o_rs2_addr`, `o_rd_addr`. The
  register file answers with a one-cycle `i_rf_ready`. In the 32 cycles after
  that, `i_rs1`/`i_rs2` must carry the operand bits LSB first. The result
  leaves on `o_rf_wdata` in the cycles where `o_rf_wen` is high;
* the core's other write-back bits and their enables (`i_alu_rd`,
  `i_rd_alu_en`, ...), one enable at a time;
* `o_busy`, to stall the core while an accelerator instruction runs, and
  `o_done` on its last cycle.

`o_init`, `o_cnt_en`, `o_cnt_done`, `o_accel_valid` and `o_accel_ready` are
outputs for observation only.

## Where this RTL fills gaps

The following points are not fixed by the published description and are
choices of this RTL:

* **Sign in the result.** The description says both "sign of `cur_sum`" and
  "sign of the maximum weighted sum". Bit 31 here is the sign of `cur_sum`
  before it is cleared, which is what OvO voting needs.
* **Tie rule.** `<=` is used, with `max_sum` on the left, so ties go to the
  later classifier. A software reference that uses first-maximum argmax
  (numpy) can differ on exact ties.
* **Res does not compute.** Res uses only the registers. Res4/8/16 are
  identical, and the example routine calls Res without operands.
* **Multiplier count.** The text speaks of eight multipliers "in the PE"; the
  drawings show four per PE and two PEs. This RTL follows the drawings, which
  gives eight in total.
* **Shift-mux select.** The gate that combines `funct3[2]` and `funct3[1]`
  for the `<<4` muxes is an OR, the only choice that gives the required
  behaviour for all three widths. The sign handling (negate each product) is
  also this design's choice.
* **Handshake timing.** The co-processor answers `accel_ready` one cycle
  after `accel_valid`. The sequencer issues an explicit read request and
  waits for `i_rf_ready`.
* **Serial/parallel conversion** sits in its own block (`accel_serdes`),
  LSB first.
* **Decoder.** It registers its outputs on enable and has no reset, like the
  decoder it extends. The top starts the sequencer in the cycle after the
  fetch acknowledge.
* **Unassigned funct3 `011`** is a no-op returning 0.

## Not included

* **The SERV core** (fetch, register file, ALU, CSR, memory interface, the
  rest of its decoder and state machine). It is an existing open-source core.
  Only the accelerator-related parts of its decoder, state machine and
  write-back mux are given here, as separate blocks.
* **Memory and the FPGA/SoC framework** used to run software on the core.
  The published cycle counts include memory latencies of 46/47 cycles plus a
  64-cycle overhead per access. Those are properties of the evaluation
  system, not of this logic.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends with a line
`TB_RESULT checks=N failures=M`:

| testbench            | what it checks |
|----------------------|----------------|
| `tb_sm_converter`    | random and corner-case weight words at all widths, against integer abs/sign |
| `tb_svm_pe`          | random nibbles against the defining sums; 8- and 16-bit operand patterns against plain products |
| `tb_svm_accel`       | random programs (mixed widths, ties, >255 classifiers, mid-run reset) against an integer reference; ready exactly one cycle after valid |
| `tb_accel_decoder`   | custom vs. standard R-type, other funct7 values and opcodes, hold when not enabled |
| `tb_accel_sequencer` | the cycle-by-cycle control sequence with fixed and random response times; 35 cycles to `accel_valid` |
| `tb_accel_serdes`    | LSB-first operand capture and result shift-out, with stalls |
| `tb_rd_select`       | every source and bit combination |
| `tb_flex_svm_top`    | end to end at default parameters, with a behavioural register-file model (`tb/serv_rf_model.sv`) |

`tb_flex_svm_top` first checks the 72-cycle instruction timing and the
protocol order. It then runs inference for five model shapes (Balance Scale
4 features/3 classes, Dermatology 34/6, Iris 4/3, Seeds 7/3, Vertebral 3C 6/3),
each OvR and OvO, at 4-, 8- and 16-bit weights. Weights and inputs are
random, and extreme weights are run as well. It compares every
classifier's sign and the predicted class with an integer reference. It also
counts how often each mechanism occurred: every funct3 code, argmax update and
keep, negative score, register-file wait, stall, a non-accelerator
instruction, the core's write-back path, and an extra calc for the bias. A
mechanism that never occurs counts as a failure. These are synthetic models
of the same size as the data sets, not the trained classifiers, so accuracy
is not measured.

Running a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb rtl/svm_pkg.sv tb/tb_flex_svm_top.sv \
          --top-module tb_flex_svm_top -Mdir obj_top -o sim
./obj_top/sim
```

Replace the testbench name to run any other one. Verilator finds the modules
through `-Irtl -Itb`. Lint a module with
`verilator --lint-only -Wall -Irtl rtl/svm_pkg.sv rtl/<module>.sv`.
