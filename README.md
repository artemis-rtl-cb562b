# ARTEMIS in SystemVerilog: an in-DRAM stochastic-analog MAC engine for transformers

Transformer inference is dominated by matrix products whose weights live in
DRAM. ARTEMIS does those products inside an HBM stack instead of moving the
weights out. Each multiply is a single bitwise AND between two DRAM rows that
hold the operands as stochastic bit-streams. Accumulation is done in the analog
domain, by dumping the product's 1s as charge onto a small metal capacitor
(a MOMCAP) above each DRAM tile. After up to 20 products, the capacitor voltage
is turned back into a binary number. A small digital unit next to every subarray
(the near-subarray compute unit, NSC) then adds these partial sums and computes
softmax. A ring-and-broadcast network moves 256-bit words between the 32 banks
of the stack.

This repository gives RTL for everything in that scheme that has a logic
function:
- the number encoders and decoders;
- the per-tile compute additions, as behavioural models of the analog parts;
- the sign handling;
- the NSC with its softmax datapath;
- the bank sequencer;
- the inter-bank network;
- a stack-level top.

The DRAM cell array itself is not modelled: its word-line drivers and
precharge circuits, the rows that store weights, and the HBM I/O. Operands
enter the compute rows through a write port instead.

## 1. Numbers as bit-streams

An 8-bit operand is stored in sign-magnitude form. The magnitude m (0..128) is
expanded to a 128-bit stream with m ones. The sign is kept separately, in a
sign-bit column. The two operands of a product use different encodings.

* **Second operand: transition-coded unary (TCU).** The ones are packed from
  bit 0 upward: bit i = (i < m). See `b_to_tcu_decoder`.
* **First operand: TCU followed by bit-position correlation (BP).** The ones
  are spread evenly over the 128 positions: bit i is set when
  floor((i+1)·m/128) differs from floor(i·m/128). See `bp_encoder`.

With these two encodings, the AND of the streams has exactly
floor(a·b/128) ones. That is the product, scaled by 1/128, with no random
error. `b_to_tcu` selects between the two encodings with `first_op`. There is
one such block in each NSC, and every operand loaded into a subarray passes
through it.

## 2. The compute tile (`dram_tile`, behavioural)

Two rows of each 256-row tile are *computational rows*. Diodes link row #1 and
row #2 bit by bit, so activating both leaves `row1 & row2` in row #1. That
single step is a multiply of every operand pair held in the rows. A 256-bit row
holds two 128-bit streams, so each tile makes two products per step. In the
model, one `mul` cycle ANDs the rows, and a popcount of each half stands in
for the sense amplifiers driving the bit-lines.

The next step is accumulation, pulsed by K1, the switch that connects the
sense amplifiers to a capacitor:
* Half 0 adds its ones to the tile's own MOMCAP (`momcap`).
* Half 1 sends its ones to the MOMCAP of the same tile in the *partner*
  subarray.

Neighbouring subarrays 2k and 2k+1 share bit-lines (an open bit-line array).
Only one of each pair computes at a time, so the idle partner lends its
capacitor. Input `odd_on` of the bank picks which subarray of each pair works.

The MOMCAP is modelled as an integer charge of 0..2560 (20 × 128). It counts
the charge pulses, raises `full` at 20, and clamps at full scale.

Conversion (`a_to_u` + `priority_encoder`) is one cycle, with B1, ISO and L1
raised together:
1. 128 comparators with evenly spaced thresholds turn the voltage into a
   thermometer code. Threshold k is ceil(k·2560/128), which is 20k.
2. A priority encoder turns the thermometer code into a binary count.
3. The count is latched.

The latched value is therefore **floor(level / 20)**, where level is the sum
of the tile's products in units of 1/128. Conversion is coarse: one latch unit
stands for 20/128 of a full-scale product. Every testbench reference includes
this quantisation. Any use of the results has to account for it.

The tile latches form a shift chain. Each `shift` cycle moves every latch one
tile towards the NSC. Tile 0 feeds the NSC.

## 3. Signs: two passes per dot product (`sign_column`)

The analog accumulator can only add charge, so positive and negative products
are handled in separate passes. Each subarray has one sign column. It holds
the sign bits of row #1 and row #2 (one sign per row, for all operands in the
row), and computes the product sign as their XOR. It then gates K1: a product
charges its capacitor only in the pass that matches its sign (`pass_neg`).
The NSC adds the converted values in the positive pass and subtracts them in
the negative pass. The published design gives the one-sign-per-row rule and
the positive-then-negative order. The XOR-and-gate circuit is this RTL's
choice.

## 4. The bank sequencer (`bank_controller`)

One controller drives the same control lines to all tiles, sign columns and
NSCs of a bank. The host sends commands with a valid/ready handshake. An
assertion checks that `cmd_valid` is held until the command is accepted.

| command | action | busy cycles |
|---|---|---|
| `CMD_START` | clear the NSC accumulators, discharge the MOMCAPs, select the positive pass | 1 |
| `CMD_MUL` | AND and sense, then charge the MOMCAPs | 2 |
| *(automatic)* | after the 20th MUL since the last flush: flush | 2 + TILES |
| `CMD_NEG` | flush if any charge is stored, then select the negative pass | 0 or 2 + TILES |
| `CMD_FINISH` | flush if needed, reduce the NSC chain, then pulse `done` | (2 + TILES) + (SUBARRAYS − 1) + 1 |

A **flush** has three parts:
1. One conversion cycle.
2. One discharge cycle.
3. TILES shift cycles. The NSC adds or subtracts the latch value arriving
   from tile 0, saturating at ±127/−128.

The flush after 20 MULs is what keeps the capacitor from overflowing. A
command that arrives during a flush waits; `n_stall` counts these waits and
`n_auto_flush` counts the flushes.

**Reduce** walks down the NSC chain. In cycle k, NSC (SUBARRAYS−2−k) adds the
accumulator of the NSC after it, so the bank result ends in NSC 1 (index 0)
and appears on `result`.

Rates at the defaults: one MUL step is 2 cycles and gives 64 MACs per working
subarray (32 tiles × 2 products). The published design reports 64 MACs per
subarray in 48 ns.

What is simpler than the published design: the published schedule overlaps
the latch transfer and NSC accumulation with the next MAC steps. Here they
are sequential, which is why stalls exist. For that reason the controller is
listed as partial.

## 5. The near-subarray compute unit (`nsc`, `softmax_unit`)

Each NSC has four parts:
* an 8-bit saturating accumulator, with the priority clear > sub-chain
  input > NSC-chain input;
* the B_to_TCU block used for operand loading;
* a softmax unit;
* two 256 × 8 LUT RAMs (exp and ln), which can be reprogrammed.

Softmax uses the log-sum-exp form. This avoids division and keeps exp() in
range:

    softmax(y_i) = exp( y_i − y_max − ln Σ_j exp(y_j − y_max) )

It runs as four host-sequenced operations, one element per cycle:

| op | computes |
|---|---|
| `SM_MAX` | running maximum |
| `SM_SUM` | Σ exp_lut[y − y_max] |
| `SM_LN` | ln_lut[sum] |
| `SM_OUT` | exp_lut[y − y_max − ln_sum] |

* `SM_MAX` can be fed while the scores are still being produced.
* `SM_LUT` uses the exp table as a general one-input function, for example
  ReLU or GELU.
* `sm_use_result` feeds the bank's own result in as the score.

All values are 8-bit:
* Scores, logarithms and probabilities are signed Q3.4.
* The exponent sum is unsigned Q4.4 and saturates at 255, which is 15.94.

The published design fixes the 8-bit data width and the LUT-based steps but
not the fixed-point format. With long sequences, the sum saturates whenever
more than about 16 scores lie close to the maximum. Three adders are used
where the published NSC time-shares one adder/subtractor.

## 6. Between banks (`ring_network`)

Each bank owns one 256-bit link register.

* **Ring word.** A word injected at bank k reaches bank k+1 on the next
  cycle, then each further bank one cycle apart. It retires after 31 hops,
  having visited all other banks. This is how each bank's K or V slice
  reaches everyone.
* **Broadcast.** A broadcast word reaches all other banks in one cycle.
* **Collisions.** `inj_ready` refuses an injection that would collide with a
  word in flight.

At the top level, a bank can load an operand directly from the word it is
currently receiving: set `ld_from_ring` and `ld_byte` selects the byte. The
byte goes through B_to_TCU into the computational rows without a DRAM write.
The received word is visible for one cycle only, so the load must happen in
that cycle.

## 7. The stack (`artemis_top`, `bank`)

`bank` builds SUBARRAYS × TILES tiles, defaulting to the published 128 × 32.
Each subarray has its sign column and NSC, and there is one controller.
`artemis_top` builds N_CH × BANKS_PER_CH banks (8 × 4) and the ring. Its
per-bank ports are arrays indexed by channel·4 + bank:
* command;
* operand load;
* result;
* softmax.

The LUT write port is shared by all NSCs.

**Size.** The top defaults to **2 subarrays per bank**, not 128. That is one
partner pair, and it keeps all 32 banks and 32 tiles per subarray. The reason
is memory: the open-source front ends elaborate every tile instance
separately.
* yosys with the slang front end needs about 3.7 MB and 0.16 s per tile. The
  full 131072-tile stack would need roughly 480 GB.
* A single full 128-subarray bank (4096 tiles) needs about 15 GB.
* Verilator builds a full bank in about 1 GB.

Pass `SUBARRAYS` to restore a larger size where the tools allow it. Nothing
in the RTL depends on the value, except that it must be even for the
partner pairing.

## 8. Where this departs from the published design

* **Analog behaviour.** The analog parts are ideal integer models:
  * the MOMCAP, with no leakage and no charge-sharing error;
  * the sense amplifiers;
  * the comparators, with exact thresholds.

  The published error analysis (small errors above about 4.7-bit operands)
  is not reproduced.
* **Clocking.** Every control step takes one clock cycle. The published
  figures are 17 ns per memory operation and 31 ns per conversion, with no
  clock given.
* **Pipelining.** There is no overlap of flush and MAC (section 4).
* **Dataflow.** The token-sharded dataflow and the per-layer schedule are
  software in the published work. Here they are left to whatever drives the
  command ports.
* **Operand storage.** There are no weight-storage rows and no RowClone-style
  row copy. Every operand is written into the computational rows through the
  load port. So the built design holds only 4096 operand pairs. It can run
  any of the evaluated models only by having every operand streamed in. At
  the published size the stack's 1 GiB of cells would hold the weights of all
  five evaluated models (12 M to 350 M 8-bit parameters).
* **Operand delivery.** A stochastic operand leaves the NSC's B_to_TCU
  block and is written straight into the addressed tile in one cycle. The
  published design shifts such operands to their tiles through the latch
  rows, in a pipeline.
* **Number formats.** The fixed-point softmax format, the accumulator
  saturation and the ±128 magnitude range are this RTL's choices.

## 9. Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb_ref_pkg` holds the
reference arithmetic (product, conversion, saturation), written independently
of the RTL.

| testbench | what it checks |
|---|---|
| `tb_artemis_top` | End-to-end run of a 2 × 2-bank, 2 × 4-tile stack: broadcast LUT programming, ring hops, operand loads from a broadcast word, 20 MULs with an automatic flush, a stalled MUL, the negative pass, the reduction and softmax, all against a reference model. It also counts that each of these mechanisms happened. |
| `tb_artemis_top_full` | The top at its default size (32 banks × 2 × 32 tiles): one signed dot product in every bank. |
| `tb_bank` | 4 × 4 tiles, random multi-flush dot products against a reference. |
| `tb_bank_controller` | Command timing in cycles. |
| others | Exhaustive or random unit checks of each block. |

Run one with Verilator 5, for example:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/artemis_pkg.sv tb/tb_ref_pkg.sv tb/tb_artemis_top.sv \
        --top-module tb_artemis_top -j 8
    ./obj_dir/Vtb_artemis_top

The full-size testbench builds in about a minute and simulates in under a
second.
