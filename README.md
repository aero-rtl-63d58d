# Adaptive block erase for NAND flash (AERO engine)

Erasing a NAND flash block is slow. A modern 3D TLC chip needs about 3.5 ms per
erase pulse. Worn blocks need several pulses. Every pulse also wears the cells a
little. The usual scheme, incremental step-pulse erasure (ISPE), gives every
pulse the same worst-case length. So most blocks get more high-voltage time
than they need.

This engine makes each pulse only as long as the block needs. The key fact is
that the chip already measures, after every pulse, how far the block is from
being erased. That number is the *fail-bit count* F: the cells still above the
erase-verify level, counted by the verify-read. On the characterised chips, F
falls almost linearly with pulse time: every extra 0.5 ms at the final voltage
step removes about δ ≈ 5,000 fail bits. So F tells the controller how many
0.5 ms units the next pulse needs. A small table turns F into a pulse length.

The engine sits in the SSD controller between the flash translation layer
(FTL) and the NAND channel. The FTL asks it to erase a block. The engine sends
the chip a short command sequence per pulse and reports how the erase went.
The chips need no changes. Pulse length and fail-bit count go through the
chips' standard SET FEATURE and GET FEATURE commands.

## Background: the ISPE loop

An erase is a series of *loops*. Each loop has two parts:

- an erase pulse (EP) at voltage step V_ERASE(n) for time tEP;
- a verify-read (VR) that counts F.

If F ≤ F_PASS the block is erased. Otherwise the next loop runs at the next,
higher voltage. At most five loops are used. A fresh block usually needs one
loop. A block near the end of its life needs two to five. With fixed pulses,
the total erase time is N_ISPE × 3.5 ms.

## The three ideas the engine implements

**1. Fail-bit-count-based latency prediction (FELP).** Take the F measured
after loop n−1. It predicts the minimum pulse time loop n needs. This holds
when loop n is the last one. Since nobody knows in advance which loop is the
last, the engine always looks up a predicted time. When the F reading is above
F_HIGH = 7δ, the table returns the full 3.5 ms. Such a block is too far from
erased for a shorter pulse.

**2. Shallow erasure.** The first loop has no earlier F to go on. So the first
loop is split in two:

- a 1 ms *shallow erasure* at V_ERASE(1), followed by a verify-read;
- a *remainder erasure*, whose length comes from the table using that F.

A young block that needs only 1.5 or 2 ms then gets exactly that. A block
where this cannot help is marked in a one-bit-per-block flag, the SEF
(shallow-erasure flag). Here "cannot help" means the remainder comes out at
the full 2.5 ms, so 1 ms + 2.5 ms is no shorter than the default pulse. Later
erases of a marked block skip the shallow step and its extra verify-read.

**3. Using the ECC margin.** The SSD's ECC is sized for the worst case: a
worn block after a year of retention. Early in life there is a large margin.
The *aggressive* latency model uses it: it predicts shorter pulses than
strictly needed. A table entry of 0 means "stop here". The few cells left
unerased add errors that the ECC absorbs. The engine reports such an erase as
`ERS_PASS_ECC`. The *conservative* model never relies on the margin. The
aggressive one is the default (`AGGRESSIVE = 1`).

## The latency table (EPT)

Rows are the voltage step of the pulse about to be applied. Row 1 is the
remainder after a 1 ms shallow erasure, so it cannot exceed 2.5 ms. Columns
are the range of the F reading. Entries are in 0.5 ms units (7 = 3.5 ms). The
two numbers in each cell are conservative / aggressive.

| row \ F range | ≤ γ | ≤ δ | ≤ 2δ | ≤ 3δ | ≤ 4δ | ≤ 5δ | ≤ 6δ | ≤ 7δ | > 7δ |
|---|---|---|---|---|---|---|---|---|---|
| 1 (remainder) | 1/0 | 2/0 | 3/1 | 4/2 | 5/3 | 5/4 | 5/5 | 5/5 | 5/5 |
| 2 | 1/0 | 2/0 | 3/1 | 4/2 | 5/3 | 6/4 | 7/5 | 7/6 | 7/7 |
| 3 | 1/0 | 2/0 | 3/1 | 4/2 | 5/3 | 6/4 | 7/5 | 7/6 | 7/7 |
| 4 | 1/0 | 2/1 | 3/2 | 4/3 | 5/4 | 6/5 | 7/6 | 7/7 | 7/7 |
| 5 | 1/1 | 2/2 | 3/3 | 4/4 | 5/5 | 6/6 | 7/7 | 7/7 | 7/7 |

The pattern behind the conservative values is simple. Every δ of fail bits
costs one more 0.5 ms unit. The aggressive values are one or two units lower
in early loops. They never go lower in loop 5, where a block is near the end
of its life and has no ECC margin left.

The zeros of the aggressive model say when the last loop can be left out
altogether, because the unerased cells stay within what the ECC absorbs. This
is allowed in loops 1 to 3 when F ≤ δ, and in loop 4 when F ≤ γ. (The
measurements behind these rules were stated with strict bounds, F < δ and
F < γ. The table ranges include the bound, a difference of one fail bit.)

The "≤ δ" column means γ < F ≤ δ. The "> 7δ" column is the full default pulse.
`rtl/ept.sv` loads these values on reset. A write port (`cfg_ept_*`) can replace
any cell, for example with a table profiled for a different chip.

## Erase sequence

For each request, `aero_erase_ctrl` does the following:

1. Read the block's SEF bit. If it is TRUE (0), the first pulse is a shallow
   erasure of `cfg_tse` (default 1 ms) at step 1. Otherwise the first pulse is
   a full 3.5 ms pulse at step 1.
2. For every pulse, send `SET_TEP` (pulse length), then `ERASE_LOOP` (pulse
   plus verify-read at step `vlevel`), then `GET_FBC` (read F).
3. Classify F (`fail_bit_classifier`). F ≤ F_PASS ends the erase with
   `ERS_PASS`. Otherwise choose the next pulse:
   - **Step not yet complete.** The current voltage step has had less than
     3.5 ms in total. This happens after a shallow erasure or a shortened
     pulse. Look up the table row of the *same* step.
     - After a shallow erasure, the entry is the remainder. If it fills the
       step up to 3.5 ms, the SEF bit is set to FALSE.
     - After a shortened pulse that still failed, the prediction was too short
       (a *misprediction*). The engine gives another pulse at the same voltage.
       Its length is the entry for the new F. It is at least 0.5 ms and at most
       what is left of the step's 3.5 ms.
     - A 0 entry in either case ends the erase with `ERS_PASS_ECC`.
   - **Step complete.** The step has had its full 3.5 ms. Move to the next
     voltage step and look up *that* row. A 0 entry means the final loop is
     not needed, and the erase ends with `ERS_PASS_ECC`. After step 5 the erase
     ends with `ERS_FAIL`.
4. Pulse `done_valid` with the result record `ers_result_t`:
   - status;
   - highest step used (`n_ispe`);
   - number of pulses;
   - total pulse time in 0.5 ms units;
   - whether a shallow erasure ran;
   - whether the SEF bit was cleared;
   - number of misprediction retries.

### Worked examples (aggressive table, γ = 1000, δ = 5000)

- *Fresh block.* The shallow 1 ms pulse leaves F = 500 (≤ γ). Row 1 gives 0.
  The erase ends `ERS_PASS_ECC` after 1 ms instead of 3.5 ms.
- *Young block that needs 2.5 ms.* The shallow pulse leaves F = 7,500
  (≤ 2δ). Row 1 gives 1, so a 0.5 ms remainder follows. Total: 1.5 ms.
- *Block that needs the full first loop.* The shallow pulse leaves F = 27,500
  (≤ 6δ). Row 1 gives 5, which brings step 1 to 3.5 ms, so the SEF bit goes
  to FALSE. If F is still high, step 2 follows. Its length comes from row 2.
  Next time, the block starts directly with a full 3.5 ms pulse.
- *Worn block, five loops, flag already FALSE.* Steps 1 to 4 each get 3.5 ms. After step 4, F is
  in range 2δ, so row 5 gives 1.5 ms. Total: 15.5 ms instead of 17.5 ms.

## Blocks

| module | what it is |
|---|---|
| `aero_pkg` | widths, defaults, command opcodes, status codes, result record |
| `fail_bit_classifier` | combinational: pass test F ≤ F_PASS, and range 0..8 (≤ γ, ≤ kδ, > 7δ) |
| `ept` | 5 × 9 latency table, 3-bit cells, combinational lookup, write port |
| `sef` | one flag per block in 32-bit words, cleared after reset, registered read |
| `aero_erase_ctrl` | the sequencer above, one erase at a time |
| `aero_top` | wires the four together; exposes config, request/done and NAND ports |

## Interfaces and timing

- **Configuration.** `cfg_gamma`, `cfg_delta` and `cfg_f_pass` are 20-bit
  fail-bit thresholds. `cfg_tse` is in 0.5 ms units and must be 1 to 6. These
  are plain inputs, meant to be driven from firmware registers. The package
  holds the values used here: γ = 1000, δ = 5000, F_PASS = 100, tSE = 2
  (1 ms).
- **Requests.** `req_valid`/`req_ready`/`req_blk` follow a valid/ready
  handshake. `req_ready` is high only when the engine is idle. After reset it
  stays low for ⌈NUM_BLOCKS/32⌉ cycles (994 at the default size) while the
  flags are cleared. `done_valid` is a one-cycle pulse carrying `done_blk` and
  `done_result`.
- **NAND port.** Each command is held on `cmd_valid`/`cmd_op`/`cmd_blk`/
  `cmd_vlevel`/`cmd_tep` until `cmd_ready`. The chip answers each command with
  one `rsp_valid` pulse; `rsp_fbc` is read on the answer to `GET_FBC`. Only
  one command is outstanding at a time. Assertions check that a command stays
  stable until accepted and that no response arrives unasked.
- **Timing.** Each pulse costs three command handshakes plus one decision
  cycle in the engine. The chip's pulse and verify-read times come on top. With
  a chip that accepts commands at once, an erase of P pulses and U units of
  pulse time takes 2 + P·(2·(T_CMD+2) + (T_VR+2) + 1) + U·C cycles. Here:
  - T_CMD is the chip's feature-command latency;
  - T_VR is its verify-read time;
  - C is the number of cycles per 0.5 ms.

  The end-to-end testbench checks this count for every erase. On real chips a
  verify-read takes about 100 µs, so C is about five times T_VR. Against
  millisecond pulses, the controller overhead is negligible.
- **Reset.** All modules use a synchronous, active-low reset. `cmd_valid` is
  held low while reset is asserted, so no command reaches the chip from the
  state before the first reset edge.

## How this departs from the source description

Followed as described:

- the ISPE loop;
- the 0.5 ms granularity and the 0.5–3.5 ms pulse range;
- tSE = 1 ms and at most five loops;
- δ ≈ 5,000;
- the table values;
- the SEF encoding (0 = TRUE, all TRUE initially) and its update rule;
- skipping the final loop on a 0 entry;
- the misprediction rule: same voltage while the time at it is below the
  default, higher voltage after.

This design's own choices:

- **γ and F_PASS** are not given numerically. They are set to 1000 and 100
  and are run-time inputs.
- **Counter width.** F is counted in 20 bits. A wordline has more than 2^17
  cells.
- **Table shape.** The table is stored as 5 rows × 9 ranges. The source
  sizes it at 35 entries (7 pulse values × 5 loops), which does not match its
  own 8-column model.
- **The "> 7δ" column** holds the full pulse, or 2.5 ms for the remainder row.
- **Misprediction accounting.** The source says to compare "the accumulated
  latency" with the default erase time. Here this is done per voltage step: a
  step is left only after 3.5 ms at it. Each retry is at least 0.5 ms, which
  matches the penalty assumed in the source's sensitivity study.
- **ECC acceptance after a shortened pulse.** The pass threshold is
  effectively raised under the aggressive model. So a shortened pulse that
  leaves only what the same-step table maps to 0 is accepted as
  `ERS_PASS_ECC`, not retried.
- **`ERS_FAIL`** is reported after five full steps.
- **Command port.** The three-command port, its handshake and the
  per-command voltage-step field are this design's own. A real chip steps
  V_ERASE internally.
- **Where it runs.** The source implements the scheme as FTL firmware on the
  SSD controller's CPU, with the SEF in controller DRAM. Here the scheme is a
  hardware engine with the SEF in on-chip memory (31,808 bits, one per block
  of a 1 TB SSD with 8 channels × 2 chips × 4 planes × 497 blocks).
- **SEF after reset.** The flags are cleared by a sweep after reset, not
  loaded from non-volatile storage. Flags are lost on power cycling, which only
  costs one extra shallow erasure per block.
- **Not covered.** Multi-plane erase, erase suspension and the choice of which
  block to erase (garbage collection) are outside this engine.
- **tSE other than 1 ms.** `cfg_tse` accepts any shallow time, and the
  remainder is capped so that the first loop never passes 3.5 ms. Row 1 of
  the table was sized for tSE = 1 ms, where its largest remainder (2.5 ms)
  completes the loop. At tSE = 1.5 and 2 ms the same row still works. At
  tSE = 0.5 ms it does not: the first loop then reaches only 3 ms, a 0.5 ms
  retry follows for every block that needs more than one step, and the flag
  is never cleared. That setting needs a reloaded row 1.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog.

- `tb_fail_bit_classifier` compares against ⌈F/δ⌉ capped at 8. It covers
  every boundary kδ−1, kδ and kδ+1, for two threshold settings, plus random
  counts.
- `tb_ept` checks all 45 cells of both models against the table in
  milliseconds. It also checks the out-of-range default and the write port.
- `tb_sef` checks the clear sweep and its cycle count, random set/read
  against a reference array, and the forwarding of a set to an immediate read.
  It runs with 1000 blocks.
- `tb_aero_erase_ctrl` drives the sequencer with a conservative table and
  classifier written independently in the testbench. It checks exact pulse
  sequences (voltage step and length) for worked cases:
  - a remainder, and a remainder that clears the flag;
  - multi-step blocks;
  - mispredictions at the same step and at the next step;
  - a block that cannot be erased;
  - a 30-pulse persistent misprediction.

  It also checks the SET/ERASE/GET command order and 200 random erases.
- `tb_aero_top` runs the whole engine at its default size (31,808 blocks,
  aggressive model). It first runs hand-worked cases. It then runs 300 random
  erases against `nand_erase_model`, and for each it checks:
  - the result record against what the chip saw;
  - the cycle count.

  It counts every mechanism and fails if one never occurred:
  - shallow erasure;
  - remainder;
  - flag clear;
  - erase of a flagged block;
  - shortened pulse;
  - full pulse;
  - final-loop skip;
  - ECC acceptance;
  - misprediction;
  - failure;
  - plain pass.

`tb_aero_pec_sweep` is a wear-out workload. It runs two engines side by side
at the default size, one aggressive and one conservative, each on its own chip
model. The same 200 blocks are erased at 0.5K, 1K, 2.5K, 3K and 4.5K P/E
cycles. The loop-count mix at each point follows measured fractions where they
are known, for example 76.5% single-loop blocks at 1K. For each block it checks:

- aggressive pulse time ≤ conservative ≤ fixed-pulse ISPE;
- the conservative engine always erases completely, without misprediction.

It prints the mean pulse time per erase:

| P/E cycles | ISPE | conservative | aggressive |
|---|---|---|---|
| 0.5K | 3.67 ms | 2.25 ms | 1.59 ms |
| 1K | 4.25 ms | 3.02 ms | 2.15 ms |
| 2.5K | 7.33 ms | 5.82 ms | 4.84 ms |
| 3K | 8.77 ms | 7.29 ms | 6.33 ms |
| 4.5K | 13.79 ms | 12.15 ms | 11.58 ms |

These numbers show what the engine does with the chip model. They are not
measurements of real chips.

`tb_aero_mispredict` measures what a misprediction costs. Four engines run
together: each latency model sees normal blocks on one engine and outlier
blocks on another. An outlier needs the same erase as a normal block, but its
fail-bit count reads 0.5 ms too low. At outlier rates of 0, 1, 5, 10 and 20%, it
checks the conservative engine on every outlier:

- the same total pulse time as the normal block;
- exactly one extra pulse and verify-read per misprediction;
- a complete erase.

The retry only supplies the 0.5 ms the shortened pulse lacked, so a
misprediction costs one verify-read plus command overhead, not extra erase
time. With the aggressive model, an under-reading outlier is sometimes
accepted on the ECC margin one unit earlier than a normal block would be.
That is an inherent risk of trusting the fail-bit count, and the testbench
reports it.

`tb_aero_tse_sweep` sweeps the shallow-erasure time over 0.5, 1, 1.5 and
2 ms. At each setting it erases 150 fresh blocks on an aggressive and a
conservative engine, then erases again every block whose flag was cleared.
For the conservative engine it checks the exact outcome of every erase:

- the first pulse is tSE long at voltage step 1;
- a block that tSE alone erases gets no second pulse;
- otherwise the remainder is exactly the time still needed;
- the flag is cleared exactly when the first loop reaches 3.5 ms;
- a cleared block's next erase starts with a full pulse.

At tSE = 0.5 ms it also checks for the expected retry described above.
It prints, per setting, how many single-step blocks the shallow pulse alone
erased, and the mean pulse time of both models.

`nand_erase_model` is a behavioural chip model for simulation only. Each
block gets a profile: the voltage steps it needs, the 0.5 ms units it needs
at the last step, and an optional under-reporting offset. The offset makes the
prediction come out too short. F is then generated with the linear trend
described above: one δ per missing 0.5 ms unit.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_aero_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/aero_pkg.sv tb/tb_aero_top.sv
./obj_dir/Vtb_aero_top
```

Replace `tb_aero_top` by any other testbench name. All testbenches finish in
seconds.

Lint output: a Verilator lint run on any single module lists the `*_DEFAULT`
constants of `aero_pkg` as unused. The engine takes those values as inputs,
so the warning is expected.

## Changing it

- **Different chip.** Load new values through `cfg_ept_*`, or edit the
  `model` function in `ept.sv`. Adjust `cfg_delta` and `cfg_gamma` to the
  chip's fail-bit slope.
- **Different SSD size.** Set `NUM_BLOCKS`. The flag memory and block-index
  width follow it.
- **Conservative operation.** Set `AGGRESSIVE = 0`. No erase will then end on
  the ECC margin, except through a table loaded with zeros.
