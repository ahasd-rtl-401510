# AHASD control hardware: asynchronous draft/verify scheduling for an NPU + LPDDR5-PIM phone SoC

Speculative decoding speeds up a large language model (the *target*, TLM) in
two steps. A small *draft* model (DLM) first guesses a few tokens. The large
model then checks the whole guess in one pass. Adaptive drafting algorithms
vary how far the draft model runs ahead, so the amount of drafting changes
from step to step.

In the architecture implemented here, the two models run on different
engines:

- The draft model runs inside LPDDR5 processing-in-memory (PIM) ranks,
  because drafting is bandwidth-bound.
- Verification runs on the phone's NPU.

The two engines do not wait for each other. The PIM keeps drafting ahead
while the NPU is still verifying older drafts.

Running ahead has a cost. If the NPU rejects an old draft, every draft built
on it is wasted. The RTL here is the control hardware that keeps this
asynchronous scheme efficient:

- **Task queues between the engines.** Three clock-crossing queues connect
  the two sides: unverified drafts, verification feedback, and
  pre-verification tasks.
- **A drafting predictor (EDC).** It works like a branch predictor. It
  learns, from the recent entropy of the drafts and from how far drafting
  already leads, whether more look-ahead drafting is likely to be accepted.
- **A pre-verification timer (TVC).** When the predictor advises stopping,
  it estimates whether the PIM has enough idle time, before the NPU finishes
  its current verification, to check a few drafts itself with the target
  model's weights. The PIM also holds those weights.
- **A rank gating unit (GTSU).** It switches compute from the ranks holding
  draft weights to the ranks holding target weights for such a
  pre-verification, and back.
- **An attention algorithm unit (AAU) per rank.** It computes the
  nonlinear and reduction steps of attention (exp, log, max, sums) next to
  the memory.

Outside this RTL:

- the NPU;
- the host CPU;
- the DRAM arrays and the PIM multiply units.

Their signals are top-level ports.

## Block map

```
                      clk_npu  |  clk_pim
                               |
 NPU  <-- npu_draft_* -- [unverified draft queue] <-- udq --+
 NPU  --- npu_fb_* ----> [feedback queue] ----------- fbq --+--> ahasd_scheduler
                               |                            |     |- edc (predictor)
                               |   [pre-verify queue] <-pvq-+     |   |- 2 x avg_entropy_unit
                               |   (both sides clk_pim)           |   |- 2 x edc_pattern_gen
                               |           |                      |   '- edc_pht (512 x 3 bit)
 host: npu_start/lkv/next_id/done -----------------------------> |- tvc (timer)
                               |           v                          |- 3 x tvc_cycle_table
 PIM ranks: ranks_idle ----> gtsu --> rank_en[15:0], pv_start/pv_task '- seq_div
                               |           |
                               |    aau[0..15] (one per rank, enabled by rank_en[r])
```

`ahasd_top` wires these together:

- `clk_pim` runs everything on the memory side.
- `clk_npu` runs only the NPU-facing sides of the unverified-draft queue and
  the feedback queue.
- The pre-verify queue is also a dual-clock FIFO, but both of its sides run
  on `clk_pim`.

The host relays the NPU's verification start and end into the PIM clock
(`npu_start`, `npu_done`). It has already converted the cycle counts to PIM
cycles.

## Life of a draft batch

1. The DLM ranks finish a batch of 1 to 8 tokens (`dr_valid`). Besides the
   tokens, the batch carries each token's softmax entropy (Q4.12) and the
   cycles it took. The scheduler gives the batch an 8-bit id and sends the
   entropies to the EDC. It lowers `draft_enable` until it has decided.
2. The EDC adds the batch's entropy class to its history and increments the
   leading-length register (LLR). It then reads its pattern table and
   answers *keep drafting* or *stop*. This takes 22 cycles.
3. The scheduler pushes the batch into the unverified draft queue. The batch
   is tagged with the LLR used for its prediction, because the predictor
   must later train the same table entry.
4. On *keep drafting*, `draft_enable` rises again.
5. On *stop*, the TVC evaluates. It started together with the prediction,
   so its 34-cycle computation overlaps the queue push.
   - If at least one token can be pre-verified, a task enters the pre-verify
     queue. The task names a batch id and a length, at most 8. The GTSU then
     gates the ranks, the TLM ranks run the task, and `pv_done` returns.
     Drafting pauses meanwhile.
   - Otherwise drafting continues at once.
6. The NPU pops batches and verifies them. For each batch it returns feedback
   through the feedback queue:
   - the batch id;
   - how many tokens were accepted;
   - whether all were accepted;
   - a correction token;
   - the predict-time LLR and the entropies, both echoed back.
7. Each feedback trains the EDC independently of drafting, as described
   below.

Which batch is pre-verified: the first one that the NPU's running
verification does not cover. When the host reports `npu_start`, it also
gives `npu_next_id`, the id one past the last batch in that verification.
That batch is drafted but not yet being checked, so checking it on the PIM
can save the NPU a round. If no such batch exists, nothing is inserted.

The queue records are `ahasd_pkg::draft_batch_t`, `feedback_t` and
`preverify_t`. Token ids are 18 bits wide, enough for a 256k vocabulary.

## The drafting predictor (EDC)

This is the least obvious part of the design. It is built like a two-level
branch predictor whose "branch history" is made of entropy classes.

**Entropy class.** `avg_entropy_unit` sums the valid entropies of a batch and
divides the sum by the batch length with a bit-serial divider. It then
counts how many of the thresholds `k*Hmax/8` (k = 1..7) the average reaches.
The result is a 3-bit class covering [0, Hmax] in eight equal steps. Hmax
is an input, for example 6.0 (`16'h6000`).

Example: an average of 1.86 with Hmax = 6.0 is class 2, because
0.75·2 ≤ 1.86 < 0.75·3.

**History tables.** There are two 8-entry tables of 3-bit classes:

- **LEHT (speculative history).** It receives the class of every drafted
  batch.
- **LCEHT (committed history).** It receives the class of the accepted part
  of every verified batch. A batch with nothing accepted leaves it unchanged.

In both tables entry 7 is the newest, and a new class shifts everything one
place toward entry 0.

**Index.** The index is built as follows (`edc_pattern_gen`):

- Split the eight entries into a newer group (H4..H7) and an older group
  (H0..H3).
- Add the four classes of each group and divide each sum by 4, rounding
  half to even. Each result is again a 3-bit class.
- Form `{avg(H4..H7), avg(H0..H3), LLR}`. This is a 9-bit index into the
  512-entry pattern history table.

The **PHT** holds 3-bit saturating counters that start at 4. A counter's top
bit is the answer: 1 means keep drafting.

Worked example:

- The LEHT holds 2,1,2,2 (newest) and 3,2,6,7 (older), and LLR = 3.
- The group sums are 7 and 18, so the averages are 2 and 4.
- The index is `{010, 100, 011}` = 0xA3.

Rounding half to even is what makes the older group give 4 (18/4 = 4.5).
Round-half-up would give 5.

**Leading length register.** The LLR counts batches drafted but not yet
verified. It goes up by one per draft, saturating at 7, and down by one per
verification result. Each batch remembers the LLR it was predicted with.

**Training.** When feedback arrives:

- The accepted prefix is averaged and classed, then shifted into the LCEHT.
- The counter at `{pattern(LCEHT), LLR at prediction time}` moves: up if the
  batch was fully accepted, down otherwise.

Example: an LCEHT of 2,3,2,6,7,4,5,3 with a predict-time LLR of 1 trains
index 0xE9.

Training from the committed history uses the same key the prediction used,
provided the speculative history was right. When it was not, the key
describes what really happened, which is the pattern worth learning.

**Rollback.** On any rejection the LEHT is overwritten with the LCEHT. The
speculative history past the rejected batch described drafts that have now
been thrown away.

**Ordering.** Verification and draft events have separate averaging units
and can overlap. When both finish in the same cycle, the verification is
applied first.

## The pre-verification timer (TVC)

The TVC keeps three 4-entry `tvc_cycle_table`s of cycles per unit of work:

| table | records                                | per unit of                          | preset |
|-------|----------------------------------------|--------------------------------------|--------|
| NVCT  | NPU verification cycles (in PIM clock) | KV-cache length `npu_lkv`            | 8      |
| PDCT  | PIM drafting cycles                    | draft tokens                         | 4      |
| PVCT  | PIM pre-verification cycles            | pre-verified tokens                  | 9      |

Each finished task contributes `cycles / length`, computed by a 32-cycle
serial division. The new ratio pushes out the oldest entry. The table
average is `sum >> 2`. The presets stand in for offline profiling until
real measurements replace them. They are parameters (`PRESET_*`).

The NCR register is cleared at `npu_start` and counts PIM cycles until
`npu_done`. On an evaluation request the TVC computes:

```
C_npu  = avg(NVCT) * L_KV                    expected length of the running verification
C_left = C_npu - (NCR + avg(PDCT))           time left, keeping room for one new draft token
L      = C_left / avg(PVCT)                  tokens that can be pre-verified
insert = (L >= 1)
```

Reserving one draft token's time means the NPU still finds a fresh draft
when it finishes, even if the pre-verification rejects everything.

Special cases:

- `C_left` saturates at 0.
- With no NPU verification in flight, nothing is inserted.

Worked example: NVCT holds 6,7,9,10 (average 8), L_KV = 4, NCR = 10, PDCT
averages 4 and PVCT averages 9. Then C_npu = 32, C_left = 32 − 14 = 18 and
L = 2, so two tokens are inserted.

The answer (`eval_done`, `insert`, `pv_tokens`) comes 34 cycles after
`eval_req`.

## Rank gating (GTSU)

The 16 PIM ranks hold either DLM or TLM weights. `TLM_MASK` selects the
TLM ranks; by default ranks 0–7 hold TLM weights.

In draft mode, only the DLM ranks have their compute enabled (`rank_en`).
A pre-verification task switches them over:

1. The GTSU pops the task and disables all ranks.
2. It waits until the DLM ranks report idle (`ranks_idle`).
3. It waits `GATE_CYCLES` more. The default of 64 is t_RP + t_RCD of the
   LPDDR5 part, 32 + 32 cycles.
4. It enables the TLM ranks and pulses `pv_start` with the task.
5. On `pv_done`, the same drain-and-settle sequence switches back.

A switch therefore costs the drain time plus 65 cycles, well under a
microsecond. `switches` counts completed switches. Assertions check that:

- DLM and TLM ranks are never enabled together;
- a task starts only in verify mode.

## Attention algorithm unit (AAU)

The AAU is a small vector engine in each rank. It has:

- 8 vector registers of 16 lanes, each lane signed Q8.8;
- one command per cycle.

Its commands:

| op | function |
|----|----------|
| `LOAD` | write `cmd_data` into a register |
| `STORE` | return a register on `rsp_data` one cycle later |
| `VADD`, `VSUB`, `VMAX` | lane-wise vector ALU |
| `VMUL` | lane-wise multiply, Q8.8 × Q8.8 → Q8.8 |
| `VEXP` | e^x |
| `VLOG` | ln x |
| `RSUM`, `RMAX` | reduce the lanes of one register; the result is written to every lane |

Every result saturates to 16 bits. `cmd_ready` is the rank's gate, so a
gated rank's AAU accepts nothing.

How the nonlinear operations are computed:

- **e^x.** The AAU multiplies x by log2(e), held to 24 fractional bits. It
  splits the product into integer and fraction parts. A quadratic fit gives
  2^fraction, which is then shifted by the integer part. The testbench holds it to
  1 % plus 2 LSB.
- **ln x.** The AAU finds the leading one, fits log2 of the mantissa with a
  quadratic, and scales by ln 2. The testbench holds it to 1 % plus 3 LSB.
  Inputs ≤ 0 return the most negative value.

Together these ops cover a softmax (max, subtract, exp, sum) and the
entropy term −Σ p·ln p.

## Clocks, reset and handshakes

- Every interface uses valid/ready. A transfer happens on the edge where
  both are high. Event outputs (`ev_*`) are one-cycle pulses.
- `rst_n` is asynchronous active-low. It must be released synchronously to
  both clocks.
- The queues synchronise Gray-coded pointers with two flip-flops. Full and
  empty therefore lag by up to two cycles of the other clock, on the safe
  side.
- The queue depth is 8, matching the largest lead the 3-bit LLR can count.
- Lint reports `SYNCASYNCNET` on the reset signals. It comes from the
  assertions' `disable iff (!rst_n)`, not from the logic.

Latencies at the default parameters, measured and checked by the
testbenches:

| path | cycles |
|------|--------|
| entropy average + class (`avg_entropy_unit`) | 21 |
| draft accepted → EDC prediction | 22 |
| TVC `eval_req` → `eval_done` | 34 |
| cycle-table update → visible in the average | 33 |
| GTSU switch | drain + 65 |

## Parameters

| where | parameter | default | basis |
|-------|-----------|---------|-------|
| `ahasd_top`, `gtsu` | `NUM_RANKS` | 16 | 16 ranks of 4 GB in the evaluated system |
| `gtsu` | `GATE_CYCLES` | 64 | t_RP + t_RCD = 32 + 32 |
| `gtsu` | `TLM_MASK` | `16'h00FF` | own choice |
| `ahasd_top`, `aau` | `LANES`, `VREGS` | 16, 8 | own choice |
| `ahasd_top`, `async_queue` | `QDEPTH`/`DEPTH` | 8 | matches the 3-bit LLR |
| `ahasd_pkg` | PHT 512 × 3 bit, histories 8 × 3 bit, LLR 3 bit | | as proposed |
| `ahasd_pkg` | `MAX_DRAFT` | 8 | own choice (tokens per batch) |
| `ahasd_pkg` | `TOKEN_W` | 18 | enough for a 256k vocabulary |
| `tvc` | `PRESET_NVCT/PDCT/PVCT` | 8/4/9 | placeholders for profiled values |

## Where this RTL departs from, or fills in, the original proposal

- **Fixed point instead of floating point.** Entropies are Q4.12 and the
  averages use integer division. The original describes floating-point
  reduction and division.
- **Rounding of the group averages.** The rounding mode is this design's
  choice: round half to even. It reproduces the published index example
  (0xA3). The example's printed intermediate sum (17) disagrees with its own
  entries, which sum to 18.
- **PHT training key.** The original says the update depends on the
  speculative history (LEHT). Its figure instead shows the committed history
  (LCEHT) combined with the LLR at prediction time. This design follows the
  figure.
- **Where the EDC and TVC sit.** The original places them in the host's
  runtime scheduler and has the CPU write the tables. Here they are
  hardware in the PIM clock domain, and the host only relays NPU events.
  Its area breakdown also counts these units as logic on the memory side.
- **Unspecified details.** The original gives none of the following, so
  all are this design's:
  - LLR saturation;
  - the PHT reset value;
  - counter saturation;
  - the cycle-table presets;
  - the handling of zero-length or overlapping events;
  - the pre-verify length cap of one batch.
- **Handling a failed pre-verification.** Acting on the result (discarding
  later drafts, redrafting) is left to the PIM side. The original does not
  describe it.
- **AAU.** The original names only the AAU's sub-units: row-wise reduce,
  vector ALU, multiply, exp, log, vector buffer and control. The operation
  set, number format and approximations here are one reasonable
  realisation.
- **GTSU.** The drain-then-settle sequence, the rank split and the settle
  time are assumptions. The only requirement is sub-microsecond switching.
- **Clock domains.** The NPU and the PIM are treated as asynchronous
  clocks.

## Testbenches and how to run them

Each block has a self-checking testbench in `tb/`. Each compares the block
with an independent model written in the testbench. It prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if
something hangs.

| testbench | what it checks |
|-----------|----------------|
| `tb_async_queue` | order, no loss or duplication under random valid/ready on two unrelated clocks, full reached |
| `tb_avg_entropy_unit` | average and class against a model, the 1.86 → class 2 example, latency |
| `tb_edc_pattern_gen` | all group-average corner cases, the 0xA3 and 0xE9 examples |
| `tb_edc_pht` | counter saturation and MSB decision against a table model |
| `tb_edc` | predictions, training indices, LLR, rollback, both examples, 22-cycle latency |
| `tb_tvc_cycle_table` | ratios, averaging, presets, latency |
| `tb_tvc` | the worked example (18 cycles → 2 tokens), random cases, 34-cycle latency |
| `tb_gtsu` | mutual exclusion of the rank groups, drain and settle timing, task hand-off |
| `tb_aau` | every op against a real-valued model, including exp/log accuracy and gating |
| `tb_ahasd_scheduler` | decision sequence, batch ids, predict-time LLR, pre-verify target, pausing |
| `tb_ahasd_top` | whole design at default parameters with two unrelated clocks |
| `tb_ahasd_workloads` | 1024-token generations for three draft/target model pairs |

`tb_ahasd_workloads` runs the full design through a 1024-token generation
three times, resetting it in between. The three draft/target pairs are OPT
1.3B/6.7B, LLaMA2 7B/13B and a PaLM-like 8B/30B. For each pair it uses that
pair's vocabulary, so token ids reach 255999. Drafting and verification
times grow with model size, using relative values chosen for this test. The
KV length grows from a 128-token prompt. For each pair it prints the
batches, the mean accepted length, the predictions, the pre-verifications
and the elapsed cycles.

`tb_ahasd_top` is the end-to-end run. It uses behavioural models of the
NPU, the PIM ranks and the host relay. It drafts batches of random length,
switches between easy (low-entropy) and hard (high-entropy) phases, inserts
idle gaps in the NPU, and sends random AAU traffic to all ranks.

It counts:

- predictions of each kind;
- inserted and refused pre-verifications;
- stalls on a full queue;
- rollbacks;
- gate switches;
- AAU work in DLM and TLM ranks;
- AAU commands refused by a closed gate.

It fails if any of these never happened.

To build and run one testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/ahasd_pkg.sv tb/tb_edc.sv --top-module tb_edc -Mdir obj_edc
./obj_edc/Vtb_edc
```

Replace `tb_edc` with any testbench name. The package must come first; `-y rtl`
finds the modules by file name. `tb_ahasd_top` builds in about half a
minute and runs in a few seconds.

## File list

`rtl/`:

- `ahasd_pkg.sv`: widths, record types, operation codes.
- `async_queue.sv`
- `avg_entropy_unit.sv`
- `edc_pattern_gen.sv`
- `edc_pht.sv`
- `edc.sv`
- `tvc_cycle_table.sv`
- `tvc.sv`
- `seq_div.sv`: restoring divider, one quotient bit per cycle.
- `ahasd_scheduler.sv`
- `gtsu.sv`
- `aau.sv`
- `ahasd_top.sv`

`tb/` holds one `tb_<block>.sv` per block.
