# Staged Memory Scheduler: a memory controller for CPU + GPU chips

When CPU cores and a GPU share DRAM, the GPU sends far more requests. A
conventional controller holds them all in one large, associative request buffer.
It searches that buffer every cycle for the best request, which is usually the
oldest row hit. Such a buffer is costly, and it gets worse with size. The GPU also
fills most of it, so the scheduler sees too few CPU requests to rank the CPU
cores well.

The Staged Memory Scheduler (SMS) breaks that one big decision into three small
ones, each made by simple FIFO-based hardware:

1. **Batch formation.** Each source (each CPU core, and the GPU) has its own
   FIFO. Consecutive requests from one source to the same DRAM row form a
   *batch*. A batch is handed on only once it is complete. This preserves row
   locality without any associative search.
2. **Batch scheduling.** One ready batch is chosen at a time. With probability
   `p`, the choice is *shortest job first* (SJF): the source with the fewest
   requests in flight anywhere in the controller wins. Otherwise the sources are
   served round-robin. The chosen batch then moves on at one request per cycle.
   `p` is the single knob that trades CPU latency against GPU bandwidth.
3. **DRAM command scheduling.** Each bank has one FIFO. Only the FIFO heads are
   considered. Each head needs one command next (ACT, PRE, RD or WR), subject to
   the DRAM timing rules. Among the banks that can issue, the choice is
   round-robin.

No stage ever searches more than one entry per FIFO. The per-source FIFOs also
keep the GPU from taking over the buffer.

This repository gives synthesizable SystemVerilog for one controller (one DRAM
channel). A chip with four channels uses four instances.

## Block map

```
 req[0..15] (CPU)  req[16] (GPU)
     |                |
 +---v----------------v---+   stage 1: batch_former x17
 | per-source FIFO + batch|   (10 entries per CPU, 20 for the GPU)
 +-----------+------------+
             | batch_ready / head / head_last / head_age
 +-----------v------------+   stage 2: batch_scheduler
 | SJF (p) / round-robin  |<--- inflight_counter (per source)
 | pick, then drain 1/cyc |
 +-----------+------------+
             | one request per cycle, to its bank FIFO
 +-----------v------------+   stage 3: dram_cmd_scheduler
 | 8 bank FIFOs x 15      |   (one sync_fifo per bank)
 | head -> ACT/PRE/RD/WR  |
 | timing counters, RR    |
 +-----------+------------+
             v  cmd_valid/cmd/bank/row/col  +  done_valid/done_req
```

| File | Contents |
|---|---|
| `rtl/sms_pkg.sv` | address and request structs, command enum, event struct |
| `rtl/batch_former.sv` | stage 1: one source's FIFO and its batch logic |
| `rtl/inflight_counter.sv` | in-flight request count per source |
| `rtl/batch_scheduler.sv` | stage 2: pick and drain FSM, the LFSR used for `p` |
| `rtl/sync_fifo.sv` | plain FIFO of any depth (used per bank) |
| `rtl/dram_cmd_scheduler.sv` | stage 3: bank FIFOs, bank state, timing, arbiter |
| `rtl/sms_top.sv` | one controller: 17 batch formers plus the blocks above |
| `tb/dram_model.sv` | behavioural DRAM command checker (testbench only) |
| `tb/tb_*.sv` | one self-checking testbench per block; `tb_sms_top` and `tb_sms_workloads` run the whole controller |

The request type is `mem_req_t = {bank[3], row[15], col[7], we, tag[8]}`. The
scheduler adds a 5-bit source index, which gives `sched_req_t`. The widths are in
`sms_pkg` and can be changed there.

## Default configuration

| Parameter | Default | Where it comes from |
|---|---|---|
| CPU sources `NUM_CPU` | 16, plus 1 GPU | the evaluated system (16 cores + 1 GPU) |
| buffer entries per controller | 300 | the evaluated system |
| split of the 300 | 16 × 10 CPU + 20 GPU + 8 banks × 15 | this design's choice (see below) |
| banks `NUM_BANKS` | 8 | assumed (DDR3) |
| age threshold `AGE_THRESH` | 200 cycles | assumed |
| DRAM timing | DDR3-1600 11-11-11: tRCD = tRP = tCL = 11, tRAS 28, tCWL 8, burst 4, tCCD 4, tRRD 5, tFAW 24, tWR 12, tWTR 6, tRTP 6 (in command clocks) | assumed |
| `p` | run-time input `sjf_prob`, p = sjf_prob/256 (0..256) | the value is left to the user |

The 300 entries are split so that the CPUs get a little more than half. The GPU
gets twice a core's FIFO, and the rest goes to the bank FIFOs. Every size is a
parameter of `sms_top`.

## Stage 1: forming batches

`batch_former` is a circular FIFO of `DEPTH` entries. Each entry stores the
request, its arrival time (a 16-bit free-running timestamp) and one extra bit,
**first**. The first bit marks the request that opens a batch. A request starts a
new batch unless all three of these hold:

- the batch at the tail is still open;
- the request has the same bank as the tail;
- the request has the same row as the tail.

So the FIFO holds a sequence of batches, delimited by the first bits, and a
counter `nbatch` tracks how many there are. Two outputs describe the head batch.
`head_last` is set when the entry after the head starts a new batch, or when the
head is the only entry. `head_age` is now − arrival time of the head.

The head batch becomes **ready** (`batch_ready`) when any of these holds:

| Flag | Condition | Meaning |
|---|---|---|
| `ready_by_row` | `nbatch > 1` | a request to another row arrived, so the head batch can grow no more |
| `ready_by_age` | head age ≥ `AGE_THRESH` (sticky until the head pops) | the oldest request has waited long enough, so a batch of low-locality traffic is not held forever |
| `ready_by_full` | the FIFO is full | nothing more can join |

The age compare has a subtlety. Once the head request has aged, the flag stays set
until it is popped. A timestamp wrap, 65536 cycles later, can therefore never
clear it. Ages are only ever compared against a threshold far below the wrap.

**Closing a batch on grant.** When stage 2 picks this source (`grant`), the head
batch is closed. Say it is also the tail batch (`nbatch == 1`). A same-row request
that arrives in the grant cycle, or during the drain, then starts a new batch.
Without this rule, a request could join a batch that is already leaving. It would
then sit in the FIFO with no first bit, and stage 2's length bookkeeping would
break. The testbench checks this case directly.

A full FIFO drops `in_ready`. The source simply waits, and nothing is lost.

## Stage 2: choosing and draining batches

`batch_scheduler` is a two-state machine.

**PICK.** Among the sources with `batch_ready`, one is chosen.

- *SJF*: the source with the smallest `inflight` count wins. On a tie, the one
  with the larger `head_age` wins (the oldest batch). After that, the lower
  index wins. This is a comparator tree over `NUM_SRC` entries, and it is
  most of stage 2's logic.
- *Round-robin*: the first ready source after `rr_ptr` wins. `rr_ptr` moves only
  on round-robin picks, so SJF picks do not disturb the rotation.

Which policy applies is decided fresh for every pick. A 16-bit Galois LFSR
(polynomial 0xB400) advances every cycle. The pick uses SJF when its low 8 bits
are below `sjf_prob`. So `sjf_prob = 256` means always SJF, and `0` means always
round-robin. The testbench measures the SJF share at p = 0.25 and p = 0.75 and
finds it within ±0.06.

A pick raises `grant` for one cycle, which closes the batch in stage 1. The
machine then moves to DRAIN.

**DRAIN.** Each cycle, the head of the chosen source is sent to stage 3
(`out_valid`, `out_req` with the source index), and `pop` is raised when stage 3
accepts it. The bank FIFO may be full (`out_ready` low). In that case the drain
waits in place (`drain_stall`) and nothing is lost or reordered. After the request
marked `head_last` is accepted, the machine returns to PICK. A batch of n requests
therefore occupies stage 2 for n + 1 cycles: one to pick, n to move.

**In-flight counts.** `inflight_counter` keeps one up/down counter per source. It
counts up when a request is accepted into stage 1, and down when the request's
column command issues in stage 3. It can therefore count both in the same cycle.
The count thus covers all three stages, which is what makes SJF favour cores with
few outstanding requests, usually the latency-sensitive CPUs, over the GPU. In
`sms_top` the counters are 8 bits wide: enough for one source to fill its own FIFO
and every bank FIFO.

## Stage 3: DRAM command scheduling

`dram_cmd_scheduler` holds one `sync_fifo` per bank. An incoming request goes to
the FIFO of its bank, and `in_ready` is the fullness of that one FIFO. Each bank
also keeps a register of its state: open or closed, and the open row.

Every cycle, for each non-empty bank FIFO, the head's next command is:

| Bank state | Next command |
|---|---|
| closed | ACT the head's row |
| open, same row (row hit) | RD or WR |
| open, other row (conflict) | PRE |

Each of these commands is **eligible** only if its timing is met. The timing is
tracked by down-counters. Each counter is loaded when a command issues, and the
rule holds while it is non-zero.

| Counter | Loaded by | Blocks |
|---|---|---|
| `c_rcd[b]` | ACT to b: tRCD | RD/WR to b |
| `c_ras[b]` | ACT to b: tRAS | PRE to b |
| `c_rp[b]` | PRE to b: tRP | ACT to b |
| `c_pre[b]` | RD: tRTP; WR: tCWL+burst+tWR | PRE to b |
| `c_rrd` | any ACT: tRRD | any ACT |
| `c_faw[0..3]` | each ACT reloads the slot of the fourth-last ACT with tFAW | ACT while that slot still runs (four ACTs within tFAW) |
| `c_rd` | RD: tCCD; WR: tCWL+burst+tWTR | RD |
| `c_wr` | WR: tCCD; RD: tCL+burst+2−tCWL | WR |

Between reads or between writes, the data bus is protected by tCCD ≥ burst. The
turnarounds protect it across a change of direction. A counter is loaded with
t − 1, because the issuing cycle itself counts as one cycle.

Among the eligible banks, one command is issued per cycle: the first one after
the bank that issued last, in round-robin order. A RD or WR completes the request.
The FIFO pops, and `done_valid`/`done_req` name the request with its source and
tag. A data path, not part of this RTL, uses these to move the data. The
in-flight counter uses them too. Rows stay open after a column command (an
open-page policy). That way, the rest of a batch, which is queued right behind its
head in the same bank FIFO, is served as row hits at one per tCCD.

Status outputs, for measurement:

- `row_hit`: a column command to a row opened for an earlier request;
- `row_conflict`: a PRE;
- `multi_eligible`: more than one bank could issue;
- `faw_block`: an ACT that only tFAW held back.

## Top level and interface timing

`sms_top` connects the stages exactly as drawn in the block map. Its ports:

- `req_valid[i]`, `req_ready[i]`, `req[i]`: one valid/ready request port per
  source. CPU cores are 0..15 and the GPU is 16. A request is taken at a rising
  edge where both valid and ready are high.
- `cmd_valid`, `cmd`, `cmd_bank`, `cmd_row`, `cmd_col`: the channel's command
  bus, at most one command per cycle. `cmd_row` carries the open row on a RD or
  WR as well.
- `done_valid`, `done_req`: the request served by this cycle's RD or WR.
- `inflight[i]`: the in-flight count per source. `events`: the flags of all
  stages in one `sms_events_t`.
- `sjf_prob`: the probability p, used at the next pick.

Reset is asynchronous and active low, and it clears all state. The whole design
runs on one clock, which is taken to be the DRAM command clock. All timing
parameters are in cycles of this clock.

Pipeline latency, with everything empty:

- a request accepted at edge t can be part of a batch picked in cycle t+1, once
  its batch is ready;
- the first request reaches its bank FIFO one cycle after the pick;
- the ACT can issue in the next cycle;
- the RD follows tRCD later.

An isolated request must also wait for `AGE_THRESH` cycles, or for a request to
another row, before its batch is ready. That is the price of batching. It is why
the threshold matters for lightly loaded cores, and why it is a parameter.

## Where this RTL departs from, or adds to, the method

- **Buffer split, bank count, threshold and DRAM timing** are not given by the
  method description. They are chosen as in the table above.
- **One controller per channel.** The channel and address mapping, which decides
  which controller a request goes to, is outside this block.
- **No refresh, no power-down, no read/write data path or PHY.** Only command
  scheduling is modelled. `done_req` marks where a data path would attach.
- **Rows stay open** after each access. No page-closing policy is described, and
  the batching relies on row hits.
- **Request FIFOs can back-pressure.** A full stage-1 FIFO stalls its source, and
  a full bank FIFO stalls the drain.
- A request counts as *in flight* until its column command issues, not until
  its data returns.
- SJF ties go to the older batch, then the lower source index.
- `p` has a resolution of 1/256 and comes from an LFSR. That is random enough for
  arbitration but not cryptographically random.

## Verification

Every block has a self-checking testbench. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_batch_former` (depth 4, threshold 20) checks:
  - the exact cycle at which the age makes a batch ready;
  - readiness on a row change and on a full FIFO;
  - closing on grant, `head_last` and FIFO order.
- `tb_inflight_counter` runs random increments and decrements against a
  reference model.
- `tb_batch_scheduler` drives four model sources and checks:
  - SJF order and both tie-breaks;
  - round-robin order;
  - that grant, then n pops, take n + 1 cycles;
  - a stalled drain;
  - the SJF share for two values of p.
- `tb_dram_cmd_scheduler` sends traffic through 8 banks and checks:
  - ACT one cycle after a lone request, RD exactly tRCD later;
  - row hits tCCD apart;
  - PRE exactly at tRAS after a conflict, then ACT tRP later;
  - alternation between two banks;
  - 600 random requests with per-bank order, and no protocol violation.
- `tb_sms_top` runs the controller at its default size: 16 cores and the GPU.
  - Cores have three traffic intensities, with 60% row locality. The GPU streams
    through rows at a rate above what the channel can serve.
  - It runs 12,000 cycles with p = 1, then 12,000 with p = 0, and drains between
    the phases.
  - Every request must complete once, with its own contents, and in order per
    source and bank. The in-flight counters must return to zero, and the DRAM
    checker must see no violation.
  - CPU latency must be lower, and GPU latency higher, with p = 1 than with
    p = 0. A typical run gives mean CPU / GPU latency of about 700 / 6200 cycles
    at p = 1 and about 1000 / 540 at p = 0.
  - Every event in `sms_events_t` must occur at least once: each readiness cause,
    a full source FIFO, SJF and round-robin picks, a stalled drain, a row hit, a
    conflict, more than one eligible bank, and a tFAW stall.

- `tb_sms_workloads` also runs the controller at its default size. It uses
  synthetic versions of the usual CPU+GPU evaluation mixes.
  - There are seven mixes of the 16 cores: L, ML, M, HL, HML, HM and H (low,
    medium, high intensity), each with a streaming GPU. Then the HML mix runs
    with 2, 4, 8 and 16 active cores.
  - Each run lasts 4,000 cycles at p ≈ 0.9, followed by a drain. The same
    completion, counter and protocol checks are made as in `tb_sms_top`.
  - It prints the mean latency per mix. A typical run gives about 310 cycles
    (L) to 1010 cycles (H) for the CPUs. The GPU's share of the channel falls
    as the CPU load rises.
  - GPU throughput in these runs is limited mostly by read/write turnarounds.
    The GPU traffic is 20% writes.

`tb/dram_model.sv` is the independent reference for DRAM timing. It records the
absolute time of every command and checks the DDR3 rules from those times, which
is a different formulation from the scheduler's down-counters. It stores no data.

To simulate with Verilator (5.x), for example the top level:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb \
  rtl/sms_pkg.sv rtl/sync_fifo.sv rtl/batch_former.sv rtl/inflight_counter.sv \
  rtl/batch_scheduler.sv rtl/dram_cmd_scheduler.sv rtl/sms_top.sv \
  tb/dram_model.sv tb/tb_sms_top.sv --top-module tb_sms_top
./obj_dir/Vtb_sms_top
```

The full-size end-to-end run takes well under a second. For a block test, list
the package, the block, the modules it uses, and its testbench.

## Changing the design

- **Fewer cores:** set `NUM_CPU`. The GPU is always the last source.
- **Other DRAM:** set the `T_*` parameters of `sms_top`. The timing counters are
  6 bits wide, so each value must stay below 64. `NUM_BANKS` up to 8 fits the
  3-bit bank field of `sms_pkg`; widen `BANK_W` for more.
- **Buffer sizes:** `CPU_FIFO_DEPTH`, `GPU_FIFO_DEPTH` and `DCS_FIFO_DEPTH`. The
  FIFOs need not be a power of two. The in-flight counter width follows
  automatically.
- **Policy:** drive `sjf_prob` from a register. It can change at any time.
