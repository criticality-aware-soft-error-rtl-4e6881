# Signature-checked, parity-repaired configuration memory for partially reconfigured FPGAs

An SRAM FPGA keeps its circuit in configuration memory (CM). A particle strike
can flip CM bits, and that silently changes the circuit. This design guards
the part of the CM that holds the user tasks, one task per partial
reconfiguration region. It has three parts:

* **Detect with a hash.** Each task's configuration data gets a SHA3-512
  signature when it is loaded. Later the engine reads the task back and
  hashes it again. Any change in any number of bits changes the signature,
  so detection does not depend on the error pattern.
* **Repair with a cheap product code.** The frames are laid out as a 2-D
  array: one row per task, one column per frame position. XOR parity is kept
  along every row and every column. If one frame of a task is corrupted,
  the row parity gives the exact bit pattern to flip. The column parities
  give a short list of frames it might belong to. Each candidate is tried,
  and the signature decides which one is right. Only that frame is written
  back to the CM.
* **Repair the most important task first.** When several tasks are faulty,
  a hardware scheduler ranks them. The rank combines four things:
  * the slack before the task must run again;
  * its share of the frames;
  * how many tasks depend on it (its *criticality*);
  * its execution time.

  A task is repaired only while it is idle, and only if the repair fits in
  its slack. The rest of the system keeps running.

The stored redundancy is small: 512 bits per task, plus one parity frame per
task row and per frame column. Full scrubbing would keep a golden copy of
every frame. For ten tasks of one hundred frames, the signatures take
10 × 512 = 5120 bits.

Everything here is synthesizable SystemVerilog except `tb/`. The top module
is `edac_top`.

## The frame array

A frame is `FRAME_WORDS` × 32 bits. The default of 101 words is the frame
size of a 7-series FPGA. Task `z` owns CM frames
`z*N_FRAMES .. z*N_FRAMES + task_frames[z] - 1`.

For the parity code, every task is treated as a row of `N_FRAMES` frames.
Missing frames are all-zero dummy frames. They take part in the XOR, but they
are never read or stored. Bit *(j,i)* of a frame is bit *i* of word *j*.

* The **horizontal parity frame** of task *z* is the XOR of its row.
* The **vertical parity frame** of column *k* is the XOR of frame *k* of
  every task.

Defaults: `N_TASKS = 10`, `N_FRAMES = 100`, `FRAME_WORDS = 101`. At these
sizes the parity store is (10 + 100) × 101 words per bank, with two banks.

## Detection: SHA3-512 (`sha3_512`, `keccak_f_pipe`, `keccak_rc`, `keccak_pkg`)

`sha3_512` is a standard SHA3-512 sponge that can hash `N_MSG` messages
at once (default 4):

* rate 576 bits, capacity 1024 bits;
* FIPS 202 padding `0x06 … 0x80`;
* input is 32-bit words, least significant byte first;
* the digest is state bits 511:0.

Eighteen words fill one rate block. Each message input has its own block
buffer and chaining state. While the permutation runs, the next block is
collected. Since 512 < 576, no squeeze permutation is needed. A digest comes
out with `digest_ctx`, which names the input it belongs to.

`keccak_f_pipe` is the Keccak-f[1600] permutation. Each pass through its loop
does two rounds (unrolling by 2). Each round is cut after Theta (2-stage
sub-pipelining). There is also a register between the two rounds (2-stage
pipelining). The loop is:

```
in/feedback mux → θ → REG1 → ρπχι(RC 2p) → REG2 → θ → REG3 → ρπχι(RC 2p+1) → REG4 → back to mux
```

* A state makes 12 trips around the ring: 48 cycles per permutation.
* The four registers hold up to four unrelated states, each tagged with
  its message. This is why `N_MSG` is at most 4.
* A state leaving the ring goes straight back in if its message's next
  block is ready. So a message absorbs 576 bits every 48 cycles.
* Otherwise the lowest-numbered waiting message takes the free slot.
* With four messages, the ring absorbs 4 × 576 bits per 48 cycles. At
  344 MHz that is 16.5 Gbit/s.
* Measured:
  * a one-word message takes 52 cycles;
  * a 50-word message takes 164 cycles;
  * four 50-word messages started together take 167 cycles.
* `edac_top` reads the CM one frame at a time, so it builds the sponge with
  `N_MSG = 1`.

`keccak_rc` gives the round constants. A Keccak round constant can only have
ones at bits 0, 1, 3, 7, 15, 31 and 63. So the table stores 24 × 7 bits, and
the other 57 output bits are wired to zero. Two copies serve the two rounds
of a pass.

## Correction: the erasure product code (`parity_engine`)

`parity_engine` holds two banks:

* the **golden** parity, built from the clean data when the tasks are loaded;
* the **fresh** parity, built from readback on every check pass.

Both banks use one word-serial XOR accumulator. The first frame of a row, or
the first task of a column, overwrites instead of XORing, so there is no
clearing pass.

When task *z*'s signature mismatches:

1. **Horizontal syndrome.** `S_z = golden_h[z] ^ fresh_h[z]` is the error
   pattern of task *z*, if only one of its frames is hit. The syndrome is
   read word by word, with no extra storage.
2. **Narrowed column scan.** Frame *k* is a candidate only if
   `golden_v[k] ^ fresh_v[k]` and `S_z` share a bit. Other tasks' errors can
   also disturb a column. This rule drops such columns unless they overlap
   `S_z` bit for bit. The scan takes `N_FRAMES*FRAME_WORDS` cycles.
3. **Trial.** Candidates are tried in ascending frame order. For each one,
   the whole task is read back and re-hashed, with `S_z` XORed into the
   candidate frame as it streams past. Nothing is written during a trial.
   A wrong candidate costs one re-hash, and there is nothing to undo.
4. **Write-back.** When the signature matches, the candidate frame is read
   once more, XORed with `S_z`, and written to the CM. The task is then
   clean.
5. **Give up.** If no candidate matches, or `S_z` is zero, the task is
   flagged in `task_uncorrectable`. A zero `S_z` happens when errors in two
   frames of the task cancel in the row parity. Errors in two or more frames
   of one task cannot be repaired by this code.

Limits to keep in mind:

* The code repairs any number of bits, but only in **one frame per task**.
* If two tasks are hit at the same bit positions of the same column, the
  column parity can cancel. Then the correct frame is not listed, and the
  task is reported uncorrectable even though it holds a single bad frame.
* Several faulty tasks are fine as long as each has only one bad frame. A
  repaired frame is written at once. The fresh parity is not rebuilt until
  the next pass, so a later task's scan may list an already-repaired column.
  The signature check rejects it.

## Choosing which faulty task to repair (`criticality_unit`, `task_priority`, `hw_scheduler`)

### Criticality (`criticality_unit`)

The task dependency graph is given as an `N×N` matrix. `dep_adj[i][j] = 1`
means task *j* depends on task *i*. The graph must be acyclic.

A task's criticality ζ is the number of tasks that depend on it, directly or
through others, divided by N. The unit computes the transitive closure in
N−1 cycles of boolean matrix steps, then a popcount and a constant division.
The result is a 24-bit fraction. Example graph:

* edges A→B,C,D; B→E,F,G; C→H,I; D→I,J;
* ζ(A) = 0.9, ζ(B) = 0.3, ζ(C) = ζ(D) = 0.2, all others 0.

Criticality is computed once, on `cfg_start`.

### Slack and priority (`task_priority`, one per task)

Each task supplies four inputs:

* its `busy` signal;
* its execution time E and idle time I, in clock cycles;
* the cycles its repair would take, EC+RT (correction plus reconfiguration).

The slack register St counts the cycles until the task next starts
executing:

* It is loaded with E+I when the task starts executing.
* It is loaded with I when the task goes idle.
* Otherwise it counts down by one each cycle, and reloads E+I at zero.
* The partial execution and idle counters, PE and PI, count cycles since the
  current phase began.

Priority is P = St − (EC+RT), valid only while EC+RT ≤ St (`p_ok`). Otherwise
P holds its last value and the task is not eligible. The final priority is:

```
FP = w_a · (1/P) + w_b · (η_i/η) + w_c · ζ_i + w_d · E_i
```

* η_i/η is the task's share of all frames.
* The weights are 9-bit numbers where 256 means 1.0.
* 1/P and η_i/η are 24-bit fractions from two small sequential dividers.
  They restart as soon as they finish, so FP follows P about 27 cycles late.
  P = 0 is treated as P = 1.
* E is scaled by 2^24, so all four terms share one unit. Because E is a
  cycle count, its term grows large: keep `w_d` small or zero unless the
  execution time should dominate.

### Selection (`hw_scheduler`)

All `task_priority` units update in parallel, every cycle. Among tasks that
are faulty (`req`) and **eligible** (idle and `p_ok`), the scheduler picks
the highest FP. Ties go to the smaller St (earliest deadline first), then to
the lower index. The choice is registered.

If no faulty task is eligible, the controller waits and counts a stall. The
task under repair is dropped from `req`, so the next choice is ready when the
repair finishes.

## The control loop (`edac_top`)

`edac_top` runs the following sequence.

1. **Configuration pass (`cfg_start`).**
   * Every task is read back once.
   * Its signature goes to `gold_sig`, a register file of 10 × 512 bits.
   * The golden parity is built, and criticality is computed.
   * `cfg_done` rises.
2. **Check pass (`run_en`).**
   * The whole array is read again.
   * Each task is hashed and compared (detection). Fresh parity is built as
     a side effect.
   * A full parity scan follows. `task_faulty` lists the detected tasks.
3. **Repair loop.**
   * The scheduler chooses a faulty task, or the controller stalls until
     one is eligible.
   * The narrowed scan lists the task's candidates.
   * Candidates are tried. On success, the frame is written back. On
     failure, the task goes to `task_uncorrectable`.
   * A task may have turned busy by the time its frame is ready. The
     write-back then waits until the task is idle again, and `hold_cnt`
     counts the wait.
   * This repeats until no faulty task is left. Then `pass_done` pulses,
     and the engine starts another pass while `run_en` is high.

Every signature computed in a pass also appears on `sig_valid/sig_task/sig_data`,
so a system can keep the golden values off-chip as well. Event counters are
outputs: `pass_cnt`, `detect_cnt`, `reject_cnt`, `correct_cnt`, `uncorr_cnt`,
`stall_cnt` and `hold_cnt`.

**CM port.** The top drives a plain frame port, which stands in for the
FPGA's internal configuration access port.

* **Read.** A request (`cm_rd_req_valid/ready`, `cm_rd_frame`) is followed
  by `FRAME_WORDS` words on `cm_rd_valid/ready/data`. One read is open at a
  time.
* **Write.** `FRAME_WORDS` words on `cm_wr_valid` with frame and word index,
  one per cycle, with no back-pressure.
* Two assertions check the read handshake.
* The command sequences of a real configuration port are not modelled.
  `tb/cm_model.sv` is a behavioural stand-in for simulation.

**Timing at the default size.**

* The configuration pass takes 270,002 cycles.
* A check pass that repairs two tasks, with one rejected candidate, takes
  381,575 cycles.
* Hashing sets the pace: about 48 cycles per 18 words read.

## Where this RTL departs from the original description

* **Signatures** are held in registers inside `edac_top` and also shown on
  `sig_*`. The original description keeps them in external flash.
* **Configuration port.** The original reads and writes through the vendor's
  configuration port. Here it is an abstract word-level frame port.
* **Hashing is one task at a time in the control loop.** The SHA-3 unit
  hashes four messages at once, and the quoted 16.5 Gbit/s throughput counts
  all four. `edac_top` reads the CM one frame at a time, so it uses one
  context. Hashing several tasks at once would need a frame buffer per
  context.
* **Four messages** is inferred, not stated. The original gives the
  throughput formula with a message count, but no count. Four is the number
  of ring slots, and it reproduces the quoted throughput.
* **Candidate order.** The original procedure walks mismatching bit
  positions one at a time, and tries the frames that mismatch at each one.
  This design tries the union of those frame sets once each, in frame order.
  The set of frames that can be found is the same, with fewer re-hashes.
* **Repair by streaming substitution.** The original flips a candidate in the
  CM and flips it back if the hash disagrees. Here the flip is applied to the
  stream being hashed, so the CM is only written once the frame is known to
  be right.
* **Slack equations** are read as loads at the start of each phase, followed
  by a countdown. While EC+RT > St, P keeps its last value.
* **A task turning busy during its repair.** The scheduler checks
  eligibility only when it chooses a task. Trials continue whatever the
  task does. Only the write-back waits for the task to be idle. The task
  must stay idle through the few cycles of the write itself, which its
  slack normally guarantees.
* **Parameters not given** in the original were chosen here:
  * the 32-bit word width;
  * the 101-word frame;
  * fixed-point formats (24 fractional bits, 9-bit weights);
  * handshakes and reset values (asynchronous, active-low `rst_n`).
* Configurations with more than 10 tasks need a larger `N_TASKS`. The default
  is sized for ten tasks of one hundred frames.

## Files

| file | contents |
|---|---|
| `rtl/keccak_pkg.sv` | Keccak state types, θ and ρπχι step functions |
| `rtl/keccak_rc.sv` | round constants from 7 stored bits per round |
| `rtl/keccak_f_pipe.sv` | 4-stage, 2-round-per-pass Keccak-f[1600] ring |
| `rtl/sha3_512.sv` | SHA3-512 sponge on a 32-bit stream |
| `rtl/edac_pkg.sv` | widths, fixed-point types, weight struct |
| `rtl/parity_engine.sv` | golden/fresh row and column parity, syndrome, scans |
| `rtl/criticality_unit.sv` | transitive dependants and ζ |
| `rtl/recip_div.sv` | sequential divider used for 1/P and η_i/η |
| `rtl/task_priority.sv` | St, PE, PI, P, FP for one task |
| `rtl/hw_scheduler.sv` | per-task priority units and max-FP/EDF selection |
| `rtl/edac_top.sv` | top-level controller |
| `tb/cm_model.sv` | behavioural configuration memory and port |
| `tb/*_tb.sv` | one self-checking testbench per module, plus two for the top |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog counts a failure if the test hangs. Sources only need the packages
first. For example, with Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module edac_top_tb \
    rtl/keccak_pkg.sv rtl/edac_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
    tb/cm_model.sv tb/edac_top_tb.sv
./obj_dir/Vedac_top_tb
```

Swap the testbench name to run another test. `edac_top_full_tb` builds and
runs the same way.

What the testbenches check:

* `keccak_rc_tb`: all 24 constants against an LFSR model.
* `keccak_f_pipe_tb`:
  * the known Keccak-f output for an all-zero state;
  * random states against a plain loop model;
  * the 48-cycle latency;
  * four states in flight.
* `sha3_512_tb`: six messages, from one word to several blocks, against
  reference SHA3-512 digests, with cycle counts. It also runs four inputs at
  once, and checks digest routing and four-message throughput.
* `parity_engine_tb`: syndromes, full scans and narrowed scans against
  values worked out from the injected error patterns.
* `criticality_unit_tb`: the ten-task example graph and random acyclic
  graphs.
* `task_priority_tb`, `hw_scheduler_tb`: St/P/FP traces and selection,
  ties included, against a cycle model.
* `edac_top_tb`, at 4 tasks × 6 columns × 8-word frames. It runs the
  configuration pass, a clean pass, then four injected faults:
  * repairs in criticality order;
  * a stall while all tasks are busy;
  * rejected candidates;
  * a write-back held while its task is busy;
  * one uncorrectable task;
  * a fully restored CM everywhere else.
* `edac_top_full_tb`, at the default size (no parameter overrides):
  * ten signatures against reference digests;
  * two multi-bit upsets in different tasks, sharing a bit position;
  * both are detected and repaired, with one rejected candidate;
  * exactly two frames are written, and the CM ends identical to the
    original.

  It runs in about one second of simulation.
* `edac_top_workload_tb` runs the top at 4 and 8 tasks of 100 frames, side
  by side, with one upset in every task. Every task must be repaired with
  one trial and one frame write. It prints the numbers below.

Results at 4 and 8 tasks:

| tasks | stored redundancy (parity + signatures) | golden copy for scrubbing | frames rewritten (scrub) | detect + repair pass |
|---|---|---|---|---|
| 4 | 338,176 bits | 1,292,800 bits | 4 (400) | 267,043 cycles |
| 8 | 353,152 bits | 2,585,600 bits | 8 (800) | 524,189 cycles |

The redundancy is `(N_TASKS + N_FRAMES) × frame bits + 512 × N_TASKS`. It
grows by one frame and one signature per task, while a golden copy grows by
a whole task per task.
