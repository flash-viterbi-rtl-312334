# FLASH-BS Viterbi accelerator in SystemVerilog

This is a hardware decoder for the most likely hidden-state path of a hidden
Markov model (HMM). The plain Viterbi algorithm stores a back-pointer for
every state at every timestep, which is K x T words. This design stores no
back-pointers at all. It keeps only two small heaps of B candidate paths on
chip, whatever the sequence length. It gets the path by splitting the
sequence again and again:

* A pass over a segment m..n remembers, for each candidate, only the state
  it passed through at the midpoint `tmid = floor((m+n)/2)`.
* So one pass yields one state of the answer, `q*[tmid]`. The top-level pass
  also yields the final state `q*[T-1]`.
* The two halves are then decoded as independent subtasks. Each starts from
  the state already decoded just before it, so no subtask needs data from
  any other.
* A bounded beam (the best B candidates per timestep) caps the work and the
  storage. With B = K (the default) the beam keeps every state, and the
  result is the exact Viterbi path.

The RTL follows the FLASH-BS Viterbi accelerator published by Deng et al.
("FLASH Viterbi: Fast and Adaptive Viterbi Decoding for Modern Data
Systems"). The parts of that design that are described only loosely were
filled in here; they are listed under "Departures and own choices".

## Numbers at the default size

| parameter | default | meaning |
|---|---|---|
| `K` | 512 | hidden states |
| `M` | 50 | observation symbols |
| `B` | 512 | beam width (= K, so decoding is exact) |
| `T_MAX` | 512 | longest sequence |
| `LANES` (package) | 8 | words per memory request, and candidates handled per cycle |

Scores are 32-bit signed log-probabilities. The most negative code stands for
log 0 (minus infinity). Additions saturate, and minus infinity plus anything
stays minus infinity, so a sparse transition matrix is stored with its
missing edges set to that code.

The testbench at the default size decodes a 512-step sequence of a random
512-state model. About a quarter of the possible transitions exist, plus a
ring so that every state has a successor. The run takes 157.9 million clock
cycles, and the decoded path reaches the optimum found by a reference
full-table Viterbi. At 200 MHz that would be 0.79 s. That figure assumes a
memory that accepts an 8-word random gather every cycle with a fixed
latency. A real DDR device serves scattered reads far more slowly, so treat
the number as a lower bound.

## Memory layout

All model data and the result live in one word-addressed external memory.
Every value takes one 32-bit word. The functions in `flash_pkg` compute the
addresses:

| data | address |
|---|---|
| `log pi[j]` | `j` |
| `log A[i][j]` (transition i to j) | `K + i*K + j` |
| `log B[j][o]` (state j emits symbol o) | `K + K*K + j*M + o` |
| observation `x[t]` | `K + K*K + K*M + t` |
| decoded `q*[t]` (written by the decoder) | `K + K*K + K*M + T_MAX + t` |

At the default size the image holds 289,280 words.

## How a decode runs

The user writes the memory image, then pulses `start` with `seq_len = T`
(2 to `T_MAX`). `busy` goes high, and `done` pulses once the decoded sequence
is in memory.

### Subtasks (`task_queue`)

The subtasks are tuples (m, n), held in a FIFO that starts with the root
(0, T-1). When a tuple leaves the FIFO, its children are pushed:

* n - m > 2: both halves, (m, tmid) and (tmid+1, n).
* n - m = 2: only (m, tmid). The right half is a single step whose state
  the parent already found.
* n - m < 2: no children.

The FIFO therefore hands out parents before children, level by level. Every
subtask finds exactly one new state. There are T-1 subtasks, and together
with the root's extra final state they cover all T states. When a subtask
(m, n) with m > 0 runs, its start state `q*[m-1]` is always already known:
it is the midpoint of an ancestor, or the final state.

### One subtask

The sequencer in `flash_bs_top` runs five phases per subtask.

1. **Observation fill** (`ob_cache`). Reads `x[m..n]` from memory, eight
   words per request, into a local buffer.
2. **Initialise** (`initialize`). For every state j it makes a candidate
   with this score:
   * at m = 0: `log pi[j] + log B[j][x_m]`;
   * at m > 0: `log A[q*[m-1]][j] + log B[j][x_m]`.

   This second form is the pruning that makes a subtask independent.
3. **Timesteps t = m+1 .. n** (`findmax`). For every state j, FINDMAX scans
   all candidates of the previous step and keeps the best value of
   `score + log A[state][j]`, then adds `log B[j][x_t]`. The scan works like
   this:
   * It reads the previous step's heap eight entries per cycle.
   * For each group of eight it issues one gather request for the eight
     matching transition words.
   * A tag FIFO keeps the entries of each request in flight until the data
     returns, so that memory latency is hidden behind later requests.

   The new candidate inherits the winner's midpoint field. The only
   exception is the step just after tmid, where the midpoint field becomes
   the winner's own state.
4. **Backtrack** (`output_path`). The heap now holds the candidates at time n.
   * The root takes the best one. Its state is `q*[T-1]`, and its midpoint
     field is `q*[tmid]`.
   * Every other subtask already knows `q*[n]`. It searches the heap for
     that state and takes that entry's midpoint field.
5. Back to the FIFO. After the last subtask, `output_path` writes the whole
   decoded sequence to memory.

### The two heaps (`heap_ram`, `heap_select`, `heap_operation`)

Two heap memories, HEAP_1 and HEAP_2, swap roles every timestep:

* one is `heap_pre`, the candidates of step t-1, which FINDMAX reads;
* the other is `heap_total`, which collects step t.

`heap_select` holds one bit that says which is which, and it steers both
sets of ports. Swapping the roles needs no copy.

`heap_total` is a min-heap: the root is the worst candidate kept so far.
`heap_operation` applies one of three rules to each arriving candidate,
depending on how full the heap is:

* fewer than B-1 entries: the candidate is appended;
* exactly B-1 entries: the candidate is appended, then the whole array is
  made into a heap bottom-up;
* B entries (full): the candidate is compared with the root. If it is
  better it replaces the root and sinks down one level per cycle; otherwise
  it is dropped.

The heap is filled without ordering until it is full, so the heap order costs
nothing while the beam has room.

Candidates are ordered by score. Equal scores go to the smaller state index.
This makes the set of B survivors the same whatever order the candidates
arrive in, and it lets a software model predict that set exactly.

### Memory port sharing (`ddr_controller`)

Four units use the memory: the observation fill, initialise, FINDMAX and the
write-back. `ddr_controller` grants one request per cycle by fixed priority,
in that order. It remembers the requester of every read in a tag FIFO and
returns the in-order read data to that requester. Every client reserves room
for its responses before it sends a request, because the response channel
cannot be stalled.

The top-level memory port is:

* a request: valid, a write flag, eight lane enables, eight word addresses
  (a gather), and one write word on lane 0;
* a `ddr_ready` input;
* a response channel carrying eight data words, which returns read data in
  request order.

A real DRAM controller and PHY would sit behind this port.

## Cycle cost

One timestep costs about K x (1 + ceil(count / 8)) cycles, where count is
the number of candidates in `heap_pre`. Heap work overlaps with this. A
subtask of length L runs L timesteps, and the subtasks of one bisection
level add up to about T timesteps. So a decode costs about
T x log2(T) x K x (1 + B/8) cycles. At K = B = T = 512 that is about
1.5 x 10^8 cycles, which matches the measured 157.9 million.

## Departures and own choices

These points follow the published design:

* the block split and the names of the blocks and data paths;
* the bisection and the pruned start of each subtask;
* the role-swapping pair of heaps and the three heap rules;
* pipelined FINDMAX with several words per memory access;
* write-back of the whole sequence at the end.

These are this design's own:

* **Parallelism P = 1.** The published algorithm can also give P decoding
  units the first P subtasks at once. This RTL has one decoding unit and
  runs subtasks one after another.
* **Storage timing.** The heaps, the observation buffer and the path buffer
  are read combinationally (register-file style), and written on the clock
  edge. The published accelerator maps the heaps to block RAM. With a
  registered read, every heap level would need one more cycle.
* **The sequencer,** its phase handshakes, the stream handshakes between
  blocks (valid/ready), the memory port and the arbitration are this design's.
* **Word widths** (32-bit scores and addresses, 16-bit state, time and symbol
  indices) and `LANES = 8`.
* **Beam miss.** With B < K, the known state `q*[n]` may have fallen out of
  the beam before time n. The decoder then takes the best candidate's
  midpoint field and raises `bt_miss` for one cycle. With B = K this cannot
  happen.
* **Where children are made.** The task FIFO creates the children of a subtask
  when the subtask is dequeued, not after it is decoded. The order is the
  same either way for one decoding unit.
* **Reset.** An asynchronous active-low reset `rst_n` clears all control state.

Not built:

* the host link and data source that load the model into memory;
* the DRAM device and its controller/PHY;
* the separate exact (no-beam) accelerator. It decodes the same way as this
  one with B = K.

## Size limits

* Lengths up to `T_MAX`, and up to K states. A smaller model fits by giving
  the unused states a `pi` and `A` of minus infinity.
* The published evaluation also runs T and K up to 2048, a speech-alignment
  model with 3965 states, and a beam of 32K. For those, raise `K`, `B` and
  `T_MAX`. The 16-bit indices allow up to 65536.
* On-chip storage grows as 2 x B heap entries (64 bits each), plus T_MAX
  observations, T_MAX path states, and a task FIFO of T_MAX/2+2 entries.

## Files

| file | contents |
|---|---|
| `rtl/flash_pkg.sv` | types, score arithmetic, candidate order, memory map |
| `rtl/sync_fifo.sv` | small FIFO used inside several blocks |
| `rtl/task_queue.sv` | subtask generator |
| `rtl/ob_cache.sv` | observation segment buffer |
| `rtl/initialize.sv` | first-step candidates |
| `rtl/findmax.sv` | per-timestep max over the previous beam |
| `rtl/heap_ram.sv` | one heap memory |
| `rtl/heap_select.sv` | role swap of the two heaps |
| `rtl/heap_operation.sv` | beam maintenance in heap_total |
| `rtl/output_path.sv` | backtracking, path buffer, write-back |
| `rtl/ddr_controller.sv` | memory arbitration and response routing |
| `rtl/flash_bs_top.sv` | sequencer and wiring |
| `tb/ddr_model.sv` | behavioural memory: latency, random stalls, counters |
| `tb/tb_<block>.sv` | self-checking test of each block |
| `tb/tb_flash_bs_top.sv` | end-to-end test at a small size |
| `tb/tb_flash_bs_sweep.sv` | edge-probability, length and beam sweeps at K = 64 |
| `tb/tb_flash_bs_full.sv` | end-to-end test at the default size |

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog if the design hangs.

* The block tests compare against models written independently in the
  testbench. For example:
  * the heap test streams candidates into heaps of several widths. It then
    checks that exactly the B best were kept, that the array is a valid
    heap, and how often each rule fired;
  * the task test compares the subtask sequence with a bisection computed in
    the testbench, for many lengths.
* `tb_flash_bs_top` runs two small decoders (K = 16, M = 6, T up to 40)
  against a memory with random stalls. Sequences of lengths 2, 3, 8, 13,
  16, 27 and 40 are decoded.
  * The B = K decoder must reach the true optimum.
  * The B = 4 decoder must produce exactly the path of a sort-based software
    model of the same beam algorithm.
  * The test also counts that every mechanism occurs at least once: the
    three heap rules, the discard of a worse candidate, the heap swap, both
    kinds of initialisation, midpoint capture, both kinds of backtrack, a
    beam miss, memory stalls, and all three child patterns of the task FIFO.
* `tb_flash_bs_sweep` repeats the evaluation's sweeps on a 64-state model
  with four decoders, at B = 64, 32, 16 and 8:
  * the edge probability from 0.05 to 1 in steps of x1.5;
  * sequence lengths 32, 64 and 128.

  Every path must match the reference beam model. The B = K path must be
  optimal, and a narrower beam must need fewer cycles. At T = 128 the
  decoders take 556k, 310k, 198k and 141k cycles. From B = 16 down, the
  beam loses a little likelihood on sparse graphs.
* `tb_flash_bs_full` decodes one 512-step sequence at the default size. It
  takes a few minutes of simulation.

To run a test with Verilator 5, list the package first, then the design, the
memory model and the testbench:

```
verilator --binary --timing --assert --top-module tb_flash_bs_top \
  rtl/flash_pkg.sv rtl/sync_fifo.sv rtl/task_queue.sv rtl/ob_cache.sv \
  rtl/initialize.sv rtl/findmax.sv rtl/heap_ram.sv rtl/heap_select.sv \
  rtl/heap_operation.sv rtl/output_path.sv rtl/ddr_controller.sv \
  rtl/flash_bs_top.sv tb/ddr_model.sv tb/tb_flash_bs_top.sv
./obj_dir/Vtb_flash_bs_top
```

A block test needs only the package, `sync_fifo.sv` where the block uses
it, the block, and (for the memory clients) `tb/ddr_model.sv`.

The design has not been synthesised for a specific FPGA, so its timing
closure at 200 MHz is unknown. The longest combinational paths are:

* the eight-lane compare tree in FINDMAX;
* the heap's read-compare-write in one cycle.
