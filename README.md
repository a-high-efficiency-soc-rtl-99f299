# A Viterbi sequence-detection accelerator for nanopore DNA reads

A nanopore sequencer does not output bases. It outputs a stream of current
levels called *events*. Each level depends on the few bases (a *k-mer*) that sit
in the pore at that moment. Turning the events back into bases is a
hidden-Markov decoding problem. The hidden state is the k-mer in the pore. Each
event either leaves the state unchanged or moves it by one or two bases. The
most likely state sequence is found with the Viterbi algorithm:

* **Trellis construction.** For every event and every state, keep the best
  score of any path that ends there, and keep a pointer to the predecessor that
  gave it.
* **Traceback.** Follow those pointers backwards from the best final state.

This RTL builds both halves as a coprocessor beside a RISC-V core. The
coprocessor is attached through the core's RoCC port: custom commands in,
responses out, and a load/store port into the core's data cache. The core sends
a short program that says where the model and a chunk of up to 512 events sit
in memory. The accelerator then does the following on its own:

1. It loads the model and the events.
2. It builds the trellis, one event every 18 cycles.
3. It traces back the best path.
4. It writes one state byte per event back to memory and signals completion.

The published design keeps trellis construction and traceback in hardware
together. This RTL follows that organisation. A variant in which the core does
the traceback in software is not built.

## The model: 3-mers, 64 states, 21 transitions

With k = 3 there are N = 4³ = 64 states. State n is the 3-mer read as a
base-4 number, with the oldest base in the most significant digit. Exactly 21
states can lead into state y:

| kind | count | predecessor x of y | relative pointer |
|------|-------|--------------------|------------------|
| stay | 1  | x = y                          | 0 |
| step | 4  | x = l·16 + ⌊y/4⌋, l = 0..3     | 1 + l |
| skip | 16 | x = L·4 + ⌊y/16⌋, L = 0..15    | 5 + L |

A step shifts one new base in, so x and y share two bases. For example, 6 → 27
is a step. A skip shifts two bases in, so x and y share one base. For example,
6 → 33 is a skip. The function `dna_pkg::pred_state(n, t)` gives the predecessor
for relative pointer t. The hardware never stores a full 6-bit predecessor. It
stores the 5-bit relative pointer t, one byte per state.

The model has three parts:

* `tprob[0:20]`: one transition cost per relative pointer, shared by all
  states.
* `mu[n]`: the expected current level of state n.
* `sigma[n]`: a per-state offset.

Everything is computed as a cost, where lower is better. The recursion for
event m is:

```
trans[n][t]  = alpha[m-1][pred(n,t)] + tprob[t]                   (t = 0..20)
minidxT[n]   = argmin_t trans[n][t]          -> pointer beta[n][m]
alpha'[n]    = trans[n][minidxT] - sigma[n] + (x[m] - mu[n])^2
minprob      = min_n alpha'[n],  minidxN = argmin_n alpha'[n]
alpha[m][n]  = alpha'[n] - minprob                                 (normalisation)
```

Normalisation keeps the best state at 0, so the scores stay bounded from one
event to the next. Each chunk starts with all alpha at zero, so every initial
state is equally likely.

## Trellis construction (`trellis_core`)

The state loop and the transition loop are fully unrolled: 64 × 21 adders work
in parallel. One event passes through four stages.

* **`gather_trans`** holds the 64 normalised scores of the previous event. It
  hands every state its 21 predecessor scores through fixed wiring (the table
  above). This "network" has no logic: it is a fixed permutation of the 64
  registers.
* **`loop3_unit` × 64**
  * It adds `tprob[t]` to each of the 21 gathered scores and registers the sums.
  * A five-level comparator tree (`findmin_tree`) then finds the smallest sum
    and its index t.
  * The index is the trellis pointer of this state.
  * Latency: 6 cycles.
* **`post_unit` × 64** computes `x − mu`, then `(x − mu)² − sigma`, and adds
  the winning transition cost. The difference is computed while the comparator
  tree runs, so only one extra cycle is added after the tree.
* **`norm_unit`** runs a six-level tree over the 64 updated scores. It yields
  `minprob` and `minidxN`. The subtracted scores are written back into
  `gather_trans` for the next event. Latency: 6 cycles, plus the write-back.

`trellis_core` raises `done` 14 cycles after `start`:

* 7 cycles for the adders, tree and post stage.
* 7 cycles for normalisation.

The event sequencer in `accel_ctrl` adds four cycles of handshaking:

1. Read the event buffer.
2. Start the trellis core.
3. Write the pointer row.
4. Advance.

One event therefore takes **18 cycles**. The end-to-end testbench checks this
period for every event that does not wait on memory.

Ties go to the lower index in both trees. A pointer therefore always names the
first minimal predecessor, and `minidxN` the first minimal state. The software
reference in `tb/viterbi_ref_pkg.sv` uses the same rule, so results compare bit
for bit.

### Number formats (this design's choice)

| quantity | format |
|----------|--------|
| event x, mu | 12-bit unsigned |
| tprob, sigma | 16-bit unsigned |
| scores alpha, trans | 32-bit two's complement |

After normalisation a score is at most one event's worth of cost above zero:
(4095)² + 65535 + 65535 < 2³¹. So 32 bits never overflow. To change a width,
change `dna_pkg`.

## Traceback (`traceback_unit`)

After the last event, the pointer buffer holds rows 0..M−2. Row m holds, for
every state at event m+1, the relative pointer to its predecessor at event m.
Traceback works as follows:

1. It writes `minidxN` of the last event as `state[M−1]`.
2. For m = M−2 down to 0, it reads row m.
3. It shifts the 64-byte row right by `prev_state` bytes. The low byte is the
   pointer it needs.
4. It builds all three candidate predecessors at once:
   * **stay:** `prev_state`
   * **step:** the constant `{0,16,32,48}[l]` plus the *state prefix*
     `prev_state/4`
   * **skip:** the constant `L·4` plus `prev_state/16`
5. A multiplexer picks the candidate the pointer names.
6. The result is written to `state[m]` and fed back.

The unit produces one state per cycle. A chunk of M events takes M cycles.

The state buffer holds 512 × 6 bits (384 B). Eight states at a time are packed
into a 64-bit word and stored to memory: state j of word w goes in byte j, and
bytes past M are zero.

## Memories

| buffer | size | organisation |
|--------|------|--------------|
| `event_buffer` | 4 KiB | 512 × 64 b: one event per word, sample in bits 11:0 |
| `pointer_buffer` | 32 KiB | 512 rows × 64 B in 8 banks of 64 b: one byte per pointer, pointer n in byte n |
| `state_buffer` | 384 B | 512 × 6 b register file, read eight states at a time |

The memories are written as plain arrays with synchronous read. Mapping them
onto SRAM macros is left to the implementation flow.

## Programming interface (`accel_ctrl`)

All commands are RoCC custom instructions. The command number is in `funct7`.

| funct7 | rs1 | rs2 | effect |
|--------|-----|-----|--------|
| 0 | – | – | reset the accelerator's registers |
| 1 | M | – | number of events in the chunk (1..512; larger values are clamped to 512) |
| 2 | address of tprob[0:20] | – | |
| 3 | address of mu[0:63] | – | |
| 4 | address of sigma[0:63] | – | |
| 5 | address of x[0] | result address | start; answers with M in `rd` when done, if `xd` is set |

Memory layout:

* Every model value and every event sits in the low bits of its own 64-bit
  word.
* The result is ⌈M/8⌉ 64-bit words.

The accelerator accepts a command only when it is idle. `cmd_ready` is low
during a run.

### Overlap and ordering

After the start command, the memory engine issues loads:

1. 21 + 64 + 64 model loads.
2. M event loads.

It does not wait for the data. Each load carries a tag `{kind, index}`. A
response is routed by its tag, so the cache may return responses in any order.
A valid bit per event tells the sequencer when event m has arrived. Trellis
construction starts as soon as the model and event 0 are in, and it runs while
later events are still loading. If event m is late, the sequencer stalls.

Stores are counted out and acknowledged back. A store acknowledgement is a
response with `has_data = 0`. The completion response waits until every store
has been acknowledged.

### Measured cycle counts

These counts come from the end-to-end testbench. The memory model has random
latency and backpressure.

* A 512-event chunk takes about 10,000 cycles from the start command to the
  response, or about 19.5 cycles per event.
* Of that:
  * 512 × 18 cycles are trellis construction.
  * 512 cycles are traceback.
  * 64 cycles are stores.
  * The rest is the model load before event 0 can start.

At 200 MHz this is about 10 Mevents/s per chunk.

## Departures from the published description

* **Comparator counts.** The published block diagram of the transition tree
  lists 10, 5, 3, 2 and 1 comparators per level. A 21-input tree that passes
  the odd survivor through needs only 10, 5, 3, 1 and 1. The tree here has five
  levels like the published one, but the fourth level has one comparator, not
  two.
* **Sign of sigma.** The published datapath drawing adds sigma to the square,
  then subtracts that sum from the transition term. The published update
  equation subtracts sigma and adds the square. Read literally, the drawing
  would make a detector that seeks the minimum prefer states far from the
  event. This RTL follows the equation.
* **Traceback speed.** The published design gives no cycle count for
  traceback. One state per cycle is this design's choice.
* **Cycle budget.** The published system spends about 77 cycles per event
  overall, because it includes the core's software around each chunk. The
  accelerator alone needs about 19.5, measured with the random-latency memory
  model.
* **This design's own choices.** The published description does not specify
  any of the following:
  * the interface encodings: command numbering, memory layout, tag layout,
    result format and completion word;
  * the number widths;
  * the zero initial scores;
  * the tie rule;
  * the synchronous active-high reset;
  * the clamp of M to 512.
* **Not built.** The RISC-V core, its caches, the RoCC adapter and the chip's
  I/O and uncore are standard parts taken from elsewhere. They are not
  included. The top module exposes the four RoCC channels (cmd, resp, mem.req,
  mem.resp) as ports.

## Files

`rtl/` contains:

* `dna_pkg`: sizes, widths, enums, RoCC structs and `pred_state`.
* `findmin_tree`: the pipelined argmin.
* `gather_trans`, `loop3_unit`, `post_unit` and `norm_unit`, joined in
  `trellis_core`.
* `event_buffer`, `pointer_buffer` and `state_buffer`.
* `traceback_unit` and `accel_ctrl`.
* The top module, `accel_b`. It has no parameters, and its ports are the RoCC
  channels plus `clk`, `reset` and `busy`.

Every file opens with a comment on its timing and interface.

`tb/` contains:

* **One self-checking testbench per block** (`tb_<module>`).
* **`viterbi_ref_pkg`**: a plain-software Viterbi decoder and a synthetic
  workload generator. It provides:
  * a random 3-mer model;
  * a random state walk that uses stay, step and skip;
  * noisy events from that walk.
* **`rocc_mem_model`**: a behavioural cache stand-in with:
  * random acceptance (backpressure);
  * random latency;
  * out-of-order responses;
  * store acknowledgements.
* **`tb_accel_b`**: the end-to-end test at full size.
  * It runs chunks of 512, 37, 1, 2 and 512 events, with reset commands in
    between.
  * It compares every stored byte with the reference decoder.
  * It checks the 18-cycle event period and the M-cycle traceback, and that
    512 events finish in fewer than 77 × 512 cycles.
  * It counts every mechanism and fails if one never happened: load overlap,
    stalls on late events, reordered responses, backpressure, held responses,
    stay, step and skip pointers, non-zero normalisation, partly filled result
    words, one-event chunks and reset.
* **`tb_chunked_decoding`**: the use the accelerator was built for.
  * A 1024-event stream is too long for one run. It is cut into chunks of
    512 and, separately, chunks of 32.
  * Each chunk is sent with its own six-command program, and the results are
    spliced back together.
  * Every chunk must match the software decoder exactly.
  * It also reports how often the spliced result agrees with the true state
    walk, next to the unchunked software decoder. With the synthetic model and
    noise of ±20, ±60 and ±100 around levels 55 apart, the results are:

    | noise | unchunked | chunks of 512 | chunks of 32 |
    |-------|-----------|---------------|--------------|
    | ±20   | 98.4 %    | 98.4 %        | 98.5 %       |
    | ±60   | 95.9 %    | 95.9 %        | 94.4 %       |
    | ±100  | 74.3 %    | 74.2 %        | 72.4 %       |

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself with
a watchdog.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/dna_pkg.sv tb/viterbi_ref_pkg.sv tb/tb_accel_b.sv --top-module tb_accel_b
./obj_dir/Vtb_accel_b
```

Other testbenches build the same way, with their own name. `-Wno-fatal` is
needed because the testbenches do their reference arithmetic in plain `int`
and `longint`, and Verilator reports width warnings for that code. The RTL
itself lints clean of width warnings. The full-size
end-to-end run takes a few seconds once compiled.

## How far to trust it

* Every block has been checked against independently computed values.
  Trellis construction and traceback were checked bit for bit against the
  software reference, at the full published size of 64 states, 21 transitions
  and 512 events.
* The model and events are synthetic, generated from a random state walk. On
  such data the decoded path agrees with the true walk for about 96 % of the
  events of a 512-event chunk. No real nanopore data or published pore model
  was used.
* The design has been linted and synthesized with yosys as a whole. Timing at
  the published clock has not been checked. The 64 × 21 adders feed a
  5-level tree in registered stages, and `(x − mu)²` is a 12 × 12 multiply in
  one stage.
