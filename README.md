# TuRaN in an L1 data cache: RTL of an SRAM-based true random number generator

A true random number generator needs a physical source of noise. TuRaN finds
one in SRAM that a processor already has: its caches. The SRAM read path is
designed for a given supply voltage. Lower the supply of one cache line far
enough, keep the nominal access time, and many cells can no longer pull their
bit line down quickly enough. The sense amplifier is then asked to decide on a
differential voltage that is below its reliable sensing margin. Some
amplifiers always resolve the wrong way (a deterministic failure). Others sit
on the edge and resolve to 0 or 1 with roughly equal probability on every
read. Those metastable columns are the entropy source. The failure happens in
the sensing path only: the cell keeps its value, so nothing is destroyed and
the same line can be read again and again.

This RTL builds that idea into a 32 KiB, 8-way L1 data cache with 64-byte
lines (512 lines of 512 bits). The cache gets a supply select per line, in the
manner of a Drowsy Cache. A small engine in the cache controller turns one
previously characterized line into a stream of raw random bits. It collects
them in a 1024-bit buffer, `r_random`, until the buffer holds 256 bits of
entropy. Software reads the buffer over a memory-mapped bus and hashes it with
SHA-256 to obtain a 256-bit random number. The hash is not part of this RTL.

## The generation sequence

Each line read is credited with a fixed amount of entropy, `r_entropy`.
Characterization measures this value once, and it sits in a register. One read
takes four steps of one clock cycle each (`rtl/turan_ctrl.sv`):

| step | state      | data-array port        | drowsy bit of the line | what happens                                  |
|------|------------|------------------------|------------------------|-----------------------------------------------|
| 1    | `TS_WRITE1`| write all ones         | 0                      | every cell of the line now stores 1           |
| 2    | `TS_DROWSY`| -                      | set                    | the line drops to the low supply              |
| 3    | `TS_READ`  | read                   | 1                      | sense amplifiers sample under the low supply  |
| 4    | `TS_WAKE`  | (read data returns)    | cleared                | data XORed into `r_random`; credit added      |

All ones is the pattern to write because only cells that store 1 fail. A cell
storing 0 has nothing to discharge late. After step 4, the engine starts again
at step 1 unless the accumulated entropy has reached 256 bits. In that case
`r_random` is marked valid and the engine waits. Reading the last buffer word
over the bus releases the buffer: it is cleared and refilled.

`r_random` has two 512-bit slots, and successive reads go to the slots in
turn. A line with at least 128 bits of entropy fills the buffer in two reads,
so an uncontended refill takes 8 cycles after the eviction handshake. That is
the case the buffer size is made for. If `r_entropy` is lower, a third and
later read is XORed into a slot that already holds data. XOR with independent
data does not lower the entropy a slot holds. The entropy count is still a
plain sum of the credits, so a very low `r_entropy` makes the 256-bit claim
optimistic. This folding rule is a choice of this design.

Before each refill the engine asks the host cache controller to evict the
entropy line (`evict_req`, `evict_line`, `evict_ack`), because step 1
overwrites it. `line_reserved` then stays high until the buffer is full, and
the host must not allocate into that line or access it while the flag is high.
An assertion in the top checks this. Configuration (`cfg_line`,
`cfg_entropy`) is sampled once at the start of each refill.

## Finding the entropy line

Process variation decides which cells are metastable, so every chip differs.
`rtl/entropy_profiler.sv` performs the one-time characterization in hardware.
For each of the 512 lines it does the following:

1. Write all ones, set the line drowsy, and read it `N_READS = 1000` times. It
   counts, per column, how many reads returned 1. Reads are pipelined, one per
   granted cycle.
2. Wake the line. Then sum the Shannon entropy of the 512 columns, one column
   per cycle: H(p) = -p log2 p - (1-p) log2 (1-p), with p = count / 1000.
3. Keep the line with the largest sum. A tie keeps the lower index.

When the run ends, the best line and its entropy are loaded into the `LINE`
and `ENTROPY` registers. Software may overwrite them, for example to apply a
safety margin. A run takes about 512 x (1000 + 512 + 6), which is roughly
780 k cycles.

`rtl/entropy_lut.sv` holds H as a table of 1001 entries with 12 fractional
bits. Elaboration computes the table with integer arithmetic only:

    H(c) = log2 N - (c*log2 c + (N-c)*log2(N-c)) / N

Here log2 is evaluated in fixed point with 20 fractional bits by repeated
squaring, and the result is rounded to 12 bits. The testbench checks every
entry against the floating-point formula, to within 1 LSB. Entropy values
elsewhere (`r_entropy`, the running sum, `best_entropy`) are unsigned, with 8
fractional bits (`turan_pkg::ENT_FRAC`).

## Sharing the cache with its host

The data array has one port. `rtl/dport_arb.sv` decides who uses it in each
cycle:

- **Idle-cycle injection (default).** The host always wins. A TuRaN step that
  needs the port (steps 1 and 3) waits for a cycle without a host request.
  Steps 2 and 4 only touch the drowsy bits and never wait. Host performance
  is unaffected. Random-number throughput depends on how idle the cache is.
- **Stall mode (`CTRL[1]`).** While the engine wants the port, host requests
  are stalled (`host_stall`) and TuRaN proceeds at its full rate.
- **Characterization** owns the port while it runs, and the host is stalled.
  Characterization writes every line, so it belongs at boot or after a cache
  flush.

A characterization request arriving while the engine is in the middle of a
refill is held pending. It starts once the engine is idle or holds a full
buffer, and the engine stays idle until the run ends. The two engines
therefore never drive the drowsy bits at the same time.

The drowsy bits (`rtl/drowsy_ctrl.sv`) follow a Drowsy Cache with two TuRaN
changes:

- There is no decay timer: lines are never put to sleep periodically.
- There is no word-line gating: a drowsy line can be read as it is.

A host access to a drowsy line still wakes it. In that case the access is not
served in that cycle (`host_wake` stalls it) and is retried. In normal use
only the reserved entropy line is ever drowsy, so this path does not occur at
the top level.

## Software interface

`rtl/turan_apb_regs.sv` is an APB3 slave with no wait states. Offsets are in
bytes:

| offset      | name    | access | content                                                           |
|-------------|---------|--------|-------------------------------------------------------------------|
| 0x00        | CTRL    | RW     | [0] enable generation, [1] stall mode, [2] write 1: start characterization |
| 0x04        | STATUS  | RO     | [0] `r_random` valid, [1] characterization running/pending, [2] characterization done |
| 0x08        | ENTROPY | RW     | `r_entropy`, 8 fractional bits                                    |
| 0x0C        | LINE    | RW     | entropy line index, {set, way}                                    |
| 0x10        | COUNT   | RO     | buffers read out so far                                           |
| 0x80 - 0xFC | RR[i]   | RO     | `r_random` bits 32i+31 .. 32i. Reading RR[31] releases the buffer. All words read 0 while the buffer is not valid |

Typical use:

1. Write CTRL = 0x4 and poll STATUS[1] until it clears.
2. Write CTRL = 0x1.
3. For each random number: poll STATUS[0], read RR[0..31] in order, and hash
   the 1024 bits with SHA-256.

## The data-array model

`rtl/drowsy_sram_array.sv` is a behavioural simulation model, not
synthesizable logic. It stands in for the SRAM macro and its per-line supply
switch. Reads and writes at nominal supply are exact, with one cycle of read
latency. A drowsy read works as follows:

- Every cell that stores 1 is resolved by its class. Stable cells give 1,
  always-failing cells give 0, and metastable cells give a fair coin flip
  (`$urandom`).
- Stored zeros read as 0.
- The stored contents never change.

Classes are fixed per cell by a hash of its position and `SEED`. The
metastable share of a line is spread between 0 and `MAX_RAND_PCT` (40 %), and
the always-failing share is `DET_PCT` (20 %). These numbers are not
measurements: they only give characterization something to find. With them,
the best line of the default array has about 217 metastable cells, so 217
bits of entropy. That is above the 128 bits per line the buffer size assumes.

The model does not cover read failures (destructive flips, a few percent of
cells in circuit simulation), hold failures, voltage-dependent or
temperature-dependent failure rates, or write failures. A silicon
implementation replaces this file with the real array, whose lines need an
individually switchable supply.

## Module map

```
turan_l1d_top            top: TuRaN inside the L1D data path
  turan_apb_regs         APB registers, r_random read-out
  entropy_profiler       one-time search for the best line
    entropy_lut          per-cell Shannon entropy table
  turan_ctrl             four-step generation engine, r_random
  dport_arb              idle-cycle injection / stall mode / characterization priority
  drowsy_ctrl            drowsy bits and supply select per line
  drowsy_sram_array      behavioural data array with access failures
turan_pkg                geometry, entropy format, state encoding, register map
```

The top has the following ports:

- **APB bus:** `psel`, `penable`, `pwrite`, `paddr[7:0]`, `pwdata`, `prdata`
  and `pready`.
- **Host data-array port:** `host_req`, `host_we`, `host_line`, `host_wdata`,
  `host_rdata` and `host_stall`. A request is served in a cycle where
  `host_stall` is low, and read data follows one cycle later.
- **Eviction handshake:** `evict_req`, `evict_line`, `evict_ack` and
  `line_reserved`.

There is a single clock and an active-low asynchronous reset.

Parameters of the top are `NUM_LINES` (512), `LINE_BITS` (512), `N_READS`
(1000), and the model's `MAX_RAND_PCT` and `DET_PCT`. For the 256 KiB, 4-way
L2 integration, set `NUM_LINES = 4096`. Line size and buffer are unchanged.

## Simulating

Every testbench is self-checking. Each prints one line,
`TB_RESULT checks=N failures=M`, and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -y rtl rtl/turan_pkg.sv tb/tb_turan_l1d_top.sv \
              --top-module tb_turan_l1d_top -Mdir obj && obj/Vtb_turan_l1d_top

Replace the testbench name to run the others:

- `tb_drowsy_sram_array`
- `tb_drowsy_ctrl`
- `tb_dport_arb`
- `tb_entropy_lut`
- `tb_entropy_profiler`
- `tb_turan_ctrl`
- `tb_turan_apb_regs`

`tb_turan_l1d_top` runs the whole design at its default size in a few
seconds. It acts as both the CPU and the host cache controller, and goes
through these steps:

1. Characterization, with host reads being stalled. The chosen line must be
   among the lines with the most metastable cells, and its reported entropy
   must match their number.
2. Refills with a free port. Each must take 8 cycles, and every bit must be
   consistent with the class of its cell.
3. Refills under random host traffic, first with idle-cycle injection and
   then in stall mode. Host data in every other line must be preserved.
4. A low `r_entropy` written by software, so that fills need more than two
   reads.
5. A characterization request that arrives mid-refill and must wait.

The testbench counts each of these mechanisms and fails if any never occurs.

`tb_turan_l2_config` runs the L2 configuration (`NUM_LINES = 4096`), about
30 s in Verilator. It characterizes all 4096 lines and then runs four
refills, with the same checks as steps 1 and 2 above.

`tb_turan_ctrl` checks the cycle count of a refill: 4 cycles per read when
the port is free. It also checks the number of reads per refill,
ceil(256 / `r_entropy`), and the exact buffer contents.

## How this relates to the published TuRaN

The following come from the published design:

- The access-failure entropy source.
- The four one-cycle steps with an all-ones pattern.
- The 128-byte `r_random` and the 256-bit entropy target.
- `r_entropy` as a cache-controller register.
- Evicting the entropy line for generation.
- Using cache idle cycles, with stalling host requests as the alternative.
- The Drowsy Cache modifications.
- Characterization by 1000 reads per row and per-cell Shannon entropy summed
  per row.
- A memory-mapped read-out.
- The L1D geometry.

The following are choices of this RTL:

- The fixed-point formats.
- The eviction handshake and `line_reserved`.
- XOR folding when more than two reads are needed.
- Characterization in hardware rather than in software.
- Writing at nominal supply before going drowsy during characterization.
- The port priorities and the cycle-by-cycle notion of "idle".
- Holding a characterization request until the engine is quiet.
- The APB register map.
- Every number inside the array model.

Not included:

- The SHA-256 post-processing, which runs on the CPU in software.
- The host cache's tags, replacement and miss handling. These drive the
  host_* and eviction ports.
- A predictor of idle-interval length built from queue occupancy and recent
  addresses. Only the idea is known, so the arbiter simply uses each idle
  cycle.
- Online health tests of the output.
