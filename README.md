# A standalone Lyra2REv2 miner in programmable logic

Mining a Lyra2REv2 coin means hashing one 80-byte block header again and
again, each time with a different 32-bit nonce in its last four bytes, until
a hash falls below a target threshold. The hash is a chain of seven
functions: BLAKE-256, Keccak-256, CubeHash-256, Lyra2, Skein-256, CubeHash-256
and BMW-256. Lyra2 is a memory-hard password-hashing sponge that was put into
the chain to make dedicated hardware unattractive.

This RTL puts the whole search into logic. Software writes a header, a
target and a maximum nonce into a small register file over AXI4-Lite, sets a
start bit, and then only polls. The hardware counts nonces, hashes them
through a pipelined, replicated chain of hash cores and compares each result
with the target. It reports either the first winning nonce or "no nonce
found". The chain is balanced across five clock domains. With the default
core counts (1 BLAKE, 2 Keccak, 24 + 24 CubeHash, 10 Lyra2, 1 Skein, 1 BMW) it
delivers one hash every 32 ns, i.e. 31.25 MHash/s. The full-size testbench
measures exactly this rate.

The design follows the architecture published by Van Beirendonck, Jones,
Burg and Balatsoukas-Stimming for a Xilinx MPSoC (an FPGA with ARM cores on
the same die). This is an independent RTL description of that architecture,
not the authors' code. The places where it differs are listed near the end.

## One search, seen from the software

| Offset | Register | Access | Content |
|---|---|---|---|
| 0x00 | Status | read | [31:16] version (0x0001), [2] error, [1] winning nonce found, [0] nonce not found |
| 0x04 | Control | read/write | [0] start new block; the miner clears it when it takes it |
| 0x08 | Winning nonce | read | nonce of the first hash below the target |
| 0x0C–0x28 | Target | read/write | 8 words; 0x0C holds target bytes 0..3 (least significant) |
| 0x2C–0x78 | Block header | read/write | 20 words; 0x2C + 4i holds header bytes 4i..4i+3; 0x78 is the starting nonce |
| 0x7C | Maximum nonce | read/write | last nonce to try |

The sequence is as follows:

1. Software writes target, header and maximum nonce, then writes 1 to
   Control.
2. The **input control FSM** (`input_ctrl_fsm`) sees the start bit and clears
   it, along with the status bits. It then raises `flush` for 32 control
   cycles. This throws away everything still in the chain and in the
   metadata FIFO, so a new block always starts from a clean pipeline.
3. It copies the header, target and maximum nonce into its own registers.
   Software may therefore rewrite them at once for the next block.
4. Each cycle in which the chain and the **metadata FIFO** both have room, it
   does two things at once:
   - it pushes the header with the current nonce into the chain;
   - it writes the entry `{nonce, target, last}` into the metadata FIFO.

   The nonce then increases by one. After the maximum nonce has been pushed
   (`last` = 1), the FSM goes idle. If the starting nonce is above the
   maximum, only the starting nonce is tried.
5. The chain keeps order, so the hash at the chain output and the entry at
   the head of the metadata FIFO belong to the same nonce. The **output
   control FSM** pops both together. `threshold_verif` compares the hash
   with the target as 256-bit little-endian numbers and succeeds only if the
   hash is strictly smaller.
6. The first success sets *winning nonce found* and stores the nonce. After
   that, the hashes still in flight are drained without being reported. If
   the entry marked `last` goes by without a success, *nonce not found* is
   set. A hash with no metadata entry is impossible in correct operation; if
   one arrives, it sets *error*.

Writing Control again during a search starts the next block at once. The
running search is flushed.

## The chain and how it is balanced

```
 ctrl 250 MHz      100 MHz      375 MHz     250 MHz      225 MHz     375 MHz     250 MHz      100 MHz     ctrl
 header ─FIFO─► BLAKE x1 ─FIFO─► Keccak x2 ─FIFO─► Cube x24 ─FIFO─► Lyra2 x10 ─FIFO─► Skein x1 ─FIFO─► Cube x24 ─FIFO─► BMW x1 ─FIFO─► hash
```

Every step is a `hash_scheduler` driving N identical cores. Every arrow is an
`async_fifo` that crosses a clock boundary. The core counts balance the
steps:

| Step | Clock | Cycles per hash per core | Cores | Step throughput |
|---|---|---|---|---|
| BLAKE-256 | 100 MHz | 2 (56-stage pipeline, two blocks per header) | 1 | 50 MHash/s |
| Keccak-256 | 375 MHz | 24 (one round per cycle) | 2 | 31.25 MHash/s |
| CubeHash-256 | 250 MHz | 192 (one round per cycle) | 24 | 31.25 MHash/s |
| Lyra2 | 225 MHz | 68 (8 hashes in a 544-cycle pipeline) | 10 | 33.1 MHash/s |
| Skein-256 | 375 MHz | 9 (8-round block used 9 times per UBI) | 1 | 41.7 MHash/s |
| CubeHash-256 | 250 MHz | 192 | 24 | 31.25 MHash/s |
| BMW-256 | 100 MHz | 2 (18-stage pipeline used twice) | 1 | 50 MHash/s |

Keccak and the two CubeHash steps limit the chain to 31.25 MHash/s.

**Scheduler.** A word leaves the upstream FIFO only if two things are true.
First, some core is ready; cores are picked round-robin from a rotating
pointer. Second, the downstream FIFO can take every result still being
computed plus this one. The scheduler keeps this count as a credit counter
(results in flight compared with the downstream FIFO's conservative free
count). Because of the credit check, a core never has to hold a finished
hash, so no core needs output back-pressure. All cores of a step have the
same fixed latency, and the scheduler issues at most one word per cycle.
Results therefore come back one at a time and in issue order. That is why
the whole chain keeps the order of nonces, which the metadata FIFO depends
on.

**FIFOs.** The chain FIFOs are the usual dual-clock design: Gray-coded
pointers and two-flop synchronisers, with first-word-fall-through reads.
Each FIFO is sized for the results its step can have in flight:

- 4 words for headers entering the chain;
- 64 words after BLAKE;
- 128 words after Lyra2;
- 8 or 32 words after the other steps.

The metadata FIFO is a single-clock FIFO with 1024 entries. That is more
than the roughly 500 hashes the default chain can hold, so it never slows
the input.

**Flush.** `flush` is a level in the control domain. It goes through a
two-flop synchroniser into each domain and there clears:

- the FIFO pointers;
- the scheduler credit;
- every core's valid state.

The input FSM holds it for 32 control cycles, which is 12 cycles of the
slowest (100 MHz) domain. By then every domain has cleared itself and seen
the other FIFO side cleared.

**Core interface.** All seven core types share one handshake:

- `in_valid`/`in_ready` accept a message;
- `out_valid` is a one-cycle pulse with `out_data`;
- `flush` drops everything.

Latencies are fixed:

| Core | Latency (cycles) |
|---|---|
| Keccak | 24 |
| CubeHash | 192 |
| Skein | 18 |
| BMW | 36 |
| BLAKE | 112 |
| Lyra2 | 544 |

## The Lyra2 core

Lyra2 is the part that makes this chain unusual, and most of the design
effort is in `lyra2_core`. The Lyra2REv2 instance is small:

- time cost T = 1;
- a 4 × 4 matrix of 768-bit cells (1.5 kB);
- a 1024-bit sponge state (768-bit rate, 256-bit capacity) permuted by
  BLAKE2b rounds;
- the 256-bit input serves as both password and salt.

One hash is 68 sponge rounds:

| Rounds | Phase | What happens |
|---|---|---|
| 0–23 | Bootstrap | Two 12-round absorbs: pwd‖pwd, then the padded parameter block |
| 24–27 | Setup0 | Squeeze row 0, columns written from last to first |
| 28–31 | Setup1 | Duplex row 0 into row 1 |
| 32–39 | Setup2 | Rows 2 and 3 from the two previous rows; the rotated output (by 64 bits) is also XORed back into the row two above |
| 40–55 | Wandering | Each row is revisited together with a pseudorandom row `row1` = (state word 0) mod 4 |
| 56–67 | Wrap-up | 12-round absorb of one cell of `row1` |
| 68 | Output | 256 bits of state are the output |

**Pipelined round, eight hashes at once.** One BLAKE2b round holds eight
64-bit additions in series: four in the column G layer and four in the
diagonal layer. `lyra2_round` places a register after each addition, so a
round takes 8 cycles and accepts a new state every cycle. The core fills
those eight stages with eight independent hashes. Slot *s* owns every cycle
in which a 3-bit head counter equals *s*, so each hash gets exactly one
round every eight cycles. The result is a latency of 68 × 8 = 544 cycles and
on average one hash out every 68 cycles. A 7-bit step counter per slot
decides what that slot does at its next visit. The feedback path from the
pipeline output back to its input needs no extra register: the state that
leaves stage 8 is exactly the one whose slot is now at the head.

**Memory.** Each slot has its own 16-cell region of the memory
(`lyra2_bram`). Two extra words hold the all-zero vector and the padded
parameter block; they are written during the first two cycles after reset.
Every cell address is {slot, row, column}.

The memory has four read ports and two write ports, all used in one cycle
during wandering:

- Ports a and b feed the duplex input. The input is their 64-bit word-wise
  sum, or pwd‖pwd at the first bootstrap round.
- Ports c and d supply the old cells that the duplex output is XORed with.

The addresses for c and d are generated when the state comes back from the
pipeline, not delayed along with it. This saves a chain of 768-bit delay
registers.

Writes complete a duplex at the slot's next visit. Ports a and b forward a
write of the same cycle (write-first), because a duplex may read a cell that
the previous one of the same slot has just written. Ports c and d read the
stored value.

**Row collision.** In the wandering phase the deterministic row `row0` and
the random row `row1` can be the same. In that case two things change:

- the output of the first XOR (`M[row0] ^ rand`) becomes the input of the
  second XOR (`^ rand <<< 64`), instead of the stored cell;
- write port a is disabled, so only one write reaches the cell.

This is the case where a simple implementation gets a wrong hash.

## The other cores

- **BLAKE-256** (`blake256_core`): 14 rounds fully unrolled, each round cut
  into four register stages (two per G layer), 56 stages in all.
  - The message permutation is fixed wiring.
  - Each G adds precomputed message ⊕ constant words (`blake_g` with
    USE_CM).
  - An 80-byte header is two blocks. When the first block leaves the
    pipeline, it is finalised and re-enters at the head as the second block.
    The re-entering block takes priority over new input, so the core
    averages one hash per 2 cycles.
- **Keccak-256** (`keccak256_core`): rate 1088, original Keccak padding
  (0x01 … 0x80), 24 rounds at one per cycle.
- **CubeHash16/32-256** (`cubehash256_core`): one round per cycle.
  - Rounds 1–16 run after XORing in the message.
  - Rounds 17–32 run after the padding bit.
  - Rounds 33–192 run after the finalisation flag.
  - The initial state is the standard constant for these parameters.
- **Skein-256-256** (`skein256_core`): the configuration UBI block is a
  constant. Two UBI engines follow (message, then output). Each runs 72
  Threefish rounds as nine passes through an 8-round block.
  - The second engine starts from the first one's result, so the two engines
    work on different hashes at the same time.
  - One hash every 9 cycles, 18 cycles of latency.
- **BMW-256** (`bmw256_core`): one compression as an 18-stage pipeline:
  - stage 0: f0;
  - one expanded word per stage;
  - last stage: f2.

  Each message passes through twice, once for the hash round and once for
  the finalisation with the constant chaining value. The second pass has
  priority, so the core averages one hash per 2 cycles.

## Conventions

- **Byte order.** A 256-bit value carries byte *i* at bits [8i+7:8i]. A
  header carries byte *i* of the 80-byte header at the same place, so the
  nonce is bits [639:608]. Hashes and targets are compared as little-endian
  numbers: byte 31 is the most significant.
- **Reset.** `rst_n` is asynchronous, active low and shared by all domains.
  The caller releases it synchronously to each clock. After reset, the
  Lyra2 cores spend two cycles writing their constant memory words.
- **Clocks.** The top has five clock inputs:
  - `clk_ctrl`: AXI bus and control logic, 250 MHz;
  - `clk_bb`: BLAKE and BMW, 100 MHz;
  - `clk_ks`: Keccak and Skein, 375 MHz;
  - `clk_cube`: CubeHash, 250 MHz;
  - `clk_lyra2`: Lyra2, 225 MHz.

  The logic works at any frequencies; only the throughput changes.

## Where this RTL departs from the published design

- **Lyra2 memory.** The published core builds the 4-read/2-write memory from
  true-dual-port block RAMs. It gets extra read ports by replication (two
  coherent copies) and extra access slots by running the RAM at twice the
  core clock (450 MHz). Here the memory is a plain array with four
  combinational read ports and two write ports on the core clock. The
  behaviour seen by the core is the same. Mapping it to block RAM needs that
  replication and multipumping wrapper again.
- **Keccak, CubeHash and BMW.** The published design reuses round functions
  from a public SHA-3 candidate library. These are written from the
  algorithm specifications instead, with the published cycle counts: 24,
  192, and 2 on average.
- **Skein.** The message-UBI key schedule depends only on constants. It is
  written as constant logic that synthesis folds into a table, rather than
  as an explicit read-only memory. The 8-round block does one whole pass
  per cycle, without registers inside it.
- **Status and control details.** The published design leaves the following
  open, so they are choices made here:
  - the version number;
  - what sets the error bit;
  - that only the first winning nonce of a search is kept;
  - that the start bit is cleared by hardware;
  - that a start nonce above the maximum tries only that nonce.
- **Not included.** The following are outside this RTL:
  - the ARM-side Linux driver and the mining software, represented by the
    AXI4-Lite port;
  - clock generation, represented by the clock inputs;
  - the Lyra2REv3 (Lyra2MOD) variant, which the published design only
    sketches.

## How far it can be trusted

Every module has a self-checking testbench in `tb/`. The expected values
for all hash functions come from a separate software model.

- Keccak-256 and BLAKE-256 in that model reproduce their published
  digests (Keccak against SHA3-256 with the padding byte changed, BLAKE-256
  against the one-byte test value).
- For Skein-256, the model derives the initial chaining value from the
  configuration block, and it matches the published one. For CubeHash, the
  model computes the initial state from the parameters, and the constant in
  the RTL agrees with it. Neither was checked against a published digest.
- Lyra2 and the full Lyra2REv2 chain were modelled from the algorithm
  description.
- BMW-256 was written from the specification, and no published BMW-256
  test vector was at hand. A shared misreading of the specification by the
  RTL and the model would go unnoticed. Treat BMW as the least certain core
  until it is checked against a known digest.

The core testbenches check every digest, the latency and the issue interval
against the figures above. The Lyra2 test includes inputs that hit the row
collision.

`lyra2rev2_chain_tb` runs the multi-clock chain at reduced core counts. It
checks 12 full Lyra2REv2 digests in order, with a flush of work in flight
and random back-pressure at the output.

`miner_top_tb` plays the software over AXI4-Lite at reduced core counts with
an 8-entry metadata FIFO, and runs three searches:

- a search interrupted by a new block;
- a search with exactly one winner among 12 nonces;
- a search whose target equals its smallest hash, so nothing is strictly
  below it.

It counts how often each mechanism happened and fails if any count is zero:

- flush;
- win;
- not found;
- chain back-pressure;
- metadata FIFO full;
- Lyra2 row collision;
- hashes drained after a win;
- use of every core.

`miner_full_tb` runs the top at its default sizes with the real clock
frequencies. It finds the 109th of 160 nonces as the winner and reports "not
found" for a 40-nonce search. It also measures the chain output at 32.00 ns
per hash (31.25 MHash/s).

## Simulating

Any testbench builds with Verilator 5 in timing mode. Read the two packages
first:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/lyra2_pkg.sv rtl/miner_pkg.sv tb/miner_full_tb.sv --top-module miner_full_tb
./obj_dir/Vminer_full_tb
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<n>`. The
full-size run compiles in about a minute and simulates 31 µs of operation
in well under a second. In the testbenches, one time unit is 1 ps.

To change the balance of the chain, set `N_BLAKE` … `N_BMW` on `miner_top`.
The FIFO depths follow from those counts automatically.
