# A pipelined Lyra2 core for Lyra2REv2

Lyra2REv2 is the proof-of-work hash of Vertcoin, MonaCoin and a few other
cryptocurrencies. It chains seven hash functions:
BLAKE-256, Keccak-256, CubeHash-256, **Lyra2**, Skein-256, CubeHash-256, BMW-256.
Six of them are SHA-3 candidates with well-known hardware. The odd one out is
Lyra2, a memory-hard password hashing scheme. This repository holds
SystemVerilog for a Lyra2 core built for the Lyra2REv2 instance of Lyra2. It
follows the FPGA architecture of Van Beirendonck, Trudeau, Giard and
Balatsoukas-Stimming, "A Lyra2 FPGA Core for Lyra2REv2-Based
Cryptocurrencies". Where that paper stops short of a circuit, the choices
are made here, and each one is marked as such below.

The core takes the 256-bit CubeHash output `pwd` and returns the 256-bit
`K = Lyra2(pwd, salt = pwd)` with time cost T = 1, a 4 x 4 memory matrix
(R = C = 4) and k = 256 output bits. Eight hashes are in flight at once. Each
hash takes 544 cycles, so the core finishes one hash every 68 cycles on
average.

## The algorithm in one page

Lyra2 is a sponge. Its state is sixteen 64-bit words (1024 bits). The lower
768 bits (words 0-11) are the *bitrate* b, and the upper 256 bits are the
*capacity*. The permutation is the BLAKE2b round, with the message words
removed from G. A *full* permutation is 12 rounds. The *reduced* one used in
the memory phases is a single round. One memory cell is one 768-bit block.
The matrix M has 4 rows of 4 cells.

| phase | what happens | rounds |
|---|---|---|
| bootstrap | state = zeros in words 0-7, BLAKE2b IV in words 8-15. Absorb `pwd‖pwd` (512 bit), then absorb `pad(params)`, each with the full permutation | 24 |
| Setup0 | M[0][3], M[0][2], M[0][1], M[0][0] ← state, then one round after each | 4 |
| Setup1 | for col 0..3: state ^= M[0][col]; round; M[1][3-col] = M[0][col] ^ rand | 4 |
| Setup2 | rows 2, 3 with prev = row-1, row1 = row-2. For col 0..3: state ^= M[row1][col] ⊞ M[prev][col]; round; M[row][3-col] = M[prev][col] ^ rand; M[row1][col] ^= rand ⋘ 64 | 8 |
| Wandering | rows 0..3 with prev = row-1 mod 4, row1 = state word 0 mod 4, picked at the start of the row. Same duplex, then M[row][col] ^= rand; M[row1][col] ^= rand ⋘ 64 | 16 |
| Wrap-up | state ^= M[row1][0] (row1 of the last Wandering row); full permutation; K = words 0-3 | 12 |

Here `rand` is the lower 768 bits of the state after the round. `⊞` is
addition word by word, modulo 2^64 in each word. `⋘ 64` rotates the 768-bit
block up by one word, so word i of the result is word i-1 of rand.
`pad(params)` is the 512-bit block `32, 32, 32, 1, 4, 4, 0x80,
0x0100000000000000`, written as eight little-endian 64-bit words. These are
the lengths of K, pwd and salt in bytes, then T, R and C, then the 10*1
padding.

Two details drive most of the hardware:

* In the Wandering phase, `row1` can equal `row`. The same cell is then
  updated twice in a row: first `^= rand`, then `^= rand ⋘ 64`.
* Setup writes row `row` from the last column to the first. The next row
  starts by reading column 0 of that row, which was written in the cycle just
  before.

## Datapath

```
             +------------------- Block RAM, 4 read / 2 write -------------------+
  wdata0 --->| write port 0                                      write port 1   |<--- wdata1
             |        qc            qa         qb           qd                  |
             +--------|-------------|----------|------------|-------------------+
                      |             +--[⊞]-----+            |
                      |                 |                   |      +-- wdata0 (collision)
                      |   0‖pwd‖pwd --[MUX]                 +--[MUX]
                      |                 | din               |
                      |      +----------v---------+         |
                      |      | state[767:0] ^ din |         |
                      |      |   BLAKE2b round    |<- state register (1024 bit)
                      |      +----------+---------+         |
                      |                 | round output -----+--> state register, K = bits 255:0
      wdata0 = rand ^ qc <--------------+---------> wdata1 = (rand ⋘ 64) ^ (qd or wdata0)
```

* **Duplex** (`lyra2_duplex`). The state register, the XOR of the 768-bit
  input into the lower state bits, and the round (`blake2b_round`, built from
  eight `blake2b_g`). The round output is the one bus the rest of the
  datapath uses. It goes back into the state register, into both write-back
  XORs, and to K.
* **Input multiplexer** (`lyra2_feed`). The duplex absorbs either
  `0^256 ‖ pwd ‖ pwd` or `qa ⊞ qb`. The two constant blocks (all-zero and
  `pad(params)`) live in the RAM, so a constant is absorbed by reading it on
  qa with the zero block on qb. When nothing is to be absorbed, both ports
  read the zero block. The multiplexer therefore has only two inputs.
* **Write-back XORs** (`lyra2_writeback`). Write data 0 is `rand ^ qc`.
  Write data 1 is `(rand ⋘ 64) ^ qd`. On a row collision, write data 1 is
  `(rand ⋘ 64) ^ wdata0` instead, and write port 0 is switched off.
* **Memory** (`lyra2_mpram`). See below.
* **Controller** (`lyra2_ctrl`). Sequences the phases and makes every
  address. See below.

## The 68-round schedule

Every round of a hash is one pass through the duplex. The controller fixes,
for each round, what the four read ports deliver and what is written:

| phase (rounds) | qa | qb | qc | qd | writes when the round output appears |
|---|---|---|---|---|---|
| BOOT0 (12) | — (mux selects pwd in round 0) | Z | Z | Z | — |
| BOOT1 (12) | P in round 0, else Z | Z | Z | Z | round 11: M[0][3] = out |
| SETUP0 (4) | Z | Z | Z | Z | col 0..2: M[0][2-col] = out |
| SETUP1 (4) | M[0][col] | Z | M[0][col] | Z | M[1][3-col] |
| SETUP2 (8) | M[row1][col] | M[prev][col] | M[prev][col] | M[row1][col] | M[row][3-col], M[row1][col] |
| WANDER (16) | M[row1][col] | M[prev][col] | M[row][col] | M[row1][col] | M[row][col] (not on collision), M[row1][col] |
| WRAP (12) | M[row1][0] in round 0, else Z | Z | Z | Z | — |

Z is the zero block and P is `pad(params)`.

**Setup0 writes one round early.** This is the least obvious entry in the
table. A squeeze must store the state *before* its round. In this datapath,
however, all write data comes from the round output. The output of the
previous round is exactly that state. So the first squeeze is written in the
last BOOT1 round, and the next three in Setup0 rounds 0-2. Setup0 round 3
writes nothing. This keeps the total at 24 + 4 + 4 + 8 + 16 + 12 = 68 rounds,
the figure the paper gives. It is this design's way of meeting the algorithm.
The paper does not describe it.

## Pipelining: eight hashes in one loop

In the basic architecture (`PIPE_STAGES = 1`), the round is purely
combinational and one hash finishes in 68 cycles. The critical path runs from
the RAM read ports through the adder, the round and the XORs to the RAM
write ports.

The default, `PIPE_STAGES = 8`, cuts the round into eight pieces. A round is
eight "add, then xor-and-rotate" steps: four for the column G layer and four
for the diagonal G layer. Seven registers sit inside the round, one after
each step except the last. The eighth register of the loop is the duplex
state register. The loop therefore holds eight independent hashes, and each
of them advances by one round every eight cycles. The paper states that it
uses eight stages, but not where the registers sit; even spacing is this
design's choice. Other settings are 4, 2 and 1.

Each hash carries a small **context** with it through the pipeline: phase,
round or column number, row and row1, and its RAM region (slot). The context
travels in a shift register of the same depth as the data.

* When a context leaves the last stage, it is next to the round output it
  describes. The writes for that round are issued in that cycle.
* The next context is formed from it. Wandering needs
  `row1 = round output word 0 mod 4` at the end of a row, so this step uses
  the round output too.
* The qa/qb addresses of the next round come from the next context, one
  cycle ahead, because of the RAM's read latency.
* qc and qd feed the XORs at the *end* of the round, so their addresses come
  from the context as it passes stage PIPE_STAGES-2. That is one cycle before
  the round output appears. The paper's point is the same: only the control
  of qc/qd is delayed, not 768-bit data.

A new hash may enter when the context leaving the loop is idle or is on its
last Wrap-up round. The slot is then handed over in the same cycle. Results
therefore come out in the order the inputs went in.

Each hash has its own 16-cell RAM region, plus the two shared constants:
8 x 16 + 2 = 130 blocks of 768 bits. Slots take turns, so two hashes never
access the RAM in the same cycle.

## The 4-read / 2-write memory

A Wandering round reads three cells (row1, prev, row) and writes two. The
pipelined schedule also reads row1 a second time, on qd. An FPGA block RAM has
two ports. Following the paper, `lyra2_mpram` gets four read ports and two
write ports in two ways:

* **Replication.** Two copies of a two-port RAM (`lyra2_tdp_ram`). Both
  copies take both writes. Copy 0 serves qa and qb; copy 1 serves qc and qd.
* **Multipumping.** The RAMs run on `clk2x`, twice the core clock, with
  rising edges aligned. On the clk2x edge that coincides with a core clock
  edge, both ports of both copies write the two words from the core cycle
  that just ended. The read addresses of that cycle are captured at the same
  edge. On the clk2x edge in mid-cycle, the same ports read.

Seen from the core clock, the memory is synchronous-read with a latency of
one cycle. A read issued in cycle n returns in cycle n+1, and already sees the
writes issued in cycle n. The schedule depends on this write-before-read
order in several places:

* Setup2 row 3 reads M[2][0] right after it was written.
* The first Wandering row reads M[3][0] the same way.
* The pipelined schedule reads the next round's qa/qb in the cycle the last
  round's writes go in.

The core finds the clk2x phase by comparing a toggle flop on clk with its
copy on clk2x. The ordering and the phase detector are this design's choice.
The paper names the technique (LaForest and Steffan's multi-ported memories)
but not the circuit.

The two constant blocks are written by the controller in the first cycle
after reset, using both write ports. The paper says only that they sit at
known addresses.

## Interface and timing of `lyra2_core`

| port | dir | width | meaning |
|---|---|---|---|
| clk | in | 1 | core clock |
| clk2x | in | 1 | RAM clock, 2 x clk, rising edges aligned with clk |
| rst_n | in | 1 | asynchronous reset, active low |
| in_valid / in_ready | in / out | 1 / 1 | a pwd is taken at a clk edge where both are high |
| in_pwd | in | 256 | pwd |
| out_valid | out | 1 | one-cycle pulse |
| out_k | out | 256 | K |

Vectors are little-endian. Word i is bits [64i+63:64i], and byte j of the
byte string is bits [8j+7:8j]; this matches the Lyra2 reference code.

`in_ready` is low in the cycle after reset while the constants are written.
After that it is high whenever the slot coming round is free. `out_valid`
comes exactly `68 x PIPE_STAGES + 1` clk edges after the edge that accepted
the input: 545 at the default. Given inputs back to back, the core accepts
eight hashes per 544 cycles. At the paper's clock frequencies that is
175 MHz / 68 = 2.57 MHash/s and 250 MHz / 68 = 3.68 MHash/s. This RTL has not
been placed and routed, so whether it reaches those clocks is not known.
Generic synthesis gives 8,868 flip-flop bits, against the paper's 8,296
registers, and 2 x 130 x 768 RAM bits.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| PIPE_STAGES | 8 | lyra2_core, lyra2_ctrl, lyra2_duplex, blake2b_round | loop registers = hashes in flight (1, 2, 4, 8) |
| LYRA_T, LYRA_R, LYRA_C, LYRA_K | 1, 4, 4, 256 | lyra2_pkg | Lyra2REv2 instance; the controller's row rules assume exactly these |
| REG_AFTER | 0 | blake2b_g | register after each of the four G steps (set by blake2b_round) |

## Files

| file | contents |
|---|---|
| rtl/lyra2_pkg.sv | widths, IV, pad(params), phase enum, context struct, rotations |
| rtl/blake2b_g.sv | G function with optional step registers |
| rtl/blake2b_round.sv | one BLAKE2b round, pipelined |
| rtl/lyra2_duplex.sv | state register, input XOR, round |
| rtl/lyra2_feed.sv | word-wise adder and duplex input multiplexer, pwd register |
| rtl/lyra2_writeback.sv | the two write-back XOR blocks, rotation, collision path |
| rtl/lyra2_tdp_ram.sv | two-port block RAM |
| rtl/lyra2_mpram.sv | 4R/2W memory: replication plus multipumping |
| rtl/lyra2_ctrl.sv | per-hash contexts, schedule, addresses, constant initialisation |
| rtl/lyra2_core.sv | top level |
| tb/lyra2_ref_pkg.sv | behavioural Lyra2 reference (straight from the algorithm) |
| tb/tb_*.sv | one self-checking testbench per module, plus `tb_lyra2_core_iter` |

## Verification

Every testbench checks against values computed independently of the RTL and
ends with a line `TB_RESULT checks=N failures=M`.

* `tb_lyra2_core` runs the core at its default parameters. It hashes 27
  passwords: three with K values fixed in the file, computed by a separate C
  model of Lyra2REv2's Lyra2, and 24 random ones checked against
  `lyra2_ref_pkg`. The first half arrive with random gaps and the rest back
  to back. The testbench checks:
  * every K, in order;
  * every latency, and the back-to-back throughput;
  * that each mechanism happened: input stalls, Wandering-row collisions
    (their number must match what the reference predicts), reads of a cell
    written in the same cycle, hand-over of a finishing slot, and a full
    pipeline.
* `tb_lyra2_core_iter`, `tb_lyra2_core_p2` and `tb_lyra2_core_p4` run the
  same test with PIPE_STAGES = 1 (the basic architecture), 2 and 4.
* `tb_lyra2_ctrl` rebuilds, from the algorithm, the reads and writes of every
  round of three hashes and compares them, cycle by cycle, with the
  controller's outputs.
* The testbenches of the smaller blocks use random stimulus against a model:
  G, the round (including its latency), the duplex loop, the adder and
  multiplexer, the XORs, the two-port RAM and the 4R/2W memory (including
  write-before-read).

The fixed K values come from the C model, not from published Lyra2REv2 test
vectors. The agreement between the C model, the SystemVerilog reference and
the RTL shows that all three implement the same algorithm. It does not rule
out a misreading of the Lyra2REv2 reference code shared by both models.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --top-module tb_lyra2_core \
  -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/lyra2_pkg.sv tb/lyra2_ref_pkg.sv tb/tb_lyra2_core.sv -o sim
./obj_dir/sim
```

The same command runs every other testbench with its name in
`--top-module` and its file in place of `tb/tb_lyra2_core.sv`. The full-size
core test runs in well under a second.

## Departures from the paper and open points

* The paper names one 12-round "Bootstrap" state, for `pad(params)`. Here the
  `pwd‖pwd` absorb before it is a phase of its own (BOOT0), since both
  absorbs take 12 rounds.
* Setup0 writes one round early (see the schedule above).
* Where the pipeline registers sit inside the round, how the start state is
  loaded, how the constants get into the RAM, the RAM phase ordering and
  region layout, the valid/ready interface, the reset, and the output
  register are all this design's choices. The paper does not describe them.
* The paper's results are for Xilinx parts, with the BRAMs mapped by the
  vendor tools. Here the RAM is a plain array, which an FPGA tool can map to
  block RAM. The 2x clock must come from outside, for example from a PLL.
* The other six hash functions of Lyra2REv2 are not part of this core.
