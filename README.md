# A three-stage pipelined KATAN / KTANTAN encryption core

KATAN and KTANTAN are lightweight block ciphers built from nothing but two
nonlinear feedback shift registers and an 80-bit key. This RTL implements
the *parallel-pipelined hybrid* organisation of these ciphers: an array of
plaintexts, each with its own key, streams through three stages joined by
unbuffered channels:

```
 plaintext array ─┐                    channel 1                channel 2
 key array ───────┴─► Stage 1: init ──{key,L1,L2}──► Stage 2: key schedule ──{L1,L2}──► Stage 3: generation ─► ciphertext array
                      (load L1/L2/key)                 & rounds                           (form ciphertext)
                                                         ▲   ▲
                                              key_schedule   ir_lfsr
```

While stage 2 is encrypting block *n*, stage 1 already holds block *n+1*
and stage 3 stores block *n−1*. One core is one of six ciphers, chosen at
elaboration: KATAN or KTANTAN with a 32, 48 or 64-bit block.

## The cipher in one page

The state is a block split over two registers, L1 (high part) and L2 (low
part):

| block | \|L1\| | \|L2\| | fa/fb per round | x1..x5          | y1..y6               |
|-------|-------|-------|-----------------|-----------------|----------------------|
| 32    | 13    | 19    | 1               | 12, 7, 8, 5, 3  | 18, 7, 12, 10, 8, 3  |
| 48    | 19    | 29    | 2               | 18, 12, 15, 7, 6| 28, 19, 21, 13, 15, 6|
| 64    | 25    | 39    | 3               | 24, 15, 20, 11, 9| 38, 25, 33, 21, 14, 9|

Plaintext bit *i* goes to L2[i] for *i* < |L2| and to L1[i−|L2|] above; the
ciphertext is read back the same way (bit 0 of L2 is the ciphertext LSB).
Each round computes

```
fa = L1[x1] ^ L1[x2] ^ (L1[x3] & L1[x4]) ^ (L1[x5] & IR) ^ ka
fb = L2[y1] ^ L2[y2] ^ (L2[y3] & L2[y4]) ^ (L2[y5] & L2[y6]) ^ kb
```

shifts both registers one place towards the MSB and inserts L1[0] = fb,
L2[0] = fa. For 48 and 64-bit blocks this step is repeated two or three
times within one round with the same ka, kb and IR. A full encryption is
254 rounds.

**Subkeys.** KATAN expands the key into a bit stream
k[j] = key[j] (j < 80), k[j] = k[j−80] ^ k[j−61] ^ k[j−50] ^ k[j−13], and
round *i* uses ka = k[2i], kb = k[2i+1]. KTANTAN never changes the key;
each round picks ka, kb from it with multiplexers driven by the round
counter T (see `ktantan_key_select`).

**IR.** The irregular-update bit comes from an 8-bit LFSR
s[n+8] = s[n] ^ s[n+1] ^ s[n+3] ^ s[n+5]; the same register serves as the
round counter T. Its first bits are 1111111000 1101010101 1110110011 …

The tap positions, the 48/64-bit register lengths, the IR sequence and the
KTANTAN selection network are those of the cipher's specification; the
reference model in `tb/` reproduces its published known answers
(KATAN32 7E1FF945 and 432E61DA, KATAN48 4B7EFCFB8659,
KATAN64 21F2E99C0FAB828A, KTANTAN32 22EA3988).

## Pipeline and timing

| stage | module | work per block | cycles |
|-------|--------|----------------|--------|
| 1 | `katan_stage1_init` | read entry *n* of both arrays, split plaintext into L1/L2, load key | 1 (hidden behind stage 2) |
| 2 | `katan_stage2_round` | `rounds` rounds, one per cycle | rounds + 1 |
| 3 | `katan_stage3_gen` | reassemble ciphertext, write entry *n* | 0 (same cycle as the hand-over) |

Stage 2 sets the pace. Its state machine is IDLE → RUN (one round per
cycle) → HOLD (result offered on channel 2). In HOLD it accepts the next
block in the very cycle its result leaves, so blocks follow each other every
`rounds + 1` cycles and stage 1 waits, with its next block ready, during
the rounds. A run of *N* blocks takes exactly

    N * (rounds + 1) + 3   cycles from the start edge to done (rounds ≥ 1),

e.g. 258 cycles for a single 254-round block and 2043 for a full array of
8. Throughput at clock *f* is block_bits · f / 255 for long runs.

**Channels** (`katan_chan_if`) behave like Handel-C channels: valid/ready,
a word moves in the cycle both are high, nothing is buffered. The sender
must keep valid and data steady until the transfer; an assertion in the
interface checks this in simulation.

## Using the core (`katan_pp_top`)

Parameters: `BLOCK_BITS` (32, 48, 64; default 32), `KTANTAN` (0/1,
default 0), `NUM_BLOCKS` (array depth, default 8).

1. Write plaintexts and keys: `pt_we`/`key_we` with `wr_addr`,
   `pt_wdata`, `key_wdata` (one entry per cycle, both arrays share the
   address).
2. Pulse `start` for one cycle with `num_blocks` (1..NUM_BLOCKS) and
   `rounds` (1..254, 254 for the standard cipher; 0 passes blocks through).
   Both are latched. Assertions flag a start while busy, a block count above
   `NUM_BLOCKS` or more than 254 rounds.
3. Wait for `done` (level, cleared by the next `start`); `busy` is high
   meanwhile.
4. Read the ciphertexts through `ct_raddr` → `ct_rdata` (combinational).

Reset (`rst_n`) is asynchronous and active low. The arrays are not reset.
Do not write the arrays while `busy`.

## Modules

| file | role |
|------|------|
| `rtl/katan_pkg.sv` | register lengths, taps and repetition count per block size |
| `rtl/katan_chan_if.sv` | stage-to-stage channel with hold assertion |
| `rtl/katan_array_mem.sv` | register array, one write and one combinational read port |
| `rtl/katan_ir_lfsr.sv` | IR bit and round-counter state |
| `rtl/katan_key_schedule.sv` | KATAN 80-bit subkey LFSR, or KTANTAN fixed key + selector |
| `rtl/ktantan_key_select.sv` | KTANTAN subkey multiplexers |
| `rtl/katan_round.sv` | combinational round (1–3 applications of fa/fb) |
| `rtl/katan_stage1_init.sv`, `katan_stage2_round.sv`, `katan_stage3_gen.sv` | the three stages |
| `rtl/katan_pp_top.sv` | arrays, stages, channels, run control |

## Where this RTL departs from the Handel-C original

* **One round per clock.** The original expresses each round as loops
  that move the register bits one at a time, and expands the whole
  subkey array (508 bits) before the first round. Here a round is one
  parallel register update and the key schedule is an 80-bit sliding
  window that advances two bits per round, giving the same subkeys.
  Consequently the cycle counts differ completely from the published
  FPGA figures (e.g. 2204 cycles reported for one KATAN32 block against
  258 here); no attempt is made to match them.
* **Update order.** The original's flowchart writes the new bits into
  L1[0]/L2[0] in the same step as, and drawn ahead of, the shift loops;
  its prose says the new bits enter after the shift. The RTL shifts first
  and then inserts, which is also what the cipher's test vectors require.
* **IR** is generated, not stored, and is not carried on channel 1;
  channel 1 carries the key itself instead of a key-array index.
* **Host interface**, array depth (8), the handshake details, the width of
  the round count (8 bits) and reset behaviour are this design's choices.
* **KTANTAN bit order.** The selection network follows the KTANTAN
  specification, but the only known-answer vectors available use all-zero
  or all-one keys, which cannot distinguish multiplexer bit orders. Treat
  the KTANTAN variants as unverified for general keys; the KATAN variants
  are checked against published vectors.
* Only the pipelined organisation is implemented; the original's purely
  sequential version, which it uses as a baseline, is not.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. They compare against `tb/katan_ref_pkg.sv`,
a bit-array reference written in the software style (expanded subkey
array, stored IR table, bit-by-bit shifting) that shares no code with the
RTL.

* `tb_katan_pp_top` runs all six ciphers end to end (8 blocks × 254
  rounds and 3 blocks × 5 rounds each), checks each ciphertext and the
  exact cycle count, and counts channel stalls, stage overlap, hand-overs
  in the same cycle, short runs, repeated-step rounds and KTANTAN blocks,
  failing if any never occurs.
* `tb_katan_workloads` encrypts one block of each of the six ciphers,
  the workload the original evaluation used, and prints cycles and bits
  per cycle (258 cycles, 0.124 / 0.186 / 0.248 bits per cycle for 32 / 48 /
  64-bit blocks).
* `tb_katan_pp_top_full` runs the default core (KATAN32, no overrides)
  over a full array including the two published KATAN32 vectors.
* Block tests: `tb_katan_round` (random states, all block sizes),
  `tb_katan_key_schedule` and `tb_ktantan_key_select` (all rounds, all
  256 counter states, one-hot keys), `tb_katan_ir_lfsr`,
  `tb_katan_array_mem`, `tb_katan_stage1_init` (random back-pressure),
  `tb_katan_stage2_round` (latency, back-to-back, slow receiver),
  `tb_katan_stage3_gen`.

To run one with Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv -Irtl rtl/katan_pkg.sv tb/katan_ref_pkg.sv \
  --top-module tb_katan_pp_top tb/tb_katan_pp_top.sv
./obj_dir/Vtb_katan_pp_top
```

All testbenches finish in well under a second of simulation time.
