# An iterative SHA-1 hash processor, replicated for throughput

This is synthesizable SystemVerilog for a SHA-1 hash processor built the
"iterative looping" way: one SHA-1 core executes exactly one of the 80 rounds
of the compression function per clock, so it hashes one 512-bit block every 80
clocks. Instead of pipelining the rounds, throughput is scaled by placing many
identical, independent cores side by side. The design reports up to 48 cores in
one mid-size FPGA (a Virtex-6 xc6vlx240t). At the reported 10.9 ns clock that is
48 × 512 bits / (80 × 10.9 ns) ≈ 28 Gbit/s of hashed data. The intended use is
workloads with many independent short messages, such as password recovery or
validation, or checking the integrity of many files.

The RTL reproduces the published block diagram block by block, with the same
block names (INIT, CN, CJ, DM, GW, SWk, GV, GF, GK, S1–S4, LR5, LR30, RA–RE,
HA–HE, CO). The publication leaves some points open: the message interface, the
maximum message size, reset, and the exact clock edge of the block-boundary
work. Those choices are this implementation's own and are listed below.

## SHA-1 in one paragraph

A message of K bits is extended with a single `1` bit, then zeros, then K as a
64-bit big-endian number. The zeros are chosen so that the total is a multiple
of 512 bits, giving L_i = ceil((K+65)/512) blocks. The five 32-bit hash words
start at 67452301, EFCDAB89, 98BADCFE, 10325476 and C3D2E1F0 (hex). For each
block, the working variables A..E start at the current hash and go through 80
rounds:

    A' = rotl(A,5) + f(B,C,D) + E + k + w[n]
    B' = A    C' = rotl(B,30)    D' = C    E' = D

Here f and k change every 20 rounds: choose, parity, majority, parity. w[n] is
the message schedule: words 0..15 are the block itself and
w[n] = rotl(w[n-3] ^ w[n-8] ^ w[n-14] ^ w[n-16], 1) after that. At the end of
the block, A..E are added to the hash words. The 160-bit digest is the
concatenation of the five hash words.

## The core (`sha1_core`)

```
 m,k_len ─► INIT ──z──► DM ──u[0..15]──► GW ──w──┐
            │  ▲         ▲ j                ▲ n  ▼
            │  └── CN ───┴── CJ             │   S2 (w+E) ─► S3 ─► S4 ─► RA ─► RB ─LR30─► RC ─► RD ─► RE
            │      n ──► GV ──v──► GK ──k──► S1 (f+k) ─┘          ▲ LR5(RA)
            │                └──► GF(RB,RC,RD) ─f─┘
            └─ h0 ─► HA..HE (hash += final A..E each block) ─► CO ─► hash, hash_valid
```

* **INIT (`sha1_init`)** takes the message and builds the padded message z_i in
  one clock, using barrel shifters: keep the first K bits, insert the `1`
  marker at position K, and place K at the end of block L_i−1. It registers z_i
  and L_i. It also runs the two loops. `load` restarts the counters and loads
  the initial hash. `run` is high while rounds execute. `done` marks the last
  round of the last block.
* **CN (`sha1_cn`)** is the 7-bit round counter n = 0..79. **CJ (`sha1_cj`)**
  is the block counter j, which advances when CN completes round 79.
* **DM (`sha1_dm`)** selects block j of z_i and cuts it into sixteen
  big-endian words u_j[0..15]. These stay unchanged for the block's 80 clocks.
* **GW (`sha1_gw`)** is the schedule. It is the part of the design that is
  least like a textbook implementation, so it is described in more detail
  below.
* **GV (`sha1_gv`)** turns n into the round group v = n/20, using
  comparators. v selects the round constant in **GK (`sha1_gk`)** and, through
  the GF-MUX, the nonlinear function in **GF (`sha1_gf`)**. GF computes all four
  functions in parallel.
* **S1..S4 (`sha1_add32`)** are four 32-bit adders. S1 and S2 work in parallel
  (V = f + k, Z = w + E), then S3 adds V + Z, then S4 adds rotl(A,5) to give
  the new A. **LR5 and LR30 (`sha1_lr`)** are wiring-only rotators.
* **RA..RE (`sha1_hvars`)** are the working registers.
* **HA..HE (`sha1_hupd`)** are hash-word registers, each with its own adder.
* **CO (`sha1_co`)** concatenates the five hash words into the 160-bit digest.

### The message schedule: 64 registers that fill themselves just in time

A common SHA-1 design keeps a 16-word shift register for the schedule. This
design instead gives each schedule word w[k], k = 16..79, its own unit
**SWk (`sha1_sw`)**. Each unit has an XOR of its four source words, a rotate
by one, and a register RWk. The units are wired as a fixed network: SW16 reads
u[13], u[8], u[2], u[0], SW19 reads sw[16], u[11], u[5], u[3], and so on up to
SW79, which reads sw[76], sw[71], sw[65] and sw[63]. An 80-input multiplexer,
the W-MUX, then picks w[n].

The detail that makes this work is the write enable. RWk loads only when
n = k−3. At that round the last of its sources, w[k−3], has become valid: it
is either a u word or the register of SW(k−3), which loaded at round k−6. The
XOR result is therefore correct exactly then. It is frozen from round k−2 on,
and read at round k. So every register is written once per block, one clock is
spent per schedule word, and the W-MUX always finds its word ready. The cost is
64 × 32 = 2048 flip-flops and a wide multiplexer per core, against 512 for a
shift register. The benefit is that the schedule logic is a single XOR level in
front of each register.

### Timing and handshake

* A message is offered with `start`, `m` (left-aligned, first bit in the
  MSB, bits past `k_len` ignored) and `k_len` (length in bits, 0..512·L−65). It
  is accepted on a clock edge where `start && ready`.
* If it is accepted at edge c, round n of block j runs in the clock after edge
  c + 80j + n. `hash_valid` is high for the one clock after edge c + 80·L_i,
  and `hash` holds the digest until the next one.
* `ready` is also high during the final round of the final block. A waiting
  message is therefore accepted on the same edge that finishes the previous
  one, and a stream of messages costs exactly 80 clocks per block with no gap.
  This matches the design's throughput formula R = 512·NI / (80·T_clk).
* At the edge that ends round 79, three things happen together. HA..HE add the
  final working values: A(79) straight from S4, and B(79)..E(79) from RA,
  LR30, RC and RD, i.e. the values the registers are about to take. RA..RE are
  loaded with the updated hash, ready for the next block. On the last block, CO
  captures the updated words. This keeps a block at 80 clocks instead of 81.
  The cost is that the hash adders sit behind S4 in the same clock path.
* Reset (`rst_n`, active low, asynchronous) clears the control state. The
  datapath registers (RA..RE, RW16..RW79) have no reset, because they are always
  written before they are read.
* Assertions check that a message fits in L blocks and that the loop counters
  stay in range.

## The processor (`sha1_assp`)

`sha1_assp` instantiates `NI` cores (default 48) with per-core ports packed as
arrays: `start[NI]`, `ready[NI]`, `m[NI]`, `k_len[NI]`, `hash[NI]` and
`hash_valid[NI]`. The cores share only the clock and reset. How messages are
distributed to the cores, and how results are collected, is left to the system
around it.

Parameters:

| parameter | default | meaning |
|---|---|---|
| `NI` (sha1_assp) | 48 | number of cores; the design was reported with 1, 4, 8, 16, 32 and 48 |
| `L` (sha1_assp, sha1_core, sha1_init, sha1_dm, sha1_cj) | 4 | largest message in 512-bit blocks; messages up to 512·L−65 = 1983 bits |

`L` sets the width of the message register (512·L bits per core) and of the
block multiplexer. For password-style workloads, L = 1 (messages up to 447
bits) gives the smallest core.

## Where this departs from, or fills in, the published description

* **Maximum message size L.** The description sizes CJ as log2(L) bits but
  gives no L. Here L = 4.
* **Message input.** The description does not say how a message enters INIT.
  Here the whole message arrives as a parallel bus, with a start/ready
  handshake, and is padded in hardware in one clock.
* **Rotator drawing.** The drawing of the rotate unit labels both shifters as
  left shifts ("<< s" and "<< (32−s)"). The equation next to it, which is the
  correct one, uses a right shift for the second; the RTL follows the equation.
* **Schedule equation.** The written schedule equation names the operands
  u_j[n−3], u_j[n−8], u_j[n−14] and u_j[n−16]. Those only exist for indices
  below 16. The GW drawing shows the intended operands, the earlier schedule
  words (e.g. SW79 takes sw[76], sw[71], sw[65], sw[63]), and the RTL uses
  them.
* **Output.** CO is described as producing "a serial signal" with the hash. A
  bit-serial output would need 160 clocks per digest, which is more than the 80
  clocks a one-block message takes. The output is therefore the parallel
  160-bit digest with a one-clock valid pulse.
* **Block-boundary timing.** The hash update and the reload of the working
  registers happen on the edge that ends round 79 (see above). The description
  fixes 80 rounds per block but not this timing.
* **Inputs of GF.** In the block diagram, the three wires into GF seem to
  leave from RB, the LR30 output and RC. The GF drawing and the equations both
  name its inputs B(n−1), C(n−1) and D(n−1), and the RTL uses those: RB, RC
  and RD. These are also the values SHA-1 requires.
* **The hd initial word** is written in the description as the decimal
  "0271733878". It is read as 271733878 = 0x10325476, the standard value.
* **Not reproduced:** the FPGA results themselves. These are the clock period
  (9.9–10.9 ns) and the register and LUT counts for each core count. The RTL has
  no device-specific parts.
* **A number in the throughput table.** For 32 cores, R = 512·32/(80·9.994 ns)
  = 20.49 Gbit/s, while the table lists 18.296. The other rows agree with the
  formula.

## Verification

Every module has a self-checking testbench in `tb/` that compares it against
values computed independently, in the testbench. `tb/sha1_ref_pkg.sv` is a
behavioural SHA-1 written from the standard. It pads bit by bit and runs the
rounds on arrays, and it is used as the reference by the larger tests.

| testbench | what it shows |
|---|---|
| `tb_sha1_lr`, `tb_sha1_add32`, `tb_sha1_gv`, `tb_sha1_gk`, `tb_sha1_gf` | rotators, adder, group decode, constants and round functions, on fixed and random values |
| `tb_sha1_sw`, `tb_sha1_gw` | RWk loads only at n = k−3; the schedule network gives the correct w[n] in every round of random blocks |
| `tb_sha1_cn`, `tb_sha1_cj`, `tb_sha1_dm` | counters wrap, hold and clear; block split is big-endian |
| `tb_sha1_init` | padded message and L_i at every boundary length (0, 447, 448, 511, 512, 959, 960, 1983) and random ones; load/run/done/ready sequencing |
| `tb_sha1_hvars`, `tb_sha1_hupd`, `tb_sha1_co` | register moves, hash accumulation, output order and valid pulse |
| `tb_sha1_core` | the standard vectors "" → da39a3ee…, "abc" → a9993e36…, the 448-bit two-block string → 84983e44…, plus 40 random messages up to 1983 bits; exact latency 80·L_i; back-to-back acceptance |
| `tb_sha1_assp` | all 48 cores at default size, 6 messages each, concurrently; checks digests and latency, and requires each of these to happen: one-block, multi-block, padding spill into an extra block, empty message, longest message, idle accept, back-to-back accept, several cores finishing in one clock |
| `tb_sha1_pwsearch` | the 6-digit numeric password search over all 10^6 candidates on 48 cores: finds the secret, and takes exactly 20834 × 80 = 1,666,720 clocks (≈ 18.2 ms at 10.909 ns, matching the design's "at most 20 ms" claim) |

Each testbench ends by printing `TB_RESULT checks=N failures=M`. To run one
with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/sha1_pkg.sv tb/sha1_ref_pkg.sv tb/tb_sha1_core.sv \
    --top-module tb_sha1_core -o sim
./obj_dir/sim
```

The other modules are found through `-Irtl`. The password search takes about a
minute; everything else takes well under a second.

## Changing it

* To change the number of cores, set `NI`. For a smaller core, set `L`, for
  example L = 1 for short passwords. Everything else is derived from these two.
* The block-boundary adders (HA..HE behind S4) are the likely critical path.
  If the clock matters more than the last 1/81 of throughput, register the
  block end and spend one extra clock per block. Then change the latency
  checks in `tb_sha1_core` and `tb_sha1_assp`.
* Because every SWk register is written at a fixed round, DM must hold u_j
  stable for the whole block. Any change that streams the message in word by
  word must keep that, or replace GW with a shift register.
