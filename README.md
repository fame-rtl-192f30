# FAME: an FPGA accelerator for matrix multiplication on encrypted data

Multiplying two matrices that are both encrypted under the CKKS homomorphic
encryption scheme is dominated by *homomorphic linear transforms*: each is a
long series of ciphertext rotations, and every rotation needs a key switch.
At realistic parameters, a single ciphertext (Ct) is several megabytes to tens
of megabytes. A straightforward schedule therefore streams whole ciphertexts
to and from off-chip memory for every sub-operation.

FAME avoids this by working on one *limb* at a time instead of one Ct at a
time. A limb is the residue polynomial of a Ct modulo one 54-bit prime. The
limb loop becomes the outer loop and the rotation loop the inner one. Each
limb then passes through automorphism, key inner product and
diagonal-times-ciphertext accumulation while it is still on chip. Only one Ct
and a few working limbs must stay resident.

The hardware that runs this schedule is small and regular. It is a few
*processing elements* (PEs), each `dp` lanes wide. Each PE has:

* a modular ALU array;
* a four-bank scratchpad;
* a streaming permutation circuit that performs both NTT reorderings and
  automorphism index maps at `dp` coefficients per cycle.

The PEs are joined by a `dp`-wide bus, and they reach HBM through 32 pairs of
256-bit asynchronous FIFOs.

This repository holds synthesizable SystemVerilog for that architecture, plus
self-checking testbenches. By default it is built in the "FAME-S"
configuration:

* 2 PEs, each with `dp` = 128 lanes;
* 4 banks × 256 rows × 128 × 54 bits per PE, which is 864 KiB of scratchpad;
* ring degree N = 2^13, so one limb is 64 rows.

A number of parts are not specified by the architecture description. These
include the PE control and instruction set, the permutation schedule format,
the HBM word layout and the bus protocol. They are this design's own, and
they are marked as such below and in each file's header.

---

## 1. Data: residues, rows and limbs

Every coefficient is a residue modulo a prime `q` with 2^53 ≤ q < 2^54
(`fame_pkg::coeff_t`, 54 bits). Every datapath moves a **row**: `DP`
coefficients side by side. A limb of N coefficients is `N/DP` consecutive
rows (`POLY_N/DP` = 64 by default). Coefficient `k` of a limb lives in
row `k / DP`, lane `k % DP` when it is loaded. After that, the permutation
circuit moves coefficients between rows and lanes as each algorithm step
needs.

All lanes of a PE work on the same limb at a time, so they share one modulus.
The host sends `q` together with `mu = floor(2^108 / q)` (55 bits). It does so
with a `SETQ` instruction whenever the limb's prime changes.

## 2. Modular ALU array (`mod_addsub`, `barrett_mul`, `mod_alu`, `mod_alu_array`)

Each lane has one modular multiplier, followed by one modular adder/subtractor:

```
 a,b ──► barrett_mul (4 stages) ──► p = a·b mod q ─┐
 c ─────────── delay 4 ────────────────────────────┴─► mod_addsub ─► reg ─► y
```

| op      | result          | typical use                              |
|---------|-----------------|------------------------------------------|
| ADD/SUB | a ± b           | Ct additions, butterfly halves           |
| MUL     | a · b           | twiddle / plaintext multiplications      |
| MAC     | c + a · b       | key and diagonal inner products, NTT top |
| MSB     | c − a · b       | NTT bottom half                          |

For ADD and SUB, `a` and `b` bypass the multiplier through matched delay
lines, so every operation has the same latency. That latency is 5 cycles
(`ALU_LAT`), and the lane takes a new input every cycle.

**Barrett reduction** with k = 54 is computed in four stages:

1. x = a·b (108 bits).
2. t = (x >> 53) · mu.
3. r = x − (t >> 55) · q. Only the low 56 bits are kept, because r < 3q.
4. At most two conditional subtractions of q.

The adder assumes both inputs are already below q and applies one correction.

## 3. Streaming permutation circuit (`spatial_perm_net`, `temporal_perm`, `perm_ctrl`, `perm_circuit`)

This is the least obvious part of the design. The NTT needs butterfly
reorderings, and an automorphism X → X^g sends coefficient `k` to `g·k mod N`
with a sign. Both are fixed permutations of a whole limb. A limb is spread
over `N/DP` rows, and coefficients must cross rows as well as lanes. A
`DP`×`DP` crossbar would be too big. The circuit therefore factors every
permutation into space, then time, then space again:

```
 row j ─► input-side network ─► DP buffers of N/DP words ─► output-side network ─► row j'
          (log DP stages of      (each buffer read at       (mirror image of the
           DP/2 2x2 switches)     its own address)           input-side network)
```

* **Input-side spatial network.** At stage `s`, the lanes are split into
  groups of `DP >> s`. In each group, switch `i` takes lanes `2i` and `2i+1`.
  It sends one to position `i` (upper half) and the other to position
  `H + i` (lower half); when the switch is set, the two are crossed. This
  gives `log2(DP)` stages of `DP/2` switches, which is 448 switches for
  DP = 128. The **output-side network** is the exact mirror. Switch `n` of
  stage `s` is bit `s·DP/2 + n` of the switch word. The wiring is written
  out in `spatial_perm_net.sv`, and the testbenches model it recursively.
* **Temporal network.** There are `DP` simple dual-port buffers of
  `N/DP` words, one per lane. Row `j` of the write phase is written to
  address `j` of every buffer. In the read phase, buffer `i` is read at its
  own address `rd_addr[j][i]`. This lets a coefficient move from any input
  row to any output row.
* **Schedule memory** (`perm_ctrl`). This takes the place of an on-chip
  address generator. For each of `NSCHED` stored permutations, and each
  step `j`, it holds one word `{sw2, rd_addr[DP-1..0], sw1}`, which is
  2·448 + 128·6 = 1664 bits at the defaults. The host writes these words
  through `cfg_we/cfg_addr/cfg_data`, with `cfg_addr = {schedule, step}`.
  A `PERM` instruction selects a schedule.

**Timing.** One limb is permuted in two phases:

* The **write phase** has N/DP steps, one row per cycle.
* The **read phase** can start two cycles after the last write step. It has
  N/DP steps.

Output row `j` leaves 3 cycles after read step `j`. The read phase of one
limb cannot overlap the write phase of the next, because there is only one
set of buffers. The sustained rate is therefore about half a row per cycle:
133 cycles per 64-row limb, including the gap and the pipeline. See §8.

**Computing a schedule.** Any switch settings, together with any read order
that is a permutation of 0..N/DP−1 in every buffer, give *some* valid
permutation of the limb. This is how the testbenches use random schedules.
To realise a *given* permutation π, the host proceeds in two steps:

1. **Choose buffers.** Treat input rows and output rows as the two sides of
   a bipartite multigraph, with one edge per coefficient (from its source row
   to its destination row). Every vertex has degree `DP`, so the edges can
   be coloured with `DP` colours, one per buffer. In each input row and each
   output row, every buffer then appears exactly once.
2. **Set the switches.** Set `sw1[j]` so that row `j`'s coefficients reach
   their buffers, and `sw2[j]` so that the gathered row reaches its output
   lanes.

A single log-depth network cannot realise every lane map. The colouring
therefore has to be chosen, as in the streaming-permutation-network
literature, so that both per-row maps are routable. This routing has not
been worked out or tested here for the NTT and automorphism maps.

This repository does not contain a schedule compiler.

## 4. Scratchpad (`scratchpad`)

Four banks of `BANK_DEPTH` rows × `DP` coefficients. Each bank can do one read
and one write per cycle (simple dual port), and a read returns its data one
cycle later.

Six read clients and four write clients address the scratchpad:

| client        | reads      | writes |
|---------------|------------|--------|
| ALU           | a, b, c    | d      |
| permutation   | source     | dest   |
| HBM transfers | STORE      | LOAD   |
| bus transfers | SEND       | RECV   |

Each client names a bank and a row. Each bank's ports serve the client that
names it, so up to four reads and four writes can proceed per cycle on
different banks.

Conflicts are prevented by the PE control (§5), not arbitrated. Assertions
check that no bank ever sees two readers or two writers in the same cycle.

At the defaults, 4 × 256 × 128 × 54 bits = 864 KiB per PE. Larger
configurations only change `BANK_DEPTH` (§7).

## 5. PE control and instruction set (`pe_ctrl`, `alu_engine`, `perm_engine`, `xfer_engine`, `pe`)

The host streams instructions (`fame_pkg::instr_t`) into each PE over a
valid/ready handshake. Four **engines** run concurrently:

| opcode        | engine | banks used        | action                                             |
|---------------|--------|-------------------|----------------------------------------------------|
| `SETQ`        | –      | –                 | latch q and mu for later instructions              |
| `ALU`         | ALU    | a, b, (c), d      | `len` rows: d[i] = op(a[i], b[i], c[i])            |
| `PERM`        | perm   | a, d              | one limb from bank a through schedule `sched` into bank d |
| `LOAD`/`STORE`| HBM    | d / a             | `len` rows from / to the PE's HBM lanes            |
| `RECV`/`SEND` | bus    | d / a             | `len` rows from the bus / to PE `peer`             |
| `SYNC`        | –      | –                 | wait until every engine is idle                    |

Every operand is a `{bank, row address}` pair, and rows advance by one per
cycle.

**Hazard rule.** An instruction is dispatched only when two conditions hold:

* its engine is idle (otherwise `stall_busy` is raised);
* no running engine uses any of its banks (otherwise `stall_bank` is raised).

Until then, `instr_ready` stays low. Instructions are dispatched in order.
Because every bank an instruction touches belongs to one engine until that
engine is done, data dependences through the scratchpad are respected
without further bookkeeping.

An ALU instruction that names the same bank for two sources cannot be
served, because a bank has one read port. It is dropped, and the sticky
`err` flag is set.

**Timing.**

* **ALU instructions** issue one row of reads per cycle and write results
  5 cycles later, one row per cycle. A 64-row ALU instruction takes about
  70 cycles.
* **Transfers** move one row per cycle when the far side keeps up. An
  outbound transfer reads ahead into a two-entry queue, using read credits,
  so backpressure never loses a row.
* **PERM** takes about 2·N/DP + 8 cycles.

**Programs.** All CKKS sub-operations of the limb-wise datapath are
sequences of these instructions: NTT and iNTT stages (MAC/MSB plus PERM),
base conversion (MUL/MAC), automorphism (PERM), key inner product (MAC), and
diagonal inner product (MAC). Different banks let a LOAD or SEND of one limb
overlap the ALU work on another. The host program is not part of this
repository.

## 6. Moving data: HBM FIFOs, lane packing and the inter-PE bus (`async_fifo`, `lane_pack`, `lane_unpack`, `inter_pe_bus`, `fame_top`)

**HBM side.** There are 32 channels. Each has a read FIFO (HBM clock to
kernel clock) and a write FIFO (kernel clock to HBM clock), each 256 bits
wide and 16 entries deep. The FIFOs use Gray-coded pointers with two-flop
synchronisers, and their read data is valid while the FIFO is not empty
(show-ahead). The HBM controller and its AXI masters sit outside this
design: the top exposes the HBM side of the FIFOs (`rdf_*`, `wrf_*`).

**Row layout in HBM.** Channels `16p … 16p+15` belong to PE `p`. A row of
128 × 54 bits is 6912 bits, which is 27 words of 256 bits:

* coefficient `i` occupies bits `[54i+53 : 54i]`;
* word `w` is bits `[256w+255 : 256w]`, and the last word is zero-padded.

A row crosses in two beats. In beat `k`, channel `c` carries word
`16k + c`, so beat 0 uses all 16 channels and beat 1 uses channels 0–10.

`lane_pack` takes a beat when every channel it needs has a word. Two beats
form a row, which goes to the PE's LOAD engine. `lane_unpack` does the
reverse for STORE: it pushes a beat when none of the needed write FIFOs is
full.

The host must lay out data in HBM this way.

**Inter-PE bus.** The bus is `DP` coefficients wide and carries one row per
cycle:

* each PE offers a row with a destination PE number;
* a round-robin arbiter picks among the senders whose destination is ready;
* the receiving PE's RECV engine takes the row.

In the intended two-PE use, each PE runs the linear transforms of one input
matrix. The partial result limbs are then sent to the other PE for the final
accumulation.

## 7. Configurations and what fits

| parameter (top)  | FAME-S (default) | FAME-M      | FAME-L      |
|------------------|------------------|-------------|-------------|
| `NUM_PE`         | 2                | 2           | 1           |
| `DP`             | 128              | 128         | 256         |
| `BANK_DEPTH`     | 256              | ≈ 2250      | ≈ 4500      |
| `POLY_N`         | 8192             | 32768       | 65536       |
| scratchpad / PE  | 864 KiB          | ≈ 7.6 MB    | ≈ 30.4 MB   |

The `BANK_DEPTH` values are derived as scratchpad / (4 × DP × 54 bits).
`POLY_N` sets the depth of the permutation buffers (one limb). Only FAME-S
has been simulated and synthesised.

The default build holds the following:

* **N = 2^13 (the 80-bit-security set, log Q = 218).** A Ct is
  2 × 4 limbs × 64 rows = 512 rows, about 0.43 MB. A PE holds 1024 rows, so
  one Ct fits together with eight more limbs for keys, twiddles and
  plaintext diagonals. The 64×64, 64×16 and 16×64 matrix products of this
  set fit. They need the limb-wise schedule and a host program, which is not
  included.
* **N = 2^15 and N = 2^16 (128-bit security, for 128×128 and 160×160
  matrices).** These do not fit the defaults. A limb alone is 256 rows (a
  whole bank), and the permutation buffers must be 256 deep. They need the
  FAME-M or FAME-L parameters above.

## 8. Where this RTL departs from the published design

* **Permutation rate.** The published circuit sustains `dp` coefficients per
  cycle. Here, write and read phases of a limb alternate on a single set of
  buffers, which halves the sustained rate. Two buffer sets used ping-pong
  would restore it, at twice the buffer memory.
* **Address generation.** The original generates the automorphism and NTT
  addresses on chip. Here the host precomputes the per-step words into a
  schedule memory of `NSCHED` entries. For larger N this memory is large
  (`NSCHED × N/DP × 1664` bits at DP = 128).
* **Barrett pipeline.** The arithmetic is standard Barrett. The original's
  DSP-level pipeline, at 21 DSPs per ALU, is not reproduced. The 4-stage
  split here is this design's own, and no clock frequency was targeted.
* **Memory technology.** The choice of BRAM or URAM per bank, and two URAM
  banks for large configurations, is an implementation mapping and is not
  modelled.
* **Control.** The PE control, instruction set, engines, bank-ownership
  hazard rule, HBM row layout, channel split, FIFO depth (16), and bus
  arbitration are this design's own. No published detail exists for them.
* **Not included.** This design does not include:
  * the HBM controller and AXI masters;
  * the host program that expresses the matrix-multiplication algorithm
    (hoisted key switching, limb-outer loops) as instructions;
  * the schedule compiler.

## 9. Simulation and tests

Every block has a self-checking testbench in `tb/`, and each testbench
prints `TB_RESULT checks=… failures=…`. Reference models (the recursive
network models and modular arithmetic) are in `tb/tb_model_pkg.sv`. To
build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  --top-module tb_pe rtl/fame_pkg.sv tb/tb_model_pkg.sv tb/tb_pe.sv
./obj_dir/Vtb_pe
```

| testbench             | size                    | what it checks |
|-----------------------|-------------------------|----------------|
| `tb_mod_addsub`       | 54 bit                  | random and edge operands against exact arithmetic |
| `tb_barrett_mul`      | 54 bit                  | random products with gaps, corner operands on primes near 2^53 and 2^54, 4-cycle latency |
| `tb_mod_alu`          | 54 bit                  | all five operations with random moduli, 5-cycle latency |
| `tb_mod_alu_array`    | DP = 16                 | per-lane results with a shared op and q |
| `tb_spatial_perm_net` | DP = 16                 | both network forms against the recursive model |
| `tb_temporal_perm`    | DP = 8                  | independent per-buffer read addresses, read-first behaviour |
| `tb_perm_ctrl`        | DP = 8                  | schedule words, step counting, restart |
| `tb_perm_circuit`     | DP = 8, 8 rows          | whole-limb permutations, output a permutation of the input, 3-cycle latency |
| `tb_scratchpad`       | DP = 4                  | up to four reads and four writes per cycle on distinct banks, 1-cycle reads |
| `tb_pe_ctrl`          | –                       | dispatch, both stalls, bank exclusivity, SYNC, err |
| `tb_inter_pe_bus`     | 3 PEs                   | single transfer per cycle, work conservation, round-robin order |
| `tb_async_fifo`       | 256 bit × 16            | order and no loss across unrelated clocks, full/empty |
| `tb_lane_pack` / `tb_lane_unpack` | DP = 16, 3 channels | word layout, stalls on either side |
| `tb_pe`               | DP = 8, 32-row banks    | a program of LOAD/ALU/PERM/STORE/SEND/RECV against a bank scoreboard; one row per cycle; LOAD overlapping ALU; both stalls; err |
| `tb_fame_top`         | **defaults (FAME-S)**   | end to end: HBM words → FIFOs → PE 0 (two LOADs, MUL, ADD, PERM with a random schedule, STORE, SEND) → bus → PE 1 (RECV, LOAD, SUB, STORE) → FIFOs → HBM words, checked row by row |

`tb_fame_top` also checks the ALU rate. It requires that each of these
happened at least once: read FIFO full, write FIFO full, bank stall, engine
stall, a bus transfer, and a LOAD overlapping an ALU instruction. It runs at
full size in about 1600 kernel cycles and takes under a second to simulate
once built.

Each testbench has a watchdog, and every testbench was confirmed to fail on a
deliberately broken copy of its block.
