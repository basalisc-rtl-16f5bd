# BASALISC FHE core — SystemVerilog model

Fully homomorphic encryption (FHE) under the BGV scheme turns every
multiplication of encrypted numbers into arithmetic on very large
polynomials: 65,536 coefficients each, with a coefficient modulus of more than
a thousand bits. The modulus is split into many 32-bit primes (a residue number
system), so a ciphertext becomes dozens of independent "residue polynomials"
of 65,536 32-bit words. Almost all of the work is then of three kinds:

* number-theoretic transforms (NTTs), which move a residue polynomial into the
  domain where polynomial multiplication is coefficient-wise;
* coefficient-wise modular multiply/add/accumulate, for example in key
  switching;
* fixed permutations of the coefficients (ring automorphisms), used for
  rotations of the encrypted data.

This RTL implements the processing core of the BASALISC accelerator
architecture for these operations. Its central idea is to treat a
65,536-point polynomial as a 256 × 256 matrix and do everything one matrix row
or one matrix column at a time. A row or column of 256 words is a **chunk**. A
65,536-point NTT becomes two passes of 256-point NTTs, one over columns and one
over rows. A banked memory with an XOR layout lets either a row or a column be
fetched in a single access, so the transposition between the passes costs
nothing.

```
          host (AXI write)                         DRAM (AXI4, 512 bit)
                |                                          ^
        +-------v-------+                          +-------+-------+
        | instr_queue   |                          |    axi_dma    |
        +-------+-------+                          +---^-------+---+
                |                                      |       |
        +-------v-------+  CTB port control            |       |
        |      tcu      |----------------+             |       |
        +-------+-------+                |             |       |
                | per-PE strobes    +----v-------------+--+    |
                |                   |        ctb          |<---+ load data
                |                   | 256 banks x 64 Ki w |
                |                   +----+-----------^----+
                |             bank order |           | bank order
                |                 +------v------+  +-+-------------+
                |                 | read perm   |  | write perm    |
                |                 | i -> i^c    |  | (a*i+b)^c     |
                |                 +------+------+  +-^---^---^-----+
                |          natural order |           |   |   |
                +------------------------+-----------+   |   |
                                 |       |               |   |
                          +------v-+  +--v------+        |   |
                          | mac_pe |  | ntt_pe  |--------+   |
                          +------+-+  | 4 units |            |
                                 |    | twiddle |            |
                                 |    | factory |            |
                                 |    +---------+            |
                                 +---------------------------+
```

## Residue arithmetic

Every datapath multiplier is a Montgomery multiplier (`mont_mul`). It returns
`a·b·2⁻³⁴ mod q`. It works only for primes whose bits 16..1 are zero and whose
bit 0 is one, that is `q ≡ 1 (mod 2¹⁷)`. For these primes `q⁻¹ ≡ 1 (mod 2¹⁷)`,
so the Montgomery quotient digit is simply the negated low 17 bits of the
running value. Two 17-bit digits reduce a 64-bit product to 32 bits, and a
final conditional subtraction gives a result in `[0, q)`.

Primes of this form are plentiful among the NTT-friendly primes a 2¹⁶-point
negacyclic NTT needs (`q ≡ 1 mod 2¹⁷`). Examples are 998244353, 469762049 and
3221225473.

Every constant the datapath multiplies by is given in Montgomery form
(`x·2³⁴ mod q`). This covers twiddle factors and MAC scalars. A product of a
Montgomery constant and a plain coefficient is then a plain coefficient again.

## The ciphertext buffer and its two orders

The `ctb` holds `PAGES` = 256 pages. One page is one residue polynomial seen as
a 256 × 256 matrix. There are 256 banks of 65,536 words each (64 MB in all):

* Element `(row, col)` of page `p` is stored in bank `row XOR col` at bank
  address `{p, row}`.
* A **row access** `r` addresses `{p, r}` in every bank. Bank `b` returns column
  `b XOR r`.
* A **column access** `c` addresses `{p, b XOR c}` in bank `b`. Bank `b` returns
  row `b XOR c`.

Either way every bank is touched exactly once. The port is single-ported: one
read or one write of a whole chunk per cycle, and reads return data one cycle
later.

Data leaves the memory in **bank order**: lane `b` is bank `b`. In both cases
lane `b` carries natural position `b XOR idx`. So one XOR permutation with
mask `idx` converts between bank order and natural order, for rows and columns
alike. Outside the core, chunks are kept in bank order. The DMA therefore moves
them without any reordering.

## Permutation PEs

`permutation_pe` sends input element `i` to output `((a·i + b) mod 256) XOR c`
(with `a` odd). It is an Omega network of 8 stages. Each stage is a perfect
shuffle followed by 128 two-by-two switches.

The configuration logic computes every element's destination and attaches it,
bit-reversed, as a routing tag. Each switch routes a word by the tag's lowest
bit and then drops that bit. Affine maps with odd `a` are known to pass an
Omega network without blocking. The XOR by `c` flips the same routing bit for
every word in a stage, so it cannot create a collision either.

A `conflict` output and an assertion flag any blocked setting. The randomised
testbench never sees one. The output is registered, so the latency is one
cycle.

The core has two instances:

* **Read permutation** (`GENERAL = 0`, only `i → i XOR c`): turns the CTB's
  bank order into natural order.
* **Write permutation** (general): turns results back into bank order with
  `a = 1, b = 0, c = idx`, or applies an automorphism step with other `a, b`.
  For a PERM instruction the read permutation output goes straight into the
  write permutation.

## The NTT PE

### Two passes

A negacyclic NTT of length `N = 256²` computes
`X[k] = Σ x[n]·ψ^((2k+1)n)` with ψ a primitive 2N-th root of unity.
Write `n = 256·n1 + n2`. The input matrix is then stored with row `n1` and
column `n2`.

* **Pass 1, one chunk per column `n2`:**
  1. pre-multiply element `n1` by `ψ^(256·n1)`;
  2. run a 256-point NTT;
  3. post-multiply output `k1` by `ω_N^(n2·k1)`, where `ω_N = ψ²`.

  The result is written back as column `n2` of an intermediate page.
* **Pass 2, one chunk per row:** pre-multiply element `n2` by `ψ^n2`, then run
  a 256-point NTT. There is no post-multiply.

Reading the intermediate page by rows instead of columns is the transposition.
The XOR layout makes it free.

Each `ntt_unit` is a radix-2 decimation-in-frequency network of 8 butterfly
layers, so its outputs come out in **bit-reversed** order. Output `p` of a
chunk holds frequency `bitrev(p)`.

After both passes, element `(p, j)` of the result page holds
`X[bitrev(p) + 256·bitrev(j)]`. Software that consumes NTT-domain data must
use that index map.

A unit has three stages:

| Stage | Multipliers |
|---|---|
| Pre-multiply | 255 |
| Butterfly network | 769 (butterflies with twiddle `ω⁰` have none) |
| Post-multiply | 255 |

It is pipelined with one register layer per butterfly layer. The latency is
10 cycles at radix 256 (`log2(RADIX) + 2`). It accepts one chunk per cycle.

The PE has four units. It hands chunks out round-robin, so results return in
the order the chunks arrived.

### Twiddle factory

Each twiddle set is one modulus in one direction. There are 112 sets: 56
moduli × forward/inverse. Set `s` is addressed as `{s, pass}`. The factory
stores only the following per set:

| Vector | Contents (Montgomery form) | Loaded with |
|---|---|---|
| pass-1 pre vector | `ψ^(256·i)`, i = 0..255 | TWLD, `tw_set = {s,0}`, `post_en = 0` |
| pass-2 pre vector | `ψ^i` | TWLD, `tw_set = {s,1}`, `post_en = 0` |
| seeds | `ψ^(2k) = ω_N^k`, k = 0..255 | TWLD, `tw_set = {s,0}`, `post_en = 1` |

For an inverse transform, use the inverse roots and apply the final `1/N`
scaling as a MAC step.

The butterfly twiddles `ω_256^j` are the even entries of the pass-1 vector.
They are wired from there rather than stored again. The four units share the
pre-multiply twiddles.

The post-multiply twiddles of chunk `k` are the 255 powers of the single seed
`ω_N^k`. A power generator per unit expands the seed into all powers. It has
8 register layers and 254 multipliers. Layer `L` computes
`w^j = w^(2^(L-1)) · w^(j-2^(L-1))`.

The powers for a unit appear exactly when its chunk reaches the post-multiply
stage. This replaces a 255-word-wide seed-per-chunk table with a single
32-bit word per chunk.

The twiddle selection (`sel_set`) is latched one cycle before a pass and is
used by every chunk in flight. The program must therefore wait (SYNC) before
changing set or pass.

## MAC PE

`mac_pe` has `LANES` identical lanes, one Montgomery multiplier and one
adder/subtractor each. There is a 16-entry register file (RF) of whole chunks
and an accumulator. The datapath is, per lane:

```
X = x_rf ? RF[rs1] : b            (b = broadcast 32-bit constant)
Y = y_rf ? RF[rs2] : a            (a = chunk from the CTB)
P = p_zero ? 0 : X
Q = q_prod ? mont(X, Y) : Y
R = ADD: P+Q | SUB: Q-P | ACC: ACC+Q | ACCSUB: ACC-Q      (all mod q)
ACC <= R ;  if rf_we: RF[rd] <= R                          (next edge)
```

Some typical uses:

* `ADD` with `p_zero` and `y_rf = 0` parks a CTB chunk in the accumulator or the
  RF.
* `ACC` with `q_prod` is a multiply-accumulate every cycle. For example, with up
  to 16 residue chunks kept in the RF, `ACC += w_i · RF[i]` is the inner loop of
  fast base extension in key switching.

The result appears one cycle after the operands. The core uses the
accumulator value as the write-back chunk.

## Micro-instructions

An instruction is 128 bits (`instr_t` in `basalisc_pkg`). Fields, MSB first:

| Field | Bits | Meaning |
|---|---|---|
| `op` | 4 | opcode, below |
| `qidx` | 6 | index into the 64-entry moduli table |
| `rd_en`, `wr_en` | 1+1 | read a source chunk / write a result chunk |
| `src`, `dst` | 17 each | chunk address `{page[8], idx[8], col}` |
| `mac` | 19 | MAC control `{x_rf, y_rf, p_zero, q_prod, alu[2], rs1[4], rs2[4], rd[4], rf_we}` |
| `tw_set` | 8 | twiddle set and pass `{set, pass}` |
| `post_en` | 1 | NTT: apply post-multiply (pass 1); TWLD: load seeds |
| `pa`, `pb` | 8+8 | PERM: `a` (odd) and `b` |
| `imm` | 32 | MAC constant, SETQ value, or DRAM chunk number |
| reserved | 6 | |

| Opcode | Action |
|---|---|
| NOP 0 | nothing |
| SETQ 1 | `moduli[qidx] = imm` |
| LOAD 2 | DRAM chunk `imm` → CTB `dst` (through the DMA) |
| STORE 3 | CTB `src` → DRAM chunk `imm` |
| MAC 4 | chunk `src` (if `rd_en`) through the MAC PE; result to `dst` if `wr_en` |
| NTT 5 | chunk `src` through the NTT PE with twiddle set `tw_set`; result to `dst` |
| PERM 6 | chunk `src` → `dst` with positions mapped by `i → (pa·i + pb) XOR dst.idx` |
| SYNC 7 | wait until every issued instruction and DMA transfer has finished |
| HALT 8 | stop issuing |
| TWLD 9 | chunk `src` → twiddle factory (pre vector or seeds, see above) |

## Scheduling: the traffic control unit

The `tcu` issues in order, at most one instruction per cycle. Nothing in the
datapath stalls once started, and every operation has a fixed latency. The TCU
therefore knows in advance in which cycle each result will need the single CTB
port.

For an instruction issued in cycle `t` (source read in `t`):

| Cycle | Event |
|---|---|
| t+1 | CTB data → read permutation (`c = src.idx`); STORE data → DMA |
| t+2 | natural-order chunk → MAC PE / NTT PE / write permutation / twiddle factory |
| t+3 | PERM result written to the CTB |
| t+4 | MAC result written to the CTB |
| t+13 | NTT result written to the CTB (t+3+NTT latency) |

A **reservation shift register** tracks future write slots. Entry `k` means
"the port writes `k` cycles from now". Each entry holds the destination and the
write-permutation settings. One cycle before the write, entry 1 drives the
write permutation PE and selects which unit feeds it. Entry 0 drives the CTB
write itself.

An instruction issues only if both of these hold:

* the port is free in cycle `t`, if it reads;
* its future write slot is free.

Otherwise it waits. Port priority in each cycle is:

1. a reserved write-back;
2. a DMA load that has arrived;
3. the read of a new instruction.

The TCU does not check data hazards between instructions. Programs are static,
so the program must place a SYNC between an instruction and any later one that
reads its result, or that changes the twiddle selection it uses.

Counters at the core's ports report:

* instructions issued;
* **stall** cycles (waiting for the port or a write slot);
* **SYNC wait** cycles;
* **DMA wait** cycles;
* NTT, MAC, PERM, LOAD and STORE counts;
* DMA chunk writes into the CTB.

## Host and memory interfaces

* **Instruction queue** (`instr_queue`): an AXI4 write-only subordinate. Every
  128-bit beat is one instruction, appended in order; the address is ignored.
  The queue holds 1024 entries. `wready` drops when the queue is full.
* **DMA** (`axi_dma`): an AXI4 manager with 512-bit data. DRAM chunk `k` is the
  1024 bytes at `k·1024`, in bank order. A chunk moves as one 16-beat INCR
  burst. One transfer is in flight at a time.

## Where this model departs from the BASALISC architecture

* **CTB width and clocks.** The published design reads or writes 2048
  coefficients (eight chunks) per 1 GHz CTB cycle. It runs the NTT PE at 2 GHz
  and the MAC PE as free-running asynchronous logic at 1.6 GHz.
  * This model has one clock and moves one 256-coefficient chunk per access.
    The core therefore instantiates the MAC PE with 256 lanes, although the
    module's default is the published 2048. The NTT PE accepts one chunk per
    cycle.
  * At 1 GHz this is 1/8 of the published CTB bandwidth. An NTT of a whole
    21 MB ciphertext (80 residue polynomials) takes 40,960 chunk cycles, about
    41 µs, against the published 11 µs.
* **Pipeline depth.** The published NTT units have 40 pipeline stages. Here
  each butterfly layer is one stage (10 in all), and the Montgomery multipliers
  are combinational.
* **Twiddle loading and seed storage.** The published design does not say how
  twiddles get into the factory. Here a TWLD instruction copies a CTB chunk.
  The seed memory keeps one seed per chunk; it is not reduced further.
* **Automorphisms.** The PERM instruction permutes within a chunk. A full ring
  automorphism also moves coefficients between chunks and pages. This model
  leaves that to the sequence of PERM instructions and their source and
  destination addresses. It has no instruction that does it in one step.
* **Outside the core.** The RISC-V configuration CPU, DDR4 and PCIe
  controllers, the AXI interconnect, JTAG, the inter-chip link and the I/O are
  not modelled. The core exposes its two AXI ports instead.
* **Instruction set.** The instruction encoding, the opcode set and the
  scheduling rules in the TCU are this model's own.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the block
against an independent model written in the testbench, and ends with a line
`TB_RESULT checks=<n> failures=<m>`.

| Testbench | What it establishes |
|---|---|
| `tb_mont_mul` | Montgomery product against `a·b·2⁻³⁴ mod q` for five primes, random and corner operands |
| `tb_ntt_unit` | 256-point unit against a direct DFT with pre/post twiddles; latency 10 |
| `tb_twiddle_factory` | pre and butterfly vectors, seed powers at exactly `1+log2(R)` cycles |
| `tb_ntt_pe` | a complete two-pass 256-point negacyclic NTT against the definition; all four units used |
| `tb_permutation_pe` | 200 random settings of `a` (odd), `b`, `c` for N = 256 on both instances; no conflicts |
| `tb_mac_pe` | all operand sources and ALU functions, RF writes; a 48-cycle multiply-accumulate kernel at one operation per cycle |
| `tb_ctb` | rows written, columns read and vice versa against a matrix model |
| `tb_instr_queue` | order, back-pressure at full, burst responses |
| `tb_axi_dma` | loads and stores through a randomly stalling AXI memory; burst fields |
| `tb_tcu` | cycle-exact prediction of every read, PE strobe and write-back for 1500 random instructions; SYNC rule; counters |
| `tb_basalisc_core` | end-to-end program on a 16 × 16 geometry |
| `tb_basalisc_core_full` | the same program with every parameter at its default |

The end-to-end program of `tb_basalisc_core` is run against a behavioural
AXI DRAM. It:

1. loads a polynomial and the twiddle tables;
2. runs both NTT passes;
3. runs MAC and PERM rows during the NTT write-backs, so that write-slot stalls
   occur;
4. stores the results and halts.

It checks the full NTT against the definition, the MAC and PERM rows, and
every counter. The test fails if stalls, SYNC waits or DMA waits never
happened.

`tb_basalisc_core_full` runs the same program at full size: 65,536-point
polynomials, 64 MB CTB, 512-bit DRAM port. It checks every 1024th NTT output
and eight MAC/PERM rows.

Results of the full-size run (4,171 checks, no failures):

| Counter | Value |
|---|---|
| Instructions issued | 1,085 |
| NTT | 512 |
| MAC | 16 |
| PERM | 8 |
| LOAD | 267 |
| STORE | 272 |
| Stall cycles | 528 |
| SYNC wait cycles | 60 |
| DMA wait cycles | 13,665 |

Each figure is a count of instructions or of cycles, not a measured time. The
DMA wait dominates because one 16-beat transfer is in flight at a time.

Verilator takes about 4 minutes to build this test and 16 seconds to run it.

To simulate a testbench with Verilator:

```
verilator --binary --timing --assert --top-module tb_basalisc_core \
    -y rtl rtl/basalisc_pkg.sv tb/tb_basalisc_core.sv -o sim
./obj_dir/sim
```

`verilator -Wall` may report a few warnings:

* unused high bits of the 8-bit page and index fields when `PAGES` or `LANES`
  are reduced;
* the unused AXI address and length inputs of the instruction queue.

The modules' opening comments explain them.

## Files

`rtl/`:

| File | Contents |
|---|---|
| `basalisc_pkg.sv` | types, instruction format, modular helpers |
| `mont_mul.sv` | Montgomery multiplier |
| `ntt_unit.sv` | one NTT unit |
| `power_gen.sv` | seed power generator |
| `twiddle_factory.sv` | twiddle storage and generation |
| `ntt_pe.sv` | four NTT units with their twiddle factory |
| `permutation_pe.sv` | Omega-network permutation PE |
| `mac_pe.sv` | multiply-accumulate PE |
| `ctb.sv` | ciphertext buffer |
| `instr_queue.sv` | instruction queue |
| `axi_dma.sv` | DMA |
| `tcu.sv` | traffic control unit |
| `basalisc_core.sv` | top level |

`tb/` holds one testbench per block, plus the full-size core test.
