# Parallel interleaver subsystem for an HSPA+/LTE turbo decoder

A parallel turbo decoder splits each code block into windows and runs many
SISO (soft-in soft-out) decoders at once. Every half iteration, each decoder
produces one extrinsic LLR per cycle for each of its output lanes. The next
half iteration needs those LLRs in the *other* order: interleaved after a
natural-order half, natural after an interleaved one. With 32 or 64 LLRs in
flight per cycle, two problems follow. Addresses must be generated in
parallel, and many LLRs may target the same single-port memory module in the
same cycle (a memory conflict).

This RTL is the interleaver between the decoders and the extrinsic LLR
memories. Its three ideas:

1. **Balanced scheduling.** An LLR is always *written* to the place where the
   next half iteration will *read* it in order. Reads are therefore always
   sequential and never conflict. All conflict handling sits on the write
   side. Even half iterations (natural-order decoding) write in
   *deinterleave* mode, mapping natural index to interleaved position. Odd
   half iterations write in *interleave* mode, mapping interleaved position
   to natural index.
2. **DBCF write network** (double-buffer contention-free) for HSPA+. The UMTS
   interleaver is not contention-free, so writes collide. Every lane has a
   small FIFO, and every memory module has a small circular buffer with a
   router in front of it. Decoders never stall.
3. **One address generator for both directions.** The HSPA+ generator
   computes the interleaving and the deinterleaving addresses with the same
   `(a*b) mod c` kernel. Only its operands and lookup tables change. LTE's
   QPP interleaver is contention-free and needs no network.

The SISO decoders themselves are not part of this RTL. Their LLR outputs
enter through the top-level lane ports, and their in-order reads go through
the memory read ports.

## Configuration

| Item | LTE mode | HSPA+ mode |
|---|---|---|
| Block size K | 40 .. 6144 | 40 .. 5114 |
| LLR lanes (P_LLR) | 64 (16 Radix-4 decoders x 4) | 32 |
| Extrinsic memory modules used | 64 | 32 |
| Address generator per lane | QPP | unified HSPA+ |
| Write path | direct | DBCF, S=3, D_FIFO=8, D_buf=12 |

Further fixed sizes:
- Extrinsic LLRs are 6 bits. There are 64 modules of 160 words, which is K/P_LLR rounded up for HSPA+ K=5114.
- Channel LLRs are 5 bits. There are 16 single-port modules of 1152 x 10 bits (3K/16 for K=6144, two LLRs per word).
- A job has up to 11 half iterations (5.5 iterations).

The constants live in `rtl/tdec_pkg.sv`. The top's parameters default to
the sizes above.

## Memory layout

Address `a` goes to module `a / W`, word `a mod W`. Each module therefore
holds one contiguous segment, and decoder lane `l` reads module `l`
sequentially in the next half.

- LTE: `W = ceil(K/64)`.
- HSPA+: `W = ceil(R*C/32)`, where `R x C` is the UMTS interleaver matrix.

## HSPA+ address generation

The UMTS interleaver writes the K bits row by row into a matrix. R is 5, 10
or 20 rows; C is p-1, p or p+1 columns for a prime p. Each row is permuted
by `U_i(j) = s((j * r_i) mod (p-1))`, where `s` is the base sequence of the
primitive root of p. The rows are then permuted by a pattern `T`, and the
matrix is read out column by column, skipping the dummy positions beyond K.

The generator is split into four parts:

- **`hspa_preset_rom`**: the 52 primes 7..257 with their smallest primitive
  roots, and the four row patterns (the reversals for R=5 and R=10, and the
  two 20-row patterns A and B).
- **`hspa_preproc`**: runs once per block size. It finds R, p and C. It
  generates `s` and streams `s` and `s^-1` into every lane's RAM, one entry
  per cycle. It picks the primes `q_i` and permutes them into `r_i`. It then
  finds each `m_i = r_i^-1 mod (p-1)` by a sequential search. The special
  cases of the standard are handled: C = p+1 with the swapped last-row
  entries, C = p-1, and p = 53 for K = 481..530.
- **`hspa_param_ram`**: a 256 x 8 RAM. Each lane has two, one for `s` and
  one for `s^-1`.
- **`hspa_iag`**: one per lane, with a one-cycle latency. It has two modes:
  - *Interleave*: input is a matrix position `n`, with `j = n / R` and
    `i = n mod R`. Output is the natural index `T(i)*C + U(j)`.
  - *Deinterleave*: input is a natural index `k`, with row `a = k / C`. The
    column comes from `(s^-1(k mod C) * m_a) mod (p-1)`, applying the same
    C-case corrections. Output is the matrix position.
  - In both modes a single multiplier and `mod (p-1)` unit is shared.
    Output `ok` is low for dummy positions.

**Pruning choice.** The interleaved domain is kept *unpruned*: interleaved
addresses are the `R*C` matrix positions, dummies included, and the decoder
working in interleaved order simply gets `ok=0` for the dummies. This keeps
the generator stateless per lane. The cost is that interleaved-order
memories hold `R*C` rather than K entries; for K=5114 that is 5120.

## LTE address generation

`qpp_iag` evaluates `f(x) = (f1*x + f2*x^2) mod K` for interleave mode.
Deinterleave mode uses the inverse polynomial `g1*x + .. + g4*x^4 mod K`,
whose degree is 2, 3 or 4 depending on K. Both are evaluated directly with
reductions mod K after every multiply. The coefficients are configuration
inputs, so no table of the 188 LTE sizes is built in. Quadratic inverses
used in the tests:

- K=40: (3,10) has inverse (27,10)
- K=6144: (263,480) has inverse (2231,2784)

Because a QPP is contention-free for any segment size dividing K, LTE writes
go straight to the modules. A collision would only set the sticky flag
`lte_conflict`; this never happens for a valid QPP.

## The DBCF write network (HSPA+)

This is the least obvious part. Each cycle, each of the 32 lanes delivers at
most one new `(module, word, LLR)` packet, and each module can accept one
write per cycle.

- **Lane FIFO** (`lane_fifo`, depth 8). A new packet that is not accepted
  this cycle is pushed here. Each cycle a lane offers two candidates to the
  routers: its FIFO head and its new packet. A lane can therefore retire two
  packets per cycle, and its FIFO drains while the decoder keeps producing.
- **Buffer router** (`buffer_router`, one per module) contains:
  - `conflict_detector`: compares every candidate's module index with its own.
  - `prn_gen`: a 16-bit LFSR that picks a random starting candidate each
    cycle for fairness.
  - `priority_selector`: scans from that start and accepts up to
    `limit = min(S, D_buf - count + 1)` requests. The `+1` is the slot this
    cycle's memory write frees.
  - `circular_buffer`: register based, S write ports, read/write pointers.
  - `bypass_unit`: if the buffer is empty, one accepted packet goes straight
    to memory and the rest enter the buffer. Otherwise the buffer head is
    written and all accepted packets are appended.
- **Rejected packets** stay in (or enter) their lane FIFO and compete again
  next cycle. Nothing pushes back on the decoders. If a FIFO is full
  nevertheless, the packet is lost and the sticky `overflow` output is set.
- **End of half iteration.** The control unit ends a half iteration only
  after the decoders signal `dec_done` and the network reports `idle` (all
  FIFOs and buffers empty). The extra cycles this takes are reported as
  `half_cycles`.

**Decoder schedule sensitivity.** The network copes with random-looking
conflicts. It does not cope with systematic ones. In the interleaved half
iteration, lanes that start their windows in lock-step all sit on the same
matrix row in the same cycle. A row's natural indices lie in only 2-3
modules, so 32 LLRs per cycle meet about 3 writes per cycle and the FIFOs
overflow. Staggering the lanes' start points removes this: lane `l` begins
its window at offset `7*l`. The end-to-end test does so and also
demonstrates the lock-step overflow.

## Control

`control_unit` is a small FSM:

- Idle → (HSPA+ only) start preprocessing and wait.
- Set module size W.
- Per half iteration: RUN until `dec_done`, then DRAIN until the network is
  idle. Repeat for `max_half` half iterations.
- The write mode alternates deinterleave, interleave, and so on.

`turbo_top` wires everything together:

- 64 QPP lanes and 32 HSPA+ lanes, each enabled by the mode.
- One shared preprocessing unit.
- The DBCF network.
- The LTE direct-write multiplexer.
- 64 extrinsic memories (`ext_mem`: one write port, one registered read
  port).
- 16 channel memories (`channel_mem`: single port, registered read).

LLRs are delayed one cycle to line up with the address generators' output
register.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. To simulate one:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/tdec_pkg.sv tb/hspa_ref_pkg.sv tb/tb_turbo_top.sv --top-module tb_turbo_top
./obj_dir/Vtb_turbo_top
```

`tb/hspa_ref_pkg.sv` is an independent behavioural model of the UMTS
interleaver, written from the standard's description. It is used by the
HSPA+ testbenches:
- `tb_hspa_preproc`: preprocessing for block sizes covering all column cases.
- `tb_hspa_iag`: both modes of one lane for 15 block sizes, about 45k
  addresses.

`tb_turbo_top` runs the top at its default size:
- Jobs: HSPA+ K=5114, 40 and 530; LTE K=6144 and 40; two half iterations
  each.
- After every half iteration, a write monitor checks that every memory word
  got exactly its LLR, exactly once.
- The memories are then read back through the read ports.
- It counts the mechanisms it must see: preprocessing runs, conflict cycles,
  FIFO pushes, bypassed and buffered writes, both write modes, mode switches,
  LTE and HSPA+ halves, and channel-memory traffic.
- It ends with a lock-step HSPA+ run that must raise `overflow`.

Measured: HSPA+ K=5114 half iterations take 178 cycles against the ideal
160. The published figure for the same S/D_FIFO/D_buf is 10 extra cycles.
Ours includes the generator register and the control hand-over, and
depends on the decoder schedule above.

## Departures from the published architecture

- The `r_i` and `m_i` tables are computed by the preprocessing unit rather
  than stored in ROMs. `m_i` is found by a sequential search, which costs up
  to about 20 x 256 cycles per block-size change.
- Each HSPA+ lane holds private copies of `s` and `s^-1`: 32 x 2 x 256 x 8
  bits, about twice the storage of a shared arrangement.
- Lane FIFOs offer head and new packet together. The router interconnect is
  therefore 64 x S instead of 32 x S.
- The interleaved domain is unpruned (see above).
- QPP addresses are computed directly rather than recursively. This costs
  multipliers, but any index can be addressed in any order.
- Channel memories are not split into systematic and parity sub-banks.
- The SISO (Radix-4 XMAP) decoders are not included.
- Synthesis of the complete top is slow because of the 64 QPP lanes with
  full multipliers. The individual blocks synthesise quickly.
