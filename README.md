# EFFACT: a lean, streaming FHE accelerator in SystemVerilog

Homomorphic encryption (CKKS, BGV, BFV) turns every arithmetic step into work on
*residue polynomials*, or limbs: vectors of N = 2^16 integers, each reduced modulo one
54-bit prime. Earlier accelerators met that load with hundreds of megabytes of SRAM and
separate units for every kind of step. This design takes the opposite view. It has:

- only four kinds of arithmetic unit (add, multiply, NTT and automorphism);
- a multiply-accumulate mode in the NTT unit, so BConv-style sums do not need a unit of their own;
- 27 MB of SRAM, which holds exactly 64 limbs;
- a *streaming* path for data with only one consumer. Such data goes from HBM through a
  small FIFO into a unit, or from a unit back to HBM, and never takes an SRAM register;
- a scoreboard-based out-of-order control core. It keeps HBM transfers, NTTs and
  element-wise work running at the same time.

The RTL has the ASIC configuration as its defaults: 1024 lanes, N = 2^16, 54-bit words,
64 limb registers, 2048 modular multipliers and 3072 modular adders.

## Limbs, rows and lanes

A limb of N = 2^LOG_N words is stored as ROWS = N/LANES rows of LANES words. At full
size that is 64 rows of 1024 words, each row 55,296 bits wide. Every unit reads and
writes whole rows, and so does the HBM channel: one HBM transfer is one row.

- **Register addresses.** A row of the register file is addressed by `{register, row}`,
  which is 6 + 6 bits.
- **HBM layout.** A limb in HBM takes 64 consecutive row addresses.

Words are kept in **Montgomery form** x·2^54 mod q. `mont_mul(a, b)` computes
a·b·2^-54 mod q, so the product of two Montgomery-form values stays in Montgomery form.
Each modulus is loaded with its own q' = −q⁻¹ mod 2^54.

Constants that must undo or apply a conversion are prepared by software:

- **Doubly-Montgomery constants** (x·2^108 mod q) let one multiply move a value between
  the plain and the Montgomery form.
- **The 1/N of the inverse NTT** is folded into a later constant. The iNTT instruction
  therefore returns N·a.

The shared types, the opcode list and the lane arithmetic (`mod_add`, `mod_sub`,
`mont_mul`, `bitrev`) are in `rtl/effact_pkg.sv`.

## Instruction set

An instruction word (`instr_t`) has these fields, from the top bit down:

| field | bits | use |
|---|---|---|
| op | 4 | opcode |
| imm_f | 1 | second operand is `imm` instead of register `src1` |
| s1_stream | 1 | second operand streams in from HBM, starting at row s[src1] |
| d_stream | 1 | result streams out to HBM, starting at row s[dest] |
| mod | 5 | index into the 32-entry modulus table |
| dest, src0, src1 | 8 each | vector register (low 6 bits) or scalar register (low 4 bits) |
| imm | 64 | immediate |

| op | mnemonic | effect | unit |
|---|---|---|---|
| 1 | MMUL | dest = src0 · (src1 or imm) mod q | MMULU |
| 2 | MMAD | dest = src0 + (src1 or imm) mod q | MADDU |
| 3 | NTT | dest = NTT(src0), bit-reversed output; dest^1 is used as scratch | NTTU |
| 4 | INTT | dest = N · iNTT(src0), bit-reversed input; dest^1 is used as scratch | NTTU |
| 5 | MAC | dest = dest + src0 · (src1 or imm) | NTTU |
| 6 | AUTO | dest = σ_k(src0) with k = imm, NTT domain | AUTOU |
| 7 | LoadRes | dest ← HBM[s[src0] + imm …] | memory |
| 8 | StoreRes | HBM[s[dest] + imm …] ← src0 | memory |
| 9 | VecCopy | dest ← src0 | memory |
| 10 | SADDI | s[dest] = s[src0] + imm | core |
| 11 | SBNE | if s[dest] ≠ s[src0], then pc += imm | core |
| 15 | HALT | stop fetching; `halted` rises once everything has drained | core |

Streaming is the hardware form of *instruction merging*. Take a load whose only consumer
is a multiply. It becomes one MMUL with `s1_stream` set. The rows of the operand pass
from HBM through the inbound FIFO straight into the multiplier, and no register is
written. In the same way, `d_stream` sends a result that is consumed only by a store
directly to HBM. Only MADDU and MMULU use the streaming FIFOs.

## The control core (`ooo_core`)

**Front end (in order).**

- Fetch reads the instruction store `icache`. It has 4096 entries and a one-cycle read,
  and the host loads it.
- Decode executes the scalar instructions itself. Loops and address arithmetic therefore
  never use a unit, and branches need no prediction.
- A vector instruction becomes a micro-op (`uop_t`). Its modulus index is replaced by
  (q, q') from the modulus table. Its HBM row addresses are computed from the scalar
  registers.

**Scoreboard (out of order).**

- Micro-ops wait in a window of WIN = 4 entries.
- Each entry carries a 65-bit read mask and a 65-bit write mask: 64 vector registers,
  plus one bit that stands for HBM. Because of that bit, loads, stores and streams
  keep their program order among themselves.
- Each cycle, the oldest entry that meets all of these conditions issues:
  - its unit is idle;
  - its stream engine, if it needs one, is idle;
  - it has no RAW, WAR or WAW conflict with an older waiting entry;
  - it has no such conflict with an instruction still executing.
- One instruction issues per cycle. A younger instruction may pass an older blocked one.
- The five units are MADD, MMUL, NTT (NTT, iNTT and MAC), AUTO and memory
  (LoadRes, StoreRes and VecCopy).
- Masks are released when a unit reports `done`.

**Counters.** The core drives three counters as outputs:

- `n_issued`: instructions issued;
- `n_ooo`: issues that passed an older entry;
- `n_stall`: cycles in which the window was not empty but nothing issued.

## Element-wise units: MADDU and MMULU

Both units are LANES modular adders or Montgomery multipliers in a three-stage row
pipeline:

1. read two rows from the register file;
2. compute;
3. write one row.

A row enters the pipeline only when all of these hold:

- the streamed operand row is at the head of the inbound FIFO, if the operand is streamed;
- the outbound FIFO has at least three free slots, if the result is streamed.

Without streaming, a limb takes ROWS + 3 cycles from the cycle in which `start` is
sampled to the `done` pulse. Streaming only adds the cycles spent waiting on the FIFOs.

## The NTT unit (NTTU)

**Constant geometry.** A radix-2 NTT on N points has LOG_N stages. This unit uses the
*constant-geometry* ordering, in which every stage has the same data movement.

- **Forward stage.** For c = 0 … ROWS/2 − 1, it reads rows c and c + ROWS/2 and
  computes LANES Cooley–Tukey butterflies between them, lane by lane. It writes the two
  results to rows 2c and 2c + 1 of the other register of the pair (dest, dest^1).
- **Inverse stage.** This is the mirror image, with Gentleman–Sande butterflies. It reads
  rows 2c and 2c + 1 and writes rows c and c + ROWS/2.
- **Cost.** One stage takes ROWS/2 row-pairs and three pipeline cycles. The whole
  transform takes LOG_N · (ROWS/2 + 3) cycles, which is 560 at full size.
- **Output order.** The forward output is in bit-reversed order, and the inverse takes
  its input in that order. Because the coefficients are never reordered, the unit has no
  transpose or bit-reversal stage.
- **Ping-pong.** The data moves between dest and dest^1 from stage to stage. LOG_N is
  even, so the result ends in dest.

**Twiddle factors.** The reordering is moved onto the twiddle factors instead of the
data.

- The twiddle memory holds the forward table ψ^bitrev(i) in rows 0 … ROWS − 1. It holds
  the inverse table ψ^−bitrev(i) in rows ROWS … 2·ROWS − 1. ψ is a primitive 2N-th root
  of unity mod q.
- Take stage exponent u: u = s in forward stage s, and u = LOG_N − 1 − s in the inverse.
  Butterfly j = c·LANES + lane then uses table entry 2^u + (j mod 2^u).
- The host writes the table through `tf_we/tf_addr/tf_wdata`. One table serves one
  modulus. Generating twiddles on the fly from a few seeds is not built.

The transform is negacyclic. For bit-reversed output position p:

  A[p] = Σ a_i ψ^{(2·bitrev(p)+1)·i}

A pointwise product of two transforms therefore corresponds to multiplication in
Z_q[X]/(X^N + 1).

**Butterfly modes (`ntt_bfu`).** Every lane has one multiplier, one adder and one
subtractor. They can be wired in three ways:

| mode | outputs |
|---|---|
| CT | t = b·w; o0 = a + t; o1 = a − t |
| GS | o0 = a + b; o1 = (a − b)·w |
| MAC | o0 = a + b·w; the subtractor is unused |

In MAC mode the unit walks the rows of dest, src0 and src1 (or imm). It computes
dest += src0·src1 at one row per cycle, taking ROWS + 3 cycles per limb. Base conversion
is mostly such multiply-accumulate sums, so it can use the NTT unit while the NTT unit
would otherwise be idle.

## The automorphism unit (AUTOU)

A rotation of the slots applies the map X → X^k with k = 5^s mod 2N. In the evaluation
(NTT) domain this is a pure permutation: natural element j moves to element j·k + (k−1)/2 mod N.

The element layout in storage is as follows. Row r, lane c holds natural element
bitrev(c)·ROWS + bitrev(r); the bit-reversals are over 10 and 6 bits at full size. With
that layout:

- **Row level.** Every row goes to exactly one other row. Output row r′ reads source row
  bitrev((bitrev(r′)·k + (k−1)/2) mod ROWS).
- **Lane level.** Inside the row, the words are permuted by

  x′ ← (x′·k + off) mod LANES, with off = (bitrev(r′)·k + (k−1)/2) div ROWS,

  where x is a lane index after the first fixed network.

The row datapath therefore has three stages:

1. a fixed bit-reversal wiring;
2. an auto-mapping crossbar that computes (x·k + off) mod LANES per lane;
3. the same fixed wiring again.

One limb takes ROWS + 3 cycles.

Not built:

- the sign handling needed to apply σ in the coefficient domain;
- the shift/reverse mode that TFHE blind rotation would use.

## Memory system

**Register file (`register_file`).**

- It holds 64 registers × ROWS rows × LANES words, which is the 27 MB of SRAM at full size.
- It has nine synchronous read ports and six write ports. Each unit has its own ports,
  as listed in `effact_top.sv`.
- An assertion checks that no two ports write the same row in the same cycle.
- Banking of the physical SRAM is not modelled.

**Memory controller (`mem_ctrl`).** It contains three engines:

- **Load/store/copy engine.** It runs LoadRes, StoreRes and VecCopy at one row per
  transfer, with one register-file read port and one write port.
- **Stream-in engine.** It reads ROWS rows from HBM into the inbound FIFO. It issues a
  read only while (FIFO count + reads in flight) < depth, so responses can never
  overflow the FIFO.
- **Stream-out engine.** It drains the outbound FIFO to consecutive HBM rows.

The streaming FIFOs (`stream_fifo`) are 8 rows deep, with first-word fall-through.
Assertions check for overflow and underflow.

**HBM arbiter (`hbm_arbiter`).**

- Four requesters compete for the single HBM channel: load, store, stream-in and
  stream-out.
- Grants are round-robin.
- The HBM answers reads in order. A 16-entry tag FIFO remembers which requester each
  read belongs to and routes the response back to it.

Because streamed and register-file transfers compete for HBM, a slow NTT chained to a
load does not leave the HBM channel idle.

## Top level and host interface (`effact_top`)

**Host ports.** Before setting `run`, the host loads:

- the program (`ic_*`);
- the moduli with their q′ (`mt_*`);
- the twiddle tables (`tf_*`).

It then pulses `run`. The program starts at address 0. `halted` rises after HALT, once
the window and all units are empty.

**HBM port.** It is a valid/ready request of one row: `hbm_we`, `hbm_addr` and
`hbm_wdata`. Read data returns in order on `hbm_rvalid/hbm_rdata`, after any latency.

The HBM device, its controller, the host computer, the Ethernet/UDP board link and the
SRAM macros are outside the RTL.

## Timing summary (full size)

| operation | cycles |
|---|---|
| MMAD / MMUL / MAC / AUTO, one limb | ROWS + 3 = 67 from start to done |
| NTT / iNTT, one limb | LOG_N·(ROWS/2 + 3) = 560 |
| LoadRes / StoreRes / VecCopy | about ROWS transfers, paced by HBM `ready` and latency |
| issue | at most one micro-op per cycle; scalar instructions take only their decode cycle |

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The reference results are computed
in the testbench, independently of the RTL:

- **Element-wise units** (at reduced size): exact modular reference results, and the
  ROWS + 3 latency.
- **NTT unit**, at 4 lanes and N = 64 with q = 998244353:
  - a naive O(N²) negacyclic transform as the reference;
  - inverse(forward(a)) = N·a;
  - the MAC result;
  - the exact cycle count.
- **Automorphism unit**: several k, compared with the index formula.
- **FIFO, register file, arbiter, memory controller and instruction store**: random
  traffic against scoreboards.
- **Core** (`tb_ooo_core`): mocked units. Checks issue order, hazards and out-of-order
  passing.
- **`tb_effact_top`**: the whole design at 4 lanes and N = 16, running one program that
  has:
  - loads, stores and VecCopy;
  - streamed operands and streamed results;
  - NTT, iNTT, MAC and AUTO;
  - a scalar loop.

  All results are checked against references. It also requires every mechanism to
  happen at least once: out-of-order issue, issue stalls, inbound-stream stalls, HBM
  contention, and each NTT-unit mode.
- **`tb_he_kernels`**: the top at 4 lanes and N = 64, running the limb-level kernels
  that bootstrapping, logistic regression and ResNet-20 are built from:
  - a negacyclic polynomial product through NTT, MMUL and iNTT;
  - a rotation kernel through AUTO and iNTT;
  - a base-conversion style sum through MMUL and MAC with immediates.

  Its references come from the ring definitions (schoolbook product, X → X^5 with sign),
  not from an NTT.
- **`tb_effact_full`**: the top with every default parameter (1024 lanes, N = 2^16).
  - Steps: load a limb, NTT it, square it, store both.
  - Reference: an independent in-place Cooley–Tukey NTT.
  - It checks all 131,072 words and the 560-cycle NTT time.
  - It builds in about a minute and runs in under a second.

The behavioural HBM (`tb/hbm_model.sv`) has a fixed read latency and a random `ready`.

To simulate with plain Verilator, for example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/effact_pkg.sv tb/tb_effact_top.sv --top-module tb_effact_top -o sim
    ./obj_dir/sim

Replace the file and the top name to run any other testbench. The testbenches seed
nothing themselves; `+verilator+seed+N` changes the random traffic.

## Where this RTL departs from the source design

- **NTT convention.** The published forward NTT formula places the odd power on the
  wrong index. This RTL uses the standard negacyclic form given above, which is the one
  under which the convolution property holds.
- **Twiddles.** They come from a host-written table (2·ROWS rows), not from on-the-fly
  generation from seeds. The table holds one modulus at a time. A program that runs
  NTTs under several moduli needs the host to rewrite the table between them, which
  takes 2·ROWS cycles.
- **Automorphism.** Only the NTT-domain permutation is built. Sign handling for the
  coefficient domain and the TFHE shift/reverse mode are missing.
- **Memory.** The register file is one multi-ported array instead of banked SRAM macros.
  HBM is one row-wide channel instead of many channels.
- **On-chip network.** The source design places a network and arbiter between the SRAM
  banks, the streaming FIFO and the units. Here each unit has its own register-file
  ports, wired point to point. The only arbitration is for the HBM channel.
- **Core.** The window size (4), the issue policy, the instruction encoding, the
  16-entry scalar register file and the HALT instruction are this design's own choices.
  The source design specifies a scoreboard OoO core and a scalar subset, but not their
  details.
- **Streaming.** Only the add and multiply units can take a streamed operand or produce
  a streamed result. The instruction carries the merge explicitly in the `s1_stream` and
  `d_stream` bits.
- **Moduli.** The modulus table has 32 entries. That is L + 1 + α = 32 for the
  bootstrapping parameters (L = 24, dnum = 4).
- **Workloads.** CKKS bootstrapping, logistic-regression training and ResNet-20 use
  N = 2^16 and 54-bit moduli, so their limbs match this datapath. Their evaluation keys
  (about 256 limbs) exceed the 64 registers and must be streamed from HBM, as intended.
  TFHE bootstrapping cannot run, because it needs the missing automorphism mode.
