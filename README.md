# RPU: a 128-bit ring-arithmetic vector tile for homomorphic encryption

Fully homomorphic encryption (FHE) spends almost all its time on arithmetic
over polynomial rings. A polynomial of degree 2^16 is stored as several
"towers" (RNS residues). Each tower is 65,536 coefficients of up to 128 bits,
reduced modulo a prime of its own. The work is element-wise modular addition
and multiplication of such vectors, and number-theoretic transforms (NTTs).
An NTT is a sequence of butterflies separated by fixed data permutations.

The Ring Processing Unit (RPU) is a vector processor built only for this
work. It has no caches and no speculation, and does almost no dynamic
scheduling. The compiler places every vector in an explicitly addressed
scratchpad and orders the instructions. The hardware then keeps three
pipelines busy at once:

* **load/store** moves vectors between the scratchpad and the registers;
* **compute** runs modular arithmetic on 64 lanes;
* **shuffle** permutes elements between lanes.

Each pipeline has its own instruction queue. One small bit-vector, the
*busy board*, stops an instruction from overtaking another that uses the
same register.

This repository has synthesizable SystemVerilog for one RPU tile at its
full size:

* 64 vector registers of 512 × 128-bit elements;
* a 4 MiB vector data memory (VDM);
* a 32 KB scalar data memory (SDM).

It also has a self-checking testbench for every block and an end-to-end
testbench. That testbench runs a kernel using all 17 instructions on the
full-size tile.

## Contents

1. [The tile at a glance](#the-tile-at-a-glance)
2. [Instruction set](#instruction-set)
3. [Frontend: in-order dispatch into three queues](#frontend-in-order-dispatch-into-three-queues)
4. [The sliced, banked vector register file](#the-sliced-banked-vector-register-file)
5. [Compute: HPLE lanes and the LAWS engine](#compute-hple-lanes-and-the-laws-engine)
6. [Shuffles: the SBAR](#shuffles-the-sbar)
7. [Loads and stores: VBAR and the banked VDM](#loads-and-stores-vbar-and-the-banked-vdm)
8. [Scalar backend](#scalar-backend)
9. [Performance counters](#performance-counters)
10. [Throughput, and how the tile compares](#throughput-and-how-the-tile-compares)
11. [Where this RTL departs from or goes beyond the published design](#where-this-rtl-departs-from-or-goes-beyond-the-published-design)
12. [Simulating](#simulating)

## The tile at a glance

```
 host / control core                         tile mesh (external VDM port)
   | start, start_pc, done                            |
   | imem_*, sdm_*                                    |
+--v-----------------------------------------+        |
| frontend: IMEM -> decode -> busy board      |        |
|     |            \                          |        |
|     |  scalar ops  -> scalar_backend (SDM, SRF, MRF, ARF)
|     v                                       |        |
|  [LS queue]   [compute queue]   [shuffle queue]      |
+-----|--------------|----------------|--------+       |
      v              v                v                |
   lsu_ctrl       alu_ctrl         shuf_ctrl           |
      |              |                |                |
      |      vrf_arbiter (grants the VRF memories)     |
      |              |                |                |
      |   +----------v----------------v-------+        |
      +-->| 64 x hple: VRF slice + LAWS engine |        |
      |   +-----------------------------------+        |
      |                 ^   | two read beats           |
      |                 |   v                          |
      |                 sbar (shuffle crossbar)        |
      v                                                v
    vbar (lane <-> bank crossbar, collision serialising) <- external port
      |
    vdm: 64 banks x 4096 x 128 bit (4 MiB)
```

| Parameter | Default | Where it comes from |
|---|---|---|
| Word width `W` | 128 bit | published design |
| Vector length `VLEN` | 512 elements | published design |
| Vector registers | 64 | published design |
| Registers per VRF memory | 4 | published design (the smaller "Model 2" tile) |
| Lanes `NUM_HPLE` | 64 | this design's choice |
| Beats per vector | `VLEN/NUM_HPLE` = 8 | follows from the two above |
| VDM | 262,144 words = 4 MiB | published design |
| VDM banks | 64, word-interleaved | this design's choice |
| SDM | 2,048 words = 32 KB | published design |
| Instruction memory | 4,096 × 64 bit | this design's choice |
| Queue depth | 4 per queue | this design's choice |
| SRF / MRF / ARF | 64 / 16 / 16 entries | this design's choice |
| LAWS engine latency | 5 cycles, every operation | this design's choice |

A vector is processed one **beat** at a time. A beat is one element per lane,
so 64 elements, and 8 beats make a vector. Element `e` of every register
belongs to lane `e mod 64` and to beat `e / 64`. The 64 lanes always work on
the same beat. Everything between the lanes, in either direction, goes
through the SBAR or the VBAR.

The shared types and constants are in `rpu_pkg`: the instruction format,
queue entries, VRF port numbers and performance counters.

## Instruction set

Instructions are 64 bits wide:

| Bits | Field | Meaning |
|---|---|---|
| 63:59 | `op` | opcode |
| 58:53 | `rd` | destination vector register, or SRF/MRF index for SLOAD |
| 52:47 | `rd2` | second destination (butterfly) |
| 46:41 | `ra` | source a, or SRF index for VBCAST |
| 40:35 | `rb` | source b |
| 34:29 | `rc` | twiddle source (butterfly), stride (strided transfers), modulus-load flag (SLOAD) |
| 28:25 | `rm` | modulus register |
| 24:21 | `rar` | address register |
| 20:0 | `imm` | address offset, or the value for ASET |

| Opcode | Name | Effect |
|---|---|---|
| 0 | HALT | wait until every dispatched instruction has finished, then pulse `done` |
| 1 | ASET | `ARF[rar] = imm` |
| 2 | SLOAD | `rc == 0`: `SRF[rd] = SDM[ARF[rar]+imm]`; `rc != 0`: load modulus `MRF[rd]` from two SDM words (q, then mu) |
| 3 / 4 | VLOAD / VLOADS | `V[rd][e] = VDM[ARF[rar] + imm + s*e]`, with `s = 1` or `s = rc` |
| 5 / 6 | VSTORE / VSTORES | `VDM[ARF[rar] + imm + s*e] = V[ra][e]` |
| 7 | VBCAST | every element of `V[rd]` = `SRF[ra]` |
| 8 | VADDMOD | `V[rd] = V[ra] + V[rb] mod q` |
| 9 | VSUBMOD | `V[rd] = V[ra] - V[rb] mod q` |
| 10 | VMULMOD | `V[rd] = V[ra] * V[rb] mod q` |
| 11 | VBFLY | `V[rd] = V[ra] + V[rc]*V[rb]`, `V[rd2] = V[ra] - V[rc]*V[rb]` (mod q) |
| 12 | VCMP | `V[rd][e] = (V[ra][e] < V[rb][e])` |
| 13 / 14 | VUNPACKLO / HI | interleave the low (or high) halves of `ra` and `rb` |
| 15 / 16 | VPACKLO / HI | even (or odd) elements of `ra`, then those of `rb` |

The modulus of an arithmetic instruction is `MRF[rm]`. It is read when the
instruction is dispatched and travels with each beat through the engine. So
each instruction can use a different modulus, with no pipeline drain.

The instruction count, 17, is the published one. The encoding, and the exact
list beyond the names the published code sample shows, belong to this
design.

## Frontend: in-order dispatch into three queues

`frontend` fetches one instruction per cycle from its instruction memory.
The memory has a synchronous read, and the host writes it through `imem_*`.
A kernel starts with a one-cycle `start` and the address of its first
instruction.

Each decoded instruction works out a 64-bit mask of the vector registers it
uses, **sources and destinations alike**. Then:

* **Vector instruction.** If the mask overlaps the busy board, the whole
  frontend stalls. It also stalls if the target queue is full. Otherwise the
  instruction is pushed into its queue and its mask is set on the board.
* **ASET / SLOAD.** These go to the scalar backend, one at a time, in program
  order. The frontend waits while the backend is busy.
* **HALT.** The frontend waits until the busy board is empty, pulses `done`
  and goes idle.

Each pipeline clears an instruction's mask (`rel_*`) when it writes that
instruction's last result. A register is therefore free for reuse only once
it is really finished. This single rule covers every kind of hazard:

* read-after-write;
* write-after-read;
* write-after-write;
* an in-place shuffle reading a beat it has already overwritten.

The cost is a stall whenever two consecutive instructions touch the same
register.

**Scalar operands are resolved at dispatch.** This covers the VDM base
address (`ARF[rar] + imm`), the stride, the modulus and the broadcast value.
They are copied into the queue entry. A later ASET or SLOAD can then run
while older vector instructions are still queued, without a scalar
scoreboard.

An undefined opcode is skipped.

## The sliced, banked vector register file

The register file is the hardest part of the tile to follow. The register
file holds 64 × 512 × 128 bit = 4 Mbit. It is split two ways.

* **Slices.** Lane `j` owns elements `j, j+64, j+128, …` of every register.
  Each lane's slice is local to its LAWS engine, so arithmetic never crosses
  lanes.
* **Memories.** Inside a slice, four registers share one single-port memory.
  That gives 16 memories of 4 registers × 8 beats = 32 rows each. Register
  `r` lives in memory `r/4`, at row `(r mod 4)*8 + beat`.

The three pipelines see the file through ten logical ports:

| Port | Kind | Used by |
|---|---|---|
| `RP_CA`, `RP_CB`, `RP_CW` | read | compute: operands a, b, twiddle |
| `WP_C0`, `WP_C1` | write | compute: results (`WP_C1` for the butterfly's second result) |
| `RP_S0`, `RP_S1` | read | shuffle: two source beats |
| `WP_SH` | write | shuffle: destination beat |
| `RP_ST` | read | store |
| `WP_LD` | write | load |

Ten ports over 16 single-port memories work only if, in any cycle, the
accesses go to different memories. The published design leaves this to the
compiler's register allocation.

This RTL adds a **bank arbiter** (`vrf_arbiter`, shared by all slices), so a
badly allocated program is slower but never wrong. Every cycle each pipeline
presents its requests as (register, beat) pairs, and the arbiter grants each
memory once:

* writes come first, in the order C0, C1, SH, LD;
* reads come next, in the order CA, CB, CW, S0, S1, ST;
* a read of a row that another read already holds this cycle shares it.

Writes win so that a pipeline holding finished results can always drain.
Refused requests repeat the next cycle, and every slice receives the same
bank command.

Reads have one cycle of latency. A granted read is captured by its user one
cycle after the grant. For the compute pipeline the capturers are the lanes'
operand latches. For the shuffle pipeline it is the SBAR's input registers,
and for stores it is the store beat buffer.

The latches are what let an instruction like `VADDMOD v1, v0, v2` work. Here
`v0` and `v2` are in the same memory, so their two operands are read in two
different cycles.

## Compute: HPLE lanes and the LAWS engine

A lane (`hple`) is a VRF slice, three operand latches (a, b, w) and one LAWS
engine.

* **Arithmetic.** `laws_engine` has a modular multiplier, a modular adder and
  a modular subtractor. The adder's and the subtractor's comparisons also
  give the compare instruction.
* **Scalar broadcast.** VBCAST loads the broadcast value into the a latch of
  every lane and sends it through the engine unchanged.

Every operation takes the same 5 cycles. The stages are:

1. operand register;
2. the three stages of the Barrett multiplier (addition, subtraction and
   compare ride alongside in a side pipe);
3. the final modular add/subtract.

A butterfly therefore gives `a ± w·b` from one multiplication. Because every
operation has the same latency, results leave in issue order and two results
never compete for the same write port. The pipeline has a stall enable `en`.
When a result cannot be written because its VRF memory is taken,
`alu_ctrl` freezes the engines and its own 5-deep tag pipeline together.

**Barrett reduction** (`barrett_modmul`) uses the modulus bit length `k`,
which the scalar backend stores with each modulus:

```
mu = floor(2^(2k) / q)          (precomputed, stored in the MRF)
x  = a * b                      (256 bits)
q3 = ((x >> (k-1)) * mu) >> (k+1)
r  = x - q3*q                   computed on the low W+2 bits only
r  = r - q while r >= q         (at most twice)
```

The remainder is below `3q`, so working modulo `2^(W+2)` is exact. The
product `q3*q` is only needed on its low `W+2` bits, which is one of the two
savings the published multiplier describes. The other saving, dropping part
of the quotient multiplication, is not described in enough detail to build,
so the quotient uses the full product.

Moduli must satisfy `q < 2^127` and must not be a power of two. Then `mu`
fits in 128 bits.

**Control.** `alu_ctrl` runs each instruction beat by beat:

1. request the operand reads;
2. latch them;
3. issue the beat to all 64 engines.

Write-back happens `LAWS_LAT` cycles later, through `WP_C0` and, for a
butterfly, `WP_C1`. When the last beat has been issued, the next instruction
is taken from the queue while the previous one is still in the engines.
After the last write, the instruction's register mask is released.

## Shuffles: the SBAR

NTTs need the elements that a butterfly pairs to sit in the same lane. The
shuffle pipeline does that with four permutations. Each output beat is built
from exactly two source beats, which is why two read ports and one write port
are enough:

| Mode | Output beat `k` comes from |
|---|---|
| UNPACKLO | beat `k/2` of `ra` and `rb`; even lanes from `ra`, odd lanes from `rb` |
| UNPACKHI | the same, with source beat `4 + k/2` |
| PACKLO | beats `2k`, `2k+1` of `ra` (k < 4) or of `rb`; the even elements |
| PACKHI | the same; the odd elements |

`sbar` holds the two source beats in input registers. It routes them
through a crossbar that has only the connections these four modes need, into
an output register. Output lane `j` takes its element from one of at most
four lanes of the two inputs.

`shuf_ctrl` computes the source register and beat for each output beat. It
requests them on `RP_S0` and `RP_S1` and loads the SBAR. It writes the output
beat through `WP_SH` while the next beat is being read.

The destination must differ from both sources. The busy board does not check
this, because the shuffle would read a beat it had already written.

## Loads and stores: VBAR and the banked VDM

The VDM is 4 MiB of 128-bit words in 64 single-port banks. Consecutive words
go to consecutive banks (`bank = addr mod 64`, `row = addr / 64`).

`lsu_ctrl` moves one beat at a time. Lane `j` of beat `k` uses address
`base + stride·(64k + j)`:

* **load:** every lane requests its word; the returned words fill a beat
  buffer, which is written to the register through `WP_LD`;
* **store:** the beat is read through `RP_ST`, then every lane writes its
  word.

`vbar` is the crossbar between lanes and banks:

* It routes each lane to `bank_of(address)`.
* When lanes collide on a bank, the lowest lane wins. The others repeat next
  cycle until the whole beat is done.
* Reads of the same word share one access.
* The external port (`vdm_*` on the tile) has priority over the lanes.
  Through it, the host or the tile mesh fills and drains the VDM.

A contiguous access touches 64 different banks and runs at full rate. A
stride `s` that shares a factor `2^m` with 64 serialises each beat into `2^m`
rounds. The end-to-end test uses stride 2 to provoke collisions; `tb_vbar` tries several strides.

## Scalar backend

`scalar_backend` holds the SDM (2,048 × 128 bit) and three small register
files:

* **SRF:** broadcast values.
* **MRF:** moduli. Each entry is `{q, mu, k}`.
* **ARF:** 32-bit word addresses.

The operations are:

* **ASET** writes an ARF entry in one cycle.
* **SLOAD** reads the SDM (2 cycles).
* **Modulus load** reads `q` and `mu` from two consecutive SDM words and
  computes `k` from `q` (3 cycles).

The frontend reads all three register files combinationally when it
dispatches.

## Performance counters

The tile's `perf` output counts:

* frontend stalls on the busy board and on a full queue;
* cycles in which the VRF refused a read;
* cycles in which a VDM bank refused a lane;
* beats issued to the engines;
* cycles in which the load/store pipeline worked alongside compute or
  shuffle.

The end-to-end test uses them to prove that each mechanism happened.

## Throughput, and how the tile compares

Without conflicts, each pipeline moves about one beat every 3 cycles.

| Operation | Cycles |
|---|---|
| 512-element vector instruction | about 24 |
| 64K-point NTT (524,288 butterflies) | about 24,600 |
| 64K-point ring multiply (load two towers, multiply, store one) | about 9,200, bound by the load/store pipeline |

Both a 64K-point ring multiply and a ring add of the same two towers run in
one kernel of 12,811 cycles. Each vector needs two loads and two stores
through the single load/store pipeline, which sets the pace. To reach that
pace, the kernel must be software-pipelined. An add that reads the same
registers as the multiply just before it stalls the in-order frontend until
the multiply finishes. Without reordering, the same kernel takes 17.7k
cycles.

A complete 1,024-point NTT (the size of the published example kernel) is 47
instructions and takes 1,119 cycles. Each of its 10 stages is two packs, a
twiddle load and a butterfly. Most of the time goes to busy-board stalls:
each stage needs the previous stage's result.

The published tile reaches the same order for the NTT: 18.3k and 24.6k
cycles in its two versions. Its ring add and multiply take 1.73 µs, about
3,500 cycles.

The 4 MiB VDM holds four 64K-point towers. A depth-2 ciphertext (3 towers ×
2 polynomials = 6 MiB) does not fit in one tile, and a bootstrapping working
set (about 30 towers) needs many tiles.

## Where this RTL departs from or goes beyond the published design

* The **VRF bank arbiter** and the operand latches are additions. The
  published tile relies on the compiler to avoid memory conflicts.
* The **VBAR collision policy** (lowest lane first, the external port
  first), the VDM bank count and the interleaving are this design's choices.
  The published text only says the VDM is banked and that striding avoids
  most collisions.
* The **four shuffle modes** are assumed to be the unpack/pack (interleave /
  deinterleave) pairs that radix-2 NTTs use. The published text says there
  are four modes but does not list them.
* **One load/store controller** serves both loads and stores. The published
  diagram shows separate load and store control fed from one queue.
* **Butterfly form:** the Cooley–Tukey form `a ± w·b` is assumed.
* **Broadcast operand:** the published code sample passes an address
  register and two small numbers to its broadcast. Here VBCAST broadcasts an
  SRF entry that an earlier SLOAD filled from the SDM. The sample's
  `_vimulmod` is VMULMOD here.
* **Sizes left as parameters:** the VDM may grow to 32 MiB (`VDM_WORDS`), and
  the lane and bank counts are free parameters (`NUM_HPLE` must divide 512;
  `VDM_BANKS` must be a power of two).
* **Not built:**
  * the controlling RISC-V core and its long-word multiplier;
  * the tile control bus;
  * the tile mesh network;
  * the chip-level array of tiles;
  * the high-bandwidth I/O;
  * the FPGA host board.

  The published text names these but does not describe their logic. Their
  connection points are the tile's `start`/`done`, `imem_*`, `sdm_*` and
  `vdm_*` ports.
* **Barrett multiplier:** only one of the published multiplier's two
  optimisations is built (see above).

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rpu_pkg.sv tb/tb_rpu_tile.sv \
          --top-module tb_rpu_tile -Mdir obj_tile
./obj_tile/Vtb_rpu_tile
```

Replace `tb_rpu_tile` with any testbench below. Verilator finds the modules
in `rtl/` by name. The full tile builds in about 15 s and runs its kernel in
about 1 s.

| Testbench | What it checks |
|---|---|
| `tb_rpu_tile` | Full-size tile, end to end. It loads two moduli and data, then runs a kernel with every instruction, including strided transfers and dependent chains. It reads the results back through the VDM port and compares every element with a reference model. It also requires each of these to happen at least once: busy-board stall, full-queue stall, VRF conflict, VDM bank collision and pipeline overlap. |
| `tb_ring64k` | A 64K-point ring multiply and ring add of one tower on the full-size tile. The inputs and both outputs fill the whole 4 MiB VDM. The kernel is software-pipelined over eight register sets. It checks all 131,072 outputs and bounds the cycle count (12,811 cycles measured, against a load/store limit of 12,288). |
| `tb_ntt1024` | A 1,024-point radix-2 NTT on the full-size tile: 10 stages of pack-low, pack-high, twiddle load and butterfly, with bit-reversed input and natural-order output. It compares all 1,024 outputs with a direct DFT modulo 2^64 − 2^32 + 1, and bounds the cycle count (1,119 cycles measured). |
| `tb_barrett_modmul` | Random and edge-case products for moduli of many bit lengths; result latency |
| `tb_laws_engine` | All six operations with random moduli; latency; stall enable |
| `tb_vrf_slice` | Each register/beat through every write and read port |
| `tb_hple` | A lane: operand collection, butterfly, broadcast, conflict serialisation |
| `tb_sbar` | All four modes for every output beat |
| `tb_vdm`, `tb_vbar` | Bank interleaving; collisions; external-port priority |
| `tb_scalar_backend` | ASET, SLOAD, modulus load (including `k`) |
| `tb_busy_board` | Random set/clear against a reference |
| `tb_frontend` | Queue entries in program order, no dispatch onto a busy register, both stall kinds, HALT/done |

The simulator used has two states. Every register that is read is reset or
initialised, and the testbenches use `$urandom` for their stimulus.
