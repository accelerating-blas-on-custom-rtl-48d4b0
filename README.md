# A BLAS processing element: DOT4 data-path, Local Memory and decoupled load/store streams

Dense linear algebra kernels such as DGEMM spend most of their time on two
things: multiply-add work and moving operands into registers. A general-purpose
core does both in a single instruction stream, so arithmetic units wait
whenever data is late. This processing element (PE) splits that work between
three instruction streams that run at the same time:

* a **Floating Point Sequencer (FPS)** that does only arithmetic on a
  64-entry register file;
* a **global load/store stream** that copies data between external memory and
  an on-chip **Local Memory (LM)**;
* a **local load/store stream** that copies data between the LM and the
  register file, 256 bits (four registers) per cycle.

The arithmetic side is built around one large operation, **DOT4**, the inner
product of two 4-element vectors. One DOT4 is 7 flops (4 multiplies and 3
adds) in a fully pipelined tree. A DGEMM is split into 4×4 blocks. Each block
product is 16 DOT4s, and the load/store streams fetch the next pair of blocks
while the current one is being multiplied.

The design follows a published PE for BLAS that was built up in five steps:
1. a Load-Store unit with a Local Memory;
2. a DOT instruction;
3. block loads and stores;
4. a 256-bit path to the register file;
5. prefetching.

This RTL is that final configuration. The source describes the blocks, sizes,
pipeline depth and bandwidths, but not the instruction formats, the
synchronisation between streams or the internal protocols. Those are this
design's own, and each is marked as such below.

## Block structure

```
                 +------------------------- pe_top --------------------------+
 prog_* -------> |  +------------- fps ---------------+                      |
 start/done      |  | Instruction Memory 4096x32      |                      |
                 |  | decode + scoreboard + REP loop  |                      |
                 |  | Register File 64 x 64 bit       |<-- 256-bit RF port --+|
                 |  | FADD(5) FMUL(5) FDIV FSQRT      |                     ||
                 |  | RDP: DOT1..DOT4 (15 stages)     |                     ||
                 |  +------^-------------|------------+                     ||
                 |     token (CFU->FPS)  | token (FPS->CFU)                 ||
                 |  +------|-------------v------- load_store_cfu ---------+ ||
                 |  |  ls_local_unit (4096x32 program) <--- LM port B ----+-+|
                 |  |        ^ tokens v                 256 bit         |  |
                 |  |  ls_global_unit (2048x64 program) --- LM port A   |  |
                 |  |                                      64 bit       |  |
                 |  |  local_memory: 4096 x 64 bit (256 kbit), 4 banks  |  |
                 |  +---------------------|-----------------------------+  |
                 +------------------------|---------------------------------+
                                          v gm_req_* / gm_resp_*
                                  external memory (not part of the PE)
```

| Module | Role |
|---|---|
| `blas_pkg` | Types, instruction encodings, IEEE-754 helpers (`round_pack`). |
| `fp_mul`, `fp_add` | Pipelined binary64 multiplier and adder/subtractor, 5 stages each. |
| `fp_div`, `fp_sqrt` | Iterative binary64 divider and square root, one result bit per cycle. |
| `rdp` | Reconfigurable Data-path: four multipliers, two +/- nodes, one + node. |
| `fps_regfile` | 64×64-bit register file with 12 read and 8 (9 in the FPS) write ports. |
| `instr_mem` | Synchronous instruction memory, used three times. |
| `fps` | The sequencer: fetch, decode, scoreboard, issue, write-back, counters. |
| `local_memory` | 256 kbit LM, four interleaved banks, a 64-bit port and a 256-bit port. |
| `ls_global_unit` | Global load/store stream: word and 4×4-block transfers. |
| `ls_local_unit` | Local load/store stream: 256-bit LM ↔ register file transfers. |
| `sync_token` | Token counter between two streams. |
| `load_store_cfu` | The LM plus both load/store streams. |
| `pe_top` | The whole PE. |
| `pipe_delay` | Helper: register chain used for pipeline stages. |

## The Reconfigurable Data-path (DOT instructions)

`rdp` is a balanced tree:

```
  a0*b0   a1*b1   a2*b2   a3*b3      4 multipliers  (stage group 1, 5 cycles)
     \    /          \    /
      +/-             +/-            2 add/subtract (stage group 2, 5 cycles)
         \           /
              +                      1 adder        (stage group 3, 5 cycles)
```

`DOTn` (n = 1..4) uses lanes 0..n-1. The products of the unused lanes are
forced to +0, so one tree serves:
* DOT1, a plain multiply;
* DOT2;
* DOT3, computed as (p0 ± p1) + p2;
* DOT4.

Each of the two lower nodes can subtract (bits `sub0`/`sub1`), so forms such as
a0·b0 − a1·b1 are also one instruction.

The total depth is 15 cycles, as in the source. The split into 5 + 5 + 5 is
this design's choice, made so that the tree reuses the 5-stage adder and
multiplier. A new DOT can start every cycle.

The DOT operands are two groups of four registers:
* `ra`, `ra+1`, `ra+2`, `ra+3`, or with `astr4` set `ra`, `ra+4`, `ra+8`, `ra+12`;
* the same for `rb` with `bstr4`.

With the stride, a column of a row-major 4×4 block held in 16 consecutive
registers can be read directly. The register file therefore needs eight read
ports for one DOT4 per cycle.

## Floating-point arithmetic

All units implement IEEE-754 binary64 with round-to-nearest-even. Two
simplifications apply everywhere:
* **Subnormal inputs and results are flushed to zero.**
* **NaN results are the single quiet NaN `0x7ff8000000000000`.**

Infinities, signed zeros, overflow to infinity and invalid operations are
handled. Examples of invalid operations: ∞−∞, 0·∞, 0/0 and √(negative).

| Unit | Latency | Throughput |
|---|---|---|
| `fp_mul`, `fp_add` | 5 cycles | one per cycle |
| `rdp` | 15 cycles | one per cycle |
| `fp_div`, `fp_sqrt` | 55 cycles | not pipelined; `busy` while working |

`fp_mul` and `fp_add` compute the result in one combinational block and then
pass it through a register chain. A synthesis tool is expected to retime the
chain into the logic. The source only says the units are fully pipelined.

Special cases of the divider and square root return after one cycle: zero,
infinity and NaN operands.

## The sequencer (FPS)

### Issue

The FPS issues in order, at most one instruction per cycle. Operands are read
from the register file at issue.

Every register has a **pending** bit:
* it is set when an instruction that will write the register issues;
* it is cleared at write-back.

An instruction stalls while any of these holds:
* one of its sources is pending;
* its destination is pending;
* its unit is busy (FDIV, FSQRT).

There is no bypass network. A dependent instruction issues the cycle after the
write-back. Results from the different units come back through separate write
ports, so several can complete in the same cycle.

### Instructions (32 bits)

```
 [31:27] opcode  [26:21] rd  [20:15] ra  [14:9] rb
 DOT:  [8:7] n-1   [6] sub0   [5] sub1   [4] astr4   [3] bstr4
 REP:  [26:15] repeat count   [14:3] body length
 SIG:  [26] drain
```

| Opcode | Name | Effect |
|---|---|---|
| 0 | NOP | |
| 1 / 2 | ADD / SUB | rd = ra ± rb |
| 3 | MUL | rd = ra · rb |
| 4 | DIV | rd = ra / rb |
| 5 | SQRT | rd = √ra |
| 6 | DOT | rd = Σ over n lanes (see the RDP section) |
| 7 | WAIT | wait for a token from the local load/store stream, then take it |
| 8 | SIG | give a token to the local stream; with drain set, first wait until nothing is pending |
| 9 | REP | run the next *length* instructions *count* times |
| 10 | HALT | wait until nothing is pending, then stop |

REP is a single-level hardware loop with no cost per iteration. With REP, a
DGEMM program of any size is a few hundred instructions. The FPS instruction
memory is 4096×32 bits = 16 KB, the size given in the source.

### Performance counters

The FPS counts:
* cycles;
* flops (a DOT*n* counts 2n−1);
* cycles stalled on register dependencies;
* cycles stalled in WAIT;
* REP iterations.

## Load-Store CFU and Local Memory

The **Local Memory** holds 4096 words of 64 bits (256 kbit). It is split into
four banks by the two low address bits.
* Port A is 64 bits wide and serves the global stream.
* Port B is 256 bits wide and serves the local stream. It reads or writes the
  four words of a quad-aligned address in one cycle.
* Both ports read synchronously, one cycle after the address.

### Global stream (64-bit instructions, 2048-entry memory)

```
 [63:60] opcode  [59:48] LM address  [47:24] external address  [23:12] row stride
```

* `LD` and `ST` move one word. `LD` sends a request and waits for the
  response, so every word costs a full round trip.
* `LDB` and `STB` move a 4×4 block whose rows are `stride` words apart in
  external memory to or from 16 consecutive LM words. `LDB` sends all 16
  requests back to back, and the responses are written into the LM as they
  arrive. A block therefore costs one round trip plus 16 cycles instead of 16
  round trips. This block transfer is the main point of the global stream.
* `WAIT`, `SIG` and `HALT` work as in the FPS. The tokens go to and from the
  local stream.

### Local stream (32-bit instructions, 4096-entry memory)

```
 [31:28] opcode  [27:22] register  [11:0] LM address
```

* `LD r,a` copies LM[a..a+3] to R[r..r+3].
* `ST r,a` copies R[r..r+3] to LM[a..a+3].
* `WAITG`/`SIGG` exchange tokens with the global stream.
* `WAITF`/`SIGF` exchange tokens with the FPS.
* `HALT` stops the stream.

One LD can issue per cycle. An ST directly after an LD waits one cycle so that
it reads the loaded registers.

### External memory interface

The interface has two channels:
* a request channel: `gm_req_valid`/`gm_req_ready`, write enable, 24-bit word
  address and 64-bit data;
* a response channel: `gm_resp_valid`/`gm_resp_data`. It returns read data in
  request order, any number of cycles later, and has no back-pressure.

The test benches use a memory model with a 20-stage pipelined read delay. That
delay is the memory timing the source uses for its figures.

## Synchronisation by tokens

The three streams never share a program counter. They order themselves with
token counters (`sync_token`, 8 bits each). A producer's SIG adds a token. A
consumer's WAIT stalls until a token is available and then removes it. There
are four counters:
* global → local, "data is in the LM";
* local → global, "results are back in the LM";
* local → FPS, "operands are in the registers";
* FPS → local, "registers may be overwritten".

**Prefetching** comes from where the FPS signals. In the DGEMM schedule
(`tb/gemm_prog_pkg.sv`) the FPS gives the "registers free" token right after
the 16 DOT4s of a step have *issued*, not after they finish. The DOT4s read
their operands at issue, so the local stream can load the next A and B blocks
while the 15-stage pipeline is still full. The accumulation adds of the
current step run in parallel with those loads.

## DGEMM schedule used for the end-to-end tests

C = A·B + C with n×n matrices, K = n/4 blocks per side. Registers are used as
follows:
* r0–15: block of A;
* r16–31: block of B;
* r32–47: block of C;
* r48–63: partial products.

1. **Global stream.** Block-loads all of B, then the blocks of A and C one
   block row at a time, with a token to the local stream after each row. In
   the LM, A block (i,k) is stored at 16·(i·K+k), B follows at 16K² and C at
   32K². Then, for each row, it waits for the local stream's token and
   block-stores that row of C. Computation thus starts once B and the first
   row have arrived, and write-back overlaps the later rows.
2. **Local stream.** For each block row of C it first waits for the global
   stream's token. For each C block of the row, it loads C, then for each k
   loads the A and B blocks, signals the FPS and waits for the FPS's "free"
   token. It then stores C, and after each row it signals the global stream.
3. **FPS.** A REP over K² C blocks of K steps. Each step is:
   * WAIT;
   * 16 DOT4 (row of A · column of B, with `bstr4`) into r48–63;
   * SIG;
   * 16 ADD into C.

   A draining SIG then tells the local stream that C is complete.

The programs at n = 20 have these sizes:

| Stream | Instructions | Capacity |
|---|---|---|
| global | 86 | 2048 |
| local | 1486 | 4096 |
| FPS | 173 | 4096 |

The LM holds all three matrices up to n = 36, since 48K² ≤ 4096. The local
program has no loops and grows as ≈10K³ instructions. Its memory therefore
limits this schedule to n ≤ 32 in steps of 4. Larger matrices need a schedule
that streams panels through the LM and reuses local-stream code. The hardware
does not provide such a loop in the load/store streams.

## Measured behaviour

All runs below use the default parameters and a memory with a 20-cycle read
delay that never refuses a request. The cycle count runs from start to done.
It includes bringing the operands in from external memory and writing the
results back.

| Kernel | Size | Cycles | Flops | % of 7 flops/cycle | Published |
|---|---|---|---|---|---|
| DGEMM | 20×20 | 6249 | 16000 | 37 % | 5561 cycles |
| DGEMV | 20×20 | 1312 | 800 | 8.7 % | ≈ 39 % |
| DGEMV | 40×40 | 4422 | 3200 | 10.3 % | ≈ 39 % |
| DGEMV | 60×60 | 9382 | 7200 | 11.0 % | ≈ 40 % |
| DDOT | 20 | 314 | 39 | 1.8 % | ≈ 10 % |
| DDOT | 100 | 764 | 199 | 3.7 % | ≈ 11 % |

Every result matches, bit for bit, a reference computed with the same order
of operations.

The gaps come from the test programs and the memory model more than from
the data-path:
* **DGEMM.** Each 4×4×4 step issues 16 separate ADDs to accumulate the DOT4
  results into C. That is 32 issue slots for 16 DOT4s. In addition, about
  1300 cycles pass before the first operands are ready, while B and the
  first block row arrive.
* **DGEMV.** The memory delivers at most one word per cycle. A block load
  waits for its last word before the next transfer starts, which is about 36
  cycles per 16 words.
* **DDOT.** The runs are tiny, and the vector tails that are not a multiple
  of 16 words are fetched one word per round trip.

The 8×8 DGEMM in `tb_pe_top` adds random memory back-pressure and
single-word loads. It takes 1061 cycles.

## Departures from the source and points it leaves open

* **Its own choices in this design:**
  * all instruction encodings and the instruction sets;
  * the token mechanism;
  * REP;
  * the scoreboard;
  * the external-memory protocol;
  * the LM banking and port widths on the global side;
  * the load/store instruction memory sizes (16 KB each);
  * the 5/5/5 split of the DOT4 pipeline;
  * the FDIV/FSQRT algorithms and latencies.
* Subnormals are flushed to zero. The source does not describe its FPU's
  handling of special values.
* The earlier, simpler PE versions the source compares against are not built:
  * no LM;
  * 64-bit register transfers;
  * no DOT instruction;
  * no block transfers.
* The CGRA that the PE can be attached to, with its tiles, routers and
  arbiter, is not part of this RTL. Neither is the external memory, which is
  a behavioural model in `tb/`.
* The source's 40×40 to 100×100 DGEMM runs are out of reach of the test
  schedule above: its instruction memory and LM limits are given in the DGEMM
  schedule section. DGEMV stops at 60×60 because the matrix must fit in the
  4096-word LM.

## Simulating

Every test bench prints `TB_RESULT checks=<n> failures=<m>`. Each has a
watchdog. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/blas_pkg.sv rtl/pipe_delay.sv rtl/fp_mul.sv rtl/fp_add.sv rtl/fp_div.sv \
    rtl/fp_sqrt.sv rtl/rdp.sv rtl/fps_regfile.sv rtl/instr_mem.sv rtl/fps.sv \
    rtl/local_memory.sv rtl/sync_token.sv rtl/ls_global_unit.sv \
    rtl/ls_local_unit.sv rtl/load_store_cfu.sv rtl/pe_top.sv \
    tb/gm_model.sv tb/gemm_prog_pkg.sv tb/blas12_prog_pkg.sv tb/tb_pe_full.sv --top-module tb_pe_full
./obj_dir/Vtb_pe_full
```

Unit test benches need only their module, its submodules and `blas_pkg`. They
are `tb_<module>.sv`:
* `tb_fp_*` compare against the simulator's `real` arithmetic;
* `tb_fps` runs small programs and checks results and cycle counts (32
  back-to-back DOT4s complete in 49 cycles);
* `tb_ls_global_unit` compares block and word loads: 64 words take 150
  cycles with block loads and 1410 with word loads.

End-to-end test benches, with their program builders:

| Test bench | Kernel and sizes | Program builder |
|---|---|---|
| `tb_pe_top` | DGEMM 8×8 with memory stalls | `tb/gemm_prog_pkg.sv` |
| `tb_pe_full` | DGEMM 20×20 | `tb/gemm_prog_pkg.sv` |
| `tb_pe_gemv` | DGEMV 20/40/60 | `tb/blas12_prog_pkg.sv` |
| `tb_pe_ddot` | DDOT 20–100 | `tb/blas12_prog_pkg.sv` |

The DGEMV and DDOT programs pipeline the software: the DOT4s of a step issue
before the adds of an earlier step. They rotate over several register
buffers, so the local stream can prefetch ahead.

To change the matrix size, edit `N` in those test benches. N must be a
multiple of 4, at most 32 for the default memories. To write other programs,
use the helper functions `g_ins`, `l_ins` and `f_ins` in `tb/gemm_prog_pkg.sv`.
