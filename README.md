# A RISC-V softcore with pluggable wide SIMD instructions

This is a small RV32IM processor built to try out custom vector (SIMD)
instructions on an FPGA. Two ideas drive it:

1. **More operands per instruction.** The design adds two instruction formats,
   I' and S'. They reuse the immediate field of the standard I and S formats to
   name up to four 256-bit vector registers, alongside the usual 32-bit
   registers. A single instruction can therefore read two vectors and a scalar
   and write two vectors and a scalar. For example, one instruction can merge
   two sorted vectors into a sorted pair of vectors.
2. **A memory system that does not starve the vector units.** The caches move
   whole 256-bit vectors in one cycle. The last-level cache (LLC) uses very
   wide 2 KiB blocks, so each refill or write-back is one long DRAM burst. The
   link to the memory interconnect runs at twice the core clock, which doubles
   the bandwidth of its 128-bit port.

The RTL is written in SystemVerilog-2017. Every block has a self-checking
Verilator testbench. The whole system runs with its default sizes in
simulation.

## Block map

```
                 128 bit @ 2x clk            256 bit / cycle
 DRAM + AXI  <=====================> axi_gearbox <=========> llc (256 KiB)
 (outside)                                                   |        |
                                                256 bit      |        | 256 bit
                                                       il1_cache   dl1_cache
                                                       (2 KiB)     (4 KiB)
                                                    32 bit |        | 256 bit
                                                       rv32im_core -+
                                      regfile, vregfile, rv_alu, rv_div,
                                      c1_merge, c1_sort4, c2_sort, c3_psum
```

`simd_softcore` is the top level. It has two clock inputs: `clk` for the core
and `clk2x` at twice that rate, with both clocks rising together. It exposes a
128-bit reduced-AXI4 master port on `clk2x`; the interconnect and DRAM sit
behind that port and are not part of this RTL. It also has two outputs:
`halt`, raised after an ECALL or EBREAK once nothing is in flight, and
`retire`.

| Unit | Size (default) |
|---|---|
| IL1 | 64 sets × 256-bit blocks, direct-mapped, in registers |
| DL1 | 32 sets × 4 ways × 256-bit blocks, write-back, NRU replacement |
| LLC | 32 sets × 4 ways × 16384-bit blocks, 32 sub-blocks per block, write-back, NRU |
| Vector registers | 8 × 256 bits; v0 always reads zero |
| Interconnect port | 128 bits at 2× the core clock |

## Instruction formats

| bits | 31:29 | 28:26 | 25:23 | 22:20 | 19:15 | 14:12 | 11:7 | 6:0 |
|---|---|---|---|---|---|---|---|---|
| I' | vrs1 | vrd1 | vrs2 | vrd2 | rs1 | func3 | rd | opcode |
| S' | vrs1 | vrd1 | imm (bit 25) + rs2 (bits 24:20) | | rs1 | func3 | rd | opcode |

Vector register fields are 3 bits wide, so there are 8 vector registers.
`vinsn_decode` extracts these fields.

This design uses the four RISC-V *custom* opcodes as follows:

| Instruction | Opcode / func3 | Effect |
|---|---|---|
| `c0_lv vrd1, rs1, rs2` | custom-0 (0001011) / 0 | vrd1 ← mem256[rs1+rs2] |
| `c0_sv vrs1, rs1, rs2` | custom-0 / 1 | mem256[rs1+rs2] ← vrs1 |
| `c1_merge vrd1, vrd2, vrs1, vrs2` | custom-1 (0101011) / 0 | merges two ascending 8-lane vectors; the upper 8 values go to vrd1 and the lower 8 to vrd2; latency 4 |
| `c1_sort4 vrd1, vrs1` | custom-1 / 1 | bitonic sort of lanes 0..3; the smallest value goes to lane 3; latency 3 |
| `c2_sort vrd1, vrs1` | custom-2 (1011011) | ascending sort of the 8 lanes, lane 0 smallest; latency 6 |
| `c3_psum rd, rs1, vrd1, vrs1` | custom-3 (1111011) | vrd1 ← inclusive prefix sum of vrs1 plus the running total; rd ← new total; rs1 bit 0 = 1 restarts the total at zero; latency 4 |

Lanes are 32-bit signed integers, and lane k occupies bits 32k+31 : 32k.
Vector memory accesses are aligned to 32 bytes; the low address bits are
ignored.

## Custom instruction units

Each unit follows one template (see `c1_sort4.sv`):

- Every cycle, the unit may accept a call: `in_valid` plus the operand values
  and the destination register names `rd`, `vrd1` and `vrd2`.
- `ctmpl_delay` is a shift register as long as the unit's pipeline. It carries
  the valid bit and the destination names alongside the data.
- The result appears with `out_v` and the delayed names, exactly `C_CYCLES`
  cycles after the call.

Because each unit is a plain pipeline, back-to-back calls overlap. Two
`c2_sort` instructions issue on consecutive cycles.

The sorting units are networks of `cas` (compare-and-swap) cells. Each cell is
registered, so one layer of the network takes one cycle:

- **`c2_sort`** is Batcher's odd-even mergesort for 8 inputs: 6 layers, 19 CAS
  cells.
- **`c1_merge`** is the last four layers of the 16-input odd-even mergesort.
  These layers merge two sorted halves. The upper half of the result goes to
  vrd1 and the lower half to vrd2.
- **`c1_sort4`** is a 4-input bitonic sorter: 3 layers, 6 cells, using the
  wiring and output order of the original template example.

A software merge sort uses these units as follows:

1. Sort 8-value chunks with `c2_sort`.
2. Merge pairs of chunks into sorted 16-value runs with `c1_merge`.
3. Merge longer runs vector by vector, with `c1_merge` fed from the two runs.

**`c3_psum`** is a Hillis-Steele scan:

- Three registered steps add lanes at distances 1, 2 and 4.
- A fourth step adds the running total, which is lane 7 of the previous result.

So a stream of vectors gives a prefix sum over the whole stream, at one vector
per cycle. The total is cleared at reset and by a call whose rs1 value is odd.

## The core

`rv32im_core` has a single stage: fetch, decode, execute and register write
all happen in the same cycle.

- **ALU, multiply, branches, jumps, LUI/AUIPC** write their result at the end
  of that cycle, so a dependent instruction can run on the very next cycle. No
  forwarding network is needed, and these results are not tracked. Multiply is
  one combinational cycle.
- **Long-latency results** come from loads (scalar and vector), division and
  the custom units. These set a scoreboard bit on their destination register.
  - An instruction that reads a busy register, or writes a busy register
    (a WAW hazard), waits.
  - Independent instructions keep issuing behind a load.
  - The data cache handles loads and stores on its own and returns load data
    with a tag of the form {vector?, register}.
- **Load-to-use.** On a DL1 hit, an instruction that depends on a load runs 3
  cycles after the load: request, array read, register write.
- **Division** is a radix-2 iterative unit and blocks the core. The next
  instruction retires 35 cycles after a DIV, DIVU, REM or REMU is presented.
  Divide-by-zero and overflow give the results the RISC-V specification
  requires.
- **Write ports.** Custom units of different latency could finish in the same
  cycle. An issue-time reservation shift register delays a call that would
  collide, so each cycle at most one unit returns. An assertion checks this.
  Vectors have three write ports (load, vrd1, vrd2); scalars have three (ALU,
  load, custom).
- **Not implemented.** FENCE is a no-op. CSRs, interrupts and exceptions are
  not implemented. Unknown opcodes do nothing. ECALL and EBREAK halt the core
  once all outstanding work has drained.

## Caches

**IL1** (`il1_cache`):

- Registers, direct-mapped, read-only.
- A hit delivers the 32-bit instruction combinationally, in the same cycle the
  pc is presented.
- A 256-bit block holds 8 instructions, which acts as free sequential
  prefetch.
- On a miss it holds a level request to the LLC until a one-cycle `llc_ack`
  arrives with the block.

**DL1** (`dl1_cache`):

- 4-way, write-back and write-allocate, with one valid, dirty and NRU bit per
  block. Victims are chosen by `nru_policy`: an invalid way first, otherwise
  the lowest way whose NRU bit is clear. When all NRU bits would become set,
  the others are cleared.
- Requests are byte, half, word or full 256-bit vector.
- A hit answers 2 cycles after the request, and the cache accepts one request
  per cycle while requests hit.
- On a miss it writes back a dirty victim, fetches the block and retries.
- **No-fetch vector store.** The L1 block is exactly one vector. A vector
  store that misses therefore allocates the block without reading it from the
  LLC, because every byte is overwritten. A memcpy written with vector
  load/store never reads the destination.

**LLC** (`llc`):

- The block is 2 KiB. It is not stored as one memory word. Each way is a
  memory of 512-bit rows, and a block occupies 32 consecutive rows.
- An L1 block is half a row, so the LLC reads or writes it in a single cycle,
  whatever the block size.
- A hit is acknowledged 2 cycles after the request.
- On a miss, a dirty victim is written back as one burst of 64 beats of
  256 bits, and the new block is read as one 64-beat burst. Each burst is one
  block, so it stays inside a 4 KiB AXI boundary.
- **Early delivery.** The requester is acknowledged as soon as the beat
  holding its L1 block arrives, before the rest of the burst. The rest of the
  fill continues while the core runs.
- The DL1 has priority over the IL1, and the LLC handles one miss at a time.

## Double-rate interconnect link

`axi_gearbox` connects the LLC's 256-bit port to a 128-bit interconnect
running at twice the clock, so the narrow side carries the same bandwidth.

- **Clock handling.** All of its logic runs on `clk2x`. A toggle flop on `clk`
  is sampled on `clk2x` to learn which `clk2x` edge is also a core edge.
  Handshakes with the LLC happen only on those edges.
- **Burst lengths.** AR and AW lengths are doubled: 2·(len+1)−1.
- **Reads.** Read beats are packed in pairs, low half first, into a 2-entry
  FIFO.
- **Writes.** Each write beat is split into two narrow beats, low half first.
- **Rate.** With a slave that never stalls, one wide beat moves every core
  cycle in each direction. The testbench checks this.
- **Clock relationship.** The two clocks must come from one source, with
  `clk2x` rising at every `clk` edge.

## Bus protocol

Both the LLC's memory port and the top-level port use a reduced AXI4:

- Channels: AR, R, AW, W, B, each with valid/ready.
- Burst length is in beats minus one, and the last beat is marked.
- There are no IDs, sizes or response codes.
- One burst is in flight at a time.

An off-the-shelf AXI interconnect would need a thin shim that adds
ARSIZE/ARBURST, IDs and similar fields.

## Where this design follows the source publication and where it chooses

**Taken from the publication:**

- The I'/S' field positions.
- Eight vector registers, with v0 equal to zero.
- The template interface and its delay line.
- The `c1_sort4` network and output order.
- The `c2_sort` and `c1_merge` CAS layers.
- The scan-plus-carry structure of the prefix sum.
- Every cache size in the table above.
- Registers for the IL1, and NRU with one bit per block.
- Vector-sized L1 blocks and the no-fetch property they give.
- LLC sub-block rows, early delivery and whole-block bursts.
- The 128-bit double-rate link.
- The single-stage core with untracked simple results.
- The 3-cycle load-to-use latency.
- The unit latencies: 3, 6, 4 and 4 cycles.

**This design's own choices:**

- The opcode and func3 assignment, and the rs1+rs2 addressing of vector
  load/store.
- The operand roles of `c3_psum`, including the restart bit.
- Signed comparison in the sorters.
- All handshakes and the bus subset.
- DL1-over-IL1 priority.
- One miss at a time in each cache.
- Write-allocate for scalar stores.
- The scoreboard and the reservation register.
- The divider.
- The gearbox's phase detection and FIFO.
- Reset values (pc = 0; caches invalid; registers zero).

**Known departures:**

- `c1_merge` lacks the extra input stage the publication mentions for merging
  arbitrarily long lists, because that stage is not specified. Long lists are
  merged by software.
- VLEN is fixed at 256. The custom units are written for 8 lanes, and
  `c1_sort4` uses only lanes 0..3.
- The LLC reads its array combinationally when writing back. A block-RAM
  mapping needs one cycle of read-ahead there.
- No CSRs, so benchmarks cannot read cycle counters from inside the core.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
Build any of them with Verilator 5, run from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/simd_pkg.sv tb/tb_rv_asm.sv tb/tb_simd_softcore.sv \
  --top-module tb_simd_softcore -y rtl -y tb -o sim
obj_dir/sim
```

The simulator is two-state. Pass `+verilator+rand+reset+2` to start
unreset state at random values.

| Testbench | What it shows |
|---|---|
| `tb_simd_softcore` | The whole chip at default sizes runs a program: two 8-value sorts, a merge into 16 sorted values, an order check and sum of the result, prefix sums that carry across calls, a 4-value sort, mul/div/rem, LLC evictions and reloads, and byte access. Every mechanism is counted and must occur: IL1 miss, DL1 fetch, DL1 write-back, no-fetch vector store, LLC miss, LLC write-back, early delivery, load-use stall, write-port reservation, overlapping custom calls, divider stall, and narrow/wide beats. |
| `tb_memcpy` | A vector memcpy of 256 KiB (source plus destination is twice the LLC), then a prefix-sum pass over the copy. It reports about 2.0 bytes per core cycle in each direction; at 150 MHz that is about 0.6 GB/s read+write. |
| `tb_sort` | The sorting workload on 1024 random values: chunks of 16 are sorted with `c2_sort` and `c1_merge`, then runs are merged pass by pass with a vector merge loop that keeps the larger half in a register. The result is checked for order, sum and sum of squares. It takes about 30 core cycles per value. |
| `tb_psum` | The prefix-sum workload on 4096 values, done once with the vector unit (8 values per iteration, total carried between calls) and once with a serial loop. The two outputs are compared word by word. The vector version is about 3.6 times faster. |
| `tb_stream` | The STREAM kernels (copy, scale, add, triad) as scalar loops over three 256 KiB integer arrays, checked by array sums. The reported rates are 0.8 to 1.0 bytes per cycle. |
| `tb_rv32im_core` | The core alone: random RV32IM arithmetic against a reference model, loads and stores, all branch kinds, JAL/JALR, the custom instructions, and cycle-exact timing of issue rate, load-use, unit latencies, pipelining and division. |
| `tb_llc`, `tb_dl1_cache`, `tb_il1_cache` | Random traffic against reference memories, hit latency, early delivery, write-backs, and no-fetch stores. |
| `tb_axi_gearbox` | Packing order, burst length doubling, and one wide beat per cycle. |
| `tb_c2_sort`, `tb_c1_merge`, `tb_c1_sort4`, `tb_c3_psum`, `tb_cas` | Random and corner data, back-to-back calls, and exact latency. |
| `tb_regfile`, `tb_vregfile`, `tb_nru_policy`, `tb_vinsn_decode` | Exhaustive or random checks against models. |

The published evaluation copied 256 MiB and sorted and prefix-summed
64 MiB arrays held in DRAM. The 32-bit address space and an external DRAM
hold those sizes, but they are far too long to simulate cycle by cycle, so the
workload testbenches use 256 KiB (memcpy), 4 KiB (sort) and 16 KiB (prefix sum). The hardware
itself always runs at its full default sizes.

`tb_axi_mem` is a behavioural memory with the reduced AXI port; it stands in
for the interconnect and DRAM. `tb_rv_asm` is a package of instruction
encoders, custom ones included, used to build test programs.

## Changing the design

- Cache geometry is set through module parameters: `SETS`, `WAYS`, `BLOCK` and
  `SUBBLOCKS`.
  - In the LLC, `BLOCK/SUBBLOCKS` must equal two L1 blocks.
  - A block must not exceed 256 beats of 256 bits.
- Shared constants (`VLEN`, opcodes, the field struct) live in `simd_pkg`.
- To add a custom instruction:
  1. Copy the template of an existing unit.
  2. Give it a `C_CYCLES` value.
  3. Decode its opcode/func3 in the core.
  4. Add its latency to the core's reservation table.
