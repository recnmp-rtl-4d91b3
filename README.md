# RecNMP processing unit — synthesizable SystemVerilog

Recommendation models spend most of their inference time in one kind of operator: the
*SparseLengthsSum* family (SLS). SLS gathers a few dozen embedding vectors (64–256 bytes
each) from tables that can be gigabytes large, and reduces them to one pooled vector. The
lookups are almost random, so the work is bound by memory bandwidth and by row-buffer misses,
not by arithmetic. The unit here moves the gather-and-reduce into the buffer chip of a DDR4
DIMM. Each rank of the DIMM fetches and accumulates its own vectors in parallel with the other
ranks. A small memory-side cache per rank catches the hot vectors that repeat across lookups.
Only the pooled results travel back over the memory channel.

The host never sends addresses or bulk data for the vectors. It sends compact 79-bit
*NMP instructions*. Each one names one vector and carries:

- the DRAM commands it needs;
- how to weight the vector;
- which pooling it belongs to;
- whether it is worth caching.

The host's memory controller still schedules the DRAM commands. The unit only expands them.

## The NMP instruction

| field       | bits | meaning |
|-------------|------|---------|
| `op`        | 4    | operation: sum, mean, weighted sum/mean, and the 8-bit row-quantised weighted forms |
| `ddr_cmd`   | 3    | presence of ACT, RD and PRE for this vector, worked out by the host from its open-row state |
| `daddr`     | 32   | DRAM address {rank 2, bank group 2, bank 2, row 16, column 10} |
| `vsize`     | 3    | vector length in 64-byte bursts (1–4) |
| `weight`    | 32   | FP32 weight. Sum forces 1.0. For means the host puts 1/L here |
| `locality`  | 1    | 1 = look up and fill the rank cache, 0 = bypass it |
| `psum_tag`  | 4    | which of 16 poolings in the current packet this vector adds to |

`recnmp_pkg::nmp_inst_t` packs these fields in this order, most significant first. The
opcode values and the split of `daddr` into fields are this implementation's choices. The
field list, the widths of the whole instruction and of the tag, and the field order are the
published format.

## One packet, end to end

A *packet* is the set of instructions that builds up to 16 pooled vectors for one table. The
host runs it like this:

1. Write the vector-length register (address `0x10`) with the number of elements per vector.
2. For every rank `r`, write the instruction count register (address `0x00 + r`) with the
   number of instructions that rank will receive. This write also zeroes that rank's partial
   sums and drops `sum_valid`.
3. Stream the instructions. The DIMM-NMP queues them (Inst Queue, 16 deep) and steers each to
   the rank in `daddr.rank`. Back-pressure reaches the host through `host_inst_ready`.
4. Every rank-NMP counts the instructions it has finished. When every count matches its
   register, the DIMM-NMP reads the ranks' partial sums, adds them with the element-wise adder
   tree into DIMM.Sum, and raises `sum_valid`.
5. The host reads DIMM.Sum one word at a time (`sum_rd_tag`, `sum_rd_chunk`). The data comes
   back one cycle after the address.

## Inside a rank-NMP

`rank_nmp` contains three units:

- **Inst Buffer**: 8 instructions deep.
- **Fetch engine**: chooses where each vector comes from.
- **Datapath**: accumulates the vectors.

The fetch engine and the datapath overlap. While vector *n* is being accumulated, vector *n+1*
is fetched into the row buffer.

**Where a vector comes from.**

- *LocalityBit 1*: the engine looks up each 64-byte line of the vector in the RankCache, one
  lookup per cycle, each answered one cycle later.
  - If every line hits, the vector is served from the cache.
  - If any line misses, the whole vector is read from DRAM and every line is written into the
    cache as it arrives.
- *LocalityBit 0*: the vector is read from DRAM and the cache is not touched.

**A hit still sends its PRE and ACT.** The host worked out the instruction's PRE/ACT/RD tags
from its own model of which rows are open. If a cache hit suppressed a PRE or ACT, the banks
would fall out of step with that model, and a later instruction carrying "RD only" would read
the wrong row. The rank therefore sends the PRE and ACT of a hit to the DRAM and drops only the
reads. The end-to-end test contains such hits, and the DRAM model flags any out-of-step access.

**RankCache.** 128 KB per rank: 512 sets of 4 ways of 64-byte lines, least-recently-used
replacement, tagged by the line address `daddr[31:3]`. The tables are read-only during
inference, so lines are only ever filled and replaced, never written back.

**Command decoder.** It expands a request into `PRE`, `ACT row`, `RD col`, `RD col+8`, …,
issuing only the commands that are tagged. It keeps the DDR4-2400 spacings between its own
commands:

| spacing | commands | cycles |
|---------|----------|--------|
| tRP     | PRE → ACT | 16 |
| tRCD    | ACT → RD  | 16 |
| tCCD_L  | RD → RD   | 6  |
| tRC     | ACT → ACT | 55 |
| tRAS    | ACT → PRE | 39, taken as tRC − tRP |
| tRTP    | RD → PRE  | 9, a datasheet value the design assumes |

The spacings are tracked per rank, which is stricter than per bank but simple. Refresh,
reordering and cross-rank arbitration stay with the host. Read data comes back tCL after each
RD as four 128-bit words, i.e. two 64-bit DDR beats per clock. The decoder packs them into a
512-bit line.

**Datapath.** For each vector the datapath computes

    psum[tag][i] += (w·s)·x[i] + (w·b)        for i < vector length

- `w` is the instruction weight.
- `s` and `b` are the row's scale and bias for 8-bit rows, or 1 and 0 for FP32 rows.
- `x[i]` is an FP32 element, or for 8-bit rows a signed byte.

Two shared multipliers form `w·s` and `w·b` once per vector. Four lanes then each run a
multiplier, a bias adder and an accumulating adder, so the vector advances four elements per
cycle. The partial sums live in a 16 × 64-element register file, one vector per PsumTag.

The 8-bit row layout is this design's choice: scale in bytes 0–3, bias in bytes 4–7, elements
from byte 8 (the row-wise quantisation used by common frameworks). A 64-element 8-bit row
therefore needs two bursts (`vsize = 2`).

A new vector is accepted only after the previous one has been written back. Two vectors with
the same PsumTag therefore never race.

## Timing

All latencies are in cycles of the single clock, which is the DRAM clock.

| step | cycles |
|------|--------|
| RankCache lookup | 1 |
| FP32 add / multiply | 3 / 4 |
| ACT → first RD → next RD | 16 → 6 |
| RD → line assembled | tCL + 4 + 1 = 21 |
| vector of *v* elements in the datapath, accept to `row_done` | 4 + (⌈v/4⌉ − 1) + 4 + 3 + 3 + 3 = 16 + ⌈v/4⌉ (32 for 64 elements) |
| DIMM reduction, last rank done to `sum_valid` | 1 + 256 + 2 + 3·⌈log2 ranks⌉ + 1 = 263 for two ranks |

The testbenches check each of these numbers exactly.

## Where this RTL departs from the published design or fills gaps

- **Clock.** The published area and power estimate assumes a 250 MHz logic clock. Its
  latencies (1-cycle cache, 3-cycle adder, 4-cycle multiplier) are given in DRAM cycles. This
  RTL runs everything on one DRAM-rate clock and keeps those cycle counts. Crossing to a slower
  logic clock would need FIFOs at the DQ and C/A boundaries.
- **Pipeline.** The published unit is described as a 4-stage pipeline without naming the
  stages. Here the stages are fetch (cache or DRAM) → row hand-over → multiply/add lanes →
  accumulate and write back. Fetch overlaps the arithmetic of the previous vector.
- **Cache policy.** A vector counts as a hit only if all its lines hit. A partially cached
  vector is read again from DRAM.
- **Registers.** Register addresses and widths are this design's choices. So are the clearing
  of partial sums on a count write and the order of the reduction (all 16 tags × 16 chunks,
  one word per cycle).
- **Not built.**
  - The host memory controller's NMP extension: packet scheduling, tag setup and counter
    calculation. The testbenches play this role.
  - The DDR PHY and the DRAM devices. The top exposes the digital DIMM interface and each
    rank's C/A and DQ buses instead.
  - The hot-entry profiling that sets LocalityBit. It runs in host software.
- **Numbers.** FP32 arithmetic rounds to nearest-even and flushes subnormals to zero.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself; a watchdog ends a
hung run as a failure. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
        rtl/recnmp_pkg.sv tb/recnmp_tb_pkg.sv tb/ddr4_rank_model.sv tb/tb_recnmp_pu.sv \
        --top-module tb_recnmp_pu -o sim
    ./obj_dir/sim

`tb_recnmp_pu` is the end-to-end test at the default size: two ranks, 128 KB caches, 16 tags,
64-element vectors. It runs two packets and compares all of DIMM.Sum with a real-arithmetic
reference. It also counts each mechanism and fails if any never occurred: both ranks busy,
cache hit, miss and bypass, a hit with PRE/ACT, DRAM row hit, row miss and row conflict,
8-bit and FP32 rows, weighted operations, Inst Queue back-pressure, and the DIMM reduction.

Block tests:

| testbench | what it checks |
|-----------|----------------|
| `tb_rank_nmp` | cache and DRAM paths, counters, DRAM read counts |
| `tb_rank_cmd_decoder` | command spacings against a DDR4 rank model |
| `tb_rank_cache` | against a reference LRU model |
| `tb_rank_datapath` | all operations and latency |
| `tb_dimm_nmp` | routing, back-pressure, reduction sum and latency |
| `tb_fp32_add`, `tb_fp32_mul`, `tb_fp32_adder_tree` | arithmetic results and latencies |

`tb/ddr4_rank_model.sv` is a behavioural model of one DDR4 rank. It returns data tCL after
each RD and counts protocol breaches: reads or precharges of a closed bank, activates of an
open one, and tRCD, tRP, tRAS and tRC spacing errors.

## Files

- `rtl/recnmp_pkg.sv`: the instruction format, DDR4 timing, sizes and shared types.
- `rtl/recnmp_pu.sv`: the top.
- `rtl/dimm_nmp.sv`, `rtl/fp32_adder_tree.sv`: the DIMM level.
- `rtl/rank_nmp.sv`, `rtl/rank_cache.sv`, `rtl/rank_cmd_decoder.sv`, `rtl/rank_datapath.sv`:
  one rank.
- `rtl/fp32_add.sv`, `rtl/fp32_mul.sv`, `rtl/sync_fifo.sv`: building blocks.
