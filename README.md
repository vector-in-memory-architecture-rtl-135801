# VIMA: vector instructions executed inside a 3D-stacked memory

Streaming kernels such as memory set, memory copy or an element-wise vector sum touch
each byte once, so a processor's caches cannot help them: every operand crosses the
memory bus, and the bus, not the arithmetic, sets the speed. VIMA (Vector In Memory
Architecture) moves the arithmetic to the logic layer of a 3D-stacked memory, next to
its 32 independent vaults. The host processor keeps fetching, decoding and committing
instructions; a VIMA instruction travels down the pipeline like a store, is handed to
the memory cube, and runs there on whole 8 KB vectors. Only a status word comes back.

What sets VIMA apart from earlier near-data vector units is a small cache on the logic
layer: eight lines of 8 KB (64 KB), each line one whole vector operand. A kernel that
reuses a vector (a stencil reading neighbouring rows, a chain of partial sums) finds it
in that cache instead of reading the vaults again, and the program never allocates
registers or locks anything to get the reuse.

This repository holds synthesizable SystemVerilog for the VIMA block itself: the
instruction sequencer, the vector cache, the engine that splits cache misses into vault
requests, the vector functional units and the fill buffer. The vaults, DRAM dies,
crossbar and host processor are existing parts of the system and appear only as ports
(and as a behavioural memory model in the testbenches).

## Sizes

| quantity | value | where it is set |
|---|---|---|
| vector (one operand, one cache line) | 8 KB = 2048 x 32 bit or 1024 x 64 bit | `vima_pkg::VEC_BYTES` |
| functional units | 256 x 32 bit (128 slices of 64 bit) | `vima_pkg::LANES32` |
| beat (data moved per cycle per cache port) | 1 KB, so a vector is 8 beats | derived |
| VIMA cache | 8 lines, fully associative, LRU, write-back | `vima_pkg::WAYS` |
| vault sub-request | 64 B, 128 per vector | `vima_pkg::SUB_BYTES` |
| memory layout | 32 vaults x 8 banks, 256 B rows | `VAULTS`, `BANKS`, `ROW_BYTES` |
| 8-beat latency, integer alu / mul / div | 8 / 12 / 28 cycles | `LAT_I*` |
| 8-beat latency, floating alu / mul / div | 13 / 13 / 28 cycles | `LAT_F*` |

All modules take these as parameters with these defaults; the testbenches of the
smaller blocks override them to run faster.

## Block diagram

```
 host core ──instr/valid/ready──▶ ┌──────────────────────┐
          ◀──status (1 cycle)──── │  vima_sequencer      │──jobs──▶ vima_subreq ──64 B req/resp──▶ crossbar / vaults
 host loads/stores (coherence) ─▶ │  (one instr at a time)│            │  ▲
                                  └───┬───────┬──────────┘            │  │ 64 B port
                                      │ ctrl  │ ctrl                  ▼  │
                                  ┌───▼───────▼───────────────────────────┐
                                  │ vima_cache: 8 x 8 KB lines            │
                                  │ read port A ─┐  read port B ─┐        │
                                  └──────────────┼───────────────┼────────┘
                                        ▲        ▼ 1 KB/cycle    ▼ 1 KB/cycle
                           commit 1 KB  │   ┌─────────────────────────┐
                                        │   │ vima_fu_array (256 x 32)│
                              ┌─────────┴─┐ └───────────┬─────────────┘
                              │fill buffer│◀── results ─┘
                              └───────────┘
```

## Life of an instruction

The host sends one instruction and does not send the next until the status of this one
has come back and the instruction has committed. That single rule is how the system
keeps exceptions precise: when VIMA reports a failure, no later VIMA instruction has run
and the failing one has changed nothing, so the host can flush and trap as for any
faulting load. The sequencer therefore never overlaps two instructions and needs no
hazard logic. It walks these states:

1. **Accept** (`IDLE`). The instruction is checked for an undefined operation or element
   type and for vector addresses not aligned to 8 KB. Either ends the instruction with an
   exception at once.
2. **Tag check** (`TAG`, one cycle). Source 1, source 2 and the destination are looked
   up in parallel. If both sources are cached and the destination either is cached or is
   one of the sources, execution starts in the next cycle.
3. **Allocate** (`ALLOC`). Each missing source, and the destination if it is not
   cached, gets a line: an invalid line if there is one, else the least recently used
   line. Lines already claimed by this instruction are protected, so a source can never
   be evicted by the other source or by the destination. The line takes its new tag but
   stays invalid until filled.
4. **Memory jobs** (`WB_SRC`, `FETCH`, `WB_DST`). Dirty victims of the sources are
   written back, then the missing sources are read; when both sources miss, one job
   fetches both with their requests alternating, so the two vectors load in parallel
   across the vaults. A dirty victim of the destination is written back last. The
   destination is never read from memory: the result overwrites the whole line.
5. **Execute** (`EXEC`). The two read ports deliver beat *i* of both sources in the cycle
   after beat *i* is addressed; the units take one beat per cycle and put each result
   beat into the fill buffer after the unit's pipeline depth. A SET reads no source and
   takes its value from the instruction's scalar; any operation may take the scalar as
   its second operand instead of source 2.
6. **Status** (`STATUS`). When all 8 result beats are in the fill buffer the status
   goes to the host: success, or the cause of the exception (integer division by zero,
   invalid floating-point operation, or a vault error seen during write-back or fetch).
7. **Commit** (`COMMIT`, `DONE`). On success the fill buffer is copied into the
   destination line, one beat per cycle, while the host is busy committing; the line
   becomes valid, dirty and most recently used. After an exception nothing is copied
   and the destination keeps its old value.

Between instructions the sequencer also answers the host's coherence traffic. A host
load to a 64 B block held in a VIMA line is answered from the line (`pld_hit`), since
the VIMA copy may be newer than memory. A host store to a block held in a VIMA line
writes the line back if it is dirty and invalidates it (`pst_ack`). Both requests are
held by the host until answered.

### Timing

For an instruction whose operands are all cached, the status strobe appears
**6 + L** cycles after the instruction handshake, where L is the 8-beat latency of the
unit class (8, 12, 28 for integer alu/mul/div; 13, 13, 28 for floating point): the
handshake cycle, one tag check, one cache read, L cycles through the units, one
fill-buffer write and one cycle to register the status. The commit then takes 10 more
cycles before the next instruction is accepted. A fetch costs at least 128 sub-request
issues per vector (256 for two missing sources), plus the memory latency.

## Vector units

`vima_fu_array` holds 128 slices (`vima_lane`), each either two 32-bit units or one 64-bit
unit. Operations: SET, MOV, ADD, SUB, MUL, DIV, AND, OR, XOR, MIN, MAX on signed or
unsigned 32/64-bit integers, and ADD, SUB, MUL, DIV, MIN, MAX on IEEE single and double
precision (`vima_fpu`). Integer MUL keeps the low half of the product; integer DIV by zero
gives 0 and flags the exception. Floating point rounds to nearest-even, treats subnormal
inputs as zero, flushes results below the normal range to zero and returns the canonical
quiet NaN.

The units are built as combinational operators followed by a delay line. Each result
beat waits `depth = L - 8 + 1` stages, so eight beats entering back to back leave after
exactly L cycles. A beat is dropped once it passes the tap of the running operation, so
a deep operation (DIV) never picks up stale beats of a shallow one. A real
implementation would spread the operators over those stages; the cycle behaviour seen
at the ports is the same.

## Cache and vault requests

`vima_cache` stores each line as 8 words of 1 KB. Two 1 KB read ports feed the units,
one 1 KB write port takes the commit, and a 64 B port serves fills, write-backs and host
loads. Replacement uses one age counter per line (0 = most recent); an assertion checks
that the ages stay a permutation.

`vima_subreq` turns a line transfer into 128 requests of 64 B. The k-th request of a
line goes to byte offset `(k % 32) * 256 + (k / 32) * 64`. With the address map assumed
here (byte in row = bits 7:0, vault = bits 12:8, bank = bits 15:13), consecutive requests
go to different vaults and each vault receives the four 64 B pieces of one 256 B row.
The memory interface is a valid/ready request channel (write flag, address, 64 B of
data, tag) and a response channel (tag, 64 B, error flag) that may answer out of order.
Write-back data are read from the cache one request ahead, so one request can leave per
cycle.

## Where this RTL departs from, or adds to, the architecture

The architecture fixes the sizes, the 8-beat latencies, the fully associative LRU
write-back cache of vector lines, the two operand ports, the fill buffer written into the
cache at status time, the one-instruction-at-a-time rule, the split into 128 sub-requests
spread over vaults and banks, and the coherence behaviour for host loads and stores.
The following are this design's own choices:

- the operation list, the element-type encoding and the instruction record
  (`vima_pkg::vinstr_t`); the ISA is only said to follow ARM NEON;
- the exception causes (misalignment, undefined operation, vault error, integer divide
  by zero, invalid floating-point operation) and the status record;
- all handshakes, and the vault address map;
- allocating the destination line, and writing back its victim, before execution, so that
  the commit can never fail after the status has been sent;
- the cycle accounting above: three cycles more than the "1 tag + 8 transfers + last
  operation" the architecture states for a cached instruction;
- floating-point corner cases (flush to zero, canonical NaN) and the compute-then-delay
  model of the pipelined units;
- host coherence requests are served only between instructions.

Not built: the figure's "Result + zero" label on the unit output is not explained by the
architecture and has no counterpart here; power gating of the cache during idle periods
is a circuit technique outside the RTL; the host-side parts (TLB translation, permission
checks, flushing host caches before a VIMA instruction) belong to the processor.

## Files

| file | content |
|---|---|
| `rtl/vima_pkg.sv` | sizes, latencies, opcodes, element types, instruction and status records |
| `rtl/vima_top.sv` | the VIMA block: wiring of the five parts below |
| `rtl/vima_sequencer.sv` | instruction sequencer and coherence handling |
| `rtl/vima_cache.sv` | 8-line vector cache, LRU, ports |
| `rtl/vima_subreq.sv` | vault sub-request engine |
| `rtl/vima_fu_array.sv` | 256 x 32-bit unit array with per-class pipeline delay |
| `rtl/vima_lane.sv` | one 64-bit slice: integer and floating-point operators |
| `rtl/vima_fpu.sv` | IEEE single/double add, sub, mul, div, min, max |
| `rtl/vima_fill_buffer.sv` | result buffer |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_vima_top` runs the full-size block |
| `tb/vima_vault_model.sv` | behavioural memory cube: random ready, out-of-order responses, error injection |
| `tb/vima_tb_pkg.sv` | initial memory content and single-precision reference arithmetic |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself (each has a
watchdog). With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_vima_top \
    rtl/vima_pkg.sv rtl/vima_fpu.sv rtl/vima_lane.sv rtl/vima_fu_array.sv \
    rtl/vima_fill_buffer.sv rtl/vima_cache.sv rtl/vima_subreq.sv rtl/vima_sequencer.sv \
    rtl/vima_top.sv tb/vima_tb_pkg.sv tb/vima_vault_model.sv tb/tb_vima_top.sv
./obj_dir/Vtb_vima_top
```

Replace the top module and the last file for the other testbenches (`tb_vima_lane`,
`tb_vima_fu_array`, `tb_vima_fill_buffer`, `tb_vima_cache`, `tb_vima_subreq`,
`tb_vima_sequencer`). `tb_vima_top` uses the block at its default size; building it
takes a few minutes, because the 128 slices each carry two single- and one
double-precision unit, and the run itself takes seconds. It executes a memory set, two
memory copies, a vector sum, a chain of five-point-stencil-style additions, single and
double precision multiplies, a run of instructions that evicts dirty lines, every
exception cause, and host loads and stores. It checks every touched vector against a
reference model, checks the cached-instruction latency, and fails if any of these
mechanisms never happened. To try another size, give `vima_top` different
parameters: `VEC_BYTES` must stay a multiple of `LANES32 * 4`, and the cycle counts scale
with the number of beats per vector.
