# A lane-based RISC-V vector unit in SystemVerilog

This is a vector coprocessor for a 64-bit RISC-V core. It follows the
organisation of the Ara vector processor (Cavalcante, Schuiki, Zaruba,
Schaffner and Benini, IEEE TVLSI 2020). The main idea is to split the vector
machine into identical **lanes**. Each lane owns a slice of every vector
register and the arithmetic units that work on that slice. An element-wise
instruction such as `vfmadd` then runs in all lanes at once without any lane
talking to another. Only two blocks see all lanes at the same time:

- the load/store unit, which owns the single memory port;
- the slide unit, which moves elements between lanes.

Performance therefore grows with the number of lanes. The memory port widens
with them at 32 bit per lane, which keeps 2 bytes of memory bandwidth per
double-precision FLOP.

The scalar core keeps fetching and decoding. It passes each vector
instruction, with its scalar operands, to the vector unit. The scalar core
waits only when it needs a result back, such as an element read out of a
vector register.

The default build has **4 lanes**. Each lane has a 16 KiB register file in
eight 64-bit banks, giving 32 vector registers of 256 double-precision
elements each. Each lane does one 64-bit FPU operation per cycle, and the
memory port is 128 bit wide. Up to 8 vector instructions can be in flight at
once.

```
 scalar core ──insn/answer──▶ ara_dispatcher ─▶ insn queue ─▶ ara_sequencer
                                                             │ operation broadcast
           ┌──────────────┬──────────────┬───────────────────┼──────────────┐
         lane 0         lane 1    …    lane N-1           vlsu ◀──AXI──▶ memory
 (VRF, ALU, MUL, FPU port, operand queues, lane sequencer)     sldu
           └──────── 64-bit word per lane to/from vlsu and sldu ┘
```

## How a vector is spread over the machine

A vector register is a sequence of 64-bit **words**. With element width SEW,
one word holds 64/SEW elements, packed little-endian: element 0 sits in the
low bits.

- Word `w` of a register lives in lane `w mod N`, at local word index
  `k = w div N`.
- A unit-stride memory beat of 32·N bits carries N/2 consecutive words. The
  load unit therefore hands each beat to half of the lanes. For an aligned
  access, lanes 0 … N/2-1 take one beat and lanes N/2 … N-1 take the next.
  The store unit collects a beat the same way. No crossbar is needed, only a
  selection of which lanes take part.

Inside a lane, the 32 registers of 64 words each are spread over 8
single-ported banks in a **barber's-pole** pattern: local word `k` of register
`v` sits in bank `(k + v) mod 8`, at row `8v + k/8`. Without the shift, every
register would start in bank 0. Two instructions that start together on
different registers would then fight for the same bank on every cycle.
With the shift, `vd`, `vs1` and `vs2` of a typical instruction start in
different banks and stay out of each other's way.

`ara_pkg::vrf_bank` and `ara_pkg::vrf_row` hold this mapping in one place.

## The lane

Each lane (`lane.sv`) has the following parts:

- **Register file** (`vrf.sv`): eight banks, each a 1-read/1-write array with
  one cycle of read latency, like an SRAM macro. Each bank has its own
  arbiter (`vrf_bank_arbiter.sv`). The arbiter serves eleven requesters:
  - seven operand-fetch streams: ALU a and b; FPU/MUL a, b and c; store data;
    index;
  - four write-back ports: ALU, FPU/MUL, load, slide unit.

  The arbiter has two priority levels. Memory traffic (store data, index,
  load and slide write-backs) is low priority, so irregular memory accesses
  do not break the rhythm of the arithmetic streams. Round robin rotates
  inside each level. A low-priority requester that has waited 4 cycles is
  served once, so it cannot starve.
- **Operand queues** (`operand_queue.sv`, 64 bit wide) sit between the
  register file and the units. They absorb bank conflicts:
  - depth 5 for the FPU/MUL operands a, b and c and for the ALU operands a
    and b;
  - depth 2 for store data and index;
  - a 2-entry queue each for incoming load data and slide-unit results.

  A stream only requests a word while its queue has room for it, counting the
  word that is already on its way from the bank.
- **Result queues** of depth 4 for the ALU and for the FPU/MUL collect results
  before write-back. A unit is only started when its result queue can take
  every result in flight. The units therefore need no stall input.
- **Execution units.**
  - `simd_alu` does add, sub, logic, shifts, min and max.
  - `simd_mul` does the low product, the signed and unsigned high product, and
    multiply-add.
  - Both work on one 64-bit, two 32-bit, four 16-bit or eight 8-bit elements
    per cycle, with one cycle of latency.
  - The floating-point unit is an existing multi-precision IEEE FPU and is not
    part of this RTL. Each lane brings out an FPU port: `fpu_valid_o`, op, SEW,
    and three operands; results come back in order on `fpu_valid_i` and
    `fpu_result_i`.
  - The multiplier and FPU share one set of operand queues, so they never run
    at the same time.
- **Lane sequencer** (`lane_sequencer.sv`) has three operation queues of 4
  entries, one per execution context:
  - ALU (also used by the slide unit, which borrows the ALU operand queue);
  - FPU/MUL;
  - load/store.

  The head of each queue is the operation running in that context. The lane
  sequencer generates its read streams, counts its write-backs, and tells the
  main sequencer when the operation is finished in this lane.

## Running instructions concurrently without forwarding

This is the subtle part of the design. An operation is **issued** when the
main sequencer broadcasts it to all lanes. It is **finished** when every lane,
plus the VLSU or SLDU if involved, has reported completion. Up to eight
operations are in flight, identified by a 3-bit id.

*Structural hazards* stall the main sequencer. It waits while any of these
holds:

- no id is free;
- the target context queue in the lanes is full;
- the VLSU or slide unit is still busy with a previous instruction.

*Data hazards* never stall the sequencer. At issue, it compares the new
instruction's registers with those of every running one. It records two
bitmasks of ids in the operation:

- `raw`: older instructions whose destination this one reads;
- `wawar`: older instructions that read or write this one's destination.

The lanes resolve these masks word by word:

- **Read-after-write, chaining.** Each lane keeps, for each id, a counter of
  the words that instruction has written in this lane. Word `k` of a source
  operand is requested only once every older producer in `raw` has written
  word `k`.

  A consumer therefore follows its producer at the producer's pace, a few
  cycles behind. For example, `vfmadd` can start on the first loaded words
  while the load is still arriving. Operands always come from the register
  file; there is no forwarding path.
- **Write-after-read and write-after-write.** An instruction may read and
  compute early, but its write-back is held until the older instructions in
  `wawar` have finished in this lane.
- **Id reuse.** An id is given to a new instruction only when no in-flight
  instruction still names it in its masks. Otherwise a stale dependence could
  attach itself to an unrelated newer instruction.

## Memory path (VLSU)

The VLSU (`vlsu.sv`) runs one memory instruction at a time. It is made of
three parts:

- **Address generator** (`vlsu_addrgen.sv`). It merges a unit-stride access
  into bursts of full-width beats. Bursts are split at 256 beats and at 4 KiB
  boundaries. The base only has to be 8-byte aligned, so the first beat may
  start mid-way and the word offset is carried along. Constant-stride and
  indexed accesses become one 8-byte single-beat transfer per element. For
  indexed accesses, the byte offsets are popped from the index stream of lane
  `g mod N` for element `g`.
- **Load unit** (`vlsu_load.sv`). It takes read beats into a 2-beat buffer and
  hands each beat's words to their lanes once all target lanes can take them.
- **Store unit** (`vlsu_store.sv`). It collects one word from each lane into a
  write beat with byte strobes. It reports done once the last write response
  has arrived.

The port is a reduced AXI-like master with these channels:

- AR and AW carry address, `len` and `size`;
- R carries data and `last`;
- W carries data, strobe and `last`;
- B is the write response.

The bursts are INCR bursts with no ids and no error responses.

## Slide unit

The slide unit (`sldu.sv`) handles four instructions:

- `vslideup`, `vslidedown`: `vd[i] = vs2[i ∓ amount]`;
- `vins`: insert a scalar into one element;
- `vext`: read one element out to the scalar core.

It treats a register as rows of N words, one word per lane. A slide by `s`
words builds destination row `q` from source rows `P` and `P+1`, where
`P = q + floor(s/N)`, with word offset `s mod N` inside that two-row window.

The lanes stream the needed source rows in lock-step. The unit keeps a
window of two rows and emits one destination row. It then moves the window
by one row and fetches the next source row, so it produces one row every
second cycle.

Source words at or beyond the vector length read as zero. After a slide-up,
words below the slide amount are left untouched. `vext` answers the scalar
core when the element has been read. Until then, the sequencer takes no new
instruction.

## Scalar-core interface and exceptions

The top (`ara.sv`) receives **decoded** instructions as an `ara_req_t`:

- `op` and `sew`;
- `vd`, `vs1`, `vs2`;
- `use_scalar`, which replaces operand a by a scalar;
- `scalar`: the value of rs1, used as base address, AVL, slide amount or
  index;
- `stride`: the value of rs2, used as the stride in bytes, or the value for
  `vins`.

Operand conventions, with `a` = vs1 or the scalar, `b` = vs2, and `c` = the
old vd:

- arithmetic: `vd = b op a`;
- multiply-add: `vd = a·b + c`;
- store and scatter: data in `vs1`;
- gather and scatter: byte offsets in `vs2`.

The dispatcher (`ara_dispatcher.sv`) has two rules:

- it accepts an instruction only while `insn_nonspec_i` says the instruction
  is no longer speculative, and never during `flush_i`;
- it queues up to 4 instructions.

Every instruction gets exactly one answer (`resp_valid_o`, `resp_o`):

- it is acknowledged when it issues, so usually long before it finishes;
- `setvl` answers with the new vector length,
  `vl = min(AVL, VLMAX)` with VLMAX = 512 B × N / (SEW/8), which is 256 doubles at N = 4;
- `vext` answers with the element.

An instruction that cannot run correctly is answered with `exception = 1` and
is not executed. These cases are:

- a memory base that is not 8-byte aligned, or a stride that is not a multiple
  of 8;
- a strided, indexed or slide instruction with SEW ≠ 64;
- an insert or extract index ≥ vl.

The outputs `ev_struct_stall_o`, `ev_hazard_o`, `ev_exception_o` and `idle_o`
are event pulses for performance counters and testbenches.

## Parameters

All sizes are in `ara_pkg.sv`:

- `NrLanes` = 4;
- `NrBanks` = 8;
- `VrfBytesLane` = 16384;
- `NrInsn` = 8.

The memory width (`AxiDataW` = 32·`NrLanes`) and the register geometry are
derived from these. The top has no parameter list, so one package edit
resizes the whole design. The published design also comes in 2-, 8- and
16-lane versions; set `NrLanes` to match. Only the 4-lane build has been
simulated.

## What differs from the published design

These parts of the published design are missing:

- **Masked (predicated) execution.** This also removes the three mask operand
  queues (7 of the 10 operand queues are built) and the worst case of four
  operands per instruction.
- **Widening and narrowing instructions** (data promotion), FP conversions,
  and reductions. The published design leaves out reductions as well.
- **The scalar core, the instruction decoder, the FPU, the memory
  interconnect and the width converter.** These are external. The vector
  instructions' binary encodings are not reproduced; the interface takes
  decoded instructions instead.

These are choices of this RTL:

- the arbiter weighting;
- the lane sequencer's word counters;
- the WAR/WAW rule;
- the slide unit's throughput;
- one memory instruction at a time;
- single-beat strided and indexed accesses;
- SEW = 64 only for slides, strides and indices;
- the exception list;
- the 4-entry instruction queue.

The published design forbids chaining into and out of shuffles. Here,
chaining into a slide uses the same per-word throttling as any other
operand.

## Simulation

The testbenches are in `tb/`:

| Testbench | What it checks |
|---|---|
| `tb_ara` | The full 4-lane design at default sizes, with a randomly stalling AXI memory (`axi_mem_model`) and a behavioural FPU per lane (`fpu_model`, 3 cycles, double precision). It runs DAXPY (n = 200, Y unaligned), integer chains at 64 and 16 bit, strided loads, gather, scatter, strided store, slides, insert/extract, a misaligned access (exception), and a 16×16 matrix multiply `C = A·B + C` written as in the published kernel. It checks every result and the throughput of a 256-element FMA. It also checks that stalls, hazards, throttled fetches, bank conflicts, bursts and the exception all occur. |
| `tb_ara_sequencer` | The main sequencer alone, with lane, load/store and slide-unit models that finish at random times. Random instructions on five registers give many dependences. It checks the RAW and WAR/WAW masks against its own table of running instructions, that ids are free and unreferenced when reused, that eight instructions do run at once, setvl answers, exceptions, and that vext is answered with its result only after it completes. |
| `tb_vlsu` | Random unit-stride, strided and indexed loads and stores against a reference memory, with stalling lane models. It also checks that an unstalled 256-word load or store runs at one beat per cycle. |
| `tb_sldu` | Random slides, inserts and extracts against a reference, with lane models that stall. |
| `tb_vrf`, `tb_vrf_bank_arbiter` | Register file contents and conflicts; arbiter priority, fairness and low-level weight. |
| `tb_simd_alu`, `tb_simd_mul` | All operations at all four element widths, plus one-cycle latency. |
| `tb_operand_queue`, `tb_ara_dispatcher` | FIFO behaviour; non-speculative acceptance, order, queue depth and the pending count. |

Each testbench prints `TB_RESULT checks=N failures=M`. To run one:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ara \
          -Irtl -Itb rtl/ara_pkg.sv tb/tb_ara.sv
./obj_dir/Vtb_ara
```

Measured in `tb_ara` at 4 lanes, with the random memory stalls:

- **256-element `vfmul`:** about 93 cycles from issue to finish. The ideal is
  64 cycles of FPU work per lane; the rest is start-up and draining.
- **Unit-stride load or store of 256 words** (128 beats of 128 bit), measured
  in `tb_vlsu` without stalls: 131 cycles.
- **16×16 MATMUL:** about 3200 cycles, with the FPUs busy about a third of the
  time. At this size each FMA keeps a lane busy for only 4 cycles. Issue and
  bookkeeping of the short instructions dominate, as the published evaluation
  also observes for small matrices.
