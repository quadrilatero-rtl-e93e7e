# Quadrilatero: a matrix coprocessor for a small RISC-V core

A vector unit doing a multiply-accumulate reads three operands and writes one
result per MAC. That register-file traffic is what limits how many MACs fit
into a small area and power budget. A *matrix* instruction changes the ratio.
One `mmac` on two 4x4 tiles performs 64 MACs (fp32/int32) while reading only
12 register rows and writing 4. That is four times fewer register-file
accesses per MAC than a vector FMA.

This repository holds synthesizable SystemVerilog for such a coprocessor. It
sits next to a 32-bit RISC-V core and accepts matrix instructions that the
core offloads to it. It has:

- eight matrix registers `m0`..`m7`, each a 4x4 tile of 32-bit elements
  (RLEN = 128 bits per row);
- a 4x4 systolic array of MAC units (16 MACs per cycle on 32-bit data; 32 on
  int16 and 64 on int8, using SIMD);
- a load-store unit with a 128-bit memory port.

The design follows the Quadrilatero architecture published by its authors. It
is an independent RTL rendering of that description, not their code. Where the
description is silent, the choices made here are marked as such: in each
file's header comment, and in the section "Departures and open points" below.

## The instruction set

The coprocessor implements four instructions:

| instruction | effect |
|---|---|
| `mz md` | set all 16 elements of `md` to zero |
| `mld.w md, rs1, rs2` | load a 4x4 tile of 32-bit words; row *r* is read from byte address `rs1 + r*rs2` |
| `mst.w ms, rs1, rs2` | store a tile the same way |
| `mmac.<dt> md, ms1, ms2` | `md[i][j] += sum_k ms1[i][k] * ms2[j][k]` |

In `mmac`, `ms2` holds the right-hand operand transposed, so both operands are
read row by row. The data type `dt` is one of:

- **fp32**: fused multiply-add per product, round to nearest even.
- **int32**: plain integer MAC.
- **int16**: every 32-bit element holds two signed int16 values. A "product"
  is a 2-way dot product added to a 32-bit accumulator.
- **int8**: the same with four int8 values.

For the narrow types the tile is therefore 4x8 or 4x16 on the input side, and
always 4x4 of 32-bit accumulators on the output side.

The bit encoding is this design's own. It uses the RISC-V custom-0 major
opcode (`0001011`):

| bits | 31:27 | 26:25 | 24:23 | 22:20 | 19:18 | 17:15 | 14:12 | 11:10 | 9:7 | 6:0 |
|---|---|---|---|---|---|---|---|---|---|---|
| field | 0 | dtype | 0 | ms2 | 0 | ms1 | funct3 | 0 | md | 0001011 |

- funct3: 0 = `mz`, 1 = `mld.w`, 2 = `mst.w`, 3 = `mmac`.
- dtype: 0 = fp32, 1 = int32, 2 = int16, 3 = int8.
- The decoder rejects any other word (the accept bit is 0).
- `rs1` and `rs2` are not register fields. They are the two scalar operands
  that the core sends with the instruction.

### The kernel the hardware is balanced for

A matrix product C = A·B is tiled into 8x8 blocks of C. Each block lives in
four accumulators: m4 (top left), m5 (top right), m6 (bottom left) and m7
(bottom right).

```
mz m4; mz m5; mz m6; mz m7
for k in steps of 4 words:
    mld.w m0, A rows 0-3       mld.w m1, Bt rows 0-3
    mmac  m4, m0, m1
    mld.w m2, A rows 4-7
    mmac  m6, m2, m1
    mld.w m3, Bt rows 4-7
    mmac  m5, m0, m3
    mmac  m7, m2, m3
mst.w m4; mst.w m5; mst.w m6; mst.w m7
```

Each k step needs four loads and four `mmac`s. A load moves 4 rows through the
single 128-bit memory port, so it takes 4 cycles. An `mmac` occupies each
stage of the array for 4 cycles. Memory and arithmetic are therefore matched
at 16 cycles per k step. The whole design is built to keep both streams
running at the same time.

## Block structure

```
        XIF issue / result                         128-bit memory port
               |                                           |
  +------------v---------------------------+               |
  | controller: XIF - decoder - scoreboard |               |
  |             per-unit queues, dispatch  |               |
  +----+----------------+--------------+---+               |
       | mz             | mld/mst      | mmac              |
  +----v-------+   +----v-----+   +----v-----------+       |
  | permutation|   | load-    |<--| systolic array |       |
  | unit       |   | store    |-------------------------->-+
  +----+-------+   | unit     |   | 4x4 MAC units  |
       | W         +--+----+--+   +-+--+--+----+---+
       |              |R   |W       |R |R |R   |W
  +----v--------------v----v--------v--v--v----v----------+
  | matrix register file: 8 x (4 x 128 bit), row access   |
  |      4 read ports, 3 write ports, 128 bits each       |
  +-------------------------------------------------------+
```

| module | role |
|---|---|
| `quadrilatero` | top level; wires the blocks below; XIF and memory port are its ports |
| `quad_controller` | XIF handshakes, decoder, scoreboard, per-unit queues, completion queue |
| `quad_decoder` | combinational instruction decode and legality check |
| `quad_scoreboard` | ticket-based dependency tracking on the eight registers |
| `quad_mrf` | the register file (combinational reads, clocked writes) |
| `quad_perm_unit` | executes `mz` |
| `quad_lsu` | executes `mld.w` / `mst.w` through two row buffers |
| `quad_systolic_array` | executes `mmac` in three 4-cycle stages |
| `quad_mac_unit` | one processing element: fp32 FMA and int32/int16x2/int8x4 MAC |
| `quad_pkg` | sizes, instruction struct, enums, dependency-check functions |

The register-file ports are dedicated, so units never compete for them:

- **Read ports:**
  - 0: systolic array weights (`ms2`)
  - 1: systolic array feed (`ms1`)
  - 2: systolic array accumulator (`md`)
  - 3: load-store unit (store data)
- **Write ports:**
  - 0: systolic array result
  - 1: load-store unit (load data)
  - 2: permutation unit

Every unit touches a register one row per cycle. Once it has started on a
register, it never pauses. The scoreboard depends on this rule (see below).

## The systolic array

The array is weight-stationary. PE(k, j), in row k and column j, holds the
weight `ms2[j][k]`. Row *i* of `ms1` flows through, and PE row *k* receives
element `ms1[i][k]`. Partial sums run down each column, starting from
`md[i][j]` at the top. Column *j* finally delivers

`md[i][j] + ms1[i][0]·ms2[j][0] + ... + ms1[i][3]·ms2[j][3]`

at the bottom.

An `mmac` passes through three stages. Each stage takes four cycles, one per
row:

| stage | cycle *r* of the stage | register reads / writes |
|---|---|---|
| WL, weight load | row *r* of `ms2` is read; its element *k* is routed to PE(k, r) | read `ms2` |
| FD, feed | row *r* of `ms1` enters; element *k* reaches PE row *k* after *k* cycles, together with the partial sum from above; row *r* of `md` enters PE row 0 | read `ms1`, `md` |
| WB, write back | finished row *r* leaves PE row 3 and is written to `md` | write `md` |

Each stage holds a different `mmac`, so three are in flight at once.

- **Latency:** an `mmac` takes 12 cycles, from the first WL cycle to the last
  WB cycle.
- **Throughput:** a new `mmac` can enter WL every 4 cycles. At that rate all
  16 PEs are busy in every cycle.

**Double buffering.** The weights are double buffered, which makes this
overlap possible. WL of the next `mmac` fills the bank that the current FD
does not use. Bank selection toggles with each `mmac`.

**Skew.** The weight wavefront has the same diagonal skew as the data
wavefront. As a result:

- a weight is written into its PE exactly as the last data element of the
  previous `mmac` passes that PE;
- no PE ever holds a weight that is needed by two instructions.

**Stage hand-off.** Stages hand over in lockstep: an instruction moves from WL
to FD to WB only at 4-cycle boundaries, and the array itself never stalls.
A new `mmac` is accepted when WL is empty, or in WL's last cycle.

**Scoreboard events.** The array reports the first cycle of each stage to the
scoreboard:

- WL start: it has begun reading `ms2`;
- FD start: it has begun reading `ms1` and `md`;
- WB start: it has begun writing `md`;
- WB end: the instruction is complete and its id goes back to the core.

**PE arithmetic.** A PE is purely combinational and finishes in one cycle:

- **Integer modes:** sign-extend, multiply and add, wrapping modulo 2^32.
- **fp32:**
  - The 48-bit product is aligned exactly against the addend in a wide window
    with a sticky bit.
  - The sum is normalised and rounded once, to nearest even.
  - Subnormal inputs and results are flushed to zero.
  - Any NaN produces the canonical quiet NaN `0x7fc00000`.
  - An invalid operation (∞·0, ∞−∞) also gives NaN.
  - The accumulation order in a column is fixed (k = 0..3), and every step
    rounds.

## Dependency tracking: tickets, not busy bits

Units start instructions out of program order with respect to each other,
though each unit stays in order. For example, loads of the next k step stream
in while the array still works on this one. The classic busy bit per register
would serialise that: the second `mld.w m0` would wait until every reader of
the old `m0` had finished. Two properties make a cheaper rule correct:

- every access runs one row per cycle;
- no access ever pauses.

Under those properties a consumer may start **as soon as its producer has
started**, because the consumer can never overtake it. The same holds for a
writer following a reader (WAR) and for a writer following a writer (WAW).
The counters are registered, so a start becomes visible one cycle later. The
scoreboard also offers "now" versions of the start counters that include the
current cycle's starts. Two checks may use them:

- **Dispatch.** An instruction handed to its unit at the end of cycle t
  touches the register file only from cycle t+1.
- **A load's WAR check in the very cycle it starts writing.** A reader of row
  r in that cycle gets the old row through the combinational read port.

RAW and WAW checks made in the starting cycle itself use the registered
counters. Otherwise a reader would see the old row, or two writers would
collide on row 0.

`quad_scoreboard` keeps four 8-bit counters per register (`TK_W`):

- `wseq`: writes accepted;
- `wstart`: writes started;
- `rseq`: reads accepted;
- `rstart`: reads started.

Every instruction is accepted in program order. At acceptance it copies the
current `wseq` of each operand and the `rseq` of its destination as
*tickets*. Its own accesses then advance `wseq`/`rseq`. The units advance
`wstart`/`rstart` with their start events.

An instruction may start when the relevant start counter has reached each of
its tickets:

- **RAW:** `wstart[src]` has reached the instruction's `wseq[src]` ticket;
- **WAW:** `wstart[md]` has reached its `wseq[md]` ticket;
- **WAR:** `rstart[md]` has reached its `rseq[md]` ticket.

The comparison works modulo 2^8 (`quad_pkg::tk_reached`). Every check refers
only to older instructions, so no two units can wait for each other. That
rules out deadlock without any global ordering.

For counting, an `mmac` is one read of each of `ms1`, `ms2` and `md`, and one
write of `md`:

- the array reports the `ms2` read at WL start;
- it reports the `ms1` and `md` reads at FD start;
- it reports the `md` write at WB start.

`mst.w` is one read; `mld.w` and `mz` are one write each.

**Where the checks happen.**

- **Systolic array and permutation unit:** the controller checks RAW, WAW and
  WAR before handing over the instruction.
- **Load-store unit:**
  - An `mld.w` is handed over at once, so its memory reads can begin early.
    The unit keeps the load's tickets. It starts writing the register file only
    once `wstart`/`rstart` of the destination have reached them.
  - An `mst.w` waits in the controller for RAW on its source register.

## The load-store unit

The unit has two buffers, each holding four 128-bit rows. Every row passes
through a buffer:

- **Load:**
  1. Four read requests go out, one per cycle while granted.
  2. The in-order responses fill the buffer.
  3. Once the buffer is full, and the dependency check above allows it, four
     register writes follow, one per cycle.
  4. The buffer is released right after the first of those writes. A small
     write-back engine writes the other three rows from it. The next load's
     responses reach the buffer at least two cycles later, always behind the
     engine.
- **Store:** the reverse. Four register reads fill the buffer, then four write
  requests go out.

With two buffers, one instruction talks to memory while the other talks to the
register file. Loads and stores are never in flight together. An `mst.w`
waits until no load holds a buffer, and vice versa. This mutual exclusion
rules out memory hazards between them without address comparison.

Memory protocol:

- A request (`mem_req_o`, `mem_we_o`, `mem_addr_o`, `mem_wdata_o`) is held
  until `mem_gnt_i`.
- Each granted read returns one `mem_rvalid_i` with `mem_rdata_i`, in request
  order, one or more cycles later.
- Assertions check both rules.

## The controller and the core interface

The core side is a reduced CORE-V-X-style interface with two channels.

**Issue channel.**

- Signals: `valid`, `ready`, `instr`, `rs1`, `rs2`, `id`, and the
  combinational reply `accept`.
- An accepted instruction is stamped with its tickets and enters the queue of
  its unit. Each of the three queues holds 4 entries (`UQ_DEPTH`).
- `ready` drops when:
  - the target queue is full, or
  - `CQ_DEPTH` = 16 instructions are accepted but not yet reported.
- A word that is not a matrix instruction is answered with `accept = 0`.

**Result channel.**

- Signals: `valid`, `ready`, `id`.
- It reports each instruction when it has finished: the last row has been
  written to the register file, or handed to memory for a store.
- Completions from up to four units in one cycle are packed into a 16-entry
  queue. Since at most 16 instructions are outstanding, the queue cannot
  overflow.

**Status outputs.**

- `stall_hazard_o`: some queue head waits for a dependency.
- `stall_unit_o`: a head is ready but its unit is busy.
- `sa_busy_o`, `lsu_busy_o`, `idle_o`: unit and overall activity.

## Performance

The table lists cycles for the full kernel above, from the first offload to
the last result, with a memory that grants every request (one-cycle read
latency). The measurements come from `tb_quad_workloads`. The reference
column gives the cycle counts published for the original design in the same
configuration.

| M×K×N | type | cycles here | reference | ratio |
|---|---|---|---|---|
| 64×64×64 | fp32 / int32 | 19207 | 17676 | 1.09 |
| 64×64×64 | int16 | 10503 | 9484 | 1.11 |
| 64×64×64 | int8 | 6151 | 5388 | 1.14 |
| 8×1024×8 | fp32 / int32 | 4387 | 4120 | 1.06 |
| 8×1024×8 | int16 | 2211 | 2072 | 1.07 |
| 8×1024×8 | int8 | 1123 | 1048 | 1.07 |
| 64×16×64 | fp32 / int32 | 6151 | 5398 | 1.14 |
| 64×16×64 | int16 | 3975 | 3340 | 1.19 |
| 64×16×64 | int8 | 2887 | 2316 | 1.25 |

The results are bit-exact against the reference model in every case. On the
long-K workload the array is busy 93 % of the time. The reference design
reaches over 99 % there.

**Three rules make the overlap possible.** All three follow from the
row-per-cycle rule:

- **Dispatch checks include this cycle's starts.** An instruction handed to
  its unit at the end of a cycle touches the register file only in the
  following cycle.
- **A load's WAR check includes reads that start in the same cycle.**
  Register reads are combinational, so they still see the old row.
- **A load buffer is released once its first row is in the register file.**
  The remaining rows drain one per cycle, ahead of the next load's data.

**Where the remaining cycles go.** The load for the next k step into `m0`
must not overwrite `m0` before the third `mmac` of the current step
(`mmac m5, m0, m3`) has started feeding `m0` into the array. That `mmac`
cannot start its weight load before `m3` has begun to arrive. This chain of
dependencies costs about one cycle per k step on the memory port:
4387 cycles for 256 k steps, against the ideal 16 per step.

The short-K workloads lose more, for two reasons:

- The stores of the four accumulators at the end of every 8x8 block cannot
  overlap with loads, since loads and stores exclude each other.
- Some loads still wait for WAR.

The published schedule loses only three memory-port cycles per 8x8 block. How
it resolves the WAR wait on `m0` is not described. This is the main open
point of this RTL. The workload testbench checks cycle counts against the
reference with a tolerance of 30 %, so that a regression is caught.

## Departures and open points

- **Instruction encoding, XIF field widths, memory protocol, queue depths,
  ticket width:** not given in the description; chosen here as documented
  above.
- **`mmac` operand order:** follows the kernel listing (`mmac m4, m0, m1` with
  A in `m0` and transposed B in `m1`). The published scheduling chart prints
  the operands of the same step the other way round (`mmac m4,m1,m0`).
- **Permutation unit:** implements only `mz`. No other permutation instruction
  is described.
- **fp32 details:** not specified in the description; this design's choice.
  - subnormals flushed to zero;
  - single rounding per FMA;
  - canonical NaN.
- **Reset:** registers reset to zero. The weight buffers and queue storage are
  not reset, because they are always written before they are read.
- **Not included here:**
  - The host core: a CV32E40P extended with the X-interface. It is an existing
    design; the testbenches replace it with a behavioural instruction driver.
  - The evaluation system's interconnect and its four 32-KiB interleaved SRAM
    banks. The testbenches use a behavioural model with the same size and
    interleaving.
- **Area, timing and power:** figures for a 65-nm implementation are published
  for the original design (about 0.65 mm², with the systolic array dominating).
  They were not reproduced.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_quad_mac_unit` | 20 000 random MACs in all four types against an fp/integer reference model in `tb_fp_pkg` (written independently, using `real` arithmetic with explicit fp32 rounding) |
| `tb_quad_mrf` | random traffic on all 4 read and 3 write ports against a model |
| `tb_quad_perm_unit` | `mz` zeroes exactly the 4 rows of its register, 4 cycles each, back to back |
| `tb_quad_lsu` | loads and stores with random strides and random memory stalls, two in flight, load/store exclusion |
| `tb_quad_systolic_array` | random `mmac` in all types against the reference; 12-cycle latency; 4-cycle issue interval; one event pulse of each kind per instruction |
| `tb_quad_decoder` | every register/type combination; 20 000 random words for the legality rule |
| `tb_quad_scoreboard` | directed RAW/WAW/WAR cases from the kernel; 20 000 random cycles against a counter model |
| `tb_quad_controller` | accept/reject, out-of-order dispatch across units, hazard and unit stalls, queue-full and outstanding-limit back-pressure, completion ordering under result back-pressure |
| `tb_quadrilatero` | the top at its default size, running the full kernel on 16×(16·e)×16 problems in all four types. It also runs with random memory stalls (25 %) and result-channel back-pressure (40 %), and rejects an illegal instruction. It counts each mechanism and fails if any never occurred. The mechanisms are: hazard stalls, unit stalls, three `mmac`s in the array at once, two loads in flight, memory stalls, result back-pressure and rejection. |
| `tb_quad_workloads` | the twelve M×K×N/type combinations of the table above, at full size, with cycle counts |

`tb_quad_env.sv` holds the core stand-in, the memory model instance and the
kernel driver shared by the last two. `tb_mem_model.sv` is the memory model:

- four 32-KiB banks, interleaved by 128-bit row;
- a one-cycle read latency;
- an optional random stall percentage.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_quadrilatero \
  -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/quad_pkg.sv tb/tb_fp_pkg.sv tb/tb_quad_isa_pkg.sv tb/tb_quadrilatero.sv
./obj_dir/Vtb_quadrilatero
```

Replace the top module name and the last file to run another testbench. The
packages must come first on the command line.

## Changing the design

- `quad_pkg` holds the sizes:
  - `RLEN` (bits per row)
  - `NREGS`
  - `ID_W` (XIF id width)
  - `TK_W` (ticket width)
- The array size follows `RLEN/32`. The 4-cycle stage length and the 4-row
  register are the same number, and the code relies on that.
- The controller's queue depths are module parameters.
- To add an instruction:
  - extend `funct3_e` and the decoder;
  - state in `reads_md`/`writes_md` whether it reads or writes `md`, so that
    the scoreboard counts it;
  - make its unit report a start event for each register access on the same
    row-per-cycle rule.
