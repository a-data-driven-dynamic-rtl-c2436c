# Canon: a PE array steered by data-driven orchestrators

Sparse kernels are irregular. Where the next non-zero sits, how long a row is,
and which row of PEs falls behind are only known at run time. A fixed
accelerator handles this by hard-wiring one dataflow. A CGRA fixes its schedule
at compile time and so cannot react to the data. Canon separates control from
compute to get the reaction without paying for a CPU-like control path in
every PE:

* **Compute** is an 8 × 8 mesh of simple PEs. Each PE has a 4-lane INT8 vector
  lane, its own data memory and a small scratchpad, and a circuit-switched
  router to its four neighbours. A PE has no control logic. It runs whatever
  instruction it is handed.
* **Control** is eight *orchestrators*, one at the west edge of each PE row.
  An orchestrator is a small programmable FSM. Every cycle it looks at:
  * the next item of its row's input meta-data stream (a non-zero with its
    column index, an end-of-row mark, ...);
  * the message from the orchestrator above;
  * a few bookkeeping registers.

  From these it makes one instruction for its row. Its behaviour is a 1024 ×
  48-bit look-up table, loaded before the kernel runs.
* **Time-lapsed SIMD** links the two. The instruction enters PE column 0. Each
  PE passes it east after its own 3-stage pipeline, so column *c* runs the same
  instruction 3·*c* cycles after column 0. One decision therefore drives a
  whole row, as in SIMD, but the row never has to execute in lock-step.
  Because every delay in the array is fixed, an orchestrator knows exactly
  when the data that a message from above describes reaches its own PEs.
  Routing can then be planned cycle by cycle, with no flow control in the
  network.

This repository holds synthesizable SystemVerilog for the PE (with its memories,
vector lane and router), the orchestrator (with its LUT), and the full array. It
also holds self-checking testbenches, including an end-to-end sparse–dense
matrix multiplication (SpMM) on the full-size array and a test of the
"spatial" (CGRA-like) mode.

## Sizes

| Item | Value | Where it comes from |
|---|---|---|
| Array | 8 rows × 8 columns (`ROWS`, `COLS`) | paper |
| Vector lane | 4 lanes × INT8, i.e. a 32-bit vector word | paper |
| Data memory | 4 KB per PE = 1024 vector words, 1 read + 1 write port | paper (size), ports chosen here |
| Scratchpad | 64 B per PE = 16 vector words, dual-port (1R + 1W) | paper |
| Orchestrators | 8, one per row | paper |
| Orchestrator LUT | 2^10 entries × 48 bits (6 KB) | paper |
| LUT index | 3-bit state, 3-bit input tag, 2-bit message id, 2 condition bits | split chosen here, total from paper |
| PE pipeline | 3 stages: LOAD, COMPUTE, COMMIT | paper |
| SIMD registers per PE | 4 | chosen here |
| Address | 12 bits, unified across memories, registers and router | chosen here |
| Row / column ids in the stream | 16 bits | chosen here |

The full array at these sizes synthesizes to roughly 25 k cells, 83 k flip-flop
bits, and 2.5 Mbit of memory arrays:
* 64 data memories;
* 64 scratchpads;
* 8 LUTs.

## One row, cycle by cycle

The orchestrator's decision for cycle *t* is combinational, from its registers
through the LUT. It is registered into `instr_out` at the end of *t*. Then:

| cycle | what happens |
|---|---|
| *t* | orchestrator decides |
| *t*+1 | instruction is at the input of PE (r, 0) |
| *t*+2 | PE (r, 0) LOAD: memory reads issued, router inputs sampled |
| *t*+3 | PE (r, 0) COMPUTE |
| *t*+4 | PE (r, 0) COMMIT; the instruction is offered to PE (r, 1) |
| *t*+5 | word sent by PE (r, 0) is on its outgoing link; PE (r, 1) is in LOAD |

Column *c* lags column 0 by 3·*c* cycles.

The orchestrator of row *r*+1 needs data from PE (r, c) to meet its own
instruction in the LOAD stage of PE (r+1, c). That happens for an instruction
that orchestrator *r*+1 decides at *t*+3. Messages between orchestrators are
registered once, which takes one cycle. So each orchestrator also delays the
message it receives by two more registers (`MSG_DLY = PE_STAGES − 1`). From
then on, a message such as "the word on your north link is the partial sum of
row 17" is seen in exactly the cycle where it is true, in every column.

The orchestrators never stall one another. A program must act on every message
in the cycle the message is seen. Either it uses the data or it bypasses it
onward.

## The PE

### Unified address space

An instruction is `op, op1, op2, res`. It also carries:
* a configuration-only flag;
* a router bypass (source direction → destination direction);
* a 32-bit immediate vector.

Each of the three addresses is 12 bits, and the top two bits name the
resource:

| region | bits [11:10] | index |
|---|---|---|
| data memory | `00` | word 0–1023 |
| scratchpad | `01` | entry 0–15 |
| router / special | `10` | 0 N, 1 E, 2 S, 3 W, 4 immediate, 7 null (reads 0, writes nothing) |
| SIMD register | `11` | 0–3 |

A source in the router region reads a neighbour's incoming link. A destination
there sends the result to that neighbour. The orchestrator places the value of
the current non-zero into the immediate, copied onto all four lanes. `MAC`
reads its destination as the accumulator. `MOVCLR` sends a local location
somewhere (usually a link) and clears it in the same instruction. It is the
one-instruction "flush a partial sum" used by the SpMM program.

Opcodes are NOP, MOV, ADD, SUB, MUL, MAC, MAX, MIN, AND, OR, XOR, REDSUM and
MOVCLR. All arithmetic wraps at 8 bits per lane.

### Pipeline and hazards

* **LOAD** issues at most one data-memory read and one scratchpad read. These
  are synchronous SRAM reads, so the data arrives in COMPUTE. LOAD also
  samples router inputs and registers.
* **COMPUTE** runs the vector lane.
* **COMMIT** writes one location or one link. It can drive a bypass word in
  the same cycle.

Two forwarding paths make back-to-back accumulation into one location work
without bubbles:
* from COMMIT into the LOAD stage of the instruction two behind;
* from COMMIT into the COMPUTE stage of the instruction right behind.

Each router output carries one word per cycle. If a COMMIT write and a bypass
aim at the same direction, the COMMIT word wins. The router also raises
`conflict` and an assertion fires, because a program should never do this.

The data memory has a second writer, the memory-mover port (`mv_*`), which
loads operands before a kernel. That write goes through only in cycles when
COMMIT is not writing the data memory (`mv_ready`).

### Configuration-only instructions and hold (spatial mode)

An instruction with `cfg = 1` moves along the row like any other but has no
effect. When an orchestrator raises `hold` for its row:
* every PE keeps the instruction in its LOAD stage;
* every PE executes that instruction for real each cycle;
* instructions stop moving along the row.

An orchestrator can therefore spend 3 × 8 cycles placing one instruction per
PE and then freeze the row into a fixed spatial pipeline. A CGRA mapping is
this special case.

## The orchestrator

This is the core of the design and its least conventional part.

### Registers

* **state**: 3 bits.
* **meta registers of the kernel**:
  * `start_rid` / `start_off`: row id and scratchpad slot of the oldest
    partial-sum row this PE row still manages;
  * `cur_rid` / `cur_off`: row id and slot of the newest one;
  * a 16-bit counter.

  The managed rows form a circular FIFO in the scratchpad. Its length is set by
  `cfg_depth` (1–16), so a program can use less than the physical scratchpad.
* **input meta register**: the head of the input stream (tag, index, 8-bit
  value). It is refilled by a ready/valid handshake when the program pops it.
* **message register**: (id, row id), delayed as explained above.

### Fixed conditions

Two condition bits go into the LUT index. They are computed by fixed logic,
not by the LUT:

* `cond[0]` ("managed"): the message names a row inside the window
  [`start_rid`, `cur_rid`]. This is computed modulo 2^16, so ids can wrap.
* `cond[1]`: the window is full (`cur − start + 1 ≥ cfg_depth`). If
  `cfg_cond1_cnt` is set, it instead means the counter has reached
  `cfg_cnt_limit` (counter + 1 ≥ limit). This serves fixed-length phases, such
  as N:M groups or a configuration phase.

### LUT index and word

The index is `{state[2:0], tag[2:0], msg_id[1:0], cond[1:0]}`. The read is
asynchronous, so one decision takes one cycle. The 48-bit word is:

| bits | field | meaning |
|---|---|---|
| 47:45 | `next_state` | |
| 44:41 | `op` | opcode issued |
| 40:35, 34:29, 28:23 | `op1`, `op2`, `res` | address generators: 3-bit offset mode + 3-bit base-register select |
| 22, 21:20, 19:18 | `byp_en`, `byp_src`, `byp_dst` | router bypass for the row |
| 17:16, 15:14 | `msg_id`, `msg_sel` | message sent south; its row id is start, cur, the incoming one, or the input index |
| 13 | `pop_input` | consume the input meta register |
| 12, 11 | `start_inc`, `cur_inc` | advance the FIFO ends (offsets wrap at `cfg_depth`) |
| 10 | `imm_val` | immediate = input value on all lanes |
| 9, 8 | `cfg`, `hold` | issue configuration-only; hold the row |
| 7, 6 | `cnt_inc`, `cnt_clr` | counter control |
| 5:0 | reserved | |

**Address generation.** An address is `base register + offset`. There are
eight 12-bit base registers (`cfg_base`), for example "data memory word 0",
"scratchpad entry 0", "north link" or "immediate". The offset is one of:
* zero;
* the input index ANDed with `cfg_idx_mask`;
* the scratchpad slot of `cur`;
* the scratchpad slot of `start`;
* the slot of the row named by the message.

This lets one LUT word express "MAC into the newest partial sum, using the B
row picked by the column index" without knowing any concrete numbers.

## Example program: SpMM with asynchronous reduction

The program (`tb/spmm_prog_pkg.sv`) computes C = A × B with a row-wise product.
**Data layout:**
* B's K rows are split into 8 slices of H rows, one per PE row.
* B's columns are split into 8 slices of 4, one per PE column.
* The PEs of a row all hold the same B rows, each for its own 4 columns, so one
  column index means the same data-memory address in every PE of the row.

**Stream:** orchestrator *r* receives, for every row of A, the non-zeros in its
K slice followed by an end-of-row mark. Rows of PEs get different numbers of
non-zeros, so they drift apart in time. The program absorbs the drift with one
state:

| message | input | condition | issued |
|---|---|---|---|
| psum of row x | any | x managed | `spad[slot(x)] += N` (accumulate) |
| psum of row x | NNZ | x not managed | bypass N→S, pass the message on, **and** `spad[cur] += dmem[col & mask] · value` |
| psum of row x | other | x not managed | bypass N→S, pass the message on |
| none | NNZ(col, value) | | `spad[cur] += dmem[col & mask] · value`, pop |
| none | row end | window full | `S ← spad[start]`, clear it; message "psum of row `start`"; start++, cur++, pop |
| none | row end | not full | cur++ (the window grows), pop |

**Why it balances load.** A row of PEs that is ahead does not wait for the
partial sums from above. It keeps them in its scratchpad FIFO and adds them
whenever they arrive. A row that is behind lets partial sums for rows it has
not reached pass straight through. Addition is associative, so C is complete
once every contribution of every row has reached the bottom edge.

**Reading the result.** A word that leaves the bottom of column *c* belongs to
the row named in the bottom orchestrator's message from 4 + 3·*c* cycles
earlier.

**End of the stream.** The end-to-end test appends `cfg_depth` extra row-end
marks to each stream. These push the last managed rows out of every FIFO.

## Where this design departs from the paper, or fills gaps

* **Partial sums stay in the scratchpad.** The paper's pseudo-code accumulates
  in a register and then moves the register to the scratchpad. Here MAC and
  accumulate both address the scratchpad entry directly, and forwarding makes
  that hazard-free.
* **Bypass and MAC in the same cycle.** When a partial sum is bypassed and a
  non-zero is waiting, both are issued together, so local work continues as
  the text describes. The pseudo-code would issue a NOP in that case.
* **What a flush names.** A flush always sends the oldest managed row and names
  it in the message. The pseudo-code writes `PSUM[RID]` for `FLUSH(RID)`; the
  text says the oldest is flushed. Both agree when rows complete in order, as
  they do here.
* **When the window advances.** The pseudo-code advances the oldest-row
  pointer on every row end. It only reads the buffer out when the buffer is
  full. Here a row end either grows the window (not full) or flushes and
  slides it (full). The result is the same, and the pointer bookkeeping stays
  explicit.
* **Memory totals.** The paper's table gives 4 KB per PE but 288 KB in total,
  while 64 × 4 KB is 256 KB. The per-PE figure is used.
* **Stage name.** The PE figure labels the middle stage EXECUTE; the text says
  COMPUTE. They are the same stage.
* **Arithmetic width.** INT8 partial sums wrap at 8 bits. The paper gives no
  accumulator width.
* **Input values.** The input value reaches the PEs inside the instruction as
  an immediate, not over a data link from the west.
* **Choices of this design where the paper is silent:**
  * the LUT word layout and index order;
  * the fixed conditions;
  * the offset modes and base registers;
  * the opcode set beyond ADD/MAC/MOV;
  * MOVCLR;
  * the message delay of two registers;
  * forwarding;
  * the four SIMD registers;
  * scratchpad clear on reset;
  * the memory-mover port arbitration.
* **Not built: memory movers and main memory.** The paper only names the
  memory movers around the array and the LPDDR5x main memory. The array's edge
  links, input streams and memory-load port are top-level ports, and the
  testbenches play the movers' part. Off-chip tiling is therefore not part of
  this RTL.
* **Not written: other programs.** Only SpMM and the spatial adder chain have
  bitstreams here. The SpMM program also covers dense A (GEMM as a special
  case) and 2:4 streams, since it needs no knowledge of the pattern. SDDMM, a
  systolic-style GEMM, an N:M program that uses the group counter, and the
  PolyBench kernels would need their own LUT contents. The hardware provides the mechanisms those
  mappings use (scratchpad reuse, bypass, counter condition, hold), but they
  have not been exercised with those kernels.

## Verification

Every testbench is self-checking. Each ends with a line
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_vector_lane` | 4000 random operations of every opcode against a lane-by-lane model |
| `tb_data_mem` | every word written then read back, read latency |
| `tb_scratchpad` | reset clearing (twice), simultaneous read and write, old data on a same-entry collision |
| `tb_router` | random read selections and commit/bypass writes; idle outputs drop valid |
| `tb_orch_lut` | random writes and asynchronous reads of all 1024 entries |
| `tb_pe` | directed program: 3-cycle instruction hand-off, link timing, forwarding into a register and into the scratchpad, mover writes, MOVCLR, bypass during MAC, configuration-only instructions, hold |
| `tb_orchestrator` | the SpMM program under random input and random messages (with `en` gaps), compared cycle by cycle with a model of the decision rules; message delay; window registers |
| `tb_canon_top` | full 8 × 8 array at default parameters. SpMM with M = 24, K = 32, N = 32 and unbalanced rows, checked against a reference product (329 cycles). Then the spatial adder chain, checked for values and for 3 cycles per PE. It counts MACs, accumulations, bypasses, flushes, window growth, configuration-only issues and held cycles, and fails if any count is zero |

| `tb_spmm_sparsity` | full array, the same SpMM program on M = 32, K = 64, N = 32 with A dense, about 15 %, 45 % and 85 % zeros, and 2:4 structured, using FIFO depths 4, 8 and 16; every element of C checked each time |

Measured on the last test:

| pattern of A | FIFO depth | cycles (excluding the final 200 drain cycles) |
|---|---|---|
| dense | 4 | 310 |
| ~15 % zeros | 4 | 330 |
| ~45 % zeros | 8 | 275 |
| ~85 % zeros | 16 | 172 |
| 2:4 | 4 | 302 |

The lower bound is one non-zero or row end per cycle for the busiest
orchestrator. For the dense case that is 32 × 9 = 288 cycles. The gap above
the bound is the cycles spent accumulating partial sums from above, which use
the row's issue slot.

The end-to-end test takes under a minute to build and run with Verilator. The
testbenches use only 2-state constructs.

To run one test with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/canon_pkg.sv rtl/vector_lane.sv rtl/data_mem.sv rtl/scratchpad.sv \
  rtl/router.sv rtl/pe.sv rtl/orch_lut.sv rtl/orchestrator.sv rtl/canon_top.sv \
  tb/spmm_prog_pkg.sv tb/tb_canon_top.sv --top-module tb_canon_top -o sim
./obj_dir/sim
```

For a unit test, list only the files that test uses, with the package first.

## Files

* `rtl/canon_pkg.sv` holds the sizes, the unified address encoding, the
  opcodes, and the instruction, link, meta, message and LUT-word types.
* `rtl/vector_lane.sv`, `data_mem.sv`, `scratchpad.sv`, `router.sv` and
  `pe.sv` make up the PE.
* `rtl/orch_lut.sv` and `orchestrator.sv` make up the row controller.
* `rtl/canon_top.sv` is the 8 × 8 array with its eight orchestrators. It wires:
  * the instruction chains along rows;
  * the message chain down the orchestrators;
  * the mesh links;
  * the edge ports.
* `tb/spmm_prog_pkg.sv` is the SpMM bitstream generator used by the tests.
