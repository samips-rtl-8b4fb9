# SAMIPS: a MIPS I pipeline whose stages are controlled only by handshakes

SAMIPS is a five-stage MIPS R3000-compatible integer pipeline (IF, ID, EX, MEM, WB). It is
built so that no global clock or central control decides what happens when. Each functional
unit is a process that waits for its input channels, does its work, and offers its results
on output channels. Two problems that a synchronous MIPS solves with its clock have to be
solved differently here:

* **Control hazards.** Branches, jumps and exceptions can come from three different stages
  at unpredictable times. SAMIPS solves this with a *colour vector*. Every instruction
  carries the colour vector. Every stage and the Address Arbitration Unit (AAU) keep their
  own copy, and use it to tell valid instructions from ones fetched down a path that is
  now dead.
* **Data hazards.** Without a clock there is no fixed "result is ready two cycles later".
  Instead, the register bank keeps a small queue of the destination registers still in
  flight (the DHDQ). From that queue it works out, at read time, which later unit will
  forward each operand. It also announces to the forwarding unit how many forwarded results
  to expect.

This RTL keeps the structure of the original Balsa design: the units, the channels between
them, and the algorithms. It is written as synchronous SystemVerilog. Every handshake
channel becomes a valid/ready pair, and a transfer happens on a rising clock edge where both
are high. A unit therefore still only acts when its channels let it. The order of events
comes from the handshakes, not from a fixed pipeline timing. Latencies vary and are not
fixed anywhere, and the end-to-end test runs with random memory latencies.

## Units and channels

```
           +-------+  PCvalue  +------+  PCplus4 --------------------+
  NPC ---->|  PC   |---------->| ADD4 |------------------+           |
   ^       +-------+           +------+  BaseAddID       |           v
   |           | CInsAdd (address + colour)    |         |        +------+  NTarget1
   |           v                               |         |        | Arb1 |----------+
   |       instruction memory                  |         |        +------+          |
   |           | CIns (instruction + colour)   v         |  MEMch ---^              v
   |           +------------------------>+---------+     |                   +-------+
   |                                     | DeCode  |-- IDch --->+------+     |  AAU  |--> CP0W2
   |                                     +---------+            | Arb2 |---->|       |
   |                    RegRead |  EXCtrl |  CP0RAdd  EXch ----->+------+     +-------+
   |                            v         |                 NTarget2             |
   |                     +---------+      |                                      |
   |                     | RegBank |------+---> FRACtrl, FWCtrl --> FWunit        |
   |                     +---------+      |   ReadData0/1, PIDRd   FOp0/1/2      |
   |                        ^             v                         |            |
   |          RegWrite      |        +---------+ <-- Mux1/2/3 ------+            |
   |          +-------------+        | EXEunit |---- EXch                        |
   |          |                      +---------+                                 |
   |     +--------+  FMEMRes         |  MEMCtrl, EXRes, MemD, EXRd               |
   |     | WBUnit |----> FWunit      v                                           |
   |     +--------+  <--------- +--------+ -- MemAdd/WriteData/MemData --> data memory
   |         | CP0W1            | MemInt | -- FEXRes --> FWunit                  |
   |         v                  +--------+ -- MEMch                              |
   |      +-----+                                                                |
   |      | CP0 | -- CP0RData --> EXEunit, user_mode --> MemInt                  |
   |      +-----+                                                                |
   +------------------------------------------------------------------ NPC ------+
```

| Unit | Module | Role |
|---|---|---|
| PC | `samips_pc` | Holds the coloured PC. Sends it to instruction memory (CInsAdd) and to ADD4 (PCvalue), then waits for NPC. |
| ADD4 | `samips_add4` | Sends PC+4 with its colour as the default next PC (PCplus4), then sends PC+4 to DeCode as BaseAddID. |
| Arb1, Arb2, Mux1..3 | `samips_arb` | Two-input merge with a fixed priority. Arb1: MEMch over PCplus4. Arb2: EXch over IDch. Mux1/Mux2: RegBank data over forwarded data. Mux3: PIDRd over FOp2. |
| AAU | `samips_aau` | Arbitrates the two merged requests and checks their colours. Passes one next PC to the PC. On an exception it also writes Cause to CP0 and loads the vector `0x80000080`. |
| DeCode | `samips_decode` | Checks the ID colour and decodes MIPS I. Resolves J/JAL and raises RI/SYSCALL/BREAK (IDch). Issues RegRead, EXCtrl and CP0RAdd. |
| RegBank | `samips_regbank` | 32 x 32 register file with the 4-entry DHDQ. Classifies every operand and sends FRACtrl/FWCtrl and the operands it can supply itself. |
| FWunit | `samips_fwunit` | Takes each announced forwarded result and steers it to the operand that needs it. |
| EXEunit | `samips_exeunit` | ALU, shifter, multiply/divide with HI/LO, branch decision, overflow detection. Checks the EX colour and handles delay slots. |
| MemInt | `samips_memint` | Forwards the EX result (FEXRes) and checks the MEM colour. Checks the address, then performs the load or store. |
| WBUnit | `samips_wbunit` | Writes the register (RegWrite), forwards the final result (FMEMRes) and sends CP0 writes (CP0W1). |
| CP0 | `samips_cp0` | 32 registers, of which Status, Cause and EPC have a function. Holds the kernel/user mode stack and answers MFC0 reads. |
| top | `samips_top` | Wires the units together. Brings out the two memories' channels and the CP0 state. |

All shared types are in `samips_pkg`. They are the bundles carried by the channels: `id2ex_t`,
`ex2mem_t`, `mem2wb_t`, `haz_t` (a hazard request: colour, stage, exception flag, address),
`cp0w_t` and `rw_t`. The package also holds the control encodings: `ex_op_e`, `acc_e`, the
`DT_*` data types and `wne_e`.

## The colour vector

The colour vector `C = {MEM, EX, ID}` has one bit for each stage that can redirect the
instruction stream. A stage that redirects the stream (branch, jump or exception) sends the
AAU its target, together with its colour copy with **its own bit inverted**. If the AAU
accepts the request, it takes that colour as its new state (AAUC). Every instruction
fetched from then on carries the new colour.

**A stage accepts an incoming instruction when either of these holds:**

* its own bit equals the stage's own bit, or
* any bit belonging to a deeper stage differs from the stage's copy.

In the second case, a deeper stage has redirected the stream since this stage last updated
its copy, and the new instruction is the first of that new stream. An accepted instruction
updates the stage's copy.

**An instruction that is not accepted is cancelled, not dropped.** It still flows down the
pipeline, with no memory access and no register write. The reason is that its DHDQ entry
and its FRAQ bit have already been recorded, and must be used up in order.

**The AAU's acceptance rule depends on where the request comes from:**

| Source | Passes when |
|---|---|
| PC+4 | its whole colour equals AAUC |
| ID | its EX and MEM bits equal AAUC's |
| EX | its MEM bit equals AAUC's |
| MEM | always |

A deeper stage therefore always overrides a shallower one. A request that loses is simply
acknowledged and forgotten. Because a request that loses never reaches the PC, no stage
ever has to tell the others to flush.

### Branch delay slots

MIPS executes the instruction after a branch (the delay slot). A branch-taking stage must
therefore not invert its own bit at once. Instead it sets a flag R. The own bit is inverted
when the next instruction of the current colour arrives, which is the delay slot. From then
on, the old-colour instructions fetched after the delay slot are rejected.

The same flag marks the delay-slot instruction, so that an exception raised by it saves the
branch address as EPC. Exceptions do not have a delay slot: a stage raising one inverts its
bit immediately.

## Data hazards: DHDQ, FRAQ and forwarding

The RegBank holds a 4-entry queue, W0 (newest) to W3 (oldest). When a register read
arrives, the queue shifts by one, and the instruction's destination (0 for "writes
nothing") is pushed into W0. A RegWrite from WB clears the oldest entry that holds its
register.

Before the push, each source register is looked up in the queue:

| Found in | Case | Where the value comes from |
|---|---|---|
| nowhere, or register 0 | NON | the register file (ReadData0/1) |
| W0 | EXR | the next FEXRes, which MemInt sends for the instruction just ahead |
| W1 | MEMR | the next FMEMRes, which WB sends for the instruction two ahead |
| W2 | WBR | no forwarding is possible: the RegBank waits for that instruction's RegWrite, then sends the register value |

A read waits while W3 is still occupied. This guarantees that the shift never pushes out
an entry whose write has not yet arrived.

Whenever W0 or W1 holds a writer, a forwarded value will arrive. The RegBank tells the
FWunit this with FRACtrl (the two FRAQ bits), so the FWunit acknowledges exactly the
results that will come, even those that no operand uses. FWCtrl then says which of the
received values goes to which operand. The multiplexers Mux1 and Mux2 merge the RegBank and
FWunit paths into Op0 and Op1, and only one side of each ever sends.

### Old values of cancelled instructions

A cancelled instruction still has to clear its DHDQ entry at WB, and any later instruction
that was told to expect its forwarded value must still receive one. So every register
writer carries the old value of its destination register (PIDRd). A cancelled writer
forwards that old value instead of a result.

Here the destination register is classified like an operand (the third FWCtrl field, c2).
If its old value is itself still in flight, it is taken from the FWunit (FOp2) instead of
the register file. Without this, a cancelled instruction following a writer of the same
register would forward a stale value. At WB, a cancelled writer only releases the entry
(`rnw = 0`) and does not rewrite the register.

## Exceptions and CP0

| Cause | Code | Raised in | Report |
|---|---|---|---|
| Reserved instruction | RI, 10 | ID | IDch |
| System call | Sys, 8 | ID | IDch |
| Breakpoint | Bp, 9 | ID | IDch |
| Arithmetic overflow | Ov, 12 | EX | EXch |
| Address error, load | AdEL, 4 | MEM | MEMch |
| Address error, store | AdES, 5 | MEM | MEMch |

The exception request carries the cause code as its address field. An address error is a
misaligned word or halfword, or a kernel address (bit 31 set) used in user mode.

**When the AAU accepts an exception request:**

* it loads `EXC_VECTOR` (`0x80000080`) into the PC;
* it writes Cause over CP0W2 with the "exception" command;
* that command pushes the Status mode stack into kernel mode.

**The faulting instruction carries on down the pipeline as an "EPC write".** EPC is its
own address, or the branch's address when it sits in a delay slot. WB writes EPC over
CP0W1 when the instruction gets there.

The Cause write and the EPC write therefore happen at different times. CP0 counts Cause
writes not yet matched by an EPC write, and holds MFC0 back while that count is above zero.
As a result, a handler never reads a stale EPC.

**CP0 instructions:**

* `MTC0` is a register write with the CP0 as destination.
* `MFC0` reads CP0 in EX.
* `RFE` pops the mode stack.

## Control encodings

| Field | Encoding |
|---|---|
| EX operation (`ex_op_e`, 6 bits) | Octal groups: branches 0x, jumps 1x, add/sub/logic 2x, exception/address/CP0/set 3x, shifts 4x, multiply/divide and HI/LO 6x. |
| Acc (2 bits) | READ, WRITE, IMM (second operand is Offset32) or NON. |
| DataType (3 bits) | W, WL, WR, HS, HU, BS, BU. |
| wNe (2 bits) | NUN (nothing), EXC (exception), W (write), R (cancelled writer: release only). |
| cNp (1 bit) | Destination is the CPU (1) or CP0 (0). |

LWL, LWR, SWL and SWR are passed to memory as data types. For LWL and LWR, WriteData
carries the old register value, so the memory returns the merged word.

## Interfaces and timing

`samips_top` has plain ports:

* **Instruction request:** `imem_req_*` (address, colour).
* **Instruction response:** `imem_rsp_*` (instruction, colour). The memory returns the
  request's colour with the instruction.
* **Data memory:**
  * `dmem_add_*` (write, data type, address);
  * `dmem_wdata_*`;
  * `dmem_rdata_*`, for reads only.
* **Observation:** `cp0_status`, `cp0_cause`, `cp0_epc`, `aau_colour`.

All channels are valid/ready. `rst` is synchronous and active high.

**Reset state:**

* the PC starts at `RESET_PC` (default 0);
* all colours are zero;
* CP0 is zero, which means kernel mode;
* the register file is **not** reset.

Every unit takes one instruction at a time and posts its outputs in one-place buffers.
Typical unit latencies are:

| Unit | Latency |
|---|---|
| ADD4 | 1 cycle per output |
| EXEunit | bundle offered 1 cycle after all inputs are joined |
| MemInt | 2 cycles for a non-memory instruction that writes nothing, plus FEXRes, plus the memory round trip for loads |


## Verification

Each unit has a self-checking testbench in `tb/`, named `tb_<module>`. The unit testbenches
drive random traffic with random handshake delays and compare against reference models
written inside each testbench. `tb_samips_regbank` also replays the five-instruction
data-hazard example (SUB, AND, OR, ADD, SW on `$2`) and checks the queue state after each
step.

`tb_samips_top` runs the full processor, with default parameters, on a hand-assembled
program. It uses the behavioural memory `tb/samips_mem_model.sv` (big-endian, random
latency). It runs four times with different memory latencies. The run:

* checks register and memory results and the CP0 state;
* counts each mechanism: EXR/MEMR forwarding, loads, taken and untaken branches, JAL/JR,
  overflow, AdEL, SYSCALL, BREAK, RI, MULT, byte store/load, MTC0, MFC0 and cancelled
  instructions;
* fails if any of them never happened.

Two workload testbenches run sorting programs at the size of the classic benchmarks, on
10 random signed integers, with three different memory latencies:

* `tb_samips_qsort` runs a recursive Quicksort that uses a stack and JAL/JR calls. It takes
  about 2500 to 3400 cycles.
* `tb_samips_heapsort` runs a Heapsort that uses shifts, BLTZ/BLEZ and a sift-down
  subroutine. It takes about 3800 to 4800 cycles.

Both check the final array against a reference sort. Both programs are written by hand,
because no compiler is involved. Each load is followed by an independent instruction,
because the pipeline keeps the MIPS I load delay slot: an instruction right after a load
sees the load's address, not the loaded value.

Every testbench ends with a `TB_RESULT checks=N failures=M` line.

To simulate with Verilator 5:

```
verilator --binary --timing --top-module tb_samips_top \
    rtl/samips_pkg.sv rtl/samips_arb.sv rtl/samips_pc.sv rtl/samips_add4.sv \
    rtl/samips_aau.sv rtl/samips_decode.sv rtl/samips_regbank.sv rtl/samips_fwunit.sv \
    rtl/samips_exeunit.sv rtl/samips_memint.sv rtl/samips_wbunit.sv rtl/samips_cp0.sv \
    rtl/samips_top.sv tb/samips_mem_model.sv tb/tb_samips_top.sv
./obj_dir/Vtb_samips_top
```

For a unit test, replace the top module and the testbench file, e.g.
`--top-module tb_samips_regbank ... tb/tb_samips_regbank.sv`.

## Where this design departs from the original, and what it leaves out

* **Clocked handshakes** replace clockless four-phase circuits. The arbiters resolve a
  simultaneous request by fixed priority, where a real arbiter would pick nondeterministically.
* **Cause and EPC.** The original AAU code writes register 13 (Cause) over CP0W2, while the
  prose says the return address goes to EPC over the same channel. This design follows the
  code for CP0W2, and writes EPC from WB (CP0W1).
* **DHDQ after SW.** The data-hazard example shows the queue after a store as
  (5, 5, 4, 3). Here a store pushes 0, as the prose says for every non-writing instruction,
  giving (0, 5, 4, 3).
* **Old-value forwarding** (FWCtrl.c2, FOp2, Mux3) is an addition. It is needed for the
  cancelled-instruction scheme to be correct.
* **RegWrite that matches no entry.** The W3 wait replaces a default "clear W3" for such a
  RegWrite, which cannot happen here and is asserted against.
* **The colour vector has 3 bits.** The interrupt bit and interrupt handling are not
  implemented, and the top has no interrupt input.
* **Only Status, Cause and EPC have a function in CP0.** The other 29 registers are plain
  storage. There is no TLB and no cache control.
* **Multiply and divide finish in one step.** Division by zero gives LO = 0, HI = dividend.
* **Known limitation:** an exception raised by an instruction in a branch delay slot, while
  the branch's own redirect is still pending, is not exercised by the tests. In that
  corner, the CP0 pending counter can lose track.
* **WBR case at the top.** The WBR wait case cannot occur in the assembled pipeline, because
  each unit holds only one instruction. It is covered by the RegBank unit test.
