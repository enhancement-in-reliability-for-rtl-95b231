# MCS-OIC: MIPS cores backed by One Instruction Cores

Soft errors strike the arithmetic logic unit of a processor more often than
most other parts of the core. The usual answer is to duplicate or triplicate
cores, which close to doubles area and power. This design is cheaper. Each
conventional core checks its own arithmetic. When a result is wrong, the core
hands that one instruction to a tiny helper core, which recomputes it and
returns the result. The core then carries on as if nothing had happened.

The helper is a **One Instruction Core (OIC)**. It has a single instruction,
*subleq* (subtract, and branch if the result is less than or equal to zero),
and builds every arithmetic function out of short sequences of it. An OIC is
a few hundred gates and sits idle as a warm standby until a fault occurs.

The RTL here is a 32-bit, five-stage MIPS pipeline with fault detection
logic, a 32-bit OIC and a dispatcher. The dispatcher lets any number of cores
share any number of OICs. By default the system is the base configuration,
one MIPS core with one OIC. The parameters `NUM_CORES` and `NUM_OICS` give
the larger configurations. The design follows the published description of
the MCS-OIC (multi-core system with one instruction cores). Where that
description stops, this RTL makes its own choices. Each one is named below.

```
           +------------------ mips_core (x NUM_CORES) -------------------+
 prog  --> | IF -> ID -> EX -> MEM -> WB      EX: alu  ==?  fdl (duplicate)|
           |                    ^   mismatch: stall, send func + A + B  |  |
           |      result into MEM/WB.ALUOutput, resume                 |  |
           +--------------------|--------------------------------------|--+
                                | c_done/result            c_start/func/a/b
                         +------+--------------------------------------v--+
     x_cfg, a_cfg  ----> | oic_dispatch: pick OIC (strategized first,     |
                         | highest readiness), wake-up delay, route back  |
                         +------+--------------------------------------+--+
                                | o_done/result/sc_err     o_start/func/a/b
                         +------+--------------------------------------v--+
                         | oic (x NUM_OICS): X, Y, Z, W, R, PC, CWR,      |
                         | control-word ROM, 3 subtractors + 1 self-check |
                         +------------------------------------------------+
```

## 1. The fault path through the MIPS pipeline

`mips_core` is a textbook five-stage pipeline (IF, ID, EX, MEM, WB). It has
the usual pipeline registers and forwarding from EX/MEM and MEM/WB into EX.
A load followed by a use of the loaded register costs one stall cycle.
Branches and jumps are resolved in EX, and the two younger instructions are
flushed when one is taken.

The **fault detection logic** (`fdl`) sits beside the ALU in EX. For every
*arithmetic* instruction it computes the result again on separate hardware
and compares it with the ALU output. The arithmetic instructions are add,
addu, sub, subu, addi, addiu and divu. Logic operations, shifts, slt,
lui, mult/multu and load/store address arithmetic are not checked: the OIC
has no function that could take them over. The FDL is a plain duplicate,
not a predictor: one adder, one subtractor and one divider of its own.

When the two results disagree, in the same cycle:

1. The instruction is held in ID/EX. The front of the pipeline stalls, and a
   bubble enters EX/MEM, so older instructions drain.
2. The core pulses `oic_start` with the OIC function, `oic_a` = ID/EX.A and
   `oic_b` = ID/EX.B (or the sign-extended immediate). The function is
   decoded from the instruction's opcode fields in ID and carried in ID/EX.
3. The core waits (`oic_wait`) until `oic_done`.
4. In the `oic_done` cycle, the OIC result is written into MEM/WB.ALUOutput
   together with the instruction's destination register. ID/EX is released
   and the pipeline resumes. For divu, the quotient and remainder go to LO and
   HI instead.

An instruction is thus re-executed only when its first execution was wrong.
Forwarding still works after a hand-over, because the corrected result leaves
through MEM/WB like any other result.

Instructions are mapped to OIC functions as follows:

| MIPS instruction                              | OIC function |
|-----------------------------------------------|--------------|
| add, addu, addi, addiu (general case)         | ADD          |
| addi/addiu with immediate +1                  | INC          |
| addi/addiu with immediate -1                  | DEC          |
| add/addu with rt = $0, addi/addiu with imm 0 (a move) | MOV  |
| sub, subu                                     | SUB          |
| divu                                          | DIV          |

A second path hands instructions over without any fault. Each core has a
6-bit `migrate` mask, one bit per OIC function. A checked instruction whose
function bit is set is sent to the OIC every time, exactly like a faulty one.
This serves instructions known to fail often on the conventional core. The
event is reported as `migrated` rather than `fault_detected`. With the mask
at zero, only detected faults are handed over.

The soft error itself is modelled by an input, `alu_fault_mask`. It is XORed
into the ALU output and is zero in normal use. It exists so that the fault
path can be exercised.

## 2. Inside the OIC

### Datapath

The OIC (`oic`) works on 33-bit words. The 32-bit operands are zero-extended,
which adds one guard bit. Because of that bit, the signed test "result <= 0"
also orders two unsigned 32-bit values correctly, and the divider depends on
this. The registers are:

* `X` and `Y`, loaded with operands A and B when an operation starts.
* `Z` and `W`, scratch registers.
* `R`, the result register.
* the PC and the control word register (CWR).
* the constants ZERO and ONE, available as subtractor inputs.

The OIC has four subtractors. One of them is **self-checking** (see
section 3). It performs the subleq step proper, and its result decides the
branch: if the result is <= 0, the PC loads the word's target, otherwise it
goes to PC+1. The three **conventional subtractors** run independent
subtractions in the same cycle. Each of them has its own source multiplexers
and its own destination register. All four read the register values from the
start of the cycle, so one control word can, for example, move a value and
change its source at the same time.

### Control words

A control word (`oic_cw_t` in `mcs_pkg`) has these fields:

```
  sc      : {we, dst[3], min[3], sub[3]}   self-checking subleq step
  lane[3] : {we, dst[3], min[3], sub[3]}   conventional subtractors
  target  : 5 bits                          branch target when sc result <= 0
  last    : 1 bit                           operation ends after this word
```

Here `min` and `sub` select the minuend and subtrahend from X, Y, Z, W, R,
ZERO and ONE, and `dst` selects the register written.

On `start`, the function selects a program entry, X and Y are loaded, the PC
is set, and the first word is loaded into the CWR, all in one cycle. After
that, the OIC executes one word per cycle. `done` pulses in the cycle after
the `last` word, with `result` = R and `remainder` = X.

### Microprograms

The programs live in `oic_cw_rom`:

| Function | Program (`a - b` means a subleq step)                  | Words  | start→done cycles |
|----------|--------------------------------------------------------|--------|-------------------|
| SUB      | R = X - Y                                              | 1      | 2 |
| DEC      | R = X - ONE                                            | 1      | 2 |
| MOV      | R = X - ZERO                                           | 1      | 2 |
| ADD      | Z = ZERO - Y ; R = X - Z                               | 2      | 3 |
| INC      | Z = ZERO - ONE ; R = X - Z                             | 2      | 3 |
| DIV      | repeated subtraction, quotient in R, remainder in X    | 3 + q  | 4 + q (3 for a zero divisor) |

Division needs the most explanation. X holds the dividend *a* and Y the
divisor *b*. The program runs as follows:

* **Word @8**, the set-up step.
  * The subleq step tests *b* - 0. A zero divisor jumps to @14.
  * In the same cycle, the lanes set Z = -*b*, W = *b* and R = 0.
* **Word @9** computes Y = *b* - *a*.
  * If the result is > 0 (*a* < *b*), the program continues at @10. In
    parallel, a lane sets X = -1.
  * If the result is <= 0 (*a* >= *b*), it jumps to the loop at @11.
* **Word @10** ends the operation for *a* < *b*. It computes
  X = W - Y = *a*, so the remainder is *a* and the quotient is 0.
* **Word @11** is the loop. It executes Y = Y - Z, which adds *b*, and
  branches back to itself while Y <= 0. In parallel, a lane computes
  R = R - X = R + 1. After *q* passes, Y > 0 and the loop exits.
* **Word @12** computes X = W - Y = *b* - Y, which is the remainder.
* **Word @14** handles the zero divisor. It returns an all-ones quotient and
  the dividend as the remainder, the same convention the ALU uses.

As an example, take 7 / 2:

| Word | Effect                   | Notes     |
|------|--------------------------|-----------|
| @8   | Z = -2, W = 2, R = 0     | set-up    |
| @9   | Y = -5                   | to loop   |
| @11  | Y = -3, R = 1            | loop pass |
| @11  | Y = -1, R = 2            | loop pass |
| @11  | Y = 1, R = 3             | exits     |
| @12  | X = 2 - 1 = 1            | remainder |

That is 6 words, and `done` comes 7 cycles after `start`.

The latencies are this design's own. In its reliability study, the paper
assumes function costs of ADD 4, MOV 5, INC 4, DEC 1, SUB 1 and DIV 35 clock
cycles. This OIC does not match those numbers. Its DIV latency depends on the
quotient and is only bounded by the 32-bit range.

## 3. The self-checking subtractor

`sc_subtractor` computes the difference twice:

* the main path is `a + ~b + 1`;
* the check path is `~(~a + b)`, which is algebraically equal but uses a
  different adder.

`err` is raised when the two disagree, and `leq` (result <= 0, signed) is
derived from the main path. When `err` rises in any step, the OIC abandons
the operation at that step. It raises `done` early together with `sc_err`,
and its result is then not valid. Abandoning the operation also keeps a
faulty subtractor from holding a DIV loop open indefinitely. The `flip` input
XORs an error into the main path, for testing only.

## 4. Sharing OICs between cores

With several cores and OICs, someone must decide which OIC serves which
request. `oic_dispatch` implements the selection rule of the reliability
model. It uses three pieces of state per OIC and function:

* **Start-up strategy** `x_cfg[i][j]`: function *j* was tested and enabled
  on OIC *i* before deployment. It is ready at once.
* **Availability** `a_cfg[i][j]`: OIC *i* can perform function *j*, possibly
  only after a wake-up. Strategized functions must also be marked available.
* **Readiness** `readiness[i]`: a 4-bit saturating counter per OIC. It
  starts at 15 and drops by one whenever an operation on that OIC ends with
  `sc_err`. At 0, the OIC is no longer selected; it is treated as not ready,
  and none of its functions run.

When a core's hand-over arrives, it is latched as a pending request. In the
following cycle the dispatcher considers the OICs that are idle, not
allocated, have readiness > 0 and have the function available. Among those,
it prefers one with the function strategized, and within that class the one
with the highest readiness. Remaining ties go to the lowest index.

An OIC chosen for a strategized function starts in the next cycle. An OIC
chosen only for availability first spends `WAKE_CYCLES` cycles (default 4)
waking the function up. An OIC serves one core at a time. A request that no
OIC can take stays pending (`req_pending`) until one frees up. When several
cores wait at once, the lower-numbered core is served first. The OIC's `done`
and result are passed combinationally back to the core that owns it.

**Retry.** An operation that ends with `sc_err` never reaches the core.
The dispatcher lowers that OIC's readiness and marks the core's latched
request as pending again. The request then goes through the same selection
as a new one. It may go to another OIC, or to the same OIC, now ranked by
its lower readiness. The `retry` output pulses each time this happens. When
no OIC that offers the function has readiness left, the request stays
pending and the core stays stalled. This RTL does not report that case
separately.

The counter and the fixed wake-up delay are hardware stand-ins for
quantities that the model treats as probabilities. The model's readiness
starts at 0.99 and falls with failures. Its wake-up succeeds with some
probability. In this RTL a wake-up always succeeds.

## 5. Where this RTL departs from the paper, and what is missing

* **Micro-architecture.** The one-core, one-OIC micro-architecture is
  built from its written description, not from a drawing of it. That
  description covers: FDL compare, stall, A and B into X and Y, PC and CWR
  initialised together, control bits driving the subtractor multiplexers,
  result into MEM/WB.ALUOutput.
* **MIPS subset.** The core is a subset of MIPS-I: the integer ALU and
  immediate instructions including shifts and sltu/sltiu, mult/multu and
  divu with mfhi/mflo/mthi/mtlo, word, halfword and byte loads and stores,
  beq/bne/blez/bgtz/bltz/bgez and j/jal/jr/jalr. It has no signed div, no
  linking REGIMM branches, no branch delay slot,
  exceptions or caches. Overflow does not trap. Each core has private
  1024-word instruction and data memories with combinational reads. The
  paper treats the core as a conventional design and does not specify it.
* **OIC internals.** The paper names X, Y, the OIC PC, the CWR, the
  multiplexers and the "three conventional plus one self-checking"
  subtractors. Everything else in the OIC is this design's own:
  * the registers Z, W and R;
  * the control-word format;
  * the microprograms and the role given to each subtractor;
  * the checking method of the self-checking subtractor;
  * the 33-bit width.
* **Latencies.** The function costs assumed in the reliability study
  (4, 5, 4, 1, 1, 35 cycles) are not reproduced; see the table above.
* **Self-check errors.** The paper does not say what happens after an OIC
  self-check error. In this RTL the OIC abandons the operation, its
  readiness drops by one, and the request is dispatched again (section 4).
* **Dispatcher.** The dispatcher is a hardware interpretation of a
  probabilistic model. The paper does not say how cores and OICs are
  connected in its multi-core configurations.
* **Choosing what to migrate.** Migration is built as a per-function
  mask. The paper does not say how the failure-prone instructions are
  identified, so the mask is simply an input.
* **Reliability study.** The reliability analysis (one-shot-system model,
  genetic algorithm and particle swarm optimisation) is software and has no
  RTL counterpart. The matrices `x_cfg` and `a_cfg` are where its results
  would be applied.
* **Ten-function example.** The second optimisation example assumes ten OIC
  functions, known only by number. Only the six named functions (ADD, MOV,
  INC, DEC, SUB, DIV) exist here.

## 6. Verification

Every testbench checks itself against values computed independently. Each
prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench            | What it checks |
|----------------------|----------------|
| `tb_sc_subtractor`   | 10 000 random and corner operand pairs: difference, `leq`, `err` clear; `err` raised under injected flips. |
| `tb_fdl`             | every checked operation with correct and corrupted ALU results; unchecked operations never flag. |
| `tb_oic`             | all six functions on random and corner operands (including divide by zero, unsigned operands above 2^31 and quotients of 0, 1 and 35): results, remainder, exact start→done latency, `busy`, `sc_err` under injection (the operation must be abandoned at its first step). |
| `tb_mips_core`       | random programs against an instruction-set reference model, with injected ALU faults and a behavioural OIC of random latency; final registers and data memory compared; two programs with migration masks, in which every selected instruction and only those must be handed over. |
| `tb_oic_dispatch`    | 3 cores and 4 model OICs: the chosen OIC matches a reference selection, start latency is 2 or 2 + `WAKE_CYCLES`, results route back; an operation failing its self-check lowers readiness, is not passed to the core and is re-issued to the OIC the rule picks next; one OIC is driven down to readiness 0 and is never chosen again; concurrent requests from all cores. |
| `tb_mcs_oic`         | the whole system at default parameters (1 core, 1 OIC): 12 random programs of 400 instructions with faults injected into 40% of arithmetic instructions, checked against the reference model; a directed self-check error is retried, and the result is still correct with readiness lowered by one. It counts faults, OIC waits, load-use stalls, flushes, both grant kinds, all six OIC functions and migrated instructions (one program with SUB, MOV and DIV migrated), and fails if any never occurs. |
| `tb_mcs_oic_multi`   | 2 cores and 4 OICs in the two-core, four-OIC example with (F1, F2), F3, F1, F2 strategized (F1 = ADD, F2 = SUB, F3 = DIV); requests must wait for a free OIC and OICs must work in parallel. |
| `tb_mcs_oic_fig13`   | the four small example configurations: 1 core with 1 OIC; 2 cores with 4 OICs under the two start-up strategies (F1,F2), F3, F1, F2 and (F1,F2), F3, F2, F1; 2 cores sharing 1 OIC. Faults on both cores in the same cycle must occur. |
| `tb_mcs_oic_table2`  | all thirteen core/OIC configurations of the power and area table (1 to 8 cores, 1 to 6 OICs) side by side, each checked against the reference model, with the events its size allows. |
| `tb_mcs_oic_eval1`   | the first optimisation example: 1 core, 3 OICs with the start-up strategy ADD+INC / SUB / ADD+INC+DEC+DIV; every OIC and every function must be used. |

The system-level tests share the random program generator and the reference
model in `tb/mips_tb_pkg.sv`. Generated programs start by seeding seven
registers with random 32-bit values and filling data words 0 to 63 from
them. They then mix ALU, shift, immediate, word/halfword/byte load and
store, load-use, divu, mult/multu, mthi/mtlo, forward branches of all six
kinds, jal, jr and jalr sequences, and end in a `beq $0,$0,-1` halt loop.
`tb/mcs_oic_harness.sv` wraps one system instance for the multi-configuration
tests.

Each block's testbench was also run against a copy of the block with one
deliberate bug. Every bug was caught:

| Block           | Deliberate bug                    | Failing checks |
|-----------------|-----------------------------------|----------------|
| `sc_subtractor` | zero not counted as <= 0          | 517            |
| `fdl`           | divu never flagged                | 1000           |
| `oic`           | remainder taken from the wrong register | 301      |
| `mips_core`     | no EX/MEM forwarding              | 768            |
| `oic_dispatch`  | wake-up delay skipped             | 37             |
| `mcs_oic`       | A and B swapped at the OIC        | 192 (one core) and 195 (two cores) |

## 7. Simulating and changing it

Everything is plain SystemVerilog-2017 and runs under Verilator 5. To build
and run a system test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/mcs_pkg.sv tb/mips_tb_pkg.sv tb/tb_mcs_oic.sv --top-module tb_mcs_oic
./obj_dir/Vtb_mcs_oic
```

Replace `tb_mcs_oic` with any testbench name from the table; block
testbenches need only `rtl/mcs_pkg.sv` before them. Each run takes seconds.

Common changes:

* **Migration:** drive `migrate_cfg` with one 6-bit function mask per core.
* **Number of cores and OICs:** set `NUM_CORES` and `NUM_OICS` on `mcs_oic`.
  Drive `x_cfg` and `a_cfg` with one 6-bit row per OIC. Bit *j* of a row is
  function *j* in the order ADD, MOV, INC, DEC, SUB, DIV.
* **Wake-up cost and readiness depth:** `WAKE_CYCLES` and `RD_W`.
* **Memory sizes:** `IMEM_WORDS` and `DMEM_WORDS`. Programs are loaded through
  `prog_we`, `prog_core`, `prog_addr` (word index) and `prog_data`. The loaded
  core should be held in reset while this happens.
* **OIC programs:** edit `oic_cw_rom`, and the entry table in `oic.sv` if a
  program moves. The ROM has 32 words; `CW_AW` in `mcs_pkg` sets its size.
  Any change in latency shows up in `tb_oic`, which checks cycle counts.
* **Adding a checked instruction:** extend `is_arith` and `oic_func_of` in
  `mcs_pkg`, the duplicate in `fdl`, and a microprogram.

All resets are asynchronous and active low. The only inputs that must be
zero in normal operation are the injection inputs, `alu_fault_mask` and
`oic_sc_flip`.

## Files

* `rtl/mcs_pkg.sv`: shared types and constants: ISA encodings, OIC
  functions, control-word format, and the instruction-to-function mapping.
* `rtl/mcs_oic.sv`: the top level.
* `rtl/mips_core.sv`, `rtl/alu.sv`, `rtl/regfile.sv` and `rtl/fdl.sv`: the
  conventional core.
* `rtl/oic.sv`, `rtl/oic_cw_rom.sv` and `rtl/sc_subtractor.sv`: the One
  Instruction Core.
* `rtl/oic_dispatch.sv`: OIC selection and routing.
* `tb/`: the testbenches listed above, plus `mips_tb_pkg.sv`, which holds
  the encoders, the program generator and the reference model, and
  `mcs_oic_harness.sv`.
