# Scalar chaining for an in-order floating-point subsystem

A scalar in-order core with a pipelined FPU loses issue cycles whenever an instruction needs
the result of the one before it. The usual cure is to unroll the loop so that several
independent operations are in flight. Each of those operations needs its own architectural
register, though, and in register-hungry kernels such as stencils there are not enough.

*Scalar chaining* gets the benefit of unrolling without spending the registers. Software can
mark an FP register as a **chaining register**. Such a register behaves as a FIFO: every write
pushes a value and every read pops one. The storage for that FIFO is the register itself plus
the pipeline registers of the FPU, which already exist. With a three-stage FPU, one chaining
register holds four values in flight. Those are exactly the four intermediate results that
unrolling by four would otherwise put in four architectural registers.

This repository holds synthesizable SystemVerilog for such an FP subsystem and self-checking
testbenches for it. The subsystem has a register file with per-register valid bits, a
three-stage double-precision FPU, three stream semantic registers (SSRs) and the chaining
issue logic. It follows the design published as *"A RISC-V ISA Extension for Chaining in
Scalar Processors"* (Colagrande, Jonnalagadda, Benini), which extends the Snitch core. Wherever
that description is silent, this RTL makes its own choices; they are listed in the last
sections.

## The example: `a = b * (c + d)`

The arrays `c` and `d` are streamed through `ft0` and `ft1`: every read returns the next
element. The array `a` is streamed out through `ft2`: every write stores the next element. The
constant `b` sits in `ft4`.

Baseline loop body:

```
fadd.d ft3, ft0, ft1
fmul.d ft2, ft3, ft4      # waits 3 cycles for ft3 (read-after-write, FPU depth 3)
```

Each element costs 5 cycles. Only 2 of them issue an instruction.

Unrolled by four, the loop needs `ft3`..`ft6` for the intermediate sums. The chained version
uses `ft3` only:

```
li   t0, 8
csrs 0x7C3, t0            # bit 3: ft3 becomes a chaining register
loop:
fadd.d ft3, ft0, ft1      # push
fadd.d ft3, ft0, ft1      # push (no write-after-write stall)
fadd.d ft3, ft0, ft1
fadd.d ft3, ft0, ft1
fmul.d ft2, ft3, ft4      # pop
fmul.d ft2, ft3, ft4
fmul.d ft2, ft3, ft4
fmul.d ft2, ft3, ft4
addi / bne ...            # integer instructions: no FP issue in these slots
csrc 0x7C3, t0            # back to normal semantics
```

What happens cycle by cycle is shown below. The first iteration has one extra empty FP slot
after the first `fmul`, as in the published example trace. Numbers name the instruction by its
slot. S1 to S3 are the FPU stages. A value in S3 is written back at the end of its cycle. "ft3"
shows the register at the start of the cycle.

| slot | issued     | S1 | S2 | S3 | ft3 (V)  | what happens                                   |
|-----:|------------|----|----|----|----------|------------------------------------------------|
| 3    | fadd       |    |    |    | –  (0)   |                                                |
| 4    | fadd       | 3  |    |    | –  (0)   |                                                |
| 5    | fadd       | 4  | 3  |    | –  (0)   |                                                |
| 6    | fadd       | 5  | 4  | 3  | –  (0)   | 3 is pushed into ft3                           |
| 7    | fmul       | 6  | 5  | 4  | 3  (1)   | fmul pops 3; 4 is pushed in the same cycle     |
| 8    | *(empty)*  | 7  | 6  | 5  | 4  (1)   | ft3 is full, so 5 cannot be written: the whole pipeline holds |
| 9    | fmul       | 7  | 6  | 5  | 4  (1)   | pop 4, push 5                                  |
| 10   | fmul       | 9  | 7  | 6  | 5  (1)   | pop 5, push 6                                  |
| 11   | fmul       | 10 | 9  | 7  | 6  (1)   | pop 6; 7 goes to the output stream             |
| 12   | *(addi)*   | 11 | 10 | 9  | –  (0)   | 7 is in the output stream queue                |

Slot 8 shows why the valid bit exists. Without it, result 5 would overwrite 4 before the
`fmul` of slot 9 had read it. In the testbench, 64 elements with two empty loop slots per four
elements take these numbers of cycles:

| variant                       | cycles |
|-------------------------------|-------:|
| baseline                      | 320    |
| unrolled by four (`ft3`..`ft6`) | 160    |
| chained (`ft3` only)          | 161    |

The chained run has the one extra empty slot of the example. Apart from the loop slots, the
chained loop issues one FP instruction every cycle.

## Programming model

* **CSR 0x7C3** holds a 32-bit mask, one bit per FP register `f0`..`f31`. A set bit makes the
  register a chaining register. The register can be accessed with `csrrw`, `csrrs` and
  `csrrc`; reads return the old value. It resets to 0, with chaining off.
* **Write to a chaining register** = push. The write is not ordered against earlier writes to
  the same register (no write-after-write check). Results still leave the FPU in program
  order, so the FIFO order is the issue order.
* **Read of a chaining register** = pop. The instruction waits until the register holds a
  value, which is marked by its valid bit V. An instruction that names the same chaining
  register as both sources pops it once and uses the value twice.
* **Backpressure.** A result for a chaining register that still holds an unconsumed value
  stays at the end of the FPU, and every stage behind it holds too. This happens unless the
  value is popped in the same cycle, in which case the pop and the push happen together.
* **Software's duty** is to balance pushes and pops. A chain holds at most 1 + 3 = 4 values.
  A fifth push issued before the first pop, or a pop with no push ahead of it, stops the
  pipeline for good.
* How a register behaves is decided when an instruction issues. The result carries that
  decision with it, so changing the mask while results are in flight does not redirect them.
* **Streams.** While `ssr_en_i` is high, reads of `ft0` and `ft1` pop SSR 0 and SSR 1, and
  writes of `ft2` push into SSR 2. Stream registers take precedence over the chaining mask.

## Hardware

```
                 instr (decoded)          CSR access
                      |                       |
                      v                       v
   +--------------------------------+   +-----------+
   | fp_issue_ctrl                  |<--| chain_csr |  mask (0x7C3)
   |  scoreboard (ordinary regs)    |   +-----------+
   |  V checks / pops (chained)     |
   |  stream availability           |
   |  writeback routing, backpress. |
   +--------------------------------+
       | rs1,rs2  | pops       ^ out_ready / tag
       v          v            |
   +------------------+   +---------+     +-----------------------+
   | fp_regfile       |-->| operand |---->| fpu_pipe  S1->S2->S3  |--+
   | 32 x 64b + V bit |   |  muxes  |     | (add/sub/mul/move)    |  |
   +------------------+   +---------+     +-----------------------+  |
          ^  rd write          ^ ft0/ft1                             |
          |                    |                                     |
          +---------------+    |  SSR 0, SSR 1 (read, 4 entries)     |
                          |    +-------- from memory                 |
          rd demux <------+------------------------------------------+
                          |
                          +--> SSR 2 (write, 4 entries) --> to memory
```

| module           | role                                                                        |
|------------------|-----------------------------------------------------------------------------|
| `chain_pkg`      | sizes and shared types (instruction, writeback tag, memory request, stream config) |
| `fp64_pkg`       | IEEE 754 binary64 add/sub/mul functions                                      |
| `chain_csr`      | the chaining mask at CSR address 0x7C3                                       |
| `fp_regfile`     | 32 x 64-bit registers, two read ports, one write port, a V bit per register  |
| `fpu_pipe`       | three-stage in-order FPU with valid/ready stall                               |
| `ssr_streamer`   | one stream register: a four-entry queue and a 1-D address generator          |
| `fp_issue_ctrl`  | hazards, chaining rules, writeback routing and backpressure                  |
| `fp_subsystem`   | top: wires the above together, with the operand muxes                        |

### Issue rules (`fp_issue_ctrl`)

An instruction issues in the cycle in which all of the following hold:

| operand kind                  | condition to issue              | effect of issue         |
|-------------------------------|---------------------------------|-------------------------|
| ordinary source               | no write to it in flight (RAW)  | none                    |
| ordinary destination          | no write to it in flight (WAW)  | scoreboard bit set      |
| chaining source               | V set                           | V cleared (pop)         |
| chaining destination          | always                          | none                    |
| stream source (ft0/ft1)       | stream queue not empty          | queue popped            |
| stream destination (ft2)      | always                          | none                    |
| the FPU                       | stage 1 can take an instruction |                         |

Nothing is forwarded. A result written at the end of cycle *t* can be used by an instruction
issuing in cycle *t*+1. So an ordinary dependent instruction loses exactly three cycles behind
its producer, the FPU depth.

### Writeback and backpressure

Results leave S3 in order. For an ordinary destination the result is written, and the
scoreboard bit is cleared. For `ft2` with streams on, the result is pushed into SSR 2 if it has
room. For a chaining destination the result is written and V is set, provided V is clear or
the register is popped in the same cycle. Otherwise `out_ready` of the FPU is low. The stages
of `fpu_pipe` use a valid/ready chain in which a stage moves when it or any later stage is
free. A refused result therefore holds the pipeline only as far back as it is full.

One point deserves care. The same-cycle pop-and-push rule looks at the pop that the waiting
instruction *would* make, not at whether it actually issues, because its issue depends on the
FPU accepting it, which in turn depends on the writeback. The two always agree: if the
writeback is accepted, every stage advances, so stage 1 is free and the instruction does issue.
An assertion in `fp_issue_ctrl` checks that a chaining register is never overwritten while it
holds an unconsumed value.

### FPU arithmetic (`fp64_pkg`, `fpu_pipe`)

The FPU provides `FP_ADD`, `FP_SUB`, `FP_MUL` and `FP_MVIN`. `FP_MVIN` moves a 64-bit value
from the integer side into an FP register; it is used to place constants such as `b`.

The arithmetic is IEEE 754 double precision with round-to-nearest-even. It handles subnormals
exactly, and every NaN result is the RISC-V canonical NaN `0x7FF8000000000000`. Exception flags
and other rounding modes are not produced.

Both operations form an unrounded 110-bit significand. A shared routine then normalises it
with a leading-zero count, shifts it into the subnormal range when needed, and rounds using a
guard bit and a sticky bit. The arithmetic sits between stages 1 and 2, and stages 2 and 3
carry the result. For timing closure, a synthesis flow would retime the registers into the
logic. Only the depth (3) is visible to the rest of the design.

### Streams (`ssr_streamer`)

A read stream requests elements ahead of time while its four-entry queue plus the requests in
flight leave room. Because of this credit scheme, a response never finds the queue full. A
write stream stores the head of its queue whenever elements remain. Each stream walks one
affine sequence `base, base+stride, ...` of `count` elements, loaded through `ssr_cfg_*`.

## Interface of `fp_subsystem`

| port group                                            | protocol                                                     |
|-------------------------------------------------------|--------------------------------------------------------------|
| `instr_valid_i`, `instr_ready_o`, `instr_i`           | decoded instruction (`op`, `rd`, `rs1`, `rs2`, `imm`); ready = issued this cycle |
| `csr_valid_i`, `csr_addr_i`, `csr_op_i`, `csr_wdata_i` | one CSR access per cycle; `csr_hit_o` / `csr_rdata_o` (old value) are combinational |
| `ssr_en_i`, `ssr_cfg_valid_i`, `ssr_cfg_i[3]`, `ssr_busy_o` | stream enable, per-stream start and configuration, stream activity |
| `mem_req_valid_o`, `mem_req_ready_i`, `mem_req_o[3]`  | valid/ready memory requests (`addr`, `we`, `wdata`), byte addresses, 64-bit words |
| `mem_rsp_valid_i`, `mem_rsp_rdata_i[3]`               | read responses in request order, any latency                 |
| `chain_mask_o`, `busy_o`, `ev_*_o`                    | mask, "work outstanding", one-cycle event strobes for counters |

The reset, `rst_ni`, is asynchronous and active low. It clears all control state; the register
and queue data are not reset. All sizes are constants in `chain_pkg`:

| constant     | value | origin                                      |
|--------------|-------|---------------------------------------------|
| `FLEN`       | 64    | published design (double-precision example) |
| `NREGS`      | 32    | published design (32-bit mask)              |
| `FPU_STAGES` | 3     | published design                            |
| `NUM_SSR`    | 3     | published design (ft0, ft1, ft2)            |
| `SSR_DEPTH`  | 4     | published block diagram                     |
| `ADDR_W`     | 32    | this RTL's choice                           |
| `CNT_W`      | 16    | this RTL's choice                           |

## Verification

Each module has a testbench in `tb/` that checks itself and ends with a `TB_RESULT
checks=... failures=...` line.

* `fpu_pipe_tb`: 20,000 random add/sub/mul/move operations are compared bit for bit with the
  simulator's double arithmetic. The operands are biased towards cancellation, subnormals,
  overflow, zeros, infinities and NaNs, and the output sees random backpressure. The testbench
  also checks the three-cycle latency, and that a held pipeline accepts exactly three
  operations.
* `fp_regfile_tb`: random reads and writes, pushes and pops are checked against a model.
  Directed checks cover pushing and popping in the same cycle.
* `chain_csr_tb`: set, clear and write accesses are checked against a model, together with
  address decoding and the enable/disable sequence.
* `ssr_streamer_tb`: the test checks that prefetch stops at four elements, that strided read
  and write streams work under random memory stalls, and that a blocked memory makes the write
  queue accept exactly four elements.
* `fp_issue_ctrl_tb`: directed checks of RAW and WAW stalls, the absence of a WAW check on
  chaining registers, waits and pops, backpressure, same-cycle push and pop, stream waits,
  stream pops and stream backpressure.
* `fp_subsystem_tb` runs the whole subsystem at its real sizes, with a behavioural memory
  (`tb_mem`):
  * the baseline loop, where each `fmul` issues exactly four cycles after its `fadd`;
  * the loop unrolled by four, which must not stall;
  * the chained loop, with the empty slot of the example trace, where the pipeline must be
    full and `ft3` valid, every instruction issues in the cycle it is offered, and the run
    takes (64/4)·10 + 1 cycles;
  * a chain that is too short, where each consumer waits two cycles;
  * a slow memory;
  * switching chaining off again.

  All results are compared with reference arithmetic. The testbench counts every mechanism
  (RAW stall, chained write without WAW stall, wait on an empty chaining register, chaining
  backpressure, same-cycle push and pop, stream wait, stream backpressure, mode switch) and
  fails if one never occurred.

* `stencil27_tb` runs a 27-point three-dimensional box stencil (radius 1) over a 4x4x4 block
  of outputs. The 27 coefficients stay in `ft5`..`ft31`. Each tap is an `fmul` into chaining
  register `ft3` and an `fadd` that accumulates in chaining register `ft4`. The `fmul` runs
  one tap ahead of its `fadd`, so `ft3` holds two products at times. The input streams through
  `ft0` and the output through `ft2`, so 31 of the 32 registers are in use. The stream address
  generator is one-dimensional, so the testbench stores each neighbourhood in access order.
  The outputs are compared bit for bit. The run takes 4·25 + 6 = 106 cycles per output: the
  dependent additions set the pace, so only half of the issue slots are used. A fused
  multiply-add, which this FPU lacks, would be needed for better use of the FPU.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    --top-module fp_subsystem_tb rtl/chain_pkg.sv rtl/fp64_pkg.sv tb/fp_subsystem_tb.sv
./obj_dir/Vfp_subsystem_tb
```

Replace `fp_subsystem_tb` with any other testbench name. Every run finishes in well under a
second.

## How far this follows the published design

These parts come from the published description:

* the chaining idea: FIFO semantics, no WAW ordering for chaining registers, and the FIFO built
  from the register plus the FPU stages;
* the CSR address and its one-bit-per-register mask;
* the valid bit per register and its backpressure role;
* the three-stage FPU and the three-cycle RAW penalty;
* the SSR bindings to `ft0`/`ft1`/`ft2` and the four-entry stream queues;
* the datapath: two read ports, one write port, and stream muxes on `ft0`/`ft1`/`ft2`.

The cycle-level behaviour of the issue logic was chosen so that it reproduces the published
example trace exactly.

These are this RTL's own choices:

* the decoded-instruction interface and `FP_MVIN`;
* the scoreboard, with no forwarding;
* the same-cycle pop/push rule and single pop for a register used on both ports;
* the bubble-collapsing stall;
* the arithmetic implementation and where it sits within the stages;
* the stream configuration ports, the global stream enable, and the credit-based prefetch;
* the reset values.

These parts are missing:

* The integer core and the L1 memory are outside this design. The integer core is only
  represented by the instruction/CSR ports, and the L1 memory by the memory ports.
* FP loads and stores (`fld`/`fsd`) are not built.
* Fused multiply-add is not built. The published work shows only `fadd.d`/`fmul.d` and a
  two-read-port datapath. The stencil kernels it evaluates (`box3d1r`, `j3d27pt`) are
  normally written with `fmadd.d`, so they cannot run on this FPU as is. Split into `fmul`
  and `fadd` with two chaining registers, a 27-point stencil does fit in the 32 registers (31
  used), and `stencil27_tb` runs it that way.
* The stream address generator is one-dimensional. The original SSRs support nested loops,
  which were not described.
* There are no exception flags and only one rounding mode.

## Changing it

* **FPU depth.** `FPU_STAGES` (in `chain_pkg`) sets the depth, and with it how many values one
  chaining register holds (depth + 1). `fpu_pipe` needs at least 2 stages. The testbenches
  derive their timing expectations from the constant, except the chained-loop cycle count and
  the example-slot snapshot in `fp_subsystem_tb`, which assume four values per chain.
* **Stream queue depth.** `SSR_DEPTH` must be a power of two.
* **More operations.** Add them to `fp_op_e` and to the case in `fpu_pipe`. An operation with
  three sources would need a third read port in `fp_regfile` and a third source in the issue
  rules.
