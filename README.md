# COPIFTv2 queues: register-level links between the integer and FP threads of a Snitch core

Snitch is a tiny in-order RV32 core that hands its floating-point
instructions to a separate FP64 subsystem (the FPSS). Inside an `frep`
hardware loop the FPSS replays the loop body from its own buffer, so the
integer core is free to run other instructions meanwhile. The two pipelines
then issue in parallel: one integer and one FP instruction per cycle.

The catch is that the two instruction streams can only run side by side if
they do not depend on each other. Real kernels mix the two kinds of
instruction: an integer random-number generator feeds an FP conversion, and
an FP comparison feeds an integer counter. The earlier way round this, COPIFT,
moves every value between the threads through memory. It splits the loop into
batches, software-pipelines them, multiple-buffers the memory and
synchronises the threads once per batch. This costs load/store instructions,
tuning effort and code complexity.

COPIFTv2 adds two small hardware FIFOs between the integer core and the FPSS:

* **I2F** carries values from integer instructions to FP instructions;
* **F2I** carries values from FP instructions to integer instructions.

A custom CSR, `EnCopiftQueues`, turns on new register meanings that use the
queues. A value then moves from one thread to the other through a register
operand. A read from an empty queue waits, and so does a write to a full
queue, and that waiting is all the synchronisation needed. Loops keep their
shape: moving a dependency onto a queue only renames a register in the loop
body.

This repository holds synthesizable SystemVerilog for that extension: the
two queues, the CSR, and the logic on each side that sends operands and
results to the queues instead of the register files. The integer core and
the FPSS themselves are not included. The extension connects to them through
plain ports, which are described below.

## The four register rules

With `EnCopiftQueues` set:

| thread  | operand                         | becomes          |
|---------|---------------------------------|------------------|
| integer | source register `x31`           | pop from F2I     |
| integer | destination register `x31`      | push to I2F      |
| FP      | any integer source register     | pop from I2F     |
| FP      | any integer destination register| push to F2I      |

The integer thread picks the register `x31` to mean "queue". On the FP side
the register number is ignored. An FP instruction's integer operand has no
other place to come from once the instruction is replayed by the `frep`
buffer, so every integer operand of an FP instruction is a queue access.

Which encodings count as having an integer operand is decided in
`copift_pkg::decode_use`, following the RISC-V encodings:

* integer sources: R-type (`rs1`, `rs2`), I-type loads, `addi`-class and
  `jalr` (`rs1`), stores and branches (`rs1`, `rs2`), and CSR instructions
  in their register form (`rs1`). The register fields of `lui`, `auipc`,
  `jal`, the immediate CSR forms and the immediate bits of I-type
  instructions are never treated as `x31`, even when those bits read 31.
* FP instructions with an integer source: `fcvt.{s,d}.w[u]`, `fmv.w.x`,
  and the base address of `flw/fld/fsw/fsd`.
* FP instructions with an integer destination: `feq/flt/fle`,
  `fcvt.w[u].{s,d}`, `fmv.x.w` and `fclass`.

If an integer instruction names `x31` as both sources, one entry is popped
and feeds both operands.

### Examples

A register dependency from integer to FP code:

```
add       t0, t0, t1        ->   add       x31, t0, t1   # push
fcvt.d.wu ft0, t0                fcvt.d.wu ft0, t0       # pops; "t0" ignored
```

A memory dependency needs a second step. The FP load needs an address, and
the FPSS cannot compute it. The integer thread adds the offset and pushes the
finished address. The FP load pops it as its base:

```
sw  t1,  8(t0)              ->   sw   t1,  8(t0)
sw  t2, 12(t0)                   sw   t2, 12(t0)
fld ft0, 8(t0)                   addi x31, t0, 8         # push address
fmul.d ft2, ft0, ft1             fld  ft0, 0(t0)         # base popped from I2F
                                 fmul.d ft2, ft0, ft1
```

The address is pushed after both stores have retired, so the load cannot
overtake them. The queue carries the ordering along with the address.

## Where each rule is enforced, and when things stall

The integer side (`copift_int_steer`) sits at the core's issue stage and at
its write-back port:

* **Issue.** If the instruction reads `x31` and F2I is empty, it raises
  `iss_stall_o`. Otherwise it replaces the operand with the head of F2I and
  pops that entry in the cycle the instruction leaves issue. The core reports
  that cycle through `iss_ready_i`, its own "can advance" condition.
* **Write-back.** A result for `x31` is pushed into I2F and does not reach the
  register file. While I2F is full, `wb_ready_o` is low and the write-back
  waits.
* **Offload.** For an FP instruction being offloaded, two flags tell the
  core that its integer operand or result goes through a queue:
  `off_rs_from_queue_o` and `off_rd_to_queue_o`. The core must then neither
  wait for that integer register nor reserve it in its scoreboard. Without
  these flags, an instruction such as `fcvt.w.d t2, ft0` would lock `t2`
  forever, because no result for `t2` ever comes back.

The FP side (`copift_fp_steer`) sits at the FPSS issue stage and on the path
by which FP instructions return integer results:

* **FP issue.** An instruction with an integer source waits
  (`fp_stall_o`) until I2F holds an entry. It then takes the head of I2F
  instead of the operand that came with the offload, and pops it as the
  instruction leaves FP issue. For loads and stores this value is the base
  address, and the immediate is still added to it.
* **Integer results.** With the queues on, an integer result is pushed into
  F2I and the FP pipeline stalls while F2I is full. With the queues off, it
  goes back to the integer core as before (`int_wb_*`).

Both threads therefore stall only on their own queue accesses. A program is
free of deadlock if every pop has a matching push in the other thread,
ordered the same way in both threads. Any queue depth of at least one then
works, and more depth only adds slack between the threads.

The enable bit is read at the moment of each access. Turn the mode on or off
only while no FP instruction is in flight: for example, at the start and end
of a kernel.

## Blocks

| module              | role |
|---------------------|------|
| `copift_pkg`        | constants (`x31`, CSR address), opcode enum, `instr_use_t` and the `decode_use` classifier |
| `copift_queue`      | parameterised blocking FIFO, used for both I2F and F2I |
| `copift_csr`        | the `EnCopiftQueues` register |
| `copift_int_steer`  | integer-side rules: operand selection, issue stall, write-back split |
| `copift_fp_steer`   | FP-side rules: integer operand selection, FP issue stall, result split |
| `copiftv2_ext`      | top: CSR, two queues and both steering units wired together |

### `copift_queue`

A circular buffer of `DEPTH` entries, each `DATA_W` bits wide, with a
valid/ready handshake on each end:

* push side: `push_valid_i`, `push_ready_o` (high when not full), `push_data_i`;
* pop side: `pop_valid_o` (high when not empty), `pop_ready_i`, `pop_data_o`;
* `usage_o` gives the number of entries held.

The storage is registered and there is no fall-through: an entry pushed in
cycle *t* can be popped from cycle *t*+1 on. One push and one pop can happen
in the same cycle, so the queue sustains one transfer per cycle. A full
queue refuses a push even in a cycle where it is popped. An assertion checks
that the occupancy stays within the depth.

### `copift_csr`

The CSR holds one bit at address `0x7C3`, in the custom machine read/write
range. It supports the write, set and clear operations of Zicsr. The read
data is the value before the access, and a change takes effect the next
cycle. Reset clears the bit, so software that does not know the extension
runs unchanged.

### `copiftv2_ext` ports

| group | signals | connects to |
|-------|---------|-------------|
| CSR | `csr_valid_i`, `csr_addr_i`, `csr_op_i` (01 write, 10 set, 11 clear), `csr_write_i`, `csr_wdata_i`, `csr_hit_o`, `csr_rdata_o`, `queues_en_o` | core's CSR unit |
| integer issue | `iss_valid_i`, `iss_instr_i`, `iss_ready_i`, `rs1_rf_i`, `rs2_rf_i` → `rs1_o`, `rs2_o`, `iss_stall_o`, `off_rs_from_queue_o`, `off_rd_to_queue_o` | core decode/issue |
| integer write-back | `wb_valid_i`, `wb_rd_i`, `wb_data_i`, `wb_ready_o` → `rf_we_o`, `rf_waddr_o`, `rf_wdata_o` | core write-back and register file |
| FP issue | `fp_valid_i`, `fp_instr_i`, `fp_ready_i`, `fp_int_op_i` → `fp_int_op_o`, `fp_stall_o` | FPSS issue (offloaded or `frep`-replayed instruction) |
| FP integer results | `res_valid_i`, `res_rd_i`, `res_data_i`, `res_ready_o`; `int_wb_valid_o`, `int_wb_rd_o`, `int_wb_data_o`, `int_wb_ready_i` | FPSS result port; core write-back |
| observation | `i2f_usage_o`, `f2i_usage_o` | counters, debug |

All steering is combinational. No path runs from an integer-side input to an
FP-side output, or the other way: the two sides meet only at the queues'
registered state. The extension therefore adds no path between the two
pipelines.

## Size and timing

At the default size, synthesis of `copiftv2_ext` at word level gives:

* about 160 cells;
* 15 flip-flop bits of control state: the enable, and the pointers and
  counters of the two queues;
* two 4 × 32-bit queue arrays.

On the issue path the extension adds a decode of the instruction word and a
2:1 multiplexer in front of each integer operand. On the FP side it adds the
same for the single integer operand. For a core of Snitch's size this is well
under a percent of the area, which matches the overhead claimed for the
method. This design does not check the claim that the critical path is
unchanged. That depends on where the core's operand multiplexers already
sit.

## Design choices beyond the stated rules

The rules, the register `x31`, the two directions and the blocking FIFO
behaviour are the method's definition. The following are this
implementation's own choices:

* queue depth 4 (`QUEUE_DEPTH`) and width 32 bits, the XLEN of the core;
* no fall-through in the queues, and a full queue does not accept a push in
  the cycle it is popped;
* CSR address `0x7C3`, one enable bit at bit 0, reset value 0;
* the valid/ready hooks into the core: pop at issue, push at write-back;
* one pop when `x31` is both sources of an instruction;
* the offload flags that keep the core's scoreboard from reserving integer
  registers that now live in a queue;
* the enable is sampled per access rather than recorded per instruction.

One wording needs interpretation. The rule for FP instructions with an
integer destination is sometimes phrased as "instead of writing the FP
register file". An integer destination is an integer register, so here such
a result goes to F2I instead of back to the *integer* register file.

## Simulation

Every file is self-contained SystemVerilog-2017 and runs with plain
Verilator 5. Packages must come first on the command line. For example, the
end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/copift_pkg.sv tb/tb_rv_enc_pkg.sv \
  rtl/copift_queue.sv rtl/copift_csr.sv rtl/copift_int_steer.sv \
  rtl/copift_fp_steer.sv rtl/copiftv2_ext.sv tb/tb_copiftv2_ext.sv \
  --top-module tb_copiftv2_ext
./obj_dir/Vtb_copiftv2_ext
```

Each testbench ends with the line `TB_RESULT checks=<n> failures=<m>`, and
has a watchdog that stops a hung run and counts it as a failure.

| testbench | what it checks |
|-----------|----------------|
| `tb_copift_queue` | a reference queue model gives occupancy, ready/valid and data order; fill past full and drain past empty; one-cycle push-to-pop latency; one push and one pop per cycle; 2000 random cycles |
| `tb_copift_csr` | reset value; address decode; write, set and clear; read-only access; old value on read; next-cycle effect |
| `tb_copift_int_steer` | 20 real instruction words with expectations written by hand, run with every combination of enable, queue state and readiness; also immediate bits that alias `x31`, and FP instructions that must not pop; write-back split and back-pressure |
| `tb_copift_fp_steer` | the same for the FP side, including `fld/fsd` base addresses and the routing of results |
| `tb_copiftv2_ext` | the whole extension at its default parameters, driven by behavioural models of the integer thread, an FP thread with an `frep`-style replayed body, and memory |

`tb_copiftv2_ext` runs nine phases:

* the unmodified mode (`x31` is an ordinary register, and FP integer results
  come back through the scoreboard);
* `csrrwi` to switch the queues on;
* the two examples above;
* a Monte-Carlo estimate of π;
* a slow FP consumer, so that I2F fills up;
* a slow integer consumer, so that F2I fills up and `x31` serves as both
  sources;
* an `exp` kernel in three steps (FP, then integer, then FP), described
  below;
* a Monte-Carlo π estimate with xoshiro128+ as the integer random generator;
* switching the queues off again.

The π phase has 200 samples. Each sample uses two LCG numbers
(x ← 1664525·x + 1013904223 mod 2³²), which the integer thread generates
and pushes. The FP loop converts them, scales them by 2⁻³², tests
x²+y² < 1 with `flt.d` and pushes the flag. The integer thread pops the flag
and counts the hits, and the test compares the count with one computed
independently.

The `exp` phase exercises dependencies in both directions. The FP thread
computes kd = x·32/ln2 + 1.5·2⁵², which leaves the rounded index k in the low
mantissa bits. It sends the low word of kd to F2I with `fmv.x.w`. The
integer thread masks the index, forms the address of a table of 2^(j/32), and
sends it back over I2F. The FP thread loads the table entry with that address
and multiplies it by a cubic in r = x − k·ln2/32. The input and output
addresses also travel over I2F. The 64 results must match `$exp` within a
relative error of 10⁻⁸. Inputs are limited to [0, 0.67), so no exponent
adjustment is needed.

The test counts each mechanism and fails if any never happens:

* stall on an empty F2I;
* stall on a full I2F;
* stall on an empty I2F;
* stall on a full F2I;
* write-back in the unmodified mode;
* mode switch;
* address through I2F;
* double `x31` source.

It also prints the combined instructions per cycle of the two threads for
each kernel: about 1.1 for the LCG π loop, 1.3 for the xoshiro128+ π loop
and 1.6 for `exp`. That figure measures the simple thread models and the schedule
chosen for the loop, not a Snitch core.

## Limits

* The integer core, the FPSS (FPU, FP register file, `frep` sequencer),
  the offload interface, the instruction cache and the L1 memory are not
  included. The extension exposes the hooks they need. Integrating it into a
  real core means wiring these hooks into its decode, scoreboard and
  write-back arbitration, and into the FPSS's issue and result paths.
* Queue depth, CSR address and handshake timing are the choices listed
  above, not known values of any silicon.
* The evaluated kernels are only partly reproduced. The π estimates with an
  LCG and with xoshiro128+, and a reduced `exp`, were written for the test.
  There is no polynomial or `log` kernel. The exact kernel code and sizes behind the
  published performance figures are not part of this design.
