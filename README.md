# A vector instruction core for a convection kernel

This is synthesizable SystemVerilog for a small vector processor meant to be
copied many times across an FPGA. Each copy runs one call of a numerical kernel.
The kernel here is the convection parametrization of a Lagrangian particle
dispersion model. It runs once per grid column per time step. Calls for
different columns in the same step do not depend on each other, so every core
can take its own column. Inside a call the work is a chain of dependent steps,
and almost every step is arithmetic over an array with one entry per vertical
level (24 levels in the reference set-up).

The architecture answers that shape with three ideas:

1. **Whole-array instructions.** One instruction such as `VMUL v5, v0, v1`
   multiplies two 24-element vectors. The controller issues it and waits, so
   the controller stays a tiny state machine.
2. **An ALU whose unit count is independent of the vector length.** The
   vector ALU holds `N_ADD` adders, `N_MUL` multipliers and `N_DIV` dividers,
   and each count is chosen when the core is built. An *ALU sequencer* sits
   between the registers and the units. It feeds the elements through in
   batches, so the program does not depend on how many units exist.
3. **Fixed-point arithmetic with conversion at the memory boundary.** Inputs
   arrive as floating point. The load/store unit converts them to 64-bit fixed
   point on the way in, and converts results back on the way out.

The default build is the mix the architecture was evaluated with: 8 adders,
8 multipliers and 24 dividers ("8-8-24") on 24-element vectors.

## Block structure

```
                 +-------------------------------------------+   +-------------+
                 |               control_unit                |<--| code_memory |
                 +-------------------------------------------+   +-------------+
                    ^ start/done            | start/op/done
                    v                       v
 mem_* <---> +-----------------+   +----------------+   +-------------------------+
  (64-bit    | load_store_unit |<->| scalar_regfile |<->| alu_sequencer           |
   words)    |  float_to_fixed |   +----------------+   |   interface registers   |
             |  fixed_to_float |   +----------------+   |   vector_alu            |
             |                 |<->| vector_regfile |<=>|    N_ADD x fx_adder     |
             +-----------------+   +----------------+   |    N_MUL x fx_multiplier|
                element port        whole vectors (<=>) |    N_DIV x fx_divider   |
                                    side by side        +-------------------------+
```

| Module | Role |
|---|---|
| `vector_core` | Top level. One core. |
| `control_unit` | Fetches instructions, decodes them and issues them. One instruction is in flight at a time. |
| `code_memory` | Instruction memory, separate from data (Harvard organisation). 256 x 32 bits. Synchronous read. |
| `vector_regfile` | 8 vector registers of 24 words. Two ports read whole registers; one port writes a whole register; one port reads or writes single elements. |
| `scalar_regfile` | 16 scalar registers. Two read ports, one write port. |
| `alu_sequencer` | Runs an array operation on the vector ALU in batches. Holds the input and output interface registers. |
| `vector_alu` | The arrays of adders, multipliers and dividers. |
| `fx_adder` | Combinational add/subtract. |
| `fx_multiplier` | Combinational fixed-point multiply. |
| `fx_divider` | Sequential fixed-point divide. Produces one quotient bit per clock. |
| `load_store_unit` | Moves data between memory and the registers one word at a time, converting formats when asked. |
| `float_to_fixed`, `fixed_to_float` | IEEE-754 binary64 to fixed point, and back. |
| `vp_pkg` | Shared types, opcodes and instruction-building helpers. |

The data memory is outside the core. The testbenches model it as
`tb/tb_data_memory.sv`.

## Numbers

Every register and every functional unit works on signed two's-complement
fixed point. A word is 64 bits with 32 of them fractional (Q32.32). That covers
about ±2.1·10⁹ with a resolution of 2.3·10⁻¹⁰. The rules in the table below are
this design's own.

| Operation | Rule |
|---|---|
| add, sub | Wraps on overflow. |
| mul | Uses bits [95:32] of the 128-bit product. Truncates toward −∞ and wraps on overflow. |
| div | Computes (\|a\|·2³²) / \|b\| by restoring division, then applies the sign. Truncates toward zero and keeps the low 64 quotient bits. A divisor of 0 gives the most positive word, or the most negative one when the dividend is negative. |
| float → fixed | Truncates toward zero. Out-of-range values and ±∞ saturate. NaN, zero and subnormals give 0. |
| fixed → float | Truncates the significand to 53 bits. |

`W` and `FRAC` are parameters of every arithmetic module. The binary64 side of
the converters is fixed at 64 bits.

## The ALU sequencer: arrays on fewer units than elements

This is the part that makes the architecture work. It is also the least
obvious part.

An array instruction reaches the sequencer as `start`, an operation (add, sub,
mul or div), a length `len`, and two operand vectors `va` and `vb`. All
elements arrive side by side (flattened), straight from the vector registers.

- **Capture.** In the start cycle the sequencer copies both operand vectors
  into its own input registers. The register file is then free, and the
  sequencer can write its result back into one of the source registers.
- **Batching.** With N units of the kind the operation needs, element `e`
  goes to lane `e mod N` in batch `e / N`. The last batch may be partly empty.
  Lanes beyond `len` are ignored.
- **Combinational units (add, sub, mul).** One batch per clock. Each batch's
  results are written into the output interface registers `vy` at the clock
  edge.
- **Sequential units (div).** One clock starts every divider of the batch
  together. The dividers then need W+FRAC+1 = 97 clocks until `done`, and the
  results are taken in that cycle. The next batch starts on the clock after.
- **Scalar instructions.** These use the same path with `len = 1`, so one
  adder, multiplier or divider does the work.

Start-to-done latency, with B = ⌈len / N⌉:

| Operation | Clocks | 24 elements, 8-8-24 |
|---|---|---|
| add, sub, mul | B + 1 | 4 |
| div | 1 + B·(W+FRAC+2) = 1 + 98·B | 99 |

Two consequences follow.
- **Extra adders or multipliers buy little.** One add or multiply instruction
  costs a few clocks at most, so the dividers set the run time.
- **Divider count divides the divide time.** Going from 8 to 24 dividers
  cuts each divide from 295 clocks to 99.

`tb/tb_alu_configs.sv` runs one column of the test kernel on every mix in the
architecture's evaluation. It prints these clock counts for one column (memory
without stalls):

| A-M-D | 1-1-1 | 2-2-2 | 4-4-4 | 8-8-8 | 12-12-12 | 24-24-24 | 24-8-8 | 8-24-8 | 8-8-24 |
|---|---|---|---|---|---|---|---|---|---|
| clocks | 5274 | 2802 | 1566 | 948 | 742 | 536 | 940 | 936 | 556 |

The trend matches the published one:
- Moving from 8-8-8 to 8-8-24 helps most. Here it gives 1.7×; the published
  latency figures give 2.1×.
- Extra adders or multipliers hardly help.

The absolute numbers are not comparable. The published figures are in
nanoseconds for a kernel whose equations are not given, and they include no
load/store cost in the same form.

## Instruction set

The instruction word is 32 bits: `op[31:26] rd[25:21] ra[20:16] rb[15:11]`.
For the forms that carry an immediate, `imm[15:0]` overlaps `rb`.
`vp_pkg::mk_r` and `vp_pkg::mk_i` build instruction words.

| Opcode | Form | Effect |
|---|---|---|
| `VADD VSUB VMUL VDIV` | `vd, va, vb` | Element-wise on two vector registers. |
| `VADDS VSUBS VMULS VDIVS` | `vd, va, sb` | Vector (op) scalar. The scalar in `s[rb]` is copied to every element. |
| `SADD SSUB SMUL SDIV` | `sd, sa, sb` | Scalar arithmetic. Runs through the same ALU. |
| `VLD VST` / `VLDF VSTF` | `vd, sa, imm` | Moves 24 words at address imm + int(s[ra]). The F forms convert binary64 ↔ fixed. |
| `SLD SST` / `SLDF SSTF` | `sd, sa, imm` | Moves one word. For stores, the data come from `s[rd]`. |
| `SLI` | `sd, imm` | s[rd] = signed imm, as an integer. |
| `JMP` | `imm` | pc = imm. |
| `BNZ` | `sd, imm` | If s[rd] ≠ 0, then pc = imm. |
| `NOP`, `HALT` | | |

Notes on the instruction set:
- `int(s)` means the integer part of a scalar register, bits [47:32]. With it, a
  loop can step a base register through the columns.
- Unknown opcodes execute as `NOP`.
- The architecture asks for vector instructions, scalar instructions and
  registers for the non-vector parts of a kernel, and a Harvard code memory.
  The particular instructions and the encoding are this design's own.

## Control and timing of a program

`control_unit` moves through the states IDLE → FETCH → DECODE → (EXEC) →
FETCH … → HALT.
- In DECODE it decodes the word coming out of the code memory and issues a
  start pulse. Instructions that need no unit (`SLI`, `JMP`, `BNZ`, `NOP`)
  finish in DECODE.
- EXEC waits for the `done` of the sequencer or of the load/store unit, then
  writes back.

An instruction therefore costs 2 clocks plus the latency of the unit it uses:

| Instruction (24 elements, 8-8-24, memory without stalls) | Clocks |
|---|---|
| `SLI`, `JMP`, `BNZ`, `NOP` | 2 |
| `VADD`, `VSUB`, `VMUL`, and their scalar-broadcast forms | 6 |
| `VDIV` | 101 |
| `SADD`, `SSUB`, `SMUL` | 4 |
| `VLD`/`VLDF` | 2 + 2·24 + 1 = 51 |
| `VST`/`VSTF` | 2 + 24 + 1 = 27 |
| `SLD`/`SLDF` | 5 |

Nothing overlaps: the sequencer and the load/store unit are never busy at the
same time, and an assertion in `vector_core` checks this. For the test kernel,
one column takes 559 clocks. Of these, 287 go to memory traffic. Overlapping
loads with arithmetic would be the first improvement to make. It is not part of
the architecture as published.

Programs are loaded through `prog_we/prog_addr/prog_data` before `start`, or
given as a hex file through the `INIT_FILE` parameter. `start` runs the program
from address 0. `halted` rises once `HALT` is decoded and stays high until the
next `start`.

## Memory port and load/store unit

The data memory port uses 64-bit words and word addresses (`AW` = 16 bits).
- **Request.** `mem_req` with `mem_we`, `mem_addr` and `mem_wdata` is held
  until `mem_gnt` is high in the same cycle. An assertion checks that the
  request stays stable.
- **Read response.** Read data return on a later cycle, marked by
  `mem_rvalid`.
- **Outstanding reads.** The unit keeps at most one read outstanding, so a
  vector load costs two clocks per element with a memory that answers in one
  clock.

The unit moves one element per transfer through the element port of the vector
registers. Conversion happens on the data path:
- `float_to_fixed` on read data,
- `fixed_to_float` on write data.

Setting `USE_FP_CONV = 0` removes both converters. The F instructions then move
raw words.

## Parameters of `vector_core`

| Parameter | Default | Meaning | From |
|---|---|---|---|
| `W`, `FRAC` | 64, 32 | Fixed-point word and fractional bits | architecture |
| `VLEN` | 24 | Elements per vector (vertical levels) | architecture |
| `N_ADD`, `N_MUL`, `N_DIV` | 8, 8, 24 | Functional units of each kind (≥ 1, ≤ VLEN) | architecture |
| `NVREG` | 8 | Vector registers | this design |
| `NSREG` | 16 | Scalar registers | this design |
| `CODE_DEPTH` | 256 | Instruction words | this design |
| `AW` | 16 | Data address bits | this design |
| `USE_FP_CONV` | 1 | Build the float/fixed converters | architecture (optional converter) |
| `INIT_FILE` | "" | Hex file for the code memory | this design |

The register-file addressing is fixed at 5 bits per field, so `NVREG` and
`NSREG` can be at most 32.

Counting register bits, the default core holds about 25,000 flip-flops. Most of them are in three places:
- the vector registers (8·24·64 bits),
- the sequencer's three interface-register vectors (3·24·64 bits),
- the 24 dividers (about 300 bits each).

## Where this departs from the published architecture

- **Unit timing style is fixed.** The architecture lets each unit class be
  built combinational or sequential. Here adders and multipliers are always
  combinational and dividers always sequential. That is the mix that was
  evaluated.
- **Every unit class is always built.** There must be at least one unit of
  each kind, even if a program never uses it.
- **One core, not a core array.** The top is a single core. The architecture
  replicates cores, one per grid column, but gives neither the core count nor
  how the cores share memory and the host. Instantiating `vector_core` several
  times, each with its own memory port, is the intended use.
- **Own choices where the architecture is silent.** These are named in each
  file's header:
  - the instruction set,
  - the register counts,
  - the memory protocol,
  - rounding and saturation,
  - reset values,
  - the code-memory loading port.
- **No comparison with published nanosecond figures.** No clock frequency is
  given, so the published latencies cannot be compared with clock counts here.

## Simulating

Every file in `rtl/` and `tb/` holds one module or package, named after the
file. A testbench prints `TB_RESULT checks=N failures=M` and stops. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/vp_pkg.sv tb/tb_ref_pkg.sv tb/tb_vector_core.sv --top-module tb_vector_core
./obj_dir/Vtb_vector_core
```

| Testbench | What it shows |
|---|---|
| `tb_vector_core` | Three columns of a test kernel at the default configuration. The test kernel has the operation mix of the convection loop body: 6 multiplies, 2 divides, 2 adds and a negation. Two cores run it: one on a memory that stalls at random, one on a memory that never stalls. The test checks results against a fixed-point reference, checks the exact clock count, and requires every mechanism (stalls, multi-batch operations, divider runs, both conversions, scalar loads and arithmetic, broadcast, both branch outcomes, halt) to occur. |
| `tb_alu_configs` | The nine functional-unit mixes, with results and clock counts (table above). |
| `tb_alu_sequencer` | All operations, at full length and at length 1, on the 8-8-24 mix and on a 5-4-2 mix. Counts that do not divide 24 are covered. Also checks latencies. |
| `tb_control_unit` | The controller with stub units: issue order, write-back, branches, jump, halt, restart. |
| `tb_load_store_unit` | Loads and stores with and without conversion, against a memory that never stalls and one that stalls. Also checks clock counts. |
| others | One per arithmetic unit, converter and register file, each against independent reference arithmetic. |

`tb_ref_pkg` holds the reference arithmetic. It uses 128-bit integer
arithmetic and the simulator's `real` type, never the RTL. The test data are
generated inside the testbenches.
