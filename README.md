# A coarse-grained reconfigurable array with shared, pipelined multipliers

In a mesh of reconfigurable processing elements (PEs), the array multiplier
is the most expensive part of a PE. It is the largest block and has the
longest path. A loop-pipelined schedule, however, rarely needs every PE to
multiply in the same cycle: neighbouring columns run the same loop body a few
cycles apart. This design exploits that. The multipliers are taken out of the
PEs and placed as a small pool at the ends of each row, and the PEs of the row
share them through a per-PE bus switch. Each shared multiplier is also cut into
two pipeline stages. That shortens the clock period, and two PEs can use one
multiplier in the same cycle as long as they are in different stages.

The RTL here implements the configuration called *RSP architecture #2*
(RSP stands for resource sharing and pipelining):

* an 8 x 8 mesh of 16-bit PEs, each with its own configuration cache and bus
  switch;
* per row, two 2-stage pipelined 16 x 16 -> 32-bit multipliers, one at each
  end of the row, shared by the row's eight PEs;
* per row, two read buses and one write bus to a common data memory;
* one controller that steps all configuration caches through a
  loop-pipelined program.

Of the shared-resource variants that were compared in the original
evaluation (one or two multipliers per row, plus zero, one or two per
column, each pipelined or not), this configuration ran every evaluated
kernel without a resource stall and gave the best overall execution time.
So this is the one built. The unpipelined variant is still available through
a parameter (`MUL_STAGES = 1`).

## Block diagram

```
             row r (one of 8)
   +-----+   +----+  +----+        +----+   +-----+
   | MUL |===| SW |==| SW |== .. ==| SW |===| MUL |   multiplier buses 0 (left) and 1 (right):
   |  0  |   +----+  +----+        +----+   |  1  |   operands in, 32-bit product out
   +-----+   | PE |--| PE |-- .. --| PE |   +-----+
             +----+  +----+        +----+            PE <-> PE: N/S/E/W output registers
               ||      ||            ||
   ============++======++============++===========   2 read buses + 1 write bus of row r
                          |
                    data memory (1024 x 16, 16 read ports, 8 write ports, host port)

   every PE: config cache (64 contexts) <- context pointer <- controller
```

## What a PE does in one cycle

All configuration caches are indexed by the same context pointer, so in every
cycle each PE executes its own 54-bit context word (`rsp_pkg::ctx_t`):

| field | meaning |
|---|---|
| `op` | `NOP ADD SUB ABS AND OR XOR MOV SHL SHR LD ST MUL` |
| `src_a`, `src_b` | operand source: `R0`, `R1`, neighbour `N`/`S`/`E`/`W`, `IMM`, zero |
| `dst` | destination register: `R0` (output register, seen by the neighbours) or `R1` (local) |
| `mul_sel` | which shared multiplier of the row this PE uses (0 = left, 1 = right) |
| `addr_a`, `stride_a` | base/stride of the read-bus-0 address (LD) or of the write address (ST) |
| `addr_b`, `stride_b` | base/stride of the read-bus-1 address (LD) |
| `imm` | 16-bit constant |

* ALU and shift operations read two operands and write `dst` at the clock
  edge. Arithmetic wraps at 16 bits. `SHR` is arithmetic, and the shift amount
  is `B[3:0]`.
* `LD` fetches two words in one cycle, one on each read bus of the row. It
  writes the word from bus 0 into `R0` and the word from bus 1 into `R1`.
* `ST` writes operand A onto the row's write bus.
* Load and store addresses are `base + count * stride`. Here `count` is the
  number of loads, or of stores, that this PE has done since the run started.
  One context can therefore step through the data of successive loop
  iterations without extra address instructions.
* At the array edges a neighbour input reads zero.

## Sharing a pipelined multiplier

This is the mechanism that makes the design different from a plain CGRA.

1. **Issue (stage 1, "1\*").** The context says `MUL` with `mul_sel = m`.
   The PE's bus switch puts the two 16-bit operands on row bus `m`. All other
   switches of the row put zero on that bus, so the bus is simply the OR of
   the row's switches. The multiplier's front stage forms the two half
   products `a * b[7:0]` and `a * b[15:8]` and registers them.
2. **Return (stage 2, "2\*").** In the next cycle the end stage adds the half
   products and drives the 32-bit product on the multiplier's product bus. The
   issuing PE has remembered `m` and its destination register. Its bus switch
   selects product bus `m`, and the low 16 bits are written into the
   destination at the end of this cycle. In the same cycle, another PE of the
   row can already issue to multiplier `m`.
3. The PE's own context for the 2\* cycle must not write the register that the
   product is going to. In practice it is a `NOP` in the schedules. An
   assertion in `rsp_pe` checks this rule.

Which PE uses which multiplier in which cycle is decided when the contexts
are compiled, not at run time. The hardware has no arbiter and does not
stall. Two requests to one multiplier in the same cycle, or two users of one
read or write bus, are a program error. The top level sets the sticky
`conflict` output when this happens, and clears it with `start`. A compiler
handles a shortage of multipliers by moving the later loop iteration's
multiplication to a later cycle ("resource-sharing stall"). It also delays the
operations that depend on a product by the extra pipeline cycle
("pipelining stall"). Both are visible only in the context program.

With `MUL_STAGES = 1` the multiplier is combinational. The product is then
written at the end of the issuing cycle, and a row can serve only as many
multiplications per cycle as it has multipliers.

## Programs: prologue, kernel, epilogue

The controller (`rsp_controller`) runs contexts `0 .. last` once. The block
`loop_start .. loop_end` is the exception: it runs `loop_count` times before
the run goes on (a count of 0 counts as 1). Seen from the caches, a
loop-pipelined loop is therefore:

* a prologue, in which the columns start one after another;
* one steady-state period, repeated;
* an epilogue, in which the columns drain.

The controller's signals work as follows:

* `start` is accepted when the array is idle. In that cycle the PE address
  counters are cleared (`clear`).
* Context 0 runs in the next cycle.
* `busy` is high while contexts execute.
* `done` pulses for one cycle after context `last` has run.

The configuration caches and the data memory should be written only while the
array is idle.

### Worked example: C * X * Y

The end-to-end test (`tb/tb_rsp_array.sv`) runs the scaled matrix product
Z(i,j) = C * sum_k X(i,k) Y(k,j). Every column repeats the 8-cycle
iteration

```
slot:  0    1    2    3    4    5    6    7
       Ld   1*   2*   +    +    1*   2*   St
```

and column c starts c cycles after column 0. The four PEs of a column do the
following:

* In the `Ld` slot they load X(i,k) and Y(k,j) on the two read buses.
* They multiply, which takes two cycles.
* They add in a tree over the vertical links: row 1 adds row 0 while row 2
  adds row 3, then row 1 adds row 2.
* Row 1 multiplies the sum by C taken from `imm`.
* Row 1 stores the result.

Columns 0-3 use the left multiplier of their row and columns 4-7 the right
one. Because column c issues in slots c+1 and c+5 (mod 8), every multiplier
receives a new operand pair in every cycle and always holds two different
PEs' products in its two stages. Rows 0-3 and rows 4-7 solve two independent
problems. The whole run takes 8 * iterations + 7 cycles.

## Kernels run on the array

Besides the end-to-end test, one testbench per kernel of the original
evaluation runs that kernel on the full-size array. Each one:

* writes its context program and its data through the host ports;
* starts the run and counts the cycles until `done`;
* reads the results back and compares them with a model computed in the
  testbench (16-bit wrap-around arithmetic, low half of each product).

The schedules were written by hand for this RTL. The original mappings and
data layouts are not published, so the cycle counts below are not the
original ones. They are listed next to the original figures for this
configuration only as a rough comparison:

| testbench | kernel | size | cycles here | original |
|---|---|---|---|---|
| `tb_wl_hydro` | hydro fragment, Livermore loop 1 | 32 iterations | 15 | 19 |
| `tb_wl_inner_product` | inner product, Livermore loop 3 | 128 terms | 31 | 22 |
| `tb_wl_iccg` | ICCG excerpt, Livermore loop 2 | n = 32 (31 iterations in 5 levels) | 33 | 19 |
| `tb_wl_tridiag` | tri-diagonal elimination, Livermore loop 5 | 63 steps | 192 | 18 |
| `tb_wl_state` | equation-of-state fragment, Livermore loop 7 | 16 iterations | 24 | 23 |
| `tb_wl_sad` | sum of absolute differences | 16 x 16 block | 49 | 39 |
| `tb_wl_mvm` | matrix-vector product | 8 x 8 | 12 | 20 |
| `tb_wl_fft_mul` | complex multiplication loop of an FFT | 32 products | 13 | 27 |
| `tb_wl_fdct` | 8 x 8 2D-FDCT | one block | 2 x 69 | 40 |

Notes on the table:

* The tri-diagonal loop is a true recurrence: every step needs the product
  of the step before. With a 2-cycle multiplier and a subtraction in front of
  it, a step cannot take fewer than 3 cycles here. The original figure must
  come from a different formulation of the loop, which is not known.
* The FDCT runs as two 1D passes with a looped kernel. The coefficients are
  round(16 a(u) cos((2x+1) u pi / 16)), and each product sum is shifted right
  by 4.
* The ICCG excerpt has five levels that depend on each other. Its iterations
  run in parallel within a level, and the levels run one after another.

`tb_wl_matmul_rs` shows the unpipelined variant. It runs the II = 6
schedule of the 4 x 4 matrix product on a 4 x 4 array with
`MUL_STAGES = 1`, two multipliers per row and 32 contexts. It takes 27 cycles.

## Sizes and what they hold

| parameter | default | origin |
|---|---|---|
| `ROWS` x `COLS` | 8 x 8 | from the source architecture |
| data width / product width | 16 / 32 | from the source architecture |
| `NMUL_ROW` | 2 | from the source architecture (architecture #2) |
| `MUL_STAGES` | 2 | from the source architecture |
| `CTX_DEPTH` | 64 | own choice: the longest evaluated kernel schedule for this configuration is 40 cycles |
| `MEM_DEPTH` / address bits | 1024 / 10 | own choice: the largest evaluated data set (an SAD on two 16 x 16 blocks, 512 words) fits |

The kernels in the original evaluation are Livermore loops 1, 2, 3, 5 and 7,
the 2D-FDCT and SAD of an H.263 encoder, a matrix-vector product and the
multiplication loop of an FFT. All of them need at most 16 multiplications per
cycle. With two pipelined multipliers per row and eight rows, the array
accepts exactly 16 per cycle. All their operations (add, sub, abs, shift,
multiply) are built in. The data sizes above are estimates from the usual
definitions of these kernels, not from the source.

## Where this RTL follows the source and where it does not

The following come from the source architecture:

* the mesh size and the 16-bit data path;
* a configuration cache and a bus switch per PE;
* two read buses and one write bus per row;
* the multiplier taken out of the PE and shared per row;
* two multipliers per row, each cut into two stages by one register;
* compile-time mapping of PEs to multipliers, with the mapping carried in the
  configuration word;
* the 2n-bit product returned through the issuing PE's switch;
* the loop-pipelined schedules, including the pipelined matrix-multiply
  schedule used in the test.

The source only names or describes the following, so everything here is this
design's own:

* the opcode set beyond add, sub, abs, shift and multiply, and all encodings;
* the second PE register `R1`;
* base + count x stride address generation;
* writing back the low 16 bits of the product;
* where the multiplier is cut (the two half products);
* OR-combined row buses and the `conflict` flag;
* the controller and its prologue/kernel/epilogue registers;
* the cache depth, the memory size and organisation (one array with 16
  asynchronous read ports), and the host ports.

The source also mentions "some interconnections between PEs" added to the
plain mesh, without saying which. Only the four nearest-neighbour links are
built, so a reduction across two rows needs an extra `MOV`. Nothing about
sign handling or overflow is given: multiplication is signed and the rest is
wrap-around two's complement.

Not built:

* column-shared multipliers (architectures #3 and #4), which the source only
  compares;
* the baseline PE with its own multiplier;
* the host processor that fills the caches and the memory. Its signals are
  the `cfg_*`, `mem_*` and run-control ports of `rsp_array`.

The design-space exploration flow that picks these parameters is a software
flow and has no hardware.

## Files

| file | contents |
|---|---|
| `rtl/rsp_pkg.sv` | widths, opcodes, operand sources, context word and bus structs |
| `rtl/rsp_alu.sv`, `rtl/rsp_shift.sv` | ALU and shift logic of a PE |
| `rtl/rsp_pe.sv` | primitive PE: operand muxes, registers, address counters, multiply issue/writeback |
| `rtl/rsp_bus_switch.sv` | per-PE routing to and from the row's multipliers |
| `rtl/rsp_mul.sv` | shared multiplier, 1 or 2 stages |
| `rtl/rsp_config_cache.sv` | per-PE context memory |
| `rtl/rsp_controller.sv` | context pointer sequencer |
| `rtl/rsp_data_memory.sv` | data memory with 2 read + 1 write bus per row |
| `rtl/rsp_array.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_wl_<kernel>.sv` | kernel programs run on the whole array |
| `tb/rsp_tb_host.svh` | shared host tasks of the kernel testbenches: reset, memory access, program loading, run and cycle count |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops by itself.
It also has a watchdog. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/rsp_pkg.sv tb/tb_rsp_array.sv \
          --top-module tb_rsp_array -o sim
./obj_dir/sim
```

Replace `tb_rsp_array` with any other testbench. `tb_rsp_array` runs the
top at its default parameters. It checks:

* every result word;
* the cycle count of the run;
* that a deliberately conflicting program raises `conflict`;
* that each mechanism occurred. It counts issues to each multiplier, cycles in
  which one multiplier holds two PEs' products, additions that finish while a
  product is in flight, two-bus loads, stores and kernel repetitions.

The other testbenches compare their module against an independent model with
random stimulus. The PE test models the whole PE, including the 2-cycle
product latency.

All RTL passes `verilator --lint-only -Wall` and elaboration by the slang
front end of Yosys. The remaining lint warnings are:

* the unused upper product bits in the PE;
* the unused upper bits of the shift-amount operand;
* the unconnected `product_valid` of the multipliers in the top level;
* the reset being used both as an asynchronous reset and in an assertion's
  `disable iff`.
