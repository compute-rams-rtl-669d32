# Compute RAM: a block RAM that computes inside its own array

An FPGA block RAM usually only stores data. Any arithmetic on that data
goes through the routing fabric to DSP slices or logic blocks and back, and
that movement costs energy and clock rate. A *Compute RAM* is a drop-in
replacement for a 20 Kbit block RAM. It can also operate on the data where
it sits. It builds on bit-line computing SRAM: when two word lines are raised
together, each bit-line senses the AND of the two cells, and its complement
line senses the NOR. A few gates per column turn this into any logic function
or into one step of a full adder. Data is stored *transposed*: the bits of
one number run down one column. Each clock then processes one bit of
40 independent numbers, one per column, and any precision is just a
different number of steps.

This RTL models the Compute RAM architecture published by A. Arora,
B. Hanindhito and L. K. John ("Compute RAMs: Adaptable Compute and Storage
Blocks for DL-Optimized FPGAs", Asilomar 2021). It follows that description
at the level of blocks, sizes and interface. The instruction set, the
pipeline details and the address map are this implementation's own, because
the architecture leaves them open. They are marked as such below.

## Block organisation

```
             cfg_imem_*  (FPGA configuration logic)
                  |
   address ---+-> Instruction memory 256 x 16 --------------+
   data_in ---+        | instructions                        |
   write_en --+   Controller (2-stage, 8 regs, HW loops)     |
   mode ----------->   | array instructions                  |
   start ---------->   v                                     v
              +-> [port / controller mux]              [output mux] -> data_out
              |        |
              |   Main array 512 x 40  (input crossbar, 2 row decoders,
              |        |               column & configurable decoder,
              |        |               output crossbar)
              |   Sense amplifiers: BL = A.B, BLB = ~A.~B per column
              |   Logic peripherals: 40 x {gates, carry C, tag T, predicate mux}
              +------------------------------------------------------ done
```

| Module | What it is |
|---|---|
| `compute_ram` | The block. Holds the four parts below and the two muxes. |
| `cram_main_array` | 512 x 40 cells with a storage port and a two-row compute port. |
| `cram_logic_peripherals` | Per-column gates, carry and tag latches, and the predication mux. |
| `cram_controller` | The sequencer: fetch, decode, register file, hardware loops, row pointers. |
| `cram_imem` | 256 x 16 instruction memory with fetch, user and configuration ports. |
| `cram_pkg` | Shared types, the instruction encoding and assembler functions. |

## The two modes

**Storage mode** (`mode = 0`). The block is an ordinary synchronous RAM. The
`cfg_geometry` input sets its shape: 512x40, 1024x20 or 2048x10.

- A read returns data on `data_out` one clock after the address.
- A write takes effect at the clock edge.
- In the narrow shapes, word `w` maps to physical row `w / k` and column
  group `w % k` (k = 2 or 4). Data uses the low 20 or 10 bits. This mapping
  is this design's choice.

**Compute mode** (`mode = 1`). A rising edge of `start` runs the program in
the instruction memory from address 0. `done` rises once the `END`
instruction has executed and stays high until the next start. While the
program runs, the user port is ignored. Afterwards the array can be read in
either mode.

A typical sequence:

1. Write the operands transposed in storage mode.
2. Write the program, either over the configuration port or over the shared
   bus with `address[11] = 1`.
3. Set `mode = 1` and pulse `start`.
4. Wait for `done`.
5. Set `mode = 0` and read the results.

**Address map of the user port (this design's choice):**

- `address[11] = 0`: a main-array word in the current geometry.
- `address[11] = 1`: instruction `address[7:0]`, with the instruction on
  `data_in[15:0]` / `data_out[15:0]`.

Besides the seven ports of the block (`mode`, `start`, `address`, `data_in`,
`write_en`, `data_out`, `done`), the top has `clk` and an active-low
synchronous `rst_n`. It also brings out the configuration-side signals
`cfg_geometry` and `cfg_imem_we/addr/wdata`. In an FPGA these come from the
configuration logic.

## How one array instruction works

An array instruction names three registers. Their low 9 bits are the row
addresses A, B (read) and W (write). Within a single clock:

1. The two row decoders raise rows A and B. Every column senses
   `BL = A & B` and `BLB = ~A & ~B`.
2. The logic peripherals derive `OR = ~BLB`, `NAND = ~BL`,
   `XOR = ~(BL | BLB)` and `XNOR = BL | BLB`. For an add they compute
   `sum = XOR ^ C` and `carry = BL | (XOR & C)`.
3. The 4-to-1 predication mux picks the per-column enable: always, `C`,
   `~C` or the tag `T`.
4. At the clock edge the write drivers store the result into row W, but only
   in enabled columns. C and T update in the enabled columns too.

Reading and writing in the same cycle matches the bit-line SRAM it models.
In RTL this is a combinational two-row read plus a write at the edge. The
electrical side is not modelled: lowered word-line voltage, sense margins,
and the ~33% lower compute-mode clock.

Operations (`cram_pkg::aop_e`). `ra == rb` gives single-operand forms:
`NOR(A,A) = ~A`, `AND(A,A) = A`.

| op | effect | op | effect |
|---|---|---|---|
| AND, NOR, OR, NAND, XOR, XNOR | row W <= f(A,B) | TAG | T <= A & B |
| ADD | W <= A ^ B ^ C, C <= carry | TAGC | T <= C |
| CLRC / SETC | C <= 0 / 1 | WRC / WRTAG | W <= C / T |
| ZERO / ONE | W <= 0 / 1 | (15) | no effect |

Operations that use predication:

- **Subtraction:** write `~B` with NOR, then `SETC`, then ADD.
- **Compare and select:** after `A + ~B + 1`, C is `A >= B`. A
  Carry-predicated copy of A, then a NotCarry-predicated copy of B, gives
  the maximum.
- **Multiplication:** shift-and-add. `TAG` loads one multiplier bit per
  column, and a Tag-predicated ADD adds the multiplicand only where that bit
  is 1.

## The controller and its instruction set

The controller is a two-stage pipeline:

- **Fetch:** the instruction memory's registered read.
- **Execute:** decode, read registers, run the execution unit or issue an
  array instruction, and write back, all in one cycle.

Because the array also finishes its work in that cycle, no hazards arise,
and the pipeline issues one instruction per clock. The execution unit has
one adder (ADD, SUB, ADDI), one comparator (BNE, BLT, unsigned) and one
logical unit (AND, OR, XOR, MOV). There are 8 registers of 16 bits in
flip-flops.

Encoding (16 bits; `cram_pkg` has helper functions `i_*` that assemble
each form):

```
array   1 | op[14:11] | pred[10:9] | rw[8:6] | ra[5:3] | rb[2:0]
END     0 000 1 ...            NOP    0 000 0 0 ...
SETINC  0 000 0 1 .. mask[7:0]   row-pointer post-increment set
LDI     0 001 rd imm9           rd = imm (zero-extended)
ADDI    0 010 rd imm9           rd += imm (sign-extended)
ALU     0 011 rd rs 000 fn      fn: ADD SUB AND OR XOR MOV
LOOP    0 100 rc 0 len8         next len instructions, reg[rc] times
LOOPI   0 101 cnt6 len6         next len instructions, cnt times
BNE     0 110 rs rt off6        if rs != rt: pc += off (off relative to the branch)
BLT     0 111 rs rt off6        if rs <  rt (unsigned)
```

**Zero-overhead loops.** `LOOP`/`LOOPI` push `{first, last, count}` on a
4-entry loop stack. When the fetch address reaches `last`, the next fetch
goes back to `first` and the count goes down; no cycle is lost. When the
count runs out, the entry is popped. A count of zero skips the body.

Two rules for programs:

- Nested bodies must not end on the same instruction.
- A branch must not be the last instruction of a body.

A taken branch costs one bubble.

**Row pointers.** `SETINC mask` marks registers as row pointers. After
each array instruction, every marked register that the instruction used as
a row address goes up by one, once even if it appears in two fields.
Operations that use no row (CLRC, SETC, TAGC) leave the pointers alone.
With this, the body of an n-bit add is a single ADD, and the block sustains
one bit-step per clock.

This post-increment is this design's addition. The published controller
lists only one adder, one comparator and one logical unit. However, its
quoted throughputs (below) need back-to-back array instructions, so this
design adds the increment.

**Timing.** From the clock edge that samples `start` to the first cycle
with `done` high takes N + 1 + B cycles. N is the number of instructions
executed, including `END`. B is the number of taken branches plus skipped
loops. `start` clears the registers, the loop stack and the increment mask.

## Example: 42 int4 additions per column at full rate

Let A occupy rows 0..167, B rows 168..335 and S rows 336..503, with tuple
*t* at `base + 4t`:

```
LDI r0,0 ; LDI r1,168 ; LDI r2,336 ; SETINC {r0,r1,r2} ; CLRC
LOOPI 42, 5
  ADD r2,r0,r1 ; ADD r2,r0,r1 ; ADD r2,r0,r1 ; ADD r2,r0,r1
  CLRC
END
```

Each 5-cycle iteration performs 40 4-bit additions.

## Measured against the published figures

The workload testbench fills the whole 512 x 40 array and checks every
result. It counts cycles from start to done. The GOPS figures use the
published compute-mode clock of 609.1 MHz.

| workload | elements | cycles | rate here | published rate |
|---|---|---|---|---|
| int4 add (4+4+4 rows) | 1680 | 218 | 40 per 5 cycles = 4.87 GOPS | 4.87 GOPS |
| int8 add (8+8+8 rows) | 840 | 197 | 40 per 9 cycles = 2.71 GOPS | 2.71 GOPS |
| int4 mul (4+4+8 rows) | 1280 | 1770 | 0.44 GOPS | 1.21 GOPS |
| int8 mul (8+8+16 rows) | 640 | 2234 | 0.17 GOPS | 0.34 GOPS |
| int4 dot product, 32-bit accumulate | 58 pairs x 40 columns | 5675 | - | 1470 cycles (vector size not stated) |
| bfloat16 mul (16+16+16 rows) | 400 | 2051 | 0.12 GOPS | 0.27 GOPS |
| bfloat16 add (16+16+16 rows) | 400 | 5101 | 0.048 GOPS | 0.31 GOPS |

- **Additions** match the published rates exactly.
- **Multiplications** use a plain shift-and-add sequence. It clears the
  product, then for each multiplier bit does TAG, CLRC, n predicated ADDs
  and a predicated WRC, and it is 2 to 3 times slower than the published
  rates. That sequence is software: a better one needs no RTL change.
- **Dot product:** the published sequence and vector size are unknown, so
  the cycle counts cannot be compared.
- **bfloat16 multiply:** normal numbers only, with a truncated mantissa.
  The sequence computes the 16-bit product of the two mantissas, each with
  its hidden 1. It then loads the carry latch with the product's top bit:
  an ADD of that row with itself leaves it in C. Carry- and
  NotCarry-predicated copies select the normalised mantissa. The exponent
  is `eA + eB + C - 127`, with C as the carry-in and the bias subtracted by
  adding 385 modulo 512. The sign is the XOR of the operand signs.
- **bfloat16 add:** signed, normal numbers only. There are no guard bits,
  so the shifted-out bits are truncated. A result of exactly zero is not
  handled. Every column follows its own path, chosen by predicates:
  - The exponent difference sets C to `eA >= eB`.
  - Carry- and NotCarry-predicated copies put the larger operand's
    exponent, mantissa and sign in place, and the smaller one's mantissa
    beside them.
  - Tag-predicated shifts by 1, 2 and 4 align the smaller mantissa, where
    the tag is one bit of the difference.
  - Where the signs differ, the smaller mantissa is inverted and the carry
    is set, so the same ADD subtracts.
  - A negative difference is negated and its sign flipped.
  - A carry out of a same-sign add shifts right once.
  - Leading zeros are removed by one Tag-predicated shift by four, where
    the top four bits are zero, and then three single-bit steps.
  The sequence is 242 instructions, which fits the 256-entry memory. The
  leading-zero removal takes about 40% of the cycles. A left shift in place
  must walk the rows downward, and the row pointers only post-increment, so
  each row costs three cycles. The result is far from the published rate.
  A different data layout or a decrementing pointer would narrow the gap.

### A wider array

Throughput grows with the number of columns, because each column is one
lane. Row count and program length stay the same. Dot products suffer most
at 40 columns, since many products share one column serially. A 72-column
array, the 512 x 72 block RAM shape of some FPGA families, was considered
only as an estimate in the original work. Here it is simulated with
`COLS = 72`: every workload above runs the same program in the same number
of cycles and produces 1.8 times as many checked results. For example, int4
addition gives 72 results per 5 cycles, 8.77 GOPS at 609.1 MHz, and the
int4 dot product covers 72 x 58 pairs in 5675 cycles.

## Where this RTL departs from, or adds to, the published architecture

- **Instruction encoding, two-stage pipeline, 16-bit registers, 4-deep loop
  stack, reset behaviour, start edge detection, address map:** the
  published architecture leaves all of these open.
- **Row-pointer post-increment:** an addition, explained above.
- **Predication mux inputs:** the published description names three of its
  four inputs (Carry, NotCarry, Tag). The fourth input here is "always".
- **C and T updates:** they happen only in enabled columns. This lets a
  Tag-predicated multiply keep carries at zero in idle columns.
- **Geometry:** the physical array is always 512 x 40. The geometry setting
  affects only the storage port; compute mode always sees 512 x 40.
- **Not modelled:**
  - The circuit side of bit-line computing.
  - The lower compute-mode clock.
  - Configuration-time loading of the instruction memory from a bitstream.
    It is exposed as a plain write port, `cfg_imem_*`.
  - The FPGA fabric around the block.
- **Vendor-style sizes are parameters:** `ROWS`, `COLS` and `IMEM_DEPTH` of
  `compute_ram`. The wider 512 x 72 array is a parameter change
  (COLS = 72), and the workload programs run on it unchanged (see below).
  Its storage-port shapes then become 1024 x 36 and 2048 x 18. Only the
  512 x 72 shape is exercised there.

## Simulating

All files are plain SystemVerilog. List the package first. Each testbench
prints `TB_RESULT checks=N failures=M`.

```
verilator --binary --timing --assert -Irtl rtl/cram_pkg.sv rtl/cram_imem.sv \
  rtl/cram_main_array.sv rtl/cram_logic_peripherals.sv rtl/cram_controller.sv \
  rtl/compute_ram.sv tb/tb_compute_ram.sv --top-module tb_compute_ram -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_compute_ram` | The whole block at default size, end to end: all geometries, both ways of loading the instruction memory, start ignored in storage mode, user writes ignored while busy, add, multiply, max with Carry and NotCarry predication, a branch loop, a restart, and cycle counts. It counts every mechanism and fails if any never occurs. |
| `tb_cram_workloads` | The table above, at 512 x 40. Its body is `cram_workload_bench`, so compile `tb/cram_workload_bench.sv` with it. |
| `tb_cram_workloads_72` | The same bench at 512 x 72. |
| `tb_cram_controller` | The sequencer against its own sequential interpreter of the instruction set: the array-instruction stream and cycle counts. |
| `tb_cram_main_array` | Storage reads and writes in every geometry, two-row sensing, and masked write-back. |
| `tb_cram_logic_peripherals` | Every operation with every predicate against a per-column model, and a bit-serial add. |
| `tb_cram_imem` | Both read ports, both write paths, and write priority. |

To write a program, build it in a testbench with the `cram_pkg::i_*`
functions and load it over `cfg_imem_*` or over the user port.
