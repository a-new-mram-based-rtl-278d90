# Floating point in SOT-MRAM: a digital processing-in-memory accelerator

Training a neural network moves the same weights back and forth between memory
and arithmetic units millions of times. A processing-in-memory (PIM) design
avoids that traffic by computing where the data is stored. This RTL describes
such an accelerator built on spin-orbit-torque MRAM (SOT-MRAM), following the
paper *A New MRAM-based Process In-Memory Accelerator for Efficient Neural
Network Training with Floating Point Precision* (Wang, Zhao, Li, Wang, Lin).
The RTL is an independent model of that design, not the authors' code.

The central idea is that an SOT-MRAM cell can compute while it is being
written. A cell holds a bit B. A write applies a bias A to the cell's read bit
line and drives a write current in direction C. The cell switches only when the
bias is present, and then takes the value C:

    B' = A ? C : B

One rule gives every Boolean function needed:

| write            | A      | C      | result        |
|------------------|--------|--------|---------------|
| copy             | 1      | X      | X             |
| AND              | X      | 0      | ~X & B        |
| OR               | X      | 1      | X \| B        |
| XOR              | X      | ~B     | X ^ B         |

A and C can come from bits just read out of other cells, so one step reads
some cells and then writes others. Everything else (a full adder, floating
point addition and multiplication) is a sequence of such steps. The paper's
1T-1R cell lets every column of a row receive its own A and C, so one step
acts on all columns at once.

## How the RTL maps the array

The model is one 1024 x 1024 subarray (`mram_subarray`). **Each column is a
lane**: it holds its own operands, and every command runs in all 1024 columns
in parallel. A 32-bit value occupies 32 rows of a column, bit *i* in row
*base + i* (mantissa in rows 0..22, exponent in 23..30, sign in 31 relative to
the base). A multiply or add therefore produces 1024 results per command.

To load value *v* into column *c*, write bit *i* of *v* into column *c* of
row *base + i*. The host port writes and reads whole rows, so loading 1024
values takes 32 row writes.

A compute **step** takes one clock. It does up to three cell writes
(`pim_pkg::NOPS`). All source bits are read before any target is written. A
column **mask** limits a step to some columns. The mask is loaded from a row,
set to all ones, or set by a **search**.

A search compares a field of several rows with a key, in every column at once.
It is the content-addressable step the floating point adder uses to find all
columns that need the same alignment shift.

## The four-step full adder

Addition of n-bit fields (`fa_engine`, `MOP_ADD`) is done one bit at a time.
Each bit takes the paper's four read-then-write steps and three "cache" cells
(CX, CY, CZ) beside the operands. X and Y are bit *j* of the two operands, Z
is the carry, and S is the sum row:

| step | writes (A, C)                                     | result                    |
|------|---------------------------------------------------|---------------------------|
| 1    | CX <- X, CY <- Y (copies); CZ <- Z                | cached operands           |
| 2    | CX: A=~Y, C=0; CY: A=X, C=~Y                      | CX = XY, CY = X^Y         |
| 3    | CZ: A=~(X^Y), C=0; S <- CY (copy)                 | CZ = Z(X^Y), S = X^Y      |
| 4    | S: A=Z, C=~(X^Y); CZ: A=CX, C=1                   | S = X^Y^Z, CZ = carry out |

The operands are only read, never overwritten. That matters for training,
because the operands are needed again later.

After the first bit, the carry is already in CZ. Step 3 overwrites CZ, so for
later bits step 1 first saves the carry into a spare row (ZS), and step 4 reads
Z from there. This save is this design's own detail; the paper only says the
cache cells are reused from bit to bit.

An n-bit addition therefore takes 4n steps, plus one step if the carry out is
kept. The operands and the sum may share rows (in-place `x = x + y`). A
"shifted" mode writes sum bit 0 to its own row and bit *j* to row *dst + j - 1*.
The multiplier uses this mode for its add & shift.

The engine also expands these field operations:

- copy
- shifted copy (the shift is a signed constant)
- select by a row (`dst = s ? src : dst`)
- XOR with a row
- constants

Each of these is a single cell write per bit. Three bits share one step.
All sources of a step are read before any target is written, so in-place
shifts are correct in both directions. An accumulation into a single row
(`dst_fixed`) writes one bit per step.

## Floating point multiplication (`fp_mul_ctrl`)

All columns multiply at once:

1. Hidden bits are found as the OR of the exponent bits. The 24-bit mantissas
   are then formed with the hidden bit.
2. sign = sa XOR sb. exponent = ea + eb - 127, using the full adder on a 10-bit
   field.
3. **Mantissa product by shift and add.** Two buffers, P0 and P1, hold the
   running partial product and swap roles after every multiplier bit B_i.
   Columns with B_i = 0 do *copy & shift*: next = cur >> 1. Columns with
   B_i = 1 do *add & shift*: next = (cur + A) >> 1. The bit that falls out
   at the bottom is product bit *i*. Each column has its own B_i, so both
   branches run, each under its own mask.
4. If the top product bit is set, the mantissa is taken one position higher
   and the exponent is incremented. A column select does this.
5. If either operand has exponent 0 (zero), the result is +0.

Cost at 32-bit: **2886 steps, no searches.**

## Floating point addition (`fp_add_ctrl`)

Exponent alignment is the hard part in a SIMD memory. Each column may need a
different shift amount. A processor would shift each number separately. Here
one search per shift amount collects every column that needs that shift, and
one shifted copy then aligns all of them together. The cost grows with the
mantissa width, not with its square. The sequence is:

1. The mantissas get their hidden bits.
2. The full adder computes the exponent difference exp' = ea - eb.
3. The sign of exp' picks the result exponent, max(ea, eb).
4. The operand with the larger exponent is placed unshifted. The other one
   starts as 0.
5. For k = -24 .. +24, search exp' == k. In the matching columns, copy the
   mantissa of the smaller-exponent operand, shifted right by |k|.
   - A difference beyond 24 leaves that operand at 0.
   - That is **49 searches**, over the same signed range the paper uses.
6. If the signs differ, B's aligned mantissa is inverted and a carry of 1 is
   added, so the subtraction is two's complement. A negative sum is negated,
   and the result takes the opposite of A's sign.
7. A carry out is normalised by one right shift and an exponent increment.
   Leading zeros are removed in 24 passes. Each pass shifts left by one, and
   decrements the exponent, in the columns whose hidden position is still 0.
   A sum that stays zero gets exponent 0 and sign +.
8. The result is copied to R. R may be the same rows as B, which MAC uses.

Cost at 32-bit: **1969 steps and 49 searches.** Of the 1969 steps, 1152 go to
the one-position-per-pass left normalisation.

## Number format and where it departs from IEEE 754

Values use the IEEE single layout: 23-bit mantissa, 8-bit exponent, bias 127.
The paper gives 32-bit floating point but no rounding or special-value rules.
This RTL:

- rounds by truncation: shifted-out bits are dropped, and products keep the top
  24 bits
- treats exponent 0 as zero; there are no denormals
- has no infinities or NaN, and does not detect exponent overflow or underflow
  (the exponent wraps modulo 256)

Results are therefore bit-exact against a truncating model, not against IEEE
round-to-nearest. For same-sign additions the test also checks that they agree
with real arithmetic to about 2^-21.

## Step counts compared with the paper

The paper's cost formulas count read and write operations, with Nm = 23
mantissa bits and Ne = 8 exponent bits:

| operation | paper formula                                                  | paper, FP32                          | this RTL                    |
|-----------|----------------------------------------------------------------|--------------------------------------|-----------------------------|
| add       | (1+7Ne+7Nm) reads, (7Ne+7Nm) writes, 2(Nm+2) searches           | 218 reads, 217 writes, 50 searches   | 1969 steps, 49 searches     |
| multiply  | (2Nm^2+6.5Nm+6Ne+3)(read+write)                                | about 1259                           | 2886 steps                  |

The search counts agree within one. The RTL takes more steps, for two
reasons:

- **Both multiplier branches run.** Columns differ in B_i, so every bit pays for
  both branches. The paper's formula looks like an average in which half the
  bits need an addition.
- **Normalisation is one bit per pass.** Left normalisation after a cancellation
  moves one position per pass. The paper does not describe its normalisation.

Time per step (the paper uses a 2 ns cell switching time) is not
modelled: one step is one clock cycle.

## Commands (`pim_accel`)

| signal                                        | meaning                                                        |
|-----------------------------------------------|----------------------------------------------------------------|
| `cmd_valid`, `cmd_ready`                      | a command is taken when both are high; ready means idle        |
| `cmd_op`                                      | `OP_MUL` R = A*B, `OP_ADD` R = A+B, `OP_MAC` R = R + A*B        |
| `cmd_a`, `cmd_b`, `cmd_r`                     | first row of the 32-row operands A, B and R                    |
| `done`                                        | one-cycle pulse when the command has finished                  |
| `host_wr_en`, `host_wr_row`, `host_wr_data`   | row write, accepted only while idle                            |
| `host_rd_row`, `host_rd_data`                 | combinational row read                                         |
| `stat_steps`, `stat_searches`                 | compute steps and searches since reset                         |

MAC first multiplies into rows 192..223, then adds that product into R.

A full-size MAC over all 1024 columns takes 5547 clock cycles. That is 4855
steps, 49 searches, and one cycle of hand-over per field operation.

Reserved rows are:

- 192..223 for the MAC product
- 256..~480 for sequencer scratch
- 1020..1023 for the adder cache and carry save

Place operands in rows 0..191 or 481..1019.

## Modules

| file                  | role                                                                 |
|-----------------------|----------------------------------------------------------------------|
| `rtl/pim_pkg.sv`      | command and field-operation types, the cell rule, builder functions  |
| `rtl/sot_cell.sv`     | the write rule B' = A ? C : B for one row of cells                   |
| `rtl/exp_search.sv`   | column-parallel match of a stored field against a key                |
| `rtl/mram_subarray.sv`| storage, compute step (three writes), search, mask, host port        |
| `rtl/fa_engine.sv`    | field operations to subarray steps, including the four-step adder    |
| `rtl/fp_mul_ctrl.sv`  | multiplication sequence                                              |
| `rtl/fp_add_ctrl.sv`  | addition sequence                                                    |
| `rtl/pim_accel.sv`    | top: command unit, sequencers, engine, subarray                      |

The storage is an ordinary register array. The analog parts of a real array are
abstracted into single-cycle reads and writes:

- sense amplifiers
- word-line and bit-line drivers
- the read and write voltages

## Simulating

Every testbench in `tb/` checks its results itself and prints
`TB_RESULT checks=N failures=M`. For example:

    verilator --binary --timing --assert --timescale 1ns/1ps \
      --top-module pim_accel_tb -y rtl -y tb +libext+.sv \
      rtl/pim_pkg.sv tb/pim_accel_tb.sv
    ./obj_dir/Vpim_accel_tb

The testbenches are:

- `sot_cell_tb`: runs the write rule exhaustively.
- `exp_search_tb` and `mram_subarray_tb`: random tests against bit models.
- `fa_engine_tb`: checks additions, their 4n-step latency, and the other field
  operations.
- `fp_mul_ctrl_tb` and `fp_add_ctrl_tb`: check 32 columns against the reference
  model in `tb/fp_ref_pkg.sv`, including the step and search counts.
- `pim_accel_tb`: end to end with 64 columns. It runs MUL, ADD and MAC, and
  counts how often each mechanism occurs: search-aligned shifts, effective
  subtraction, negation, carry-out and leading-zero normalisation, zero
  results, product normalisation and zero operands.
- `pim_accel_full_tb`: one MAC at the full default size.
- `pim_train_step_tb`: one gradient-descent step of a small fully connected
  layer, run as a chain of commands with all values left in the array between
  them. Each of 64 columns is a neuron with 4 weights. The chain is a forward
  dot product (4 MAC), the error (ADD), the scaled gradient (MUL) and an
  in-place weight update (4 MAC). Every intermediate value is checked.

Each takes seconds.

## What is not here

The paper evaluates the accelerator by training LeNet-5 on MNIST. It reuses an
earlier multi-subarray architecture without describing it. This RTL stops at
one subarray with column-parallel MUL, ADD and MAC, and has none of the
following:

- a mapping of network layers, weights or gradients onto subarrays
- inter-subarray data movement
- any training dataflow

`pim_train_step_tb` shows how one layer's step chains the commands inside one
subarray. It is a pattern for such a mapping, not the mapping itself.

At this layout the free rows of one subarray (0..191, 224..255 and 481..1019)
hold 23 values per column, 23 552 in all. That is enough to store the 21 690
weights of the paper's LeNet model. It is not enough to also keep activations,
gradients and the operand pairs each MAC needs in the same column.
