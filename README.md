# A residue-number tensor processing unit

An 8-bit tensor unit is fast because its 256x256 multipliers are small and it
has to normalize each dot product only once, after all products are summed.
Widening the numbers to 32 or 64 bits spoils this. Multipliers grow with the
square of the width, and carries ripple through ever wider accumulators.

This design keeps the 8-bit datapath and still computes on wide fixed-point
numbers. It does so by holding every number in a *residue number system*
(RNS). A number X is stored as its remainders modulo 18 pairwise-prime moduli,
each below 256:

    x_d = X mod m_d,   d = 0..17,   m = 251, 241, 239, 233, 229, 227, 223, 211, 199,
                                        197, 193, 191, 181, 179, 173, 167, 163, 157

Addition and multiplication of RNS words work digit by digit, with no carry
between digits. One product summation therefore splits into 18 independent
8-bit problems. Each of these runs on its own copy of an ordinary
tensor-unit datapath, called a **digit slice**. The digits meet only once
per dot product. At that point a pipelined **normalizer** rescales the
finished sum and an **activation unit** applies ReLU. The result digits then
go back to their slices.

```
 host ──► host_interface ──► fwd_converter (Q15.48 → RNS) ──┐
   ▲            │                                           ▼  digit d of every row
   └── rev_converter (RNS → Q15.48) ◄── unified buffers of all 18 slices
                │
         tpu_controller (instruction FIFO + sequencer), broadcast to all slices
                │
 ┌──────────── digit_slice d  (d = 0..17, identical but for the modulus) ───────────┐
 │ weight FIFO ─► mmu: DIM x DIM modular multiply-add array ─► accumulators (mod m_d)│
 │ unified buffer ─► systolic_setup ─┘                                              │
 └──────────────────────────────────────────────────────────────────────────────────┘
                │ one accumulator row, all 18 digits
                ▼
     normalize_pipeline (÷R_F, sign) ─► activation_unit (ReLU / none) ─► unified buffers
```

## Fixed-point numbers in residues

The product of all 18 moduli is M ≈ 2^137.7. This is the range of the
integers the hardware holds. Fractions use the product of the first seven
moduli as their unit:

    R_F = 251·241·239·233·229·227·223 ≈ 2^55.1

A real value x is held as the integer X = round(x·R_F). The host side uses
two's complement Q15.48 (sign, 15 integer bits, 48 fraction bits), so every
host value has about 7 more fraction bits of precision inside the chip than
outside it.

Negative numbers use the upper half of the range: X and X + M are the same
word. The sign is not visible in any single digit. It must be computed (see
the normalizer below).

Multiplying two fixed-point values multiplies their scales, so a dot product
Σ X_r·W_r carries R_F twice. It must be divided by R_F once. This is the
central point of the design: that division is the only slow operation. It is
done once per finished sum, not once per multiply. Between the
multiply-accumulate and the normalizer everything is carry-free. Sums of
products of values up to |x| ≈ 2^15 must stay inside ±M/2 ≈ 2^136.7, and the
double-scaled product of two values already uses 2·(15+55) = 140 bits in the
worst case. Real workloads therefore need values well below the Q15.48
maximum. A normalized result outside Q15.48 is reported with an overflow flag
by the reverse converter. Overflow of the accumulated sum itself is not
detected: the sum wraps modulo M.

The package `rns_pkg` computes every table (inverses, mixed-radix weights,
offsets, conversion constants) from the list of moduli when the design is
elaborated. Another set of moduli, or another fractional split F_DIGITS,
changes only this list. There are no data files.

## The digit slice

`digit_slice` holds the part of an 8-bit tensor unit that sees one digit.
It has a weight FIFO, a unified buffer for activations, a systolic data
setup, the DIM x DIM array and the accumulators. Its parameter DIGIT selects
the modulus. The 18 slices receive the same control signals every cycle and
run in lock step.

* **`mmu`** is a weight-stationary systolic array. Weights are shifted in
  from the top, one row per cycle, last row first: after ROWS shifts, row r
  holds weight row r. Activation digits enter at the left edge, skewed by
  one cycle per row, and travel right. Partial sums travel down. Every cell
  computes `(psum + x·w) mod m` and so stays 8 bits wide. A result row
  leaves the bottom after ROWS + COLS − 1 cycles, realigned by per-column
  de-skew registers. One input vector can enter every cycle. Weights may not
  be shifted while vectors are in flight: there is no second weight
  register, and an assertion enforces the rule.
* **`systolic_setup`** delays buffer lane r by r + 1 cycles.
* **`accumulators`** stores DEPTH rows. A result row is either written, or
  added modulo m to the row already there (read-modify-write).
* **`unified_buffer`** has one read port and one write port with a per-lane
  write mask. The mask lets the host write single elements.
* **`sync_fifo`** is the weight FIFO (one COLS-wide row per entry). It is
  first-word fall-through and asserts against overflow and underflow.

From a buffer read request to the accumulator write, a row takes
ROWS + COLS + 1 cycles.

## The normalizer, where the digits meet

`normalize_pipeline` holds DIM copies of `rns_normalize_lane`, so it takes a
whole accumulator row each cycle. Each lane computes floor(A/R_F) and the
sign of A, using only 8-bit fixed-modulus operations. It has N + 2 = 20
stages:

1. **Offset.** Add H = R_F·Q with Q = (M/R_F + 1)/2. This maps the signed
   range onto [0, M), so A' = A + H ≥ 0.
2. **Exact division, 7 stages.** Stage i subtracts digit i from all higher
   digits. This makes the value divisible by m_i, so multiplying by m_i⁻¹
   divides exactly. After the seven fractional moduli, digits 7..17 hold
   floor(A'/R_F) in the 11 integer moduli. Digits 0..6 are lost.
3. **Mixed-radix conversion, 11 stages.** Each stage peels off one
   mixed-radix digit of floor(A'/R_F). Every such digit feeds two things:
   * *Base extension.* It is added, times its place value, into digits
     0..6. This rebuilds the residues the division destroyed.
   * *Comparison.* It is compared with the same mixed-radix digit of Q. The
     most significant digit that differs decides whether
     floor(A'/R_F) < Q, that is, whether A < 0.
4. **Remove the offset.** Subtract Q from all digits.

The quotient rounds toward minus infinity. The latency is 20 cycles, near
the "one clock per digit" that fractional multiplication costs in residue
arithmetic. `activation_unit` follows with one register stage. It applies
ReLU using the sign from the normalizer, or passes the value through.
Because the sign of floor(A/R_F) is the sign of A, this gives the same result
as ReLU before normalization.

## Conversion at the edge

**`fwd_converter`** (binary → RNS, 4 cycles) works in three steps:

1. It rounds b·R_F/2^48 with one binary multiply by a constant.
2. It splits the 72-bit magnitude into 9 bytes.
3. For each of the 18 digits, it sums byte_c·(2^8c mod m_d) modulo m_d.
   That is 162 8x8 modular multiply-by-constant units. Negative values are
   negated digit by digit.

**`rev_converter`** (RNS → binary, 22 cycles) works in four steps:

1. It adds H.
2. It converts all 18 digits to mixed radix, fractional moduli first.
3. It forms the fractional remainder and the integer quotient in binary from
   the mixed-radix place values.
4. It scales the fraction to 48 bits with a reciprocal multiply (within one
   unit in the last place) and subtracts Q from the integer part. An integer
   part beyond 15 bits saturates the result and sets `out_ovf`.

## Control and the host port

The host speaks a valid/ready request port (`host_interface`) with three
commands:

* `HOST_WRITE_UB` converts one Q15.48 value and writes it into one lane of
  one buffer row of all slices.
* `HOST_READ_UB` reads one element back, converted, on `host_rsp_*`, in
  request order. A read waits for earlier writes to land.
* `HOST_PUSH_INSTR` queues a 52-bit instruction.

Buffer accesses are taken only while the controller is idle. Instructions
wait while host conversions are in flight.

`tpu_controller` pops instructions one at a time and drives all slices.
An `instr_t` has these fields: op[2], accumulate, func, len[16],
acc_addr[16], ub_addr[16]. The operations are:

| op | does |
|---|---|
| `OP_LOAD_W` | Pops ROWS weight rows into the arrays. It stalls in any cycle where some digit's weight FIFO is empty; `weight_stall_cycles` counts those cycles. |
| `OP_MATMUL` | Streams buffer rows ub_addr.. through the arrays, one per cycle. Each result is written to, or accumulated into, accumulator row acc_addr+i. |
| `OP_ACTIVATE` | Reads accumulator rows, normalizes and activates them (`func`: none or ReLU), and writes them to buffer rows ub_addr+i. |
| `OP_NOP` | Nothing. |

Each instruction drains its pipelines before the next one starts. This
removes every hazard between instructions but costs one pipeline fill per
instruction.

Weight rows arrive in RNS form on the top-level `wf_push/wf_data` ports, one
port per digit. The unit never computes weights itself.

## Where this departs from the paper, or goes beyond it

Taken from the proposal:

* the digit-slice organization;
* 8-bit residue digits and 18 of them;
* a 256x256 array per digit with modular reduction inside each
  multiply-add;
* one shared pipelined normalize-and-activate stage after accumulation;
* pipelined converters of about 162 multipliers;
* the block list.

Chosen here, because the proposal does not say:

* the moduli;
* the fixed-point format and its 7/11 digit split;
* the normalization and conversion algorithms (standard mixed-radix
  methods);
* all memory depths: unified buffer 4096 rows, accumulators 4096 rows,
  weight FIFO 1024 rows, instruction FIFO 16 entries;
* the instruction set and the host protocol;
* synchronous active-low reset that clears control state only.

Known differences and omissions:

* Only ReLU and identity activations exist. Sigmoid and similar functions
  are left to future work, and no method for them is given.
* Activation is applied after normalization, not before it.
* The other placement of the modular reduction was not built: wide binary
  accumulation with one reduction after accumulation.
* The PCIe host link, the per-digit DDR3 interfaces and the DRAM are not
  modelled. Their signals are the top-level host and `wf_*` ports.
* The binary side is fixed point (Q15.48). "FP" in the converter names is
  read as fixed point, not IEEE floating point.
* Weights are not double buffered.
* Instructions do not overlap.

## Simulating

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each ends by
printing `TB_RESULT checks=N failures=M`. Example with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/rns_pkg.sv rtl/*.sv tb/tb_mmu.sv \
          --top tb_mmu -Mdir obj_mmu && obj_mmu/Vtb_mmu
```

The block testbenches compare against wide-integer arithmetic written
independently in the testbench. Examples:

* exact dot products modulo m for the array;
* floor division and sign for the normalizer;
* round-trip and reference values for the converters.

They also check every latency stated above.

`tb_rns_tpu` runs the whole unit at DIM = 4 with small memories. It:

* writes two vectors;
* loads a weight tile that arrives late, so the load stalls;
* fills the instruction FIFO, so the host sees back-pressure;
* runs an overwriting and an accumulating MATMUL;
* runs one ReLU and one identity ACTIVATE;
* reads everything back in binary.

The expected values come from exact big-integer arithmetic. The test counts
each mechanism and fails if one never happens. Setting its `DIM` localparam
to 16 also passes (72 checks), and Verilator builds that in about a minute.

The full default configuration has not been simulated end to end: DIM = 256,
18 slices, about 1.2 million modular cells. Verilator takes well over twenty
minutes just to compile it. At default size, the top level has been checked
only by Verilator lint and by the slang front end of Yosys. Every block
below the top is simulated at reduced sizes; each testbench states its own.
