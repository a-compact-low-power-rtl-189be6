# TALU: a transprecision ALU built from one threshold function

TALU is a small arithmetic and logic unit meant for edge devices that must
switch between number formats (integer, floating point, posit) and widths
(4 to 16 bits here) without paying for a separate datapath per format. It
has no adder, no comparator and no posit decoder as such. Every bit of every
result comes from one registered threshold test, the **Q-function**:

    Q(Z0, X, Z1, Y) = ( Z0 + X  >=  Z1 + Y )      X, Y: 8-bit numbers; Z0, Z1: single bits

AND, OR, NOT, magnitude compare, carries, sums, XOR, and the regime search of
a posit decode all come from choosing what is wired into Z0, X, Z1 and Y.
A TALU holds two banks of eight such blocks, and TALU-V puts 128 TALUs side
by side. Their 128 x 8 = 1024 bits match the 32 x 32-bit register file of a
small RISC-V host.

This repository holds synthesizable SystemVerilog for the TALU, its posit
decode path and the TALU-V array. It also holds a self-checking testbench
for every module. The design follows a published description of TALU. Where
that description is silent, the choices made here are listed in
[Departures and choices](#departures-and-choices).

## 1. The Q-function and how operations map onto it

`q_func` evaluates the inequality and stores the result in a flip-flop.
`q_cluster` groups eight of them (Q0..Q7), each with its own arguments, so a
cluster produces an 8-bit result per clock. Bit i of a result always comes
from Q_i:

| Operation | Z0 | X | Z1 | Y | Q_i gives |
|---|---|---|---|---|---|
| AND | 0 | A_i | 1 | ~B_i | A_i & B_i |
| OR | 0 | A_i | 0 | ~B_i | A_i \| B_i |
| NOT | 0 | ~B_i | 1 | 0 | ~B_i |
| COMP | 0 | A[i:0] | 0 | B[i:0] | A[i:0] >= B[i:0] |
| ADD step 1 | C0 | A[i:0] | 1 | ~B[i:0] | Carry_{i+1} |
| ADD step 2 | A_i | B_i | 0 | {Carry_{i+1}, ~Carry_i} | sum bit S_i |
| XOR step 1 | 0 | A_i | 1 | ~B_i | A_i & B_i |
| XOR step 2 | A_i | B_i | 1 | {AND_i, 0} | A_i ^ B_i |
| posit regime | 0 | T[n-2:0] | 0 | 2^7 - 2^i | V_i |

The ADD rows show the key idea. A carry is a threshold function of the
operand bits: `C0 + A[i:0] >= 1 + ~B[i:0]` is the same test as
`A[i:0] + B[i:0] + C0 >= 2^(i+1)`. A sum bit is not a threshold function of
the operands alone. It becomes one once its own carry-out is an input:
`S_i = 1` exactly when `A_i + B_i >= 2*C_{i+1} + ~C_i`. So an addition
takes two cluster steps. The first computes all carries at once, which makes
it a carry-lookahead adder. The second computes all sum bits. XOR works the
same way, with AND_i in place of the carry.

SUB and XNOR are built the same way with B inverted. SUB also forces C0 = 1.

## 2. Two clusters, one pipeline

```
            TRF[rs1], TRF[rs2]
                  |
            input generator ---- carry register
              |        \
  clk_pc -> primary     pipeline register (op, rd, A, B, C0, posit word)
            cluster PC ----------+
              |                  v
              |      clk_sc -> secondary cluster SC
              v                  v
             output MUX  ->  out, write-back to TRF[rd]
```

Each cluster has its own gated clock. `talu_clock_gate` is a latch-and-AND
clock gate. The primary cluster (PC) is clocked when a micro-op issues. The
secondary cluster (SC) is clocked for step 2 of a two-step operation and when
a 16-bit decode issues. Cycle by cycle, for an operation issued in cycle t:

| operation | PC | SC | decode LUT | result on `out` / written to TRF |
|---|---|---|---|---|
| AND, OR, NOT, COMP | t | | | t+1 |
| ADD, SUB, XOR, XNOR | t | t+1 | | t+2 |
| PDEC, 8-bit posit | t | | t+1 | t+2 (`dec_valid`) |
| PDEC, 16-bit posit | t | t (held to t+1) | t+1, t+2 | t+3 (`dec_valid`) |

Two-step operations pipeline: an ADD can issue in every cycle, because its
step 2 runs in the SC while the next ADD's step 1 runs in the PC.
`talu_issue_ctrl` keeps a small reservation table for the SC, the look-up
table and the write-back port. It holds back (`uop_ready` low, `stall` high)
any micro-op whose pattern collides with one in flight. The usual case is a
one-step operation directly behind a two-step one: both would write back in
the same cycle, so the second waits one cycle.

**Carry chaining.** ADD and SUB leave the carry out of bit 7 (or bit 3 when
`w4` is set) in the carry register. A later ADD/SUB with `use_carry` takes it
as C0. The register loads one cycle after the first addition's carry step.
So the upper-byte ADD of a 16-bit addition can issue two cycles after the
lower one, and the whole 16-bit addition takes 4 cycles. The same method
gives wider integers.

**No data interlock.** The issue control checks only for resource
conflicts. A micro-op program has to wait until a result has been written
back before it reads that register. It also has to wait two cycles after an
ADD/SUB before it uses the carry. The testbenches follow these rules.

## 3. Posit decode without a posit decoder

A posit `P(n,e)` has a sign bit, then a regime field: a run of r equal bits
ended by an opposite stop bit. Then come up to e exponent bits, and the
mantissa fills what is left. The regime value is K = r-1 for a run of ones
and K = -r for a run of zeros. The value of the posit is
`(-1)^S * 2^(2^e * K) * 2^E * (1 + F)`. The fields have no fixed position,
which is why posit hardware usually carries a leading-one detector and a
barrel shifter. TALU finds the run length with the clusters instead:

1. **Normalise.** T = P if P[n-2] = 1, else ~P. After this step the regime
   is always a run of ones, and its polarity pol = P[n-2] is kept aside.
2. **Compare (PC, one cycle).** Q_i tests `T[n-2:0] >= 2^(n-1) - 2^i` for
   i = 0..6. This is true exactly when the top 7-i bits of T are all ones.
   The result V is a thermometer code, and its number of ones is the run
   length r.
3. **Look up (next cycle).** The address generator counts the ones and forms
   the address {pol, r}. The regime LUT returns K (r-1 or -r).
4. **Shift (same cycle).** The shifter moves P[n-2:0] left by r+1 (K+2 for
   K >= 0, 1-K for K < 0), past the run and the stop bit. The top e bits are
   then E, and the rest is the mantissa F, left-aligned with zeros filled in.

Example, P(8,2) = `0 1110 10 0`. T[6:0] = 1110100, which is at least 64, 96
and 112 but less than 120, so V has three ones and K = 2. Shifting by 4
leaves 1000000, so E = 10 (2) and F = 0. The value is
2^(4*2) x 2^2 x (1 + 0) = 1024. (The published example states 512 = 16^2 x 2,
multiplying by E rather than by 2^E.)

**16-bit posits.** In the compare cycle, the PC tests the upper seven bits
T[14:8] as above. At the same time the SC tests the low byte T[7:0] against
`2^8 - 2^i` (i = 0..7). The two vectors are looked up in two consecutive
cycles. `talu_combiner` stores the first K. If the upper seven bits were a
single run (K_hi = 6, or -7 for zeros), the run continues into the low byte:
K = K_hi + K_lo + 1 for ones, or K_hi + K_lo for zeros. Otherwise
K = K_hi. So a 16-bit decode takes three cycles, one more than an 8-bit one.

**Where the fields go.** A decode writes four registers, counting up from
`rd` with wrap-around. The fourth is written only for 16-bit posits.

| register | contents |
|---|---|
| rd | K, two's complement |
| rd+1 | {S, 0000, E[2:0]} (E right-aligned, e <= 3) |
| rd+2 | F[15:8] (all of an 8-bit posit's mantissa) |
| rd+3 | F[7:0] (16-bit posits only) |

Like the published algorithm, the decode takes the fields from the stored
bit pattern as it is. It does not negate negative posits first, and it gives
0 and NaR no special treatment. Those steps, and the posit arithmetic built
on the decoded fields, belong to the micro-op program.

Posit operations run only in posit mode. A PDEC offered while `posit_en` is
low is accepted and discarded.

## 4. Micro-operations

`talu_pkg::uop_t`:

| field | width | meaning |
|---|---|---|
| op | 4 | NOP, AND, OR, NOT, COMP, ADD, SUB, XOR, XNOR, PDEC |
| rd, rs1, rs2 | 4 each | destination, A, B (PDEC 16-bit: rs1 = upper byte, rs2 = lower byte) |
| use_carry | 1 | ADD/SUB: carry-in from the carry register |
| w4 | 1 | 4-bit integer: keep Carry_4 rather than Carry_8 |
| n16 | 1 | PDEC of a 16-bit posit |
| es | 2 | posit exponent size e |

A micro-op is taken on a rising edge where `uop_valid` and `uop_ready` are
both high. NOT uses only B (rs2). COMP returns a vector: bit i is
`A[i:0] >= B[i:0]`, so bit 7 is the full comparison and bit 3 the 4-bit one.

Multiplication, and posit or floating-point addition, are meant to run as
sequences of these micro-ops. Those sequences are not part of this RTL.

## 5. TALU-V

`talu_v` (the top module, `N` = 128 by default) sends one micro-op and one
`posit_en` to all lanes, so every lane runs the same operation on its own
register file. The vector port moves register `vec_addr` of every lane at
once. `vec_rw` = 0 writes `vec_wdata`, and `vec_rw` = 1 reads it on
`vec_rdata`, combinationally. Lane i carries bits [8i+7:8i] of the 1024-bit
host register-file image. The lanes stall together. An assertion checks that
their control signals agree.

The host core, its register file, the instruction and data caches, the
microprogram and micro-op memories and the memory controller are not
included. TALU-V's `uop_*` and `vec_*` ports are where they would connect.

**Example: the front end of a 3x3 P(8,2) matrix product.** C = A x B needs
27 products a_ik * b_kj. Each product gets one lane, with a_ik in r0 and
b_kj in r1. A single broadcast program then forms, in every lane at once,
the parts of a posit product that need no multiplier:

```
PDEC r2, r0 (es=2)   ; r2 = K_a, r3 = {S_a, E_a}, r4 = F_a
PDEC r5, r1 (es=2)   ; r5 = K_b, r6 = {S_b, E_b}, r7 = F_b
AND  r8, r3, r15     ; r15 = 0x07, so r8 = E_a
AND  r9, r6, r15     ; E_b
ADD  r10, r2, r2 ; ADD r11, r5, r5     ; 2K
ADD  r10, r10, r10 ; ADD r11, r11, r11 ; 4K
ADD  r10, r10, r8 ; ADD r11, r11, r9   ; 4K + E
ADD  r12, r10, r11   ; scale of the product
XOR  r13, r3, r6     ; bit 7 = sign of the product
```

The product is then 2^scale * (1+F_a)(1+F_b). With the two-cycle gaps
that dependent operations need, the program takes 21 cycles.
`tb_matmul_p8_front` runs it on the 128-lane unit and checks every lane
against floor(log2) of the real posit values. The mantissa multiply, the
sums and the re-encoding are not part of this design.

## 6. Departures and choices

Taken from the published description: the Q-function, the operand width
p = 8, eight Q blocks per cluster, two identical clusters with a pipeline
register between them, the argument mappings in section 1, the two-step
ADD/XOR, the decode algorithm (normalise, compare against `2^7 - 2^i`, LUT,
shift by K+2), the use of both clusters for a 16-bit decode with sequential
look-ups, `posit_en`, RW = 1 for read, and 128 lanes.

Choices made here, not given in the description:

- register-file depth 16 and the layout of the decoded fields;
- the micro-op encoding and the valid/ready handshake;
- the reservation-table stall, and the absence of a data interlock;
- SUB and XNOR;
- the carry register's contents and load timing;
- the low-byte thresholds `2^8 - 2^i`, and the combine formula;
- the shift of 1-K for negative K;
- the latch-and-AND clock gate;
- asynchronous active-low reset of all state.

Differences from the published numbers:

- **16-bit decode takes 3 cycles.** The description gives 2 cycles in its
  text and 6 in its cycle table. This design builds the sequential double
  look-up that the text describes, which takes 3.
- **The worked example's V vector.** The example lists V with its ones at
  the low end. Evaluating the comparison formula puts them at the high end
  (V6..V4). Both have three ones and K = 2, and this design follows the
  formula.
- **Eight Q blocks per cluster.** The text also mentions clusters of seven
  Q-functions for the decode. Eight are built; Q7 idles in an 8-bit decode
  and tests bit 0 of the low byte in a 16-bit one.
- **No 32-bit posits.** Integer and logic operations reach 32 bits by
  chaining bytes, but the decode path covers posits of at most 16 bits. The
  "quire" named beside the register file is not built.
- **Cycle counts that are reproduced:** INT4 and INT8 addition (2 cycles),
  INT16 addition (4) and 8-bit posit decode (2). The multiplication and
  posit/floating-point addition counts depend on micro-op programs that are
  not available.

The Q-function is written as an adder and a comparator. This gives the
function but not the compact threshold cell that would give the area and
power the published design reports.

## 7. Files and simulation

`rtl/`: `talu_pkg` (types), `q_func`, `q_cluster`, `talu_input_gen`,
`talu_pipe_reg`, `talu_carry_reg`, `talu_trf`, `talu_clock_gate`,
`talu_issue_ctrl`, `talu_out_mux`, `talu_combiner`, `talu_addr_gen`,
`talu_regime_lut`, `talu_shifter`, `talu`, `talu_v`.

`tb/`: one self-checking testbench per module (`tb_<module>`). There are
also `tb_talu_v`, an end-to-end run of 4 lanes through every mechanism, and
`tb_talu_v_full`, the 128-lane unit at its default size, and
`tb_matmul_p8_front`, the matrix-product example of section 5. Each ends by
printing `TB_RESULT checks=<n> failures=<m>`.

```
verilator --binary --timing --assert -Irtl rtl/talu_pkg.sv tb/tb_talu.sv --top-module tb_talu
./obj_dir/Vtb_talu
```

Any testbench runs the same way. How far the tests can be trusted:

- `tb_talu_input_gen` evaluates the Q inequality on the generated arguments
  and checks the intended function, so the mapping table above is itself
  checked.
- `tb_talu` runs 4000 random back-to-back micro-ops against a reference
  model. It checks every result in its exact cycle and reads back the whole
  register file.
- The decode tests compare against a bit-by-bit reference decoder.

Each module's testbench also fails when a single meaningful fault is put
into that module.
