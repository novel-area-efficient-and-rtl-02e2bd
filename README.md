# KARATSUBA: an F_p / F_p2 arithmetic peripheral for optimal Ate pairing on BN curves

An optimal Ate pairing on a 254-bit Barreto–Naehrig (BN) curve spends nearly all
of its time in multiplications in the prime field F_p and in its quadratic
extension F_p2. The architecture of Azzouzi, Anane, Koudil, Issad and Himeur
("Novel Area-Efficient and Flexible Architectures for Optimal Ate Pairing on
FPGA") keeps the pairing itself in software on small soft processors and moves
only these two levels of arithmetic into one compact hardware core. F_p6 and
F_p12 arithmetic, the Miller loop and the final exponentiation stay in C. The
core, called KARATSUBA, holds one word-serial Montgomery multiplier and one
modular adder/subtractor. A short sequencer reuses them for every F_p2
operation. The result is small: the authors report about a thousand Virtex-5
slices for the core.

This repository gives SystemVerilog RTL for that peripheral: the arithmetic
cores, the memory and control units around them, and the registers through
which a processor drives it. It also gives self-checking testbenches, including
one that runs an F_p6 multiplication on the peripheral the way the processor
software does. The RTL is a re-implementation from the published description.
It is not the authors' VHDL. Where the description stops, the choices made
here are listed in [Departures and own choices](#departures-and-own-choices).

## The system around the peripheral

The proposed configuration ("2Mb/KARATSUBA") has two soft processors:

* **MB0 (master)** runs the pairing and has its own RAM, a UART and a timer.
* **MB1 (slave)** drives the KARATSUBA peripheral on its own processor bus.

The two processors exchange operands and results over two point-to-point FIFO
links, one for each direction. Work is split at the level of F_p6 and F_p12
functions. For example, in an F_p6 multiplication MB1 runs the F_p2 products
on KARATSUBA, and at the same time MB0 forms the F_p2 sums those products will
need next.

The processors, their RAMs and buses, the FIFO links, the UART and the timer
are vendor parts. They are not part of this RTL. The top module,
`karatsuba_plb_ip`, is the peripheral as MB1 sees it: a clock, a reset and a
small register port.

```
 register port ──► ipif_regs ──(Data_in, Ins, ins_new)──► control_unit
 (stands in for     ▲  Data_out                              │ addr/wea/ena   │ start/op
  MB1's bus)        └──────────────(dout_we, dout_d)─────────┤                │
                                                             ▼                ▼
                                                       memory_unit ──a0,a1,b0,b1,p,p',RedFp──► karatsuba_core
                                                             ▲                                  ├─ mmm_core
                                                             └──────────── c0, c1 ──────────────┴─ addsub_core
```

## Number representation

* **Field elements** are 256-bit vectors made of eight 32-bit digits, least
  significant digit first (`W = 32`, `N = 8`). The BN prime of the evaluated
  curve (y² = x³ + 5, t = 2^62 − 2^54 + 2^44, p = 36t⁴ + 36t³ + 24t² + 6t + 1)
  has 254 bits.
* **Montgomery form.** Every element inside the peripheral is kept as x·R mod p
  with R = 2^256. Software converts into this form once at the start of a
  pairing and back once at the end. The multiplier needs the digit constant
  p' = −p⁻¹ mod 2^32.
* **F_p2** is F_p[μ]/(μ² − β) with β = −5. An element is c0 + c1·μ.
  Multiplying by β costs one Montgomery product with the constant
  **RedFp = 5·R mod p**, followed by a negation.
* **ξ = μ** is the non-residue that builds F_p6 = F_p2[v]/(v³ − ξ). The paper
  calls multiplication by ξ "reduction in F_p2": (a0 + a1μ)·μ = −5a1 + a0μ.

p, p' and RedFp are loaded by software, so the same hardware serves any curve
whose prime fits in 255 bits.

## Montgomery multiplier (`mmm_core`)

This is the part with the most structure, and it follows the paper's block
diagram closely. The multiplier computes S = A·B·R⁻¹ mod p one 32-bit digit
of A at a time, using the classic coarse-grained integrated scheme:

```
S = 0
for i in 0..N-1:
    H[0] = S[0] + A[i]*B[0];   q = H[0]*p' mod 2^32
    for j in 0..N-1:
        (C1[j], H1[j]) = A[i]*B[j]                         Mul1
        H[j]   = H1[j] + C1[j-1] + S[j]  (+ carries c1,c2)  Add1, Add2 -> Reg1
        (C2[j], H2[j]) = q*p[j]                             Mul2
        S[j-1] = H[j] + H2[j] + C2[j-1]  (+ carries c3,c4)  Add3, Add4
    S[N-1] = C1[N-1] + c1 + c2 + C2[N-1] + c3 + c4
```

Each 32-bit adder adds two words and a carry-in, so every carry is a single
bit held in its own flip-flop. The two high words C1[j−1] and C2[j−1] wait in
registers for the next digit. That is why two adders are chained on each side
where one three-operand adder might be expected.

**Hardware, per the diagram.**

* Two 32×32 multipliers: Mul1 for A·B and Mul2 for q·p.
* Four adders with four carry flip-flops.
* Registers: Reg1 (H[j]), Reg2 (C1), Reg3 (q), Reg4 (C2).
* Mux2 in front of Mul2. It switches Mul2 between computing q = H[0]·p' and
  computing q·p[j], so the quotient costs no third multiplier.
* A block register that holds the S digits as a queue.

**Schedule** for each digit A[i] (N + 4 cycles):

| cycle        | Hi side (Mul1, Add1, Add2)    | Si side (Mul2, Add3, Add4)        |
|--------------|-------------------------------|-----------------------------------|
| H0           | H[0] = S[0] + A[i]·B[0] → Reg1 | —                                 |
| Q            | —                             | q = Reg1·p' → Reg3                 |
| loop k = 0   | digit 0 → Reg1                | —                                 |
| loop k = 1..N−1 | digit k → Reg1             | digit k−1; writes S[k−2] (k ≥ 2)   |
| loop k = N   | —                             | digit N−1; writes S[N−2]           |
| TOP          | —                             | S[N−1] from the high words and carries |

The Hi side works one digit ahead of the Si side, with Reg1 between them. The
Hi side reads S[k] two cycles before the Si side overwrites S[k], so a single
copy of S is enough.

After the last digit comes one added step: a conditional subtraction of p.
The textbook loop leaves S < 2p; after the subtraction the result is fully
reduced, which the adder/subtractor needs.

**Latency:** N·(N+4) + 1 = 97 cycles for 256 bits, from the clock edge that
samples `start` to the edge that raises `done`. The authors' core takes 130
cycles. Their exact schedule is not published.

## KARATSUBA core (`karatsuba_core`)

An F_p2 product c = a·b is computed the Karatsuba way, with three F_p
products plus one product by the constant:

| step | multiplier (MMM)    | adder/subtractor (ADD/SUB)                   |
|------|---------------------|----------------------------------------------|
| 1    | t0 = a0·b0          | sa = a0 + a1                                 |
| 2    | t1 = a1·b1          | sb = b0 + b1                                 |
| 3    | u = t1·RedFp (= 5t1) | —                                           |
| 4    | v = sa·sb           | —                                            |
| 5    | —                   | c1 = v − t0 − t1 (two passes), c0 = t0 − u   |

This is the paper's five-step diagram. The most important observation behind
this implementation is that the whole core contains **one** Montgomery
multiplier and **one** adder/subtractor. The paper's resource table shows
this: KARATSUBA's slices, DSPs and RAMs are exactly the sums of one MMM core
and one ADD/SUB core. Its cycle count, 550 = 4 × 130 + 3 × 10, shows that the
two additions of steps 1 and 2 hide under the multiplications. The "MMM 1",
"MMM 2", "ADD 1" and "SUB 1" boxes of the diagram are therefore passes
through shared units, not separate instances.

The sequencer is a small micro-program. Each step names:

* an optional multiplier job;
* an optional add/sub job;
* for each job, two source registers and a destination register in a
  14-entry register file of 256-bit registers.

Both jobs start together, and the step ends when both have finished. Each
step costs its slower unit's latency plus two cycles (issue and write-back).

| operation | program                                   | latency (cycles) |
|-----------|-------------------------------------------|------------------|
| `OP_MUL`  | the five steps above                      | 4·99 + 3·3 = 405 |
| `OP_SQR`  | the same with b = a                        | 405              |
| `OP_MULC` | (a0·b0, a1·b0): times an F_p constant      | 198              |
| `OP_RED`  | (−5·a1, a0): times ξ = μ                   | 102              |
| `OP_MMM`  | a0·b0 in F_p                               | 99               |

## Adder/subtractor (`addsub_core`)

The adder/subtractor computes (a ± b) mod p for a, b < p in two clock cycles.
The first cycle forms the raw sum or difference with one extra bit. The second
cycle makes the single correction: subtract p after an addition that reached
p, or add p after a subtraction that borrowed. The paper gives only the
core's function and cost (10 cycles), so this is the simplest circuit that
does the job.

## Driving the peripheral

### Register port

The register port stands in for the processor bus. Writes take one cycle;
read data is combinational from the selected register.

| word address | register | access                                                   |
|--------------|----------|----------------------------------------------------------|
| 0            | Data_in  | write: the next word to store                            |
| 1            | Ins      | write: an instruction; every write is executed once      |
| 2            | Data_out | read: the word fetched by READ or STATUS                 |

### Instruction word (`pairing_pkg::ins_t`)

| bits     | field                                                   |
|----------|---------------------------------------------------------|
| [31:28]  | command: 1 WRITE, 2 READ, 3 EXEC, 4 STATUS (0 NOP)      |
| [11:8]   | slot                                                    |
| [7:4]    | digit 0–7                                               |
| [3:0]    | operation for EXEC (`kop_e`: 0 MMM, 1 MUL, 2 SQR, 3 MULC, 4 RED) |

### Memory slots

Each slot holds 8 words:

* 0 a0, 1 a1, 2 b0, 3 b1
* 4 p, 5 p' (word 0), 6 RedFp
* 7 c0, 8 c1

Unmapped slots read as zero.

### Programming sequence

1. Once per curve, load p, p' and RedFp. Write each word to Data_in, then
   write a WRITE instruction for it.
2. Load the operand words the same way.
3. Write an EXEC instruction. The core copies its operands when it starts.
   While it runs, new operands can already be written, and earlier results
   read back.
4. Poll: write STATUS, then read Data_out. The status word has:
   * bit 0: busy;
   * bit 1: an EXEC arrived while the core was busy and was dropped;
   * bit 2: an EXEC named an unknown operation and was dropped;
   * bits [31:16]: the number of completed operations.

   Bits 1 and 2 are cleared when the status is read.
5. Read each result word: write a READ instruction, leave one idle cycle, then
   read Data_out. The next instruction must not come in the cycle right after
   a READ. An assertion in `control_unit` checks this rule.

When the core finishes, both results are written into slots c0 and c1 in the
same cycle.

## Departures and own choices

These follow the paper:

* the Montgomery datapath and its control signals;
* the five-step Karatsuba schedule;
* one MMM and one ADD/SUB shared inside KARATSUBA;
* the peripheral's structure: three registers, a memory unit, a control unit
  and the core;
* the tower F_p2/F_p6 with β = −5 and ξ = μ;
* digit and operand widths of 32 and 256 bits.

These depart from the paper or fill gaps in it:

* **Printed errors corrected.**
  * The paper's Montgomery algorithm multiplies q by p[i]; the inner loop
    needs p[j].
  * Its Karatsuba listing computes c0 = t1·redFp − t0 and omits the two
    subtractions for c1. Both are wrong for β = −5.

  The RTL follows the block diagram, with c0 = t0 − 5t1 and
  c1 = (a0+a1)(b0+b1) − t0 − t1.
* **Final subtraction** in the multiplier, so results are always < p.
* **Cycle counts** differ from the paper: MMM 97 here against 130, an F_p2
  product 405 against 550, add/sub 2 against 10. The paper does not give its
  internal schedules.
* **Squaring** reuses the multiplication program (b = a). The paper's
  software uses the complex method, and the core's squaring is not described.
  The programs for multiplication by a constant, by ξ, and plain F_p are this
  design's own.
* **Memory unit** is a register array with whole-operand read ports. The
  original is block RAM read digit by digit.
* **Bus side:** the vendor bus and its interface decoder are replaced by a
  plain register port. The instruction encoding, the status word and the
  read timing are this design's own.
* **Reset:** asynchronous, active low, and clears every register.
* **Not built:** the two processors, their memories, buses, FIFO links, UART
  and timer. Also not built: the pairing software (Miller loop, final
  exponentiation, F_p6/F_p12 arithmetic), which is C code in the original.

## Files

| file | content |
|------|---------|
| `rtl/pairing_pkg.sv` | sizes, operation and command codes, instruction layout, slot map |
| `rtl/mmm_core.sv` | Montgomery multiplier |
| `rtl/addsub_core.sv` | modular adder/subtractor |
| `rtl/karatsuba_core.sv` | F_p2 unit: micro-program, register file, shared MMM and ADD/SUB |
| `rtl/memory_unit.sv` | operand/result store |
| `rtl/control_unit.sv` | instruction decoder |
| `rtl/ipif_regs.sv` | Data_in / Ins / Data_out registers |
| `rtl/karatsuba_plb_ip.sv` | top: the whole peripheral |
| `tb/tb_bn_pkg.sv` | reference arithmetic: BN prime from t, p', R mod p, R⁻¹ by Fermat |
| `tb/plb_host_tasks.svh` | processor-side driver tasks (load, exec, poll, read) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_fp6_mul` |

## Simulation

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself; a
watchdog ends a hung run. The simulator may be two-state: every register the
design reads is reset. The following runs the end-to-end test of the top at
its default size:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_karatsuba_plb_ip \
    rtl/pairing_pkg.sv tb/tb_bn_pkg.sv tb/tb_karatsuba_plb_ip.sv
./obj_dir/Vtb_karatsuba_plb_ip
```

Replace the top module and testbench file for the others.

What the testbenches check:

* **`tb_mmm_core`**: 250+ products modulo the BN prime and random 255-bit
  odd moduli, including the corners 0, 1 and p−1. It checks s·R ≡ a·b
  (mod p), s < p, and the latency of every product.
* **`tb_addsub_core`**: random and wrap-around cases in both directions,
  against wide reference arithmetic, with a latency check.
* **`tb_karatsuba_core`**: all five operations against their algebraic
  definitions in the Montgomery domain, with exact latencies.
* **`tb_memory_unit`, `tb_ipif_regs`, `tb_control_unit`**: port behaviour,
  checked cycle by cycle.
* **`tb_karatsuba_plb_ip`**: the whole peripheral at full size, through the
  register port only. It runs every operation. It also makes each protocol
  event happen at least once and counts it: operand loading while the core
  computes, busy polls, a dropped EXEC while busy, an unknown operation, and
  the completion counter.
* **`tb_fp6_mul`**: the F_p6 multiplication of the paper's Algorithm 4, run as
  6 F_p2 products and 2 multiplications by ξ on the peripheral, with the F_p2
  additions done by the testbench in place of the processor. It is checked
  against a schoolbook F_p6 product.

All results are compared with wide-integer reference arithmetic, written
independently of the digit-serial hardware. No constant tables are used: the
BN prime is computed from t inside the testbench.

## Changing the size

`W` and `N` are parameters of every module; their defaults come from
`pairing_pkg`. The multiplier needs p odd and p < 2^(W·N−1). The digit field
of the instruction allows up to 16 digits. The testbenches assume the default
32 × 8 layout.
