# A processor that finds every exact divisor of a number in one pass

Given an n-bit number Y, this design finds every d in 2 .. 2^(n/2)-1 that
divides Y exactly, all in the same pass. For n = 32 that covers every
candidate up to sqrt(Y). There is no search loop. The machine has one small
register per candidate divisor, so 65,536 registers for n = 32. A single
sequencer broadcasts one gate per clock to all of them: a NOT, CNOT, Toffoli
or reset acting on single bits ("lines") of a register. Every register runs
the same fixed program, a restoring division of Y by the divisor it holds.
At the end a Flag line in each register is 1 exactly when the remainder is 0.

The program is written as a *wiring diagram*, the style of a reversible
(quantum-style) circuit. It is built from reversible gates plus two
irreversible ones that CMOS provides cheaply: "zero this line" and "zero this
line if another line is 1". It needs about 4n lines per register and about
11n² gates. For n = 32 that is 129 lines, 11,491 gates, and 11.5 ms at
1 MHz.

The RTL follows the published wiring diagrams of this method gate for gate
where they are drawn. Where they are only sketched, it fills in the gaps and
says so below. The SystemVerilog is IEEE 1800-2017 and synthesizable. Its
defaults are n = 32 and 65,536 registers.

## 1. The machine

```
                 +--------------------------------------------+
 start --------->| qap_controller                             |
 busy, done <----|  phase/stage/step counters                 |
                 |  qap_twos_gen  qap_csa_gen  qap_zero_gen   |
                 |        (each uses qap_adder_gen)           |
                 +---------------------+----------------------+
                                       | gate_t, one per clock, to all
                 +---------------------v----------------------+
 dividend ------>| qap_reg_array: register r = lines of divisor r
                 |  r=0 | r=1 | r=2 | ... | r=NUM_REGS-1      |
                 +---------------------+----------------------+
                                       | Flag line of every register
                                       v
                          divisor_found[NUM_REGS-1:0]
```

* **Lines.** A register is a row of 4n+1 independent bits. The program only
  ever changes one line of a register per clock.
* **Gate word (`gate_t`).** It has an operation, a target line `t` and up to
  two control lines `c1`, `c2`:

  | op        | effect on every register                   |
  |-----------|--------------------------------------------|
  | `OP_NOT`  | t ^= 1                                     |
  | `OP_CNOT` | t ^= c1                                    |
  | `OP_TOF`  | t ^= c1 & c2 (Toffoli)                     |
  | `OP_RST`  | t = 0 (irreversible)                       |
  | `OP_CRST` | t = 0 if c1 = 1 (irreversible, controlled) |
  | `OP_NOP`  | nothing                                    |

  `OP_CRST` belongs to the gate set, but the divisor program does not use it.
* **Parallelism.** The array decodes the gate once into a target mask. Each
  register then reads its own two control lines and updates its target line.
  All registers run the same gate on the same clock edge, with no
  communication between registers.

### Line map (n-bit dividend, m = n/2, k = m+1)

| bus | lines | holds |
|-----|-------|-------|
| X | m   | the divisor x; register r holds x = r |
| S | k   | 2s complement of x, 2^k - x; its top line (sign) is 1 |
| A | k   | adder addend: 0..01 at rest, 2s(x) or x during a stage |
| B | k   | partial dividend, and at the end the remainder (the adder's sum bus) |
| C | k   | adder carries c1..ck; ck is the carry-out |
| Y | n-2 | dividend bits y[0] .. y[n-3] |
| T | m-1 | zero-test tree; the last line is the Flag |

That is 4n+1 lines, 129 for n = 32. The line addresses are computed in
`qap_pkg` (`a_base()`, `b_base()`, ...). The method's own count is 4n = 128.
This design keeps one extra line, the sign of the 2s complement, so that the
2s-complement generator can use an ordinary k-bit adder.

`load` presets every register: x = r, S = 1, A = all ones, C = T = 0,
B = {0.., y[n-1], y[n-2]} and Y = y[n-3:0].

## 2. The program

The program has three parts: the 2s-complement generator, n-1 CSA stages,
and the zero-remainder test. `qap_controller` steps through them with a
phase/stage/step counter. Each part is a combinational *generator* module:
it maps a step number to the gate for that step. Nothing is stored in a
program memory.

### 2.1 Reversible adder (`qap_adder_gen`, 8k-5 gates)

The adder computes B <- A + B mod 2^k and XORs the carry-out onto ck. It
leaves A unchanged, and carries c1..c(k-1) go back to 0. There is no
carry-in, so all three buses are k lines wide. The gates are the usual
reversible ripple adder (Vedral, Barenco and Ekert, 1996):

* CARRY(c, a, b, c') = Toffoli(a,b→c'), CNOT(a→b), Toffoli(c,b→c')
* SUM(c, a, b) = CNOT(a→b), CNOT(c→b)

The sequence is CARRY for bits 0..k-1, then CNOT and SUM for the top bit,
then CARRY⁻¹ and SUM for bits k-2 down to 0. Every gate on the non-existent
c0 is dropped. Because ck is XORed rather than written, **ck must be 0
before an add**. The CSA stage makes sure of that with resets.

### 2.2 2s-complement generator (`qap_twos_gen`, 3m + 8k-5 gates)

For i < m, the sequence is: CNOT x_i→A_i, so A = ~x; add A to S, so
S = ~x + 1; CNOT x_i→A_i, so A = 1..1; NOT A_i. The result is
S = 2^k - x, with sign line 1. A ends as 0..01: only its top line is set,
which is the state every CSA stage expects.

### 2.3 Conditional subtract-add stage (`qap_csa_gen`)

This is the core of the design, and the least obvious part. Restoring
division normally branches: subtract, and if the result is negative, add
back. A broadcast program cannot branch, because every register must receive
the same gates even though each register's outcome differs. The stage
therefore always performs **two additions**. The second addend is computed
from the carry, so that it is either x or 0.

With partial dividend P on B (P < 2x) and carry-out line co:

| # | gates | effect |
|---|-------|--------|
| 1 | CNOT S_i→A_i (i<m) | A = 2s(x), with the sign bit already on A_m |
| 2 | adder(A,B,C) | B = P - x mod 2^k; co = 1 iff P ≥ x |
| 3 | CNOT S_i→A_i, NOT A_m | A = 0 |
| 4 | NOT co | co = 1 iff the result was negative |
| 5 | Toffoli(x_i, co → A_i) | A = x if negative, else 0 |
| 6 | RST co | carry line cleared before the next add |
| 7 | adder(A,B,C) | B = P if negative (restored), else P - x; co = 1 iff it restored |
| 8 | Toffoli(x_i, co → A_i), NOT A_m | A back to 0..01 |
| 9 | RST co | |
| 10 | RST B_m | remainder < x < 2^m, so its top line is 0 |
| 11 | CNOT B_i→B_i+1, CNOT B_i+1→B_i, for i = m-1..0 | shift B up by one line |
| 12 | CNOT y[n-3-j]→B_0 | bring down the next dividend bit |

After the stage, B = 2·(P mod x) + next bit. That is the next partial
dividend.

The two resets in steps 6 and 9 are what the irreversible gates buy. A
purely reversible stage would have to copy each carry into extra quotient
lines and extra carry lines, about 2n of them, just to return co to 0. The
quotient is not needed to test divisibility, so it is simply discarded.

Stage j brings down dividend bit y[n-3-j]. The two top bits start in B, so
n-1 stages consume the whole dividend, most significant bit first. Starting
with two bits is safe because x ≥ 2. The last stage (j = n-2) stops after
step 9, so the remainder stays on B for the test. The gate count is
2(8k-5) + 6m + 7 per stage, and 2m+2 fewer for the last one.

### 2.4 Zero-remainder test (`qap_zero_gen`, 2m-1 gates)

The test inverts the m remainder lines and ANDs them in a balanced Toffoli
tree. Toffoli t combines items 2t and 2t+1 into item m+t. Items 0..m-1 are
the inverted remainder lines, and items m..2m-2 are the T lines. The last
item is the Flag, which is 1 iff every remainder bit was 0. The tree uses
m-1 lines, Flag included.

### 2.5 Operation count

| part | gates | n = 32 | published estimate |
|------|-------|--------|--------------------|
| adder (k = n/2+1) | 8k-5 = 4n+3 | 131 | ~4n+14 |
| 2s-complement generator | adder + 3n/2 | 179 | adder + 3n/2 |
| CSA stage | 2 adders + 3n+7 | 365 (last: 331) | 2 adders + ~3n+7 |
| zero test | n-1 | 31 | ~n/2-1 |
| **whole run** | | **11,491** | ~11n² = 11,264 |

## 3. Using `qap_top`

Parameters:

* `N_BITS` (default 32): the dividend width n. It must be even, 4 .. 62.
  Line addresses are 8 bits wide, which sets the upper limit.
* `NUM_REGS` (default 2^(n/2)): the number of registers. A smaller value
  covers only the divisors 0 .. NUM_REGS-1.

Ports:

* `clk`, `rst_n`: clock and asynchronous active-low reset. The reset clears
  the controller only. Register contents are defined from the first `start`
  on.
* `start`, `dividend`: pulse `start` for one cycle while idle. The dividend
  is sampled on that edge, and every register is preset. A `start` while busy
  is ignored.
* `busy`: high for exactly `total_ops(N_BITS)` cycles (11,491 at n = 32).
* `done`: a one-cycle pulse in the cycle after the last gate.
* `divisor_found[d]`: valid from `done` until the next `start`. It is 1 iff
  d divides the dividend. Bits 0 and 1 are forced to 0, because the method
  divides by 2 and up and the flags of registers 0 and 1 mean nothing.
* `rd_idx`, `rd_lines`: read out every line of one register, for debugging.
  After a run, B holds the inverted remainder.

Timing: one gate per clock, with no stalls and no overlap between runs. The
sequencer is counters plus the generators. The register array is
4n+1 flip-flops per register. Each register also has two 129:1 control-line
multiplexers and an update per line, so the cost grows as NUM_REGS·n·log n.
Generic synthesis (Yosys, flattened) gives these sizes:

* n = 8: 528 register-line flip-flops and about 18k gates in all.
* n = 12: 3,136 flip-flops and about 40k gates.

At the default n = 32 the array holds 65,536 × 129 ≈ 8.5 M flip-flops. That
is the price of doing every division at once.

## 4. What is this design's own

These points fill gaps in the method's description. Each could reasonably be
done another way.

* The adder's gates come from the cited adder, as described in 2.1. Only its
  function is specified by the method.
* How the program is sequenced: generator modules addressed by a counter,
  instead of an instruction memory.
* One gate per clock, and the `start`/`busy`/`done` handshake.
* The sign line of S, which gives 4n+1 lines instead of 4n.
* Where the last stage ends (after step 9), so the remainder stays on B.
* The bit order in which the dividend is brought down. The method's drawings
  number dividend bits inconsistently (y(n), y(n-1), ... beside y3..y0).
  Here the two MSBs start in B and the rest follow MSB first.
* The pairing rule that extends the drawn 4-input zero-test tree to any m.
* The masking of `divisor_found[1:0]`.

Not built, because the method offers them only as alternatives it rejects:

* the fully reversible CSA stage, which keeps quotient and carry lines and
  needs about 6n lines;
* division by successive subtraction, which needs about 3n lines but about
  11n·2^(n-1) gates;
* non-restoring division.

## 5. Files and simulation

`rtl/`:

* `qap_pkg.sv`: gate word, line map, part lengths.
* `qap_adder_gen.sv`, `qap_twos_gen.sv`, `qap_csa_gen.sv`, `qap_zero_gen.sv`:
  the program generators.
* `qap_controller.sv`
* `qap_reg_array.sv`
* `qap_top.sv`

`tb/` holds one self-checking testbench per module, plus `tb_qap_top_full.sv`.
Each ends by printing `TB_RESULT checks=N failures=F`.

* `tb_qap_adder_gen`: k = 3 exhaustively and k = 6 at random, against
  integer addition.
* `tb_qap_twos_gen`: every divisor at n = 4 and n = 8.
* `tb_qap_csa_gen`: every x and every P < 2x at n = 8, for first, middle and
  last stages. Both the kept and the restored outcome must occur.
* `tb_qap_zero_gen`: every remainder at n = 8 and n = 10. n = 10 gives an odd
  tree.
* `tb_qap_reg_array`: random gates of every kind against a model of the
  registers, plus the load preset.
* `tb_qap_controller`: plays the recorded gate stream on every divisor and
  dividend at n = 4 and n = 6, and checks run lengths and the handshake.
* `tb_qap_top`: runs n = 4 (15 / 3, the classic worked example), all 256
  dividends at n = 8, and n = 12 cases. It checks run lengths and the
  read-out port (divisor lines, inverted remainder), and counts the kept
  subtractions, restores, reset gates, found and not-found divisors and
  ignored starts.
* `tb_qap_top_full`: the default size (n = 32, 65,536 registers), with the
  dividend 2^32-1 = 3·5·17·257·65537. All 65,534 flags are checked (15
  divisors), and so is the 11,491-cycle run length. It runs in about ten
  seconds.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/qap_pkg.sv \
    rtl/qap_adder_gen.sv rtl/qap_twos_gen.sv rtl/qap_csa_gen.sv rtl/qap_zero_gen.sv \
    rtl/qap_controller.sv rtl/qap_reg_array.sv rtl/qap_top.sv \
    tb/tb_qap_top.sv --top-module tb_qap_top -Mdir obj && obj/Vtb_qap_top
```

Replace `tb_qap_top` with any other testbench name.
