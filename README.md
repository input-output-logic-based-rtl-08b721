# Input-Output Logic Based (IOLB) fault-tolerant gates and a 16-bit multiplier

Duplication with comparison and triple modular redundancy protect a logic block by
copying it and voting over the copies. Input-Output Logic Based (IOLB) correction uses
one copy of each gate. It relies on a fact the gate's own function gives: **when the
inputs change in a known way, the output must change in a known way.** A small circuit
next to each gate watches how the inputs changed since the last sample and how the output
changed. From the two it decides whether the output is wrong (the error signal `E`).
The corrected output is then `F = Y xor E`.

This RTL builds the IOLB NOT, XOR, AND and OR gates. It then builds an unsigned 16 × 16
array multiplier in which every gate is an IOLB gate. A 4-to-1 fault-injection
multiplexer sits on every gate output, and the product register is protected by TMR.
This is the configuration the IOLB technique was evaluated in: a 16-bit multiplier under
stuck-at-0 and stuck-at-1 fault injection, with every injected fault reported as
corrected.

## 1. Correcting one gate

### Change variables

For any signal `X`, its *change variable* is `Xc = X xor X_delayed`. It is 1 if `X`
differs from its previous sample. In this RTL every "delay" is one D flip-flop on `clk`,
so "changed" means "changed since the last rising edge". The technique leaves the length
of the delay open, and a clock period is the natural choice in a synchronous design.

### NOT gate (`rtl/iolb_not.sv`)

A NOT gate's output must change exactly when its input changes:

| Ac | Bc | E |
|----|----|---|
| 0  | 0  | 0 |
| 0  | 1  | 1 |
| 1  | 0  | 1 |
| 1  | 1  | 0 |

so `E = Ac xor Bc` and `F = B xor E`.

### XOR gate (`rtl/iolb_xor.sv`)

An XOR output must change exactly when an odd number of its inputs change. The eight-row
table reduces to `E = Ac xor Bc xor Sc`, and `F = S xor E`. The circuit adds five XOR
gates and one multiplexer to the protected gate.

### The output reference: the subtle part

`Bc` cannot simply be `B xor B_delayed`. If the gate is faulty, `B` is wrong, so its
delayed copy is wrong too, and the change is measured from a wrong starting point. The
published circuit instead feeds the output delay through a multiplexer:

```
          E=0: B ─┐
                  mux ──► delay ──► ref        Bc = B xor ref
     E=1: not B ──┘
```

When `E = 1` the mux passes `not B`, which equals `B xor E = F`. When `E = 0` it passes
`B = F`. **So the delay always holds the last corrected output `F`, not the raw gate
output.** This has two consequences worth keeping in mind when changing the code:

* Substituting gives `F = B xor Ac xor B xor F_prev = F_prev xor Ac`. The corrected
  output does not depend on the raw gate output at all. The gate is in effect recomputed
  incrementally from the last correct value, and the raw output only decides `E`. This is
  why a stuck gate is corrected for any length of time.
* The scheme is only as good as its state. If a delay flip-flop is upset, the reference
  is wrong, and `F` stays wrong until the next reset. Faults are assumed to hit the
  protected gate, with at most one faulty module at a time. The delay flip-flops here are
  single, exactly as in the published gate circuits.

The broken copy of `iolb_not` that the testbench is checked against loads the raw `B`
into the delay. It fails thousands of checks.

### Any gate: the general rule (`rtl/iolb_gate.sv`, `rtl/iolb_and.sv`, `rtl/iolb_or.sv`)

The general procedure writes `E` as a function of the inputs, their change variables,
the output and its change variable, `E = f(X1..Xn, X1c..Xnc, Y, Yc)`. It then reduces the
function where it can. The AND and OR circuits used in the evaluated multiplier were made
this way, but their expressions are not published. `iolb_gate` implements the procedure
for any `N`-input gate. The gate is given as a truth-table parameter `TRUTH`, with
`TRUTH[x] = g(x)`. It uses:

```
expected change = g(X) xor g(X_delayed)        (X_delayed = X xor Xc)
E               = Yc xor expected change
F               = Y xor E
```

This is the observed output change compared with the change that the input change
implies. For `g = NOT` and `g = XOR`, the expected change is `Ac` and `Ac xor Bc`, so the
same rule gives exactly the two published truth tables. The testbench checks this on 1-
and 2-input instances. `Yc` uses the same mux-and-delay reference as above. This
reduction is this design's reading of the procedure, not a published one.
`iolb_and` and `iolb_or` are `iolb_gate` with `N = 2` and `TRUTH = 4'b1000` or
`4'b1110` (index `{b, a}`).

### Gate interface and timing

All gates share one interface: `clk`, `rst_n`, the input(s) (`x` vector in `iolb_gate`), `fault_sel`, the raw
(possibly faulted) output, `e`, and `f`. The raw output, `e` and `f` are combinational
from the inputs. The two or three delay flip-flops update on the rising edge. A
synchronous, active-low reset loads the fault-free state for all-zero inputs (input
delays 0, reference = `g(0,…)`).

## 2. Fault injection (`rtl/fault_inject_mux.sv`)

A 4-to-1 mux sits between each gate and its IOLB circuit. `fault_sel` is of type
`iolb_pkg::fault_e`:

| value | `FI_NONE` (0) | `FI_SA0` (1) | `FI_SA1` (2) | `FI_FLIP` (3) |
|---|---|---|---|---|
| output | gate value | 0 | 1 | inverted gate value |

The evaluation used stuck-at-0 and stuck-at-1 faults through such muxes. The use of the
fourth input (inversion, i.e. a transient upset) and the encoding are choices of this
design.

## 3. The multiplier (`rtl/iolb_mult16.sv`, top)

### Structure

`WIDTH` defaults to 16. The published description calls it a "cascaded multiplier"
without drawing it. This RTL uses the plain unsigned array form:

* `WIDTH²` IOLB AND gates form the partial products `pp[i][j] = a[j] & b[i]`.
* Rows `r = 1 … WIDTH-1` are ripple-carry adders. Cell `j` adds `pp[r][j]` to bit `j+1`
  of the previous row's `WIDTH+1`-bit result. Column 0 is a half adder
  (`rtl/iolb_half_adder.sv`: XOR and AND). Every other column is a full adder
  (`rtl/iolb_full_adder.sv`: `x = a^b`, `s = x^cin`, `g = a&b`, `t = x&cin`,
  `cout = g|t`).
* Bit 0 of each row is one product bit. The last row provides the upper `WIDTH+1` bits.

Every gate reads the corrected outputs of the gates before it, so a corrected fault does
not propagate. At `WIDTH = 16` there are 1411 IOLB gates: 256 AND gates for the partial
products, 15 half adders and 225 full adders. The array needs no inverter, so the IOLB
NOT gate is a stand-alone cell that the multiplier does not use.

### Gate numbering and fault addressing

One gate at a time is faulted. Its number is `fault_gate`, and `fault_mode` says how it
is faulted. The numbering is:

* partial-product AND `(i, j)`: `i*WIDTH + j`
* gate `k` of adder cell `(r, j)`: `WIDTH*WIDTH + ((r-1)*WIDTH + j)*5 + k`, with `k` as
  listed for the full adder above. A half adder uses `k = 0` (XOR) and `k = 1` (AND), and
  leaves 2–4 unused.

`GATE_IDW = clog2(WIDTH² + 5·WIDTH·(WIDTH-1))`, which is 11 bits at the default. The
fault may be moved or changed every cycle.

### Sequential logic: TMR

The IOLB technique only covers combinational gates. Registers are to be triplicated.
`rtl/tmr_reg.sv` stores each bit three times and reads it through a 2-of-3 majority
voter. In the multiplier it holds the 32-bit product and the error flag. Its
`tmr_upset` input flips chosen bits of chosen copies, to emulate an upset.

### Ports and timing

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset |
| `a`, `b` | in | `WIDTH` | operands (not registered) |
| `fault_gate` | in | `GATE_IDW` | number of the gate to fault |
| `fault_mode` | in | `fault_e` | fault applied to that gate |
| `tmr_upset` | in | 3 × (2·`WIDTH`+1) | bits to flip in each copy of the output register |
| `p` | out | 2·`WIDTH` | `a*b` of the operands applied before the last edge |
| `err` | out | 1 | some gate had to correct its output in that cycle |

Apply operands and the fault setting. After the next rising edge, `p` is the product
and `err` says whether any gate's raw output was wrong. The whole array settles within
one cycle. Its critical path runs through the partial products and every adder row, and
each IOLB gate adds a few XOR levels.

## 4. Where this departs from the published design, and how far to trust it

* **Delays are flip-flops.** The published circuits draw "Delay" elements of arbitrary
  length. Here each is one flip-flop, about three per gate. The evaluated design reported
  only 96 flip-flops (32 triplicated) for the whole multiplier, so its delays cannot have
  been flip-flops. Flip-flop and LUT counts of this RTL are therefore not comparable with
  the published resource table (no protection: 67 I/O, 495 LUT4, 32 FF; IOLB: 137 I/O,
  1536 LUT4, 96 FF).
* **The general error rule, and with it the AND/OR circuits,** is derived here (Section 1). They are equivalent to
  `E = Y xor g(X)` whenever the reference is correct.
* **Multiplier architecture, gate numbering, single-fault addressing, unregistered
  inputs, the error flag in the TMR register, the inverted fault mode and the reset
  state** are choices of this design.
* **Not covered by the RTL:** configuration scrubbing and the FPGA fabric itself. The
  technique relies on scrubbing to repair upsets in the configuration memory. Upsets in
  the IOLB circuit or in its delay flip-flops are not corrected (see Section 1).

Verification: every block has a self-checking testbench. The gate testbenches apply
random inputs with held and random faults. They check the raw output, `f`, and `e`
against the published truth tables (NOT, XOR) or the rule above (AND, OR), and require
every table row to be visited. The `iolb_gate` testbench is exhaustive over previous
inputs, new inputs and fault modes for 3-input majority, parity and an arbitrary table. The multiplier testbench runs at the default size. It
applies fault-free corner and random products, and then each of the 1411 gates under
each of the three fault modes, held for four random operand pairs. It checks `p == a*b`
every cycle. It checks `err` against a separate behavioural model of every gate's true
value, and it requires each mechanism to occur: stuck-at-0, stuck-at-1 and inversion
corrected; faults on AND, XOR and OR gates; faults with no effect; TMR upsets masked.
Every product was correct under every injected fault.

## 5. Files and simulation

| file | contents |
|---|---|
| `rtl/iolb_pkg.sv` | `fault_e` type |
| `rtl/fault_inject_mux.sv` | 4-to-1 fault-injection mux |
| `rtl/iolb_not.sv`, `rtl/iolb_xor.sv` | published IOLB gate circuits |
| `rtl/iolb_gate.sv` | general N-input IOLB gate (truth-table parameter) |
| `rtl/iolb_and.sv`, `rtl/iolb_or.sv` | IOLB AND / OR: `iolb_gate` with their truth tables |
| `rtl/iolb_half_adder.sv`, `rtl/iolb_full_adder.sv` | adder cells of IOLB gates |
| `rtl/tmr_reg.sv` | triplicated register with majority voter |
| `rtl/iolb_mult16.sv` | top: the protected multiplier |
| `tb/<module>_tb.sv` | one self-checking testbench per module above (not the adder cells) |

Each testbench prints `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/iolb_pkg.sv tb/iolb_mult16_tb.sv \
          --top-module iolb_mult16_tb -Mdir obj -j 8
./obj/Violb_mult16_tb
```

Replace the testbench and top-module names to run another one. The multiplier build
takes about 20 s and the simulation under a second. To try another size, set `WIDTH` on
`iolb_mult16`. The gate numbering and port widths follow from it, and the testbench's
`W` must match.
