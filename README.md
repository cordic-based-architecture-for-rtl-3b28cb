# Fixed-point x^y on an expanded hyperbolic CORDIC engine

This design computes the power function x^y for x > 0 in signed fixed point. It uses the identity

    x^y = e^(y · ln x)

and a single hyperbolic CORDIC engine that runs twice. The first pass runs in *vectoring* mode and gives ln x. The second pass runs in *rotation* mode and gives e^(y ln x). Plain hyperbolic CORDIC converges only for |z| ≤ 1.118. The engine therefore uses the *expanded* form of the algorithm: M+1 extra iterations with non-positive indices come before the usual ones. With M = 5 this widens the domain of e^z to |z| ≤ 12.43 and the domain of ln x to 0 < x ≤ 6.2·10^10.

All arithmetic is iterative, with one CORDIC iteration per clock cycle. There are no multipliers inside the engine. The only multiplier in the design forms y · ln x between the two passes.

The RTL is an implementation of the architecture published in "CORDIC-based Architecture for Powering Computation in Fixed-Point Arithmetic" (Simmonds, Mack, Bellestri, Llamocca). Where this README says "the reference", it means that paper. The reference describes the structure: block diagrams, iteration equations and cycle counts. Widths of control signals, reset, rounding, the handshake and the state machines are choices made here. The sections below mark which is which.

## Number format

Every value in the datapath has the same format, written [B FW]. It is a B-bit two's-complement number with FW fractional bits and IW = B − FW integer bits, so it covers [−2^(IW−1), 2^(IW−1) − 2^−FW]. The default format is **[52 32]** (IW = 20), with **M = 5** and **N = 32**. In the reference's design-space study this is the x^y profile with the highest accuracy. The design is fully parameterized by `B`, `FW`, `M` and `N`.

Overflow wraps around; nothing saturates. This matters, because intermediate values can be about twice the final result. e^12.43 ≈ 2.5·10^5 fits in IW = 20, but not in IW = 16. ln x over its full domain needs an input of up to 6.2·10^10, which takes IW = 37, i.e. B ≥ 72 when FW = 32. At the default B = 52, ln x (and hence x^y) is only correct for x < 5.2·10^5.

## The iterations

Index i runs over −M … 0 (the negative iterations), then 1 … N (the positive iterations).

    i ≤ 0:  x' = x + d·y·(1 − 2^(i−2))     i > 0:  x' = x + d·y·2^−i
            y' = y + d·x·(1 − 2^(i−2))             y' = y + d·x·2^−i
            z' = z − d·atanh(1 − 2^(i−2))          z' = z − d·atanh(2^−i)

    rotation:  d = −1 if z < 0, else +1              (drives z → 0)
    vectoring: d = −1 if x·y ≥ 0, else +1            (drives y → 0)

The positive iterations 4, 13, 40, … (k → 3k+1) are each executed twice; hyperbolic CORDIC needs this to converge. v(N) is the number of such repeats among 1 … N: 2 for N = 32 and 3 for N = 40. After the last iteration:

* rotation: x = An·(x0·cosh z0 + y0·sinh z0) and y = An·(x0·sinh z0 + y0·cosh z0)
* vectoring: z = z0 + atanh(y0/x0)

An is the product of the gains √(1 − t²) of all iterations, repeats included. For M = 5 and N = 32, 1/An ≈ 1988.74. It follows that:

* e^a: start with x0 = y0 = 1/An and z0 = a in rotation mode. The result is x.
* ln a: start with x0 = a+1, y0 = a−1 and z0 = 0 in vectoring mode. The result is z = ln(a)/2.

A negative iteration is computed as (x + d·y) − d·(y >>> (2−i)). It therefore needs two adders and one shifter for each of x and y, plus the z adder: five adders per stage, as in the reference. A positive iteration needs three adders.

The vectoring gain is small (An ≈ 5·10^−4), so x shrinks by a factor of about 2000 during a ln pass. The angle that remains is then resolved only to about 2^−FW / x_final. This is why ln x at [52 32] is accurate to about 10^−6 rather than 2^−32. Near x = 0 the accuracy drops to about 10^−3, because there x0² − y0² = 4a is tiny. These limits come from the algorithm in fixed point, not from the RTL.

## Engine structure (`cordic_engine`)

The engine is a chain of two stages under one controller:

```
 xin,yin,zin ─► cordic_neg_stage ─► Neg_*OutReg ─► cordic_pos_stage ─► x/y/zOut_Reg ─► xout,yout,zout
                (i = −M..0)                        (i = 1..N)
                     ▲  gt0                             ▲  ltN, rep
                     └──────────── cordic_ctrl ─────────┘
```

* **`cordic_neg_stage`** (reference figure, top half) contains the following. Registers Neg_x/y/zReg sit behind 2:1 input multiplexers that pick the input or the iteration result. It has two barrel shifters, five adders and the angle ROM `neg_angle_lut`. The counter Neg_iReg holds k = −i. It is loaded with M and counts down. The shift amount is k+2, and `gt0` = (k > 0). The output registers Neg_*OutReg are written by the last negative iteration.
* **`cordic_pos_stage`** (bottom half) has the same pattern with three adders, the ROM `pos_angle_lut` and an up-counter iReg (1 … N). Comparators produce `ltN` = (i < N) and `rep` = (i is a repeated index). The reference draws fixed comparators for 4, 13 and 40. Here one comparator is generated for every repeated index up to N. This is the same set for any N ≤ 120.
* **Angle ROMs.** The tables are computed at elaboration with real arithmetic and rounded to nearest. The negative stage uses atanh(1 − 2^−j) = ½·ln(2^(j+1) − 1); the positive stage uses atanh(2^−i). Nothing is read from a file. Each value passes through a 64-bit integer, so FW must stay below about 60.
* **d (add or subtract)** is computed inside each stage from the latched mode, the sign bit of z, or the sign and zero tests of x and y. The reference only shows d entering the adders.

### Schedule of one pass (`cordic_ctrl`)

| cycles | action |
|---|---|
| 1 | `start` seen while idle: load xin/yin/zin into the negative stage, Neg_iReg ← M, latch `mode` |
| M+1 | negative iterations; the one with k = 0 writes Neg_*OutReg |
| 1 | load the positive stage from Neg_*OutReg, iReg ← 1 |
| N+v(N) | positive iterations. At a repeated index iReg holds for one cycle. The final iteration writes x/y/zOut_Reg |

`done` goes high **T = M+1+N+v(N)+2 cycles** after the cycle in which `start` was high. For the default configuration T = 42 cycles, which is 336 ns at 125 MHz. This matches the reference's equation and its execution-time table. `done` lasts one cycle, and the controller is already idle during it. A new `start` in the same cycle as `done` is therefore accepted; the powering unit depends on this. The inputs are sampled only at the start cycle. The outputs hold until the next pass writes them. An assertion flags any `start` while the engine is busy. The state encoding and this exact split of the cycles are choices made here; the reference gives only the total.

## Powering unit (`cordic_pow`, top)

```
 x ─► x+1 ─┐            1/An ─┐                     ┌─ 0
 x ─► x−1 ─┼─ mux(cordicSel) ─┴─ mux ── xin,yin     └─ mux ── zin ◄── y · (zn << 1)
           └──────────────► cordic_engine ─► xn ─► OutReg (OutLd) ─► xy
                                           └► zn ─► <<1 ─► fx_mult(y, ·)
```

* **Pass 1** (`cordicSel` = 0, vectoring): the engine gets (x+1, x−1, 0). The result is zn = ln(x)/2.
* Between the passes, a shift left by one gives ln x. The combinational multiplier **`fx_mult`** then forms y·ln x. It keeps bits FW … FW+B−1 of the full product, i.e. it truncates toward −∞ and wraps.
* **Pass 2** (`cordicSel` = 1, rotation): the engine gets (1/An, 1/An, y·ln x). The result is xn = x^y.
* **`pow_ctrl`** issues the second `cordic_start` in the cycle in which the first pass signals `cordicDone`. When the second pass ends, it raises `OutLd`. `done` follows one cycle later.

The latency is **2T + 1 = 2(M+1) + 2N + 2v(N) + 5 cycles**: 85 cycles (680 ns at 125 MHz) at the defaults. This is the reference's figure.

Ports: `clk`, `rst` (synchronous, active high), `start`, `x`, `y`, `inv_an`, `xy`, `busy`, `done`.

* `x`, `y` and `inv_an` are read straight from the ports during both passes. Hold them stable from `start` until `done`. The reference draws no input registers.
* `inv_an` is the constant 1/An for the chosen M and N, in [B FW]. The reference treats it as an external constant input. `tb/cordic_ref_pkg.sv` shows how to compute it (function `gain`).
* A `start` while busy is ignored.
* The result is valid only for x > 0 and |y·ln x| ≤ 12.43 (for M = 5), and only while every intermediate value fits in IW bits. The reference mentions that x < 0 with integer y could be handled by computing (−1)^y separately. That handling is not part of its block diagram and is not built here.

## Accuracy and speed

Measured with the testbenches below, using PSNR = 10·log10(maxval²/MSE) against double-precision math. Here maxval is the smallest power of two at or above the largest reference output.

| experiment | format, N | PSNR |
|---|---|---|
| x^y, 1500 points, x ∈ [e^−12.43, e^12.43], \|y ln x\| ≤ 12.43 | [24 8] 8 / [28 8] 8 / [32 12] 8 | 10 / 31 / 32 dB |
| | [36 16] 12 / [44 24] 20 / [48 28] 24 / **[52 32] 32** | 70 / 94 / 117 / **131 dB** |
| e^x, 1000 points on [−12.43, 12.43] | [24 8] / [28 8] / [52 32], N = 40 | 17 / 67 / 206 dB |
| ln x, 1000 points on (0, 6.2·10^10] | [52 32] / [68 32] / [72 32] / [76 32], N = 40 | 9 / 33 / 187 / 187 dB |

The trends are the ones the reference reports:

* e^x fails with 16 integer bits.
* ln x over its whole domain fails below 37 integer bits.
* For x^y, accuracy grows with B along the same seven profiles that form the reference's Pareto front.

The absolute values can differ from the reference's plots by about 10 dB, for several likely reasons:

* The reference does not state its rounding of the angle tables and of the multiplier.
* It defines maxval differently (largest value of the output format).
* Its test inputs are not given exactly.

Its text also calls [36 16], N = 12 a "≥ 100 dB" profile, while its own Pareto plot places that point near 60 dB. This design measures 70 dB.

## Departures from the reference and open points

* The reference's closed form of the rotation result lists the same expression for x and for y. The y result implemented (and checked) is An·(x0·sinh z0 + y0·cosh z0), which is what the iterations produce.
* The reference's formula for An multiplies over the positive iterations once each. The gain the hardware actually applies also includes a second factor for every repeated iteration. `inv_an` should be computed with those factors, as the testbenches do. Because 1/An is an input, this affects only the value supplied, not the RTL.
* On the engine figure, the select labels of one input multiplexer are drawn the other way round from the others. Here every stage multiplexer takes its external input when its select is 1.
* The repeat comparators are generated from the 3k+1 rule rather than fixed at 4, 13 and 40. The result is identical for N ≤ 120.
* Reset, handshake, rounding (nearest for tables, truncation for shifts and the multiplier), overflow (wrap) and the controllers' states are not specified by the reference. They are choices made here.
* The reference also evaluates separate e^x and ln x architectures. These are the same engine with the input settings given above. They are tested as such rather than wrapped as extra modules.

## Files

`rtl/` (synthesizable, SystemVerilog 2017):

| file | content |
|---|---|
| `cordic_pkg.sv` | mode type, repeat rule, v(N), pass length, angle formulas (elaboration only) |
| `neg_angle_lut.sv`, `pos_angle_lut.sv` | angle ROMs |
| `cordic_neg_stage.sv`, `cordic_pos_stage.sv` | the two iteration stages |
| `cordic_ctrl.sv` | engine state machine |
| `cordic_engine.sv` | complete CORDIC engine |
| `fx_mult.sv` | [B FW] multiplier |
| `pow_ctrl.sv` | two-pass sequencer |
| `cordic_pow.sv` | top: x^y unit |

`tb/` holds the testbenches. Each one is self-checking, ends with a line `TB_RESULT checks=N failures=M` and has a watchdog:

* `tb_<module>.sv`: one per module. They check values bit for bit against the integer model in `cordic_ref_pkg.sv`, check against real math, and check cycle counts.
* `tb_cordic_pow.sv`: end-to-end at the default parameters. It also counts how often each mechanism was exercised: negative iterations, repeats, both modes, chained start, x < 1, y < 0 and result < 1.
* `tb_pow_workload.sv` and `tb_engine_workload.sv`: the accuracy experiments in the table above.

To simulate, for example the top-level test:

    verilator --binary --timing --assert -Irtl -Itb -y rtl \
        rtl/cordic_pkg.sv tb/cordic_ref_pkg.sv tb/tb_cordic_pow.sv \
        --top-module tb_cordic_pow -o sim && ./obj_dir/sim

Every testbench runs in well under a second.

To change the configuration, override `B`, `FW`, `M` and `N` on `cordic_pow`, and supply the matching `inv_an`. The reference models in `cordic_ref_pkg` hold values in 64-bit integers, so the bit-exact checks apply only up to B = 64. The workload test for ln x covers B = 72 and 76 against real math only.
