# Switchable single/dual-edge pipeline registers

A pipeline register normally captures on one clock edge, so every register level
between input and output adds a full clock period of latency. A dual-edge-triggered
(DET) register would halve that, but DET cells are larger, burn more power at high
data activity, and would have to replace every flip-flop. This design keeps
ordinary rising-edge D flip-flops everywhere and makes only selected flip-flops
*switchable*: their clock passes through one XOR gate with a mode signal `m`.

| `m` | switchable flip-flop captures on | a rising-edge flop followed by a switchable flop behaves as |
|-----|----------------------------------|--------------------------------------------------------------|
| 0   | rising edge of `clk`             | an ordinary two-stage shift register, one stage per period   |
| 1   | falling edge of `clk`            | a dual-edge shift register, one stage per half period        |

The mode can be chosen at run time: single-edge when activity or load calls for
the cheaper behaviour, dual-edge when latency matters. The RTL here gives the
register pair on its own and the 4-bit pipelined adder built with it, whose
latency drops from two clock periods (`m = 0`) to one (`m = 1`).

## The register pair

```
 d ──► [D  Q]──── qi ────► [D  Q]──── qi1
       [ >  ]              [ >  ]
 clk ───┴──────────┐         │
                   XOR ──────┘   clk_sw = clk ^ m
 m ────────────────┘
```

`sw_reg_pair` is exactly this. With `m = 1` a value captured by the first flop at
a rising edge appears at `qi1` at the very next falling edge, half a period later;
with `m = 0` it appears one period later. Both flops are the same `dff_r` cell,
only their clocks differ.

The price is timing: with `m = 1` the logic between a rising-edge flop and a
switchable flop has half a period, less the XOR delay that skews the switchable
clock later:

    T/2  >= Tc2q + Tlogic,max + Tsetup - Txor
    Thold <= Tc2q + Tlogic,min - Txor

The XOR delay helps setup and hurts hold. Any implementation must constrain
`clk_sw` as a generated clock of `clk`, with inversion when `m = 1`, and time
both cases.

## The pipelined adder

`sw_pipe_adder` is a ripple-carry adder in which every carry passes through a
register, so bit slice *i* works one register level later than slice *i-1*.
Operand bits are delayed on the way in, and sum bits on the way out, so that all
results leave the last level together. With `WIDTH = 4` there are three register
levels; level 2 is the switchable one.

```
              level 1      level 2 (clk ^ m)   level 3
 slice 0  FA→ s0           s0                  s0              → sum[0]
 slice 1      A1 B1 c1 →FA→ s1                  s1              → sum[1]
 slice 2      A2 B2        A2 B2 c2 →FA→        s2              → sum[2]
 slice 3      A3 B3        A3 B3               A3 B3 c3 →FA→   → sum[3], cout
```

(`FA` marks where each slice's full adder sits; `cK` is the registered carry
into slice K.) That is 21 flip-flop bits, 4 full adders and five XOR gates.
Wherever a rising-edge register is followed by a switchable one on the same
path (the sum of slice 0, the operands of slices 2 and 3), the two are built
as one `sw_reg_pair`. The two switchable registers that stand alone (the sum
of slice 1 and the carry into slice 2) each get their own XOR.

Count latency from the rising edge that captures `a` and `b` at level 1:

* `m = 0`: level 2 captures at the next rising edge and level 3 at the one after.
  The result is ready **two periods** after capture, the same as the ordinary
  pipelined adder.
* `m = 1`: level 2 captures at the falling edge in between, and level 3 at the
  next rising edge. The result is ready **one period** after capture.

Throughput is one addition per clock in both modes. In dual-edge mode, slices 1
and 2 each have half a period: slice 1 from the rising edge to the falling edge,
slice 2 from the falling edge back to the rising edge. Slices 0 and 3 keep a full
period, because the operands reach slice 0 straight from the inputs and slice 3
feeds the outputs directly. The outputs change only at rising edges of `clk`.

The published 45 nm results for this 4-bit adder show the register-to-output
delay falling from 2.007 ns to 1.029 ns. Power is about 9 % higher than the
plain pipelined adder, because of the XOR. The area cost is about 1.4 %. The
power-delay product is 44 % lower with `m = 1`. None of this can be measured from
the RTL.

## Changing the mode

The switchable clock is `clk ^ m`, so a change of `m` is itself a change on
`clk_sw`:

| change of `m` | while `clk` is high | while `clk` is low |
|---------------|---------------------|--------------------|
| 0 → 1         | `clk_sw` falls: safe | `clk_sw` rises: extra capture |
| 1 → 0         | `clk_sw` rises: extra capture | `clk_sw` falls: safe |

Drive `m` from logic that changes it 0→1 during the high phase and 1→0 during
the low phase. Also note that the latency changes by one period at a switch.
Going to `m = 1` drops the result that was in flight at level 2, because it is
overtaken. Going back to `m = 0` delivers one result twice. If every result
matters, drain the pipeline before switching. Neither rule is built into the RTL;
the testbench follows both and skips the three edges after each switch.

## Modules

| module | what it is |
|--------|------------|
| `dff_r` | rising-edge D flip-flop, `WIDTH` bits, asynchronous active-high reset |
| `clk_edge_xor` | `clk_sw = clk ^ m` |
| `full_adder` | one-bit full adder |
| `sw_reg_pair` | two-stage switchable shift register, `WIDTH` bits (default 1) |
| `reg_chain` | the registers of one adder path from level `FIRST` to `LAST`, built from the cells above |
| `sw_pipe_adder` | top: the switchable pipelined adder |

`sw_pipe_adder` ports: `clk`, `rst`, `m`, `a[WIDTH-1:0]`, `b[WIDTH-1:0]`,
`sum[WIDTH-1:0]`, `cout`. Parameters: `WIDTH` (default 4) and `SW_LEVELS`
(`WIDTH-1` bits, default `3'b010`). Bit *k-1* of `SW_LEVELS` set makes register
level *k* switchable. The register structure is written for any `WIDTH >= 2`,
but only the 4-bit form with level 2 switchable is the published one; for other
widths choose `SW_LEVELS` yourself.

## Choices made beyond the published design

* **Reset.** All flops have an asynchronous, active-high reset to zero. The
  published waveform has a reset signal, but its kind is not described.
* **Carry out.** `cout` is the carry of the top slice's adder, and is
  combinational from level 3 like `sum[WIDTH-1]`. The published circuit diagram
  shows no carry output, but its waveform does.
* **One XOR per switchable register.** Every switchable register has its own
  XOR, since the switchable cell is drawn with its XOR. All five compute the same
  `clk ^ m`, so a single gate per level would behave identically and is a
  layout choice.
* **Flip-flop cell.** The switchable cell is drawn as a master-slave pair of
  latches; it is written as an ordinary `always_ff` flop.
* **Full adder.** The textbook equations are used. The published design gives
  only the symbol.

## Simulating

Each file starts with a comment on its function and timing. The testbenches are
self-checking. Each prints `TB_RESULT checks=N failures=M` and ends; a watchdog
ends a hung run. Using Verilator 5, from the directory that holds `rtl/` and
`tb/`:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
              --top-module tb_sw_pipe_adder tb/tb_sw_pipe_adder.sv -o sim
    ./obj_dir/sim

Replace the name with any testbench in `tb/`.

| testbench | checks |
|-----------|--------|
| `tb_dff_r` | capture on rising edges only; hold across falling edges; asynchronous reset |
| `tb_clk_edge_xor` | truth table; `clk_sw` rises with `clk` when `m = 0` and at its falling edge when `m = 1`; no extra edge on a safe switch |
| `tb_full_adder` | all 8 input combinations |
| `tb_sw_reg_pair` | the 0 1 1 0 0 … stream against an edge-by-edge model in both modes; capture-to-`qi1` delay of 4 ns (`m = 0`) and 2 ns (`m = 1`) at 250 MHz |
| `tb_sw_pipe_adder` | the whole adder at its default size, see below |

`tb_sw_pipe_adder` first runs the operand sequence of the published waveform in
both modes: `a` = 1, 2, 3, …, and `b` = `a` with bit 3 inverted when `a` is odd.
It then measures the latency in clock periods (2, 1, 2), and finally runs 3000
random additions with random mode switches. A reference model predicts each
result from the operands captured one (`m = 1`) or two (`m = 0`) edges earlier.
The testbench also checks that the outputs do not move at falling edges. It
counts single-edge results, dual-edge results, switches in each direction,
carry-outs and latency measurements, and fails if any of these never happened.
