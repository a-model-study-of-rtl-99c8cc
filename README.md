# An all-digital, discrete-time linear regulator in SystemVerilog

A linear regulator (LDO) holds a supply rail at a set voltage. It does this by
passing current from a higher supply through a pass transistor. In the usual
analog design, a high-gain error amplifier drives a single large pass device.
In this design there is no amplifier. The rail is compared with the reference
once per clock by a one-bit comparator. The result moves a digital code up or
down. That code switches on some of 128 equal PMOS pass devices. The control
is all logic, so it can be synthesized and placed next to the circuit it
supplies, in as many copies as needed.

This RTL follows the regulator described in *A Model Study of an All-Digital,
Discrete-Time and Embedded Linear Regulator* (S. B. Nasir, A. Raychowdhury). It
is an independent rendering, not the authors' code. The logic parts (gain
register, shift control, barrel shifter) are synthesizable. The two analog
parts (comparator, PMOS array) are behavioural models with `real`-valued
ports, so the whole loop can be simulated against a simple RC load.

## The control loop

```
          +--------------------------------------------------------------+
          |                                                              |
 VREF --> ldo_comparator --d--> ldo_shift_ctrl --mux1,mux2--> ldo_barrel_shifter
 VOUT --> (rising edge)          ^        ^                     | code[127:0]
          ^                      |        |                     v
          |             ldo_gain_reg   code[2:0]          ldo_pmos_array (VIN -> VOUT)
          |              (K1,K0)                                | iout
          |                                                     v
          +------------------------ VOUT <-- load R_L || C_L (outside the top)
```

Once per clock, the comparator gives e = +1 (VOUT below VREF) or -1. The
barrel shifter holds a 128-bit thermometer word: bits `0..D-1` are ones, and
D is the number of devices that are on. Each cycle it moves the boundary by
the programmed step K (0 to 3) in the direction of e:

    D(n) = clamp( D(n-1) + K * e(n-1), 0, 128 )

So the shifter is a digital integrator, the comparator is a sign function, and
the load capacitance and load resistance form a first-order plant. Together
they make a second-order sampled loop. In steady state, the one-bit comparator
can never say "exactly right", so the code never settles. It runs around the
right value in a *limit cycle*, for example three steps up, then three steps
down. The paper calls the number of steps in one direction the *mode* of the
oscillation. The clock rate Fs relative to the load pole Fl sets this mode,
and the step K sets how fast the loop responds and how large the ripple is.

## The barrel shifter, slice by slice

The shifter (`ldo_barrel_shifter`, built from 128 `ldo_shift_slice`s) is the
only part with real internal structure. Each slice n has two 4:1 muxes and one
storage bit:

| level  | output | hold   | up (d = 1) | down (d = 0) | select S1 |
|--------|--------|--------|------------|--------------|-----------|
| first  | B_n    | A_n    | A_(n-2)    | A_(n+2)      | mux1      |
| second | F_n    | B_n    | B_(n-1)    | B_(n+1)      | mux2      |
| store  | A_n <= F_n on the active edge | | | | |

S0 of both muxes is the comparator decision d. The first level moves the word
by 0 or 2 places, and the second by 0 or 1 more, so any step from 0 to 3 comes
from two cheap muxes per bit. "Up" takes bits from lower indices, so ones flow
toward bit 127 and more devices turn on. Past the ends, the word is padded
with ones below bit 0 and zeros above bit 127. So the code saturates at
all-on and all-off, and it never wraps. An assertion in `ldo_barrel_shifter`
checks that the word is always a thermometer code.

The paper prints each mux's inputs, but not which select value picks which
input. The mapping above is the only one that agrees with its gain table.

### Select lines and the gain code

`ldo_shift_ctrl` turns the gain code {K1,K0} into the two select lines:

| K1 K0 | step | mux1 | mux2 |
|-------|------|------|------|
| 1 1   | 3    | 1    | 1    |
| 1 0   | 2    | 1    | 0    |
| 0 1   | 1    | 0    | 1    |
| 0 0   | 0 (hold) | 0 | 0   |

The paper's gain table gives the first three rows. The hold code is this
design's addition: the paper's list of step sizes includes 0, but its table
has no row for it.

The paper also prints a second table. It looks at a 3-bit window {B2,B1,B0}
and the direction, and in two cases forces a step of 1:

| B2 B1 B0 | d | mux1, mux2        |
|----------|---|-------------------|
| 0 0 0    | 1 | K1, K0            |
| 0 0 1    | 1 | 0, 1 (step 1)     |
| 0 1 1    | 0 | 0, 1 (step 1)     |
| 1 1 1    | 0 | K1, K0            |

The paper does not say which signals form the window, or what the other
twelve combinations do. Here, the window is the three lowest code bits
`code[2:0]`, and every unlisted combination uses the programmed gain. The
effect is that the code takes single steps between one and two devices on.
This is the least certain part of the design. To change it, edit
`ldo_shift_ctrl` and the wiring of its `b` port in `dldo_top`.

## Timing: one cycle or half a cycle of delay

The comparator decides at a rising edge and holds its result until the next
rising edge. Its SR latch does the holding.

* **Baseline (`DUAL_EDGE = 0`, default).** The shifter also updates at rising
  edges, so it applies the decision from the previous edge. That is the one
  cycle of loop delay in the equation above.
* **Dual edge (`DUAL_EDGE = 1`).** The shifter updates at the falling edge of
  the same cycle, so the loop delay is half a cycle. The paper proposes this
  to lower the limit-cycle mode for a given Fs/Fl.

A gain write takes effect from the next rising edge. The asynchronous
active-low reset turns every device off and sets the gain to 1.

## The analog parts, as models

* `ldo_comparator`: at each rising edge, `dout = (vout < vref)`, held for the
  cycle. Equal inputs give 0. The model has no offset, noise, metastability or
  precharge phase.
* `ldo_pmos_array`: each device that is on is a conductance
  `G_ON = 3.5 mA / (128 x 0.3 V)` from VIN to VOUT. With this value, all 128
  devices deliver 3.5 mA at 0.7 V from a 1 V supply, which is the full-load
  point the paper gives. There is no reverse current. A caption in the paper
  quotes 1.5 mA per device, which does not fit the 3.5 mA total. The model
  follows the total.
* The load and grid are not part of the regulator. The testbenches model
  them in `tb/ldo_load_model.sv` as a resistor in parallel with 1 nF,
  integrated by forward Euler every 0.25 ns.

The top, `dldo_top`, therefore has `real` ports `vref`, `vin` and `vout` in,
and `iout` out. A testbench closes the loop. To synthesize the logic alone,
take `ldo_gain_reg`, `ldo_shift_ctrl` and `ldo_barrel_shifter`. Those three
modules hold 130 flip-flops and about 400 simple cells.

## What the simulations show

These are measured with the models above: 50 MHz clock, 1 V supply, 1 nF, and
a 1 mA load at 0.7 V unless stated otherwise.

| case | result |
|---|---|
| 0 -> 0.7 V reference step, K = 1, 50 MHz | reaches 0.665 V in about 0.95 us |
| same, K = 3 | about 0.49 us (a larger gain is faster, as in the paper) |
| same, K = 1, 10 MHz | about 3.5 us (a slower clock is slower) |
| steady state, K = 1 | code swings over about 11 devices; VOUT stays within 0.69-0.71 V |
| load step 0.9 -> 2.4 mA | code moves from about 33 to about 88 devices on; VOUT regulated again |
| baseline vs dual edge | the dual-edge loop shows a lower mode at every operating point tried |

`tb_dldo_sweep` repeats the 0 -> 0.7 V step and the steady state across the
ratio Fs/Fl, for both clocking variants. Fl is taken as
1 / ((R_L || R_PMOS) C_L), with R_PMOS = 0.3 V / 1 mA at the operating point,
so Fl = 4.76e6 per second. The paper also draws this pole as
1 + s/(2 pi Fl), which would put Fl a factor of 2 pi lower. The sweep uses
the 1/(RC) form. Mode here is the mean number of cycles between changes of
the comparator decision.

| Fs/Fl | Fs (MHz) | rise time, baseline / dual edge (ns) | mode, baseline / dual edge |
|---|---|---|---|
| 2  | 9.5  | 3625 / 3572 | 5.0 / 3.0 |
| 4  | 19.0 | 1961 / 1935 | 6.9 / 5.0 |
| 6  | 28.6 | 1418 / 1401 | 9.1 / 4.9 |
| 8  | 38.1 | 1146 / 1133 | 11.1 / 7.0 |
| 10 | 47.6 | 979 / 969   | 11.1 / 9.1 |
| 14 | 66.7 | 782 / 774   | 13.3 / 11.1 |
| 17 | 81.0 | 690 / 684   | 15.4 / 10.8 |

The trends are those the paper reports. A faster clock gives a shorter rise
time, with diminishing returns. A faster clock also gives a higher mode, and
halving the loop delay lowers the mode. The paper's transistor-level
simulations show mode 5 at Fs/Fl of about 2 to 4, and mode 7 at 5 to 6.
Here the mode is 5 at a ratio of 2, and it grows faster above that. The
paper reports that rise time improves more than sixfold from a ratio of 2 to
17. Here it improves about fivefold.

These numbers come from ideal models. They show that the logic implements
the paper's loop. They do not reproduce the paper's transistor-level
results.

## Files

| file | contents |
|---|---|
| `rtl/dldo_pkg.sv` | `N_PMOS`, the gain enum `gain_e`, the select struct `shift_sel_t` |
| `rtl/ldo_gain_reg.sv` | gain register {K1,K0} |
| `rtl/ldo_shift_ctrl.sv` | select decoder (both tables above) |
| `rtl/ldo_shift_slice.sv` | one bit slice: two 4:1 muxes and a flip-flop |
| `rtl/ldo_barrel_shifter.sv` | 128 slices, end padding, thermometer assertion |
| `rtl/ldo_comparator.sv` | clocked comparator model |
| `rtl/ldo_pmos_array.sv` | PMOS array model |
| `rtl/dldo_top.sv` | the regulator |
| `tb/ldo_load_model.sv` | R_L in parallel with C_L, for the testbenches |
| `tb/tb_*.sv` | self-checking testbenches, one per block, plus `tb_dldo_top` (both variants, every mechanism), `tb_dldo_full` (the default build, one full regulation run) and `tb_dldo_sweep` (the Fs/Fl sweep) |

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Example with
plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Irtl \
    rtl/dldo_pkg.sv tb/tb_dldo_top.sv --top-module tb_dldo_top
./obj_dir/Vtb_dldo_top
```

Every testbench runs in well under a second. `tb_dldo_top` runs the two
clocking variants side by side. Beyond the cases in the table, it checks
these mechanisms: gain 0 holding the code, saturation at both ends, and both
forced-step rows of the select table. At every rising edge it also checks the
baseline code against the integrator equation.

## Where this departs from, or goes beyond, the paper

* The storage element of each slice is an edge-triggered flip-flop. The paper
  draws a "latch" with a clock input, and calls the same structure a shift
  register.
* The source of the select window {B2,B1,B0} and the unlisted rows of that
  table are this design's choices (see above).
* The mux input order comes from the gain table, not from the drawing.
* The gain register's write port, the reset values, the hold gain 00 and the
  end padding of the shifter are not specified in the paper.
* The paper's design-space plot goes up to a forward gain of 60. The
  two-level shifter built here, like the one the paper draws, steps by at
  most 3.
* The clock source (the paper suggests adapting Fs to the load) and the
  load itself are outside the design.
