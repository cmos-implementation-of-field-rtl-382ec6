# A field-programmable spiking reservoir with hardware FORCE learning

Reservoir computing trains only a linear read-out on top of a fixed, random,
recurrent network. That network, the reservoir, can therefore be a physical
system, as long as its state can be observed. Here it is an analog chip of 100
leaky integrate-and-fire (LIF) neurons whose connections and weights are
programmable like an FPGA. Every neuron has two voltage-controlled oscillators
(VCOs). Its state is read by counting their periods, not with an ADC. The
connections are oscillations turned into short pulses whose width carries the
weight.

A measurement FPGA surrounds the chip. It does four things:

- generates the input oscillations;
- reads out all counts over five serial channels;
- converts counts back into neuron voltages;
- runs a linear read-out and a recursive-least-squares (RLS) update every
  time step. This is the FORCE algorithm, in which the trained output is fed
  straight back into the reservoir.

The RTL here describes both sides and the way they are connected. The chip's
digital parts and the whole FPGA-side datapath are synthesizable
SystemVerilog. The analog parts are event-driven behavioural models: the
neuron, and the delay cells of the weight modules.

## Signal path in one time step

```
 u(n) ──► freq_gen ──F_EXC/F_INH──►┌──────────────── reservoir_chip ─────────────────┐
  ▲                                 │ 100 x clb_tile                                   │
  │                                 │   route_mux ─► weight_module ─► lif_neuron ─f,g─┐│
  │                                 │       ▲            (pulses)                     ││
  │                                 │       └───────── all neurons' f ◄───────────────┤│
  │                                 │   freq_extract (c(f), c(g) counters + shift reg)◄┘│
  │                                 │   config_segment (SI ─► ... ─► SO, clock PCk)    │
  │                                 └───────────── 5 serial chains ───────────────────┘
  │                                                  │ 10 Mbit/s each
  │                                            spi_extractor ─► cf_all, cg_all (100 x 2)
  │                                                  │
  │                                                 cvc ─► x (50 states, volts)
  │                                                  │
  └──── clamp(z_P) in FORCE mode ◄──── rls_accel: z_P = x^T w, RLS update of P, w
```

`rc_system` is the top. Every `ts_cycles` clock cycles it issues a tick. The
tick applies the input and starts a read-out. When the read-out ends, the
conversion starts, and when the conversion ends, the RLS unit runs. With the
default 50 MHz clock and `ts_cycles = 2500`, a step is 50 µs. The costs are:

| stage | cycles |
|---|---|
| read-out | 2405 |
| conversion of 50 neurons | 1200 |
| output plus RLS update | 142 |

The read-out alone fits in one step. Conversion and learning overlap with the
next step's read-out. In FORCE mode, z_P(n) therefore reaches the input about
1.5 steps after its sample was taken. A tick that finds the read-out still
busy is skipped and counted in `overruns`.

## The neuron and its two oscillators

`lif_neuron` is a behavioural model. It is real-valued and event-driven, and
it is not synthesizable. The capacitor voltage v obeys a linear ODE:

- while any excitation input `excb[i]` is low, v is pulled toward VCC with
  time constant `TAU_ON`;
- while any inhibition input `inh[i]` is high, v is pulled toward ground;
- at all times v leaks toward VCC/2 with `TAU_LEAK`.

Between input edges, the model applies the closed-form solution of this ODE,
so idle neurons cost nothing to simulate.

The state is encoded in two VCOs:

- f(v), the positive VCO: rises linearly from 0.35 V to 1 MHz at 1 V, with a
  floor of 20 kHz below 0.35 V;
- g(v), the negative VCO: falls linearly from 1 MHz at 0 V to 0.65 V, with a
  floor of 30 kHz above 0.65 V.

Each VCO is informative only on its own side of mid-supply. That is why both
are measured and the read-out chooses between them.

The following constants are this design's estimates, not characterised
values:

- `TAU_ON` = 2 µs;
- `TAU_LEAK` = 500 µs, so the leak settles "in milliseconds";
- the 1 MHz slope;
- the floor frequencies.

The 0.35 V and 0.65 V thresholds and the 1 V supply are the design's own
figures. `vcap()` returns the present voltage for testbenches.

## Weights are pulse widths

A connection carries an oscillation: either the positive VCO of another
neuron, or one of the reservoir inputs F_EXC and F_INH. The `weight_module`
turns each rising edge of that oscillation into one pulse:

1. The input runs through a line of 16 `delay_cell`s.
2. Four 4:1 multiplexers on `w[1:0]` select a tap, and a 4:1 multiplexer on
   `w[3:2]` selects among those four.
3. The input is ANDed with the inverted selected tap.

The pulse is (w+1) x `D_NS` wide: 5 to 80 ns with the assumed 5 ns cell.
`out_inh` is the positive pulse an inhibition input takes. `out_excb` is its
complement, the negative pulse an excitation input takes.

A wider pulse holds a switch closed longer and moves v further. A
faster-oscillating source delivers more pulses. A connection's effect is
therefore the product of the weight and the source neuron's frequency.

## Programmable connectivity

Each neuron sits in a CLB tile (`clb_tile`) with `N_IN` = 4 input slots. A
slot has three parts:

- a routing multiplexer, `route_mux`. It selects one of 102 sources: codes
  0–99 are the neurons' positive VCOs, 100 is F_EXC, 101 is F_INH, and
  higher codes give a constant 0;
- a weight module;
- steering of the pulse to either an excitation or an inhibition input of
  the neuron.

Each slot is configured by 13 bits, defined in `rc_pkg::slot_cfg_t`:

```
 bit 12   en    slot active
 bit 11   inh   1: drive an inhibition input, 0: drive an excitation input
 bits 10:7 w    pulse-width code, w[0] least significant
 bits 6:0  src  source code
```

A tile holds four slots in a 52-bit `config_segment`: slot k occupies bits
13k+12 .. 13k. The segments of tiles 0..99 form one shift register of 5200
bits, from SI (`cfg_si`) to SO (`cfg_so`), clocked by PCk (`pck`). To program
the chip, shift in tile 99's segment first, most significant bit first, and
tile 0's last. While the next configuration is shifted in, the previous one
comes out of SO, which the testbenches use as a read-back.

The chip realises its routing as an OpenFPGA-generated fabric: switch
boxes, connection boxes, and channels of up to 100 routes per direction. That
fabric is not published in enough detail to reproduce. Here each slot has a
full 102:1 multiplexer instead. Any source can reach any slot, which is the
fabric's function but without its structure or its routability limits.

## Reading the state without an ADC

`freq_measure` measures one VCO. The oscillation passes through a two-flop
synchroniser, and an XOR with its own registered copy detects both edges. A
12-bit counter on the 50 MHz clock restarts on every edge and captures its
value first. A count is therefore the half period in 20 ns cycles, for
example:

- 108 at rest (230 kHz);
- 25 at 1 MHz.

A VCO that has stopped saturates the counter at 4095.

`freq_extract` holds both counters of one neuron and a 24-bit shift register.
On a rising serial-clock edge with `sload` high, it loads {c(f), c(g)};
otherwise it shifts. Tiles are chained serial-out to serial-in in five chains
of 20 neurons each. Chain c carries neurons 20c..20c+19, and the last neuron
of a chain comes out first.

`spi_extractor` is the FPGA-side controller for all five chains in parallel:

1. It drives the serial clock at 50 MHz / 5 = 10 Mbit/s.
2. It issues one load edge, then samples 480 bits per chain just before each
   rising edge.
3. It unpacks the words into `cf[0..99]` and `cg[0..99]`.

The counter width follows from this budget. 100 neurons x 2 counts x 12
bits, over five 10 Mbit/s lines, take 48 µs of the 50 µs step. A 13-bit
count would not fit.

Each tile also has a `freq_divider`: a ripple chain of four toggle
flip-flops on the positive VCO. Its output is brought to a port per neuron
for observation.

## From counts back to volts

`cvc` converts the first 50 neurons, one at a time, with two `udiv`
dividers working in parallel. It takes 24 cycles per neuron. All values are
Q16.16, with frequencies in MHz and voltages in volts:

```
 f = f_base / (2 c(f))          g = f_base / (2 c(g))       (2c: a count is a half period)
 V(f) = (f - b_f) * k_f         V(g) = (g - b_g) * k_g
 avg = (V(f) + V(g)) / 2
 x = V(f)  if avg > 0.65 V      (only f is informative up there)
     V(g)  if avg < 0.35 V
     avg   otherwise
```

k and b are the inverted slope and the offset of each VCO's linear fit. They
are inputs because they come from calibrating the chip. For the behavioural
neuron's VCOs, the values are:

| VCO | k | b |
|---|---|---|
| f | 0.65 | −0.5385 |
| g | −0.65 | 1.0 |

With these, the conversion returns v to within a few mV. A count of 0 (no
transition seen since reset) is read as 4095, the lowest frequency, as for a
stopped oscillator. `region[i]` reports which branch was taken.

## Input oscillations

`freq_gen` clamps u to [−1, 1] and splits it into a positive part and the
magnitude of a negative part. Each part is multiplied by STEP = 1 MHz / 50 MHz
x 2^24 and becomes the increment of a 24-bit accumulator at 50 MHz. The
output is high while the accumulator is above half scale. This gives a
square wave of |u| x 1 MHz on F_EXC (for u > 0) or F_INH (for u < 0), with a
resolution of 3 Hz. A zero part holds its output low.

## The RLS / read-out accelerator

`rls_accel` holds the following state:

- w, 50 weights;
- P, 50 x 50 (a plain register array);
- Px, 50 entries;
- the gain vector, 50 entries.

Its datapath has 50 Q16.16 multipliers with operand multiplexers, one adder
tree, and a 34-bit `udiv`. It runs these phases:

| phase | cycles | computes |
|---|---|---|
| ZP | 1 | z_P = Σ w_j x_j (`zp_valid`) |
| PX | 50 | Px_i = Σ_j P_ij x_j, one row of P per cycle |
| DEN | 1 | s = 1 + Σ Px_j x_j (at least 1) |
| DIV | 35 | inv = 2^32 / s, i.e. 1/s in Q16.16 |
| GAIN | 1 | g_j = Px_j · inv |
| PUPD | 50 | P_ij −= g_i · Px_j, one row per cycle |
| WUPD | 1 | w_j += g_j · err |

In output mode (`mode = 0`), only ZP runs. `init` sets w = 1 and P = αI,
one row per cycle.

The P update uses (Px)ᵀ in place of xᵀP. The two are equal because P stays
symmetric, and this saves a second pass over P.

The error `err = z − z_P` is an input, formed in `rc_system` from `z_teach`.
It must be valid from one cycle after `zp_valid` until `done`.

An RLS step takes 142 cycles (2.8 µs). The chip's own accelerator needs
about 30 µs of the 50 µs step. This one is faster because it has a
full-width datapath per row. Rounding is truncation throughout (`rc_pkg::qmul`).

## Top-level operation (`rc_system`)

1. Program the chip through `pck`/`cfg_si` while `rst` is high or `run` is
   low.
2. Set the conversion calibration (`k_f`, `b_f`, `k_g`, `b_g`).
3. Pulse `rls_init` with `alpha` valid. `init_done` follows.
4. Set `ts_cycles`:
   - 2500 = 50 µs for FORCE;
   - 6000 = 120 µs, as used for the memory-capacity benchmarks.
5. Raise `run`.

Modes:

- `force_mode = 1`: clamp(z_P) becomes the input as soon as it is computed;
- `force_mode = 0`: `u_ext` is applied at each tick;
- `learn` selects RLS updates or output-only read-out.

For open-loop benchmarks, a host records `cf_all`/`cg_all` (all 100
neurons) every step and fits the output weights offline. In the original
system, the host is a processor with DRAM, which is not part of this RTL.
`step_done`, `step_count` and `overruns` report progress.

## How far it follows the original, and where it does not

These follow the original design:

- the block structure: CLB tiles, weight modules, two VCOs per neuron,
  counters, shift-register chains, multi-channel serial extractor, CVC, RLS
  datapath with 50 multipliers and a divider, frequency generator;
- the numbers: 100 neurons, 4 weight bits, 50 MHz, 10 Mbit/s over five
  channels, 50 µs step, 0.35 V / 0.65 V thresholds, 50 x 50 P.

These are choices made here, because the original does not give them:

- 4 input slots per neuron and the slot format;
- the 12-bit counter width;
- the two-flop synchroniser;
- the read-out load strobe and bit order;
- Q16.16 fixed point everywhere;
- the step schedules of the CVC and RLS unit;
- the read-out/compute overlap and the overrun rule;
- RLS read-out from neurons 0..49 (which 50 of the 100 feed the datapath is
  not stated);
- divide-by-16 observation dividers;
- the delay-cell delay and all analog time constants.

Known departures:

- **Routing fabric.** A full multiplexer per slot replaces the FPGA-style
  routing fabric (see above). Fan-in is limited to four connections per
  neuron.
- **Read-out chains.** The read-out drawing shows rows of ten neurons and
  four serial inputs, while the text states five channels. The five-channel
  version is built, since it alone meets the stated 50 µs budget.
- **Frequency formula.** The count-to-frequency step uses f_base / 2c, as
  drawn, not f_base / c as written. This matches a counter that restarts on
  both edges.
- **Neuron model.** The neuron is linear with floors, not a transistor-level
  characteristic. The conversion constants match this model, not silicon.
- **Not included:** the processor, DRAM, PC link, IO pads and VIO interface,
  and the benchmark software (input generation, least squares, metrics).

## Simulating

Everything is plain SystemVerilog-2017 and needs Verilator 5 with
`--timing`. Every file sets `timeunit 1ns; timeprecision 1ps`. Compile the
package first, then the modules bottom-up. For example:

```
verilator --binary --timing -Irtl rtl/rc_pkg.sv rtl/config_segment.sv rtl/route_mux.sv \
  rtl/delay_cell.sv rtl/weight_module.sv rtl/lif_neuron.sv rtl/freq_measure.sv \
  rtl/freq_extract.sv rtl/freq_divider.sv rtl/clb_tile.sv rtl/reservoir_chip.sv \
  rtl/freq_gen.sv rtl/spi_extractor.sv rtl/udiv.sv rtl/cvc.sv rtl/rls_accel.sv \
  rtl/rc_system.sv tb/tb_rc_system.sv --top-module tb_rc_system -o sim
./obj_dir/sim
```

Every testbench is self-checking. It ends with a line
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_lif_neuron` | rest frequencies, exact ODE response to excitation and inhibition, leak, pulse trains |
| `tb_weight_module` | pulse width (w+1)·5 ns for all 16 codes, complementary outputs |
| `tb_route_mux` | every source code, out-of-range codes |
| `tb_config_segment` | shift and read-back |
| `tb_freq_measure` | half-period counts, both edges, saturation |
| `tb_freq_extract` | three chained units read out serially |
| `tb_freq_divider` | ratio 16, duty cycle, reset |
| `tb_clb_tile` | one tile: configuration, F_EXC excitation (larger weight, larger effect), F_INH inhibition, neuron-to-neuron drive, counts against timed periods |
| `tb_reservoir_chip` | the full 100-neuron chip: 5200-bit programming with read-back, all 200 counts over the five chains |
| `tb_freq_gen` | output frequency against u, sign split, clamp |
| `tb_spi_extractor` | full 5 x 20 read-out timing and data |
| `tb_udiv` | random and corner divisions |
| `tb_cvc` | known voltages round-trip, bit-exact conversion of random counts, all three regions |
| `tb_rls_accel` | bit-exact match of z_P, w and all of P against a reference of the equations, convergence, cycle counts |
| `tb_rc_system` | end to end with 10 neurons: programming, init, output-only and RLS open-loop steps, FORCE feedback, input clamp, overrun, all three conversion regions |
| `tb_rc_system_full` | default parameters, 100 neurons and 50-input RLS: two complete FORCE steps within the 50 µs pipeline budget |

Simulation speed is dominated by the analog models. The simulator
re-evaluates all 400 routing multiplexers at every delay-cell event, so cost
grows roughly with the square of the neuron count. The 100-neuron chip
simulates at about 1 µs of chip time per second; 10 neurons run about 300
times faster. The full-size testbenches therefore cover two time steps
(about 2–4 minutes). Long benchmark runs use the reduced top.
