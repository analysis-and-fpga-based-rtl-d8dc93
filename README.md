# Permutation binary neural network (PBNN) on an FPGA

A permutation binary neural network is a tiny recurrent network that uses no
arithmetic. It generates long periodic bit patterns that are very hard to
disturb. There are N neurons, each holding one bit that stands for +1 or -1,
and they sit on a ring. At every time step two things happen:

1. **Local binary connection (hidden layer).** Every neuron takes the sign of
   a weighted sum of its left neighbour, itself and its right neighbour:
   `y_i = sgn(w_a*x_{i-1} + w_b*x_i + w_c*x_{i+1})`. Each weight is +1 or -1,
   so the three weights form a 3-bit *connection number* CN0..CN7. Bit 2 is
   `w_a` and bit 0 is `w_c`, with 1 meaning +1. For example, CN1 = (-1, -1, +1).
2. **Global permutation connection (output layer).** The hidden vector is
   scrambled by a fixed permutation σ and fed back as the next state:
   `x_i(t+1) = y_σ(i)`. The permutation is written as the identifier
   `P(σ(1) σ(2) … σ(N))`.

The sequence of states eventually repeats. For well-chosen (CN, σ) pairs,
every initial state except two falls into one single periodic orbit. The two
exceptions are all -1 and all +1, which map onto each other. Such an orbit is
*globally stable*: if a bit is flipped, the network falls back onto the same
orbit. This makes the network a self-correcting generator of long periodic
control or timing patterns. Suitable permutations are found offline by a
search program; the hardware simply implements one of them.

The default configuration is N = 17 with CN1 and
`P(1 3 11 14 4 13 8 15 12 7 16 10 5 17 6 2 9)`. Its orbit has period 100, and
131070 of the 2^17 = 131072 states reach it. The network advances at 1 kHz,
derived from a 100 MHz board clock, so the 17 outputs are slow enough to
record with a logic analyser.

## Structure

```
pbnn_top
 ├── pbnn_clock_divider   100 MHz -> one-cycle "step" enable every DIV clocks
 └── pbnn_output_layer    N-bit state register, load / clear / permuted update
      └── pbnn_hidden_layer   N three-input Boolean neurons on a ring
pbnn_pkg                  CN -> truth-table function, shared types
```

The design has 17 flip-flops of state, a 17-bit counter and one 3-input
function per neuron. Synthesis gives about 164 word-level cells for the whole
top.

## The hidden layer as a truth table

The sum of three ±1 terms is odd, so it is never zero, and the sign of the sum
is the majority vote of the three sign-corrected inputs. The hardware does not
add anything. Every neuron is a 3-input Boolean function of
`(x_{i-1}, x_i, x_{i+1})`, written as a sum of the eight minterms. Each minterm
is gated by one bit of an 8-bit rule vector, and the gated minterms are ORed.
The rule vector is computed at elaboration time from the connection number by
`pbnn_pkg::cn_rule`:

```
rule[k] = ( w_a*s(k[2]) + w_b*s(k[1]) + w_c*s(k[0]) >= 0 ),   s(b) = b ? +1 : -1
```

For CN1 this gives `rule = 8'b0010_1011`. The output is +1 for the
neighbourhoods 000, 001, 011 and 101.

The ring closes on itself: neuron 1's left neighbour is neuron N, and neuron
N's right neighbour is neuron 1.

**Encoding.** Bit value 1 means +1 and 0 means -1. Bit `i-1` of every vector
holds neuron `i`. The CN1 network is odd-symmetric: flipping every input bit
flips every output bit. So the choice of polarity does not change any period.

**Where this departs from the original listing.** The original listing writes
the rule vector as the literal `8'b1`. That value would enable only the
all-zero minterm and contradicts the CN1 weights. Here the vector is derived
from the weights instead. This derived form reproduces every period reported
for these networks (14, 42, 50 and 100).

## Output layer: state, permutation and control

`pbnn_output_layer` holds the N-bit state `x`. Its next state is
`x_next[k] = y[SIGMA[k]-1]`, which is fixed wiring. `SIGMA` is an `int` array
parameter that holds the permutation identifier exactly as printed:
`SIGMA[0]` is σ(1), and the values run from 1 to N. An elaboration-time check
rejects a `SIGMA` that is not a permutation of 1..N.

All control is synchronous to `clk`. Priority follows the original code:

| condition at the clock edge | state after the edge |
|---|---|
| `load` | `init` (initial condition), even if `rst` is also high |
| `rst` (and not `load`) | all 0, i.e. every neuron at -1 |
| `step` (and neither) | permuted hidden vector |
| otherwise | unchanged |

After `rst` the state is the all -1 end point. This state is not on the
orbit: it alternates with all +1 forever. To start the network, use `load`
with any state other than all 0 or all 1.

## Update rate

The prototype updates the network at 1 kHz. Instead of a divided clock
(a second clock domain), `pbnn_clock_divider` counts `DIV` = 100000 system
clocks and raises `step` for one cycle. `step` goes high `DIV` clocks after
`rst` is released and then every `DIV` clocks. The state changes on the clock
edge that samples `step` high, so it is visible one clock later. With `DIV = 1`
the network advances on every clock, which is what the fast testbenches use.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `pbnn_top`, `pbnn_output_layer`, `pbnn_hidden_layer` | `N` | 17 | neurons |
| same | `CN` | 1 | connection number 0..7 |
| `pbnn_top`, `pbnn_output_layer` | `SIGMA` | `'{1,3,11,14,4,13,8,15,12,7,16,10,5,17,6,2,9}` | permutation identifier |
| `pbnn_top`, `pbnn_clock_divider` | `DIV` | 100000 | clocks per network update |

To change the permutation or the size, override `N` and `SIGMA` together.
`SIGMA` is declared with `N` entries, so the two must agree. Other known
examples with CN1:

| N | permutation | behaviour |
|---|---|---|
| 7 | `P(1 2 3 4 5 6 7)` | several orbits, one of period 14; not globally stable |
| 7 | `P(1 5 2 6 3 7 4)` | globally stable, period 42 |
| 17 | `P(1 2 4 10 11 3 7 12 8 14 16 5 15 9 17 6 13)` | globally stable, period 50 |
| 17 | `P(1 3 11 14 4 13 8 15 12 7 16 10 5 17 6 2 9)` | globally stable, period 100 (default) |

Any permutation is valid hardware, but only some give a globally stable
orbit. For N = 17, searches have found globally stable orbits with periods up
to 328. The hardware has no counter or memory that depends on the period, so
any of them runs unchanged.

## Verification

All testbenches are self-checking and print one
`TB_RESULT checks=<n> failures=<n>` line. They compare the RTL against a
separate reference model, `tb/pbnn_ref_pkg.sv`. The reference model computes
the weighted sums with integer arithmetic and does not use the truth-table
form.

| testbench | what it shows |
|---|---|
| `tb_pbnn_hidden_layer` | all eight CNs at N = 17 and CN1 at N = 3, against integer sums, for about 20000 vectors |
| `tb_pbnn_output_layer` | load, clear, hold and load-over-clear priority; 3000 steps against the model; period 100 measured on the RTL |
| `tb_pbnn_clock_divider` | DIV = 100000, 7 and 1: first tick, spacing, one-cycle width, restart on reset |
| `tb_pbnn_top` | N = 7 network over all 128 initial states, plus N = 17 over 300 random states, with a cycle-accurate scoreboard; counts load, load+clear, clear, step, hold, orbit entry and end-point events and requires each to occur |
| `tb_pbnn_workloads` | the four networks in the table above, each from every initial state (2^17 for N = 17); measures orbit periods on the RTL and confirms global stability |
| `tb_pbnn_top_full` | top at default parameters (1 kHz steps from 100 MHz): load, run onto the orbit and one full period of 100 steps, about 10^7 clocks |

Running one of them with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/pbnn_pkg.sv tb/pbnn_ref_pkg.sv tb/tb_pbnn_workloads.sv \
  --top-module tb_pbnn_workloads -o sim && obj_dir/sim
```

The exhaustive workload run takes about 20 s. The full-size run takes about
10 s.

## What is and is not here

- The network and its control are complete. The neuron functions, the
  permutation wiring, the load/clear/update register and the rate divider are
  all implemented.
- The update enable is a design choice. The original prototype clocks the
  register from a divided clock; here everything stays on one clock. `load`
  and `rst` act on any system clock edge, not only on update edges.
- The top-level pin-out (`clk`, `rst`, `load`, `init`, `x`, `step`) is this
  design's own choice.
- Not included:
  - the board oscillator;
  - the external logic analyser that records `x`;
  - the offline evolutionary search that picks permutations. It works on
    software models, and its result enters the hardware only as `SIGMA`.
