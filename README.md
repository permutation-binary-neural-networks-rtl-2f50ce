# Permutation binary neural network (PBNN) in SystemVerilog

A permutation binary neural network is a tiny recurrent network whose state is
a ring of N binary cells, each +1 or -1. One step has two layers:

1. **Local binary connection.** Every cell looks at its left neighbour,
   itself and its right neighbour and fires the signum neuron
   `y_i = sgn(wa*x_{i-1} + wb*x_i + wc*x_{i+1})`, with the three weights
   `wa, wb, wc` each +1 or -1 and the same for every cell.
2. **Global permutation connection.** The hidden vector `y` is rewired by a
   fixed permutation sigma: `x_i(t+1) = y_sigma(i)(t)`.

Since the state space is finite (2^N states), every trajectory ends in a
periodic orbit of binary vectors. The permutation changes which orbits exist:
with N = 6, the longest orbit without a permutation has period 6, and a
suitable permutation gives period 20. Such orbits serve as periodic switching
patterns, for example gait signals for a six-legged robot or gate signals for
a converter with six switches.

The whole parameter space is small: 8 weight vectors times N! permutations
(5760 networks for N = 6). This makes the network easy to analyse exhaustively
and cheap to build in hardware. In hardware the neuron is one 3-input Boolean
function per cell and the permutation is just wiring.

This RTL follows the FPGA prototype described in *Permutation Binary Neural
Networks: Analysis of Periodic Orbits and Its Applications* (H. Udagawa,
T. Okano, T. Saito). It keeps that design's structure and default
configuration and was written independently of the authors.

## Numbering: connection numbers, rule numbers, identifiers

**Encoding.** +1 is logic 1 and -1 is logic 0. Cell i is bit `x[i]` of a
`logic [N:1]` vector, so the cell numbers in the RTL are the same as in the
equations.

**Connection number (CN).** A CN names one of the eight weight vectors:
`CN = 4*[wa=+1] + 2*[wb=+1] + [wc=+1]`. The weighted sum of three ±1 terms is
always odd, so it is never zero and `sgn` never has to break a tie. That makes
each neuron an ordinary 3-input Boolean function, i.e. an elementary cellular
automaton rule:

| CN | (wa, wb, wc) | rule number RN |
|----|--------------|----------------|
| 0 | (-1,-1,-1) | 23  |
| 1 | (-1,-1,+1) | 43  |
| 2 | (-1,+1,-1) | 77  |
| 3 | (-1,+1,+1) | 142 |
| 4 | (+1,-1,-1) | 113 |
| 5 | (+1,-1,+1) | 178 |
| 6 | (+1,+1,-1) | 212 |
| 7 | (+1,+1,+1) | 232 |

Bit k of RN is the cell's next value when the neighbourhood
`{x[i-1], x[i], x[i+1]}`, read as a 3-bit number with the left neighbour as
MSB, equals k. `pbnn_pkg::cn_to_rn()` computes this table from the weights,
and `tb_sbnn` checks the result against the list above. Any of the 256 cellular automaton
rules can be given as RN, but only the eight above are neural networks.

**Permutation identifier.** A permutation is written `P sigma(1) sigma(2) ...
sigma(N)`. The RTL takes it in the same form, as the decimal parameter
`PID`: P126354 is `PID = 126354`, so cell 3 of the new state is hidden neuron
6. The identity (`PID = 123456`) removes the permutation and leaves the plain
local network, referred to below as the SBNN.

## Blocks

```
            pbnn_top
  clk ──┬──────────────────────────────────────────────┐
        │  clk_div (DIV=10)      pbnn                  │
        └─► counter ── tick ──► en   ┌─────────┐       │
                                load ─►│ state x │──┬───┼──► x[N:1]
  load, rst, init[N:1] ────────► rst  ─►│ N flops │  │   │
                                init ─►└────▲────┘  │   │
                                            │       ▼   │
                                   permutation ◄─ sbnn  │
                                   x_k = y_sigma(k) (RN)│
                                                    tick┼──► tick
```

| file | what it is |
|------|-----------|
| `rtl/pbnn_pkg.sv` | CN enum, rule type, `cn_to_rn()` |
| `rtl/sbnn.sv` | combinational local layer: N copies of the RN rule on a ring |
| `rtl/pbnn.sv` | state register, permutation wiring, load/clear/step control |
| `rtl/clk_div.sv` | one-cycle enable every DIV clocks (100 MHz to 10 MHz) |
| `rtl/pbnn_top.sv` | prototype top: `clk_div` + `pbnn` |

### sbnn: the neuron as a sum of minterms

The signum neuron contains no adder or comparator. Like the original design,
each cell is written as eight 3-input minterms. Minterm k is enabled by bit k
of RN, and the cell's output is the OR of the eight. After synthesis a cell is
a single 3-input LUT. The ring closes explicitly: cell 1's left neighbour is
cell N, and cell N's right neighbour is cell 1.

### pbnn: one step per enabled clock

On a rising clock edge with `en = 1`, the register does the first of these
that applies:

1. `load = 1`: take `init` (the initial condition).
2. `rst = 1`: clear to all -1 (all zeros).
3. Otherwise, take `x_next[k] = y[sigma(k)]`: one step of the network.

With `en = 0` the state holds. `load` has priority over `rst`, as in the
original listing. `x` is registered. `y`, the hidden layer, is also an output
for observation. At elaboration the module rejects a `PID` that is not a
permutation of 1..N, and any N outside 3..9.

### clk_div and pbnn_top: the 10 MHz step rate

The prototype runs the network at 10 MHz from a 100 MHz board clock, so that a
logic analyser can record the waveforms cleanly. Here the division does not
produce a second clock. `clk_div` produces `tick`, which is high for one clock
in every DIV, and `tick` drives `en` of `pbnn`. The rest of the timing follows
from that:

* The state changes on the rising edge at the end of the clock cycle in which
  `tick` is high, and then holds for DIV clocks.
* `load`, `rst` and `init` are sampled only on those edges. A button press
  must therefore last at least DIV clocks, and the inputs must already be
  synchronous to `clk`. This design has no button synchroniser.
* The divider counter has no reset. It starts from its power-up value 0 and
  wraps from any out-of-range value. The divider therefore keeps running while
  the network is held in `rst`, so the clear can take effect.

Defaults: N = 6, RN = 212 (CN6), PID = 126354, DIV = 10. This is the network
whose period-20 orbit was measured on the prototype. The first measured
waveform, the period-6 orbit of the plain SBNN CN6, comes from the same top
with `PID = 123456`.

## Periodic orbits and the two feature quantities

The recurrence is a map f on the 2^N states. Here f = f2(f1(x)), where f1 is
the local layer and f2 the permutation. Every state lies either on a periodic
orbit or on a transient that leads into one. To classify networks, take the
orbit with the longest period (the MBPO). If several orbits share that period,
take the one with the larger basin. Then define:

* alpha = period / 2^N, which measures how complex the orbit is;
* beta = (number of states whose trajectory ends on the MBPO) / 2^N, which
  measures how robust the orbit is, since states that fall onto it act as
  error correction.

These quantities are analysis, not hardware: the RTL only generates the
orbits. `tb_feature_quantities` reads the map f out of the RTL (load a state,
take one step, read it back), computes alpha and beta from it, and compares
them with the published values:

| network | period (alpha x64) | basin (beta x64) |
|---------|------|------|
| SBNN CN0, CN5 | 2 | 32 |
| SBNN CN1, CN3, CN4, CN6 | 6 | 12 |
| SBNN CN2, CN7 | 2 | 2 |
| CN0 P513246, CN7 P651324 | 8 | 20 |
| CN1 P413625, CN3 P315462, CN4 P254136, CN6 P126354 | 20 | 62 |
| CN2 P524361 | 10 | 36 |
| CN5 P461253 | 10 | 62 |
| CN6 P231465 | 12 | 40 |

An exhaustive sweep over all 720 permutations for each CN gives the number of
distinct (alpha, beta) points per CN: 19, 79, 49, 78, 79, 53, 78, 26 for
CN0..CN7. All of these values are reproduced.

## Testbenches

Each testbench checks its results itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`.

| testbench | covers |
|-----------|--------|
| `tb/tb_sbnn.sv` | all eight rules over all 64 states (N = 6) and all 512 states (N = 9), against the weighted-sum equation; `cn_to_rn()` |
| `tb/tb_pbnn.sv` | random en/load/rst/init against a reference model, for P126354, P231465 and the identity; longest periods 20, 12, 6 |
| `tb/tb_clk_div.sv` | tick spacing and width for DIV = 10 and 3 |
| `tb/tb_pbnn_top.sv` | the top at its default parameters, end to end: clear, 64 loads, free running, hold between ticks, every clock compared with a model; longest orbit period 20 |
| `tb/tb_feature_quantities.sv` | the alpha/beta table and the 5760-network sweep above |

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert \
  rtl/pbnn_pkg.sv rtl/sbnn.sv rtl/pbnn.sv rtl/clk_div.sv rtl/pbnn_top.sv \
  tb/tb_pbnn_top.sv --top-module tb_pbnn_top
./obj_dir/Vtb_pbnn_top
```

Replace the testbench file and top name to run another one. Each finishes in
well under a second.

## Changing the network

* Another network: set `RN` (from the CN table) and `PID` on `pbnn_top` or
  `pbnn`, e.g. `pbnn_top #(.RN(8'd43), .PID(413625))`.
* Another size: set `N` (3..9) together with a `PID` of N digits. Larger
  rings need a different way to give the permutation, because the
  one-digit-per-cell identifier only covers N up to 9.
* Another step rate: `DIV`. `DIV = 1` steps on every clock.

## Where this RTL departs from the original listings

* **Ring wrap-around.** The original Verilog listing indexes `x[j-1]` and
  `x[j+1]` without wrapping. Here the ring is closed as the network equations
  define it.
* **Rule literal.** The listing writes the rule as `8'b212`. Here it is the
  decimal 212, the rule number the text names.
* **Permutation parameter.** The listing gives the permutation as an integer
  array. Here it is the decimal identifier `PID`, which limits N to 9.
* **Clock division.** The original divides the clock itself. Here the network
  runs on the board clock and is stepped by a clock enable.
* **Extra pieces.** The `tick` and `y` outputs, and the elaboration checks,
  are additions of this design.
* **Not modelled.** The board (clock source, buttons, pins) and the measuring
  instrument are outside the RTL. `clk`, `load`, `rst`, `init` and `x` are
  where they connect.
