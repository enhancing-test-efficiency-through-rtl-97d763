# LITE scan instrumentation in SystemVerilog

Scan testing makes every flip-flop loadable and readable, but a net buried
deep in the combinational logic can still be hard to set to a value or hard to
see at any flip-flop. The usual cure, test point insertion, adds gates and
often extra test-only flip-flops. LITE (Lightweight Scan Instrumentation,
Paria et al., "Enhancing Test Efficiency through Automated ATPG-Aware
Lightweight Scan Instrumentation") instead reuses the functional scan
flip-flops that are already in the chain:

* **Observability**: a 2:1 mux in front of a flip-flop's D input can switch
  from the original logic to an XOR of hard-to-observe nets. One capture clock
  stores the XOR, so a fault effect on any of those nets flips a bit that is
  then shifted out.
* **Controllability**: a 2:1 mux at the flip-flop output can put a
  hard-to-control net on the cell's output during capture.

Both muxes are controlled by two extra primary inputs, `sel` and `sel_cc`,
shared by every cell. With both at 0 the chain is an ordinary scan chain:
normal-mode function, scan path and shift protocol are unchanged. An ATPG
tool is then given the instrumented netlist and can use the extra paths.

This repository gives RTL for the hardware side of LITE: the scan cell in
each of its four configurations, and a chain of such cells as the top level.
The flow that picks the nets (SCOAP analysis, net selection, netlist editing)
is software and is not included. The same goes for the benchmark circuits
that the chain is wrapped around.

## The LITE cell

```
              obs_n (hard-to-observe nets)
                 |
   func_in ---+--XOR (Config2: func_in is one XOR input)
              |   |
              0   1
             [ mux ]--sel
                 |
        si --1 [ mux ]--se            cc_n (hard-to-control net)
                 |                        |
                 D   Q ------------ 0 [ mux ] 1
                [ FF ]                    |---- sel_cc   (CC configurations)
                  clk, rst                +---> out  (to the circuit)
                                          +---> so   (to the next cell)
```

`rtl/lite_cell.sv` puts together three parts:

| part | file | function |
|---|---|---|
| observability logic | `lite_obs_logic.sv` | `d = sel ? x : func_in`, with `x` the XOR described below |
| scan flip-flop | `sff.sv` | `q <= se ? si : d`, asynchronous active-high reset to 0 |
| controllability mux | inside `lite_cell.sv` | `out = so = sel_cc ? cc_n : q` (CC configurations only) |

### The four configurations

`lite_pkg::lite_cfg_e` selects one of these for a whole chain (parameter `CFG`):

| configuration | XOR inputs (XOR2 case) | output mux | observed nets per cell |
|---|---|---|---|
| `CONFIG1_OBS` | two hard-to-observe nets | no | `XOR_IN` |
| `CONFIG2_OBS` | one hard-to-observe net and the original D logic | no | `XOR_IN-1` |
| `CONFIG1_OBS_CC` (default) | as Config1 | yes | `XOR_IN` |
| `CONFIG2_OBS_CC` | as Config2 | yes | `XOR_IN-1` |

The difference between Config1 and Config2 is subtle. In Config1 a LITE
capture replaces the flip-flop's normal next state with information about
two other nets. In Config2 the captured bit is the normal next state XORed
with one observed net, so the original logic stays observable as well. The
paper reports Config2 as better than Config1 in pattern count when used alone.
With the controllability mux added, both come out about equal, and
Config1_Obs_CC gives the largest average reduction (about 32 % fewer ATPG
patterns than plain scan over its ten benchmarks). That is why it is the
default here.

`XOR_IN` (2 to 5, default 2) widens the XOR. The paper found that wider XORs
cut patterns further but cost area, and settled on XOR2. `USE_XNOR` replaces
the XOR by an XNOR, which the paper names as equally suitable.

### Cost

Per cell, LITE adds one MUX2 and one XOR2 for observability and one MUX2 for
controllability, and no flip-flop. With the SkyWater 130 nm cell areas that
the paper quotes (MUX2 11.26 µm², XOR2 8.76 µm²), this is 20.02 µm²,
11.26 µm² and 31.28 µm² respectively. A comparable conventional test point
costs 32.5 to 36.3 µm².

## The chain (top level)

`rtl/lite_scan_chain.sv` chains `N_FF` cells: `si` enters cell 0, each
cell's `so` feeds the next cell's scan input, and the last cell drives `so`.
The circuit under test stays outside. For every cell i it provides
`func_in[i]`, the logic that used to drive the flip-flop's D, plus the
observed nets `obs_n[i]` and the controlled net `cc_n[i]`. It takes `out[i]`
back in place of the flip-flop's Q.

| parameter | default | meaning |
|---|---|---|
| `N_FF` | 6062 | cells in the chain. 6062 is the flip-flop count of the largest evaluated benchmark (ITC99 b19), so every benchmark in the paper (145 to 6062 flip-flops) fits in one chain |
| `CFG` | `CONFIG1_OBS_CC` | configuration, see above |
| `XOR_IN` | 2 | XOR width |
| `USE_XNOR` | 0 | XNOR instead of XOR |
| `LITE_EN` | all ones | bit i = 0 builds cell i as a plain scan flip-flop. The paper leaves a flip-flop uninstrumented when too few suitable nets exist |

### Operating it

All timing is in clocks of `clk`, and everything changes on the rising edge:

1. **Load**: `se = 1`, `sel_cc = 0`. One bit enters per clock, so a pattern
   takes `N_FF` clocks. The previous response leaves at `so` over the same
   clocks. The first bit shifted in reaches `so` after exactly `N_FF` clocks.
2. **Capture**: one clock with `se = 0`.
   * `sel = 0, sel_cc = 0`: ordinary scan capture of `func_in`.
   * `sel = 1`: instrumented cells capture their XOR instead.
   * `sel_cc = 1` (CC configurations): instrumented cells drive `cc_n` on
     `out` for this capture, so downstream logic sees the controlled net.
3. **Unload** during the next load.

`sel_cc` must be 0 whenever `se` is 1, because the scan path passes through
the output mux. The top holds a concurrent assertion for this rule. `sel`
has no effect while shifting. `out` and `so` are combinational in `sel_cc` and
`cc_n`: in a CC configuration the path from `cc_n` through the cell to the
logic it drives is one level of muxing longer than Q alone.

## Where this RTL departs from, or fills in, the paper

* **Which input of the output mux is which.** The text twice puts Q on mux
  input 0 and the hard-to-control net on input 1. The drawing of the cell
  agrees, and shows the mux output as both the cell output and the scan
  output. The two per-configuration drawings show the reverse order, with the
  mux output driving the controlled net's fan-out (a classic control point).
  This RTL follows the text and the cell drawing.
* **Scan-enable polarity.** The chain drawings put the functional input on mux
  input 0 and SI on input 1. The stand-alone scan flip-flop drawing labels
  them the other way round. This RTL uses `se = 1` for shift.
* **`sel` in Config2.** The paper says `sel` "is set to 1" for Config2.
  Tied to 1 permanently, it would change normal-mode behaviour, which the
  paper rules out elsewhere. So `sel` remains an input in every configuration
  and is set to 1 for LITE captures.
* **Reset** (active high, asynchronous, to 0) and the rising clock edge are
  not specified in the paper; the drawings only show `rst` and `clk` pins.
* **Wider XORs in Config2** keep the original logic on one input and use
  `XOR_IN-1` observed nets. The paper does not say how the extra inputs are
  shared out.
* **One chain.** The paper speaks of "the scan chain" and gives no count of
  chains. The top is a single chain. Several chains are several instances
  sharing `se`, `sel` and `sel_cc`.

## What is not in the RTL

* The insertion flow: a hypergraph of the netlist, topological sort, SCOAP
  controllability/observability numbers, choice of nets (alternating
  between hard-to-set-0 and hard-to-set-1 nets for the output mux, a check
  that two XORed nets do not need contradictory primary inputs), and writing
  out the netlist. In this RTL, what that flow decides is simply whatever is
  wired to `obs_n`, `cc_n` and `LITE_EN`.
* The benchmark circuits (ISCAS89, ITC99) and the ATPG tool.
* The paper's outlook items: a custom LITE library cell, selecting which
  flip-flops to instrument by optimisation, and using the output mux to hold
  the logic still during shift to save test power.

## Verification

Each testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|---|---|
| `tb/tb_sff.sv` | 2000 random shift/capture clocks against `se ? si : d`. Also asynchronous reset |
| `tb/tb_lite_obs_logic.sv` | all 4 configurations × XOR2..XOR5 × XOR/XNOR, every input combination |
| `tb/tb_lite_cell.sv` | six cells (every configuration, XNOR3, an uninstrumented cell) on 4000 random clocks, reset part-way. Requires that the XOR capture and the output override each changed a value |
| `tb/tb_lite_scan_chain.sv` | four 16-cell chains, one per configuration, some with uninstrumented cells. Shift latency of exactly N, 120 full load/capture/unload patterns over all `sel`/`sel_cc` settings, a reset in between. Counts every mechanism and fails if any never happened |
| `tb/tb_lite_scan_chain_full.sv` | the top at its default parameters (6062 cells): latency check and four complete patterns, one per capture mode |
| `tb/tb_lite_random_coverage.sv` | stuck-at fault coverage under random patterns, plain scan against LITE, on a small circuit (see below) |

The chain testbenches wrap the chain in `tb/cut_model.sv`, a fixed, made-up
combinational network that stands in for a real design. The chain is
compared every clock with a cycle-level reference model in
`tb/lite_chain_checker.sv`.

Running one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_lite_scan_chain \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/lite_pkg.sv tb/tb_lite_scan_chain.sv
./obj_dir/Vtb_lite_scan_chain
```

The full-size testbench takes under a minute to build and under a minute to
run. Since the simulator has two states, the testbenches apply a reset before
reading any flip-flop.

### Random-pattern coverage, in miniature

The paper's second claim is that LITE raises the fault coverage that random
patterns reach, because it exposes random-pattern-resistant nets directly.
`tb/tb_lite_random_coverage.sv` reproduces that effect at toy scale.
`tb/rpr_circuit.sv` is an 8-flip-flop circuit whose internal AND nets are 1
with probability 1/16 or 1/256 and are visible only through a further
4-input AND. For each of twelve stuck-at faults on those nets, a fault-free
copy and a faulty copy of the instrumented chain get the same random
patterns, and the fault counts as detected when their unloaded responses
differ. Typical result (seed 1):

```
                     500   1000   2000   4000   patterns
baseline scan          9      9      9      9
Config1_Obs_CC        11     12     12     12
Config2_Obs_CC        12     12     12     12
```

The baseline is the same chain with `sel = sel_cc = 0`, which is ordinary
scan. Over many seeds the baseline ends between 9 and 11 of 12, while both
LITE configurations reach 12. The testbench checks that each LITE mode beats
the baseline and that Config1_Obs_CC finds all twelve faults. The circuit
and the choice of observed nets are made up for the test; they are not
taken from the paper's benchmarks.

What the testbenches cannot show is the paper's main result: fewer ATPG
patterns and higher random-pattern coverage on real benchmarks. That needs
the benchmark netlists, the net selection and an ATPG tool. The RTL only
guarantees that the instrumentation behaves as described and leaves normal
and scan operation intact.
