# A parallel Preisach hysteresis model in SystemVerilog

The scalar Preisach model describes rate-independent hysteresis (magnetisation,
piezo actuators, friction) as a weighted sum of many elementary relays, or
*hysterons*. Each hysteron is a two-state switch with an up threshold `alpha`
and a down threshold `beta <= alpha`. It goes to +1 when the input reaches
`alpha` and to -1 when the input falls to `beta`. Between the two it keeps
its last state. The model output is

    f(t) = sum_{i=1..N} W_i * y_i(t)

Software evaluates this relay by relay, with a branch per relay. This RTL
uses an algebraic, branch-free form of the relay instead:

    y(t) = min[ sign(x - beta), max[ y(t-), sign(x - alpha) ] ]

Here `y(t-)` is the relay's previous state. The form needs two subtractions,
two sign operators, one max, one min and one state register per relay, and
no control flow. So every relay can be its own small circuit. All relays
watch the same input and switch in the same clock cycle, and an adder over
all of them gives `f`. The default size is 3240 relays. That is the 80 x 80
discretisation of the Preisach half-plane, where a relay exists for every
grid pair with `alpha >= beta`: 80 * 81 / 2 = 3240.

## Why the min/max form is a relay

Take the two sign terms one at a time.

* `sign(x - alpha)` is +1 only above the up threshold. `max[y(t-), sign(x - alpha)]`
  is therefore +1 if the relay was already up, or if the input has just
  reached `alpha`. Otherwise it is -1. This term remembers "up" and can set
  "up", but it cannot reset.
* `sign(x - beta)` is -1 only below the down threshold. Taking the `min` with
  it forces the result to -1 whenever `x <= beta`, whatever the memory says.
  Above `beta` it is +1 and lets the memory term through.

So above `alpha` the output is +1 and below `beta` it is -1. In between it
is the previous state. This is the relay. The state register closes the
loop. It is loaded with an initial state `y0` before the first sample. If
the first sample lies outside `[beta, alpha]`, the formula overwrites `y0`,
so that case needs no extra logic.

**Exactly on a threshold.** With the textbook `sign(0) = 0`, the formula
gives `max[-1, 0] = 0` for a relay at -1 whose input lands exactly on
`alpha`. The relay would then rest in a third state, 0. The relay's case
definition says instead that `x >= alpha` gives +1 and `x <= beta` gives -1.
`threshold_sign` therefore has a parameter for the value of `sign(0)`.
`hysteron` sets it to +1 on the alpha branch and -1 on the beta branch.
With these defaults the relay only ever holds -1 or +1, and the threshold
cases match the relay definition bit for bit. When `alpha == beta` and the
input hits that value exactly, the relay goes to -1, because the `min` with
the beta branch wins. Setting both parameters to 0 gives the plain sign
function and the three-state behaviour. Either way the state is a 2-bit
signed number.

## Blocks

| module | what it is |
|---|---|
| `preisach_pkg` | widths, the `hyst_param_t` struct (alpha, beta, weight, y0), state constants, max/min of states |
| `threshold_sign` | `x - thr` formed one bit wide extra, then sign with a selectable `sign(0)` |
| `hysteron` | two `threshold_sign`, max, min and the state register (the delay element) |
| `hysteron_param_store` | alpha, beta, W and y0 for every relay, as registers, written one entry per cycle |
| `weighted_sum` | `+W_i`, `0` or `-W_i` per relay, summed over all relays, registered |
| `preisach_model` | top: store, N hysterons on one input, weighted sum, sample timing |

`hysteron_param_store` is a bank of flip-flops and not a RAM. Every relay
needs its thresholds in every sample, so all N entries must be readable at
once. The common constants of the model are plain constants in the
package: the zero reference of the comparators and the two state values
-1 and +1.

## Number formats

| quantity | format | notes |
|---|---|---|
| `x`, `alpha`, `beta` | signed Q2.14, 16 bits | range [-2, 2); the normalised input domain is [-1, 1], with room for overshoot |
| `W_i` | unsigned 16-bit integer | free scale; weight 0 marks an unused relay |
| relay state | signed 2 bits | -1 or +1 (0 only with the plain-sign option) |
| `f` | signed, `16 + clog2(N+1) + 1` bits (29 at N = 3240) | cannot overflow |

With a uniform density every weight is equal. For example, with W = 20 at
N = 3240, `f` spans +-64800, and `f / 64800` spans [-1, 1].

## Using the model

Ports of `preisach_model` (parameter `N`, default 3240):

    clk, rst_n                      asynchronous active-low reset
    cfg_we, cfg_addr, cfg_param     write one relay's alpha, beta, weight, y0
    init                            load every relay state with its y0
    x_valid, x                      one input sample
    f_valid, f                      model output

1. After reset all weights are 0, so `f` is 0 whatever the input.
   Write each relay you use with `cfg_we`, one per clock. Assertions flag
   `alpha < beta`, a `y0` other than +-1 and an address out of range.
2. Pulse `init` for one cycle. Every relay state takes its `y0`.
3. Present samples with `x_valid`, at most one per clock and with any gaps
   between them.

Timing, for a sample presented in the cycle before clock edge k:

    edge k    every relay state <= min[sign(x-beta), max[state, sign(x-alpha)]]
    edge k+1  f <= sum W_i * state_i,  f_valid = 1 for one cycle

So the model's latency is two clock cycles. Back-to-back samples give one
result per cycle. If `init` and `x_valid` are high in the same cycle, `init`
wins: the states take `y0`, and the sample still produces an `f_valid`
carrying the sum of the `y0` states.

`hysteron` also brings out the combinational state `y`, valid in the same
cycle as `x`. The top does not use it. It sums the registered states
instead, to split the path into a relay stage and a sum stage.

## Size and speed

At N = 3240 the design holds 3240 x 50 parameter bits (about 162 kbit of
flip-flops) and 3240 x 2 state bits. It computes 6480 16-bit comparisons
and one 3240-input sum in every sample. The sum is a single combinational
stage, left to synthesis to build as an adder tree. It is not pipelined.
That is plenty for sampling rates in the kHz range, which is where
hysteresis models are used in control and hardware-in-the-loop, but it
limits the clock of a large array. Pipelining the sum would add latency
but change nothing else.

The sizes the model was checked against:

* 3240 relays (80 x 80 mesh), uniform weights, and a sinusoid whose
  amplitude decays to zero. This gives the nested minor loops that close
  in on the origin. This is the default size.
* 210 relays (a 20 x 20 mesh) sampled at 2 kHz. The inputs are 120 s of a
  1 Hz sinusoid (120 major loops that must lie on each other) and 120 s of
  white noise low-passed at 10 Hz. 210 relays fit in the default array with
  the other weights at 0. A 2 kHz sample rate needs only a clock above
  4 kHz.

## Testbenches

All testbenches are self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. The reference models
in the testbenches apply the relay's case definition relay by relay
(-1 if `x <= beta`, else +1 if `x >= alpha`, else hold). They do not use
the min/max form.

| testbench | what it covers |
|---|---|
| `tb_threshold_sign` | equal operands, operands far enough apart to overflow 16 bits, random pairs, all three `sign(0)` values |
| `tb_hysteron` | switching exactly on and just beside each threshold, both initial values, y0 overridden by an outside sample, hold when not sampled, random thresholds and walks, the plain-sign option |
| `tb_hysteron_param_store` | reset contents, random writes, every other entry unchanged |
| `tb_weighted_sum` | random states and weights, full-scale sums of both signs, latency, hold |
| `tb_preisach_model` | 36-relay mesh loaded in random order, 4 unused entries, random weights, both initial states, samples on thresholds, back-to-back and spaced samples, two-cycle latency. It counts each of these mechanisms and fails if one never happened |
| `tb_preisach_full` | the default 3240-relay model with the decaying sinusoid: every output, saturation at the first peak, loops nested period by period |
| `tb_preisach_dsp` | 210 relays, 2 x 240000 samples of sinusoid and filtered noise: every output, the 120 major loops identical, saturation on both sides |

To run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
        rtl/preisach_pkg.sv tb/tb_preisach_model.sv --top-module tb_preisach_model
    ./obj_dir/Vtb_preisach_model

The full-size testbench unrolls 3240 relays. It takes a few minutes to
build and about two seconds to run.

## What is this design's own

The following are not fixed by the formulation and were chosen here:

* the fixed-point formats;
* the value of `sign(0)` on each branch (chosen to match the relay
  definition, see above);
* the parameter write port and its rate;
* the `init` pulse;
* the reset values (state -1, weight 0);
* registering the relay states before the sum, which gives the two-cycle
  sample time;
* building the gain as a select of +-W instead of a multiplier.

Weights of 0 are allowed for unused relays. The model itself asks only for
positive weights.

Outside this RTL: identifying the weights and thresholds from measurements,
including recursive online identification. Inverting the model for
control is also left out. A host must supply `alpha`, `beta`, `W` and `y0`.
