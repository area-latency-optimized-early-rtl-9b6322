# Early output dual-rail full adders and a relative-timed ripple carry adder

This is synthesizable SystemVerilog for a clockless (self-timed) adder in the
dual-rail, four-phase return-to-zero style, built around two early output full
adder cells:

* **AOPT** – an area optimized early output full adder: six AND-OR (AO22) gates,
  one OR gate and two Muller C-elements;
* **LOPT** – a latency optimized early output full adder: the same function,
  with the carry computed by an AO21 gate so that the carry chain is faster.

"Early output" means a cell may produce its outputs before all of its inputs
have arrived. Here the carry is produced early when both operand bits agree
(generate or kill), and both outputs return to the spacer as soon as *one*
operand returns to the spacer. Cascading such cells gives a ripple carry adder
(RCA) whose forward latency depends on the longest carry chain actually
exercised (m stages), and whose reset takes a constant single full adder delay
whatever its width, because every stage resets in parallel from its own
operands. The price is one timing assumption between neighbouring stages, which
is why the adder is called *relative-timed*. The adder is placed in the
standard asynchronous pipeline stage: C-element registers in front and behind,
and completion detectors that produce the acknowledge signals.

The design follows the circuit diagrams and text of Balasubramanian and
Yamashita's article on area/latency optimized early output asynchronous full
adders (SpringerPlus). The RTL and this description are an independent
rendering of it.

## Dual-rail data and the four-phase handshake

Every logical bit `D` travels on two wires, `D1` and `D0` (`dr_pkg::dr_t`,
fields `r1` and `r0`):

| `r1` `r0` | meaning |
|---|---|
| 1 0 | valid 1 |
| 0 1 | valid 0 |
| 0 0 | spacer (no data) |
| 1 1 | illegal |

A channel alternates valid word, spacer, valid word, spacer. The receiver
acknowledges a complete valid word by raising its acknowledge (ACKOUT) and a
complete spacer by lowering it. There is no request wire: the data themselves
say when they are complete, and a completion detector turns that into the
acknowledge.

## The two full adders

Both cells compute the standard dual-rail full adder, whose product terms are
mutually exclusive:

```
SUM1  = A0B0CIN1 + A0B1CIN0 + A1B0CIN0 + A1B1CIN1
SUM0  = A0B0CIN0 + A0B1CIN1 + A1B0CIN1 + A1B1CIN0
COUT1 = A0B1CIN1 + A1B0CIN1 + A1B1
COUT0 = A0B1CIN0 + A1B0CIN0 + A0B0
```

They factor it through two internal signals: `int1` (operands equal, i.e.
generate or kill) and `int2` (operands differ, i.e. propagate).

| node | `aopt_eo_fa` | `lopt_eo_fa` |
|---|---|---|
| `int1` | AO22: A1B1 + A0B0 | AND m1 = A1B1, AND m2 = A0B0, OR m1 + m2 |
| `int2` | AO22: A0B1 + A1B0 | AO22: A0B1 + A1B0 |
| `int3` (internal completion detector) | OR: int1 + int2 | OR: int1 + int2 |
| `nsum1` | AO22: int1·CIN1 + int2·CIN0 | same |
| `nsum0` | AO22: int1·CIN0 + int2·CIN1 | same |
| `COUT1` | AO22: int2·CIN1 + A1B1 | AO21: int2·CIN1 + m1 |
| `COUT0` | AO22: int2·CIN0 + A0B0 | AO21: int2·CIN0 + m2 |
| `SUM1`, `SUM0` | C-element of `nsum1`/`nsum0` with `int3` | same |

How the pieces behave:

* **Sum waits for everything.** `nsum` needs `int1` or `int2` (both operands)
  and the carry input; the C-element additionally waits for `int3`. The sum of
  each stage therefore indicates that all its inputs have arrived.
* **Carry can be early.** On generate (A1=B1=1) `COUT1` rises straight from the
  operands; on kill (A0=B0=1) `COUT0` does. Only on propagate
  does the carry wait for `CIN`.
* **Reset is early.** When A or B returns to the spacer, `int1`, `int2` and
  `int3` all fall, so `nsum` and `int3` are 0 and the C-elements reset the sum;
  the carry gates lose their operand terms and reset as well. None of this
  waits for the carry input.
* **A spacer on the carry input alone does not reset the sum.** `nsum` falls
  but `int3` is still 1, so the C-element holds the valid sum until an operand
  also returns to the spacer. (The source text speaks loosely of "any one
  input"; the circuit, and this RTL, behave as just described.)

The LOPT carry path from `CIN` to `COUT` crosses one AO21 gate instead of one
AO22 gate, which is where its speed advantage comes from; it pays with three
more simple gates.

## Why the ripple carry adder is relative-timed

`rt_rca` chains N cells (default N = 32): carry out of stage q is carry in of
stage q+1. With valid data the sum of stage q appears when its carry has
rippled up to it, so the forward latency is proportional to the longest
propagate chain m actually present in the operands. With spacer data every
stage resets from its own operands, all in parallel, so the reverse latency is
one cell delay, independent of N and m. Per data transaction:

| adder style | forward | reverse | cycle |
|---|---|---|---|
| strong indication | n·T | n·T | 2n·T |
| weak indication (basic) | m·T | m·T | 2m·T |
| weak indication (distributed/biased) | m·T | 2T | (m+2)·T |
| early output | m·T | 2T | (m+2)·T |
| this relative-timed RCA | m·T | T | (m+1)·T |

(T is one full adder delay.)

The catch is that nothing acknowledges the internal carries going back to the
spacer. Stage q+1 can reset its sum from its own operands while the carry from
stage q is still valid; if that carry then fell *after* the completion
detectors had already reported the whole spacer, the next valid word could
arrive while the old carry was still in flight (an unacknowledged transition,
or "orphan"). The design is correct only under this relative-timing
assumption:

> The sum of stage q+1 reaches the spacer no earlier than its carry input from
> stage q does.

The assumption concerns two neighbouring stages only and is independent of N.
With minimum-size cells of a 32/28 nm library the source estimates the margin
it needs as about 0.072 ns for the AOPT adder and 0.025 ns for the LOPT adder;
it is met by delay balancing or larger carry gates. **RTL cannot express or
check this.** The RTL is zero-delay; the assumption must be guaranteed at gate
level (cell choice, sizing and placement), and the netlist structure written
here must be preserved through synthesis for it to hold: a synthesis tool that
re-factors the logic or removes the C-element feedback destroys the
early-output and indication properties.

## The pipeline stage

`async_rca_system` puts the adder between two C-element registers:

```
 a_i,b_i,cin_i --> [dr_register W=2N+1] --+--> [rt_rca] --> [dr_register W=N+1] --+--> sum_o, cout_o
                         ^ ACKIN          |                       ^ ACKIN           |
                         |       [completion_detector] --> ack_o  +---- ~ack_i      |
                         |                                               [completion_detector]
                         +-------------------------- ~ ---------------------------- +
```

* `dr_register`: each rail is a C-element of the incoming rail and ACKIN.
  With ACKIN = 1 valid data pass and are then held; with ACKIN = 0 the spacer
  passes and is held. ACKIN of a register is the inverted ACKOUT of the stage
  after it.
* `completion_detector`: a 2-input OR per dual-rail signal (1 = valid, 0 =
  spacer) feeding a tree of 2-input C-elements (`c_tree`). Its output rises
  only when every signal is valid and falls only when every signal is a
  spacer. For 5 signals the tree is C(C(C(s0,s1), C(s2,s3)), s4); wider trees
  use the same pairing rule level by level, depth ⌈log2 W⌉.

Protocol at the ports:

1. With `ack_o` = 0, the previous stage drives a valid word on `a_i`, `b_i`,
   `cin_i`.
2. The input register passes it, `ack_o` rises. The adder computes; the output
   register captures the result (if `ack_i` = 0) and its completion detector
   lowers the input register's ACKIN.
3. The previous stage returns its inputs to the spacer, in any order and as
   slowly as it likes. The adder resets stage by stage as soon as a stage's
   operand goes; `ack_o` falls only when the last input is a spacer.
4. The next stage sees a complete valid `sum_o`/`cout_o`, raises `ack_i`, the
   output register passes the spacer, and the next stage lowers `ack_i`. Only
   then does the input register accept the next valid word: a slow consumer
   stalls the producer.

`rst` (active high) clears both registers to the spacer; the C-elements in the
adder cells and the completion detectors then settle to 0 by themselves.

## Parameters

| module | parameter | default | notes |
|---|---|---|---|
| `rt_rca`, `async_rca_system` | `N` | 32 | operand width, as in the source's evaluation |
| `rt_rca`, `async_rca_system` | `FA_KIND` | `FA_LOPT` | `FA_AOPT` selects the area optimized cell |
| `completion_detector`, `c_tree` | `W` | 65 / 5 | number of dual-rail signals watched |
| `dr_register` | `W` | 65 | number of dual-rail signals |

## Files

| file | contents |
|---|---|
| `rtl/dr_pkg.sv` | `dr_t`, `DR_SPACER`, `fa_kind_e`, encode/valid/spacer helpers |
| `rtl/c_element.sv` | 2-input C-element, Z = XY + (X+Y)Z, with clear |
| `rtl/aopt_eo_fa.sv`, `rtl/lopt_eo_fa.sv` | the two full adder cells |
| `rtl/rt_rca.sv` | N-bit relative-timed ripple carry adder |
| `rtl/c_tree.sv`, `rtl/completion_detector.sv` | completion detection |
| `rtl/dr_register.sv` | dual-rail C-element register |
| `rtl/async_rca_system.sv` | the pipeline stage (top) |
| `tb/tb_*.sv` | self-checking testbenches, one per module plus the ones below |

## Simulating

Every testbench is self-checking and ends by printing
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/dr_pkg.sv rtl/*.sv tb/tb_async_rca_system.sv \
    --top-module tb_async_rca_system
./obj_dir/Vtb_async_rca_system
```

Verilator reports UNOPTFLAT (circular logic) warnings: they are the C-element
feedback loops and the handshake ring, both intentional. Stimulus is applied
with `#` delays; all RTL is zero-delay, so one time unit is enough for
everything to settle.

| testbench | what it shows |
|---|---|
| `tb_c_element` | follow/hold rule and clear, directed and random |
| `tb_aopt_eo_fa`, `tb_lopt_eo_fa` | all 8 input combinations: correct sum/carry; early carry on generate/kill with `CIN` still a spacer; early reset from A or B alone; sum held when only `CIN` goes to spacer |
| `tb_rt_rca` | both cell kinds at N = 32, 1200 random + 66 directed vectors: exactly the outputs above the first generate/kill stage are valid while `cin` is a spacer; full result after `cin`; early reset of a random subset of stages; reset of every sum with all internal carries forced valid (parallel reset); carry chains of 1–4, 5–8, 9–16 and 17–32 stages all exercised |
| `tb_rca_fig7` | the two-stage worked example: 2 + 3 + 0 = 5, then partial return to zero (B of stage 1 and A of stage 0 only) resets both sums and the carry out |
| `tb_completion_detector` | W = 5 and W = 65: acknowledge changes exactly when the last signal arrives/leaves, in random orders |
| `tb_dr_register` | pass, hold and clear against a rail-level reference |
| `tb_async_rca_system` | whole stage at default size (N = 32, LOPT): 400 words with random producer/consumer timing, results compared with binary addition; counts generate/kill/propagate, chain-length bins, early resets seen inside the adder while `ack_o` is still high, producer stalls and consumer stalls, and fails if any never occurs |
| `tb_async_rca_system_aopt` | the same on the AOPT build |
| `tb_rca_latency` | a 32-stage adder assembled from the real cells with a delay T on every cell output (in the testbench): forward latency equals the carry-arrival model (m·T) for 333 vectors, reverse latency is exactly 1·T for every vector whatever m is, and during every reset no stage's sum reaches the spacer before its carry input |

## Departures and limits

* **Timing is not modelled in the RTL.** Gate delays, the relative-timing
  margin, cycle times in ns, area and power are properties of a gate-level
  implementation. The testbenches check the logical structure behind them
  (which outputs may be valid or must be spacers given which inputs are
  present), and `tb_rca_latency` adds one uniform delay per cell to count
  latencies in full adder delays. With a single delay per cell both cell kinds
  behave identically (mean forward latency 7.52 T over its vectors, reverse
  1 T); the AO21-versus-AO22 difference between them appears only with real
  gate delays.
* **Clear input.** The source describes the pipeline starting in the spacer
  state with ACKIN = 1 but not how it gets there; `rst` on the register
  C-elements is this design's addition. The cells' C-elements have the clear
  tied to 0.
* **Output register.** The source's evaluated system lists the input register,
  the adder and the completion detector; its stage diagram also shows the next
  stage register and its completion detector, which are included here so the
  top is a complete handshaking stage. That completion detector also watches
  the carry out.
* **Completion tree shape** for widths other than 5 is this design's pairing
  rule; the source only states that wide C-elements were decomposed safely into
  2-input ones.
* **Default cell.** `FA_KIND` defaults to LOPT; both cells are complete and
  tested.
* **Synthesis.** The code is synthesizable, but a generic synthesis flow will
  flag the C-element feedback as combinational loops and may restructure the
  AND-OR logic. A real implementation maps each assignment to the named cell
  (AO22, AO21, OR2, AND2, C-element) and keeps the hierarchy.
