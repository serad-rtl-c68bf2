# SERAD: a soft-error-resilient bundled-data pipeline

A particle strike in combinational logic causes a single-event transient
(SET): a short wrong pulse on a wire. If a latch closes while that pulse is
at its input, the wrong value is stored. Synchronous fixes charge every
cycle for this. Triple modular redundancy triples the area. Glitch filters
add about twice the widest SET to the clock period.

SERAD is an asynchronous bundled-data pipeline that pays only when an SET
actually happens. Each stage has error detecting logic (EDL) on its latch
inputs. The EDL watches for any data transition while the latches are open
and for a short hold time after they close. If it sees one, the stage
controller opens and closes the latches again. That is a re-sample, and it
costs time only for that item in that stage. Without a transient the
pipeline runs at its normal speed.

Upsets inside the latches are handled by using DICE (dual interlocked
storage cell) latches. Transients in the controllers are handled by
duplicating each controller's logic and merging the two copies with guard
gates.

This repository holds SystemVerilog for the whole template. That is a
linear pipeline of SERAD stages, and every part of a stage: the duplicated
controller, the guard gates, the EDL, the latch bank and the delay lines.
It also holds a self-checking testbench for each part and two end-to-end
testbenches that inject SETs: one for a straight pipeline and one for a
pipeline closed into a ring. The combinational logic between stages
belongs to the user and is connected through ports.

## One stage

```
            L.req1/2 ──[ delta delay line, x2 ]──┐
            L.ack1/2 <───────────────────┐       v
                                   ┌─────┴─────────────┐   R.req1/2 ──>
                                   │ GDMR controller   │<── R.ack1/2
                                   │ (2 rails + guard) │
                                   └──┬─────────▲──▲───┘
                                   CLK│      Err│  │Corr
                                      ├────>┌───┴──┴───┐
   L.data ─>( comb. logic )──Data──┬──┼────>│   EDL    │
                                   │  v     └──────────┘
                                   └─>[ DICE latch bank ]──> R.data
```

* `serad_stage` puts the parts together. The left request comes in two
  copies (one per controller rail). It passes the *delta* delay line, so it
  arrives after the data has crossed the combinational logic (bundled data).
* `serad_ctrl_gdmr` makes the stage's local clock `CLK`. It holds `CLK`
  high for about *sigma*, then waits for the EDL's verdict.
* `serad_edl` answers on two rails. `Corr` means the data was stable and
  the stage can hand the item on. `Err` means a transition was seen and the
  stage must re-sample.
* `dice_latch` is the data latch bank. It is transparent while `CLK` is
  high.

The symbols used below:

| symbol | meaning | default |
|---|---|---|
| tau | widest SET to be tolerated | (sets sigma) |
| phi | minimum latch pulse width | (sets sigma) |
| sigma | max(phi, tau); `CLK` high time, from the done delay line | 100 ps |
| Delta | worst combinational delay plus one latch delay | (sets delta) |
| delta | Delta − sigma; request delay between stages | 300 ps |
| y | time to close, check and reopen a latch on an error | 90 ps here |

None of these numbers come from the original work, which gives only
relations between them. They are consistent with those relations, and all
of them are parameters.

## The controller

### Burst-mode behaviour

The controller is a two-phase machine. In the first half of each cycle it
waits for rising transitions on its inputs. In the second half it waits
for the same transitions falling. Each half runs this way:

| step | waits for | does |
|---|---|---|
| reset released | — | raises `L.ack` (ready for the first item) |
| 1 → 2 | `L.req`+ and `R.ack`+ (new item, successor free) | `CLK`+ (latches open) |
| 2 → 3 | `Corr`− (EDL has cleared its last verdict) | — |
| 3 → 4 | `done`+ (`CLK` delayed by sigma) | `CLK`− (latches close) |
| 4 → 5 | `done`− and `Err`+ | `CLK`+ (re-sample) |
| 5 → 3 | `Err`− | — |
| 4 → 6 | `done`− and `Corr`+ | `L.ack`−, `R.req`+ |

In the second half, states 6 to 10 repeat this with every handshake edge
inverted. It starts with `L.req`− `R.ack`− / `CLK`+ and ends with
`L.ack`+ `R.req`−.

Because the handshake is two-phase, an item is handed on by toggling a
request, and it is taken when the acknowledge becomes the complement of
that request. `R.req` = phase, and `L.ack` = not phase.

A *token* controller (`TOKEN = 1`) starts as if it had just finished a
first half: `R.req` is high and `L.ack` low after reset. It therefore
holds one initial item, which a pipeline closed into a ring needs to avoid
deadlock. Before its first `CLK` it also waits until `R.ack` has been high
once. Without that wait it could fire before its successor has left reset.
This wait is this design's own addition.

In a ring, one token stage puts *two* items in circulation. Its `L.ack`
starts low while its predecessor's `R.req` is also low. As soon as its
successor has taken the token, the token stage therefore sees a request
and takes in its predecessor's reset-time latch content as a second item.
This is harmless and deterministic. It does mean that, in a ring, the
latches in front of a token stage must also hold a meaningful value at
reset.

### Next-state logic of one rail

`serad_ctrl_rail` is combinational next-state logic plus three small
state latches. It does not store the outputs itself. The guarded `CLK` and
`L.ack` are fed back as `clk_fb` and `lack_fb`. The state bits are:

* `ph` is the current half. `R.req` = `ph`, `L.ack` = `~ph`, and both are
  gated by `rst_n`.
* `z` is loaded with `~ph` while `done` is high. `pending = z ^ ph` means
  "latches have closed in this half and the rail is waiting for
  `Err`/`Corr`".
* `armed` is used only by token controllers (see above).

```
go   = (lack_fb == ~ph) & armed & (ph ? ~L.req & ~R.ack : L.req & R.ack)
CLK' = rst_n & (go & ~pending & ~done  |  clk_fb & ~done  |  Err & pending & ~done)
ph  <= z       when pending & Corr & ~clk_fb & ~done
z   <= ~ph     when done
```

The term `lack_fb == ~ph` stops a rail from opening the latches for a new
item before the guarded `L.ack` shows that the previous handshake really
happened. Without it, one rail could run ahead of its twin and the guard
gates.

The original work prints a set of hazard-free sum-of-products equations
for this rail, with one extra state variable `z`. Checked by hand against
its own state graph, they do not work. Whenever `Corr` is high, with
`done` and `Err` low, every stable state of those equations has
`R.req` = 1 and `L.ack` = 0, whatever `L.req` and `R.ack` are. This was
checked over all input values. `Corr` is high at the end of every half, so
the handshake outputs would never toggle. The logic
above was derived here from the state graph instead. It is behaviourally
equivalent to that graph, but it is not a gate-level hazard-free
realisation. Building one (for example with a burst-mode synthesis tool)
is the obvious next step before silicon.

### Duplication and guard gates

`serad_ctrl_gdmr` holds two rails:

* rail 1 reads `L.req1`, `R.ack1` and `done1`;
* rail 2 reads `L.req2`, `R.ack2` and `done2`;
* both read `Err`, `Corr`, `rst_n` and the fed-back `CLK` and `L.ack`.

Three `guard_gate`s merge the rail outputs into `CLK`, `L.ack` and `R.req`.
The guarded `L.ack` drives both `L.ack1` and `L.ack2`, and the same holds
for `R.req`.

A guard gate is a two-input C-element. Its output follows the inputs when
they agree and holds when they differ. A transient inside one rail, or on
one rail's inputs, therefore never reaches an output. In silicon the guard
gates are also sized so that a strike on their own output node dies out.
That is an electrical property and is not in the RTL. `done1` and `done2`
come from `CLK` through two asymmetric delay lines: slow rise (sigma),
fast fall.

## Error detecting logic

For every data bit, `serad_edl` has:

* a **transition detector**: the bit XORed with a copy delayed by
  `DP`. It gives a pulse `X` on every edge of the data.
* an **asymmetric C-element** (`c_element_asym`). `Y` is its symmetric
  input, `X` the input that counts only for rising, and `Sample_bar` the
  input that counts only for falling. It rises when `Y` and `X` are high
  and falls when `Y` and `Sample_bar` are low.

For the whole stage, there is:

* `Y`, which is `CLK` through a compensation delay. The rise is delayed by
  `COMP_R` = XOR delay + `X` pulse width. The fall is delayed by `COMP_F` =
  `COMP_R` + latch hold time. `Y` high is therefore the *SET filtering
  window*: the latch's open phase plus its hold time, shifted to line up
  with `X`.
* an OR of all C-elements.
* a **Q-flop** (`q_flop`) clocked by `Sample`. `Sample` is `Y` inverted and
  delayed by `SU`, so the Q-flop samples only after the window has closed
  and the OR has settled. It raises `Err` if the OR is 1 and `Corr`
  otherwise. It clears both when `Sample` falls, which happens when `CLK`
  rises again. `rst_n` also clears both, so that neither is high before
  the first `CLK` pulse; this reset is an addition of this design.
* `Sample_bar`, which is `Sample` inverted and delayed by `H`. It clears
  the C-elements only after the Q-flop has sampled.

Any data edge inside the window, including one that ends after the latch
has closed, ends in `Err` and a re-sample. A transient inside the EDL can
only cause an unnecessary re-sample, never wrong data. The one part that
must be hardened is the Q-flop, whose outputs must never both be high. The
real Q-flop also holds both outputs at 0 until any metastability inside
it has resolved. A two-state simulator cannot show metastability, so the
model has only the logic function.

Timing with the defaults:

* `Err`/`Corr` appear `COMP_F + SU + QPD` = 80 ps after `CLK` falls;
* they clear `COMP_R + SU + QPD` = 70 ps after `CLK` rises.

## Pipeline timing

With the default parameters:

* **`CLK` high time** = sigma + guard delay = 110 ps.
* **Error-free hand-over.** `CLK` falls. `Corr` follows 80 ps later. The
  controller toggles `R.req` 10 ps after that. The next stage's request
  has gone through delta (300 ps), and its guard adds 10 ps. The next stage
  therefore opens 400 ps after this one closed. The 100 ps above delta is
  the control overhead of the non-overlap bound, which is the sum of the
  compensation, setup, Q-flop and control delays.
* **Re-sample.** After a transient, the latches stay closed for exactly
  90 ps. This is y: `Err` comes 80 ps after `CLK` falls, plus one guard
  delay. Then they open for another 110 ps. From the first opening to the
  last close takes 2·(sigma + guard delay) + y = 310 ps. The successor
  opens delta + overhead after the *last* close, so only that item is
  delayed, by sigma + guard delay + y = 200 ps.
* **Timing rules the parameters must keep.**
  * `Err`/`Corr` must clear before `done` rises (sigma > `COMP_R + SU +
    QPD`). `serad_stage` asserts this.
  * `done` must fall before `Err`/`Corr` arrive.
  * The user's logic delay from a latch output to the next stage's data
    must be below delta + sigma.

## Files

| file | contents |
|---|---|
| `rtl/serad_pkg.sv` | `dual_t` (two copies of a handshake wire) and the default delays |
| `rtl/serad_pipeline.sv` | top: `N_STAGES` stages in a row; the user's logic connects through `stage_d`/`stage_q` |
| `rtl/serad_stage.sv` | one stage; asserts the Err/Corr rules |
| `rtl/serad_ctrl_gdmr.sv` | duplicated controller with guard gates and done delays |
| `rtl/serad_ctrl_rail.sv` | next-state logic of one controller rail |
| `rtl/guard_gate.sv` | two-input C-element guard gate with output delay |
| `rtl/serad_edl.sv` | error detecting logic |
| `rtl/c_element_asym.sv` | asymmetric C-element |
| `rtl/q_flop.sv` | dual-rail Err/Corr sampler |
| `rtl/dice_latch.sv` | latch bank (logic function of DICE latches) |
| `rtl/delay_line.sv`, `rtl/asym_delay.sv` | behavioural delay models |
| `tb/tb_*.sv` | one self-checking testbench per module |

The delay lines are behavioural models. They are inertial delays that
exist only in simulation; in silicon they are chains of gates. Everything
else is ordinary RTL. Latches (`always_latch`) and an edge-clocked Q-flop
hold the state of the asynchronous circuits, so synthesis reports latches
by design. A synthesis tool drops the `#` delays, and the timing of a real
implementation depends on the delay lines placed in layout.

## Top-level interface

`serad_pipeline` (parameters `N_STAGES` = 4, `WIDTH` = 32, `DELTA`,
`SIGMA`, `TOKEN_MASK`):

* `l_req`/`l_ack` connect to the producer and `r_req`/`r_ack` to the
  consumer. All four are `dual_t`; drive both copies alike.
* To offer an item, the producer sets its data and toggles `l_req`. It may
  offer the next item once `l_ack` is the complement of `l_req`.
* The consumer sees an item on each toggle of `r_req`, reads
  `stage_q[N_STAGES-1]`, and answers by setting `r_ack` to the complement
  of `r_req`. `r_ack` is 1 out of reset.
* `stage_d[i]` is the output of the user's logic feeding stage *i*.
  `stage_d[0]` is computed from the producer's data. `stage_q[i]` is the
  latch output of stage *i*.
* `stage_clk`, `stage_err` and `stage_corr` are brought out for
  observation.
* `rst_n` is active low. Hold it for longer than the longest delay line
  (delta) so that the delay models start from known values.

## Simulating

Verilator 5 with timing support:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/serad_pkg.sv \
          tb/tb_serad_pipeline.sv --top-module tb_serad_pipeline -o sim
./obj_dir/sim
```

`-Wno-fatal` is needed because Verilator reports the controllers'
intended asynchronous feedback loops (`UNOPTFLAT`) and the latch models
(`NOLATCH`) as warnings. They are expected.

Any other testbench works the same way with its name swapped in. Each
prints `TB_RESULT checks=N failures=M`.

* **`tb_serad_pipeline`** runs the four-stage, 32-bit pipeline at its
  default parameters.
  * It pushes 24 random words through logic modelled as
    f_i(x) = 3x + i + 1 with a 150 ps delay. A consumer with random
    response times checks every word.
  * It injects a single SET into stage 1, two SETs in consecutive openings
    of stage 2, an SET on the rail-1 copy of `R.ack`, and a forced pulse on
    rail 1's internal `CLK` node in stage 3. It also forces a pulse on
    stage 3's OR tree while the Q-flop samples. That is a false error: the
    stage re-samples data that was already right.
  * It checks the data, the number of `CLK` pulses and `Err`s per stage,
    every `CLK` high time, and that no stage ever opens less than delta
    after its predecessor closed. For every re-sample it checks the
    90 ps gap y and the 310 ps window from first opening to last close. It also checks that every injected
    mechanism happened.
  * It runs in well under a second.
* **`tb_serad_pipeline_ring`** closes the same pipeline into a ring, with
  a token controller in stage 0. It predicts every capture from the latch
  contents at reset. It checks that the ring keeps moving (20 captures
  per stage) and that one SET in stage 2 costs a re-sample and no data.
* **`tb_serad_stage`**: a single stage. It uses transients both inside the
  open phase and straddling the closing edge; in the second case the
  latch first captures a wrong value and must correct it.
* **`tb_serad_ctrl_gdmr`**: the controller alone, with a model of the EDL.
  It checks the handshake, re-sampling and the two controller SET cases.
* **`tb_serad_ctrl_rail`**: a single rail. It checks both halves of the
  handshake, re-sampling, and the token variant.
* **`tb_serad_edl`**: the EDL alone. Data can be stable, glitch while the
  latch is open, change in the hold part of the window, or change after
  the window. It also checks the output timing.
* The remaining testbenches check the primitives one by one.

## Where this design departs from the original

* **Controller logic.** Each rail is written from the burst-mode state
  graph, not from the published equations, which do not toggle the
  handshake (see above). It is not a hazard-free gate netlist.
* **Delays.** The original gives no delay values. sigma = 100 ps,
  delta = 300 ps and every EDL and controller delay were picked here to
  meet the stated timing rules. Change them together: the timing rules
  above say which must stay ordered.
* **delta placement.** The delta delay lines sit on `L.req1`/`L.req2` in
  `serad_stage`, in front of the controller. The original draws them
  inside the controller symbol. The behaviour is the same.
* **Resets.** The Q-flop's `rst_n` clear, and the token controller's wait
  for `R.ack` after reset, are additions. The latches and the EDL delay
  lines have no reset.
* **Token stages in a ring** admit two items, as described above.

## What is not modelled

These parts have no RTL here:

* transistor sizing (guard gates, Q-flop);
* the upset immunity of DICE cells;
* metastability resolution in the Q-flop;
* the analog shape of SETs.

In the testbenches, SETs are logic pulses of 25–50 ps that are XORed onto
data wires or forced onto controller nodes.

The combinational logic is the user's. The original evaluation used a
three-stage MIPS processor converted to this template by a CAD flow. That
processor and that flow are not part of this code.
