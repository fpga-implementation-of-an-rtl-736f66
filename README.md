# Intelligent traffic light controller (I-TLC)

A four-way crossing joins a busy **main road** (east–west) and a quiet **side
road** (north–south). A fixed-cycle traffic light wastes the main road's time
by giving green to an empty side road. This controller gives the side road
green only when it is needed. A presence sensor `C` on the side road reports
waiting vehicles or pedestrians, and two timers bound every phase:

* The main road stays green until a **minimum green time** (the long interval,
  TL) has passed **and** something is waiting on the side road. With an empty
  side road, the main road stays green indefinitely.
* Each **amber** phase lasts the short interval, TS.
* The side road stays green only **while something is still there**, and for
  at most the long interval TL.

The whole controller is two small blocks: a four-state Moore state machine,
and an interval timer that the state machine restarts on every change of
state. This RTL follows the controller described in *"FPGA Implementation of
an Intelligent Traffic Light Controller (I-TLC) in Verilog"* (A. Banerjee).
That paper built it on a Xilinx Spartan-3E (xc3s500e-4-fg320). The SystemVerilog
here is an independent implementation. The sections below say where it
follows that description and where it makes its own choices.

## The state machine (`rtl/tlc_fsm.sv`)

| state | main road | side road | stays while      | leaves to | when        |
|-------|-----------|-----------|------------------|-----------|-------------|
| S0    | green     | red       | `!(TL && C)`     | S1        | `TL && C`   |
| S1    | amber     | red       | `!TS`            | S2        | `TS`        |
| S2    | red       | green     | `!TL && C`       | S3        | `TL \|\| !C` |
| S3    | red       | amber     | `!TS`            | S0        | `TS`        |

S0 is the reset state. The lamps are decoded from the state register alone,
which makes the controller a Moore machine. The lamp pattern is therefore
steady for a whole state and cannot glitch with the sensor.

**ST, the start-timer pulse.** Every state change must restart the timer,
because each state is timed from its own start. ST is a register. It is high
for exactly one clock cycle: the first cycle of each new state. No ST is
issued while a state holds. (Restarting the timer during a hold would stop
TL from ever expiring in S0.)

The state machine on its own has 3 flip-flops: 2 for the state and 1 for ST.
With its timer flags brought in from outside, it has 12 I/O signals: clk,
reset, C, TS, TL, six lamps and ST. A board build can drive TS and TL from
switches and C from a switch or button. The test `tb_tlc_state_walk` works this
way.

Assertions in the module check three rules every cycle:

* at least one road shows red;
* each road shows exactly one lamp;
* ST is only high right after a state change.

## The interval timer (`rtl/interval_timer.sv`)

A single up-counter serves both intervals. ST restarts it, and it saturates
at `TL_CYCLES-1`. Two magnitude comparators turn the count into two
**levels**:

* `TS`: the short interval has expired;
* `TL`: the long interval has expired.

Both are levels, not pulses. They stay high until the next ST. This matters:
in S0 the controller may have to wait for a car long after TL has expired.

The timing is the subtle part. Cycle-exact rules:

* In the cycle ST is high, both flags read 0. The counter still holds the
  previous state's count, and masking the flags stops that stale count from
  being seen.
* On the next edge the counter loads 1. In the *n*-th cycle of a state, the
  counter holds *n*−1.
* `TS` is high from the `TS_CYCLES`-th cycle of the state on. `TL` is high
  from the `TL_CYCLES`-th cycle on.
* Reset acts like ST. The first cycle after reset is released is cycle 1 of
  S0.

As a result, measured on the lamp outputs:

| phase                  | length in clock cycles                          |
|------------------------|-------------------------------------------------|
| main amber (S1)        | exactly `TS_CYCLES`                             |
| side amber (S3)        | exactly `TS_CYCLES`                             |
| side green (S2)        | 1 … `TL_CYCLES` (ends on the cycle after C falls, or at `TL_CYCLES`) |
| main green (S0)        | `TL_CYCLES`, or longer while the side road is empty |

The two parameters must satisfy `2 <= TS_CYCLES < TL_CYCLES`. An assertion
checks this at start-up. The counter is `$clog2(TL_CYCLES)` bits wide.

## Top level (`rtl/itlc_top.sv`)

```
 reset, clk, C ──► tlc_fsm ──► MG MY MR   SG SY SR   ST
                    ▲   │
                TS,TL   ST
                    │   ▼
                interval_timer
```

| port  | dir | meaning                                             |
|-------|-----|-----------------------------------------------------|
| clk   | in  | clock; all state changes on its rising edge         |
| reset | in  | asynchronous, active high; returns to S0 (main green) |
| C     | in  | side road occupied (vehicle or pedestrian)          |
| MG MY MR | out | main road green / amber / red                    |
| SG SY SR | out | side road green / amber / red                    |
| ST    | out | start-timer pulse, also used inside                 |

| parameter | default | meaning                                        |
|-----------|---------|------------------------------------------------|
| TS_CYCLES | 4       | amber time                                     |
| TL_CYCLES | 16      | minimum main-road green, maximum side-road green |

The outputs change one clock edge after the input that causes them. With the
defaults, the complete design has 7 flip-flops: 2 state bits, ST, and a 4-bit
counter.

**Setting real times.** The intervals are counted in clock cycles, and the
defaults are small so that simulations stay short. For times in seconds, set
each parameter to seconds × clock frequency. For example, a 30 s green on a
50 MHz clock is `TL_CYCLES = 1_500_000_000`, which gives a 31-bit counter. The
source description gives no interval lengths and no clock frequency, so no
value here comes from it.

Shared types are in `rtl/tlc_pkg.sv`:

* `state_e`: the four states, binary encoded;
* `lamp_t`: one road's packed `{g, y, r}` lamps.

## Where this RTL departs from, or adds to, the source description

* **Interval lengths** are not given in the source, and neither is the
  timer's inner structure. Only its role is given: a short and a long
  interval, restarted by ST. The counter-and-comparator timer and its
  cycle-exact timing are this design's. They match the block-level shape of
  the source's synthesized schematic: a register and an adder feeding two
  comparators.
* **TS and TL as levels.** The source calls them "pulses" in its signal list
  but uses them as "has expired" conditions in its state description. This
  design follows the state description.
* **ST only on state changes.** The source's state diagram also marks ST on
  the S0 hold loop. This design leaves it out, because it would stop the
  minimum green from ever ending.
* **S0 → S1 needs both TL and C.** One sentence of the source mentions TL
  alone. The condition here follows the state diagram and the rest of the
  text.
* **ST is an output.** The source's board description maps ST to a push
  button, which contradicts its own signal table. This design keeps ST as the
  output that the signal table lists.
* **Board build versus schematic.** The source's board build fed TS and TL
  from slide switches. Its synthesized schematic has the timer inside. The top
  level here follows the schematic. `tlc_fsm` on its own is the switch-driven
  board build, and it has the same flip-flop and I/O counts as that build: 3
  and 12.
* **One sensor input.** The intersection sketch in the source shows sensor
  boxes on both sides of the side road. They are treated as one combined
  signal `C`, as in its signal list.
* **Choices the source leaves open:**
  * reset is asynchronous and active high;
  * the state encoding is binary;
  * the lamps are active high.
* **Not in RTL.** The FPGA pin assignment is a constraints file, not logic.
  The source used button K17 for ST; switches N17, H18 and L14 for C, TS and
  TL; LEDs F9, E9, D11 for MR, MY, MG; and LEDs F11, E11, E12 for SR, SY, SG. The
  sensor itself is external hardware.

## Verification

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M` and has a cycle-count watchdog.

| testbench | what it does |
|-----------|--------------|
| `tb/tb_interval_timer.sv` | Runs random start pulses on two timers, one at the defaults and one at the smallest legal lengths (2, 3). A reference cycle counter predicts both flags every cycle, including the exact rising cycle, and the test also covers reset during an interval. |
| `tb/tb_tlc_fsm.sv` | Drives random C/TS/TL against a transition-table model. It checks the lamps and ST every cycle, requires all eight arcs of the state diagram to be taken, and ends with a reset from S2. |
| `tb/tb_tlc_state_walk.sv` | Directed walk through S0→S1→S2→S3→S0 twice, with hand-written expected lamps and ST. The first round ends side green because the side road empties, the second because TL expires with a car still waiting. |
| `tb/tb_itlc_top.sv` | End to end at the default parameters. C alternates between occupied and empty stretches of random length. A reference model checks every cycle, and the phase lengths are measured on the lamp outputs. The test fails unless each behaviour occurs at least once: main road held for an empty side road, a car waiting for the minimum green, S0→S1, side green cut short, side green ended at its maximum, and a reset in mid-round. |

To run one with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert rtl/tlc_pkg.sv rtl/interval_timer.sv \
    rtl/tlc_fsm.sv rtl/itlc_top.sv tb/tb_itlc_top.sv --top-module tb_itlc_top
./obj_dir/Vtb_itlc_top
```

Each testbench takes well under a second. The design is small enough that
the end-to-end test runs at the default parameters (about 10,000 clock cycles).
`tb_itlc_top` has copies of the default interval lengths as local parameters.
If you change the defaults in `itlc_top`, change those copies too.
