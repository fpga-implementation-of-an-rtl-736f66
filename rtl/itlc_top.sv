// itlc_top: the complete intelligent traffic light controller (I-TLC).
//
// Two blocks, wired as in the paper's RTL schematic: the interval timer
// produces the short (TS) and long (TL) expiry flags, and the four-state
// controller turns those flags and the side-road sensor C into the six lamp
// outputs and the start-timer pulse ST, which loops back to restart the
// timer on every state change.
//
//   reset, clk, C --> [ tlc_fsm ] --> MG MY MR / SG SY SR, ST
//                        ^   |
//                   TS,TL|   |ST
//                     [ interval_timer ]
//
// The result: main road green for at least TL_CYCLES, then for as long as
// the side road is empty; amber phases of exactly TS_CYCLES; side road green
// while occupied, for at most TL_CYCLES. The port names follow the paper's
// signal tables; ST is also brought out, as the paper lists it as an output.
// Outputs change one clock edge after the input that causes them. Reset is
// asynchronous and active high. Interval lengths are in clock cycles; the
// paper gives no values, the defaults are illustrative.
module itlc_top
  import tlc_pkg::*;
#(
  parameter int unsigned TS_CYCLES = 4,   // amber time, clock cycles
  parameter int unsigned TL_CYCLES = 16   // min main green / max side green
) (
  input  logic clk,
  input  logic reset,
  input  logic C,     // side-road sensor: vehicle or pedestrian present
  output logic MG,
  output logic MY,
  output logic MR,
  output logic SG,
  output logic SY,
  output logic SR,
  output logic ST
);

  logic   ts, tl, st;
  lamp_t  main_lamp, side_lamp;
  state_e state;

  interval_timer #(
    .TS_CYCLES(TS_CYCLES),
    .TL_CYCLES(TL_CYCLES)
  ) u_timer (
    .clk   (clk),
    .reset (reset),
    .st    (st),
    .ts    (ts),
    .tl    (tl)
  );

  tlc_fsm u_fsm (
    .clk       (clk),
    .reset     (reset),
    .c         (C),
    .ts        (ts),
    .tl        (tl),
    .main_lamp (main_lamp),
    .side_lamp (side_lamp),
    .st        (st),
    .state     (state)
  );

  assign {MG, MY, MR} = {main_lamp.g, main_lamp.y, main_lamp.r};
  assign {SG, SY, SR} = {side_lamp.g, side_lamp.y, side_lamp.r};
  assign ST = st;

  // The state is only observed inside the controller.
  logic unused_state;
  assign unused_state = ^state;

endmodule
