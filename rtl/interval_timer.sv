// interval_timer: the short/long interval timer of the traffic light controller.
//
// The controller times its amber phases with a short interval (TS) and its
// green phases with a long interval (TL), both started by one start-timer
// pulse ST from the state machine; that split into TS, TL and ST follows the
// paper. How the intervals are measured is this design's choice: one
// saturating up-counter shared by both intervals, and two magnitude
// comparators, the shape the paper's RTL schematic shows for its timer
// (a counter register feeding comparators that produce TS and TL).
//
// Timing. ST is a one-cycle pulse in the first clock cycle of a new state.
// During that cycle both flags read 0, and the counter restarts at 1 on the
// following edge, so the count equals the number of whole cycles the current
// state has lasted. TS rises in the state's TS_CYCLES-th cycle, TL in its
// TL_CYCLES-th cycle; both then stay high (they are "expired" levels, not
// pulses) until the next ST. A state that leaves as soon as its flag rises
// therefore lasts exactly TS_CYCLES or TL_CYCLES clock cycles. Reset acts as
// a start: the cycle after reset is released counts as cycle 1.
//
// Interface: clk, reset (asynchronous, active high), st in; ts, tl out.
// The interval lengths are in clock cycles; the paper gives no values, so the
// defaults are small illustrative numbers. For seconds on a board, set them
// to seconds times the clock frequency.
module interval_timer #(
  parameter int unsigned TS_CYCLES = 4,   // short (amber) interval, cycles
  parameter int unsigned TL_CYCLES = 16   // long (green) interval, cycles
) (
  input  logic clk,
  input  logic reset,
  input  logic st,
  output logic ts,
  output logic tl
);

  localparam int unsigned W = (TL_CYCLES > 2) ? $clog2(TL_CYCLES) : 1;
  localparam logic [W-1:0] TS_LAST = W'(TS_CYCLES - 1);
  localparam logic [W-1:0] TL_LAST = W'(TL_CYCLES - 1);

  // Cycles elapsed in the current state, less one; saturates at TL_LAST.
  logic [W-1:0] value;

  always_ff @(posedge clk or posedge reset) begin
    if (reset)                value <= '0;
    else if (st)              value <= W'(1);
    else if (value != TL_LAST) value <= value + W'(1);
  end

  always_comb begin
    ts = !st && (value >= TS_LAST);
    tl = !st && (value >= TL_LAST);
  end

  initial begin
    assert (TS_CYCLES >= 2 && TL_CYCLES > TS_CYCLES)
      else $error("interval_timer: need 2 <= TS_CYCLES < TL_CYCLES");
  end

  // The long interval never ends before the short one.
  a_tl_implies_ts: assert property (@(posedge clk) tl |-> ts);

endmodule
