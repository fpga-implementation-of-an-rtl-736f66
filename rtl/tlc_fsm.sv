// tlc_fsm: the four-state Moore controller of the intelligent traffic light.
//
// A main road (east-west, heavy traffic) crosses a side road (north-south,
// light traffic) that carries a presence sensor C. The main road keeps green
// until its minimum green time has run out AND something waits on the side
// road; the side road then keeps green only while something is still there
// and its maximum green time has not run out. The states, the lamps of each
// state and the transitions follow the paper:
//
//   S0 main green / side red  : to S1 when TL & C        (else stay)
//   S1 main amber / side red  : to S2 when TS            (else stay)
//   S2 main red   / side green: to S3 when TL | ~C       (else stay)
//   S3 main red   / side amber: to S0 when TS            (else stay)
//
// The lamps are decoded from the state register only (Moore outputs). Each
// state change restarts the interval timer: ST is a registered one-cycle
// pulse, high in the first cycle of every new state. Making ST a register,
// the binary state encoding and an asynchronous active-high reset into S0 are
// this design's choices.
//
// Interface: clk, reset, c (sensor), ts/tl (timer flags, levels) in;
// main_lamp/side_lamp (green, amber, red), st, and the state for observation
// out. Timing: a transition takes effect at the clock edge after its
// condition is seen, so lamps and st change one edge after the input.
module tlc_fsm
  import tlc_pkg::*;
(
  input  logic   clk,
  input  logic   reset,
  input  logic   c,
  input  logic   ts,
  input  logic   tl,
  output lamp_t  main_lamp,
  output lamp_t  side_lamp,
  output logic   st,
  output state_e state
);

  localparam lamp_t LAMP_GREEN = '{g: 1'b1, y: 1'b0, r: 1'b0};
  localparam lamp_t LAMP_AMBER = '{g: 1'b0, y: 1'b1, r: 1'b0};
  localparam lamp_t LAMP_RED   = '{g: 1'b0, y: 1'b0, r: 1'b1};

  state_e state_q, state_d;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S0: if (tl && c)  state_d = S1;
      S1: if (ts)       state_d = S2;
      S2: if (tl || !c) state_d = S3;
      S3: if (ts)       state_d = S0;
    endcase
  end

  always_ff @(posedge clk or posedge reset) begin
    if (reset) begin
      state_q <= S0;
      st      <= 1'b0;
    end else begin
      state_q <= state_d;
      st      <= (state_d != state_q);
    end
  end

  // Moore output decode: one lamp lit per road, from the state alone.
  always_comb begin
    unique case (state_q)
      S0: begin main_lamp = LAMP_GREEN; side_lamp = LAMP_RED;   end
      S1: begin main_lamp = LAMP_AMBER; side_lamp = LAMP_RED;   end
      S2: begin main_lamp = LAMP_RED;   side_lamp = LAMP_GREEN; end
      S3: begin main_lamp = LAMP_RED;   side_lamp = LAMP_AMBER; end
    endcase
  end

  assign state = state_q;

  // Safety: at least one road always shows red, and each road shows exactly
  // one lamp. ST is only ever high in the cycle after a state change.
  a_one_red:     assert property (@(posedge clk) main_lamp.r || side_lamp.r);
  a_main_onehot: assert property (@(posedge clk) $onehot(main_lamp));
  a_side_onehot: assert property (@(posedge clk) $onehot(side_lamp));
  a_st_on_change: assert property (@(posedge clk) st |-> (state_q != $past(state_q)));

endmodule
