// tb_tlc_state_walk: directed walk of the controller through its four
// states, in the way a bench or board demonstration drives it: the sensor C
// and the timer flags TS and TL are set by hand (here: by the test) rather
// than by the interval timer, so each step can be placed exactly.
//
// The walk visits S0 (main green, side red) with an empty side road and no
// timer expired, then holds S0 for each input combination that must not move
// it, enters S1 (main amber) when TL has expired and a car is present, S2
// (side green) when TS expires, holds S2 while a car is present and TL has
// not expired, leaves to S3 (side amber) when the side road empties, and
// returns to S0 when TS expires with TL also high. Every expected lamp
// pattern and ST value is written out by hand in the step list below.
module tb_tlc_state_walk;
  import tlc_pkg::*;

  logic clk = 1'b0;
  logic reset, c, ts, tl;
  lamp_t main_lamp, side_lamp;
  logic st;
  state_e state;

  int checks = 0, failures = 0;

  tlc_fsm dut (.clk, .reset, .c, .ts, .tl, .main_lamp, .side_lamp, .st, .state);

  always #5 clk = ~clk;

  // Apply {C,TS,TL} for one cycle, then after the edge expect the lamps
  // {MG,MY,MR,SG,SY,SR} and ST.
  task automatic step(input string what, input logic [2:0] c_ts_tl,
                      input logic [5:0] exp_lamps, input logic exp_st);
    {c, ts, tl} = c_ts_tl;
    @(posedge clk); #1;
    checks++;
    if ({main_lamp.g, main_lamp.y, main_lamp.r,
         side_lamp.g, side_lamp.y, side_lamp.r} !== exp_lamps || st !== exp_st) begin
      failures++;
      $display("FAIL %s: lamps %b%b%b %b%b%b st %0b, expected %b st %0b", what,
               main_lamp.g, main_lamp.y, main_lamp.r, side_lamp.g, side_lamp.y,
               side_lamp.r, st, exp_lamps, exp_st);
    end
  endtask

  initial begin
    reset = 1'b1; {c, ts, tl} = 3'b000;
    @(posedge clk); #1;
    checks++;
    if (!(main_lamp.g && side_lamp.r)) begin
      failures++;
      $display("FAIL reset: not main green / side red");
    end
    reset = 1'b0;
    //                                  C TS TL    MG MY MR SG SY SR  ST
    step("S0, nothing waiting",        3'b000,  6'b100_001, 1'b0);
    step("S0, TL expired, no car",     3'b001,  6'b100_001, 1'b0);
    step("S0, car, TL running",        3'b100,  6'b100_001, 1'b0);
    step("S0, TS only, car",           3'b110,  6'b100_001, 1'b0);
    step("S0 -> S1, car and TL",       3'b101,  6'b010_001, 1'b1);
    step("S1, TS running",             3'b101,  6'b010_001, 1'b0);
    step("S1, TS running, no car",     3'b000,  6'b010_001, 1'b0);
    step("S1 -> S2, TS",               3'b010,  6'b001_100, 1'b1);
    step("S2, car, TL running",        3'b110,  6'b001_100, 1'b0);
    step("S2, car, TL running",        3'b100,  6'b001_100, 1'b0);
    step("S2 -> S3, side road empty",  3'b010,  6'b001_010, 1'b1);
    step("S3, TS running",             3'b101,  6'b001_010, 1'b0);
    step("S3 -> S0, TS and TL",        3'b011,  6'b100_001, 1'b1);
    step("S0, TL expired, no car",     3'b011,  6'b100_001, 1'b0);
    // second round: side green ended by TL with a car still there
    step("S0 -> S1",                   3'b101,  6'b010_001, 1'b1);
    step("S1 -> S2",                   3'b110,  6'b001_100, 1'b1);
    step("S2 -> S3, TL with car",      3'b101,  6'b001_010, 1'b1);
    step("S3 -> S0",                   3'b110,  6'b100_001, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
