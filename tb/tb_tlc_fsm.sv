// tb_tlc_fsm: self-checking test of the four-state traffic light controller.
//
// The sensor C and the timer flags TS and TL are driven directly with random
// values (as slide switches would drive them), biased so that every state is
// both held and left. A reference model, written as a plain transition table
// with the states numbered 0..3, predicts the next state; every cycle the
// six lamps are compared with the lamp pattern of the predicted state and ST
// with "the state has just changed". Each of the eight arcs of the state
// diagram (four holds, four moves) must be taken at least once, and a
// reset in mid-cycle must return the controller to main-green.
module tb_tlc_fsm;
  import tlc_pkg::*;

  logic clk = 1'b0;
  logic reset, c, ts, tl;
  lamp_t main_lamp, side_lamp;
  logic st;
  state_e state;

  int checks = 0, failures = 0;
  int ref_s, prev_s;                 // reference state, 0..3
  int arc_hits [8];                  // [2*s] hold in s, [2*s+1] leave s

  tlc_fsm dut (.clk, .reset, .c, .ts, .tl, .main_lamp, .side_lamp, .st, .state);

  always #5 clk = ~clk;

  function automatic int next_of(int s, logic cc, logic s_exp, logic l_exp);
    case (s)
      0: return (l_exp && cc) ? 1 : 0;
      1: return s_exp ? 2 : 1;
      2: return (l_exp || !cc) ? 3 : 2;
      default: return s_exp ? 0 : 3;
    endcase
  endfunction

  task automatic check_outputs(input logic exp_st);
    // {MG,MY,MR,SG,SY,SR} per reference state
    logic [5:0] exp_l;
    case (ref_s)
      0: exp_l = 6'b100_001;
      1: exp_l = 6'b010_001;
      2: exp_l = 6'b001_100;
      default: exp_l = 6'b001_010;
    endcase
    checks++;
    if ({main_lamp.g, main_lamp.y, main_lamp.r, side_lamp.g, side_lamp.y, side_lamp.r} !== exp_l) begin
      failures++;
      $display("FAIL lamps: got %b%b%b_%b%b%b expected %b (state %0d, t=%0t)",
               main_lamp.g, main_lamp.y, main_lamp.r, side_lamp.g, side_lamp.y,
               side_lamp.r, exp_l, ref_s, $time);
    end
    checks++;
    if (st !== exp_st) begin
      failures++;
      $display("FAIL st: got %0b expected %0b (t=%0t)", st, exp_st, $time);
    end
  endtask

  initial begin
    reset = 1'b1; c = 1'b0; ts = 1'b0; tl = 1'b0;
    repeat (2) @(posedge clk);
    #1 reset = 1'b0;
    ref_s = 0;
    check_outputs(1'b0);
    for (int n = 0; n < 2000; n++) begin
      // inputs for this cycle
      c  = ($urandom_range(0, 3) != 0);
      ts = ($urandom_range(0, 2) == 0);
      tl = ($urandom_range(0, 2) == 0);
      prev_s = ref_s;
      ref_s  = next_of(ref_s, c, ts, tl);
      arc_hits[2*prev_s + ((ref_s != prev_s) ? 1 : 0)]++;
      @(posedge clk); #1;
      check_outputs(ref_s != prev_s);
    end
    // Reset while in a non-initial state.
    while (ref_s != 2) begin
      c = 1'b1; ts = 1'b1; tl = 1'b1;
      if (ref_s == 2) break;
      prev_s = ref_s;
      ref_s  = next_of(ref_s, c, ts, tl);
      @(posedge clk); #1;
      check_outputs(ref_s != prev_s);
    end
    reset = 1'b1; #1;
    ref_s = 0;
    check_outputs(1'b0);
    @(posedge clk); #1 reset = 1'b0;

    foreach (arc_hits[i]) begin
      checks++;
      if (arc_hits[i] == 0) begin
        failures++;
        $display("FAIL arc %0d (%s state S%0d) never taken", i,
                 (i % 2) ? "leave" : "hold in", i / 2);
      end
    end
    $display("arcs taken (hold/leave S0..S3): %p", arc_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
