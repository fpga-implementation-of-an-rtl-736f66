// tb_interval_timer: self-checking test of the interval timer.
//
// Two timers are driven with the same random start pulses: one at the
// default interval lengths and one at the shortest legal ones (2 and 3
// cycles). A reference model counts, independently of the RTL, how many
// cycles have passed in the current interval (the cycle carrying ST is
// cycle 1, as is the first cycle after reset) and expects TS from cycle
// TS_CYCLES on and TL from cycle TL_CYCLES on. Long gaps between pulses make
// both flags saturate; short gaps test restarting before expiry. Every cycle
// is checked, and the exact cycle at which each flag first rises is counted.
module tb_interval_timer;

  localparam int unsigned TS_A = 4, TL_A = 16;   // the defaults
  localparam int unsigned TS_B = 2, TL_B = 3;    // shortest legal lengths

  logic clk = 1'b0;
  logic reset;
  logic st;
  logic ts_a, tl_a, ts_b, tl_b;

  int checks = 0, failures = 0;
  int age;               // reference: cycle number within the interval
  int ts_rise_ok = 0, tl_rise_ok = 0;

  interval_timer u_a (.clk, .reset, .st, .ts(ts_a), .tl(tl_a));
  interval_timer #(.TS_CYCLES(TS_B), .TL_CYCLES(TL_B))
    u_b (.clk, .reset, .st, .ts(ts_b), .tl(tl_b));

  always #5 clk = ~clk;

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b (age %0d, t=%0t)", what, got, exp, age, $time);
    end
  endtask

  // One cycle: apply st after the rising edge, check in the middle.
  task automatic cycle(input logic start);
    st  = start;
    age = start ? 1 : age + 1;
    #2;
    check("ts_a", ts_a, age >= TS_A);
    check("tl_a", tl_a, age >= TL_A);
    check("ts_b", ts_b, age >= TS_B);
    check("tl_b", tl_b, age >= TL_B);
    if (age == TS_A && ts_a) ts_rise_ok++;
    if (age == TL_A && tl_a) tl_rise_ok++;
    @(posedge clk); #1;
  endtask

  initial begin
    reset = 1'b1;
    st    = 1'b0;
    repeat (2) @(posedge clk);
    #1 reset = 1'b0;
    age = 0;                       // first cycle after reset is cycle 1
    repeat (TL_A + 5) cycle(1'b0); // expiry straight after reset
    for (int n = 0; n < 60; n++) begin
      int gap = $urandom_range(0, TL_A + 4);
      cycle(1'b1);
      repeat (gap) cycle(1'b0);
    end
    // Reset in the middle of an interval restarts it.
    repeat (3) cycle(1'b0);
    reset = 1'b1; #1;
    check("reset clears ts_a", ts_a, 1'b0);
    check("reset clears tl_b", tl_b, 1'b0);
    @(posedge clk); #1 reset = 1'b0;
    age = 0;
    repeat (TL_A + 2) cycle(1'b0);

    checks++;
    if (ts_rise_ok == 0 || tl_rise_ok == 0) begin
      failures++;
      $display("FAIL flags never observed rising at their exact cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
