// tb_itlc_top: end-to-end test of the complete controller at its default
// parameters (no parameter override), so it is also the full-size test.
//
// The side-road sensor C is driven as a random sequence of occupied and
// empty stretches of random length. A cycle-level reference model, written
// independently of the RTL, tracks the state and how many cycles it has
// lasted, derives the timer flags from that count and applies the
// transition table; every cycle the six lamps and ST are compared with it.
// On top of that the lamp outputs themselves are timed: each amber phase
// must last exactly TS_CYCLES, each side-road green at most TL_CYCLES, each
// main-road green at least TL_CYCLES.
//
// Each behaviour the controller has must occur at least once, or the test
// fails: main road held green past TL because the side road is empty; a car
// waiting while the minimum main green runs out; the change S0->S1; side
// green cut short because the side road emptied; side green ended by its
// maximum time with cars still waiting; a reset in mid-cycle.
module tb_itlc_top;

  // Must equal itlc_top's defaults.
  localparam int TS = 4;
  localparam int TL = 16;

  logic clk = 1'b0;
  logic reset, C;
  logic MG, MY, MR, SG, SY, SR, ST;

  itlc_top dut (.clk, .reset, .C, .MG, .MY, .MR, .SG, .SY, .SR, .ST);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int ref_s, age;
  bit first_after_reset;          // no ST in the first cycle after reset
  int run_my = 0, run_sy = 0, run_sg = 0, run_mg = 0;

  // Behaviour counters.
  int n_hold_empty = 0;    // S0, TL expired, C=0: main stays green
  int n_wait_min   = 0;    // S0, C=1, TL not expired: car waits
  int n_s0_to_s1   = 0;
  int n_side_empty = 0;    // S2 left because C=0 before TL
  int n_side_max   = 0;    // S2 left because TL expired with C=1
  int n_reset      = 0;
  int n_cycles     = 0;    // full S0..S3 rounds

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s (t=%0t)", msg, $time);
  endtask

  task automatic check_cycle();
    logic [5:0] exp_l;
    case (ref_s)
      0: exp_l = 6'b100_001;
      1: exp_l = 6'b010_001;
      2: exp_l = 6'b001_100;
      default: exp_l = 6'b001_010;
    endcase
    checks++;
    if ({MG, MY, MR, SG, SY, SR} !== exp_l)
      fail($sformatf("lamps %b expected %b in S%0d age %0d",
                     {MG, MY, MR, SG, SY, SR}, exp_l, ref_s, age));
    checks++;
    if (ST !== (age == 1 && !first_after_reset))
      fail($sformatf("ST=%0b in S%0d age %0d", ST, ref_s, age));
  endtask

  // Lamp phase lengths measured on the outputs.
  always @(posedge clk) if (!reset) begin
    if (MY) run_my++; else if (run_my != 0) begin
      checks++; if (run_my != TS) fail($sformatf("main amber lasted %0d", run_my));
      run_my = 0;
    end
    if (SY) run_sy++; else if (run_sy != 0) begin
      checks++; if (run_sy != TS) fail($sformatf("side amber lasted %0d", run_sy));
      run_sy = 0;
    end
    if (SG) run_sg++; else if (run_sg != 0) begin
      checks++; if (run_sg > TL) fail($sformatf("side green lasted %0d", run_sg));
      run_sg = 0;
    end
    if (MG) run_mg++; else if (run_mg != 0) begin
      checks++; if (run_mg < TL) fail($sformatf("main green lasted only %0d", run_mg));
      run_mg = 0;
    end
  end

  // One clock cycle with sensor value cv.
  task automatic step(input logic cv);
    logic tsx, tlx;
    int nxt;
    C = cv;
    #1;
    check_cycle();
    tsx = (age >= TS);
    tlx = (age >= TL);
    case (ref_s)
      0: nxt = (tlx && cv) ? 1 : 0;
      1: nxt = tsx ? 2 : 1;
      2: nxt = (tlx || !cv) ? 3 : 2;
      default: nxt = tsx ? 0 : 3;
    endcase
    if (ref_s == 0 && nxt == 0 && tlx && !cv) n_hold_empty++;
    if (ref_s == 0 && cv && !tlx)             n_wait_min++;
    if (ref_s == 0 && nxt == 1)               n_s0_to_s1++;
    if (ref_s == 2 && nxt == 3 && !tlx)       n_side_empty++;
    if (ref_s == 2 && nxt == 3 && tlx && cv)  n_side_max++;
    if (ref_s == 3 && nxt == 0)               n_cycles++;
    first_after_reset = 1'b0;
    if (nxt != ref_s) age = 1; else age++;
    ref_s = nxt;
    @(posedge clk); #1;
  endtask

  task automatic do_reset();
    reset = 1'b1;
    @(posedge clk); @(posedge clk); #1;
    reset = 1'b0;
    ref_s = 0; age = 1; first_after_reset = 1'b1;
    run_my = 0; run_sy = 0; run_sg = 0; run_mg = 0;
  endtask

  initial begin
    C = 1'b0;
    do_reset();
    for (int seg = 0; seg < 400; seg++) begin
      automatic logic cv = seg[0];    // alternate empty / occupied
      automatic int len = $urandom_range(1, 3 * TL);
      repeat (len) step(cv);
      if (seg == 200) begin           // reset in the middle of a round
        while (ref_s != 2) step(1'b1);
        repeat (2) step(1'b1);
        do_reset();
        checks++;
        if (!(MG && SR)) fail("reset did not return to main green");
        n_reset++;
      end
    end

    checks += 6;
    if (n_hold_empty == 0) fail("main road never held green for an empty side road");
    if (n_wait_min   == 0) fail("no car ever waited for the minimum main green");
    if (n_s0_to_s1   == 0) fail("S0->S1 never happened");
    if (n_side_empty == 0) fail("side green never cut short by an empty side road");
    if (n_side_max   == 0) fail("side green never ended by its maximum time");
    if (n_reset      == 0) fail("no reset in mid-round");
    $display("rounds=%0d hold_empty=%0d wait_min=%0d s0_to_s1=%0d side_empty=%0d side_max=%0d resets=%0d",
             n_cycles, n_hold_empty, n_wait_min, n_s0_to_s1, n_side_empty, n_side_max, n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
