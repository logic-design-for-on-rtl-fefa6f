// cgc_tb: self-checking testbench of the clock gating cell.
//
// Runs clk with a 10 ns period and changes en three times per cycle: just after
// the rising edge, late in the high phase and in the low phase. The value of en
// at the end of each low phase is the reference for the following high phase:
// gclk must then be exactly clk, and low otherwise, and must not change while
// clk is high however en moves. Pulses on gclk are also counted against the
// number of enabled cycles.
`timescale 1ps/1ps
module cgc_tb;
  localparam int unsigned HALF   = 5000;
  localparam int unsigned CYCLES = 400;

  logic clk = 1'b0;
  logic en  = 1'b0;
  logic gclk;

  int checks = 0;
  int failures = 0;
  int gclk_pulses = 0;
  int exp_pulses = 0;

  cgc dut (.clk(clk), .en(en), .gclk(gclk));

  always @(posedge gclk) gclk_pulses++;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: gclk=%b expected %b", what, $time, got, exp);
    end
  endtask

  initial begin
    logic ref_en;
    #(HALF);                              // start in the low phase
    for (int i = 0; i < CYCLES; i++) begin
      // low phase: en settles, possibly with a late change
      en = 1'($urandom);
      #(HALF - 1500);
      if (i % 3 == 0) en = 1'($urandom);
      #1000;
      ref_en = en;
      clk = 1'b1;                         // rising edge
      if (ref_en) exp_pulses++;
      #500  check(gclk, ref_en, "start of high phase");
      en = ~en;                           // move en inside the high phase
      #1500 check(gclk, ref_en, "high phase after en change");
      en = 1'($urandom);
      #2000 check(gclk, ref_en, "late high phase");
      #1000 clk = 1'b0;                   // falling edge
      #500  check(gclk, 1'b0, "low phase");
    end
    checks++;
    if (gclk_pulses != exp_pulses) begin
      failures++;
      $display("FAIL pulse count %0d expected %0d", gclk_pulses, exp_pulses);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(4 * HALF * CYCLES);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
