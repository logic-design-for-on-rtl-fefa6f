// pll_model_tb: self-checking testbench of the PLL behavioural model.
//
// Checks that both outputs stay low until LOCK_CYCLES reference edges have
// arrived, then that pll_clk_2 has a period of 2*PLL2_HALF_PS and pll_clk_1 of
// 4*PLL2_HALF_PS (150 MHz and 75 MHz by default), that every rising edge of
// pll_clk_1 coincides with one of pll_clk_2 (synchronous domains), and that the
// clocks keep running after ext_clk stops.
`timescale 1ps/1ps
module pll_model_tb;
  import cpf_pkg::*;

  localparam int unsigned EXT_HALF = 25000;   // 20 MHz reference
  localparam int unsigned LOCK     = 4;

  logic ext_clk = 1'b0;
  logic pll_clk_1, pll_clk_2;
  bit   ext_run = 1'b1;

  int checks = 0;
  int failures = 0;

  pll_model dut (.ext_clk(ext_clk), .pll_clk_1(pll_clk_1), .pll_clk_2(pll_clk_2));

  always #(EXT_HALF) if (ext_run) ext_clk = ~ext_clk;

  time r1[$];
  time r2[$];
  always @(posedge pll_clk_1) r1.push_back($time);
  always @(posedge pll_clk_2) r2.push_back($time);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    int j;
    // Before lock: LOCK-1 reference edges, outputs must be quiet.
    repeat (LOCK - 1) @(posedge ext_clk);
    #(EXT_HALF);
    check(r1.size() == 0 && r2.size() == 0, "no output before lock");
    @(posedge ext_clk);
    #(1000 * PLL2_HALF_PS);
    ext_run = 1'b0;                      // reference stops, PLL keeps running
    #(1000 * PLL2_HALF_PS);
    check(r2.size() >= 900 && r1.size() >= 450, "clocks running after lock");
    for (int i = 1; i < r2.size(); i++)
      check(r2[i] - r2[i-1] == time'(2 * PLL2_HALF_PS), "pll_clk_2 period");
    for (int i = 1; i < r1.size(); i++)
      check(r1[i] - r1[i-1] == time'(PLL1_HALF_PS * 2), "pll_clk_1 period");
    check(r2.size() / 2 == r1.size() || r2.size() / 2 == r1.size() - 1 ||
          r2.size() / 2 == r1.size() + 1, "pll_clk_1 at half the rate of pll_clk_2");
    j = 0;
    for (int i = 0; i < r1.size(); i++) begin
      while (j < r2.size() && r2[j] < r1[i]) j++;
      check(j < r2.size() && r2[j] == r1[i], "pll_clk_1 edge aligned to pll_clk_2 edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(4 * LOCK * EXT_HALF + 4000 * PLL2_HALF_PS);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
