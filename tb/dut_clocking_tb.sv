// dut_clocking_tb: end-to-end test of the two-domain test clock generation.
//
// Each clock domain is represented here by a 16-bit scan chain with a next-state
// function (domain 1: an LFSR step, domain 2: add 3), clocked by clk_1 and
// clk_2. The testbench applies a launch-off-capture delay test the way a tester
// would:
//  * shift: scan_en = 1, 16 slow scan_clk cycles load a random initial vector
//    into each chain and unload the previous response;
//  * launch/capture: scan_clk stops, scan_en drops, one scan_clk pulse triggers
//    both filters, then scan_en returns to 1;
//  * the response unloaded in the next shift must be f(f(v)): the launch pulse
//    applies f once and the capture pulse once more.
// It also checks that each domain received exactly two pulses per capture, at
// its own PLL period (13.332 ns and 6.666 ns), and finally runs functional mode
// (func_mode = 1), where each domain must see every pulse of its PLL clock and
// its chain must advance by one step per pulse. Each mechanism (shift, launch/
// capture pair per domain, re-arm for a following pattern, functional mode) is
// counted and must have occurred. The top runs with its default parameters.
`timescale 1ps/1ps
module dut_clocking_tb;
  import cpf_pkg::*;

  localparam int unsigned EXT_HALF  = 25000;   // 20 MHz reference clock
  localparam int unsigned SCAN_HALF = 50000;   // 10 MHz shift clock
  localparam int unsigned N         = 16;      // chain length per domain
  localparam int unsigned PATTERNS  = 6;

  logic ext_clk   = 1'b0;
  logic scan_en   = 1'b1;
  logic scan_clk  = 1'b0;
  logic func_mode = 1'b0;
  logic clk_1, clk_2;

  int checks = 0;
  int failures = 0;

  dut_clocking dut (
    .ext_clk  (ext_clk),
    .scan_en  (scan_en),
    .scan_clk (scan_clk),
    .func_mode(func_mode),
    .clk_1    (clk_1),
    .clk_2    (clk_2)
  );

  always #(EXT_HALF) ext_clk = ~ext_clk;

  // ---- Clock domain models: scan chains with a next-state function ----
  function automatic logic [N-1:0] f1(input logic [N-1:0] q);
    return {q[N-2:0], q[15] ^ q[13] ^ q[12] ^ q[10]};
  endfunction
  function automatic logic [N-1:0] f2(input logic [N-1:0] q);
    return q + 16'd3;
  endfunction

  logic [N-1:0] chain1, chain2;
  logic         si1 = 1'b0, si2 = 1'b0;

  always_ff @(posedge clk_1) chain1 <= scan_en ? {chain1[N-2:0], si1} : f1(chain1);
  always_ff @(posedge clk_2) chain2 <= scan_en ? {chain2[N-2:0], si2} : f2(chain2);

  // ---- Edge logs and counters ----
  time t1[$];
  time t2[$];
  int  n1 = 0, n2 = 0;
  always @(posedge clk_1) begin n1++; t1.push_back($time); end
  always @(posedge clk_2) begin n2++; t2.push_back($time); end

  int cnt_shift = 0, cnt_pair1 = 0, cnt_pair2 = 0, cnt_rearm = 0, cnt_func = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Shift N bits in while the previous contents come out of the chain ends.
  task automatic shift(input logic [N-1:0] in1, input logic [N-1:0] in2,
                       output logic [N-1:0] out1, output logic [N-1:0] out2);
    for (int i = N - 1; i >= 0; i--) begin
      si1 = in1[i];
      si2 = in2[i];
      out1[i] = chain1[N-1];
      out2[i] = chain2[N-1];
      #(SCAN_HALF / 2);
      scan_clk = 1'b1;
      #(SCAN_HALF);
      scan_clk = 1'b0;
      #(SCAN_HALF / 2);
      cnt_shift++;
    end
  endtask

  task automatic launch_capture();
    #(SCAN_HALF);
    scan_en = 1'b0;
    #(2 * SCAN_HALF);
    t1.delete();
    t2.delete();
    scan_clk = 1'b1;                       // the single trigger pulse
    #(SCAN_HALF);
    scan_clk = 1'b0;
    #(4 * SCAN_HALF);
    check(t1.size() == N_PULSES, $sformatf("domain 1: %0d pulses (got %0d)", N_PULSES, t1.size()));
    check(t2.size() == N_PULSES, $sformatf("domain 2: %0d pulses (got %0d)", N_PULSES, t2.size()));
    if (t1.size() == 2) begin
      check(t1[1] - t1[0] == time'(2 * PLL1_HALF_PS), "domain 1 launch-capture at 75 MHz period");
      cnt_pair1++;
    end
    if (t2.size() == 2) begin
      check(t2[1] - t2[0] == time'(2 * PLL2_HALF_PS), "domain 2 launch-capture at 150 MHz period");
      cnt_pair2++;
    end
    scan_en = 1'b1;
    #(2 * SCAN_HALF);
  endtask

  initial begin
    logic [N-1:0] v1, v2, o1, o2, e1, e2;
    logic [N-1:0] s1, s2;
    int b1, b2, exp1, exp2;
    // PLL lock and filter flush: scan_en = 1 while shifting a first vector.
    #(12 * EXT_HALF);
    v1 = 16'($urandom);
    v2 = 16'($urandom);
    shift(v1, v2, o1, o2);
    for (int p = 0; p < PATTERNS; p++) begin
      check(chain1 == v1 && chain2 == v2, "initial vector loaded");
      launch_capture();
      e1 = f1(f1(v1));
      e2 = f2(f2(v2));
      if (p > 0) cnt_rearm++;
      v1 = 16'($urandom);
      v2 = 16'($urandom);
      shift(v1, v2, o1, o2);
      check(o1 == e1, $sformatf("domain 1 response %h expected %h", o1, e1));
      check(o2 == e2, $sformatf("domain 2 response %h expected %h", o2, e2));
    end
    // Functional mode: both PLL clocks pass through.
    s1 = chain1;
    s2 = chain2;
    b1 = n1; b2 = n2;
    scan_en = 1'b0;
    func_mode = 1'b1;
    #(4000000);
    func_mode = 1'b0;
    // 4 us at the PLL periods, give or take one pulse at each end of the window
    exp1 = 4000000 / (2 * PLL1_HALF_PS);
    exp2 = 4000000 / (2 * PLL2_HALF_PS);
    check(n1 - b1 >= exp1 - 1 && n1 - b1 <= exp1 + 1,
          $sformatf("functional: clk_1 runs at pll_clk_1 rate (%0d pulses, expected %0d)", n1 - b1, exp1));
    check(n2 - b2 >= exp2 - 1 && n2 - b2 <= exp2 + 1,
          $sformatf("functional: clk_2 runs at pll_clk_2 rate (%0d pulses, expected %0d)", n2 - b2, exp2));
    #(10 * PLL1_HALF_PS);
    check(n1 - b1 <= exp1 + 1 && n2 - b2 <= exp2 + 1, "functional: clocks stop when func_mode drops");
    begin
      logic [N-1:0] r1, r2;
      r1 = s1;
      r2 = s2;
      for (int i = 0; i < n1 - b1; i++) r1 = f1(r1);
      for (int i = 0; i < n2 - b2; i++) r2 = f2(r2);
      check(chain1 == r1 && chain2 == r2, "functional: one next-state step per pulse");
    end
    if (n1 - b1 > 0 && n2 - b2 > 0) cnt_func++;
    scan_en = 1'b1;
    #(4 * SCAN_HALF);
    // Every mechanism must have happened.
    check(cnt_shift > 0, "mechanism: scan shift");
    check(cnt_pair1 > 0, "mechanism: launch/capture pair in domain 1");
    check(cnt_pair2 > 0, "mechanism: launch/capture pair in domain 2");
    check(cnt_rearm > 0, "mechanism: filter re-armed for a following pattern");
    check(cnt_func > 0, "mechanism: functional mode");
    $display("mechanisms: shift=%0d pair1=%0d pair2=%0d rearm=%0d functional=%0d",
             cnt_shift, cnt_pair1, cnt_pair2, cnt_rearm, cnt_func);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200000000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
