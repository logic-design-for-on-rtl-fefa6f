// cpf_tb: self-checking testbench of one clock pulse filter at its default size.
//
// The testbench drives a 100 MHz pll_clk and a slow (100 ns period) scan_clk
// and walks the filter through the scan test protocol several times:
//  1. shift: scan_en = 1, scan_clk pulses must appear on clk_out one for one,
//     with clk_out equal to scan_clk at every sample;
//  2. scan_en drops with scan_clk stopped: clk_out must stay quiet;
//  3. one trigger pulse on scan_clk at a random phase to pll_clk: clk_out must
//     give exactly N_PULSES pulses, each coinciding with a pll_clk rising edge,
//     the first on the (EN_TAP+1)-th pll_clk edge after the trigger edge and the
//     following ones on consecutive pll_clk edges (at-speed spacing);
//  4. scan_en rises again: clk_out must stay quiet until scan_clk resumes.
// Finally functional mode (func_mode = 1, scan_en = 0) must pass every pll_clk
// pulse, and dropping func_mode must stop them. The reference pulse times are
// computed from the recorded pll_clk edge times, independently of the filter.
`timescale 1ps/1ps
module cpf_tb;
  import cpf_pkg::*;

  localparam int unsigned PLL_HALF  = 5000;   // 100 MHz
  localparam int unsigned SCAN_HALF = 50000;  // 10 MHz
  localparam int unsigned PATTERNS  = 8;

  logic pll_clk   = 1'b0;
  logic scan_clk  = 1'b0;
  logic scan_en   = 1'b1;
  logic func_mode = 1'b0;
  logic clk_out;

  int checks = 0;
  int failures = 0;

  cpf dut (
    .pll_clk  (pll_clk),
    .scan_clk (scan_clk),
    .scan_en  (scan_en),
    .func_mode(func_mode),
    .clk_out  (clk_out)
  );

  always #(PLL_HALF) pll_clk = ~pll_clk;

  // Edge logs
  time pll_rise[$];
  time out_rise[$];
  int  scan_rises = 0;
  int  pll_rises  = 0;
  int  out_rises  = 0;
  always @(posedge pll_clk)  begin pll_rise.push_back($time); pll_rises++; end
  always @(posedge clk_out)  begin out_rise.push_back($time); out_rises++; end
  always @(posedge scan_clk) scan_rises++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // True within 200 ps of a pll_clk edge (edges at multiples of PLL_HALF).
  function automatic bit near_pll_edge();
    time ph;
    ph = $time % time'(PLL_HALF);
    return ph < 200 || ph > time'(PLL_HALF - 200);
  endfunction

  task automatic scan_pulse();
    scan_clk = 1'b1;
    #(SCAN_HALF);
    scan_clk = 1'b0;
    #(SCAN_HALF);
  endtask

  // Shift phase: clk_out must be scan_clk, pulse for pulse.
  task automatic shift(input int n);
    int o0, s0;
    o0 = out_rises; s0 = scan_rises;
    for (int i = 0; i < n; i++) begin
      scan_clk = 1'b1;
      #(SCAN_HALF / 2) check(clk_out == 1'b1, "shift: clk_out high with scan_clk");
      #(SCAN_HALF / 2);
      scan_clk = 1'b0;
      #(SCAN_HALF / 2) check(clk_out == 1'b0, "shift: clk_out low with scan_clk");
      #(SCAN_HALF / 2);
    end
    check(out_rises - o0 == n && scan_rises - s0 == n, "shift: one clk_out pulse per scan_clk pulse");
  endtask

  // Launch/capture: one trigger pulse, then the at-speed pair.
  task automatic launch_capture();
    time t_trig;
    int  o0, idx;
    #(SCAN_HALF);
    scan_en = 1'b0;                        // relaxed timing, scan_clk stopped
    o0 = out_rises;
    #(4 * SCAN_HALF);
    check(out_rises == o0, "quiet after scan_en falls");
    // trigger at a random phase, kept 200 ps away from pll_clk edges
    #(200 + ($urandom % (2 * PLL_HALF - 400)));
    while (near_pll_edge()) #100;
    pll_rise.delete();
    out_rise.delete();
    t_trig = $time;
    scan_pulse();
    #(4 * SCAN_HALF);                      // far more than SR_LEN pll cycles
    check(out_rise.size() == N_PULSES, $sformatf("exactly %0d pulses (got %0d)", N_PULSES, out_rise.size()));
    // find first pll edge after the trigger
    idx = 0;
    while (idx < pll_rise.size() && pll_rise[idx] <= t_trig) idx++;
    for (int p = 0; p < N_PULSES && p < out_rise.size(); p++) begin
      check(out_rise[p] == pll_rise[idx + EN_TAP + p],
            $sformatf("pulse %0d on pll edge %0d after trigger", p, EN_TAP + 1 + p));
    end
    if (out_rise.size() >= 2)
      check(out_rise[1] - out_rise[0] == 2 * PLL_HALF, "at-speed spacing of launch and capture");
    scan_en = 1'b1;
    #(2 * SCAN_HALF);
    check(clk_out == 1'b0 && out_rise.size() == N_PULSES, "quiet after scan_en rises");
  endtask

  initial begin
    // Flush the filter: scan_en = 1 and a few scan_clk pulses and pll cycles.
    #(3 * SCAN_HALF);
    shift(3);
    for (int k = 0; k < PATTERNS; k++) begin
      shift(4 + k);
      launch_capture();
    end
    shift(2);
    // Functional mode
    begin
      int p0, o0;
      scan_en = 1'b0;
      func_mode = 1'b1;
      #(4 * PLL_HALF + 100);
      p0 = pll_rises; o0 = out_rises;
      #(200 * PLL_HALF);
      check(out_rises - o0 == pll_rises - p0 && pll_rises - p0 == 100, "functional mode passes every pll_clk pulse");
      func_mode = 1'b0;
      #(4 * PLL_HALF);
      o0 = out_rises;
      #(40 * PLL_HALF);
      check(out_rises == o0, "pulses stop when functional mode ends");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200 * 2 * SCAN_HALF);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
