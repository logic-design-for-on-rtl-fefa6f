// pll_model: behavioural model of the functional on-chip PLL (not synthesizable).
//
// The PLL is an analog block; this model only reproduces what the clock pulse
// filters need from it: two free-running, synchronous high-speed clocks derived
// from the slow external clock. After LOCK_CYCLES rising edges of ext_clk the
// model starts pll_clk_2 with a half period of PLL2_HALF_PS (150 MHz by default)
// and pll_clk_1 at half that frequency (75 MHz), both rising together. Before
// lock both outputs are low. Once running, the clocks never stop, since the
// delay test needs a PLL clock throughout.
//
// Interface: ext_clk in; pll_clk_1, pll_clk_2 out. Time unit 1 ps.
//
// The two frequencies, that the domains are synchronous, and the port names
// follow the device description. Which domain runs at which frequency, the lock
// delay and the free-running (not ext_clk-tracking) oscillator are this model's
// own choices.
//
// Synthesis tools that ignore the delay see the oscillator as a combinational
// loop through latches; that warning stands, as this file only models an analog
// oscillator for simulation.
`timescale 1ps/1ps
module pll_model #(
  parameter int unsigned PLL2_HALF_PS = cpf_pkg::PLL2_HALF_PS,
  parameter int unsigned LOCK_CYCLES  = 4
) (
  input  logic ext_clk,
  output logic pll_clk_1,
  output logic pll_clk_2
);
  logic       locked;
  logic [7:0] ref_edges;

  initial begin
    locked    = 1'b0;
    ref_edges = '0;
    pll_clk_1 = 1'b0;
    pll_clk_2 = 1'b0;
  end

  // Lock: count LOCK_CYCLES reference edges.
  always @(posedge ext_clk) begin
    if (!locked) begin
      ref_edges <= ref_edges + 8'd1;
      if (32'(ref_edges) + 1 >= LOCK_CYCLES) locked <= 1'b1;
    end
  end

  // Oscillator: once locked, domain 2 toggles every PLL2_HALF_PS and domain 1
  // toggles on every rising edge of domain 2 (divide by two, edges aligned).
  always #(PLL2_HALF_PS) begin
    if (locked) begin
      pll_clk_2 = ~pll_clk_2;
      if (pll_clk_2) pll_clk_1 = ~pll_clk_1;
    end
  end
endmodule
