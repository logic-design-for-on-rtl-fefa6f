// cgc: clock gating cell of the clock pulse filter.
//
// Passes whole pulses of clk while en is high and holds gclk low otherwise, with
// no glitches or shortened pulses. It is the common latch-based integrated clock
// gate: a latch, transparent while clk is low, samples en, and gclk is clk ANDed
// with the latched value. en may therefore change anywhere in the high phase of
// clk (in the filter it changes just after the rising edge); the change takes
// effect from the next rising edge of clk.
//
// Interface: clk (the PLL clock), en (enable), gclk (gated clock).
// Timing: a pulse of clk appears on gclk iff en was high at the end of the low
// phase just before it.
//
// The glitch-free gating cell and its place between the PLL and the output
// multiplexer come from the CPF description; the latch-based form is this
// design's choice, as the description leaves the cell's insides open. The latch
// is intended (it is what makes the gate glitch-free), so a latch warning here
// is expected.
`timescale 1ps/1ps
module cgc (
  input  logic clk,
  input  logic en,
  output logic gclk
);
  logic en_latched;

  always_latch begin
    if (!clk) en_latched = en;
  end

  assign gclk = clk & en_latched;
endmodule
