// dut_clocking: on-chip test clock generation for a device with two clock domains.
//
// The functional PLL makes one high-speed clock per domain from the slow
// external clock; one clock pulse filter (CPF) per domain turns it, together
// with the tester's scan_clk and scan_en shared by both filters, into the
// domain clock:
//  * scan_en = 1: clk_1 and clk_2 both follow scan_clk (slow scan shift).
//  * scan_en = 0, then one scan_clk pulse: each domain receives exactly two
//    pulses of its own PLL clock (launch and capture), clk_1 at 75 MHz and
//    clk_2 at 150 MHz by default. The two filters run independently; their pulse
//    pairs are not aligned to each other.
//  * func_mode = 1 with scan_en = 0: both PLL clocks pass unfiltered.
//
// Interface: ext_clk, scan_en, scan_clk, func_mode in; clk_1, clk_2 out to the
// two clock domains (their logic and scan chains are outside this module).
// Timing: see cpf; each pair starts 4 rising edges of its PLL clock after the
// trigger edge of scan_clk.
//
// The structure (one PLL, two filters, shared scan_en and scan_clk) follows the
// device block diagram. func_mode is this design's port for the functional-mode
// logic the filter description mentions without showing. The PLL is a
// behavioural model, so this top simulates but does not synthesize as a whole.
`timescale 1ps/1ps
module dut_clocking (
  input  logic ext_clk,
  input  logic scan_en,
  input  logic scan_clk,
  input  logic func_mode,
  output logic clk_1,
  output logic clk_2
);
  logic pll_clk_1;
  logic pll_clk_2;

  pll_model u_pll (
    .ext_clk   (ext_clk),
    .pll_clk_1 (pll_clk_1),
    .pll_clk_2 (pll_clk_2)
  );

  cpf u_cpf1 (
    .pll_clk   (pll_clk_1),
    .scan_clk  (scan_clk),
    .scan_en   (scan_en),
    .func_mode (func_mode),
    .clk_out   (clk_1)
  );

  cpf u_cpf2 (
    .pll_clk   (pll_clk_2),
    .scan_clk  (scan_clk),
    .scan_en   (scan_en),
    .func_mode (func_mode),
    .clk_out   (clk_2)
  );
endmodule
