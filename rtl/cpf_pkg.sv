// cpf_pkg: constants shared by the clock pulse filter, the top and the testbenches.
//
// The clock pulse filter (CPF) holds a five-bit shift register clocked by the PLL
// clock. The at-speed clock enable is taken from two of its stages: it rises when
// the trigger reaches stage EN_TAP and falls when it reaches stage DIS_TAP, so the
// filter releases DIS_TAP - EN_TAP pulses, starting EN_TAP + 1 PLL edges after the
// trigger. The numbers below (5 stages, taps 3 and 5, hence two pulses) are the
// ones the CPF description gives; the package itself is a convenience of this RTL.
`timescale 1ps/1ps
package cpf_pkg;
  // Shift register length (stages Q1..Q5).
  localparam int unsigned SR_LEN  = 5;
  // Stage whose '1' turns the at-speed enable on.
  localparam int unsigned EN_TAP  = 3;
  // Stage whose '1' turns the at-speed enable off again.
  localparam int unsigned DIS_TAP = 5;
  // Launch/capture pulses released per trigger.
  localparam int unsigned N_PULSES = DIS_TAP - EN_TAP;
  // Half periods of the two PLL clocks in ps: domain 2 at 150 MHz, domain 1 at
  // 75 MHz (twice the half period, derived synchronously from domain 2).
  localparam int unsigned PLL2_HALF_PS = 3333;
  localparam int unsigned PLL1_HALF_PS = 2 * PLL2_HALF_PS;
endpackage
