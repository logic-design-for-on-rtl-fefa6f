// cpf: clock pulse filter, one per clock domain.
//
// Replaces the clock multiplexer between the slow tester shift clock and the
// functional PLL clock, and adds the at-speed launch/capture pulse pair for
// delay test by functional justification (launch-off-capture):
//  * scan_en = 1 (shift): clk_out follows scan_clk.
//  * scan_en = 0: clk_out is the output of the clock gating cell (CGC), which is
//    normally closed. A single scan_clk pulse now loads a '1' into the trigger
//    flip-flop; the shift register clocked by pll_clk carries it from Q1 to Q5.
//    hs_clk_en = Q[EN_TAP] & ~Q[DIS_TAP] is high for DIS_TAP-EN_TAP pll_clk
//    cycles, so exactly that many pll_clk pulses reach clk_out (two by default).
//  * The next scan_clk pulse with scan_en = 1 loads '0' again and so re-arms
//    the filter for the next pattern.
//  * func_mode = 1 keeps the CGC open, so with scan_en = 0 the PLL clock runs
//    through unfiltered (functional mode).
// scan_clk and scan_en need no timing relation to pll_clk: the trigger crosses
// into the pll_clk domain through Q1 and Q2 before it reaches the enable tap.
//
// Interface: pll_clk, scan_clk, scan_en, func_mode in; clk_out out.
// Timing: with the trigger edge of scan_clk before pll_clk rising edge 1, the
// pulses on clk_out are pll_clk pulses EN_TAP+1 .. DIS_TAP (4 and 5 by default).
//
// Follows the CPF schematic and its description: the trigger flip-flop on
// scan_clk, the five-stage shift register, the enable taken from stages 3 and 5,
// the CGC and the output multiplexer controlled by scan_en. This design's own
// choices: the logic equations of the gates (the description gives their
// behaviour, not their types), rising-edge flops, the OR of func_mode into the
// CGC enable (the description only says extra logic keeps the CGC enabled in
// functional mode), and no reset (the schematic has none; the filter is cleared
// by a scan_clk pulse with scan_en = 1 followed by SR_LEN pll_clk cycles).
// An assertion flags a change of scan_en while scan_clk is high.
// clk_out is a clock multiplexer, i.e. combinational logic in a clock path, by
// intent.
`timescale 1ps/1ps
module cpf #(
  parameter int unsigned SR_LEN  = cpf_pkg::SR_LEN,
  parameter int unsigned EN_TAP  = cpf_pkg::EN_TAP,
  parameter int unsigned DIS_TAP = cpf_pkg::DIS_TAP
) (
  input  logic pll_clk,
  input  logic scan_clk,
  input  logic scan_en,
  input  logic func_mode,
  output logic clk_out
);
  // Tap order must describe a non-empty window inside the register.
  initial begin
    assert (EN_TAP >= 1 && EN_TAP < DIS_TAP && DIS_TAP <= SR_LEN)
      else $error("cpf: need 1 <= EN_TAP < DIS_TAP <= SR_LEN");
  end

  logic              trig_q;     // trigger flip-flop, scan_clk domain
  logic [SR_LEN:1]   sr_q;       // shift register Q1..Q<SR_LEN>, pll_clk domain
  logic              hs_clk_en;
  logic              cgc_en;
  logic              cgc_clk_out;

  always_ff @(posedge scan_clk) trig_q <= ~scan_en;

  always_ff @(posedge pll_clk) sr_q <= {sr_q[SR_LEN-1:1], trig_q};

  assign hs_clk_en = sr_q[EN_TAP] & ~sr_q[DIS_TAP];
  assign cgc_en    = hs_clk_en | func_mode;

  cgc u_cgc (
    .clk  (pll_clk),
    .en   (cgc_en),
    .gclk (cgc_clk_out)
  );

  assign clk_out = scan_en ? scan_clk : cgc_clk_out;

  // Test protocol: scan_en changes only while scan_clk is stopped low, otherwise
  // the output multiplexer would cut a scan_clk pulse short.
  always @(scan_en) begin
    assert (!scan_clk) else $error("cpf: scan_en changed while scan_clk was high");
  end
endmodule
