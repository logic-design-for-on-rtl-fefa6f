# On-chip launch/capture clock generation with a clock pulse filter

A delay (at-speed) test of scan logic needs two clock pulses at the functional
frequency: one to launch a transition and one, a functional cycle later, to capture
the result. A low-cost tester cannot deliver such pulses, and the slow pads of a
micro-controller could not carry them anyway. The functional PLL on the chip already
produces the right frequencies. What is missing is a small circuit per clock domain
that:

* passes the tester's slow shift clock while scan chains are loaded and unloaded, and
* on request, cuts exactly two pulses out of the free-running PLL clock,

with no timing relation needed between the tester signals and the PLL. This RTL
implements that circuit, the **clock pulse filter (CPF)**, and a top level with one
PLL and two clock domains (75 MHz and 150 MHz) as in the device it was designed for.
The test style is launch-off-capture (also called broadside or functional
justification): the launch vector is the circuit's own response to the scanned-in
vector, so scan enable never has to switch at speed.

## The test sequence seen from the tester

```
scan_en   1111111111111111111111000000000000000000000000000011111111111111
scan_clk  _|‾|_|‾|_|‾|_|‾|_______________|‾|__________________________|‾|_|‾|_
                shift                  trigger                       shift
clk_1     _|‾|_|‾|_|‾|_|‾|________________________|‾|_|‾|____________|‾|_|‾|_
clk_2     _|‾|_|‾|_|‾|_|‾|_____________________|‾||‾|________________|‾|_|‾|_
                                       launch+capture at PLL speed
```

1. **Shift.** `scan_en = 1`. Both domain clocks are copies of `scan_clk`.
2. **Stop and switch.** The tester stops `scan_clk` and drops `scan_en`. Nothing is
   timing-critical here. The domain clocks stay low.
3. **Trigger.** One `scan_clk` pulse. A few PLL cycles later each domain gets
   exactly two pulses of its own PLL clock. The two domains are not aligned to each
   other: each filter works on its own.
4. **Back to shift.** `scan_en = 1` and shifting resumes. The first `scan_clk` pulse
   also re-arms the filters for the next pattern.

An ATPG tool does not have to simulate the filter cycle by cycle. It can treat the
filter as "one `scan_clk` pulse with `scan_en = 0` gives two internal at-speed
pulses". Each pattern is then translated back into the `scan_en`/`scan_clk` sequence
above.

## Inside the clock pulse filter (`cpf`)

The filter is built from about ten standard cells (counting the inverter in front of the trigger flop):

| cell | clock | what it does |
|---|---|---|
| trigger flip-flop | `scan_clk` | loads `~scan_en` on every `scan_clk` rising edge |
| shift register Q1..Q5 | `pll_clk` | carries the trigger bit along, one stage per PLL cycle |
| enable gate | – | `hs_clk_en = Q3 & ~Q5` |
| clock gating cell (`cgc`) | `pll_clk` | passes whole `pll_clk` pulses while `hs_clk_en` is 1 |
| output multiplexer | – | `clk_out = scan_en ? scan_clk : cgc_clk_out` |

The hard part is how one slow, asynchronous edge becomes exactly two clean fast
pulses:

* While `scan_en = 1`, every shift pulse loads 0 into the trigger flop, so the shift
  register holds zeros and `hs_clk_en` is 0.
* The trigger pulse, with `scan_en = 0`, loads a 1. It stays 1 until the next
  `scan_clk` pulse, so the shift register fills with ones.
* Number the `pll_clk` rising edges after the trigger edge 1, 2, 3, … Q1 becomes 1
  at edge 1, Q3 at edge 3 and Q5 at edge 5. So `hs_clk_en` is high from edge 3 to
  edge 5: two cycles. After that the register is all ones and `hs_clk_en` stays 0
  however long the trigger flop holds its 1.
* The gating cell has a latch that is transparent while `pll_clk` is low. The
  enable that rises just after edge 3 passes the latch in the low phase that
  follows, so the first pulse on `clk_out` is `pll_clk` pulse **4**. The second is
  pulse **5**. Their spacing is one PLL period: this is the at-speed
  launch-to-capture time.
* Q1 and Q2 come before the tap. They give the asynchronous trigger two PLL cycles
  to settle before it can reach the gate. This is why `scan_clk`/`scan_en` and the
  PLL need no synchroniser.

In general the filter releases `DIS_TAP − EN_TAP` pulses, and the first one comes
on PLL edge `EN_TAP + 1`. The defaults are `SR_LEN = 5`, `EN_TAP = 3` and
`DIS_TAP = 5` (in `cpf_pkg`).

**Functional mode.** `func_mode = 1` (with `scan_en = 0`) forces the gating cell's
enable high, so `clk_out` is the PLL clock itself. The source design only says that
extra logic keeps the gate enabled in functional mode. The OR gate and the port
name are this implementation's own choices.

**No reset.** The filter has no reset input. To bring it to a known state, give one
`scan_clk` pulse with `scan_en = 1` and then run at least `SR_LEN` PLL cycles. The
start of any scan load does this anyway. The simulation testbenches do it first.

**Protocol check.** In simulation, `cpf` asserts that `scan_en` only changes while
`scan_clk` is low. A change during a `scan_clk` high phase would make the output
multiplexer cut a shift pulse short.

**Clock-path logic on purpose.** `clk_out` comes from a multiplexer, and the gating
cell contains a latch. Lint and synthesis tools report both. In a real
implementation the multiplexer and the gating cell are clock-tree cells. The delay
they add is removed by clock-tree balancing.

## Clock gating cell (`cgc`)

This is a standard latch-based integrated clock gate: `gclk = clk & en_latched`, and
the latch follows `en` while `clk` is low. `en` may change at any time while `clk`
is high without shortening or splitting a pulse. The source asks only for a
glitch-free gate; the latch form is this implementation's choice. On silicon this
would be the library's clock-gating cell.

## Top level (`dut_clocking`) and the PLL model

`dut_clocking` connects `pll_model`, `cpf u_cpf1` (fed by `pll_clk_1`) and
`cpf u_cpf2` (fed by `pll_clk_2`). Both filters share `scan_en`, `scan_clk` and
`func_mode`. The outputs `clk_1` and `clk_2` go to the clock domains, which are not
part of this RTL.

| port | dir | meaning |
|---|---|---|
| `ext_clk` | in | slow reference clock into the PLL |
| `scan_en` | in | 1 = shift, 0 = launch/capture or functional |
| `scan_clk` | in | tester shift clock; also the trigger |
| `func_mode` | in | 1 = pass the PLL clocks continuously |
| `clk_1`, `clk_2` | out | clocks of domain 1 and domain 2 |

`pll_model` is a **behavioural model for simulation only**. Once it has seen
`LOCK_CYCLES` (4) rising edges of `ext_clk`, it runs `pll_clk_2` at 150 MHz (half
period `PLL2_HALF_PS` = 3333 ps). `pll_clk_1` is that clock divided by two (75 MHz),
so the two domains are synchronous and their rising edges line up. It does not
follow the frequency of `ext_clk`. A synthesis tool sees its delayed oscillator as a
latch loop; a real PLL macro takes its place on silicon. Because of this model,
`dut_clocking` simulates but is not meant to be synthesized as a whole. `cpf` and
`cgc` are synthesizable.

## Where this RTL departs from, or goes beyond, the source design

* These follow the source: the 5-stage register, the taps Q3 and Q5, the
  two-pulse window, the scan_en-controlled output multiplexer, one filter per
  domain, and the 75/150 MHz synchronous domains.
* Its own choices are:
  * the gate equations (the source describes the behaviour, not the gate types);
  * rising-edge flops;
  * the latch form of the gating cell;
  * the `func_mode` port and the OR gate behind it;
  * no reset;
  * domain 1 at 75 MHz and domain 2 at 150 MHz (the source lists the two
    frequencies without saying which domain has which);
  * the PLL lock behaviour.
* **Not built: the enhanced filter.** It would give 2, 3 or 4 pulses and launch
  in one domain with capture in the other. Its control interface is not defined.
  Here the pulse count is fixed when the design is elaborated (the taps are
  parameters), and the two filters cannot coordinate a cross-domain
  launch/capture.
* The scan chains, any scan compression and the functional logic of the domains
  are outside this RTL.

## Files

| file | contents |
|---|---|
| `rtl/cpf_pkg.sv` | shared constants: register length, taps, pulse count, PLL half periods |
| `rtl/cgc.sv` | clock gating cell |
| `rtl/cpf.sv` | clock pulse filter |
| `rtl/pll_model.sv` | behavioural PLL model (simulation only) |
| `rtl/dut_clocking.sv` | top: PLL and two filters |
| `tb/cgc_tb.sv` | gating cell: no glitches while `en` moves during the high phase; pulse count |
| `tb/cpf_tb.sv` | filter: shift pass-through; exactly two pulses on PLL edges 4 and 5 after a trigger at random phase; silence before and after; re-arm over 8 patterns; functional mode |
| `tb/pll_model_tb.sv` | PLL model: lock delay, both periods, edge alignment, keeps running without `ext_clk` |
| `tb/dut_clocking_tb.sv` | end-to-end test at default parameters (described below) |

`dut_clocking_tb` puts a 16-bit scan chain into each domain, inside the testbench.
Domain 1's next-state function is an LFSR step; domain 2's adds 3. For each of 6
patterns the testbench:

1. scans in a random vector;
2. triggers one launch/capture;
3. scans the response out and checks that it equals the next-state function applied
   twice;
4. checks that each domain got two pulses at its own PLL period.

It then runs 4 µs of functional mode and checks the pulse rates and the chains'
state. It also counts each mechanism (shift, pulse pair per domain, re-arm,
functional mode) and fails if any never occurred.

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

## Simulating

All files carry `` `timescale 1ps/1ps ``. Verilator needs `--timing` for the clock
generators and the PLL model. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/cpf_pkg.sv tb/dut_clocking_tb.sv --top-module dut_clocking_tb -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace `dut_clocking_tb` with `cpf_tb`, `cgc_tb` or `pll_model_tb` to run the unit
tests. Each one simulates in well under a second. Random start-up values
(`+verilator+rand+reset+2`) are fine: the filter is flushed by the test sequence
itself.

To get a different pulse count, change `EN_TAP`/`DIS_TAP`; `cpf` checks at start-up
that `1 ≤ EN_TAP < DIS_TAP ≤ SR_LEN`. To change the PLL frequency, override
`PLL2_HALF_PS` on `pll_model`. The testbenches read their expected values from
`cpf_pkg`, so keep the package and the instance parameters consistent.
