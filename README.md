# A low-latency 30:1 serializer for trigger data (4.8 Gbps)

Trigger electronics must move data off the detector both fast and with a
short, fixed delay. This serializer takes a 30-bit word on every cycle of a
160 MHz clock and sends it on a single 4.8 Gbps line, MSB first. Words follow
each other with no gap. The first bit of a word leaves about 5.4 ns after
the word is captured, and that delay is the same after every reset.

It is a cut-down version of a 120:1 serializer that ran at 40 MHz. Cutting
the word to 30 bits and raising the loading clock to 160 MHz means the data
source and the serializer share one clock. No data has to cross between
clock domains, and that crossing cost the wider version up to 25 ns of
latency.

The RTL here covers the whole digital part of the serializer. It also has a
behavioural model of the PLL, so that the chip can be simulated from its
reference clock to the serial output.

## The main idea: three slow lines interleaved

A single 10-bit (or 30-bit) shift register clocked at 4.8 GHz would be too
fast for the process. Instead the word is split across **three shift
registers of N = 10 bits**, each clocked at 1.6 GHz by its own phase of a
three-phase clock:

| line | clock | bits it carries, in the order they are sent |
|---|---|---|
| Shift Register I   | Phi<0> | b29, b26, b23, ... b2 (`group0[i] = b[3i+2]`) |
| Shift Register II  | Phi<1> | b28, b25, b22, ... b1 (`group1[i] = b[3i+1]`) |
| Shift Register III | Phi<2> | b27, b24, b21, ... b0 (`group2[i] = b[3i]`)   |

Phi<0>, Phi<1> and Phi<2> are 1.6 GHz clocks 120° apart. Each is high for one
line period and low for two. At any moment exactly one phase is high. A 3:1
multiplexer passes one line to the output `sb` for one line period at a time:

| phase high | sb carries |
|---|---|
| Phi<2> | Shift Register I (`sb0`)   |
| Phi<0> | Shift Register II (`sb1`)  |
| Phi<1> | Shift Register III (`sb2`) |

So a line is selected during the phase that comes just *before* its own
clock phase in the cycle. That is the last line period before the register
shifts again, two line periods after its output last changed, so the output
has had time to settle before it reaches `sb`.
Between them the three lines give the bit sequence b29, b28, b27, ... b0 at
4.8 Gbps.

## Clocks

```
ref_clk 40 MHz ──► PLL ×120 ──► fbit_clk 4.8 GHz ──► clock divider ──► Phi<0..2>  1.6 GHz
                                                                  ├──► fBITover3  1.6 GHz (copy of Phi<0>)
                                                                  ├──► Loading Clock 160 MHz
                                                                  └──► clk40        40 MHz
```

* **PLL** (`pll_model`). In silicon this is an analog PLL hardened against
  single-event upsets. Here it is a behavioural model. It measures each
  reference period and produces 120 line-clock periods per reference period,
  with its rising edges on the reference's rising edges. `pll_lock` rises
  after four reference cycles. The model follows a change of reference
  frequency within two reference periods. The multiplication by 120 is what
  fixes the line rate: 40 MHz gives 4.8 Gbps, 48 MHz gives 5.76 Gbps and
  12 MHz gives 1.44 Gbps.
* **Clock divider** (`clock_divider`). A 3-bit one-hot ring counter on the
  line clock makes the three phases. A second flop gives fBITover3, a copy of
  Phi<0>. Two counters run on the falling edge of fBITover3:
  * A modulo-N counter makes the 160 MHz Loading Clock, five fBITover3
    periods high and five low.
  * A modulo-40 counter makes clk40, whose rising edges coincide with Loading
    Clock rising edges.

  The divider is reset only by PLL lock, not by the chip reset. So the phase
  of Loading Clock to the reference clock is the same after every data-path
  reset, which is what makes the latency deterministic.

Every derived clock comes out of a flip-flop. Edges that fall at the same
instant, for example the falling edge of Phi<2> and the rising edge of
Phi<0>, are resolved the way they would be in silicon: a flop clocked on one
edge sees the value from before the other edge.

## The load chain

This is the most delicate part of the design. Each shift register must pick
up its 10 bits at exactly the right 1.6 GHz edge. Then the three lines start
in step, and line I starts one phase before line II and two before line III.

1. **Input register** (`input_register`). All 30 bits are captured on the
   rising edge of Loading Clock and held for a full Loading Clock period.
2. **Load pulse** (`load_generator`). Two flops on the falling edge of
   fBITover3 detect the falling edge of Loading Clock. They produce `load`,
   high for exactly one fBITover3 period.
3. **Per-line load** (`load_sync`). `load0` is `load` registered on the
   falling edge of Phi<2>. `load1` is `load0` registered on the falling edge
   of Phi<0>, and `load2` is `load1` registered on the falling edge of
   Phi<1>. Each of them is high across the next rising edge of its own line's
   clock.
4. **Shift registers** (`shift_register`). On a rising edge of its phase with
   `load_k` high, a register loads its group. Otherwise it shifts by one
   position towards its output, taking a 0 in behind. Because Loading Clock
   is a whole number of fBITover3 periods (N = 10), each register loads again
   exactly when its last bit has been sent.

Timeline in line periods T (208.3 ps at 4.8 Gbps). Time 0 is the Loading
Clock rising edge that captures a word. That edge falls at the start of a
Phi<1> high slot.

| t / T | event |
|---|---|
| 0  | word captured in the input register |
| 15 | Loading Clock falls |
| 18 | `load` rises (first falling edge of fBITover3 that sees Loading Clock low) |
| 20, 21, 22 | `load0`, `load1`, `load2` rise |
| 23, 24, 25 | Shift Registers I, II and III load |
| 25 – 26 | b29 on `sb` (Phi<2> high, line I) |
| 26 – 27, 27 – 28 | b28, then b27 |
| 25 + 30 = 55 | b29 of the next word |

**Latency.** The first bit ends 26 T after the capturing edge. That is
T_load/2 + (3 + 2/3)·T_fBITover3 = 3.125 ns + 2.292 ns = **5.42 ns** at
4.8 Gbps, the internal latency the serializer was designed for. The bit
*starts* one line period earlier, at 5.21 ns. The latency budget of about
6 ns for the serializer core, or about 12.25 ns counting the 160 MHz cycle in
which the source prepares the word, is met either way.

## Departures and choices

* **Which edges register load1 and load2.** One description of the circuit
  gives the rule "load_k is `load` registered on the falling edge of
  Phi<2-k>". It also says that the registers load on the rising edges of
  Phi<0>, Phi<1> and Phi<2>, in that order, and that the output order is
  line I, II, III. With the phases in the order used here, the Phi<2-k> rule
  works for k = 0 only. For k = 1 and 2 it would load lines II and III one
  1.6 GHz period too early and scramble the output. This design keeps the
  rule for `load0` and chains `load1` and `load2` from it on the falling
  edges of Phi<0> and Phi<1>.
* **Start or end of the first bit.** The 5.42 ns figure matches the *end* of
  the first bit slot in this design (see above).
* **Edge choices made here.** The source does not say which edge of
  fBITover3 clocks the Loading Clock counter or the load detector, or how the
  divider is reset. Using the falling edge keeps Loading Clock changes away
  from the edges that sample it, and it puts the first bit exactly at the
  latency figure above. The reset values, the zero fill bit of the shift
  registers and the output value when no phase is high (impossible after
  reset) are also this design's choices.
* **Not built:**
  * The PLL's circuit and its triple-modular-redundancy protection: only the
    behavioural model exists.
  * The differential output driver (`txP`/`txN`): `sb` is the logic-level
    stream that would drive it.
  * The FPGA test equipment: its PRBS-31 generator and checker are written
    into the testbench instead.
* **Rate limits.** The silicon works at 5.76 Gbps and is marginal at
  6.4 Gbps. The lowest simulated corner is 0.5 to 3.5 Gbps, and 1.44 Gbps was
  verified on boards. These are circuit-speed limits. The RTL runs at any
  reference frequency, and the end-to-end testbench runs it at 1.44, 4.8,
  5.76 and 6.4 Gbps.
* **Bit doubling.** Sending each source bit twice ({b_i b_i}, 15 source bits
  per word) halves the effective rate to 2.4 Gbps. This is done by the data
  source; the serializer needs no mode for it. The testbench exercises it.

## Files

| file | contents |
|---|---|
| `rtl/ser_pkg.sv` | shared constants (N = 10, three lines, PLL factor 120, 40 MHz divider) and the one-hot phase type |
| `rtl/clock_divider.sv` | three-phase ring, fBITover3, Loading Clock, clk40 |
| `rtl/input_register.sv` | 30-bit capture register and the grouping into three 10-bit words |
| `rtl/load_generator.sv` | load pulse from the falling edge of Loading Clock |
| `rtl/load_sync.sv` | load0/load1/load2 for the three phase domains |
| `rtl/shift_register.sv` | N-bit load/shift register, one per line |
| `rtl/output_mux.sv` | 3:1 phase-selected output multiplexer |
| `rtl/serializer_core.sv` | all synthesizable blocks wired together, from line clock to `sb` |
| `rtl/pll_model.sv` | behavioural PLL (not synthesizable) |
| `rtl/tds_serializer.sv` | top: PLL model plus serializer core |

The top's ports:

* `ref_clk`: the reference clock.
* `rst_n`: the data-path reset, active low.
* `din[29:0]`: the word, captured on the rising edge of `loading_clk`; change
  it on the falling edge.
* `loading_clk`, `clk40`: the user clocks.
* `pll_lock`: high once the PLL model has locked.
* `sb`: the serial output.

## Simulation

Each block has a self-checking testbench in `tb/`, named `tb_<module>.sv`.
Each prints `TB_RESULT checks=<n> failures=<m>` at the end and has a watchdog.
The end-to-end test `tb_tds_serializer` runs the top at its default
parameters. It compares every bit on `sb` with a reference model and checks
the latency of every word. It takes the chip through these phases:

* lock
* the 150-bit latency pattern: 5 ones then 145 zeros, a pulse every 31.25 ns
* PRBS-31 (x^31 + x^28 + 1)
* a reset in mid-stream
* reference switches to 48, 53.33 and 12 MHz
* bit doubling

At the end it prints how often each of these happened.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl rtl/ser_pkg.sv \
          tb/tb_tds_serializer.sv --top-module tb_tds_serializer -o sim
./obj_dir/sim +verilator+rand+reset+2
```

`-Wno-fatal` is needed because Verilator reports every delay whose value is
only known at run time (the behavioural clocks use such delays) as a
warning. Replace the testbench name to run any other block's test. All of them finish
in well under a second.

To change the word width, set `N` on the top. The word is then 3·N bits, and
N must be even so that Loading Clock has a 50 % duty cycle. The line rate is
set by the reference frequency and `PLL_MULT`.
