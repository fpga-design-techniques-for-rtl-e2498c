# FPGA supply stabilizer for cryogenic operation

This design keeps the power an FPGA draws constant, so that the voltage drop
on the long supply cables into a cryostat does not change when the circuit on
the FPGA changes its activity. The FPGA measures how fast its own logic is,
which tracks the core voltage at the die. When the logic slows down, the
circuit is drawing more current, so ring oscillators are switched off. When
the logic speeds up, oscillators are switched on. The sum stays constant, and
so does the IR drop.

The circuit being compensated in the published system is a 1.2 GSa/s
TDC-based ADC. It draws 0.25 W idle and about 0.4 W when converting. That ADC,
the FPGA clock manager and the supply are not part of this RTL.

## Block map

```
clk_ref ──> io_delay ──> carry_chain (40 dummies) ──> carry_chain (32 taps)
                 ^                                          │
                 │ tap                                      v
            controller <── filt ── decision_maker <── tdc_capture (400 MHz)
              │   ^                  │ inc/dec (every 160 ns)
   load/count │   │ cmds             v
              └──────────────> 4 x osc_farm (128 ring_osc each)
                  │
             serial_comm <──> host UART
```

All files are in `rtl/`; `stab_pkg` holds the shared constants, the host
command codes and the controller state type.

## Clocks and reset

- `clk_sys`, 100 MHz: decision maker after SUM4, farms, controller, host link.
- `clk_tdc`, 400 MHz, rising edges aligned with `clk_sys`: TDC sampling and
  the first half of SUM4.
- `clk_ref`: the reference edge sent down the delay line. The testbenches
  drive it from the TDC clock.
- `rst_n`: asynchronous, active low, for both domains.

The design assumes the clock manager delivers the two clocks edge-aligned.
The paper does not say how the 400 to 100 MHz crossing is done. Here it is
treated as a synchronous crossing: the 400 MHz side fills a holding register
once every four cycles, and the 100 MHz side reads it.

## Measuring the logic speed

**io_delay** (behavioural model). A 32-tap programmable delay, 78.125 ps per
tap, as in common FPGA IO delay primitives. Its delay does not follow the
core voltage, so it is the stable reference. The paper uses it to place the
clock edge in the middle of the TDC range at start-up. The tap count and size
are assumptions.

**carry_chain** (behavioural model). A chain of transport delays whose
per-element delay is the input `delay_fs`, which stands for the core voltage.
It is used twice. 40 dummy elements add voltage sensitivity ahead of the TDC,
as the paper describes. 32 tapped elements form the TDC. Both lengths are this
design's choices; the paper does not give them.

**tdc_capture**. Two register ranks on `clk_tdc` (sampling, then
metastability), then an encoder. The code is the number of taps the edge has
not yet reached. A slower chain therefore gives a higher code, which matches
the paper's statement that the TDC output rises with the IR drop. Counting
zeros also tolerates bubbles. The latency is three TDC clocks.

## Decision maker

**sum4**. Adds four TDC codes, one per 400 MHz cycle, and presents the sum in
the 100 MHz domain, as the paper does.

**iir_filter**. `y <= y - (y >> 4) + x`: a first-order average with a
time constant of 16 sums (64 measurements). The output is scaled by 16. The
paper names an IIR filter but gives neither its order nor its coefficient.

**decide**. Every 16 system cycles (64 TDC measurements, 6.25 MHz, from the
paper) it compares the filtered value with mid-range:
`(4 x 32 / 2) x 16 = 1024`. Below mid-range it pulses `inc`; above, `dec`.
The optional dead band defaults to zero.

**decision_maker** wraps the three in the order the paper draws them.

## Oscillator farms

**ring_osc** (behavioural model). One NAND stage, whose second input is the
enable, plus six buffers: seven stages with one inversion, as in the paper.
The stage delay of 500 ps (a 7 ns period) is an assumption. The model is one
process that toggles every seven stage delays. It does not model each stage
separately, which keeps a 512-oscillator simulation fast. Synthesis reports
each ring as a combinational loop. That loop is the oscillator and is
intended.

**osc_farm**. 128 oscillators (from the paper). A thermometer shift register
holds their enables: `inc` shifts a one in, `dec` shifts a zero in, and both
saturate. A `load` input sets the count directly. Load wins over inc, and inc
wins over dec. All four farms get the same commands, so the total changes by
four at a time, as in the paper.

## Controller

States: IDLE, CAL_LOAD, CAL_WAIT, CAL_STEP, RUN, OFF.

- **Calibration.** After reset (or a host 'C') the farms are loaded with all
  128 oscillators each. The IO delay then starts at tap 0. After each tap
  change the controller waits 128 system cycles and reads the filtered code.
  Each tap delays the reference edge, so the edge reaches fewer carry taps
  and the code rises. The controller advances one tap while the code is still
  below mid-range. When the code reaches mid-range, the loop starts running. If it runs out of taps,
  `cal_error` is set and the loop runs anyway.
- **Start level.** All oscillators are on at start. The paper reports 0.5 W
  before the ADC starts, against 0.25 W without the stabilizer, which means
  the farms start nearly fully on. The exact start level is this design's
  choice.
- **Off ('D').** Loads zero into every farm and stops the loop. **On ('E')**
  reloads the start level and runs the loop again, keeping the calibrated
  tap.

The paper shows only a "controller" box. The search procedure, the settling
time and the on/off behaviour are this design's choices.

## Host link

**serial_comm** with **uart_rx** and **uart_tx**: UART 8N1 at 115200 baud
(868 clocks of 100 MHz per bit). Every command byte gets one reply byte:

| byte | action | reply |
|------|--------|-------|
| 'E' | stabilizer on | 'E' |
| 'D' | stabilizer off | 'D' |
| 'C' | recalibrate | 'C' |
| 'N' | read | oscillators on per farm |
| 'T' | read | filtered TDC value / 16 (SUM4 scale, mid-range 64) |
| 'I' | read | IO delay tap |
| 'S' | read | status: cal_error, cal_done, running, enabled, state[3:0] |
| other | none | '?' |

The paper shows only a "serial communication" box to the host. The whole
protocol is this design's.

## Behavioural models and synthesis

`io_delay`, `carry_chain` and `ring_osc` describe physical delays, which only
timing can express. On an FPGA they map to the IO delay primitive, the
dedicated carry logic and hand-placed LUT rings. Synthesis of these three
models is not meaningful. The rest of the design is synthesizable RTL.

## Verification

Each block has a self-checking testbench `tb/tb_<block>.sv`. Every one ends
with a `TB_RESULT` line and has a watchdog.

`tb/supply_model.sv` models the supply and cables. The supply is 1.1 V with
0.3 ohm of cable resistance (0.2 + 0.1 ohm, as the paper gives). The ADC
takes 0.25 or 0.4 W, and each running oscillator 0.5 mW (an assumption). The
model solves the die voltage and turns it into a carry delay of about 25 ps
at 1.03 V. The delay slows by about 16 % per 50 mV of drop, the figure the
paper reports.

- `tb_stab_top` runs the closed loop. The sequence is: calibration; idle
  regulation with all 512 oscillators on; the 150 mW load step, compensated by
  shedding about 300 oscillators with the code back at mid-range; host reads;
  off and on; load release; and recalibration. It counts every mechanism and
  fails if any never happened. Its UART runs at 16 clocks per bit to keep
  the run short.
- `tb_stab_top_full` uses the top at default parameters, including the real
  baud rate. It runs one complete operation: calibration, regulation, the
  load step, and a host read.

## Not covered

- The ADC itself and its SNR/ENOB measurements at 300 K and 15 K.
- The clock manager.
- Any effect of temperature on the delays.

Only the power step the ADC causes is exercised.
