# Configurable trigger, scaler and delay firmware for a NIM module

A small nuclear-physics set-up usually needs a rack of NIM units: a
discriminator, a gate generator, a delay, a coincidence unit and a scaler.
This design replaces the digital part of that rack with one FPGA, and the
user never writes HDL. It has eight discriminator inputs and four trigger
outputs. Everything the user would otherwise wire by hand is held in two
lookup memories and a set of counters, which control software loads before
each run:

* a **duplication matrix** decides which input feeds each of ten internal
  signal copies;
* ten **delay/shaping channels** give each copy a programmable delay and
  width;
* a **truth table** turns the ten shaped copies into eight trigger
  equations. Any combinational function of up to ten operands fits, so
  AND, OR, XOR, NAND, NOR, XNOR, NOT and "at least n of" (multiplicity)
  all work. Four of the equations leave the chip.

Because the trigger logic is data, not gates, the firmware never has to be
resynthesized to change the trigger. All counters (scalers) count the raw
inputs and every equation, optionally over a timed run.

The SystemVerilog here is the FPGA firmware. The analog front end (eight fast
comparators with thresholds from an octal 12-bit DAC), the USB
micro-controller that talks to the host and configures the FPGA, and the
LVTTL-to-NIM output converters are board parts outside this RTL. They appear
only as the top module's ports. On the front panel each trigger output and the run
output appear on two connectors; the board doubles them after the single
FPGA pin.

## Trigger path

```
in_disc[7:0] ─► input_sync ─► dup_block ─► delay_shaping_block ─► logic_block ─► AND run ─► trig_out[3:0]
  (async)       2 registers   256 x 10      10 x (delay, width)    1024 x 8        S0..S3
   │                                            │ busy → dead-time LED      │ all 8 equations
   └─► input scalers (8 x 24 bit)               │                           └─► output scalers (8 x 24 bit)
```

Every stage is registered on the 100 MHz clock:

| clock edge | what happens |
|---|---|
| n   | first synchronization register samples the comparator output |
| n+1 | second synchronization register |
| n+2 | duplication memory read (address = 8 synchronized inputs) |
| n+3 | delay/shaping channel sees the rising edge; with delay 0 its output rises |
| n+4 | truth-table memory read (address = 10 shaped signals): **trig_out changes** |

So the minimum firmware latency is four clocks, 40 ns, counted from the edge
that first samples the input. Sampling adds up to 10 ns of jitter, because
the input is asynchronous to the clock. A channel delay of *d* clocks adds
exactly *d*.

### Duplication matrix (`dup_block`)

The eight synchronized inputs, taken together, form an 8-bit address. The
10-bit word stored there gives the value of each of the ten copies i0..i9
for that input pattern. To make copy *k* follow input *src(k)*, software
fills word *a* with bit *k* = *a*[*src(k)*] for all 256 addresses. One input
can therefore feed several copies. In the muon-lifetime set-up, for example,
input 0 drives both a short pulse and a long gate. The matrix could encode
any 8-to-10 function, but routing is what it is meant for.

### Delay and shaping (`delay_shaper`, `delay_shaping_block`)

Each channel acts as two monostables in series, built as one 13-bit counter
with a delay phase and a width phase:

* a rising edge on the channel's input starts it;
* after `delay` clocks (0..8191) the output goes high for `width` clocks
  (1..8191; a setting of 0 acts as 1);
* the edge, not the input level, sets the timing, so a pulse can be
  shortened as well as stretched;
* while a channel is delaying or shaping it is **busy**, and any new edge
  is ignored. This includes an edge sampled on the clock that ends the
  output pulse. Edges are accepted again from the following clock.

Exact timing: an edge accepted on clock *n* drives the output high after
clocks *n+d* … *n+d+w−1*. The OR of the ten busy flags is the dead-time
signal that drives the dead-time LED. The individual flags can be read in
the status register.

The settings are in clock cycles (10 ns). The control software described
with the original module offers 20 ns steps. Only the software decides
that; the hardware resolves 10 ns.

### Truth table (`logic_block`)

The ten shaped signals form the address: bit *k* = i*k*. The byte stored
there holds the eight equation results: bit *j* = equation *j*, with S0..S3
in bits 0..3 and C0..C3 in bits 4..7. To build it, software evaluates every
equation for all 1024 operand patterns. Every equation costs the same single
clock, however complex it is.

A two-input OR makes a small example. Its table, indexed by {i1,i0}, is
0, 1, 1, 1. In the full table, bit *j* of every word *a* is `a[0] | a[1]`.

Only bits 0..3 drive output pins. All eight drive output scalers.

## Scalers

There are 24-bit counters on the eight raw inputs and on the eight equation
results. Each counter is clocked by the **signal it counts**, not by the
system clock, so it can follow rates above 100 MHz. The test uses 250 MHz
bursts. This means the design has 16 extra clock domains, on purpose.

* Counting is enabled by `run`. Counters wrap at 2^24.
* A clear is asynchronous. It comes from a register, so it does not glitch.
* For readout, the counts are sampled twice on the system clock. A value
  read while counting can be off by bits still settling. For an exact count,
  read after the run stops.
* **Periodic reset.** When enabled, a pulse every second copies the sampled
  counts into a held register and then clears the counters. During that
  time a read returns the held value, so the host sees per-second rates.
  The copy uses counts sampled two clocks earlier, so up to 20 ns of counts
  at the end of each second can be lost.

## Runs (`run_timer`)

A run starts and stops on bus commands. If the duration register is
non-zero (1 ms steps, up to 2^32−1 ms, about 50 days), the run stops by
itself after exactly duration × 100 000 clocks. A start restarts the
millisecond prescaler, which is what makes the length exact. `run` does
three things:

* it enables the scalers;
* it gates the four trigger outputs, so trigger generation lasts only as
  long as the run;
* it drives the "run" NIM output and LED.

The periodic one-second pulse comes from the same prescaler.

## LEDs (`led_ctrl`)

The signals last only tens of nanoseconds, too short to see on an LED.
Every level change of an input (after synchronization), a trigger output
or the dead-time signal lights its LED for 50 ms. A new change restarts the
50 ms. The run LED follows `run` directly.

## Register interface (`uctm_regs`)

The USB micro-controller reaches the firmware through a simple synchronous
word bus:

* address 12 bits, data 32 bits;
* a write is taken on the clock where `bus_we` is high;
* `bus_re` for one clock gives `bus_rdata` with `bus_rvalid` on the next
  clock;
* `bus_we` and `bus_re` must not be high together (there is an assertion
  for this).

This bus stands in for the actual micro-controller bus, which is not
documented. Map (word addresses, constants in `uctm_pkg`):

| address | content |
|---|---|
| 0x000–0x0FF | duplication matrix (10 bits per word) |
| 0x400–0x7FF | truth table (8 bits per word) |
| 0x800+k | delay of channel k (k = 0..9), clocks |
| 0x810+k | width of channel k, clocks |
| 0x820 | control. Write: bit0 start, bit1 stop, bit2 clear counters (one-clock pulses), bit3 periodic-reset enable (level). Read: bit3 |
| 0x821 | run duration in ms, 0 = free running |
| 0x822 | status: bit0 run, bit1 dead time, bits 11:2 busy of channels 0..9 |
| 0x823 | elapsed run time, ms |
| 0x830+i | input scaler i (held value while the periodic reset is on) |
| 0x838+j | output scaler j (equation j) |

After reset every channel has delay 0 and width 1, the duration is 0, the
periodic reset is off and both memories are all zeros. With all-zero
memories every copy stays low, and every equation reads 0.

### Configuring a trigger

1. Write the duplication matrix (256 writes).
2. Write delay and width for each copy.
3. Write the truth table (1024 writes).
4. Optionally, write the duration.
5. Write `0x4`, then `0x1`, to the control register: clear, then start.

## Where the design follows the original module and where it chooses

These follow the published description of the module:

* the block structure and its order;
* 8 inputs, 10 copies, 8 equations with 4 routed out;
* both memory sizes and their use as lookup tables;
* the 13-bit delay and width ranges, edge timing and the ignore-while-busy
  rule;
* 24-bit scalers clocked by their own signals;
* the 1 ms / 32-bit run timer with 0 = unused;
* the one-second periodic reset;
* the 100 MHz clock and the four-clock latency.

These are this design's own choices:

* the bus and register map;
* reset values;
* rising-edge polarity;
* a width of 0 acting as 1;
* the single-clock memories;
* scaler wrap-around and the sampled/held readout;
* the hardware periodic reset;
* gating the outputs with `run` (the published block diagram shows the run
  enable going only to the counters, while the text says trigger generation
  can be limited in time);
* the LED stretch time.

Outside this RTL: the comparators and threshold DAC, the micro-controller,
the NIM converters, and the host software that parses equations and
computes the two tables. The testbenches compute those tables themselves.

## Files

| file | content |
|---|---|
| `rtl/uctm_pkg.sv` | sizes, `shape_cfg_t`, register map |
| `rtl/input_sync.sv` | two-register input synchronizer |
| `rtl/dup_block.sv` | 256 x 10 duplication memory |
| `rtl/delay_shaper.sv`, `rtl/delay_shaping_block.sv` | one channel / ten channels and dead time |
| `rtl/logic_block.sv` | 1024 x 8 truth-table memory |
| `rtl/scaler.sv`, `rtl/scaler_bank.sv` | signal-clocked counter / bank with readout |
| `rtl/run_timer.sv` | run control, duration timer, periodic reset |
| `rtl/led_ctrl.sv` | LED pulse stretchers |
| `rtl/uctm_regs.sv` | register interface |
| `rtl/uctm_top.sv` | top level |

Each `tb/tb_<module>.sv` is a self-checking test of one module. They print
`TB_RESULT checks=N failures=M`.

* `tb/tb_uctm_top.sv` runs the whole chip with a shortened millisecond. It
  covers latency, routing, all eight example equations, delay, widening,
  shortening, dead time, timed runs, output gating, clears, the periodic
  reset, counting above the clock rate and the LEDs. It also checks that
  each of these mechanisms actually happened.
* `tb/tb_muon_flux.sv` and `tb/tb_muon_lifetime.sv` run the two laboratory
  set-ups with every parameter at its full default size:
  * muon flux: three-paddle coincidences N12, N13, N23 and N123 in a 2 ms
    timed run;
  * muon lifetime: a 20 ns pulse AND-ed with a 30 µs gate delayed by
    100 ns, including the window edges at 9 and 3009 clocks.
* `tb/tb_periodic_rate.sv` checks the one-second periodic reset at full
  size: the count of one whole second is held for readout while the
  cleared counter counts again.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_uctm_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/uctm_pkg.sv tb/tb_uctm_top.sv
./obj_dir/Vtb_uctm_top
```

Replace `tb_uctm_top` with any other testbench name. Every testbench runs in
under a second except `tb_periodic_rate`, which simulates a full second at
100 MHz and takes about a minute and a half. The top's parameters
`CYC_PER_MS`, `MS_PER_PERIOD` and `LED_HOLD` shorten the timers for
simulation. Their defaults are the real 100 MHz values.

Lint warnings that remain:

* Two concurrent assertions use `rst_n` in `disable iff`, next to its
  asynchronous use in flip-flops.
* The scalers' clocks are data signals, which is intended.
