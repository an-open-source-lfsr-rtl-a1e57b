# Stochastic leaky integrate-and-fire neuron with a programmable LFSR

This is a single spiking neuron that fires at random, with a firing
probability you can program. Each clock it draws a pseudorandom number from a
16-bit linear-feedback shift register (LFSR) and checks it against an
eight-entry activation table. The result is a Bernoulli event with
probability *a*/256. The event pushes a 16-bit leaky membrane up. When the
membrane's upper byte reaches a threshold the neuron spikes, resets and goes
quiet for 0 to 7 refractory cycles. So the output spike rate is a smooth,
monotonic function of the table, an input weight and the threshold. Noise is
the mechanism, not an error.

The logic is small enough for one Tiny Tapeout tile (about 160 x 110 µm in
SkyWater 130 nm) at 50 MHz. Sixteen byte-wide registers behind a mode-0 SPI
port configure everything: the feedback polynomial, the seed, the table, the
threshold, the decay and the refractory period.

The RTL is SystemVerilog-2017 and synthesizable. The testbenches are
self-checking and run under plain Verilator.

## One clock cycle of the neuron

Let `s` be the LFSR state, `v` the membrane and `k` the refractory counter.
On every rising clock edge with `CTRL.enable = 1`:

```
a      = LUT[s[15:13]]                 activation picked by the top 3 LFSR bits
c      = s[7:0]                        comparison byte
event  = (c < a) | ext_spike           stochastic event OR external spike
I      = free_run ? a : weight         input current (free-run / host mode)

if      k != 0            : k <= k-1                       (membrane held, no spike)
else if v[15:8] >= theta  : spike <= 1, v <= 0, k <= r     (fire)
else if event             : v <= min(v + I, 0xFFFF)        (integrate, saturating)
else                      : v <= max(v - d, 0)             (leak)

s <= (s == 0) ? 1 : {s[14:0], ^(s & poly)}
```

Everything on the right-hand side is the registered value from before the
edge. The spike output is therefore a one-cycle pulse that rises at the same
edge at which the membrane resets to zero and the counter loads `r`. That is
one clock after the stored membrane first meets the threshold.

The refractory counter blocks both integration and firing. Two spikes are
therefore at least `r+1` cycles apart. With the threshold at 0 and an event
on every cycle, the neuron spikes exactly once every `r+1` cycles. This is
the rate cap 1/(r+1).

Firing takes priority over integration: a cycle that fires does not also add
current. One consequence is easy to miss. The threshold is compared with the
upper byte only, so any membrane at or above 0xFF00 always fires. The largest
step is 255, so the membrane can never pass 0xFFFE. Saturation and the
overflow flag are kept as the membrane equation defines them, but they cannot
be triggered from the pins. The LIF core's testbench drives the core's wider
current port to exercise them.

## The random source and what it gets wrong

### The LFSR

This is a Fibonacci register that shifts left. The new bit 0 is the parity of
the state ANDed with the polynomial register, so any set of taps can be
chosen at run time. A linear register stuck at zero stays at zero, so a zero
state is replaced by 1 on the next step.

Writing `SEED_L` or `SEED_H` reloads the state from the seed register one
clock later. Write the low byte first and the high byte last; the second
write then loads the complete 16-bit seed.

The polynomial that comes out of reset is **0x002D, which is not
maximal-length**. Bit 15 is not a tap, so the map is not invertible. From the
reset seed 0x0001 the state passes through a 10-state transient and then
loops on a 63-state cycle. For real use, program a maximal-length
polynomial: 0xB400 and 0xD008 both give the full 65535-state period.

### Why the firing probability is exactly a/256

Over one full maximal-length period every non-zero 16-bit state occurs once.
For any table index (the top three bits) there are 8192 states. In 32·*a* of
them the low byte is below *a*. The event rate per entry is therefore
exactly *a*/256. Entry 0 has one state fewer, because 0x0000 never occurs.
The testbenches check these counts exactly, not statistically.

### Serial correlation of the events

The comparison byte is eight adjacent bits of a register that moves by one
bit per clock. Consecutive bytes therefore share seven bits, and the event
stream is **not** white, even though the LFSR bit stream is ideal. Over the
0xB400 period with the reset table, the normalised autocorrelation of the
event signal is:

| lag | 1 | 2 | 4 | 6 | 7 | 8 | 9 | 10 | ≥ 12 |
|---|---|---|---|---|---|---|---|---|---|
| r | 0.319 | 0.123 | 0.003 | −0.041 | −0.103 | −0.284 | −0.172 | −0.075 | ≈ 0 |

The negative lobe at lag 8 comes from the byte width. Sampling the event only
every 8th cycle does not help: the lag-1 value of that subsequence is −0.297.
Sampling every 16th cycle gives 0.003, which is effectively white, at 1/16 of
the throughput (3.125 M samples/s at 50 MHz). The chip has no subsampler. The
stream is used raw for integration, and a consumer that needs independent
samples has to decimate. By contrast the LFSR MSB on `uo_out[1]` has the
two-valued autocorrelation of an m-sequence: the ±1 sum is −1 at every
non-zero lag.

## Two ways to drive the membrane

The `ui_in[1]` pin picks the input current:

- **Free-run** (`ui_in[1] = 1`): `I = a`. The same table entry sets both the
  probability of an event and the size of its step. The neuron then runs
  entirely from its registers.
- **Host** (`ui_in[1] = 0`): `I = ui_in[7:4]`, a 4-bit weight (0..15,
  zero-extended). The LFSR and table still decide *when* to integrate; the
  host decides *how much*.

In both modes an external spike on `ui_in[0]` forces an integration in that
cycle. The mode pin may change at any time and takes effect on the next
edge.

With decay 4 and the reset table, the mean drift per cycle in host mode is
about 0.56·w − 0.44·4. Weights 0..3 therefore never reach a threshold of
0x80, and weight 15 fires about once every 5000 cycles.

## Register map

All registers are one byte. They are written and read with 16-bit SPI frames.

| addr | name | access | reset | contents |
|---|---|---|---|---|
| 0x00 | CTRL | R/W | 0x01 | [0] enable, [1] accumulator reset, [2] free-run (stored only), [7:5] refractory period r |
| 0x01 | POLY_L | R/W | 0x2D | polynomial [7:0] |
| 0x02 | POLY_H | R/W | 0x00 | polynomial [15:8] |
| 0x03 | SEED_L | R/W | 0x01 | seed [7:0]; a write reloads the LFSR |
| 0x04 | SEED_H | R/W | 0x00 | seed [15:8]; a write reloads the LFSR |
| 0x05 | THRESHOLD | R/W | 0x80 | compared with membrane[15:8] |
| 0x06 | DECAY | R/W | 0x04 | leak per idle cycle |
| 0x07 | STATUS | RO | – | [0] spike, [1] overflow, [2] latched spike, [3] membrane[15], [4] refractory busy, [7:5] refractory count |
| 0x08–0x0F | LUT0–LUT7 | R/W | 16, 32, 64, 128, 192, 224, 240, 248 | activation entries |

Addresses 0x10–0x7F read as 0 and ignore writes. Writes to STATUS are
ignored.

CTRL bits in detail:

- **enable = 0** freezes the LFSR, the membrane, the counter and the flags,
  and holds the spike output low. A seed write still loads the LFSR while
  the neuron is frozen.
- **accumulator reset** acts as a level. While it is 1, the membrane and the
  counter stay at 0 and the overflow and latched-spike flags are cleared.
- **free-run (bit 2)** is only stored. The mode comes from the `ui_in[1]`
  pin.

A clean way to start a run:

1. Write CTRL = `r<<5 | 0x02` (stop and clear).
2. Program the other registers.
3. Write CTRL = `r<<5 | 0x01`.

After step 3 the state is exactly known: membrane 0 and LFSR equal to the
seed.

### Serial frame

A frame is 16 bits, sent most significant bit first in SPI mode 0 while CS
is low:

```
bit:  15   14..8     7..0
      R/W  A6..A0    D7..D0        R/W = 1 write, 0 read
```

MOSI is sampled on SCLK rising edges. MISO changes on falling edges. In a
read, the register is captured after the 8th rising edge and shifted out
D7-first during the data bits; MISO is 0 otherwise. A write takes effect a
few system clocks after the 16th rising edge. Raising CS early discards the
frame. With CS held low, frames can follow back to back.

SCLK is oversampled by the 50 MHz clock through two-flop synchronisers, so
keep it at or below clk/8 (about 6 MHz). The testbenches use 5 MHz.

## Pins

| pin | use |
|---|---|
| `ui_in[0]` | external spike (integrate this cycle) |
| `ui_in[1]` | 1 = free-run, 0 = host mode |
| `ui_in[7:4]` | host-mode weight |
| `uo_out[0]` | spike (one-cycle pulse) |
| `uo_out[1]` | LFSR bit 15, a randomness monitor |
| `uo_out[5:2]` | membrane[15:12], a coarse view of the state |
| `uo_out[6]` | overflow flag (sticky) |
| `uo_out[7]` | latched spike flag (sticky until accumulator reset) |
| `uio[0]` / `uio[1]` / `uio[2]` / `uio[3]` | CS_n / MOSI / MISO (output) / SCLK |
| `clk`, `rst_n` | 50 MHz clock, asynchronous active-low reset |

`ui_in[3:2]`, `uio[7:4]` and `ena` are unused.

## What is specified and what is chosen here

The following are specified by the published design, and this RTL follows
them:

- the three-part datapath;
- the LFSR equations and the zero reseed;
- the table size and its default values;
- the strict `<` comparison on `s[7:0]` with the index `s[15:13]`;
- the saturating, zero-floored membrane with the upper-byte threshold;
- the refractory hold and the 1/(r+1) cap;
- the two modes on `ui_in[1]` with the weight on `ui_in[7:4]`;
- the sixteen-register map;
- the SPI frame layout.

The simulated statistics and sweeps match the published figures closely:

- autocorrelation 0.32 at lag 1, −0.28 at lag 8, 0.003 after subsampling by
  16;
- 25.1 and 1.77 spikes per 1000 cycles at thresholds 0x10 and 0xF0;
- 0.200 at weight 15.

That agreement is good evidence that the bit positions and the cycle
ordering match the original.

The following are this design's own choices. Each is a plausible reading,
but none is confirmed:

- **Reset values.** The seed 0x0001 was picked because it lies on a 10-state
  transient into the 63-state cycle, as the original reset seed does. The
  threshold 0x80, decay 4 and CTRL = enabled are also choices.
- **Spike and priority.** The spike is registered, and firing takes priority
  over integration.
- **CTRL bits.** The accumulator reset acts as a level. Enable = 0 freezes
  everything.
- **Flags.** The set and clear rules of the overflow and latched-spike flags
  are chosen here.
- **STATUS layout.** The STATUS bit order is chosen here. The refractory
  count sits in STATUS[7:5], because there is no spare address for a
  separate register.
- **Seed reload.** The LFSR reloads whenever a seed byte is written.
- **Pins.** The external spike is on `ui_in[0]`. The `uo_out` order and the
  SPI pin assignment are chosen here.
- **SPI details.** R/W = 1 means write. CS is active low. The SPI port is
  oversampled by the system clock.
- **Mode pin polarity.** `ui_in[1] = 1` means free-run.
- **Weight.** The weight is zero-extended. The published weight sweep
  supports this: it is silent below weight 4 at decay 4.

The original flop count is 208; coarse synthesis of this RTL gives 217.
Most of the difference is probably in the SPI front end.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_lfsr16_cfg` | step-by-step against a reference LFSR for 40 random polynomials; load, hold, zero reseed; periods 63 (+10 transient), 65535, 65535 |
| `tb_stoch_activation` | all 65536 states for 6 tables; per-entry fire counts 32·a over the 0xB400 period |
| `tb_input_current_mux` | exhaustive mode × activation × weight |
| `tb_refractory_counter` | busy exactly r cycles for r = 0..7; clear and enable priority |
| `tb_lif_core` | 20000 random cycles against a cycle model; refractory cap; saturation; leak floor; accumulator reset |
| `tb_neuron_regfile` | reset values, random writes against a shadow copy, read-only STATUS, unused addresses, seed reload pulse |
| `tb_spi_slave` | random read and write frames through a mode-0 master, aborted frames |
| `tb_top` | the whole chip at default sizes through its pins, compared on every `uo_out` bit and every cycle with a full-neuron model (see below) |
| `tb_stoch_stats` | full 0xB400 period: byte histogram, m-sequence autocorrelation of the MSB, event autocorrelation and subsampling |
| `tb_rate_sweeps` | weight sweep 0..15, threshold sweep 0x10..0xF0, refractory sweep 0..7 through the pins |

In `tb_top`, each run starts from a known state and is aligned to the model
by searching a 16-clock window. The runs cover:

- the reset defaults;
- the free-run rate;
- the refractory sweep;
- host weights 15 and 2;
- a mid-run mode switch with random external spikes;
- a zero seed.

The testbench counts how often each mechanism happens and fails if any of
them never does.

To run one testbench with Verilator 5, from the directory above `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/stoch_neuron_pkg.sv rtl/*.sv tb/tb_top.sv --top-module tb_top -o sim
./obj_dir/sim
```

Replace `tb_top` with any other testbench. The package must come first. The
whole-chip tests take seconds.

## Files

`rtl/`:

- `stoch_neuron_pkg.sv`: register map, field structs and reset values.
- `lfsr16_cfg.sv`: the LFSR.
- `stoch_activation.sv`: the table lookup and comparator.
- `input_current_mux.sv`: the mode selection.
- `refractory_counter.sv` and `lif_core.sv`: the membrane, threshold,
  refractory counter and flags.
- `neuron_regfile.sv`: the registers.
- `spi_slave.sv`: the serial port.
- `tt_um_santhosh_stoch_neuron.sv`: the top level, with the Tiny Tapeout
  port list.

`tb/` holds one testbench per module plus the three whole-design
testbenches.

Not included:

- the Tiny Tapeout harness, pads and physical implementation;
- any subsampling or decorrelation hardware, since the original has none.
