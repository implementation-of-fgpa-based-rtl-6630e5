# FPGA engines for a DSSS channel sounder

A channel sounder measures how a radio channel smears a signal in time: it
sends a known wide-band signal and, at each receive antenna, estimates the
power delay profile (PDP), the received power as a function of delay. This
design does that with direct-sequence spread spectrum. The transmitter
repeats one known complex symbol, each copy multiplied chip by chip with a
maximal-length pseudo-noise (PN) sequence. Each receiver correlates its
samples with the same sequence. A path that arrives d chips late shows up as
a correlation peak d samples after the line-of-sight peak. The squared
magnitude of the correlation is the PDP. Averaging K consecutive PDPs
suppresses noise peaks.

Doing the correlation in the FPGA has a second benefit. A receive channel
sends the host 32-bit profile values at 1/K of the sample rate, instead of
every raw sample. That lets many antennas be sounded at wide bandwidth at the
same time. The design follows the published USRP X310 / RFNoC channel sounder
(Gokalgandhi, Maddala, Seskar, WINLAB). It has three processing engines:
**spreader**, **correlator** and **averaging**. Its reference setting sounds
100 MHz of bandwidth with a 255-chip sequence and K = 16, on 16 receive
antennas, two per FPGA.

This RTL is a re-implementation in SystemVerilog written from that
description. The original engines were generated with a high-level synthesis
tool and are not reproduced here. Where the description is silent, the
choices made are listed in the last sections.

## Signal path

```
 transmit FPGA                                   receive FPGA (per antenna, NUM_RX chains)
 host --SC16 symbols--> [spreader_ce] --chips-->  DUC -> radio ... radio -> DDC
        (Rs/L)                         (Rs)                                 |
                                                                       SC16 samples (Rs)
                                                                            v
                                                  host <--PDP (Rs/K)-- [averaging_ce] <--power (Rs)-- [correlator_ce]
```

* SC16 means signed complex, 16-bit real and 16-bit imaginary. It is packed
  real-in-upper-half (`chsnd_pkg::sc16_t`).
* Rs is the sounding rate, equal to the sounded bandwidth (100 MS/s in the
  reference setting). Each engine handles one sample per clock.
* `channel_sounder_top` contains one spreader engine and `NUM_RX` receive
  chains. Each chain is a correlator engine feeding an averaging engine.
* Up/down-conversion, radios, the packet router, Ethernet and the host are
  outside the design and appear as ports. On real hardware the transmit and
  receive engines run in different radios. Keeping them in one module lets
  the whole link be simulated through a channel model.

| Build | `NUM_RX` | `CORR_TAPS` | Longest sequence |
|---|---|---|---|
| dual receive (default, used for the 16-antenna measurement) | 2 | 256 | 255 (256 accepted) |
| single receive | 1 | 512 | 511 (512 accepted) |

The dual build uses 256-tap correlators because two 512-tap correlators do
not fit the X310's Kintex-7 alongside the rest of the image.

## PN sequence generator (`pn_seq_gen`)

This is a 10-stage Fibonacci LFSR with a programmable tap mask, so any
polynomial of order 1 to 10 can be used. Stages are numbered 1 to 10. Each
step does three things:

* ANDs every stage with its bit of the polynomial register.
* XORs the products together.
* Shifts the result into stage 1, moving every stage one place towards
  stage 10.

For a polynomial of order N the chip is read from stage N.

Encoding: bit k-1 of `poly` and of `seed` belongs to stage k. Two examples:

* x^6 + x^5 + 1 (taps at stages 5 and 6), seeded with a single 1 at
  stage 6, is `poly = 0x030`, `seed = 0x020`, `order = 6`. It gives a
  63-chip m-sequence.
* The 255-chip sequence of the reference setting uses x^8 + x^6 + x^5 + x^4
  + 1: `poly = 0x0B8`, `order = 8`, and any non-zero seed.

`load` copies the seed in. `step` advances one chip. The chip is valid in the
cycle after either.

Each engine that needs the sequence has its own generator. They produce
identical sequences because they are programmed identically.

## Spreader (`spreader`, `spreader_ce`)

Each accepted symbol is sent out `seq_len` times. A copy goes out unchanged
where the chip is 1 and negated (two's complement) where it is 0. So the
spreading factor always equals the sequence length. Negating -32768 saturates
to +32767.

The generator is reloaded from the seed as each symbol is accepted. Every
symbol therefore carries the complete sequence starting at chip 0. For an
m-sequence of period `seq_len` this gives the same chip stream as a
free-running generator.

The next symbol is accepted in the cycle in which the last chip of the
current one leaves. A continuous input therefore gives a gap-free chip stream
at exactly `seq_len` times the symbol rate. `m_last` marks the last chip of
each symbol.

## Correlator (`parallel_correlator`, `correlator`, `correlator_ce`)

This is the part that takes most of the logic. The correlator computes, for
every received sample,

    y[n] = sum_{l=0}^{L-1} c_l * x[n-l],   power[n] = Re(y)^2 + Im(y)^2

with one result per input sample and no decimation. That is why it is
*parallel*: all L products are formed and summed in every cycle.

**Structure.** `parallel_correlator` handles one real component:

* A shift register of `N_TAPS` samples; tap 0 is the newest.
* A per-tap multiplexer that selects the sample or its two's complement,
  according to the coefficient sign. No multipliers are needed, because the
  coefficients are ±1.
* A binary adder tree.

`correlator` runs two of these, one on the real part and one on the imaginary
part, with shared coefficients. It then squares and adds the two results.

**Coefficient order.** On a start pulse the correlator reloads its PN
generator. It then shifts `seq_len` chips into a coefficient shift register
at tap 0. The first chip therefore ends up at tap L-1 and the last at tap 0:
c_l = chip(L-1-l). This makes the correlator a filter matched to the
transmitted sequence. When the chips of one period have all arrived, each
sits on its own coefficient, and the output peaks on the sample carrying the
last chip of the period. A path delayed by d chips peaks d outputs later,
modulo L.

**Shorter sequences.** Each tap has an enable bit as well as a sign. Taps at
or beyond `seq_len` are disabled and contribute zero. One `N_TAPS`-tap
structure therefore serves any length from 1 to `N_TAPS`.

**Start sequence.**

1. Until the first start, input samples are accepted and discarded. This
   keeps the radio path from backing up.
2. A start pulse clears both sample shift registers and all coefficients.
3. The correlator then holds its input off for `seq_len` cycles while the
   coefficients load.
4. From then on every accepted sample gives one output.

`m_last` marks every `seq_len`-th output after start. Each output packet is
therefore one profile, with the line-of-sight peak at its last position when
the receive stream starts on a period boundary. In `correlator_ce` the start
pulse comes from an edge detector on bit 0 of the Block Start register, so a
restart is written as 0 then 1.

**Pipeline and timing.** The pipeline has these stages:

* The sample register.
* One register per adder-tree level, clog2(N_TAPS) levels.
* Squaring.
* Output.

Latency is clog2(N_TAPS) + 3 cycles from acceptance to output: 11 cycles
for 256 taps, 12 for 512. Throughput is one sample per cycle. Output
backpressure freezes the whole pipeline and deasserts the input ready, so no
data is lost.

**Scaling.** The adder tree keeps full width, 17 + clog2(N_TAPS) bits, and
the power is formed exactly. The 32-bit output is that power shifted right
by `POWER_SHIFT` (default 16) and saturated at 2^32-1. With this shift, a
full-scale 255-chip peak, about 1.1e9 for a real input, fits without
saturating. A weak input of amplitude 1000 still produces peaks around 1e6.
For full-scale 511-chip correlations, or very weak inputs, a different
`POWER_SHIFT` may suit better.

## Averaging (`averager`, `averaging_ce`)

The input is read as consecutive vectors of `seq_len` powers. The averager
adds K = 2^`log_avg` vectors element by element and emits
floor(sum / K) as one vector, at 1/K of the input rate. K is limited to a
power of two of at most 128, so the division is a shift. Larger `log_avg`
values are clipped to 7.

Inside is an accumulator memory of `MAX_LEN` words (default 1024), each 39
bits so that 128 full-scale inputs cannot overflow. The memory is written in
a two-step read-modify-write:

1. When a sample is accepted, the memory word for its position is read
   (synchronous read).
2. In the next cycle the sum is written back. In the first vector of a
   window the sample alone is written. In the K-th vector the shifted sum
   goes to the output register instead.

The input is stalled only when a result is waiting for a busy output.
Because one position is written while the next is read, `seq_len` must be
at least 2.

Vectors are counted from reset. Sample 0 after reset is position 0 of the
first vector of a window. Within the sounder this matches the correlator,
whose output begins at start. After changing the configuration, or to
realign, pulse the engine's Block Reset.

## Setting registers

Each engine has a settings bus: `set_stb` writes `set_data` (32 bits) into
register `set_addr` (8 bits). Writing SR 255 selects which word appears on the
64-bit `rb_data` readback (upper 32 bits zero). Where a register holds two
fields, the first-named field is in bits [31:16] and the second in [15:0].
All registers reset to zero. So every engine must be programmed before use.

| Engine | SR 131 | SR 132 | SR 133 | SR 134 | Readback 0 / 1 / 2 / 3 |
|---|---|---|---|---|---|
| spreader | Block Reset | poly [25:16], seed [9:0] | seq_len [31:16], order [3:0] | - | SR131 / SR132 / SR133 / 0 |
| correlator | Block Reset | Block Start (bit 0, rising edge) | poly [25:16], seed [9:0] | seq_len [31:16], order [3:0] | SR131 / SR132 / SR133 / SR134 |
| averaging | Block Reset | log2 K [31:16], seq_len [15:0] | - | - | SR131 / SR132 / 0 / 0 |

Block Reset is a level. While bit 0 is 1 the engine's datapath is held in
reset and its input is not ready. Write 0 to release it.

Identifiers of the three engines in the original framework: spreader 0xFFC0,
correlator 0xFFFFC1, averaging 0xFFFFC2. They are kept as constants in
`chsnd_pkg` for software that expects them.

In `channel_sounder_top` one shared bus reaches all engines, selected by
`set_dst`: 0 is the spreader, 2i+1 is correlator i, 2i+2 is averager i.
Every engine's readback word is its own output.

### Programming the reference setting

| Register | Value |
|---|---|
| spreader SR 132 | `{16'h00B8, 16'h0001}` |
| spreader SR 133 | `{16'd255, 16'd8}` |
| each correlator SR 133 | `{16'h00B8, 16'h0001}` |
| each correlator SR 134 | `{16'd255, 16'd8}` |
| each averager SR 132 | `{16'd4, 16'd255}` |

Then, for each correlator, write SR 132 = 0 and then SR 132 = 1. Start the
correlators before the receive samples of interest arrive. Then send the
symbol, for example `{re: 11585, im: 11585}` (magnitude 16384), repeatedly to
the spreader.

## Top-level ports (`channel_sounder_top`)

| Port group | Direction | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | single clock; asynchronous active-low reset |
| `set_*`, `rb_*` | in/out | settings bus and readback words (above) |
| `tx_in_*` | in | SC16 symbols from the host (valid/ready) |
| `tx_out_*` | out | SC16 chips to the up-converter (valid/ready/last) |
| `rx_in_*[i]` | in | SC16 samples from down-converter i |
| `pdp_*[i]` | out | 32-bit averaged PDP values to the host, `pdp_last` ending each profile |

All streams follow the AXI-stream rule: a transfer happens on a clock edge
with valid and ready both high. Data must hold while valid is high and ready
is low. The spreader, correlator and averager assert this on their outputs.

## Departures from the published description and own choices

Taken from the published description:

* The three engines and their roles.
* The register numbers and names.
* The LFSR structure, its order limit of 10 and its output stage.
* Spreading by sign selection.
* Two parallel correlators with per-tap negate/select and an adder tree.
* A 32-bit unsigned power output at the input rate.
* The start pulse through an edge detector.
* Power-of-two averaging up to 128 by shifting.
* The 512- and 256-tap sizes and the 1- and 2-channel builds.

Choices made here, because the description does not give them:

* **Register field layout:** bit positions, the reset values, the meaning of
  Block Reset as a held level, and the 64-bit readback.
* **Averaging readback:** the averaging engine's second readback word is
  drawn as "Polynomial, Seed" in the original diagram, which that engine does
  not have. Here it returns its configuration register.
* **Coefficient order:** chip L-1-l on tap l (a matched filter). Read
  literally, the published correlation formula pairs chip l with tap l. That
  would be a convolution with the sequence, not a correlation. The text says
  the samples are correlated with the transmitted sequence, and that was
  followed.
* **Maximum sequence length:** one place says a 512-sample correlator takes
  sequences up to 512 chips, another says up to 511. The hardware accepts
  lengths up to `N_TAPS`; the longest m-sequence that fits is 511 either way.
* **Correlator behaviour around start:** disabled taps beyond `seq_len`,
  input dropped before start, input held off during the coefficient load, and
  `m_last` once per period.
* **Correlator output:** a register on every adder-tree level, and the
  `POWER_SHIFT` scaling with saturation.
* **Spreader details:** the chip mapping (1 is +1, 0 is -1), the reload of
  the generator per symbol, and saturating negation.
* **Averager details:** memory size 1024, a 39-bit accumulator, floor
  division, vector counting from reset, `seq_len` of at least 2, and
  `log_avg` clipped to 7.
* **Top level:** one clock for everything, a fixed correlator-to-averager
  route instead of the packet router, a `set_dst` selector instead of
  routed control packets, and transmit and receive engines in one module.

Not included: the packet shell and AXI wrapper around each engine, the
router, the soft CPU, Ethernet/PCIe, the up/down-converters and the radio
interfaces. These are platform parts that the design uses as supplied. The
engine-level valid/ready streams are where they attach.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
models written independently in `tb/chsnd_tb_pkg.sv`:

* `pn_chips` computes sequences from the LFSR's linear recurrence rather
  than by simulating the register.
* `corr_power` evaluates the correlation sum directly.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it establishes |
|---|---|
| `tb_pn_seq_gen` | Orders 6, 8 and 10 against the recurrence. Maximal length: 2^(N-1) ones and period exactly 2^N-1. Load has priority over step. |
| `tb_spreader`, `tb_spreader_ce` | Every chip value, `m_last`, saturation of -32768. Exactly L chips per symbol in L consecutive cycles. Random backpressure. Register readback. Block Reset. |
| `tb_edge_detector` | Pulse only on rising edges. |
| `tb_parallel_correlator` | 512 and 37 taps (a padded tree) against a direct sum, with random ±1/0 coefficients. Full-scale sum without overflow. Stall. Clear. |
| `tb_correlator`, `tb_correlator_ce` | Drop before start; a 255-cycle coefficient load; every power value through a two-path channel with noise. One output per cycle and 12-cycle latency at 512 taps. `m_last`; peaks at the path delays; restart with another sequence; backpressure. |
| `tb_averager`, `tb_averaging_ce` | Averages for K = 1, 8, 16, 128, including all-ones inputs. Position of `m_last`. No input stall while the output is ready. Clipping of `log_avg`. Block Reset realigns counting. |
| `tb_channel_sounder_top` | Whole link at the default size (2 chains, 256 taps) in the reference setting (L = 255, K = 16). Spreader, then a two-path noisy channel per antenna, then both receive chains. Every averaged PDP value is checked, the two strongest taps must sit at the modelled delays, and the output rate is 1/K. Each mechanism must occur at least once: pre-start drop, start, load hold-off, host backpressure reaching the receive input, spreader input hold, profile packets, readback, Block Reset. |
| `tb_sounder_single_rx` | The single-receive build (`NUM_RX = 1`, `CORR_TAPS = 512`) with a 511-chip sequence (x^9 + x^5 + 1, `poly = 0x110`) and K = 4, with the same checks. |

To simulate with Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/chsnd_pkg.sv tb/chsnd_tb_pkg.sv tb/tb_channel_sounder_top.sv -y rtl \
    --top-module tb_channel_sounder_top -o sim
./obj_dir/sim
```

Every testbench also passes with `+verilator+rand+reset+2` added to the
simulation command line, which starts all unreset state at random values.
The testbenches give reset a falling edge after time zero and ignore outputs
while reset is low.

Replace the testbench file and top name to run another testbench. Package
files must come first. The full-size end-to-end run takes under a second.
All RTL files pass `verilator --lint-only -Wall` with warnings only (unused
package constants and bits, and the reset used both as an asynchronous reset
and in assertion `disable iff` clauses).
