# XADC-seeded random number generator for an Artix-7 board

This is a hardware random number generator that produces a new 32-bit number on
every clock. It is meant for a Nexys A7 board (Artix-7 FPGA, 100 MHz clock). At
its core is a deterministic generator: a 32-bit XORshift step whose output is
fed back as the next seed. Deterministic generators repeat, and their output is
fixed once the seed is known. To weaken both properties, the seed keeps being
replaced by a physical measurement. An analog input of the FPGA's on-chip ADC
(XADC) is left open and picks up ambient electrical noise. The first seed is
built from one ADC reading, and every 1000 clocks the running seed is replaced
by a fresh reading. The numbers are shown in hex on the board's eight 7-segment
digits and sent to a host PC over the USB-serial port, where their distribution
can be inspected.

The RTL follows the design published by J. Hammond, "FPGA Random Number
Generator" (Johns Hopkins University, 2022). That report gives the two feedback
functions and the top-level control logic as Verilog listings. It gives only the
ports and handshakes of the display driver and the UART transmitter, which it
took from board-vendor examples. Those two blocks, and a few details the
listings get wrong, are this implementation's own. They are listed under
[Departures](#departures-from-the-published-design).

## The seed loop

```
            xadc_do (16 bit)           rand_out (32 bit, one per clock)
 XADC ───► xadc_sampler ──sample──► rpu ──────────────┬────────────► (port)
 (vendor   den = eoc, addr 0x13     ┌─────────────┐   ├─► display_refresh ─► digit_to_seg ─► an, seg
  IP, off-                          │ seed reg    │   │    (every 10^7 clk)   (1 ms/digit)
  chip of                           │   │         │   └─► uart_word_sender ─► uart_tx_ctrl ─► uart_txd
  this top)                         │ xorshift ───┘         (4 bytes/word)     (115200 8N1)
                                    └─ or middle_square
```

`rpu` (random processing unit) holds a 32-bit seed register. The feedback
function is combinational. `rand_out = f(seed)` is the number of the current
cycle, and at the next clock edge it becomes the seed. The seed register is loaded
as follows:

| condition (before the edge)          | next seed                | `reseed` pulse |
|--------------------------------------|--------------------------|----------------|
| after reset, no ADC sample yet       | unchanged (0)            | no             |
| first sample available               | `sample * sample`        | yes            |
| 1000 cycles since the last load      | `sample << 8`            | yes            |
| otherwise                            | `rand_out`               | no             |

A counter, `seed_count`, runs 1..1000. When it reads 1000 the seed is reloaded
and the counter goes back to 1, so there is exactly one reload every 1000
clocks. `sample << 8` puts the 16-bit ADC word into bits 23:8 of the seed. These
are the bits the middle-square function squares. Because `rand_out` is
combinational from the register, the first number made from a fresh seed
appears one cycle after the `reseed` pulse.

A seed of zero is a fixed point of both functions. The first load (`sample²`) and
the reloads (`sample << 8`) give a non-zero seed for every non-zero ADC reading.
A reading of exactly zero would keep the generator at zero until the next reload.

## The two feedback functions

**XORshift** (`xorshift.sv`, the default). Three XOR-with-shift steps:

```
t1  = seed ^ (seed >> 7)
t2  = t1   ^ (t1   << 9)
out = t2   ^ (t2   >> 13)
```

Each step is an invertible linear map on 32 bits, so the step is a bijection
and only zero maps to zero. From seed `0x12345678` the sequence runs
`326c05b8, 23b2a62e, c87544fa, 02b95db9`. These values appear in the published
simulation waveform, and the testbench checks them.

**Middle-square** (`middle_square.sv`, `ALGO = ALGO_MIDDLE_SQUARE`). This is a
binary form of von Neumann's method: `out = seed[23:8]²`. The next state
depends only on 16 bits, so a free-running sequence falls into a cycle within
65,536 steps. It also has a sink at zero: once bits 23:8 are zero, the output
stays zero until the next reload from the ADC. From `0x12345678` the sequence is
`0ab30ce4, 7d39c890, 0d0aac40, 0071e390`, as in the published waveform. The
published design compares middle-square with XORshift and prefers XORshift.
Middle-square is kept here as a parameter choice so that the comparison can be
repeated. Only one function is built into a given instance.

## Where the entropy enters: `xadc_sampler`

The XADC is configured outside this RTL (vendor IP). It converts continuously
and pulses `eoc` at the end of each conversion. As in the published wiring, `eoc`
drives the DRP enable `den` directly, with the fixed address `0x13`. That
address is the status register of auxiliary channel 3, which is the VAUX3 pin
pair on the board's JXADC header. The XADC answers with `drdy` and the result
on `do`. `xadc_sampler` registers the result (`sample`), raises `sample_valid`
for good, and pulses `sample_stb`. The XADC result is 12 bits, left-aligned in
the 16-bit word. All 16 bits are used, as in the published logic. How much
entropy the open input actually supplies cannot be judged from RTL.

## Getting numbers out

The generator makes 100 million numbers per second. Neither output can carry
that, so both take samples.

**Display.** `display_refresh` copies `rand_out` into eight hex digits once every
10,000,000 clocks (10 times per second). `digits[0]` holds bits 3:0, and
`digits[7]` holds bits 31:28. `digit_to_seg` multiplexes the eight digits. Each
digit is lit for 100,000 clocks (1 ms), and a full sweep takes 8 ms. Anodes and
segments are active low. `digits[0]` is shown on the rightmost digit (`an[0]`).
Segment bit 0 is CA and bit 6 is CG.

**Serial line.** `uart_word_sender` takes a snapshot of `rand_out` and sends it
as four bytes: bits 7:0 first, then 15:8, 23:16 and 31:24. For each byte it
waits until `uart_tx_ctrl` reports `ready`, then drives `data` with a one-cycle
`send` pulse. It waits for `ready` to drop and then to rise again before the next
byte. After the fourth byte it takes a new snapshot. `uart_tx_ctrl` sends 8N1
frames: a start bit (0), eight data bits LSB first, and a stop bit (1). Each bit
lasts 868 clocks, which is 100 MHz / 115,200 baud. `ready` falls in the cycle
after `send` and returns 8680 clocks later.

A word therefore occupies the line for about 4 × 8683 ≈ 34,730 clocks. The host
sees roughly one number in 35,000, and the numbers between snapshots are never
sent. A host reading 4 bytes per number gets them in the order above. Printed
as a hex string of the received bytes, the number appears byte-reversed.

## Timing summary

| event                                   | clocks (default)          |
|-----------------------------------------|---------------------------|
| new `rand_out`                          | every cycle               |
| seed reload from ADC                    | every 1000                |
| first seed after reset                  | 2 after the XADC's first `drdy` |
| display snapshot                        | every 10,000,000 (first one 10,000,000 after reset) |
| display digit dwell / full sweep        | 100,000 / 800,000         |
| UART bit / frame / 32-bit word          | 868 / 8680 / ≈ 34,730     |

## Files

| file | contents |
|------|----------|
| `rtl/rng_pkg.sv` | word type, `algo_e` enum, clock/baud/period constants, `hex_to_seg()` |
| `rtl/xorshift.sv`, `rtl/middle_square.sv` | the two combinational feedback functions |
| `rtl/rpu.sv` | seed register, reload counter, choice of function (`ALGO`) |
| `rtl/xadc_sampler.sv` | XADC DRP read control and sample register |
| `rtl/display_refresh.sv` | 10 Hz snapshot of the number into eight hex digits |
| `rtl/digit_to_seg.sv` | multiplexed 7-segment driver |
| `rtl/uart_word_sender.sv` | four-byte sequencing with the UART handshake |
| `rtl/uart_tx_ctrl.sv` | 8N1 UART transmitter with `send`/`ready` handshake |
| `rtl/xadc_random.sv` | top level |
| `rtl/tb_checks.svh` | `CHECK` macro used by the testbenches |
| `tb/*_tb.sv` | one self-checking testbench per module, plus the tests below |
| `tb/xadc_model.sv` | behavioural XADC (DRP read timing, noisy readings) for simulation |
| `tb/rng_top_checker.sv` | scoreboard for the top: seed model, UART receiver, segment decoder |

Top-level parameters: `ALGO` (`ALGO_XORSHIFT` or `ALGO_MIDDLE_SQUARE`),
`RESEED_PERIOD` (1000), `DISPLAY_REFRESH_CYCLES` (10,000,000), `CLKS_PER_BIT`
(868), and `SCAN_CYCLES` (100,000). The XADC instance, the pin constraints and
the reset source belong to the board wrapper, which also ties the XADC's DRP
write enable, write data and reset to 0, as the published instantiation does. The top has a synchronous,
active-high `rst`. The published design had no reset.

## Departures from the published design

- **First seed.** The published top-level listing assigns `seed = data*data` when
  the counter is 0. In the same blocking `always` block it then overwrites that
  with `seed = rand_out`, so the squared reading never takes effect. Its comment
  says that the ADC reading should start the generator, and that is what is
  built here. The first load also waits until the first conversion has been
  captured.
- **Word sending.** The published listing reloads the four bytes from the running
  number in every cycle. It raises `send` for every cycle in which `ready` is
  high. At the wrap it sets the byte counter to 0 and then increments it again,
  so after the first word the lowest byte would never be sent. The RTL does what
  the listing's comments describe instead: one snapshot per word, all four
  bytes in order, and a single-cycle `send`.
- **UART timing.** The report states both "868 clock cycles per byte @115200
  baud" and a 32-bit number "once every ~3500 clock cycles". At 100 MHz, 868
  clocks is one bit at 115,200 baud. The host side opens the port at 115,200
  baud, so the RTL uses 868 clocks per bit. A word then takes about 34,700
  clocks, ten times the report's estimate.
- **Sample register.** The published design uses the XADC's `do` output
  directly. The RTL captures it on `drdy`.
- **Display driver and UART insides.** The published design took these from
  vendor examples, and only their ports and handshakes are known. The scan rate,
  the polarity, the digit placement and the frame shift register here are this
  implementation's choices.
- **Not built.** The XADC itself is an analog hard block configured with vendor
  IP, and only a simulation model is provided. The board's USB-serial bridge
  and the host-side capture and plotting scripts are also not built. A
  bring-up configuration is left out as well: it showed the ADC reading as a
  decimal voltage, `(data >> 4) * 250000 >> 10` split into decimal digits.

## How far it can be trusted

Every module has a self-checking testbench. Each one compares the module with a
reference written independently of the RTL: shift-free and multiply-free
models of the two functions, a cycle model of the seed register, a UART
receiver that samples mid-bit, and a segment decoder built from a table of
lit-segment letters. Each testbench was also run against a copy of its module
with one deliberate bug, and failed.

- `xadc_random_tb` runs two complete generators, one with XORshift and one with
  middle-square, at shortened periods for 60,000 clocks. It checks every
  `rand_out`, every word on the serial line and every lit digit. It also counts
  seed loads, feedback steps, display refreshes, words received and cycles spent
  waiting on the UART, and requires each to happen.
- `xadc_random_full_tb` runs the top with all defaults for 10.9 million clocks.
  It sees the first display refresh at exactly clock 10,000,000, a full digit
  sweep after it, and about 310 words on the serial line at 34,723 clocks per
  word.
- `workload_tb` repeats the randomness experiments in simulation, with 490,000
  numbers (one 700 × 700 image) each. It counts a pixel as black when its number
  is below 0.5, i.e. when bit 31 is clear. Results:
  - XORshift, ADC-seeded: 50.0 % black.
  - Middle-square, ADC-seeded: about 85 % black, with about half of all outputs
    zero. This matches the report's "much darker" image: the zero sink holds
    until the next reload.
  - Middle-square from the fixed seeds `0x19238433` and `0x20118433`: both fall
    into short cycles, after 151 and 216 steps.

  The report says that seed `0x20118433` collapses to zero, but with the binary
  middle-square it does not. The likely reason is that those images were made
  with a different, software middle-square.

What is not covered: the real XADC and its noise, behaviour on the board, and
any statistical test beyond the fraction below one half.

## Simulating

Any testbench builds with plain Verilator 5. For example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/rng_pkg.sv tb/xadc_random_tb.sv --top-module xadc_random_tb
./obj_dir/Vxadc_random_tb
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog
stops a run that hangs. The full-size test (`xadc_random_full_tb`) takes about
10 s, and the others take about a second each. To change the design's
behaviour, change the top's parameters. For example, a faster display refresh
or a different baud rate only needs `DISPLAY_REFRESH_CYCLES` or `CLKS_PER_BIT`.
A new feedback function needs another `algo_e` value and another branch of the
`generate` in `rpu.sv`.
