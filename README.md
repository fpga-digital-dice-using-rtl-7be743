# A tilt-operated digital dice in SystemVerilog

This is a dice with no moving parts except a tilt switch. The dice is a small
cube holding an FPGA board, a 4-digit seven-segment display, two push buttons,
a ball tilt switch, an analog accelerometer and a battery. You shake it or
turn it over and the display scrambles. You set it down and, about 0.7 s
later, the display freezes on a result between 1 and N. N is picked with the
buttons from 2, 4, 6, 8, 10, 12, 20 and 100.

The random numbers come from the FPGA's on-chip ADC (the Xilinx XADC). It
samples the accelerometer at 10 Hz. The last two 16-bit samples form a 32-bit
seed. An XORshift scrambles the seed, and a modulo brings the result into the
dice's range. Each result is also sent over a 1000-baud serial line so that a
PC can log it and check the statistics.

This RTL follows a published open hardware dice design and its top-level
Verilog. The logic of every block is kept as published, down to the cycle
where that matters. The sections below say where this version departs from
it: a single clock domain, registered random output, and interfaces that had
to be chosen.

## The three modes

Two flags define the dice's state at any time:

| mode        | `upright` | `setmode` | display                         | what updates           |
|-------------|-----------|-----------|---------------------------------|------------------------|
| generation  | 0         | 0         | scrambling result, colon lit    | seed, result at 10 Hz  |
| display     | 1         | 0         | frozen result, colon dark       | nothing (result held)  |
| dice set    | 1         | 1         | `d` + side count, e.g. `d20`    | dice type per button   |

* **Generation to display.** The tilt switch reads 1 for at least 7 of the
  last 10 samples, taken at 10 Hz.
* **Display to dice set.** The up or down button is pressed while upright.
* **Back to generation.** The switch reads 0 often enough that fewer than 7 of
  the last 10 samples are 1.

Leaving the upright state also leaves dice-set mode. The next time the dice
settles, it shows a new roll of the dice type chosen last.

### Tilt filter (`tilt_detect`)

A 10-bit shift register records the switch level at every 10 Hz strobe. On
the same strobe the ones in the register are counted, and `upright` becomes
`count >= 7`. The count is taken from the register *before* the new sample
enters, which adds one sample of delay:

* Suppose the history is cleared and the switch stays closed. `upright` rises
  on the 8th strobe, about 0.8 s.
* Suppose the history is full and the switch opens. `upright` falls on the 5th
  strobe, about 0.5 s.

A rattling switch only counts as stable once 7 of its last 10 samples read 1.
This is the whole debouncing scheme.

### How a roll is decided (`seed_gen`, `prng`, `roll_proc`)

On every 10 Hz strobe:

1. `seed = {seed[15:0], adc_sample}`: the newest XADC result enters at the
   bottom.
2. `rand = xorshift(seed)`, with `x ^= x >> 7; x ^= x << 9; x ^= x >> 13`. It
   is recomputed from the seed itself. It is *not* iterated from the previous
   `rand`. It is registered one sysclk cycle after the seed changes.
3. If the dice is not upright: `face = rand % sides + 1`, split into decimal
   digits.

Step 3 reads `rand` before the current strobe's seed update has passed
through, so the result of strobe *k* comes from the samples of strobes *k-1*
and *k-2*. The frozen value is the result computed on the last strobe before
`upright` rose. It depends only on the two analog samples that came just
before it.

Everything random in the dice therefore comes from the accelerometer's noise
and motion. The XORshift adds no state and so no entropy: it only spreads the
ADC's low-order variation over all 32 bits. If the analog input were
perfectly still, every roll would give the same value. Modulo bias is
negligible: 2^32 mod N is tiny next to 2^32.

The digits sit one position left of where a plain number would go. This
centres the result on the display:

| digit                     | `thou`   | `huns` | `tens` | `ones` |
|---------------------------|----------|--------|--------|--------|
| holds                     | hundreds | tens   | units  | blank  |
| a d20 showing 7 displays  | blank    | blank  | 7      | blank  |

After reset all four digits hold the `d` code, so the display reads `dddd`
until the first strobe.

### Buttons (`dice_select`)

Each button is registered on the 10 Hz strobe and acted on at the next one.
The rules below apply only while upright:

* **Up alone** steps the dice type forward: 2 → 4 → … → 100 → 2.
* **Down alone** steps it backward.
* **Both together** clear `keepon`, the keep-awake enable. Only a reset sets
  it again.

A held button steps once per strobe, so holding it for 0.3 s moves three
types. The set-mode pattern and the side count used for rolling are loaded
from the index as it was *before* the step. They therefore show a new choice
one strobe later.

## Display path (`display_mux`, `segment`)

Each digit travels as a 4-bit code:

* 0–9 are decimal digits.
* `4'hD` draws a lower-case `d`.
* `4'hF` leaves the digit dark.
* A, B, C and E never occur; the decoder draws them as hex letters.

`dice_pkg` names the two glyph codes (`DIGIT_D`, `DIGIT_BLANK`) and the
`digits4_t` struct. The struct holds `{thou, huns, tens, ones}`, thousands
first.

`display_mux` shows the set pattern in dice-set mode. Otherwise it shows the
roll digits with leading zeros blanked:

* `thou` is blank when it is 0.
* `huns` is blank when it and `thou` are 0.
* `tens` is blank when all three upper digits are 0.
* `ones` is blank whenever it is 0.

`segment` lights one digit at a time. It steps to the next digit on every
500 Hz strobe, so each digit is lit for 2 ms and the whole display refreshes
at 125 Hz. It scans ones, tens, hundreds, thousands. Inside `segment`,
`an[k]` lights the digit taken from `bcd[4k+3:4k]`. The top level reverses
the four enables, so on the board `an[0]` is the leftmost digit, as in the
published wiring.

Polarity is this design's own choice. The display is common-anode, with the
digit and segment pins wired straight to the FPGA. So `an` is active high and
`seg` is active low, with `seg[0]` = a … `seg[6]` = g.

The colon is on the decimal-point pin and is driven with `upright`. Being
active low, it lights while the dice tumbles, which is the "not settled"
indicator.

## Timing base (`clock_gen`, `clk_div`)

The board clock is 12 MHz. Five counters toggle a square wave every HALF
cycles:

| rate    | HALF      | strobe period (cycles) | used by                           |
|---------|-----------|------------------------|-----------------------------------|
| 1000 Hz | 6000      | 12,000                 | UART bit rate and message pacing  |
| 1500 Hz | 4000      | 8,000                  | nothing (kept from the original)  |
| 500 Hz  | 12000     | 24,000                 | display scan                      |
| 10 Hz   | 600024    | 1,200,048 (9.9996 Hz)  | tilt, buttons, seed, roll         |
| 0.2 Hz  | 30001200  | 60,002,400 (5.0002 s)  | keep-awake                        |

The original design clocks its logic *with* these divided signals. Here
everything runs on sysclk. Each divider also outputs a one-cycle strobe
(`*_tick`), high in the cycle whose closing edge makes the square wave rise.
Logic enabled by the strobe updates on the same sysclk edge where logic
clocked by the divided clock would. The behaviour is the same, but in one
clock domain. The HALF values are parameters of `clock_gen` and `dice_top`,
and the testbenches shorten them.

## Serial log (`uart_if`, `uart_tx`)

`uart_tx` is a five-state machine, advanced once per bit strobe:

* **IDLE.** The line is high. A request is taken when `ap_ready` is high at a
  bit strobe, and the byte is captured then.
* **START.** One low bit.
* **TRANSFER.** 8 data bits, LSB first.
* **PARI** (optional). One even-parity bit, sent only if the `parity` input
  is 1.
* **STOP.** One high bit. `ap_valid` is high during it.

Two assertions in `uart_tx` state the line rules: the line is high in IDLE,
and `ap_valid` is high exactly in STOP. `segment` asserts that at most one
digit is lit. Reset is synchronous, as the original specifies. The rest of the design uses
asynchronous reset, so lint reports the shared reset net as both synchronous
and asynchronous. That is expected.

`uart_if` toggles `ap_ready` on every 1000 Hz strobe and ties `parity` to 0.
Each message is one byte, the result's tens digit and units digit in BCD:
`{huns, tens}` of the roll digits, so a 17 is sent as `0x17` and a 100 as
`0x00`. The line runs at 1000 baud. A frame is 10 bits, and the transmitter
then waits until it next sees `ap_ready` high, so one message leaves every
12 ms (about 83 per second). The dice sends the current result continuously,
whether it is scrambling or frozen. A logger has to pick out the settled
values itself.

## Keep-awake (`keep_awake`)

The battery module turns its output off when the load stays under about
50 mA for 30 s. The FPGA sometimes draws less than that. The module's button
input restarts its timer on a falling edge that follows a long pause. So
every 5 s the dice toggles `onpin`, and the pin falls once every 10 s.

Pressing both buttons clears `keepon`. On the next 5 s strobe `onpin` goes
low and stays low, and the battery module shuts the dice off some 15–30 s
later. `led[0]` shows the same toggle.

## Top level (`dice_top`)

| port                          | dir | meaning                                                    |
|-------------------------------|-----|------------------------------------------------------------|
| `sysclk`                      | in  | 12 MHz                                                     |
| `tilt`                        | in  | tilt switch, 1 = upright                                   |
| `btnU`, `btnD`                | in  | up / down buttons, active high                             |
| `btn[1:0]`                    | in  | board buttons; `btn[0]` is reset (pressed = reset), `btn[1]` unused |
| `seg[6:0]`, `dp`, `an[3:0]`   | out | display: segments (active low), colon = `upright`, digit enables (`an[0]` leftmost) |
| `led[1:0]`                    | out | `led[1]` = tilt switch, `led[0]` = keep-awake toggle       |
| `onpin`                       | out | to the battery module's button input                       |
| `uart_rxd_out`                | out | serial log, to the board's USB-UART bridge                 |
| `xadc_daddr[6:0]`             | out | XADC DRP address, constant `7'h14`                         |
| `xadc_den`                    | out | XADC DRP enable, wired to `xadc_eoc`                       |
| `xadc_eoc`                    | in  | XADC end of conversion                                     |
| `xadc_do[15:0]`               | in  | XADC DRP read data                                         |

The XADC is a vendor macro and is not part of this RTL. Instantiate it in a
board wrapper and connect it as follows:

* its DRP clock to `sysclk`;
* `daddr_in` to `xadc_daddr` and `den_in` to `xadc_den`;
* `eoc_out` to `xadc_eoc` and `do_out` to `xadc_do`;
* `di_in` and `dwe_in` to 0;
* the accelerometer to VAUX4 and VAUX12.

The original reads DRP address `0x14` (the VAUX4 result), enables a read on
every end of conversion, and ignores `drdy`. This RTL does the same.

## Files

| file                   | contents                                                        |
|------------------------|-----------------------------------------------------------------|
| `rtl/dice_pkg.sv`      | digit codes, `digits4_t`, dice table, set-mode patterns, `xorshift32` |
| `rtl/clk_div.sv`       | one divider: square wave and rising-edge strobe                 |
| `rtl/clock_gen.sv`     | the five dividers                                               |
| `rtl/tilt_detect.sv`   | 10-sample tilt filter                                           |
| `rtl/dice_select.sv`   | buttons, dice type, set mode, keep-awake enable                 |
| `rtl/seed_gen.sv`      | 32-bit seed from two 16-bit ADC samples                         |
| `rtl/prng.sv`          | registered XORshift                                             |
| `rtl/roll_proc.sv`     | modulo, digit split, hold while upright                         |
| `rtl/display_mux.sv`   | set pattern or blanked result                                   |
| `rtl/segment.sv`       | display scanning and glyph decoding                             |
| `rtl/keep_awake.sv`    | battery keep-awake pulse                                        |
| `rtl/uart_tx.sv`       | serial transmitter                                              |
| `rtl/uart_if.sv`       | message pacing and payload                                      |
| `rtl/dice_top.sv`      | top level                                                       |

## Where this version departs from the original, and what was chosen

The departures:

* **Clocking.** The original uses divided clocks. Here there is a single
  clock with enable strobes, with the same update edges.
* **Random output.** The original's written description says the XORshift
  output is kept in a register and iterated from its previous value. Its code
  instead recomputes it from the seed, in a process sensitive only to the
  clock. Here it is computed from the seed, as the code does, and registered
  each sysclk cycle, as the description says.
* **Upright threshold.** The description says the count must *exceed* 7,
  while the code tests `>= 7`. The code is followed.
* **Keep-awake reset.** The original resets the keep-awake flip-flops only on
  a 5 s clock edge. Here they reset asynchronously, like everything else.

No code was available for the display driver or the serial transmitter, only
their behaviour. These choices were made for them:

* scan order;
* digit and segment polarity;
* glyph shapes and the segment bit order;
* UART bit order;
* the meaning of `ap_valid`;
* even parity for the optional parity bit.

The sysclk frequency (12 MHz) is not stated with the original design. It is
the frequency at which its divider counts give 1000 Hz, 10 Hz and 5 s.

## Simulation

Every testbench is self-checking and ends by printing
`TB_RESULT checks=N failures=M`. With Verilator 5, build and run any of them
from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing -y rtl -y tb rtl/dice_pkg.sv tb/dice_top_tb.sv --top-module dice_top_tb
./obj_dir/Vdice_top_tb
```

| testbench              | what it exercises                                                                 | run time |
|------------------------|-----------------------------------------------------------------------------------|----------|
| `clock_gen_tb`         | strobe spacing and square-wave half periods; first strobes and periods at the real counts | ~15 s |
| `tilt_detect_tb`       | random switch patterns against a software history; 8-strobe rise, 5-strobe fall | <1 s |
| `dice_select_tb`       | random buttons/upright against a reference; both wrap-arounds; shutdown latch     | <1 s |
| `seed_gen_tb`, `prng_tb` | shift register; fixed and random XORshift vectors; registered output            | <1 s |
| `roll_proc_tb`         | all dice types, hold while upright, every face of d6 and d100                      | <1 s |
| `display_mux_tb`, `segment_tb` | blanking rules; scan order, glyphs, reset pattern                          | <1 s |
| `keep_awake_tb`        | toggle per strobe, forced low after disable                                       | <1 s |
| `uart_tx_tb`, `uart_if_tb` | frames with and without parity, capture, pacing of one message per 12 bit times | <1 s |
| `dice_top_tb`          | whole dice with short dividers: 9 rolls, all mechanisms                           | ~3 s  |
| `dice_top_full_tb`     | whole dice at the real 12 MHz counts: 6 rolls and the shutdown, about 32 s of dice time | ~3 min |
| `rng_distribution_tb`  | 8,900 d20 rolls and 5,120 raw values from random ADC input, chi-square against uniform | <1 s |

The whole-dice testbenches both use `tb/dice_env.sv`. It acts as the user and
watches only the pins:

* It rebuilds the display from the multiplexed `an`/`seg` pins, using its own
  glyph table.
* It decodes the serial line.
* It predicts each roll. It holds the ADC input at a constant value A for the
  last samples of each tumble, so the result must be `xorshift({A,A}) % N + 1`.
  The d20 and d100 rolls use an A picked to give a one-digit result and
  exactly 100.

It counts every mechanism and fails the run if one never happened. The
mechanisms are: settling, tumbling, set mode, stepping up and down, both
wrap-arounds, a button press ignored while tumbling, scrambling, leading-zero
blanking, a three-digit result, serial frames, keep-awake toggles and the
shutdown. It also checks these rates:

* the display steps to the next digit every 2 ms;
* one serial message leaves every 12 ms;
* the keep-awake pin toggles every 5 s.

`rng_distribution_tb` feeds uniformly random samples, so it checks the
arithmetic of the seed → XORshift → modulo chain. It says nothing about how
random a real accelerometer's noise is.

## Limits

* **Randomness.** It is only as good as the analog input. A dice lying still
  on a quiet table during its last 0.2 s of tumbling gives a result decided by
  ADC noise alone.
* **Button debouncing.** There is none beyond the 10 Hz sampling. A press
  shorter than 0.1 s may be missed, and a held button keeps stepping.
* **Serial log.** It repeats the current result about 83 times a second, not
  once per roll. A result of 100 is sent as `0x00`.
