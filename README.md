# A double pendulum pseudo random number generator in SystemVerilog

A double pendulum is a simple mechanical system that is also chaotic. Two
runs that start a hair apart soon move in unrelated ways. This design uses
that property to make random-looking numbers:

1. Four environmental sensors give the pendulum its starting conditions:
   masses, rod lengths, gravity and the two initial angles. The sensors are a
   magnetometer, a microphone, a light sensor and a temperature/humidity
   sensor.
2. The FPGA integrates the equations of motion in a small decimal
   fixed-point format.
3. The pendulum's two angles after a number of time steps form a 64-bit
   output word.
4. The word is sent over a UART to a microcontroller, which shows it on a
   character LCD.

A press of a button starts each number.

The RTL targets a small Artix-7 board with a 12 MHz clock. It uses no
vendor primitives. The on-chip ADC that digitises the microphone is outside
the RTL; its result enters through two top-level ports.

## Contents

- [System overview](#system-overview)
- [The decimal number format](#the-decimal-number-format)
- [Arithmetic on the format](#arithmetic-on-the-format)
- [Sine and cosine](#sine-and-cosine)
- [The pendulum engine](#the-pendulum-engine)
- [From sensors to seed](#from-sensors-to-seed)
- [Button, warm-up and transfer](#button-warm-up-and-transfer)
- [Parameters of the top](#parameters-of-the-top)
- [Simulating](#simulating)
- [What the tests show](#what-the-tests-show)
- [Departures and open points](#departures-and-open-points)

## System overview

```
           I2C (open drain)        SPI                     XADC result
 HMC5883L <---------------> hmc5883l_i2c   mcp3202_spi <---> 2 x MCP3202   mic_sample/mic_valid
                                |  x,y,z       | 4 x 12 bit                      |
                                +--------------+---------------+------------------+
                                               v
                  btn -> btn_debounce ---> controller --load--> seed_mapper -> dp_engine
                                                 |  (run, WARMUP_STEPS steps)      |
                                                 +<-------- word {t1,t2} ----------+
                                                 v
                                          uart_fsm_loop (8 bytes) -> uart_tx -> uart_txd
```

The modules are listed below. The package `dp_math_pkg` holds the number
type, the operation codes and every arithmetic function. The ALU and the
trigonometry unit call those functions, so the arithmetic is written once.

| Module | Role |
|---|---|
| `dp_math_pkg` | The 32-bit decimal type, constants, plus/minus/times/divide/neg/abs/sin/cos as functions |
| `dp_math_alu` | Combinational arithmetic unit over the package functions |
| `dp_trig` | Combinational sine/cosine unit |
| `dp_engine` | Integrates the double pendulum, one operation per clock |
| `seed_mapper` | Sensor readings to initial conditions |
| `hmc5883l_i2c` | I2C master for the HMC5883L compass, one reading per second |
| `mcp3202_spi` | SPI master scanning the four channels of two MCP3202 ADCs |
| `btn_debounce` | Two-flop synchroniser and 10 ms debouncer for the button |
| `uart_fsm_loop` | Cuts a 64-bit word into eight bytes for the UART |
| `uart_tx` | 8N1 transmitter |
| `prng_top` | Wires it all together and sequences press, seed, warm-up, send |

## The decimal number format

Every quantity is a 32-bit sign-magnitude word with two decimal places:

```
 31 | 30 ........ 23 | 22 ..................... 0
 s  |  integer 0-255 |  hundredths 0-99 (binary)
```

For example, +33.73 is `{1'b0, 8'd33, 23'd73}`, and −7.84 is
`{1'b1, 8'd7, 23'd84}`.

The hundredths field is 23 bits wide but only ever holds 0..99. The
arithmetic reads its low seven bits only. Every result leaves bits 22:7 at
zero.

The format is easy to read on a display and easy to reason about. It is also
coarse:

- The resolution is 0.01.
- The largest magnitude is 255.99.
- Integer overflow wraps modulo 256, exactly as an 8-bit field does.

The last point matters most for the pendulum (see below). A zero result is
always +0.00, so equality tests on words are meaningful.

## Arithmetic on the format

All functions are combinational. With A.a meaning "integer A, hundredths a":

**plus / minus.** If the signs are equal, the magnitudes are added. When the
hundredths reach 100 they carry one into the integer.

If the signs differ, the larger magnitude keeps its sign and the smaller is
subtracted from it. When the larger operand's hundredths are the smaller of
the two, one integer is borrowed as 100 hundredths. The larger magnitude is
found by comparing integer and hundredths together. Comparing the integer
parts alone is not enough: it gives the wrong result for 5.20 + (−5.30).

`minus(A, B)` is `plus(A, −B)`.

Example: 33.73 + (−21.84) = 11.89. The borrow case gives 100 + 73 − 84 = 89
hundredths and 33 − 21 − 1 = 11.

**times.** The product is formed as

```
  A.a * B.b = A*B  +  (A*b + B*a + floor(a*b/100)) / 100
```

The bracket is then split: its quotient is added to the integer and its
remainder becomes the hundredths. This is exactly the product truncated to
hundredths, and the sign is the XOR.

Example: 13.73 × (−7.84): 91 + (13·84 + 7·73 + ⌊73·84/100⌋)/100
= 91 + 1664/100 → −107.64.

**divide.** Both operands become whole numbers of hundredths, na and nb. The
integer part is q = na / nb. The hundredths are ⌊100·(na − q·nb) / nb⌋, so
the result is ⌊100·na/nb⌋ hundredths.

Example: 9.25 / 2.56: q = 3, remainder 157, 15700 / 256 = 61 → 3.61.

Division by zero returns ±255.99, signed by the XOR of the operand signs.

**neg / abs** flip or clear the sign.

Every truncation is towards zero in magnitude. A sum of signed products
therefore carries a bias of up to 0.01 per term. This is the main error
source in the pendulum step.

## Sine and cosine

Sine uses the rational approximation

```
sin x ~ 16 x (pi - x) / (5 pi^2 - 4 x (pi - x))        0 <= x <= pi
sin x ~ -16 (x - 2pi)(pi - x) / (5 pi^2 - 4 (x - 2pi)(pi - x))   pi < x <= 2pi
```

The constants are π = 3.14, 2π = 6.28, π/2 = 1.57 and 5π² = 49.25. Each
constant is what the format's own arithmetic gives for it.

The angle is first brought into [0, 2π]:

- k = integer part of |θ| / 6.28;
- for θ ≥ 0, subtract 6.28·k;
- for θ < 0, add 6.28·(k + 1).

Products are formed as (16·u)·v and (4·u)·v, in that order, because each
multiplication truncates. Over the angles used by the pendulum, the error
against the true sine is below 0.02. The test sweeps −20..20 rad and
allows 0.03.

Cosine is `sin(1.57 − θ)`. The identity cos φ = sin(φ − π/2) gives the
negated cosine. The first form is the right one and is the one used.

## The pendulum engine

`dp_engine` evaluates the standard equations of motion of a double pendulum:

```
w1' = [ -g(2m1+m2) sin t1 - m2 g sin(t1 - 2t2)
        - 2 sin(t1-t2) m2 (w2^2 L2 + w1^2 L1 cos(t1-t2)) ] / (L1 D)
w2' = [ 2 sin(t1-t2) ( w1^2 L1 (m1+m2) + g (m1+m2) cos t1
        + w2^2 L2 m2 cos(t1-t2) ) ] / (L2 D)
D   = 2m1 + m2 - m2 cos(2t1 - 2t2)
```

It then advances the state by semi-implicit Euler with a time step DT =
0.10:

```
w += w' * DT
t += w * DT
```

**Schedule.** A single `dp_math_alu` and a single `dp_trig` are shared. A
53-entry program runs them, one instruction per clock. The program is a
constant function of the program counter, so it synthesises to a small ROM.

Each instruction names an operation, a destination and two sources in a
25-word register file:

- seven seed values;
- DT and the constant 2;
- the four state words;
- working registers.

The instruction groups are:

| Instructions | Work |
|---|---|
| 0–10 | Terms shared by both equations: t1−t2, its sine and cosine, D, w1², w2² |
| 11–30 | Equation (1), ending in one division |
| 31–44 | Equation (2), ending in one division |
| 45–52 | The four Euler updates |

One step therefore takes 53 clocks. The first step of a run takes 54,
because `run` is sampled first.

**Interface.**

- `load` (one cycle) registers the seed and sets w1 = w2 = 0: the pendulum
  starts at rest.
- While `run` is high the engine steps continuously. When `run` falls it
  stops at the end of the current step.
- `step_done` pulses once per step.
- `word = {t1, t2}` is the output.

**Critical path.** It is one register-file read, then the sine unit, then a
write. The sine unit holds a range reduction with a division, two chained
multiplications and a division. The design makes no attempt to pipeline it.
At 12 MHz the budget is 83 ns. Whether it fits has not been checked by a place-and-route run; if it does not, the sine unit is the place to add a pipeline stage, and the program then needs one slot per trigonometric instruction more.

**Why DT is 0.10.** The rates change by w'·DT per step and must stay
resolvable at 0.01. A smaller step would make slow motion vanish into
truncation. A larger one makes the integration unstable sooner.

**Range.** Angles are not wrapped. When the pendulum whirls, either the angle
or an intermediate product such as w1²·L1·(m1+m2) exceeds 255.99 and wraps.
The motion then stops following the physics and becomes a deterministic
mixing map in the 8-bit integer field. For a random source that is harmless.
It does mean the output is not a faithful simulation beyond moderate energy.

The engine's test compares against real-arithmetic physics only while all
intermediates stay below 250.

## From sensors to seed

**Compass (`hmc5883l_i2c`).** Once per second the I2C master runs this
sequence:

```
START 3C 00 10 STOP    configuration A: 1 sample, 15 Hz, normal
START 3C 01 60 STOP    configuration B: gain +-2.5 Ga
START 3C 02 01 STOP    mode: single measurement
wait 6 ms
START 3C 03 STOP       register pointer to X MSB
START 3D b0..b5 STOP   six data bytes, last one NACKed
```

The bytes come in the sensor's order, X, Z, Y, each MSB first, as signed
16-bit values. A missing acknowledge gives an `ack_error` pulse, and the old
values are kept.

Each SCL period has four quarter phases. SDA only moves while SCL is low,
except in START and STOP. The default rate is 100 kHz, so a full sequence
takes about 7.7 ms.

The bus lines are open-drain enables (`scl_oe`, `sda_oe` = 1 pulls low). The
pad tristates belong in the board wrapper.

**ADCs (`mcp3202_spi`).** Two MCP3202 share SCLK and MOSI, and each has its
own CS and MISO. The controller converts chip 0 ch 0, chip 0 ch 1, chip 1
ch 0 and chip 1 ch 1 in turn, forever. It keeps the latest 12-bit result of
each channel.

One conversion is 17 SCLK periods:

- the command bits: start, single-ended, channel, MSB first;
- a null bit;
- B11..B0, sampled on rising edges.

At 500 kHz plus a 2 µs gap, each channel is refreshed about every 145 µs.

The top picks the light and temperature/humidity channels with the
parameters `LIGHT_ADC_MODE` and `TEMPHUM_ADC_MODE`. Their defaults are
channels 0 and 1 of chip 0. Chip 1 is free for more sensors.

**Microphone.** The top registers `mic_sample` whenever `mic_valid` is high.
These are meant to be driven by the on-chip ADC's data and end-of-conversion
outputs.

**Mapping (`seed_mapper`).** This stage is purely combinational. All values
are in hundredths:

| Quantity | Value | Range |
|---|---|---|
| m1 | 1.00 + \|X\| mod 300 | 1.00–3.99 |
| m2 | 1.00 + mic mod 300 | |
| L1 | 1.00 + light mod 300 | |
| L2 | 1.00 + temp/hum mod 300 | |
| g | 9.00 + \|Y\| mod 100 | 9.00–9.99 |
| t1 | \|Z\| mod 628 | 0.00–6.27 |
| t2 | (mic ^ light ^ temp/hum) mod 628 | |

The ranges keep every divisor non-zero. They also keep the pendulum inside
the number range while it swings, and they reach every starting angle. The
mapping is this design's choice.

## Button, warm-up and transfer

The controller in `prng_top` has three states:

1. **IDLE.** A debounced press (stable for 10 ms) loads the engine from
   `seed_mapper` and goes to RUN. The seed is built from the latest reading of
   each sensor.
2. **RUN.** The engine makes `WARMUP_STEPS` = 16 steps, 849 clocks. `run` is
   dropped during the last step, so exactly 16 are made. Then the word
   `{t1, t2}` is latched onto `prng_word`, `prng_valid` pulses and the
   transfer starts.
3. **SEND.** `uart_fsm_loop` sends the eight bytes, MSB first, each as an
   8N1 frame at 9600 baud. That takes 8.3 ms. The loop returns to IDLE when
   `done` pulses.

A press during RUN or SEND is ignored.

The warm-up lets the chaotic dynamics spread out two seeds that differ only
slightly. Without it, the first word would be the seed angles themselves.

On the receiving side, the microcontroller gets eight bytes per press. It
turns them into the number shown on the display; for example, a 10-digit
decimal is enough for more than 10⁹ values. That conversion, and the sensor
readout shown on the display's first line, are firmware matters. They are
not part of this RTL.

## Parameters of the top

| Parameter | Default | Meaning |
|---|---|---|
| `CLK_HZ` | 12 000 000 | Board clock |
| `BAUD` | 9600 | UART rate |
| `I2C_HZ` | 100 000 | Compass bus rate |
| `SPI_HZ` | 500 000 | ADC clock |
| `LOOP_CYCLES` | `CLK_HZ` | Compass period (1 s) |
| `MEAS_CYCLES` | `CLK_HZ/1000*6` | Wait for a compass measurement (6 ms) |
| `DEBOUNCE_CYCLES` | `CLK_HZ/100` | Button stable time (10 ms) |
| `WARMUP_STEPS` | 16 | Pendulum steps per number |
| `LIGHT_ADC_MODE` | 0 | ADC channel {chip, ch} used for light |
| `TEMPHUM_ADC_MODE` | 1 | ADC channel used for temperature/humidity |

`dp_engine` takes `DT` (default 0.10) as a `dp_num_t` parameter. The compass
register values are parameters of `hmc5883l_i2c`:

| Parameter | Value |
|---|---|
| `HMC5883L_ADDR` | 8'h3C |
| `CRA_VAL` | 8'h10 |
| `CRB_VAL` | 8'h60 |
| `MODE_VAL` | 8'h01 |
| `READ_VAL` | 8'h06 |

`READ_VAL` must stay 6; elaboration stops otherwise.

## Simulating

Every testbench is self-checking. Each prints `TB_RESULT checks=N
failures=M` and ends with `$finish`. Build one with Verilator 5, run from the
project root. List the package first, then the RTL, then the models and the
bench:

```
verilator --binary --timing --assert -Irtl \
  rtl/dp_math_pkg.sv rtl/*.sv tb/hmc5883l_model.sv tb/mcp3202_model.sv \
  tb/uart_rx_model.sv tb/tb_prng_top.sv --top-module tb_prng_top -o sim
./obj_dir/sim
```

| Testbench | What it checks | Run time |
|---|---|---|
| `tb_dp_math_alu` | The three worked examples bit-exact, plus 18 000 random operand pairs of every operation against an integer reference (exact, not approximate) | < 1 s |
| `tb_dp_trig` | sin/cos over −20..20 rad against `$sin`/`$cos`, within 0.03; exact points 0, π/2 | < 1 s |
| `tb_dp_engine` | Every step against a real-arithmetic step from the same state, while in range; 53 cycles per step; load, stop and reseed | < 1 s |
| `tb_seed_mapper` | The mapping formula on random and extreme readings | < 1 s |
| `tb_hmc5883l_i2c` | Register writes seen by a behavioural sensor, the values read, the 1 s loop, NACK handling | seconds |
| `tb_mcp3202_spi` | All four channels, values changing between scans, one chip select at a time | < 1 s |
| `tb_uart_tx` / `tb_uart_fsm_loop` | Framing, bit time, byte order, back-to-back words | < 1 s |
| `tb_prng_top` | The whole design at its default parameters (see below) | ~10 s |
| `tb_prng_stream` | 1,048,575 engine steps from one seed | ~45 s |

The behavioural models used by the testbenches are:

- `hmc5883l_model`: an I2C slave with the compass's registers;
- `mcp3202_model`: the converter's serial protocol;
- `uart_rx_model`: a receiver standing in for the microcontroller.

`tb_prng_top` runs at 12 MHz with every rate real, covering about 1.2 s of
operation:

- compass configuration and readout, twice;
- all four ADC channels;
- microphone samples;
- a button glitch that must be rejected;
- two presses with different environments.

For each press it checks:

- the seed against the mapping formula;
- exactly 16 steps;
- that the word equals the engine's angles;
- that the eight received bytes spell the word.

It also counts every mechanism: compass loops, microphone samples, seeds,
steps and words. A mechanism that never occurs counts as a failure.

## What the tests show

- **Arithmetic.** The arithmetic is bit-exact against an independent
  integer model of "truncate the exact result to hundredths" for plus,
  times and divide over random operands.
- **Engine.** The engine follows real-arithmetic physics within the
  format's error. The tolerance is 0.03 on angles. On rates it is 0.06 plus
  1 % of the rate magnitude; squaring a truncated rate makes the error grow
  with speed. The bench compares 95 steps.
- **Long run.** `tb_prng_stream` runs 1,048,575 consecutive steps from one
  seed. No full state {t1, t2, w1, w2} repeats, so the sequence's period is
  longer than that. 1,037,708 of the words are distinct. The last digit of
  t2 is spread evenly over 0–9, within 1 % of uniform.
- **Limits of these tests.** None of them is a statistical randomness test.
  The output is a chaotic map in a coarse fixed-point format, and nothing
  here makes a cryptographic claim.

## Departures and open points

These are the points where this RTL departs from the source description, or
where the description is silent:

- **Addition.** Magnitudes in `plus` are compared on integer and hundredths
  together. A version that compares only the integer parts gets, for
  example, 5.20 − 5.30 wrong.
- **Cosine.** Cosine is sin(π/2 − θ), not sin(θ − π/2). The latter is the
  negated cosine.
- **Sine denominator.** On [0, π] the sine denominator is formed with the
  format's own subtraction. Plain binary subtraction of two encoded words
  borrows 2²³ instead of 100.
- **Multiplication.** The cross term of the product uses a·b, the product of
  the hundredths, not a + b.
- **Choices the description leaves open.** These include:
  - integration method and DT;
  - rest start;
  - warm-up length;
  - output word;
  - seed mapping;
  - bus rates;
  - baud rate and UART byte order;
  - ADC channel assignment;
  - the 6 ms compass wait;
  - the debouncer.
- **Compass address.** The compass address is given as 3C, which is the
  write address byte of the part (7-bit address 1E). It is sent as the
  address byte: 3C for writes, 3D for reads.
- **Sensor readings over UART.** The sensor readings are described as also
  reaching the microcontroller for display. How they are framed is not
  described, so only the 64-bit number is sent.
- **UART receive.** The UART is described as receiving and sending. Nothing
  received is described, so only the transmitter is built.
- **Where the generator runs.** The block diagram draws the generator next
  to the display rather than inside the FPGA. The text places the algorithm
  in the FPGA, and this design follows the text.
