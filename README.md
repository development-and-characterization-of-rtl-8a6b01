# A 3.2 Gb/s radiation-tolerant serial link transmitter for pixel sensors

A monolithic pixel sensor in a particle physics detector produces one
256-bit data frame every 100 ns. Parallel links are awkward at that rate:
they bring clock skew, crosstalk and too much cable material into the
detector. This transmitter sends those frames over a single differential
pair at 3.2 Gb/s instead. Three problems shape the design:

* **Errors.** The link runs in a radiation field and over lossy cable.
  Every frame therefore carries Reed-Solomon parity, so the receiver can
  correct symbol errors rather than only detect them.
* **Clock recovery.** The receiver must recover the clock from the data
  itself. Every frame is scrambled to keep the line DC balanced and full
  of transitions.
* **Upsets in the chip itself.** Every register in the digital part is
  triplicated and voted. The combinational logic is triplicated too, and
  voted once at its output.

The repository holds SystemVerilog for the whole chain. The digital
datapath, the clock dividers, the serializer and the PLL feedback divider
are synthesizable RTL. The PLL loop, the duty-cycle corrector and the CML
line driver are analog circuits, so they are written as behavioural models
with the real parts' ports.

## Data flow and frame format

```
 raw 256 b @10 MHz
   -> timestamp (+14 b)        270 b
   -> scrambler x^58+x^39+1    270 b
   -> 2 x RS(31,27) encoder    310 b  (+40 b parity)
   -> frame builder (+10 b)    320 b  -> 10 words of 32 b @100 MHz
   -> 32:1 DDR serializer      1 b @3.2 Gb/s  (+ copies delayed 1 and 2 bits)
   -> CML driver, 2 post-cursor taps -> line

 40 MHz ref -> PLL x40 -> 1.6 GHz -> clock distributer -> 800/400/200/100/10 MHz
```

One frame, sent from left to right (bit 319 first):

| bits    | field                                         |
|---------|-----------------------------------------------|
| 319:310 | header `0011111010`                           |
| 309:296 | timestamp (frame counter), scrambled          |
| 295:40  | raw data, scrambled                           |
| 39:0    | RS parity, 8 symbols alternating code A / B   |

That is 320 bits per 100 ns, which is exactly the 3.2 Gb/s line rate.
The frame carries no idle or control characters: every 100 ns slot holds
a frame. The header is not scrambled, but it sits in a fixed place, so
the receiver finds it by looking for the same pattern every 320 bits.

## The digital path

All digital logic runs on the 100 MHz clock. `frame_en` is high for one
cycle in ten and marks the 10 MHz frame step. Everything before the frame
builder is combinational between the frame registers. A frame is taken
in the `frame_en` cycle and leaves the frame builder during the next ten
cycles.

**Timestamp** (`timestamp.sv`). A 14-bit counter steps once per frame and
wraps at 2^14. It is placed above the raw data.

**Scrambler** (`scrambler.sv`). This is a self-synchronising
(multiplicative) scrambler: `out[n] = in[n] ^ out[n-39] ^ out[n-58]`.
The bit-serial form would need a 2.7 GHz clock, so the module unrolls the
recursion over all 270 bits of a frame in one step. Bit 269 is processed
first. The 58-bit state register holds the last 58 scrambled bits and is
updated at each frame step. A receiver descrambles with
`in[n] = out[n] ^ out[n-39] ^ out[n-58]` and locks on by itself after
58 bits. For that reason the reset value (all ones) does not matter.

**Reed-Solomon encoder** (`rs_encoder.sv`, `rs_encoder_core.sv`). The code
is RS(31,27) over GF(2^5), which corrects two symbol errors per codeword.
Its generator is `g(x) = (x-a^27)(x-a^28)(x-a^29)(x-a^30)`, and the field
polynomial is `x^5+x^2+1`. The 270-bit payload is 54 five-bit symbols.
Even-numbered symbols go to code A and odd-numbered ones to code B, so
each code gets 27 symbols (135 bits) and adds 4 parity symbols (20 bits).
Each core is the usual symbol-serial shift register (registers b1..b4,
feedback `input ^ b4` multiplied by g1..g4) unrolled over 27 symbols into
one block of logic. The coefficients are worked out from g(x) at
elaboration, in `sltx_pkg::rs_gen_coef`. Because of the interleaving, any
burst of up to 16 bits hits at most two symbols of each code, so it can
be corrected.

**Frame builder** (`frame_builder.sv`). A 320-bit register loads
`{header, payload, parity}` at the frame step. For the next nine cycles it
shifts left by 32 bits. The top 32 bits are the word sent to the
serializer.

## Triple modular redundancy across three copies

This is the least obvious part of the design. `tx_path.sv` is one complete
copy of the digital path, and `sltx_top` instantiates three of them. Each
copy exports all of its registers as one packed struct,
`sltx_pkg::path_state_t` (timestamp, scrambler state and frame register).
It imports the same struct from the other two copies (`peer_a`,
`peer_b`).

Inside each block, the value that is used, for the outputs and for the
next state, is the 2-of-3 vote of its own copy and the two peer copies.
The register reloads that voted value in every cycle, including cycles
where it would otherwise hold. So a single upset copy is out-voted at once
and overwritten at the next clock edge.

The three 32-bit word outputs are voted once more in `sltx_top`, just
before the serializer. This catches a transient in the combinational logic
of one copy. `tmr_mismatch` goes high whenever the three words differ.
To use a block stand-alone without redundancy, tie both peer inputs to the
block's own register output.

The serializer and everything after it are not triplicated. Data errors
there are left to the Reed-Solomon code.

## Clocks and the DDR serializer

`clock_distributer.sv` divides the 1.6 GHz PLL clock by two four times.
Each divided clock toggles on the rising edge of the next faster clock.
A divide-by-ten counter on 100 MHz gives `clk_10` and `frame_en`;
`clk_10` rises at the end of the `frame_en` cycle.

The serializer (`serializer.sv`, `ser_stage.sv`) is a binary tree of five
2:1 stages: 32:16 at 100 MHz, 16:8 at 200 MHz, 8:4 at 400 MHz, 4:2 at
800 MHz and 2:1 at 1.6 GHz. Each stage is double data rate and works like
this:

1. At the falling edge of its clock, the lower half of its input goes to
   register `qn` and the upper half is parked in `sv`.
2. At the rising edge, `sv` moves to `qp`.
3. The output is `clk ? qp : qn`.

So each output lane sends two bits per clock period, and the output
changes on both edges of the stage's clock. Those edges are rising edges
of the next stage's clock. The next stage samples on its own falling
edge, which is half a bit away from every change. As a result, no
register in the tree samples a signal at the instant it changes, in
silicon or in the simulator.

The tree sends the word MSB first. The 1.6 GHz clock gives 3.2 Gb/s, so
one bit lasts 312.5 ps, half a clock period.

The driver also needs the current bit (`d0`) and copies delayed by one
and two bits (`d1`, `d2`):

* `d1` is the last-stage register that is not on the output at the
  moment: `clk ? qn : qp`.
* `d2` comes from two more registers that hold the previous `qn` and the
  previous `qp`.

Each tap is given true (`d_p`) and complemented (`d_n`). In the
testbench, a word presented at a rising edge of `clk_100` starts to
appear on `d0` about one word period later. That latency is fixed.

## Line driver and pre-emphasis

`cml_driver.sv` models three current-steering differential pairs that
share the load resistors. The output is

    Y = Io * (s0 + a0*s1 + a1*s2),   s = +1 for a one, -1 for a zero

`s0` comes from the current bit and `s1`, `s2` from the delayed copies.
A negative `a0` makes a bit that follows a transition larger than a
repeated bit. This compensates the low-pass loss of a thin cable. The tap
weights come in as signed 5-bit codes with `a = code/20`. With
`a0_code = -4` (a0 = -0.2) and a 0.4 V main swing, the differential
levels are 0.48 V after a transition and 0.32 V otherwise.

## PLL

`pll.sv` is a behavioural model. It keeps the loop of the silicon PLL,
a phase-frequency detector (PFD), charge pump, RC loop filter and ring
VCO, but in sampled form:

* **PFD.** Whichever rising edge comes first, reference or feedback,
  opens an UP or DN pulse. The other edge closes it. A pulse stays open
  until the other edge arrives, so a frequency error gives long pulses of
  one sign, and the loop pulls in from far away, like a real PFD.
* **Charge pump and filter.** When a pulse ends, its signed width `e`
  (in reference periods) changes the VCO frequency in two parts. A
  proportional part `KP*e` stands for the filter resistor. An integrated
  part grows by `KI*e` each time and stands for the capacitor. With
  `KI = KP^2/4`, the sampled loop is critically damped.
* **Bandwidth.** `bw_sel` (0..3, standing for 0.5 to 2 MHz loop bandwidth)
  sets `KP = 0.05*(bw_sel+1)`.
* **VCO.** It is kept within 0.8 to 2.4 GHz and starts at 1.2 GHz.

The raw VCO output has a 45 % duty cycle. It passes through the
duty-cycle corrector model `dcc.sv` and then the synthesizable,
triplicated divide-by-40 counter `pll_divider.sv`, which closes the loop.
Once locked, the feedback edges sit within a few picoseconds of the
reference edges. `lock` rises after 8 PFD pulses in a row shorter than
12.5 ps. The digital logic is held in reset until then. From 1.2 GHz the
loop locks in about 120 reference cycles at `bw_sel = 3` and about 970 at
`bw_sel = 0`. Jitter and the continuous-time filter response are not
modelled.

## Where this RTL departs from, or adds to, the description it follows

* **Choices made where the description is silent:** the header pattern,
  the GF(32) field polynomial, symbol interleaving of the two RS codes,
  the timestamp as a frame counter, and MSB-first bit order. Also the
  scrambler's reset value, the tap-code format, the driver's swing, and
  the lock detector with its hold of the logic in reset.
* **A 100 MHz clock with a frame enable.** The 10 MHz logic runs on the
  100 MHz clock with a one-in-ten enable, instead of on the 10 MHz clock
  itself. `clk_10` is still produced and brought out for the sensor side.
* **Flip-flops for the delayed taps.** The delayed copies of the serial
  bit are made with flip-flops rather than with two latches. The delays
  are the same; the circuit is not.
* **Behavioural analog parts.** The PLL, DCC and driver are behavioural:
  they reproduce function and levels, not jitter, bandwidth dynamics or
  analog non-idealities.
* **Not included:** the slow-control interface (tap codes and bandwidth
  are top-level inputs), the sensor that feeds the transmitter, and the
  receiver.

## Files

| file | role |
|------|------|
| `rtl/sltx_pkg.sv` | widths, header, GF(32) functions, RS generator coefficients, `path_state_t` |
| `rtl/tmr_voter.sv` | 2-of-3 voter |
| `rtl/timestamp.sv`, `rtl/scrambler.sv`, `rtl/rs_encoder.sv`, `rtl/rs_encoder_core.sv`, `rtl/frame_builder.sv` | digital path blocks |
| `rtl/tx_path.sv` | one TMR copy of the digital path |
| `rtl/clock_distributer.sv` | clock dividers, frame enable |
| `rtl/ser_stage.sv`, `rtl/serializer.sv` | DDR serializer |
| `rtl/pll_divider.sv` | triplicated feedback divider |
| `rtl/pll.sv`, `rtl/dcc.sv`, `rtl/cml_driver.sv` | behavioural models |
| `rtl/sltx_top.sv` | complete transmitter |
| `tb/tb_ref_pkg.sv` | independent reference models: serial scrambler/descrambler, table-based GF(32), serial RS encoder, syndrome check |
| `tb/<module>_tb.sv` | self-checking testbench of each module |

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
`sltx_top_tb` runs the whole transmitter at its default sizes and acts as
the receiver. It starts the PLL and sends more than 40 frames. For every frame
it recovers the bits from the line voltage, finds the header, checks both
RS codewords by their syndromes, descrambles, and compares timestamp and
data with what was offered. Along the way it switches pre-emphasis on,
upsets one copy of each register type, and forces a wrong word onto one
copy's output. It then checks that none of this reaches the line.

`link_error_tb` shows what the Reed-Solomon code buys on a marginal link.
It runs the same transmitter and adds errors to the received bits before
decoding. For each frame it picks one of four cases at random: no error,
one or two random bit errors, a burst of 2 to 16 bits, or three bad
symbols in one code, which is more than the code can correct. Its
receiver has a table-based RS(31,27) decoder for up to two symbol errors
per codeword. The decoder computes four syndromes and then searches for
one or two error positions. The testbench checks that every frame with at
most two bad symbols per code comes back exactly. It prints three
counters, as a link test would: frames wrong before decoding, frames
flagged uncorrectable, and payloads still wrong after decoding. After an
uncorrectable frame, the first 58 bits of the next frame descramble wrongly.
That follows from self-synchronising descrambling, so that frame is not
checked.

## Simulating

With Verilator 5, from the repository root, for example for the full
transmitter:

    verilator --binary --timing --assert --top-module sltx_top_tb \
        rtl/sltx_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/sltx_top_tb.sv -o sim
    ./obj_dir/sim

Replace the top module and testbench file to run any other unit. All
files use `timescale 1ps / 1fs`, because the 312.5 ps bit period and the
behavioural PLL need sub-picosecond resolution. The end-to-end test
simulates about 5 µs in under a second.

## How far to trust it

* **Confirmed by the testbenches against independent references:** the
  scrambler, the RS parity, the frame layout, the serializer bit order and
  rate, the tap delays, and the voting. A separate decoder also corrects
  the transmitted frames after errors are added.
* **Fixed by assumption, not checked against anything:** the choices listed
  above, in particular the header, field polynomial and interleaving. A
  receiver built for the original chip may differ in exactly those places.
* **Only as good as their simple models:** the timing of the analog
  blocks.
