# A jitter-sampling TRNG for small FPGAs, with a burst measurement system

A true random number generator has to get its randomness from something
physical. On an FPGA the available physics is timing noise: a free-running
ring oscillator never has two periods of exactly the same length, because
supply and neighbourhood noise move each edge by a few picoseconds. The
generator here XORs many such rings and samples the result with an ordinary
flip-flop. Some samples land close to an edge, where the captured value
depends on that jitter. Others land in flat stretches, where it is
predictable. A plain XOR over 2^r consecutive samples then folds enough
unpredictable samples into each output bit that the output passes DieHard and
TestU01. That XOR is the "resilience function". It is deliberately not a
shift-register code, because such a code could act as a hidden pseudo-random
generator and mask a weak source.

The design has four knobs:

| knob | meaning | default |
|------|---------|---------|
| `N`  | ring oscillators XORed together | 20 |
| `L`  | latches per ring (delay stages) | 3 |
| `D`  | sample clock = clk / 2^D | 0 |
| `R`  | output bit = XOR of 2^R samples | 2 |

The output rate is `f / (2^R * 2^D)`. At the default 50 MHz clock that is
12.5 Mbit/s. The published passing settings are:

| D | R | N | L | rate at 50 MHz |
|---|---|---|---|----------------|
| 0 | 2 | 20 | 3 | 12 500 kbit/s (default) |
| 0 | 3 | 10 | 3 | 6 250 kbit/s |
| 2 | 2 | 10 | 3 | 3 125 kbit/s |
| 5 | 3 | 5  | 3 | 195 kbit/s |

Quality rises with `N`, `R` and `D`. `L` has little effect, but at least 3 is
advisable so that a ring never runs out of jitter. Raising `D` or `R` trades
rate for quality. Raising `N` costs area instead.

The repository also holds the system that was used to measure the generator
at full speed. It fills a 16 Kbit block RAM in one burst at the generator's
own rate, then sends the stored bits to a PC over RS232. Because of this, the
slow serial link can never re-sample the raw stream and make it look better
than it is.

The design follows C. Klein, O. Creţ and A. Suciu, "Design and Implementation
of a High Quality and High Throughput TRNG in FPGA", which builds on the
XOR-of-rings generator of Sunar, Martin and Stinson. Below, "the paper" means
that publication. Where it is silent, this RTL makes its own choices; they are
listed in the section "What follows the paper and what does not".

## The generator (`trng`)

```
clk ─► clock_divisor ─ clk_s ─► clocks the sampling FF, the XOR FF and the counter

N × ring_oscillator ─► XOR ─► sampling FF ─► XOR FF (Q fed back) ─► RandomBit

R-bit counter ─► ~&cnt = bit_clk ─► clock of BitReady FF (D = "1") ─► BitReady
                                    asynchronous clear ◄─ ReadAck
```

**Ring oscillators** (`ring_oscillator`). Each ring is one inverter followed
by `L` transparent latches whose gates are tied to 1, so each latch acts only
as a delay. Latches and routing set the delay; the inverter shares the first
latch's cell. Using one inverter and a variable latch count allows rings of
any length. On a real device the latches must be protected from being merged
by the synthesis tool: on Xilinx this is done with a `keep` attribute on the
net between them. A combinational loop has no meaning in a cycle-based
simulator, so this module is a *behavioural model*. It toggles its output
after `L` stage delays of `STAGE_PS` (1 ns) each, plus uniform random jitter of
±`JITTER_PS` (40 ps) per stage. Each ring in a sampler gets a slightly
different stage delay, as placement would give on silicon. The model makes
simulation meaningful, but it says nothing about the quality of real jitter.

**Sampler** (`entropy_sampler`). The XOR of the `N` rings has far more edges
than any single ring, because the rings drift against each other. A flip-flop
clocked by `clk_s` samples it. Its input is asynchronous to its clock by
design, and metastability is part of the entropy source, not a fault.

**Clock divisor** (`clock_divisor`). A `D`-bit counter whose top bit is
`clk_s`. For `D = 0`, `clk_s` is `clk`. Sampling too fast relative to the
rings tends to hit the same flat zone, or the same jittery edge, several times
in a row. A larger `D` reduces that correlation, or a larger `R` removes it.

**Resilience function** (`resilience_function`). This is the part that is
easiest to misread. There is no per-group XOR register that is cleared after
each group. Instead, one flip-flop continuously computes `Q <= Q ^ sample` on
every `clk_s` edge, and its `Q` is `RandomBit`. An `R`-bit counter on the same
clock is decoded by an inverted AND. Its output `bit_clk` rises when the
counter wraps from all ones to zero, which is the edge that takes the last
sample of a group of 2^R. Two consecutive delivered bits therefore differ by
exactly the XOR of the 2^R samples taken between them. If any one of those
samples is unbiased and independent, so is the new bit.

**Acknowledge circuit** (`acknowledge_circuit`). This is a flip-flop with D
tied to 1 and clocked by `bit_clk`, giving `BitReady`. `ReadAck` clears it
asynchronously.

### The handshake and its timing

`RandomBit`, `BitReady` and `ReadAck` are meant to be treated as asynchronous
by the reader. This allows the sample clock itself to come from a ring
oscillator. With the generator on the same clock as the reader, the timing is
as follows (`D = 0`, `R = 2`):

```
clk edge       k        k+1       k+2       k+3       k+4
bit_clk        ↑ (counter wraps to 0)                  ↑
BitReady       ‾‾‾‾‾‾‾‾‾‾‾\_ (cleared by ReadAck)      ‾‾‾
RandomBit      new bit   | changes again (next sample) ...
ReadAck                  ‾‾‾‾‾‾‾‾‾‾\___
reader         stores RandomBit at k+1
```

`RandomBit` takes a new sample on every `clk_s` edge. With `D = 0` the
completed bit is therefore valid for exactly one clock. The reader must
capture it on the first clock edge that sees `BitReady`, and the measurement
system does exactly that. `ReadAck` must also be low again before the next
`bit_clk` edge, 2^(R+D) clocks later, or that bit is lost. This holds for
`R + D >= 2`. The top level asserts it (`a_ack_pulse`: every `ReadAck` pulse
lasts exactly one clock).

### Parallel samplers (parameter `S`)

For one bit per clock, the XOR over time can be replaced by an XOR over space.
`S` samplers, each with its own `N` rings and flip-flop, are XORed after
sampling. With `S = 8`, `N = 20` (160 rings) and `R = 0`, a sufficiently
random bit is produced on every clock, and that setting was validated on
hardware. `S` and `R = 0` (no counter: every `clk_s` edge completes a bit) are
supported. However, the `BitReady`/`ReadAck` handshake above needs about three
clocks per bit, so through this interface the variant delivers one bit per
three clocks. A consumer that wants every bit should take `RandomBit` directly
on every `clk` edge; no such interface is defined here.

### Area

On a Spartan-3E class device, the estimate is about
`l + ⌈(n−1)/3⌉ + d/4 + r/4 + ⌈(r−1)/3⌉ + 3` logic cells. Here `l` counts the
rings' latches, the next term the XOR tree of 4-input LUTs, then the divider,
the counter and its AND gate, and 3 more cells for the sampler, the XOR
flip-flop and the acknowledge flip-flop.

## The measurement system (`trng_measure_top`)

```
trng.RandomBit ─────────────────────► entropy_ram.di
trng.BitReady ─┬─► AND(fill_en) ─ we ─► entropy_ram.we
               │          └──────► OR(cnt_ce) ─► addr_cnt.ce
               └─► read_ack_gen ─► trng.ReadAck
addr_cnt.addr (14) ─► entropy_ram.addr, measure_fsm
entropy_ram.dout ─► serialiser ─(8)─► rs232_tx ─► tx
measure_fsm: fill_en, cnt_ce, cnt_clr, ser_ce, uart_start  ◄─ ser_ready, uart_busy, addr
```

The RAM write enable and the address counter's enable are `BitReady` itself,
gated by the controller while it is in the fill state. `read_ack_gen` is one
flip-flop, `ReadAck <= BitReady`. It raises `ReadAck` on the same edge that
writes the bit. Bits the generator produces while the RAM is being read out
are acknowledged and dropped. The controller (`measure_fsm`) has eight
states:

| state | does | next |
|-------|------|------|
| Idle | state after reset | PrepareFillRAM |
| PrepareFillRAM | clears the address counter | FillRAM |
| FillRAM | every BitReady writes a bit and advances the counter | ReadRAM once the counter wraps, else stay |
| ReadRAM | RAM reads at the counter address | ShiftIn |
| ShiftIn | serialiser shifts the RAM output in; counter advances | CheckSR |
| CheckSR | is a byte complete? | WaitUART if yes, ReadRAM if no |
| WaitUART | waits while the transmitter is busy | UARTSend when idle |
| UARTSend | starts the transmitter | ReadRAM if counter ≠ 0, else PrepareFillRAM |

The controller sees only the address bus. It detects the wrap at the end of
the fill as the address MSB falling from 1 to 0. The "all read" condition is
the counter being back at zero after the last `ShiftIn`.

The serialiser puts the first bit of each byte into bit 0. The transmitter
sends 8N1 frames, LSB first, so the serial stream carries the bits in exactly
the order they were generated.

Timing at the defaults (50 MHz, 115200 baud, 16384-bit RAM):

- A fill takes 16384 × 4 = 65 536 clocks (1.3 ms), so the RAM fills at the
  generator's full 12.5 Mbit/s.
- Each byte takes 24 clocks to gather (ReadRAM/ShiftIn/CheckSR × 8) and
  about 4 341 clocks on the line.
- One round (fill plus 2048 bytes) lasts about 179 ms.
- A 10 MB test file, the minimum size used for DieHard, takes 5 120 rounds,
  about 15 minutes of link time.

## What follows the paper and what does not

Taken from the paper:

- the generator structure: rings of one inverter plus latches; the XOR of the
  rings; the sampling flip-flop; the clock divisor; the fed-back XOR
  flip-flop; the counter with its decode gate; the BitReady flip-flop with a
  constant 1 and an asynchronous ReadAck clear;
- the four parameters and the rate formula;
- the four passing settings, with the first used as the default;
- the parallel-sampler idea;
- the 16 Kbit RAM with a 14-bit address;
- the 8-bit serialiser output;
- the gating of BitReady into the write enable and counter enable;
- the ReadAck-on-the-next-edge rule;
- the controller's eight states and their transitions.

Own choices:

- **Clock.** 50 MHz, inferred from 12 500 kbit/s = f/4.
- **Resets.** An asynchronous active-low `rst_n` on every register. The
  paper's generator has none.
- **Decode polarity.** The counter decode is the inverted AND, as drawn in
  the scheme, so `BitReady` is set when the counter wraps. The text calls it
  an "and stage".
- **Ring model.** Its delays and jitter.
- **Block implementations.** `read_ack_gen`, the serialiser, the counter clear
  and the RAM read latency (synchronous, read-before-write).
- **Serial link.** The transmitter's frame format and baud rate (115200 8N1).
- **Bit order.** The bit order in the byte.
- **Wrap detection.** How the wrap is detected.
- **State machine outputs.** Moore outputs and a binary state encoding.

Not in the RTL:

- The `keep` attribute needed on silicon to preserve the latch chain.
- Any placement constraints.
- The one-bit-per-clock output path of the parallel variant (see above).

## Using and simulating it

All RTL is SystemVerilog 2017 in `rtl/`. Every module carries a header comment
on its function, interface and timing. `trng_pkg` holds the RAM size and the
controller's state type. Everything except `ring_oscillator` is ordinary
synthesizable logic. On an FPGA, replace `ring_oscillator` with a real
inverter-plus-latch ring, and keep the latch nets from being optimised away.

The ring model uses delays, so Verilator needs `--timing`:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/trng_pkg.sv tb/trng_measure_top_tb.sv --top-module trng_measure_top_tb
obj_dir/Vtrng_measure_top_tb
```

Every testbench in `tb/` is self-checking. Each ends with one line
`TB_RESULT checks=N failures=M` and has a watchdog. They are:

- **`trng_tb`**: all four settings from the table above plus the 8-sampler
  variant. It checks every delivered bit against the XOR of all samples taken
  so far, and checks the bit count against the rate formula.
- **`trng_measure_top_tb`**: end to end at a 256-bit RAM and 10 clocks per
  serial bit, over two rounds. Every received byte must match the bits written
  into the RAM. The fill time must be 4 clocks per bit. It also checks that
  fills, refills, CheckSR→ReadRAM loops, waits on a busy transmitter and
  dropped bits all occur.
- **`trng_measure_top_full_tb`**: the same checks with every parameter at its
  default, for one complete round (16384 bits, 2048 bytes). It simulates
  about 179 ms, which takes several minutes.
- **Per-module testbenches** (`*_tb`): the ring periods and jitter, divider
  edges, the resilience accumulator and group timing, the asynchronous clear,
  RAM contents, counter wraps, byte assembly, UART framing, and every arc of
  the controller.

Simulation speed is set almost entirely by the ring models: about 130 ring
edges per 50 MHz clock at the defaults. A smaller `N`, or a larger `STAGE_PS` in
`entropy_sampler`, speeds it up.
