# Multi-phase-clock time-to-digital converter

This TDC measures the time between the rising edges of two pulses. Its
resolution is 125 ps, and it runs entirely from ordinary FPGA flip-flops and one
PLL. The idea is coarse–fine interpolation. A 1 GHz counter gives the interval
in whole clock periods. Sampling four copies of that clock, shifted by 0°, 45°,
90° and 135°, at each pulse edge tells where the edge fell inside its clock
period, to one eighth of the period. No delay line or carry chain is needed, so
the bin width is set by the PLL's phase steps and not by the delays of
individual logic cells.

A second feature is that the two inputs need not be labelled start and stop in
advance. A discriminator makes whichever pulse arrives first the start, and it
reports which input that was in a polarity bit. This suits sensors like a
delay-line-read detector, whose two ends fire in an order that depends on where
a particle hit.

The RTL is SystemVerilog (IEEE 1800-2017). It follows a published FPGA design
(Stratix III, 125 MHz oscillator, CY7C68013A USB controller). The parts that the
publication leaves open are this design's own choices, and they are marked as
such below and in each file's header.

## Block structure

```
              +---------------+ polarity (1 bit) -------------------------+
   signal1 -->| discriminator | start ----+------------+                  |
   signal2 -->|               | stop  ----|--+---------|--+               v
              +---------------+           v  v         v  v        +--------------+
                                      +---------+  +-----------+   | combine_data |--> fx2_fifo_writer --> fd, slwr_n,
   clk_osc --> pll_4phase --Clock1--->| coarse  |->|           |   |  (16 bits)   |                       fifoadr
   125 MHz    (behavioural)           | 9 bits  |  |           |-->|              |<-- full_n
                            Clock1..4 +---------+  |fine_module|   +--------------+
                            ---------------------->|  6 bits   |          |
                                                   +-----------+          +-- clr to all capture flip-flops
```

| File | Role |
|---|---|
| `rtl/tdc_pkg.sv` | widths (`COARSE_W`=9, `FINE_W`=3, `WORD_W`=16) and the `tdc_word_t` word layout |
| `rtl/pll_4phase.sv` | behavioural model of the FPGA PLL: 125 MHz → four 1 GHz clocks 45° apart |
| `rtl/discriminator.sv` | first edge → `start`, second edge → `stop`, `polarity` = signal1 was first |
| `rtl/gray_counter.sv` | free-running 9-bit Gray counter on Clock1 |
| `rtl/gray_to_bin.sv` | Gray to binary conversion |
| `rtl/coarse_module.sv` | counter latched by `start` and by `stop`; outputs the 9-bit difference |
| `rtl/fine_encoder.sv` | 4-bit phase sample → 3-bit fine time |
| `rtl/fine_channel.sv` | four flip-flops clocked by one signal, plus the encoder |
| `rtl/fine_module.sv` | one `fine_channel` for `start` and one for `stop` |
| `rtl/combine_data.sv` | controller: waits for `stop`, builds the word, hands it on, then clears the TDC |
| `rtl/fx2_fifo_writer.sv` | writes words into endpoint EP2 of the CY7C68013A over its slave-FIFO bus |
| `rtl/tdc_top.sv` | the whole converter |

## Reading a result word

Each measurement produces one 16-bit word:

| bits | field | meaning |
|---|---|---|
| 15 | `polarity` | 1: signal1 came first (it is the start). 0: signal2 came first |
| 14:6 | `coarse` | Clock1 rising edges between start and stop, modulo 512 |
| 5:3 | `fine_start` | eighths of a period from the last Clock1 rise to the start edge |
| 2:0 | `fine_stop` | the same for the stop edge |

The interval is

    t = (8·coarse + fine_stop − fine_start) × T/8,      T/8 = 125 ps at 1 GHz

Example: start 300 ps after a Clock1 edge (`fine_start` = 2). Stop 27.05 ns
later, which lands 350 ps after a Clock1 edge (`fine_stop` = 2) with 27 Clock1
edges in between. The word gives (216 + 2 − 2) × 125 ps = 27.000 ns. The error
is under one bin, as for any quantiser with 125 ps steps.

This is the same as the textbook form t = T·(n−1) + t1 − t2. There, t1 and t2
are the gaps from each edge to the next clock edge: t1 = T − fine_start·T/8,
and likewise for t2. The subtraction and the sign from `polarity` are left to
the host software, which receives the raw fields.

The coarse range is 512 periods, so 511.875 ns. A longer interval aliases
modulo 512 ns. Nothing in the hardware flags this.

## The fine interpolator: why four clocks give eight bins

Clock*k* is Clock1 delayed by (k−1)·T/8, and each clock is high for half a
period. Sampled at any instant, the vector {Clock1, Clock2, Clock3, Clock4}
therefore walks through eight states per period:

| T/8 bins after the Clock1 rise | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| {Clock1..Clock4} | 1000 | 1100 | 1110 | 1111 | 0111 | 0011 | 0001 | 0000 |
| code | 000 | 001 | 010 | 011 | 100 | 101 | 110 | 111 |

The rising half-period fills the vector with ones and the falling half-period
empties it. So four phases resolve eight bins, not four. `fine_channel` clocks
four D flip-flops with the signal edge itself, with the clocks on the D inputs,
and `fine_encoder` applies the table.

A sample taken right on a clock edge can go metastable and produce one of the
other eight patterns. The publication does not say how to encode those. This
design uses a rule that reproduces the table for the eight legal states:
Clock1 high gives (ones − 1), and Clock1 low gives (7 − ones).

## The coarse counter and why it is Gray coded

The counter runs on Clock1 and is never stopped or reset between measurements.
The `start` and `stop` edges themselves latch its value, asynchronously to
Clock1. A binary counter sampled while several bits flip can return a value
that is far off. A Gray counter changes one bit per step, so an unlucky sample
is at worst one count off. `gray_counter` registers the Gray value directly, so
every output bit comes from a flip-flop and has no glitches. The two latched
values are converted to binary (`gray_to_bin`), and `coarse` is their
difference modulo 2⁹. Because only the difference matters, the counter's
starting value is irrelevant.

A latched count is the number of Clock1 rises before the edge. So `coarse` and
the fine codes describe the same instant only if the counter and the fine
flip-flops see the same Clock1 edge. In silicon, an edge that falls within
setup/hold of a Clock1 rise can get a new count with an old fine code, or the
reverse, which is a one-period error. The design does nothing to correct this,
and the published design does not describe a correction either. In simulation
the testbenches keep edges off the phase boundaries.

## The discriminator

Each input has a flip-flop clocked by its own rising edge. It is set by the
first pulse and held until `clr`. This stretches a pulse of any width into a
level. The signals built from these levels are:

* `start` = OR of the two levels. It rises at whichever edge comes first.
* `stop` = AND of the two levels. It rises at the second edge.
* `polarity` comes from a third flip-flop, clocked by signal1, that stores "signal2 not seen yet". It is 1 exactly when signal1 led.

Further pulses before `clr` are ignored. If both edges are simultaneous,
`polarity` is 1 and the interval is 0. The OR/AND construction is this
design's. The publication names only a "pulse stretching" and an
"identification" circuit.

## Measurement cycle and clock domains

There are three clock domains:

* **Clock1..Clock4 (1 GHz):** the counter, plus the capture flip-flops clocked by `start` and `stop`.
* **The pulse edges:** `signal1` and `signal2` are used as clocks.
* **`ifclk`:** the FX2 interface clock, for example 48 MHz. It runs `combine_data` and `fx2_fifo_writer`.

`combine_data` is the only thing that crosses between them:

1. `stop` passes through a 2-stage synchroniser (`SYNC_STAGES`). Word-valid follows `SYNC_STAGES+1` `ifclk` edges after the stop edge. By then all captured values have been stable for at least one `ifclk` period, because they were latched at the stop edge or earlier. So they are sampled as a quasi-static bus.
2. The word is offered on a valid/ready handshake. An assertion checks that it stays constant while it waits. If the USB FIFO is full, the TDC simply stays in this state and ignores new pulses.
3. After the hand-off, `clr` rises. It is registered, so it has no glitches. It clears the discriminator, the latched counts and the fine flip-flops asynchronously. It stays high until every synchroniser stage reads 0, which takes 3 cycles. Then the TDC is ready again.

The dead time is therefore about 10 `ifclk` cycles after the stop edge, plus
any FIFO-full wait. That is about 0.2 µs at 48 MHz.

Resets: the internal reset is `rst_n` AND the PLL `locked` output. During reset
`clr` is low. It rises one cycle after reset ends, so the capture flip-flops
see a clear edge whatever state they powered up in.

Sending the word first and clearing afterwards follows the published order.
The synchroniser, the handshake and the reset behaviour are this design's own.
There is no timeout: if only one pulse ever arrives, the TDC waits for the
second one.

## USB slave-FIFO side

`fx2_fifo_writer` drives the CY7C68013A in synchronous slave-FIFO mode. The
FPGA-side pins are:

* `fd[15:0]`: the data bus.
* `slwr_n`: an active-low write strobe, sampled on `ifclk`.
* `fifoadr`: the endpoint address, 00 for EP2, which is set up on the chip as a triple-buffered IN endpoint.
* `full_n`: the EP2 full flag (FLAGB in a usual setup).

A word is accepted only while `full_n` is high. It is written with a one-cycle
strobe, and an idle cycle follows each write so the flag can settle. Packet
commit is left to the chip's auto-commit. SLRD#, SLOE# and PKTEND# are not
used and should be tied inactive. These details come from the chip's data
sheet, not from the publication.

## The PLL model

`pll_4phase` is **not synthesizable**. It stands in for the FPGA's PLL
primitive (an altpll configured for ×8, 50% duty and phases of 0°, 45°, 90° and
135°). Its behaviour:

* Clock1 starts at the first rising edge of `clk_osc` and then free-runs at 1 ns.
* The other outputs are Clock1 delayed by 125, 250 and 375 ps.
* `locked` rises on the 4th reference edge.

For an FPGA build, replace the instance in `tdc_top` with the vendor PLL. The
rest of the design is synthesizable, but its 1 GHz clocks and edge-clocked
flip-flops need placement and timing constraints that are not part of this RTL.

## Where this departs from, or adds to, the publication

* Published: the counter width (9), the ×8 PLL with four phases 45° apart, the four-flip-flop fine stage and its encoding table, the 16-bit word (polarity in the MSB, fine times in the low six bits), the CY7C68013A in slave-FIFO mode on EP2, and the clear after each word.
* Chosen here:
  * the order of the two fine fields (start above stop);
  * the encoding of non-thermometer samples;
  * the discriminator's internal logic;
  * taking the coarse difference in hardware modulo 512;
  * the synchroniser, handshake, reset and lock handling;
  * the slave-FIFO write timing;
  * a separate `ifclk` input for the control and USB side.
* Not modelled: the host software, histogramming, and metastability and delay mismatch in real silicon.

## Simulating

Every testbench is self-checking. Each one ends with a single line
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/tdc_pkg.sv tb/tb_tdc_top.sv \
              --top-module tb_tdc_top
    ./obj_dir/Vtb_tdc_top

Replace `tb_tdc_top` with any testbench name:

* **`tb_tdc_top`:** end to end, at the default sizes. It runs the 27 ns and 217 ns intervals of the resolution measurements (40 each), the 10–300 ns linearity sweep in 10 ns steps (8 runs per point), and 150 random intervals up to 500 ns, all in both input orders. Expected words are computed from the edge times alone. The test also requires that each of these happened: both polarities, all eight fine codes on both channels, counter wrap inside an interval, the writer stalled by a full FIFO, and the clear before every word. It runs in well under a second.
* **`tb_discriminator`, `tb_gray_counter`, `tb_coarse_module`, `tb_fine_encoder`, `tb_fine_module`, `tb_combine_data`, `tb_fx2_fifo_writer`, `tb_pll_4phase`:** one per block. The combine_data test also checks the latency: the word appears exactly 3 `ifclk` edges after `stop`, and the clear lasts 3 cycles.

All files use `` `timescale 1ps/1ps``. The testbenches only place edges off the
125 ps phase boundaries, because a two-state simulator cannot model a
metastable sample.
