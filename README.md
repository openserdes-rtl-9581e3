# An all-digital serial link in SystemVerilog

This is a complete serial link, transmitter to receiver, built almost entirely from logic
gates and flip-flops. It is meant for chip flows where only a digital standard-cell library
and an automatic place-and-route tool are available. Porting such a link to a new process means
re-running synthesis, not redrawing analog circuits.

The idea is to replace every analog block of a conventional SerDes with a cell a synthesis
tool already has:

- **Transmitter:** the line driver is a chain of three ordinary inverters.
- **Receiver front end:** an inverter whose output is fed back to its input through a
  transistor used as a resistor. That feedback biases the inverter at its switching point,
  where its gain is highest. It can then amplify a line signal of a few tens of millivolts.
  A second, plain inverter squares the signal up, and a flip-flop samples it.
- **Clock recovery:** an oversampling CDR that is pure logic. CDR means clock and data
  recovery. It recovers the bit timing by sampling each bit several times and choosing, in
  logic, which sample to believe.

A serializer and a deserializer at the two ends move frames of 8 × 32 bits.

The target figures are 2 Gb/s over a channel that loses 34 dB. A 1.8 V swing at the
transmitter arrives as about 36 mV at the receiver. The receiver front end turns that into
roughly 0.34 V around its 0.83 V bias point.

## The chain of blocks

```
 tx_data[8][32] ─► serializer ─► tx_driver ═══ channel + coupling cap ═══►
   res_fb_inverter ─► rx_sampler ─► oversampling_cdr ─► deserializer ─► rx_data[8][32]
                        (inverter +      (clkgen, phase samplers,
                         flip-flop)       register bank, boundary
                                          detect, decision block)
```

| File | Role | Kind |
|---|---|---|
| `rtl/serdes_pkg.sv` | default sizes, sync word, FSM state types | package |
| `rtl/serializer.sv` | frame → serial bits, one per `tx_clk` | synthesizable |
| `rtl/tx_driver.sv` | three-inverter line driver | model (logic with delays) |
| `rtl/res_fb_inverter.sv` | self-biased sensing inverter, AC coupling | model (`real` voltages) |
| `rtl/rx_sampler.sv` | static inverter threshold + flip-flop | model input, real flip-flop |
| `rtl/multiphase_clkgen.sv` | OSR phases of the bit clock | synthesizable |
| `rtl/phase_samplers.sv` | one flip-flop per phase | synthesizable |
| `rtl/register_bank.sv` | samples → one word per bit, last 3 words | synthesizable |
| `rtl/bit_boundary_detect.sv` | where the transitions fall in a word | synthesizable |
| `rtl/decision_block.sv` | tracks the boundary, picks the sample | synthesizable |
| `rtl/oversampling_cdr.sv` | the five CDR parts wired together | synthesizable |
| `rtl/deserializer.sv` | serial bits → frame | synthesizable |
| `rtl/openserdes_top.sv` | the whole link | mixed |

The three analog cells are behavioural models. In silicon they are inverters and a
pseudo-resistor sized by hand; here they describe what those cells do, at the level needed to
simulate the link. The real-valued port `rx_in` on the top means the top module itself
simulates but does not synthesize. The digital blocks synthesize on their own.

## Clocks and rates

- **Transmitter:** one bit per `tx_clk`. For 2 Gb/s, `tx_clk` runs at 2 GHz.
- **Receiver:** the external clock `rx_clk` must run at **OSR × the bit rate**. With the
  default OSR = 4 that is 8 GHz (125 ps). The receiver's recovered bit clock `rx_bit_clk` is
  `rx_clk / 4`.
- **Phase:** the phase between transmitter and receiver is free. It may jitter and drift
  slowly.
- **Frequency:** the frequency must match. The link is mesochronous. A lasting frequency
  offset shows up as bit slips, flagged on `cdr_slip`.

Both halves have their own asynchronous active-low reset.

## Framing

The bits alone give the deserializer no way to tell where a frame begins, so this design adds
framing:

- **Header:** each frame is preceded by an 8-bit sync header, `8'hF0`.
- **Bit order:** within the frame, words go out stream 0 first and MSB first. A frame is
  264 bit times long, and frames can follow back to back.
- **Idle:** between frames the line carries `1010…`. The CDR therefore always has
  transitions to lock onto, and the idle pattern can never contain the header.
- **Resynchronising:** after a frame the deserializer requires 8 fresh bits before it accepts
  a header match. Leftover data bits therefore cannot fake a header.
- **Handshake:** the parallel side of the serializer uses a `valid`/`ready` handshake. `ready`
  is also high during the last data bit, which is what makes back-to-back frames possible.
- **Output:** the deserializer pulses `rx_valid` for one recovered bit clock when a full frame
  is in `rx_data`.

The driver chain has three stages, so it inverts. The serializer therefore sends the
complement (`INVERT_OUT = 1`), so that the line carries true data. The receiver front end also
inverts twice: once in the sensing inverter and once in the static inverter.

## The oversampling CDR

This is the part that needs the most explanation. Its blocks and their order are fixed by the
architecture. How each one works inside is this design's own.

**Phases.** `multiphase_clkgen` is a Johnson counter of OSR/2 flip-flops clocked on the
falling edge of `rx_clk`. Its outputs and their complements give OSR square waves at
`rx_clk / OSR`. Each phase is one `rx_clk` period after the previous one. The falling edge is
used so that the phases move halfway between the updates of the front-end flip-flop, which
runs on the rising edge.

**Samples and words.** `phase_samplers` has one flip-flop per phase, each sampling the data
on its phase. `register_bank` copies the OSR samples into one word on phase 0. All other
samples of the period were taken since the previous phase-0 edge and are stable. The bank
keeps the last three words. From here on everything runs on the bit clock (phase 0).

**Boundaries.** `bit_boundary_detect` XORs neighbouring samples of the newest word, using the
previous word's last sample as the neighbour of sample 0. It reports:

- the position of the first transition;
- how many transitions there are;
- whether there is any transition at all.

**Pointer.** `decision_block` reads the three words as one stream of 12 samples, oldest first,
and holds a pointer `c` into it. Because the stream moves by one word per clock, a constant
`c` samples every bit at the same phase.

- **Acquisition:** for the first 16 transitions after reset (`ACQ`), `c` is placed directly
  OSR/2 samples after each boundary seen, in the middle word. After that the block reports
  lock on `valid_o`.
- **Tracking:** once locked, the block remembers the boundary position. When a transition
  appears elsewhere, `c` moves by the signed distance, taking the shorter way round the word.
- **Wrap-around:** if `c` leaves the window [2, 10), it wraps by one word. That is a bit slip,
  and `slip_o` pulses.
- **Half-bit jumps:** a jump of exactly half a bit is ambiguous and is taken as backwards.
  The line's phase must therefore move by less than half a bit between transitions. Jitter and
  drift do; a sudden half-bit jump would not.

**Scan bits.** These are the tuning inputs for glitch and jitter correction.

- `glitch_scan[0]`: output the majority of samples `c-1`, `c`, `c+1` instead of sample `c`. A
  short glitch on the centre sample is voted out; `vote_fix_o` reports when the vote changed
  the bit.
- `glitch_scan[1]`: for tracking, ignore any bit period with more than one transition. A bit
  lasts OSR samples, so such a period must contain a glitch. `glitch_o` reports these
  periods.
- `jitter_scan` (4 bits): a new boundary position must be seen this many transitions in a row
  before `c` moves. Single-sample edge jitter then does not disturb the sampling point; the
  held moves are reported on `jitter_hold_o`. A value of 0 or 1 moves at once. Moves are
  reported on `phase_step_o`.

**Latency.** About three bit clocks from a sample to `bit_o`.

**Limits.**

- With only 4 samples per bit, a glitch on the centre sample together with jitter on a
  neighbouring sample defeats the 3-sample vote.
- Phase changes of half a bit or more cannot be followed, as described above.
- There is no frequency tracking.

## Front-end models

**`res_fb_inverter`** computes `vout = 0.83 V − 9.4 × (vin − vdc)`, clipped to 0…1.8 V.

- The bias comes from the published operating point. The gain magnitude of 9.4 is the ratio
  of the published 300 mV output to its 32 mV input.
- `vdc` is the line's DC level as the off-chip coupling capacitor sees it: a first-order
  average with a 20 ns time constant (an assumption).
- The model is event driven. At each input change it advances the average exactly over the
  time the previous value was held, then recomputes the output.
- It has no bandwidth limit and no noise. The link's measured sensitivity (about 32 mV at
  2 GHz) and how it changes with frequency are therefore not reproduced. In this model, any
  swing crosses the threshold.

**`rx_sampler`** is an ideal threshold at 0.83 V, standing for the static inverter, feeding a
rising-edge flip-flop on `rx_clk`.

**`tx_driver`** is three inverters of 20 ps each.

## Where this design departs from the published link

- **Receiver clock:** the published link runs "at 2 GHz". Here only the transmitter does; the
  CDR needs an external clock of 4 × 2 GHz. The published description does not give the CDR's
  clock rate.
- **Order in the receiver:** the sampling flip-flop feeds the CDR, which feeds the
  deserializer, as in the published receiver diagram. The text says only that the flip-flop
  forwards data to the deserializer.
- **Design choices not taken from the published link:** the framing (header, idle pattern,
  bit order, handshake) and all inner workings of the CDR listed above. That includes OSR = 4,
  the acquisition count, the two glitch scan bits and the run-length jitter filter.
- **Bias point:** the sensing inverter's bias is taken as 0.83 V, the value on the published
  operating-point plot, rather than the "about half the supply" stated in words.
- **Not modelled:** the feed-forward and receive equalisers drawn in the generic SerDes
  diagram are not part of this link, and are not here either. Power, area and layout results
  have no counterpart in RTL.

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. All of them pass with
randomised initial state.

The end-to-end test `tb_openserdes_top` runs the link at its default sizes. It models the
channel between `tx_out` and `rx_in`:

- 34 dB loss;
- 200 ps delay;
- up to 40 ps of random edge jitter;
- a slow ±150 ps wander of the delay;
- in the last third, 120 ps glitches in the middle of bits.

It sends 24 random frames, some back to back and some with idle gaps. It checks that every
frame arrives intact and in order, with no slips, and that each mechanism actually occurred:
lock, header found, idle gaps, back-to-back frames, phase steps, jitter holds, detected
glitches and vote corrections.

```
verilator --binary --timing -Wno-fatal -y rtl rtl/serdes_pkg.sv tb/tb_openserdes_top.sv \
          --top-module tb_openserdes_top -o sim && ./obj_dir/sim
```

Other blocks work the same way: substitute `tb_<block>.sv` and `--top-module tb_<block>`.
Testbenches that need a 62.5 ps half period use a 100 fs time precision.

## Changing it

- `NUM_WORDS` and `WORD_W` change the frame size; `serdes_pkg` holds the defaults and the sync
  word.
- `OSR` must be even; it sets the CDR clock as OSR × bit rate. More samples per bit make the
  vote and the jitter filter more effective.
- `JW` sets the width of `jitter_scan`.
- `ACQ` in `decision_block` sets how many transitions acquisition waits for.
- The front-end parameters (`VBIAS`, `GAIN`, `TAU_PS`, `VTH`, `STAGE_DELAY_PS`) only affect
  simulation.
