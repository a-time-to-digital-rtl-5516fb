# A steadily calibrated FPGA time-to-digital converter

This is synthesizable SystemVerilog for a two-channel FPGA time-to-digital
converter (TDC). It calibrates itself continuously from the same photon
detections it timestamps, so acquisition never has to stop for calibration.
The design follows a published FPGA TDC for quantum key distribution
receivers, built on a Zynq-7020. The RTL here is an independent
reconstruction. It is not the original authors' code.

## The problem: unequal delay-line bins

An FPGA TDC measures time at two scales:

* **Coarse.** A 48-bit counter counts periods of a 412.5 MHz sample clock
  (T = 2.424 ns). At that rate it rolls over after 2^48 / 412.5 MHz, about
  7.9 days.
* **Fine.** The input signal runs up a *tapped delay line*, a chain of 36
  CARRY4 carry primitives with 144 taps. Every tap feeds a flip-flop, and all
  the flip-flops sample on the same clock edge. The sampled word is a
  thermometer code: ones from tap 0 up to where the edge had got to. The
  number of ones is the *fine code*. It says how long before the clock edge
  the signal arrived.

The catch is that the taps are far from equal. On silicon a tap takes
anywhere from a few ps to about 100 ps. So fine code *i* does not mean
*i* x 18 ps. It has to be translated through a calibration table, and the
table drifts with temperature.

The table comes from a **code-density test**. Feed the line with hits that
are uniformly distributed relative to the clock, and count how many land in
each bin, w_i. A bin's count is proportional to its width:
δt_i = w_i / Σw · T. The calibrated time of a bin is the centre of that bin:

    t_c(0) = 0
    t_c(1) = (δt_1 + δt_Nc) / 2          N_c = last bin with any counts
    t_c(i) = δt_i / 2 + Σ_{j<i} δt_j     for i > 1

Bin 1 is a special case: it also takes half of the last bin. Part of the
first bin's time is the last bin's time left over from the previous clock
period. This keeps the average step between consecutive t_c equal to the
resolution T / N_c.

**Steady calibration.** A classic TDC takes the uniform hits from an on-chip
ring oscillator. That means switching the input away from the detector and
losing data while it calibrates. This design uses the detector events
themselves instead. Photons from a pulsed laser whose clock is not locked to
the sample clock also fall uniformly over the line. The histogram is kept
over a **sliding window of the last 2^17 = 131072 events**. Each new event
enters the window and the oldest one leaves, and then the table is
recomputed. The window size comes from a sample-size bound: at least 75744
events are needed for 10 % tolerance at 98 % confidence, and 131072 is the
next power of two. Because the window size is a power of two, every division
above becomes a shift.

## Block structure

```
             cal_src_ro
 hit_in[c] ----|\                                 per channel c
 ring_osc -----|/--> tdl_model --snapshot--> tdc_channel --tag--+--> steady_cal
                    (144 taps +             (hit detect,        |    (window, histogram,
                     flip-flops)             ones-count decoder,|     calibration table)
                                             48-bit counter)    |
                                                                v
                                       tag_merger (all channels, round robin)
                                                                |
                                       tag_buffer (block-RAM double buffer)
                                                                |
                                 processor: irq_half / irq_full / wr_addr / read port
```

| file | role |
|---|---|
| `marty_pkg.sv` | constants, `tag_t`, `cal_state_e` |
| `tdl_model.sv` | behavioural model of the carry-chain delay line and its flip-flops |
| `ring_osc_model.sv` | behavioural model of the ring oscillator |
| `therm_decoder.sv` | pipelined adder tree that counts ones (bubble tolerant) |
| `coarse_counter.sv` | 48-bit coarse counter |
| `tdc_channel.sv` | hit detection, decoder, coarse counter and tag assembly |
| `steady_cal.sv` | static and steady code-density calibration engine |
| `sync_fifo.sv`, `tag_merger.sv` | merge the channel tag streams |
| `tag_buffer.sv` | tag memory with half/full interrupts |
| `marty_top.sv` | the whole two-channel converter |

Everything runs on the sample clock. The processor side would normally sit
in its own clock domain. Here it shares the sample clock, which is a
simplification.

## Time tags

Each hit produces one 64-bit raw tag, `tag_t = {chan[7:0], coarse[47:0], fine[7:0]}`.
Tags are stored **uncalibrated**. The processor reads the calibration table
of each channel separately and applies it:

    hit time = (coarse + k) * T  -  t_c(fine)

Here k is a fixed pipeline offset. It is the same for every channel, so it
cancels in any time difference. A large fine code means the edge got far up
the line, so the hit was *earlier* than the clock edge. That is why t_c is
subtracted.

The 64-bit tag size is this design's own choice. The original system
streams about 16.7 Mevents/s raw over 1 Gbit/s Ethernet, which is about 60
bits per event, so 64 bits is the closest byte-aligned size.

**Hit detection** (`tdc_channel`). A hit is a snapshot whose first tap is 1
when the previous snapshot's first tap was 0. This works because detector
pulses (several ns) are longer than the line (about 2.7 ns). The rules that
follow from this:

* Input pulses must be longer than the delay line.
* An input must stay low for at least one clock between pulses.
* A channel can take at most one hit every two clocks.

If the edge arrives too late to reach even tap 0 before the clock edge, the
hit shows up one clock later with a count near N_c. The calibration treats
it consistently, because the code-density histogram sees those events the
same way.

**Decoder.** `therm_decoder` counts the ones in three register stages: 4
taps (one CARRY4), then 6 groups, then the total. Counting ones instead of
searching for the 1-to-0 boundary makes the result immune to *bubbles*. For
example, `11110100` decodes to 5, the same as `11111000`. A tag leaves the
channel 4 clocks after the snapshot it comes from.

## The calibration engine (`steady_cal`)

This block carries most of the design's logic. It is the one to understand
before changing anything.

**Window.** The window is a 2^LOG2_N x 8-bit circular buffer. In an FPGA it
is a simple dual-port block RAM of 1 Mbit per channel. Because the buffer is
circular, the oldest event is always at the write pointer. Each accepted
event does two things in one clock: it reads the old code at the pointer
and writes the new code there (read-before-write). On the next clock, the
histogram (a register array of 145 x 18-bit counters) adds one to the new
bin and takes one from the old bin. The engine accepts one event per clock.
Code 0 and codes above the last bin are ignored.

**States.** The state is held in `cal_state_e`:

* `CAL_STATIC`. This is the state after reset or `restart`. The first 2^17
  events fill the window and nothing is removed. This is the classic static
  code-density test, and its input can be either the ring oscillator or the
  detector.
* `CAL_STEADY`. The window is full and slides by one event per hit.

**Table format.** The table does not store picoseconds. It stores

    T_i = 2^(LOG2_N+1) * t_c(i) / T = w_i + 2 * Σ_{j=1}^{i-1} w_j,   T_1 = w_1 + w_Nc,   T_0 = 0

This is an exact integer, 19 bits at the defaults. To convert it to time:
t_c(i) = T_i · 2424 ps / 2^18. Keeping the table exact and dimensionless
leaves the choice of time unit, and of T itself, to the software.

**Recomputation.** The table is recomputed by a *sweep*:

1. When the histogram has changed, it is copied in one clock into a shadow
   array.
2. The next clock finds N_c (the highest bin with counts) and reads w_Nc.
3. Then one table entry per clock is written into the idle one of two table
   banks, accumulating Σw as the sweep goes.
4. When the last entry is written, the banks swap.

Readers (`rd_addr` → `rd_t`, `rd_hist` one clock later) therefore always see
a complete table. A sweep takes N_BINS + 2 = 147 clocks, which is 356 ns. At
the roughly 400 kevents/s of a QKD receiver, events arrive every 2.5 µs, so
every event gets its own table, and the whole window turns over in 328 ms.
At higher rates, the events that arrive during a sweep are folded into the
next one.

**Status outputs.**

* `busy` stays high while a sweep runs or is still due, so "busy low" means
  the table reflects every event received so far.
* `updates` counts the tables produced.
* `cal_valid` rises with the first complete table.

The published work computed the steady calibration offline, from recorded
raw tags, and named an in-fabric version as future work. Running it in the
fabric, with the sweep, shadow copy and two banks, is this design's own
realisation. The window, the histogram update rule and the formulas are as
published.

## Ring-oscillator calibration and acquisition stop

While `cal_src_ro` is high, every delay line sees the ring oscillator
instead of its detector input. The oscillator's events feed the calibration,
but no tags are stored. This models the classic "stop acquisition, calibrate
from the RO" step. Storing stays off for 6 more clocks, so that oscillator
hits still in the pipeline are not stored. A detector hit during those
clocks is also lost. Pulse `cal_restart[c]` to start a new static
calibration on channel c, from either source.

## Tag memory and processor interface (`tag_buffer`)

Tags from all channels are merged round-robin (`tag_merger`, one 4-word FIFO
per channel) and written to consecutive addresses of a 16384 x 64-bit
memory. The memory uses 28 of the Zynq-7020's 140 36-kbit block RAMs.

**Interrupts.**

* `irq_half` rises when the last word of the lower half has been written.
* `irq_full` rises when the last word of the upper half has been written.

Both stay high until acknowledged (`ack_half`, `ack_full`). The processor
copies the finished half while the other half fills up.

**Request read-out.** For request-driven operation the processor reads
`wr_addr` and copies from the address of its previous request up to
`wr_addr`.

**Overrun.** `overrun` is set if a half starts to be rewritten while its
interrupt is still pending. The original design rules this out by sizing
the memory. The flag is an addition here.

`merge_drops` counts tags lost when a merger FIFO is full. That cannot
happen with two channels, because each channel delivers at most one tag
every two clocks.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NUM_CH` | 2 | published (two-channel device) |
| `NTAPS` / `N_TAPS` | 144 | published (36 CARRY4 x 4) |
| `LOG2_N` | 17 (131072 events) | published |
| coarse width (`CNT_W`, `COARSE_W`) | 48 | published |
| sample clock | 412.5 MHz (`CLK_PERIOD_PS` 2424) | published |
| `BUF_DEPTH` | 16384 words | this design (not published) |
| tag layout | 8 + 48 + 8 bits | this design |
| decoder split | 4 / 6 / total, 3 clocks | this design (published: pipelined adder tree) |
| merger FIFO depth | 4 | this design |
| `RO_HALF_PS` | 3967 ps | this design |
| tap delays in `tdl_model` | 8, 30, 12, 24 ps per CARRY4 | this design, chosen so that about 131 bins cover one period (129 to 135 were measured on silicon) |
| `DELAY_PCT`, `BUBBLE_EVERY`, `CNT_W` < 48 | 100, 0, 48 | simulation knobs only |

## Departures from the published design

* **Calibration runs in hardware.** It was computed offline in the
  published work. Everything in `steady_cal` beyond the formulas and the
  window rule is this design's own.
* **Unpublished details are chosen here.** The tag format, the hit-detection
  rule, the decoder's stage split, the buffer depth, the interrupt
  handshake, the overrun flag and the channel merger are not published.
* **One clock domain** for everything, including the processor read port.
* **Delay line and ring oscillator are behavioural models.** They have the
  real parts' ports but idealised, repeating tap delays. In an FPGA they
  become CARRY4 chains with placement constraints and a LUT ring. Neither
  can be written as portable RTL, so `marty_top` simulates (with timing) but
  only its digital blocks synthesize.
* **Not included.** The processor cores, the DMA engine, DDR, the Ethernet
  link, the MMCM that makes the 412.5 MHz clock, and the XADC temperature
  sensor are vendor blocks and software. `marty_top` exposes the signals
  they would connect to.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_tdl_model` | capture of edges launched at known times, against the cumulative tap delays; bubble insertion |
| `tb_ring_osc_model` | half period, idle and stop behaviour |
| `tb_therm_decoder` | every count 0..144, with and without bubbles; 3-clock latency; sideband |
| `tb_coarse_counter` | counting, roll-over pulse, clear |
| `tb_tdc_channel` | tag fields against a reference counter, no tag for a line that stays high, 4-clock latency |
| `tb_steady_cal` | against a reference model (a queue of the last 16 codes): static phase, switch to steady, every table entry and histogram bin after each event and after bursts, N_c, sweep time, restart |
| `tb_tag_merger` | order and completeness at channel rate; drops under overload |
| `tb_tag_buffer` | addresses, both interrupts, read-back, no false overrun, real overrun |
| `tb_marty_top` | end to end at reduced sizes (64-event window, 64-word buffer, 12-bit counter, bubbles): RO calibration, 600 split detector hits with every tag checked, processor model on the interrupts plus a request read-out, a mid-run restart, and both tables compared with a reference built from the expected fine codes. It also counts that every mechanism occurred. |
| `tb_marty_top_full` | the top at its default parameters: a full 131072-event RO calibration per channel. Every calibrated bin centre must lie within 10 ps of the true centre of the model's bin, and every table entry must follow from its histogram. Then 300 detector hits are read back and checked, and steady updates must occur. |
| `tb_temperature_drift` | the top with an 8192-event window: after calibration every tap delay is shortened by 3 % (as a warming line would), and the RMS error of the bin centres is followed while the window refills with new events |

At the default parameters, the static ring-oscillator calibration puts
N_c = 131 on both channels. The largest error of a calibrated bin centre
against the true centre of the model's bins is below 0.1 ps. That is the
code-density method working as intended on a known line. This full-size run
simulates about 1 ms of device time and takes about 6 minutes.

The drift run shows why the calibration is kept steady. Right after the
calibration the RMS error of the bin centres is 6.3 ps. When every tap
becomes 3 % faster, it rises to 74.4 ps, because the table still describes the
old line. Half a window later it has fallen to 45.5 ps. Once a whole window of
new events has replaced the old ones, it is back at 4.9 ps. N_c moves from 131
to 139, because more taps are needed to cover one clock period. The
`delay_pct` variable of `tdl_model` can be changed from a testbench while the
simulation runs, which is how this step is applied.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/marty_pkg.sv \
          tb/tb_marty_top.sv --top-module tb_marty_top
./obj_dir/Vtb_marty_top
```

Replace `tb_marty_top` with any other testbench name. Each testbench ends
with its `TB_RESULT` line. Lint a synthesizable block with
`verilator --lint-only -Wall -Irtl -y rtl rtl/marty_pkg.sv rtl/<block>.sv`.

To experiment:

* Change the tap pattern or `DELAY_PCT` of `tdl_model` to see the tables
  follow a different line.
* Set `BUBBLE_EVERY` to add metastability bubbles.
* Shrink `LOG2_N` for faster calibration in simulation.
