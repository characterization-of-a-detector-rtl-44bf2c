# A 17-channel sliding-scale TDC with continuous read-out

This is SystemVerilog for the digital part of an FPGA time-to-digital converter (TDC).
It was built to read out a cross delay-line particle detector. Such a detector gives
four pulses per particle. The times of those four pulses, each known to about 120 ps,
give the particle's two in-plane coordinates and its arrival time. The converter must
therefore time-stamp pulses on several channels at millions of pulses per second and
keep doing so for as long as the run lasts.

The design has two main ideas:

* **Sliding-scale time coding.** A free-running time base is never reset at the start of a
  run. Each pulse, including the event trigger that marks the start, gets a 26-bit absolute
  time stamp in steps of t0 = 120 ps. Durations are differences of stamps, taken off-line.
  This spreads the quantisation error evenly and leaves no integral non-linearity.
* **Continuous read-out through two levels of FIFOs.** Each channel buffers its own stamps.
  A multiplexer merges the channels at a fixed 16.4 MWords/s into two acquisition buffers.
  These are filled alternately, so the host can empty one buffer while the other fills.
  A run can therefore last much longer than any buffer: its length is limited only by host memory.

```
            +-------------+     +----------------+
 stop[0] -->| time coder  |---->| channel reg 0  |--+
            +-------------+     | (FIFO 512 w)   |  |     +-------------+     +----------------+
   ...           ...            +----------------+  +---->| multiplexer |---->| acq. reg 1     |--+
            +-------------+     +----------------+  |     | round robin |     | (FIFO 509 w)   |  |
 stop[15]-->| time coder  |---->| channel reg 15 |--+     | 16.4 MW/s   |---->| acq. reg 2     |--+--> host port
            +-------------+     +----------------+  |     +-------------+     +----------------+      (33 MW/s)
 trigger -->| time coder  |---->| channel reg 16 |--+           ^                filled alternately
            +-------------+     +----------------+             |
                 ^    ^                                   run_control: start on trigger,
   taps[15:0] ---+    +--- coarse count (time_base)       stop on end pulse, flush at end
   (locked delay line, 16 x 120 ps)
        |<------------- 520 MHz reference domain ------->|<----- 32.8 MHz system domain ----->|
```

The block structure follows the published TDC. So do the channel count (16 stops plus
the trigger), the 16-stage delay line locked to 520 MHz, the 26-bit time inside a 32-bit
word, the 512-word channel buffers, the 16.4 MWords/s multiplexer and the two 509-word
acquisition buffers. The internal circuits were not published: the hit capture, the
clock-domain crossings, the arbiter, the buffer hand-over rules, the word layout beyond
the 26 time bits and the host port. They are this design's own choices and are marked
as such below and in each file's header.

## Time code and data word

The 520 MHz reference clock (period 1920 ps) drives a chain of 16 delay elements that
a lock loop holds at exactly one clock period. Each element therefore delays by
t0 = 120 ps. When a stop arrives, it latches two things:

* the 16 taps of the delay line, which show where in the clock period the stop fell;
* the coarse counter, which counts reference periods.

A 50 % duty clock seen through 16 taps spaced t0 apart always shows eight ones followed
by eight zeros, rotated by the phase. The fine code is the index k for which tap k is 1
and tap k+1 (modulo 16) is 0. With the first reference edge after reset at time
t_rel, a stop at time t gets the code

    time_code = floor((t - t_rel) / 120 ps)  mod 2^26      ( = {coarse[21:0], fine[3:0]} )

The code repeats every 2^26 x 120 ps = 8.05 ms. Each coded event becomes one 32-bit word (`tdc_pkg::tdc_word_t`):

| bits    | field       | meaning |
|---------|-------------|---------|
| [31:27] | `channel`   | 0..15 stop inputs, 16 the event trigger (in general: `NSTOP`) |
| [26]    | `marker`    | 1: rollover marker, the time base has just wrapped |
| [25:0]  | `time_code` | time in units of t0 |

The 26-bit time and the 32-bit word come from the original design. The channel field and the
marker bit are this design's use of the remaining six bits.

**Runs longer than 8 ms.** The original extends a run past one period of the time code
with a mechanism for counting elapsed periods off-line, but does not describe it. Here,
each time the coarse counter wraps during a run, the trigger channel writes a marker word.
Its `time_code` is 0, or 16 if a trigger was being written in the same cycle. Software
counts the markers on channel 16 to extend the time code beyond 26 bits. A 100 ms run
contains 12 of them.

## Coding a stop: hit register and dead time

`time_coder` is clocked by the stop input itself. A rising edge latches the taps and
the coarse count into a hit register and toggles `hit_tgl`. The reference domain sees
the toggle after two synchroniser flip-flops. It then decodes the fine code, writes the
word into the channel register and returns the toggle as `ack_tgl`. Only then is the hit
register ready for the next stop. A stop that arrives while the hit register is still
full is simply not seen. That is the dead time, about three reference periods (5.8 ns).

* The original quotes 2.5 ns of dead time. Its hit circuit is not published. This
  design's dead time is longer, but still well below the 12.5 ns period of the 80 MHz
  bench test and the 7 ns dead time of the discriminators that feed the converter.
* The hit register latches `taps` and `coarse` asynchronously. A stop within a few tens of
  picoseconds of a reference edge can latch a coarse count that does not agree with the
  fine code. The usual remedy is a second coarse counter on the other clock edge, chosen
  by the fine code. That is not built here: the simulation model is ideal, and the fix
  depends on the target device.
* The words are written only while `enable` is high, meaning a run is in progress. The
  trigger channel is always enabled. When the channel register is full, a coded stop is
  dropped and reported for one cycle on `stop_lost[c]`. At high rates, therefore, the
  rate at which the multiplexer drains the channel registers sets how many stops each
  channel records.

## Channel registers and the multiplexer

Each `chan_reg` is a 512 x 32 dual-clock FIFO. It is written at the 520 MHz reference and
read in the system domain. The pointers cross between the two domains in Gray code through
two flip-flops, so `full` and `empty` can be late but are never wrong. Read data appears
one clock after `rd_en`.

`tdc_mux` divides time into read slots of `CYCLES_PER_WORD` = 2 system cycles. In the
first cycle of a slot it picks the first non-empty channel after the one it served last,
and reads that channel if the acquisition buffers can take a word. In the second cycle it
writes the word to the acquisition buffers. Empty channels cost nothing. Every busy channel
is served once per round, so each busy channel gets the same share of the 16.4 MWords/s.
With the 32.8 MHz system clock assumed here, this gives the two regimes seen when all four
delay-line outputs carry the same 80 MHz pulse train:

* **Burst (up to 512 words per channel).** Every stop is recorded, at 80 MWords/s per
  channel. The channel buffers absorb the burst: 512 words at 80 MHz last 6.4 us.
* **Sustained.** Each channel records 16.4 / 4 = 4.1 MWords/s. The rest is lost at the
  input while its channel register is full.

The system clock frequency and the two cycles per word are not given in the original,
only the resulting 16.4 MWords/s.

## Acquisition registers and the host port

`acq_pingpong` holds two `acq_reg` FIFOs of 509 words each. 509 is not a power of two, so
their pointers wrap explicitly. The rules are:

1. The multiplexer writes into the *fill* register.
2. When the fill register reaches 509 words, it is *handed over*: it is marked ready for
   the host and counted in `regs_sent`. A flush pulse at the end of a run also hands it
   over, provided it holds at least one word.
3. Filling moves to the other register as soon as that register is free. If both are ready,
   `wr_ready` falls and the multiplexer stalls. The channel registers then fill up and start
   dropping stops. This is the loss mechanism when the host is too slow.
4. The host reads whole registers in hand-over order. `host_avail` says a register is
   waiting and `host_words` gives its length. Each cycle with `host_rd_en` returns one
   word on `host_rd_data` a cycle later, with `host_rd_valid`. The last word of the
   register comes with `host_rd_last`, after which the register is free.

The hand-overs always alternate between the two registers, so the read side only
toggles a pointer. At one word per 32.8 MHz cycle, the port delivers about 33 MWords/s,
twice the multiplexer rate. So a host that keeps polling never causes a stall. In the
original, this port feeds a PCI target and a polling program that copies each register
into RAM. The PCI interface is not part of this RTL: a bus bridge would drive `host_rd_en`
from bus reads and return `host_rd_data`.

## Run control

A run starts when the trigger word has been written (`coded` from the trigger channel's
coder). From that moment `run` is high and the stop channels code. The end pulse is
synchronised into the reference domain, and its rising edge ends the run. Because it is
sampled rather than captured on its edge, it must last longer than one reference period:
1.92 ns at 520 MHz, but 30 ns if the reference is slowed to give t0 = 1.875 ns. In the system
domain `run_control` waits 8 cycles for words still crossing into the channel
registers. It then waits until all channel registers are empty and no word is in flight,
and pulses `flush`. This hands the last, partly filled acquisition register to the host.
The end pulse itself is not time-stamped. A trigger that arrives during a run is coded
like any other event.

## Clocks, resets and timing summary

| domain | clock | blocks |
|--------|-------|--------|
| reference | `ref_clk`, 520.8 MHz (1920 ps) | `time_base`, `time_coder` (reference side), `chan_reg` write side, `run_control` start/stop |
| stop inputs | each `stop[c]` / `trigger` edge | hit registers in `time_coder` |
| system | `clk`, 32.8 MHz (30.5 ns) | `chan_reg` read side, `tdc_mux`, `acq_pingpong`, `run_control` flush |

`rst_ref` and `rst` are synchronous, active-high resets for the two domains. Hold each for
at least four cycles of its clock. The hit registers take `rst_ref` asynchronously.

Latency of one stop, from its edge to its word in an acquisition register:

* 3 reference cycles to reach the channel register;
* 2 to 3 system cycles for the write pointer to cross into the system domain;
* up to one multiplexer round (17 slots) when all channels are busy;
* 2 system cycles to read the word and write it.

## Parameters

| module | parameter | default | origin |
|--------|-----------|---------|--------|
| `tdc_top` | `NSTOP` | 16 | published (plus one trigger channel) |
| `tdc_top`, `time_base`, `time_coder` | `COARSE_BITS` | 22 | published 26-bit code minus 4 fine bits |
| `tdc_top`, `chan_reg` | `CHAN_DEPTH` / `DEPTH` | 512 | published; power of two required |
| `tdc_top`, `acq_pingpong`, `acq_reg` | `ACQ_DEPTH` / `DEPTH` | 509 | published |
| `tdc_top`, `tdc_mux` | `CYCLES_PER_WORD` | 2 | this design (16.4 MWords/s at 32.8 MHz) |
| `time_coder`, `run_control` | `SYNC_STAGES` | 2 | this design |
| `run_control` | `DRAIN_WAIT` | 8 | this design |
| `dll_delay_line` | `STAGES`, `T0_PS` | 16, 120 | published |

One published number conflicts with the others. One sentence gives the channel-register
depth as 509 words. The block diagram, its caption and the bench measurements all say 512.
This design uses 512.

## Files

* `rtl/tdc_pkg.sv`: widths and the `tdc_word_t` word type.
* `rtl/dll_delay_line.sv`: **behavioural model**, not synthesizable, of the locked
  16-stage delay line. It is an ideal chain of 120 ps delays with the lock loop assumed
  settled. In a real device this is a vendor-specific structure, such as a carry chain or
  IODELAY cells, with its own calibration loop. It is kept outside `tdc_top`, whose `taps`
  input it drives.
* `rtl/time_base.sv`, `rtl/time_coder.sv`, `rtl/chan_reg.sv`, `rtl/tdc_mux.sv`,
  `rtl/acq_reg.sv`, `rtl/acq_pingpong.sv`, `rtl/run_control.sv`: the blocks described above.
* `rtl/tdc_top.sv`: the converter, with 17 coders and channel registers, the multiplexer,
  the acquisition registers and run control.
* `tb/tb_<block>.sv`: one self-checking testbench per block.
* `tb/tb_tdc_top.sv`: an end-to-end run at reduced sizes. It uses 4 stops, an 8-bit coarse
  counter (so the time base wraps every 0.49 us), 32-word channel registers and 29-word
  acquisition registers.
* `tb/tb_tdc_top_full.sv`: the same run at the default, published sizes.
* `tb/tb_rate_regimes.sv`: the two bench regimes at the default sizes. In regime (i) a
  500-pulse burst at 80 MHz on four channels is recorded completely. In regime (ii) a
  60 us train is recorded at 4.09 to 4.12 MWords/s per channel, 16.4 MWords/s in total.
* `tb/tb_interval_20mhz.sv`: the linearity check. 2000 pulses at 20 MHz go into one
  channel. Every coded interval is 416 or 417 steps, and the mean is 416.666 steps against
  the ideal 416.667, with no pulse lost.
* `tb/tb_pair_drift.sv`: the two-channel drift check. Pulse pairs 45 ns apart go into
  channels 0 and 1, 200 pairs at 4 MHz, then 100 at 0.4 MHz, each at a random sub-step
  phase. Every pair codes exactly 375 steps at both rates, so there is no drift with rate.
* `tb/tb_ref_change.sv`: a change of reference frequency. Two converters run side by side
  from the same 1 MHz stop train, one with t0 = 240 ps (260 MHz reference) and one with
  t0 = 1875 ps (33.3 MHz). Both code every stop exactly at their own t0. Only the delay-line
  model's `T0_PS` and the clock change.
* `tb/tb_long_run.sv`: a continuous 10 ms run, longer than the 8.05 ms code period. Four
  channels get a stop every 500 ns (8 MWords/s together). All 80 000 words arrive with exact
  codes through 158 acquisition registers. Exactly one rollover marker arrives, between the
  stops coded before and after the wrap. This one simulates for about 70 s.

Not included: the NIM input receivers, the PCI bus interface and the off-line software.
The software reconstructs positions from the four times of each particle and computes
resolutions.

## Verification

Every testbench computes its expected values from the stimulus alone. For example, the
time code is computed from the picosecond instant of each stop. Every testbench ends with
a line `TB_RESULT checks=N failures=M`. The end-to-end runs drive four stop channels, as
the original bench test did. They check:

* every word the host receives is matched in order against a generated stop of its
  channel, with the exact 26-bit code;
* the trigger word appears once, and stops before the trigger or after the end pulse are
  not recorded;
* all stops of a slow phase arrive, except one placed 1.5 ns after another, which must fall
  in the dead time;
* the first acquisition register fills at exactly one word per two system cycles, with an
  equal share per busy channel;
* channel-register overflow, multiplexer stall, alternation of the acquisition registers,
  the final flush and (at reduced size) rollover markers each happen. A mechanism that
  never happens counts as a failure;
* the host receives exactly as many words as the coders wrote.

The full-size run simulates about 170 us in about a second. `tb_long_run` covers a 10 ms
run at half the maximum rate. A 100 ms run, and a 10 ms run at the full 16.4 MWords/s, have
not been simulated.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tdc_pkg.sv tb/tb_tdc_top_full.sv \
          -y rtl -y tb +libext+.sv --top-module tb_tdc_top_full -Mdir obj_full
./obj_full/Vtb_tdc_top_full
```

For a block, replace the testbench name, e.g. `tb/tb_tdc_mux.sv` with `--top-module tb_tdc_mux`.
All files carry `` `timescale 1ps/1ps ``. The testbenches use `$urandom` only.

## Departures and limits

* The input dead time is about 5.8 ns against the original's 2.5 ns (see *Coding a stop*).
* There is no coarse-counter disambiguation at the reference edge (see *Coding a stop*).
* The lock loop of the delay line is not modelled, and neither is non-linearity of the
  delay elements. The converter's measured differential non-linearity (below 4 % of t0)
  and resolution (about 0.52 t0 RMS) are properties of the silicon. This RTL and its ideal
  model cannot reproduce them.
* The end pulse is sampled by the reference clock and must last longer than one of its
  periods. The dead time also scales with the reference period: about 90 ns at t0 = 1.875 ns.
* These choices are this design's own, not the original's: the word layout beyond the time
  code, the rollover marker, the system clock, the arbiter, the hand-over and flush rules
  and the host port.
