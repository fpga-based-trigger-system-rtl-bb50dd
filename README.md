# A two-level FPGA muon-pair trigger with a 1 ns in-firmware TDC

The SeaQuest experiment (Fermilab E906) looks for pairs of opposite-sign
muons among the particles produced by a 120 GeV proton beam. The beam comes
in 1 ns wide buckets every 18.9 ns (the 53 MHz "RF clock"). Muons that cross
the spectrometer fire paddles in four stations of scintillator hodoscopes.
The trigger has to decide, bucket by bucket, whether the fired paddles look
like a high-transverse-momentum muon pair.

The design puts the whole decision in FPGAs. Every FPGA does three things:

1. It digitizes up to 96 discriminator signals with 1 ns resolution. A
   250 MHz clock is used in four phases, so there is no 1 GHz logic.
2. It delays every channel by its own 0..255 ns in a RAM pipeline. After
   this all channels are aligned, whatever their cable lengths.
3. It checks the aligned hit pattern against a matrix of coincidences
   ("roads"). The matrix is a pipelined tree of 4-input gates running at
   250 MHz.

Four such FPGAs, the *track finders*, turn hodoscope hits into px-binned
track bits. A fifth, the *track correlator*, runs the same firmware on those
track bits and forms the trigger word for the DAQ. The same RAM pipeline
also keeps 2048 ns of hit history. When a global trigger arrives, that
history is read out as a zero-suppressed TDC record.

This repository gives synthesizable SystemVerilog for that firmware and for
the five-FPGA system. There is a self-checking testbench for every block and
one for the whole system.

## System

```
 hodoscopes (4 stations)      RF clock        global trigger
        |                        |                  |
  +-----v------+  x4 finders (upper X, lower X, upper Y, lower Y)
  | trigger_fpga MODE=1 |--24-bit track word per RF cycle--+
  +--------------------+                                   |
                                       4 x 24 = 96 inputs  v
                                   +----------------------------+
                                   | trigger_fpga MODE=2        |--> 5-bit trigger word
                                   +----------------------------+
```

`seaquest_trigger` is the top. It instantiates four track finders
(`trigger_fpga`, MODE 1) and one track correlator (`trigger_fpga`, MODE 2).
The correlator digitizes the finders' outputs with its own TDC, exactly like
hodoscope signals. All five share the 250 MHz clocks, the RF clock and the
global trigger.

An X-plane finder uses 71 of its 96 inputs, in station order:

| station | paddles per half | inputs |
|---|---|---|
| 1X | 23 | 0..22 |
| 2X | 16 | 23..38 |
| 3X | 16 | 39..54 |
| 4X | 16 | 55..70 |

Inside one `trigger_fpga` the data flows like this:

```
din[96] -> tdc_unit -> delay_pipeline -> hit_window -> trigger_matrix -> trigger_retime -> trig_out
rf_in   -> rf_input --(RF hit as channel 96)--^          ^ RF tick ------------^
global_trig -> zs_readout (stops the pipeline, copies 16 slots x 96 channels) -> event buffer
```

## Clocks and the 16 ns bin

There is one clock domain in the logic: `c0`, 250 MHz. A second clock, `c90`
(the same clock delayed by 1 ns), is used only by the TDC sampling
registers. The 180- and 270-degree phases are the falling edges of `c0` and
`c90`.

Four `c0` cycles make a 16 ns *bin*. `coarse_counter` counts these cycles.
Its value `ts` is the coarse time, and `bin_strobe` is high in the last cycle
of each bin. In the original firmware the slower stages use a separate
62.5 MHz clock. Here they are written as `c0` logic enabled by `bin_strobe`,
which gives the same timing in one clock domain. Everything downstream of
the TDC works in bins: one hit per channel per bin, written as 4 time bits
(1 ns) plus a data-valid bit (`trig_pkg::hit_t`).

## The multi-phase TDC (`tdc_channel`)

This is the least obvious part of the design, so here it is edge by edge.
Let T be a rising edge of `c0`. The input is sampled at T (c0), T+1 (c90),
T+2 (falling c0) and T+3 (falling c90). These four samples are brought into
the `c0` domain in two stages:

| sampling register | domain-changing register | c0 stage | sample held after edge T |
|---|---|---|---|
| c0   | c0 -> QF  | Q3 | QF = s(T-4), Q3 = s(T-8) |
| c90  | c0 -> QE  | Q2 | QE = s(T-3), Q2 = s(T-7) |
| c180 | c0 -> QD  | Q1 | QD = s(T-2), Q1 = s(T-6) |
| c270 | c90       | Q0 | Q0 = s(T-5) |

The c270 sample moves through a `c90` register rather than a `c0` one. That
gives the transfer 2 ns instead of 1 ns. After every `c0` edge the bits
Q3 Q2 Q1 Q0 QF QE QD are seven consecutive 1 ns samples, oldest first.

A registered look-up table scans the first four of them. It looks for a 0
followed by three 1s, and reports the first such position j (0..3) as the
fine time T1,T0 with DV. The three 1s it needs are where QF, QE and QD come
in. Each 0->1 transition falls in exactly one cycle's window. A pulse
shorter than 3 ns is never reported, which removes ringing.

`tdc_retime` keeps the first DV in each bin and joins it with `ts` into the
4-bit bin time {TS, T1, T0}. A channel therefore has a two-hit resolution of
16 ns, and a second hit in the same bin is dropped. `tdc_unit` holds 96
channels and one shared coarse counter.

The absolute offset from the true edge to the measured time is the same on
every channel (13 ns in the testbench's time frame). The delay registers
absorb it.

## The delay-adjustment pipeline (`pipeline_ram4`, `delay_pipeline`)

Each channel has an 8-bit delay register, in 1 ns steps. For a hit of bin n
with time t:

* The low 4 delay bits are added to t. The 4-bit sum is the hit's time in
  its new bin.
* If the addition carries, the hit is held for one bin before it is written.
* The write address is `ptr + delay[7:4]`. `ptr` is the common pipeline
  pointer, which advances once per bin.

So the hit is stored at bin `n + delay[7:4] + carry`. It appears at the
*common end of the pipeline* (read address `ptr - 2`) with time
`(t + delay[3:0]) mod 16`. The pipeline shortens each channel's delay by the
same amount, so channels with different cable delays come out aligned.

One memory (`pipeline_ram4`) serves four channels: 128 bins x 4 channels x
5 bits, i.e. 2048 ns of history.

* Writes go one channel at a time, channel k in the cycle where `ts == k`.
  That is four 250 MHz write slots per bin.
* Reads return all four channels of one address at once.
* Every channel writes every bin. An empty bin writes DV = 0, so no word
  lives longer than one turn of the pointer.
* A carried hit and an uncarried hit from the next bin can land in the same
  bin. The earlier one is kept.

`delay_pipeline` holds 25 of these memories for the 96 channels plus the RF
reference. The RF reference goes through the pipeline as channel 96, with
its own delay `rf_delay`. After reset the outputs stay empty for 128 bins,
until every word has been written once.

Latency through the pipeline is `delay[7:4] + carry + 2` bins after the TDC
bin. The extra 2 bins (`RD_LAG`) keep the read clear of the bin's four write
cycles.

## In-time window (`hit_window`)

For each aligned hit the subtractor forms the time since the RF edge:

* `t_hit - t_rf` if the RF edge lies in the same bin, no later than the hit;
* otherwise `t_hit + 16 - t_last_rf`, where `t_last_rf` is the RF time of
  the last earlier bin that had an RF edge.

A hit is in time if this value lies in [`win_lo`, `win_hi`] (ns, inclusive).
The in-time bits of the 96 channels form the pattern that the matrix sees,
one pattern per bin. With the delays set so that in-time hits sit a fixed
number of ns after the delayed RF edge, the window removes hits from
neighbouring buckets.

## Trigger matrices (`trigger_matrix`)

Each output bit owns `N_TERMS` coincidence terms. A term is the AND of up to
four input bits, given as four detector IDs and a use mask. A 4-station road
A&B&C&D comes with its 3-of-4 variants (A&B&C, A&B&D, A&C&D, B&C&D), to cover
paddle inefficiency.

An output's terms are OR'ed by a tree of 4-input gates with one register per
level:

* level 1 holds the OR of four coincidences;
* each later level holds the OR of four registers of the level before;
* the tree ends when a single bit remains.

Latency is `or_levels(N_TERMS)` cycles at 250 MHz. That is 4 cycles for the
160 terms of a finder output and 5 cycles for the 288 terms of a correlator
output. A new pattern enters every cycle.

The contents are fixed when the design is elaborated. The functions
`l1_term(o, k)` and `l2_term(o, k)` in `trig_pkg` generate them. In the real
experiment the roads come from a Monte-Carlo study and are not published, so
the contents here are **examples of the right shape**, not physics roads:

* Finder (MODE 1): 24 px bins x 32 roads x 5 terms = 3840 coincidences. Bins
  0-11 are mu+ with |px| = bin+1, and bins 12-23 are mu- with |px| = bin-11.
  The charge follows from the bending direction.
* Correlator (MODE 2): input bits 24f..24f+23 carry finder f (0 upper X,
  1 lower X, 2 upper Y, 3 lower Y). Its outputs are:
  * bit 0: opposite-sign pair, one track top and one bottom, with
    |px1|+|px2| >= 8 bins;
  * bit 1: any such pair;
  * bit 2: any single X track;
  * bit 3: single mu+ in the top half;
  * bit 4: single mu+ in the bottom half.
  The Y finders' words are digitized but no example term uses them.
  The Y finders also run the X example roads on the X station map. No Y
  roads are given here; Y tracks are straight lines, and their roads would
  follow the Y paddle counts (20, 19, 16 and 16 per half).

To load real roads, replace `l1_term` and `l2_term`, or write a generator
that emits them. Set `L1_TERMS` and `L2_TERMS` to the largest number of
terms any output needs; unused terms have an empty mask and never fire.

## Output retiming (`trigger_retime`)

The matrix works on 16 ns bins, but the next stage expects one word per
18.9 ns beam cycle. `rf_input` digitizes the RF clock with an ordinary TDC
channel, and each RF edge gives a one-cycle `rf_tick`. The retime stage ORs
the matrix outputs between ticks. After each tick it drives the collected
word for 8 ns (`PULSE` = 2 cycles), so every beam cycle that fires makes a
fresh leading edge for the correlator's TDC.

With `matrix_en` low the outputs stay zero. The FPGA then works as a plain
zero-suppressed TDC.

## Event readout (`zs_readout`)

A one-cycle `global_trig` pulse stops the pipeline (`busy`): the pointer and
the writes freeze. The readout then walks over 16 time slots, latest first,
and inside each slot over channels 0..95. It reads one pipeline word per bin,
so 1536 words take 24.576 us. Words with DV are stored in a 256-word buffer:

```
{16'h0, 1'b0, channel[6:0], slot[3:0], time[3:0]}      slot 0 = latest
```

* When more than 256 hits are found, the older ones are dropped.
* Buffer words past `hit_count` read as `EOB_WORD` (32'hFFFFFFFF).
* The latest copied slot lies `ro_offset` bins behind the common end of the
  pipeline, to cover the trigger latency.
* The pipeline restarts when the copy ends.
* A trigger that arrives during a copy is ignored.

## Latency

The full-system testbench uses 100 ns total delay per hodoscope channel
(cable plus delay register) and 40 ns in the correlator. With those
settings, after the RF edge of the bucket:

* the 1st-level word appears 207-227 ns later;
* the 2nd-level trigger appears 359-379 ns later.

The spread comes from where the bucket falls in the 16 ns bin and in the RF
cycle. Almost all of the latency is in the programmed delays. The fixed part
is about 20 ns of TDC, 2-3 bins of pipeline, 4 or 5 matrix cycles and up to
one RF cycle of retiming. Larger delays, as needed for real cable lengths,
add to this one for one. The reference decision time quoted for the
experiment is about 770 ns, within the 2048 ns buffers of the chamber
readout.

## Interface of `trigger_fpga`

| port | dir | width | meaning |
|---|---|---|---|
| c0, c90 | in | 1 | 250 MHz clocks, c90 = c0 + 1 ns |
| rst | in | 1 | synchronous reset, active high |
| din | in | 96 | discriminator signals, asynchronous |
| rf_in | in | 1 | 53 MHz RF clock, asynchronous |
| delay | in | 96 x 8 | per-channel delay, ns |
| rf_delay | in | 8 | delay of the RF reference, ns |
| win_lo, win_hi | in | 5 | in-time window, ns after the RF edge |
| matrix_en | in | 1 | 0: trigger outputs off (plain TDC) |
| ro_offset | in | 7 | bins between the pipeline end and the latest copied slot |
| trig_out | out | N_OUT | trigger word, 8 ns pulse per RF cycle |
| global_trig | in | 1 | one-cycle pulse, synchronous to c0 |
| busy | out | 1 | pipeline stopped, copy running |
| hit_count | out | 9 | hits in the event buffer |
| buf_addr / buf_data | in / out | 8 / 32 | event buffer read, one cycle latency |
| primed | out | 1 | every pipeline word written since reset |

In the real module the settings and the buffer sit behind the board's VME
bridge. Here they are plain ports. `seaquest_trigger` has the same ports
indexed by FPGA: 0..3 are the finders and 4 is the correlator.

## Where this RTL departs from the original, or fills gaps

Followed from the original description:

* the four-phase sampling and domain-changing register structure;
* 1 ns bins and 16 ns bins of 4+1 bits;
* 8-bit delays with carry and the high-nibble write address;
* four channels per memory, written one after the other and read in
  parallel;
* the 2048 ns depth;
* 16-slot, 96-channel, 256-hit zero-suppressed readout, latest slot first;
* 4-input pipelined OR trees at 250 MHz;
* one output word per beam cycle;
* the shared firmware for both levels;
* the X-plane paddle counts.

This design's own choices:

* **Look-up table rule** of the TDC: 0 then three 1s.
* **First hit kept** in a bin.
* **62.5 MHz as a clock enable** rather than a second clock.
* **Collision rule** in the pipeline: the earlier hit is kept.
* **`RD_LAG` = 2**, and the outputs held empty until the memory is primed.
* **The subtractor**: RF reference through the pipeline, window relative to
  the latest RF edge.
* **Readout**: the offset input, the word format, ignoring re-triggers, and
  the restart rule.
* **Output pulse width** of 8 ns.
* **Matrix sizes and contents**. The finder word is 24 bits, where the
  original allows up to 32; 24 makes four words fit the correlator's 96
  inputs. The matrix has 160 terms per finder output.

Not included:

* the PLL: the testbenches use `tb/clock_source.sv`;
* the input buffer cells and their placement;
* the board's VME bridge;
* the NIM front end (discriminators, mean timer);
* prescaling of the single-muon triggers, which happens outside this
  firmware.

`trigger_fpga.sv` carries a `verilator no_inline_module` comment. It keeps
the FPGA a separate simulation model, so the four identical finders share
one compiled copy, which cuts the full-system build time by about three. It
does not change the logic.

## Sizes

After coarse synthesis (word-level cells):

| module | cells | flip-flop bits | memory bits |
|---|---|---|---|
| trigger_fpga (finder) | about 12,000 | about 5,900 | 67,840 |
| seaquest_trigger | about 56,000 | about 28,000 | about 339,000 |

## Simulating

Every file in `rtl/` and `tb/` holds one module or package of the same name.
Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. It
also has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -j 0 \
  -y rtl -y tb +libext+.sv -Irtl rtl/trig_pkg.sv tb/seaquest_trigger_tb.sv \
  --top-module seaquest_trigger_tb -Mdir obj && ./obj/Vseaquest_trigger_tb
```

Replace the testbench name to run another one. The testbenches are:

| testbench | what it checks |
|---|---|
| coarse_counter_tb | TS sequence, strobe once per 16 ns |
| tdc_channel_tb | 1 ns linearity over all 16 phases, one hit per pulse, 2 ns pulses rejected, 3 ns kept |
| tdc_retime_tb | first hit of each bin, {TS,T1,T0} |
| tdc_unit_tb | 96 channels at once, equal offsets |
| pipeline_ram4_tb | scoreboard of delays with carry and collisions; stop |
| delay_pipeline_tb | 96 channels + RF with different delays; priming; stop; history read |
| hit_window_tb | reference subtractor and window, three windows |
| zs_readout_tb | copy order, suppression, 256-hit overflow, EOB, 1536-bin copy time |
| rf_input_tb | one tick and one hit per RF edge, 18.9 ns spacing |
| trigger_matrix_tb | both matrices against a term-by-term reference, latency 4 and 5 |
| trigger_retime_tb | one word per RF cycle, pulse width, disable |
| trigger_fpga_tb | one finder end to end: 4-of-4, 3-of-4, 2-of-4, disabled, readout |
| seaquest_trigger_tb | whole system at default sizes |

`seaquest_trigger_tb` covers dimuon and single-muon triggers, 3-of-4 roads,
delay carries, window rejection, matrix disable, ringing rejection, readout
stop in all five FPGAs and buffer overflow. Each must occur at least once.
Building it takes a few minutes, and running it takes under a second.

All variables start random in a two-state simulator. The TDC sampling
registers have no reset and flush themselves within three cycles. The
pipeline memories are covered by the `primed` flag.
