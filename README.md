# Trigger-less readout for the J-PET scanner prototype — SystemVerilog model

The J-PET prototype is a time-of-flight PET scanner built from 192 plastic
scintillator strips, each read out by a photomultiplier at both ends: 384
analog signals. Each signal is amplified and split four ways, and each copy is
compared with its own threshold, so the front end produces 1536 digital
signals whose leading and trailing edges must be time-stamped with
picosecond precision.

Most PET readout systems decide in real time which hits to keep (coincidence
units, trigger logic). This design keeps everything instead. A master
board sends a *readout request* at a fixed 50 kHz. Each slave board answers
every request with one packet that holds everything its TDC channels recorded
since the previous request. The request's sequence number lets the
event-building computers put the slaves' packets of one 20 µs window back
together. A central controller module (CCM) can sit in the data path. It
parses the packets, extracts features, fills histograms and counts quality
figures, and passes the original packets on unchanged.

This repository holds a synthesizable SystemVerilog model of the digital
part of that chain, with self-checking testbenches.

## Structure

```
                  Master board (master_trb)
          cts: request every 20 us + sequence number
          central_hub: broadcast to slaves, collect busy
                 |  req, seq (to all)        ^ busy
       +---------+-------- ... --------+-----+
       v                               v
  Slave 0 (slave_trb)      ...     Slave 7 (slave_trb)
   4 x tdc (48 x tdc_channel)       4 x tdc
   data_transmitter -> packet       data_transmitter -> packet
       |                               |
       +------------> CCM (ccm) <------+          16 input links
            per link: ccm_parser -> ccm_analysis (ToT histogram)
                                   -> ccm_dqa (quality counters)
            ccm_forwarder: whole packets, round robin -> eb_* output
```

| Level | Count (default) | Module |
|---|---|---|
| Slave boards | `N_SLAVES` = 8 | `slave_trb` |
| TDC FPGAs per slave | `N_TDC` = 4 | `tdc` |
| Channels per TDC | `N_CH` = 48 (12 PMT inputs × 4 thresholds) | `tdc_channel` |
| Buffer per channel | `DEPTH` = 54 complete signals | `tdc_channel` |
| CCM input links | `N_LINKS` = 16 (slaves use links 0–7) | `ccm` |
| Readout rate | `READOUT_HZ` = 50 000 | `cts` |
| System clock | `CLK_HZ` = 200 MHz (own choice) | — |

The top, `jpet_daq_top`, wires all of this together. Everything in the table
except the clock and the link assignment comes from the published system
description.

## The channel buffer and the readout window

This is the part that takes the most care to get right.

`tdc_channel` watches its discriminator output, one sample per clock. A
rising edge latches a *leading* time stamp: the shared coarse counter plus the
fine code that the channel's tapped delay line delivers in that cycle. The
next falling edge gives the *trailing* time stamp. Together they form one
complete signal, which is written into a circular buffer of 54 entries.

The description says the buffers are "cleared" when a request arrives. A
literal clear would lose every signal that ends while the packet is being
built. The model therefore uses a **snapshot** instead:

* `snap_i` (one cycle, the same cycle in every channel of a board) copies the
  current number of stored signals into `left_o`.
* The reader pops exactly `left_o` signals, oldest first.
* A signal completed after the snapshot stays in the buffer for the next
  window. The channel records without interruption, even while it is being
  read.

The window of a packet therefore runs from one snapshot to the next.
When the board is idle, the snapshot follows the CTS request by three
cycles (hub register, request latch, snapshot). Only a signal's trailing edge decides its
window. A pulse that straddles the boundary goes into the later window.

When a signal finds the buffer full, it is dropped and a sticky flag is set.
That flag goes out with the next snapshot (`ovf_o`). The packet reports it as
one overflow bit for the whole board.

The model's limits:

* Pulses shorter than one clock period are not seen.
* The 12 ps resolution belongs to the delay line. The delay line is not in
  the RTL; its fine code comes in on the `fine_i` ports.

## Packets

`data_transmitter` (the slave board's central FPGA) waits for a request. It
then takes the snapshot and writes one packet of 32-bit words on a
valid/ready stream, with `last` on the final word:

| Word | Layout |
|---|---|
| header | `{module_id[15:0], seq[15:0]}` |
| hit (×2 per signal) | `{1'b0, lead, ch[7:0], coarse[11:0], fine[9:0]}`; first the leading word (`lead`=1), then the trailing word |
| trailer | `{overflow, 15'b0, n_hit_words[15:0]}` |

`ch` is the channel number on the board, `tdc*48 + channel`. Channels are
visited in order, and each channel's signals leave oldest first. A channel
with nothing stored costs one scan cycle, so an empty packet takes about 195
cycles. The word layout and the field widths are this model's own choices.
The source only says that the packet is a UDP packet tagged with the
sequence number and the module ID. The UDP/IP/Ethernet layers are not
modelled: the stream is the UDP payload.

A request can arrive while the previous packet is still going out, for
example when the output is back-pressured. The request is then held and
served as soon as the board is idle. If another request arrives first, it
replaces the held one and `missed_o` counts one. The data is never lost: the
next packet simply covers a longer window. The sequence number then jumps,
and the CCM counts the jump as a gap.

## Master board

`cts` counts `CLK_HZ / READOUT_HZ` = 4000 cycles. It then pulses `req_o` with
the next sequence number, starting from 0, and `late_o` counts the requests
issued while some slave was still busy. `central_hub` registers the request
and sends it to every slave in the same cycle. It gathers the slaves' busy
lines and keeps a sticky per-slave "was busy at a request" mark. The source
only names the hub. The broadcast and busy collection are the simplest
reading of "the master controls the readout and synchronization of the
slaves".

## Central controller (CCM)

Each input link has three units. All of them act on the words that the
forwarder actually takes from that link (valid and ready):

* `ccm_parser` decodes words by position: first word, `last` word, and
  everything in between. It raises header, hit and trailer events, and
  compares the trailer's count with the hit words it counted.
* `ccm_analysis` pairs each leading word with the following trailing word of
  the same channel. From each pair it takes the **time over threshold** (ToT)
  in coarse clock periods, modulo 2^12, and adds one to bin `min(ToT, 63)`
  of a 64-bin histogram. After reset or `clr_i` the histogram clears itself,
  one bin per cycle for 64 cycles. Events during the clear are not counted.
* `ccm_dqa` keeps five counters: packets, hit words, sequence gaps, length
  errors and overflow-flagged packets. It also keeps the last sequence number
  and the last module ID.

The source says only that the CCM performs feature extraction, histogramming
and data quality assessment. The choice of ToT as the feature and the set of
counters are this model's.

`ccm_forwarder` passes the packets on. A round-robin arbiter picks a link at
each packet boundary and stays with it until that packet's `last` word. The
processor of the real board reads the results through `cpu_link_i`,
`cpu_bin_i`, `cpu_hist_o` and `cpu_dqa_o`, combinationally, and clears them
all with `cpu_clr_i`.

## Throughput and sizes

* **Channel count.** 8 × 4 × 48 = 1536 channels, as the prototype needs.
* **Buffer depth.** 54 signals per channel per 20 µs, as published.
  - Emptying a completely full board takes 192 × 54 × 2 + 2 = 20 738 words,
    which is more than one 4000-cycle period.
  - Full buffers on every channel can therefore be absorbed once but not
    sustained. The real limit is lower still, because one GbE link carries
    only about 625 words per 20 µs.
* **CCM output.** One 32-bit word per clock, 6.4 Gbit/s at 200 MHz. That is
  below the 8 Gbit/s maximum aggregate stream quoted for the system. A wider
  output, or several outputs, would be needed at that rate.
* **Forwarder behaviour.** The forwarder stays with a slave for the whole of
  its packet, and a slave's packet includes its channel scan. So the slaves'
  packets leave one after another, about 200 cycles each even when empty.
  On the real boards the Ethernet links would buffer whole packets.

## Outside the RTL

These parts are not modelled. Their signals are ports of the top:

* `hit_i`: the analog front end with its LVDS-buffer discriminators.
  `lvds_discriminator` is a behavioural, non-synthesizable model of one
  discriminator, for illustration.
* `fine_i`: the tapped delay lines.
* The TrbNet and Gigabit Ethernet links between the boards. They are
  replaced by direct wires, and the whole system runs on one clock.
* `eb_*`: the event-building computers.
* `cpu_*`: the SoC processor.
* Slow control and monitoring.

## Departures from the published system, in short

* A snapshot of the buffers replaces "clearing" them (see above). Nothing is
  lost during readout.
* The packet format, field widths, clock frequency, channel order, ToT
  histogram, quality counters and arbitration are this model's own choices.
* The CCM output is 6.4 Gbit/s, not 8 Gbit/s.
* Slave *s* is wired to CCM link *s* and has module ID *s*.
* Only the "board-in-the-middle" routing is built, in which all slave data
  passes through the CCM. Slaves sending directly to storage is not built.

## Files

`rtl/`: one module or package per file.

* `daq_pkg`: constants, types, word formats.
* `tdc_channel`, `tdc`: time measurement and the channel buffer.
* `data_transmitter`: builds the packets.
* `slave_trb`: one slave board.
* `cts`, `central_hub`, `master_trb`: the master board.
* `ccm_parser`, `ccm_analysis`, `ccm_dqa`, `ccm_forwarder`, `ccm`: the
  central controller.
* `jpet_daq_top`: the whole system.
* `lvds_discriminator`: a behavioural model.

`tb/`: one self-checking testbench per module, named `tb_<module>`. Each one
prints `TB_RESULT checks=N failures=M`.

* `tb_jpet_daq_top` runs the whole system at its default size for about eleven
  request periods. It checks every signal end to end, and it forces and
  counts each of these events:
  - buffer overflow
  - back-pressure
  - late and missed requests
  - sequence gaps
  - slaves competing for the CCM output
  - ToT values in the last histogram bin
* It takes about a minute to build and run with Verilator.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/daq_pkg.sv \
  rtl/tdc_channel.sv rtl/tdc.sv rtl/data_transmitter.sv rtl/slave_trb.sv \
  rtl/cts.sv rtl/central_hub.sv rtl/master_trb.sv \
  rtl/ccm_parser.sv rtl/ccm_analysis.sv rtl/ccm_dqa.sv rtl/ccm_forwarder.sv rtl/ccm.sv \
  rtl/jpet_daq_top.sv tb/tb_jpet_daq_top.sv --top-module tb_jpet_daq_top -o sim
./obj_dir/sim
```

For a single block, compile `rtl/daq_pkg.sv`, the block's file and the files
of its submodules, then its testbench. The simulator is two-state, so every
register that matters has a reset.

To change the size, override the top's parameters (`N_SLAVES`, `N_TDC`,
`N_CH`, `DEPTH`, `N_LINKS`, `N_BINS`, `CLK_HZ`, `READOUT_HZ`). Time-stamp and
word widths live in `daq_pkg`. The packet format is defined in one place
there (`hit_word_t`, `hdr_word_t`, `trl_word_t`). Parser, transmitter and
testbenches all use those types.
