# A readout front-end driver for a silicon-strip tracker

The silicon-strip tracker of CMS is read out by APV25 chips. Each chip samples
128 strips into an analogue pipeline. On a Level-1 trigger it sends one frame
per pair of chips over an analogue optical fibre at 40 MHz. The frame holds a
24-word header and 256 interleaved strip samples. The Front-End Driver (FED)
receives 96 such fibres. It digitises them, removes pedestals and the
common-mode shift, and keeps only strips that carry signal ("clusters"). It
then builds one event record per trigger, buffers it, and ships it to the
data-acquisition system over S-LINK64. It also reports its buffer state to the
trigger system, so that triggers can be slowed down or stopped before data are
lost.

A companion board, the APV Emulator (APVE), is part of the same readout
interface. The occupancy of the APV25 on-chip buffers depends only on the
trigger history, so the APVE can track it centrally. It throttles the trigger
before the real chips overflow. It also hands out the pipeline address that
every chip should report, so that the FED can detect a chip that has fallen
out of synchronisation.

This repository is synthesizable SystemVerilog for that system. The top module
`tracker_readout` holds one FED (`fed`) and the APVE (`apve`). Everything runs
on one 40 MHz clock, `clk`, with a synchronous active-high reset `rst`.

## Data flow

```
 adc[96] ──► delay_fpga x24 ──► fe_unit x8 ──────────────► be_fpga ──► S-LINK64 / VME
 (10-bit)    whole-cycle delay  (12 channels each:          event builder,
             + raw spy          frame sync, pedestal,       QDR buffer controller,
                                common mode, clusters,      TCS status, slink_tx
                                2 kB FIFO)
 l1a, bc0 ────────────────────────────────────────────────► be_fpga, apve
 apve.pipe_addr ──► fe_unit (expected APV25 pipeline address)
 fed_tcs + fmm_in ─► apve ──► tracker_tcs (to the trigger system)
```

## The APV25 frame and finding it

A frame is 280 words: 6 "start" words at a high level, 16 address words, and
2 error words. The address words hold the 8-bit pipeline addresses of the two
multiplexed chips, interleaved and MSB first. In the error words a high level
means "no error". The header is followed by 256 data words. Even words come
from chip 0 and odd words from chip 1. Within a chip, the multiplexer order
is `strip = 32*(n%4) + 8*(n/4) - 31*(n/16)` for the n-th sample.

`apv_frame_sync` accepts a frame only inside a time window. For each trigger
it computes an expected start time,

    E = max(T_trigger + win_start, previous_frame_start + min_period)

and accepts the first six-word high run that begins in `[E, E + win_end - win_start]`.
The second term of the maximum matters when triggers come closer together
than one frame (280 cycles). The chip then sends the frames back to back, so
a window counted only from the trigger would close too early. If the window
closes without a frame, the channel reports the event as *missing*. It still
emits an empty record, so the event numbering stays aligned across channels.
Default registers: `win_start=0`, `win_end=64`, `min_period=280`,
`tick_level=768` (the ADC threshold for a "high" word).

## Per-channel processing (`fe_channel`, inside `fe_unit`)

1. **Pedestals** (`ped_reorder`): a 256 x 10-bit RAM, addressed by strip
   number, is subtracted from each sample. Reordering is done by addressing,
   so the later stages see (strip, value) pairs.
2. **Common mode** (`cm_median`): each frame is written into one of two banks.
   When the frame ends, the median of each chip's 128 values (the 64th
   smallest) is found by a bit-serial search. One bit of the result is fixed
   per cycle by counting in parallel how many of the 128 values lie below the
   candidate. The result is ready 12 cycles after the frame ends.
3. **Clusters** (`cluster_finder`): it subtracts the common mode and compares
   each strip with its noise `n[i]` (a second 256-entry RAM):
   *low* if `4*v > thr_lo*n[i]` and *high* if `4*v > thr_hi*n[i]`. Defaults are
   `thr_lo=8` (2 sigma) and `thr_hi=20` (5 sigma). A cluster is a run of at least two
   low strips, or a single high strip. Clusters stop at the chip boundary.
   Each cluster is written as `[first strip, width, value bytes...]`, with the values
   clipped to 0..255. In raw mode all 256 values go out as 16-bit words. The
   search takes 257 cycles. Two output buffers alternate, so the next frame
   can be processed while the previous record is still being drained.

## The Front-End unit record

`fe_unit` serves 12 fibres. For each event it writes, into a 2 kB FIFO
(`fe_fifo`, 256 x 64 data bits plus a last-word flag):

* a unit header `{0xE, unit, event count[7:0]}`;
* for each channel: `{channel, missing, error bits, mismatch, address0}`,
  `{00, address1}`, `{length in bytes}`, then the data words.

16-bit items are packed four to a 64-bit word. The last word of the event is
padded and flagged. *mismatch* is set, and the `oos` output pulses, when a
present frame's address differs from the one the APVE gave at that trigger.
The unit keeps a queue of those addresses.

## The Back-End: event record, buffer, status

`be_event_builder` counts triggers (24-bit event number) and bunch crossings
(12-bit, cleared by `bc0`). It writes, per event:

    header   {5, type (1 cluster / 2 raw), L1#[23:0], BX[11:0], fed_id[11:0], 00}   ctrl=1
    unit 0 .. unit 7 records
    trailer  {A, 0, length in words incl. header and trailer [23:0], CRC16, 0000}  ctrl=1

The CRC is CRC-16-CCITT (init 0xFFFF, MSB first) over every word before the
trailer. The original hardware lists the CRC as part of the header. Here it
sits in the trailer so that it can be computed while the data stream through.

`qdr_buffer_ctrl` keeps a circular buffer of 2^18 words of 65 bits (2 MB of
data) in external QDR SRAM. The SRAM itself is not part of the RTL; `tb/`
holds a behavioural model. Reads have a 2-cycle latency and go into a 4-word
output queue. `slink_tx` sends words to S-LINK64 and holds them while the
link's full flag (LFF) is up. In VME mode, words are instead presented in
registers and popped by software.

`tcs_status` produces the 4-bit trigger-control word from buffer occupancy
and errors: READY 1000, BUSY 0100, OUT-OF-SYNCH 0010, WARNING-OVERFLOW 0001,
ERROR 1100. Priority is ERROR > OOS > BUSY > WARN > READY. The warning and
busy levels are registers in units of 8 words. These code values are this
design's choice.

## The APV Emulator

`apve` raises its occupancy by one on each trigger and removes one event every
280 cycles (one frame time). The depth is 10 events in deconvolution mode and
31 in peak mode. It signals WARNING-OVERFLOW at `warn_level`, BUSY when full,
and a sticky ERROR on overflow. Its pipeline address is `(write pointer -
latency) mod 192`. Its output status is the more severe of its own status and
the FMM input (the merged FED status).

## Register bus

The VME64x interface is not included. A plain bus (`cfg_we`, 20-bit
`cfg_addr`, 16-bit data, combinational read) stands in its place.

| address | meaning |
|---|---|
| `u_C0_SS` (u=0..7) | pedestal of strip SS, channel C of unit u |
| `u_C1_SS` | noise of strip SS |
| `u_C2_xx` | whole-cycle delay of channel C |
| `u_C8xx..C9xx` | spy read (512 raw samples captured after an armed trigger) |
| `u_F000..F005` | thr_lo, thr_hi, win_start, win_end, tick_level, min_period |
| `8_0000` | mode: bit 0 raw, bit 1 VME readout |
| `8_0001..0003` | fed_id, warning level, busy level |
| `8_0004` / `8_0005` | arm spy / spy done |
| `8_0010` | status `{tcs, 0, fe_error, trigger overflow, oos seen, buffer overflow}` |
| `8_0011`, `8_0018..001C` | events built, words sent, LFF/busy/warn cycles |
| `8_0012..0017` | VME readout word, pop, valid |

## Departures and limits

* The 4-bit 160 MHz links between Front-End and Back-End FPGAs are replaced by
  a direct 64-bit FIFO read port.
* The Delay FPGAs delay by whole clock cycles only; there is no fine phase adjustment.
* The output is 64 bits per 40 MHz cycle, 320 MB/s. The real board clocks its
  link at 80 MHz and was measured to saturate at 469 MB/s.
* Thresholds in quarter-noise units, the record formats, the TCS code values
  and all register addresses are this design's own.

## Verification

Every block in `tb/` has a self-checking testbench `tb_<block>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog. A
behavioural frame generator (`apv_frame_gen`) produces APV25 frames from a
deterministic hash of fibre, event and strip. `fed_tb_pkg` holds the matching
reference model, which computes the expected cluster bytes.

`tb_tracker_readout` runs the full-size top: 96 fibres, 2 MB address space,
no parameter overrides. It runs cluster and raw events, VME readout, a spy
capture, trigger bursts against the APVE, S-LINK backpressure, low buffer
levels, FMM merging and an out-of-synch event. Every mechanism is counted,
and one that never happened counts as a failure. Every record is parsed and
compared byte by byte with the reference model: 42 events in about 114,000
cycles, roughly two minutes of Verilator time including the build. The
Front-End unit, event builder, buffer controller, Back-End FPGA and FED
wrapper are verified through this test rather than alone.

To simulate with Verilator, for example:

    verilator --binary --timing --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
        rtl/fed_pkg.sv tb/fed_tb_pkg.sv tb/tb_cm_median.sv --top-module tb_cm_median
    ./obj_dir/Vtb_cm_median
