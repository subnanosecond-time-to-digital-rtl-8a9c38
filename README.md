# Quad-phase multisampling TDC for FPGAs (8 channels, 0.28 ns bins)

This is SystemVerilog RTL for a simple time-to-digital converter (TDC) of the
kind used to read out drift chambers. It records the arrival time of every
leading and trailing edge on eight inputs. With a 110 MHz reference clock the
bin is 0.284 ns and the range is 37.2 us. The architecture follows the FPGA
TDC described in "Subnanosecond Time-to-Digital Converter Implemented in a
Kintex-7 FPGA" (Sano et al.). That design was built and measured on a Xilinx
XC7K325T. The code here is an independent RTL rendering of it. Details the
publication leaves open were filled in here, and they are listed below.

The main idea is to get a resolution finer than any clock period without a
delay line. The FPGA clock manager multiplies the reference clock by 8
(110 -> 880 MHz) and delivers four copies shifted by 0, 90, 180 and 270
degrees. Each input is sampled on all four, which gives one sample every
quarter period (1/(32 f_ref)). All clocks are locked to the reference clock,
so the bin size is fixed by the reference frequency and needs no
calibration. To change the bin, change the reference: 40 MHz gives 0.78 ns
and 80 MHz gives 0.39 ns.

## Clocks and time base

| clock | rate (110 MHz ref) | used by |
|---|---|---|
| `clk_q[0..3]` | 880 MHz, phases 0/90/180/270 degrees | sampling flip-flops and alignment chains |
| `clk440` | 440 MHz, rises with every other `clk_q[0]` edge | fine time counter, coarse counter, channel-buffer write |
| `clk110` | 110 MHz, rises with every eighth `clk_q[0]` edge | channel-buffer read, scanner, output buffer |

One `clk440` period holds 2 x 4 = 8 samples, so a 3-bit fine count exactly
fills one step of the coarse counter. The 14-bit coarse counter counts
`clk440` cycles. The time of a hit, in bins, is therefore the plain 17-bit
number `{coarse, fine}` = `coarse*8 + fine`. It wraps every 2^17 bins, which
is 37.2 us at 0.284 ns.

The clocks are inputs of `tdc_top`. In an FPGA they come from the vendor's
clock manager, which is not part of this RTL. For simulation,
`tb/mmcm_model.sv` is a behavioural stand-in. It re-derives all outputs from
every reference edge, so they stay phase-aligned.

## Sampling front end (`sampling_chain`)

This part is the hardest to follow, and it matters most for the timing.
Every channel fans its input out to four rows of flip-flops, six per row.
Row *r* starts on phase *r*·90°. Each following flip-flop uses the next
earlier phase until 0° is reached, and the row then continues on 0°:

| row | FF1 | FF2 | FF3 | FF4 | FF5 | FF6 |
|---|---|---|---|---|---|---|
| 0 | 0° | 0° | 0° | 0° | 0° | 0° |
| 1 | 90° | 0° | 0° | 0° | 0° | 0° |
| 2 | 180° | 90° | 0° | 0° | 0° | 0° |
| 3 | 270° | 180° | 90° | 0° | 0° | 0° |

Each hand-over (say 270° -> 180°) leaves three quarters of a period for the
data to cross. After the fourth column, all four rows hold samples of the
same 880 MHz period, taken at 0, T/4, T/2 and 3T/4. The extra 0° columns
give a metastable first flip-flop time to settle. The fine time counter
reads columns 5 and 6, which are two consecutive aligned groups (eight
samples). It also reads one more 0° flip-flop behind row 3. That flip-flop
holds the 270° sample taken just before the eight, which is the last sample
of the previous window, so an edge on the window boundary is not missed.

Seen from a `clk_q[0]` edge at time tE, the outputs are:
`samples[k] = din(tE - 5T + k·T/4)` for k = 0..7, and `prev` is the sample
at tE - 5T - T/4.

In silicon, the quality of the TDC depends almost entirely on the four
paths from the input pin to the first flip-flops. Any skew among them moves
the bin boundaries. The original firmware constrains those four flip-flops
to sit close together. RTL cannot express that; it belongs in the
implementation constraints. Bin-to-bin nonlinearity with a four-bin period
is the expected sign of skew on these paths.

## Fine time counter (`fine_time`)

Every `clk440` cycle the nine bits `prev, samples[0..7]` are registered
together with the coarse count. A 0 -> 1 step is a leading edge and a
1 -> 0 step a trailing edge. The fine count is the index (0..7) of the first
sample that shows the new level. An edge is thus dated to the first
sampling instant at or after it. For example, the four phases reading
0,1,1,1 after a run of zeros is a leading edge at count 1.

A record is 18 bits, defined in `tdc_pkg::hit_t`:

```
 17      16 ............ 3   2 ... 0
[edge_id][ coarse[13:0]  ][ fine  ]      edge_id: 0 leading, 1 trailing
```

The output buffer adds the channel number above it, which makes a 21-bit
word `{id[2:0], edge_id, coarse, fine}`.

A pulse or gap shorter than one window (2.27 ns) can put a leading and a
trailing edge into the same window. Both are recorded. The earlier one is
sent at once, and the later one waits one cycle in a pending slot, so
records always leave in time order. Only the first edge of each kind in a
window is kept. In one case an edge is dropped: a window holds a third
edge, or a window with two edges follows another window with two edges.
This needs features under about 1 ns. Dropped edges are counted on the
`lost` output. The publication does not say how its firmware handles such
cases.

## Buffers and readout

- **`channel_buffer`** (one per channel) is a dual-clock FIFO of 1024 x 18
  bits. It is written at 440 MHz and read at 110 MHz, with Gray-coded
  pointers and two-flip-flop synchronisers. A record that arrives while the
  FIFO is full is dropped and flagged on `overflow`.
- **`channel_scanner`** runs at 110 MHz. Each cycle it takes one record from
  the next non-empty channel in round-robin order and adds the 3-bit channel
  number. It waits while the output buffer has only one free slot left.
- **`output_buffer`** is a 1024 x 21-bit FIFO. Its show-ahead read port
  (`rd_en`, `rd_valid`, `rd_data`) is the output of the TDC. In the original
  system a TCP/IP engine in the FPGA reads it and sends the words over
  gigabit Ethernet. There is no trigger: every edge comes out.

The readout moves one word per `clk110` cycle, which is 110 M records/s
for all channels together. One channel can produce up to 880 M records/s
in short bursts, so the buffers absorb bursts, and a sustained rate above
110 M records/s ends in `overflow`. At 40 MHz reference all rates scale by
40/110.

**Latency:** in simulation, the shortest time from an input edge to its
word at the output is about 48 ns (5 to 6 cycles of `clk110`). Most of it is
the sampling chain, the two 440 MHz stages and the FIFO synchroniser. The
published firmware quotes a minimum of 0.21 us for the same path; the
publication does not break that figure down, so where the original spends
the extra time is not known.

## Reset

`arst` is asynchronous. It is synchronised into the 440 and 110 MHz domains
(`reset_sync`). Hold it while the clocks run for at least ten `clk_q[0]`
cycles. The sampling chains have no reset and flush themselves during that
time. The coarse counter restarts at 0.

## Files

| file | contents |
|---|---|
| `rtl/tdc_pkg.sv` | widths, `edge_e`, `hit_t` |
| `rtl/sampling_chain.sv` | quad-phase sampling and alignment chains |
| `rtl/fine_time.sv` | edge finder, fine count, record builder |
| `rtl/coarse_counter.sv` | 14-bit coarse counter |
| `rtl/channel_buffer.sv` | dual-clock per-channel FIFO |
| `rtl/tdc_channel.sv` | one channel (chain + fine time + buffer) |
| `rtl/channel_scanner.sv` | round-robin scanner, channel id |
| `rtl/output_buffer.sv` | common readout FIFO |
| `rtl/reset_sync.sv` | reset synchroniser |
| `rtl/tdc_top.sv` | the complete TDC |
| `tb/mmcm_model.sv` | behavioural clock manager (simulation only) |
| `tb/*_tb.sv` | self-checking testbenches |

Parameters (defaults in brackets): `tdc_top.NCH` [8], `CH_DEPTH` [1024],
`OUT_DEPTH` [1024], `sampling_chain.STAGES` [6],
`coarse_counter.WIDTH` [14, set in `tdc_pkg::COARSE_W`]. The channel id
width follows `NCH`. The original authors also built a 256-channel variant
of their firmware. Setting `NCH=256` gives the same structure with an 8-bit
id. `tdc_256_tb` simulates that size with a few pulses per channel.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog. All of them pass with Verilator 5.

| testbench | what it checks |
|---|---|
| `sampling_chain_tb` | every sample and `prev` against a log of the input waveform, for 3000 cycles |
| `fine_time_tb` | 20,000 random windows against a reference model, including two edges per window, lost edges and the 0,1,1,1 example |
| `coarse_counter_tb` | counting, two wraps at 16384, reset |
| `channel_buffer_tb` | fill past full (6 refused, 6 flagged), order, random dual-clock traffic, crossing latency |
| `output_buffer_tb` | level, full, almost-full, order, random traffic |
| `channel_scanner_tb` | round-robin choice every cycle, channel ids, no pops while blocked |
| `tdc_channel_tb` | 3300 edges from pin to buffer, each in the exact bin |
| `tdc_top_tb` | the whole TDC at default sizes (see below) |
| `tdc_256_tb` | `NCH=256`: three pulses on each channel, every edge in its exact bin with the right 8-bit channel id |
| `tdc_scan_tb` | bin scans in 33 ps steps at 40/80/110 MHz reference; interval measurement for periods of 200 ns to 37 us |

`tdc_top_tb` uses a 9088 ps reference, so one bin is exactly 284 ps. Every
edge on every channel must come out in its exact bin, with one common
offset. Any missing edge must be matched by a `lost` or `overflow` count.
The run covers the following:

- pulses shorter than a window;
- window-boundary edges (fine count 0);
- a coarse-counter wrap;
- contention among channels;
- the readout stopped long enough to fill the output buffer (scanner stall)
  and then one channel buffer (overflow);
- a burst of four edges within 1.7 ns, which loses at least one edge.

It also checks that the latency stays under 0.21 us. In `tdc_scan_tb` the
simulated input paths have no skew, so the nonlinearity it prints only
reflects the 33 ps scan step. The measured intervals are within ±1 bin.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
          rtl/tdc_pkg.sv tb/tdc_top_tb.sv --top-module tdc_top_tb
./obj_dir/Vtdc_top_tb
```

## Where this RTL goes beyond or departs from the published design

Taken from the published design:

- four-phase sampling with six-deep alignment chains and the extra
  flip-flop;
- the 880/440/110 MHz clock plan;
- the 3-bit fine and 14-bit coarse counts;
- the leading/trailing identifier;
- a buffer per channel, a scanner that adds a 3-bit channel id, and one
  output buffer read a word at a time;
- eight channels.

Chosen here, because the publication does not specify them:

- which chain columns feed the fine time counter (read from the wiring of
  the original block diagram, not stated in its text);
- the numbering of the fine count;
- keeping only the first edge of each kind in a window, the pending slot,
  and the `lost` and `overflow` flags;
- the record bit order;
- the FIFO depths (1024; the per-channel size matches one 18 kb block RAM);
- the asynchronous FIFO structure;
- the round-robin scan that skips empty channels;
- the show-ahead handshakes;
- the resets.

The coarse time is attached inside the fine time counter. The original
block diagram draws it going into the channel buffer, but the stored
record is the same.

Left out: the clock manager (vendor primitive), the TCP/IP readout engine,
the Ethernet PHY and the NIM-to-LVCMOS receivers on the input card. These
are board or vendor parts. Placement constraints for the sampling
flip-flops are also left out. The latency is shorter than the published
0.21 us.
