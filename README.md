# Trigger logic for a 900-PMT water Cherenkov array

This is synthesizable SystemVerilog for the central FPGA of the LAWCA trigger module. LAWCA is
an air-shower gamma-ray array of 900 photomultipliers (PMTs) in a 30 x 30 grid of 5 m water
cells. The readout is "triggerless" at the front end. The front-end boards (FEEs) send a packet
for every PMT hit, with no trigger signal sent back to them. All packets of the whole array reach
this one module over 10 fibers. The module does four things:

1. It realigns hits that took different times to arrive, by waiting a fixed 4 us.
2. It forms the shower trigger: 12 or more PMTs fired within 250 ns inside any of 16
   overlapping 12 x 12 clusters.
3. It keeps all raw packets for the 4 us the trigger needs.
4. It sends the 2 us of data around each trigger to the data acquisition system (DAQ).

The structure, sizes and timing follow the published design of this prototype. Where that
design does not say how something is done, this RTL makes its own choice. Each such choice is
named in the opening comment of its file and summarised in
[Departures and own choices](#departures-and-own-choices).

## Where the data come from

Every PMT hit becomes one 96-bit packet. Nine PMTs (a 3 x 3 block) share one FEE. Ten FEEs share
one clock-and-data transmission module (CDTM), and each CDTM has one 1.25 Gbps fiber to this
module. Average load: 900 PMTs x 50 kHz = 45 M packets/s, or about 1.1 packets per 25 ns.

Packet layout, as `lawca_pkg::fee_packet_t`. Fields are packed most significant first:

| bits  | field        | width | use here |
|-------|--------------|-------|----------|
| 95:93 | header       | 3  | must equal `PKT_HEADER` (3'b101) |
| 92:83 | channel      | 10 | PMT number 0..899; selects the clusters |
| 82:67 | reserved     | 16 | carried through |
| 66:40 | coarse time  | 27 | 40 MHz counter value of the hit; places it in time |
| 39:35 | fine time    | 5  | 1 ns TDC bin, carried through |
| 34:19 | high-gain charge | 16 | carried through |
| 18:3  | low-gain charge  | 16 | carried through |
| 2:0   | checksum     | 3  | XOR of the 31 three-bit groups above it |

Only the channel number and the coarse time are used by the trigger. The whole packet is stored
and read out.

Channel numbering: `channel = 9 * fee + 3 * row + col`. `fee` counts the 10 x 10 boards row by
row, and `row`/`col` give the PMT's place inside the board's 3 x 3 block. So PMT (x, y) of the
grid is `x = 3*(fee % 10) + col` and `y = 3*(fee / 10) + row`. Cluster `m = 4*cy + cx` covers
`x` in `[6cx, 6cx+11]` and `y` in `[6cy, 6cy+11]`, for `cx, cy` in 0..3. A PMT therefore belongs
to 1, 2 or 4 clusters (`lawca_pkg::cluster_mask`).

## Clocking

Everything runs on one processing clock, `clk`. `timebase` derives `tick`, a one-clock enable once
per 25 ns global cycle, with `CLK_PER_TICK = 4`, so `clk` runs at 160 MHz. The local 27-bit coarse
time `now` advances on each tick. It can be loaded (`time_load`, `time_value`) to match the
front-end counters, which share the distributed 40 MHz clock.

The processing clock is faster than 40 MHz because the merged stream must take more than one
packet per 25 ns. The average is 1.1 packets per cycle. The peak is 2.6: ten links at 1 Gbps of
payload, one 96-bit packet every 15.4 clocks each. Merging at one packet per clock gives 4 per
cycle. The trigger path needs at least 3 clocks per tick (checked by an assertion).

## Time alignment by delay

A busy fiber can deliver a packet microseconds later than an idle one. Instead of sorting
packets, the module evaluates the trigger for a moment only when it is old enough that
everything from that moment must have arrived. That age is `DELAY = 160` cycles (4 us). At
1.25 Gbps, 40 simultaneous hits behind one CDTM take 3.84 us to drain, and more than 40 is
rare enough to accept the loss.

`sync_window` compares each merged packet's coarse time `t` with `now`:

```
age    = now - t                 (mod 2^27)
accept = 0 <= age < 160          -> offset = 160 - age  (1..160)
late   = age >= 160              -> dropped, counted in status.late_packets
early  = t ahead of now          -> dropped, counted in status.early_packets
```

`offset` is the packet's distance, in 25 ns columns, ahead of the moment now under trigger
processing, which is `now - 160`. The same accept decision and offset feed both the trigger
array and the data buffer, so both hold the same packets.

## The hit-count ring

`hit_count_array` is a ring of `COLS = 172` columns, one per 25 ns cycle. Each column holds 16
counters, one per cluster. It replaces a 900 x 172 array of single-bit hit flags: each counter
directly holds the number of hits that cluster sees in that cycle. The ring around the Trigger
Pointer `N` looks like this:

```
 N        column under trigger processing (read and cleared on the tick)
 N+1 ... N+160     active section: where new hits are written (4 us)
 N+161 ... N+169   reached only by the tails of broadened pulses
 N+170, N+171      (= N-2, N-1) never written; N-1 is the column just cleared
```

Pulse broadening: a PMT pulse is a single 25 ns flag, but the trigger asks "12 PMTs within
250 ns". So a hit with offset `d` adds one to its clusters' counters in the 10 columns
`N+d .. N+d+9`. The count in column `N` is then the number of hits of the last 10 cycles, which
is the trigger's sliding window. Counters are 8 bits and saturate.

On every tick, the 16 counters of column `N` go to `cluster_trigger`, the column is set to zero,
and `N` advances. Columns are indexed relative to the Trigger Pointer, not by `t mod 172`. The
two differ only by a constant, and the relative form has no gap where the 27-bit time wraps.

Because the counters count hits, not PMTs, one PMT that fires twice within 250 ns counts twice.
A per-PMT flag array would count it once. This is a property of the 16 x 172 counter scheme
itself.

## Trigger decision

`cluster_trigger` sets `trig_m[m]` when cluster `m`'s count is 12 or more. It raises `trigger_g`,
the OR of all 16, for one clock. This happens two clocks after the tick that evaluated the column.
`trig_time` is that column's coarse time, `now - 160` at the tick. A shower usually keeps the
condition true for several consecutive columns, so `trigger_g` pulses once per such column.

## The slice buffer and the readout window

`data_buffer` stores accepted packets by time in `SLICES = 7` slices. Each slice covers 1 us
(40 columns) and holds up to `DEPTH = 256` packets. Four pointers move one slice on every
microsecond:

```
  cleanup  readout  PROCESSING  +1   +2   +3   BUFFERING
   P-2      P-1        P        P+1  P+2  P+3    P+4        (mod 7)
```

`P` is the slice of the moment under trigger processing. A packet with offset `d` goes to slice
`P + (phase + d) / 40`, where `phase` (0..39) is the position of the processing moment inside
slice `P`. A packet arriving when its slice is full is dropped and counted
(`status.buffer_drops`).

On `trigger_g` with trigger time `T`, the readout engine does the following:

1. It writes a header record with `T`.
2. It scans slices `P-1`, `P` and `P+1`, one stored packet per clock. Every packet with
   `T-40 <= t <= T+39` becomes a packet record. This is exactly 2 us around the trigger, and
   three 1 us slices always contain that window.
3. It writes a trailer record with the packet count.

Each slice's fill count is sampled when the engine reaches that slice. The third slice may still
be receiving late packets. Those that arrive after the engine passed it are not in the event.

Triggers are refused (counted in `status.triggers_skipped`) in two cases: while a readout runs,
and within `HOLDOFF = 80` columns of the last accepted trigger. The hold-off keeps windows from
overlapping, so the repeated `trigger_g` pulses of one shower give one event.

Cleanup: the cleanup slice is obsolete, but it is not wiped at once. Its fill count is reset one
microsecond later, when the Buffering Pointer moves onto it. Until then a slow readout can still
read it. A readout still running when the Buffering Pointer reaches one of its slices does not
finish that slice. This happens 2, 3 or 4 slice shifts after the trigger, for the 1st, 2nd or 3rd
slice. The event's trailer then carries an overrun bit, and `status.readout_overruns` counts it.
With the default depth and a DAQ link that keeps up, a readout takes far less than this.

## Output frames

`event_packer` turns each event into a frame of 32-bit words, with a valid/ready handshake, for an
Ethernet MAC's client interface:

```
{8'hA5, event number[23:0]}                       sop
{5'b0, trigger time[26:0]}
packet[95:64], packet[63:32], packet[31:0]        x number of packets
{8'h5A, 7'b0, overrun, packet count[15:0]}        eop
```

The MAC, the PHY chip and the DAQ protocol are not part of this RTL.

## Files

| file | content |
|------|---------|
| `rtl/lawca_pkg.sv` | constants, packet and record types, status struct, checksum, channel-to-cluster map |
| `rtl/timebase.sv` | tick enable and 27-bit local coarse time |
| `rtl/sync_fifo.sv` | first-word fall-through FIFO (helper) |
| `rtl/data_preprocessing.sv` | per-fiber checks and FIFOs, round-robin merge |
| `rtl/sync_window.sv` | 4 us delay window, offset computation |
| `rtl/hit_count_array.sv` | 16 x 172 counter ring with broadening and clearing |
| `rtl/cluster_trigger.sv` | threshold per cluster, OR into Trigger_G |
| `rtl/data_buffer.sv` | 7-slice ring, pointers, readout engine |
| `rtl/event_packer.sv` | DAQ frame builder |
| `rtl/lawca_trigger_top.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module, and an end-to-end one for the top |

Top-level ports of `lawca_trigger_top`:

* `fib_valid[10]`, `fib_pkt[10]`: one deserialized packet per valid per fiber. These come from
  the SFP transceivers, the FPGA's serial transceivers and an 8B/10B decoder, which are not
  included.
* `daq_valid/ready/data/sop/eop`: the frame stream.
* `trigger_g`, `trig_m`, `trig_time`: the trigger, for monitoring.
* `status`: a `status_t` struct of 32-bit counters for rejected, dropped, late and early packets,
  triggers, events, skipped triggers and overruns.

Latency: a hit with coarse time `t` affects the trigger on the ticks at local time `t+160` to
`t+169`. `trigger_g` follows two clocks after the tick. The first frame word follows about two
clocks after that.

## Departures and own choices

Taken from the published design: the detector and cluster geometry; the 96-bit packet fields
and their widths; 10 fibers; the 4 us / 160-cycle delay; the 172-column ring with 10 columns of
broadening and clearing after use; the 16 x 172 per-cluster counter array; threshold 12 and the
OR of the 16 local triggers; 7 one-microsecond slices and their four pointers; the readout of
3 slices for a 2 us window.

Chosen here:

* The processing clock at 4 x 40 MHz, and the time-load port.
* The per-fiber FIFOs (16 deep) and the round-robin merge.
* The header value, the checksum rule, and dropping damaged packets or channel numbers above 899.
* The bit positions of the packet fields. Only their order and widths are given.
* The channel numbering. The published text also says cluster 1 is "channels 1 to 144", which
  no numbering of an overlapping 30 x 30 layout can make true for every cluster. The grid
  geometry was kept.
* Dropping and counting late and early packets.
* Column and slice indexing relative to the pointers.
* 8-bit saturating counters.
* A slice depth of 256 packets. One microsecond of all ten links carries at most 104.
* Cutting the 3 slices to exactly 2 us.
* The trigger hold-off of 80 cycles and refusing triggers while busy.
* Erasing a slice when it is reused rather than at the Cleanup Pointer.
* The record and frame formats.

Not included: optical links, serial transceivers, 8B/10B decoding and the CDTM link framing; the
Ethernet MAC and PHY; the VME board and FPGA reconfiguration.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog counts a failure if
a testbench hangs. Build and run, for example the end-to-end test at full size, with plain
Verilator from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/lawca_pkg.sv \
    rtl/lawca_trigger_top.sv tb/tb_lawca_trigger_top.sv --top-module tb_lawca_trigger_top
./obj_dir/Vtb_lawca_trigger_top
```

For another block, replace the two file names and the top module, for example
`rtl/data_buffer.sv tb/tb_data_buffer.sv --top-module tb_data_buffer`. The RTL is two-state
clean: everything read is reset.

What the testbenches check:

* `tb_lawca_trigger_top` runs the top at its default parameters over about 40 us of generated
  data:
  * noise at 50 kHz per PMT,
  * five cluster showers of 14 to 25 PMTs,
  * one 320-PMT shower that overflows a slice and makes many packets late,
  * late, early and damaged packets,
  * 4 us of DAQ back-pressure that forces an overrun.

  Packets travel on the fiber of their CDTM at link rate. An independent model gives the exact
  set of trigger columns from the packets that arrived in time. Every DAQ frame is decoded and
  its packets are checked against the 2 us window. The test fails if any of these never
  happens: trigger, skipped trigger, late, early or damaged packet, slice overflow, overrun, ring
  turnover.

  At the end it prints the count of each mechanism. It also prints the valid data ratio: the
  share of accepted hit packets that reach the DAQ. The paper uses the same measure to compare
  the module with its offline model. With the test's noise-dominated data and the hold-off, the
  ratio is about 27 % (434 of 1615 packets).
* `tb_hit_count_array` compares every evaluated column, over several ring turns, with a
  reference built from the broadening rule.
* `tb_data_buffer` predicts every readout record. It also exercises slice overflow, hold-off and
  overrun.
* The remaining testbenches check their block's rules exhaustively at the edges: tick spacing and
  wrap, window edges, thresholds, round-robin order and FIFO loss, frame words.

## Changing it

All sizes are parameters of `lawca_trigger_top`, and their defaults are the design values. Some
constraints between them:

* `COLS >= DELAY + BROADEN + 2`.
* `DELAY` must be a multiple of `SLICE_TICKS`.
* `SLICES >= DELAY / SLICE_TICKS + 3`.
* `SLICE_DEPTH` must be a power of two.
* `CLK_PER_TICK >= 3`.

Assertions report violations at elaboration.

A different trigger pattern means changing `cluster_mask` in `lawca_pkg` (which clusters a channel
feeds) and `cluster_trigger` (the condition). The counter array is generic in the number of
clusters.
