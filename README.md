# Content-aware packet dropping for video streams in a congested switch

When a switch's output link stalls, arriving packets pile up in its buffer,
and once the buffer is full every further packet is lost, whatever it
carries. For compressed video that is the worst possible policy. Pictures
coded as *intra random access points* (IRAP: IDR, CRA and BLA pictures in
H.265/HEVC, IDR pictures in H.264/AVC) are self-contained and every following
picture is predicted from them; losing one corrupts everything up to the next
IRAP. Losing a predicted (non-IRAP) picture hurts only that picture and few
others.

This RTL is a small module that sits beside a switch and tells it, packet by
packet, to drop non-IRAP video packets *early* during a congestion, but only
when the buffer would otherwise overflow before the congestion ends. The
space saved is then free for the IRAP packets that arrive later. When the
buffer can absorb the whole congestion, nothing is dropped early, so the total
number of lost packets does not grow; only which packets are lost changes.

The design follows the content-aware drop policy and two-block hardware
module of Gobatto et al., "Improving Content-Aware Video Streaming in
Congested Networks with In-Network Computing". The block split, signal set
and drop rule are theirs; widths, encodings, the time base and the way the
packet rate is obtained are choices made here, listed in
[Departures and choices](#departures-and-choices).

## Structure

```
              +----------------------------- innet_hw ----------------------------+
 prot_id ---->| content_identifier  -- non_irap --------------------+               |
 nal_type --->|                                                    AND --> drop_packet
              |                                                     |               |
 cong_flag -->| drop_control  ------ no_space ----------------------+               |
 cong_per --->|   tick counter (TICK_CYCLES per time unit)                          |
 data_valid ->|   packets-per-unit counter -> p_tp ------------------------> p_tp   |
 buffer_len ->|   congestion countdown timer ------------------------> congested   |
 buffer_occ ->|   free = len - occ ; need = p_tp * (timer - 1)                      |
              +---------------------------------------------------------------------+
```

| File | Contents |
|---|---|
| `rtl/innet_pkg.sv` | Protocol codes and NAL unit type constants |
| `rtl/content_identifier.sv` | Is the packet a non-IRAP picture? (combinational) |
| `rtl/drop_control.sv` | Congestion timer, rate measurement, space test |
| `rtl/innet_hw.sv` | Top: the two blocks and the final AND |

## Interface to the forwarding device

All signals refer to the packet the switch presents in the current cycle.

| Signal | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | Clock; active-low synchronous reset |
| `prot_id` | in | 8 | Payload coding standard: 0 not video, 1 H.264/AVC, 2 H.265/HEVC |
| `nal_type` | in | `NAL_W` = 6 | `nal_unit_type` from the NAL unit header |
| `cong_flag` | in | 1 | One-cycle congestion notification |
| `cong_per` | in | `CPER_W` = 32 | Length of that congestion, in time units, valid with `cong_flag` |
| `data_valid` | in | 1 | A packet is presented this cycle |
| `buffer_len` | in | `BUF_W` = 16 | Buffer capacity, packets |
| `buffer_occ` | in | `BUF_W` = 16 | Packets now in the buffer |
| `drop_packet` | out | 1 | Recommendation: drop the presented packet |
| `congested` | out | 1 | Status: congestion countdown running |
| `p_tp` | out | clog2(`TICK_CYCLES`+1) | Status: packets counted in the last complete time unit |

`drop_packet` is advice. The switch stays in charge of its buffer and may
ignore it. The switch (or its packet parser) must extract the NAL header
fields and signal congestion; neither is part of this RTL.

## The drop policy

The decision is the conjunction of two questions.

**Is the packet a droppable picture?** `content_identifier` returns true only
for picture (VCL) NAL units that are not IRAP:

| Standard | non-IRAP, droppable | protected |
|---|---|---|
| H.265/HEVC | types 0..15, 24..31 | IRAP 16..23; non-picture 32..63 (VPS, SPS, PPS, SEI, ...) |
| H.264/AVC | types 1..4 (slice, partitions A..C) | IDR 5; all other types |
| other `prot_id` | none | everything |

Parameter sets and other non-picture units are never dropped: without them no
picture can be decoded.

**Will the buffer run out before the congestion ends?** `drop_control` keeps
a countdown `timer` of the congestion's remaining time units. For a presented
packet it computes

```
free = max(buffer_len - buffer_occ, 0)
need = p_tp * (timer - 1)          (0 when timer = 0)
no_space = data_valid && timer > 0 && free < need
```

`need` is how many packets are still to arrive in the congestion's later time
units, at the packet rate `p_tp` measured just before. The `- 1` reproduces
the order of operations of the original algorithm, which decrements the timer
before multiplying: in the last time unit of a congestion nothing is dropped
early, because the output restarts at its end.

`drop_packet = no_space && non_irap`.

### Worked example

60 packets arrive per time unit, the buffer holds 60 and is empty, and a
congestion of 4 time units starts. In the first unit `need` is 60 x 3 = 180
and `free` is at most 60, so every non-IRAP packet is dropped and only IRAP
and parameter-set packets enter. If 15 % of the packets are IRAP, about 9
enter. In the second unit `need` = 120, still more than the ~51 free, so
dropping continues; the third unit has `need` = 60 against ~42 free: still
dropping. In the fourth unit `need` = 0 and all packets are accepted until
the buffer is full. Without the module the buffer fills in the first unit
and every IRAP packet of the next three units is lost.

### Time base and timer

A time unit is `TICK_CYCLES` clock cycles (default 1024), counted by a
free-running counter from reset. `cong_flag` loads the timer with `cong_per`,
and the decision in that same cycle already uses `cong_per`. The timer
decreases by one at the end of every time unit; the (partial) unit in which
the notification arrives counts as the first. A new notification during a
congestion reloads the timer. A congestion notified at the start of a time
unit therefore keeps `congested` high for exactly `cong_per` x `TICK_CYCLES`
cycles.

### Packet rate

The module has no rate input. It counts `data_valid` cycles in each time unit
and holds the count of the last complete unit in `p_tp`. During the first
time unit after reset `p_tp` is 0 and nothing is dropped. The rate keeps being
measured during congestion, since the input side of the switch keeps
receiving.

## Timing

`content_identifier` is combinational. In `drop_control` the tick counter,
the packet counter, `p_tp` and the timer are registers; the decision is
combinational from them and the current inputs, so `drop_packet` is valid in
the same cycle as `data_valid` and the module adds no pipeline latency to the
switch. The critical path is a `p_tp` x `timer` multiplier (11 x 32 bits at
the defaults) followed by a comparator; if that is too slow, `need` can be
registered, since `p_tp` and `timer` change at most once per time unit and at
`cong_flag`.

At the default widths the module holds 64 flip-flops (timer 32, tick counter
10, packet counter 11, `p_tp` 11). For comparison, the original FPGA
implementation reported an overhead of 73 flip-flops and 47 LUTs over a
layer-2 switch on a NetFPGA-SUME board, with no change of latency (0.56 us)
or throughput (101.1 Gb/s). Those figures were not reproduced here.

## Parameters

| Parameter | Default | Notes |
|---|---|---|
| `NAL_W` | 6 | Width of H.265 `nal_unit_type`; H.264 uses the low 5 bits |
| `CPER_W` | 32 | Congestion length in time units |
| `BUF_W` | 16 | Buffer length and occupancy, packets |
| `TICK_CYCLES` | 1024 | Clock cycles per time unit; must be at least the largest number of packets per unit to be measured |

`PROT_W` (8) is fixed in `innet_pkg`.

## Departures and choices

Taken from the original design: the two blocks and their inputs, the rule
that a packet is dropped only when both blocks say so, the drop policy
(timer loaded by the notification, need = rate x remaining time after the
decrement, drop a non-IRAP packet when free space < need), and the
recommendation-only nature of the output.

Chosen here, where the original is silent:

* the numeric protocol codes on `prot_id`;
* treating only picture NAL units as droppable and protecting non-picture
  units and unknown protocols (NAL type numbers are from the two standards);
* free space as `buffer_len - buffer_occ`, saturated at zero;
* the time unit as a fixed number of clock cycles, with the timer counting
  whole units;
* measuring the packet rate from `data_valid` instead of taking it as an
  input (the original interface shows no rate signal);
* all widths, the reset style, the same-cycle use of `cong_per`, and
  reloading on a second notification;
* the two status outputs `congested` and `p_tp`.

Not included: the switch itself (input arbitration, packet buffer, output
ports) and the packet parser that finds the NAL header in a packet and
produces `prot_id` and `nal_type`. The original built both in P4 with a
vendor flow and does not describe their insides or the packet format.

## Verification

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

| Testbench | What it does |
|---|---|
| `tb/tb_content_identifier.sv` | All 64 NAL types under five protocol codes against explicit type lists |
| `tb/tb_drop_control.sv` | Cycle-by-cycle comparison with a reference model of the policy, random packets, notifications, reloads, occupancies above the length and resets; checks the congestion lasts exactly `cong_per` units |
| `tb/tb_innet_hw.sv` | End to end at default parameters beside an emulated switch (60-packet buffer, 60 in / 120 out per unit, output stopped while congested); checks `drop_packet` every cycle against a schedule-derived expectation, checks `p_tp`, and requires each mechanism to occur: notification, reload, early drop, IRAP and parameter set kept while space is short, last-unit acceptance, overflow, drain |
| `tb/tb_loss_sweep.sv` | Ten congestion levels (5 % to 50 % packet loss) for two synthetic streams, comparing IRAP loss of a tail-drop buffer with one that obeys `drop_packet` |

Results of `tb_loss_sweep` (synthetic streams, groups of 3 parameter-set
packets, one IRAP picture and 15 predicted pictures; time unit shortened to
128 cycles). Total packet loss is identical with and without the module at
every point; IRAP loss, in percent of IRAP packets:

| packet loss | small pictures (IRAP 6 pkts, P 2 pkts) tail drop / module | large pictures (IRAP 90 pkts, P 20 pkts) tail drop / module |
|---|---|---|
| 5 % | 5.3 / 0.8 | 0.0 / 0.0 |
| 10 % | 10.1 / 2.2 | 1.6 / 0.1 |
| 20 % | 20.1 / 4.8 | 18.3 / 5.4 |
| 30 % | 30.1 / 14.2 | 32.0 / 13.6 |
| 40 % | 40.1 / 24.2 | 32.3 / 13.8 |
| 50 % | 49.9 / 34.0 | 45.4 / 26.9 |

At high loss the module cannot save everything: once more IRAP packets
arrive during one congestion than the buffer holds, they are lost whatever is
dropped. These streams are illustrations, not the HEVC test sequences the
original evaluation used, so the percentages are not comparable with its
results.

### Running with Verilator

```
verilator --binary --timing --assert -y rtl rtl/innet_pkg.sv \
          tb/tb_innet_hw.sv --top-module tb_innet_hw -Mdir obj
./obj/Vtb_innet_hw
```

Replace `tb_innet_hw` by any other testbench name. Lint a module with
`verilator --lint-only -Wall -y rtl rtl/innet_pkg.sv rtl/innet_hw.sv`.
Every testbench finishes in well under a second.
