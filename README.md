# One marking bit, read by the clock: an AM-PM measurement point in RTL

Alternate-Marking Performance Measurement (AM-PM) measures packet loss and
delay between two points of a network by marking live traffic. The point
where a measurement starts (MP1, the *initiating* measurement point) writes a
marking bit into every packet of the monitored flows. The point where it ends
(MP2, the *terminating* measurement point) reads it. The bit does two jobs:

* **Step (loss).** The bit alternates between 0 and 1 from one measurement
  interval to the next. It splits the traffic into blocks of one colour, and
  each MP counts packets per colour. Once an interval is over, its colour's
  counter stops moving at both MPs. The difference of the two counters over
  that interval is the number of packets lost.
* **Pulse (delay).** One packet per interval is marked differently from its
  neighbours. Both MPs record that packet's arrival time, and the difference
  of the two times is the one-way delay.

Step and pulse usually need two bits. This design carries both in a single
bit. It does so by letting the *time slot* in which a packet is seen decide
what the bit means. This is time-multiplexed parsing, as described in
"Time-Multiplexed Parsing in Marking-based Network Telemetry" (Riesenberg et
al., ACM SYSTOR 2019). The paper gives the rules as match-action tables. This
RTL builds a hardware measurement point around those tables. It matches the
packet timestamp in a ternary table, keeps one bit of state, and adds per-flow
counters and a timestamp export queue.

## Time slots

Each MP has a time-of-day clock with a Seconds field and a nanosecond
fraction. The clocks of the two MPs are assumed to be synchronised, for
example by PTP, at least to well within one slot. Three bits of the
timestamp, by default `Seconds[4:2]`, are the *time bits*:

* `Seconds[4]` flips every 16 s and is the colour of the interval.
* `Seconds[3:2]` splits each 16 s interval into four 4 s quarters.

```
 time bits   000   001   010   011 | 100   101   110   111
 colour       0     0     0     0  |  1     1     1     1
 MP1 sends    0     0    1 0..  0  |  1     1    0 1..  1     (pulse = first packet of the 3rd quarter)
 MP2 reads   step  pulse pulse step| step  pulse pulse step
```

MP1 puts the pulse at the first packet of the third quarter, in the middle of
the interval, as far as possible from the colour change. MP2 looks for a pulse
in the second and third quarters; in the other two quarters it reads the bit
as the colour. The extra quarter gives room for MP2's clock to be behind
MP1's.

## The rules

The marking table is a small ternary (TCAM-style) table. Its 81-bit key is
`{timestamp[79:0], state}`. Masked bits match anything, and the first matching
rule wins. Rules are shown here as `time bits, state`, with `*` for a masked
bit.

**MP1 (initiator); the state bit is the register `Reg`:**

| # | time bits, Reg | MarkBit | Reg := | counter | timestamp |
|---|----------------|---------|--------|---------|-----------|
| 0 | 010, 0         | 1       | 1      | 0       | yes       |
| 1 | 010, 1         | 0       | 1      | 0       |           |
| 2 | 0**, *         | 0       | 0      | 0       |           |
| 3 | 110, 1         | 0       | 0      | 1       | yes       |
| 4 | 110, 0         | 1       | 0      | 1       |           |
| 5 | 1**, *         | 1       | 1      | 1       |           |

**MP2 (terminator); the state bit is the received MarkBit:**

| # | time bits, MarkBit | counter | timestamp |
|---|--------------------|---------|-----------|
| 0 | 001, 1             | 0       | yes       |
| 1 | 010, 1             | 0       | yes       |
| 2 | 101, 0             | 1       | yes       |
| 3 | 110, 0             | 1       | yes       |
| 4 | ***, 0             | 0       |           |
| 5 | ***, 1             | 1       |           |

### Why `Reg` finds the first packet of a slot

A pulse must go on exactly one packet, the first one in the slot. That first
packet can only be found by remembering something about earlier packets. In
colour-0 quarters, rule 2 holds `Reg` at 0. The first packet seen in slot 010
then meets `Reg = 0`: rule 0 fires, marks the pulse, records its time and sets
`Reg` to 1. Every later packet of that slot meets rule 1. The colour-1 half
mirrors this with the values inverted: rule 5 holds `Reg` at 1, and rule 3
catches the first packet of slot 110. So `Reg` only changes on slot
boundaries, and it always holds the value that makes the next pulse slot's
first packet special. It is a two-state machine ("first packet" or "not the
first") whose edges are driven by the time bits.

There is one `Reg` per MP, not one per flow. The rules are global, and the
marking lookup runs before the flow is known. So each pulse slot produces one
pulse among all monitored flows: the pulse goes to whichever monitored flow
sends first. This follows the single `Reg` of the rule tables. A design that
needs a pulse in every flow would index `Reg` by flow.

### Changing the interval or the marking scheme

Any bit of the timestamp can be a time bit. Software rewrites the six rules
with other masks. The end-to-end testbench shows three placements:

* `Seconds[4:2]`, the default: 16 s intervals.
* `Seconds[0]` as colour and `frac[29:28]` as quarter: 1 s intervals.
  Quarters are 2^28 ns, and the fourth is shortened by the wrap at 10^9 ns.
* `frac[11:9]`: 512 ns slots, used only to simulate many intervals quickly.

The same table can also hold the one-purpose schemes:

* **Step only:** `TimeBit=0 → MarkBit 0, counter 0`; `TimeBit=1 → MarkBit 1, counter 1`.
* **Pulse only:** key `{TimeBit, Reg}`; the first packet after each change of
  the time bit gets MarkBit 1 and is timestamped.

At the terminator the step-only rule is `MarkBit=b → counter b`, and the
pulse-only rule is `MarkBit=1 → timestamp`.

## Two lookups per packet

Giving every flow its own six marking rules would cost six rules per flow.
The design splits the work into two lookups instead:

1. **Marking lookup** (`mark_unit`). A few global rules decide the slot, the
   marking bit, the colour and whether to timestamp.
2. **Flow lookup** (`flow_table`). A ternary table keyed on
   `{IPv4 source, destination, protocol, colour}` returns a counter index.
   Each flow takes two rules, one per colour, which point at its two
   counters.

A packet is *monitored* when both lookups hit. Only monitored packets are
marked, counted and timestamped, and only they update `Reg`. Every other
packet passes through unchanged.

## Datapath of `ampm_mp`

```
 in_hdr ─► [stage 0: register header, sample time of day]
               │
               ▼
          stage 1:  ipv4_mark_field (read DSCP LSB, flow fields)
                    mark_unit  (key = {timestamp, Reg | MarkBit})
                    flow_table (key = {flow, colour}) ─► counter_bank (+1)
                    rewrite bit + checksum               ts_export_fifo (push)
               │
               ▼
          [stage 2: register] ─► out_hdr, out_ts, out_monitored, out_color, out_ts_taken
```

* **Throughput and latency.** One 20-byte IPv4 header per cycle, with no
  back-pressure. A header leaves two cycles after it enters. `Reg` and the
  counters are updated at the end of stage 1, so back-to-back packets see
  each other's effects.
* **Marking bit.** The marking bit is the least significant bit of DSCP,
  which is bit 2 of the TOS byte (`hdr[146]` with byte 0 in `hdr[159:152]`).
  When the bit changes, the header checksum is updated incrementally (RFC
  1624).
* **Role.** `role_i` selects the default rule set, which is loaded during the
  six cycles after reset, and selects which bit is the state bit.
  `init_done_o` goes high when the rules are loaded. Software rule writes
  (`mt_*`, `ft_*`) are legal only after that.
* **Clearing at MP2.** With `term_clear_i` set, the terminator writes 0 into
  the marking bit of monitored packets. This is for an MP2 that is not the
  packet's final destination, so that later nodes are not affected.
* **Time of day.** `tod_clock` adds `NS_PER_CYCLE` (4 ns, that is 250 MHz)
  per cycle, with the fraction wrapping at 10^9. `tod_set_i` loads a new time
  in one step; frequency steering is left to the synchronisation software.

### What the collector does

The collector is the software that gathers results. It is not part of this
RTL.

* **Counters.** They are never cleared by a read (`cnt_rd_*`, data one cycle
  later). Read colour *c*'s counters in the middle of the other colour's
  interval, when they are stable at both MPs. The loss for the interval is the
  change in MP1's count minus the change in MP2's count.
* **Timestamp records.** Each record is `{counter index, colour, marking bit,
  time}` and is popped with a valid/ready handshake (`ts_*`). The delay of an
  interval is MP2's pulse time minus MP1's pulse time for the same flow and
  colour.
* **Export queue.** It holds 16 records. When it is full, new records are
  dropped and counted in `ts_drops_o`, so packet processing never waits.

## Parameters

| module | parameter | default | meaning |
|--------|-----------|---------|---------|
| `ampm_mp` | `MARK_RULES` | 8 | marking-table entries (6 used by default) |
| | `FLOW_RULES` | 128 | flow-table entries (64 flows at 2 rules) |
| | `COUNTERS` | 128 | packet counters |
| | `CNT_W` | 64 | counter width |
| | `TS_FIFO` | 16 | timestamp export depth |
| | `NS_PER_CYCLE` | 4 | clock period in ns |
| `mark_unit` | `TIMEBITS_LSB` | 34 | timestamp bit of the lowest default time bit (`Seconds[2]`) |

Only the time bits `Seconds[4:2]` and the rule contents come from the paper.
All the sizes are this design's choices.

## Files

| file | contents |
|------|----------|
| `rtl/ampm_pkg.sv` | timestamp, action, flow-key and record types |
| `rtl/tod_clock.sv` | time-of-day clock |
| `rtl/tcam.sv` | generic priority ternary table |
| `rtl/mark_unit.sv` | marking lookup, default rules, `Reg` |
| `rtl/flow_table.sv` | flow lookup |
| `rtl/counter_bank.sv` | colour counters |
| `rtl/ts_export_fifo.sv` | timestamp export queue |
| `rtl/ipv4_mark_field.sv` | marking-bit read and rewrite, checksum update |
| `rtl/ampm_mp.sv` | the measurement point (top) |
| `tb/*_tb.sv` | one self-checking testbench per module |

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv -Irtl \
    rtl/ampm_pkg.sv tb/ampm_mp_tb.sv --top-module ampm_mp_tb
./obj_dir/Vampm_mp_tb
```

Replace `ampm_mp_tb` with any other testbench name. Each testbench ends by
printing `TB_RESULT checks=N failures=M`. The end-to-end run takes well under
a second.

## How it is verified

* **Leaf modules.** Each one is compared with a model written independently
  in its testbench.
  * `mark_unit_tb` encodes the two rule tables as if/else code, carries
    `Reg` across packets, and also loads and checks the step-only rules,
    the pulse-only initiator rules (Table 3) and the terminator's step and
    pulse rules (Tables 2 and 4).
  * `ipv4_mark_field_tb` recomputes the checksum from scratch.
* **End to end.** `ampm_mp_tb` runs two full-size measurement points with all
  parameters at their defaults. MP1's output goes to MP2 over a link model
  with a 5-cycle delay and 3 % random loss. The testbench checks:
  * every output header: marking bit, colour, timestamp decision, reception
    time, checksum and two-cycle latency;
  * every counter reading, against the packets sent and lost;
  * every timestamp record, and every measured delay, against the link
    delay.
* **Phases of the end-to-end test.**
  * Phase A uses the default 16 s rules. The clocks are stepped through 44 s
    of slots.
  * Phase A2 uses the 1 s layout.
  * Phase B uses fast slots and runs continuously.
  * Phase B2 puts MP2's clock 200 ns behind MP1's, so that pulses land in the
    guard slots 001 and 101.
  * Phase C stops the collector so that both export queues overflow, and
    sends a header every cycle.
* **Every mechanism happens.** The testbench counts each event and fails if
  any of them never happens: steps, pulses, each of the four pulse-detection
  slots, loss, bypass of unmonitored and non-IPv4 packets, clearing,
  rewriting rules, export overflow, and back-to-back headers.

## What follows the paper and what does not

**From the paper:**

* the single-bit muxed marking;
* the time bits `Seconds[4:2]`;
* both rule tables and the `Reg` register;
* two lookups with two rules per flow;
* the DSCP LSB as the marking bit;
* clearing at the terminator;
* timestamps of pulse packets exported to a collector;
* the need for slot-level clock synchronisation.

**This design's own:**

* **Timestamp format.** 48-bit seconds and a 32-bit nanosecond fraction, as
  in IEEE 1588.
* **Lookups.** First-match priority, and the action encoding `{set_mark,
  mark, reg_we, reg_next, cnt_en, color, ts_en}`.
* **Structure.** The reset-time rule loader, the two-stage pipeline, and all
  sizes.
* **Counters.** Packet (not byte) counters that a read does not clear.
* **Export.** The drop-on-full export queue.
* **Flow key.** The source, destination and protocol fields.
* **Checksum.** The checksum update, which the paper does not discuss.
* **State.** One `Reg` per MP rather than per flow. With several monitored
  flows, only one of them gets a pulse per interval.

**Not included:**

* the time-synchronisation protocol engine;
* the rest of the switch (forwarding, queues, MACs and PHYs);
* the collector software;
* the two-bit "double marking" variant.

The RTL exposes ports where each of these would connect.
