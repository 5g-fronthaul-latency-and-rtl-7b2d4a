# CPRI over Ethernet fronthaul: encapsulation, scheduled switching and jitter measurement

In a centralised radio access network, each radio equipment (RE) on a mast
sends its digitised radio signal to a pool of baseband units (the REC) over
CPRI. CPRI is a constant-rate serial stream. Carrying it over ordinary
Ethernet (CoE) is cheaper, but it costs two things:

* **latency**, because a whole Ethernet payload of CPRI bytes must be
  collected before the frame can leave;
* **jitter**, because frames from several REs share one Ethernet link and
  wait for each other in the switch.

This RTL models that path at the clock level:

```
 RE 0: cpri_prbs_source -> coe_encap --\
 RE 1: cpri_prbs_source -> coe_encap ----> coe_sched_switch --> link --> coe_decap --> CPRI payload
 RE 2: cpri_prbs_source -> coe_encap --/   (store-and-forward,              |
                                            time-slot gates)           jitter_monitor
```

The whole design runs on a single clock of 156.25 MHz with a 64-bit datapath.
One 8-byte word per 6.4 ns cycle is exactly 10 Gb/s, the rate of the
Ethernet link. Byte lane 0 (`data[7:0]`) is the first byte on the wire.
Streams carry the packed struct `word_t` {`data`, `keep` (byte enables),
`sop`, `eop`}, with a valid strobe and no back-pressure, as a MAC would carry
them. Shared types and functions are in `rtl/coe_pkg.sv`.

## CPRI stream and its timing (`cpri_prbs_source`)

A CPRI basic frame lasts 1/3.84 MHz ≈ 260.4 ns and has 16 words. A word is X
bytes wide, where X depends on the CPRI option:

| option   | 1     | 2      | 3      | 4      | 5      | 6      |
|----------|-------|--------|--------|--------|--------|--------|
| X        | 1     | 2      | 4      | 5      | 8      | 10     |
| rate     | 614.4 | 1228.8 | 2457.6 | 3072.0 | 4915.2 | 6144.0 |

Rates are in Mb/s. The source emits *line* bytes (after 8B/10B coding),
20·X bytes per basic frame. That is the quantity that fills Ethernet payloads:
at option 1, 1500 bytes take 19.53 µs.

A basic frame is 15625/384 clock cycles long, which is not an integer.
Instead of a fractional divider, a phase accumulator adds 7680·X every cycle
and emits a word whenever it passes 125000. The words therefore arrive
slightly irregularly, but their long-run rate is exact. Over one 10 ms radio
frame the words line up exactly with 1,562,500 cycles.

The data is PRBS-31 (x³¹ + x²⁸ + 1), generated 64 bits per cycle. The source
also counts basic frames (0–255) and hyper frames (0–149) and marks the first
word of each radio frame. The encapsulator uses that mark for the RoE
start-of-frame flag. X above 16 (beyond option 7) would need more than one
word per cycle and is not supported.

## Framing (`coe_encap`)

The mapping is structure-agnostic: the encapsulator cuts the byte stream
into payloads of `cfg_payload_len` = L_P bytes. It ignores CPRI word
boundaries, and L_P is normally a whole number of basic frames, close to
1250 or 1500 bytes.

Incoming bytes go into a circular buffer of `BUF_BYTES` (4096) bytes. The
buffer is built as eight byte-wide banks, so that an input word landing at
any byte offset is written in one cycle. When the last byte of a payload
arrives, a descriptor (start address, RoE header, FCS) is queued. The
transmitter then sends the frame at full line rate from the buffer while the
next payload fills.

A frame on the datapath is three header words followed by the payload:

| word | name                 | bytes 0..7                                        |
|------|----------------------|---------------------------------------------------|
| 0    | `dst_src`            | destination MAC (6), source MAC bytes 0–1         |
| 1    | `src_len_roe_header` | source MAC bytes 2–5, EtherType (2), RoE bytes 0–1 |
| 2    | `roe_header_fcs`     | RoE bytes 2–5, FCS (4, least significant first)   |
| 3..  | payload              | L_P bytes; `keep` marks the valid lanes of the last word |

Points to note:

* **The FCS comes before the payload.** This differs from IEEE 802.3, where
  the FCS follows the payload. It is possible here because the whole payload
  is already buffered when the header leaves, so the CRC-32 is known.
  - The CRC is the standard Ethernet one: reflected polynomial 0xEDB88320,
    initial value all ones, inverted at the end.
  - It covers the 20 header bytes that precede it, then the payload.
  - It is computed while bytes are written into the buffer. At the moment a
    payload opens, the CRC of the header is already precomputed for both
    values of the start-of-frame flag.
  - A receiver must use this layout; `coe_decap` does.
* **The EtherType is 0xFC3D**, the type assigned to Radio over Ethernet.
* **The 6-byte RoE header** packs, from its first byte on:
  - version (2 bits);
  - packet type (4);
  - start-of-frame flag (1);
  - timestamp select (1);
  - flow id (8);
  - timestamp (32).

  The timestamp is one of two things, chosen by `cfg_ts_sel`:
  - with `cfg_ts_sel` = 1, the clock-cycle count when the payload's first byte
    arrived;
  - with `cfg_ts_sel` = 0, a packet sequence number.

  The start-of-frame flag is set on the first packet whose payload starts in
  a new radio frame.
* **The gap is kept as idle time.** Preamble, SFD and inter-packet gap
  (8 + 12 bytes) are not carried as data. The output stays idle after each
  frame: 2 cycles if the last word holds ≤ 4 bytes, otherwise 3. Counting
  the unused lanes of the last word, this makes up the 20 bytes. A frame
  therefore uses L_P + 44 bytes of link time, the overhead the CoE latency
  budget assumes.

Timing, all checked by `tb_coe_encap`:

* The first header word leaves 2 cycles after the cycle that delivered the
  payload's last byte.
* The header takes 3 cycles (19.2 ns).
* Frames leave on average every T_encap = L_P / R_CPRI.

Measured T_encap:

| L_P (bytes) | option | measured | expected |
|-------------|--------|----------|----------|
| 1500        | 1      | 19.53 µs | 19.53 µs |
| 1250        | 2      | 8.14 µs  | 8.13 µs  |

The small difference at option 2 comes from word granularity.

## The scheduled switch (`coe_sched_switch`, `frame_fifo`)

Each input port has a `frame_fifo`, a queue of 512 words that is
store-and-forward:

* A frame becomes visible to the scheduler only after its last word has
  arrived. Crossing the switch therefore costs at least the frame's own
  length, the hop delay.
* A frame that does not fit is dropped whole, and counted.

The output follows a periodic schedule:

* The schedule length is `cfg_num_slots` timeslots of `cfg_slot_cycles`
  cycles each. A timeslot is normally the time one frame needs on the link,
  T_ETS = (L_P + 44)·8 / 10 Gb/s.
* The gate-control list (GCL) holds up to `MAX_SLOTS` = 64 entries of
  {open, port}. It is written through `gcl_we/gcl_addr/gcl_open/gcl_port`.
* When a slot begins and its gate is open, the head frame of that port leaves
  if it is complete. Its first word appears 2 cycles after the slot start.

Three events are counted, because these are what a schedule must avoid or
tolerate:

* **miss**: an open slot found no complete frame.
* **conflict**: a slot began while the previous frame, with its gap, was
  still on the link. The slot is skipped, because frames are never
  preempted.
* **drop**: a queue overflowed.

Why the order of the slots matters is easiest to see with three flows:

* **The flows:** 5000, 2500 and 1250 Mb/s, all frames of the same length.
* **The schedule:** 8 slots of 0.8 µs.
* **Schedule F1 F2 F3 F1 F2 F1 F1 –:**
  - flow 1 gets 4 slots per 6.4 µs, enough capacity;
  - its packets leave 2.4, 1.6 and 0.8 µs apart;
  - its jitter is 1.6 µs.
* **Schedule F1 F2 F1 F3 F1 F2 F1 –:**
  - flow 1 gets the same number of slots, but evenly spaced;
  - the jitter is zero for every flow.

`tb_coe_sched_switch` replays both schedules cycle by cycle and checks 250
and 0 cycles.

The switch itself only follows the list it is given. The list can be written
from outside, or computed by the schedule search described next.

## Searching for a jitter-free schedule (`cfit_scheduler`)

Finding a schedule in which no two packets want the same slot is a
graph-colouring problem in general. For the handful of flows one switch
aggregates, an exhaustive greedy search is affordable. `cfit_scheduler`
implements comb fitting, working entirely in timeslot units:

1. **Combs.** Flow f sends one packet every P_f slots, where P_f is the
   flow's packet period divided by the slot length. Alone, its packets would
   sit at slots 0, P_f, 2·P_f, … of an N_S-slot schedule: a perfect comb with
   zero jitter. The combs of different flows collide at slot 0 and wherever
   else their teeth meet.
2. **Merging two schedules.** Of the two, the one with more packets stays
   where it is.
   - The other is slid by 0, 1, 2, … slots, and the first shift with no
     collision is taken. A slid comb keeps its spacing, so its jitter stays 0.
   - If no shift works, the other schedule stays unshifted. Each colliding
     packet goes to the nearest free slot, the later one first at equal
     distance. This is where jitter is created.
3. **Orders.** The merge result depends on the order in which flows are
   added, so every order is tried (3! = 6 for three flows).
   - Each result is scored with the same jitter measure as the receiver uses:
     per flow, the largest minus the smallest cyclic distance between
     consecutive packets, then the worst flow.
   - The lowest score wins, and the first one found wins a tie.
4. **Output.** The winning list is written into the switch's gate-control
   list, one entry per cycle.

The search is a small sequential machine: one slide step, one
nearest-slot step or one slot of scoring per clock. Three flows in 64 slots
take a few thousand cycles. `feasible` drops when there are more packets than
slots.

Worked example: the three-flow case above (P = 2, 4, 8 slots of 8).

* Order 1 > 2 > 3 slides flow 2 by one slot and flow 3 by three slots, giving
  F1 F2 F1 F3 F1 F2 F1 –.
* That list has zero jitter, so the search keeps it.

Periods of 2 and 3 slots in a 6-slot schedule can never both stay perfectly
regular: their teeth always meet. Here the search returns a jitter of 2
slots, which `tb_cfit_scheduler` shows to be the best possible.

## Receive side (`coe_decap`, `jitter_monitor`)

`coe_decap` is the mirror image of the encapsulator:

* It parses the three header words and recomputes the CRC-32 over the header
  and payload.
* It hands the payload on, one cycle later, with its byte enables.
* At the end of each frame it reports `frame_ok`: the FCS matched and the
  EtherType is RoE.
* The following count as bad frames:
  - a wrong FCS;
  - a wrong type;
  - a frame cut short inside its header;
  - a stray word outside a frame.
* It raises an arrival event 2 cycles after each frame's first word, with the
  flow id from the RoE header.

`jitter_monitor` timestamps those arrivals with a free-running cycle counter.
For each flow it keeps the smallest and largest time between consecutive
packets:

* the jitter of a flow j is max − min of its inter-arrival times;
* the link's jitter is the worst flow.

All values are in clock cycles of 6.4 ns. A flow with fewer than two
intervals reports 0, and `clear` restarts the statistics.

## Top level (`coe_fronthaul_top`)

The top level has three REs by default. RE j uses flow id j and a PRBS seed of
its own.

* **Switch output:** appears on `link_word/link_valid`. This is where an
  Ethernet PHY would attach.
* **REC side:** the same stream goes to the de-encapsulator. The recovered
  CPRI payload leaves on `rec_pay_*`, towards the baseband pool.
* **Not modelled:** PHYs, optics, the radios and the baseband processing.
* **Configuration:** each RE has its own CPRI option and payload length. The
  switch schedule is shared. It comes either from the `gcl_*` port or from
  the schedule search (`cfit_start`, `cfit_period`), which owns the list
  while `cfit_busy` is high. Configuration must be static while `re_en` or
  `cfg_sched_enable` is high.

| parameter   | default | meaning                                |
|-------------|---------|----------------------------------------|
| `N_RE`      | 3       | radio equipments / switch input ports  |
| `BUF_BYTES` | 4096    | encapsulation buffer per RE (L_P ≤ 2048) |
| `MAX_SLOTS` | 64      | gate-control list entries / search size |
| `QDEPTH`    | 512     | switch queue per port, in 8-byte words |

## Where this design makes its own choices

These points are not fixed by the CoE mapping and were chosen here:

* the header word layout with the FCS ahead of the payload;
* the EtherType;
* the RoE field widths and the meanings of SOF and the timestamp;
* PRBS-31;
* buffer, queue and GCL sizes;
* the rule that a slot serves at most one frame and is skipped on a conflict;
* in the schedule search: combs all starting at slot 0, shifts tried in
  increasing order, the later slot first, and the first order kept among
  equals;
* reporting a bad FCS after the payload has been passed on, instead of
  discarding it.

The line-rate model (20·X bytes per basic frame) carries the 8B/10B line
bytes. That is what makes a 1500-byte payload take 19.53 µs at option 1.

Not modelled:

* payload sizes above 2047 bytes (`cfg_payload_len` is 11 bits);
* CPRI options above 7;
* more than one switch hop;
* time synchronisation between the REs. All REs share the clock, and flows
  that start together stay aligned.
* the optional extended RoE header and the 802.1Q tag;
* more than three flows in the schedule search at its default size (the
  published sweeps go up to six; `N_FLOWS` is a parameter, but the search
  tries all N^N flow orders, so its run time grows quickly);
* the first-available-timeslot baseline scheduler, which is only a point of
  comparison;
* the fibre and the hop-count/distance budget, which are arithmetic rather
  than logic.

Departures from the published description, kept on purpose:

* The published header order puts the frame check sequence in the third
  header word, before the payload; this design follows that order, so the
  frames are not standard 802.3 frames.
* The basic-offset step of the published pseudo code starts each further
  flow one timeslot later, while its worked three-flow example starts every
  flow at time 0. The search here follows the worked example, which gives
  the published zero-jitter list for that example.
* The published table gives 3073 frames per radio frame for option 4 with
  1250-byte payloads, where 10 ms × 3.072 Gb/s (line bytes) / 1250 bytes is
  exactly 3072. The design produces 3072.

## Simulation

Every block has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench                | what it checks                                                      |
|--------------------------|---------------------------------------------------------------------|
| `tb_cpri_prbs_source`    | PRBS recurrence; word rate at X = 1 and 10 over 100k+ cycles; basic/hyper frame numbering; radio frame every 1,562,500 cycles |
| `tb_coe_encap`           | every header field; payload bytes; CRC-32 against a bit-serial model; frame length; header timing; T_encap; minimum gap. Three L_P/option pairs |
| `tb_coe_sched_switch`    | both three-flow example schedules (jitter 250 / 0 cycles, inter-departure times); word-for-word forwarding; store-and-forward; slot timing; miss, conflict and drop |
| `tb_coe_decap`           | random frames built independently; parsed fields; payload; arrival timing; four kinds of bad frame |
| `tb_cfit_scheduler`      | the three-flow example list; a case whose best jitter is 2 slots; overload; random period sets. Each written list is checked for packet counts and its jitter is recomputed |
| `tb_jitter_monitor`      | the 1.6 µs example; random arrivals against a reference model        |
| `tb_table2_encap`        | source + encapsulator at every CPRI option 1–6 with L_P = 1250 and 1500 bytes: T_encap against the published table values (16.27 µs … 1.95 µs), exact period, frame lengths, frames per radio frame |
| `tb_coe_fronthaul_top`   | end to end at default parameters (below)                             |

The end-to-end test drives three REs (option 1, option 3 in phase 4) through five phases, each
starting from reset:

1. **Evenly spread schedule.**
   - Payloads of 1536 bytes complete exactly every 3125 cycles (20 µs).
   - The schedule is 5 slots of 625 cycles.
   - Expected: zero jitter, all frames intact. Each flow's payload is checked
     at the REC to be one unbroken PRBS-31 sequence.
2. **Mismatched schedule.**
   - The schedule period is 2800 cycles, against frames every 3125.
   - Expected: misses, and 2800 cycles of jitter.
3. **A flow that is never served.**
   - Expected: its queue overflows and drops frames, while the other flows
     are unaffected.
4. **Slots shorter than a frame.**
   - Expected: conflicts.
5. **Searched schedule.**
   - Same traffic as phase 1, but the gate-control list is filled by the
     comb-fitting search.
   - Expected: a zero-jitter list, then zero measured jitter.

The test counts each mechanism (encapsulation, forwarding, FCS-checked
de-encapsulation, miss, conflict, drop, zero and non-zero jitter, schedule
search). It fails
if any of them never occurred. It runs in a few seconds.

To run a testbench with Verilator 5 from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_coe_fronthaul_top \
    rtl/coe_pkg.sv $(ls rtl/*.sv | grep -v coe_pkg) tb/tb_coe_fronthaul_top.sv
./obj_dir/Vtb_coe_fronthaul_top
```

Replace the top module name and the testbench file to run another test. The
testbenches reset everything they read, so any initial random state works.
