# XAV regular-expression matching engine: RTL

Matching thousands of regular expressions against packets at line rate
runs into two problems. An NFA is too slow in software. A DFA for a large
rule set has too many states to store. XAV avoids both with three stages:

1. **Pre-filter.** Most regexes contain a short literal. A packet can only
   match a regex where that literal occurs. A set-membership filter over the
   last 2, 4 or 8 bytes of the packet marks every position where such a
   literal may end.
2. **Anchor DFA.** Starting only at the marked positions, small anchored
   automata check the regex fragment around the literal. The part before and
   including the literal (the *front part*) is checked backwards. The part
   after it (the *back part*) is checked forwards. An anchored DFA (one that
   starts at a fixed position) does not suffer the state explosion of a
   floating DFA, because it never has to track "all positions at once".
3. **Verification.** Host software joins fragment matches into whole-regex
   matches. It checks the pieces between fragments (bounded gaps, counted
   character classes, small leftover DFAs).

This RTL implements the hardware half, stages 1 and 2, with 64 parallel
matching units and 6 shared copies of the automaton table. It takes a stream
of packets and emits a stream of *fragment matches*: packet id, fragment id,
and the first and last byte of the matched text. Stage 3 runs on the host
and is not part of this RTL.

## Vocabulary

| term | meaning here |
|---|---|
| lsRE fragment | a piece of a regex that starts with a literal-bearing front part and may have a back part (e.g. `user=` followed by `[0-9]{8}`) |
| ldRE | the literal the pre-filter looks for: the last 2, 4 or 8 bytes of a fragment's front part (a longer literal is cut to the nearest of those lengths by the rule compiler) |
| matching position | the byte where an ldRE ends; the pre-filter reports it |
| thread | one walk of an anchored DFA from a matching position |
| STT | state transition table of the anchor DFA: (state, byte) → next state |

## Data flow

```
 packet stream ──► input_scheduler ──► matching_unit[0..63] ──► report_collector ──► fragment matches
 (64-byte beats)     (idle unit,          │   ▲                   (round robin)
                      packet id)          │   │ 128 query ports (reverse + forward per unit)
                                          ▼   │
                                     query_scheduler ◄──► stt_copy[0..5]
 configuration bus ──► every unit's filter tables, every STT copy
```

Each **matching unit** owns one packet at a time:

```
 beats ─► packet_buffer (2048 B, 3 read ports)
             │ scan: 1 byte/clock       ┌──────── anchor_dfa ─────────────────┐
             ▼                          │ position FIFO (16)                  │
          xor_filter ── positions ────► │   └► reverse_dfa ─ front part ─►    │
          (DFU len 2,                   │                   forward_dfa ──────┼─► report FIFO (8)
           XFU len 4, XFU len 8)        └─────────────────────────────────────┘
```

The scan reads bytes as soon as they are written, so matching overlaps the
arrival of the packet. The unit becomes free when its packet is fully
written and scanned, and the engine has no queued position and no running
thread. Reports may still wait in its FIFO at that point. They carry the
packet id, so the host can sort them.

## The pre-filter

The filter keeps an 8-byte window of the bytes scanned so far and looks it
up three ways in parallel:

* **DFU** (direct filter unit): a 2^16-bit bitmap addressed by the last two
  bytes, with the older byte in the upper half of the address. It is stored
  as 1024 words of 64 bits; address `{b[-1], b[0]}` selects word `addr[15:6]`,
  bit `addr[5:0]`.
* **XFU4 / XFU8** (xor filter units): xor filters over the last 4 and last
  8 bytes. A key is right-aligned in 64 bits, oldest byte highest. With
  `h = fmix64(key ^ seed)` (the murmur3 64-bit finaliser), the unit computes
  three slots `h0 = h[10:0]`, `h1 = 2048 + h[31:21]` and
  `h2 = 4096 + h[52:42]`, and the fingerprint `fp = (h ^ (h >> 32))[7:0]`.
  It reports a hit when `T[h0] ^ T[h1] ^ T[h2] == fp`.
  A key that was inserted always hits. Any other key hits with probability
  about 1/256.

A position hits if any of the three units hits and the window reaches far
enough back into the current packet. Bytes of the previous packet never
count. The filter has a fixed latency of 3 clocks.

The tables are built offline. The DFU bitmap is a plain set. The xor filter
table is built by *peeling*:

1. Hash every key to its three slots.
2. Repeatedly remove a key that owns a slot no other remaining key uses.
3. Assign slots in reverse removal order, so that each key's three entries
   xor to its fingerprint.

If peeling gets stuck, the builder tries another seed. That is why the seed
is a programmable register. Each XFU has 3 × 2048 slots. That holds about
2048 × 3 / 1.23 ≈ 5000 literals of its length, and 20 KB of filter tables
per unit in total.

## Anchor DFA threads

All front parts are compiled **reversed** into one trie-like DFA: the
*reverse DFA*. All back parts are compiled forwards into the *forward DFA*.
Both live in **one state space** and therefore in one table:

* state 0 is the dead state: a thread that reaches it ends;
* state 1 is the start state of the reverse DFA;
* every state has an information word `{accept, frag, fwd_start}`.

A reverse thread starts at matching position `pos` in state 1. It reads
`pos, pos-1, pos-2, …`. Each byte costs one STT query. When the returned
state is accepting, the front part of fragment `frag` spans `[p, pos]`. The
thread hands `(frag, p, pos, fwd_start)` to the forward thread and carries
on, because a longer front part may also end at `pos`. In the default test
rules, `BODY` and `XBODY` both end on the same `Y`. The thread ends at the
dead state or at the first byte of the packet.

A forward thread starts in state `fwd_start` on byte `pos+1`. It reports a
fragment match `(frag, p, q)` at every accepting state it reaches on byte
`q`. It ends at the dead state or at the end of the packet. If a byte has
not been written yet, it waits: the `stall` event. A front part with
`fwd_start = 0` has no back part and is reported at once.

Example, with fragment `user=` + `[0-9]{8}` and packet `...user=12345678...`:

1. XFU4 hits on `ser=`, at the position of `=`.
2. The reverse thread reads `=`, `r`, `e`, `s`, `u` and accepts. It hands
   over the start of `u`, the end `=` and the forward start state.
3. The forward thread reads 8 digits and accepts on the last one.
4. The report is (packet, fragment, position of `u`, position of the last digit).

A filter hit is only a hint. False positives of the xor filters end in the
dead state after a byte or two. Positions queue in a 16-entry FIFO per unit.
The scan pauses (`scan hold`) before that FIFO can overflow, so no position
is ever lost.

## Sharing the transition table

A table copy per unit would be far too much memory, and a unit's threads are
busy only a small share of the time. So all 128 threads (a reverse and a
forward thread in each of 64 units) share 6 copies.

* **Request.** Each thread raises a request with its `(state, byte)` and
  holds it until it is granted.
* **Grant.** Each clock the query scheduler scans the requesters round
  robin, starting after the last one granted. It grants up to 6 of them,
  the k-th grant to copy k. A waiting request is granted within
  ceil(128/6) = 22 clocks.
* **Result.** A copy answers 2 clocks later with the next state and that
  state's information word. The answer carries the requester's number, and
  the scheduler routes it back by that number.
* **Cost per byte.** One byte of a thread costs at least 4 clocks: buffer
  read, grant, and two clocks for the table.

At the published rate of at most about 1 anchor-DFA byte per 20 traffic
bytes, 64 units need about 3.2 queries per clock on average. 6 copies give 6.

## Interfaces of `xav_top`

**Packet stream.** The ports are `in_valid`, `in_ready`,
`in_data[64][8]` (byte 0 first), `in_nbytes` (1 to 64) and `in_last`.

* A packet is one or more beats. Every beat but the last carries 64 bytes.
* A packet's first beat waits (`in_ready` low) while every unit is busy.
  Once a packet has started, its beats are never refused.
* Packets longer than 2048 bytes are cut to 2048; the extra beats are still
  consumed.
* Packet ids count up from 0 in arrival order.

**Configuration.** The ports are `cfg_valid`, `cfg_sel`, `cfg_addr[24]` and
`cfg_data[64]`, with one write per clock. A write goes to every unit or to
every copy. Load the tables while no packet is in flight.

| `cfg_sel` | `cfg_addr` | `cfg_data` |
|---|---|---|
| `CFG_DFU` (0) | word 0..1023 | 64 bitmap bits |
| `CFG_XFU4` (1) / `CFG_XFU8` (2) | `{segment[1:0], index[10:0]}` | fingerprint in `[7:0]` |
| `CFG_XFU4_SEED` (3) / `CFG_XFU8_SEED` (4) | – | 64-bit seed |
| `CFG_STT_TRANS` (5) | `{state[13:0], byte[7:0]}` | next state in `[13:0]` |
| `CFG_STT_INFO` (6) | state | `{accept, frag[12:0], fwd_start[13:0]}` |

Every transition of a state in use must be written, including those to
state 0. The tables power up with arbitrary contents.

**Reports.** The ports are `rep_valid`, `rep_ready` and
`rep = {pkt[16], frag[13], start_pos[11], end_pos[11]}`. Reports leave one
per clock, merged round robin from the units' FIFOs. Back-pressure is
allowed. A unit whose FIFO is full stalls its forward thread
(`ev_rep_full`), so no report is dropped.

**Monitoring.** The outputs `ev_filter_hit`, `ev_all_busy`, `ev_scan_hold`,
`ev_fwd_stall`, `ev_rep_full` and `ev_stt_wait` are one-clock level flags.
`all_idle` means that every unit is free and no report is pending.

## Parameters

| name | default | where it comes from |
|---|---|---|
| `N_UNITS` | 64 | published design |
| `M_COPIES` | 6 | published design |
| `IN_BYTES` | 64 | own choice (a 512-bit stream) |
| `POS_W` | 11 | own choice: 2048-byte packet buffer, room for a 1518-byte Ethernet frame |
| `SEG_W` | 11 | own choice: 3 × 2048 slots per XFU |
| `FP_W` | 8 | own choice: false-positive rate 1/256 per lookup |
| `STATE_W` | 14 | own choice, see below |
| `FRAG_W` | 13 | own choice: 8192 fragments |
| `PKT_W` | 16 | own choice |

The widths live in `xav_pkg`. `N_UNITS`, `M_COPIES` and `IN_BYTES` are
parameters of `xav_top`.

## Throughput and latency

* Each unit scans one byte per clock, so 64 units scan 64 bytes per clock:
  102 Gbit/s at 200 MHz. The input also takes one 64-byte beat per clock.
* The published figure is about 75 Gbit/s at 200 MHz, which is 47 bytes per
  clock. At full size, with 1088-byte packets and no matches, the aggregate
  scan rate measured in simulation is about 49 bytes per clock. The gap to
  64 comes from units that finish a packet and wait for the next one.
* A single unit finishes a packet without literals within its length + 8
  clocks of the first beat.
* A thread costs 4 or more clocks per byte. It only runs near hits, so
  traffic with few hits is not slowed.

## How this RTL departs from the published design

* **Uncompressed transition table.** The published design compresses the
  table by about 98% (perfect hashing combined with bitmap-encoded
  transitions). Each copy here is a plain `2^STATE_W × 256` array plus a
  per-state information array. The table's layout is the only thing that
  changes: the query and answer interface would stay the same. Because the
  table is uncompressed, `STATE_W` is 14 (16384 states). That holds the
  small published rule sets: Bro217 at 2302 states, and Ranges, Dotstar at
  up to 10759. It does not hold the large ones: PowerEN and ClamAV at about
  38000 states, Snort at 135296. Six uncompressed copies at 14 bits already
  come to 44 MB, far above FPGA on-chip memory.
* **Matching position is the literal's last byte.** The backward/forward
  split needs the end of the literal, so the filter reports the last byte.
  One worked example in the published description reports start positions
  instead.
* **Packets for host verification.** Some host checks (counted character
  classes, leftover DFAs) need the packet bytes themselves. The published
  design sends such packets to the host after a match. Here the host already
  has every packet, since it feeds the stream, and only reports leave the
  chip. No packet-return path is built.
* **Own choices where the description is silent.** These include the hash
  and table sizes of the xor filters, the 2048-byte per-unit buffer with
  truncation, the round-robin policies, the FIFO depths, the beat format,
  the configuration bus, state 0/1 conventions and the event outputs.
* **Not in the RTL.** The rule compiler, the verification engine, the
  packet source and the PCIe queues are not built.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The reference model is
`tb/tb_xav_pkg.sv`. It holds a small rule compiler: fragments with literal
front parts, and back parts where `#` means a digit. From these it builds:

* the reversed trie and the forward chains in one state space;
* the DFU bitmap and both xor filters (by peeling);
* the expected fragment matches of any packet, found by brute force.

`tb/tb_stt_model.sv` stands in for the shared table in the unit-level
tests. It grants at random and answers 2 clocks later.

| testbench | what it covers |
|---|---|
| `tb_dfu`, `tb_xfu`, `tb_xor_filter` | every bitmap bit; no false negatives and about 1/256 false positives at 4500 keys; window across packet starts, against the model |
| `tb_packet_buffer`, `tb_stt_copy` | partial beats, three read ports; table contents, dead-state info, 2-clock latency |
| `tb_query_scheduler` | 128 requesters with real copies: correct routing, 2-clock answers, at most and at least 6 grants, round-robin bound |
| `tb_reverse_dfa`, `tb_forward_dfa`, `tb_anchor_dfa` | threads against brute force, nested front parts, waiting for unwritten bytes, full position FIFO |
| `tb_matching_unit` | whole unit against brute force, 1 byte/clock, every unit event |
| `tb_input_scheduler`, `tb_report_collector` | unit choice, truncation, stall when all units are busy; merge order, back-pressure, no loss |
| `tb_xav_top` | whole chip at 4 units and 2 copies: random, oversize, dense, slow and back-pressured traffic, and a rate phase; every event must occur |
| `tb_xav_full` | the same at full size (64 units, 6 copies), including the 47 bytes/clock rate check |
| `tb_xav_workload` | full size on a generated workload shaped like the small published rule sets: 300 random fragments (3378 states), 400 random packets of 512–1500 bytes; every match against brute force, and at least 47 bytes/clock overall (measured: 48) |

To run one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/xav_pkg.sv tb/tb_xav_pkg.sv tb/tb_xav_top.sv --top-module tb_xav_top
./obj_dir/Vtb_xav_top
```

`tb_xav_full` builds in under a minute and runs in a few seconds. `tb_xav_workload` spends most of its 1.5 minutes loading the 3378-state table.

To use your own rules, follow the same steps as the testbench task
`load_rules`:

1. Write the 1024 DFU words.
2. Write 3 × 2048 fingerprints and a seed for each XFU.
3. Write all 256 transitions and the information word of every state.
