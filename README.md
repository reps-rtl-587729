# REPS sender unit in SystemVerilog

REPS (Recycled Entropy Packet Spraying) is a per-packet load balancer that
lives at the sending NIC. Datacenter switches choose among equal-cost paths by
hashing packet header fields. One of those fields, the *entropy value* (EV,
for example the UDP source port), is set by the sender. With a different EV a
packet can take a different path. The sender never learns which path an EV
maps to. It only learns, through the ACK, whether the packet that carried that
EV was ECN-marked (congested) or not.

REPS uses that one bit. The receiver echoes each data packet's EV in its ACK.
The sender keeps the EVs of unmarked ACKs in a small circular buffer and reuses
them for later packets. When the buffer holds no fresh EV, it draws a random
one and so explores a new path. Paths that keep returning clean ACKs get used
again and again, and congested paths drop out. Most of the state is on the
wire: the EVs in flight are the memory of which paths are good. Per connection,
REPS needs only 8 cached EVs plus a few counters, about 25 bytes.

A second mechanism handles link failures. When a loss looks like a failure and
not like congestion, the connection enters *freezing mode*. In that mode it
stops drawing random EVs, because a random EV may hash onto the dead link. It
replays cached EVs instead, even ones already used. Freezing ends after a fixed
timeout, on the next clean ACK. The connection then explores randomly on every
8th packet for one congestion window, so that it can find the repaired paths.

This RTL implements REPS for a NIC that serves 256 connections. All the state
sits in on-chip memory, and one copy of the logic is shared by all connections.
That is the organisation of the FPGA NIC on which REPS was measured.

## Structure

```
reps_top
 ├─ time base (32-bit cycle counter, now())
 ├─ reps_fail_detect      timeout -> failure or congestion verdict
 ├─ fixed-priority arbiter (failure > ACK > open > send)
 └─ reps_engine
     ├─ reps_sram  (EV buffers: 256 x 128 bit = 4 KB)
     ├─ reps_sram  (control fields: 256 x 66 bit)
     ├─ reps_core  (the REPS procedures, combinational)
     └─ reps_lfsr  (random EVs)
reps_pkg: sizes, state struct, operation and EV-source encodings
```

## The per-connection state and its procedures (`reps_core`)

| field | bits | meaning |
|---|---|---|
| `evs[8]` | 8 x 16 | cached EVs |
| `valid[8]` | 8 | the EV has not been used since it was cached |
| `head` | 8 | slot that the next cached EV is written to |
| `num_valid` | 8 | number of valid slots |
| `explore` | 8 | packets left in the post-freezing exploration phase |
| `exit_time` | 32 | earliest time at which freezing may end |
| `freezing` | 1 | freezing mode |
| `filled` | 1 | some EV has been cached since the connection was opened |

The valid slots always form a contiguous run that ends just before `head`.
The oldest valid EV is therefore at `head - num_valid` (mod 8). This is why a
counter is enough and no per-slot age is needed.

**ACK.** If the ACK is ECN-marked, nothing happens. Otherwise its EV is written
at `head` and marked valid, and `head` advances. `num_valid` grows only if the
slot was not valid already. A burst of more than 8 clean ACKs therefore
overwrites the oldest entries. If the connection is freezing and `exit_time`
has passed, freezing ends and `explore` is loaded with the congestion window
in packets (`cwnd_pkts_i`). Freezing can end only on a clean ACK.

**Failure.** If the connection is not freezing and `explore` is 0, freezing
starts and `exit_time = now + freeze_timeout_i`. A failure reported during the
exploration phase is ignored, so the connection cannot freeze again at once.

**Send.** The choice is made in this order:
1. If `explore` is non-zero, it is decremented. When the new value is a
   multiple of 8, the packet gets a random EV.
2. If no EV was ever cached, or no valid EV is cached and the connection is not
   freezing, the packet gets a random EV (*explore*).
3. If some EV is valid, the oldest valid EV is used and invalidated (*reuse*).
4. If the connection is freezing and no EV is valid, the EV at `head` is
   replayed and `head` advances (*frozen replay*). The buffer is thus cycled
   through in order.

The random EV is `rand % EVS_SIZE`. `EVS_SIZE` is a parameter, 65536 by default.

Taking a congestion loss for a failure costs little: freezing only narrows
the set of EVs in use to the 8 cached ones for a while.

## The multi-connection engine (`reps_engine`)

Connection state lives in two memories indexed by the connection number. The
8 EVs of a connection are one 128-bit word, so 256 connections need 4 KB. The
66 control bits of a connection sit in a second memory. Each operation is a
read-modify-write:

| cycle | action |
|---|---|
| t | request accepted (`req_valid_i && req_ready_o`); both memories read |
| t+1 | `reps_core` computes; new state written back; `rsp_*` valid |

The engine takes one request per cycle. If the request in cycle t+1 names the
same connection as the one in cycle t, its memory read happens in the same
cycle as the write of the earlier result, and so returns the old word. A
one-entry bypass keeps the last written state and connection, and substitutes
that state in this case. `rsp_bypass_o` shows when it was used. The next
request after that reads memory normally.

After reset the engine spends `NUM_CONN` cycles writing zero state to every
entry, with `req_ready_o` low. Later, a single connection is reset with the
`OP_CLEAR` operation, which the top issues for its `open` channel. The LFSR
steps only when a send explores, so the random sequence does not depend on
idle cycles.

## Telling failures from congestion (`reps_fail_detect`)

The transport reports loss timeouts (RTO expiry) for a connection. There are
two cases:

* **Packet trimming available** (`trim_en_i = 1`). Congested switches trim
  packets instead of dropping them, and the transport learns of congestion
  losses that way. A loss that still ends in a timeout is therefore treated as
  a failure.
* **No trimming.** A loss that follows large RTTs was probably a queue
  overflow. A loss that follows small RTTs was probably a dead link. The block
  keeps the maximum RTT sample of the current epoch and of the previous one.
  An epoch is `rtt_win_i` cycles long. A timeout whose window maximum is below
  `rtt_thresh_i` is a failure. Otherwise it is congestion, which `cong_o`
  reports and which does not change REPS state.

A failure is handed to the engine as `OP_FAIL` through a valid/ready
handshake. While one waits, new timeouts are held off (`timeout_ready_o` low).
The RTT statistic is shared by all connections. That is adequate when few
connections are active at once, as on the NIC the design targets.

## Top-level interface (`reps_top`)

Settings: `cwnd_pkts_i` (packets per congestion window, from congestion
control), `freeze_timeout_i`, `trim_en_i`, `rtt_thresh_i` and `rtt_win_i`. All
times are in clock cycles.

Input channels, each valid/ready. When several present a request in the same
cycle, they are served in this order:

1. failure (internal, from the detector)
2. `ack_*`: connection, echoed EV, ECN flag
3. `open_*`: clear a connection for a new flow
4. `send_*`: a data packet of this connection needs an EV

A channel stalls while a higher-priority one presents a request. The EV of an
accepted send appears on `ev_valid_o / ev_conn_o / ev_o` in the next cycle.
`ev_src_o` tells how the EV was chosen: 1 = explore, 2 = reuse, 3 = frozen
replay. The outputs `freeze_enter_o`, `freeze_exit_o`, `cong_timeout_o`,
`freezing_o`, `bypass_o` and `now_o` are for monitoring. Congestion control,
the transport, the receiver (which only copies the EV into the ACK) and the
MAC are not part of this unit.

Size at the defaults, after coarse synthesis: 49,664 memory bits, about
380 flip-flops and about 200 word-level cells.

## What follows the REPS description and what is this design's own

The following come from the description of REPS, with the sizes it gives:
* the buffer, ACK, send and failure procedures
* 8 buffer entries, 16-bit EVs
* 8-bit head, counter and explore fields, and a 32-bit exit time
* an EVS of 2^16
* 256 connections in one SRAM of 4 KB, with the logic shared
* both failure-detection strategies, in outline

The following are this design's choices:
* **The explore phase.** The published pseudocode sets no EV for a send during
  the explore phase unless the counter hits a multiple of 8. Here such a send
  falls back to the normal reuse or explore choice.
* **The `filled` bit.** It stands in for "the buffer is empty" (194 state bits
  instead of 193).
* **Time stamps.** They are compared as a signed difference, so wrap-around is
  harmless.
* **Clocks and sizes.** Time counts clock cycles, and the random source is a
  32-bit LFSR.
* **Engine and top.** The two-memory split, the pipeline and bypass, the reset
  sweep, the priority order, and the two-epoch RTT window all belong here.
* **Run-time inputs.** No values are given for the freezing timeout, the RTT
  threshold, the RTT window or the congestion window, so all four are inputs.

Not built:
* probing to end freezing early
* the ACK-coalescing variants that carry several EVs in one ACK, or reuse each
  EV several times
* congestion control
* the transport with its SACK bitmaps

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/reps_pkg.sv tb/reps_ref_pkg.sv tb/tb_reps_top.sv \
    --top-module tb_reps_top -Mdir obj_top -o sim && obj_top/sim
```

| testbench | what it checks |
|---|---|
| `tb_reps_core` | 20,000 random operations, plus the sequence of the REPS illustration, against an integer reference model; every state field, every EV |
| `tb_reps_lfsr` | seed, hold, sequence against the polynomial, no zero state, spread |
| `tb_reps_sram` | random traffic against a model, read-before-write |
| `tb_reps_engine` | 256 connections, back-to-back same-connection requests (bypass), reset sweep length, one response per cycle |
| `tb_reps_fail_detect` | verdicts against a model of the RTT window, with and without trimming |
| `tb_reps_top` | a network model with 8 paths at full size (see below) |
| `tb_reps_switch_workload` | one switch with 8 uplinks, REPS next to oblivious spraying |

`tb/reps_ref_pkg.sv` is the reference model of the REPS procedures that the
engine and top testbenches share.

The top-level test runs the unit at its default parameters. Six connections
send over 8 paths, and a hash of EV and connection picks a packet's path. The
run has phases:
* One path is congested. The test checks that reused EVs avoid it: fewer than
  half of a uniform share may land there.
* A second path fails. Connections freeze, and the test checks that no random
  EV is drawn while a connection is frozen. It also checks that fewer than
  half of a uniform share of the frozen sends take the failed path. In the
  recorded run, none of 656 did.
* The path is repaired and freezing ends.
* A third path overflows after long RTTs. Its timeouts must be judged
  congestion.

Every engine operation is also compared with the reference model. The test
counts each mechanism (explore, reuse, frozen replay, ECN discard, freeze
entry and exit, congestion verdict, send stall, bypass, connection open) and
fails if one never occurs.

The switch workload test sends through one switch with 8 uplinks. A packet is
ECN-marked when it finds more than 4 packets queued at its uplink. Each run is
compared with random spraying under the same arrivals. With 8 equal uplinks at
full load, the largest queue in the second half of the run was 21 packets
under REPS and 59 under spraying. With one uplink at half speed and 7/8 load,
REPS sent 7% of its packets to the slow uplink, against 12% under spraying.
The largest queue was 14 packets against 458. The test checks only the
direction of these results, not the numbers.

## Changing it

`BUF_SIZE`, `EV_W`, `CNT_W` and `TIME_W` are in `reps_pkg`. `NUM_CONN` and
`EVS_SIZE` are parameters of `reps_top` and `reps_engine`. `reps_core` works
for any buffer size up to 255; the modulo in the explore phase is cheapest
when the size is a power of two.
