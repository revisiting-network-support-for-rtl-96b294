# IRN transport engine: loss-tolerant RoCE transport logic in SystemVerilog

RoCE NICs inherited InfiniBand's transport. That transport assumes packets are never lost: an
out-of-order arrival is discarded and NACKed, and the sender answers with go-back-N. Deployments
therefore make Ethernet lossless with Priority Flow Control (PFC), and PFC brings head-of-line
blocking, congestion spreading and deadlocks. IRN ("improved RoCE NIC", Mittal et al.,
SIGCOMM 2018) removes the need for PFC with two small changes to the NIC:

1. **Selective retransmission.** The receiver keeps out-of-order packets. It places them directly
   in application memory and records them in a bitmap. Every out-of-order arrival is answered
   with a NACK that carries the cumulative ack and the PSN that arrived, which acts as a one-packet
   SACK. The sender records SACKs in its own bitmap. It then retransmits only the packets the
   bitmap shows as lost.
2. **BDP flow control (BDP-FC).** A queue pair (QP) may have at most a fixed number of packets in
   flight. That number is the network's bandwidth-delay product divided by the MTU, about 110
   packets for a 40 Gb/s datacenter fabric. The cap keeps queues short. It also bounds how far
   ahead of the head any packet can be, so 128-bit bitmaps are enough for the state.

This repository holds RTL for the per-packet logic that these changes add. It covers the four
event handlers, the bitmap operations they are built from, and an engine that runs them for
2048 QPs. The rest of a RoCE NIC is assumed to exist around it: header parsing, DMA, WQE/CQE
handling and timers.

## Files

| file | content |
|---|---|
| `rtl/irn_pkg.sv` | widths, default values, context and message types |
| `rtl/irn_ffz.sv` | find-first-zero over a 128-bit bitmap, in 32-bit chunks |
| `rtl/irn_popcount.sv` | population count, in 32-bit chunks |
| `rtl/irn_next_lost.sv` | "next lost packet" search of a SACK bitmap (helper) |
| `rtl/irn_receive_data.sv` | **receiveData**: data packet arrives at the responder |
| `rtl/irn_tx_free.sv` | **txFree**: link is free, choose the PSN to send |
| `rtl/irn_receive_ack.sv` | **receiveAck**: ACK/NACK arrives at the requester |
| `rtl/irn_timeout.sv` | **timeout**: retransmission timer expired |
| `rtl/irn_ctx_store.sv` | per-QP context memory |
| `rtl/irn_transport.sv` | top: the engine |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Per-QP state

The handlers are pure functions: each takes the QP context and the event's metadata and returns
an updated context and a result. The whole design therefore comes down to the two context
records in `irn_pkg`.

**Requester context (`req_ctx_t`, 227 bits)**

| field | bits | meaning |
|---|---|---|
| `snd_una` | 24 | oldest unacknowledged PSN, i.e. the last cumulative ack received |
| `snd_nxt` | 24 | next new PSN |
| `retx_seq` | 24 | next retransmission candidate |
| `recovery_seq` | 24 | last new packet sent before loss recovery began |
| `in_recovery`, `retx_valid`, `rto_extended` | 3 | flags |
| `sack_bmp` | 128 | bit *i* set = PSN `snd_una + i` has been selectively acked |

**Responder context (`resp_ctx_t`, 304 bits)**

| field | bits | meaning |
|---|---|---|
| `epsn` | 24 | expected PSN (the cumulative ack it sends) |
| `msn` | 24 | message sequence number |
| `arr_bmp`, `last_bmp` | 2 x 128 | the "2-bitmap", bit *i* = PSN `epsn + i` |

Both bitmaps are kept with bit 0 at the head: `snd_una` on one side, `epsn` on the other. When
the head advances, the bitmap is shifted right by the same amount. Sequence numbers wrap modulo
2^24, and all comparisons are made on differences.

### The 2-bitmap

Some completion work hangs on the *last* packet of a message. The responder's MSN advances
(used by the requester to retire its WQEs), and for Send and Write-with-immediate a Receive WQE
expires and a CQE is produced. With out-of-order delivery, that last packet may arrive before
the packets in front of it, so the work must wait until the gap closes. The responder therefore
keeps two bits per PSN:

| `{last, arr}` | meaning |
|---|---|
| 00 | not arrived |
| 01 | arrived, not the last packet of a message |
| 10 | last packet of a message: bump MSN |
| 11 | last packet that also expires a Receive WQE |

A Read or Atomic request also bumps the MSN, so it is presented as a one-packet message (code 10).

## The four handlers

### receiveData (responder)

For a packet with PSN *p*, the offset is `off = p - epsn`:

* `off < 128`: if the PSN has no code yet, its code is written. Find-first-zero over
  `arr | last` then gives *n*, the length of the run now complete from the head. If the packet
  filled the head gap, *n* can be large: it covers every packet that had been waiting behind it.
  * `epsn` advances by *n*.
  * `msn` advances by popcount(`last` over the run).
  * `wqe_expire` = popcount(`last & arr` over the run).
  * Both bitmaps are shifted right by *n*.
  * `off == 0` is answered with an ACK carrying the new `epsn` and `msn`. Any other offset is
    answered with a NACK carrying the unchanged `epsn` and the arriving PSN as the SACK.
* `off` in the half of the sequence space behind `epsn`: the packet is a duplicate. It is
  re-acked and the state is not changed.
* otherwise (ahead by 128 or more): the packet is discarded with no reply. BDP-FC keeps this
  from happening.

### receiveAck (requester)

The steps, in order:

1. A cumulative ack in `(snd_una, snd_nxt]` moves `snd_una` and shifts `sack_bmp` by the same
   amount. Any other value is stale and is ignored. Progress also clears `rto_extended`, so the
   restarted timer uses the short timeout.
2. A NACK sets the SACK bit of its PSN, if that packet is in flight.
3. In recovery, a cumulative ack greater than `recovery_seq` ends recovery.
4. A NACK outside recovery starts it:
   * `recovery_seq = snd_nxt - 1`;
   * `retx_seq` = the cumulative ack;
   * `retx_valid = 1`.
5. While recovery continues, the candidate is refreshed. The search starts at the later of
   `retx_seq` and `snd_una`, and the first unacked packet below the highest SACKed packet becomes
   the new candidate; `retx_valid` says whether one exists.
6. An error NACK (e.g. receiver-not-ready) falls back to go-back-N: `snd_nxt = snd_una`, the
   bitmap is cleared, and recovery ends.
7. The responder's MSN in the ACK is passed on so that the NIC can retire the WQEs of completed
   messages. It is flagged invalid when the ACK was stale.

### txFree (requester)

* **In recovery with `retx_valid` set:** `retx_seq` is retransmitted. The unit then looks
  ahead in the bitmap for the next lost packet after it, so that lost packets go out
  back-to-back. If none is left, `retx_seq` moves one past the packet just sent and `retx_valid`
  clears.
* **Otherwise**, if the posted work has another packet (`snd_nxt != end_psn`), a new packet is
  sent when `snd_nxt - snd_una < min(bdp_cap, 128)`. This also happens during recovery once no
  known loss is left. If the cap is reached the result is `TX_BLOCKED`.
* **With nothing to send** the result is `TX_IDLE`.

### timeout (requester)

The timer normally runs with RTO_low (100 µs). That short value is meant only for QPs with at
most *N* = 3 packets in flight, such as single-packet RPCs, which SACKs cannot rescue.

* If the timer expired under RTO_low with more than *N* packets in flight, the unit only sets
  `rto_extended` and asks for the timer to be re-armed with RTO_high (320 µs).
* Otherwise it executes the timeout action: the QP enters recovery from `snd_una`, just as for a
  NACK, and the timer returns to RTO_low.
* An expiry with nothing in flight is ignored.

### A loss, step by step

Packets 100..119 are in flight and 103 is lost.

1. 104 arrives and is answered with NACK(cum 103, sack 104). The requester enters recovery with
   `recovery_seq = 119` and candidate 103.
2. 105..119 each produce a NACK with cum 103, so bits 2..16 of the requester's bitmap get set.
   The candidate stays 103.
3. txFree resends 103. The look-ahead finds no other hole below the highest SACK, so `retx_seq`
   becomes 104, invalid. If the posted work has more data, new packets 120, 121, ... follow,
   within the BDP cap.
4. 103 arrives. The responder's find-first-zero sees 103..119 all present, so `epsn` jumps to 120
   and the MSN and WQE counts of the whole run are released at once. ACK(cum 120) then ends
   recovery, because 120 > 119.

If the retransmitted 103 is lost again, nothing points at it any more, and the QP waits for the
timer. The timeout action restarts recovery at `snd_una`.

## Bitmap operations

The handlers need three operations:

* **find-first-zero**: the next expected PSN, and the next lost packet;
* **popcount**: the MSN increment and the WQE expiries;
* **shift**: to advance a head.

Find-first-zero and popcount split the 128-bit word into four 32-bit chunks that work in
parallel. Each chunk of find-first-zero yields an "all ones" flag and a local index, and the
lowest chunk that is not full wins. The popcount sums four chunk counts.
`irn_next_lost` builds the "lost" test from these parts. It forces the bits below the start
index to one, runs find-first-zero, and accepts the result only if it lies below the highest set
bit, found with a priority encoder.

## The engine (`irn_transport`)

```
 rx_* ─▶ [resp ctx table] ─▶ receiveData ─▶ ack, wqe_expire      (1 packet / cycle)
 ain_* ─┐
 tmr_* ─┼▶ priority ─▶ [req ctx table] ─▶ receiveAck | timeout | txFree ─▶ ainr_*, tmor_*, txr_*
 txf_* ─┘  ACK > timer > Tx-free                                 (1 event / cycle)
```

* **Two tables.** The responder and requester contexts of all `NUM_QPS` (default 2048) QPs sit in
  two `irn_ctx_store` arrays of 304 and 227 bits per entry, about 1.09 Mbit together. Each has one
  combinational read port and one synchronous write port.
* **One cycle per event.** An accepted event reads its QP's context, passes it through the
  handler and writes the result back at the same clock edge. Its result appears on the outputs
  in the next cycle. No two events are ever in progress at once on one side, so back-to-back
  events to the same QP need no forwarding.
* **Priority on the transmit side.** The three transmit-side events share the requester table,
  so at most one is taken per cycle. A lower-priority request sees its `*_ready` low and must
  hold.
* **Handshakes.** Every input is valid/ready. Every result is a one-cycle valid pulse with no
  back-pressure.
* **Reset.** After reset both tables are cleared at one QP per cycle. All `*_ready` outputs stay
  low, and `init_done` with them, for `NUM_QPS` cycles. Every QP then starts at PSN 0.
* **Timer.** The per-QP retransmission timer lives outside. The engine takes expiries on `tmr_*`
  and returns, with each timeout result, the value to re-arm with (`tmor_rearm`). The NIC is
  expected to restart the timer with RTO_low on every cumulative-ack advance.
* **WQE retirement.** Each receiveAck result carries the responder's MSN (`ainr_msn`, with
  `ainr_msn_valid`). Each receiveData result carries the number of Receive WQEs to expire
  (`wqe_expire`).

### Configuration register (`cfg`, shared by all QPs)

The register resets to the published values. It is written whole through `cfg_wdata` with
`cfg_we`, and a new value takes effect in the next cycle. The timeouts are only passed on to the
external timer, so their unit is whatever that timer counts.

| field | width | reset value | meaning |
|---|---|---|---|
| `bdp_cap` | 16 | 110 | packets in flight per QP |
| `n_low` | 8 | 3 | RTO_low applies with at most this many packets in flight |
| `rto_low` | 16 | 100 | short timeout, µs |
| `rto_high` | 16 | 320 | long timeout, µs |

Compile-time sizes live in `irn_pkg`: `PSN_W` = 24, `BITMAP_BITS` = 128, `CHUNK_BITS` = 32.
`NUM_QPS` is a parameter of the top.

## What the RTL covers and where it departs from the published design

The published work synthesized the four handlers with high-level synthesis as stand-alone blocks.
The context was streamed in and out, and the NIC was trusted for the rest. The handlers here
follow the published rules. The engine around them, the tables and the timing are this design's
own.

Differences and open points:

* **No pipelining and no cycle targets.** The published blocks took up to 16.5 ns (receiveData)
  and were not pipelined. Here each handler is combinational logic between two registers, and
  the engine accepts one event per cycle on each side. At any clock of 45.45 MHz or more, that
  matches or beats the slowest published block's 45.45 Mpps. No clock has been targeted or
  timed.
* **Three flags, not four.** The published state budget has four flag bits; three are used here.
* **The retransmit-pointer rule is this design's reading.** The text defines when a packet
  counts as lost, but not how the candidate moves between ACKs. Here the pointer never moves
  back over packets already retransmitted, so a lost retransmission is recovered only by the
  timeout.
* **"N packets in flight" means at most N.** The text does not say whether a QP with exactly N
  packets in flight uses RTO_low; this design says yes.
* **Reads and Atomics need extra contexts.** For a Read, the requester tracks response packets
  with a receive bitmap, and the responder runs txFree/receiveAck/timeout for its responses.
  These are the same handlers with further contexts (five 128-bit bitmaps per QP in total); the
  engine instantiates one requester and one responder context per QP. The responder's
  Read-timeout timer and the Read-WQE-buffer tracking variable are not included.
* **Left to the surrounding NIC:** header extensions (RETH in every packet, `recv_WQE_SN`,
  `read_WQE_SN`), WQE matching, premature CQEs, end-to-end credits and shared receive queues, and
  dropping an out-of-sequence packet that would cause an error NACK. They appear here only as
  metadata inputs: `rx_last` and `rx_wqe` for receiveData, and `txf_end_psn`, the PSN just past
  the posted work, for txFree.
* **No QP set-up port:** every QP starts at PSN 0 after reset.
* **100 Gb/s needs wider bitmaps.** At 100 Gb/s the published default fabric has a BDP of about
  300 KB, roughly 293 packets. That does not fit 128-bit bitmaps; `BITMAP_BITS` would have to
  become 512.
* **Many context bits pass straight through.** Synthesis finds many constant or
  pass-through output bits for txFree and timeout. That is expected: most context fields leave
  these units unchanged.

## Verification

Each module has a testbench in `tb/` that prints `TB_RESULT checks=N failures=M`.

* `tb_irn_ffz`, `tb_irn_popcount`: directed and random vectors against bit-serial reference
  loops.
* `tb_irn_receive_data`: 3000 packets of random messages, delivered in shuffled order with
  duplicates and far-ahead PSNs. The PSN starts 60 below its wrap point. Each result is checked
  against a model that keeps one code per PSN in an associative array.
* `tb_irn_tx_free`, `tb_irn_receive_ack`, `tb_irn_timeout`: directed loss scenarios (BDP boundary
  at 110, look-ahead order, recovery entry and exit, go-back-N, extension) plus 20 000–30 000
  random consistent contexts each, against independent reference code.
* `tb_irn_ctx_store`: clearing time and result, writes ignored while clearing, read-during-write.
* `tb_irn_transport`: the full engine at its default size, looped back through a channel model
  that delays packets 300–380 cycles, keeps each QP in order, and drops 2% of data packets and
  1% of ACKs. It also injects targeted losses and error NACKs. Six QPs (0, 1, 7, 1000, 2046,
  2047) carry about 3000 packets of mixed messages. The test checks:
  * one-cycle result latency;
  * in-order new PSNs;
  * the BDP cap of 110 packets, which is reached;
  * monotonic cumulative acks;
  * the MSN passed on with each ACK result;
  * the configuration register's reset values and a write to it;
  * final MSN and WQE totals.

  It also requires that each mechanism happened at least once: out-of-order and duplicate
  arrivals, recovery entry and exit, retransmission, look-ahead, BDP-FC stall, extension to
  RTO_high, timeout recovery under both timeouts, go-back-N, and a Tx-free request held by
  priority. It takes about 24 000 cycles and well under a second.
* `tb_irn_incast`: the lossy-incast situation IRN is designed for. Sixteen QPs of the full-size
  engine start at once, each with a transfer of at least 200 packets to one receiver. All data
  crosses one switch port, modelled as a FIFO that forwards a packet every 4 cycles and
  tail-drops once 48 packets are queued. There is no PFC and no congestion control, so roughly
  half the first transmissions are lost. The test checks that every transfer still completes
  with the right MSN and WQE totals, under the same per-event checks as above. It prints each
  transfer's completion time. With Verilator's default seed a run has about 3000 drops and
  26 recovery episodes, and lasts about 48 000 cycles; other seeds differ.

Running one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/irn_pkg.sv tb/tb_irn_transport.sv --top-module tb_irn_transport -o sim
./obj_dir/sim
```

Replace `tb_irn_transport` by any other testbench name. Every testbench builds with no warnings
at Verilator's default warning level. The RTL is plain synthesizable
SystemVerilog-2017. The only assertions sit in the top and are guarded by `ifndef SYNTHESIS`.

## Changing it

* **More or fewer QPs:** set `NUM_QPS` on `irn_transport`.
* **Larger bitmaps**, e.g. for 100 Gb/s: change `BITMAP_BITS` in `irn_pkg`. The chunked units
  scale with it.
* **Runtime tuning:** BDP cap, N and the two timeouts sit in the configuration register and can
  change at run time. The reset values are the `*_DEFAULT` constants in `irn_pkg`.
* **Pipelining:** a pipelined version would need forwarding between events of the same QP,
  which the one-cycle read-modify-write avoids today.
