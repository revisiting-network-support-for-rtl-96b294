// irn_tx_free: IRN's txFree unit, run when the link's transmitter is free for a queue pair.
//
// Chooses the packet the QP sends next:
//  * In loss recovery with a known lost packet (retx_valid), that packet (retx_seq) is
//    retransmitted, and the unit looks ahead in the SACK bitmap (irn_next_lost) for the next
//    lost packet after it, so the following call can retransmit at once. If none is found the
//    pointer moves one past the retransmitted packet and retx_valid drops.
//  * Otherwise a new packet (snd_nxt) is sent if the posted work has one (snd_nxt != end_psn)
//    and BDP-FC allows it: packets in flight, snd_nxt - snd_una, must be below the BDP cap.
//    This also applies during recovery once no lost packet is left, as the paper describes.
//  * If new data is waiting but the cap is reached the result is TX_BLOCKED; with no data it
//    is TX_IDLE. Neither changes the context.
// The effective cap is min(bdp_cap, 128) so that every packet in flight has a SACK bit; that
// clamp is this design's own safeguard. Purely combinational; registered by the caller.
module irn_tx_free
  import irn_pkg::*;
(
  input  req_ctx_t    ctx_i,
  input  psn_t        end_psn,   // one past the last PSN the posted WQEs provide
  input  logic [15:0] bdp_cap,   // packets
  output req_ctx_t    ctx_o,
  output tx_t         tx
);
  psn_t in_flight, retx_off;
  logic cap_ok;
  idx_t la_start;
  logic la_found;
  idx_t la_idx;

  assign in_flight = ctx_i.snd_nxt - ctx_i.snd_una;
  assign cap_ok    = (in_flight < psn_t'(bdp_cap)) && (in_flight < psn_t'(BITMAP_BITS));
  assign retx_off  = ctx_i.retx_seq - ctx_i.snd_una;
  assign la_start  = (retx_off < psn_t'(BITMAP_BITS)) ? idx_t'(retx_off) + idx_t'(1)
                                                       : idx_t'(BITMAP_BITS);

  irn_next_lost u_lookahead (
    .sack_bmp(ctx_i.sack_bmp), .start(la_start), .found(la_found), .idx(la_idx)
  );

  always_comb begin
    ctx_o = ctx_i;
    tx    = '{kind: TX_IDLE, psn: ctx_i.snd_nxt};
    if (ctx_i.in_recovery && ctx_i.retx_valid) begin
      tx = '{kind: TX_RETX, psn: ctx_i.retx_seq};
      if (la_found) begin
        ctx_o.retx_seq   = ctx_i.snd_una + psn_t'(la_idx);
        ctx_o.retx_valid = 1'b1;
      end else begin
        ctx_o.retx_seq   = ctx_i.retx_seq + psn_t'(1);
        ctx_o.retx_valid = 1'b0;
      end
    end else if (ctx_i.snd_nxt != end_psn) begin
      if (cap_ok) begin
        tx            = '{kind: TX_NEW, psn: ctx_i.snd_nxt};
        ctx_o.snd_nxt = ctx_i.snd_nxt + psn_t'(1);
      end else begin
        tx.kind = TX_BLOCKED;
      end
    end
  end
endmodule
