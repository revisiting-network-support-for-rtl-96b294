// irn_receive_ack: IRN's receiveAck unit, run when an ACK or NACK reaches the requester.
//
// 1. Cumulative ack: if cum_ack lies in (snd_una, snd_nxt] the head advances to it and the SACK
//    bitmap is shifted right by the same amount; an older or impossible value is ignored.
//    Progress also returns the timer to RTO_low (rto_extended cleared).
// 2. Selective ack: a NACK marks its sack_psn in the bitmap if that packet is in flight.
// 3. Recovery exit: in loss recovery, a cumulative ack beyond recovery_seq ends it.
// 4. Recovery entry: a NACK outside recovery starts it. recovery_seq becomes the last new packet
//    sent (snd_nxt - 1) and the first retransmission is the cumulative ack itself.
// 5. Still in recovery: the retransmit pointer is refreshed. From max(retx_seq, snd_una) the next
//    unacked packet below the highest SACKed one (irn_next_lost) becomes the candidate, and
//    retx_valid says whether one exists. Packets already retransmitted (behind retx_seq) are not
//    chosen again; a lost retransmission is left to the timeout.
// 6. An error NACK (ACK_ERR, e.g. receiver not ready) does go-back-N: snd_nxt returns to the
//    cumulative ack, the bitmap is cleared and recovery ends.
// 7. The responder's MSN from the ACK is passed on (msn_o) so that the NIC can retire the WQEs of
//    completed messages; msn_valid is low for a stale ACK, whose MSN may be out of date.
// Steps 1-4 and 6 follow the paper; the pointer refresh rule in step 5 and the window checks are
// this design's reading of it. Purely combinational; registered by the caller.
module irn_receive_ack
  import irn_pkg::*;
(
  input  req_ctx_t ctx_i,
  input  ack_t     ack_i,
  output req_ctx_t ctx_o,
  output logic     entered,   // loss recovery entered
  output logic     exited,    // loss recovery left
  output msn_t     msn_o,     // responder's MSN, for WQE retirement
  output logic     msn_valid  // the ACK was not stale
);
  psn_t    in_flight, adv, una_n, soff, rec_gap, retx_off;
  logic    adv_ok;
  bitmap_t bmp_n;
  idx_t    start;
  logic    nl_found;
  idx_t    nl_idx;
  logic    still_rec;

  assign in_flight = ctx_i.snd_nxt - ctx_i.snd_una;
  assign adv       = ack_i.cum_ack - ctx_i.snd_una;
  assign adv_ok    = adv <= in_flight;
  assign una_n     = adv_ok ? ack_i.cum_ack : ctx_i.snd_una;
  assign msn_o     = ack_i.msn;
  assign msn_valid = adv_ok;
  assign soff      = ack_i.sack_psn - una_n;

  always_comb begin
    bmp_n = adv_ok ? (ctx_i.sack_bmp >> adv) : ctx_i.sack_bmp;
    if (ack_i.typ == ACK_NACK && soff < (ctx_i.snd_nxt - una_n) && soff < psn_t'(BITMAP_BITS))
      bmp_n[soff[IDX_W-2:0]] = 1'b1;
  end

  // Cumulative ack greater than the recovery sequence: una_n - 1 >= recovery_seq.
  assign rec_gap   = una_n - ctx_i.recovery_seq;
  assign still_rec = ctx_i.in_recovery && !(rec_gap != '0 && !rec_gap[PSN_W-1]);

  assign retx_off = ctx_i.retx_seq - una_n;
  assign start    = (retx_off[PSN_W-1] || retx_off >= psn_t'(BITMAP_BITS)) ? idx_t'(0)
                                                                          : idx_t'(retx_off);

  irn_next_lost u_refresh (
    .sack_bmp(bmp_n), .start(start), .found(nl_found), .idx(nl_idx)
  );

  always_comb begin
    ctx_o          = ctx_i;
    ctx_o.snd_una  = una_n;
    ctx_o.sack_bmp = bmp_n;
    entered        = 1'b0;
    exited         = ctx_i.in_recovery && !still_rec;
    if (adv_ok && adv != '0) ctx_o.rto_extended = 1'b0;
    if (ack_i.typ == ACK_ERR) begin
      ctx_o.snd_nxt     = una_n;
      ctx_o.sack_bmp    = '0;
      ctx_o.in_recovery = 1'b0;
      ctx_o.retx_valid  = 1'b0;
      exited            = ctx_i.in_recovery;
    end else if (ack_i.typ == ACK_NACK && !still_rec) begin
      ctx_o.in_recovery  = 1'b1;
      ctx_o.recovery_seq = ctx_i.snd_nxt - psn_t'(1);
      ctx_o.retx_seq     = una_n;
      ctx_o.retx_valid   = 1'b1;
      entered            = 1'b1;
      exited             = 1'b0;
    end else if (still_rec) begin
      ctx_o.retx_seq   = una_n + (nl_found ? psn_t'(nl_idx) : psn_t'(start));
      ctx_o.retx_valid = nl_found;
    end else begin
      ctx_o.in_recovery = 1'b0;
      ctx_o.retx_valid  = 1'b0;
    end
  end
endmodule
