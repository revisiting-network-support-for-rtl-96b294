// irn_receive_data: IRN's receiveData unit, run when a data packet reaches the responder.
//
// The responder no longer drops out-of-order (OOO) packets. Each arrival is recorded in the
// 2-bitmap at offset psn - epsn, with the code {last, arrived} of irn_pkg (middle packet, last
// packet of a message, last packet that also expires a Receive WQE). A find-first-zero over the
// "arrived" bits gives the length n of the run of packets that is now complete from the head; the
// expected PSN advances by n, a popcount over the run's "last" bits gives the MSN increment, and a
// popcount over its "expires WQE" code gives the number of Receive WQEs to expire. Both bitmaps are
// then shifted right by n so that bit 0 again stands for the expected PSN. Completion actions of a
// last packet that arrived early are so held back until every packet before it has arrived, as the
// paper requires.
//
// ACK policy, following the paper: an in-order packet is answered with an ACK carrying the new
// cumulative ack (= expected PSN) and MSN; an OOO packet with a NACK carrying the unchanged
// cumulative ack and the packet's own PSN as a selective ack. This design's choices: a PSN behind
// the expected one (in the half of the sequence space behind epsn) is a duplicate and gets a
// plain ACK with no state change; a PSN at or beyond epsn+128 cannot occur under BDP-FC and is
// dropped without a reply; a repeated OOO packet leaves its code unchanged.
//
// Interface: the context and packet metadata come in, the updated context and the ACK go out.
// Purely combinational; the enclosing engine registers it (one packet per cycle).
module irn_receive_data
  import irn_pkg::*;
(
  input  resp_ctx_t  ctx_i,
  input  psn_t       pkt_psn,
  input  logic       pkt_last,    // last packet of a Write/Send message, or a Read/Atomic request
  input  logic       pkt_wqe,     // with pkt_last: also expires a Receive WQE (Send, Write-with-imm)
  output resp_ctx_t  ctx_o,
  output ack_t       ack_o,
  output logic       ack_valid,
  output idx_t       wqe_expire,  // Receive WQEs to expire now
  output rx_kind_t   kind
);
  psn_t    off;
  logic    in_win, behind;
  bitmap_t arr_set, last_set, arrived, run_mask;
  logic    ffz_found;
  idx_t    ffz_idx, n, msn_inc, wqe_cnt;

  assign off    = pkt_psn - ctx_i.epsn;
  assign in_win = off < psn_t'(BITMAP_BITS);
  assign behind = off[PSN_W-1];

  // Record the arrival (only if not already recorded).
  always_comb begin
    arr_set  = ctx_i.arr_bmp;
    last_set = ctx_i.last_bmp;
    if (in_win && !(ctx_i.arr_bmp[off[IDX_W-2:0]] || ctx_i.last_bmp[off[IDX_W-2:0]])) begin
      arr_set[off[IDX_W-2:0]]  = !pkt_last || pkt_wqe;
      last_set[off[IDX_W-2:0]] = pkt_last;
    end
    arrived = arr_set | last_set;
  end

  irn_ffz #(.WIDTH(BITMAP_BITS), .CHUNK(CHUNK_BITS)) u_ffz (
    .bits(arrived), .found(ffz_found), .idx(ffz_idx)
  );
  // Length of the complete run from the head: the whole window when no packet is missing.
  assign n = ffz_found ? ffz_idx : idx_t'(BITMAP_BITS);

  always_comb begin
    for (int i = 0; i < BITMAP_BITS; i++) run_mask[i] = idx_t'(i) < n;
  end

  irn_popcount #(.WIDTH(BITMAP_BITS), .CHUNK(CHUNK_BITS)) u_pc_msn (
    .bits(last_set & run_mask), .count(msn_inc)
  );
  irn_popcount #(.WIDTH(BITMAP_BITS), .CHUNK(CHUNK_BITS)) u_pc_wqe (
    .bits(last_set & arr_set & run_mask), .count(wqe_cnt)
  );

  always_comb begin
    ctx_o      = ctx_i;
    ack_o      = '{typ: ACK_POS, cum_ack: ctx_i.epsn, sack_psn: pkt_psn, msn: ctx_i.msn};
    ack_valid  = 1'b1;
    wqe_expire = '0;
    if (in_win) begin
      ctx_o.epsn     = ctx_i.epsn + psn_t'(n);
      ctx_o.msn      = ctx_i.msn + msn_t'(msn_inc);
      ctx_o.arr_bmp  = arr_set >> n;
      ctx_o.last_bmp = last_set >> n;
      wqe_expire     = wqe_cnt;
      ack_o.cum_ack  = ctx_o.epsn;
      ack_o.msn      = ctx_o.msn;
      if (off == '0) begin
        kind = RX_INORDER;
      end else begin
        kind      = RX_OOO;
        ack_o.typ = ACK_NACK;
      end
    end else if (behind) begin
      kind = RX_DUP;
    end else begin
      kind      = RX_DROP;
      ack_valid = 1'b0;
    end
  end
endmodule
