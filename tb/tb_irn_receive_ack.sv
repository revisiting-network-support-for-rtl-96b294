// tb_irn_receive_ack: self-checking test of the receiveAck unit.
// Directed sequences walk a requester through a loss: a NACK enters recovery with the cumulative
// ack as first retransmission, later NACKs add SACKs, a cumulative ack beyond the recovery
// sequence ends recovery, and an error NACK performs go-back-N. Then random consistent contexts
// and random ACK/NACK/error-NACK values (including stale cumulative acks) are checked against a
// reference that works with absolute PSN offsets and scans serially for the next lost packet.
// The MSN output must equal the ACK's MSN and be flagged valid exactly when the ACK is not stale.
module tb_irn_receive_ack;
  import irn_pkg::*;

  req_ctx_t ctx, ctx_n;
  ack_t     a;
  logic     entered, exited, msn_valid;
  msn_t     msn_o;
  int checks = 0, failures = 0;
  int n_enter = 0, n_exit = 0, n_gbn = 0, n_stale = 0;

  irn_receive_ack dut (.ctx_i(ctx), .ack_i(a), .ctx_o(ctx_n), .entered(entered), .exited(exited),
                       .msn_o(msn_o), .msn_valid(msn_valid));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s una=%0d nxt=%0d cum=%0d typ=%0d", what, ctx.snd_una, ctx.snd_nxt,
               a.cum_ack, a.typ);
    end
  endtask

  // Reference
  task automatic run_one();
    int       inflight, adv, soff, r0, nq, hi, start;
    bit       rec, ext_exit;
    req_ctx_t e;
    bit       e_ent, e_ex, stale;
    #1;
    e        = ctx;
    inflight = int'(psn_t'(ctx.snd_nxt - ctx.snd_una));
    adv      = int'(psn_t'(a.cum_ack - ctx.snd_una));
    stale    = adv > inflight;
    if (stale) begin adv = 0; n_stale++; end
    e.snd_una  = ctx.snd_una + psn_t'(adv);
    e.sack_bmp = ctx.sack_bmp >> adv;
    if (adv > 0) e.rto_extended = 0;
    soff = int'(psn_t'(a.sack_psn - e.snd_una));
    if (a.typ == ACK_NACK && soff < inflight - adv && soff < 128) e.sack_bmp[soff] = 1;
    // exit when cum ack (new una) > recovery_seq
    ext_exit = ctx.in_recovery &&
               (int'(psn_t'(e.snd_una - ctx.recovery_seq)) inside {[1 : 24'h7FFFFF]});
    rec   = ctx.in_recovery && !ext_exit;
    e_ent = 0;
    e_ex  = ext_exit;
    if (a.typ == ACK_ERR) begin
      e.snd_nxt = e.snd_una; e.sack_bmp = '0; e.in_recovery = 0; e.retx_valid = 0;
      e_ex = ctx.in_recovery;
      n_gbn++;
    end else if (a.typ == ACK_NACK && !rec) begin
      e.in_recovery = 1; e.recovery_seq = ctx.snd_nxt - 1; e.retx_seq = e.snd_una;
      e.retx_valid = 1; e_ent = 1; e_ex = 0;
    end else if (rec) begin
      r0    = int'(psn_t'(ctx.retx_seq - e.snd_una));
      start = (r0 >= 128) ? 0 : r0;     // pointer behind the head (or far off) restarts at 0
      hi = -1;
      for (int i = 0; i < 128; i++) if (e.sack_bmp[i]) hi = i;
      nq = -1;
      for (int q = start; q < hi; q++) if (nq < 0 && !e.sack_bmp[q]) nq = q;
      e.retx_seq   = e.snd_una + psn_t'((nq >= 0) ? nq : start);
      e.retx_valid = nq >= 0;
    end else begin
      e.in_recovery = 0; e.retx_valid = 0;
    end
    chk(ctx_n == e, "context");
    chk(entered == e_ent, "entered");
    chk(exited == e_ex, "exited");
    chk(msn_o == a.msn && msn_valid == !stale, "msn passed on unless stale");
    n_enter += int'(e_ent);
    n_exit  += int'(e_ex);
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Directed: 20 packets 1000..1019 in flight, 1003 lost.
    ctx = '0; ctx.snd_una = 1000; ctx.snd_nxt = 1020;
    a = '{typ: ACK_POS, cum_ack: 1003, sack_psn: 0, msn: 0};
    run_one(); ctx = ctx_n;
    chk(ctx.snd_una == 1003 && !ctx.in_recovery, "cumulative ack advances");
    a = '{typ: ACK_NACK, cum_ack: 1003, sack_psn: 1004, msn: 0};
    run_one(); ctx = ctx_n;
    chk(entered && ctx.in_recovery && ctx.retx_seq == 1003 && ctx.retx_valid &&
        ctx.recovery_seq == 1019 && ctx.sack_bmp[1] && !ctx.sack_bmp[0], "NACK enters recovery");
    a = '{typ: ACK_NACK, cum_ack: 1003, sack_psn: 1007, msn: 0};
    run_one(); ctx = ctx_n;
    chk(ctx.sack_bmp[4] && ctx.retx_seq == 1003 && ctx.retx_valid, "second SACK recorded");
    a = '{typ: ACK_POS, cum_ack: 1019, sack_psn: 0, msn: 0};
    run_one(); ctx = ctx_n;
    chk(ctx.in_recovery && !exited, "cum ack equal to recovery seq keeps recovery");
    a = '{typ: ACK_POS, cum_ack: 1020, sack_psn: 0, msn: 0};
    run_one(); ctx = ctx_n;
    chk(!ctx.in_recovery && exited && ctx.sack_bmp == '0, "cum ack beyond recovery seq exits");
    ctx.snd_nxt = 1030; ctx.sack_bmp[5] = 1;
    a = '{typ: ACK_ERR, cum_ack: 1022, sack_psn: 0, msn: 0};
    run_one(); ctx = ctx_n;
    chk(ctx.snd_una == 1022 && ctx.snd_nxt == 1022 && ctx.sack_bmp == '0, "error NACK: go-back-N");
    for (int n = 0; n < 30000; n++) begin
      int inflight, r;
      ctx.snd_una = ($urandom_range(0, 1) == 0) ? psn_t'($urandom) : psn_t'(32'hFFFFFF - $urandom_range(0, 150));
      inflight    = $urandom_range(0, 128);
      ctx.snd_nxt = ctx.snd_una + psn_t'(inflight);
      ctx.sack_bmp = '0;
      for (int i = 1; i < inflight; i++) ctx.sack_bmp[i] = $urandom_range(0, 3) == 0;
      ctx.in_recovery  = 1'($urandom_range(0, 1));
      r                = (inflight > 0) ? $urandom_range(0, inflight) : 0;
      ctx.retx_seq     = ctx.snd_una + psn_t'(r);
      ctx.retx_valid   = 1'($urandom_range(0, 1));
      ctx.recovery_seq = ctx.snd_una + psn_t'($urandom_range(0, inflight)) - 1;
      ctx.rto_extended = 1'($urandom_range(0, 1));
      a.typ      = ack_type_t'($urandom_range(0, 9) == 0 ? 2 : $urandom_range(0, 1));
      a.cum_ack  = ctx.snd_una + psn_t'($urandom_range(0, inflight + 4)) - 2;
      a.sack_psn = a.cum_ack + psn_t'($urandom_range(0, inflight + 2));
      a.msn      = msn_t'($urandom);
      run_one();
    end
    chk(n_enter > 0 && n_exit > 0 && n_gbn > 0 && n_stale > 0, "coverage");
    $display("enter=%0d exit=%0d gbn=%0d stale=%0d", n_enter, n_exit, n_gbn, n_stale);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
