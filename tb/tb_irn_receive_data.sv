// tb_irn_receive_data: self-checking test of the receiveData unit.
// A stream of messages (1 to 40 packets, some ending with a Receive-WQE expiry) is delivered
// with random reordering inside a 100-packet window, random duplicates, and a few PSNs far ahead
// of the window. The testbench keeps the responder context in a register, feeding the unit's
// updated context back on every packet, and checks each result against a reference model that
// stores one code per PSN in an associative array and walks the in-order run packet by packet.
// The PSN space starts 60 below its wrap point so that the 24-bit wrap is crossed.
module tb_irn_receive_data;
  import irn_pkg::*;

  resp_ctx_t ctx, ctx_n;
  psn_t      psn;
  logic      last, wqe;
  ack_t      ack;
  logic      ack_valid;
  idx_t      wqe_expire;
  rx_kind_t  kind;
  int checks = 0, failures = 0;
  int n_inorder = 0, n_ooo = 0, n_dup = 0, n_drop = 0, max_run = 0;

  irn_receive_data dut (
    .ctx_i(ctx), .pkt_psn(psn), .pkt_last(last), .pkt_wqe(wqe),
    .ctx_o(ctx_n), .ack_o(ack), .ack_valid(ack_valid), .wqe_expire(wqe_expire), .kind(kind)
  );

  // Reference model
  int unsigned ref_epsn, ref_msn;
  int          code [int unsigned];  // 1 middle, 2 last, 3 last+WQE
  int          total_wqe, exp_wqe_total;

  // Stimulus: per-PSN metadata
  int          pkt_code [int unsigned];

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s psn=%0d epsn=%0d", what, psn, ref_epsn);
    end
  endtask

  task automatic deliver(input int unsigned p);
    int unsigned off;
    int          e_wqe, run;
    rx_kind_t    e_kind;
    ack_type_t   e_typ;
    psn  = psn_t'(p);
    last = pkt_code[p] >= 2;
    wqe  = pkt_code[p] == 3;
    #1;
    off   = (p - ref_epsn) & 32'hFFFFFF;
    e_wqe = 0;
    run   = 0;
    if (off < 128) begin
      if (!code.exists(p & 32'hFFFFFF)) code[p & 32'hFFFFFF] = pkt_code[p];
      e_kind = (off == 0) ? RX_INORDER : RX_OOO;
      e_typ  = (off == 0) ? ACK_POS : ACK_NACK;
      while (code.exists(ref_epsn)) begin
        if (code[ref_epsn] >= 2) ref_msn = (ref_msn + 1) & 32'hFFFFFF;
        if (code[ref_epsn] == 3) e_wqe++;
        code.delete(ref_epsn);
        ref_epsn = (ref_epsn + 1) & 32'hFFFFFF;
        run++;
      end
    end else if (off >= 24'h800000) begin
      e_kind = RX_DUP; e_typ = ACK_POS;
    end else begin
      e_kind = RX_DROP; e_typ = ACK_POS;
    end
    if (run > max_run) max_run = run;
    total_wqe += e_wqe;
    chk(kind == e_kind, "kind");
    chk(ack_valid == (e_kind != RX_DROP), "ack_valid");
    if (e_kind != RX_DROP) begin
      chk(ack.typ == e_typ, "ack type");
      chk(ack.cum_ack == psn_t'(ref_epsn), "cum_ack");
      chk(ack.msn == msn_t'(ref_msn), "msn");
      chk(ack.typ != ACK_NACK || ack.sack_psn == psn_t'(p), "sack psn");
    end
    chk(wqe_expire == idx_t'(e_wqe), "wqe_expire");
    case (e_kind)
      RX_INORDER: n_inorder++;
      RX_OOO:     n_ooo++;
      RX_DUP:     n_dup++;
      default:    n_drop++;
    endcase
    ctx = ctx_n;
    #1;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned base, total, p, order[$];
    int          nmsg;
    base  = 32'hFFFFFF - 59;
    total = 0;
    nmsg  = 0;
    exp_wqe_total = 0;
    // Build messages
    while (total < 3000) begin
      automatic int len = ($urandom_range(0, 1) == 0) ? 1 : $urandom_range(2, 40);
      automatic bit w = $urandom_range(0, 2) == 0;
      for (int i = 0; i < len; i++)
        pkt_code[base + total + i] = (i == len - 1) ? (w ? 3 : 2) : 1;
      if (w) exp_wqe_total++;
      total += len;
      nmsg++;
    end
    // Delivery order: shuffle within blocks of up to 100 packets
    for (int b = 0; b < total; b += 100) begin
      int unsigned blk[$];
      blk.delete();
      for (int i = b; i < b + 100 && i < total; i++) blk.push_back(base + i);
      if ($urandom_range(0, 3) != 0) blk.shuffle();
      foreach (blk[i]) order.push_back(blk[i]);
    end
    ctx = '{epsn: psn_t'(base), msn: msn_t'(7), arr_bmp: '0, last_bmp: '0};
    ref_epsn = base; ref_msn = 7; total_wqe = 0;
    last = 0; wqe = 0; psn = '0;
    #1;
    foreach (order[i]) begin
      p = order[i];
      deliver(p);
      if ($urandom_range(0, 19) == 0) deliver(p);                    // duplicate
      if ($urandom_range(0, 99) == 0) begin                           // far ahead: dropped
        pkt_code[ref_epsn + 500 + 32'h4000000] = 1;   // same 24-bit PSN, own key
        deliver(ref_epsn + 500 + 32'h4000000);
      end
    end
    chk(ref_epsn == ((base + total) & 32'hFFFFFF), "all delivered");
    chk(ctx.epsn == psn_t'(base + total), "final epsn");
    chk(ctx.msn == msn_t'(7 + nmsg), "final msn");
    chk(total_wqe == exp_wqe_total, "total wqe expiries");
    chk(ctx.arr_bmp == '0 && ctx.last_bmp == '0, "bitmaps empty");
    chk(n_inorder > 0 && n_ooo > 0 && n_dup > 0 && n_drop > 0 && max_run > 20, "coverage");
    $display("inorder=%0d ooo=%0d dup=%0d drop=%0d longest run=%0d", n_inorder, n_ooo, n_dup,
             n_drop, max_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
