// tb_irn_tx_free: self-checking test of the txFree unit.
// Random but consistent requester contexts (PSNs near and across the 24-bit wrap, 0..128 packets
// in flight, random SACK patterns, in or out of loss recovery) are applied together with random
// end-of-data PSNs and BDP caps. A reference written over a list of SACKed offsets decides what
// should be sent and where the look-ahead should move the retransmit pointer; the unit's output
// and updated context are compared with it. Directed cases cover the BDP-FC boundary
// (in flight = cap - 1 and = cap) and the cap of 110 packets used by default.
module tb_irn_tx_free;
  import irn_pkg::*;

  req_ctx_t    ctx, ctx_n;
  psn_t        end_psn;
  logic [15:0] cap;
  tx_t         tx;
  int checks = 0, failures = 0;
  int n_kind [4];

  irn_tx_free dut (.ctx_i(ctx), .end_psn(end_psn), .bdp_cap(cap), .ctx_o(ctx_n), .tx(tx));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s una=%0d nxt=%0d retx=%0d", what, ctx.snd_una, ctx.snd_nxt, ctx.retx_seq);
    end
  endtask

  function automatic bit sacked_above(input req_ctx_t c, input int q);
    for (int s = q + 1; s < 128; s++) if (c.sack_bmp[s]) return 1;
    return 0;
  endfunction

  task automatic run_one();
    int inflight, roff, lim, nq;
    req_ctx_t e;
    tx_kind_t ek;
    psn_t     ep;
    #1;
    inflight = int'(psn_t'(ctx.snd_nxt - ctx.snd_una));
    roff     = int'(psn_t'(ctx.retx_seq - ctx.snd_una));
    lim      = (int'(cap) < 128) ? int'(cap) : 128;
    e  = ctx;
    ep = ctx.snd_nxt;
    if (ctx.in_recovery && ctx.retx_valid) begin
      ek = TX_RETX; ep = ctx.retx_seq;
      nq = -1;
      for (int q = roff + 1; q < 128; q++)
        if (nq < 0 && !ctx.sack_bmp[q] && sacked_above(ctx, q)) nq = q;
      if (nq >= 0) begin e.retx_seq = ctx.snd_una + psn_t'(nq); e.retx_valid = 1; end
      else begin e.retx_seq = ctx.retx_seq + 1; e.retx_valid = 0; end
    end else if (ctx.snd_nxt != end_psn) begin
      if (inflight < lim) begin ek = TX_NEW; e.snd_nxt = ctx.snd_nxt + 1; end
      else ek = TX_BLOCKED;
    end else ek = TX_IDLE;
    chk(tx.kind == ek, "kind");
    chk(ek == TX_IDLE || ek == TX_BLOCKED || tx.psn == ep, "psn");
    chk(ctx_n == e, "context");
    n_kind[ek]++;
  endtask

  function automatic req_ctx_t rand_ctx();
    req_ctx_t c;
    int inflight, r;
    c.snd_una = ($urandom_range(0, 1) == 0) ? psn_t'($urandom) : psn_t'(32'hFFFFFF - $urandom_range(0, 150));
    inflight  = $urandom_range(0, 128);
    c.snd_nxt = c.snd_una + psn_t'(inflight);
    c.sack_bmp = '0;
    for (int i = 1; i < inflight; i++) c.sack_bmp[i] = $urandom_range(0, 2) == 0;
    c.in_recovery  = 1'($urandom_range(0, 1));
    r              = (inflight > 0) ? $urandom_range(0, inflight - 1) : 0;
    c.retx_seq     = c.snd_una + psn_t'(r);
    c.retx_valid   = $urandom_range(0, 3) != 0;
    c.recovery_seq = c.snd_nxt - 1;
    c.rto_extended = 1'($urandom_range(0, 1));
    return c;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_list[5] = '{100, 101, 102, 104, 105};

  initial begin
    // Directed: BDP-FC boundary at the default cap of 110 packets.
    ctx = '0; ctx.snd_una = 24'hFFFFF0; cap = BDP_CAP_DEFAULT;
    ctx.snd_nxt = ctx.snd_una + 109; end_psn = ctx.snd_una + 200;
    run_one(); chk(tx.kind == TX_NEW && tx.psn == psn_t'(32'hFFFFF0 + 109), "109 in flight sends");
    ctx.snd_nxt = ctx.snd_una + 110;
    run_one(); chk(tx.kind == TX_BLOCKED, "110 in flight blocks");
    // Directed: look-ahead. SACKs at offsets 3 and 6; retransmit 0, then 1, 2, 4, 5.
    ctx = '0; ctx.snd_una = 100; ctx.snd_nxt = 110; ctx.in_recovery = 1; ctx.retx_valid = 1;
    ctx.retx_seq = 100; ctx.sack_bmp[3] = 1; ctx.sack_bmp[6] = 1; end_psn = 120; cap = 110;
    for (int k = 0; k < 5; k++) begin
      run_one(); chk(tx.kind == TX_RETX && tx.psn == psn_t'(exp_list[k]), "look-ahead order");
      ctx = ctx_n;
    end
    chk(!ctx.retx_valid, "no lost packet left");
    run_one(); chk(tx.kind == TX_NEW && tx.psn == 110, "new data after holes are resent");
    for (int n = 0; n < 20000; n++) begin
      ctx     = rand_ctx();
      end_psn = ($urandom_range(0, 3) == 0) ? ctx.snd_nxt : ctx.snd_nxt + psn_t'($urandom_range(1, 50));
      cap     = 16'($urandom_range(1, 140));
      run_one();
    end
    chk(n_kind[TX_IDLE] > 0 && n_kind[TX_NEW] > 0 && n_kind[TX_RETX] > 0 && n_kind[TX_BLOCKED] > 0,
        "coverage");
    $display("idle=%0d new=%0d retx=%0d blocked=%0d", n_kind[0], n_kind[1], n_kind[2], n_kind[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
