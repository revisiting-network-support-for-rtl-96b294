// tb_irn_timeout: self-checking test of the timeout unit.
// Directed cases with the paper's N = 3: a timer expiring under RTO_low with 4 packets in flight
// is only extended (context unchanged but for the flag); with 3 in flight, or after an extension,
// the timeout action puts the QP in loss recovery starting at the oldest unacked packet; with
// nothing in flight the expiry is ignored. Random contexts and N values follow, checked against
// the same rules written independently.
module tb_irn_timeout;
  import irn_pkg::*;

  req_ctx_t    ctx, ctx_n;
  logic [7:0]  n_low;
  tmo_action_t action;
  int checks = 0, failures = 0;
  int n_act [3];

  irn_timeout dut (.ctx_i(ctx), .n_low(n_low), .ctx_o(ctx_n), .action(action));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s una=%0d nxt=%0d ext=%0d", what, ctx.snd_una, ctx.snd_nxt, ctx.rto_extended);
    end
  endtask

  task automatic run_one();
    req_ctx_t    e;
    tmo_action_t ea;
    int          inflight;
    #1;
    e = ctx;
    inflight = int'(psn_t'(ctx.snd_nxt - ctx.snd_una));
    if (inflight == 0) ea = TMO_NONE;
    else if (!ctx.rto_extended && inflight > int'(n_low)) begin
      ea = TMO_EXTEND; e.rto_extended = 1;
    end else begin
      ea = TMO_RECOVER;
      e.in_recovery = 1; e.retx_valid = 1; e.retx_seq = ctx.snd_una;
      e.recovery_seq = ctx.snd_nxt - 1; e.rto_extended = 0;
    end
    chk(action == ea, "action");
    chk(ctx_n == e, "context");
    n_act[ea]++;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    n_low = N_LOW_DEFAULT;
    ctx = '0; ctx.snd_una = 24'hFFFFFE; ctx.snd_nxt = 24'h000002;   // 4 in flight, across wrap
    run_one(); chk(action == TMO_EXTEND && ctx_n.rto_extended && !ctx_n.in_recovery, "4 > N: extend");
    ctx = ctx_n;
    run_one(); chk(action == TMO_RECOVER && ctx_n.retx_seq == 24'hFFFFFE &&
                   ctx_n.recovery_seq == 24'h000001 && !ctx_n.rto_extended, "RTO_high expiry recovers");
    ctx = '0; ctx.snd_una = 50; ctx.snd_nxt = 53;
    run_one(); chk(action == TMO_RECOVER && ctx_n.in_recovery && ctx_n.retx_valid, "3 <= N: recover");
    ctx = '0; ctx.snd_una = 77; ctx.snd_nxt = 77;
    run_one(); chk(action == TMO_NONE && ctx_n == ctx, "nothing in flight");
    for (int n = 0; n < 20000; n++) begin
      ctx          = '0;
      ctx.snd_una  = psn_t'($urandom);
      ctx.snd_nxt  = ctx.snd_una + psn_t'($urandom_range(0, 9) == 0 ? 0 : $urandom_range(1, 128));
      ctx.sack_bmp = {$urandom, $urandom, $urandom, $urandom};
      ctx.in_recovery  = 1'($urandom_range(0, 1));
      ctx.retx_seq     = psn_t'($urandom);
      ctx.retx_valid   = 1'($urandom_range(0, 1));
      ctx.rto_extended = 1'($urandom_range(0, 1));
      n_low = 8'($urandom_range(0, 10));
      run_one();
    end
    chk(n_act[0] > 0 && n_act[1] > 0 && n_act[2] > 0, "coverage");
    $display("none=%0d extend=%0d recover=%0d", n_act[0], n_act[1], n_act[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
