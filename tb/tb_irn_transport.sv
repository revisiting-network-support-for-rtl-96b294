// tb_irn_transport: end-to-end test of the IRN transport engine at its default size (2048 QPs).
//
// The engine is looped back on itself: packets chosen by txFree on the requester side of QP q
// travel through a channel model to the responder side of the same QP q, and the ACKs/NACKs it
// produces travel back to the requester side. Both channel directions add a random delay of
// 300..380 cycles but keep each QP's packets in order, as per-flow ECMP routing does, and drop
// packets at random; out-of-order arrivals therefore come from losses. Selected first
// transmissions are also dropped on purpose so that the rarer mechanisms happen: the last packet
// of QP 0 (a lone packet in flight, recovered by the RTO_low timeout) and the last five packets of
// QP 1 (more than N in flight with no later packet to trigger a NACK: the timer is first extended
// to RTO_high). Twice an error NACK is injected to force go-back-N. The retransmission timer,
// which the surrounding NIC provides, is modelled here: it is started with RTO_low when packets
// are in flight, restarted on every cumulative-ack advance, and re-armed with the value the
// timeout result asks for.
//
// Six QPs (0, 1, 7, 1000, 2046, 2047) each send a message workload (half single-packet messages,
// some Send/Write-with-immediate messages that expire a Receive WQE). Checks:
//  * every result appears exactly one cycle after its event was accepted;
//  * new PSNs are sent in order, never beyond the posted data, and never with more than the BDP
//    cap (110) packets in flight; retransmissions lie inside the window;
//  * cumulative acks never move backwards;
//  * each receiveAck result carries the ACK's MSN, flagged invalid only for a stale ACK;
//  * the configuration register resets to the paper's values and takes a write (the test then
//    loads its own timer values);
//  * at the end every QP is fully acknowledged, the responder's MSN equals the number of
//    messages, and the Receive WQEs expired equal the number of messages that expire one;
//  * each mechanism happened at least once: in-order and out-of-order arrival, duplicate
//    arrival, NACK-triggered loss recovery entry and exit, retransmission, look-ahead,
//    BDP-FC stall, timer extension to RTO_high, timeout recovery under RTO_low and RTO_high,
//    go-back-N, and a Tx-free request held back by a higher-priority event.
// Timer values are given in clock cycles, scaled to the channel delay of this test.
module tb_irn_transport;
  import irn_pkg::*;

  localparam int NQ = 6;
  localparam int QW = 11;
  localparam longint RTO_LOW  = 1500;
  localparam longint RTO_HIGH = 4000;
  localparam longint DELAY = 300;
  localparam int JITTER = 80;

  logic clk = 0, rst_n = 0;
  cfg_t cfg, cfg_wdata;
  logic cfg_we;
  logic init_done;
  logic rx_valid, rx_ready, rx_last, rx_wqe;
  logic [QW-1:0] rx_qp;
  psn_t rx_psn;
  logic rxr_valid, ack_valid;
  logic [QW-1:0] rxr_qp;
  rx_kind_t rxr_kind;
  ack_t ack;
  idx_t wqe_expire;
  logic ain_valid, ain_ready;
  logic [QW-1:0] ain_qp;
  ack_t ain;
  logic ainr_valid, ainr_entered, ainr_exited, ainr_msn_valid;
  msn_t ainr_msn;
  logic [QW-1:0] ainr_qp;
  psn_t ainr_snd_una;
  logic tmr_valid, tmr_ready;
  logic [QW-1:0] tmr_qp;
  logic tmor_valid;
  logic [QW-1:0] tmor_qp;
  tmo_action_t tmor_action;
  logic [15:0] tmor_rearm;
  logic txf_valid, txf_ready;
  logic [QW-1:0] txf_qp;
  psn_t txf_end_psn;
  logic txr_valid;
  logic [QW-1:0] txr_qp;
  tx_t txr;

  irn_transport dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- workload ----------------
  int qpn [NQ] = '{0, 1, 7, 1000, 2046, 2047};
  int pcode [NQ][$];           // per PSN: 1 middle, 2 last, 3 last + Receive WQE
  int total [NQ], nmsg [NQ], nwqe [NQ];

  function automatic int slot_of(input int q);
    for (int i = 0; i < NQ; i++) if (qpn[i] == q) return i;
    return -1;
  endfunction

  // ---------------- state tracked by the testbench ----------------
  int tb_una [NQ], tb_nxt [NQ], rcv_cum [NQ], rcv_msn [NQ], wqe_sum [NQ];
  longint deadline [NQ];
  bit     tmr_pend [NQ], armed_high [NQ], last_was_retx [NQ], gbn_done [NQ];
  int     max_inflight;

  typedef struct { longint t; int q; int psn; } dpkt_t;
  typedef struct { longint t; int q; ack_t a; } apkt_t;
  dpkt_t dchan [$];
  apkt_t achan [$];
  int    tmrq [$];
  longint now = 0;
  longint last_dt [NQ], last_at [NQ];   // per-QP delivery times keep each flow in order

  function automatic longint in_order_time(inout longint last_t);
    longint t = now + DELAY + longint'($urandom_range(0, JITTER));
    if (t <= last_t) t = last_t + 1;
    last_t = t;
    return t;
  endfunction

  // mechanism counters
  int c_inorder, c_ooo, c_dup, c_enter, c_exit, c_retx, c_lookahead, c_block, c_extend;
  int c_rec_low, c_rec_high, c_gbn, c_txf_held, c_new, c_drop_d, c_drop_a, c_msn_stale;

  // accepted at the last rising edge
  bit acc_rx, acc_ain, acc_tmr, acc_txf;
  ack_type_t acc_ain_typ;
  psn_t acc_ain_cum;
  msn_t acc_ain_msn;
  always @(posedge clk) begin
    acc_rx      <= rx_valid && rx_ready;
    acc_ain     <= ain_valid && ain_ready;
    acc_tmr     <= tmr_valid && tmr_ready;
    acc_txf     <= txf_valid && txf_ready;
    acc_ain_typ <= ain.typ;
    acc_ain_cum <= ain.cum_ack;
    acc_ain_msn <= ain.msn;
    if (txf_valid && !txf_ready && init_done) c_txf_held++;
  end

  function automatic int due_index_d();
    int best = -1;
    foreach (dchan[i]) if (dchan[i].t <= now && (best < 0 || dchan[i].t < dchan[best].t)) best = i;
    return best;
  endfunction
  function automatic int due_index_a();
    int best = -1;
    foreach (achan[i]) if (achan[i].t <= now && (best < 0 || achan[i].t < achan[best].t)) best = i;
    return best;
  endfunction

  function automatic bit forced_drop(input int s, input int psn);
    return (s == 0 && psn == total[0] - 1) || (s == 1 && psn >= total[1] - 5);
  endfunction

  int rr = 0;
  bit all_done = 0;

  always @(negedge clk) begin
    if (rst_n && init_done) begin
      now++;
      // ---- one-cycle latency of every result ----
      chk(rxr_valid == acc_rx, "receiveData result one cycle after the packet");
      chk(ainr_valid == acc_ain, "receiveAck result one cycle after the ACK");
      chk(tmor_valid == acc_tmr, "timeout result one cycle after the expiry");
      chk(txr_valid == acc_txf, "txFree result one cycle after the request");
      // ---- consume accepted inputs ----
      if (acc_tmr) void'(tmrq.pop_front());
      // ---- receiveData results ----
      if (rxr_valid) begin
        automatic int s = slot_of(int'(rxr_qp));
        case (rxr_kind)
          RX_INORDER: c_inorder++;
          RX_OOO:     c_ooo++;
          RX_DUP:     c_dup++;
          default:    chk(0, "no packet may fall beyond the window under BDP-FC");
        endcase
        if (ack_valid) begin
          chk(int'(psn_t'(ack.cum_ack - psn_t'(rcv_cum[s]))) < 24'h800000, "cum ack monotonic");
          rcv_cum[s] = int'(ack.cum_ack);
          rcv_msn[s] = int'(ack.msn);
          wqe_sum[s] += int'(wqe_expire);
          if ($urandom_range(0, 99) == 0) c_drop_a++;
          else achan.push_back('{in_order_time(last_at[s]), s, ack});
        end
      end
      // ---- receiveAck results ----
      if (ainr_valid) begin
        automatic int s = slot_of(int'(ainr_qp));
        automatic int old = tb_una[s];
        automatic bit stale = psn_t'(acc_ain_cum - psn_t'(old)) > psn_t'(tb_nxt[s] - old);
        chk(ainr_msn == acc_ain_msn && ainr_msn_valid == !stale, "MSN passed on unless stale");
        c_msn_stale += int'(stale);
        tb_una[s] = int'(ainr_snd_una);
        c_enter += int'(ainr_entered);
        c_exit  += int'(ainr_exited);
        if (acc_ain_typ == ACK_ERR) begin tb_nxt[s] = tb_una[s]; c_gbn++; end
        if (tb_una[s] != old && !tmr_pend[s]) begin
          deadline[s]   = (tb_nxt[s] != tb_una[s]) ? now + RTO_LOW : 0;
          armed_high[s] = 0;
        end
      end
      // ---- timeout results ----
      if (tmor_valid) begin
        automatic int s = slot_of(int'(tmor_qp));
        tmr_pend[s] = 0;
        case (tmor_action)
          TMO_EXTEND: begin
            c_extend++;
            chk(!armed_high[s] && tb_nxt[s] - tb_una[s] > 3, "extend only under RTO_low with > N in flight");
            chk(tmor_rearm == 16'(RTO_HIGH), "extension asks for RTO_high");
          end
          TMO_RECOVER: begin
            if (armed_high[s]) c_rec_high++; else c_rec_low++;
            chk(tmor_rearm == 16'(RTO_LOW), "timeout action re-arms with RTO_low");
          end
          default: ;
        endcase
        armed_high[s] = tmor_action == TMO_EXTEND;
        deadline[s] = (tmor_action == TMO_NONE || tb_nxt[s] == tb_una[s]) ? 0 : now + longint'(tmor_rearm);
      end
      // ---- txFree results ----
      if (txr_valid) begin
        automatic int s = slot_of(int'(txr_qp));
        automatic int p = int'(txr.psn);
        automatic bit send = 0;
        case (txr.kind)
          TX_NEW: begin
            chk(p == tb_nxt[s] && p < total[s], "new PSN in order and within posted data");
            if (p != tb_nxt[s] && failures < 5) $display("  s=%0d qp=%0d p=%0d tb_nxt=%0d una=%0d", s, txr_qp, p, tb_nxt[s], tb_una[s]);
            tb_nxt[s]++;
            chk(tb_nxt[s] - tb_una[s] <= 110, "BDP cap respected");
            if (tb_nxt[s] - tb_una[s] > max_inflight) max_inflight = tb_nxt[s] - tb_una[s];
            send = !forced_drop(s, p);
            last_was_retx[s] = 0;
            c_new++;
          end
          TX_RETX: begin
            chk(p >= tb_una[s] && p < tb_nxt[s], "retransmission inside the window");
            c_retx++;
            if (last_was_retx[s]) c_lookahead++;
            last_was_retx[s] = 1;
            send = 1;
          end
          TX_BLOCKED: c_block++;
          default: ;
        endcase
        if (send) begin
          if ($urandom_range(0, 49) == 0) c_drop_d++;
          else dchan.push_back('{in_order_time(last_dt[s]), s, p});
        end
        if ((txr.kind == TX_NEW || txr.kind == TX_RETX) && deadline[s] == 0 && !tmr_pend[s]) begin
          deadline[s] = now + RTO_LOW;
          armed_high[s] = 0;
        end
      end
      // ---- timer model ----
      for (int s = 0; s < NQ; s++)
        if (deadline[s] != 0 && now >= deadline[s]) begin
          deadline[s] = 0;
          tmr_pend[s] = 1;
          tmrq.push_back(s);
        end
      // ---- go-back-N injection (error NACK, e.g. receiver not ready) ----
      for (int s = 2; s < 4; s++)
        if (!gbn_done[s] && tb_nxt[s] - tb_una[s] > 20 && !ain_valid) begin
          gbn_done[s] = 1;
          achan.push_front('{now, s, '{typ: ACK_ERR, cum_ack: psn_t'(rcv_cum[s]), sack_psn: '0, msn: '0}});
        end
      // ---- drive the next inputs ----
      if (acc_rx || !rx_valid) begin
        automatic int i = due_index_d();
        rx_valid = 0;
        if (i >= 0) begin
          rx_valid = 1;
          rx_qp    = QW'(qpn[dchan[i].q]);
          rx_psn   = psn_t'(dchan[i].psn);
          rx_last  = pcode[dchan[i].q][dchan[i].psn] >= 2;
          rx_wqe   = pcode[dchan[i].q][dchan[i].psn] == 3;
          dchan.delete(i);
        end
      end
      if (acc_ain || !ain_valid) begin
        automatic int i = due_index_a();
        ain_valid = 0;
        if (i >= 0) begin
          ain_valid = 1;
          ain_qp    = QW'(qpn[achan[i].q]);
          ain       = achan[i].a;
          achan.delete(i);
        end
      end
      tmr_valid = tmrq.size() > 0;
      if (tmr_valid) tmr_qp = QW'(qpn[tmrq[0]]);
      if (acc_txf || !txf_valid) begin
        txf_valid = 0;
        for (int k = 0; k < NQ; k++) begin
          automatic int s = (rr + k) % NQ;
          if (!txf_valid && tb_una[s] != total[s]) begin
            txf_valid   = 1;
            txf_qp      = QW'(qpn[s]);
            txf_end_psn = psn_t'(total[s]);
            rr = s + 1;
          end
        end
      end
      // ---- completion ----
      all_done = 1;
      for (int s = 0; s < NQ; s++) if (tb_una[s] != total[s] || rcv_cum[s] != total[s]) all_done = 0;
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0;
    cfg_wdata = '{bdp_cap: BDP_CAP_DEFAULT, n_low: N_LOW_DEFAULT, rto_low: 16'(RTO_LOW), rto_high: 16'(RTO_HIGH)};
    rx_valid = 0; ain_valid = 0; tmr_valid = 0; txf_valid = 0;
    rx_qp = '0; rx_psn = '0; rx_last = 0; rx_wqe = 0; ain_qp = '0; ain = '0; tmr_qp = '0;
    txf_qp = '0; txf_end_psn = '0;
    for (int s = 0; s < NQ; s++) begin
      automatic int target = (s == NQ - 1) ? 1500 : 300;
      total[s] = 0; nmsg[s] = 0; nwqe[s] = 0;
      while (total[s] < target) begin
        automatic int len = ($urandom_range(0, 1) == 0) ? 1 : $urandom_range(2, 30);
        automatic bit w = $urandom_range(0, 2) == 0;
        for (int i = 0; i < len; i++) pcode[s].push_back((i == len - 1) ? (w ? 3 : 2) : 1);
        total[s] += len; nmsg[s]++; nwqe[s] += int'(w);
      end
      tb_una[s] = 0; tb_nxt[s] = 0; rcv_cum[s] = 0; rcv_msn[s] = 0; wqe_sum[s] = 0;
      deadline[s] = 0; tmr_pend[s] = 0; last_dt[s] = 0; last_at[s] = 0; armed_high[s] = 0; last_was_retx[s] = 0; gbn_done[s] = 0;
    end
    max_inflight = 0;
    repeat (4) @(posedge clk);
    chk(cfg == '{bdp_cap: 16'd110, n_low: 8'd3, rto_low: 16'd100, rto_high: 16'd320},
        "configuration resets to 110 packets, N = 3, 100 us, 320 us");
    rst_n = 1;
    @(posedge clk);
    chk(!init_done, "engine busy clearing contexts after reset");
    // Timer values in this test are cycles scaled to the channel delay: load them.
    cfg_we <= 1;
    @(posedge clk);
    cfg_we <= 0;
    @(posedge clk);
    chk(cfg == cfg_wdata, "configuration write");
    wait (init_done);
    wait (all_done);
    repeat (20) @(posedge clk);
    for (int s = 0; s < NQ; s++) begin
      chk(rcv_msn[s] == nmsg[s], "MSN equals messages sent");
      chk(wqe_sum[s] == nwqe[s], "Receive WQEs expired equal WQE-consuming messages");
    end
    chk(c_inorder > 0, "in-order arrivals");
    chk(c_ooo > 0, "out-of-order arrivals (NACK)");
    chk(c_dup > 0, "duplicate arrivals");
    chk(c_enter > 0, "loss recovery entered on NACK");
    chk(c_exit > 0, "loss recovery exited");
    chk(c_retx > 0, "selective retransmissions");
    chk(c_lookahead > 0, "look-ahead supplied next lost packet");
    chk(c_block > 0, "BDP-FC stall");
    chk(c_extend > 0, "timer extended to RTO_high");
    chk(c_rec_low > 0, "timeout recovery under RTO_low");
    chk(c_rec_high > 0, "timeout recovery under RTO_high");
    chk(c_gbn == 2, "go-back-N on error NACK");
    chk(c_txf_held > 0, "Tx-free request held by a higher-priority event");
    $display("cycles=%0d new=%0d retx=%0d lookahead=%0d inorder=%0d ooo=%0d dup=%0d", now, c_new,
             c_retx, c_lookahead, c_inorder, c_ooo, c_dup);
    $display("recovery enter=%0d exit=%0d bdp_stall=%0d extend=%0d tmo_low=%0d tmo_high=%0d gbn=%0d held=%0d",
             c_enter, c_exit, c_block, c_extend, c_rec_low, c_rec_high, c_gbn, c_txf_held);
    $display("dropped data=%0d acks=%0d max in flight=%0d stale acks=%0d", c_drop_d, c_drop_a, max_inflight,
             c_msn_stale);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
