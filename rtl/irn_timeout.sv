// irn_timeout: IRN's timeout unit, run when a queue pair's retransmission timer expires.
//
// The timer runs with RTO_low by default. If it expired under RTO_low (rto_extended clear) and
// more than N packets are in flight, the short timeout does not apply: the unit changes nothing
// but rto_extended and asks for the timer to be extended to RTO_high (TMO_EXTEND). Otherwise it
// executes the timeout action (TMO_RECOVER): the QP enters loss recovery, recovery_seq becomes the
// last new packet sent, the first retransmission is the oldest unacked packet, and the timer
// returns to RTO_low. With nothing in flight the expiry is ignored (TMO_NONE, this design's
// choice). The condition "at most N packets in flight" for RTO_low is this design's reading of the
// paper's "a small N number of packets in flight". Purely combinational; registered by the caller.
module irn_timeout
  import irn_pkg::*;
(
  input  req_ctx_t    ctx_i,
  input  logic [7:0]  n_low,
  output req_ctx_t    ctx_o,
  output tmo_action_t action
);
  psn_t in_flight;
  assign in_flight = ctx_i.snd_nxt - ctx_i.snd_una;

  always_comb begin
    ctx_o  = ctx_i;
    action = TMO_NONE;
    if (in_flight == '0) begin
      action = TMO_NONE;
    end else if (!ctx_i.rto_extended && in_flight > psn_t'(n_low)) begin
      action             = TMO_EXTEND;
      ctx_o.rto_extended = 1'b1;
    end else begin
      action             = TMO_RECOVER;
      ctx_o.in_recovery  = 1'b1;
      ctx_o.recovery_seq = ctx_i.snd_nxt - psn_t'(1);
      ctx_o.retx_seq     = ctx_i.snd_una;
      ctx_o.retx_valid   = 1'b1;
      ctx_o.rto_extended = 1'b0;
    end
  end
endmodule
