// irn_transport: IRN transport engine for NUM_QPS reliable-connected queue pairs.
//
// This is the part of an improved RoCE NIC that IRN changes: selective-retransmission loss
// recovery with a SACK bitmap, BDP-based flow control (BDP-FC), the two-level retransmission
// timeout, and out-of-order acceptance at the responder with a 2-bitmap. Header parsing, DMA,
// WQE/CQE handling and the timers stay in the surrounding RoCE NIC; they exchange parsed packet
// metadata and commands with this engine through the ports below.
//
// Structure:
//  * Receive side: a responder context table (irn_ctx_store of resp_ctx_t) and the receiveData
//    unit. One data-packet event per cycle: the context is read, updated and written back in the
//    same cycle, and the ACK/NACK to send appears one cycle later on the ack_* outputs.
//  * Transmit side: a requester context table (req_ctx_t) shared by the receiveAck, timeout and
//    txFree units. At most one of the three events is accepted per cycle, by fixed priority
//    ACK > timer expiry > Tx free; the others see their ready low and must hold their request.
//    Results appear one cycle after acceptance.
//  * Because every event finishes its read-modify-write in the cycle it is accepted, back-to-back
//    events to the same QP need no forwarding.
//  * After reset both tables are cleared, one QP per cycle (NUM_QPS cycles); all ready outputs
//    stay low until then. Every QP starts at PSN 0.
//
// Handshakes: valid/ready per event input (an event is taken in a cycle where both are high);
// result outputs are single-cycle valid pulses with no back-pressure.
// The shared configuration register (cfg) holds the BDP cap, N, RTO_low and RTO_high. It resets
// to the paper's values (110 packets, 3, 100 us, 320 us) and is written whole with cfg_we; the
// new value applies from the next cycle. The timeout result carries the value to re-arm the
// timer with: RTO_high after an extension, RTO_low otherwise. The receiveAck result carries the
// responder's MSN for WQE retirement, flagged invalid for a stale ACK.
// What follows the paper: the units' behaviour, the widths and the default values. This design's
// own choices: the table organisation, the priority order and the one-cycle timing.
module irn_transport
  import irn_pkg::*;
#(
  parameter int unsigned NUM_QPS = 2048,
  localparam int unsigned QW     = (NUM_QPS > 1) ? $clog2(NUM_QPS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_we,
  input  cfg_t            cfg_wdata,
  output cfg_t            cfg,
  output logic            init_done,

  // Data packet arrived (responder side)
  input  logic            rx_valid,
  output logic            rx_ready,
  input  logic [QW-1:0]   rx_qp,
  input  psn_t            rx_psn,
  input  logic            rx_last,
  input  logic            rx_wqe,
  // receiveData result: ACK/NACK to send and Receive WQEs to expire
  output logic            rxr_valid,
  output logic [QW-1:0]   rxr_qp,
  output rx_kind_t        rxr_kind,
  output logic            ack_valid,
  output ack_t            ack,
  output idx_t            wqe_expire,

  // ACK/NACK arrived (requester side)
  input  logic            ain_valid,
  output logic            ain_ready,
  input  logic [QW-1:0]   ain_qp,
  input  ack_t            ain,
  output logic            ainr_valid,
  output logic [QW-1:0]   ainr_qp,
  output psn_t            ainr_snd_una,
  output logic            ainr_entered,
  output logic            ainr_exited,
  output msn_t            ainr_msn,
  output logic            ainr_msn_valid,

  // Retransmission timer expired
  input  logic            tmr_valid,
  output logic            tmr_ready,
  input  logic [QW-1:0]   tmr_qp,
  output logic            tmor_valid,
  output logic [QW-1:0]   tmor_qp,
  output tmo_action_t     tmor_action,
  output logic [15:0]     tmor_rearm,

  // Link transmitter free for a QP
  input  logic            txf_valid,
  output logic            txf_ready,
  input  logic [QW-1:0]   txf_qp,
  input  psn_t            txf_end_psn,
  output logic            txr_valid,
  output logic [QW-1:0]   txr_qp,
  output tx_t             txr
);
  localparam int unsigned REQ_W  = $bits(req_ctx_t);
  localparam int unsigned RESP_W = $bits(resp_ctx_t);
  localparam cfg_t CFG_RESET = '{bdp_cap:  16'(BDP_CAP_DEFAULT),  n_low:    8'(N_LOW_DEFAULT),
                                 rto_low:  16'(RTO_LOW_DEFAULT),  rto_high: 16'(RTO_HIGH_DEFAULT)};

  // ---------------- configuration ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      cfg <= CFG_RESET;
    else if (cfg_we) cfg <= cfg_wdata;
  end

  // ---------------- receive side ----------------
  logic      rx_busy;
  resp_ctx_t rctx_rd, rctx_wr;
  ack_t      rd_ack;
  logic      rd_ack_valid;
  idx_t      rd_wqe;
  rx_kind_t  rd_kind;
  logic      rx_fire;

  irn_ctx_store #(.WIDTH(RESP_W), .DEPTH(NUM_QPS)) u_resp_ctx (
    .clk, .rst_n, .rd_addr(rx_qp), .rd_data(rctx_rd), .wr_en(rx_fire), .wr_addr(rx_qp),
    .wr_data(rctx_wr), .init_busy(rx_busy)
  );

  irn_receive_data u_receive_data (
    .ctx_i(rctx_rd), .pkt_psn(rx_psn), .pkt_last(rx_last), .pkt_wqe(rx_wqe),
    .ctx_o(rctx_wr), .ack_o(rd_ack), .ack_valid(rd_ack_valid), .wqe_expire(rd_wqe), .kind(rd_kind)
  );

  assign rx_ready = !rx_busy;
  assign rx_fire  = rx_valid && rx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rxr_valid  <= 1'b0;
      ack_valid  <= 1'b0;
      rxr_qp     <= '0;
      rxr_kind   <= RX_INORDER;
      ack        <= '0;
      wqe_expire <= '0;
    end else begin
      rxr_valid <= rx_fire;
      ack_valid <= rx_fire && rd_ack_valid;
      if (rx_fire) begin
        rxr_qp     <= rx_qp;
        rxr_kind   <= rd_kind;
        ack        <= rd_ack;
        wqe_expire <= rd_wqe;
      end
    end
  end

  // ---------------- transmit side ----------------
  typedef enum logic [1:0] { SEL_NONE, SEL_ACK, SEL_TMR, SEL_TXF } sel_t;
  sel_t          sel;
  logic          tx_busy;
  logic [QW-1:0] tqp;
  req_ctx_t      qctx_rd, qctx_wr, ra_ctx, to_ctx, tf_ctx;
  logic          ra_entered, ra_exited, ra_msn_valid;
  msn_t          ra_msn;
  tmo_action_t   to_action;
  tx_t           tf_tx;

  always_comb begin
    if (tx_busy)        sel = SEL_NONE;
    else if (ain_valid) sel = SEL_ACK;
    else if (tmr_valid) sel = SEL_TMR;
    else if (txf_valid) sel = SEL_TXF;
    else                sel = SEL_NONE;
  end

  assign ain_ready = !tx_busy;
  assign tmr_ready = !tx_busy && !ain_valid;
  assign txf_ready = !tx_busy && !ain_valid && !tmr_valid;

  always_comb begin
    unique case (sel)
      SEL_ACK: tqp = ain_qp;
      SEL_TMR: tqp = tmr_qp;
      default: tqp = txf_qp;
    endcase
  end

  irn_ctx_store #(.WIDTH(REQ_W), .DEPTH(NUM_QPS)) u_req_ctx (
    .clk, .rst_n, .rd_addr(tqp), .rd_data(qctx_rd), .wr_en(sel != SEL_NONE), .wr_addr(tqp),
    .wr_data(qctx_wr), .init_busy(tx_busy)
  );

  irn_receive_ack u_receive_ack (
    .ctx_i(qctx_rd), .ack_i(ain), .ctx_o(ra_ctx), .entered(ra_entered), .exited(ra_exited),
    .msn_o(ra_msn), .msn_valid(ra_msn_valid)
  );

  irn_timeout u_timeout (
    .ctx_i(qctx_rd), .n_low(cfg.n_low), .ctx_o(to_ctx), .action(to_action)
  );

  irn_tx_free u_tx_free (
    .ctx_i(qctx_rd), .end_psn(txf_end_psn), .bdp_cap(cfg.bdp_cap), .ctx_o(tf_ctx), .tx(tf_tx)
  );

  always_comb begin
    unique case (sel)
      SEL_ACK: qctx_wr = ra_ctx;
      SEL_TMR: qctx_wr = to_ctx;
      default: qctx_wr = tf_ctx;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ainr_valid   <= 1'b0;
      ainr_qp      <= '0;
      ainr_snd_una <= '0;
      ainr_entered <= 1'b0;
      ainr_exited  <= 1'b0;
      ainr_msn     <= '0;
      ainr_msn_valid <= 1'b0;
      tmor_valid   <= 1'b0;
      tmor_qp      <= '0;
      tmor_action  <= TMO_NONE;
      tmor_rearm   <= '0;
      txr_valid    <= 1'b0;
      txr_qp       <= '0;
      txr          <= '0;
    end else begin
      ainr_valid <= sel == SEL_ACK;
      tmor_valid <= sel == SEL_TMR;
      txr_valid  <= sel == SEL_TXF;
      if (sel == SEL_ACK) begin
        ainr_qp      <= ain_qp;
        ainr_snd_una <= ra_ctx.snd_una;
        ainr_entered <= ra_entered;
        ainr_exited  <= ra_exited;
        ainr_msn     <= ra_msn;
        ainr_msn_valid <= ra_msn_valid;
      end
      if (sel == SEL_TMR) begin
        tmor_qp     <= tmr_qp;
        tmor_action <= to_action;
        tmor_rearm  <= (to_action == TMO_EXTEND) ? cfg.rto_high : cfg.rto_low;
      end
      if (sel == SEL_TXF) begin
        txr_qp <= txf_qp;
        txr    <= tf_tx;
      end
    end
  end

  assign init_done = !rx_busy && !tx_busy;

`ifndef SYNTHESIS
  // A data packet's result must be one of the four kinds, and an ACK only leaves with a result.
  a_ack_with_result: assert property (@(posedge clk) disable iff (!rst_n) ack_valid |-> rxr_valid);
  a_one_tx_event: assert property (@(posedge clk) disable iff (!rst_n)
                                   $onehot0({ainr_valid, tmor_valid, txr_valid}));
`endif
endmodule
