// irn_pkg: types and constants shared by the IRN (improved RoCE NIC) transport logic.
//
// IRN replaces RoCE's go-back-N loss recovery by selective retransmission driven by a SACK
// bitmap, and caps the packets in flight of each queue pair (QP) at the bandwidth-delay product
// (BDP-FC). The per-QP state that the four packet-processing units read and write is defined here:
//   req_ctx_t  - requester (sender) side: cumulative ack, next PSN, retransmit pointer, recovery
//                sequence, flags and the 128-bit SACK bitmap whose bit i stands for PSN snd_una+i.
//   resp_ctx_t - responder (receiver) side: expected PSN, MSN and the "2-bitmap" whose bit i
//                stands for PSN epsn+i.
// Widths follow the paper: 24-bit packet sequence numbers and 128-bit bitmaps. The flag set, the
// 2-bitmap encoding and the configuration register widths are this design's own choices.
package irn_pkg;

  localparam int unsigned PSN_W       = 24;   // RoCE PSN / IRN retransmit and recovery sequence
  localparam int unsigned MSN_W       = 24;   // message sequence number
  localparam int unsigned BITMAP_BITS = 128;  // BDP-sized bitmap
  localparam int unsigned CHUNK_BITS  = 32;   // chunk size for find-first-zero and popcount
  localparam int unsigned IDX_W       = $clog2(BITMAP_BITS + 1);  // 0..128

  // Reset values of the shared (all-QP) configuration, from the paper's default scenario.
  localparam logic [15:0] BDP_CAP_DEFAULT  = 16'd110;  // ~110 MTU packets for a 120KB BDP
  localparam logic [7:0]  N_LOW_DEFAULT    = 8'd3;     // RTO_low used with <= N packets in flight
  localparam logic [15:0] RTO_LOW_DEFAULT  = 16'd100;  // microseconds
  localparam logic [15:0] RTO_HIGH_DEFAULT = 16'd320;  // microseconds

  typedef logic [PSN_W-1:0]       psn_t;
  typedef logic [MSN_W-1:0]       msn_t;
  typedef logic [BITMAP_BITS-1:0] bitmap_t;
  typedef logic [IDX_W-1:0]       idx_t;

  // Shared configuration, common to all QPs.
  typedef struct packed {
    logic [15:0] bdp_cap;   // packets
    logic [7:0]  n_low;     // packets
    logic [15:0] rto_low;   // timer units (microseconds by default)
    logic [15:0] rto_high;  // timer units
  } cfg_t;

  // Requester context. retx_seq is the next retransmission candidate; retx_valid says it is a
  // packet already known to be lost. rto_extended says the running timer uses RTO_high.
  typedef struct packed {
    psn_t    snd_una;       // oldest unacknowledged PSN (= last cumulative ack received)
    psn_t    snd_nxt;       // next new PSN to transmit
    psn_t    retx_seq;      // packet sequence to be retransmitted
    psn_t    recovery_seq;  // last regular packet sent before recovery started
    logic    in_recovery;
    logic    retx_valid;
    logic    rto_extended;
    bitmap_t sack_bmp;      // bit i: PSN snd_una+i selectively acked
  } req_ctx_t;

  // Responder context. The 2-bitmap keeps two bits per PSN, {last_bmp[i], arr_bmp[i]}:
  //   00 not arrived, 01 arrived (not last), 10 last packet of a message (MSN update),
  //   11 last packet that also expires a Receive WQE.
  typedef struct packed {
    psn_t    epsn;          // expected PSN (= cumulative ack sent)
    msn_t    msn;
    bitmap_t arr_bmp;
    bitmap_t last_bmp;
  } resp_ctx_t;

  typedef enum logic [1:0] {
    ACK_POS  = 2'd0,   // cumulative ACK
    ACK_NACK = 2'd1,   // out-of-sequence NACK carrying a SACK
    ACK_ERR  = 2'd2    // error NACK (e.g. receiver not ready): go-back-N
  } ack_type_t;

  typedef struct packed {
    ack_type_t typ;
    psn_t      cum_ack;   // expected PSN at the receiver
    psn_t      sack_psn;  // PSN that triggered a NACK
    msn_t      msn;
  } ack_t;

  typedef enum logic [1:0] {
    RX_INORDER = 2'd0,
    RX_OOO     = 2'd1,
    RX_DUP     = 2'd2,   // PSN behind the expected one: re-acknowledged
    RX_DROP    = 2'd3    // PSN beyond the bitmap window: discarded silently
  } rx_kind_t;

  typedef enum logic [1:0] {
    TX_IDLE    = 2'd0,   // nothing to send
    TX_NEW     = 2'd1,
    TX_RETX    = 2'd2,
    TX_BLOCKED = 2'd3    // new data waiting but BDP cap reached
  } tx_kind_t;

  typedef struct packed {
    tx_kind_t kind;
    psn_t     psn;
  } tx_t;

  typedef enum logic [1:0] {
    TMO_NONE    = 2'd0,  // nothing in flight: spurious expiry
    TMO_EXTEND  = 2'd1,  // re-arm with RTO_high, no other action
    TMO_RECOVER = 2'd2   // timeout action executed
  } tmo_action_t;

endpackage
