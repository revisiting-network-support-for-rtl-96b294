// irn_next_lost: search of the SACK bitmap for the next packet to retransmit.
//
// IRN counts a packet as lost only if some packet with a higher sequence number has been
// selectively acknowledged. Starting at bitmap index 'start', this unit returns the first
// unacknowledged index that lies below the highest SACKed index. The bits below 'start' are forced
// to one and a find-first-zero (irn_ffz) is run; the highest set bit comes from a priority
// encoder. Used for the look-ahead in txFree and to refresh the retransmit pointer in receiveAck.
// Purely combinational.
module irn_next_lost
  import irn_pkg::*;
(
  input  bitmap_t sack_bmp,
  input  idx_t    start,     // 0..BITMAP_BITS
  output logic    found,
  output idx_t    idx
);
  bitmap_t masked;
  logic    ffz_found;
  idx_t    ffz_idx;
  logic    any_set;
  idx_t    hi;

  always_comb begin
    for (int i = 0; i < BITMAP_BITS; i++) masked[i] = sack_bmp[i] | (idx_t'(i) < start);
  end

  irn_ffz #(.WIDTH(BITMAP_BITS), .CHUNK(CHUNK_BITS)) u_ffz (
    .bits(masked), .found(ffz_found), .idx(ffz_idx)
  );

  always_comb begin
    any_set = 1'b0;
    hi      = '0;
    for (int i = 0; i < BITMAP_BITS; i++) begin
      if (sack_bmp[i]) begin
        any_set = 1'b1;
        hi      = idx_t'(i);
      end
    end
  end

  assign found = any_set && ffz_found && (ffz_idx < hi);
  assign idx   = ffz_idx;
endmodule
