// irn_ffz: find first zero in a bitmap.
//
// Bit 0 is the head of the bitmap ring. The vector is split into CHUNK-bit chunks that are
// examined in parallel: each chunk produces an "all ones" flag and the index of its own first
// zero; the lowest chunk that is not all ones then supplies the result. This chunking is the
// optimisation the paper describes for its bitmap scans. idx is WIDTH (and found low) when every
// bit is set. Purely combinational; the caller registers the result.
module irn_ffz #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned CHUNK = 32,
  localparam int unsigned IW   = $clog2(WIDTH + 1)
) (
  input  logic [WIDTH-1:0] bits,
  output logic             found,
  output logic [IW-1:0]    idx
);
  localparam int unsigned NCH = (WIDTH + CHUNK - 1) / CHUNK;

  logic [NCH-1:0]  chunk_full;
  logic [IW-1:0]   chunk_idx [NCH];

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      chunk_full[c] = 1'b1;
      chunk_idx[c]  = '0;
      for (int b = CHUNK - 1; b >= 0; b--) begin
        if (c * CHUNK + b < WIDTH && !bits[c*CHUNK+b]) begin
          chunk_full[c] = 1'b0;
          chunk_idx[c]  = IW'(c * CHUNK + b);
        end
      end
    end
  end

  always_comb begin
    found = 1'b0;
    idx   = IW'(WIDTH);
    for (int c = NCH - 1; c >= 0; c--) begin
      if (!chunk_full[c]) begin
        found = 1'b1;
        idx   = chunk_idx[c];
      end
    end
  end
endmodule
