// irn_popcount: number of set bits in a vector.
//
// The vector is cut into CHUNK-bit chunks whose counts are formed in parallel and then summed,
// as the paper describes for its popcount. receiveData uses it to count, over the run of packets
// that has just become in-order, the messages completed (MSN increment) and the Receive WQEs to
// expire. Purely combinational.
module irn_popcount #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned CHUNK = 32,
  localparam int unsigned IW   = $clog2(WIDTH + 1)
) (
  input  logic [WIDTH-1:0] bits,
  output logic [IW-1:0]    count
);
  localparam int unsigned NCH = (WIDTH + CHUNK - 1) / CHUNK;

  logic [IW-1:0] chunk_cnt [NCH];

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      chunk_cnt[c] = '0;
      for (int b = 0; b < CHUNK; b++) begin
        if (c * CHUNK + b < WIDTH) chunk_cnt[c] = chunk_cnt[c] + IW'(bits[c*CHUNK+b]);
      end
    end
    count = '0;
    for (int c = 0; c < NCH; c++) count = count + chunk_cnt[c];
  end
endmodule
