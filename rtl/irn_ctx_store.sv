// irn_ctx_store: per-QP context memory of the IRN engine.
//
// DEPTH words of WIDTH bits, one per queue pair, written as a plain array so a synthesis tool can
// map it to RAM. Read is combinational (address in, word out in the same cycle), write is
// synchronous; a write and a read of the same word in one cycle return the old word. After reset
// the memory is cleared one word per cycle, with init_busy high, so that every QP starts from an
// all-zero context (PSN 0, empty bitmaps); writes are ignored during that time. The paper keeps
// this state in the NIC's existing context cache; the one-read/one-write array and the clearing
// sequence are this design's choices.
module irn_ctx_store #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  output logic             init_busy
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    clr_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      clr_addr  <= '0;
    end else if (init_busy) begin
      clr_addr <= clr_addr + AW'(1);
      if (clr_addr == AW'(DEPTH - 1)) init_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_busy) mem[clr_addr] <= '0;
    else if (wr_en) mem[wr_addr] <= wr_data;
  end

  assign rd_data = mem[rd_addr];
endmodule
