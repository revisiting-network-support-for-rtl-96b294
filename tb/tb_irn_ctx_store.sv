// tb_irn_ctx_store: self-checking test of the per-QP context memory.
// Checks that init_busy stays high for exactly DEPTH cycles after reset and that every word then
// reads zero (the simulator starts the array at random values), that writes issued during the
// clearing are ignored, and that random writes and reads match a reference array, including a
// read of a word in the same cycle it is written (old value expected). Runs at the default
// depth of 2048 words with 64-bit words.
module tb_irn_ctx_store;
  localparam int W = 64, D = 2048;   // the store's default width and depth
  logic          clk = 0, rst_n = 0;
  logic [10:0]   rd_addr, wr_addr;
  logic [W-1:0]  rd_data, wr_data;
  logic          wr_en, init_busy;
  logic [W-1:0]  ref_mem [D];
  int checks = 0, failures = 0, busy_cycles = 0;

  irn_ctx_store dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s addr=%0d", what, rd_addr); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // a write during the clearing must be lost
    wr_en = 1; wr_addr = 11'd2000; wr_data = 64'hDEAD;
    @(posedge clk); #1 wr_en = 0;
    busy_cycles = 1;
    while (init_busy) begin @(posedge clk); #1 busy_cycles++; end
    chk(busy_cycles == D, "clearing takes DEPTH cycles");
    for (int i = 0; i < D; i++) begin
      rd_addr = 11'(i); #1;
      chk(rd_data == '0, "cleared");
      ref_mem[i] = '0;
    end
    for (int n = 0; n < 5000; n++) begin
      logic [W-1:0] d;
      d = {$urandom, $urandom};
      wr_en   = 1'($urandom_range(0, 1));
      wr_addr = 11'($urandom_range(0, 15) == 0 ? $urandom_range(0, D - 1) : $urandom_range(0, 31));
      wr_data = d;
      rd_addr = ($urandom_range(0, 3) == 0) ? wr_addr : 11'($urandom_range(0, 31));
      #1;
      chk(rd_data == ref_mem[rd_addr], "read before write");
      @(posedge clk);
      if (wr_en) ref_mem[wr_addr] = d;
      #1;
      chk(rd_data == ref_mem[rd_addr], "read after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
