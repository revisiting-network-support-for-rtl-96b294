// tb_irn_popcount: self-checking test of the chunked popcount unit.
// Directed vectors (zero, all ones, one bit at each position, one chunk full) and random vectors
// are compared with a bit-serial count. Combinational: checked 1 ns after each vector.
module tb_irn_popcount;
  localparam int W = 128;   // the unit's default width
  logic [W-1:0] bits;
  logic [7:0]   count;
  int checks = 0, failures = 0;

  irn_popcount dut (.bits(bits), .count(count));

  task automatic check_vec(input logic [W-1:0] v);
    int exp_cnt = 0;
    bits = v;
    #1;
    for (int i = 0; i < W; i++) exp_cnt += int'(v[i]);
    checks++;
    if (count !== 8'(exp_cnt)) begin
      failures++;
      $display("FAIL popcount v=%h got=%0d exp=%0d", v, count, exp_cnt);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] v;
    check_vec('0);
    check_vec('1);
    for (int p = 0; p < W; p++) begin v = '0; v[p] = 1'b1; check_vec(v); end
    for (int c = 0; c < 4; c++) begin v = '0; v[c*32 +: 32] = '1; check_vec(v); end
    for (int n = 0; n < 3000; n++) begin
      v = {$urandom, $urandom, $urandom, $urandom};
      if (n % 3 == 0) v = v & {$urandom, $urandom, $urandom, $urandom};
      check_vec(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
