// tb_irn_ffz: self-checking test of the chunked find-first-zero unit.
// Drives directed patterns (all ones, all zeros, a single zero at every position, zeros at chunk
// boundaries) and random vectors of varying density, and compares found/idx with a bit-serial
// reference scan. Combinational unit: each vector is checked 1 ns after it is applied.
module tb_irn_ffz;
  localparam int W = 128;   // the unit's default width
  logic [W-1:0] bits;
  logic         found;
  logic [7:0]   idx;
  int checks = 0, failures = 0;

  irn_ffz dut (.bits(bits), .found(found), .idx(idx));

  task automatic check_vec(input logic [W-1:0] v);
    int exp_idx;
    bits = v;
    #1;
    exp_idx = W;
    for (int i = W - 1; i >= 0; i--) if (!v[i]) exp_idx = i;
    checks++;
    if (found !== (exp_idx != W) || idx !== 8'(exp_idx)) begin
      failures++;
      $display("FAIL ffz v=%h found=%0d idx=%0d exp=%0d", v, found, idx, exp_idx);
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
    check_vec('1);
    check_vec('0);
    for (int p = 0; p < W; p++) begin
      v = '1; v[p] = 1'b0; check_vec(v);
      v = '1; for (int i = 0; i < p; i++) v[i] = 1'b1; for (int i = p; i < W; i++) v[i] = 1'b0;
      check_vec(v);
    end
    for (int n = 0; n < 3000; n++) begin
      automatic int dens = $urandom_range(0, 3);
      for (int i = 0; i < W; i++)
        v[i] = (dens == 3) ? 1'b1 : ($urandom_range(0, 15) < 12 + dens);
      if ($urandom_range(0, 3) == 0) v[$urandom_range(0, W - 1)] = 1'b0;
      check_vec(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
