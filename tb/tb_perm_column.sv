// tb_perm_column: test of I_K (x) P_{M/K} for M = 16 with K = 1, 2 and 4
// (one P_16, two P_8, four P_4). Within each group of G = M/K lanes, output
// lane g*G + i must carry input lane g*G + i' where i' is i with the most and
// least significant address bits exchanged; the group number is unchanged.
module tb_perm_column;
  int checks = 0, failures = 0;
  logic [15:0] u, x1, x2, x4;

  perm_column #(.M(16), .K(1)) dut1 (.u(u), .x(x1));
  perm_column #(.M(16), .K(2)) dut2 (.u(u), .x(x2));
  perm_column #(.M(16), .K(4)) dut4 (.u(u), .x(x4));

  function automatic int src_lane(int lane, int g_bits);
    int g = lane >> g_bits;
    int i = lane & ((1 << g_bits) - 1);
    int lsb = i & 1;
    int msb = (i >> (g_bits - 1)) & 1;
    int r = i & ~(1 | (1 << (g_bits - 1)));
    return (g << g_bits) | r | (lsb << (g_bits - 1)) | msb;
  endfunction

  task automatic check_col(string name, logic [15:0] x, int g_bits);
    for (int l = 0; l < 16; l++) begin
      checks++;
      if (x[l] !== u[src_lane(l, g_bits)]) begin
        failures++;
        $display("FAIL: %s lane %0d", name, l);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < 16 + 100; r++) begin
      u = (r < 16) ? 16'(1 << r) : 16'($urandom);
      #1;
      check_col("K=1", x1, 4);
      check_col("K=2", x2, 3);
      check_col("K=4", x4, 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
