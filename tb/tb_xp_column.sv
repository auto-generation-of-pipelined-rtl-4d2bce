// tb_xp_column: test of a column of M/2 XOR-and-pass butterflies (M = 8 and
// M = 4). For random lane vectors, even lane 2j must carry u[2j] ^ u[2j+1] and
// odd lane 2j+1 must carry u[2j+1].
module tb_xp_column;
  int checks = 0, failures = 0;
  logic [7:0] u8, x8;
  logic [3:0] u4, x4;

  xp_column #(.M(8)) dut8 (.u(u8), .x(x8));
  xp_column #(.M(4)) dut4 (.u(u4), .x(x4));

  initial begin
    for (int r = 0; r < 200; r++) begin
      u8 = 8'($urandom);
      u4 = 4'($urandom);
      #1;
      for (int j = 0; j < 4; j++) begin
        checks += 2;
        if (x8[2*j] !== (u8[2*j] ^ u8[2*j+1])) begin failures++; $display("FAIL: M=8 lane %0d", 2*j); end
        if (x8[2*j+1] !== u8[2*j+1])           begin failures++; $display("FAIL: M=8 lane %0d", 2*j+1); end
      end
      for (int j = 0; j < 2; j++) begin
        checks += 2;
        if (x4[2*j] !== (u4[2*j] ^ u4[2*j+1])) begin failures++; $display("FAIL: M=4 lane %0d", 2*j); end
        if (x4[2*j+1] !== u4[2*j+1])           begin failures++; $display("FAIL: M=4 lane %0d", 2*j+1); end
      end
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
