// tb_xp: exhaustive test of the XOR-and-pass butterfly.
// All four input pairs are applied; x0 must equal u0 xor u1 and x1 must
// equal u1, values listed here from the butterfly's truth table.
module tb_xp;
  logic u0, u1, x0, x1;
  int checks = 0, failures = 0;

  xp dut (.u0, .u1, .x0, .x1);

  // truth table rows: {u0, u1, x0, x1}
  localparam logic [3:0] TT [4] = '{4'b0000, 4'b0111, 4'b1010, 4'b1101};

  initial begin
    for (int r = 0; r < 4; r++) begin
      {u0, u1} = TT[r][3:2];
      #1;
      checks += 2;
      if (x0 !== TT[r][1]) begin failures++; $display("FAIL: u=%b%b x0=%b", u0, u1, x0); end
      if (x1 !== TT[r][0]) begin failures++; $display("FAIL: u=%b%b x1=%b", u0, u1, x1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
