// tb_perm_p: test of the lane permutation P_N for N = 4, 8, 16 and 32.
//
// For P_4 and P_8 the expected lane maps are written out as tables (P_4 swaps
// lanes 1 and 2; P_8 swaps 1 with 4 and 3 with 6). For every size the output
// is also compared with an independent formulation: output lane i takes the
// input lane whose address is i with its most and least significant bits
// exchanged. Each instance is driven with walking-one vectors and random
// vectors.
module tb_perm_p;
  int checks = 0, failures = 0;

  logic [3:0]  u4,  x4;
  logic [7:0]  u8,  x8;
  logic [15:0] u16, x16;
  logic [31:0] u32, x32;

  perm_p #(.N(4))  dut4  (.u(u4),  .x(x4));
  perm_p #(.N(8))  dut8  (.u(u8),  .x(x8));
  perm_p #(.N(16)) dut16 (.u(u16), .x(x16));
  perm_p #(.N(32)) dut32 (.u(u32), .x(x32));

  localparam int MAP4 [4] = '{0, 2, 1, 3};
  localparam int MAP8 [8] = '{0, 4, 2, 6, 1, 5, 3, 7};

  function automatic int swap_msb_lsb(int i, int bits);
    int lsb = i & 1;
    int msb = (i >> (bits - 1)) & 1;
    int r = i & ~(1 | (1 << (bits - 1)));
    return r | (lsb << (bits - 1)) | msb;
  endfunction

  task automatic check_bit(string name, int lane, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL: %s lane %0d got %0b expected %0b", name, lane, got, exp);
    end
  endtask

  task automatic apply(input logic [31:0] v);
    u4 = v[3:0]; u8 = v[7:0]; u16 = v[15:0]; u32 = v;
    #1;
    for (int i = 0; i < 4; i++) begin
      check_bit("P4 table", i, x4[i], u4[MAP4[i]]);
      check_bit("P4", i, x4[i], u4[swap_msb_lsb(i, 2)]);
    end
    for (int i = 0; i < 8; i++) begin
      check_bit("P8 table", i, x8[i], u8[MAP8[i]]);
      check_bit("P8", i, x8[i], u8[swap_msb_lsb(i, 3)]);
    end
    for (int i = 0; i < 16; i++) check_bit("P16", i, x16[i], u16[swap_msb_lsb(i, 4)]);
    for (int i = 0; i < 32; i++) check_bit("P32", i, x32[i], u32[swap_msb_lsb(i, 5)]);
  endtask

  initial begin
    for (int k = 0; k < 32; k++) apply(32'd1 << k);
    for (int r = 0; r < 50; r++) apply($urandom);
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
