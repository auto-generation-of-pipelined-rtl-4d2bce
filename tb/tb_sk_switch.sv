// tb_sk_switch: test of the commutator S_K for K = 2, 4 and 8.
//
// All three switches receive the same random bit streams on u0 and u1,
// organised into codewords of L = 8 cycles that follow each other back to
// back or after idle gaps; `sof` marks each codeword's first cycle. For an
// input bit on lane p at time t of a codeword, the expected output lane is
// bit b = log2(K/2) of t and the expected output time is t with bit b
// replaced by p, counted from K/2 cycles after the codeword's first input.
// Every output bit of every codeword is compared with that model, which is
// also what fixes the latency of K/2 cycles. The test counts codewords that
// start back to back and after a gap, and requires both.
module tb_sk_switch;
  localparam int L    = 8;     // cycles per codeword
  localparam int HMAX = 4096;  // history length in cycles

  logic clk = 1'b0;
  logic rst_n;
  logic sof, u0, u1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;

  logic hist_u0 [HMAX];
  logic hist_u1 [HMAX];
  int   starts[$];  // first cycle of each codeword

  always @(posedge clk) begin
    cycle <= cycle + 1;
    hist_u0[cycle] <= u0;
    hist_u1[cycle] <= u1;
  end

  localparam int NK = 3;
  localparam int KS [NK] = '{2, 4, 8};

  for (genvar g = 0; g < NK; g++) begin : g_dut
    localparam int K = KS[g];
    localparam int D = K / 2;
    localparam int B = $clog2(D);  // time bit exchanged with the lane bit
    logic x0, x1;

    sk_switch #(.K(K)) dut (.clk, .rst_n, .sof, .u0, .u1, .x0, .x1);

    // value of the input bit of lane p, time t, of the codeword starting at s
    // (the history of the current cycle is not written yet: use the inputs)
    function automatic logic in_bit(int s, int p, int t);
      if (s + t == cycle) return (p == 0) ? u0 : u1;
      return (p == 0) ? hist_u0[s + t] : hist_u1[s + t];
    endfunction

    always @(posedge clk) begin
      if (rst_n) begin
        // find the codeword whose output window covers this cycle
        for (int w = 0; w < starts.size(); w++) begin
          int s;
          s = starts[w];
          if (cycle >= s + D && cycle < s + D + L) begin
            int tp, ts;
            tp = cycle - s - D;   // output time
            for (int pn = 0; pn < 2; pn++) begin
              logic exp_v, got;
              ts = (tp & ~(1 << B)) | (pn << B);
              exp_v = in_bit(s, (tp >> B) & 1, ts);
              got = (pn == 0) ? x0 : x1;
              checks++;
              if (got !== exp_v) begin
                failures++;
                $display("FAIL: K=%0d word@%0d t'=%0d lane %0d got %0b expected %0b",
                         K, s, tp, pn, got, exp_v);
              end
            end
          end
        end
      end
    end
  end

  int n_back_to_back = 0, n_after_gap = 0;

  initial begin
    int last_end;
    rst_n = 1'b0; sof = 1'b0; u0 = 1'b0; u1 = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    last_end = -100;
    for (int w = 0; w < 120; w++) begin
      int gap;
      gap = ($urandom % 3 == 0) ? int'($urandom % 6) : 0;
      if (w == 1) gap = 0;
      if (w == 2) gap = 3;
      repeat (gap) begin
        @(negedge clk);
        sof = 1'b0; u0 = 1'($urandom); u1 = 1'($urandom);
      end
      for (int t = 0; t < L; t++) begin
        @(negedge clk);
        sof = (t == 0);
        u0 = 1'($urandom); u1 = 1'($urandom);
        if (t == 0) begin
          starts.push_back(cycle);
          if (cycle == last_end + 1) n_back_to_back++; else n_after_gap++;
        end
      end
      last_end = cycle;
    end
    @(negedge clk);
    sof = 1'b0;
    repeat (L + 8) @(negedge clk);
    checks++;
    if (n_back_to_back == 0 || n_after_gap == 0) begin
      failures++;
      $display("FAIL: back-to-back %0d, after gap %0d", n_back_to_back, n_after_gap);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (HMAX - 16) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
