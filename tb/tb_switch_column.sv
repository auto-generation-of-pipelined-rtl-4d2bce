// tb_switch_column: test of I_{M/2} (x) S_K with M = 8 and K = 4, 2.
//
// Random 8-lane vectors are sent as codewords of L = 4 vectors (the frame
// length of the N = 32, M = 8 encoder), back to back or after idle gaps, with
// c_in.valid and c_in.sof marking them. For each lane pair (2j, 2j+1) an input
// bit at pair lane p and time t must leave on pair lane t[b] at time t with
// bit b replaced by p, b = log2(K/2), counted from K/2 cycles after the
// codeword's first vector. c_out must equal c_in delayed by K/2 cycles.
module tb_switch_column;
  import polar_pkg::*;
  localparam int M    = 8;
  localparam int L    = 4;
  localparam int HMAX = 4096;

  logic clk = 1'b0;
  logic rst_n;
  logic [M-1:0] u;
  frame_ctrl_t  c_in;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  logic [M-1:0] hist_u [HMAX];
  frame_ctrl_t  hist_c [HMAX];
  int starts[$];

  always @(posedge clk) begin
    cycle <= cycle + 1;
    hist_u[cycle] <= u;
    hist_c[cycle] <= c_in;
  end

  localparam int NK = 2;
  localparam int KS [NK] = '{4, 2};

  for (genvar g = 0; g < NK; g++) begin : g_dut
    localparam int K = KS[g];
    localparam int D = K / 2;
    localparam int B = $clog2(D);
    logic [M-1:0] x;
    frame_ctrl_t  c_out;

    switch_column #(.M(M), .K(K)) dut (.clk, .rst_n, .u, .c_in, .x, .c_out);

    function automatic logic [M-1:0] vec_at(int c);
      return (c == cycle) ? u : hist_u[c];
    endfunction

    always @(posedge clk) begin
      if (rst_n && cycle >= D + 3) begin
        checks++;
        if (c_out !== hist_c[cycle - D]) begin
          failures++;
          $display("FAIL: K=%0d c_out at cycle %0d", K, cycle);
        end
        for (int w = 0; w < starts.size(); w++) begin
          int s, tp, ts, p;
          s = starts[w];
          if (cycle >= s + D && cycle < s + D + L) begin
            tp = cycle - s - D;
            for (int pn = 0; pn < 2; pn++) begin
              ts = (tp & ~(1 << B)) | (pn << B);
              p  = (tp >> B) & 1;
              for (int j = 0; j < M / 2; j++) begin
                logic [M-1:0] v;
                v = vec_at(s + ts);
                checks++;
                if (x[2*j + pn] !== v[2*j + p]) begin
                  failures++;
                  $display("FAIL: K=%0d word@%0d t'=%0d lane %0d", K, s, tp, 2*j + pn);
                end
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
    rst_n = 1'b0; c_in = '0; u = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    last_end = -100;
    for (int w = 0; w < 150; w++) begin
      int gap;
      gap = ($urandom % 3 == 0) ? int'($urandom % 5) : 0;
      if (w == 1) gap = 0;
      if (w == 2) gap = 2;
      repeat (gap) begin
        @(negedge clk);
        c_in = '0; u = M'($urandom);
      end
      for (int t = 0; t < L; t++) begin
        @(negedge clk);
        c_in.valid = 1'b1;
        c_in.sof   = (t == 0);
        u = M'($urandom);
        if (t == 0) begin
          starts.push_back(cycle);
          if (cycle == last_end + 1) n_back_to_back++; else n_after_gap++;
        end
      end
      last_end = cycle;
    end
    @(negedge clk);
    c_in = '0;
    repeat (L + 6) @(negedge clk);
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
