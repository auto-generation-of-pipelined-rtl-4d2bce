// tb_polar_workloads: end-to-end runs of the polar encoder at the sizes whose
// implementation results are reported for it: code length N = 1024 with
// parallelism M = 4, 32, 128, 256 and 512. The smallest legal sizes
// (N = 8, M = 4 and N = 16, M = 4, 8) are added to exercise the corner cases of
// the column arrangement: no variable switch column beyond S_2, and a final
// switch S_2. Each instance streams words back to back and after gaps and
// checks every output bit and the latency 3N/(2M) - 1 (see
// polar_stream_check).
module tb_polar_workloads;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NI = 8;
  localparam int NS [NI] = '{1024, 1024, 1024, 1024, 1024, 8, 16, 16};
  localparam int MS [NI] = '{4,    32,   128,  256,  512,  4, 4,  8};

  logic done [NI];
  int   c [NI], f [NI], b2b [NI], gap [NI];

  for (genvar g = 0; g < NI; g++) begin : g_inst
    polar_stream_check #(.N(NS[g]), .M(MS[g]), .WORDS(7)) u_chk (
      .clk, .rst_n, .done(done[g]), .checks(c[g]), .failures(f[g]),
      .n_back_to_back(b2b[g]), .n_after_gap(gap[g])
    );
  end

  int checks = 0, failures = 0;

  initial begin
    logic all_done;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    do begin
      @(negedge clk);
      all_done = 1'b1;
      for (int i = 0; i < NI; i++) all_done &= done[i];
    end while (!all_done);
    for (int i = 0; i < NI; i++) begin
      checks += c[i] + 1;
      failures += f[i];
      if (b2b[i] == 0 || gap[i] == 0) begin
        failures++;
        $display("FAIL N=%0d M=%0d: back-to-back %0d, after gap %0d", NS[i], MS[i], b2b[i], gap[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
