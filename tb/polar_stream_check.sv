// polar_stream_check: stimulus and checker for one polar_encoder instance of
// any size, used by the multi-size testbench.
//
// It sends WORDS source words (a unit vector, all ones, then random words),
// most back to back and some after idle gaps, in the encoder's input order,
// and checks every output vector against y = u F^{(x)n} computed here with the
// in-place radix-2 transform (for each index bit b, v[k] ^= v[k + 2^b] for
// every k with bit b clear). It checks the latency of each word,
// 3N/(2M) - 1 cycles, and the out_sof framing. `done` rises when all words
// have been checked; `checks` and `failures` count the comparisons.
module polar_stream_check #(
  parameter int unsigned N     = 32,
  parameter int unsigned M     = 8,
  parameter int unsigned WORDS = 6
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_back_to_back,
  output int   n_after_gap
);
  localparam int unsigned F   = N / M;
  localparam int unsigned LAT = 3 * N / (2 * M) - 1;

  logic         in_valid;
  logic [M-1:0] in_data;
  logic         out_valid, out_sof;
  logic [M-1:0] out_data;

  polar_encoder #(.N(N), .M(M)) dut (
    .clk, .rst_n, .in_valid, .in_data, .out_valid, .out_sof, .out_data
  );

  function automatic logic [N-1:0] ref_encode(logic [N-1:0] u);
    logic [N-1:0] v;
    v = u;
    for (int b = 0; b < $clog2(N); b++)
      for (int k = 0; k < N; k++)
        if (((k >> b) & 1) == 0) v[k] ^= v[k + (1 << b)];
    return v;
  endfunction

  longint cycle;
  logic [N-1:0] exp_q[$];
  longint       t0_q[$];
  int           words_out;
  int           out_vec;
  logic [N-1:0] cur;

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    n_back_to_back = 0; n_after_gap = 0;
    words_out = 0; out_vec = 0; cycle = 0;
  end

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      if (out_vec == 0) begin
        longint t0;
        checks += 2;
        if (!out_sof) begin failures++; $display("FAIL N=%0d M=%0d: out_sof missing", N, M); end
        if (exp_q.size() == 0) begin
          failures++;
          $display("FAIL N=%0d M=%0d: unexpected output word", N, M);
          cur = '0;
        end else begin
          cur = exp_q.pop_front();
          t0 = t0_q.pop_front();
          if (cycle - t0 != longint'(LAT)) begin
            failures++;
            $display("FAIL N=%0d M=%0d: latency %0d, expected %0d", N, M, cycle - t0, LAT);
          end
        end
      end else if (out_sof) begin
        checks++;
        failures++;
        $display("FAIL N=%0d M=%0d: out_sof inside a word", N, M);
      end
      checks++;
      if (out_data !== cur[M*out_vec +: M]) begin
        failures++;
        $display("FAIL N=%0d M=%0d: word %0d vector %0d got %h expected %h",
                 N, M, words_out, out_vec, out_data, cur[M*out_vec +: M]);
      end
      if (out_vec == int'(F) - 1) begin
        out_vec <= 0;
        words_out <= words_out + 1;
      end else begin
        out_vec <= out_vec + 1;
      end
    end
  end

  initial begin
    logic [N-1:0] u;
    in_valid = 1'b0;
    in_data  = '0;
    @(posedge clk iff rst_n);
    for (int w = 0; w < int'(WORDS); w++) begin
      int gap;
      if (w == 0)      u = N'(1) << (N - 1);
      else if (w == 1) u = '1;
      else for (int b = 0; b < int'(N); b += 32) u[b +: 32] = $urandom;
      gap = (w % 3 == 2) ? 1 + (w % 4) : 0;
      exp_q.push_back(ref_encode(u));
      for (int i = 0; i < int'(F); i++) begin
        @(negedge clk);
        if (i == 0) begin
          t0_q.push_back(cycle);
          if (w > 0 && in_valid) n_back_to_back++; else n_after_gap++;
        end
        in_valid = 1'b1;
        for (int m = 0; m < int'(M) / 2; m++) begin
          in_data[2*m]   = u[(M/2)*i + m];
          in_data[2*m+1] = u[(M/2)*i + m + N/2];
        end
      end
      for (int g = 0; g < gap; g++) begin
        @(negedge clk);
        in_valid = 1'b0;
        in_data  = M'($urandom);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + F + 2) @(negedge clk);
    checks++;
    if (words_out != int'(WORDS) || exp_q.size() != 0) begin
      failures++;
      $display("FAIL N=%0d M=%0d: %0d words out of %0d", N, M, words_out, WORDS);
    end
    $display("N=%0d M=%0d: %0d words, latency %0d cycles, back_to_back=%0d after_gap=%0d",
             N, M, words_out, LAT, n_back_to_back, n_after_gap);
    done = 1'b1;
  end
endmodule
