// tb_polar_encoder: end-to-end test of the polar encoder at its default size
// (N = 32, M = 8).
//
// The testbench forms source words, splits each into N/M input vectors in the
// encoder's input order (lanes 2m, 2m+1 of vector i carry u[(M/2)i+m] and
// u[(M/2)i+m+N/2]) and checks every output vector against y = u F^{(x)n},
// computed here bit by bit from its definition: y[j] is the XOR of all u[k]
// whose index k has every bit of j set. It also checks that the first output
// vector of each word leaves exactly 3N/(2M) - 1 cycles after its first input
// vector and that out_sof/out_valid frame each word as N/M consecutive
// vectors.
//
// Stimulus: all N unit vectors (each output word is then one row of the
// generator matrix), all-zero and all-one words, and random words; words are
// sent back to back, after idle gaps of 1 .. 7 cycles, and once across a
// reset. Each of these situations is counted and must occur.
module tb_polar_encoder;
  localparam int unsigned N   = 32;
  localparam int unsigned M   = 8;
  localparam int unsigned F   = N / M;
  localparam int unsigned LAT = 3 * N / (2 * M) - 1;

  logic         clk = 1'b0;
  logic         rst_n;
  logic         in_valid;
  logic [M-1:0] in_data;
  logic         out_valid;
  logic         out_sof;
  logic [M-1:0] out_data;

  polar_encoder dut (
    .clk, .rst_n, .in_valid, .in_data, .out_valid, .out_sof, .out_data
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Reference transform y = u F^{(x)n}.
  function automatic logic [N-1:0] ref_encode(logic [N-1:0] u);
    logic [N-1:0] y = '0;
    for (int j = 0; j < N; j++)
      for (int k = 0; k < N; k++)
        if ((k & j) == j) y[j] ^= u[k];
    return y;
  endfunction

  logic [N-1:0] exp_q[$];      // expected output words, in order
  longint       sof_cyc_q[$];  // cycle of each word's first input vector

  // counts of the situations the test must reach
  int n_back_to_back = 0;
  int n_after_gap    = 0;
  int n_after_reset  = 0;
  int n_words_out    = 0;

  // --------------------------------------------------------------- driver
  task automatic send_word(input logic [N-1:0] u, input int gap_after);
    for (int i = 0; i < F; i++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int m = 0; m < M / 2; m++) begin
        in_data[2*m]   = u[(M/2)*i + m];
        in_data[2*m+1] = u[(M/2)*i + m + N/2];
      end
    end
    for (int g = 0; g < gap_after; g++) begin
      @(negedge clk);
      in_valid = 1'b0;
      in_data  = M'($urandom);
    end
  endtask

  // record the time of every word's first vector as it is sampled
  int in_vec = 0;
  logic prev_word_end = 1'b0;  // previous cycle ended a word
  logic after_reset   = 1'b1;
  always @(posedge clk) begin
    if (!rst_n) begin
      in_vec <= 0; after_reset <= 1'b1; prev_word_end <= 1'b0;
    end else if (in_valid) begin
      if (in_vec == 0) begin
        sof_cyc_q.push_back(cycle);
        if (after_reset) n_after_reset++;
        else if (prev_word_end) n_back_to_back++;
        else n_after_gap++;
        after_reset <= 1'b0;
      end
      in_vec        <= (in_vec + 1) % F;
      prev_word_end <= (in_vec == F - 1);
    end else begin
      prev_word_end <= 1'b0;
    end
  end

  // -------------------------------------------------------------- checker
  int out_vec = 0;
  logic [N-1:0] cur_exp;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      if (out_vec == 0) begin
        checks++;
        if (!out_sof) begin
          failures++;
          $display("FAIL: out_sof missing at start of word %0d", n_words_out);
        end
        if (exp_q.size() == 0 || sof_cyc_q.size() == 0) begin
          failures++;
          $display("FAIL: output word without input word");
          cur_exp = '0;
        end else begin
          longint t0;
          cur_exp = exp_q.pop_front();
          t0 = sof_cyc_q.pop_front();
          checks++;
          if (cycle - t0 != longint'(LAT)) begin
            failures++;
            $display("FAIL: latency %0d, expected %0d", cycle - t0, LAT);
          end
        end
      end else begin
        checks++;
        if (out_sof) begin
          failures++;
          $display("FAIL: out_sof inside word at vector %0d", out_vec);
        end
      end
      for (int j = 0; j < M; j++) begin
        checks++;
        if (out_data[j] !== cur_exp[M*out_vec + j]) begin
          failures++;
          $display("FAIL: word %0d vector %0d lane %0d: got %0b expected %0b",
                   n_words_out, out_vec, j, out_data[j], cur_exp[M*out_vec + j]);
        end
      end
      if (out_vec == F - 1) begin
        out_vec <= 0;
        n_words_out++;
      end else begin
        out_vec <= out_vec + 1;
      end
    end
  end

  task automatic queue_and_send(input logic [N-1:0] u, input int gap_after);
    exp_q.push_back(ref_encode(u));
    send_word(u, gap_after);
  endtask

  // ------------------------------------------------------------- stimulus
  int n_words_in = 0;
  initial begin
    logic [N-1:0] u;
    rst_n    = 1'b0;
    in_valid = 1'b0;
    in_data  = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // unit vectors, back to back
    for (int k = 0; k < N; k++) begin
      queue_and_send(N'(1) << k, 0);
      n_words_in++;
    end
    queue_and_send('0, 2);
    queue_and_send('1, 0);
    n_words_in += 2;
    // random words with random gaps
    for (int w = 0; w < 60; w++) begin
      for (int b = 0; b < N; b += 32) u[b +: 32] = $urandom;
      queue_and_send(u, ($urandom % 3 == 0) ? int'($urandom % 8) : 0);
      n_words_in++;
    end
    // let the pipeline drain, then reset and send more
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + F + 2) @(negedge clk);
    rst_n = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 10; w++) begin
      for (int b = 0; b < N; b += 32) u[b +: 32] = $urandom;
      queue_and_send(u, w % 2);
      n_words_in++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + F + 4) @(negedge clk);

    checks++;
    if (n_words_out != n_words_in || exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d words in, %0d words out", n_words_in, n_words_out);
    end
    checks++;
    if (n_back_to_back == 0) begin failures++; $display("FAIL: no back-to-back words"); end
    checks++;
    if (n_after_gap == 0) begin failures++; $display("FAIL: no word after an idle gap"); end
    checks++;
    if (n_after_reset < 2) begin failures++; $display("FAIL: no word after reset"); end
    $display("words=%0d back_to_back=%0d after_gap=%0d after_reset=%0d",
             n_words_out, n_back_to_back, n_after_gap, n_after_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
