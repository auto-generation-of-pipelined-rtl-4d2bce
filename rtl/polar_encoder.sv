// polar_encoder: M-parallel pipelined encoder for a polar code of length N.
//
// Every cycle the encoder takes M source bits and, after a fixed latency,
// delivers M code bits; a codeword of N bits occupies N/M consecutive cycles
// at each end, and codewords may follow each other back to back.
//
// Input order. Vector i (i = 0 .. N/M-1) of a source word u holds, on lanes
// 2m and 2m+1 (m = 0 .. M/2-1), the bits u[(M/2)i + m] and u[(M/2)i + m + N/2].
// Output order. Output vector i holds, on lane j, bit y[M i + j] of
// y = u F^{(x)n}, n = log2 N, F = [1 0; 1 1]. y is the codeword
// x = u B_N F^{(x)n} in bit-reversed order, since B_N commutes with F^{(x)n}.
//
// Structure. The datapath is the serial connection of 2 log2(N) + 1 columns
// given by the general formula F(N,M):
//   XP  P4  { W_{N/(2^i M)}  XP }  (i = 0 .. log2(N)-3)  P4  S_{N/M}  XP
// where XP = I_{M/2} (x) XP, P4 = I_{M/4} (x) P_4 and each variable column W
// becomes the switch column I_{M/2} (x) S_K (K = N/(2^i M)) when its subscript
// is 2 or more, and the permutation column I_k (x) P_{M/k} (k = 2^i M/N)
// otherwise. Each XP column is one butterfly stage of the transform; the P and
// S columns move the next index bit to be combined onto lane-address bit 0
// (the P columns by rewiring lanes, the S columns by exchanging a lane bit
// with a time bit through delay elements). For N = 32, M = 8 the columns are
// XP P4 S4 XP S2 XP P8 XP P4 S4 XP.
//
// Cost and timing. log2(N) M/2 XOR gates, 3N/2 - M one-bit delay elements in
// the switches, latency 3N/(2M) - 1 cycles from the first input vector of a
// codeword to its first output vector. XP and P columns are combinational, so
// the path from input to output may cross several XORs between registers.
//
// Interface (own choice, the formula fixes only the datapath): `in_valid`
// marks input vectors; the encoder counts them in groups of N/M, so once a
// codeword has started its vectors must arrive on consecutive cycles
// (checked by an assertion). `out_valid` and `out_sof` mark the output vectors
// and the first vector of each codeword. The input-vector counter, the
// switch counters and the valid/sof delay lines have a synchronous
// active-low reset; the data delay elements are not reset.
module polar_encoder
  import polar_pkg::*;
#(
  parameter int unsigned N = 32,  // code length, power of two
  parameter int unsigned M = 8    // parallelism, power of two, 4 <= M <= N/2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [M-1:0] in_data,   // in_data[l] is lane l
  output logic         out_valid,
  output logic         out_sof,
  output logic [M-1:0] out_data
);

  localparam int unsigned LOGN  = $clog2(N);
  localparam int unsigned F     = N / M;          // vectors per codeword
  localparam int unsigned FW    = (F > 1) ? $clog2(F) : 1;
  localparam int unsigned NCOL  = 2 * LOGN + 1;   // columns of f_{N,M}

  if (!is_pow2(N) || !is_pow2(M) || M < 4 || M > N / 2) begin : g_bad_params
    $error("polar_encoder: N and M must be powers of two with 4 <= M <= N/2");
  end

  // ---------------------------------------------------------------------------
  // Frame start: count input vectors modulo N/M.
  // ---------------------------------------------------------------------------
  logic [FW-1:0] vec_cnt_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vec_cnt_q <= '0;
    end else if (in_valid) begin
      vec_cnt_q <= (vec_cnt_q == FW'(F - 1)) ? '0 : vec_cnt_q + 1'b1;
    end
  end

  // Column boundaries: d[c] / c_ctrl[c] enter column c.
  logic [M-1:0] d      [NCOL+1];
  frame_ctrl_t  c_ctrl [NCOL+1];

  assign d[0]            = in_data;
  assign c_ctrl[0].valid = in_valid;
  assign c_ctrl[0].sof   = in_valid && (vec_cnt_q == '0);

  // ---------------------------------------------------------------------------
  // Column 0: I_{M/2} (x) XP (index bit n-1, lanes 2m / 2m+1 hold u_k, u_{k+N/2})
  // Column 1: I_{M/4} (x) P_4
  // ---------------------------------------------------------------------------
  xp_column #(.M(M)) u_col0_xp (.u(d[0]), .x(d[1]));
  assign c_ctrl[1] = c_ctrl[0];

  perm_column #(.M(M), .K(M / 4)) u_col1_p4 (.u(d[1]), .x(d[2]));
  assign c_ctrl[2] = c_ctrl[1];

  // ---------------------------------------------------------------------------
  // Columns 2 .. 2n-3: { (I (x) W_{N/(2^i M)}) (I_{M/2} (x) XP) }, i = 0 .. n-3
  // ---------------------------------------------------------------------------
  for (genvar i = 0; i <= LOGN - 3; i++) begin : g_mid
    localparam int unsigned CW = 2 + 2 * i;  // the W column
    if (w_is_switch(N, M, i)) begin : g_s
      switch_column #(.M(M), .K(w_switch_k(N, M, i))) u_sw (
        .clk   (clk),
        .rst_n (rst_n),
        .u     (d[CW]),
        .c_in  (c_ctrl[CW]),
        .x     (d[CW+1]),
        .c_out (c_ctrl[CW+1])
      );
    end else begin : g_p
      perm_column #(.M(M), .K(w_perm_copies(N, M, i))) u_perm (
        .u (d[CW]),
        .x (d[CW+1])
      );
      assign c_ctrl[CW+1] = c_ctrl[CW];
    end
    xp_column #(.M(M)) u_xp (.u(d[CW+1]), .x(d[CW+2]));
    assign c_ctrl[CW+2] = c_ctrl[CW+1];
  end

  // ---------------------------------------------------------------------------
  // Last three columns: I_{M/4} (x) P_4, I_{M/2} (x) S_{N/M}, I_{M/2} (x) XP
  // ---------------------------------------------------------------------------
  perm_column #(.M(M), .K(M / 4)) u_last_p4 (.u(d[NCOL-3]), .x(d[NCOL-2]));
  assign c_ctrl[NCOL-2] = c_ctrl[NCOL-3];

  switch_column #(.M(M), .K(F)) u_last_sw (
    .clk   (clk),
    .rst_n (rst_n),
    .u     (d[NCOL-2]),
    .c_in  (c_ctrl[NCOL-2]),
    .x     (d[NCOL-1]),
    .c_out (c_ctrl[NCOL-1])
  );

  xp_column #(.M(M)) u_last_xp (.u(d[NCOL-1]), .x(d[NCOL]));
  assign c_ctrl[NCOL] = c_ctrl[NCOL-1];

  assign out_data  = d[NCOL];
  assign out_valid = c_ctrl[NCOL].valid;
  assign out_sof   = c_ctrl[NCOL].valid && c_ctrl[NCOL].sof;

  // A codeword, once started, must arrive on consecutive cycles.
  a_frame_contiguous: assert property (
    @(posedge clk) disable iff (!rst_n) (vec_cnt_q != '0) |-> in_valid
  ) else $error("polar_encoder: input codeword interrupted");

endmodule
