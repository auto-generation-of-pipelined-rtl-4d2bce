// sk_switch: the delay-switch-delay commutator S_K of the polar encoder.
//
// The lower input passes through K/2 one-bit delay elements, then both
// streams enter a 2x2 switch, and the upper switch output passes through
// another K/2 delay elements. A log2(K)-bit counter steers the switch: when
// its most significant bit is 0 the switch passes straight through, when it is
// 1 it crosses. Over a codeword this exchanges the lane bit of the pair with
// bit log2(K/2) of the vector's time index: with upper stream a_0, a_1, ... and
// lower stream b_0, b_1, ..., and K = 4, the upper output carries
// a0 a1 b0 b1 and the lower output a2 a3 b2 b3. The exchange costs K/2 cycles
// of latency and K delay elements.
//
// Interface: `sof` is high in the cycle in which the first vector of a
// codeword is at the upper input u0; it realigns the counter to zero so that
// codewords may follow each other back to back or with idle gaps of any
// length. Each codeword must then occupy consecutive cycles, and its length
// in cycles must be a multiple of K. The counter restarts at zero on a
// synchronous active-low reset; the delay elements are not reset, because
// what they hold before the first codeword is never marked valid.
//
// The structure (K/2 delays, switch, K/2 delays, counter MSB as the control)
// follows the paper. The `sof` realignment and the reset are this design's
// own choice, as the paper does not say how the counter is started.
module sk_switch #(
  parameter int unsigned K = 4  // switch span, a power of two >= 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sof,  // first vector of a codeword is at u0 this cycle
  input  logic u0,   // upper input
  input  logic u1,   // lower input, delayed K/2 cycles before the switch
  output logic x0,   // upper output, delayed K/2 cycles after the switch
  output logic x1    // lower output
);

  localparam int unsigned D  = K / 2;
  localparam int unsigned CW = $clog2(K);

  logic [CW-1:0] cnt_q;    // position of the current cycle within a K-cycle period
  logic [CW-1:0] t_now;
  logic          sel_cross;
  logic          lo_dly [D];  // K/2 delay elements on the lower input
  logic          hi_dly [D];  // K/2 delay elements on the upper output
  logic          sw_hi;

  assign t_now = sof ? '0 : cnt_q;
  assign sel_cross = t_now[CW-1];

  always_ff @(posedge clk) begin
    if (!rst_n) cnt_q <= '0;
    else        cnt_q <= t_now + 1'b1;
  end

  always_comb begin
    sw_hi = sel_cross ? lo_dly[D-1] : u0;
    x1    = sel_cross ? u0 : lo_dly[D-1];
    x0    = hi_dly[D-1];
  end

  always_ff @(posedge clk) begin
    lo_dly[0] <= u1;
    hi_dly[0] <= sw_hi;
    for (int i = 1; i < D; i++) begin
      lo_dly[i] <= lo_dly[i-1];
      hi_dly[i] <= hi_dly[i-1];
    end
  end

endmodule
