// switch_column: I_{M/2} (x) S_K, a column of M/2 commutators on lane pairs.
//
// Lane pair (2j, 2j+1) feeds switch j, lane 2j as its upper input. All
// switches see the same frame-start marker and therefore switch in unison:
// the column exchanges lane-address bit 0 with bit log2(K/2) of the time
// index of every vector in a codeword. The frame control (valid, sof) is
// delayed by the column's latency of K/2 cycles, so that it stays aligned with
// the data that leaves the column.
//
// Each switch keeps its own log2(K)-bit counter, as the paper describes the
// switch; sharing one counter per column would be an equivalent saving. The
// control delay line is this design's addition and is reset to "no data".
module switch_column
  import polar_pkg::*;
#(
  parameter int unsigned M = 8,  // lanes, even
  parameter int unsigned K = 4   // switch span, power of two >= 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [M-1:0]  u,
  input  frame_ctrl_t   c_in,   // control aligned with u
  output logic [M-1:0]  x,
  output frame_ctrl_t   c_out   // control aligned with x (K/2 cycles later)
);

  localparam int unsigned D = K / 2;

  frame_ctrl_t c_dly [D];

  for (genvar j = 0; j < M / 2; j++) begin : g_sw
    sk_switch #(.K(K)) u_sw (
      .clk   (clk),
      .rst_n (rst_n),
      .sof   (c_in.valid & c_in.sof),
      .u0    (u[2*j]),
      .u1    (u[2*j+1]),
      .x0    (x[2*j]),
      .x1    (x[2*j+1])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < D; i++) c_dly[i] <= '0;
    end else begin
      c_dly[0] <= c_in;
      for (int i = 1; i < D; i++) c_dly[i] <= c_dly[i-1];
    end
  end

  assign c_out = c_dly[D-1];

endmodule
