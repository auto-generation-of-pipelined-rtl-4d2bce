// xp_column: I_{M/2} (x) XP, a column of M/2 XOR-and-pass butterflies.
//
// Lane pair (2j, 2j+1) feeds butterfly j: lane 2j becomes the XOR of the
// pair, lane 2j+1 passes unchanged. Because the columns in front of it have
// arranged the lanes so that each pair differs in exactly one bit of the
// codeword index, with the smaller index on the even lane, one xp_column
// performs one of the log2(N) stages of the polar transform on the M bits
// that are present in this cycle.
//
// Combinational; the frame control does not pass through it, the enclosing
// pipeline forwards it unchanged. The Kronecker replication is the paper's.
module xp_column #(
  parameter int unsigned M = 8  // lanes, even
) (
  input  logic [M-1:0] u,  // u[i] is lane i
  output logic [M-1:0] x
);

  for (genvar j = 0; j < M / 2; j++) begin : g_xp
    xp u_xp (
      .u0 (u[2*j]),
      .u1 (u[2*j+1]),
      .x0 (x[2*j]),
      .x1 (x[2*j+1])
    );
  end

endmodule
