// perm_column: I_K (x) P_{M/K}, K copies of the permutation P_{M/K}.
//
// The M lanes are cut into K consecutive groups of M/K lanes and each group is
// permuted by its own perm_p. Within each group this exchanges the most and
// least significant bits of the lane address; the group number is untouched.
// The encoder uses it with K = M/4 (groups of four, I_{M/4} (x) P_4) at both
// ends of the middle section, and with K = 1, 2, ... in place of the variable
// column W when W's subscript is 1 or less.
//
// Wires only, combinational. The replication is the paper's.
module perm_column #(
  parameter int unsigned M = 8,  // lanes
  parameter int unsigned K = 2   // copies; M/K must be a power of two >= 4
) (
  input  logic [M-1:0] u,
  output logic [M-1:0] x
);

  localparam int unsigned G = M / K;  // lanes per copy

  for (genvar g = 0; g < K; g++) begin : g_perm
    perm_p #(.N(G)) u_perm (
      .u (u[g*G +: G]),
      .x (x[g*G +: G])
    );
  end

endmodule
