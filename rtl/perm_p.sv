// perm_p: the fixed wire permutation P_N on an N-lane vector.
//
// Even lanes below N/2 and odd lanes above N/2 keep their place; every odd
// lane i below N/2 trades places with lane i - 1 + N/2. In terms of the lane
// address this exchanges its most and least significant bits. For N = 4 it
// swaps lanes 1 and 2; for N = 8 it swaps 1 with 4 and 3 with 6. P_N is two
// overlapping copies of P_{N/2}.
//
// Wires only, no clock and no gates. The assignment loops below are the
// paper's permutation algorithm written out as it is given.
module perm_p #(
  parameter int unsigned N = 8  // number of lanes, a power of two >= 4
) (
  input  logic [N-1:0] u,  // u[i] is lane i
  output logic [N-1:0] x
);

  always_comb begin
    x = '0;
    for (int i = 0; i < N / 2; i += 2) x[i] = u[i];
    for (int i = N - 1; i > N / 2; i -= 2) x[i] = u[i];
    for (int i = 1; i < N / 2; i += 2) begin
      x[i]           = u[i - 1 + N / 2];
      x[i - 1 + N/2] = u[i];
    end
  end

endmodule
