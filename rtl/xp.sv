// xp: the XOR-and-pass butterfly of the polar transform.
//
// The upper output is the GF(2) sum of the two inputs and the lower input is
// passed on unchanged: x0 = u0 ^ u1, x1 = u1. This is the 2x2 kernel
// F = [1 0; 1 1] applied to the row vector (u0, u1), the polar counterpart of
// a radix-2 FFT butterfly with all twiddle factors equal to one.
//
// Purely combinational, no clock; the XOR gate is the only logic. The function
// and the fixed two inputs follow the paper directly.
module xp (
  input  logic u0,  // upper input
  input  logic u1,  // lower input
  output logic x0,  // u0 xor u1
  output logic x1   // u1
);

  always_comb begin
    x0 = u0 ^ u1;
    x1 = u1;
  end

endmodule
