// csa32: carry-save adder (3-to-2 compressor) over W-bit vectors.
//
// Bit by bit, S = X ^ Y ^ Z and C = majority(X, Y, Z); the carry vector is
// returned shifted left by one, truncated to W bits, so s + c equals
// x + y + z modulo 2^W. Purely combinational. Used as the last level of a
// compressor tree that must end in two vectors.
module csa32 #(
  parameter int W = 64
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] z,
  output logic [W-1:0] s,
  output logic [W-1:0] c
);

  logic [W-1:0] maj;

  assign s   = x ^ y ^ z;
  assign maj = (x & y) | (y & z) | (x & z);
  assign c   = {maj[W-2:0], 1'b0};

endmodule
