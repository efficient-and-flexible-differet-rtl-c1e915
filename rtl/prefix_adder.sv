// prefix_adder: W-bit Kogge-Stone parallel prefix adder with carry in.
//
// Generate/propagate pairs are formed per bit (the carry-in is folded into
// the generate signal of bit 0) and combined in ceil(log2 W) prefix levels,
// level d joining each position with the one 2^d below it. Bit i of the sum
// is p_i XOR the group carry of bits below i. Its depth grows with log2 W
// instead of W, which is why it is used for the wide final summation and
// final reduction, outside the iteration loop. Purely combinational.
module prefix_adder #(
  parameter int W = 1026
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);

  localparam int LV = $clog2(W);

  logic [W-1:0] p0;
  logic [W-1:0] g, p;

  always_comb begin
    p0   = a ^ b;
    g    = a & b;
    g[0] = g[0] | (p0[0] & cin);
    p    = p0;
    for (int d = 0; d < LV; d++) begin
      g = g | (p & (g << (1 << d)));
      p = p & (p << (1 << d));
    end
  end

  // g[i] is now the carry out of bits i..0 (carry-in included)
  assign sum  = p0 ^ {g[W-2:0], cin};
  assign cout = g[W-1];

endmodule
