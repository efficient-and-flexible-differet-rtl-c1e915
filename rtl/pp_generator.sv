// pp_generator: trivial array multiplication of one k-bit digit a_i of the
// multiplier A by the multiplicand B, producing the k partial products of
// Temp = (a_i * B) << kt.
//
// Partial product j is B << (k*t + j) when bit j of a_i is set and zero
// otherwise, so each output bit is one AND gate (one LUT on an FPGA) and
// the sum of the k vectors is a_i * B * 2^(kt). The left shift by kt is
// the DRMMM "different radix" move: the multiplier digit enters t digits
// above the quotient digit, which gives the quotient pipeline t iterations
// to finish. Partial products are returned separately so they can be fed to
// the compressor without any addition. Purely combinational; W must be at
// least NB + k(t+1).
module pp_generator #(
  parameter int W  = 1105,
  parameter int NB = 1024,
  parameter int K  = 16,
  parameter int T  = 4
) (
  input  logic [K-1:0]  a_digit,
  input  logic [NB-1:0] b,
  output logic [W-1:0]  pp [K]
);

  for (genvar j = 0; j < K; j++) begin : g_pp
    assign pp[j] = a_digit[j] ? (W'(b) << (K * T + j)) : '0;
  end

endmodule
